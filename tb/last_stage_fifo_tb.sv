// last_stage_fifo_tb: fills the 512 x 80 FIFO to the brim, checks order, count,
// almost_empty around its threshold, show-ahead head, simultaneous push/pop at
// full depth, and that the overflow flag stays low in legal use.
module last_stage_fifo_tb;
  import h2pipe_pkg::*;
  localparam int D = 512;
  logic clk = 0, rst = 1, wr_en = 0, rd_en = 0;
  wvec_t wr_data = '0, rd_data;
  logic empty, almost_empty, overflow;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  wvec_t model[$];

  last_stage_fifo #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    check(empty && almost_empty && count == 0, "empty after reset");
    for (int i = 0; i < D; i++) begin
      wvec_t v;
      v = {$urandom, $urandom, 16'($urandom)};
      wr_en = 1; wr_data = v; model.push_back(v);
      @(negedge clk);
      check(count == i + 1, "count while filling");
      check(almost_empty == (i + 1 <= 2), $sformatf("almost_empty at %0d", i + 1));
      check(rd_data == model[0], "head stays first word");
    end
    // push and pop together when full
    begin
      wvec_t v;
      v = {$urandom, $urandom, 16'($urandom)};
      wr_en = 1; rd_en = 1; wr_data = v;
      @(negedge clk);
      void'(model.pop_front()); model.push_back(v);
      check(count == D && !overflow, "push+pop at full keeps count");
    end
    rd_en = 0; wr_en = 0;
    check(!overflow, "no overflow flagged");
    while (model.size() > 0) begin
      check(rd_data == model[0], "order");
      void'(model.pop_front());
      rd_en = 1; @(negedge clk); rd_en = 0;
    end
    check(empty && count == 0, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
