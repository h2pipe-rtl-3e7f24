// burst_matching_fifo_tb: random pushes (only when not full) and pops against a
// queue model; checks head, full at DEPTH and empty, and that a whole burst
// written at full rate fits while nothing is read.
module burst_matching_fifo_tb;
  import h2pipe_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst = 1, wr_en = 0, rd_en = 0, full, empty;
  logic [239:0] wr_data = '0, rd_data;
  logic [239:0] model[$];
  int checks = 0, failures = 0;

  burst_matching_fifo #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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
    // a full burst at full rate
    for (int i = 0; i < D; i++) begin
      wr_en = 1; wr_data = {8{$urandom}}; model.push_back(wr_data);
      @(negedge clk);
    end
    wr_en = 0;
    check(full && model.size() == D, "full after one burst");
    for (int i = 0; i < 2000; i++) begin
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == D), "full flag");
      if (!empty) check(rd_data == model[0], "head");
      rd_en = !empty && ($urandom_range(2) == 0);
      wr_en = !full && ($urandom_range(2) == 0);
      wr_data = {8{$urandom}};
      @(negedge clk);
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
