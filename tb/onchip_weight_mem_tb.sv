// onchip_weight_mem_tb: loads random vectors, overwrites some, and checks the
// combinational read of every address against a model.
module onchip_weight_mem_tb;
  import h2pipe_pkg::*;
  localparam int D = 24;
  logic clk = 0, wr_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  wvec_t wr_data = '0, rd_data;
  wvec_t model[D];
  int checks = 0, failures = 0;

  onchip_weight_mem #(.DEPTH(D)) dut (.*);
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
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < D; a++) begin
        if (pass == 0 || $urandom_range(1) == 1) begin
          @(negedge clk);
          wr_en = 1; wr_addr = 5'(a); wr_data = {$urandom, $urandom, 16'($urandom)};
          model[a] = wr_data;
          @(negedge clk); wr_en = 0;
        end
      end
      for (int a = 0; a < D; a++) begin
        rd_addr = 5'(a); #1;
        check(rd_data == model[a], $sformatf("read %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
