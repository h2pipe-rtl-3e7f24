// weight_addr_gen_tb: steps the generator with random advance pulses and checks
// the burst addresses base + i*BURST_LEN*32, the wrap back to base after
// n_bursts and the wrap flag.
module weight_addr_gen_tb;
  import h2pipe_pkg::*;
  logic clk = 0, rst = 1, advance = 0, wrap;
  hbm_addr_t base = 28'h12340, addr;
  logic [15:0] n_bursts = 5;
  int checks = 0, failures = 0, idx = 0;

  weight_addr_gen #(.BURST_LEN(8)) dut (.*);
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
    for (int i = 0; i < 200; i++) begin
      check(addr == base + hbm_addr_t'(idx * 256), $sformatf("addr at %0d", idx));
      check(wrap == (idx == 4), "wrap flag");
      advance = ($urandom_range(1) == 1);
      @(negedge clk);
      if (advance) idx = (idx + 1) % 5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
