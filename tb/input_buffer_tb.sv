// input_buffer_tb: writes random 256-bit words at random addresses over the
// whole 9408-word range, including the first and last, and reads them back with
// the one-cycle read latency.
module input_buffer_tb;
  import h2pipe_pkg::*;
  localparam int D = INBUF_WORDS;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  hbm_word_t wr_data = '0, rd_data;
  hbm_word_t model[int];
  int addrs[$];
  int checks = 0, failures = 0;

  input_buffer dut (.*);
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
    addrs.push_back(0); addrs.push_back(D - 1);
    for (int i = 0; i < 300; i++) addrs.push_back($urandom_range(D - 1));
    foreach (addrs[i]) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 14'(addrs[i]); wr_data = {8{$urandom}};
      model[addrs[i]] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    foreach (addrs[i]) begin
      rd_en = 1; rd_addr = 14'(addrs[i]);
      @(negedge clk);
      check(rd_data == model[addrs[i]], $sformatf("word %0d", addrs[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
