// weight_serializer_tb: feeds 240-bit words from a model FIFO and checks the
// 80-bit output order (low vector first) and the rate: with words always
// available, the output is gap-free (3 vectors per word, one per cycle).
module weight_serializer_tb;
  import h2pipe_pkg::*;
  logic clk = 0, rst = 1;
  logic word_valid = 0, word_pop, out_valid;
  logic [239:0] word = '0;
  wvec_t out_data;
  logic [239:0] q[$];
  wvec_t exp_q[$];
  int checks = 0, failures = 0, gaps = 0, outs = 0;
  bit counting = 0;

  weight_serializer dut (.*);
  always #5 clk = ~clk;
  logic [239:0] newq[$];
  bit pend = 0;

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

  // all driving and sampling happens at the falling edge
  always @(negedge clk) begin
    if (pend) void'(q.pop_front());
    while (newq.size() > 0) q.push_back(newq.pop_front());
    word_valid = (q.size() > 0);
    word = word_valid ? q[0] : '0;
    #1;
    pend = word_pop;
    if (!rst) begin
      if (out_valid) begin
        check(exp_q.size() > 0 && out_data == exp_q[0], "vector order");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        outs++;
      end else if (counting) gaps++;
    end
  end

  task automatic add_word();
    logic [239:0] w = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, 16'($urandom)};
    newq.push_back(w);
    for (int i = 0; i < 3; i++) exp_q.push_back(w[80*i +: 80]);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    // back-to-back: 20 words ready
    for (int i = 0; i < 20; i++) add_word();
    wait (out_valid); @(negedge clk);
    counting = 1;
    repeat (58) @(negedge clk);
    counting = 0;
    check(gaps == 0, $sformatf("gap-free stream (gaps=%0d)", gaps));
    repeat (10) @(negedge clk);
    // sparse words
    for (int i = 0; i < 10; i++) begin add_word(); repeat ($urandom_range(8)) @(negedge clk); end
    repeat (40) @(negedge clk);
    check(outs == 90, $sformatf("all vectors out (%0d)", outs));
    check(exp_q.size() == 0, "nothing left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
