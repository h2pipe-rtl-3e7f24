// ai_tb_tb: checks the tensor block model's three dot products against a
// reference computed here, the ping-pong activation banks (loading the shadow
// bank does not disturb results from the active one) and the clock enable
// (freeze holds every register).
module ai_tb_tb;
  import h2pipe_pkg::*;
  logic clk = 0, rst = 1, clk_en = 1, act_load = 0, bank_swap = 0;
  logic [ACT_PER_TB*8-1:0] act_in = '0;
  wvec_t w_in = '0;
  logic [N_DOT-1:0][DOT_W-1:0] dot_out;
  int checks = 0, failures = 0;

  ai_tb dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DOT_W-1:0] ref_dot(logic [239:0] a, wvec_t w, int p);
    int s = 0;
    for (int i = 0; i < 10; i++) s += $signed(a[80*p + 8*i +: 8]) * $signed(w[8*i +: 8]);
    return DOT_W'(s);
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [239:0] actA, actB;
  initial begin
    for (int i = 0; i < 30; i++) begin actA[8*i +: 8] = 8'($urandom); actB[8*i +: 8] = 8'($urandom); end
    actA[7:0] = 8'h80; // most negative value
    repeat (2) @(posedge clk);
    rst <= 0;
    // load A into shadow, swap to make it active
    @(negedge clk); act_load = 1; act_in = actA;
    @(negedge clk); act_load = 0; bank_swap = 1;
    @(negedge clk); bank_swap = 0;
    // compute with A while loading B into the shadow bank
    for (int k = 0; k < 50; k++) begin
      wvec_t w;
      for (int i = 0; i < 10; i++) w[8*i +: 8] = 8'($urandom);
      if (k == 0) w = {10{8'h80}};
      w_in = w;
      act_load = (k == 10); act_in = actB;
      @(negedge clk);
      for (int p = 0; p < 3; p++) check(dot_out[p] == ref_dot(actA, w, p), $sformatf("bank A k=%0d p=%0d", k, p));
    end
    act_load = 0;
    bank_swap = 1; @(negedge clk); bank_swap = 0;
    for (int k = 0; k < 30; k++) begin
      wvec_t w;
      for (int i = 0; i < 10; i++) w[8*i +: 8] = 8'($urandom);
      w_in = w;
      @(negedge clk);
      for (int p = 0; p < 3; p++) check(dot_out[p] == ref_dot(actB, w, p), $sformatf("bank B k=%0d p=%0d", k, p));
    end
    // freeze: outputs hold, load and swap ignored
    begin
      logic [N_DOT-1:0][DOT_W-1:0] held;
      wvec_t w;
      held = dot_out;
      clk_en = 0; w_in = ~w_in; bank_swap = 1; act_load = 1; act_in = actA;
      repeat (5) @(negedge clk);
      check(dot_out == held, "freeze holds result");
      clk_en = 1; bank_swap = 0; act_load = 0;
      for (int i = 0; i < 10; i++) w[8*i +: 8] = 8'($urandom);
      w_in = w;
      @(negedge clk);
      for (int p = 0; p < 3; p++) check(dot_out[p] == ref_dot(actB, w, p), "bank unchanged by frozen swap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
