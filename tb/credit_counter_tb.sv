// credit_counter_tb: random issue (only with credit) and dequeue (only for
// issued bursts) against a model; checks count, has_credit, and that the
// counter reaches both zero (stall) and its initial value.
module credit_counter_tb;
  localparam int INIT = 21;
  logic clk = 0, rst = 1, issue = 0, dequeue = 0, has_credit;
  logic [7:0] count;
  int model = INIT, checks = 0, failures = 0, zeros = 0;

  credit_counter #(.INIT(INIT), .CNT_W(8)) dut (.*);
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
    check(count == INIT, "initial credits");
    for (int i = 0; i < 3000; i++) begin
      int phase;
      phase = (i / 300) % 2;   // alternate draining and refilling
      issue   = has_credit && ($urandom_range(3) < (phase ? 1 : 3));
      dequeue = (model - int'(issue) < INIT) && ($urandom_range(3) < (phase ? 3 : 1));
      @(negedge clk);
      model = model - int'(issue) + int'(dequeue);
      check(int'(count) == model, "count");
      check(has_credit == (model != 0), "has_credit");
      if (model == 0) zeros++;
    end
    check(zeros > 0, "ran out of credits at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
