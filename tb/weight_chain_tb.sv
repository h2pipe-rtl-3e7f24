// weight_chain_tb: streams random weight vectors into a 3-group chain and pops
// them in lockstep whenever freeze is low. Checks that every group's FIFO head
// shows the same, expected vector at each pop, that freeze is high until all
// FIFOs hold more than the almost-empty level, that pops never see an empty FIFO
// and that freeze rises again when the stream stops (a starvation stall).
module weight_chain_tb;
  import h2pipe_pkg::*;
  localparam int G = 3;
  logic clk = 0, rst = 1, in_valid = 0, pop = 0;
  wvec_t in_data = '0;
  wvec_t [G-1:0] head;
  logic freeze, overflow;
  int checks = 0, failures = 0, freezes = 0;
  wvec_t sent[$];
  int n_sent = 0, n_popped = 0;

  weight_chain #(.N_GROUPS(G), .DEPTH(64)) dut (.*);
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

  // source: bursts of words with pauses, total 600
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    check(freeze, "frozen while empty");
    while (n_sent < 600) begin
      if ((n_sent / 40) % 2 == 0 || $urandom_range(3) == 0) begin
        wvec_t v;
      v = {$urandom, $urandom, 16'($urandom)};
        in_valid = (n_popped + 60 > n_sent); // respect the depth like credits would
        in_data = v;
        if (in_valid) begin sent.push_back(v); n_sent++; end
      end else in_valid = 0;
      @(negedge clk);
    end
    in_valid = 0;
  end

  // sink: pop when not frozen, check heads
  always @(negedge clk) begin
    if (!rst) begin
      pop = !freeze && ($urandom_range(4) != 0);
      if (freeze && n_popped > 0) freezes++;
      if (pop) begin
        for (int g = 0; g < G; g++) check(head[g] == sent[n_popped], $sformatf("group %0d head at %0d", g, n_popped));
        n_popped++;
      end
    end
  end

  initial begin
    wait (n_popped >= 598);
    repeat (20) @(negedge clk);
    check(freeze, "freeze when the stream stops");
    check(!overflow, "no overflow");
    check(freezes > 0, "freeze occurred during the run");
    $display("freeze cycles: %0d", freezes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
