// weight_prefetch_tb: three layers with different bases and burst counts share
// the AR channel; ar_ready is random. Checks per layer: address sequence, ARLEN,
// that outstanding bursts never exceed the credits (dequeue is returned by a
// model consumer after a delay), that requests stop when credits run out, that
// AR holds steady while waiting, and that all three layers are interleaved
// (round robin: no layer is served twice while another with credit waits).
module weight_prefetch_tb;
  import h2pipe_pkg::*;
  localparam int N = 3, BL = 8, CR = 21;
  logic clk = 0, rst = 1, ar_valid, ar_ready = 0;
  axi_ar_t ar;
  logic [N-1:0] cfg_enable = '1, dequeue = '0, credit_stall;
  hbm_addr_t [N-1:0] cfg_base;
  logic [N-1:0][15:0] cfg_bursts;
  int checks = 0, failures = 0;
  int outst[N], idx[N], issued[N], stalls = 0;
  int last_id = -1, same_run = 0;

  weight_prefetch #(.N_LAYERS(N), .BURST_LEN(BL)) dut (.*);
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
    cfg_base[0] = 28'h0; cfg_base[1] = 28'h10000; cfg_base[2] = 28'h20000;
    cfg_bursts[0] = 1; cfg_bursts[1] = 3; cfg_bursts[2] = 7;
    for (int l = 0; l < N; l++) begin outst[l] = 0; idx[l] = 0; issued[l] = 0; end
  end

  always @(negedge clk) begin
    if (!rst) begin
      ar_ready = ($urandom_range(2) != 0);
      // request accepted at the coming rising edge
      if (ar_valid && ar_ready) begin
        int l;
        l = int'(ar.id);
        check(l < N, $sformatf("valid id %0d ar=%h t=%0t", l, ar, $time));
        check(ar.len == BL - 1, "ARLEN");
        check(ar.addr == cfg_base[l] + hbm_addr_t'(idx[l] * BL * 32), $sformatf("layer %0d address %h idx %0d t=%0t", l, ar.addr, idx[l], $time));
        idx[l] = (idx[l] + 1) % int'(cfg_bursts[l]);
        outst[l]++; issued[l]++;
        check(outst[l] <= CR, "within credits");
      end
      for (int l = 0; l < N; l++) if (credit_stall[l]) stalls++;
      // consumer returns credits slowly for the first half, fast after
      dequeue = '0;
      for (int l = 0; l < N; l++)
        if (outst[l] > 0 && $urandom_range(($time < 100000) ? 60 : 2) == 0) begin
          dequeue[l] = 1'b1; outst[l]--;
        end
    end
  end

  // AR must hold while not accepted
  axi_ar_t prev_ar;
  bit prev_wait = 0;
  always @(negedge clk) begin
    #1;
    if (!rst) begin
      if (prev_wait) check(ar_valid && ar == prev_ar, "AR held while waiting");
      prev_wait = ar_valid && !ar_ready;
      prev_ar = ar;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    repeat (30000) @(negedge clk);
    for (int l = 0; l < N; l++) check(issued[l] > 100, $sformatf("layer %0d served (%0d)", l, issued[l]));
    check(issued[0] - issued[2] < 30 && issued[2] - issued[0] < 30, "fair interleaving");
    check(stalls > 0, "credit stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
