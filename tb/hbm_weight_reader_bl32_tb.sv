// hbm_weight_reader_bl32_tb: the read-path test below, with 32-beat bursts (the
// burst length used when a network mixes on-chip and HBM layers; 5 credits per
// layer instead of 21). Otherwise as hbm_weight_reader_tb: one pseudo-channel
// read path serving three layers, with
// an HBM model that has random latency and occasional refresh stalls, and a
// slower HBM-side clock than the core clock. Each layer's consumer takes vectors
// at its own random rate, storing the rest as a last-stage FIFO would, and
// returns a dequeue after every 3*BURST_LEN vectors. Checks: each layer receives
// exactly its own weight sequence, repeating per line; the buffered amount never
// exceeds the 512-entry last-stage FIFO (the credit guarantee); all three layers
// make progress; credit stalls and burst-matching waits both occur.
module hbm_weight_reader_bl32_tb;
  import h2pipe_pkg::*;
  localparam int N = 3, BL = 32, SET = 3 * BL;
  logic clk = 0, rst = 1, hbm_clk = 0, hbm_rst = 1;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t ar;
  axi_r_t r;
  logic aw_ready, w_ready, b_valid;
  logic [N-1:0] cfg_enable = '1, w_valid, dequeue = '0, credit_stall;
  hbm_addr_t [N-1:0] cfg_base;
  logic [N-1:0][15:0] cfg_bursts;
  wvec_t [N-1:0] w_data;
  logic hol_wait;
  int checks = 0, failures = 0;
  int rx[N], used[N], since_deq[N], max_occ = 0, n_cs = 0, n_hol = 0;

  always #2 clk = ~clk;        // core
  always #3 hbm_clk = ~hbm_clk; // HBM side

  hbm_weight_reader #(.N_LAYERS(N), .BURST_LEN(BL)) dut (.*);
  hbm_pc_model #(.LAT_MIN(60), .LAT_RAND(60), .REFRESH_ONE_IN(40), .REFRESH_LAT(400)) u_hbm (
    .clk(hbm_clk), .rst(hbm_rst), .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid(1'b0), .aw_ready, .aw('0), .w_valid(1'b0), .w_ready, .w('0), .b_valid, .b_ready(1'b1));

  function automatic wvec_t vec(int l, int w, int c);
    return {8'(l), 16'(w), 8'(c), 48'(w * 7919 + c * 31 + l * 1000003)};
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int l = 0; l < N; l++) begin
      cfg_base[l] = hbm_addr_t'(l * 65536);
      cfg_bursts[l] = 16'(l + 1);
      rx[l] = 0; used[l] = 0; since_deq[l] = 0;
      for (int wd = 0; wd < (l + 1) * BL; wd++)
        u_hbm.mem[(l * 65536) / 32 + wd] = {16'hDEAD, vec(l, wd, 2), vec(l, wd, 1), vec(l, wd, 0)};
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      dequeue = '0;
      for (int l = 0; l < N; l++) begin
        if (w_valid[l]) begin
          int k, wd, c;
          k = rx[l];
          wd = (k / 3) % ((l + 1) * BL);
          c = k % 3;
          check(w_data[l] == vec(l, wd, c), $sformatf("layer %0d vector %0d", l, k));
          rx[l]++;
        end
        if (rx[l] - used[l] > max_occ) max_occ = rx[l] - used[l];
        // consumer: layer 0 fast, 1 medium, 2 slow
        if (rx[l] > used[l] && $urandom_range(l + 1) == 0) begin
          used[l]++;
          since_deq[l]++;
          if (since_deq[l] == SET) begin since_deq[l] = 0; dequeue[l] = 1'b1; end
        end
      end
      if (hol_wait) n_hol++;
    end
  end
  always @(posedge hbm_clk) if (!hbm_rst && |credit_stall) n_cs++;

  initial begin
    #20 rst = 0; hbm_rst = 0;
    wait (used[2] >= 1500);
    check(max_occ <= LAST_DEPTH, $sformatf("buffered vectors within 512 (max %0d)", max_occ));
    for (int l = 0; l < N; l++) check(used[l] >= 1500, $sformatf("layer %0d progressed (%0d)", l, used[l]));
    check(n_cs > 0, "credit stall happened");
    check(n_hol > 0, "burst-matching wait happened");
    check(u_hbm.n_refresh > 0, "refresh stalls happened");
    $display("max occupancy %0d, credit-stall cycles %0d, hol cycles %0d, refreshes %0d", max_occ, n_cs, n_hol, u_hbm.n_refresh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
