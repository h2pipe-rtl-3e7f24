// h2pipe_top_tb: end-to-end test of h2pipe_top at its default size (32 pseudo-
// channels, 4 layers of 36 x 10 x 10, layers 0..2 in HBM on channel 0, layer 3
// on chip), with one behavioural HBM model per pseudo-channel.
//
// Sequence: (1) the host writes weight packets into the input buffer: three for
// channel 0 (one per layer slot, 8 words = 24 vectors, 10 used) and one for
// channel 7; a weight-mode command sends them over the 30-bit bus and the
// writers store them in HBM, which is checked word by word. (2) Layer 3's
// weights are loaded on chip, prefetching is enabled, and images overwrite the
// same input buffer; an image-mode command streams LINES lines through the
// 4-layer pipeline. Every output row is compared with a reference model
// (1x1 convolution, ReLU, >>6, saturate at 127, chained over four layers).
// Mechanisms counted, each must occur: weight-bus stall (writer DCFIFO almost
// full), mode switch, engine freeze during a line, credit stall, burst-matching
// head-of-line wait, HBM refresh, dequeue, output back-pressure.
// Clocks: core 10 ns, HBM 6 ns (unrelated). Prefetching is enabled only after
// the first image line waits in the pipeline, so the first lines start with
// nearly empty weight FIFOs and freeze mid-line.
module h2pipe_top_tb;
  import h2pipe_pkg::*;
  localparam int N_PC = 32, NL = 4, C = 10, W = 36, LINES = 16, WPR = 2;
  localparam int IAW = $clog2(INBUF_WORDS);

  logic clk = 0, hbm_clk = 0, rst = 1, hbm_rst = 1, hbm_rd_enable = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always #3 hbm_clk = ~hbm_clk;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUT ----------------
  logic host_wr_en = 0;
  logic [IAW-1:0] host_wr_addr = '0;
  hbm_word_t host_wr_data = '0;
  logic cmd_start = 0, cmd_mode = 0, cmd_busy;
  logic [IAW-1:0] cmd_base = '0;
  logic [IAW:0] cmd_n_words = '0;
  logic ow_wr_en = 0;
  logic [1:0] ow_layer = '0;
  logic [3:0] ow_addr = '0;
  wvec_t ow_data = '0;
  logic out_ready = 0, out_wr_en, out_line_done, hol_wait, weight_overflow;
  logic [3:0] out_row;
  logic [W*8-1:0] out_data;
  logic    [N_PC-1:0] ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready, wr_done;
  axi_ar_t [N_PC-1:0] ar;
  axi_r_t  [N_PC-1:0] r;
  axi_aw_t [N_PC-1:0] aw;
  axi_w_t  [N_PC-1:0] w;
  logic [NL-1:0] layer_freeze, layer_stall, credit_stall;

  h2pipe_top dut (
    .clk, .rst, .hbm_clk, .hbm_rst, .hbm_rd_enable,
    .host_wr_en, .host_wr_addr, .host_wr_data,
    .cmd_start, .cmd_mode, .cmd_base, .cmd_n_words, .cmd_busy,
    .ow_wr_en, .ow_layer, .ow_addr, .ow_data,
    .out_ready, .out_wr_en, .out_row, .out_data, .out_line_done,
    .pc_ar_valid(ar_valid), .pc_ar_ready(ar_ready), .pc_ar(ar),
    .pc_r_valid(r_valid), .pc_r_ready(r_ready), .pc_r(r),
    .pc_aw_valid(aw_valid), .pc_aw_ready(aw_ready), .pc_aw(aw),
    .pc_w_valid(w_valid), .pc_w_ready(w_ready), .pc_w(w),
    .pc_b_valid(b_valid), .pc_b_ready(b_ready),
    .wr_done, .layer_freeze, .layer_stall, .credit_stall, .hol_wait, .weight_overflow
  );

  for (genvar p = 0; p < N_PC; p++) begin : g_hbm
    hbm_pc_model #(.LAT_MIN(60), .LAT_RAND(80), .REFRESH_ONE_IN(30), .REFRESH_LAT(400),
                   .W_READY_ONE_IN(40)) u_pc (
      .clk(hbm_clk), .rst(hbm_rst),
      .ar_valid(ar_valid[p]), .ar_ready(ar_ready[p]), .ar(ar[p]),
      .r_valid(r_valid[p]), .r_ready(r_ready[p]), .r(r[p]),
      .aw_valid(aw_valid[p]), .aw_ready(aw_ready[p]), .aw(aw[p]),
      .w_valid(w_valid[p]), .w_ready(w_ready[p]), .w(w[p]),
      .b_valid(b_valid[p]), .b_ready(b_ready[p])
    );
  end

  // ---------------- stimulus data and reference ----------------
  wvec_t wts[NL][24];
  logic [C*W*8-1:0] img[LINES], expect_q[LINES];

  function automatic logic [C*W*8-1:0] layer_ref(logic [C*W*8-1:0] a, int l);
    logic [C*W*8-1:0] o;
    int s;
    for (int c = 0; c < C; c++)
      for (int x = 0; x < W; x++) begin
        s = 0;
        for (int i = 0; i < C; i++) s += $signed(a[(i*W + x)*8 +: 8]) * $signed(wts[l][c][8*i +: 8]);
        s = s >>> 6;
        if (s < 0) s = 0;
        if (s > 127) s = 127;
        o[(c*W + x)*8 +: 8] = 8'(s);
      end
    return o;
  endfunction

  function automatic hbm_word_t wword(int l, int k);
    return {16'h0, wts[l][3*k+2], wts[l][3*k+1], wts[l][3*k]};
  endfunction

  // ---------------- counters ----------------
  int n_busstall = 0, n_stall = 0, n_cs = 0, n_hol = 0, n_deq = 0, n_bp = 0, n_switch = 0, n_refresh;
  int out_line = 0, rows_seen = 0;
  bit last_mode = 0, any_cmd = 0;

  always @(posedge clk) if (!rst) begin
    if (dut.wp_stall && cmd_busy) n_busstall++;
    if (|layer_stall) n_stall++;
    if (hol_wait) n_hol++;
    n_deq += $countones(dut.l_deq);
  end
  int n_aw[N_PC];
  initial for (int p = 0; p < N_PC; p++) n_aw[p] = 0;
  always @(posedge hbm_clk) if (!hbm_rst) begin
    if (|credit_stall) n_cs++;
    for (int p = 0; p < N_PC; p++) if (aw_valid[p] && aw_ready[p]) n_aw[p]++;
  end

  // outputs, checked at the falling edge after the edge that produced them
  always @(negedge clk) if (!rst) begin
    if (out_wr_en) begin
      for (int x = 0; x < W; x++)
        check(out_data[x*8 +: 8] == expect_q[out_line][(int'(out_row)*W + x)*8 +: 8],
              $sformatf("line %0d row %0d x %0d: got %0d expected %0d", out_line, out_row, x,
                        out_data[x*8 +: 8], expect_q[out_line][(int'(out_row)*W + x)*8 +: 8]));
      check(int'(out_row) == rows_seen, "rows in order");
      rows_seen++;
    end
    if (out_line_done) begin
      check(rows_seen == C, "ten rows per line");
      rows_seen = 0;
      out_line++;
    end
    out_ready <= ($urandom_range(4) != 0);
    if (!out_ready && dut.g_layer[NL-1].u_le.computing_q) n_bp++;
  end

  task automatic host_write(int a, hbm_word_t d);
    @(negedge clk);
    host_wr_en = 1; host_wr_addr = IAW'(a); host_wr_data = d;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic start_cmd(bit mode, int base, int n);
    @(negedge clk);
    if (any_cmd && mode != last_mode) n_switch++;
    any_cmd = 1; last_mode = mode;
    cmd_start = 1; cmd_mode = mode; cmd_base = IAW'(base); cmd_n_words = (IAW+1)'(n);
    @(negedge clk);
    cmd_start = 0;
    @(negedge clk);
  endtask
  task automatic wait_cmd();
    while (cmd_busy) @(negedge clk);
  endtask

  initial begin
    int a;
    wr_hdr_t h;
    for (int l = 0; l < NL; l++)
      for (int v = 0; v < 24; v++) wts[l][v] = {$urandom, $urandom, 16'($urandom)};
    for (int i = 0; i < LINES; i++) begin
      for (int b = 0; b < C*W; b++) img[i][8*b +: 8] = 8'($urandom);
      expect_q[i] = img[i];
      for (int l = 0; l < NL; l++) expect_q[i] = layer_ref(expect_q[i], l);
    end
    repeat (4) @(negedge clk);
    rst = 0;
    @(negedge hbm_clk);
    hbm_rst = 0;

    // (1) weight packets: layer slots 0..2 on channel 0, one extra on channel 7
    a = 0;
    for (int s = 0; s < 4; s++) begin
      h = '0;
      h.n_words    = 8;
      h.start_word = (s < 3) ? 24'(s * 2048) : 24'd100;
      h.pc         = (s < 3) ? 5'd0 : 5'd7;
      host_write(a++, hbm_word_t'(h));
      for (int k = 0; k < 8; k++) host_write(a++, wword(s < 3 ? s : 3, k));
    end
    start_cmd(1, 0, a);
    wait_cmd();
    wait (g_hbm[0].u_pc.n_writes == 3 && g_hbm[7].u_pc.n_writes == 1);
    repeat (50) @(negedge hbm_clk);
    check(wr_done[0] && wr_done[7], "writers report done");
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < 8; k++)
        check(g_hbm[0].u_pc.rd_word(s * 2048 + k) == wword(s, k), $sformatf("HBM channel 0 slot %0d word %0d", s, k));
    for (int k = 0; k < 8; k++) check(g_hbm[7].u_pc.rd_word(100 + k) == wword(3, k), "HBM channel 7 word");
    for (int p = 0; p < N_PC; p++)
      check(n_aw[p] == ((p == 0) ? 3 : (p == 7) ? 1 : 0), $sformatf("channel %0d write bursts %0d", p, n_aw[p]));

    // (2) on-chip weights for layer 3, then prefetch and images
    for (int v = 0; v < C; v++) begin
      @(negedge clk);
      ow_wr_en = 1; ow_layer = 2'd3; ow_addr = 4'(v); ow_data = wts[3][v];
    end
    @(negedge clk);
    ow_wr_en = 0;
    a = 0;
    for (int i = 0; i < LINES; i++)
      for (int c = 0; c < C; c++)
        for (int k = 0; k < WPR; k++)
          host_write(a++, (k == 0) ? img[i][c*W*8 +: 256] : {224'h0, img[i][c*W*8 + 256 +: 32]});
    start_cmd(0, 0, a / 2);        // two image commands, 8 lines each
    repeat (300) @(negedge clk);
    @(negedge hbm_clk);
    hbm_rd_enable = 1;
    wait_cmd();
    start_cmd(0, a / 2, a - a / 2);
    wait_cmd();
    wait (out_line == LINES);
    repeat (20) @(negedge clk);
    n_refresh = g_hbm[0].u_pc.n_refresh;
    $display("bus stalls %0d, mode switches %0d, stall cycles %0d, credit-stall cycles %0d, hol cycles %0d, dequeues %0d, refreshes %0d, back-pressure %0d",
             n_busstall, n_switch, n_stall, n_cs, n_hol, n_deq, n_refresh, n_bp);
    check(n_busstall > 0, "weight bus stalled by a full writer");
    check(n_switch > 0, "input buffer switched from weights to images");
    check(n_stall > 0, "an engine froze during a line");
    check(n_cs > 0, "prefetch stalled for credits");
    check(n_hol > 0, "burst-matching head-of-line wait");
    check(n_refresh > 0, "HBM refresh delays");
    check(n_deq >= 3 * LINES, "dequeues returned credits");
    check(n_bp > 0, "output back-pressure");
    check(!weight_overflow, "no last-stage FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
