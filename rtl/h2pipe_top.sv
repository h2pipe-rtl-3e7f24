// h2pipe_top: a layer-pipelined CNN accelerator whose weights live partly in
// HBM and partly on chip.
//
// Compute: N_LAYERS layer engines in a chain, each followed by an activation
// line buffer (the first buffer is filled from the input buffer, the last layer
// writes to the out_* port). All layers run at once on successive lines.
//
// Weights: layer l keeps its weights on chip unless OFFLOAD[l] is set. Offloaded
// layers, in pipeline order, are packed LAYERS_PER_PC to an HBM pseudo-channel,
// and the channels are used clockwise (0..15, then 31..16). Each channel in use
// gets an hbm_weight_reader (prefetcher with credit counters, DCFIFO, burst-
// matching FIFOs, serializers) that streams weights into the engines' last-stage
// FIFOs once hbm_rd_enable is set; engines freeze when those run low and
// return credits with dequeue. The
// weights of slot s on a channel start at byte address s * SLOT_BYTES and take
// ceil(C/(3*BURST_LEN)) bursts per line.
//
// Boot: the host writes the input buffer (host_wr_*); a command in weight mode
// (cmd_mode=1) sends its contents over the 30-bit pipelined weight bus, one
// register per pseudo-channel, past an hbm_weight_writer on every channel; each
// keeps the packets for its channel and writes them to HBM. A command in image
// mode (cmd_mode=0) sends 256-bit words into the first activation buffer: a
// channel row (W bytes) takes ceil(W*8/256) words, low bytes first, and 10 rows
// make a line. On-chip weights are loaded on ow_*.
//
// Clocks: clk (layer engines, buffers, weight bus) and hbm_clk (AXI ports,
// prefetchers, write-address control). AXI ports are per pseudo-channel arrays;
// channels without a reader keep ar_valid low and r_ready high.
// The structure follows the paper's weight distribution network, write path and
// freeze scheme; the 1x1 layer engines, packing and address layout are this
// design's choices.
module h2pipe_top
  import h2pipe_pkg::*;
#(
  parameter int unsigned          N_PC          = h2pipe_pkg::N_PC,
  parameter int unsigned          LAYERS_PER_PC = h2pipe_pkg::LAYERS_PER_PC,
  parameter int unsigned          N_LAYERS      = 4,
  parameter logic [N_LAYERS-1:0]  OFFLOAD       = 4'b0111,
  parameter int unsigned          N_GROUPS      = 2,
  parameter int unsigned          BURST_LEN     = h2pipe_pkg::BURST_LEN,
  parameter int unsigned          SHIFT         = 6,
  parameter int unsigned          INBUF_DEPTH   = INBUF_WORDS,
  parameter int unsigned          FIFO_DEPTH    = LAST_DEPTH,
  parameter int unsigned          SLOT_BYTES    = 65536,
  localparam int unsigned C       = DOT_N,
  localparam int unsigned W       = N_DOT * GROUP_SIZE * N_GROUPS,
  localparam int unsigned IAW     = $clog2(INBUF_DEPTH),
  localparam int unsigned N_OFF   = rank_below(64'(OFFLOAD), N_LAYERS),
  localparam int unsigned N_RD    = (N_OFF + LAYERS_PER_PC - 1) / LAYERS_PER_PC,
  localparam int unsigned LW      = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   hbm_clk,
  input  logic                   hbm_rst,
  input  logic                   hbm_rd_enable, // hbm_clk: start prefetching (after the weights are written)
  // host (PCIe side) write into the input buffer
  input  logic                   host_wr_en,
  input  logic [IAW-1:0]         host_wr_addr,
  input  hbm_word_t              host_wr_data,
  // input buffer command
  input  logic                   cmd_start,
  input  logic                   cmd_mode,      // 0 images, 1 weights
  input  logic [IAW-1:0]         cmd_base,
  input  logic [IAW:0]           cmd_n_words,
  output logic                   cmd_busy,
  // on-chip weight load
  input  logic                   ow_wr_en,
  input  logic [LW-1:0]          ow_layer,
  input  logic [$clog2(C)-1:0]   ow_addr,
  input  wvec_t                  ow_data,
  // results of the last layer (to the host)
  input  logic                   out_ready,
  output logic                   out_wr_en,
  output logic [$clog2(C)-1:0]   out_row,
  output logic [W*8-1:0]         out_data,
  output logic                   out_line_done,
  // HBM pseudo-channel AXI ports (hbm_clk)
  output logic    [N_PC-1:0]     pc_ar_valid,
  input  logic    [N_PC-1:0]     pc_ar_ready,
  output axi_ar_t [N_PC-1:0]     pc_ar,
  input  logic    [N_PC-1:0]     pc_r_valid,
  output logic    [N_PC-1:0]     pc_r_ready,
  input  axi_r_t  [N_PC-1:0]     pc_r,
  output logic    [N_PC-1:0]     pc_aw_valid,
  input  logic    [N_PC-1:0]     pc_aw_ready,
  output axi_aw_t [N_PC-1:0]     pc_aw,
  output logic    [N_PC-1:0]     pc_w_valid,
  input  logic    [N_PC-1:0]     pc_w_ready,
  output axi_w_t  [N_PC-1:0]     pc_w,
  input  logic    [N_PC-1:0]     pc_b_valid,
  output logic    [N_PC-1:0]     pc_b_ready,
  // status
  output logic    [N_PC-1:0]     wr_done,        // hbm_clk
  output logic    [N_LAYERS-1:0] layer_freeze,
  output logic    [N_LAYERS-1:0] layer_stall,
  output logic    [N_LAYERS-1:0] credit_stall,   // hbm_clk
  output logic                   hol_wait,
  output logic                   weight_overflow
);
  // index of the n-th set bit of a mask
  function automatic int unsigned nth_set(logic [63:0] m, int unsigned n);
    int unsigned seen;
    seen = 0;
    for (int unsigned i = 0; i < 64; i++) begin
      if (m[i]) begin
        if (seen == n) return i;
        seen++;
      end
    end
    return 0;
  endfunction

  localparam int unsigned SET     = VEC_PER_WORD * BURST_LEN;
  localparam int unsigned BURSTS  = (C + SET - 1) / SET;

  // ---------------- input buffer and stream control ----------------
  logic            buf_rd_en;
  logic [IAW-1:0]  buf_rd_addr;
  hbm_word_t       buf_rd_data;
  logic            img_valid, img_ready;
  hbm_word_t       img_data;
  logic            wp_valid, wp_sop, wp_stall;
  logic [WR_PATH_W-1:0] wp_data;

  input_buffer #(.DEPTH(INBUF_DEPTH)) u_inbuf (
    .clk, .wr_en(host_wr_en), .wr_addr(host_wr_addr), .wr_data(host_wr_data),
    .rd_en(buf_rd_en), .rd_addr(buf_rd_addr), .rd_data(buf_rd_data)
  );

  input_stream_ctrl #(.DEPTH(INBUF_DEPTH)) u_isc (
    .clk, .rst, .start(cmd_start), .mode(cmd_mode), .base(cmd_base), .n_words(cmd_n_words),
    .busy(cmd_busy), .buf_rd_en, .buf_rd_addr, .buf_rd_data,
    .img_valid, .img_data, .img_ready,
    .wp_valid, .wp_sop, .wp_data, .wp_stall
  );

  // ---------------- weight write bus and per-channel writers ----------------
  logic [N_PC-1:0]                wb_valid, wb_sop, wr_af;
  logic [N_PC-1:0][WR_PATH_W-1:0] wb_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_valid <= '0;
      wb_sop   <= '0;
      wb_data  <= '0;
      wp_stall <= 1'b0;
    end else begin
      wb_valid <= {wb_valid[N_PC-2:0], wp_valid};
      wb_sop   <= {wb_sop[N_PC-2:0], wp_sop};
      wb_data  <= {wb_data[N_PC-2:0], wp_data};
      wp_stall <= |wr_af;
    end
  end

  for (genvar p = 0; p < N_PC; p++) begin : g_wr
    hbm_weight_writer #(.PC_ID(p), .BURST_LEN(BURST_LEN), .DC_ADDR_W(4), .AF_MARGIN(8)) u_wr (
      .clk, .rst, .wp_valid(wb_valid[p]), .wp_sop(wb_sop[p]), .wp_data(wb_data[p]),
      .almost_full(wr_af[p]), .hbm_clk, .hbm_rst,
      .aw_valid(pc_aw_valid[p]), .aw_ready(pc_aw_ready[p]), .aw(pc_aw[p]),
      .w_valid(pc_w_valid[p]), .w_ready(pc_w_ready[p]), .w(pc_w[p]),
      .b_valid(pc_b_valid[p]), .b_ready(pc_b_ready[p]), .done(wr_done[p])
    );
  end

  // ---------------- weight read paths ----------------
  logic  [N_LAYERS-1:0] l_w_valid, l_deq;
  wvec_t [N_LAYERS-1:0] l_w;
  logic  [N_PC-1:0]     pc_hol;
  logic  [N_LAYERS-1:0] cs_layer;

  for (genvar p = 0; p < N_PC; p++) begin : g_rd
    localparam int unsigned R = pc_of_rank(p);   // the clockwise order is its own inverse
    if (R < N_RD) begin : g_used
      logic      [LAYERS_PER_PC-1:0]       en, wv, dq, cs;
      wvec_t     [LAYERS_PER_PC-1:0]       wd;
      hbm_addr_t [LAYERS_PER_PC-1:0]       base;
      logic      [LAYERS_PER_PC-1:0][15:0] nb;
      for (genvar s = 0; s < LAYERS_PER_PC; s++) begin : g_slot
        localparam int unsigned K = R * LAYERS_PER_PC + s;
        localparam int unsigned L = nth_set(64'(OFFLOAD), K);
        assign base[s] = hbm_addr_t'(s * SLOT_BYTES);
        assign nb[s]   = 16'(BURSTS);
        if (K < N_OFF) begin : g_on
          assign en[s]       = hbm_rd_enable;
          assign dq[s]       = l_deq[L];
          assign l_w_valid[L] = wv[s];
          assign l_w[L]       = wd[s];
          assign cs_layer[L]  = cs[s];
        end else begin : g_off
          assign en[s] = 1'b0;
          assign dq[s] = 1'b0;
        end
      end
      hbm_weight_reader #(.N_LAYERS(LAYERS_PER_PC), .BURST_LEN(BURST_LEN)) u_rd (
        .hbm_clk, .hbm_rst,
        .ar_valid(pc_ar_valid[p]), .ar_ready(pc_ar_ready[p]), .ar(pc_ar[p]),
        .r_valid(pc_r_valid[p]), .r_ready(pc_r_ready[p]), .r(pc_r[p]),
        .cfg_enable(en), .cfg_base(base), .cfg_bursts(nb),
        .clk, .rst, .w_valid(wv), .w_data(wd), .dequeue(dq),
        .credit_stall(cs), .hol_wait(pc_hol[p])
      );
    end else begin : g_unused
      assign pc_ar_valid[p] = 1'b0;
      assign pc_ar[p]       = '0;
      assign pc_r_ready[p]  = 1'b1;
      assign pc_hol[p]      = 1'b0;
    end
  end

  assign hol_wait = |pc_hol;

  // ---------------- activation buffers and layer engines ----------------
  logic [N_LAYERS-1:0]                 a_wr_en, a_line_done, a_wr_ready, a_rd_valid, a_release;
  logic [N_LAYERS-1:0][$clog2(C)-1:0]  a_wr_row;
  logic [N_LAYERS-1:0][W*8-1:0]        a_wr_data;
  logic [N_LAYERS-1:0][C*W*8-1:0]      a_rd_line;
  logic [N_LAYERS-1:0]                 e_wr_en, e_line_done, e_out_ready, ovf;
  logic [N_LAYERS-1:0][$clog2(C)-1:0]  e_row;
  logic [N_LAYERS-1:0][W*8-1:0]        e_data;

  // image rows into the first buffer: a channel row of W bytes takes WPR
  // consecutive 256-bit words (low bytes first); C rows make a line
  localparam int unsigned WPR = (W * 8 + AXI_DATA_W - 1) / AXI_DATA_W;
  logic [$clog2(C)-1:0]            img_row_q;
  logic [WPR*AXI_DATA_W-1:0]       img_asm_q, img_asm_next;
  logic [$clog2(WPR+1)-1:0]        img_wcnt_q;
  logic                            img_row_end;

  assign img_asm_next   = (WPR == 1) ? (WPR*AXI_DATA_W)'(img_data)
                                     : {img_data, img_asm_q[WPR*AXI_DATA_W-1:AXI_DATA_W]};
  assign img_row_end    = img_valid && (img_wcnt_q == $bits(img_wcnt_q)'(WPR - 1));
  // a row's last word waits until the buffer has a free bank
  assign img_ready      = !img_row_end || a_wr_ready[0];
  assign a_wr_en[0]     = img_row_end && a_wr_ready[0];
  assign a_wr_row[0]    = img_row_q;
  assign a_wr_data[0]   = img_asm_next[W*8-1:0];
  assign a_line_done[0] = a_wr_en[0] && (img_row_q == $bits(img_row_q)'(C - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      img_row_q  <= '0;
      img_wcnt_q <= '0;
      img_asm_q  <= '0;
    end else if (img_valid && img_ready) begin
      img_asm_q  <= img_asm_next;
      img_wcnt_q <= img_row_end ? '0 : img_wcnt_q + 1'b1;
      if (img_row_end)
        img_row_q <= (img_row_q == $bits(img_row_q)'(C - 1)) ? '0 : img_row_q + 1'b1;
    end
  end

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    act_line_buffer #(.W(W), .C(C)) u_ab (
      .clk, .rst, .wr_en(a_wr_en[l]), .wr_row(a_wr_row[l]), .wr_data(a_wr_data[l]),
      .wr_line_done(a_line_done[l]), .wr_ready(a_wr_ready[l]),
      .rd_valid(a_rd_valid[l]), .rd_line(a_rd_line[l]), .rd_release(a_release[l])
    );

    if (!OFFLOAD[l]) begin : g_nohbm
      assign l_w_valid[l] = 1'b0;
      assign l_w[l]       = '0;
      assign cs_layer[l]  = 1'b0;
    end

    layer_engine #(.N_GROUPS(N_GROUPS), .C_OUT(C), .BURST_LEN(BURST_LEN), .USE_HBM(OFFLOAD[l]),
                   .SHIFT(SHIFT), .FIFO_DEPTH(FIFO_DEPTH)) u_le (
      .clk, .rst,
      .act_valid(a_rd_valid[l]), .act_line(a_rd_line[l]), .act_release(a_release[l]),
      .out_ready(e_out_ready[l]), .out_wr_en(e_wr_en[l]), .out_row(e_row[l]), .out_data(e_data[l]),
      .out_line_done(e_line_done[l]),
      .w_in_valid(l_w_valid[l]), .w_in(l_w[l]), .dequeue(l_deq[l]),
      .ow_wr_en(ow_wr_en && ow_layer == LW'(l)), .ow_wr_addr(ow_addr), .ow_wr_data(ow_data),
      .freeze(layer_freeze[l]), .stall(layer_stall[l]), .overflow(ovf[l])
    );

    if (l + 1 < N_LAYERS) begin : g_next
      assign e_out_ready[l]   = a_wr_ready[l+1];
      assign a_wr_en[l+1]     = e_wr_en[l];
      assign a_wr_row[l+1]    = e_row[l];
      assign a_wr_data[l+1]   = e_data[l];
      assign a_line_done[l+1] = e_line_done[l];
    end else begin : g_last
      assign e_out_ready[l] = out_ready;
      assign out_wr_en      = e_wr_en[l];
      assign out_row        = e_row[l];
      assign out_data       = e_data[l];
      assign out_line_done  = e_line_done[l];
    end
  end

  assign credit_stall    = cs_layer;
  assign weight_overflow = |ovf;

endmodule
