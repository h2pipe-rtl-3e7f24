// layer_engine: the compute unit of one CNN layer, built from tensor blocks.
//
// The engine computes a 1x1 convolution of one line at a time: 10 input channels
// in, C_OUT output channels out, W = 3 * GROUP_SIZE * N_GROUPS positions wide.
// Tensor block t holds positions 3t..3t+2. For every output channel the engine
// feeds one 80-bit weight vector (10 int8 weights) to all tensor blocks at once;
// each block returns three dot products, which are rectified, shifted right by
// SHIFT, saturated to int8 and written as one channel row of the output line.
//
// Weight source (USE_HBM):
//  1: the 80-bit stream from the pseudo-channel read path enters a weight_chain
//     (pipelined daisy chain of last-stage FIFOs, one per group of six blocks).
//     The per-line weight set is padded to whole bursts (VPL vectors); padding
//     vectors are popped and dropped. After every 3*BURST_LEN pops the engine
//     pulses dequeue, which returns one credit to the prefetcher. While freeze
//     (registered OR of the FIFOs' almost_empty) is high the engine pops nothing,
//     its tensor blocks hold (clock enable low) and its activation-load and
//     output-write control wait.
//  0: weights come from an on-chip weight memory of C_OUT vectors; no freeze.
//
// Line control: a full input line is copied into the tensor blocks' shadow banks
// (ping-pong) and released at once, so the previous layer can refill its buffer
// while this line computes. A line starts when the shadow bank holds a line and
// the output buffer has a free bank. Timing: one output row per cycle when not
// frozen, written one cycle after its weight vector is popped; out_line_done
// comes with the last write of the line (or one cycle after the last padding pop).
// The freeze scheme, groups of six, 80-bit vectors and dequeue follow the paper;
// the 1x1-only datapath, padding and requantisation are this design's choices.
module layer_engine
  import h2pipe_pkg::*;
#(
  parameter int unsigned N_GROUPS  = 2,
  parameter int unsigned C_OUT     = 10,
  parameter int unsigned BURST_LEN = h2pipe_pkg::BURST_LEN,
  parameter bit          USE_HBM   = 1'b1,
  parameter int unsigned SHIFT     = 6,
  parameter int unsigned FIFO_DEPTH = LAST_DEPTH,
  localparam int unsigned N_TB     = GROUP_SIZE * N_GROUPS,
  localparam int unsigned W        = N_DOT * N_TB,
  localparam int unsigned C_IN     = DOT_N,
  localparam int unsigned SET      = VEC_PER_WORD * BURST_LEN,
  localparam int unsigned VPL      = USE_HBM ? ((C_OUT + SET - 1) / SET) * SET : C_OUT,
  localparam int unsigned VW       = $clog2(VPL + 1)
) (
  input  logic                    clk,
  input  logic                    rst,
  // input activation buffer
  input  logic                    act_valid,
  input  logic [C_IN*W*8-1:0]     act_line,
  output logic                    act_release,
  // output buffer
  input  logic                    out_ready,
  output logic                    out_wr_en,
  output logic [$clog2(C_OUT)-1:0] out_row,
  output logic [W*8-1:0]          out_data,
  output logic                    out_line_done,
  // HBM weight stream
  input  logic                    w_in_valid,
  input  wvec_t                   w_in,
  output logic                    dequeue,
  // on-chip weight load port
  input  logic                    ow_wr_en,
  input  logic [$clog2(C_OUT)-1:0] ow_wr_addr,
  input  wvec_t                   ow_wr_data,
  // status
  output logic                    freeze,
  output logic                    stall,      // a line is in progress and frozen
  output logic                    overflow
);
  wvec_t [N_GROUPS-1:0] w_head;
  logic                 pop;
  logic          shadow_full_q, computing_q;
  logic [VW-1:0] v_q;
  logic          load, start, fire, res_v_q, last_q;
  logic [$clog2(C_OUT)-1:0] res_row_q;
  logic [$clog2(SET+1)-1:0] deq_cnt_q;

  if (USE_HBM) begin : g_hbm
    weight_chain #(.N_GROUPS(N_GROUPS), .DEPTH(FIFO_DEPTH)) u_chain (
      .clk, .rst, .in_valid(w_in_valid), .in_data(w_in), .pop,
      .head(w_head), .freeze, .overflow
    );
  end else begin : g_onchip
    wvec_t rd;
    onchip_weight_mem #(.DEPTH(C_OUT)) u_mem (
      .clk, .wr_en(ow_wr_en), .wr_addr(ow_wr_addr), .wr_data(ow_wr_data),
      .rd_addr(v_q[$clog2(C_OUT)-1:0]), .rd_data(rd)
    );
    assign w_head   = {N_GROUPS{rd}};
    assign freeze   = 1'b0;
    assign overflow = 1'b0;
  end

  // ---------------- line control ----------------

  assign start = !computing_q && shadow_full_q && out_ready && !last_q && !freeze;
  assign load  = act_valid && !shadow_full_q && !start && !freeze;
  assign fire  = computing_q && !freeze;
  assign pop   = USE_HBM && fire;
  assign act_release = load;
  assign stall = computing_q && freeze;

  always_ff @(posedge clk) begin
    if (rst) begin
      shadow_full_q <= 1'b0;
      computing_q   <= 1'b0;
      v_q           <= '0;
      res_v_q       <= 1'b0;
      res_row_q     <= '0;
      last_q        <= 1'b0;
      deq_cnt_q     <= '0;
      dequeue       <= 1'b0;
    end else begin
      if (load)  shadow_full_q <= 1'b1;
      if (start) begin
        shadow_full_q <= 1'b0;
        computing_q   <= 1'b1;
        v_q           <= '0;
      end
      if (fire) begin
        v_q <= v_q + 1'b1;
        if (v_q == VW'(VPL - 1)) computing_q <= 1'b0;
      end
      res_v_q   <= fire && (v_q < VW'(C_OUT));
      res_row_q <= $bits(res_row_q)'(v_q);
      last_q    <= fire && (v_q == VW'(VPL - 1));
      // one credit back per burst of vectors consumed
      dequeue <= 1'b0;
      if (pop) begin
        if (deq_cnt_q == $bits(deq_cnt_q)'(SET - 1)) begin
          deq_cnt_q <= '0;
          dequeue   <= 1'b1;
        end else begin
          deq_cnt_q <= deq_cnt_q + 1'b1;
        end
      end
    end
  end

  // ---------------- tensor blocks ----------------
  logic [N_TB-1:0][N_DOT-1:0][DOT_W-1:0] dots;

  for (genvar t = 0; t < N_TB; t++) begin : g_tb
    logic [ACT_PER_TB*8-1:0] act_in;
    for (genvar p = 0; p < N_DOT; p++) begin : g_pos
      for (genvar c = 0; c < DOT_N; c++) begin : g_ch
        assign act_in[80*p + 8*c +: 8] = act_line[(c*W + 3*t + p)*8 +: 8];
      end
    end
    ai_tb u_tb (
      .clk, .rst, .clk_en(!freeze), .act_load(load), .act_in,
      .bank_swap(start), .w_in(w_head[t / GROUP_SIZE]), .dot_out(dots[t])
    );
  end

  function automatic logic [7:0] requant(logic [DOT_W-1:0] d);
    logic signed [DOT_W-1:0] s;
    s = $signed(d) >>> SHIFT;
    if (s < 0)          return 8'd0;
    else if (s > 127)   return 8'd127;
    else                return s[7:0];
  endfunction

  always_comb begin
    for (int t = 0; t < int'(N_TB); t++)
      for (int p = 0; p < int'(N_DOT); p++)
        out_data[(3*t + p)*8 +: 8] = requant(dots[t][p]);
  end

  assign out_wr_en     = res_v_q;
  assign out_row       = res_row_q;
  assign out_line_done = last_q;

endmodule
