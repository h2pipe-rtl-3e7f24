// hbm_weight_reader: complete weight read path of one HBM pseudo-channel,
// serving up to N_LAYERS layer engines.
//
//   HBM clock:  weight_prefetch -> AXI AR;  AXI R -> dcfifo (240 data bits + ID)
//   core clock: dcfifo -> bm_router -> burst_matching_fifo[l] -> weight_serializer[l]
//               -> 80-bit stream w_valid[l]/w_data[l] to layer engine l
//   back path:  dequeue[l] (core clock) -> pulse_sync -> credit counter l
//
// AXI R beats are accepted while the DCFIFO has room (r_ready); the top 16 of
// the 256 data bits are not used because weights travel as three 80-bit vectors.
// The engines are never asked to push back: the credits guarantee that every
// vector leaving a serializer has a place in its last-stage FIFOs.
//
// Timing: from an R beat to the first 80-bit vector takes the DCFIFO crossing
// (about 4 cycles) plus 2 cycles. All of this follows the structure of the
// paper's weight distribution network; FIFO depths and the ID tagging are this
// design's choices.
module hbm_weight_reader
  import h2pipe_pkg::*;
#(
  parameter int unsigned N_LAYERS  = LAYERS_PER_PC,
  parameter int unsigned BURST_LEN = h2pipe_pkg::BURST_LEN,
  parameter int unsigned DC_ADDR_W = 6
) (
  // HBM controller side
  input  logic                           hbm_clk,
  input  logic                           hbm_rst,
  output logic                           ar_valid,
  input  logic                           ar_ready,
  output axi_ar_t                        ar,
  input  logic                           r_valid,
  output logic                           r_ready,
  input  axi_r_t                         r,
  // configuration (static)
  input  logic      [N_LAYERS-1:0]       cfg_enable,
  input  hbm_addr_t [N_LAYERS-1:0]       cfg_base,
  input  logic      [N_LAYERS-1:0][15:0] cfg_bursts,
  // core side
  input  logic                           clk,
  input  logic                           rst,
  output logic      [N_LAYERS-1:0]       w_valid,
  output wvec_t     [N_LAYERS-1:0]       w_data,
  input  logic      [N_LAYERS-1:0]       dequeue,
  // event outputs for monitoring
  output logic      [N_LAYERS-1:0]       credit_stall,  // hbm_clk domain
  output logic                           hol_wait       // core domain
);
  localparam int unsigned DW = WORD_USED_W + AXI_ID_W;

  logic [N_LAYERS-1:0] deq_hbm;
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_sync
    pulse_sync u_ps (.src_clk(clk), .src_rst(rst), .src_pulse(dequeue[l]),
                     .dst_clk(hbm_clk), .dst_rst(hbm_rst), .dst_pulse(deq_hbm[l]));
  end

  weight_prefetch #(.N_LAYERS(N_LAYERS), .BURST_LEN(BURST_LEN)) u_pf (
    .clk(hbm_clk), .rst(hbm_rst), .cfg_enable, .cfg_base, .cfg_bursts,
    .dequeue(deq_hbm), .ar_valid, .ar_ready, .ar, .credit_stall
  );

  logic dc_full, dc_empty, dc_pop;
  logic [DW-1:0] dc_head;

  assign r_ready = !dc_full;

  dcfifo #(.WIDTH(DW), .ADDR_W(DC_ADDR_W)) u_dc (
    .wclk(hbm_clk), .wrst(hbm_rst), .wr_en(r_valid), .wr_data({r.id, r.data[WORD_USED_W-1:0]}),
    .full(dc_full), .wr_free(),
    .rclk(clk), .rrst(rst), .rd_en(dc_pop), .rd_data(dc_head), .empty(dc_empty)
  );

  logic [N_LAYERS-1:0] bm_wr, bm_full, bm_empty, bm_pop;
  logic [WORD_USED_W-1:0] bm_wdata;
  logic [N_LAYERS-1:0][WORD_USED_W-1:0] bm_head;

  bm_router #(.N_LAYERS(N_LAYERS)) u_rt (
    .in_valid(!dc_empty), .in_data(dc_head[WORD_USED_W-1:0]), .in_id(dc_head[DW-1:WORD_USED_W]),
    .in_pop(dc_pop), .bm_wr, .bm_data(bm_wdata), .bm_full, .hol_wait
  );

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    burst_matching_fifo #(.DEPTH(BURST_LEN)) u_bm (
      .clk, .rst, .wr_en(bm_wr[l]), .wr_data(bm_wdata), .full(bm_full[l]),
      .rd_en(bm_pop[l]), .rd_data(bm_head[l]), .empty(bm_empty[l])
    );
    weight_serializer u_ser (
      .clk, .rst, .word_valid(!bm_empty[l]), .word(bm_head[l]), .word_pop(bm_pop[l]),
      .out_valid(w_valid[l]), .out_data(w_data[l])
    );
  end

endmodule
