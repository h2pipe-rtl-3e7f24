// bm_router: hands each word leaving the read DCFIFO to the burst-matching FIFO
// of the layer it belongs to.
//
// Up to three layers share one pseudo-channel; the AXI read ID carried beside the
// 240 data bits names the layer slot. The router pops the DCFIFO head whenever
// the selected burst-matching FIFO has room. It may wait on a full FIFO, but only
// briefly: burst-matching FIFOs drain without condition into last-stage FIFOs
// whose room the credit counters have reserved, so this wait cannot turn into the
// deadlock of a ready/valid distribution network.
//
// Timing: combinational (pop and FIFO write in the same cycle). Routing by layer
// follows the paper; using the AXI ID as the tag is this design's choice.
module bm_router
  import h2pipe_pkg::*;
#(
  parameter int unsigned N_LAYERS = LAYERS_PER_PC
) (
  input  logic                   in_valid,
  input  logic [WORD_USED_W-1:0] in_data,
  input  axi_id_t                in_id,
  output logic                   in_pop,
  output logic [N_LAYERS-1:0]    bm_wr,
  output logic [WORD_USED_W-1:0] bm_data,
  input  logic [N_LAYERS-1:0]    bm_full,
  output logic                   hol_wait   // head waits on a full FIFO
);
  logic id_ok;
  assign id_ok    = (int'(in_id) < int'(N_LAYERS));
  assign in_pop   = in_valid && (!id_ok || !bm_full[in_id]);  // unknown IDs are dropped
  assign bm_data  = in_data;
  assign hol_wait = in_valid && id_ok && bm_full[in_id];

  always_comb begin
    bm_wr = '0;
    if (in_pop && id_ok) bm_wr[in_id] = 1'b1;
  end

endmodule
