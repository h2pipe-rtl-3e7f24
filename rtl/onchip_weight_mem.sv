// onchip_weight_mem: weight memory of a layer whose weights stay on chip.
//
// An array of DEPTH weight vectors (80 bits = 10 int8 weights each), loaded
// through a write port and read by the layer engine with an asynchronous read,
// so an on-chip layer never waits for weights and never freezes.
// Interface: wr_en/wr_addr/wr_data (load), rd_addr/rd_data (combinational).
// The paper keeps weights of non-offloaded layers in on-chip RAM; the load port
// and the read timing are this design's choices.
module onchip_weight_mem
  import h2pipe_pkg::*;
#(
  parameter int unsigned DEPTH = 3 * BURST_LEN
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  wvec_t                    wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output wvec_t                    rd_data
);
  wvec_t mem [DEPTH];
  always_ff @(posedge clk) if (wr_en) mem[wr_addr] <= wr_data;
  assign rd_data = mem[rd_addr];
endmodule
