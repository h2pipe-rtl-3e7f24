// last_stage_fifo: 512 x 80-bit show-ahead FIFO that sits next to a group of six
// tensor blocks and holds the weights streamed from HBM.
//
// Storage is two 512 x 40 banks (the low and high halves of each 80-bit vector),
// matching two block RAMs in 512x40 mode. The head word is visible on rd_data
// whenever the FIFO is not empty; rd_en pops it. almost_empty (count <= AE_LEVEL)
// is the freeze request to the layer engine. There is no full/ready output: the
// credit counters in the prefetcher guarantee that no more weights are in flight
// than the FIFO can take, so a write while full is a protocol error, flagged by
// the sticky overflow output and an assertion.
//
// Timing: a written word is visible at the head one cycle later; count and flags
// are registered. The depth, width and 2x40 bank split follow the paper; AE_LEVEL
// is this design's choice (2 covers the one-cycle registered freeze).
module last_stage_fifo
  import h2pipe_pkg::*;
#(
  parameter int unsigned DEPTH    = LAST_DEPTH,
  parameter int unsigned WIDTH    = WVEC_W,
  parameter int unsigned AE_LEVEL = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             almost_empty,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic             overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned HW = WIDTH / 2;

  logic [HW-1:0]       bank_lo [DEPTH];
  logic [WIDTH-HW-1:0] bank_hi [DEPTH];
  logic [AW-1:0] wptr_q, rptr_q;

  logic do_wr, do_rd;
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (count < DEPTH[$bits(count)-1:0] || do_rd);

  always_ff @(posedge clk) begin
    if (do_wr) begin
      bank_lo[wptr_q] <= wr_data[HW-1:0];
      bank_hi[wptr_q] <= wr_data[WIDTH-1:HW];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr_q   <= '0;
      rptr_q   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wptr_q <= (wptr_q == AW'(DEPTH-1)) ? '0 : wptr_q + 1'b1;
      if (do_rd) rptr_q <= (rptr_q == AW'(DEPTH-1)) ? '0 : rptr_q + 1'b1;
      count <= count + $bits(count)'(do_wr) - $bits(count)'(do_rd);
      if (wr_en && !do_wr) overflow <= 1'b1;
    end
  end

  assign rd_data      = {bank_hi[rptr_q], bank_lo[rptr_q]};
  assign empty        = (count == '0);
  assign almost_empty = (count <= $bits(count)'(AE_LEVEL));

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !(wr_en && !do_wr))
    else $error("last_stage_fifo: write while full (credit violation)");

endmodule
