// weight_addr_gen: deterministic burst address sequence of one layer's weights.
//
// A layer engine works on one full line at a time and re-reads its whole kernel
// set for every output line. The weights of a layer are stored contiguously in
// its pseudo-channel from byte address base, padded to n_bursts whole bursts.
// addr is the address of the next burst; advance (a request was accepted) steps
// to the next burst and wraps back to base after n_bursts, forever, so the read
// sequence can run far ahead of the compute.
//
// Timing: addr is registered and valid from the cycle after reset. The repeated
// per-line sequence follows the paper; the contiguous, burst-padded layout is
// this design's choice.
module weight_addr_gen
  import h2pipe_pkg::*;
#(
  parameter int unsigned BURST_LEN = h2pipe_pkg::BURST_LEN
) (
  input  logic        clk,
  input  logic        rst,
  input  hbm_addr_t   base,
  input  logic [15:0] n_bursts,
  input  logic        advance,
  output hbm_addr_t   addr,
  output logic        wrap      // high when addr is the last burst of the set
);
  localparam hbm_addr_t STEP = hbm_addr_t'(BURST_LEN * BYTES_PER_WORD);
  logic [15:0] idx_q;

  assign wrap = (idx_q + 16'd1 >= n_bursts);

  always_ff @(posedge clk) begin
    if (rst) begin
      idx_q <= '0;
      addr  <= base;
    end else if (advance) begin
      if (wrap) begin
        idx_q <= '0;
        addr  <= base;
      end else begin
        idx_q <= idx_q + 16'd1;
        addr  <= addr + STEP;
      end
    end
  end

endmodule
