// weight_serializer: turns 240-bit words (three weight vectors) from a
// burst-matching FIFO into a stream of 80-bit vectors, one per cycle.
//
// When the FIFO is not empty and the serializer is idle, it pops the head into a
// 3 x 80 register and sends vector 0, 1, 2 on the next three cycles (bits [79:0]
// first). The pop of the next word overlaps the last vector, so a continuously
// full FIFO gives a gap-free stream. There is no stall input: the credit scheme
// guarantees room downstream.
//
// Timing: out_valid rises one cycle after word_pop. Follows the paper's
// "serialized into a stream of 80-bit chunks"; the chunk order is this design's.
module weight_serializer
  import h2pipe_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   word_valid,
  input  logic [WORD_USED_W-1:0] word,
  output logic                   word_pop,
  output logic                   out_valid,
  output wvec_t                  out_data
);
  logic [WORD_USED_W-1:0] sreg_q;
  logic [1:0]             left_q;   // vectors still to send from sreg_q

  assign word_pop = word_valid && (left_q <= 2'd1);

  always_ff @(posedge clk) begin
    if (rst) begin
      sreg_q <= '0;
      left_q <= '0;
    end else if (word_pop) begin
      sreg_q <= word;
      left_q <= 2'd3;
    end else if (left_q != 0) begin
      sreg_q <= sreg_q >> WVEC_W;
      left_q <= left_q - 1'b1;
    end
  end

  // registered output
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= (left_q != 0);
      out_data  <= sreg_q[WVEC_W-1:0];
    end
  end

endmodule
