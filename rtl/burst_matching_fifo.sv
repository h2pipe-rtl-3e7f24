// burst_matching_fifo: per-layer single-clock FIFO of 240-bit words.
//
// An HBM read burst arrives at one word per cycle, but the serializer behind this
// FIFO drains one word every three cycles (3 x 80-bit vectors per word). The
// FIFO absorbs the burst so the shared DCFIFO in front of it can move on to the
// next layer's data. Show-ahead: rd_data is the head whenever !empty.
//
// Timing: write-to-head latency one cycle; full/empty are registered counts.
// The paper gives the role and that depth grows with burst length; the depth of
// one burst is this design's choice.
module burst_matching_fifo
  import h2pipe_pkg::*;
#(
  parameter int unsigned WIDTH = WORD_USED_W,
  parameter int unsigned DEPTH = BURST_LEN
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr_q, rptr_q;
  logic [$clog2(DEPTH+1)-1:0] count_q;

  logic do_wr, do_rd;
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && !full;

  always_ff @(posedge clk) if (do_wr) mem[wptr_q] <= wr_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr_q  <= '0;
      rptr_q  <= '0;
      count_q <= '0;
    end else begin
      if (do_wr) wptr_q <= (wptr_q == AW'(DEPTH-1)) ? '0 : wptr_q + 1'b1;
      if (do_rd) rptr_q <= (rptr_q == AW'(DEPTH-1)) ? '0 : rptr_q + 1'b1;
      count_q <= count_q + $bits(count_q)'(do_wr) - $bits(count_q)'(do_rd);
    end
  end

  assign rd_data = mem[rptr_q];
  assign empty   = (count_q == '0);
  assign full    = (count_q == $bits(count_q)'(DEPTH));

  a_no_write_full: assert property (@(posedge clk) disable iff (rst) !(wr_en && full))
    else $error("burst_matching_fifo: write while full");

endmodule
