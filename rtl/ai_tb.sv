// ai_tb: functional model of one AI-optimised tensor block in tensor mode.
//
// The block holds two banks of 30 int8 activations (ping-pong registers): three
// horizontally adjacent positions of 10 input channels each. Every enabled cycle
// it takes one 80-bit weight vector (10 int8 weights of one output channel),
// broadcasts it to its three 10-element dot-product units and registers the three
// results, one per position. A new line of activations is loaded into the shadow
// bank (act_load) while the active bank is in use and becomes active on
// bank_swap. clk_en is the freeze input: when low nothing in the block changes.
//
// Timing: dot_out is valid the cycle after a cycle with clk_en=1.
// Follows the paper: three DOT10 units, ping-pong activation registers, 80 bits
// of weights per cycle, freeze wired to the clock enable. This design's choices:
// activations arrive in parallel instead of over the cascade chain, and there is
// no accumulation across cycles (each weight vector gives a complete result).
module ai_tb
  import h2pipe_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      clk_en,
  input  logic                      act_load,            // write shadow bank
  input  logic [ACT_PER_TB*8-1:0]   act_in,              // position p at [80*p +: 80]
  input  logic                      bank_swap,           // shadow becomes active
  input  wvec_t                     w_in,
  output logic [N_DOT-1:0][DOT_W-1:0] dot_out
);

  logic [1:0][ACT_PER_TB*8-1:0] bank_q;
  logic                         active_q;  // index of the active bank

  always_ff @(posedge clk) begin
    if (rst) begin
      bank_q   <= '0;
      active_q <= 1'b0;
    end else if (clk_en) begin
      if (act_load)  bank_q[~active_q] <= act_in;
      if (bank_swap) active_q <= ~active_q;
    end
  end

  logic [N_DOT-1:0][DOT_W-1:0] dot_d;
  always_comb begin
    for (int p = 0; p < N_DOT; p++) begin
      logic signed [DOT_W-1:0] s;
      s = '0;
      for (int i = 0; i < DOT_N; i++)
        s += DOT_W'($signed(bank_q[active_q][80*p + 8*i +: 8]) * $signed(w_in[8*i +: 8]));
      dot_d[p] = s;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)         dot_out <= '0;
    else if (clk_en) dot_out <= dot_d;
  end

endmodule
