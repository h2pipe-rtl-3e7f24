// pulse_sync: carries single-cycle pulses from one clock domain to another.
//
// Each source pulse flips a toggle flip-flop; the toggle is synchronised by two
// flip-flops in the destination domain and every change becomes one destination
// pulse. Pulses must be spaced by at least three destination cycles (the layer
// engines' dequeue pulses are at least 3*BURST_LEN cycles apart).
// Timing: the destination pulse appears 3 destination cycles after the toggle.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst,
  output logic dst_pulse
);
  logic tog_q;
  logic [2:0] sync_q;

  always_ff @(posedge src_clk) begin
    if (src_rst)        tog_q <= 1'b0;
    else if (src_pulse) tog_q <= ~tog_q;
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) sync_q <= '0;
    else         sync_q <= {sync_q[1:0], tog_q};
  end

  assign dst_pulse = sync_q[2] ^ sync_q[1];

endmodule
