// weight_chain: the weight distribution daisy chain inside one layer engine.
//
// A layer engine computes across the whole width of a line, so every group of
// GROUP_SIZE tensor blocks needs the same weight vector in the same cycle. The
// 80-bit stream from the serializer travels down a chain with one pipeline
// register per group; each group taps it into its own last-stage FIFO, placed
// next to that group. All FIFOs are popped together (pop). freeze is the
// registered OR of all almost_empty flags: while it is high the engine must not
// pop. Because group g receives each word g+1 cycles after the chain input, the
// FIFOs fill at slightly different times; the OR covers the slowest one.
//
// Timing: freeze follows an almost_empty change by one cycle. The chain, the
// duplicated FIFOs, groups of 6, 512 x 80 FIFOs and freeze from almost_empty
// follow the paper; one register per group is this design's choice.
module weight_chain
  import h2pipe_pkg::*;
#(
  parameter int unsigned N_GROUPS = 2,
  parameter int unsigned DEPTH    = LAST_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  wvec_t                      in_data,
  input  logic                       pop,
  output wvec_t [N_GROUPS-1:0]       head,
  output logic                       freeze,
  output logic                       overflow
);
  logic  [N_GROUPS-1:0] v_q;
  wvec_t [N_GROUPS-1:0] d_q;
  logic  [N_GROUPS-1:0] ae, ovf, emp;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    always_ff @(posedge clk) begin
      if (rst) begin
        v_q[g] <= 1'b0;
        d_q[g] <= '0;
      end else begin
        v_q[g] <= (g == 0) ? in_valid : v_q[g-1];
        d_q[g] <= (g == 0) ? in_data  : d_q[g-1];
      end
    end

    last_stage_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk, .rst,
      .wr_en(v_q[g]), .wr_data(d_q[g]),
      .rd_en(pop), .rd_data(head[g]),
      .empty(emp[g]), .almost_empty(ae[g]), .count(), .overflow(ovf[g])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) freeze <= 1'b1;
    else     freeze <= |ae;
  end

  assign overflow = |ovf;

  a_no_pop_empty: assert property (@(posedge clk) disable iff (rst) !(pop && |emp))
    else $error("weight_chain: pop while a last-stage FIFO is empty");

endmodule
