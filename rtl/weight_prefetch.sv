// weight_prefetch: weight prefetching logic of one HBM pseudo-channel.
//
// Runs entirely in the HBM clock domain, detached from the compute pipeline.
// For each of the N_LAYERS layers that share the channel it keeps an address
// generator (the layer's fixed burst sequence) and a credit counter. Every cycle
// in which the AXI read-address register is free, a round-robin arbiter picks the
// next enabled layer that still has a credit, loads its burst address into the
// register (ARLEN = BURST_LEN-1, ARID = layer slot), takes one credit and steps
// that layer's address. Because weight reads are fully deterministic, the
// prefetcher runs as far ahead of the compute as the credits allow, which is
// what hides the long and variable HBM read latency.
//
// Interface: AXI4 AR channel (ar_valid/ar_ready/ar), dequeue pulses per layer
// (already synchronised to this clock), configuration per layer (enable, base
// byte address, bursts per line). Timing: ar_valid can rise the cycle after a
// layer gains a credit; one request per cycle at most.
// Credits, address interleaving of up to three layers and the clock domain follow
// the paper; the round-robin policy is this design's choice.
module weight_prefetch
  import h2pipe_pkg::*;
#(
  parameter int unsigned N_LAYERS  = LAYERS_PER_PC,
  parameter int unsigned BURST_LEN = h2pipe_pkg::BURST_LEN,
  parameter int unsigned CREDITS   = credits_for(BURST_LEN)
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic      [N_LAYERS-1:0]      cfg_enable,
  input  hbm_addr_t [N_LAYERS-1:0]      cfg_base,
  input  logic      [N_LAYERS-1:0][15:0] cfg_bursts,
  input  logic      [N_LAYERS-1:0]      dequeue,
  output logic                          ar_valid,
  input  logic                          ar_ready,
  output axi_ar_t                       ar,
  output logic      [N_LAYERS-1:0]      credit_stall  // enabled layer waiting for credit
);
  localparam int unsigned LW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;

  logic      [N_LAYERS-1:0] has_credit, grant;
  hbm_addr_t [N_LAYERS-1:0] addr;
  logic      [LW-1:0]       last_q;   // last granted slot
  logic                     load;

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    credit_counter #(.INIT(CREDITS), .CNT_W($clog2(CREDITS+1))) u_cc (
      .clk, .rst, .issue(grant[l]), .dequeue(dequeue[l]),
      .has_credit(has_credit[l]), .count()
    );
    weight_addr_gen #(.BURST_LEN(BURST_LEN)) u_ag (
      .clk, .rst, .base(cfg_base[l]), .n_bursts(cfg_bursts[l]),
      .advance(grant[l]), .addr(addr[l]), .wrap()
    );
  end

  assign load = !ar_valid || ar_ready;
  assign credit_stall = cfg_enable & ~has_credit;

  // round-robin: first requester after the last granted slot
  always_comb begin
    logic [N_LAYERS-1:0] req;
    int unsigned idx;
    req   = cfg_enable & has_credit;
    grant = '0;
    idx   = 0;
    if (load) begin
      for (int unsigned k = 1; k <= N_LAYERS; k++) begin
        idx = (int'(last_q) + k) % N_LAYERS;
        if (req[idx] && grant == '0) grant[idx] = 1'b1;
      end
    end
  end

  // request of the granted layer
  axi_ar_t      next_ar;
  logic [LW-1:0] next_sel;
  always_comb begin
    next_ar  = '0;
    next_sel = last_q;
    for (int unsigned l = 0; l < N_LAYERS; l++) begin
      if (grant[l]) begin
        next_ar.addr = addr[l];
        next_ar.len  = 8'(BURST_LEN - 1);
        next_ar.id   = axi_id_t'(l);
        next_sel     = LW'(l);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ar_valid <= 1'b0;
      ar       <= '0;
      last_q   <= LW'(N_LAYERS - 1);
    end else if (load) begin
      ar_valid <= |grant;
      if (|grant) begin
        ar     <= next_ar;
        last_q <= next_sel;
      end
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (rst)
                                ar_valid && !ar_ready |=> ar_valid && $stable(ar))
    else $error("weight_prefetch: AR changed while waiting for ready");

endmodule
