// credit_counter: counts how many more HBM read bursts a layer may request.
//
// It starts at INIT, the number of whole bursts that fit in the layer's
// last-stage FIFOs. Issuing a read request takes one credit; a dequeue pulse
// from the layer engine (one burst's worth of weight vectors consumed) returns
// one. The prefetcher only issues when has_credit is high, so weights already in
// flight always have room downstream and no FIFO ever needs to push back: this
// removes the head-of-line blocking deadlock of a ready/valid design where
// several layers share one pseudo-channel.
//
// Timing: count and has_credit are registered; issue and dequeue in the same
// cycle cancel. Follows the paper (decrement on request, increment on dequeue);
// INIT is this design's sizing.
module credit_counter #(
  parameter int unsigned INIT  = 21,
  parameter int unsigned CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             issue,
  input  logic             dequeue,
  output logic             has_credit,
  output logic [CNT_W-1:0] count
);
  always_ff @(posedge clk) begin
    if (rst) count <= CNT_W'(INIT);
    else     count <= count - CNT_W'(issue) + CNT_W'(dequeue);
  end

  assign has_credit = (count != '0);

  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(issue && count == '0))
    else $error("credit_counter: issue without credit");
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !(dequeue && !issue && count == CNT_W'(INIT)))
    else $error("credit_counter: more credits returned than issued");

endmodule
