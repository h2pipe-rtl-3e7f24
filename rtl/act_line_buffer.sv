// act_line_buffer: activation memory between two layer engines.
//
// Two banks, each one line of C channels x W int8 values. The producing layer
// writes one channel row (all W positions of one channel) per wr_en into the
// current write bank and closes the line with wr_line_done; the bank is then
// full and the other bank becomes the write bank once it is free. The consuming
// layer sees the oldest full bank as rd_line (rd_valid high) and frees it with
// rd_release after copying it into its tensor blocks. Layers hand lines over with
// this full/free handshake, so any pipeline latency between them is tolerated.
//
// Row layout: rd_line[(c*W + x)*8 +: 8] is channel c at position x; wr_data[x*8 +: 8]
// is position x. Timing: a bank closed with wr_line_done is readable the next
// cycle; a released bank is writable the next cycle. Two lines suffice for the
// 1x1 layers built here; this sizing and the handshake are this design's choices.
module act_line_buffer #(
  parameter int unsigned W = 36,
  parameter int unsigned C = 10
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 wr_en,
  input  logic [$clog2(C)-1:0] wr_row,
  input  logic [W*8-1:0]       wr_data,
  input  logic                 wr_line_done,
  output logic                 wr_ready,     // write bank is free
  output logic                 rd_valid,
  output logic [C*W*8-1:0]     rd_line,
  input  logic                 rd_release
);
  logic [1:0][C*W*8-1:0] bank_q;
  logic [1:0] full_q;
  logic wb_q, rb_q;   // write bank, read bank

  assign wr_ready = !full_q[wb_q];
  assign rd_valid = full_q[rb_q];
  assign rd_line  = bank_q[rb_q];

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) bank_q[wb_q][int'(wr_row)*W*8 +: W*8] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      full_q <= '0;
      wb_q   <= 1'b0;
      rb_q   <= 1'b0;
    end else begin
      if (wr_line_done && wr_ready) begin
        full_q[wb_q] <= 1'b1;
        wb_q <= ~wb_q;
      end
      if (rd_release && rd_valid) begin
        full_q[rb_q] <= 1'b0;
        rb_q <= ~rb_q;
      end
    end
  end

  a_wr_free: assert property (@(posedge clk) disable iff (rst) wr_en |-> wr_ready)
    else $error("act_line_buffer: write into a full bank");

endmodule
