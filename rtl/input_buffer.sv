// input_buffer: the accelerator's image input buffer, 224 x 224 x 3 x 2 bytes.
//
// The host writes it over PCIe, 256 bits at a time. It normally holds two input
// images (double buffering); at boot the same storage holds the weight stream
// that is written to HBM, so the weight write path needs no RAM of its own.
// Organised as INBUF_WORDS = 9408 words of 256 bits; one write port (host side)
// and one read port with one cycle of latency (rd_en/rd_addr -> rd_data).
// The size and the reuse follow the paper; the word organisation is this
// design's choice.
module input_buffer
  import h2pipe_pkg::*;
#(
  parameter int unsigned DEPTH = INBUF_WORDS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  hbm_word_t       wr_data,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output hbm_word_t       rd_data
);
  hbm_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
