// input_stream_ctrl: reads a range of the input buffer and sends it to one of
// the two paths that leave the buffer.
//
//  mode 0 (images):  each 256-bit word goes to the pipeline on img_data with a
//                    valid/ready handshake.
//  mode 1 (weights): each word goes onto the narrow weight write bus as
//                    WR_CHUNKS = 9 chunks of 30 bits, low bits first (the last
//                    chunk carries the top 16 bits, zero-padded). wp_sop marks
//                    the first chunk of a packet header word. The bus has no
//                    ready; wp_stall (writers almost full) pauses it between
//                    chunks.
//
// Weight stream format (this design's choice): packets of one header word
// (h2pipe_pkg::wr_hdr_t in bits [63:0]: target pseudo-channel, first word
// address, word count) followed by that many data words; the command's first
// word is a header and the controller finds later headers by counting.
// Interface: start with mode/base/n_words, busy until the last word has left.
// Timing: one 256-bit word every cycle in image mode when img_ready is high,
// one 30-bit chunk per cycle in weight mode. A narrow write path fed from the
// input buffer, with a 30-bit default, follows the paper.
module input_stream_ctrl
  import h2pipe_pkg::*;
#(
  parameter int unsigned DEPTH = INBUF_WORDS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic                 mode,      // 0 images, 1 weights
  input  logic [AW-1:0]        base,
  input  logic [AW:0]          n_words,
  output logic                 busy,
  // input buffer read port
  output logic                 buf_rd_en,
  output logic [AW-1:0]        buf_rd_addr,
  input  hbm_word_t            buf_rd_data,
  // image path
  output logic                 img_valid,
  output hbm_word_t            img_data,
  input  logic                 img_ready,
  // weight write bus
  output logic                 wp_valid,
  output logic                 wp_sop,
  output logic [WR_PATH_W-1:0] wp_data,
  input  logic                 wp_stall
);
  typedef enum logic [1:0] {IDLE, FETCH, WAIT, SEND} state_e;
  state_e state_q;

  logic            mode_q;
  logic [AW-1:0]   addr_q;
  logic [AW:0]     left_q;        // words still to fetch (including current)
  logic [31:0]     pkt_left_q;    // data words left in current packet; 0 = next is header
  logic [$clog2(WR_CHUNKS)-1:0] chunk_q;
  hbm_word_t       word_q;
  logic            is_hdr_q;

  assign busy        = (state_q != IDLE);
  assign buf_rd_en   = (state_q == FETCH);
  assign buf_rd_addr = addr_q;

  assign img_valid = (state_q == SEND) && !mode_q;
  assign img_data  = word_q;

  logic [WR_CHUNKS*WR_PATH_W-1:0] word_ext;
  assign word_ext = {{(WR_CHUNKS*WR_PATH_W-AXI_DATA_W){1'b0}}, word_q};
  assign wp_valid = (state_q == SEND) && mode_q && !wp_stall;
  assign wp_sop   = wp_valid && is_hdr_q && (chunk_q == '0);
  assign wp_data  = word_ext[int'(chunk_q)*WR_PATH_W +: WR_PATH_W];

  wr_hdr_t cur_hdr;
  assign cur_hdr = wr_hdr_t'(word_q[63:0]);

  logic word_done;
  assign word_done = mode_q ? (wp_valid && chunk_q == $bits(chunk_q)'(WR_CHUNKS - 1))
                            : (img_valid && img_ready);

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q    <= IDLE;
      mode_q     <= 1'b0;
      addr_q     <= '0;
      left_q     <= '0;
      pkt_left_q <= '0;
      chunk_q    <= '0;
      word_q     <= '0;
      is_hdr_q   <= 1'b0;
    end else begin
      unique case (state_q)
        IDLE: if (start && n_words != '0) begin
          mode_q     <= mode;
          addr_q     <= base;
          left_q     <= n_words;
          pkt_left_q <= '0;
          state_q    <= FETCH;
        end
        FETCH: state_q <= WAIT;
        WAIT: begin
          word_q   <= buf_rd_data;
          is_hdr_q <= (pkt_left_q == '0);
          chunk_q  <= '0;
          state_q  <= SEND;
        end
        SEND: begin
          if (mode_q && wp_valid) chunk_q <= chunk_q + 1'b1;
          if (word_done) begin
            if (mode_q) begin
              if (is_hdr_q) pkt_left_q <= cur_hdr.n_words;
              else          pkt_left_q <= pkt_left_q - 1;
            end
            addr_q <= addr_q + 1'b1;
            left_q <= left_q - 1'b1;
            state_q <= (left_q == (AW+1)'(1)) ? IDLE : FETCH;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
