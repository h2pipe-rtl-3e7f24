// hbm_weight_writer: boot-time weight write path of one HBM pseudo-channel.
//
// At boot the host's weight stream runs past every pseudo-channel on a narrow
// 30-bit pipelined bus. This block taps the bus, reassembles 256-bit words from
// 9 chunks (wp_sop re-aligns on every packet header), decodes packet headers and
// keeps only the packets addressed to PC_ID. Kept words cross to the HBM clock in
// a DCFIFO; there the write-address control turns each packet into AXI write
// bursts of BURST_LEN beats starting at the header's word address, and counts
// write responses. Deserialising right before the AXI port keeps the long bus
// narrow.
//
// Interface: bus tap (wp_valid, wp_sop, wp_data), almost_full back to the bus
// source (fewer than AF_MARGIN free DCFIFO entries), AXI4 AW/W/B, done (nothing
// buffered, no burst or response outstanding; HBM clock domain).
// Timing: one word per 9 bus chunks; AW for the next burst may run ahead of the
// W data. Packet word counts must be multiples of BURST_LEN. The narrow bus,
// late deserialisation, wr_addr control and DCFIFO follow the paper; the packet
// format, bus pause and burst length are this design's choices.
module hbm_weight_writer
  import h2pipe_pkg::*;
#(
  parameter int unsigned PC_ID     = 0,
  parameter int unsigned BURST_LEN = h2pipe_pkg::BURST_LEN,
  parameter int unsigned DC_ADDR_W = 4,
  parameter int unsigned AF_MARGIN = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 wp_valid,
  input  logic                 wp_sop,
  input  logic [WR_PATH_W-1:0] wp_data,
  output logic                 almost_full,
  input  logic                 hbm_clk,
  input  logic                 hbm_rst,
  output logic                 aw_valid,
  input  logic                 aw_ready,
  output axi_aw_t              aw,
  output logic                 w_valid,
  input  logic                 w_ready,
  output axi_w_t               w,
  input  logic                 b_valid,
  output logic                 b_ready,
  output logic                 done
);
  // ---------------- core clock: deserialise and filter ----------------
  logic [WR_CHUNKS*WR_PATH_W-1:0] sh_q;
  logic [$clog2(WR_CHUNKS)-1:0]   cnt_q;
  logic                           hdr_q;      // word being assembled is a header
  logic [31:0]                    pkt_left_q;
  logic                           mine_q;
  logic                           push;
  logic [AXI_DATA_W:0]            push_data;  // {is_header, word}
  logic [DC_ADDR_W:0]             wr_free;

  logic [WR_CHUNKS*WR_PATH_W-1:0] sh_next;
  logic                           chunk_hdr;
  logic                           word_end;
  hbm_word_t                      word;
  wr_hdr_t                        hdr;

  assign chunk_hdr = wp_sop ? 1'b1 : hdr_q;
  assign sh_next   = {wp_data, sh_q[WR_CHUNKS*WR_PATH_W-1:WR_PATH_W]};
  assign word_end  = wp_valid && ((wp_sop ? '0 : cnt_q) == $bits(cnt_q)'(WR_CHUNKS - 1));
  assign word      = sh_next[AXI_DATA_W-1:0];
  assign hdr       = wr_hdr_t'(word[63:0]);

  always_comb begin
    push      = 1'b0;
    push_data = {chunk_hdr, word};
    if (word_end) begin
      if (chunk_hdr) push = (hdr.pc == 5'(PC_ID));
      else           push = mine_q && (pkt_left_q != 0);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sh_q       <= '0;
      cnt_q      <= '0;
      hdr_q      <= 1'b0;
      pkt_left_q <= '0;
      mine_q     <= 1'b0;
    end else if (wp_valid) begin
      sh_q <= sh_next;
      if (word_end) begin
        cnt_q <= '0;
        hdr_q <= 1'b0;
        if (chunk_hdr) begin
          pkt_left_q <= hdr.n_words;
          mine_q     <= (hdr.pc == 5'(PC_ID));
        end else if (pkt_left_q != 0) begin
          pkt_left_q <= pkt_left_q - 1;
        end
      end else begin
        cnt_q <= (wp_sop ? '0 : cnt_q) + 1'b1;
        hdr_q <= chunk_hdr;
      end
    end
  end

  assign almost_full = (wr_free < (DC_ADDR_W+1)'(AF_MARGIN));

  logic               dc_empty, dc_pop;
  logic [AXI_DATA_W:0] dc_head;

  dcfifo #(.WIDTH(AXI_DATA_W + 1), .ADDR_W(DC_ADDR_W)) u_dc (
    .wclk(clk), .wrst(rst), .wr_en(push), .wr_data(push_data), .full(), .wr_free,
    .rclk(hbm_clk), .rrst(hbm_rst), .rd_en(dc_pop), .rd_data(dc_head), .empty(dc_empty)
  );

  // ---------------- HBM clock: write address control ----------------
  localparam int unsigned BW = $clog2(BURST_LEN);
  logic [31:0]  aw_left_q;    // bursts whose AW is still to be sent
  hbm_addr_t    aw_addr_q;
  logic [BW-1:0] beat_q;
  logic [15:0]  b_out_q;      // AW sent, B not yet received
  logic         head_hdr;
  wr_hdr_t      head_fields;

  assign head_hdr    = !dc_empty && dc_head[AXI_DATA_W];
  assign head_fields = wr_hdr_t'(dc_head[63:0]);

  logic take_hdr;
  assign take_hdr = head_hdr && (aw_left_q == 0) && (beat_q == '0);

  assign w_valid = !dc_empty && !dc_head[AXI_DATA_W];
  assign w.data  = dc_head[AXI_DATA_W-1:0];
  assign w.last  = (beat_q == BW'(BURST_LEN - 1));
  assign dc_pop  = take_hdr || (w_valid && w_ready);
  assign aw_valid = (aw_left_q != 0);
  assign aw.addr  = aw_addr_q;
  assign aw.len   = 8'(BURST_LEN - 1);
  assign b_ready  = 1'b1;

  always_ff @(posedge hbm_clk) begin
    if (hbm_rst) begin
      aw_left_q <= '0;
      aw_addr_q <= '0;
      beat_q    <= '0;
      b_out_q   <= '0;
    end else begin
      if (take_hdr) begin
        aw_left_q <= head_fields.n_words / BURST_LEN;
        aw_addr_q <= hbm_addr_t'(head_fields.start_word) * hbm_addr_t'(BYTES_PER_WORD);
      end else if (aw_valid && aw_ready) begin
        aw_left_q <= aw_left_q - 1;
        aw_addr_q <= aw_addr_q + hbm_addr_t'(BURST_LEN * BYTES_PER_WORD);
      end
      if (w_valid && w_ready) beat_q <= beat_q + 1'b1;
      b_out_q <= b_out_q + 16'(aw_valid && aw_ready) - 16'(b_valid);
    end
  end

  assign done = dc_empty && (aw_left_q == 0) && (b_out_q == '0) && (beat_q == '0);

endmodule
