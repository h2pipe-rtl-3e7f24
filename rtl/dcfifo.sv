// dcfifo: dual-clock FIFO between the HBM controller clock and the fabric clock.
//
// Classic asynchronous FIFO: binary pointers in each domain, their Gray-coded
// copies crossed into the other domain through two flip-flops. full is computed
// on the write side, empty on the read side, each from its own pointer and the
// synchronised far pointer, so both are conservative (never wrong, sometimes a
// few cycles late to clear). Show-ahead read: rd_data is the head when !empty.
// wr_free gives the (conservative) free entries on the write side.
//
// Interface: write side (wclk, wrst, wr_en, wr_data, full, wr_free), read side
// (rclk, rrst, rd_en, rd_data, empty). A write while full or a read while empty
// is ignored. Depth is 2**ADDR_W. The paper names the DCFIFO and its place in the
// read and write paths; the structure and depth are this design's choices.
module dcfifo #(
  parameter int unsigned WIDTH  = 242,
  parameter int unsigned ADDR_W = 6
) (
  input  logic              wclk,
  input  logic              wrst,
  input  logic              wr_en,
  input  logic [WIDTH-1:0]  wr_data,
  output logic              full,
  output logic [ADDR_W:0]   wr_free,
  input  logic              rclk,
  input  logic              rrst,
  input  logic              rd_en,
  output logic [WIDTH-1:0]  rd_data,
  output logic              empty
);
  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [WIDTH-1:0] mem [DEPTH];

  logic [ADDR_W:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [ADDR_W:0] rgray_w1, rgray_w2;  // read pointer in write domain
  logic [ADDR_W:0] wgray_r1, wgray_r2;  // write pointer in read domain

  function automatic logic [ADDR_W:0] bin2gray(logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [ADDR_W:0] gray2bin(logic [ADDR_W:0] g);
    logic [ADDR_W:0] b;
    b[ADDR_W] = g[ADDR_W];
    for (int i = int'(ADDR_W) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic do_wr;
  logic [ADDR_W:0] rbin_w;
  assign do_wr  = wr_en && !full;
  assign rbin_w = gray2bin(rgray_w2);
  assign full   = (wgray_q == {~rgray_w2[ADDR_W:ADDR_W-1], rgray_w2[ADDR_W-2:0]});
  assign wr_free = (ADDR_W+1)'(DEPTH) - (wbin_q - rbin_w);

  always_ff @(posedge wclk) if (do_wr) mem[wbin_q[ADDR_W-1:0]] <= wr_data;

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin_q   <= '0;
      wgray_q  <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      if (do_wr) begin
        wbin_q  <= wbin_q + 1'b1;
        wgray_q <= bin2gray(wbin_q + 1'b1);
      end
      rgray_w1 <= rgray_q;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---------------- read domain ----------------
  logic do_rd;
  assign empty = (rgray_q == wgray_r2);
  assign do_rd = rd_en && !empty;
  assign rd_data = mem[rbin_q[ADDR_W-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin_q   <= '0;
      rgray_q  <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      if (do_rd) begin
        rbin_q  <= rbin_q + 1'b1;
        rgray_q <= bin2gray(rbin_q + 1'b1);
      end
      wgray_r1 <= wgray_q;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
