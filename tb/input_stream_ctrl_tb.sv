// input_stream_ctrl_tb: drives the controller with an input buffer behind it.
// Image mode: 20 words with a random img_ready; checks order and count.
// Weight mode: two packets (header + data words); checks that every word comes
// out as 9 x 30-bit chunks that reassemble to the buffer word, that wp_sop marks
// exactly the first chunk of each header, and that nothing is sent while
// wp_stall is high (random stalls).
module input_stream_ctrl_tb;
  import h2pipe_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst = 1;
  logic start = 0, mode = 0, busy;
  logic [5:0] base = '0;
  logic [6:0] n_words = '0;
  logic buf_rd_en, wr_en = 0;
  logic [5:0] buf_rd_addr, wr_addr = '0;
  hbm_word_t buf_rd_data, wr_data = '0, img_data;
  logic img_valid, img_ready = 0, wp_valid, wp_sop, wp_stall = 0;
  logic [WR_PATH_W-1:0] wp_data;
  hbm_word_t model[D];
  int checks = 0, failures = 0, n_img = 0, n_chunk = 0, n_sop = 0, n_stall = 0;
  logic [WR_CHUNKS*WR_PATH_W-1:0] asm;
  int wexp = 0;

  input_buffer #(.DEPTH(D)) u_buf (.clk, .wr_en, .wr_addr, .wr_data, .rd_en(buf_rd_en), .rd_addr(buf_rd_addr), .rd_data(buf_rd_data));
  input_stream_ctrl #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // weight packets at words 30..34: hdr(pc 3, 2 words), d, d, hdr(pc 1, 1 word), d
  function automatic hbm_word_t hdr(int pc, int start_w, int n);
    wr_hdr_t h;
    h = '0; h.pc = 5'(pc); h.start_word = 24'(start_w); h.n_words = 32'(n);
    return {192'h0, h};
  endfunction

  // drive ready/stall at the falling edge, then sample what the next rising
  // edge will transfer
  always @(negedge clk) begin
    img_ready = ($urandom_range(2) != 0);
    wp_stall = ($urandom_range(4) == 0);
    #1;
    if (!rst) begin
      if (img_valid && img_ready) begin
        check(img_data == model[n_img], $sformatf("image word %0d", n_img));
        n_img++;
      end
      if (wp_stall) begin
        n_stall++;
      end
      if (wp_valid) begin
        check(!wp_stall, "no chunk during stall");
        check(wp_sop == ((wexp == 0 || wexp == 3) && n_chunk % 9 == 0), "sop placement");
        if (wp_sop) n_sop++;
        asm = {wp_data, asm[WR_CHUNKS*WR_PATH_W-1:WR_PATH_W]};
        n_chunk++;
        if (n_chunk % 9 == 0) begin
          check(asm[255:0] == model[30 + wexp] && asm[269:256] == 0, $sformatf("weight word %0d", wexp));
          wexp++;
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < D; i++) model[i] = {8{$urandom}};
    model[30] = hdr(3, 5, 2); model[33] = hdr(1, 0, 1);
    for (int i = 0; i < D; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(i); wr_data = model[i];
    end
    @(negedge clk); wr_en = 0; rst = 0;
    @(negedge clk); start = 1; mode = 0; base = 0; n_words = 20;
    @(negedge clk); start = 0;
    wait (!busy); repeat (3) @(negedge clk);
    check(n_img == 20, "20 image words");
    start = 1; mode = 1; base = 30; n_words = 5;
    @(negedge clk); start = 0;
    wait (!busy); repeat (3) @(negedge clk);
    check(wexp == 5, "5 weight words");
    check(n_sop == 2, "two headers flagged");
    check(n_stall > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
