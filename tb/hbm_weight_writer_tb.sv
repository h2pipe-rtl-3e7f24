// hbm_weight_writer_tb: a writer for pseudo-channel 2 taps a 30-bit bus that
// carries packets for channels 2, 5 and 2 again (with a stray chunk before a
// header to test re-alignment on sop), with random stalls when it reports
// almost_full. An HBM model answers its AXI writes. Checks: only channel-2
// packets reach memory, at the header's word addresses, in bursts of 8; the
// other packet is ignored; done rises at the end.
module hbm_weight_writer_tb;
  import h2pipe_pkg::*;
  logic clk = 0, rst = 1, hbm_clk = 0, hbm_rst = 1;
  logic wp_valid = 0, wp_sop = 0, almost_full;
  logic [WR_PATH_W-1:0] wp_data = '0;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready, done;
  axi_aw_t aw;
  axi_w_t w;
  logic ar_ready, r_valid;
  axi_r_t r;
  int checks = 0, failures = 0, n_af = 0;
  hbm_word_t expect_mem[int];

  always #4 clk = ~clk;
  always #3 hbm_clk = ~hbm_clk;

  hbm_weight_writer #(.PC_ID(2), .BURST_LEN(8)) dut (.*);
  hbm_pc_model u_hbm (.clk(hbm_clk), .rst(hbm_rst), .ar_valid(1'b0), .ar_ready, .ar('0), .r_valid, .r_ready(1'b1), .r,
                      .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send_word(hbm_word_t wd, bit is_hdr);
    logic [WR_CHUNKS*WR_PATH_W-1:0] ext;
    ext = {14'h0, wd};
    for (int c = 0; c < WR_CHUNKS; c++) begin
      while (almost_full) begin n_af++; @(negedge clk); end
      wp_valid = 1; wp_sop = is_hdr && (c == 0); wp_data = ext[c*WR_PATH_W +: WR_PATH_W];
      @(negedge clk);
      wp_valid = 0; wp_sop = 0;
    end
  endtask

  task automatic send_packet(int pc, int start_w, int n);
    wr_hdr_t h;
    h = '0; h.pc = 5'(pc); h.start_word = 24'(start_w); h.n_words = 32'(n);
    send_word({192'h0, h}, 1);
    for (int i = 0; i < n; i++) begin
      hbm_word_t d;
      d = {8{$urandom}};
      if (pc == 2) expect_mem[start_w + i] = d;
      send_word(d, 0);
    end
  endtask

  initial begin
    #40 rst = 0; hbm_rst = 0;
    @(negedge clk);
    send_packet(2, 100, 16);
    send_packet(5, 0, 8);
    // stray chunk, then a header: the writer must re-align on sop
    wp_valid = 1; wp_data = '1; @(negedge clk); wp_valid = 0;
    send_packet(2, 400, 24);
    repeat (200) @(negedge clk);
    wait (done);
    check(u_hbm.n_writes == 5, $sformatf("5 bursts written (%0d)", u_hbm.n_writes));
    foreach (expect_mem[a]) check(u_hbm.mem.exists(a) && u_hbm.mem[a] == expect_mem[a], $sformatf("word %0d", a));
    check(u_hbm.mem.size() == 40, $sformatf("nothing else written (%0d)", u_hbm.mem.size()));
    $display("almost_full waits: %0d", n_af);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
