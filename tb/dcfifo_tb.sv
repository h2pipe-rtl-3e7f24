// dcfifo_tb: writes 3000 random words from a 3.33 ns clock domain and reads them
// in a 5 ns domain (and the reverse ratio for a second pass), with random
// enables; checks order, that nothing is lost or duplicated, that full is seen
// and that wr_free never exceeds the depth.
module dcfifo_tb;
  localparam int WD = 16, AW = 4;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [WD-1:0] wr_data = '0, rd_data;
  logic [AW:0] wr_free;
  logic [WD-1:0] model[$];
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, fulls = 0;
  int wper = 3, rper = 5;

  dcfifo #(.WIDTH(WD), .ADDR_W(AW)) dut (.*);
  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

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

  always @(posedge wclk) begin
    if (!wrst) begin
      if (wr_en && !full) begin model.push_back(wr_data); n_wr++; end
      if (full) fulls++;
      check(wr_free <= 16, "wr_free within depth");
      wr_en   <= (n_wr < 3000 * (wper == 3 ? 1 : 2)) && ($urandom_range(3) != 0);
      wr_data <= WD'($urandom);
    end
  end
  always @(posedge rclk) begin
    if (!rrst) begin
      if (rd_en && !empty) begin
        check(model.size() > 0 && rd_data == model[0], "order");
        if (model.size() > 0) void'(model.pop_front());
        n_rd++;
      end
      rd_en <= ($urandom_range(4) != 0);
    end
  end

  initial begin
    #20 wrst = 0; rrst = 0;
    wait (n_rd == 3000);
    check(fulls > 0, "full seen with the faster writer");
    wper = 7; rper = 2;
    wait (n_rd == 6000);
    #200;
    check(model.size() == 0 && empty, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
