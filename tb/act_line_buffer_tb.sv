// act_line_buffer_tb: a producer writes lines of 10 channel rows at random
// times and a consumer releases them at random times; checks that lines come
// out whole and in order, that the producer is held off only when both banks are
// full (and that this happens), and the row layout of rd_line.
module act_line_buffer_tb;
  localparam int W = 6, C = 10;
  logic clk = 0, rst = 1, wr_en = 0, wr_line_done = 0, wr_ready, rd_valid, rd_release = 0;
  logic [$clog2(C)-1:0] wr_row = '0;
  logic [W*8-1:0] wr_data = '0;
  logic [C*W*8-1:0] rd_line;
  logic [C*W*8-1:0] lines[$];
  logic [C*W*8-1:0] cur;
  int checks = 0, failures = 0, n_out = 0, n_in = 0, blocked = 0, row = 0;

  act_line_buffer #(.W(W), .C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) begin
    if (!rst) begin
      // consumer
      rd_release = 0;
      if (rd_valid && $urandom_range(((n_out / 20) % 2) ? 1 : 15) == 0) begin
        check(lines.size() > 0 && rd_line == lines[0], $sformatf("line %0d", n_out));
        void'(lines.pop_front());
        rd_release = 1; n_out++;
      end
      // producer
      wr_en = 0; wr_line_done = 0;
      if (n_in < 100 && $urandom_range(1) == 0) begin
        if (!wr_ready) blocked++;
        else begin
          wr_en = 1; wr_row = 4'(row);
          wr_data = {$urandom, 16'($urandom)};
          cur[row*W*8 +: W*8] = wr_data;
          if (row == C - 1) begin
            wr_line_done = 1; lines.push_back(cur); n_in++; row = 0;
          end else row++;
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    wait (n_out == 100);
    check(blocked > 0, "producer held off when both banks full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
