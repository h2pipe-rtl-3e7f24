// layer_engine_tb: two engines (2 groups x 6 tensor blocks, 36 positions wide,
// 10 -> 10 channels), one fed from an HBM-style weight stream and one from its
// on-chip weight memory, compute 30 random lines each. Every output row is
// compared with a reference 1x1 convolution (ReLU, >>6, saturate). The HBM
// stream is paced by credits returned on dequeue and pauses at random, so the
// engine freezes; the checks count freezes and dequeues, and that the on-chip
// engine, never starved, produces a line every C_OUT + 2 cycles.
module layer_engine_tb;
  import h2pipe_pkg::*;
  localparam int G = 2, W = 36, C = 10, BL = 8, SET = 24, VPL = 24, LINES = 30;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // shared stimulus
  logic [C*W*8-1:0] lines[LINES];
  wvec_t wh[VPL], wo[C];

  function automatic logic [7:0] ref_out(logic [C*W*8-1:0] a, wvec_t w, int x);
    int s;
    s = 0;
    for (int i = 0; i < 10; i++) s += $signed(a[(i*W + x)*8 +: 8]) * $signed(w[8*i +: 8]);
    s = s >>> 6;
    if (s < 0) s = 0;
    if (s > 127) s = 127;
    return 8'(s);
  endfunction

  // ---------------- engines ----------------
  logic [1:0] act_valid, act_release, out_ready, out_wr_en, out_line_done, freeze, stall, ovf, deq;
  logic [1:0][C*W*8-1:0] act_line;
  logic [1:0][3:0] out_row;
  logic [1:0][W*8-1:0] out_data;
  logic w_in_valid = 0;
  wvec_t w_in = '0;
  logic ow_wr_en = 0;
  logic [3:0] ow_wr_addr = '0;
  wvec_t ow_wr_data = '0;

  layer_engine #(.N_GROUPS(G), .C_OUT(C), .BURST_LEN(BL), .USE_HBM(1)) u_hbm (
    .clk, .rst, .act_valid(act_valid[0]), .act_line(act_line[0]), .act_release(act_release[0]),
    .out_ready(out_ready[0]), .out_wr_en(out_wr_en[0]), .out_row(out_row[0]), .out_data(out_data[0]),
    .out_line_done(out_line_done[0]), .w_in_valid, .w_in, .dequeue(deq[0]),
    .ow_wr_en(1'b0), .ow_wr_addr('0), .ow_wr_data('0), .freeze(freeze[0]), .stall(stall[0]), .overflow(ovf[0]));
  layer_engine #(.N_GROUPS(G), .C_OUT(C), .BURST_LEN(BL), .USE_HBM(0)) u_onc (
    .clk, .rst, .act_valid(act_valid[1]), .act_line(act_line[1]), .act_release(act_release[1]),
    .out_ready(out_ready[1]), .out_wr_en(out_wr_en[1]), .out_row(out_row[1]), .out_data(out_data[1]),
    .out_line_done(out_line_done[1]), .w_in_valid(1'b0), .w_in('0), .dequeue(deq[1]),
    .ow_wr_en, .ow_wr_addr, .ow_wr_data, .freeze(freeze[1]), .stall(stall[1]), .overflow(ovf[1]));

  // ---------------- input lines and outputs ----------------
  int in_idx[2], out_line[2], rows_seen[2], n_freeze = 0, n_deq = 0, credits = 21, sent = 0;
  longint last_done[2];
  int max_period = 0;

  always @(negedge clk) begin
    #1;
    if (!rst) begin
      for (int e = 0; e < 2; e++) begin
        // outputs of the cycle that just ended
        if (out_wr_en[e]) begin
          for (int x = 0; x < W; x++)
            check(out_data[e][x*8 +: 8] == ref_out(lines[out_line[e]], e ? wo[out_row[e]] : wh[out_row[e]], x),
                  $sformatf("engine %0d line %0d row %0d x %0d got %0d exp %0d t=%0t", e, out_line[e], out_row[e], x, out_data[e][x*8 +: 8], ref_out(lines[out_line[e]], e ? wo[out_row[e]] : wh[out_row[e]], x), $time));
          check(int'(out_row[e]) == rows_seen[e], "row order");
          rows_seen[e]++;
        end
        if (out_line_done[e]) begin
          check(rows_seen[e] == C, "10 rows per line");
          if (e == 1 && out_line[e] > 2 && $time / 10 - last_done[e] > max_period) max_period = int'($time / 10 - last_done[e]);
          last_done[e] = $time / 10;
          rows_seen[e] = 0;
          out_line[e]++;
        end
      end
      if (stall[0]) n_freeze++;
      if (deq[0]) begin n_deq++; credits++; end
    end
  end

  // drive inputs at the falling edge
  always @(negedge clk) begin
    if (!rst) begin
      for (int e = 0; e < 2; e++) begin
        act_valid[e] = (in_idx[e] < LINES);
        act_line[e]  = lines[in_idx[e] < LINES ? in_idx[e] : 0];
      end
      #1;
      for (int e = 0; e < 2; e++) if (act_release[e]) in_idx[e]++;  // taken at the coming edge
      out_ready[0] = ($urandom_range(3) != 0);
      out_ready[1] = 1'b1;
      // HBM weight stream: whole bursts only while credits remain, random pauses
      w_in_valid = 0;
      if ((sent % SET != 0 || credits > 0) && $urandom_range(((sent / 200) % 2) ? 7 : 0) == 0) begin
        if (sent % SET == 0) credits--;
        w_in_valid = 1;
        w_in = wh[sent % VPL];
        sent++;
      end
    end
  end

  initial begin
    for (int l = 0; l < LINES; l++) for (int b = 0; b < C*W; b++) lines[l][8*b +: 8] = 8'($urandom);
    for (int v = 0; v < VPL; v++) wh[v] = {$urandom, $urandom, 16'($urandom)};
    for (int v = 0; v < C; v++) wo[v] = {$urandom, $urandom, 16'($urandom)};
    for (int e = 0; e < 2; e++) begin in_idx[e] = 0; out_line[e] = 0; rows_seen[e] = 0; last_done[e] = 0; end
    act_valid = '0; out_ready = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int v = 0; v < C; v++) begin
      ow_wr_en = 1; ow_wr_addr = 4'(v); ow_wr_data = wo[v];
      @(negedge clk);
    end
    ow_wr_en = 0;
    wait (out_line[0] == LINES && out_line[1] == LINES);
    check(n_freeze > 0, $sformatf("freeze happened (%0d cycles)", n_freeze));
    check(n_deq == LINES, $sformatf("one dequeue per line of 24 vectors (%0d)", n_deq));
    check(!ovf[0], "no last-stage overflow");
    check(max_period <= C + 2, $sformatf("on-chip engine line period %0d <= %0d", max_period, C + 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
