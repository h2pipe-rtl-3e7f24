// bm_router_tb: random head words, IDs and full flags; checks that the word is
// written to exactly the FIFO its ID names, that the DCFIFO is popped only when
// that FIFO has room, that a full target holds the head (hol_wait) and that an
// ID beyond the layer count is dropped.
module bm_router_tb;
  import h2pipe_pkg::*;
  localparam int N = 3;
  logic in_valid, in_pop, hol_wait;
  logic [239:0] in_data, bm_data;
  axi_id_t in_id;
  logic [N-1:0] bm_wr, bm_full;
  int checks = 0, failures = 0, waits = 0;

  bm_router #(.N_LAYERS(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      in_valid = ($urandom_range(3) != 0);
      in_id    = axi_id_t'($urandom_range(3));
      in_data  = {8{$urandom}};
      bm_full  = N'($urandom);
      #1;
      if (!in_valid) check(!in_pop && bm_wr == 0, "idle");
      else if (in_id >= N) check(in_pop && bm_wr == 0, "unknown id dropped");
      else if (bm_full[in_id]) begin
        check(!in_pop && bm_wr == 0 && hol_wait, "blocked on full target");
        waits++;
      end else check(in_pop && bm_wr == (N'(1) << in_id) && bm_data == in_data && !hol_wait, "routed");
      #1;
    end
    check(waits > 0, "blocking case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
