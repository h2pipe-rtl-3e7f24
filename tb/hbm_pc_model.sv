// hbm_pc_model: behavioural model of one HBM pseudo-channel controller with its
// memory, seen through its 256-bit AXI4 port. Simulation only.
//
// Reads: AR requests are queued and answered in order; each burst starts at
// least LAT_MIN cycles after its request, plus a random 0..LAT_RAND cycles, and
// with probability 1/REFRESH_ONE_IN a request is delayed REFRESH_LAT more cycles
// (a refresh). ar_ready drops at random (one cycle in AR_BUSY_ONE_IN). R data
// comes from a sparse memory of 256-bit words addressed by byte address / 32.
// Writes: AW and W are accepted independently (W may lead AW), written to the
// same memory, and each burst is answered with one B response. w_ready is high
// one cycle in W_READY_ONE_IN (1: always), to slow writes down.
// Counters: reads, writes, refreshes.
module hbm_pc_model
  import h2pipe_pkg::*;
#(
  parameter int unsigned LAT_MIN        = 40,
  parameter int unsigned LAT_RAND       = 40,
  parameter int unsigned REFRESH_ONE_IN = 0,   // 0: never
  parameter int unsigned REFRESH_LAT    = 300,
  parameter int unsigned AR_BUSY_ONE_IN = 4,
  parameter int unsigned W_READY_ONE_IN = 1    // w_ready is high one cycle in this many
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    ar_valid,
  output logic    ar_ready,
  input  axi_ar_t ar,
  output logic    r_valid,
  input  logic    r_ready,
  output axi_r_t  r,
  input  logic    aw_valid,
  output logic    aw_ready,
  input  axi_aw_t aw,
  input  logic    w_valid,
  output logic    w_ready,
  input  axi_w_t  w,
  output logic    b_valid,
  input  logic    b_ready
);
  hbm_word_t mem [int unsigned];
  typedef struct { int unsigned word; int unsigned len; axi_id_t id; longint due; } req_t;
  req_t rq[$];
  int unsigned aw_q[$];      // word address of each accepted AW burst
  int unsigned aw_len_q[$];
  hbm_word_t   wdata_q[$];
  int unsigned b_pend;
  longint      cyc;
  int unsigned beat;
  int unsigned n_reads, n_writes, n_refresh;

  function automatic hbm_word_t rd_word(int unsigned a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  initial begin
    cyc = 0; beat = 0; b_pend = 0; n_reads = 0; n_writes = 0; n_refresh = 0;
    ar_ready = 0; r_valid = 0; r = '0; aw_ready = 1; w_ready = 1; b_valid = 0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst) begin
      ar_ready <= 1'b0;
      r_valid  <= 1'b0;
      b_valid  <= 1'b0;
      rq.delete();
      beat = 0;
    end else begin
      // accept read requests
      if (ar_valid && ar_ready) begin
        req_t q;
        q.word = ar.addr / BYTES_PER_WORD;
        q.len  = int'(ar.len) + 1;
        q.id   = ar.id;
        q.due  = cyc + LAT_MIN + ((LAT_RAND > 0) ? $urandom_range(LAT_RAND) : 0);
        if (REFRESH_ONE_IN != 0 && $urandom_range(REFRESH_ONE_IN - 1) == 0) begin
          q.due += REFRESH_LAT;
          n_refresh++;
        end
        if (rq.size() > 0 && q.due < rq[$].due) q.due = rq[$].due;
        rq.push_back(q);
        n_reads++;
      end
      ar_ready <= (AR_BUSY_ONE_IN == 0) || ($urandom_range(AR_BUSY_ONE_IN - 1) != 0);
      // read data
      if (r_valid && r_ready) begin
        beat++;
        if (beat == rq[0].len) begin
          void'(rq.pop_front());
          beat = 0;
        end
      end
      if (rq.size() > 0 && rq[0].due <= cyc) begin
        r_valid <= 1'b1;
        r.data  <= rd_word(rq[0].word + beat);
        r.id    <= rq[0].id;
        r.last  <= (beat + 1 == rq[0].len);
      end else begin
        r_valid <= 1'b0;
      end
      // writes
      if (aw_valid && aw_ready) begin
        aw_q.push_back(aw.addr / BYTES_PER_WORD);
        aw_len_q.push_back(int'(aw.len) + 1);
      end
      if (w_valid && w_ready) wdata_q.push_back(w.data);
      w_ready <= (W_READY_ONE_IN <= 1) || ($urandom_range(W_READY_ONE_IN - 1) == 0);
      if (aw_q.size() > 0 && wdata_q.size() >= aw_len_q[0]) begin
        for (int unsigned i = 0; i < aw_len_q[0]; i++) mem[aw_q[0] + i] = wdata_q.pop_front();
        void'(aw_q.pop_front());
        void'(aw_len_q.pop_front());
        b_pend++;
        n_writes++;
      end
      if (b_valid && b_ready) b_pend--;
      b_valid <= (b_pend > 0);
    end
  end

endmodule
