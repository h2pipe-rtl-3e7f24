// h2pipe_pkg: constants, types and helper functions shared by the H2PIPE weight
// path and layer engines.
//
// Sizes that come from the architecture: 256-bit HBM pseudo-channel data port of
// which 240 bits (three 80-bit weight vectors) are used, 80-bit weight vector per
// tensor chain per cycle (10 x int8), groups of 6 tensor blocks per last-stage
// FIFO, 512-deep last-stage FIFOs, a 30-bit weight write bus, 32 pseudo-channels
// fed at up to 3 tensor chains each, burst length 8. The AXI address width, ID
// width and the packet header layout of the weight write stream are choices of
// this implementation.
package h2pipe_pkg;

  localparam int unsigned AXI_DATA_W   = 256;  // pseudo-channel data port
  localparam int unsigned AXI_ADDR_W   = 28;   // 256 MB per pseudo-channel (byte address)
  localparam int unsigned AXI_ID_W     = 2;    // layer slot within a pseudo-channel
  localparam int unsigned WVEC_W       = 80;   // weight vector: 10 x int8
  localparam int unsigned VEC_PER_WORD = 3;    // 3 x 80 = 240 of the 256 bits used
  localparam int unsigned WORD_USED_W  = WVEC_W * VEC_PER_WORD;  // 240
  localparam int unsigned DOT_N        = 10;   // elements per dot product
  localparam int unsigned N_DOT        = 3;    // dot products per tensor block
  localparam int unsigned ACT_PER_TB   = DOT_N * N_DOT;  // 30 int8 activations
  localparam int unsigned DOT_W        = 20;   // exact width of a 10-term int8 dot product
  localparam int unsigned GROUP_SIZE   = 6;    // tensor blocks per last-stage FIFO
  localparam int unsigned LAST_DEPTH   = 512;  // last-stage FIFO depth
  localparam int unsigned BURST_LEN    = 8;    // HBM read burst length
  localparam int unsigned N_PC         = 32;   // pseudo-channels, two stacks
  localparam int unsigned LAYERS_PER_PC = 3;   // tensor chains per pseudo-channel
  localparam int unsigned WR_PATH_W    = 30;   // weight write bus width
  localparam int unsigned WR_CHUNKS    = (AXI_DATA_W + WR_PATH_W - 1) / WR_PATH_W;  // 9
  localparam int unsigned BYTES_PER_WORD = AXI_DATA_W / 8;  // 32
  localparam int unsigned INBUF_WORDS  = 224 * 224 * 3 * 2 / BYTES_PER_WORD;  // 9408

  typedef logic [WVEC_W-1:0]      wvec_t;
  typedef logic [AXI_DATA_W-1:0]  hbm_word_t;
  typedef logic [AXI_ADDR_W-1:0]  hbm_addr_t;
  typedef logic [AXI_ID_W-1:0]    axi_id_t;

  // AXI4 channel payloads (valid/ready travel beside them)
  typedef struct packed {
    hbm_addr_t  addr;
    logic [7:0] len;   // beats - 1
    axi_id_t    id;
  } axi_ar_t;

  typedef struct packed {
    hbm_word_t data;
    axi_id_t   id;
    logic      last;
  } axi_r_t;

  typedef struct packed {
    hbm_addr_t  addr;
    logic [7:0] len;
  } axi_aw_t;

  typedef struct packed {
    hbm_word_t data;
    logic      last;
  } axi_w_t;

  // Header word of a weight-write packet (low 64 bits of a 256-bit word)
  typedef struct packed {
    logic [31:0] n_words;     // data words that follow
    logic [23:0] start_word;  // first 256-bit word address in the channel
    logic [2:0]  rsvd;
    logic [4:0]  pc;          // target pseudo-channel
  } wr_hdr_t;

  // Credits a layer starts with: whole bursts that fit in a last-stage FIFO.
  function automatic int unsigned credits_for(int unsigned burst_len);
    return LAST_DEPTH / (VEC_PER_WORD * burst_len);
  endfunction

  // Clockwise pseudo-channel order: the k-th channel used is 0..15, then 31..16.
  function automatic int unsigned pc_of_rank(int unsigned k);
    return (k < 16) ? k : (47 - k);
  endfunction

  // Number of set bits below position l of a mask (rank of layer l among offloaded ones).
  function automatic int unsigned rank_below(logic [63:0] mask, int unsigned l);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < l; i++) r += int'(mask[i]);
    return r;
  endfunction

endpackage
