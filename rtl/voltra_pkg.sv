// voltra_pkg: types and constants shared by the accelerator.
//
// The memory system is a set of 64-bit requester ports into a 32-bank, 64-bit
// wide shared memory (128 KB). Byte addresses are 17 bits: bits [2:0] select
// the byte in a word, [7:3] the bank and [16:8] the row, so eight consecutive
// aligned words form one 512-bit super bank. Bank count, width and capacity
// follow the paper; the interleaving, the request/response structs and the CSR
// address map are this design's own choices.
package voltra_pkg;

  // ---------------- memory system ----------------
  localparam int unsigned WORD_W     = 64;
  localparam int unsigned BANKS      = 32;
  localparam int unsigned BANK_WORDS = 512;                 // 128 KB / 32 / 8 B
  localparam int unsigned BANK_AW    = $clog2(BANK_WORDS);  // 9
  localparam int unsigned BANK_SEL_W = $clog2(BANKS);       // 5
  localparam int unsigned ADDR_W     = 3 + BANK_SEL_W + BANK_AW; // 17

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [WORD_W-1:0] word_t;

  // One 64-bit port request. gnt comes back in the same cycle, read data one
  // cycle after the grant.
  typedef struct packed {
    logic  req;
    logic  we;
    addr_t addr;
    word_t wdata;
  } mem_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    word_t rdata;
  } mem_rsp_t;

  // ---------------- address generation ----------------
  localparam int unsigned MAX_DIMS = 6;
  localparam int unsigned BOUND_W  = 16;

  typedef struct packed {
    addr_t                              base;
    logic [MAX_DIMS-1:0][BOUND_W-1:0]   bound;   // dim 0 innermost, 0/1 = unused
    logic [MAX_DIMS-1:0][ADDR_W-1:0]    stride;  // two's complement byte stride
  } agu_cfg_t;

  typedef struct packed {
    agu_cfg_t    agu;
    logic [ADDR_W-1:0] ch_stride;  // address offset between channels
    logic        transpose;        // weight streamer only
  } stream_cfg_t;

  // ---------------- GEMM core ----------------
  localparam int unsigned MU = 8, NU = 8, KU = 8;
  localparam int unsigned ACC_W = 32;
  localparam int unsigned A_W = MU*KU*8;      // 512
  localparam int unsigned B_W = NU*KU*8;      // 512
  localparam int unsigned C_W = MU*NU*ACC_W;  // 2048

  typedef struct packed {
    logic [15:0] m_tiles;
    logic [15:0] n_tiles;
    logic [15:0] k_tiles;
    logic        psum_en;   // initialise accumulators from the psum streamer
    logic        quant_en;  // route results to the SIMD instead of the output streamer
  } gemm_cfg_t;

  // ---------------- quantization SIMD ----------------
  typedef struct packed {
    logic signed [31:0] mult;
    logic        [5:0]  shift;
    logic signed [7:0]  zp;
    logic               relu;
  } simd_cfg_t;

  // ---------------- data reshuffler ----------------
  typedef enum logic [1:0] {
    RS_COPY      = 2'd0,   // gathered words passed through
    RS_TRANSPOSE = 2'd1,   // 8x8 byte transpose
    RS_MAXPOOL   = 2'd2    // max over a window of sequential 64-bit vectors
  } rs_mode_e;

  typedef struct packed {
    rs_mode_e    mode;
    logic [15:0] window;
  } reshuf_cfg_t;

  // ---------------- CSR map (8-bit register index) ----------------
  // Streamer s (0..6) owns registers 16*s .. 16*s+15:
  //   +0 base, +1..+6 bound[0..5], +7..+12 stride[0..5], +13 ch_stride,
  //   +14 transpose.
  localparam int unsigned ST_INPUT = 0, ST_WEIGHT = 1, ST_PSUM = 2, ST_OUTPUT = 3,
                          ST_QOUT = 4, ST_RIN = 5, ST_ROUT = 6, NUM_ST = 7;
  localparam logic [7:0] CSR_GEMM_M     = 8'h70;
  localparam logic [7:0] CSR_GEMM_N     = 8'h71;
  localparam logic [7:0] CSR_GEMM_K     = 8'h72;
  localparam logic [7:0] CSR_GEMM_FLAGS = 8'h73;  // bit0 psum_en, bit1 quant_en
  localparam logic [7:0] CSR_SIMD_MULT  = 8'h78;
  localparam logic [7:0] CSR_SIMD_SHIFT = 8'h79;
  localparam logic [7:0] CSR_SIMD_ZP    = 8'h7A;
  localparam logic [7:0] CSR_SIMD_RELU  = 8'h7B;
  localparam logic [7:0] CSR_RS_MODE    = 8'h7C;
  localparam logic [7:0] CSR_RS_WINDOW  = 8'h7D;
  localparam logic [7:0] CSR_START      = 8'h7E;  // write: one bit per unit
  localparam logic [7:0] CSR_BUSY       = 8'h7F;  // read: one bit per unit
  // start/busy bit positions: 0..6 streamers as above, 7 GEMM core, 8 reshuffler
  localparam int unsigned UNIT_GEMM = 7, UNIT_RESHUF = 8, NUM_UNITS = 9;

endpackage
