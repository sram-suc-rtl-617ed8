// suc_pkg: constants and types shared by the SRAM-SUC blocks.
//
// The cipher is a 64-bit substitution-permutation network built from eight
// 8-bit involutive S-boxes (IS_0..IS_7, IS_i on bits [8i+7:8i]) and an
// involutive bit permutation. The S-boxes live in one 2048 x 8 SRAM, addressed
// by {3-bit S-box number, 8-bit S-box input}. The round count (15 rounds of
// S-layer plus permutation, then a final S-layer) and the 144-cycle latency
// follow the paper; the APB request/response structs are this design's own
// way of bundling the APB3 signals.
package suc_pkg;

  localparam int unsigned BLOCK_W     = 64;   // cipher block width
  localparam int unsigned SBOX_W      = 8;    // S-box width
  localparam int unsigned N_SBOX      = BLOCK_W / SBOX_W;       // 8
  localparam int unsigned SBOX_SEL_W  = $clog2(N_SBOX);         // 3
  localparam int unsigned RAM_ADDR_W  = SBOX_SEL_W + SBOX_W;    // 11
  localparam int unsigned FULL_ROUNDS = 15;   // S-layer + P-layer rounds
  localparam int unsigned PAIRS       = N_SBOX / 2;             // 4 reads of two S-boxes
  localparam int unsigned PAIR_W      = $clog2(PAIRS);          // 2

  // APB3 bus width of the MSS fabric interface
  localparam int unsigned APB_ADDR_W  = 16;
  localparam int unsigned APB_DATA_W  = 32;

  typedef logic [BLOCK_W-1:0] block_t;

  typedef struct packed {
    logic [APB_ADDR_W-1:0] paddr;
    logic                  psel;
    logic                  penable;
    logic                  pwrite;
    logic [APB_DATA_W-1:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic [APB_DATA_W-1:0] prdata;
    logic                  pready;
    logic                  pslverr;
  } apb_rsp_t;

  // SUC controller states (Sec. VI.B.2: NOP, RUN, READY)
  typedef enum logic [1:0] {
    ST_NOP   = 2'd0,
    ST_RUN   = 2'd1,
    ST_READY = 2'd2
  } suc_state_t;

endpackage
