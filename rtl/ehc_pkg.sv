// ehc_pkg: constants and types shared by the Hawkeye + Expected Hit Count (EHC)
// last-level-cache replacement logic.
//
// The numbers that come from the evaluated configuration are: a 2 MB, 16-way
// shared LLC per core; a 3-bit RRPV per block (Hawkeye); a 3-bit Expected
// Further Hits count-down counter per block (EHC) loaded with 1 on a fill; a
// Belady emulation history of eight times the associativity per sampled set;
// one sampled set in every sixty-four. The 64-byte block, the 48-bit physical
// address, the 64-bit PC and the predictor table size are this design's own
// choices.
package ehc_pkg;

  // Cache geometry (2 MB / 64 B / 16 ways = 2048 sets).
  localparam int unsigned LLC_WAYS      = 16;
  localparam int unsigned LLC_SETS      = 2048;
  localparam int unsigned BLOCK_BYTES   = 64;
  localparam int unsigned PADDR_W       = 48;
  localparam int unsigned PC_W          = 64;

  // Per-block replacement state.
  localparam int unsigned RRPV_W        = 3;
  localparam int unsigned EFH_W         = 3;
  localparam int unsigned RRPV_MAX      = (1 << RRPV_W) - 1;  // 7: cache-averse
  localparam int unsigned EFH_INIT      = 1;                  // expected hits on fill

  // Belady emulation (OPTgen).
  localparam int unsigned SAMPLE_RATIO  = 64;                 // 1 sampled set per 64
  localparam int unsigned HIST_MULT     = 8;                  // history = 8 x ways

  // PC classifier.
  localparam int unsigned PRED_ENTRIES  = 2048;
  localparam int unsigned PRED_CTR_W    = 3;

  // How the victim was chosen.
  typedef enum logic [1:0] {
    SEL_INVALID = 2'd0,   // an empty way was free
    SEL_AVERSE  = 2'd1,   // Hawkeye: a block last touched by a cache-averse load
    SEL_EHC     = 2'd2    // EHC: lowest ExpectedFurtherHits - RRPV
  } victim_kind_e;

  // Replacement state kept next to each tag.
  typedef struct packed {
    logic [RRPV_W-1:0] rrpv;
    logic [EFH_W-1:0]  efh;
  } repl_state_t;

endpackage
