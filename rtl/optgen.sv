// optgen: Belady's MIN emulator on the sampled sets of the LLC.
//
// One set in every SAMPLE_RATIO (the sets whose index is a multiple of
// SAMPLE_RATIO) is sampled. Every access to a sampled set is looked up in that
// set's address cache. If the block was seen within the last LEN accesses to
// the set, the occupancy vector decides whether Belady's MIN would have hit
// (no slot of the reuse interval already holds WAYS live blocks) and the
// emulator emits a training event for the load signature stored with the
// previous access: train_friendly_o = 1 for an OPT hit, 0 for an OPT miss.
// A first access (or one older than the window) trains nothing. The address
// cache then records the access with the current slot and signature.
//
// Everything is decided in the cycle of the access (train_* outputs are
// combinational); the histories update at the rising clock edge, so one
// access per cycle is accepted. The sampling rate, the history length of
// eight times the associativity, the occupancy test and the split into
// occupancy vector and address cache follow the paper; training the previous
// access's load and skipping first accesses are this design's choices.
module optgen
  import ehc_pkg::*;
#(
  parameter int unsigned SETS         = LLC_SETS,
  parameter int unsigned WAYS         = LLC_WAYS,
  parameter int unsigned SAMPLE_EVERY = SAMPLE_RATIO,
  parameter int unsigned LEN          = HIST_MULT * LLC_WAYS,
  parameter int unsigned TAG_W        = PADDR_W - $clog2(BLOCK_BYTES) - $clog2(LLC_SETS),
  parameter int unsigned SIG_W        = $clog2(PRED_ENTRIES),
  localparam int unsigned SET_W       = $clog2(SETS),
  localparam int unsigned SAMPLED     = SETS / SAMPLE_EVERY,
  localparam int unsigned SKIP_W      = $clog2(SAMPLE_EVERY),
  localparam int unsigned SS_W        = (SAMPLED > 1) ? $clog2(SAMPLED) : 1,
  localparam int unsigned PTR_W       = $clog2(LEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid_i,
  input  logic [SET_W-1:0] acc_set_i,
  input  logic [TAG_W-1:0] acc_tag_i,
  input  logic [SIG_W-1:0] acc_sig_i,
  output logic             sampled_o,
  output logic             train_valid_o,
  output logic [SIG_W-1:0] train_sig_o,
  output logic             train_friendly_o
);

  logic             req;
  logic [SS_W-1:0]  sset;
  logic [PTR_W-1:0] cur_slot, reuse_ptr;
  logic             reuse, opt_hit;

  assign sampled_o = (acc_set_i[SKIP_W-1:0] == '0);
  assign req       = acc_valid_i && sampled_o;
  assign sset      = SS_W'(acc_set_i >> SKIP_W);

  optgen_address_cache #(
    .SAMPLED (SAMPLED),
    .ENTRIES (LEN),
    .TAG_W   (TAG_W),
    .SIG_W   (SIG_W),
    .PTR_W   (PTR_W)
  ) u_addr_cache (
    .clk         (clk),
    .rst_n       (rst_n),
    .req_valid_i (req),
    .req_set_i   (sset),
    .req_tag_i   (acc_tag_i),
    .req_sig_i   (acc_sig_i),
    .cur_slot_i  (cur_slot),
    .hit_o       (reuse),
    .hit_ptr_o   (reuse_ptr),
    .hit_sig_o   (train_sig_o)
  );

  optgen_occupancy_vector #(
    .SAMPLED (SAMPLED),
    .WAYS    (WAYS),
    .LEN     (LEN)
  ) u_occ (
    .clk           (clk),
    .rst_n         (rst_n),
    .req_valid_i   (req),
    .req_set_i     (sset),
    .reuse_valid_i (reuse),
    .reuse_ptr_i   (reuse_ptr),
    .cur_slot_o    (cur_slot),
    .opt_hit_o     (opt_hit)
  );

  assign train_valid_o    = req && reuse;
  assign train_friendly_o = opt_hit;

endmodule
