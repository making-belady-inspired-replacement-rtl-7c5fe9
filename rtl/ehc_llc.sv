// ehc_llc: last-level-cache tag directory with the Hawkeye replacement policy
// extended by Expected Hit Count (EHC).
//
// Each cycle one access (acc_valid_i, physical address, load PC) is looked up
// in the tag store. The PC classifier predicts the load cache-friendly or
// cache-averse, and the row of the set is rewritten:
//   hit  : the hit block's RRPV becomes 0 (friendly) or 7 (averse) and its
//          Expected Further Hits (EFH) counter counts down by one, stopping
//          at zero;
//   miss : the victim selector picks a way (empty way, else a cache-averse
//          block, else the lowest EFH - RRPV), the new block is written with
//          RRPV 0 or 7 as above and EFH = EFH_INIT (1); a friendly fill ages
//          every other valid block whose RRPV is below 6 by one.
// Accesses to the sampled sets (one in SAMPLE_EVERY) also go to the Belady
// emulator (optgen), whose training events update the PC classifier.
// The response (hit, way, how the victim was chosen, evicted block address)
// is registered and appears one cycle after the access. No data array is
// kept: the module decides placement and replacement only, and a fill is
// assumed to complete in the cycle of the miss.
//
// From the paper: the 3-bit RRPV set from the load's classification, the
// 3-bit EFH count-down counter loaded with one on a fill and decremented on
// every access to the block, the EFH - RRPV victim rule used when no block is
// cache-averse, the Belady emulator on one set in sixty-four, and the 2 MB
// 16-way geometry. This design's own choices: 64-byte blocks, 48-bit
// addresses, the single-cycle access, aging friendly blocks only on a
// friendly fill (saturating at 6 so that 7 keeps meaning "averse") and the
// predictor organisation.
module ehc_llc
  import ehc_pkg::*;
#(
  parameter int unsigned SETS         = LLC_SETS,
  parameter int unsigned WAYS         = LLC_WAYS,
  parameter int unsigned ADDR_W       = PADDR_W,
  parameter int unsigned BLOCK_B      = BLOCK_BYTES,
  parameter int unsigned PCW          = PC_W,
  parameter int unsigned SAMPLE_EVERY = SAMPLE_RATIO,
  parameter int unsigned HIST_LEN     = HIST_MULT * LLC_WAYS,
  parameter int unsigned PRED_N       = PRED_ENTRIES,
  parameter int unsigned EFH_START    = EFH_INIT,
  localparam int unsigned OFF_W       = $clog2(BLOCK_B),
  localparam int unsigned SET_W       = $clog2(SETS),
  localparam int unsigned TAG_W       = ADDR_W - OFF_W - SET_W,
  localparam int unsigned WAY_W       = $clog2(WAYS),
  localparam int unsigned SIG_W       = $clog2(PRED_N)
) (
  input  logic              clk,
  input  logic              rst_n,
  // access
  input  logic              acc_valid_i,
  input  logic [ADDR_W-1:0] acc_addr_i,
  input  logic [PCW-1:0]    acc_pc_i,
  // response, one cycle later
  output logic              rsp_valid_o,
  output logic              rsp_hit_o,
  output logic [WAY_W-1:0]  rsp_way_o,          // hit way or filled way
  output victim_kind_e      rsp_kind_o,         // how the victim was chosen (miss only)
  output logic              rsp_friendly_o,     // classification of the load
  output logic              rsp_evict_valid_o,  // a valid block was replaced
  output logic [ADDR_W-1:0] rsp_evict_addr_o,   // its block address (offset zero)
  output logic              rsp_sampled_o,      // the access went to a sampled set
  output logic              rsp_train_valid_o,  // the Belady emulator trained a load
  output logic              rsp_train_friendly_o
);

  localparam logic [RRPV_W-1:0] RRPV_AVERSE = RRPV_W'(RRPV_MAX);
  localparam logic [RRPV_W-1:0] RRPV_AGE_CAP = RRPV_W'(RRPV_MAX - 1);

  logic [SET_W-1:0] set;
  logic [TAG_W-1:0] tag;
  assign set = acc_addr_i[OFF_W +: SET_W];
  assign tag = acc_addr_i[ADDR_W-1 -: TAG_W];

  // ---------------------------------------------------------------- lookup
  logic        [WAYS-1:0]          row_valid;
  logic [WAYS-1:0][TAG_W-1:0]      row_tag;
  repl_state_t [WAYS-1:0]          row_state;
  logic        [WAYS-1:0]          new_valid;
  logic [WAYS-1:0][TAG_W-1:0]      new_tag;
  repl_state_t [WAYS-1:0]          new_state;

  llc_tag_store #(
    .SETS  (SETS),
    .WAYS  (WAYS),
    .TAG_W (TAG_W)
  ) u_tags (
    .clk        (clk),
    .rst_n      (rst_n),
    .rd_set_i   (set),
    .rd_valid_o (row_valid),
    .rd_tag_o   (row_tag),
    .rd_state_o (row_state),
    .wr_en_i    (acc_valid_i),
    .wr_set_i   (set),
    .wr_valid_i (new_valid),
    .wr_tag_i   (new_tag),
    .wr_state_i (new_state)
  );

  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (row_valid[w] && row_tag[w] == tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end

  // ------------------------------------------------------- classification
  logic [SIG_W-1:0] sig, train_sig;
  logic             friendly, train_valid, train_friendly, sampled;

  hawkeye_predictor #(
    .PCW     (PCW),
    .ENTRIES (PRED_N),
    .CTR_W   (PRED_CTR_W)
  ) u_pred (
    .clk              (clk),
    .rst_n            (rst_n),
    .pc_i             (acc_pc_i),
    .signature_o      (sig),
    .friendly_o       (friendly),
    .train_valid_i    (train_valid),
    .train_sig_i      (train_sig),
    .train_friendly_i (train_friendly)
  );

  optgen #(
    .SETS         (SETS),
    .WAYS         (WAYS),
    .SAMPLE_EVERY (SAMPLE_EVERY),
    .LEN          (HIST_LEN),
    .TAG_W        (TAG_W),
    .SIG_W        (SIG_W)
  ) u_optgen (
    .clk              (clk),
    .rst_n            (rst_n),
    .acc_valid_i      (acc_valid_i),
    .acc_set_i        (set),
    .acc_tag_i        (tag),
    .acc_sig_i        (sig),
    .sampled_o        (sampled),
    .train_valid_o    (train_valid),
    .train_sig_o      (train_sig),
    .train_friendly_o (train_friendly)
  );

  // ------------------------------------------------------ victim selection
  logic [WAY_W-1:0] victim_way;
  victim_kind_e     victim_kind;

  ehc_victim_select #(
    .WAYS (WAYS)
  ) u_victim (
    .valid_i      (row_valid),
    .state_i      (row_state),
    .victim_way_o (victim_way),
    .kind_o       (victim_kind)
  );

  // ------------------------------------------------------------ row update
  logic [WAY_W-1:0] way;
  assign way = hit ? hit_way : victim_way;

  always_comb begin
    new_valid = row_valid;
    new_tag   = row_tag;
    new_state = row_state;
    if (hit) begin
      if (row_state[way].efh != '0) new_state[way].efh = row_state[way].efh - 1'b1;
    end else begin
      if (friendly) begin
        for (int w = 0; w < WAYS; w++) begin
          if (row_valid[w] && row_state[w].rrpv < RRPV_AGE_CAP)
            new_state[w].rrpv = row_state[w].rrpv + 1'b1;
        end
      end
      new_valid[way]     = 1'b1;
      new_tag[way]       = tag;
      new_state[way].efh = EFH_W'(EFH_START);
    end
    new_state[way].rrpv = friendly ? '0 : RRPV_AVERSE;
  end

  // -------------------------------------------------------------- response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid_o <= 1'b0;
    end else begin
      rsp_valid_o <= acc_valid_i;
    end
  end

  always_ff @(posedge clk) begin
    if (acc_valid_i) begin
      rsp_hit_o            <= hit;
      rsp_way_o            <= way;
      rsp_kind_o           <= victim_kind;
      rsp_friendly_o       <= friendly;
      rsp_evict_valid_o    <= !hit && row_valid[victim_way];
      rsp_evict_addr_o     <= {row_tag[victim_way], set, OFF_W'(0)};
      rsp_sampled_o        <= sampled;
      rsp_train_valid_o    <= train_valid;
      rsp_train_friendly_o <= train_friendly;
    end
  end

endmodule
