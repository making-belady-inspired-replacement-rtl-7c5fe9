// hawkeye_predictor: classifies load instructions as cache-friendly or
// cache-averse.
//
// A table of PRED_ENTRIES saturating counters (PRED_CTR_W bits) indexed by a
// PC signature. A load is predicted cache-friendly when the most significant
// bit of its counter is set. The Belady emulator (optgen) trains the table:
// a reuse that Belady's MIN would have hit increments the counter of the load
// that brought the block in, a reuse it would have missed decrements it.
// The paper only says that Hawkeye classifies load PCs with the help of its
// Belady emulator; the counter table, its size, the hash and the reset value
// (all counters weakly friendly) are this design's choices. The reset is done
// with one written-since-reset bit per entry: an entry whose bit is clear
// reads as the reset value, so the counters themselves need no reset.
//
// The signature is the PC folded by XOR into SIG_W bits (signature_o, so the
// caller can keep it in the address cache). Lookup is combinational; a
// training write takes effect at the next rising clock edge, so a lookup in
// the same cycle as a training of the same entry sees the old value.
module hawkeye_predictor
  import ehc_pkg::*;
#(
  parameter int unsigned PCW     = PC_W,
  parameter int unsigned ENTRIES = PRED_ENTRIES,
  parameter int unsigned CTR_W   = PRED_CTR_W,
  localparam int unsigned SIG_W  = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic [PCW-1:0]   pc_i,
  output logic [SIG_W-1:0] signature_o,
  output logic             friendly_o,
  // training
  input  logic             train_valid_i,
  input  logic [SIG_W-1:0] train_sig_i,
  input  logic             train_friendly_i
);

  localparam logic [CTR_W-1:0] CTR_MAX  = '1;
  localparam logic [CTR_W-1:0] CTR_INIT = CTR_W'(1 << (CTR_W - 1));

  logic [CTR_W-1:0]   ctr [ENTRIES];
  logic [ENTRIES-1:0] written_q;
  logic [CTR_W-1:0]   look_val, train_old, train_new;

  // XOR-fold the PC into SIG_W bits.
  always_comb begin
    signature_o = '0;
    for (int i = 0; i < PCW; i += SIG_W) begin
      signature_o ^= SIG_W'(pc_i >> i);
    end
  end

  assign look_val   = written_q[signature_o] ? ctr[signature_o] : CTR_INIT;
  assign friendly_o = look_val[CTR_W-1];

  // Saturating update of the trained entry.
  always_comb begin
    train_old = written_q[train_sig_i] ? ctr[train_sig_i] : CTR_INIT;
    train_new = train_old;
    if (train_friendly_i) begin
      if (train_old != CTR_MAX) train_new = train_old + 1'b1;
    end else begin
      if (train_old != '0) train_new = train_old - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      written_q <= '0;
    end else if (train_valid_i) begin
      written_q[train_sig_i] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (train_valid_i) ctr[train_sig_i] <= train_new;
  end

endmodule
