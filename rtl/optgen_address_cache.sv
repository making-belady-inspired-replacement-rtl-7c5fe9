// optgen_address_cache: the address cache of the Belady emulator.
//
// For every sampled set it holds ENTRIES fully associative entries, each with
// a block tag, a pointer to the slot of the tag's last access in the
// occupancy vector, and the PC signature of that access (the load whose
// behaviour the next reuse will train). A lookup (req_set_i, req_tag_i) is
// combinational: hit_o, and the entry's pointer and signature.
//
// On an access (req_valid_i) at the current slot cur_slot_i, entries that
// point at cur_slot_i are dropped (that slot is being overwritten, so they
// fell out of the history window), and the tag's entry is written - the
// matching one on a hit, otherwise the first free one - with the new pointer
// and signature. With ENTRIES equal to the history length a free entry always
// exists, since at most LEN-1 distinct tags can have their last access in the
// other LEN-1 slots. All updates happen at the rising clock edge.
//
// The paper gives the contents (address, pointer to the last occurrence,
// optionally the load PC); the entry count, full associativity, full tags and
// the invalidation rule are this design's choices.
module optgen_address_cache
  import ehc_pkg::*;
#(
  parameter int unsigned SAMPLED = LLC_SETS / SAMPLE_RATIO,
  parameter int unsigned ENTRIES = HIST_MULT * LLC_WAYS,
  parameter int unsigned TAG_W   = PADDR_W - $clog2(BLOCK_BYTES) - $clog2(LLC_SETS),
  parameter int unsigned SIG_W   = $clog2(PRED_ENTRIES),
  parameter int unsigned PTR_W   = $clog2(HIST_MULT * LLC_WAYS),
  localparam int unsigned SS_W   = (SAMPLED > 1) ? $clog2(SAMPLED) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid_i,
  input  logic [SS_W-1:0]  req_set_i,
  input  logic [TAG_W-1:0] req_tag_i,
  input  logic [SIG_W-1:0] req_sig_i,
  input  logic [PTR_W-1:0] cur_slot_i,
  output logic             hit_o,
  output logic [PTR_W-1:0] hit_ptr_o,
  output logic [SIG_W-1:0] hit_sig_o
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [PTR_W-1:0] ptr;
    logic [SIG_W-1:0] sig;
  } entry_t;

  logic [SAMPLED-1:0][ENTRIES-1:0] valid_q;
  logic [ENTRIES-1:0]               vrow_next;
  entry_t             ent_q   [SAMPLED][ENTRIES];

  logic [ENTRIES-1:0] stale;
  logic [IDX_W-1:0]   hit_idx, free_idx;
  logic               free_found;

  always_comb begin
    hit_o      = 1'b0;
    hit_idx    = '0;
    free_found = 1'b0;
    free_idx   = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      stale[e] = valid_q[req_set_i][e] && (ent_q[req_set_i][e].ptr == cur_slot_i);
      if (valid_q[req_set_i][e] && !stale[e] && ent_q[req_set_i][e].tag == req_tag_i) begin
        hit_o   = 1'b1;
        hit_idx = IDX_W'(e);
      end
      if (!valid_q[req_set_i][e] || stale[e]) begin
        free_found = 1'b1;
        free_idx   = IDX_W'(e);
      end
    end
  end

  assign hit_ptr_o = ent_q[req_set_i][hit_idx].ptr;
  assign hit_sig_o = ent_q[req_set_i][hit_idx].sig;

  // New valid bits of the accessed set: stale entries dropped, the written
  // entry set.
  always_comb begin
    vrow_next = valid_q[req_set_i] & ~stale;
    if (hit_o || free_found) vrow_next[hit_o ? hit_idx : free_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (req_valid_i) begin
      valid_q[req_set_i] <= vrow_next;
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid_i && (hit_o || free_found)) begin
      ent_q[req_set_i][hit_o ? hit_idx : free_idx] <= '{tag: req_tag_i, ptr: cur_slot_i, sig: req_sig_i};
    end
  end

  // A free entry must exist whenever a new tag arrives.
  a_free_entry: assert property (@(posedge clk) disable iff (!rst_n)
                                 req_valid_i |-> (hit_o || free_found))
    else $error("optgen_address_cache: no free entry");

endmodule
