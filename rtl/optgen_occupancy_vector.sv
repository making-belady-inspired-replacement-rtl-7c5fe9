// optgen_occupancy_vector: the occupancy vectors of the Belady emulator.
//
// For every sampled set it keeps a circular history of LEN time slots, one per
// access to that set, and in each slot the occupancy: how many blocks Belady's
// MIN would have to hold in the set at that point. A per-set pointer gives
// the slot of the next access (cur_slot_o).
//
// An access (req_valid_i) to sampled set req_set_i that reuses an address last
// seen in slot p (reuse_valid_i, reuse_ptr_i) is an OPT hit (opt_hit_o) when
// every slot from p up to, not including, the current slot t has an occupancy
// below WAYS; then all those slots are incremented, because the block would
// have stayed in the cache from p to t. Either way slot t is cleared (it
// starts a new history entry) and the set's pointer advances. opt_hit_o is
// combinational; the update happens at the rising clock edge.
//
// Following the paper: the occupancy recorded per access, the comparison with
// the associativity, the increment on a hit and the length of eight times the
// associativity. Counting slot p itself in the interval (the occupancy is the
// one "after the access") and the circular organisation are this design's
// reading. A reuse whose slot is the current slot (a full LEN accesses ago) is
// outside the window and counts as no reuse.
module optgen_occupancy_vector
  import ehc_pkg::*;
#(
  parameter int unsigned SAMPLED = LLC_SETS / SAMPLE_RATIO,
  parameter int unsigned WAYS    = LLC_WAYS,
  parameter int unsigned LEN     = HIST_MULT * LLC_WAYS,
  localparam int unsigned SS_W   = (SAMPLED > 1) ? $clog2(SAMPLED) : 1,
  localparam int unsigned PTR_W  = $clog2(LEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid_i,
  input  logic [SS_W-1:0]  req_set_i,
  input  logic             reuse_valid_i,
  input  logic [PTR_W-1:0] reuse_ptr_i,
  output logic [PTR_W-1:0] cur_slot_o,
  output logic             opt_hit_o
);

  localparam int unsigned OCC_W = $clog2(WAYS + 1);

  logic [SAMPLED-1:0][LEN-1:0][OCC_W-1:0] occ_q;
  logic [SAMPLED-1:0][PTR_W-1:0]          ptr_q;
  logic [LEN-1:0][OCC_W-1:0]               row, row_next;

  logic [LEN-1:0]   in_range;
  logic [PTR_W-1:0] span;
  logic             full_seen;

  assign cur_slot_o = ptr_q[req_set_i];
  assign span       = cur_slot_o - reuse_ptr_i;   // slots p .. t-1, modulo LEN

  assign row = occ_q[req_set_i];

  always_comb begin
    full_seen = 1'b0;
    for (int i = 0; i < LEN; i++) begin
      in_range[i] = (PTR_W'(i) - reuse_ptr_i) < span;
      if (in_range[i] && row[i] >= OCC_W'(WAYS)) full_seen = 1'b1;
    end
  end

  assign opt_hit_o = reuse_valid_i && (span != '0) && !full_seen;

  // New contents of the accessed set's vector: +1 over the interval on an
  // OPT hit, and the current slot cleared.
  always_comb begin
    for (int i = 0; i < LEN; i++) begin
      row_next[i] = (opt_hit_o && in_range[i]) ? row[i] + 1'b1 : row[i];
    end
    row_next[cur_slot_o] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ_q <= '0;
      ptr_q <= '0;
    end else if (req_valid_i) begin
      occ_q[req_set_i] <= row_next;
      ptr_q[req_set_i] <= cur_slot_o + 1'b1;
    end
  end

endmodule
