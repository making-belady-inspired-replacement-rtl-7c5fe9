// ehc_victim_select: victim choice of Hawkeye extended with Expected Hit Count.
//
// Purely combinational. Given the valid bit, the RRPV and the Expected Further
// Hits (EFH) counter of every way of one set, it returns the way to replace:
//   1. the first invalid way, if any (filling an empty way evicts nothing);
//   2. otherwise the first way whose RRPV is the maximum (7), which Hawkeye
//      gives to blocks last touched by a cache-averse load;
//   3. otherwise, when every block is cache-friendly, the way with the lowest
//      value of EFH - RRPV, the lowest way index winning a tie.
// Steps 2 and 3 follow the paper; step 1 and "first averse way" (the paper
// does not say which averse block goes when there are several) are this
// design's choices. EFH - RRPV is computed as a signed (EFH_W+1)-bit value.
//
// Interface: valid_i/state_i per way in, victim_way_o and kind_o out, no clock.
module ehc_victim_select
  import ehc_pkg::*;
#(
  parameter int unsigned WAYS = LLC_WAYS
) (
  input  logic        [WAYS-1:0] valid_i,
  input  repl_state_t [WAYS-1:0] state_i,
  output logic [$clog2(WAYS)-1:0] victim_way_o,
  output victim_kind_e            kind_o
);

  localparam int unsigned SCORE_W = (EFH_W > RRPV_W ? EFH_W : RRPV_W) + 1;
  localparam int unsigned WAY_W   = $clog2(WAYS);

  logic signed [SCORE_W-1:0] score [WAYS];

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      score[w] = $signed({1'b0, state_i[w].efh}) - $signed({1'b0, state_i[w].rrpv});
    end
  end

  logic                      any_invalid, any_averse;
  logic [WAY_W-1:0]          inv_way, averse_way, ehc_way;
  logic signed [SCORE_W-1:0] best;

  always_comb begin
    any_invalid = 1'b0;
    any_averse  = 1'b0;
    inv_way     = '0;
    averse_way  = '0;
    ehc_way     = '0;
    best        = score[0];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_i[w]) begin
        any_invalid = 1'b1;
        inv_way     = WAY_W'(w);
      end
      if (state_i[w].rrpv == RRPV_W'(RRPV_MAX)) begin
        any_averse = 1'b1;
        averse_way = WAY_W'(w);
      end
    end
    // Strictly-lower comparison keeps the lowest index on a tie.
    for (int w = 1; w < WAYS; w++) begin
      if (score[w] < best) begin
        best    = score[w];
        ehc_way = WAY_W'(w);
      end
    end
    if (any_invalid) begin
      victim_way_o = inv_way;
      kind_o       = SEL_INVALID;
    end else if (any_averse) begin
      victim_way_o = averse_way;
      kind_o       = SEL_AVERSE;
    end else begin
      victim_way_o = ehc_way;
      kind_o       = SEL_EHC;
    end
  end

endmodule
