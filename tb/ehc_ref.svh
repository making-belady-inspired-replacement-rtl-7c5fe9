// ehc_ref.svh: transaction-level reference model of the Hawkeye + EHC
// replacement policy, used by the testbenches to predict the RTL's outputs.
//
// It is written independently of the RTL's structure: the Belady emulator
// keeps, per sampled set, a plain list of the last LEN-1 accesses (tag,
// signature, occupancy) and searches it backwards, instead of an address
// cache with pointers into a circular vector; the cache keeps integer arrays.
// access() processes one access in program order and returns what the RTL
// must report for it. It is included inside the testbench modules.

  typedef struct {
    bit      sampled;
    bit      train_valid;
    bit      train_friendly;
    int      train_sig;
    bit      hit;
    int      way;
    int      kind;          // 0 invalid, 1 averse, 2 EHC (miss only)
    bit      friendly;
    bit      evict_valid;
    longint  evict_tag;
    // extra observations for coverage
    bit      efh_was_zero;  // hit on a block whose EFH was already 0
    bit      ehc_differs;   // EHC victim differs from the oldest (max RRPV) block
    bit      aged;          // a friendly fill aged at least one block
  } result_t;

  class ehc_ref;
    int sets, ways, sample_every, len, pred_n, efh_start, sig_w;
    int ctr[];
    // cache
    bit     c_valid[][];
    longint c_tag[][];
    int     c_rrpv[][];
    int     c_efh[][];
    // Belady history per sampled set
    longint h_tag[][$];
    int     h_sig[][$];
    int     h_occ[][$];

    function new(int sets, int ways, int sample_every, int len, int pred_n, int efh_start);
      this.sets = sets; this.ways = ways; this.sample_every = sample_every;
      this.len = len; this.pred_n = pred_n; this.efh_start = efh_start;
      sig_w = $clog2(pred_n);
      ctr = new[pred_n];
      foreach (ctr[i]) ctr[i] = 4;
      c_valid = new[sets]; c_tag = new[sets]; c_rrpv = new[sets]; c_efh = new[sets];
      for (int s = 0; s < sets; s++) begin
        c_valid[s] = new[ways]; c_tag[s] = new[ways]; c_rrpv[s] = new[ways]; c_efh[s] = new[ways];
        for (int w = 0; w < ways; w++) c_valid[s][w] = 0;
      end
      h_tag = new[sets / sample_every]; h_sig = new[sets / sample_every]; h_occ = new[sets / sample_every];
    endfunction

    function int signature(longint unsigned pc);
      int r = 0;
      for (int i = 0; i < 64; i++) r ^= int'((pc >> i) & 1) << (i % sig_w);
      return r;
    endfunction

    function result_t access(int set, longint tag, longint unsigned pc);
      result_t r;
      int sig, ss, j, n, best, oldest, maxr;
      bit found;
      r = '{default: 0};
      sig = signature(pc);
      r.friendly = (ctr[sig] >= 4);
      // ---- Belady emulation on sampled sets
      r.sampled = (set % sample_every == 0);
      if (r.sampled) begin
        ss = set / sample_every;
        n = h_tag[ss].size();
        found = 0;
        for (j = n - 1; j >= 0; j--) if (h_tag[ss][j] == tag) begin found = 1; break; end
        if (found) begin
          r.train_valid = 1;
          r.train_sig = h_sig[ss][j];
          r.train_friendly = 1;
          for (int k = j; k < n; k++) if (h_occ[ss][k] >= ways) r.train_friendly = 0;
          if (r.train_friendly) for (int k = j; k < n; k++) h_occ[ss][k]++;
          if (r.train_friendly) begin if (ctr[r.train_sig] < 7) ctr[r.train_sig]++; end
          else                  begin if (ctr[r.train_sig] > 0) ctr[r.train_sig]--; end
        end
        h_tag[ss].push_back(tag); h_sig[ss].push_back(sig); h_occ[ss].push_back(0);
        if (h_tag[ss].size() > len - 1) begin
          void'(h_tag[ss].pop_front()); void'(h_sig[ss].pop_front()); void'(h_occ[ss].pop_front());
        end
      end
      // ---- cache
      r.way = -1;
      for (int w = 0; w < ways; w++)
        if (r.way < 0 && c_valid[set][w] && c_tag[set][w] == tag) begin r.hit = 1; r.way = w; end
      if (r.hit) begin
        r.efh_was_zero = (c_efh[set][r.way] == 0);
        if (c_efh[set][r.way] > 0) c_efh[set][r.way]--;
      end else begin
        for (int w = 0; w < ways; w++)
          if (r.way < 0 && !c_valid[set][w]) begin r.way = w; r.kind = 0; end
        for (int w = 0; w < ways; w++)
          if (r.way < 0 && c_rrpv[set][w] == 7) begin r.way = w; r.kind = 1; end
        if (r.way < 0) begin
          best = 99; maxr = -1; oldest = 0;
          for (int w = 0; w < ways; w++) begin
            if (c_efh[set][w] - c_rrpv[set][w] < best) begin best = c_efh[set][w] - c_rrpv[set][w]; r.way = w; end
            if (c_rrpv[set][w] > maxr) begin maxr = c_rrpv[set][w]; oldest = w; end
          end
          r.kind = 2;
          r.ehc_differs = (oldest != r.way);
        end
        r.evict_valid = c_valid[set][r.way];
        r.evict_tag   = c_tag[set][r.way];
        if (r.friendly)
          for (int w = 0; w < ways; w++)
            if (w != r.way && c_valid[set][w] && c_rrpv[set][w] < 6) begin c_rrpv[set][w]++; r.aged = 1; end
        c_valid[set][r.way] = 1;
        c_tag[set][r.way]   = tag;
        c_efh[set][r.way]   = efh_start;
      end
      c_rrpv[set][r.way] = r.friendly ? 0 : 7;
      return r;
    endfunction
  endclass

