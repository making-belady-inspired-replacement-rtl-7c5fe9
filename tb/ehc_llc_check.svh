// ehc_llc_check.svh: stimulus and checking shared by the ehc_llc testbenches.
//
// Included inside a testbench module that declares T_SETS, T_WAYS, T_EVERY,
// T_LEN, T_PRED, T_ADDR, N_ACC, the clock, reset and the DUT signals. Three
// load PCs drive the cache: a loop over fewer blocks than ways (reuse that
// Belady's MIN keeps: cache-friendly), a medium working set, and a thrashing
// sweep over many blocks (OPT misses: cache-averse). Accesses go to two
// sampled and two unsampled sets. Every response, one cycle after its access,
// is compared with the reference model, and each mechanism is counted: it is
// a failure if one never happens.

  `include "ehc_ref.svh"

  localparam int OFF_W = 6;
  localparam int SET_W = $clog2(T_SETS);

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_fill_empty = 0, n_ev_averse = 0, n_ev_ehc = 0, n_ehc_differs = 0;
  int n_efh_zero = 0, n_aged = 0, n_opt_hit = 0, n_opt_miss = 0, n_averse_load = 0, n_unsampled = 0;
  int cycles = 0;

  ehc_ref  m;
  result_t exp_q[$];

  always @(posedge clk) cycles++;

  initial begin
    repeat (N_ACC * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // response checker: one cycle after each accepted access
  always @(posedge clk) begin
    if (rst_n) begin
      #1;
      if (rsp_valid != (exp_q.size() != 0)) begin
        checks++; failures++;
        $display("MISMATCH rsp_valid %0b at cycle %0d", rsp_valid, cycles);
      end
      if (exp_q.size() != 0) begin
        result_t e;
        logic [T_ADDR-1:0] ea;
        e = exp_q.pop_front();
        ea = T_ADDR'(e.evict_tag) << (OFF_W + SET_W);
        checks++;
        if (rsp_hit != e.hit || int'(rsp_way) != e.way || rsp_friendly != e.friendly ||
            rsp_sampled != e.sampled || rsp_train_valid != e.train_valid ||
            (e.train_valid && rsp_train_friendly != e.train_friendly) ||
            (!e.hit && (int'(rsp_kind) != e.kind || rsp_evict_valid != e.evict_valid)) ||
            (!e.hit && e.evict_valid && (rsp_evict_addr >> (OFF_W + SET_W)) != (ea >> (OFF_W + SET_W)))) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH cycle %0d: hit %0b way %0d kind %0d fr %0b ev %0b, expected hit %0b way %0d kind %0d fr %0b ev %0b",
                     cycles, rsp_hit, rsp_way, rsp_kind, rsp_friendly, rsp_evict_valid,
                     e.hit, e.way, e.kind, e.friendly, e.evict_valid);
        end
      end
    end
  end

  initial begin
    int sets4[4];
    int s, tg, p, mode;
    longint unsigned pcs[3];
    result_t r;
    sets4 = '{0, 1, T_EVERY, T_EVERY + 1};
    pcs   = '{64'h0000_0000_0040_1a30, 64'h0000_0000_0040_2b74, 64'h0000_0000_0040_3c18};
    m = new(T_SETS, T_WAYS, T_EVERY, T_LEN, T_PRED, 1);
    rst_n = 1'b0; acc_valid = 1'b0; acc_addr = '0; acc_pc = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N_ACC; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 15) == 0) begin
        acc_valid = 1'b0;
        continue;
      end
      s    = sets4[$urandom_range(0, 3)];
      mode = (i / 1500) % 3;                 // phases shift the mix of loads
      p    = $urandom_range(0, 9);
      if (mode == 0)      p = (p < 6) ? 0 : (p < 8 ? 1 : 2);
      else if (mode == 1) p = (p < 3) ? 0 : (p < 8 ? 1 : 2);
      else                p = (p < 4) ? 0 : (p < 6 ? 1 : 2);
      case (p)
        0:       tg = $urandom_range(0, T_WAYS - 2);                  // fits
        1:       tg = 1000 + $urandom_range(0, T_WAYS + T_WAYS / 2);  // medium
        default: tg = 5000 + $urandom_range(0, 8 * T_WAYS);           // thrashing
      endcase
      acc_valid = 1'b1;
      acc_pc    = pcs[p];
      acc_addr  = (T_ADDR'(tg) << (OFF_W + SET_W)) | (T_ADDR'(s) << OFF_W) | T_ADDR'($urandom_range(0, 63));
      r = m.access(s, tg, acc_pc);
      exp_q.push_back(r);
      if (r.hit) n_hit++; else n_miss++;
      if (!r.hit && r.kind == 0) n_fill_empty++;
      if (!r.hit && r.kind == 1) n_ev_averse++;
      if (!r.hit && r.kind == 2) n_ev_ehc++;
      if (!r.hit && r.ehc_differs) n_ehc_differs++;
      if (r.hit && r.efh_was_zero) n_efh_zero++;
      if (r.aged) n_aged++;
      if (r.train_valid && r.train_friendly) n_opt_hit++;
      if (r.train_valid && !r.train_friendly) n_opt_miss++;
      if (!r.friendly) n_averse_load++;
      if (!r.sampled) n_unsampled++;
    end
    @(negedge clk) acc_valid = 1'b0;
    repeat (3) @(posedge clk);
    $display("accesses: hits=%0d misses=%0d (empty fills=%0d, averse evictions=%0d, EHC evictions=%0d, EHC differs from oldest=%0d)",
             n_hit, n_miss, n_fill_empty, n_ev_averse, n_ev_ehc, n_ehc_differs);
    $display("hits with EFH already 0=%0d, friendly fills that aged=%0d, averse loads=%0d, unsampled=%0d",
             n_efh_zero, n_aged, n_averse_load, n_unsampled);
    $display("Belady emulator trainings: OPT hit=%0d OPT miss=%0d", n_opt_hit, n_opt_miss);
    if (n_hit == 0 || n_miss == 0 || n_fill_empty == 0 || n_ev_averse == 0 || n_ev_ehc == 0 ||
        n_ehc_differs == 0 || n_efh_zero == 0 || n_aged == 0 || n_opt_hit == 0 || n_opt_miss == 0 ||
        n_averse_load == 0 || n_unsampled == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
