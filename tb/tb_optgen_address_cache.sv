// tb_optgen_address_cache: self-checking test of the address cache.
//
// Small geometry (2 sampled sets, 16 entries, 16-slot history). The test
// keeps each set's slot counter itself and drives random tags from a small
// pool (mostly reuses) and then a large pool (many tags fall out of the
// window). A reference remembers, per set and tag, the absolute access number
// and signature of the last access; a lookup must hit exactly when that
// access is less than the history length ago, and return its slot and
// signature.
module tb_optgen_address_cache;
  localparam int unsigned SAMPLED = 2, LEN = 16, TAG_W = 8, SIG_W = 6, PTR_W = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic             req, sset, hit;
  logic [TAG_W-1:0] tag;
  logic [SIG_W-1:0] sig, hsig;
  logic [PTR_W-1:0] cur, hptr;

  int checks = 0, failures = 0, n_hit = 0, n_expired = 0, n_new = 0;
  int last_t   [SAMPLED][int];
  int last_sig [SAMPLED][int];
  int t_now    [SAMPLED];

  optgen_address_cache #(.SAMPLED(SAMPLED), .ENTRIES(LEN), .TAG_W(TAG_W), .SIG_W(SIG_W),
                         .PTR_W(PTR_W)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid_i(req), .req_set_i(sset), .req_tag_i(tag),
    .req_sig_i(sig), .cur_slot_i(cur), .hit_o(hit), .hit_ptr_o(hptr), .hit_sig_o(hsig));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, tg, t;
    bit exp_hit;
    rst_n = 1'b0; req = 1'b0; sset = '0; tag = '0; sig = '0; cur = '0;
    for (int i = 0; i < SAMPLED; i++) t_now[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8000; i++) begin
      @(negedge clk);
      s    = $urandom_range(0, SAMPLED - 1);
      t    = t_now[s];
      tg   = (i % 4000 < 2000) ? $urandom_range(0, 9) : $urandom_range(0, 24);
      req  = ($urandom_range(0, 7) != 0);
      sset = 1'(s);
      tag  = TAG_W'(tg);
      sig  = SIG_W'($urandom);
      cur  = PTR_W'(t % LEN);
      exp_hit = last_t[s].exists(tg) && (t - last_t[s][tg] < LEN);
      #1;
      checks++;
      if (hit != exp_hit ||
          (exp_hit && (int'(hptr) != last_t[s][tg] % LEN || int'(hsig) != last_sig[s][tg]))) begin
        failures++;
        if (failures < 10) $display("MISMATCH set %0d tag %0d t=%0d: hit %0b ptr %0d sig %0d, expected hit %0b",
                                    s, tg, t, hit, hptr, hsig, exp_hit);
      end
      @(posedge clk);
      if (req) begin
        if (exp_hit) n_hit++;
        else if (last_t[s].exists(tg)) n_expired++;
        else n_new++;
        last_t[s][tg]   = t;
        last_sig[s][tg] = int'(sig);
        t_now[s]++;
      end
    end
    if (n_hit == 0 || n_expired == 0 || n_new == 0) begin
      failures++;
      $display("a case never occurred: hit=%0d expired=%0d new=%0d", n_hit, n_expired, n_new);
    end
    $display("lookups: hit=%0d expired=%0d new=%0d", n_hit, n_expired, n_new);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
