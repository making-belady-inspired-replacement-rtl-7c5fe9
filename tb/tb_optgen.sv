// tb_optgen: self-checking test of the Belady emulator.
//
// Geometry 256 sets, 4 ways, one set in 64 sampled (4 sampled sets), 32-slot
// history. Accesses go to sampled and unsampled sets with tags from a small
// pool (reuses mostly fit: OPT hits) and a large pool (many OPT misses and
// expired histories). Each cycle the sampled flag and the training event
// (valid, signature, friendly) are compared with the reference model.
module tb_optgen;
  `include "ehc_ref.svh"

  localparam int unsigned SETS = 256, WAYS = 4, EVERY = 64, LEN = 32, TAG_W = 10, SIG_W = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic             valid, sampled, tvalid, tfriendly;
  logic [7:0]       set;
  logic [TAG_W-1:0] tag;
  logic [SIG_W-1:0] sig, tsig;

  int checks = 0, failures = 0, n_thit = 0, n_tmiss = 0, n_unsampled = 0;
  ehc_ref m;
  result_t r;

  optgen #(.SETS(SETS), .WAYS(WAYS), .SAMPLE_EVERY(EVERY), .LEN(LEN), .TAG_W(TAG_W),
           .SIG_W(SIG_W)) dut (
    .clk(clk), .rst_n(rst_n), .acc_valid_i(valid), .acc_set_i(set), .acc_tag_i(tag),
    .acc_sig_i(sig), .sampled_o(sampled), .train_valid_o(tvalid), .train_sig_o(tsig),
    .train_friendly_o(tfriendly));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int set_pool[6] = '{0, 64, 128, 192, 1, 77};

  initial begin
    longint unsigned pc;
    int s, tg;
    m = new(SETS, WAYS, EVERY, LEN, 1 << SIG_W, 1);
    rst_n = 1'b0; valid = 1'b0; set = '0; tag = '0; sig = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 10000; i++) begin
      @(negedge clk);
      s     = set_pool[$urandom_range(0, 5)];
      tg    = (i % 5000 < 2500) ? $urandom_range(0, 7) : $urandom_range(0, 40);
      pc    = 64'($urandom_range(0, 15)) * 64'h1234_5678_9abc_def1;
      valid = ($urandom_range(0, 7) != 0);
      set   = 8'(s);
      tag   = TAG_W'(tg);
      sig   = SIG_W'(m.signature(pc));
      #1;
      if (valid) begin
        r = m.access(s, tg, pc);
        checks++;
        if (sampled != r.sampled || tvalid != r.train_valid ||
            (r.train_valid && (int'(tsig) != r.train_sig || tfriendly != r.train_friendly))) begin
          failures++;
          if (failures < 10) $display("MISMATCH set %0d tag %0d: sampled %0b train %0b/%0d/%0b, expected %0b %0b/%0d/%0b",
            s, tg, sampled, tvalid, tsig, tfriendly, r.sampled, r.train_valid, r.train_sig, r.train_friendly);
        end
        if (!r.sampled) n_unsampled++;
        else if (r.train_valid && r.train_friendly) n_thit++;
        else if (r.train_valid) n_tmiss++;
      end
    end
    if (n_thit == 0 || n_tmiss == 0 || n_unsampled == 0) begin
      failures++;
      $display("a case never occurred: opt_hit=%0d opt_miss=%0d unsampled=%0d", n_thit, n_tmiss, n_unsampled);
    end
    $display("trainings: opt_hit=%0d opt_miss=%0d; unsampled accesses=%0d", n_thit, n_tmiss, n_unsampled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
