// tb_hawkeye_predictor: self-checking test of the PC classifier.
//
// A reference keeps one integer counter per signature. The test checks the
// XOR-folded signature of random PCs, the reset state (weakly friendly),
// saturation at both ends, and then a random mix of lookups and training
// events on a small set of PCs so that counters hit both limits.
module tb_hawkeye_predictor;
  import ehc_pkg::*;

  localparam int unsigned ENTRIES = 2048;
  localparam int unsigned SIG_W   = 11;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [63:0]      pc;
  logic [SIG_W-1:0] sig, tsig;
  logic             friendly, tvalid, tfriendly;

  int checks = 0, failures = 0;
  int ref_ctr [ENTRIES];
  int n_sat_hi = 0, n_sat_lo = 0;

  hawkeye_predictor dut (
    .clk(clk), .rst_n(rst_n), .pc_i(pc), .signature_o(sig), .friendly_o(friendly),
    .train_valid_i(tvalid), .train_sig_i(tsig), .train_friendly_i(tfriendly));

  function automatic logic [SIG_W-1:0] fold(logic [63:0] p);
    logic [SIG_W-1:0] r = '0;
    for (int i = 0; i < 64; i++) r[i % SIG_W] ^= p[i];
    return r;
  endfunction

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] pcs [8];

  initial begin
    rst_n = 1'b0; tvalid = 1'b0; tsig = '0; tfriendly = 1'b0; pc = '0;
    for (int i = 0; i < ENTRIES; i++) ref_ctr[i] = 4;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // signature fold
    for (int i = 0; i < 200; i++) begin
      pc = {$urandom, $urandom};
      #1 expect_eq("signature", int'(sig), int'(fold(pc)));
      expect_eq("reset friendly", int'(friendly), 1);
    end
    for (int i = 0; i < 8; i++) pcs[i] = {$urandom, $urandom};
    // random training and lookup
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      pc        = pcs[$urandom_range(0, 7)];
      tvalid    = ($urandom_range(0, 3) != 0);
      tsig      = fold(pcs[$urandom_range(0, 7)]);
      tfriendly = (i % 1000 < 500) ? ($urandom_range(0, 9) < 8) : ($urandom_range(0, 9) < 2);
      #1 expect_eq("friendly", int'(friendly), int'(ref_ctr[fold(pc)] >= 4));
      @(posedge clk);
      if (tvalid) begin
        if (tfriendly) begin
          if (ref_ctr[tsig] == 7) n_sat_hi++; else ref_ctr[tsig]++;
        end else begin
          if (ref_ctr[tsig] == 0) n_sat_lo++; else ref_ctr[tsig]--;
        end
      end
    end
    @(negedge clk) tvalid = 1'b0;
    // final sweep
    for (int i = 0; i < 8; i++) begin
      pc = pcs[i];
      #1 expect_eq("final friendly", int'(friendly), int'(ref_ctr[fold(pc)] >= 4));
    end
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("saturation not reached: hi=%0d lo=%0d", n_sat_hi, n_sat_lo);
    end
    $display("saturations: high=%0d low=%0d", n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
