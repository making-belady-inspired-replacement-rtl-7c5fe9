// tb_optgen_occupancy_vector: self-checking test of the occupancy vectors.
//
// Small geometry (2 sampled sets, 4 ways, 32 slots) so that intervals fill
// up quickly. Each access picks a sampled set and, most of the time, a reuse
// of an access 1..31 accesses ago in that set. A reference keeps the
// occupancy per absolute access number and decides the OPT outcome by
// walking the interval backwards from the current access.
module tb_optgen_occupancy_vector;
  localparam int unsigned SAMPLED = 2, WAYS = 4, LEN = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic       req, reuse, hit;
  logic       sset;
  logic [4:0] rptr, cur;

  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;
  int ref_occ [SAMPLED][int];    // occupancy by absolute access number
  int ref_t   [SAMPLED];

  optgen_occupancy_vector #(.SAMPLED(SAMPLED), .WAYS(WAYS), .LEN(LEN)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid_i(req), .req_set_i(sset), .reuse_valid_i(reuse),
    .reuse_ptr_i(rptr), .cur_slot_o(cur), .opt_hit_o(hit));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, age, t;
    bit exp_hit;
    rst_n = 1'b0; req = 1'b0; reuse = 1'b0; sset = '0; rptr = '0;
    for (int i = 0; i < SAMPLED; i++) ref_t[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      s     = $urandom_range(0, SAMPLED - 1);
      t     = ref_t[s];
      req   = ($urandom_range(0, 7) != 0);
      age   = (i % 2000 < 1000) ? $urandom_range(1, 6) : $urandom_range(1, LEN - 1);
      reuse = (t >= age) && ($urandom_range(0, 4) != 0);
      sset  = 1'(s);
      rptr  = 5'((t - age) % LEN);
      exp_hit = reuse;
      if (reuse)
        for (int k = t - 1; k >= t - age; k--)
          if (ref_occ[s][k] >= WAYS) exp_hit = 0;
      #1;
      checks++;
      if (int'(cur) != t % LEN || hit != exp_hit) begin
        failures++;
        if (failures < 10) $display("MISMATCH set %0d t=%0d age=%0d: slot %0d hit %0b expected %0b",
                                    s, t, age, cur, hit, exp_hit);
      end
      @(posedge clk);
      if (req) begin
        if (exp_hit) begin
          n_hit++;
          for (int k = t - age; k < t; k++) ref_occ[s][k]++;
        end else if (reuse) n_miss++;
        ref_occ[s][t] = 0;
        ref_t[s]++;
      end
    end
    if (n_hit == 0 || n_miss == 0) begin
      failures++;
      $display("an outcome never occurred: hits=%0d misses=%0d", n_hit, n_miss);
    end
    $display("OPT hits=%0d misses=%0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
