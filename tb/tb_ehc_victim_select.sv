// tb_ehc_victim_select: self-checking test of the victim selector.
//
// Applies directed rows (empty way, several averse ways, all friendly with a
// tie on EFH - RRPV) and then random rows with a biased mix of invalid and
// averse ways, and compares the chosen way and its kind with a reference
// computed here with plain integers.
module tb_ehc_victim_select;
  import ehc_pkg::*;

  localparam int unsigned WAYS = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        [WAYS-1:0] valid;
  repl_state_t [WAYS-1:0] state;
  logic [$clog2(WAYS)-1:0] way;
  victim_kind_e            kind;

  int checks = 0, failures = 0;
  int n_inv = 0, n_av = 0, n_ehc = 0;

  ehc_victim_select #(.WAYS(WAYS)) dut (
    .valid_i(valid), .state_i(state), .victim_way_o(way), .kind_o(kind));

  task automatic check_row();
    int exp_way;
    victim_kind_e exp_kind;
    int best;
    exp_way = -1;
    for (int w = 0; w < WAYS && exp_way < 0; w++)
      if (!valid[w]) begin exp_way = w; exp_kind = SEL_INVALID; end
    for (int w = 0; w < WAYS && exp_way < 0; w++)
      if (int'(state[w].rrpv) == 7) begin exp_way = w; exp_kind = SEL_AVERSE; end
    if (exp_way < 0) begin
      best = 1000;
      for (int w = 0; w < WAYS; w++)
        if (int'(state[w].efh) - int'(state[w].rrpv) < best) begin
          best = int'(state[w].efh) - int'(state[w].rrpv);
          exp_way = w;
        end
      exp_kind = SEL_EHC;
    end
    #1;
    checks++;
    if (int'(way) != exp_way || kind != exp_kind) begin
      failures++;
      if (failures < 10) $display("MISMATCH way=%0d kind=%0d expected way=%0d kind=%0d",
                                  way, kind, exp_way, exp_kind);
    end
    case (exp_kind)
      SEL_INVALID: n_inv++;
      SEL_AVERSE:  n_av++;
      default:     n_ehc++;
    endcase
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // all friendly, same score everywhere: way 0
    valid = '1;
    for (int w = 0; w < WAYS; w++) state[w] = '{rrpv: 3'd2, efh: 3'd1};
    check_row();
    // lowest score unique at way 9 (EFH 0, RRPV 6 -> -6)
    state[9] = '{rrpv: 3'd6, efh: 3'd0};
    check_row();
    // tie at ways 4 and 9: way 4
    state[4] = '{rrpv: 3'd6, efh: 3'd0};
    check_row();
    // averse ways 11 and 5: way 5, even though way 4 scores lower
    state[11].rrpv = 3'd7; state[5].rrpv = 3'd7;
    check_row();
    // an empty way wins over everything
    valid[13] = 1'b0;
    check_row();
    // random rows
    for (int i = 0; i < 5000; i++) begin
      @(posedge clk);
      for (int w = 0; w < WAYS; w++) begin
        valid[w]      = ($urandom_range(0, 63) != 0);
        state[w].rrpv = ($urandom_range(0, 15) == 0) ? 3'd7 : 3'($urandom_range(0, 6));
        state[w].efh  = 3'($urandom_range(0, 7));
      end
      check_row();
    end
    if (n_inv == 0 || n_av == 0 || n_ehc == 0) begin
      failures++;
      $display("a selection kind never occurred: inv=%0d averse=%0d ehc=%0d", n_inv, n_av, n_ehc);
    end
    $display("selections: invalid=%0d averse=%0d ehc=%0d", n_inv, n_av, n_ehc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
