// tb_ehc_llc: end-to-end test of the replacement logic at reduced size
// (256 sets, 8 ways, one set in 64 sampled, 64-slot history, 64-entry
// classifier, 40-bit addresses). Stimulus and checks: ehc_llc_check.svh.
module tb_ehc_llc;
  import ehc_pkg::*;

  localparam int T_SETS = 256, T_WAYS = 8, T_EVERY = 64, T_LEN = 64, T_PRED = 64, T_ADDR = 40;
  localparam int N_ACC  = 9000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic              acc_valid;
  logic [T_ADDR-1:0] acc_addr;
  logic [63:0]       acc_pc;
  logic              rsp_valid, rsp_hit, rsp_friendly, rsp_evict_valid, rsp_sampled;
  logic              rsp_train_valid, rsp_train_friendly;
  logic [2:0]        rsp_way;
  victim_kind_e      rsp_kind;
  logic [T_ADDR-1:0] rsp_evict_addr;

  ehc_llc #(.SETS(T_SETS), .WAYS(T_WAYS), .ADDR_W(T_ADDR), .SAMPLE_EVERY(T_EVERY),
            .HIST_LEN(T_LEN), .PRED_N(T_PRED)) dut (
    .clk(clk), .rst_n(rst_n), .acc_valid_i(acc_valid), .acc_addr_i(acc_addr), .acc_pc_i(acc_pc),
    .rsp_valid_o(rsp_valid), .rsp_hit_o(rsp_hit), .rsp_way_o(rsp_way), .rsp_kind_o(rsp_kind),
    .rsp_friendly_o(rsp_friendly), .rsp_evict_valid_o(rsp_evict_valid),
    .rsp_evict_addr_o(rsp_evict_addr), .rsp_sampled_o(rsp_sampled),
    .rsp_train_valid_o(rsp_train_valid), .rsp_train_friendly_o(rsp_train_friendly));

  `include "ehc_llc_check.svh"
endmodule
