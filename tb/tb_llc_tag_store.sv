// tb_llc_tag_store: self-checking test of the tag store.
//
// After reset every valid bit must read zero. Random row writes to random
// sets are mirrored in a reference array; each cycle a random set is read
// and compared with the reference, including a read of the set being written
// in the same cycle (which must return the old row).
module tb_llc_tag_store;
  import ehc_pkg::*;

  localparam int unsigned SETS = 64, WAYS = 16, TAG_W = 12;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [5:0] rd_set, wr_set;
  logic        [WAYS-1:0]          rd_valid, wr_valid;
  logic [WAYS-1:0][TAG_W-1:0]      rd_tag, wr_tag;
  repl_state_t [WAYS-1:0]          rd_state, wr_state;
  logic wr_en;

  logic        [WAYS-1:0]          m_valid [SETS];
  logic [WAYS-1:0][TAG_W-1:0]      m_tag   [SETS];
  repl_state_t [WAYS-1:0]          m_state [SETS];

  int checks = 0, failures = 0, same_set = 0;

  llc_tag_store #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) dut (
    .clk(clk), .rst_n(rst_n), .rd_set_i(rd_set), .rd_valid_o(rd_valid), .rd_tag_o(rd_tag),
    .rd_state_o(rd_state), .wr_en_i(wr_en), .wr_set_i(wr_set), .wr_valid_i(wr_valid),
    .wr_tag_i(wr_tag), .wr_state_i(wr_state));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; rd_set = '0; wr_set = '0;
    wr_valid = '0; wr_tag = '0; wr_state = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SETS; s++) begin
      rd_set = 6'(s);
      #1; checks++;
      if (rd_valid != '0) begin failures++; $display("set %0d valid after reset", s); end
      m_valid[s] = '0;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      wr_en    = ($urandom_range(0, 1) == 1);
      wr_set   = 6'($urandom_range(0, SETS - 1));
      rd_set   = ($urandom_range(0, 3) == 0) ? wr_set : 6'($urandom_range(0, SETS - 1));
      for (int w = 0; w < WAYS; w++) begin
        wr_valid[w] = 1'($urandom);
        wr_tag[w]   = TAG_W'($urandom);
        wr_state[w] = 6'($urandom);
      end
      #1; checks++;
      if (rd_valid != m_valid[rd_set] ||
          (rd_valid & m_valid[rd_set]) != '0 && (rd_tag != m_tag[rd_set] || rd_state != m_state[rd_set])) begin
        failures++;
        if (failures < 10) $display("MISMATCH set %0d", rd_set);
      end
      if (wr_en && rd_set == wr_set) same_set++;
      @(posedge clk);
      if (wr_en) begin
        m_valid[wr_set] = wr_valid; m_tag[wr_set] = wr_tag; m_state[wr_set] = wr_state;
      end
    end
    // final full compare
    @(negedge clk) wr_en = 1'b0;
    for (int s = 0; s < SETS; s++) begin
      rd_set = 6'(s);
      #1; checks++;
      if (rd_valid != m_valid[s] || (m_valid[s] != '0 && (rd_tag != m_tag[s] || rd_state != m_state[s]))) begin
        failures++;
        if (failures < 10) $display("MISMATCH final set %0d", s);
      end
    end
    if (same_set == 0) begin failures++; $display("no read-during-write case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
