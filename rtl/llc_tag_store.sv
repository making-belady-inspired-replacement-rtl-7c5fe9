// llc_tag_store: the LLC tag array, each tag extended with the replacement
// state of Hawkeye + EHC (3-bit RRPV and 3-bit Expected Further Hits).
//
// One row holds all WAYS entries of a set. The row of rd_set_i is read
// combinationally; a whole row is written at the rising clock edge when
// wr_en_i is high (the replacement update touches the RRPV of several ways at
// once, so the write is row wide). Valid bits are cleared by the asynchronous
// active-low reset; tags and state are not reset because they are never used
// while the valid bit is clear. A read of the row being written in the same
// cycle returns the old contents.
//
// The paper states only that the tag storage of each block is extended by
// three bits for EHC (RRPV being part of Hawkeye); the array organisation,
// the read and write ports and the reset are this design's choices. No data
// array is modelled: the replacement policy never looks at block data.
module llc_tag_store
  import ehc_pkg::*;
#(
  parameter int unsigned SETS  = LLC_SETS,
  parameter int unsigned WAYS  = LLC_WAYS,
  parameter int unsigned TAG_W = PADDR_W - $clog2(BLOCK_BYTES) - $clog2(LLC_SETS),
  localparam int unsigned SET_W = $clog2(SETS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // read port
  input  logic [SET_W-1:0]          rd_set_i,
  output logic        [WAYS-1:0]    rd_valid_o,
  output logic [WAYS-1:0][TAG_W-1:0] rd_tag_o,
  output repl_state_t [WAYS-1:0]    rd_state_o,
  // write port (whole row)
  input  logic                      wr_en_i,
  input  logic [SET_W-1:0]          wr_set_i,
  input  logic        [WAYS-1:0]    wr_valid_i,
  input  logic [WAYS-1:0][TAG_W-1:0] wr_tag_i,
  input  repl_state_t [WAYS-1:0]    wr_state_i
);

  logic [SETS-1:0][WAYS-1:0]  valid_q;
  logic [WAYS-1:0][TAG_W-1:0] tag_q   [SETS];
  repl_state_t [WAYS-1:0]     state_q [SETS];

  assign rd_valid_o = valid_q[rd_set_i];
  assign rd_tag_o   = tag_q[rd_set_i];
  assign rd_state_o = state_q[rd_set_i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (wr_en_i) begin
      valid_q[wr_set_i] <= wr_valid_i;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en_i) begin
      tag_q[wr_set_i]   <= wr_tag_i;
      state_q[wr_set_i] <= wr_state_i;
    end
  end

endmodule
