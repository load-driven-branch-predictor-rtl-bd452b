// ldbp_cst: Code Snippet Table (CST) of the LDBP fetch block.
//
// Entry i holds the backward slice of the branch tracked in BTT/BOT entry i:
// up to CST_OPS simple operations (four per branch source), the references of
// the branch's two operands and its compare condition.  It is written once,
// when the Code Snippet Builder has completed the slice and the branch hits
// in the BTT, and is read by the FSM dispatcher.
//
// Interface and timing: write at the clock edge; rd_snip is an asynchronous
// read of entry rd_idx.  Entries carry no valid bit: the BOT's active bit says
// whether entry i has been written since the branch was allocated.
//
// Paper: 8 entries of 8 operations (2 Kbit with 32-bit operations).  Own
// choices: storing the condition and operand references beside the ops.
module ldbp_cst
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES = BTT_ENTRIES
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr_valid,
  input  btt_idx_t wr_idx,
  input  snippet_t wr_snip,
  input  btt_idx_t rd_idx,
  output snippet_t rd_snip
);

  snippet_t tab_q [ENTRIES];

  assign rd_snip = tab_q[rd_idx];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab_q[i] <= '0;
    end else if (wr_valid) begin
      tab_q[wr_idx] <= wr_snip;
    end
  end

endmodule
