// ldbp_lot: one Load Outcome Table (LOT) entry of the LDBP fetch block.
//
// An entry is a circular queue of OQ_DEPTH trigger-load data words
// (lot.ld_data) with one valid bit per word (lot.valid).  Queue slot s holds
// the data of the load address its Load Outcome Register assigns to s
// (ldstart + ((s - lot_pos) mod OQ_DEPTH) * delta).  The design has one LOT
// entry per LOR entry (16).
//
// Interface and timing: a write (we) stores wdata in slot wslot and sets its
// valid bit at the clock edge.  rel clears the valid bit of rel_slot (the
// slot of the instance that just retired); it wins over a write to the same
// slot.  clr_all clears every valid bit (allocation of the entry).  rdata is
// an asynchronous read of slot rslot; valid is the whole valid-bit vector.
//
// Paper: 64 x 64-bit data queue plus valid queue per entry (65 Kbit for 16
// entries).  Own choices: separate read port, release priority.
module ldbp_lot
  import ldbp_pkg::*;
#(
  parameter int unsigned DEPTH = OQ_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] wslot,
  input  xword_t                   wdata,
  input  logic                     rel,
  input  logic [$clog2(DEPTH)-1:0] rel_slot,
  input  logic                     clr_all,
  input  logic [$clog2(DEPTH)-1:0] rslot,
  output xword_t                   rdata,
  output logic [DEPTH-1:0]         valid
);

  xword_t           data_q [DEPTH];
  logic [DEPTH-1:0] valid_q;

  assign rdata = data_q[rslot];
  assign valid = valid_q;

  always_ff @(posedge clk) begin
    if (we) data_q[wslot] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr_all) begin
      valid_q <= '0;
    end else begin
      if (we)  valid_q[wslot]    <= 1'b1;
      if (rel) valid_q[rel_slot] <= 1'b0;
    end
  end

endmodule
