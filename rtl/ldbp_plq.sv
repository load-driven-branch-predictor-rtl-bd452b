// ldbp_plq: Pending Load Queue (PLQ) of the LDBP retirement block.
//
// Holds the stride pointers of loads that belong to tracked load-branch chains
// together with a tracking bit.  The bit is set when the pointer is appended
// and cleared when that load retires with a changed delta (or its SP entry is
// evicted).  At a BTT hit the BTT asks the PLQ about every load of the branch
// (q_ok) and triggers loads only if all of them are still tracked.
//
// Operation per cycle, in priority order at the clock edge:
//   1. ld_valid: a retiring load whose SP entry is tracked.  If absent it is
//      appended; its tracking bit becomes !ld_changed.
//   2. alloc_valid[k]: BTT allocation appends alloc_idx[k] with tracking = 1
//      (or sets the bit if already present).
//   3. clr_valid[k]: a flushed chain drops its loads.
//   4. clr_all: every entry dropped.
// Appends use a free entry, else a round-robin victim.  q_ok is combinational.
//
// Paper: fields, append on a tracked load retirement and on BTT allocation,
// tracking cleared on a delta change, 48 entries.  Own choices: associative
// search, victim choice, dropping entries of a flushed chain.
module ldbp_plq
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES = PLQ_ENTRIES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ld_valid,
  input  sp_idx_t                 ld_idx,
  input  logic                    ld_changed,
  input  logic    [MAX_LOADS-1:0] alloc_valid,
  input  sp_idx_t [MAX_LOADS-1:0] alloc_idx,
  input  logic    [MAX_LOADS-1:0] clr_valid,
  input  sp_idx_t [MAX_LOADS-1:0] clr_idx,
  input  logic                    clr_all,
  input  sp_idx_t [MAX_LOADS-1:0] q_idx,
  output logic    [MAX_LOADS-1:0] q_ok
);

  localparam int unsigned IW = $clog2(ENTRIES);

  logic          valid_q [ENTRIES];
  sp_idx_t       sptr_q  [ENTRIES];
  logic          track_q [ENTRIES];
  logic [IW-1:0] rr_q;

  always_comb begin
    for (int k = 0; k < MAX_LOADS; k++) begin
      q_ok[k] = 1'b0;
      for (int i = 0; i < ENTRIES; i++)
        if (valid_q[i] && sptr_q[i] == q_idx[k] && track_q[i]) q_ok[k] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    logic          found;
    logic          got_free;
    logic [IW-1:0] slot;
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        sptr_q[i]  <= '0;
        track_q[i] <= 1'b0;
      end
      rr_q <= '0;
    end else begin
      // 1. retiring tracked load
      if (ld_valid) begin
        found = 1'b0;
        for (int i = 0; i < ENTRIES; i++)
          if (valid_q[i] && sptr_q[i] == ld_idx) begin
            found = 1'b1;
            if (ld_changed) track_q[i] <= 1'b0;
          end
        if (!found) begin
          got_free = 1'b0;
          slot     = rr_q;
          for (int i = ENTRIES - 1; i >= 0; i--)
            if (!valid_q[i]) begin
              got_free = 1'b1;
              slot     = IW'(i);
            end
          valid_q[slot] <= 1'b1;
          sptr_q[slot]  <= ld_idx;
          track_q[slot] <= !ld_changed;
          if (!got_free) rr_q <= (rr_q == IW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
        end
      end
      // 2. allocation of a chain (one retired instruction per cycle, so never
      //    in the same cycle as 1)
      for (int k = 0; k < MAX_LOADS; k++) begin
        if (alloc_valid[k]) begin
          found = 1'b0;
          for (int i = 0; i < ENTRIES; i++)
            if (valid_q[i] && sptr_q[i] == alloc_idx[k]) begin
              found = 1'b1;
              track_q[i] <= 1'b1;
            end
          if (!found) begin
            // the k-th pointer takes the lowest free entry i with
            // i mod MAX_LOADS == k, so pointers appended together never collide
            slot = IW'((int'(rr_q) + k) % ENTRIES);
            for (int i = ENTRIES - 1; i >= 0; i--)
              if (!valid_q[i] && (i % MAX_LOADS) == k) slot = IW'(i);
            valid_q[slot] <= 1'b1;
            sptr_q[slot]  <= alloc_idx[k];
            track_q[slot] <= 1'b1;
          end
        end
      end
      if (|alloc_valid) rr_q <= IW'((int'(rr_q) + MAX_LOADS) % ENTRIES);
      // 3. flushed chain
      for (int k = 0; k < MAX_LOADS; k++)
        if (clr_valid[k])
          for (int i = 0; i < ENTRIES; i++)
            if (sptr_q[i] == clr_idx[k]) valid_q[i] <= 1'b0;
      // 4. all
      if (clr_all)
        for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end
  end

endmodule
