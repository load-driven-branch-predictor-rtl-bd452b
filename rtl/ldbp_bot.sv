// ldbp_bot: Branch Outcome Table (BOT) of the LDBP fetch block.
//
// One entry per tracked branch (entry i belongs to BTT entry i and CST entry
// i, so bot.cstptr is i).  Each entry holds the branch PC tag, its load list,
// a queue of OQ_DEPTH precomputed outcomes with valid bits, the retire-side
// queue position pos (equal to lot_pos of the branch's LOR entries) and
// outcome_ptr, the number of fetched instances of the branch that have not
// retired yet.  Fetched instance number outcome_ptr therefore reads queue slot
// (pos + outcome_ptr) mod OQ_DEPTH - the same slot the LOT uses for that
// instance's load data.
//
// Fetch: a PC that hits a valid, synchronised entry increments outcome_ptr
// (the only speculative state).  The prediction is valid when the entry's
// snippet is installed and the outcome at the slot is valid.
// Retire (ret_adv): the oldest slot is released (valid cleared), pos advances
// and outcome_ptr drops by one.
// Pipeline flush: outcome_ptr returns to zero in every entry, which re-aligns
// the fetch side with the retire side; an entry allocated since the previous
// flush becomes synchronised here, because instances fetched before its
// allocation were never counted.  The flush must be raised when every
// unretired instruction is squashed.
// Outcome writes come from the snippet FSMs (one port per FSM).
//
// Timing: fetch lookup is combinational; all state changes at the clock edge.
// Paper: fields, outcome_ptr increment at fetch, flush to zero, 8 entries of
// 64 outcomes.  Own choices: outcome_ptr as offset from the retire position,
// the sync bit, tag width 12.
module ldbp_bot
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES = BTT_ENTRIES,
  parameter int unsigned DEPTH   = OQ_DEPTH,
  parameter int unsigned NUM_FSM = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       gate,          // low-power mode: no lookups
  // fetch
  input  logic                       f_valid,
  input  xword_t                     f_pc,
  output logic                       f_hit,
  output logic                       f_pred_valid,
  output logic                       f_pred_taken,
  input  logic                       pipe_flush,
  // from the retirement block
  input  logic                       alloc_valid,
  input  btt_idx_t                   alloc_idx,
  input  logic [11:0]                alloc_tag,
  input  nl_t                        alloc_nl,
  input  sp_idx_t [MAX_LOADS-1:0]    alloc_sptr,
  input  logic                       dealloc_valid,
  input  btt_idx_t                   dealloc_idx,
  input  logic                       clr_all,
  input  logic                       act_valid,
  input  btt_idx_t                   act_idx,
  input  logic                       ret_adv,
  input  btt_idx_t                   ret_idx,
  // outcome writes
  input  logic     [NUM_FSM-1:0]     ow_valid,
  input  btt_idx_t [NUM_FSM-1:0]     ow_idx,
  input  oq_idx_t  [NUM_FSM-1:0]     ow_slot,
  input  logic     [NUM_FSM-1:0]     ow_taken,
  // state for the FSM dispatcher
  output logic     [ENTRIES-1:0]     e_active,
  output logic     [ENTRIES-1:0][DEPTH-1:0] e_ovalid,
  output oq_idx_t  [ENTRIES-1:0]     e_pos,
  output oq_idx_t  [ENTRIES-1:0]     e_fslot,
  output nl_t      [ENTRIES-1:0]     e_nl,
  output sp_idx_t  [ENTRIES-1:0][MAX_LOADS-1:0] e_sptr
);

  localparam int unsigned PW = $clog2(DEPTH + 1);

  logic     [ENTRIES-1:0] valid_q, sync_q, act_q;
  logic [11:0]            tag_q  [ENTRIES];
  nl_t                    nl_q   [ENTRIES];
  sp_idx_t [MAX_LOADS-1:0] sptr_q [ENTRIES];
  oq_idx_t                pos_q  [ENTRIES];
  logic [PW-1:0]          optr_q [ENTRIES];
  logic [DEPTH-1:0]       oq_q   [ENTRIES];
  logic [DEPTH-1:0]       ov_q   [ENTRIES];

  btt_idx_t f_idx;
  oq_idx_t  f_slot;

  always_comb begin
    f_idx        = btt_index(f_pc);
    f_hit        = f_valid && !gate && valid_q[f_idx] && sync_q[f_idx] && tag_q[f_idx] == btt_tag(f_pc);
    f_slot       = oq_idx_t'(pos_q[f_idx] + oq_idx_t'(optr_q[f_idx]));
    f_pred_valid = f_hit && act_q[f_idx] && (optr_q[f_idx] < PW'(DEPTH)) && ov_q[f_idx][f_slot];
    f_pred_taken = f_pred_valid && oq_q[f_idx][f_slot];
    for (int i = 0; i < ENTRIES; i++) begin
      e_active[i] = valid_q[i] && act_q[i];
      e_ovalid[i] = ov_q[i];
      e_pos[i]    = pos_q[i];
      e_fslot[i]  = oq_idx_t'(pos_q[i] + oq_idx_t'(optr_q[i]));
      e_nl[i]     = nl_q[i];
      e_sptr[i]   = sptr_q[i];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      sync_q  <= '0;
      act_q   <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        tag_q[i]  <= '0;
        nl_q[i]   <= '0;
        sptr_q[i] <= '0;
        pos_q[i]  <= '0;
        optr_q[i] <= '0;
        oq_q[i]   <= '0;
        ov_q[i]   <= '0;
      end
    end else begin
      // outcome writes
      for (int f = 0; f < NUM_FSM; f++)
        if (ow_valid[f]) begin
          oq_q[ow_idx[f]][ow_slot[f]] <= ow_taken[f];
          ov_q[ow_idx[f]][ow_slot[f]] <= 1'b1;
        end
      for (int i = 0; i < ENTRIES; i++) begin
        logic inc, dec;
        inc = f_hit && f_idx == btt_idx_t'(i) && optr_q[i] != PW'(DEPTH);
        dec = ret_adv && ret_idx == btt_idx_t'(i) && optr_q[i] != '0;
        if (inc && !dec) optr_q[i] <= optr_q[i] + 1'b1;
        if (dec && !inc) optr_q[i] <= optr_q[i] - 1'b1;
        if (ret_adv && ret_idx == btt_idx_t'(i)) begin
          ov_q[i][pos_q[i]] <= 1'b0;
          pos_q[i]          <= pos_q[i] + 1'b1;
        end
        if (pipe_flush) begin
          optr_q[i] <= '0;
          sync_q[i] <= valid_q[i];
        end
      end
      if (act_valid) act_q[act_idx] <= 1'b1;
      if (dealloc_valid) valid_q[dealloc_idx] <= 1'b0;
      if (alloc_valid) begin
        valid_q[alloc_idx] <= 1'b1;
        sync_q[alloc_idx]  <= 1'b0;
        act_q[alloc_idx]   <= 1'b0;
        tag_q[alloc_idx]   <= alloc_tag;
        nl_q[alloc_idx]    <= alloc_nl;
        sptr_q[alloc_idx]  <= alloc_sptr;
        pos_q[alloc_idx]   <= '0;
        optr_q[alloc_idx]  <= '0;
        ov_q[alloc_idx]    <= '0;
      end
      if (clr_all) valid_q <= '0;
    end
  end

endmodule
