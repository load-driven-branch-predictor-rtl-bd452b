// ldbp_fetch_block: LDBP fetch block.
//
// Holds the Load Outcome Registers, one Load Outcome Table entry per LOR
// entry, the Branch Outcome Table, the Code Snippet Table and NUM_FSM snippet
// FSMs, and the dispatcher that keeps the FSMs busy.
//
// Data flow (Fig. 3 and Fig. 4 of the paper):
//   trigger load completes -> LOR windows that hold the address -> LOT slot
//   dispatcher: a BOT entry whose snippet is installed, and a queue slot whose
//     load data are valid in the LOT entries of all the branch's loads and whose
//     outcome is not yet known -> free FSM (snippet from the CST, data from
//     the LOT)
//   FSM done -> BOT outcome queue -> prediction when the branch is fetched.
// All LOT entries of one branch use the same slot for the same branch
// instance (they are allocated together and advance together), so the
// dispatcher reads every LOT entry at one slot in a single cycle.  It issues
// at most one job per cycle: the lowest BOT index with a ready slot, and in it
// the first ready slot at or after the next slot fetch will use.  A job whose
// slot is released (the branch retired first) or whose chain is flushed is
// killed.
//
// Interface and timing: fetch lookup is combinational; retire-block commands,
// trigger completions and flushes act at the clock edge.  trig_addr gives, for
// BOT/BTT entry trig_idx, the trigger address of each of its loads.
// gate (low-power mode) blocks lookups, dispatch and LOT writes.
//
// Paper: the structures and their roles.  Own choices: the number of FSMs
// (2), the dispatch order, one dispatch per cycle.
//
// Lint lists the upper half of dbl as unused: it is the doubled slot
// vector used for wrap-around search, and only its low half is the result.
module ldbp_fetch_block
  import ldbp_pkg::*;
#(
  parameter int unsigned NUM_FSM = 2,
  parameter int unsigned TL_DIST = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    gate,
  input  logic                    clr_all,
  // fetch
  input  logic                    f_valid,
  input  xword_t                  f_pc,
  output logic                    f_hit,
  output logic                    f_pred_valid,
  output logic                    f_pred_taken,
  input  logic                    pipe_flush,
  // retire-block commands
  input  logic                    alloc_valid,
  input  btt_idx_t                alloc_idx,
  input  logic [11:0]             alloc_tag,
  input  nl_t                     alloc_nl,
  input  sp_idx_t [MAX_LOADS-1:0] alloc_sptr,
  input  xword_t  [MAX_LOADS-1:0] alloc_lastaddr,
  input  delta_t  [MAX_LOADS-1:0] alloc_delta,
  output logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free,
  input  logic                    flush_valid,
  input  btt_idx_t                flush_idx,
  input  logic                    adv_valid,
  input  btt_idx_t                adv_idx,
  input  logic                    cst_wr,
  input  snippet_t                cst_snip,
  // trigger addresses
  input  btt_idx_t                trig_idx,
  output xword_t  [MAX_LOADS-1:0] trig_addr,
  // trigger load completion
  input  logic                    cmp_valid,
  input  xword_t                  cmp_addr,
  input  xword_t                  cmp_data,
  // activity
  output logic                    dispatch,
  output logic                    fsm_stall
);

  localparam int unsigned NE = LOR_ENTRIES;
  localparam int unsigned NB = BTT_ENTRIES;
  localparam int unsigned D  = OQ_DEPTH;

  // LOR
  logic     [NE-1:0] lot_we, lot_rel, lot_clr, e_valid;
  oq_idx_t  [NE-1:0] lot_wslot, lot_rel_slot, e_lot_pos;
  btt_idx_t [NE-1:0] e_owner;
  slot_t    [NE-1:0] e_slot;
  sp_idx_t  [NE-1:0] e_sptr;
  xword_t   [NE-1:0] tl_addr;
  // LOT
  logic     [NE-1:0][D-1:0] lot_valid;
  xword_t   [NE-1:0] lot_rdata;
  oq_idx_t           rd_slot;
  // BOT
  logic     [NB-1:0] b_active;
  logic     [NB-1:0][D-1:0] b_ovalid;
  oq_idx_t  [NB-1:0] b_pos, b_fslot;
  nl_t      [NB-1:0] b_nl;
  sp_idx_t  [NB-1:0][MAX_LOADS-1:0] b_sptr;
  // FSMs
  logic     [NUM_FSM-1:0] f_busy, f_start, f_kill, f_done, f_taken;
  btt_idx_t [NUM_FSM-1:0] f_cbot, f_dbot;
  oq_idx_t  [NUM_FSM-1:0] f_cslot, f_dslot;
  // dispatcher
  lor_idx_t [NB-1:0][MAX_LOADS-1:0] lor_of;
  logic     [NB-1:0][D-1:0] ready;
  logic              any_ready;
  btt_idx_t          pick_b;
  oq_idx_t           pick_s;
  snippet_t          pick_snip;
  xword_t [MAX_LOADS-1:0] pick_ld;

  ldbp_lor #(.TL_DIST(TL_DIST)) u_lor (
    .clk, .rst_n,
    .alloc_valid, .alloc_owner(alloc_idx), .alloc_nl, .alloc_sptr, .alloc_lastaddr, .alloc_delta,
    .free_cnt(lor_free),
    .dealloc_valid(flush_valid), .dealloc_owner(flush_idx), .clr_all,
    .adv_valid, .adv_owner(adv_idx),
    .cmp_valid(cmp_valid && !gate), .cmp_addr,
    .lot_we, .lot_wslot, .lot_rel, .lot_rel_slot, .lot_clr,
    .e_valid, .e_owner, .e_slot, .e_lot_pos, .e_sptr, .tl_addr
  );

  for (genvar e = 0; e < NE; e++) begin : g_lot
    ldbp_lot u_lot (
      .clk, .rst_n,
      .we(lot_we[e]), .wslot(lot_wslot[e]), .wdata(cmp_data),
      .rel(lot_rel[e]), .rel_slot(lot_rel_slot[e]), .clr_all(lot_clr[e]),
      .rslot(rd_slot), .rdata(lot_rdata[e]), .valid(lot_valid[e])
    );
  end

  ldbp_bot #(.NUM_FSM(NUM_FSM)) u_bot (
    .clk, .rst_n, .gate,
    .f_valid, .f_pc, .f_hit, .f_pred_valid, .f_pred_taken, .pipe_flush,
    .alloc_valid, .alloc_idx, .alloc_tag, .alloc_nl, .alloc_sptr,
    .dealloc_valid(flush_valid), .dealloc_idx(flush_idx), .clr_all,
    .act_valid(cst_wr), .act_idx(adv_idx),
    .ret_adv(adv_valid), .ret_idx(adv_idx),
    .ow_valid(f_done), .ow_idx(f_dbot), .ow_slot(f_dslot), .ow_taken(f_taken),
    .e_active(b_active), .e_ovalid(b_ovalid), .e_pos(b_pos), .e_fslot(b_fslot),
    .e_nl(b_nl), .e_sptr(b_sptr)
  );

  ldbp_cst u_cst (
    .clk, .rst_n, .wr_valid(cst_wr), .wr_idx(adv_idx), .wr_snip(cst_snip),
    .rd_idx(pick_b), .rd_snip(pick_snip)
  );

  // ---------------------------------------------------------- dispatcher
  always_comb begin
    for (int i = 0; i < NB; i++) begin
      logic all_found;
      logic [D-1:0] rdy;
      all_found = 1'b1;
      rdy       = ~b_ovalid[i];
      for (int k = 0; k < MAX_LOADS; k++) begin
        logic found;
        found        = 1'b0;
        lor_of[i][k] = '0;
        for (int e = NE - 1; e >= 0; e--)
          if (e_valid[e] && e_owner[e] == btt_idx_t'(i) && e_slot[e] == slot_t'(k) &&
              e_sptr[e] == b_sptr[i][k]) begin
            found        = 1'b1;
            lor_of[i][k] = lor_idx_t'(e);
          end
        if (k < int'(b_nl[i])) begin
          all_found = all_found && found;
          rdy       = rdy & lot_valid[lor_of[i][k]];
        end
      end
      for (int f = 0; f < NUM_FSM; f++)
        if (f_busy[f] && f_cbot[f] == btt_idx_t'(i)) rdy[f_cslot[f]] = 1'b0;
      if (adv_valid && adv_idx == btt_idx_t'(i)) rdy[b_pos[i]] = 1'b0;
      if (!b_active[i] || !all_found || gate || clr_all ||
          (flush_valid && flush_idx == btt_idx_t'(i)) ||
          (alloc_valid && alloc_idx == btt_idx_t'(i)))
        rdy = '0;
      ready[i] = rdy;
    end

  end

  always_comb begin
    logic [2*D-1:0] dbl;
    logic [D-1:0]   rot;
    int unsigned    j;
    any_ready = 1'b0;
    pick_b    = '0;
    pick_s    = '0;
    dbl       = '0;
    rot       = '0;
    j         = 0;
    for (int i = NB - 1; i >= 0; i--) begin
      if (ready[i] != '0) begin
        any_ready = 1'b1;
        pick_b    = btt_idx_t'(i);
        dbl       = {ready[i], ready[i]} >> b_fslot[i];
        rot       = dbl[D-1:0];
        j         = 0;
        for (int b = D - 1; b >= 0; b--) if (rot[b]) j = b;
        pick_s    = oq_idx_t'(int'(b_fslot[i]) + j);
      end
    end
  end

  assign rd_slot = pick_s;

  always_comb begin
    for (int k = 0; k < MAX_LOADS; k++) pick_ld[k] = lot_rdata[lor_of[pick_b][k]];
  end

  always_comb begin
    f_start = '0;
    for (int f = NUM_FSM - 1; f >= 0; f--)
      if (!f_busy[f]) f_start = NUM_FSM'(1) << f;
    if (!any_ready) f_start = '0;
    dispatch  = any_ready && (f_start != '0);
    fsm_stall = any_ready && (f_start == '0);
  end

  always_comb begin
    for (int k = 0; k < MAX_LOADS; k++) begin
      trig_addr[k] = '0;
      for (int e = NE - 1; e >= 0; e--)
        if (e_valid[e] && e_owner[e] == trig_idx && e_slot[e] == slot_t'(k)) trig_addr[k] = tl_addr[e];
    end
  end

  // Every LOR entry of a branch sits at the branch's BOT queue position.
  for (genvar e = 0; e < NE; e++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     e_valid[e] |-> e_lot_pos[e] == b_pos[e_owner[e]])
      else $error("LOR %0d out of step with its BOT entry", e);
  end

  for (genvar f = 0; f < NUM_FSM; f++) begin : g_fsm
    assign f_kill[f] = f_busy[f] &&
                       (clr_all ||
                        (adv_valid && adv_idx == f_cbot[f] && b_pos[f_cbot[f]] == f_cslot[f]) ||
                        (flush_valid && flush_idx == f_cbot[f]) ||
                        (alloc_valid && alloc_idx == f_cbot[f]));
    ldbp_fsm u_fsm (
      .clk, .rst_n,
      .start(f_start[f]), .start_bot(pick_b), .start_slot(pick_s), .snip(pick_snip),
      .ld_vals(pick_ld), .kill(f_kill[f]),
      .busy(f_busy[f]), .cur_bot(f_cbot[f]), .cur_slot(f_cslot[f]),
      .done(f_done[f]), .done_bot(f_dbot[f]), .done_slot(f_dslot[f]), .done_taken(f_taken[f])
    );
  end

endmodule
