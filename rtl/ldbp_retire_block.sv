// ldbp_retire_block: LDBP retirement block.
//
// Wires the Stride Predictor, Rename Tracking Table, Pending Load Queue, Code
// Snippet Builder and Branch Trigger Table to the core's retire port.  Every
// retired instruction is handled in its retirement cycle: loads update the SP,
// the RTT and (while building) the CSB; simple ALU operations update the RTT
// and CSB; branches are checked against the BTT, which then emits the
// commands that the fetch block and the trigger queue carry out (allocate,
// flush, advance, install snippet, push trigger loads).
//
// In low-power mode (gate) only the SP and the RTT keep working; the BTT
// still reports wake when a branch meets the allocation condition.  clr_all
// drops every chain.
//
// Interface and timing: all command outputs are combinational for the
// instruction on ret and act at the next clock edge.  alloc_lastaddr/
// alloc_delta come from the SP for the allocated loads.
//
// Paper: the set of structures and their interplay (Fig. 2, Fig. 4).
module ldbp_retire_block
  import ldbp_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    gate,
  input  logic                    clr_all,
  input  retire_t                 ret,
  input  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free,
  input  logic [3:0]              tq_space,
  output logic                    alloc_valid,
  output btt_idx_t                alloc_idx,
  output logic [11:0]             alloc_tag,
  output nl_t                     alloc_nl,
  output sp_idx_t [MAX_LOADS-1:0] alloc_sptr,
  output xword_t  [MAX_LOADS-1:0] alloc_lastaddr,
  output delta_t  [MAX_LOADS-1:0] alloc_delta,
  output logic                    flush_valid,
  output btt_idx_t                flush_idx,
  output logic                    adv_valid,
  output btt_idx_t                adv_idx,
  output logic                    cst_wr,
  output snippet_t                cst_snip,
  output logic                    trig_push,
  output nl_t                     trig_n,
  output logic                    wake
);

  sp_idx_t                 ld_idx;
  logic                    ld_pred, ld_track, ld_chg, is_load;
  rtt_entry_t              rtt_a, rtt_b;
  sp_idx_t [MAX_LOADS-1:0] plq_q_idx, flush_sptr;
  logic    [MAX_LOADS-1:0] plq_ok, alloc_mask, flush_mask;
  logic                    csb_active, csb_snip_ok, csb_enable, csb_disable;
  snippet_t                csb_snip;
  retire_t                 ret_g;

  assign is_load = ret.valid && ret.kind == RK_LOAD;

  always_comb begin
    ret_g       = ret;
    ret_g.valid = ret.valid && !gate;
  end

  ldbp_sp u_sp (
    .clk, .rst_n,
    .ld_valid(is_load), .ld_pc(ret.pc), .ld_addr(ret.ld_addr),
    .ld_idx, .ld_predictable(ld_pred), .ld_tracking(ld_track), .ld_delta_changed(ld_chg),
    .rd_idx(alloc_sptr), .rd_lastaddr(alloc_lastaddr), .rd_delta(alloc_delta),
    .set_track(alloc_mask), .set_idx(alloc_sptr),
    .clr_track(flush_mask), .clr_idx(flush_sptr),
    .clr_all_track(clr_all)
  );

  ldbp_rtt u_rtt (
    .clk, .rst_n, .ret, .ld_predictable(ld_pred), .ld_idx, .rd_a(rtt_a), .rd_b(rtt_b)
  );

  ldbp_plq u_plq (
    .clk, .rst_n,
    .ld_valid(is_load && !gate && (ld_track || ld_chg)), .ld_idx, .ld_changed(ld_chg),
    .alloc_valid(alloc_mask), .alloc_idx(alloc_sptr),
    .clr_valid(flush_mask), .clr_idx(flush_sptr), .clr_all,
    .q_idx(plq_q_idx), .q_ok(plq_ok)
  );

  ldbp_csb u_csb (
    .clk, .rst_n, .enable(csb_enable), .disable_i(csb_disable || clr_all), .ret(ret_g),
    .ld_predictable(ld_pred), .nl_a(rtt_a.nloads),
    .active(csb_active), .snip(csb_snip), .snip_ok(csb_snip_ok)
  );

  ldbp_btt u_btt (
    .clk, .rst_n, .gate, .clr_all, .ret, .rtt_a, .rtt_b,
    .plq_q_idx, .plq_ok,
    .csb_active, .csb_snip, .csb_snip_ok, .csb_enable, .csb_disable,
    .lor_free, .tq_space,
    .alloc_valid, .alloc_idx, .alloc_tag, .alloc_nl, .alloc_sptr, .alloc_mask,
    .flush_valid, .flush_idx, .flush_sptr, .flush_mask,
    .adv_valid, .adv_idx, .cst_wr, .cst_snip, .trig_push, .trig_n, .wake
  );

endmodule
