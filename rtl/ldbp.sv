// ldbp: Load Driven Branch Predictor, top level.
//
// LDBP predicts hard branches whose operands are computed, through at most a
// few simple ALU operations, from loads whose addresses follow a stride.  The
// retirement block learns such load-branch chains from retiring instructions
// and, each time a tracked branch retires, sends trigger loads for an instance
// TL_DIST iterations ahead.  The fetch block stores the returned data, runs the
// chain's backward slice on it with small FSMs and keeps the precomputed
// outcomes in a per-branch queue; a fetched branch that finds its outcome
// there is predicted by LDBP instead of the default predictor.
//
// Ports:
//   fetch      f_valid/f_pc in; f_hit (branch tracked), f_pred_valid (LDBP
//              has an outcome, use it), f_pred_taken out - combinational.
//   flush      pipe_flush: raise when the pipeline discards every unretired
//              instruction (branch misprediction recovery).
//   retire     ret: one retired instruction per cycle, decoded (ldbp_pkg
//              retire_t), with the default predictor's confidence and
//              direction and whether LDBP predicted it at fetch.
//   trigger    tl_req_valid/tl_req_addr/tl_req_ready: trigger loads to the
//              data cache; tl_cmp_valid/tl_cmp_addr/tl_cmp_data: completion.
//   power      lp_mode: LDBP is in its low-power mode.
//   activity   ev_dispatch, ev_fsm_stall: FSM job started / delayed (all busy).
// The default predictor (IMLI in the paper), the core and the data cache are
// outside this module.
//
// Sizes follow the paper (Table III there): SP 48, RTT 32, PLQ 48, BTT 8,
// CSB 32x4, LOR 16, LOT 16x64x64 bit, BOT 8x64, CST 8x8; 100,000 idle cycles
// before low-power mode; trigger distance 16 from the paper's example.  The
// FSM count (2) and the trigger queue depth (8) are this design's choices.
module ldbp
  import ldbp_pkg::*;
#(
  parameter int unsigned NUM_FSM     = 2,
  parameter int unsigned TL_DIST     = 16,
  parameter int unsigned TQ_DEPTH    = 8,
  parameter int unsigned IDLE_CYCLES = 100000
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    f_valid,
  input  xword_t  f_pc,
  output logic    f_hit,
  output logic    f_pred_valid,
  output logic    f_pred_taken,
  input  logic    pipe_flush,
  input  retire_t ret,
  output logic    tl_req_valid,
  output xword_t  tl_req_addr,
  input  logic    tl_req_ready,
  input  logic    tl_cmp_valid,
  input  xword_t  tl_cmp_addr,
  input  xword_t  tl_cmp_data,
  output logic    lp_mode,
  output logic    ev_dispatch,   // an FSM job started this cycle
  output logic    ev_fsm_stall   // a job was ready but every FSM was busy
);

  logic                    gate, wake, wake_pulse;
  logic                    alloc_valid, flush_valid, adv_valid, cst_wr, trig_push;
  btt_idx_t                alloc_idx, flush_idx, adv_idx;
  logic [11:0]             alloc_tag;
  nl_t                     alloc_nl, trig_n;
  sp_idx_t [MAX_LOADS-1:0] alloc_sptr;
  xword_t  [MAX_LOADS-1:0] alloc_lastaddr, trig_addr;
  delta_t  [MAX_LOADS-1:0] alloc_delta;
  snippet_t                cst_snip;
  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free;
  logic [3:0]              tq_space;

  assign gate = lp_mode;

  ldbp_retire_block u_retire (
    .clk, .rst_n, .gate, .clr_all(wake_pulse), .ret, .lor_free, .tq_space,
    .alloc_valid, .alloc_idx, .alloc_tag, .alloc_nl, .alloc_sptr, .alloc_lastaddr, .alloc_delta,
    .flush_valid, .flush_idx, .adv_valid, .adv_idx, .cst_wr, .cst_snip,
    .trig_push, .trig_n, .wake
  );

  ldbp_fetch_block #(.NUM_FSM(NUM_FSM), .TL_DIST(TL_DIST)) u_fetch (
    .clk, .rst_n, .gate, .clr_all(wake_pulse),
    .f_valid, .f_pc, .f_hit, .f_pred_valid, .f_pred_taken, .pipe_flush,
    .alloc_valid, .alloc_idx, .alloc_tag, .alloc_nl, .alloc_sptr, .alloc_lastaddr, .alloc_delta,
    .lor_free, .flush_valid, .flush_idx, .adv_valid, .adv_idx, .cst_wr, .cst_snip,
    .trig_idx(adv_idx), .trig_addr,
    .cmp_valid(tl_cmp_valid), .cmp_addr(tl_cmp_addr), .cmp_data(tl_cmp_data),
    .dispatch(ev_dispatch), .fsm_stall(ev_fsm_stall)
  );

  ldbp_trigger_queue #(.DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n, .clr(wake_pulse),
    .push_n(trig_push ? trig_n : nl_t'(0)), .push_addr(trig_addr), .space(tq_space),
    .req_valid(tl_req_valid), .req_addr(tl_req_addr), .req_ready(tl_req_ready)
  );

  ldbp_power_ctrl #(.IDLE_CYCLES(IDLE_CYCLES)) u_pwr (
    .clk, .rst_n, .pred_used(f_pred_valid), .wake, .lp_mode, .wake_pulse
  );

endmodule
