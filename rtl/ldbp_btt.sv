// ldbp_btt: Branch Trigger Table (BTT) and retirement-side control of LDBP.
//
// Entry i (selected by the retiring branch PC) links a branch with the loads of
// its load-branch chain: PC tag, stride-pointer list, a 3-bit accuracy counter
// and a built bit (snippet installed in the CST).  For every retiring
// conditional branch the BTT decides, in the same cycle:
//
//   miss, default predictor not confident, RTT chain valid (both sources
//   valid, 1..MAX_LOADS predictable loads):
//     - entry held by another branch: flush that chain (the new branch
//       allocates at a later retirement);
//     - otherwise, if the CSB is idle and enough LOR entries are free:
//       allocate.  The allocation fans out (Fig. 4 of the paper) to the SP
//       (set tracking bits), PLQ, LOR/LOT, BOT and CSB (start building); the
//       accuracy counter starts at half range.
//   hit:
//     - accuracy: +1 when LDBP predicted right and the default predictor would
//       have been wrong, -1 in the opposite case;
//     - the chain is flushed when the RTT load list differs from the stored
//       one (chain changed), when a PLQ tracking bit is clear (delta changed)
//       or when the accuracy reaches zero;
//     - otherwise the chain's windows advance (LOR ldstart/lot_pos, BOT
//       position), the completed CSB snippet is copied to the CST if not done
//       yet, and one trigger load per chain load is pushed to the trigger
//       queue when it has room for all of them.
// A flush clears the BTT and BOT entries, frees the LOR/LOT entries, clears
// SP tracking bits and PLQ entries of the loads and stops the CSB if it was
// building this chain.  clr_all drops every chain (leaving low-power mode).
// gate (low-power mode) suspends everything except the wake output, which
// reports a retiring branch that meets the allocation condition.
//
// Timing: all outputs are combinational for the instruction on ret; state is
// written at the clock edge.  Paper: the allocation conditions, the accuracy
// rule, flush triggers, fan-out and 8 entries.  Own choices: direct mapping,
// victim handling, load-list comparison for chain change, all-or-nothing
// trigger push, CSB/LOR availability checks.
//
// Lint lists the register and operand bits of ret as unused: the BTT reads
// only the branch PC and outcome fields; operands come in through the RTT.
module ldbp_btt
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES = BTT_ENTRIES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    gate,
  input  logic                    clr_all,
  input  retire_t                 ret,
  input  rtt_entry_t              rtt_a,
  input  rtt_entry_t              rtt_b,
  // PLQ query
  output sp_idx_t [MAX_LOADS-1:0] plq_q_idx,
  input  logic    [MAX_LOADS-1:0] plq_ok,
  // CSB
  input  logic                    csb_active,
  input  snippet_t                csb_snip,
  input  logic                    csb_snip_ok,
  output logic                    csb_enable,
  output logic                    csb_disable,
  // resources
  input  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free,
  input  logic [3:0]              tq_space,
  // allocation
  output logic                    alloc_valid,
  output btt_idx_t                alloc_idx,
  output logic [11:0]             alloc_tag,
  output nl_t                     alloc_nl,
  output sp_idx_t [MAX_LOADS-1:0] alloc_sptr,
  output logic    [MAX_LOADS-1:0] alloc_mask,
  // flush of one chain
  output logic                    flush_valid,
  output btt_idx_t                flush_idx,
  output sp_idx_t [MAX_LOADS-1:0] flush_sptr,
  output logic    [MAX_LOADS-1:0] flush_mask,
  // hit: advance, snippet install, triggers
  output logic                    adv_valid,
  output btt_idx_t                adv_idx,
  output logic                    cst_wr,
  output snippet_t                cst_snip,
  output logic                    trig_push,
  output nl_t                     trig_n,
  // low-power wake-up condition
  output logic                    wake
);

  localparam logic [ACC_BITS-1:0] ACC_MAX  = '1;
  localparam logic [ACC_BITS-1:0] ACC_INIT = ACC_BITS'(1 << (ACC_BITS - 1));

  logic [ENTRIES-1:0]      valid_q, built_q;
  logic [11:0]             tag_q  [ENTRIES];
  logic [ACC_BITS-1:0]     acc_q  [ENTRIES];
  nl_t                     nl_q   [ENTRIES];
  sp_idx_t [MAX_LOADS-1:0] sptr_q [ENTRIES];
  btt_idx_t                build_q;

  btt_idx_t                idx;
  logic [11:0]             tag;
  logic                    is_br, hit, chain_ok, cat_ok, same_chain, plq_all;
  nl_t                     cat_nl;
  sp_idx_t [MAX_LOADS-1:0] cat_sptr;
  logic [MAX_LOADS-1:0]    mask_hit, mask_new;
  logic [ACC_BITS-1:0]     acc_nx;
  logic                    ldbp_ok, imli_ok, keep;

  function automatic logic [MAX_LOADS-1:0] nl_mask(input nl_t n);
    logic [MAX_LOADS-1:0] m;
    for (int k = 0; k < MAX_LOADS; k++) m[k] = (k < int'(n));
    return m;
  endfunction

  always_comb begin
    idx   = btt_index(ret.pc);
    tag   = btt_tag(ret.pc);
    is_br = ret.valid && ret.kind == RK_BRANCH;
    hit   = valid_q[idx] && tag_q[idx] == tag;
    rtt_concat(rtt_a, rtt_b, cat_ok, cat_nl, cat_sptr);
    chain_ok = cat_ok && cat_nl != '0;
    wake     = is_br && !ret.imli_conf && chain_ok;

    mask_hit = nl_mask(nl_q[idx]);
    mask_new = nl_mask(cat_nl);
    same_chain = chain_ok && cat_nl == nl_q[idx];
    for (int k = 0; k < MAX_LOADS; k++)
      if (mask_hit[k] && cat_sptr[k] != sptr_q[idx][k]) same_chain = 1'b0;
    plq_q_idx = sptr_q[idx];
    plq_all   = &(plq_ok | ~mask_hit);

    ldbp_ok = ret.ldbp_pred == ret.br_taken;
    imli_ok = ret.imli_pred == ret.br_taken;
    acc_nx  = acc_q[idx];
    if (ret.ldbp_used && ldbp_ok && !imli_ok && acc_nx != ACC_MAX) acc_nx = acc_nx + 1'b1;
    if (ret.ldbp_used && !ldbp_ok && imli_ok && acc_nx != '0)     acc_nx = acc_nx - 1'b1;
    keep = same_chain && plq_all && acc_nx != '0;

    // defaults
    alloc_valid = 1'b0;
    alloc_idx   = idx;
    alloc_tag   = tag;
    alloc_nl    = cat_nl;
    alloc_sptr  = cat_sptr;
    alloc_mask  = '0;
    flush_valid = 1'b0;
    flush_idx   = idx;
    flush_sptr  = sptr_q[idx];
    flush_mask  = '0;
    adv_valid   = 1'b0;
    adv_idx     = idx;
    cst_wr      = 1'b0;
    cst_snip    = csb_snip;
    cst_snip.nloads = nl_q[idx];
    trig_push   = 1'b0;
    trig_n      = nl_q[idx];
    csb_enable  = 1'b0;
    csb_disable = 1'b0;

    if (is_br && !gate && !clr_all) begin
      if (hit) begin
        if (!keep) begin
          flush_valid = 1'b1;
          flush_mask  = mask_hit;
          csb_disable = csb_active && build_q == idx;
        end else begin
          adv_valid = 1'b1;
          if (!built_q[idx] && csb_active && build_q == idx && csb_snip_ok) begin
            cst_wr      = 1'b1;
            csb_disable = 1'b1;
          end
          trig_push = (tq_space >= 4'(nl_q[idx]));
        end
      end else if (!ret.imli_conf && chain_ok) begin
        if (valid_q[idx]) begin
          flush_valid = 1'b1;
          flush_mask  = mask_hit;
          csb_disable = csb_active && build_q == idx;
        end else if (!csb_active && int'(lor_free) >= int'(cat_nl)) begin
          alloc_valid = 1'b1;
          alloc_mask  = mask_new;
          csb_enable  = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      built_q <= '0;
      build_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        tag_q[i]  <= '0;
        acc_q[i]  <= '0;
        nl_q[i]   <= '0;
        sptr_q[i] <= '0;
      end
    end else if (clr_all) begin
      valid_q <= '0;
      built_q <= '0;
    end else begin
      if (flush_valid) begin
        valid_q[idx] <= 1'b0;
        built_q[idx] <= 1'b0;
      end
      if (adv_valid) acc_q[idx] <= acc_nx;
      if (cst_wr) built_q[idx] <= 1'b1;
      if (alloc_valid) begin
        valid_q[idx] <= 1'b1;
        built_q[idx] <= 1'b0;
        tag_q[idx]   <= tag;
        acc_q[idx]   <= ACC_INIT;
        nl_q[idx]    <= cat_nl;
        sptr_q[idx]  <= cat_sptr;
        build_q      <= idx;
      end
    end
  end

endmodule
