// ldbp_rtt: Rename Tracking Table (RTT) of the LDBP retirement block.
//
// One entry per logical register records how the register's current value was
// produced: the number of simple ALU operations since the loads (rtt.nops)
// and the list of Stride Predictor entries of those loads (rtt.strideptr).
//   * load:     predictable -> nops = 0, list = [its SP entry]; else invalid
//   * ALU op:   nops = nops(src1) + nops(src2) + 1, lists concatenated
//               (Eq. 1 of the paper); invalid when nops > SRC_OPS or the list
//               is longer than MAX_LOADS
//   * other register write (complex op): invalid
// "Invalid" is the saturated nops value.  x0 always reads as an empty, valid
// entry, and an ALU op with an immediate has an empty second source.
//
// Interface and timing: rd_a/rd_b show the entries of ret.src1/ret.src2 in the
// same cycle (the branch check in the BTT uses them); the destination is
// written at the clock edge.  One retired instruction per cycle.
//
// Paper: fields, Eq. 1, invalidation rules, 32 entries, 3-bit counter, five
// loads.  Own choices: the per-source limit of SRC_OPS (the CSB depth) as the
// operation threshold, immediates counted as empty sources, x0 handling.
//
// Lint lists most bits of ret as unused: the RTT needs only the kind and
// register fields of the shared retire record.
module ldbp_rtt
  import ldbp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  retire_t    ret,
  input  logic       ld_predictable,
  input  sp_idx_t    ld_idx,
  output rtt_entry_t rd_a,
  output rtt_entry_t rd_b
);

  rtt_entry_t tab_q [NREGS];
  rtt_entry_t wr_e;
  logic       wr_en;
  logic       cat_ok;
  nl_t        cat_nl;
  sp_idx_t [MAX_LOADS-1:0] cat_sptr;
  int unsigned nops_sum;

  always_comb begin
    rd_a = (ret.src1 == '0) ? RTT_EMPTY : tab_q[ret.src1];
    rd_b = (ret.src2 == '0 || (ret.kind == RK_ALU && ret.use_imm)) ? RTT_EMPTY : tab_q[ret.src2];
    rtt_concat(rd_a, rd_b, cat_ok, cat_nl, cat_sptr);
    nops_sum = int'(rd_a.nops) + int'(rd_b.nops) + 1;
    wr_en = ret.valid && (ret.dst != '0) &&
            (ret.kind == RK_LOAD || ret.kind == RK_ALU || ret.kind == RK_COMPLEX);
    wr_e  = RTT_INVALID;
    unique case (ret.kind)
      RK_LOAD:
        if (ld_predictable) begin
          wr_e         = RTT_EMPTY;
          wr_e.nloads  = nl_t'(1);
          wr_e.sptr[0] = ld_idx;
        end
      RK_ALU:
        if (cat_ok && nops_sum <= SRC_OPS) begin
          wr_e.nops   = NOPS_W'(nops_sum);
          wr_e.nloads = cat_nl;
          wr_e.sptr   = cat_sptr;
        end
      default: wr_e = RTT_INVALID;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) tab_q[r] <= RTT_INVALID;
    end else if (wr_en) begin
      tab_q[ret.dst] <= wr_e;
    end
  end

endmodule
