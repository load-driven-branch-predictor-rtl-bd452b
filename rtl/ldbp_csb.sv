// ldbp_csb: Code Snippet Builder (CSB) of the LDBP retirement block.
//
// While enabled for a newly allocated chain, the CSB records for every logical
// register the list of simple ALU operations (up to SRC_OPS) that produced the
// register's value, with operands that refer to loads of the chain, to earlier
// operations of the list, to x0 or to an immediate:
//   * predictable load -> empty list, result = load slot 0
//   * ALU op           -> list(src1) ++ list(src2) ++ [op]; the copied src2
//                         references are renumbered (op indices by the length
//                         of list(src1), load slots by the RTT load count of
//                         src1, the same order the RTT uses for its pointers)
//   * anything else    -> invalid
// For a retiring branch the lists of its two sources are merged the same way
// into a snippet (snip) for the Code Snippet Table: up to CST_OPS operations,
// the two operand references and the compare condition.
//
// Interface and timing: enable clears every entry at the clock edge and starts
// recording from the next retired instruction; disable stops it.  snip and
// snip_ok are combinational for the instruction on ret.  One retired
// instruction per cycle.
//
// Paper: one entry per logical register, 32 entries of four operations, built
// only after a BTT allocation and disabled once copied to the CST.  Own
// choices: the 32-bit operation format and operand references (ldbp_pkg).
//
// Lint lists the PC, load address and predictor bits of ret as unused: the
// builder needs only the register, operation and immediate fields.
module ldbp_csb
  import ldbp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     enable,
  input  logic     disable_i,
  input  retire_t  ret,
  input  logic     ld_predictable,
  input  nl_t      nl_a,          // RTT load count of ret.src1
  output logic     active,
  output snippet_t snip,
  output logic     snip_ok
);

  csb_entry_t tab_q [NREGS];
  logic       act_q;
  csb_entry_t ea, eb, wr_e;
  logic       wr_en;
  int unsigned na, nb;

  function automatic opref_t shift_ref(input opref_t r, input int unsigned opoff, input int unsigned ldoff);
    opref_t o = r;
    if (r.kind == REF_OP)   o.idx = 3'(int'(r.idx) + opoff);
    if (r.kind == REF_LOAD) o.idx = 3'(int'(r.idx) + ldoff);
    return o;
  endfunction

  function automatic csb_entry_t zero_entry();
    csb_entry_t e = '0;
    e.valid    = 1'b1;
    e.res.kind = REF_ZERO;
    return e;
  endfunction

  assign active = act_q;

  always_comb begin
    ea = (ret.src1 == '0) ? zero_entry() : tab_q[ret.src1];
    eb = (ret.src2 == '0) ? zero_entry() : tab_q[ret.src2];
    if (ret.kind == RK_ALU && ret.use_imm) begin
      eb = zero_entry();
      eb.res.kind = REF_IMM;
    end
    na = int'(ea.nops);
    nb = int'(eb.nops);

    // register update
    wr_en = act_q && ret.valid && (ret.dst != '0) &&
            (ret.kind == RK_LOAD || ret.kind == RK_ALU || ret.kind == RK_COMPLEX);
    wr_e = '0;
    unique case (ret.kind)
      RK_LOAD: begin
        wr_e.valid    = ld_predictable;
        wr_e.res.kind = REF_LOAD;
      end
      RK_ALU: begin
        wr_e.valid = ea.valid && eb.valid && (na + nb + 1 <= SRC_OPS);
        wr_e.nops  = 3'(na + nb + 1);
        for (int j = 0; j < SRC_OPS; j++) begin
          if (j < na) begin
            wr_e.ops[j] = ea.ops[j];
          end else if (j < na + nb) begin
            wr_e.ops[j]   = eb.ops[j - na];
            wr_e.ops[j].a = shift_ref(eb.ops[j - na].a, na, int'(nl_a));
            wr_e.ops[j].b = shift_ref(eb.ops[j - na].b, na, int'(nl_a));
          end else if (j == na + nb) begin
            wr_e.ops[j].op  = ret.alu_op;
            wr_e.ops[j].a   = ea.res;
            wr_e.ops[j].b   = shift_ref(eb.res, na, int'(nl_a));
            wr_e.ops[j].imm = ret.imm;
          end
        end
        wr_e.res.kind = REF_OP;
        wr_e.res.idx  = 3'(na + nb);
      end
      default: wr_e.valid = 1'b0;
    endcase

    // snippet for a retiring branch
    snip        = '0;
    snip.nops   = 4'(na + nb);
    snip.cond   = ret.cond;
    snip.res_a  = ea.res;
    snip.res_b  = shift_ref(eb.res, na, int'(nl_a));
    for (int j = 0; j < CST_OPS; j++) begin
      if (j < na && j < SRC_OPS) begin
        snip.ops[j] = ea.ops[j];
      end else if (j >= na && j < na + nb && (j - na) < SRC_OPS) begin
        snip.ops[j]   = eb.ops[j - na];
        snip.ops[j].a = shift_ref(eb.ops[j - na].a, na, int'(nl_a));
        snip.ops[j].b = shift_ref(eb.ops[j - na].b, na, int'(nl_a));
      end
    end
    snip_ok = act_q && ea.valid && eb.valid && (na + nb <= CST_OPS);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_q <= 1'b0;
      for (int r = 0; r < NREGS; r++) tab_q[r] <= '0;
    end else if (enable) begin
      act_q <= 1'b1;
      for (int r = 0; r < NREGS; r++) tab_q[r].valid <= 1'b0;
    end else begin
      if (disable_i) act_q <= 1'b0;
      if (wr_en) tab_q[ret.dst] <= wr_e;
    end
  end

endmodule
