// ldbp_fsm: snippet FSM with its ALU ("ALU/FSM" of the LDBP fetch block).
//
// Computes the outcome of one future instance of a tracked branch.  At start
// it captures the snippet and the trigger-load data of that instance (one
// word per load of the chain), then executes one operation per cycle, keeping
// each result in a small scratch array that later operations refer to, and
// finally evaluates the branch condition on the two operand references:
//     cycle 0           : start (capture)
//     cycles 1..nops    : one ALU operation each
//     cycle nops+1      : compare; done pulses with the outcome
// so a chain with five operations takes six cycles after start, as in the
// paper's example.  kill abandons the job (its queue slot was released or
// the chain was flushed) without writing an outcome.
//
// Interface: start/start_bot/start_slot/snip/ld_vals are sampled when start is
// high and the FSM is idle (busy low).  done, done_bot, done_slot, done_taken
// are valid for one cycle.  cur_bot/cur_slot identify the running job.
//
// Paper: one ALU operation per cycle, FSM fed by the CST and the LOT, result
// written to the BOT outcome queue.  Own choices: the operation set and the
// operand references (ldbp_pkg), the separate compare cycle.
//
// Lint lists the spare bits of each operation and of the stored snippet as
// unused; they are reserved bits of the snippet format.
module ldbp_fsm
  import ldbp_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  btt_idx_t               start_bot,
  input  oq_idx_t                start_slot,
  input  snippet_t               snip,
  input  xword_t [MAX_LOADS-1:0] ld_vals,
  input  logic                   kill,
  output logic                   busy,
  output btt_idx_t               cur_bot,
  output oq_idx_t                cur_slot,
  output logic                   done,
  output btt_idx_t               done_bot,
  output oq_idx_t                done_slot,
  output logic                   done_taken
);

  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_CMP} state_e;

  state_e                  state_q;
  snippet_t                snip_q;
  xword_t [MAX_LOADS-1:0]  ld_q;
  xword_t [CST_OPS-1:0]    res_q;
  logic [3:0]              pc_q;     // next operation
  btt_idx_t                bot_q;
  oq_idx_t                 slot_q;
  xword_t                  va, vb, ra, rb, alu_out;
  uop_t                    cur;

  function automatic xword_t ref_val(input opref_t r, input logic [15:0] imm,
                                     input xword_t [MAX_LOADS-1:0] lds,
                                     input xword_t [CST_OPS-1:0] res);
    unique case (r.kind)
      REF_ZERO: return '0;
      REF_LOAD: return (int'(r.idx) < MAX_LOADS) ? lds[r.idx] : '0;
      REF_OP:   return res[r.idx];
      REF_IMM:  return {{(XLEN-16){imm[15]}}, imm};
      default:  return '0;
    endcase
  endfunction

  always_comb begin
    cur     = snip_q.ops[pc_q[2:0]];
    va      = ref_val(cur.a, cur.imm, ld_q, res_q);
    vb      = ref_val(cur.b, cur.imm, ld_q, res_q);
    alu_out = alu(cur.op, va, vb);
    ra      = ref_val(snip_q.res_a, 16'h0, ld_q, res_q);
    rb      = ref_val(snip_q.res_b, 16'h0, ld_q, res_q);
  end

  assign busy       = (state_q != S_IDLE);
  assign cur_bot    = bot_q;
  assign cur_slot   = slot_q;
  assign done_bot   = bot_q;
  assign done_slot  = slot_q;
  assign done_taken = br_eval(snip_q.cond, ra, rb);
  assign done       = (state_q == S_CMP) && !kill;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      snip_q  <= '0;
      ld_q    <= '0;
      res_q   <= '0;
      pc_q    <= '0;
      bot_q   <= '0;
      slot_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:
          if (start) begin
            snip_q  <= snip;
            ld_q    <= ld_vals;
            bot_q   <= start_bot;
            slot_q  <= start_slot;
            pc_q    <= '0;
            state_q <= (snip.nops == '0) ? S_CMP : S_EXEC;
          end
        S_EXEC: begin
          res_q[pc_q[2:0]] <= alu_out;
          pc_q             <= pc_q + 1'b1;
          if (pc_q + 1'b1 == snip_q.nops) state_q <= S_CMP;
          if (kill) state_q <= S_IDLE;
        end
        S_CMP:   state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
