// tb_ldbp_fsm: self-checking test of the snippet execution FSM.
//
// Builds random backward slices (0..8 operations over up to five load
// values, earlier results, the immediate and zero, then a compare of two
// references), starts the FSM and checks the outcome against a reference
// evaluation written here independently of the RTL ALU.  It also checks the
// latency: a slice of N operations must report done exactly N+1 cycles after
// start (one operation per cycle and one compare cycle, the paper's five
// operations in six cycles), busy in between, and that a kill in the middle
// suppresses done and frees the FSM.
module tb_ldbp_fsm;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic start, kill, busy, done, done_taken;
  btt_idx_t start_bot, cur_bot, done_bot;
  oq_idx_t start_slot, cur_slot, done_slot;
  snippet_t snip;
  xword_t [MAX_LOADS-1:0] ld_vals;

  ldbp_fsm dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic xword_t sx32(input logic [31:0] w);
    return {{32{w[31]}}, w};
  endfunction

  function automatic xword_t ref_alu(input alu_op_e op, input xword_t a, input xword_t b);
    case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_XOR:  return a ^ b;
      OP_SLL:  return a << b[5:0];
      OP_SRL:  return a >> b[5:0];
      OP_SRA:  return $signed(a) >>> b[5:0];
      OP_SLT:  return {63'd0, $signed(a) < $signed(b)};
      OP_SLTU: return {63'd0, a < b};
      OP_ADDW: return sx32(a[31:0] + b[31:0]);
      OP_SUBW: return sx32(a[31:0] - b[31:0]);
      OP_SLLW: return sx32(a[31:0] << b[4:0]);
      OP_SRLW: return sx32(a[31:0] >> b[4:0]);
      OP_SRAW: return sx32($signed(a[31:0]) >>> b[4:0]);
      default: return a;
    endcase
  endfunction

  function automatic logic ref_cmp(input br_cond_e c, input xword_t a, input xword_t b);
    case (c)
      BR_EQ:  return a == b;
      BR_NE:  return a != b;
      BR_LT:  return $signed(a) < $signed(b);
      BR_GE:  return $signed(a) >= $signed(b);
      BR_LTU: return a < b;
      default: return a >= b;
    endcase
  endfunction

  function automatic opref_t rnd_ref(input int nl, input int nres);
    opref_t r;
    int k;
    k = $urandom_range(0, 9);
    if (k < 5 && nl > 0)        begin r.kind = REF_LOAD; r.idx = 3'($urandom_range(0, nl - 1)); end
    else if (k < 8 && nres > 0) begin r.kind = REF_OP;   r.idx = 3'($urandom_range(0, nres - 1)); end
    else if (k == 8)            begin r.kind = REF_IMM;  r.idx = '0; end
    else                        begin r.kind = REF_ZERO; r.idx = '0; end
    return r;
  endfunction

  function automatic xword_t ref_val(input opref_t r, input logic [15:0] imm,
                                     input xword_t ld [MAX_LOADS], input xword_t res [CST_OPS]);
    case (r.kind)
      REF_LOAD: return ld[r.idx];
      REF_OP:   return res[r.idx];
      REF_IMM:  return {{48{imm[15]}}, imm};
      default:  return '0;
    endcase
  endfunction

  int n_kill = 0, n_done = 0;

  initial begin
    rst_n = 1'b0; start = 0; kill = 0; start_bot = 0; start_slot = 0; snip = '0; ld_vals = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      int nops, nl, kill_at, lat;
      xword_t ld [MAX_LOADS];
      xword_t res [CST_OPS];
      logic exp;
      btt_idx_t bot;
      oq_idx_t slot;
      nops = $urandom_range(0, CST_OPS);
      nl   = $urandom_range(1, MAX_LOADS);
      snip = '0;
      snip.nops   = 4'(nops);
      snip.nloads = nl_t'(nl);
      snip.cond   = br_cond_e'($urandom_range(0, 5));
      for (int k = 0; k < MAX_LOADS; k++) begin
        ld[k] = ($urandom_range(0, 1) == 0) ? xword_t'($urandom_range(0, 20)) : {$urandom, $urandom};
        ld_vals[k] = ld[k];
      end
      for (int j = 0; j < CST_OPS; j++) res[j] = '0;
      for (int j = 0; j < nops; j++) begin
        snip.ops[j].op  = alu_op_e'($urandom_range(0, 14));
        snip.ops[j].a   = rnd_ref(nl, j);
        snip.ops[j].b   = rnd_ref(nl, j);
        snip.ops[j].imm = 16'($urandom);
        res[j] = ref_alu(snip.ops[j].op, ref_val(snip.ops[j].a, snip.ops[j].imm, ld, res),
                         ref_val(snip.ops[j].b, snip.ops[j].imm, ld, res));
      end
      snip.res_a = rnd_ref(nl, nops);
      snip.res_b = rnd_ref(nl, nops);
      if (snip.res_a.kind == REF_IMM) snip.res_a.kind = REF_ZERO;
      if (snip.res_b.kind == REF_IMM) snip.res_b.kind = REF_ZERO;
      exp = ref_cmp(snip.cond, ref_val(snip.res_a, 16'h0, ld, res), ref_val(snip.res_b, 16'h0, ld, res));
      bot  = btt_idx_t'($urandom_range(0, 7));
      slot = oq_idx_t'($urandom_range(0, 63));
      kill_at = ($urandom_range(0, 9) == 0 && nops > 0) ? $urandom_range(1, nops) : -1;
      #1;
      check(!busy, "idle before start");
      start = 1; start_bot = bot; start_slot = slot;
      @(negedge clk);
      start = 0; snip = '0; ld_vals = '0;   // the FSM must hold its own copy
      lat = 1;
      while (1) begin
        kill = (lat == kill_at);
        #1;
        if (done || lat > CST_OPS + 3 || (kill_at > 0 && lat > kill_at)) break;
        check(busy && cur_bot == bot && cur_slot == slot, "busy with the started job");
        @(negedge clk);
        kill = 0;
        lat++;
      end
      if (kill_at > 0) begin
        n_kill++;
        check(!done, "no done after kill");
        check(!busy, "free after kill");
      end else begin
        n_done++;
        check(done, "done reached");
        check(lat == nops + 1, $sformatf("latency %0d for %0d operations", lat, nops));
        check(done_taken == exp, $sformatf("outcome %0b exp %0b (nops %0d)", done_taken, exp, nops));
        check(done_bot == bot && done_slot == slot, "done tags");
        @(negedge clk);
      end
      kill = 0;
    end
    check(n_kill > 0 && n_done > 0, "both kill and completion seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
