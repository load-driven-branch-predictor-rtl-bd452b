// tb_ldbp_csb: self-checking test of the Code Snippet Builder.
//
// Each trial enables the builder and retires a random straight-line program
// over registers x1..x6: predictable loads, simple ALU operations with
// register or immediate operands and the odd complex operation, then a
// branch on two registers.  The testbench executes the program itself with
// random load values, tracks per register whether it is still a simple
// function of loads (at most four operations) and the list of load
// instances in the order the rename tracking table would list them.  When
// the branch retires, snip_ok must match that model; if it is set, the
// snippet is interpreted here with the load values placed in that order and
// its outcome and operation count must equal the directly computed ones.
module tb_ldbp_csb;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic enable, disable_i, ld_predictable, active, snip_ok;
  retire_t ret;
  nl_t nl_a;
  snippet_t snip;

  ldbp_csb dut (.*);

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
    repeat (200000) @(posedge clk);
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
      OP_SLT:  return {63'd0, $signed(a) < $signed(b)};
      OP_ADDW: return sx32(a[31:0] + b[31:0]);
      default: return a - b;   // OP_SUB
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

  // snippet interpreter
  function automatic xword_t sval(input opref_t r, input logic [15:0] imm,
                                  input xword_t ld [MAX_LOADS], input xword_t res [CST_OPS]);
    case (r.kind)
      REF_LOAD: return (r.idx < MAX_LOADS) ? ld[r.idx] : '0;
      REF_OP:   return res[r.idx];
      REF_IMM:  return {{48{imm[15]}}, imm};
      default:  return '0;
    endcase
  endfunction

  // program model
  xword_t v [8];                 // architectural value
  logic   ok [8];                // simple function of loads
  int     nops [8];
  xword_t lds [8][$];            // values of the load instances, RTT order

  alu_op_e ops [7] = '{OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_ADDW, OP_SLT};
  int n_ok = 0, n_bad = 0;

  initial begin
    rst_n = 1'b0; enable = 0; disable_i = 0; ld_predictable = 0; ret = '0; nl_a = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 3000; trial++) begin
      int len;
      enable = 1; ret = '0;
      @(negedge clk);
      enable = 0;
      check(active, "active after enable");
      for (int r = 0; r < 8; r++) begin ok[r] = 0; nops[r] = 0; lds[r].delete(); v[r] = {$urandom, $urandom}; end
      ok[0] = 1; v[0] = 0;
      len = $urandom_range(2, 12);
      for (int i = 0; i < len; i++) begin
        int k, d, s1, s2;
        xword_t a, b, lv;
        k = $urandom_range(0, 9);
        d = $urandom_range(1, 6); s1 = $urandom_range(0, 6); s2 = $urandom_range(0, 6);
        ret = '0; ret.valid = 1; ret.dst = reg_t'(d); ret.src1 = reg_t'(s1); ret.src2 = reg_t'(s2);
        ret.imm = 16'($urandom_range(0, 40)) - 16'd8;
        nl_a = nl_t'(lds[s1].size() > 7 ? 7 : lds[s1].size());
        if (k < 4) begin
          ret.kind = RK_LOAD;
          ld_predictable = ($urandom_range(0, 9) != 0);
          lv = ($urandom_range(0, 1) == 0) ? xword_t'($urandom_range(0, 50)) : {$urandom, $urandom};
          v[d] = lv; ok[d] = ld_predictable; nops[d] = 0; lds[d].delete(); lds[d].push_back(lv);
        end else if (k < 9) begin
          int n2;
          logic ok2;
          xword_t l2 [$];
          ret.kind = RK_ALU;
          ret.alu_op = ops[$urandom_range(0, 6)];
          ret.use_imm = ($urandom_range(0, 2) == 0);
          a = v[s1];
          if (ret.use_imm) begin b = {{48{ret.imm[15]}}, ret.imm}; ok2 = 1; n2 = 0; end
          else begin b = v[s2]; ok2 = ok[s2]; n2 = nops[s2]; l2 = lds[s2]; end
          if (ret.use_imm || s2 == 0) l2.delete();
          ok[d]   = ok[s1] && ok2 && (nops[s1] + n2 + 1 <= SRC_OPS);
          nops[d] = nops[s1] + n2 + 1;
          lds[d]  = {lds[s1], l2};
          v[d]    = ref_alu(ret.alu_op, a, b);
        end else begin
          ret.kind = RK_COMPLEX;
          v[d] = {$urandom, $urandom}; ok[d] = 0; lds[d].delete();
        end
        @(negedge clk);
      end
      // the branch
      begin
        int s1, s2;
        logic exp_ok, truth, got;
        xword_t ldv [MAX_LOADS];
        xword_t res [CST_OPS];
        xword_t all [$];
        s1 = $urandom_range(1, 6); s2 = $urandom_range(0, 6);
        ret = '0; ret.valid = 1; ret.kind = RK_BRANCH; ret.src1 = reg_t'(s1); ret.src2 = reg_t'(s2);
        ret.cond = br_cond_e'($urandom_range(0, 5));
        nl_a = nl_t'(lds[s1].size() > 7 ? 7 : lds[s1].size());
        exp_ok = ok[s1] && ok[s2];
        all = {lds[s1], lds[s2]};
        truth = ref_cmp(ret.cond, v[s1], v[s2]);
        #1;
        check(snip_ok == exp_ok, $sformatf("trial %0d snip_ok %0b exp %0b", trial, snip_ok, exp_ok));
        if (exp_ok && all.size() <= MAX_LOADS) begin
          n_ok++;
          for (int k = 0; k < MAX_LOADS; k++) ldv[k] = (k < all.size()) ? all[k] : '0;
          for (int j = 0; j < CST_OPS; j++) res[j] = '0;
          for (int j = 0; j < int'(snip.nops); j++)
            res[j] = ref_alu(snip.ops[j].op, sval(snip.ops[j].a, snip.ops[j].imm, ldv, res),
                             sval(snip.ops[j].b, snip.ops[j].imm, ldv, res));
          got = ref_cmp(snip.cond, sval(snip.res_a, 16'h0, ldv, res), sval(snip.res_b, 16'h0, ldv, res));
          check(got == truth, $sformatf("trial %0d snippet outcome %0b exp %0b", trial, got, truth));
          check(int'(snip.nops) == nops[s1] + nops[s2], "snippet operation count");
        end else n_bad++;
        @(negedge clk);
        ret = '0;
        disable_i = 1;
        @(negedge clk);
        disable_i = 0;
        #1;
        check(!active && !snip_ok, "inactive after disable");
      end
    end
    check(n_ok > 300 && n_bad > 300, $sformatf("coverage ok=%0d invalid=%0d", n_ok, n_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
