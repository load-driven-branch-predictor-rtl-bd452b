// tb_ldbp_rtt: self-checking test of the Rename Tracking Table.
//
// A random stream of loads (predictable or not), simple ALU operations with
// register or immediate operands, complex operations and branches over eight
// registers retires one per cycle.  A reference model kept here tracks, per
// register, the operation count and the list of stride-pointer entries
// (valid / invalid), following nops = nops1 + nops2 + 1 and list
// concatenation with the limits of four operations per source and five
// loads.  Every cycle the two source read ports are compared with it.
module tb_ldbp_rtt;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  retire_t ret;
  logic ld_predictable;
  sp_idx_t ld_idx;
  rtt_entry_t rd_a, rd_b;

  ldbp_rtt dut (.*);

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

  // reference: ok, nops, list
  logic m_ok [NREGS];
  int   m_nops [NREGS];
  int   m_list [NREGS][$];

  function automatic logic same(input rtt_entry_t e, input int r);
    if (r == 0) return e.nops == 0 && e.nloads == 0;
    if (!m_ok[r]) return e.nops == NOPS_W'(NOPS_SAT);
    if (int'(e.nops) != m_nops[r] || int'(e.nloads) != m_list[r].size()) return 0;
    for (int k = 0; k < m_list[r].size(); k++)
      if (int'(e.sptr[k]) != m_list[r][k]) return 0;
    return 1;
  endfunction

  int n_long = 0;

  initial begin
    rst_n = 1'b0; ret = '0; ld_predictable = 0; ld_idx = 0;
    for (int r = 0; r < NREGS; r++) begin m_ok[r] = 0; m_nops[r] = 0; m_list[r] = {}; end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30000; t++) begin
      int k, d, s1, s2;
      logic ok;
      int nops;
      int lst[$];
      k = $urandom_range(0, 9);
      ret = '0;
      ret.valid = ($urandom_range(0, 7) != 0);
      d  = $urandom_range(0, 7);
      s1 = $urandom_range(0, 7);
      s2 = $urandom_range(0, 7);
      ret.dst = reg_t'(d); ret.src1 = reg_t'(s1); ret.src2 = reg_t'(s2);
      ret.use_imm = ($urandom_range(0, 2) == 0);
      ret.kind = (k < 3) ? RK_LOAD : (k < 7) ? RK_ALU : (k < 8) ? RK_COMPLEX : (k < 9) ? RK_BRANCH : RK_NONE;
      ld_predictable = ($urandom_range(0, 4) != 0);
      ld_idx = sp_idx_t'($urandom_range(0, SP_ENTRIES - 1));
      #1;
      check(same(rd_a, s1), $sformatf("t=%0d rd_a for x%0d: %p model ok=%0b nops=%0d list=%p", t, s1, rd_a, m_ok[s1], m_nops[s1], m_list[s1]));
      if (!(ret.kind == RK_ALU && ret.use_imm)) check(same(rd_b, s2), $sformatf("t=%0d rd_b for x%0d", t, s2));
      else check(rd_b.nops == 0 && rd_b.nloads == 0, "immediate source is empty");
      // reference update
      ok = 0; nops = 0; lst = {};
      case (ret.kind)
        RK_LOAD: begin ok = ld_predictable; lst.push_back(int'(ld_idx)); end
        RK_ALU: begin
          logic ok1, ok2;
          int n1, n2;
          int l1[$], l2[$];
          l1.delete(); l2.delete();
          ok1 = (s1 == 0) || m_ok[s1]; n1 = (s1 == 0) ? 0 : m_nops[s1];
          if (s1 != 0) l1 = m_list[s1];
          if (ret.use_imm || s2 == 0) begin ok2 = 1; n2 = 0; end
          else begin ok2 = m_ok[s2]; n2 = m_nops[s2]; l2 = m_list[s2]; end
          nops = n1 + n2 + 1;
          lst = {l1, l2};
          ok = ok1 && ok2 && nops <= SRC_OPS && lst.size() <= MAX_LOADS;
          if (ok && lst.size() > 2) n_long++;
        end
        default: ok = 0;
      endcase
      @(posedge clk);
      if (ret.valid && d != 0 && ret.kind inside {RK_LOAD, RK_ALU, RK_COMPLEX}) begin
        m_ok[d] = ok; m_nops[d] = ok ? nops : 0;
        if (ok) m_list[d] = lst; else m_list[d].delete();
      end
      @(negedge clk);
    end
    check(n_long > 20, $sformatf("chains with more than two loads built: %0d", n_long));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
