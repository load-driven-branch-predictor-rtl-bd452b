// tb_ldbp_btt: self-checking test of the Branch Trigger Table and its
// retirement-side decisions.
//
// Random conditional branches from twelve PCs (several sharing an entry)
// retire with random RTT source entries drawn from a few load lists, random
// default-predictor confidence and correctness, random PLQ answers, free LOR
// count and trigger-queue space.  The testbench plays the code snippet
// builder (active from csb_enable until csb_disable, snippet ready at random)
// and keeps its own table (valid, tag, load list, 3-bit accuracy starting at
// 4, installed bit).  Every cycle it predicts which of allocate / flush /
// advance / snippet install / trigger push must happen, with which index,
// tag and load list, and compares.  Low-power gating and clr_all are
// exercised too; the wake output must flag candidate branches.
module tb_ldbp_btt;
  import ldbp_pkg::*;

  localparam int E = BTT_ENTRIES;

  logic clk = 1'b0, rst_n;
  logic gate, clr_all, csb_active, csb_snip_ok, csb_enable, csb_disable;
  retire_t ret;
  rtt_entry_t rtt_a, rtt_b;
  sp_idx_t [MAX_LOADS-1:0] plq_q_idx, alloc_sptr, flush_sptr;
  logic [MAX_LOADS-1:0] plq_ok, alloc_mask, flush_mask;
  snippet_t csb_snip, cst_snip;
  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free;
  logic [3:0] tq_space;
  logic alloc_valid, flush_valid, adv_valid, cst_wr, trig_push, wake;
  btt_idx_t alloc_idx, flush_idx, adv_idx;
  logic [11:0] alloc_tag;
  nl_t alloc_nl, trig_n;

  ldbp_btt dut (.*);

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

  // reference table
  logic   m_v [E], m_built [E];
  int     m_tag [E], m_acc [E];
  int     m_list [E][$];
  logic   m_act;
  int     m_build;

  rtt_entry_t lists [6];
  xword_t pcs [12];
  int n_alloc = 0, n_flush = 0, n_adv = 0, n_cst = 0, n_push = 0, n_accflush = 0;

  function automatic rtt_entry_t mk_list(input int n, input int base);
    rtt_entry_t e;
    e = '0;
    e.nops = NOPS_W'(n > 2 ? 1 : 0);
    e.nloads = nl_t'(n);
    for (int k = 0; k < n; k++) e.sptr[k] = sp_idx_t'(base + k);
    return e;
  endfunction

  initial begin
    rst_n = 1'b0; gate = 0; clr_all = 0; csb_active = 0; csb_snip_ok = 0; ret = '0;
    rtt_a = RTT_EMPTY; rtt_b = RTT_EMPTY; plq_ok = '0; csb_snip = '0; lor_free = 16; tq_space = 8;
    for (int i = 0; i < E; i++) begin m_v[i] = 0; m_built[i] = 0; m_acc[i] = 0; m_tag[i] = 0; end
    m_act = 0; m_build = 0;
    lists[0] = RTT_EMPTY; lists[1] = mk_list(1, 3); lists[2] = mk_list(2, 10);
    lists[3] = mk_list(3, 20); lists[4] = mk_list(1, 7); lists[5] = RTT_INVALID;
    for (int p = 0; p < 12; p++) pcs[p] = 64'h1000 + 64'(p * 2) + ((p >= 8) ? 64'h20000 : 64'h0);
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40000; t++) begin
      int idx, tag, ia, ib, nl;
      int cat [$];
      logic is_br, hit, chain_ok, same, plq_all, keep, e_alloc, e_flush, e_adv, e_cst, e_push, e_wake;
      int acc_nx;
      logic lok, iok;
      ret = '0;
      ret.valid = ($urandom_range(0, 5) != 0);
      ret.kind  = ($urandom_range(0, 4) != 0) ? RK_BRANCH : RK_ALU;
      ret.pc    = pcs[$urandom_range(0, 11)];
      ret.br_taken  = 1'($urandom_range(0, 1));
      ret.imli_conf = ($urandom_range(0, 3) == 0);
      ret.imli_pred = ($urandom_range(0, 1) == 0) ? ret.br_taken : !ret.br_taken;
      ret.ldbp_used = 1'($urandom_range(0, 1));
      ret.ldbp_pred = ($urandom_range(0, 2) != 0) ? ret.br_taken : !ret.br_taken;
      if (ret.pc == pcs[0]) begin   // LDBP always wrong where the default predictor is right
        ret.ldbp_used = 1; ret.ldbp_pred = !ret.br_taken; ret.imli_pred = ret.br_taken;
      end
      ia = $urandom_range(0, 5); ib = $urandom_range(0, 5);
      if ($urandom_range(0, 3) != 0) begin ia = 1 + (ret.pc[3:1] % 4); ib = 0; end  // mostly a stable chain per PC
      rtt_a = lists[ia]; rtt_b = lists[ib];
      plq_ok = ($urandom_range(0, 19) == 0) ? 5'($urandom) : '1;
      lor_free = 5'($urandom_range(0, 16));
      tq_space = 4'($urandom_range(0, 8));
      csb_active = m_act;
      csb_snip_ok = m_act && ($urandom_range(0, 1) == 0);
      csb_snip = '0; csb_snip.nops = 4'($urandom_range(0, 8));
      gate = ($urandom_range(0, 49) == 0);
      clr_all = ($urandom_range(0, 999) == 0);
      // reference decision
      idx = int'((ret.pc >> 1) % E);
      tag = int'(ret.pc[4 +: 12]);
      is_br = ret.valid && ret.kind == RK_BRANCH;
      hit = m_v[idx] && m_tag[idx] == tag;
      chain_ok = rtt_a.nops != NOPS_W'(NOPS_SAT) && rtt_b.nops != NOPS_W'(NOPS_SAT);
      cat = {};
      for (int k = 0; k < int'(rtt_a.nloads); k++) cat.push_back(int'(rtt_a.sptr[k]));
      for (int k = 0; k < int'(rtt_b.nloads); k++) cat.push_back(int'(rtt_b.sptr[k]));
      nl = cat.size();
      chain_ok = chain_ok && nl >= 1 && nl <= MAX_LOADS;
      same = chain_ok && (cat == m_list[idx]);
      plq_all = 1;
      for (int k = 0; k < m_list[idx].size(); k++) if (!plq_ok[k]) plq_all = 0;
      lok = ret.ldbp_pred == ret.br_taken; iok = ret.imli_pred == ret.br_taken;
      acc_nx = m_acc[idx];
      if (ret.ldbp_used && lok && !iok && acc_nx < 7) acc_nx++;
      if (ret.ldbp_used && !lok && iok && acc_nx > 0) acc_nx--;
      keep = same && plq_all && acc_nx != 0;
      e_alloc = 0; e_flush = 0; e_adv = 0; e_cst = 0; e_push = 0;
      e_wake = is_br && !ret.imli_conf && chain_ok;
      if (is_br && !gate && !clr_all) begin
        if (hit) begin
          if (!keep) e_flush = 1;
          else begin
            e_adv = 1;
            e_cst = !m_built[idx] && m_act && m_build == idx && csb_snip_ok;
            e_push = int'(tq_space) >= m_list[idx].size();
          end
        end else if (!ret.imli_conf && chain_ok) begin
          if (m_v[idx]) e_flush = 1;
          else if (!m_act && int'(lor_free) >= nl) e_alloc = 1;
        end
      end
      #1;
      check(alloc_valid == e_alloc && flush_valid == e_flush && adv_valid == e_adv &&
            cst_wr == e_cst && trig_push == e_push && wake == e_wake,
            $sformatf("t=%0d pc %h: alloc %0b/%0b flush %0b/%0b adv %0b/%0b cst %0b/%0b push %0b/%0b wake %0b/%0b",
                      t, ret.pc, alloc_valid, e_alloc, flush_valid, e_flush, adv_valid, e_adv,
                      cst_wr, e_cst, trig_push, e_push, wake, e_wake));
      if (e_alloc) begin
        logic lst_ok;
        lst_ok = (int'(alloc_nl) == nl);
        for (int k = 0; k < nl; k++) if (int'(alloc_sptr[k]) != cat[k] || !alloc_mask[k]) lst_ok = 0;
        check(int'(alloc_idx) == idx && int'(alloc_tag) == tag && lst_ok && csb_enable, "allocation contents");
      end
      if (e_flush) begin
        logic fl_ok;
        fl_ok = int'(flush_idx) == idx;
        for (int k = 0; k < m_list[idx].size(); k++) if (int'(flush_sptr[k]) != m_list[idx][k] || !flush_mask[k]) fl_ok = 0;
        check(fl_ok, "flush contents");
      end
      if (e_adv) check(int'(adv_idx) == idx && int'(trig_n) == m_list[idx].size(), "advance index and trigger count");
      if (e_cst) check(cst_snip.nops == csb_snip.nops && int'(cst_snip.nloads) == m_list[idx].size(), "installed snippet");
      if (e_alloc) n_alloc++;
      if (e_flush) n_flush++;
      if (e_flush && hit && same && plq_all) n_accflush++;
      if (e_adv) n_adv++;
      if (e_cst) n_cst++;
      if (e_push) n_push++;
      @(posedge clk);
      // reference update (the testbench's CSB follows the enable/disable outputs)
      if (clr_all) begin
        for (int i = 0; i < E; i++) begin m_v[i] = 0; m_built[i] = 0; end
      end else begin
        if (csb_disable) m_act = 0;
        if (csb_enable) m_act = 1;
        if (e_flush) begin m_v[idx] = 0; m_built[idx] = 0; end
        if (e_adv) m_acc[idx] = acc_nx;
        if (e_cst) m_built[idx] = 1;
        if (e_alloc) begin
          m_v[idx] = 1; m_built[idx] = 0; m_tag[idx] = tag; m_acc[idx] = 4; m_list[idx] = cat; m_build = idx;
        end
      end
      if ($urandom_range(0, 199) == 0) m_act = 0;   // builder gives up on its own
      @(negedge clk);
    end
    $display("alloc=%0d flush=%0d (accuracy %0d) adv=%0d cst=%0d push=%0d", n_alloc, n_flush, n_accflush, n_adv, n_cst, n_push);
    check(n_alloc > 50 && n_flush > 50 && n_accflush > 0 && n_adv > 200 && n_cst > 20 && n_push > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
