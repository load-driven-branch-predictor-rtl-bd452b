// tb_ldbp_lor: self-checking test of the Load Outcome Registers.
//
// Chains of one to five loads with random positive and negative strides are
// allocated, advanced (branch retirements), freed and cleared at random while
// trigger-load completions arrive for addresses on, next to and outside each
// register's window.  A reference model kept here computes, with plain
// integer arithmetic, which registers must write their LOT entry and at
// which slot (lot_pos + (addr - ldstart)/delta modulo 64 when the address is
// one of the 64 window addresses), the released slot on an advance, the free
// count, allocation order and the next trigger address ldstart + 16*delta.
module tb_ldbp_lor;
  import ldbp_pkg::*;

  localparam int E = LOR_ENTRIES;
  localparam int D = OQ_DEPTH;

  logic clk = 1'b0, rst_n;
  logic alloc_valid, dealloc_valid, clr_all, adv_valid, cmp_valid;
  btt_idx_t alloc_owner, dealloc_owner, adv_owner;
  nl_t alloc_nl;
  sp_idx_t [MAX_LOADS-1:0] alloc_sptr;
  xword_t  [MAX_LOADS-1:0] alloc_lastaddr;
  delta_t  [MAX_LOADS-1:0] alloc_delta;
  logic [$clog2(E+1)-1:0] free_cnt;
  xword_t cmp_addr;
  logic    [E-1:0] lot_we, lot_rel, lot_clr, e_valid;
  oq_idx_t [E-1:0] lot_wslot, lot_rel_slot, e_lot_pos;
  btt_idx_t [E-1:0] e_owner;
  slot_t   [E-1:0] e_slot;
  sp_idx_t [E-1:0] e_sptr;
  xword_t  [E-1:0] tl_addr;

  ldbp_lor dut (.*);

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

  logic   m_v [E];
  int     m_own [E], m_slot [E], m_pos [E];
  longint m_start [E], m_delta [E];
  logic   owned [8];
  int n_we = 0, n_miss = 0;

  initial begin
    rst_n = 1'b0; alloc_valid = 0; dealloc_valid = 0; clr_all = 0; adv_valid = 0; cmp_valid = 0;
    alloc_owner = 0; dealloc_owner = 0; adv_owner = 0; alloc_nl = 0; alloc_sptr = '0;
    alloc_lastaddr = '0; alloc_delta = '0; cmp_addr = 0;
    for (int e = 0; e < E; e++) m_v[e] = 0;
    for (int o = 0; o < 8; o++) owned[o] = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40000; t++) begin
      int op, nfree, o, k;
      logic exp_we [E];
      int exp_slot [E];
      op = $urandom_range(0, 19);
      alloc_valid = 0; dealloc_valid = 0; adv_valid = 0; clr_all = 0;
      nfree = 0;
      for (int e = 0; e < E; e++) if (!m_v[e]) nfree++;
      o = $urandom_range(0, 7);
      if (op < 2 && !owned[o]) begin
        int n;
        n = $urandom_range(1, MAX_LOADS);
        if (n <= nfree) begin
          alloc_valid = 1; alloc_owner = btt_idx_t'(o); alloc_nl = nl_t'(n);
          for (int j = 0; j < MAX_LOADS; j++) begin
            int dl;
            alloc_sptr[j] = sp_idx_t'($urandom_range(0, 47));
            alloc_lastaddr[j] = {$urandom, $urandom} & 64'h0000_ffff_ffff_fff8;
            dl = 8 * $urandom_range(1, 40);
            if ($urandom_range(0, 2) == 0) dl = -dl;
            if ($urandom_range(0, 9) == 0) dl = dl / 8 * 3;
            alloc_delta[j] = delta_t'(dl);
          end
        end
      end else if (op < 3) begin
        dealloc_valid = 1; dealloc_owner = btt_idx_t'(o);
      end else if (op < 12) begin
        adv_valid = 1; adv_owner = btt_idx_t'(o);
      end
      clr_all = ($urandom_range(0, 1999) == 0);
      // completion address: near a random valid register's window
      cmp_valid = ($urandom_range(0, 1) == 0);
      cmp_addr = {$urandom, $urandom};
      begin
        int e;
        e = $urandom_range(0, E - 1);
        if (m_v[e]) cmp_addr = xword_t'(m_start[e] + m_delta[e] * $urandom_range(0, 70) - m_delta[e] * 3
                                        + (($urandom_range(0, 5) == 0) ? 1 : 0));
      end
      #1;
      nfree = 0;
      for (int e = 0; e < E; e++) if (!m_v[e]) nfree++;
      check(int'(free_cnt) == nfree, "free count");
      for (int e = 0; e < E; e++) begin
        longint diff, q;
        exp_we[e] = 0; exp_slot[e] = 0;
        if (m_v[e] && cmp_valid) begin
          diff = longint'(cmp_addr) - m_start[e];
          if (diff % m_delta[e] == 0) begin
            q = diff / m_delta[e];
            if (q >= 0 && q < D) begin exp_we[e] = 1; exp_slot[e] = (m_pos[e] + int'(q)) % D; end
          end
        end
        check(lot_we[e] == exp_we[e], $sformatf("t=%0d entry %0d write %0b exp %0b", t, e, lot_we[e], exp_we[e]));
        if (exp_we[e]) begin
          check(int'(lot_wslot[e]) == exp_slot[e], $sformatf("entry %0d slot %0d exp %0d", e, lot_wslot[e], exp_slot[e]));
          n_we++;
        end else if (m_v[e] && cmp_valid) n_miss++;
        check(lot_rel[e] == (adv_valid && m_v[e] && m_own[e] == int'(adv_owner)), "release");
        if (m_v[e]) begin
          check(e_valid[e] && int'(e_owner[e]) == m_own[e] && int'(e_slot[e]) == m_slot[e] &&
                int'(e_lot_pos[e]) == m_pos[e], "register state");
          check(tl_addr[e] == xword_t'(m_start[e] + 16 * m_delta[e]), "trigger address");
          if (lot_rel[e]) check(int'(lot_rel_slot[e]) == m_pos[e], "released slot");
        end else check(!e_valid[e], "free register invalid");
      end
      @(posedge clk);
      for (int e = 0; e < E; e++)
        if (m_v[e] && adv_valid && m_own[e] == int'(adv_owner)) begin
          m_start[e] += m_delta[e];
          m_pos[e] = (m_pos[e] + 1) % D;
        end
      if (dealloc_valid) begin
        for (int e = 0; e < E; e++) if (m_v[e] && m_own[e] == int'(dealloc_owner)) m_v[e] = 0;
        owned[dealloc_owner] = 0;
      end
      if (alloc_valid) begin
        k = 0;
        for (int e = 0; e < E; e++)
          if (!m_v[e] && k < int'(alloc_nl)) begin
            m_v[e] = 1; m_own[e] = int'(alloc_owner); m_slot[e] = k; m_pos[e] = 0;
            m_start[e] = longint'(alloc_lastaddr[k]) + longint'(alloc_delta[k]);
            m_delta[e] = longint'(alloc_delta[k]);
            k++;
          end
        owned[alloc_owner] = 1;
      end
      if (clr_all) begin
        for (int e = 0; e < E; e++) m_v[e] = 0;
        for (int j = 0; j < 8; j++) owned[j] = 0;
      end
      @(negedge clk);
    end
    check(n_we > 2000 && n_miss > 2000, $sformatf("coverage writes=%0d non-matching=%0d", n_we, n_miss));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
