// tb_ldbp_plq: self-checking test of the Pending Load Queue.
//
// Random retiring tracked loads (with and without a delta change), chain
// allocations of up to five stride pointers, chain flushes and global clears
// are applied over a small set of stride-pointer values, so the 48 entries
// never overflow.  A reference set of (pointer, tracking bit) pairs predicts
// the query result: a pointer is OK only if present and still tracked.
module tb_ldbp_plq;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic ld_valid, ld_changed, clr_all;
  sp_idx_t ld_idx;
  logic    [MAX_LOADS-1:0] alloc_valid, clr_valid, q_ok;
  sp_idx_t [MAX_LOADS-1:0] alloc_idx, clr_idx, q_idx;

  ldbp_plq dut (.*);

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

  // reference: present / tracked per pointer value
  logic m_in [SP_ENTRIES];
  logic m_tr [SP_ENTRIES];
  int n_ok = 0, n_cut = 0;

  initial begin
    rst_n = 1'b0; ld_valid = 0; ld_changed = 0; clr_all = 0; ld_idx = 0;
    alloc_valid = '0; clr_valid = '0; alloc_idx = '0; clr_idx = '0; q_idx = '0;
    for (int i = 0; i < SP_ENTRIES; i++) begin m_in[i] = 0; m_tr[i] = 0; end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30000; t++) begin
      int op;
      op = $urandom_range(0, 9);
      ld_valid = 0; alloc_valid = '0; clr_valid = '0; clr_all = 0;
      ld_idx = sp_idx_t'($urandom_range(0, 19));
      ld_changed = ($urandom_range(0, 3) == 0);
      if (op < 4) ld_valid = 1;
      else if (op < 6) begin
        int n;
        n = $urandom_range(1, MAX_LOADS);
        for (int k = 0; k < n; k++) begin
          alloc_valid[k] = 1;
          alloc_idx[k] = sp_idx_t'($urandom_range(0, 19));
        end
      end else if (op < 7) begin
        for (int k = 0; k < MAX_LOADS; k++) begin
          clr_valid[k] = ($urandom_range(0, 1) == 0);
          clr_idx[k] = sp_idx_t'($urandom_range(0, 19));
        end
      end
      clr_all = ($urandom_range(0, 999) == 0);
      for (int k = 0; k < MAX_LOADS; k++) q_idx[k] = sp_idx_t'($urandom_range(0, 19));
      #1;
      for (int k = 0; k < MAX_LOADS; k++) begin
        check(q_ok[k] == (m_in[q_idx[k]] && m_tr[q_idx[k]]),
              $sformatf("t=%0d query %0d ok=%0b exp %0b", t, q_idx[k], q_ok[k], m_in[q_idx[k]] && m_tr[q_idx[k]]));
        if (q_ok[k]) n_ok++;
        if (m_in[q_idx[k]] && !m_tr[q_idx[k]]) n_cut++;
      end
      @(posedge clk);
      if (ld_valid) begin
        if (m_in[ld_idx]) begin if (ld_changed) m_tr[ld_idx] = 0; end
        else begin m_in[ld_idx] = 1; m_tr[ld_idx] = !ld_changed; end
      end
      for (int k = 0; k < MAX_LOADS; k++)
        if (alloc_valid[k]) begin m_in[alloc_idx[k]] = 1; m_tr[alloc_idx[k]] = 1; end
      for (int k = 0; k < MAX_LOADS; k++)
        if (clr_valid[k]) m_in[clr_idx[k]] = 0;
      if (clr_all) for (int i = 0; i < SP_ENTRIES; i++) m_in[i] = 0;
      @(negedge clk);
    end
    check(n_ok > 1000 && n_cut > 1000, $sformatf("coverage ok=%0d untracked=%0d", n_ok, n_cut));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
