// tb_ldbp_bot: self-checking test of the Branch Outcome Table.
//
// Two branches (BOT entries 2 and 5) are allocated and then fetched, retired
// and given precomputed outcomes at random, with pipeline flushes in
// between.  The testbench numbers the dynamic instances of each branch from
// its allocation: retirement has consumed ri of them, fetch has reached fi
// (reset to ri by a flush), and an FSM may deliver the outcome of any
// instance n in [ri, ri+63] at queue slot n mod 64.  A fetch must be
// predicted exactly when the entry is synchronised (a flush since the
// allocation) and active (snippet installed) and instance fi's outcome has
// been delivered; the predicted direction must be that outcome.  Also checks
// the tag compare, the missing hit before the first flush, low-power gating
// and the dispatcher outputs (fetch slot, retire position).
module tb_ldbp_bot;
  import ldbp_pkg::*;

  localparam int E = BTT_ENTRIES;
  localparam int D = OQ_DEPTH;

  logic clk = 1'b0, rst_n;
  logic gate, f_valid, f_hit, f_pred_valid, f_pred_taken, pipe_flush;
  xword_t f_pc;
  logic alloc_valid, dealloc_valid, clr_all, act_valid, ret_adv;
  btt_idx_t alloc_idx, dealloc_idx, act_idx, ret_idx;
  logic [11:0] alloc_tag;
  nl_t alloc_nl;
  sp_idx_t [MAX_LOADS-1:0] alloc_sptr;
  logic [1:0] ow_valid, ow_taken;
  btt_idx_t [1:0] ow_idx;
  oq_idx_t [1:0] ow_slot;
  logic [E-1:0] e_active;
  logic [E-1:0][D-1:0] e_ovalid;
  oq_idx_t [E-1:0] e_pos, e_fslot;
  nl_t [E-1:0] e_nl;
  sp_idx_t [E-1:0][MAX_LOADS-1:0] e_sptr;

  ldbp_bot dut (.*);

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

  xword_t pc [2] = '{64'h2004, 64'h300a};   // entries 2 and 5
  int     fi [2], ri [2];
  logic   outc [2][100000];
  logic   got  [2][100000];
  logic   synced [2], active [2];
  int n_pred = 0, n_nopred = 0;

  function automatic int entry(input int b);
    return int'(btt_index(pc[b]));
  endfunction

  task automatic idle_inputs();
    f_valid = 0; pipe_flush = 0; alloc_valid = 0; dealloc_valid = 0; clr_all = 0; act_valid = 0;
    ret_adv = 0; ow_valid = '0; gate = 0;
  endtask

  initial begin
    rst_n = 1'b0; idle_inputs(); f_pc = 0; alloc_idx = 0; dealloc_idx = 0; act_idx = 0; ret_idx = 0;
    alloc_tag = 0; alloc_nl = 0; alloc_sptr = '0; ow_idx = '0; ow_slot = '0; ow_taken = '0;
    for (int b = 0; b < 2; b++) begin
      fi[b] = 0; ri[b] = 0; synced[b] = 0; active[b] = 0;
      for (int n = 0; n < 100000; n++) begin outc[b][n] = 1'($urandom_range(0, 1)); got[b][n] = 0; end
    end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    // allocate both branches
    for (int b = 0; b < 2; b++) begin
      alloc_valid = 1; alloc_idx = btt_idx_t'(entry(b)); alloc_tag = btt_tag(pc[b]);
      alloc_nl = nl_t'(b + 1); alloc_sptr = '0; alloc_sptr[0] = sp_idx_t'(10 + b);
      @(negedge clk);
    end
    alloc_valid = 0;
    // not synchronised yet: no hit
    f_valid = 1; f_pc = pc[0];
    #1;
    check(!f_hit && !f_pred_valid, "no hit before the first flush");
    // wrong tag
    f_pc = pc[0] + 64'h10000;
    #1;
    check(!f_hit, "tag mismatch");
    f_valid = 0;
    check(e_nl[entry(1)] == 2 && e_sptr[entry(1)][0] == 11, "load list stored");
    pipe_flush = 1;
    @(negedge clk);
    pipe_flush = 0;
    synced[0] = 1; synced[1] = 1;
    for (int t = 0; t < 60000; t++) begin
      int b, n, fb;
      logic exp_v;
      idle_inputs();
      // outcome deliveries from two FSMs
      for (int f = 0; f < 2; f++) begin
        b = $urandom_range(0, 1);
        n = ri[b] + $urandom_range(0, D - 1);
        if (!got[b][n] && $urandom_range(0, 2) != 0) begin
          ow_valid[f] = 1; ow_idx[f] = btt_idx_t'(entry(b)); ow_slot[f] = oq_idx_t'(n % D); ow_taken[f] = outc[b][n];
        end
      end
      if (ow_valid[1] && ow_valid[0] && ow_idx[0] == ow_idx[1] && ow_slot[0] == ow_slot[1]) ow_valid[1] = 0;
      // snippet installed after a while
      if (t == 50) begin act_valid = 1; act_idx = btt_idx_t'(entry(0)); end
      if (t == 300) begin act_valid = 1; act_idx = btt_idx_t'(entry(1)); end
      // fetch
      fb = $urandom_range(0, 1);
      f_valid = (fi[fb] - ri[fb] < 40) && ($urandom_range(0, 3) != 0);
      f_pc = pc[fb];
      gate = ($urandom_range(0, 99) == 0);
      // retire
      b = $urandom_range(0, 1);
      if (ri[b] < fi[b] && $urandom_range(0, 2) != 0) begin ret_adv = 1; ret_idx = btt_idx_t'(entry(b)); end
      pipe_flush = ($urandom_range(0, 149) == 0);
      #1;
      exp_v = f_valid && !gate && synced[fb] && active[fb] && got[fb][fi[fb]];
      check(f_hit == (f_valid && !gate && synced[fb]), $sformatf("t=%0d hit", t));
      check(f_pred_valid == exp_v, $sformatf("t=%0d branch %0d instance %0d (retired %0d) pred_valid %0b exp %0b",
                                             t, fb, fi[fb], ri[fb], f_pred_valid, exp_v));
      if (exp_v) begin
        check(f_pred_taken == outc[fb][fi[fb]], $sformatf("t=%0d branch %0d instance %0d direction", t, fb, fi[fb]));
        n_pred++;
      end else if (f_valid && !gate) n_nopred++;
      for (int k = 0; k < 2; k++)
        check(int'(e_pos[entry(k)]) == ri[k] % D && int'(e_fslot[entry(k)]) == fi[k] % D &&
              e_active[entry(k)] == active[k], "dispatcher view");
      @(posedge clk);
      for (int f = 0; f < 2; f++)
        if (ow_valid[f]) begin
          int k, m;
          k = (int'(ow_idx[f]) == entry(0)) ? 0 : 1;
          // the slot belongs to the instance in [ri, ri+63] with that slot number
          m = ri[k] + ((int'(ow_slot[f]) - ri[k] % D + D) % D);
          got[k][m] = 1;
        end
      if (act_valid) active[(int'(act_idx) == entry(0)) ? 0 : 1] = 1;
      if (f_valid && !gate && synced[fb]) fi[fb]++;
      if (ret_adv) ri[(int'(ret_idx) == entry(0)) ? 0 : 1]++;
      if (pipe_flush) for (int k = 0; k < 2; k++) fi[k] = ri[k];
      @(negedge clk);
    end
    // flush of one chain and global clear
    idle_inputs();
    dealloc_valid = 1; dealloc_idx = btt_idx_t'(entry(0));
    @(negedge clk);
    idle_inputs();
    f_valid = 1; f_pc = pc[0];
    #1;
    check(!f_hit, "no hit after dealloc");
    f_pc = pc[1];
    #1;
    check(f_hit, "other branch still hits");
    f_valid = 0; clr_all = 1;
    @(negedge clk);
    idle_inputs();
    f_valid = 1; f_pc = pc[1];
    #1;
    check(!f_hit, "no hit after clear");
    $display("predicted %0d, not predicted %0d", n_pred, n_nopred);
    check(n_pred > 5000 && n_nopred > 1000, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
