// tb_ldbp_fetch_block: self-checking test of the fetch block.
//
// The testbench plays the retirement block and the data cache.  It allocates
// a chain of two loads (strides +8 and -16) for one branch, installs the
// snippet "(ld0 + ld1) - 100 < 0" (one addition and one subtraction of an
// immediate) and synchronises the entry with a pipeline flush.  Instance n of
// the branch reads load addresses A0 + 8n and A1 - 16n.  It then fetches
// instances up to 40 ahead of retirement, retires them, flushes now and then,
// and returns trigger-load data for random instances of the current window
// in random order; for every seventh instance one of the two loads never
// returns.  Checks: every prediction equals the outcome computed here from
// the returned data; an instance with missing data is never predicted;
// enough instances are predicted; trig_addr is the address 16 instances
// ahead; two FSM jobs overlap at least once and dispatch stalls are seen;
// a chain flush stops all predictions.
module tb_ldbp_fetch_block;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic gate, clr_all, f_valid, f_hit, f_pred_valid, f_pred_taken, pipe_flush;
  xword_t f_pc;
  logic alloc_valid, flush_valid, adv_valid, cst_wr, cmp_valid, dispatch, fsm_stall;
  btt_idx_t alloc_idx, flush_idx, adv_idx, trig_idx;
  logic [11:0] alloc_tag;
  nl_t alloc_nl;
  sp_idx_t [MAX_LOADS-1:0] alloc_sptr;
  xword_t  [MAX_LOADS-1:0] alloc_lastaddr, trig_addr;
  delta_t  [MAX_LOADS-1:0] alloc_delta;
  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free;
  snippet_t cst_snip;
  xword_t cmp_addr, cmp_data;

  ldbp_fetch_block dut (.*);

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

  localparam xword_t PC = 64'h3006;
  localparam xword_t A0 = 64'h100000, A1 = 64'h900000;
  localparam int N = 6000;

  xword_t d0 [N], d1 [N];
  logic   sent0 [N], sent1 [N];
  int fi, ri, n_pred, n_both, n_stall, n_disp;

  function automatic logic outcome(input int n);
    return $signed(d0[n] + d1[n] - 64'd100) < 0;
  endfunction

  function automatic logic missing(input int n);
    return (n % 7) == 3;
  endfunction

  always @(posedge clk) begin
    if (dut.g_fsm[0].u_fsm.busy && dut.g_fsm[1].u_fsm.busy) n_both++;
    if (fsm_stall) n_stall++;
    if (dispatch) n_disp++;
  end

  task automatic idle_inputs();
    gate = 0; clr_all = 0; f_valid = 0; pipe_flush = 0; alloc_valid = 0; flush_valid = 0;
    adv_valid = 0; cst_wr = 0; cmp_valid = 0;
  endtask

  initial begin
    rst_n = 1'b0; idle_inputs(); f_pc = PC; alloc_idx = 0; flush_idx = 0; adv_idx = 0; trig_idx = 0;
    alloc_tag = 0; alloc_nl = 0; alloc_sptr = '0; alloc_lastaddr = '0; alloc_delta = '0;
    cst_snip = '0; cmp_addr = 0; cmp_data = 0;
    n_pred = 0; n_both = 0; n_stall = 0; n_disp = 0;
    for (int n = 0; n < N; n++) begin
      d0[n] = xword_t'($urandom_range(0, 100)); d1[n] = xword_t'($urandom_range(0, 100));
      sent0[n] = 0; sent1[n] = 0;
    end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    #1;
    check(lor_free == 16, "all LOR entries free");
    // allocate: ldstart = lastaddr + delta = address of instance 0
    alloc_valid = 1; alloc_idx = btt_index(PC); alloc_tag = btt_tag(PC); alloc_nl = 2;
    alloc_sptr[0] = 5; alloc_sptr[1] = 9;
    alloc_lastaddr[0] = A0 - 8; alloc_delta[0] = 8;
    alloc_lastaddr[1] = A1 + 16; alloc_delta[1] = -16;
    @(negedge clk);
    idle_inputs();
    #1;
    check(lor_free == 14, "two LOR entries taken");
    // snippet: op0 = ld0 + ld1; op1 = op0 - 100 (add of imm -100); compare op1 < 0
    cst_wr = 1; adv_idx = btt_index(PC);   // the snippet goes to entry adv_idx
    cst_snip = '0; cst_snip.nops = 2; cst_snip.nloads = 2; cst_snip.cond = BR_LT;
    cst_snip.ops[0].op = OP_ADD; cst_snip.ops[0].a = '{REF_LOAD, 3'd0}; cst_snip.ops[0].b = '{REF_LOAD, 3'd1};
    cst_snip.ops[1].op = OP_ADD; cst_snip.ops[1].a = '{REF_OP, 3'd0};   cst_snip.ops[1].b = '{REF_IMM, 3'd0};
    cst_snip.ops[1].imm = -16'sd100;
    cst_snip.res_a = '{REF_OP, 3'd1}; cst_snip.res_b = '{REF_ZERO, 3'd0};
    pipe_flush = 1;
    @(negedge clk);
    idle_inputs();
    fi = 0; ri = 0;
    for (int t = 0; t < 40000 && ri < N - 100; t++) begin
      int n, ld;
      logic retire_now;
      idle_inputs();
      // trigger data for a random instance of the window
      n = ri + $urandom_range(0, 40);
      ld = $urandom_range(0, 1);
      if (!(missing(n) && ld == 1) && $urandom_range(0, 3) != 0) begin
        if (ld == 0 && !sent0[n]) begin cmp_valid = 1; cmp_addr = A0 + 64'(8 * n); cmp_data = d0[n]; sent0[n] = 1; end
        if (ld == 1 && !sent1[n]) begin cmp_valid = 1; cmp_addr = A1 - 64'(16 * n); cmp_data = d1[n]; sent1[n] = 1; end
      end
      // fetch
      f_valid = (fi < ri + 40) && ($urandom_range(0, 1) == 0);
      f_pc = PC;
      retire_now = (ri < fi) && ($urandom_range(0, 2) == 0);
      pipe_flush = ($urandom_range(0, 199) == 0);
      adv_valid = retire_now; adv_idx = btt_index(PC);
      trig_idx = btt_index(PC);
      #1;
      check(f_hit == f_valid, "hit");
      check(trig_addr[0] == A0 + 64'(8 * (ri + 16)) && trig_addr[1] == A1 - 64'(16 * (ri + 16)),
            $sformatf("trigger addresses 16 instances ahead of %0d", ri));
      if (f_pred_valid) begin
        n_pred++;
        check(!missing(fi), $sformatf("instance %0d predicted without its data", fi));
        check(f_pred_taken == outcome(fi), $sformatf("instance %0d direction", fi));
      end
      @(posedge clk);
      if (f_valid) fi++;
      if (retire_now) ri++;
      if (pipe_flush) fi = ri;
      @(negedge clk);
    end
    $display("retired %0d, predicted %0d, both FSMs busy %0d cycles, dispatches %0d, stalls %0d",
             ri, n_pred, n_both, n_disp, n_stall);
    check(n_pred > ri / 5, "coverage");
    check(n_both > 0 && n_stall > 0, "FSM overlap and stalls");
    // chain flush: no more hits, LOR entries free again
    idle_inputs();
    flush_valid = 1; flush_idx = btt_index(PC);
    @(negedge clk);
    idle_inputs();
    f_valid = 1;
    #1;
    check(!f_hit && !f_pred_valid, "no prediction after the chain flush");
    check(lor_free == 16, "LOR entries freed by the flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
