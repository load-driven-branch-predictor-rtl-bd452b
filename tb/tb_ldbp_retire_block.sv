// tb_ldbp_retire_block: self-checking test of the retirement block.
//
// Retires the vector loop  lw a4,0(a5); bnez a4; addi a5,a5,4  one
// instruction per cycle with a low-confidence default prediction and checks
// the command sequence the block must produce for the branch, iteration by
// iteration:
//   * no command until the load's stride is confident: the load becomes
//     predictable on its ninth execution (allocate, delta 0 -> 4, seven
//     repeats), so the branch of iteration 8 allocates a chain of one load
//     with the SP's last address and delta;
//   * iteration 9: advance, snippet install (no operations, load slot 0
//     compared with zero, condition NE) and one trigger push;
//   * later iterations: advance and one trigger push, no further install;
//     no push when the trigger queue reports too little space;
//   * a one-time jump in the load address flushes the chain at the next
//     branch, and the chain is allocated again after the stride relearns;
//   * in low-power mode no command is given but wake is raised.
// A second phase runs a two-source loop (four loads, two addw) and checks the
// allocated load count and the installed snippet (two operations).
module tb_ldbp_retire_block;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic gate, clr_all;
  retire_t ret;
  logic [$clog2(LOR_ENTRIES+1)-1:0] lor_free;
  logic [3:0] tq_space;
  logic alloc_valid, flush_valid, adv_valid, cst_wr, trig_push, wake;
  btt_idx_t alloc_idx, flush_idx, adv_idx;
  logic [11:0] alloc_tag;
  nl_t alloc_nl, trig_n;
  sp_idx_t [MAX_LOADS-1:0] alloc_sptr;
  xword_t  [MAX_LOADS-1:0] alloc_lastaddr;
  delta_t  [MAX_LOADS-1:0] alloc_delta;
  snippet_t cst_snip;

  ldbp_retire_block dut (.*);

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

  localparam xword_t PC = 64'h1000;

  // observed commands of the last branch
  logic s_alloc, s_flush, s_adv, s_cst, s_push, s_wake;
  nl_t s_nl;
  xword_t s_last;
  delta_t s_delta;
  snippet_t s_snip;

  task automatic retire(input retire_t r);
    @(negedge clk);
    ret = r;
    #1;
    if (r.kind == RK_BRANCH) begin
      s_alloc = alloc_valid; s_flush = flush_valid; s_adv = adv_valid; s_cst = cst_wr;
      s_push = trig_push; s_wake = wake; s_nl = alloc_nl; s_last = alloc_lastaddr[0];
      s_delta = alloc_delta[0]; s_snip = cst_snip;
      if (trig_push) check(trig_n == nl_t'(1) || trig_n == nl_t'(4), "trigger count");
    end else check(!alloc_valid && !flush_valid && !adv_valid && !trig_push, "commands only at branches");
  endtask

  task automatic v_iter(input xword_t addr);
    retire_t r;
    r = '0; r.valid = 1; r.kind = RK_LOAD; r.pc = PC; r.dst = 14; r.src1 = 15; r.ld_addr = addr;
    retire(r);
    r = '0; r.valid = 1; r.kind = RK_BRANCH; r.pc = PC + 4; r.src1 = 14; r.cond = BR_NE;
    r.br_taken = 1'($urandom_range(0, 1)); r.imli_pred = 1'($urandom_range(0, 1));
    retire(r);
    r = '0; r.valid = 1; r.kind = RK_ALU; r.pc = PC + 8; r.dst = 15; r.src1 = 15; r.alu_op = OP_ADD;
    r.use_imm = 1; r.imm = 4;
    retire(r);
  endtask

  xword_t a;
  int first_alloc;

  initial begin
    rst_n = 1'b0; gate = 0; clr_all = 0; ret = '0; lor_free = 16; tq_space = 8;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    a = 64'h8000;
    first_alloc = -1;
    for (int i = 0; i < 40; i++) begin
      tq_space = (i == 20) ? 4'd0 : 4'd8;
      v_iter(a);
      a += 4;
      if (i < 8) check(!s_alloc && !s_adv && !s_flush, $sformatf("iteration %0d: no chain yet", i));
      if (i == 8) begin
        check(s_alloc && s_nl == 1 && s_last == a - 4 && s_delta == 4, "iteration 8 allocates the chain");
        check(s_wake, "candidate branch flagged");
      end
      if (i == 9) begin
        check(s_adv && s_cst && s_push, "iteration 9: advance, install, push");
        check(s_snip.nops == 0 && s_snip.nloads == 1 && s_snip.cond == BR_NE &&
              s_snip.res_a.kind == REF_LOAD && s_snip.res_a.idx == 0 && s_snip.res_b.kind == REF_ZERO,
              "snippet of bnez a4");
      end
      if (i > 9) check(s_adv && !s_cst && (s_push == (i != 20)), $sformatf("iteration %0d: advance/push", i));
    end
    // stride jump -> flush at the next branch
    a += 64;
    v_iter(a); a += 4;
    check(s_flush && !s_adv, "delta change flushes the chain");
    for (int i = 0; i < 20; i++) begin
      v_iter(a); a += 4;
      if (s_alloc && first_alloc < 0) first_alloc = i;
    end
    check(first_alloc >= 0, "chain allocated again after relearning");
    // low-power mode: nothing but wake
    gate = 1; clr_all = 0;
    for (int i = 0; i < 3; i++) begin
      v_iter(a); a += 4;
      check(!s_alloc && !s_adv && !s_flush && !s_cst && !s_push && s_wake, "gated: wake only");
    end
    gate = 0;
    // two-source loop on another branch entry
    begin
      retire_t r;
      xword_t b;
      logic seen_alloc, seen_cst;
      b = 64'h40000;
      seen_alloc = 0; seen_cst = 0;
      for (int i = 0; i < 30; i++) begin
        r = '0; r.valid = 1; r.kind = RK_LOAD; r.pc = 64'h2000; r.dst = 20; r.ld_addr = b + 64'(8 * i); retire(r);
        r.pc = 64'h2004; r.dst = 21; r.ld_addr = 64'h50000 + 64'(8 * i); retire(r);
        r = '0; r.valid = 1; r.kind = RK_ALU; r.pc = 64'h2008; r.dst = 22; r.src1 = 20; r.src2 = 21; r.alu_op = OP_ADDW; retire(r);
        r = '0; r.valid = 1; r.kind = RK_LOAD; r.pc = 64'h200c; r.dst = 23; r.ld_addr = 64'h60000 + 64'(8 * i); retire(r);
        r.pc = 64'h2010; r.dst = 24; r.ld_addr = 64'h70000 + 64'(8 * i); retire(r);
        r = '0; r.valid = 1; r.kind = RK_ALU; r.pc = 64'h2014; r.dst = 25; r.src1 = 23; r.src2 = 24; r.alu_op = OP_ADDW; retire(r);
        r = '0; r.valid = 1; r.kind = RK_BRANCH; r.pc = 64'h2018; r.src1 = 22; r.src2 = 25; r.cond = BR_GE; retire(r);
        if (s_alloc) begin
          seen_alloc = 1;
          check(s_nl == 4 && i == 8, $sformatf("four-load chain allocated at iteration %0d", i));
        end
        if (s_cst) begin
          seen_cst = 1;
          check(s_snip.nops == 2 && s_snip.nloads == 4 && s_snip.cond == BR_GE &&
                s_snip.res_a.kind == REF_OP && s_snip.res_a.idx == 0 &&
                s_snip.res_b.kind == REF_OP && s_snip.res_b.idx == 1 &&
                s_snip.ops[1].a.kind == REF_LOAD && s_snip.ops[1].a.idx == 2, "two-source snippet");
        end
      end
      check(seen_alloc && seen_cst, "two-source chain allocated and installed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
