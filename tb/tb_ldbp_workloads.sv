// tb_ldbp_workloads: branch patterns LDBP must decline, run through the whole
// predictor at its default sizes.
//
// Three loop kernels, each run from a freshly reset predictor:
//   CC   connected-components loop: lw a6,0(a4); slli a5,a6,2;
//        add a5,a5,a0; lw a5,0(a5); beq a6,a5.  The first load walks an
//        index array with a fixed stride; the second load's address comes
//        from the first load's data (a load-load chain), so its stride is
//        never stable and the branch must never be tracked.
//   AST  lw a4,0(a5); bnez a4; with the pointer step cycling 4, 8, 12 bytes,
//        so the delta never repeats (a fluctuating stride): never tracked.
//   VEC  lw a4,0(a5); bnez a4; addi a5,a5,4 with random 0/1 data: the
//        positive control, which must be tracked and predicted correctly.
//
// Core model (as in the end-to-end testbench): fetch sees only the branch of
// each iteration and runs at most FMAX iterations ahead of retirement;
// retirement takes one instruction per cycle; the default predictor is a
// low-confidence coin; a wrong final prediction flushes the pipeline at the
// branch's retirement.  The data cache answers trigger loads after MEM_LAT
// cycles and refuses requests at random ($urandom).
//
// Checks: for CC and AST no BTT allocation, no trigger load and no LDBP
// prediction ever happen; for VEC the branch is allocated, most iterations
// are predicted by LDBP and every LDBP prediction is right.  A watchdog ends
// the run with a failure if it hangs.
module tb_ldbp_workloads;
  import ldbp_pkg::*;

  localparam int FMAX     = 8;
  localparam int MEM_LAT  = 10;
  localparam int ITER     = 600;
  localparam int WATCHDOG = 100000;

  logic   clk = 1'b0;
  logic   rst_n;
  logic   f_valid, f_hit, f_pred_valid, f_pred_taken, pipe_flush;
  xword_t f_pc;
  retire_t ret;
  logic   tl_req_valid, tl_req_ready, tl_cmp_valid, lp_mode, ev_dispatch, ev_fsm_stall;
  xword_t tl_req_addr, tl_cmp_addr, tl_cmp_data;

  ldbp dut (.*);

  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ memory
  function automatic xword_t hash(input xword_t a);
    xword_t h;
    h = a * 64'h9E3779B97F4A7C15;
    return h ^ (h >> 29);
  endfunction

  localparam xword_t IDX_A = 64'h10000;   // CC index array
  localparam xword_t TGT_A = 64'h80000;   // CC target array
  localparam xword_t AST_A = 64'h20000;
  localparam xword_t VEC_A = 64'h30000;

  // Index and target array entries are 0..1023; everything else is 0/1.
  function automatic xword_t mem_data(input xword_t a);
    if (a >= IDX_A && a < IDX_A + 64'h10000) return hash(a) & 64'h3ff;
    if (a >= TGT_A && a < TGT_A + 64'h10000) return hash(a) & 64'h3ff;
    return hash(a) & 64'h1;
  endfunction

  xword_t mq_addr [256];
  int     mq_due  [256];
  int     mq_head = 0, mq_tail = 0;

  always_ff @(posedge clk) begin
    if (tl_req_valid && tl_req_ready) begin
      mq_addr[mq_tail % 256] <= tl_req_addr;
      mq_due[mq_tail % 256]  <= cycle + MEM_LAT;
      mq_tail                <= mq_tail + 1;
    end
    if (tl_cmp_valid) mq_head <= mq_head + 1;
    tl_req_ready <= ($urandom_range(0, 9) != 0);
  end

  always_comb begin
    tl_cmp_valid = (mq_head != mq_tail) && (mq_due[mq_head % 256] <= cycle);
    tl_cmp_addr  = mq_addr[mq_head % 256];
    tl_cmp_data  = mem_data(tl_cmp_addr);
  end

  // ------------------------------------------------------------ kernels
  typedef enum int { K_CC, K_AST, K_VEC } kern_e;

  localparam xword_t CC_PC = 64'h1000, AST_PC = 64'h2000, VEC_PC = 64'h3000;

  function automatic int ninst(input kern_e k);
    return (k == K_CC) ? 6 : 3;
  endfunction

  function automatic int br_slot(input kern_e k);
    return (k == K_CC) ? 4 : 1;
  endfunction

  function automatic xword_t br_pc(input kern_e k);
    return (k == K_CC) ? CC_PC + 16 : (k == K_AST) ? AST_PC + 4 : VEC_PC + 4;
  endfunction

  // AST pointer: steps 4, 8, 12, 4, 8, 12, ...
  function automatic xword_t ast_addr(input int i);
    return AST_A + 64'(24 * (i / 3)) + ((i % 3 == 0) ? 64'd0 : (i % 3 == 1) ? 64'd4 : 64'd12);
  endfunction

  function automatic xword_t cc_tgt(input int i);
    return TGT_A + (mem_data(IDX_A + 64'(4 * i)) << 2);
  endfunction

  function automatic logic outcome(input kern_e k, input int i);
    if (k == K_CC)  return mem_data(IDX_A + 64'(4 * i)) == mem_data(cc_tgt(i));
    if (k == K_AST) return mem_data(ast_addr(i)) != 0;
    return mem_data(VEC_A + 64'(4 * i)) != 0;
  endfunction

  function automatic retire_t mk(input ret_kind_e kd, input xword_t pc, input int dst,
                                 input int s1, input int s2, input alu_op_e op,
                                 input logic use_imm, input int imm, input xword_t addr);
    retire_t r;
    r = '0;
    r.valid = 1'b1;  r.kind = kd;  r.pc = pc;
    r.dst = reg_t'(dst);  r.src1 = reg_t'(s1);  r.src2 = reg_t'(s2);
    r.alu_op = op;  r.use_imm = use_imm;  r.imm = 16'(imm);
    r.cond = (pc == CC_PC + 16) ? BR_EQ : BR_NE;
    r.ld_addr = addr;
    return r;
  endfunction

  function automatic retire_t inst(input kern_e k, input int i, input int j);
    if (k == K_CC) begin
      unique case (j)
        // a4 = x14, a6 = x16, a5 = x15, a0 = x10
        0: return mk(RK_LOAD,   CC_PC,      16, 14, 0,  OP_ADD, 1'b0, 0, IDX_A + 64'(4 * i));
        1: return mk(RK_ALU,    CC_PC + 4,  15, 16, 0,  OP_SLL, 1'b1, 2, '0);
        2: return mk(RK_ALU,    CC_PC + 8,  15, 15, 10, OP_ADD, 1'b0, 0, '0);
        3: return mk(RK_LOAD,   CC_PC + 12, 15, 15, 0,  OP_ADD, 1'b0, 0, cc_tgt(i));
        4: return mk(RK_BRANCH, CC_PC + 16, 0,  16, 15, OP_ADD, 1'b0, 0, '0);
        default: return mk(RK_ALU, CC_PC + 20, 14, 14, 0, OP_ADD, 1'b1, 4, '0);
      endcase
    end
    if (k == K_AST) begin
      unique case (j)
        0: return mk(RK_LOAD,   AST_PC,     14, 15, 0, OP_ADD, 1'b0, 0, ast_addr(i));
        1: return mk(RK_BRANCH, AST_PC + 4, 0,  14, 0, OP_ADD, 1'b0, 0, '0);
        default: return mk(RK_ALU, AST_PC + 8, 15, 15, 0, OP_ADD, 1'b1, 4, '0);
      endcase
    end
    unique case (j)
      0: return mk(RK_LOAD,   VEC_PC,     14, 15, 0, OP_ADD, 1'b0, 0, VEC_A + 64'(4 * i));
      1: return mk(RK_BRANCH, VEC_PC + 4, 0,  14, 0, OP_ADD, 1'b0, 0, '0);
      default: return mk(RK_ALU, VEC_PC + 8, 15, 15, 0, OP_ADD, 1'b1, 4, '0);
    endcase
  endfunction

  // ------------------------------------------------------------ counters
  int n_alloc = 0, n_tl_issue = 0, n_pred = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_retire.alloc_valid) n_alloc++;
      if (tl_req_valid && tl_req_ready) n_tl_issue++;
      if (f_valid && f_pred_valid) n_pred++;
    end
  end

  // ------------------------------------------------------------ core model
  logic used_q [ITER];
  logic pred_q [ITER];

  task automatic reset_dut();
    rst_n = 1'b0;  f_valid = 1'b0;  f_pc = '0;  pipe_flush = 1'b0;  ret = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    n_alloc = 0;  n_tl_issue = 0;  n_pred = 0;
  endtask

  task automatic run(input kern_e k, output int predicted, output int wrong);
    int fi, ri, rj;
    logic mis;
    retire_t r;
    fi = 0; ri = 0; rj = 0;
    predicted = 0;  wrong = 0;
    for (int i = 0; i < ITER; i++) begin
      used_q[i] = 1'b0;
      pred_q[i] = 1'b0;
    end
    while (ri < ITER) begin
      @(negedge clk);
      f_valid    = 1'b0;
      pipe_flush = 1'b0;
      ret        = '0;
      mis        = 1'b0;
      if (ri < fi) begin
        r = inst(k, ri, rj);
        if (rj == br_slot(k)) begin
          r.br_taken  = outcome(k, ri);
          r.imli_conf = 1'b0;
          r.imli_pred = 1'($urandom_range(0, 1));
          r.ldbp_used = used_q[ri];
          r.ldbp_pred = pred_q[ri];
          mis = (used_q[ri] ? pred_q[ri] : r.imli_pred) != r.br_taken;
          if (used_q[ri]) begin
            predicted++;
            if (pred_q[ri] != r.br_taken) wrong++;
          end
        end
        ret        = r;
        pipe_flush = mis;
        if (mis) fi = ri + 1;
        rj++;
        if (rj == ninst(k)) begin
          rj = 0;
          ri++;
        end
      end
      if (!mis && fi < ITER && fi < ri + FMAX) begin
        f_valid = 1'b1;
        f_pc    = br_pc(k);
        #1;
        used_q[fi] = f_pred_valid;
        pred_q[fi] = f_pred_taken;
        fi++;
      end
    end
    @(negedge clk);
    f_valid = 1'b0; pipe_flush = 1'b0; ret = '0;
  endtask

  initial begin
    int p, w;

    reset_dut();
    run(K_CC, p, w);
    $display("CC:  alloc=%0d trigger loads=%0d predicted=%0d", n_alloc, n_tl_issue, p);
    check(n_alloc == 0,    "CC: load-load chain allocated a BTT entry");
    check(n_tl_issue == 0, "CC: trigger loads issued");
    check(n_pred == 0,     "CC: LDBP predicted");

    reset_dut();
    run(K_AST, p, w);
    $display("AST: alloc=%0d trigger loads=%0d predicted=%0d", n_alloc, n_tl_issue, p);
    check(n_alloc == 0,    "AST: fluctuating stride allocated a BTT entry");
    check(n_tl_issue == 0, "AST: trigger loads issued");
    check(n_pred == 0,     "AST: LDBP predicted");

    reset_dut();
    run(K_VEC, p, w);
    $display("VEC: alloc=%0d trigger loads=%0d predicted=%0d of %0d, wrong=%0d",
             n_alloc, n_tl_issue, p, ITER, w);
    check(n_alloc >= 1,     "VEC: branch never allocated");
    check(n_tl_issue > 0,   "VEC: no trigger loads");
    check(p > ITER / 2,     "VEC: LDBP coverage too low");
    check(w == 0,           "VEC: wrong LDBP predictions");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
