// tb_ldbp: end-to-end test of the whole predictor at its default sizes.
//
// The testbench plays the core, the default predictor and the data cache
// around the ldbp top level and runs four small loop kernels through it:
//   V  vector kernel   lw a4,0(a5); bnez a4; addi a5,a5,4   (data 0/1 at random)
//   H  two-source kernel: two pairs of loads, an addw on each pair and a
//      bge on the two sums (4 loads, 2 operations, like the hot loop of a
//      profile-HMM search)
//   S  one load per branch source, each through four ALU operations (the
//      eight-operation maximum), with the cache refusing requests in bursts
//   C  kernel V with a one-time jump in the load stride (delta change)
//   D  kernel V with the data cache returning wrong data for trigger loads
//      while the default predictor is right (accuracy drop)
// followed by an idle stretch longer than the low-power timeout and a rerun of
// kernel V (wake-up).
//
// Core model: fetch sees only the branch of each iteration and runs at most
// FMAX iterations ahead of retirement; retirement takes one instruction per
// cycle.  The final prediction is LDBP's when f_pred_valid, else the default
// predictor's (a random guess marked low-confidence).  A wrong final
// prediction raises pipe_flush in the cycle the branch retires and fetch
// restarts with the next iteration.  Data values come from a hash of the
// address, so every outcome is known to the testbench without the DUT.
//
// Checks: every LDBP prediction in kernels V, H and the wake-up run equals
// the true outcome; LDBP covers most branches once warmed up; low-power mode
// is entered after the idle stretch and left on wake-up; every mechanism
// (allocation, snippet install, trigger push/issue, LOT write, dispatch,
// FSM stall, prediction, pipeline-flush resync, chain flush by delta change,
// flush by accuracy, trigger-queue backpressure, low-power entry, wake) is
// counted and a failure is counted for any that never happened.
module tb_ldbp;
  import ldbp_pkg::*;

  localparam int FMAX     = 8;      // fetch-ahead limit in iterations
  localparam int MEM_LAT  = 10;     // trigger load latency in cycles
  localparam int WATCHDOG = 400000;

  logic   clk = 1'b0;
  logic   rst_n;
  logic   f_valid, f_hit, f_pred_valid, f_pred_taken, pipe_flush;
  xword_t f_pc;
  retire_t ret;
  logic   tl_req_valid, tl_req_ready, tl_cmp_valid, lp_mode, ev_dispatch, ev_fsm_stall;
  xword_t tl_req_addr, tl_cmp_addr, tl_cmp_data;

  ldbp dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ memory
  function automatic xword_t hash(input xword_t a);
    xword_t h;
    h = a * 64'h9E3779B97F4A7C15;
    h = h ^ (h >> 29);
    h = h * 64'hBF58476D1CE4E5B9;
    return h ^ (h >> 32);
  endfunction

  // Kernel V loads 0/1, kernel H loads sign-extended 32-bit values.
  function automatic xword_t mem_data(input xword_t a);
    xword_t h;
    h = hash(a);
    if (a < 64'h20000) return {63'd0, h[7]};
    return {{32{h[31]}}, h[31:0]};
  endfunction

  logic   corrupt = 1'b0;           // kernel D: cache returns wrong trigger data
  logic   tl_burst = 1'b0;          // kernel S: cache refuses requests 40 of every 80 cycles
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
    if (tl_burst) tl_req_ready <= (cycle % 160) >= 120;
    else          tl_req_ready <= ($urandom_range(0, 9) != 0);
  end

  always_comb begin
    tl_cmp_valid = (mq_head != mq_tail) && (mq_due[mq_head % 256] <= cycle);
    tl_cmp_addr  = mq_addr[mq_head % 256];
    tl_cmp_data  = mem_data(tl_cmp_addr) ^ (corrupt ? 64'd1 : 64'd0);
  end

  // ------------------------------------------------------------ kernels
  typedef enum int { K_V, K_H, K_S } kern_e;

  localparam xword_t V_PC = 64'h1000, H_PC = 64'h2000, S_PC = 64'h3000;
  localparam xword_t V_A  = 64'h10000;
  localparam xword_t H_A  = 64'h40000, H_B = 64'h50000, H_C = 64'h60000, H_D = 64'h70000;
  localparam xword_t S_A  = 64'h80000, S_B = 64'h90000;

  kern_e  kern;
  int     jump_at;                  // kernel C: iterations >= jump_at skip one element

  function automatic int ninst(input kern_e k);
    return (k == K_V) ? 3 : (k == K_H) ? 7 : 11;
  endfunction

  function automatic xword_t v_addr(input int i);
    return V_A + 64'(4 * i) + ((jump_at >= 0 && i >= jump_at) ? 64'd4 : 64'd0);
  endfunction

  function automatic logic outcome(input kern_e k, input int i);
    xword_t a, b, c, d, s1, s2;
    if (k == K_V) return mem_data(v_addr(i)) != 0;
    if (k == K_S) begin
      a  = mem_data(S_A + 64'(8 * i));
      b  = mem_data(S_B + 64'(8 * i));
      s1 = (((a + 3) ^ 64'h55) << 2) & 64'h3ff;
      s2 = (((b + 1) >> 1) | 64'h1) & 64'h3ff;
      return $signed(s1) < $signed(s2);
    end
    a  = mem_data(H_A + 64'(8 * i));
    b  = mem_data(H_B + 64'(8 * i));
    c  = mem_data(H_C + 64'(8 * i));
    d  = mem_data(H_D + 64'(8 * i));
    s1 = alu(OP_ADDW, a, b);
    s2 = alu(OP_ADDW, c, d);
    return $signed(s1) >= $signed(s2);
  endfunction

  function automatic retire_t mk(input ret_kind_e kd, input xword_t pc, input int dst,
                                 input int s1, input int s2, input alu_op_e op,
                                 input logic use_imm, input int imm, input br_cond_e cond,
                                 input xword_t addr);
    retire_t r;
    r = '0;
    r.valid = 1'b1;  r.kind = kd;  r.pc = pc;
    r.dst = reg_t'(dst);  r.src1 = reg_t'(s1);  r.src2 = reg_t'(s2);
    r.alu_op = op;  r.use_imm = use_imm;  r.imm = 16'(imm);  r.cond = cond;
    r.ld_addr = addr;
    return r;
  endfunction

  // Instruction j of iteration i.
  function automatic retire_t inst(input kern_e k, input int i, input int j);
    if (k == K_V) begin
      unique case (j)
        0: return mk(RK_LOAD,   V_PC,     14, 15, 0, OP_ADD, 1'b0, 0, BR_EQ, v_addr(i));
        1: return mk(RK_BRANCH, V_PC + 4, 0,  14, 0, OP_ADD, 1'b0, 0, BR_NE, '0);
        default: return mk(RK_ALU, V_PC + 8, 15, 15, 0, OP_ADD, 1'b1, 4, BR_EQ, '0);
      endcase
    end
    if (k == K_S) begin
      unique case (j)
        0: return mk(RK_LOAD, S_PC,      20, 10, 0,  OP_ADD, 1'b0, 0,     BR_EQ, S_A + 64'(8 * i));
        1: return mk(RK_ALU,  S_PC + 4,  21, 20, 0,  OP_ADD, 1'b1, 3,     BR_EQ, '0);
        2: return mk(RK_ALU,  S_PC + 8,  22, 21, 0,  OP_XOR, 1'b1, 'h55,  BR_EQ, '0);
        3: return mk(RK_ALU,  S_PC + 12, 23, 22, 0,  OP_SLL, 1'b1, 2,     BR_EQ, '0);
        4: return mk(RK_ALU,  S_PC + 16, 24, 23, 0,  OP_AND, 1'b1, 'h3ff, BR_EQ, '0);
        5: return mk(RK_LOAD, S_PC + 20, 25, 11, 0,  OP_ADD, 1'b0, 0,     BR_EQ, S_B + 64'(8 * i));
        6: return mk(RK_ALU,  S_PC + 24, 26, 25, 0,  OP_ADD, 1'b1, 1,     BR_EQ, '0);
        7: return mk(RK_ALU,  S_PC + 28, 27, 26, 0,  OP_SRL, 1'b1, 1,     BR_EQ, '0);
        8: return mk(RK_ALU,  S_PC + 32, 28, 27, 0,  OP_OR,  1'b1, 1,     BR_EQ, '0);
        9: return mk(RK_ALU,  S_PC + 36, 29, 28, 0,  OP_AND, 1'b1, 'h3ff, BR_EQ, '0);
        default: return mk(RK_BRANCH, S_PC + 40, 0, 24, 29, OP_ADD, 1'b0, 0, BR_LT, '0);
      endcase
    end
    unique case (j)
      0: return mk(RK_LOAD,   H_PC,      20, 10, 0,  OP_ADD,  1'b0, 0, BR_EQ, H_A + 64'(8 * i));
      1: return mk(RK_LOAD,   H_PC + 4,  21, 11, 0,  OP_ADD,  1'b0, 0, BR_EQ, H_B + 64'(8 * i));
      2: return mk(RK_ALU,    H_PC + 8,  22, 20, 21, OP_ADDW, 1'b0, 0, BR_EQ, '0);
      3: return mk(RK_LOAD,   H_PC + 12, 23, 12, 0,  OP_ADD,  1'b0, 0, BR_EQ, H_C + 64'(8 * i));
      4: return mk(RK_LOAD,   H_PC + 16, 24, 13, 0,  OP_ADD,  1'b0, 0, BR_EQ, H_D + 64'(8 * i));
      5: return mk(RK_ALU,    H_PC + 20, 25, 23, 24, OP_ADDW, 1'b0, 0, BR_EQ, '0);
      default: return mk(RK_BRANCH, H_PC + 24, 0, 22, 25, OP_ADD, 1'b0, 0, BR_GE, '0);
    endcase
  endfunction

  function automatic int br_slot(input kern_e k);
    return (k == K_V) ? 1 : (k == K_H) ? 6 : 10;
  endfunction

  // ------------------------------------------------------------ event counters
  int n_alloc = 0, n_cst_wr = 0, n_trig_push = 0, n_trig_skip = 0, n_tl_issue = 0,
      n_lot_we = 0, n_dispatch = 0, n_stall = 0, n_pred = 0, n_pipe_flush = 0,
      n_flush_delta = 0, n_flush_acc = 0, n_lp_enter = 0, n_wake = 0;
  logic lp_d;

  always @(posedge clk) begin
    if (!rst_n) begin
      lp_d <= 1'b0;
    end else begin
      lp_d <= lp_mode;
      if (lp_mode && !lp_d) n_lp_enter++;
      if (dut.wake_pulse) n_wake++;
      if (dut.u_retire.alloc_valid) n_alloc++;
      if (dut.u_retire.cst_wr) n_cst_wr++;
      if (dut.u_retire.trig_push) n_trig_push++;
      if (dut.u_retire.adv_valid && !dut.u_retire.trig_push) n_trig_skip++;
      if (tl_req_valid && tl_req_ready) n_tl_issue++;
      if (|dut.u_fetch.lot_we) n_lot_we++;
      if (ev_dispatch) n_dispatch++;
      if (ev_fsm_stall) n_stall++;
      if (pipe_flush) n_pipe_flush++;
      if (dut.u_retire.flush_valid && dut.u_retire.u_btt.hit) begin
        if (!dut.u_retire.u_btt.plq_all) n_flush_delta++;
        if (dut.u_retire.u_btt.acc_nx == '0) n_flush_acc++;
      end
    end
  end

  // ------------------------------------------------------------ core model
  logic used_q [4096];
  logic pred_q [4096];

  // Runs kernel k for n iterations.  chk: compare LDBP predictions with the
  // truth; imli_right: the default predictor is right on the branches LDBP
  // predicted (else a coin, low-confidence).
  task automatic run(input kern_e k, input int n, input logic chk, input logic imli_right,
                     output int predicted);
    int fi, ri, rj;
    logic mis;
    retire_t r;
    kern = k;
    fi = 0; ri = 0; rj = 0;
    predicted = 0;
    for (int i = 0; i < n && i < 4096; i++) begin
      used_q[i] = 1'b0;
      pred_q[i] = 1'b0;
    end
    while (ri < n) begin
      @(negedge clk);
      f_valid    = 1'b0;
      pipe_flush = 1'b0;
      ret        = '0;
      // retire one instruction of iteration ri, if it has been fetched
      mis = 1'b0;
      if (ri < fi) begin
        r = inst(k, ri, rj);
        if (rj == br_slot(k)) begin
          r.br_taken  = outcome(k, ri);
          r.imli_conf = 1'b0;
          r.imli_pred = (imli_right && used_q[ri]) ? r.br_taken : 1'($urandom_range(0, 1));
          r.ldbp_used = used_q[ri];
          r.ldbp_pred = pred_q[ri];
          mis = (used_q[ri] ? pred_q[ri] : r.imli_pred) != r.br_taken;
          if (used_q[ri]) predicted++;
        end
        ret        = r;
        pipe_flush = mis;
        if (mis) fi = ri + 1;   // squash and refetch the younger iterations
        rj++;
        if (rj == ninst(k)) begin
          rj = 0;
          ri++;
        end
      end
      // fetch the branch of iteration fi
      if (!mis && fi < n && fi < ri + FMAX) begin
        f_valid = 1'b1;
        f_pc    = (k == K_V) ? V_PC + 4 : (k == K_H) ? H_PC + 24 : S_PC + 40;
        #1;
        used_q[fi] = f_pred_valid;
        pred_q[fi] = f_pred_taken;
        if (f_pred_valid) begin
          n_pred++;
          if (chk) check(f_pred_taken == outcome(k, fi),
                         $sformatf("kernel %0d iteration %0d predicted %0b", k, fi, f_pred_taken));
        end
        fi++;
      end
    end
    @(negedge clk);
    f_valid = 1'b0; pipe_flush = 1'b0; ret = '0;
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      f_valid = 1'b0; pipe_flush = 1'b0; ret = '0;
    end
  endtask

  int p;
  int c_alloc;

  initial begin
    rst_n = 1'b0; f_valid = 1'b0; f_pc = '0; pipe_flush = 1'b0; ret = '0;
    jump_at = -1; kern = K_V;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // V: vector kernel, every LDBP prediction must be right
    run(K_V, 600, 1'b1, 1'b0, p);
    $display("kernel V: %0d of 600 branches predicted by LDBP", p);
    check(p > 300, "kernel V coverage");

    // H: two-source kernel with two addw operations
    run(K_H, 600, 1'b1, 1'b0, p);
    $display("kernel H: %0d of 600 branches predicted by LDBP", p);
    check(p > 250, "kernel H coverage");

    // S: eight-operation slice, cache refusing requests in bursts -> trigger
    //    queue backpressure and, when the backlog drains, FSM stalls
    tl_burst = 1'b1;
    run(K_S, 800, 1'b1, 1'b0, p);
    $display("kernel S: %0d of 800 branches predicted by LDBP", p);
    check(p > 100, "kernel S coverage");
    tl_burst = 1'b0;

    // C: stride jump at iteration 300 -> the chain must be flushed and relearnt
    jump_at = 300;
    c_alloc = n_alloc;
    run(K_V, 900, 1'b0, 1'b0, p);
    $display("kernel C: %0d of 900 predicted, %0d delta flushes", p, n_flush_delta);
    check(n_flush_delta > 0, "delta change flushes the chain");
    check(n_alloc > c_alloc, "chain reallocated after the stride change");
    jump_at = -1;

    // D: wrong trigger data, default predictor right -> accuracy flush
    corrupt = 1'b1;
    run(K_V, 400, 1'b0, 1'b1, p);
    $display("kernel D: %0d of 400 predicted, %0d accuracy flushes", p, n_flush_acc);
    check(n_flush_acc > 0, "accuracy drop flushes the chain");
    corrupt = 1'b0;

    // idle stretch: low-power mode after IDLE_CYCLES without a prediction
    check(!lp_mode, "not in low-power mode while predicting");
    idle(100000 + 50);
    check(lp_mode, "low-power mode after the idle stretch");

    // wake-up: a candidate branch leaves low-power mode and LDBP relearns
    run(K_V, 600, 1'b1, 1'b0, p);
    $display("after wake-up: %0d of 600 predicted", p);
    check(!lp_mode, "awake after rerun");
    check(p > 300, "coverage after wake-up");

    idle(20);
    $display("events: alloc=%0d cst_wr=%0d trig_push=%0d trig_skip=%0d tl_issue=%0d lot_we=%0d",
             n_alloc, n_cst_wr, n_trig_push, n_trig_skip, n_tl_issue, n_lot_we);
    $display("events: dispatch=%0d stall=%0d pred=%0d pipe_flush=%0d flush_delta=%0d flush_acc=%0d lp=%0d wake=%0d",
             n_dispatch, n_stall, n_pred, n_pipe_flush, n_flush_delta, n_flush_acc, n_lp_enter, n_wake);
    check(n_alloc > 0, "allocation happened");
    check(n_cst_wr > 0, "snippet install happened");
    check(n_trig_push > 0, "trigger push happened");
    check(n_trig_skip > 0, "trigger backpressure happened");
    check(n_tl_issue > 0, "trigger issue happened");
    check(n_lot_we > 0, "LOT write happened");
    check(n_dispatch > 0, "FSM dispatch happened");
    check(n_stall > 0, "FSM stall happened");
    check(n_pred > 0, "LDBP prediction happened");
    check(n_pipe_flush > 0, "pipeline flush happened");
    check(n_flush_delta > 0, "delta-change flush happened");
    check(n_flush_acc > 0, "accuracy flush happened");
    check(n_lp_enter > 0, "low-power entry happened");
    check(n_wake > 0, "wake-up happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
