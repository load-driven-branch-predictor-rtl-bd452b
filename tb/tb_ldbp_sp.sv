// tb_ldbp_sp: self-checking test of the Stride Predictor.
//
// Loads from a handful of PCs (some aliasing on the same entry) retire with
// mostly constant strides and occasional jumps.  A reference model kept here
// (tag, last address, delta, 3-bit confidence +1 on a repeat and -4 on a
// change, tracking bit) predicts every output: predictable only when the
// delta repeats with saturated confidence, delta-changed for a tracked entry
// whose delta changed or that is replaced, and the read ports.  Tracking bits
// are set and cleared at random.  A directed part checks that a new stride
// becomes predictable on the seventh repeat of its delta (the ninth access).
module tb_ldbp_sp;
  import ldbp_pkg::*;

  localparam int E = SP_ENTRIES;

  logic clk = 1'b0, rst_n;
  logic ld_valid, ld_predictable, ld_tracking, ld_delta_changed, clr_all_track;
  xword_t ld_pc, ld_addr;
  sp_idx_t ld_idx;
  sp_idx_t [MAX_LOADS-1:0] rd_idx, set_idx, clr_idx;
  xword_t  [MAX_LOADS-1:0] rd_lastaddr;
  delta_t  [MAX_LOADS-1:0] rd_delta;
  logic    [MAX_LOADS-1:0] set_track, clr_track;

  ldbp_sp dut (.*);

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

  // reference
  logic   m_v [E];
  xword_t m_tag [E];
  xword_t m_last [E];
  longint m_delta [E];
  int     m_conf [E];
  logic   m_trk [E];

  xword_t pcs [6] = '{64'h400, 64'h404, 64'h408, 64'h400 + 64'(2 * E), 64'h520, 64'h7ff0};
  xword_t addr_of [6];
  longint stride_of [6];
  int n_pred = 0, n_chg = 0;

  initial begin
    rst_n = 1'b0; ld_valid = 0; ld_pc = 0; ld_addr = 0; rd_idx = '0; set_idx = '0; clr_idx = '0;
    set_track = '0; clr_track = '0; clr_all_track = 0;
    for (int i = 0; i < E; i++) begin
      m_v[i] = 0; m_trk[i] = 0; m_conf[i] = 0; m_delta[i] = 0; m_last[i] = 0; m_tag[i] = 0;
    end
    for (int p = 0; p < 6; p++) begin
      addr_of[p] = 64'h10000 * (p + 1);
      stride_of[p] = (p == 5) ? -8 : 4 * (p + 1);
    end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    // directed: confidence saturates after 7 repeats of the delta; the first
    // access allocates, the second sets the delta
    for (int n = 0; n < 10; n++) begin
      ld_valid = 1; ld_pc = 64'h900; ld_addr = 64'h5000 + 64'(8 * n);
      #1;
      check(ld_predictable == (n >= 8), $sformatf("directed: access %0d predictable=%0b", n, ld_predictable));
      @(negedge clk);
    end
    ld_valid = 0;
    m_v[(64'h900 >> 1) % E] = 1; m_tag[(64'h900 >> 1) % E] = (64'h900 >> 1) / E;
    m_last[(64'h900 >> 1) % E] = 64'h5000 + 8 * 9; m_delta[(64'h900 >> 1) % E] = 8;
    m_conf[(64'h900 >> 1) % E] = 7;
    for (int t = 0; t < 20000; t++) begin
      int p, idx;
      xword_t tag, a;
      longint d;
      logic hit, same, pred, chg;
      int cn;
      p = $urandom_range(0, 5);
      if ($urandom_range(0, 29) == 0) addr_of[p] += 64'($urandom_range(1, 40));  // jump
      addr_of[p] += stride_of[p];
      if ($urandom_range(0, 999) == 0) addr_of[p] += 64'h100000;               // delta too big
      a = addr_of[p];
      ld_valid = ($urandom_range(0, 3) != 0);
      ld_pc = pcs[p]; ld_addr = a;
      for (int k = 0; k < MAX_LOADS; k++) begin
        rd_idx[k]    = sp_idx_t'($urandom_range(0, E - 1));
        set_track[k] = ($urandom_range(0, 19) == 0);
        set_idx[k]   = sp_idx_t'((pcs[$urandom_range(0, 5)] >> 1) % E);
        clr_track[k] = ($urandom_range(0, 39) == 0);
        clr_idx[k]   = sp_idx_t'((pcs[$urandom_range(0, 5)] >> 1) % E);
      end
      clr_all_track = ($urandom_range(0, 499) == 0);
      idx = int'((ld_pc >> 1) % E);
      tag = ((ld_pc >> 1) / E) & 64'h3ff;
      hit = m_v[idx] && m_tag[idx] == tag;
      d = longint'(a - m_last[idx]);
      same = (d >= -32768 && d <= 32767) && d == m_delta[idx];
      if (!hit) cn = 0;
      else if (same) cn = (m_conf[idx] == 7) ? 7 : m_conf[idx] + 1;
      else cn = (m_conf[idx] > 4) ? m_conf[idx] - 4 : 0;
      pred = hit && same && cn == 7 && m_delta[idx] != 0;
      chg  = ld_valid && m_trk[idx] && m_v[idx] && (!hit || !same);
      #1;
      check(ld_idx == sp_idx_t'(idx), "ld_idx");
      check(ld_predictable == pred, $sformatf("t=%0d pc %h predictable %0b exp %0b", t, ld_pc, ld_predictable, pred));
      check(ld_tracking == (hit && m_trk[idx]), "ld_tracking");
      check(ld_delta_changed == chg, $sformatf("t=%0d delta_changed %0b exp %0b", t, ld_delta_changed, chg));
      for (int k = 0; k < MAX_LOADS; k++)
        check(rd_lastaddr[k] == m_last[rd_idx[k]] && longint'(rd_delta[k]) == m_delta[rd_idx[k]],
              "read port");
      if (ld_valid && pred) n_pred++;
      if (chg) n_chg++;
      @(posedge clk);
      if (ld_valid) begin
        m_last[idx] = a;
        m_conf[idx] = cn;
        if (!hit) begin
          m_v[idx] = 1; m_tag[idx] = tag; m_delta[idx] = 0; m_trk[idx] = 0;
        end else if (!same) m_delta[idx] = (d >= -32768 && d <= 32767) ? d : 0;
      end
      for (int k = 0; k < MAX_LOADS; k++) if (set_track[k]) m_trk[set_idx[k]] = 1;
      for (int k = 0; k < MAX_LOADS; k++) if (clr_track[k]) m_trk[clr_idx[k]] = 0;
      if (clr_all_track) for (int i = 0; i < E; i++) m_trk[i] = 0;
      @(negedge clk);
    end
    check(n_pred > 100 && n_chg > 10, $sformatf("coverage pred=%0d chg=%0d", n_pred, n_chg));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
