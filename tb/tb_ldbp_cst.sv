// tb_ldbp_cst: self-checking test of the Code Snippet Table.
//
// Writes random snippets to random entries and reads random entries every
// cycle, comparing with a reference array; a write becomes visible on the
// read port the cycle after the clock edge.  Reset must leave every entry
// empty (zero operations).
module tb_ldbp_cst;
  import ldbp_pkg::*;

  logic clk = 1'b0, rst_n;
  logic wr_valid;
  btt_idx_t wr_idx, rd_idx;
  snippet_t wr_snip, rd_snip;

  ldbp_cst dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  snippet_t ref_t [BTT_ENTRIES];

  function automatic snippet_t rnd_snip();
    logic [$bits(snippet_t)-1:0] v;
    for (int b = 0; b < $bits(snippet_t); b += 32) v[b +: 32] = $urandom;
    return snippet_t'(v);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; wr_valid = 0; wr_idx = 0; rd_idx = 0; wr_snip = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < BTT_ENTRIES; i++) begin
      rd_idx = btt_idx_t'(i);
      #1;
      checks++;
      if (rd_snip.nops != 0) begin failures++; $display("FAIL: entry %0d not empty after reset", i); end
      ref_t[i] = '0;
      @(negedge clk);
    end
    for (int t = 0; t < 3000; t++) begin
      wr_valid = ($urandom_range(0, 1) == 0);
      wr_idx   = btt_idx_t'($urandom_range(0, BTT_ENTRIES - 1));
      wr_snip  = rnd_snip();
      rd_idx   = btt_idx_t'($urandom_range(0, BTT_ENTRIES - 1));
      #1;
      checks++;
      if (rd_snip !== ref_t[rd_idx]) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d entry %0d mismatch", t, rd_idx);
      end
      @(posedge clk);
      if (wr_valid) ref_t[wr_idx] = wr_snip;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
