// tb_ldbp_lot: self-checking test of one Load Outcome Table entry.
//
// Random writes, releases and read addresses are applied for several thousand
// cycles and compared each cycle with a reference queue of data words and
// valid bits kept in the testbench: a write stores the word and sets the slot
// valid, a release clears it (release wins over a write to the same slot),
// clr_all clears every valid bit, and the read port returns the stored word
// in the same cycle.  Uses the default 64-slot depth.
module tb_ldbp_lot;
  import ldbp_pkg::*;

  localparam int D = OQ_DEPTH;

  logic clk = 1'b0, rst_n;
  logic we, rel, clr_all;
  logic [$clog2(D)-1:0] wslot, rel_slot, rslot;
  xword_t wdata, rdata;
  logic [D-1:0] valid;

  ldbp_lot dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  xword_t ref_d [D];
  logic [D-1:0] ref_v;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; we = 0; rel = 0; clr_all = 0; wslot = 0; rel_slot = 0; rslot = 0; wdata = 0;
    ref_v = '0;
    @(negedge clk);
    // fill every slot once so the read port is defined
    rst_n = 1'b1;
    for (int i = 0; i < D; i++) begin
      we = 1; wslot = i[$clog2(D)-1:0]; wdata = {$urandom, $urandom};
      ref_d[i] = wdata; ref_v[i] = 1'b1;
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 5000; t++) begin
      we       = ($urandom_range(0, 2) == 0);
      wslot    = $urandom_range(0, D - 1);
      wdata    = {$urandom, $urandom};
      rel      = ($urandom_range(0, 2) == 0);
      rel_slot = ($urandom_range(0, 3) == 0) ? wslot : $urandom_range(0, D - 1);
      clr_all  = ($urandom_range(0, 199) == 0);
      rslot    = $urandom_range(0, D - 1);
      #1;
      checks++;
      if (rdata !== ref_d[rslot] || valid !== ref_v) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d slot %0d data %h exp %h valid %h exp %h",
                                    t, rslot, rdata, ref_d[rslot], valid, ref_v);
      end
      @(posedge clk);
      if (we) ref_d[wslot] = wdata;
      if (clr_all) ref_v = '0;
      else begin
        if (we)  ref_v[wslot]    = 1'b1;
        if (rel) ref_v[rel_slot] = 1'b0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
