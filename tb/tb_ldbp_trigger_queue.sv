// tb_ldbp_trigger_queue: self-checking test of the trigger-load queue.
//
// Pushes random groups of 0..5 addresses whenever the reported space allows,
// pops with a random ready, and compares the issued address stream, the
// valid flag and the space output with a reference FIFO.  A clear in the
// middle must empty the queue.  Uses the default depth of 8.
module tb_ldbp_trigger_queue;
  import ldbp_pkg::*;

  localparam int DEPTH = 8;

  logic clk = 1'b0, rst_n, clr;
  nl_t push_n;
  xword_t [MAX_LOADS-1:0] push_addr;
  logic [3:0] space;
  logic req_valid, req_ready;
  xword_t req_addr;

  ldbp_trigger_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  xword_t q[$];
  int n_full = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clr = 0; push_n = 0; push_addr = '0; req_ready = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      int n;
      #1;
      check(space == 4'(DEPTH - q.size()), $sformatf("space %0d exp %0d", space, DEPTH - q.size()));
      check(req_valid == (q.size() != 0), "req_valid");
      if (q.size() != 0) check(req_addr == q[0], $sformatf("req_addr %h exp %h", req_addr, q[0]));
      if (q.size() == DEPTH) n_full++;
      n = $urandom_range(0, MAX_LOADS);
      if (n > int'(space)) n = 0;
      push_n = nl_t'(n);
      for (int k = 0; k < MAX_LOADS; k++) push_addr[k] = {$urandom, $urandom};
      req_ready = (t % 1000 < 500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      clr = (t == 3000);
      @(posedge clk);
      if (clr) q.delete();
      else begin
        if (req_valid && req_ready) void'(q.pop_front());
        for (int k = 0; k < n; k++) q.push_back(push_addr[k]);
      end
      @(negedge clk);
      push_n = 0; clr = 0;
    end
    check(n_full > 0, "queue was full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
