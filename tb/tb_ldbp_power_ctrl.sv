// tb_ldbp_power_ctrl: self-checking test of the low-power controller.
//
// Runs with the default 100,000-cycle idle limit.  Checks that predictions
// keep the predictor awake, that low-power mode starts exactly IDLE_CYCLES
// cycles after the last prediction, that wake_pulse is high only while in
// low-power mode with wake asserted, and that wake leaves the mode in the
// next cycle and restarts the idle count.
module tb_ldbp_power_ctrl;

  localparam int IDLE = 100000;

  logic clk = 1'b0, rst_n, pred_used, wake, lp_mode, wake_pulse;

  ldbp_power_ctrl dut (.*);

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
    repeat (5 * IDLE) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    rst_n = 1'b0; pred_used = 0; wake = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    // predictions every few hundred cycles keep it awake
    for (int t = 0; t < 3 * IDLE / 2; t++) begin
      pred_used = ($urandom_range(0, 999) == 0) || (t % 5000 == 0);
      wake = ($urandom_range(0, 9) == 0);
      #1;
      check(!lp_mode && !wake_pulse, "awake while predicting");
      @(negedge clk);
    end
    // idle: count cycles until low-power mode
    pred_used = 1; @(negedge clk);
    pred_used = 0; wake = 0;
    n = 0;
    while (!lp_mode && n < 2 * IDLE) begin
      @(negedge clk);
      n++;
    end
    check(n == IDLE, $sformatf("entered low-power after %0d idle cycles, expected %0d", n, IDLE));
    // stays in low-power mode, predictions do not matter, no pulse without wake
    for (int t = 0; t < 1000; t++) begin
      pred_used = 1'($urandom_range(0, 1));
      #1;
      check(lp_mode && !wake_pulse, "stays in low-power mode");
      @(negedge clk);
    end
    wake = 1;
    #1;
    check(wake_pulse, "wake pulse while in low-power mode");
    @(negedge clk);
    wake = 0; pred_used = 0;
    #1;
    check(!lp_mode && !wake_pulse, "left low-power mode");
    n = 0;
    while (!lp_mode && n < 2 * IDLE) begin
      @(negedge clk);
      n++;
    end
    check(n == IDLE, $sformatf("second entry after %0d cycles", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
