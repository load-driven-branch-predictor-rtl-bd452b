// ldbp_power_ctrl: LDBP low-power mode control.
//
// Counts the cycles since LDBP last supplied a prediction at fetch.  After
// IDLE_CYCLES such cycles LDBP enters low-power mode: every part except the
// Stride Predictor and the RTT is gated (lp_mode is the enable the other
// blocks use; their state is kept but not updated or read).  LDBP leaves the
// mode when the retirement block sees a branch that meets the condition for a
// new chain (wake).  Because the gated tables missed retirements while
// asleep, wake_pulse tells them to drop every chain and relearn.
//
// Interface and timing: pred_used and wake are sampled each cycle; lp_mode is
// registered; wake_pulse is high for the one cycle in which lp_mode falls.
//
// Paper: 100,000 idle cycles, SP and RTT stay active.  Own choices: the exit
// condition and dropping all chains on exit.
module ldbp_power_ctrl #(
  parameter int unsigned IDLE_CYCLES = 100000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic pred_used,
  input  logic wake,
  output logic lp_mode,
  output logic wake_pulse
);

  localparam int unsigned CW = $clog2(IDLE_CYCLES + 1);

  logic [CW-1:0] idle_q;
  logic          lp_q;

  assign lp_mode    = lp_q;
  assign wake_pulse = lp_q && wake;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idle_q <= '0;
      lp_q   <= 1'b0;
    end else if (lp_q) begin
      if (wake) begin
        lp_q   <= 1'b0;
        idle_q <= '0;
      end
    end else if (pred_used) begin
      idle_q <= '0;
    end else if (idle_q == CW'(IDLE_CYCLES - 1)) begin
      lp_q   <= 1'b1;
      idle_q <= '0;
    end else begin
      idle_q <= idle_q + 1'b1;
    end
  end

endmodule
