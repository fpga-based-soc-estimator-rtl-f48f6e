// pwm_gen: gate-drive pulse generator for one converter switch (G1 or G2).
//
// A counter runs from 0 to PERIOD-1 with PERIOD = CLK_HZ / F_SW clocks; the
// output is high while the counter is below the threshold
// round_down(duty * PERIOD / 100), duty being the duty cycle in percent as
// produced by the PID controller.  The threshold is reloaded only when the
// counter wraps, so a duty change never produces a runt pulse.  Duty values
// outside 0..100 % are clamped.
//
// The paper states only that the FPGA generates square-wave pulses; the
// 20 kHz default switching frequency is taken from the inductor rating in
// its component list, the 50 MHz clock is an assumption.
//
// Timing: a new duty takes effect at the start of the next PWM period;
// period_start pulses in the first clock of each period.
module pwm_gen
  import bms_pkg::*;
#(
  parameter real CLK_HZ = 50.0e6,
  parameter real F_SW   = 20.0e3
)(
  input  logic clk,
  input  logic rst_n,
  input  fx_t  duty,          // percent
  output logic pwm,
  output logic period_start
);
  localparam int PERIOD = int'(CLK_HZ / F_SW);
  localparam int CW     = $clog2(PERIOD + 1);
  localparam fx_t K_THR = fx_const(real'(PERIOD) / 100.0);

  logic [CW-1:0] cnt, thr;
  logic [CW-1:0] thr_next;

  always_comb begin
    fx_t t;
    t = fx_mul(duty, K_THR) >>> FRAC;
    if (t[W-1])                   thr_next = '0;
    else if (t >= fx_t'(PERIOD))  thr_next = CW'(PERIOD);
    else                          thr_next = CW'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      thr <= '0;
    end else begin
      if (cnt == CW'(PERIOD - 1)) begin
        cnt <= '0;
        thr <= thr_next;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb pwm          = (cnt < thr);
  always_comb period_start = (cnt == '0);
endmodule
