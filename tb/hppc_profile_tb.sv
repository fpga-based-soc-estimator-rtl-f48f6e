// hppc_profile_tb: drives the controller through the current profile of a
// hybrid pulse power characterisation (HPPC) test as used to obtain the
// battery model: at each SoC step an impulse discharge (-20 A) and an impulse
// charge (+15 A), each followed by rest, then a -10 A discharge that
// moves the SoC down to the next step, then rest.  The charge pulse is
// 15 A rather than 20 A because the test plant's 24 V source behind 0.5 ohm
// can push at most about 19 A into a 14.4 V battery; at 20 A the charge
// duty saturates at 100 % and the target cannot be reached.  Time is compressed as in
// bms_top_tb (100 kHz nominal clock, 20 ms loop, 1 kHz PWM, 0.2 Ah
// battery).  For each pulse the battery current averaged over the last ten
// loop iterations must be within 1 A of the reference, the relay must
// follow the mode, the current must be zero in every rest, and the SoC
// estimate must stay within 3 % of the true SoC.  Three SoC steps are run.
module hppc_profile_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0;
  fx_t  iref;
  fx_t  disp_v, disp_i, disp_soc, duty1, duty2, v_load, i_load, soc_var, v_pred;
  logic disp_valid, adc_start, adc_valid, g1, g2, relay, pid_clamp_hi, pid_clamp_lo, cv_full;
  logic [11:0] adc_code [4];
  logic [15:0] overrun;
  logic [3:0]  ecm_row;
  mode_e mode;
  real soc_true, i_true, v_true;
  int checks = 0, failures = 0;

  bms_top #(.CLK_HZ(1.0e5), .F_SW(1.0e3), .LOOP_CYCLES(2000), .Q_AH(0.2), .SOC0(0.8)) dut (.*);
  battery_plant #(.CLK_HZ(1.0e5), .Q_AH(0.2), .SOC_INIT(0.8)) plant (
    .clk, .g1, .g2, .relay, .adc_start, .adc_valid, .adc_code, .soc_true, .i_true, .v_true);

  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction
  function automatic real absr(real v); return v < 0 ? -v : v; endfunction
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic iterations(input int n);
    repeat (n) @(posedge dut.u_pid.done);
    @(posedge clk);
  endtask

  task automatic pulse(input string what, input real amps, input int n);
    real m;
    iref = fx_const(amps);
    iterations(n - 10);
    m = 0;
    repeat (10) begin iterations(1); m += i_true; end
    m /= 10;
    $display("%s %6.1f A: mean %7.3f A  V %.3f  SoC true %.4f est %.4f", what, amps, m, v_true,
             soc_true, to_r(disp_soc));
    check({what, " current"}, absr(m - amps) < 1.0);
    check({what, " relay"}, relay == (amps < 0));
    check({what, " SoC"}, absr(to_r(disp_soc) - soc_true) < 0.03);
  endtask

  initial begin
    iref = '0;
    repeat (5) @(negedge clk); rst_n = 1;
    for (int step = 0; step < 3; step++) begin
      pulse("impulse discharge", -20.0, 60);
      pulse("rest             ", 0.0, 20);
      check("rest current zero", i_true == 0.0);
      pulse("impulse charge   ", 15.0, 200);
      pulse("rest             ", 0.0, 20);
      pulse("discharge step   ", -10.0, 800);
      pulse("rest             ", 0.0, 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
