// bms_top_tb: end-to-end test of the controller in closed loop with the
// behavioural plant (converters, relay, battery, sensors, ADC).
//
// Time is compressed: the clock is declared as 100 kHz with a loop tick
// every 2000 clocks (dn = 20 ms) and 1 kHz PWM (100 clocks per period), and
// the battery is shrunk to 0.02 Ah so that the SoC moves by a useful amount
// within a few hundred loop iterations.  The float voltage is set to 13.9 V
// so that the constant-voltage top-up is reached.  Phases:
//   A  charge at +10 A           B  rest (Iref = 0)
//   C  discharge at -10 A        D  discharge at -60 A (beyond the plant)
//   E  discharge at -1 A (below the current the load draws at delta2 = 0)
//   F  charge at +10 A until the CV top-up ends at full charge
// Checks: regulated current within 0.5 A of the reference at the end of
// A and C; relay and gate outputs per mode; no gate pulses in rest; duty
// clamping in D and E; CV entry and stop at full in F; SoC estimate within
// 3 % of the plant's true SoC at the end of each phase; displayed values
// equal to the measured ones; every gate pulse width equal to the duty
// register of the PID.  Every mechanism must occur at least once.
module bms_top_tb;
  import bms_pkg::*;
  localparam real CLK_HZ = 1.0e5;
  localparam real F_SW   = 1.0e3;
  localparam int  PERIOD = 100;

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
  int n_chg = 0, n_dis = 0, n_rest = 0, n_cv = 0, n_full = 0, n_hi = 0, n_lo = 0, n_relay = 0, n_pwm = 0;

  bms_top #(.CLK_HZ(CLK_HZ), .F_SW(F_SW), .LOOP_CYCLES(2000), .Q_AH(0.02), .SOC0(0.5),
            .V_FLOAT(13.9)) dut (.*);
  battery_plant #(.CLK_HZ(CLK_HZ), .Q_AH(0.02), .SOC_INIT(0.5)) plant (
    .clk, .g1, .g2, .relay, .adc_start, .adc_valid, .adc_code, .soc_true, .i_true, .v_true);

  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction
  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // per-iteration monitor: mode/relay/gates rules and event counts
  logic relay_q;
  always @(posedge clk) if (rst_n) begin
    relay_q <= relay;
    if (relay != relay_q) n_relay++;
    if (pid_clamp_hi) n_hi++;
    if (pid_clamp_lo) n_lo++;
    if (dut.u_pid.done) begin
      unique case (mode)
        MODE_CHARGE:    n_chg++;
        MODE_DISCHARGE: n_dis++;
        MODE_CV:        n_cv++;
        default:        n_rest++;
      endcase
      if (cv_full) n_full++;
      check("relay open unless discharging", relay == (mode == MODE_DISCHARGE));
      check("idle converter duty is zero",
            (mode == MODE_DISCHARGE) ? (duty1 == '0) : (duty2 == '0));
    end
    if (disp_valid) begin
      // display shows the values of this acquisition
      check("display V", absr(to_r(disp_v) - (adc_code[0] * 25.0 / 4096.0)) < 1.0e-6);
      check("display I", absr(to_r(disp_i) - ((adc_code[1] * 5.0 / 4096.0 - 2.5) / 0.066)) < 1.0e-6);
    end
  end

  // PWM monitor: pulse width of each period against the duty register
  int hi1 = 0, hi2 = 0, cnt = 0;
  fx_t d1_prev, d2_prev;
  bit  stable = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_pwm1.period_start) begin
      if (stable && cnt == PERIOD) begin
        int w1, w2;
        w1 = $rtoi($floor(to_r(d1_prev) * PERIOD / 100.0 + 1.0e-9));
        w2 = $rtoi($floor(to_r(d2_prev) * PERIOD / 100.0 + 1.0e-9));
        check("G1 pulse width", hi1 == w1);
        check("G2 pulse width", hi2 == w2);
        n_pwm++;
      end
      stable = 1; hi1 = 0; hi2 = 0; cnt = 0;
      d1_prev = duty1; d2_prev = duty2;
    end
    if (duty1 != d1_prev || duty2 != d2_prev) stable = 0;
    hi1 += g1; hi2 += g2; cnt++;
  end

  task automatic iterations(input int n);
    repeat (n) @(posedge dut.u_pid.done);
    @(posedge clk);
  endtask

  task automatic soc_check(input string ph);
    $display("%s: true SoC %.4f estimate %.4f  I %.2f A  V %.3f V  mode %s  d1 %.2f d2 %.2f",
             ph, soc_true, to_r(disp_soc), i_true, v_true, mode.name(), to_r(duty1), to_r(duty2));
    check({ph, " SoC estimate"}, absr(to_r(disp_soc) - soc_true) < 0.03);
  endtask

  task automatic mean_current(input int n, output real m);
    m = 0;
    repeat (n) begin iterations(1); m += i_true; end
    m /= n;
  endtask

  initial begin
    real m; int g_count;
    iref = '0;
    repeat (5) @(negedge clk); rst_n = 1;

    // A: charge at +10 A
    iref = fx_const(10.0);
    iterations(90); mean_current(10, m);
    $display("A: mean current %.3f A", m);
    check("A current regulated", absr(m - 10.0) < 0.5);
    check("A mode", mode == MODE_CHARGE && !relay);
    soc_check("A");

    // B: rest
    iref = fx_const(0.0);
    iterations(3);
    g_count = 0;
    repeat (3000) begin @(posedge clk); g_count += g1 + g2; end
    check("B no gate pulses in rest", g_count == 0);
    check("B mode", mode == MODE_REST && !relay);
    iterations(20);
    soc_check("B");

    // C: discharge at -10 A
    iref = fx_const(-10.0);
    iterations(90); mean_current(10, m);
    $display("C: mean current %.3f A", m);
    check("C current regulated", absr(m + 10.0) < 0.5);
    check("C mode", mode == MODE_DISCHARGE && relay);
    soc_check("C");

    // D: demand beyond the plant: delta2 clamps at 100 %
    iref = fx_const(-60.0);
    iterations(15);
    check("D duty2 at 100 %", duty2 == fx_const(100.0));
    soc_check("D");

    // E: demand below the idle load current: delta2 clamps at 0 %
    iref = fx_const(-1.0);
    iterations(30);
    check("E duty2 at 0 %", duty2 == '0);
    soc_check("E");

    // F: charge until the CV top-up finishes
    iref = fx_const(10.0);
    for (int k = 0; k < 3000 && !cv_full; k++) iterations(1);
    check("F CV reached and finished", n_cv > 0 && cv_full);
    iterations(5);
    check("F stopped at full", mode == MODE_REST && duty1 == '0 && duty2 == '0);
    soc_check("F");

    $display("events: charge %0d discharge %0d rest %0d cv %0d full %0d clamp_hi %0d clamp_lo %0d relay %0d pwm-periods %0d overrun %0d",
             n_chg, n_dis, n_rest, n_cv, n_full, n_hi, n_lo, n_relay, n_pwm, overrun);
    check("every mechanism exercised", n_chg > 0 && n_dis > 0 && n_rest > 0 && n_cv > 0 && n_full > 0 &&
          n_hi > 0 && n_lo > 0 && n_relay > 0 && n_pwm > 0);
    check("no loop overrun", overrun == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
