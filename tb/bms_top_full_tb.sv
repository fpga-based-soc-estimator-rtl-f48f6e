// bms_top_full_tb: the controller at its default parameters (50 MHz clock,
// 10 ms control loop, 20 kHz PWM, 100 Ah battery starting full, SoC0 = 1)
// in closed loop with the behavioural plant.  It runs one complete
// operation: 40 loop iterations discharging at -10 A, 5 at rest and 100
// charging at +10 A (the charging gains are slow: delta1 first has to ramp
// up to the battery-to-source voltage ratio before current flows), and checks that the battery current settles within
// 0.5 A of each reference, that the relay and gates follow the mode, that
// the gate pulse period is 2500 clocks, and that the SoC estimate stays
// within 0.5 % of the plant's true SoC.
module bms_top_full_tb;
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

  bms_top dut (.*);
  battery_plant plant (
    .clk, .g1, .g2, .relay, .adc_start, .adc_valid, .adc_code, .soc_true, .i_true, .v_true);

  always #10 clk = ~clk;   // 50 MHz

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction
  function automatic real absr(real v); return v < 0 ? -v : v; endfunction
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic iterations(input int n);
    repeat (n) @(posedge disp_valid);
    @(posedge dut.u_pid.done);
    @(posedge clk);
  endtask

  // gate pulse period measured on the active gate: rising edges must lie a
  // whole number of 2500-clock periods apart (a period at 0 % or 100 % duty
  // has no rising edge), and most must be exactly one period apart
  longint last_rise1 = -1, last_rise2 = -1, cyc = 0;
  int bad_period = 0, periods = 0;
  logic g1_q = 0, g2_q = 0;
  always @(posedge clk) begin
    cyc++;
    g1_q <= g1; g2_q <= g2;
    if (rst_n && g1 && !g1_q) begin
      if (last_rise1 >= 0 && (cyc - last_rise1) % 2500 != 0) begin
        bad_period++; $display("G1 rising edge %0d clocks after the previous one (cycle %0d)", cyc - last_rise1, cyc);
      end
      if (cyc - last_rise1 == 2500) periods++;
      last_rise1 = cyc;
    end
    if (rst_n && g2 && !g2_q) begin
      if (last_rise2 >= 0 && (cyc - last_rise2) % 2500 != 0) begin
        bad_period++; $display("G2 rising edge %0d clocks after the previous one (cycle %0d)", cyc - last_rise2, cyc);
      end
      if (cyc - last_rise2 == 2500) periods++;
      last_rise2 = cyc;
    end
  end

  initial begin
    iref = '0;
    repeat (5) @(negedge clk); rst_n = 1;

    iref = fx_const(-10.0);
    iterations(40);
    $display("discharge: I %.3f A  V %.3f V  d2 %.2f %%  SoC true %.6f est %.6f",
             i_true, v_true, to_r(duty2), soc_true, to_r(disp_soc));
    check("discharge current", absr(i_true + 10.0) < 0.5);
    check("discharge relay and mode", relay && mode == MODE_DISCHARGE && duty1 == '0);
    check("discharge SoC", absr(to_r(disp_soc) - soc_true) < 0.005);

    iref = fx_const(0.0);
    iterations(5);
    check("rest", !relay && mode == MODE_REST && duty1 == '0 && duty2 == '0);

    iref = fx_const(10.0);
    iterations(100);
    $display("charge: I %.3f A  V %.3f V  d1 %.2f %%  SoC true %.6f est %.6f",
             i_true, v_true, to_r(duty1), soc_true, to_r(disp_soc));
    check("charge current", absr(i_true - 10.0) < 0.5);
    check("charge relay and mode", !relay && mode == MODE_CHARGE && duty2 == '0);
    check("charge SoC", absr(to_r(disp_soc) - soc_true) < 0.005);

    if (bad_period != 0 || periods <= 100) $display("period errors %0d, exact periods %0d", bad_period, periods);
    check("PWM period 2500 clocks", bad_period == 0 && periods > 100);
    check("no loop overrun", overrun == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (120_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
