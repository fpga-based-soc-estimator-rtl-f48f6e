// cc_pid_controller_tb: runs the charging/discharging controller through a
// random sequence of controller passes (charging, discharging, rest and the
// constant-voltage top-up) and compares every output with a model of the
// control flowchart written here in real arithmetic: mode and relay from the
// sign of Iref, e / de / sum_e / de/dn, the PID duty update with the
// published gains, clamping to 0..100 %, and the CV latch at V_FLOAT with the
// stop at SOC_FULL.  It also counts the clamp events and checks the
// start-to-done latency.
module cc_pid_controller_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fx_t iref, i_bat, v_bat, soc, dn;
  logic busy, done, relay_close, full, clamp_hi, clamp_lo;
  fx_t duty1, duty2;
  mode_e mode;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_cv = 0, n_full = 0, n_chg = 0, n_dis = 0, n_rest = 0;

  cc_pid_controller dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  // reference state
  real r_d1 = 0, r_d2 = 0, r_ep = 0, r_s1 = 0, r_s2 = 0;
  bit  r_cv = 0, r_full = 0, r_relay = 0;
  mode_e r_mode = MODE_REST;

  task automatic ref_step(input real ir, input real ib, input real vb, input real s, input real d,
                          output bit hi, output bit lo);
    real e, de, der, du; bit cv_n, full_n; mode_e m;
    hi = 0; lo = 0;
    cv_n = r_cv; full_n = r_full;
    if (ir < 0)       begin m = MODE_DISCHARGE; cv_n = 0; full_n = 0; end
    else if (ir == 0) begin m = MODE_REST;      cv_n = 0; full_n = 0; end
    else begin
      if (r_cv || vb >= 16.0) cv_n = 1;
      if (cv_n && s >= 1.0) full_n = 1;
      m = full_n ? MODE_REST : (cv_n ? MODE_CV : MODE_CHARGE);
    end
    case (m)
      MODE_CHARGE:    e = ir - ib;
      MODE_CV:        e = 16.0 - vb;
      MODE_DISCHARGE: e = -(ir - ib);
      default:        e = 0;
    endcase
    if (cv_n && !r_cv) begin de = 0; r_s1 = e * d; end
    else begin
      de = e - r_ep;
      if (m == MODE_CHARGE || m == MODE_CV) r_s1 += e * d;
      if (m == MODE_DISCHARGE) r_s2 += e * d;
    end
    der = (d != 0 && m != MODE_REST) ? de / d : 0;
    case (m)
      MODE_CHARGE, MODE_CV: begin
        r_d2 = 0; r_relay = 0;
        du = r_d1 + 0.18 * e + 0.0008 * r_s1 + 0.006 * der;
        if (du > 100) begin du = 100; hi = 1; end else if (du < 0) begin du = 0; lo = 1; end
        r_d1 = du;
      end
      MODE_DISCHARGE: begin
        r_d1 = 0; r_relay = 1;
        du = r_d2 + 1.0 * e + 0.01 * r_s2 + 0.005 * der;
        if (du > 100) begin du = 100; hi = 1; end else if (du < 0) begin du = 0; lo = 1; end
        r_d2 = du;
      end
      default: begin r_d1 = 0; r_d2 = 0; r_relay = 0; end
    endcase
    r_ep = e; r_cv = cv_n; r_full = full_n; r_mode = m;
  endtask

  task automatic near(input string what, input real got, input real want);
    real er; er = got - want; if (er < 0) er = -er;
    checks++;
    if (er > 1.0e-6 * (1.0 + (want < 0 ? -want : want))) begin
      failures++; $display("FAIL %s got %f want %f", what, got, want);
    end
  endtask

  initial begin
    real ir, ib, vb, s, d; bit hi, lo; int lat, phase;
    iref = '0; i_bat = '0; v_bat = '0; soc = '0; dn = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      phase = t / 40;       // blocks of 40 passes in one regime
      case (phase % 5)
        0: begin ir = 10.0;  ib = $urandom_range(0, 2000) / 100.0;    vb = 13.0; end
        1: begin ir = -10.0; ib = -($urandom_range(0, 2000) / 100.0); vb = 12.0; end
        2: begin ir = 0.0;   ib = 0.0;                                 vb = 12.5; end
        3: begin ir = 25.0;  ib = (t % 40 < 20) ? 0.0 : 28.0;          vb = 14.0; end
        default: begin ir = 5.0; ib = 4.0; vb = (t % 40 < 10) ? 15.0 : 16.0 + $urandom_range(0, 100) / 100.0; end
      endcase
      if (phase % 5 == 1 && t % 40 < 15)  ib = 0.0;     // no response: delta2 hits 100 %
      if (phase % 5 == 1 && t % 40 >= 30) ib = -40.0;   // drive delta2 to its lower clamp
      s  = (phase % 5 == 4 && t % 40 >= 30) ? 1.0 : 0.9;
      d  = (t == 0) ? 0.0 : 0.01 * $urandom_range(1, 100);
      @(negedge clk);
      iref = fx_const(ir); i_bat = fx_const(ib); v_bat = fx_const(vb); soc = fx_const(s); dn = fx_const(d);
      ref_step(to_r(iref), to_r(i_bat), to_r(v_bat), to_r(soc), to_r(dn), hi, lo);
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != ((dn != 0 && r_mode != MODE_REST) ? W + FRAC + 4 : 2)) begin
        failures++; $display("FAIL latency %0d", lat);
      end
      near("duty1", to_r(duty1), r_d1);
      near("duty2", to_r(duty2), r_d2);
      checks++;
      if (relay_close != r_relay || mode != r_mode || full != r_full) begin
        failures++; $display("FAIL t=%0d relay %0b/%0b mode %s/%s full %0b/%0b", t, relay_close, r_relay,
                             mode.name(), r_mode.name(), full, r_full);
      end
      checks++;
      if (clamp_hi != hi || clamp_lo != lo) begin failures++; $display("FAIL clamp flags t=%0d", t); end
      n_hi += clamp_hi; n_lo += clamp_lo; n_full += full;
      n_cv += (mode == MODE_CV); n_chg += (mode == MODE_CHARGE);
      n_dis += (mode == MODE_DISCHARGE); n_rest += (mode == MODE_REST);
    end
    $display("events: charge %0d discharge %0d rest %0d cv %0d full %0d clamp_hi %0d clamp_lo %0d",
             n_chg, n_dis, n_rest, n_cv, n_full, n_hi, n_lo);
    checks++;
    if (n_chg == 0 || n_dis == 0 || n_rest == 0 || n_cv == 0 || n_full == 0 || n_hi == 0 || n_lo == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
