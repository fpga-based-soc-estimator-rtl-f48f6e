// ekf_soc_tb: checks the EKF SoC estimator against an extended Kalman
// filter written here in real arithmetic with the same model, tables, noise
// settings and initial state.  The measured voltage comes from a simulated
// battery (same second-order model, true SoC 0.80) while the filter starts
// from its default SoC0 = 1.0, so the test also checks that the estimate
// converges towards the true SoC (error below a quarter of the initial one).  The current profile discharges, rests and
// charges so that both HPPC tables are used.  Every pass compares SoC, V1,
// V2, the SoC variance and the predicted voltage, and bounds the latency.
module ekf_soc_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fx_t i_in, v_in, dn, soc, v1, v2, p_soc, y_pred;
  logic busy, done;
  logic [3:0] tab_idx;
  int checks = 0, failures = 0;

  ekf_soc dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  real chg [11][5] = '{
    '{112.318,16.21,0.937,20.15,0.750}, '{110.695,14.52,6.873,28.99,0.671},
    '{107.181,17.82,1.565,18.93,1.467}, '{103.883,18.45,0.875,26.01,3.236},
    '{103.883,38.90,0.897,20.74,2.190}, '{105.506,41.95,0.792,44.16,0.616},
    '{107.289,17.86,1.260,21.12,1.051}, '{97.865,45.99,1.469,46.31,1.456},
    '{93.830,19.43,1.722,17.45,2.005},  '{105.511,9.20,0.780,13.15,0.546},
    '{117.297,10.57,0.736,46.75,0.680}};
  real dis [11][5] = '{
    '{118.152,23.49,0.447601,2.328,2.306946}, '{116.176,9.81,0.377278,1.417,1.430313},
    '{116.176,14.19,0.340939,1.982,1.886134}, '{110.702,10.84,0.388916,5.174,0.772787},
    '{114.272,6.23,0.319658,3.128,0.677029},  '{112.429,3.51,0.838898,3.371,0.932269},
    '{105.512,5.64,0.514280,3.923,0.753494},  '{107.239,4.64,0.854056,1.184,2.098372},
    '{105.615,6.16,0.503514,1.885,2.638010},  '{105.512,6.33,0.434482,1.418,1.766140},
    '{99.014,17.08,0.417306,4.515,0.965072}};

  function automatic real voc_f(real s);
    return 11.41*s**5 - 24.38*s**4 + 17.85*s**3 - 5.233*s**2 + 0.928*s + 12.33;
  endfunction
  function automatic real dvoc_f(real s);
    return 5*11.41*s**4 - 4*24.38*s**3 + 3*17.85*s**2 - 2*5.233*s + 0.928;
  endfunction
  function automatic int row_of(real s);
    if (s < 0) return 0;
    if (s * 10.0 + 0.5 >= 10.0) return 10;
    return $rtoi(s * 10.0 + 0.5);
  endfunction

  // reference filter state
  real x [3] = '{1.0, 0.0, 0.0};
  real P [3][3] = '{'{1.0e-2, 0, 0}, '{0, 1.0e-4, 0}, '{0, 0, 1.0e-4}};
  real r_ypred;

  task automatic ref_step(input real i, input real v, input real d);
    real p [5]; real a [3]; real xm [3]; real Pm [3][3]; real h [3]; real c0, S, K [3], yp, inn;
    int r;
    r = row_of(x[0]);
    p = (i >= 0) ? chg[r] : dis[r];
    p[0] *= 1e-3; p[1] *= 1e-3; p[2] *= 1e3; p[3] *= 1e-3; p[4] *= 1e3;
    a[0] = 1.0; a[1] = $exp(-d / (p[1] * p[2])); a[2] = $exp(-d / (p[3] * p[4]));
    xm[0] = x[0] + d * i / (100.0 * 3600.0);
    xm[1] = a[1] * x[1] + p[1] * (1 - a[1]) * i;
    xm[2] = a[2] * x[2] + p[3] * (1 - a[2]) * i;
    for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++)
      Pm[m][n] = a[m] * a[n] * P[m][n] + ((m != n) ? 0.0 : (m == 0 ? 1.0e-10 : 1.0e-7));
    c0 = dvoc_f(xm[0]);
    for (int n = 0; n < 3; n++) h[n] = c0 * Pm[0][n] + Pm[1][n] + Pm[2][n];
    S = c0 * h[0] + h[1] + h[2] + 1.0e-2;
    for (int m = 0; m < 3; m++) K[m] = h[m] / S;
    yp = voc_f(xm[0]) + xm[1] + xm[2] + p[0] * i;
    inn = v - yp;
    for (int m = 0; m < 3; m++) x[m] = xm[m] + K[m] * inn;
    if (x[0] < 0) x[0] = 0; if (x[0] > 1) x[0] = 1;
    for (int m = 0; m < 3; m++) for (int n = 0; n < 3; n++) P[m][n] = Pm[m][n] - K[m] * h[n];
    r_ypred = yp;
  endtask

  // simulated battery
  real bs = 0.80, bv1 = 0, bv2 = 0;
  function automatic real battery_step(real i, real d);
    real p [5]; int r;
    r = row_of(bs);
    p = (i >= 0) ? chg[r] : dis[r];
    p[0] *= 1e-3; p[1] *= 1e-3; p[2] *= 1e3; p[3] *= 1e-3; p[4] *= 1e3;
    bs  = bs + d * i / (100.0 * 3600.0);
    bv1 = $exp(-d / (p[1] * p[2])) * bv1 + p[1] * (1 - $exp(-d / (p[1] * p[2]))) * i;
    bv2 = $exp(-d / (p[3] * p[4])) * bv2 + p[3] * (1 - $exp(-d / (p[3] * p[4]))) * i;
    return voc_f(bs) + bv1 + bv2 + p[0] * i;
  endfunction

  task automatic near(input string what, input int t, input real got, input real want, input real tol);
    real er; er = got - want; if (er < 0) er = -er;
    checks++;
    if (er > tol) begin failures++; $display("FAIL t=%0d %s got %.9f want %.9f", t, what, got, want); end
  endtask

  initial begin
    real i, v, d, err0; int lat;
    i_in = '0; v_in = '0; dn = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      i = (t < 150) ? -10.0 : (t < 200) ? 0.0 : 20.0;
      d = 1.0 + 0.5 * (t % 3);
      v = battery_step(i, d);
      @(negedge clk);
      i_in = fx_const(i); v_in = fx_const(v); dn = fx_const(d);
      ref_step(to_r(i_in), to_r(v_in), to_r(dn));
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat > 3 * (W + FRAC + 1) + 2 * (2 + 12) + 20) begin failures++; $display("FAIL latency %0d", lat); end
      near("soc",   t, to_r(soc),    x[0],    1.0e-6);
      near("v1",    t, to_r(v1),     x[1],    1.0e-6);
      near("v2",    t, to_r(v2),     x[2],    1.0e-6);
      near("p_soc", t, to_r(p_soc),  P[0][0], 1.0e-7);
      near("y_pred",t, to_r(y_pred), r_ypred, 1.0e-6);
      if (t == 0) err0 = 1.0 - bs;
    end
    // convergence: the initial 20 % error must have shrunk to below a quarter
    $display("true SoC %f estimate %f (start error %f)", bs, to_r(soc), err0);
    near("converged", 300, to_r(soc), bs, 0.25 * err0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * 600) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
