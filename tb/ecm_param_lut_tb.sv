// ecm_param_lut_tb: checks the nearest-row selection (round(10 s), clamped)
// and the stored values of both HPPC tables, compared with the published
// rows converted to ohms and farads here.
module ecm_param_lut_tb;
  import bms_pkg::*;
  fx_t soc;
  logic charging;
  logic [3:0] idx;
  ecm_prm_t prm;
  int checks = 0, failures = 0;
  ecm_param_lut dut (.*);

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  // Rows of the published tables: R0, R1 (mOhm), C1 (kF), R2 (mOhm), C2 (kF).
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

  task automatic near(input string what, input real got, input real want);
    real e; e = got - want; if (e < 0) e = -e;
    checks++;
    if (e > 1.0e-9 * (1.0 + want)) begin failures++; $display("FAIL %s got %g want %g", what, got, want); end
  endtask

  initial begin
    real s; int want_idx; real row [5];
    for (int k = -20; k <= 120; k++) begin
      s = k / 100.0 + 0.001;
      for (int c = 0; c < 2; c++) begin
        soc = fx_const(s); charging = c[0];
        #1;
        want_idx = (s < 0.0) ? 0 : (s >= 0.95 ? 10 : $rtoi(s * 10.0 + 0.5));
        checks++;
        if (idx != want_idx) begin failures++; $display("FAIL idx s=%f got %0d want %0d", s, idx, want_idx); end
        row = charging ? chg[want_idx] : dis[want_idx];
        near("r0", to_r(prm.r0), row[0] * 1.0e-3);
        near("r1", to_r(prm.r1), row[1] * 1.0e-3);
        near("c1", to_r(prm.c1), row[2] * 1.0e3);
        near("r2", to_r(prm.r2), row[3] * 1.0e-3);
        near("c2", to_r(prm.c2), row[4] * 1.0e3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
