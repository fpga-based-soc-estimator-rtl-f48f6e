// ocv_poly_tb: compares Voc(s) and dVoc/ds of the fixed-point Horner
// evaluation with the same polynomials evaluated in real arithmetic from
// the published coefficients, on a sweep of SoC values, and checks the end
// points Voc(0) = 12.33 V and Voc(1) = 12.905 V.
module ocv_poly_tb;
  import bms_pkg::*;
  fx_t soc, voc, dvoc;
  int checks = 0, failures = 0;
  ocv_poly dut (.*);

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  task automatic check(input string what, input real got, input real want, input real tol);
    real e; e = got - want; if (e < 0) e = -e;
    checks++;
    if (e > tol) begin failures++; $display("FAIL %s got %f want %f", what, got, want); end
  endtask

  initial begin
    real s, v_ref, d_ref;
    for (int k = 0; k <= 200; k++) begin
      s = k / 200.0;
      soc = fx_const(s);
      #1;
      s = to_r(soc);
      v_ref = 11.41*s**5 - 24.38*s**4 + 17.85*s**3 - 5.233*s**2 + 0.928*s + 12.33;
      d_ref = 5*11.41*s**4 - 4*24.38*s**3 + 3*17.85*s**2 - 2*5.233*s + 0.928;
      check("voc", to_r(voc), v_ref, 1.0e-9);
      check("dvoc", to_r(dvoc), d_ref, 1.0e-9);
    end
    soc = fx_const(0.0); #1; check("voc(0)", to_r(voc), 12.33, 1.0e-9);
    soc = fx_const(1.0); #1; check("voc(1)", to_r(voc), 12.905, 1.0e-9);
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
