// exp_neg_tb: self-checking test of the e^-x unit against $exp, over the
// range of dn/(R C) met by the battery model (0..40) plus the edge cases
// x = 0 and x < 0.  Also checks the latency 2 + 2m + TERMS clocks.
module exp_neg_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fx_t x, y;
  logic busy, done;
  int checks = 0, failures = 0;

  exp_neg dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  task automatic run(input real xr, output real yr, output int lat);
    @(negedge clk); x = fx_const(xr); start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    yr = to_r(y);
  endtask

  initial begin
    real xr, yr, ref_y, err; int lat, m, exp_lat;
    x = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      xr = (t < 200) ? $urandom_range(0, 100000) / 100000.0 * 2.0
                     : $urandom_range(0, 100000) / 100000.0 * 40.0;
      run(xr, yr, lat);
      ref_y = $exp(-to_r(fx_const(xr)));
      err = yr - ref_y; if (err < 0) err = -err;
      checks++;
      if (err > 1.0e-9 + 1.0e-7 * ref_y) begin
        failures++; $display("FAIL exp(-%f) = %g got %g", xr, ref_y, yr);
      end
      m = 0; while (xr > 0.5) begin xr = xr / 2.0; m++; end
      exp_lat = 2 + m + 12 + m;
      checks++;
      if (lat != exp_lat) begin failures++; $display("latency %0d expected %0d", lat, exp_lat); end
    end
    run(0.0, yr, lat);  checks++; if (y != FX_ONE) failures++;
    run(-1.0, yr, lat); checks++; if (y != FX_ONE) failures++;
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
