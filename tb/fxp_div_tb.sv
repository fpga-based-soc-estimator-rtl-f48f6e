// fxp_div_tb: self-checking test of the sequential fixed-point divider.
// Random signed operands of mixed magnitudes are divided and compared with
// the quotient computed in real arithmetic; division by zero and overflow
// must saturate with the right sign; done must follow start by
// exactly W+FRAC+1 clocks.
module fxp_div_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  fx_t num, den, quo;
  logic busy, done;
  int checks = 0, failures = 0;

  fxp_div dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  task automatic run(input fx_t n, input fx_t d, output fx_t q, output int lat);
    @(negedge clk); num = n; den = d; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    q = quo;
  endtask

  initial begin
    fx_t q; int lat; real rn, rd, rq, err;
    num = '0; den = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      rn = ($urandom_range(0, 2000000) - 1000000.0) / 1000.0 / (10.0 ** $urandom_range(0, 6));
      rd = ($urandom_range(1, 2000000) - 1000000.5) / 1000.0 / (10.0 ** $urandom_range(0, 4));
      run(fx_const(rn), fx_const(rd), q, lat);
      rq = to_r(fx_const(rn)) / to_r(fx_const(rd));
      checks++;
      if (rq > 8.0e6 || rq < -8.0e6) begin
        if (q != (rq > 0 ? FX_MAX : FX_MIN)) begin failures++; $display("sat fail %f/%f", rn, rd); end
      end else begin
        err = to_r(q) - rq; if (err < 0) err = -err;
        if (err > 2.0e-12 * (1.0 + (rq < 0 ? -rq : rq))) begin
          failures++; $display("FAIL %g / %g = %g got %g", rn, rd, rq, to_r(q));
        end
      end
      checks++;
      if (lat != W + FRAC + 1) begin failures++; $display("latency %0d", lat); end
    end
    // division by zero
    run(fx_const(3.0), '0, q, lat);  checks++; if (q != FX_MAX) failures++;
    run(fx_const(-3.0), '0, q, lat); checks++; if (q != FX_MIN) failures++;
    // exact small cases
    run(fx_const(1.0), fx_const(4.0), q, lat);  checks++; if (q != fx_const(0.25)) failures++;
    run(fx_const(-7.5), fx_const(2.5), q, lat); checks++; if (q != fx_const(-3.0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
