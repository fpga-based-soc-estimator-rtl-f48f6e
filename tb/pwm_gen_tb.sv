// pwm_gen_tb: runs the generator at its default 50 MHz / 20 kHz (2500
// clocks per period) and measures, for a series of duty values including
// values below 0 % and above 100 %, the period and the high time of the
// pulse train, comparing them with floor(duty * 2500 / 100) clamped to
// 0..2500.  A duty change must take effect only at the next period start.
module pwm_gen_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0;
  fx_t duty;
  logic pwm, period_start;
  int checks = 0, failures = 0;
  pwm_gen dut (.*);
  always #5 clk = ~clk;

  real duties [10] = '{0.0, 50.0, 100.0, 12.34, 99.99, -5.0, 150.0, 0.05, 73.5, 33.3333};

  initial begin
    int high, len, want;
    duty = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (duties[k]) begin
      // change duty mid-period, then measure the next full period
      while (!period_start) @(negedge clk);
      repeat (700) @(negedge clk);
      duty = fx_const(duties[k]);
      high = 0; len = 0;
      while (!period_start) begin high += pwm; @(negedge clk); end
      checks++;   // rest of the old period must keep the old threshold
      if (k > 0) begin
        want = (duties[k-1] <= 0.0) ? 0 : (duties[k-1] >= 100.0) ? 2500 : $rtoi($floor(duties[k-1] * 25.0));
        if (want > 700) want = want - 700; else want = 0;
        if (high != want) begin failures++; $display("FAIL old-period tail %0d want %0d", high, want); end
      end
      high = 0;
      do begin high += pwm; len++; @(negedge clk); end while (!period_start);
      want = (duties[k] <= 0.0) ? 0 : (duties[k] >= 100.0) ? 2500 : $rtoi($floor(duties[k] * 25.0));
      checks++;
      if (len != 2500) begin failures++; $display("FAIL period %0d", len); end
      checks++;
      if (high != want) begin failures++; $display("FAIL duty %f high %0d want %0d", duties[k], high, want); end
    end
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
