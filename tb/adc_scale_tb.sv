// adc_scale_tb: drives random 12-bit codes on the four channels and checks
// the volts and amperes against the sensor equations evaluated here
// (5:1 divider; ACS712-30A, 2.5 V at 0 A, 66 mV/A; 5 V, 12-bit ADC), and
// the one-clock latency of meas_valid.
module adc_scale_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, adc_valid = 0;
  logic [11:0] adc_code [4];
  logic meas_valid;
  meas_t meas;
  int checks = 0, failures = 0;
  adc_scale dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction
  task automatic near(input string what, input real got, input real want);
    real e; e = got - want; if (e < 0) e = -e;
    checks++;
    if (e > 1.0e-6) begin failures++; $display("FAIL %s got %f want %f", what, got, want); end
  endtask

  initial begin
    int c [4];
    for (int k = 0; k < 4; k++) adc_code[k] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < 4; k++) begin
        c[k] = (t == 0) ? 0 : (t == 1) ? 4095 : (t == 2) ? 2048 : $urandom_range(0, 4095);
        adc_code[k] = 12'(c[k]);
      end
      adc_valid = 1;
      @(negedge clk);
      adc_valid = 0;
      checks++; if (!meas_valid) begin failures++; $display("FAIL meas_valid"); end
      near("v_bat",  to_r(meas.v_bat),  c[0] * 5.0 / 4096.0 * 5.0);
      near("i_bat",  to_r(meas.i_bat),  (c[1] * 5.0 / 4096.0 - 2.5) / 0.066);
      near("v_load", to_r(meas.v_load), c[2] * 5.0 / 4096.0 * 5.0);
      near("i_load", to_r(meas.i_load), (c[3] * 5.0 / 4096.0 - 2.5) / 0.066);
      @(negedge clk);
      checks++; if (meas_valid) begin failures++; $display("FAIL meas_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
