// sample_timer_tb: issues sample pulses at random spacings and checks that
// dn equals the spacing in clocks divided by the clock frequency (50 MHz
// default), with dn_valid one clock after the sample.
module sample_timer_tb;
  import bms_pkg::*;
  logic clk = 0, rst_n = 0, sample = 0;
  logic dn_valid;
  fx_t dn;
  logic [31:0] dn_cycles;
  int checks = 0, failures = 0;
  sample_timer dut (.*);
  always #5 clk = ~clk;

  function automatic real to_r(fx_t v); return real'(v) / (2.0 ** FRAC); endfunction

  initial begin
    int gap; real e;
    repeat (3) @(negedge clk); rst_n = 1;
    sample = 1; @(negedge clk); sample = 0;   // first sample: interval since reset
    for (int t = 0; t < 100; t++) begin
      gap = (t == 0) ? 1 : $urandom_range(1, 3000);
      repeat (gap - 1) @(negedge clk);
      sample = 1; @(negedge clk); sample = 0;
      checks++;
      if (!dn_valid || dn_cycles != 32'(gap)) begin
        failures++; $display("FAIL gap %0d got %0d valid %0b", gap, dn_cycles, dn_valid);
      end
      e = to_r(dn) - gap / 50.0e6; if (e < 0) e = -e;
      checks++;
      if (e > 5.0e-13 * gap + 1.0e-12) begin failures++; $display("FAIL dn %g want %g", to_r(dn), gap / 50.0e6); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
