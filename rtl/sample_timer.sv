// sample_timer: measures the sampling interval dn of the control loop.
//
// The paper's loop acquires V, I and "dn (sampling time)" with every ADC
// reading, and uses dn in the coulomb count, in the discrete battery model
// and in the PID integral and derivative.  Here a clock counter is restarted
// at every sample; at a sample, the cycles elapsed since the previous one
// (since reset for the first) are converted to seconds,
// dn = cycles / CLK_HZ, by one multiply with the constant 1/CLK_HZ.  The
// counter saturates instead of wrapping.  The clock frequency is this
// design's parameter.
//
// Timing: dn and dn_valid update in the clock after sample.
module sample_timer
  import bms_pkg::*;
#(
  parameter real CLK_HZ = 50.0e6,
  parameter int  CW     = 32         // counter width
)(
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  output logic dn_valid,
  output fx_t  dn,          // seconds
  output logic [CW-1:0] dn_cycles
);
  localparam fx_t SEC_PER_CYCLE = fx_const(1.0 / CLK_HZ);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      dn        <= '0;
      dn_cycles <= '0;
      dn_valid  <= 1'b0;
    end else begin
      dn_valid <= sample;
      if (sample) begin
        dn_cycles <= cnt + 1'b1;
        dn        <= fx_t'({{(W-CW){1'b0}}, cnt + 1'b1}) * SEC_PER_CYCLE;
        cnt       <= '0;
      end else if (cnt != '1) begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
