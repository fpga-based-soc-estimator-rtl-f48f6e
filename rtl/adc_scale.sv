// adc_scale: converts the raw ADC codes of the four sensing channels into
// volts and amperes.
//
// Sensing follows the paper: each voltage sensing unit is a 5:1 resistive
// divider, each current sensing unit an ACS-712 30 A Hall-effect module.
// Channel order: 0 battery voltage, 1 battery current, 2 load (converter
// output) voltage, 3 load current.
//   V = code * ADC_VFS / 2^ADC_BITS * VDIV_RATIO
//   I = (code * ADC_VFS / 2^ADC_BITS - CSU_ZERO) / CSU_SENS
// The ADC width and full scale, and the sensor's zero-current output and
// sensitivity (2.5 V and 66 mV/A, the ACS712-30A datasheet figures) are
// not given in the paper and are this design's parameters.  The current
// sensors are assumed to be mounted so that a positive reading means
// current into the battery (charging), the paper's sign convention.
//
// Each product is one integer-by-constant multiply.  Timing: one register
// stage, meas_valid pulses the clock after adc_valid.
module adc_scale
  import bms_pkg::*;
#(
  parameter int  ADC_BITS   = 12,
  parameter real ADC_VFS    = 5.0,    // ADC full-scale input, V
  parameter real VDIV_RATIO = 5.0,    // voltage divider ratio (5:1)
  parameter real CSU_ZERO   = 2.5,    // sensor output at zero current, V
  parameter real CSU_SENS   = 0.066   // sensor sensitivity, V/A
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                adc_valid,
  input  logic [ADC_BITS-1:0] adc_code [4],
  output logic                meas_valid,
  output meas_t               meas
);
  localparam real LSB_V = ADC_VFS / (2.0 ** ADC_BITS);   // volts per code
  localparam fx_t KV    = fx_const(LSB_V * VDIV_RATIO);
  localparam fx_t KI    = fx_const(LSB_V / CSU_SENS);
  localparam fx_t OFF_I = fx_const(CSU_ZERO / CSU_SENS);

  function automatic fx_t code_fx(input logic [ADC_BITS-1:0] c);
    return fx_t'({{(W-ADC_BITS){1'b0}}, c});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meas_valid <= 1'b0;
      meas       <= '0;
    end else begin
      meas_valid <= adc_valid;
      if (adc_valid) begin
        meas.v_bat  <= code_fx(adc_code[0]) * KV;
        meas.i_bat  <= code_fx(adc_code[1]) * KI - OFF_I;
        meas.v_load <= code_fx(adc_code[2]) * KV;
        meas.i_load <= code_fx(adc_code[3]) * KI - OFF_I;
      end
    end
  end
endmodule
