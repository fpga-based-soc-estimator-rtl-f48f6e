// bms_pkg: number format and shared types of the battery controller.
//
// Every physical quantity inside the controller (volts, amperes, seconds,
// ohms, farads, SoC as a fraction, duty cycle in percent) is carried as a
// signed two's-complement fixed-point number fx_t with FRAC fraction bits.
// The paper does not say how its FPGA represents numbers; 64 bits with 40
// fraction bits is this design's choice.  It covers +-8.3e6 with a
// resolution of 9.1e-13, enough for the coulomb-counting increment
// eta*dn/Q (about 2.8e-8 per ampere at a 10 ms step on a 100 Ah battery) and
// for the small process-noise entries of the Kalman filter.
//
// fx_mul() rounds a full 128-bit product towards minus infinity.  fx_const()
// turns a real constant into fx_t at elaboration time only.
package bms_pkg;

  localparam int W    = 64;
  localparam int FRAC = 40;

  typedef logic signed [W-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(64'sd1 <<< FRAC);
  localparam fx_t FX_ZERO = '0;
  localparam fx_t FX_MAX  = {1'b0, {(W-1){1'b1}}};
  localparam fx_t FX_MIN  = {1'b1, {(W-1){1'b0}}};

  // Elaboration-time conversion of a real constant.
  function automatic fx_t fx_const(input real r);
    return fx_t'(longint'(r * (2.0 ** FRAC)));
  endfunction

  // Fixed-point product, W x W -> W, fraction re-aligned.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*W-1:0] aa, bb, p;
    aa = (2*W)'(a);
    bb = (2*W)'(b);
    p  = aa * bb;
    return fx_t'(p >>> FRAC);
  endfunction

  // Operating modes of the charging/discharging controller (Fig. 5 branches
  // plus the constant-voltage top-up described in the results section).
  typedef enum logic [1:0] {
    MODE_REST      = 2'd0,
    MODE_CHARGE    = 2'd1,
    MODE_DISCHARGE = 2'd2,
    MODE_CV        = 2'd3
  } mode_e;

  // Parameters of the second-order equivalent circuit model (Fig. 6).
  typedef struct packed {
    fx_t r0;   // ohmic resistance, ohm
    fx_t r1;   // first RC pair, ohm
    fx_t c1;   //                farad
    fx_t r2;   // second RC pair, ohm
    fx_t c2;   //                farad
  } ecm_prm_t;

  // The four sensed quantities (two VSUs and two CSUs of Fig. 1).
  typedef struct packed {
    fx_t v_bat;   // battery terminal voltage, V
    fx_t i_bat;   // battery current, A, positive into the battery
    fx_t v_load;  // converter output (load) voltage, V
    fx_t i_load;  // load current, A
  } meas_t;

endpackage
