// ocv_poly: open-circuit voltage of the lead-acid battery as a function of
// its state of charge, and the slope of that curve.
//
// The paper fits the measured OCV at 10 % SoC steps with a fifth-degree
// polynomial, Voc = L1 s^5 + L2 s^4 + L3 s^3 + L4 s^2 + L5 s + L6, with
// s the SoC as a fraction (Voc runs from 12.33 V at s = 0 to 12.905 V at
// s = 1).  The coefficients are the paper's.  The EKF also needs the
// derivative dVoc/ds, the first entry of the output matrix C_n, which is
// 5 L1 s^4 + 4 L2 s^3 + 3 L3 s^2 + 2 L4 s + L5.
//
// Both polynomials are evaluated combinationally by Horner's rule (five and
// four fixed-point multiply-adds); the module has no clock.  Using Horner's
// rule is this design's choice.
module ocv_poly
  import bms_pkg::*;
#(
  parameter real L1 = 11.41,
  parameter real L2 = -24.38,
  parameter real L3 = 17.85,
  parameter real L4 = -5.233,
  parameter real L5 = 0.928,
  parameter real L6 = 12.33
)(
  input  fx_t soc,    // SoC as a fraction, 1.0 = full
  output fx_t voc,    // V
  output fx_t dvoc    // V per unit SoC
);
  localparam fx_t A1 = fx_const(L1), A2 = fx_const(L2), A3 = fx_const(L3),
                  A4 = fx_const(L4), A5 = fx_const(L5), A6 = fx_const(L6);
  localparam fx_t D1 = fx_const(5.0*L1), D2 = fx_const(4.0*L2),
                  D3 = fx_const(3.0*L3), D4 = fx_const(2.0*L4), D5 = fx_const(L5);

  always_comb begin
    fx_t h;
    h   = A1;
    h   = fx_mul(h, soc) + A2;
    h   = fx_mul(h, soc) + A3;
    h   = fx_mul(h, soc) + A4;
    h   = fx_mul(h, soc) + A5;
    voc = fx_mul(h, soc) + A6;
  end

  always_comb begin
    fx_t g;
    g    = D1;
    g    = fx_mul(g, soc) + D2;
    g    = fx_mul(g, soc) + D3;
    g    = fx_mul(g, soc) + D4;
    dvoc = fx_mul(g, soc) + D5;
  end
endmodule
