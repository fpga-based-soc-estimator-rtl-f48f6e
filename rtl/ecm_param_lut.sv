// ecm_param_lut: parameters of the second-order equivalent circuit model
// (ohmic R0 and the two RC pairs R1/C1, R2/C2) for the present SoC and
// direction of current.
//
// The entries are the paper's HPPC results: one table measured while
// charging and one while discharging, each at SoC = 0, 10, ..., 100 %.
// They are stored here in ohms and farads (the paper lists milliohms and
// kilofarads).  How the FPGA picks an entry between two table points is not
// stated; this design takes the nearest point, index = round(10 * s)
// clamped to 0..10, with no interpolation.  charging = 1 selects the
// charging table (current into the battery), 0 the discharging table.
//
// Purely combinational.
module ecm_param_lut
  import bms_pkg::*;
(
  input  fx_t      soc,        // SoC as a fraction
  input  logic     charging,   // 1: charging table, 0: discharging table
  output logic [3:0] idx,      // selected table row, 0..10 (SoC / 10 %)
  output ecm_prm_t prm
);
  // One table row, converted from mOhm / kF to ohm / farad.
  function automatic ecm_prm_t row(input real r0, input real r1, input real c1,
                                   input real r2, input real c2);
    ecm_prm_t p;
    p.r0 = fx_const(r0 * 1.0e-3);
    p.r1 = fx_const(r1 * 1.0e-3);
    p.c1 = fx_const(c1 * 1.0e3);
    p.r2 = fx_const(r2 * 1.0e-3);
    p.c2 = fx_const(c2 * 1.0e3);
    return p;
  endfunction

  // Charging data: R0 (mOhm), R1 (mOhm), C1 (kF), R2 (mOhm), C2 (kF).
  localparam ecm_prm_t ROM_CHG [0:10] = '{
    row(112.318, 16.21, 0.937, 20.15, 0.750),
    row(110.695, 14.52, 6.873, 28.99, 0.671),
    row(107.181, 17.82, 1.565, 18.93, 1.467),
    row(103.883, 18.45, 0.875, 26.01, 3.236),
    row(103.883, 38.90, 0.897, 20.74, 2.190),
    row(105.506, 41.95, 0.792, 44.16, 0.616),
    row(107.289, 17.86, 1.260, 21.12, 1.051),
    row(97.865, 45.99, 1.469, 46.31, 1.456),
    row(93.830, 19.43, 1.722, 17.45, 2.005),
    row(105.511,  9.20, 0.780, 13.15, 0.546),
    row(117.297, 10.57, 0.736, 46.75, 0.680)
  };
  // Discharging data, same units.
  localparam ecm_prm_t ROM_DIS [0:10] = '{
    row(118.152, 23.49, 0.447601, 2.328, 2.306946),
    row(116.176,  9.81, 0.377278, 1.417, 1.430313),
    row(116.176, 14.19, 0.340939, 1.982, 1.886134),
    row(110.702, 10.84, 0.388916, 5.174, 0.772787),
    row(114.272,  6.23, 0.319658, 3.128, 0.677029),
    row(112.429,  3.51, 0.838898, 3.371, 0.932269),
    row(105.512,  5.64, 0.514280, 3.923, 0.753494),
    row(107.239,  4.64, 0.854056, 1.184, 2.098372),
    row(105.615,  6.16, 0.503514, 1.885, 2.638010),
    row(105.512,  6.33, 0.434482, 1.418, 1.766140),
    row(99.014, 17.08, 0.417306, 4.515, 0.965072)
  };



  localparam fx_t TEN  = fx_const(10.0);
  localparam fx_t HALF = fx_const(0.5);

  always_comb begin
    fx_t scaled;
    scaled = fx_mul(soc, TEN) + HALF;
    if (scaled[W-1])                 idx = 4'd0;
    else if (scaled >= fx_const(10.0)) idx = 4'd10;
    else                             idx = 4'(scaled >>> FRAC);
    prm = charging ? ROM_CHG[idx] : ROM_DIS[idx];
  end
endmodule
