// battery_plant: behavioural model (not synthesizable) of everything the
// controller drives and senses: the buck charging converter (G1), the boost
// discharging converter (G2) behind the relay, the lead-acid battery, the
// load, the two voltage and two current sensing units and a 4-channel
// 12-bit ADC.  It exists only to close the loop in the system testbenches.
//
//   * Converters, averaged over the interval between ADC conversions:
//     the duty of each gate is the fraction of clocks its pulse was high.
//     Charging: I = max(0, VSRC*d1 - Vbat) / R_CHG.
//     Discharging (relay closed): a boost into a resistive load, I drawn from
//     the battery = Vbat / (R_LOAD (1 - d2)^2), capped at I_MAX (the 30 A range of the
//     current sensor); relay open:
//     no discharge current.
//   * Battery: the second-order equivalent circuit with the HPPC tables and
//     the OCV polynomial of the design, true SoC integrated with eta = 1.
//   * Sensors and ADC: 5:1 divider and ACS712 (2.5 V + 66 mV/A) into a
//     5 V, 12-bit converter, rounded and clipped.  adc_valid answers
//     adc_start after ADC_LAT clocks with the codes of that instant.
module battery_plant #(
  parameter real CLK_HZ   = 50.0e6,
  parameter real Q_AH     = 100.0,
  parameter real SOC_INIT = 1.0,
  parameter int  ADC_LAT  = 20,
  parameter real VSRC     = 24.0,
  parameter real R_CHG    = 0.5,
  parameter real R_LOAD   = 5.0,
  parameter real I_MAX    = 30.0
)(
  input  logic        clk,
  input  logic        g1,
  input  logic        g2,
  input  logic        relay,
  input  logic        adc_start,
  output logic        adc_valid,
  output logic [11:0] adc_code [4],
  output real         soc_true,
  output real         i_true,
  output real         v_true
);
  real chg [11][5] = '{
    '{112.318,16.21,0.937,20.15,0.750}, '{110.695,14.52,6.873,28.99,0.671},
    '{107.181,17.82,1.565,18.93,1.467}, '{103.883,18.45,0.875,26.01,3.236},
    '{103.883,38.90,0.897,20.74,2.190}, '{105.506,41.95,0.792,44.16,0.616},
    '{107.289,17.86,1.260,21.12,1.051}, '{97.865,45.99,1.469,46.31,1.456},
    '{93.830,19.43,1.722,17.45,2.005},  '{105.511,9.20,0.780,13.15,0.546},
    '{117.297,10.57,0.736,46.75,0.680}};
  real dis [11][5] = '{
    '{118.152,23.49,0.447601,2.328,2.306946}, '{116.176,9.81,0.377278,1.417,1.430313},
    '{116.176,14.19,0.340939,1.982,1.886134}, '{110.702,10.84,0.388916,5.174,0.772787},
    '{114.272,6.23,0.319658,3.128,0.677029},  '{112.429,3.51,0.838898,3.371,0.932269},
    '{105.512,5.64,0.514280,3.923,0.753494},  '{107.239,4.64,0.854056,1.184,2.098372},
    '{105.615,6.16,0.503514,1.885,2.638010},  '{105.512,6.33,0.434482,1.418,1.766140},
    '{99.014,17.08,0.417306,4.515,0.965072}};

  function automatic real voc_f(real s);
    return 11.41*s**5 - 24.38*s**4 + 17.85*s**3 - 5.233*s**2 + 0.928*s + 12.33;
  endfunction

  function automatic int code_of(real volts);
    real c; c = volts / 5.0 * 4096.0 + 0.5;
    if (c < 0) return 0;
    if (c > 4095) return 4095;
    return $rtoi(c);
  endfunction

  real s = SOC_INIT, v1 = 0, v2 = 0, i_bat = 0, v_bat = voc_f(SOC_INIT), v_out = 0, i_out = 0;
  longint n_clk = 0, n_g1 = 0, n_g2 = 0;
  int lat = -1;

  always_comb begin
    soc_true = s;
    i_true   = i_bat;
    v_true   = v_bat;
  end

  // advance the battery over the interval since the last conversion
  task automatic advance();
    real d1, d2, dt, p [5], a1, a2; int r;
    dt = n_clk / CLK_HZ;
    d1 = (n_clk > 0) ? real'(n_g1) / n_clk : 0.0;
    d2 = (n_clk > 0) ? real'(n_g2) / n_clk : 0.0;
    if (relay) begin
      i_bat = -v_bat / (R_LOAD * (1.0 - d2) * (1.0 - d2) + 1.0e-9);
      if (i_bat < -I_MAX) i_bat = -I_MAX;
      v_out = -i_bat * (1.0 - d2) * R_LOAD;
      i_out = v_out / R_LOAD;
      if (d1 > 0.0) i_bat += (VSRC * d1 > v_bat) ? (VSRC * d1 - v_bat) / R_CHG : 0.0;
    end else begin
      i_bat = (VSRC * d1 > v_bat) ? (VSRC * d1 - v_bat) / R_CHG : 0.0;
      v_out = 0.0; i_out = 0.0;
    end
    r = (s < 0) ? 0 : (s * 10.0 + 0.5 >= 10.0) ? 10 : $rtoi(s * 10.0 + 0.5);
    p = (i_bat >= 0) ? chg[r] : dis[r];
    p[0] *= 1e-3; p[1] *= 1e-3; p[2] *= 1e3; p[3] *= 1e-3; p[4] *= 1e3;
    a1 = $exp(-dt / (p[1] * p[2]));
    a2 = $exp(-dt / (p[3] * p[4]));
    s  = s + dt * i_bat / (Q_AH * 3600.0);
    if (s > 1.0) s = 1.0;
    if (s < 0.0) s = 0.0;
    v1 = a1 * v1 + p[1] * (1 - a1) * i_bat;
    v2 = a2 * v2 + p[3] * (1 - a2) * i_bat;
    v_bat = voc_f(s) + v1 + v2 + p[0] * i_bat;
    n_clk = 0; n_g1 = 0; n_g2 = 0;
  endtask

  initial begin
    adc_valid = 0;
    for (int k = 0; k < 4; k++) adc_code[k] = '0;
  end

  always @(posedge clk) begin
    n_clk++;
    n_g1 += g1;
    n_g2 += g2;
    adc_valid <= 1'b0;
    if (adc_start) lat = ADC_LAT;
    else if (lat > 0) lat--;
    if (lat == 0) begin
      lat = -1;
      advance();
      adc_code[0] <= 12'(code_of(v_bat / 5.0));
      adc_code[1] <= 12'(code_of(2.5 + 0.066 * i_bat));
      adc_code[2] <= 12'(code_of(v_out / 5.0));
      adc_code[3] <= 12'(code_of(2.5 + 0.066 * i_out));
      adc_valid   <= 1'b1;
    end
  end
endmodule
