// cc_pid_controller: constant-current charging/discharging controller.
//
// One call (start -> done) runs one pass of the paper's control flowchart:
//   * the sign of the reference current picks the mode: Iref > 0 charging,
//     Iref < 0 discharging, Iref = 0 rest;
//   * charging: delta2 = 0, relay open, e = Iref - I;
//     discharging: delta1 = 0, relay closed, e = -(Iref - I);
//     rest: delta1 = delta2 = 0, relay open;
//   * de = e - e_prev, sum_e += e * dn (a separate sum per mode),
//     delta += Kp e + Ki sum_e + Kd de/dn, then delta is clamped to 0..100 %,
//     and e_prev = e.
// Gains default to the paper's values for each mode.  I is the battery
// current, positive into the battery, so in discharge both Iref and I are
// negative and a larger discharge demand raises delta2.
//
// Constant-voltage top-up (paper's results section: at float voltage a
// short constant-voltage phase takes the SoC from about 94 % to 100 %): while
// charging, once V reaches V_FLOAT the controller latches the CV mode and
// regulates e = V_FLOAT - V with the charging gains; when the SoC estimate
// reaches SOC_FULL it stops charging (both duties 0, relay open) until the
// reference current stops being positive.  V_FLOAT, SOC_FULL, the use of the
// charging gains in CV and the reset of the charging sum on CV entry are this
// design's choices; the paper gives none of them.
//
// Other choices of this design: in rest e is taken as 0 (so e_prev = 0);
// with dn = 0 the derivative term is skipped; the integral sums are kept
// across mode changes as the flowchart never clears them.
//
// Timing: done is high W+FRAC+4 clocks after the cycle in which start is
// high when dn != 0 and the mode is not rest (the
// derivative uses the divider), 2 clocks after it otherwise.
// clamp_hi / clamp_lo pulse with done when the new duty was clamped.
//
// The handshake assertions are disabled during reset with disable iff (!rst_n);
// lint therefore reports rst_n as used both synchronously and asynchronously.
// The assertions are not part of the synthesized logic, so the note stands.
module cc_pid_controller
  import bms_pkg::*;
#(
  parameter real KPC = 0.18,      // charging gains
  parameter real KIC = 0.0008,
  parameter real KDC = 0.006,
  parameter real KPD = 1.0,       // discharging gains
  parameter real KID = 0.01,
  parameter real KDD = 0.005,
  parameter real V_FLOAT  = 16.0, // V, start of constant-voltage top-up
  parameter real SOC_FULL = 1.0   // SoC that ends the top-up
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fx_t   iref,         // A, from the user interface
  input  fx_t   i_bat,        // A, measured battery current
  input  fx_t   v_bat,        // V, measured battery voltage
  input  fx_t   soc,          // SoC estimate, fraction
  input  fx_t   dn,           // s, sampling interval
  output logic  busy,
  output logic  done,
  output fx_t   duty1,        // percent, G1 (charging converter)
  output fx_t   duty2,        // percent, G2 (discharging converter)
  output logic  relay_close,  // 1: relay closed (discharging path)
  output mode_e mode,
  output logic  full,         // CV top-up finished
  output logic  clamp_hi,
  output logic  clamp_lo
);
  localparam fx_t F_KPC = fx_const(KPC), F_KIC = fx_const(KIC), F_KDC = fx_const(KDC);
  localparam fx_t F_KPD = fx_const(KPD), F_KID = fx_const(KID), F_KDD = fx_const(KDD);
  localparam fx_t F_VFL = fx_const(V_FLOAT);
  localparam fx_t F_SFULL = fx_const(SOC_FULL);
  localparam fx_t HUNDRED = fx_const(100.0);

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_DUTY} state_e;
  state_e st;

  fx_t e, e_prev, de, sum1, sum2, deriv;
  logic cv_latched;

  // derivative divider
  logic div_start, div_busy, div_done;
  fx_t  div_q;
  fxp_div u_div (
    .clk, .rst_n, .start(div_start), .num(de), .den(dn),
    .busy(div_busy), .done(div_done), .quo(div_q)
  );
  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);

  // Mode decision for this pass.
  mode_e mode_n;
  logic  cv_n, full_n;
  always_comb begin
    cv_n   = cv_latched;
    full_n = full;
    if (iref[W-1]) begin
      mode_n = MODE_DISCHARGE; cv_n = 1'b0; full_n = 1'b0;
    end else if (iref == '0) begin
      mode_n = MODE_REST;      cv_n = 1'b0; full_n = 1'b0;
    end else begin
      if (cv_latched || v_bat >= F_VFL) cv_n = 1'b1;
      if (cv_n && soc >= F_SFULL)       full_n = 1'b1;
      mode_n = full_n ? MODE_REST : (cv_n ? MODE_CV : MODE_CHARGE);
    end
  end

  // Error of this pass.
  fx_t e_n;
  always_comb begin
    unique case (mode_n)
      MODE_CHARGE:    e_n = iref - i_bat;
      MODE_CV:        e_n = F_VFL - v_bat;
      MODE_DISCHARGE: e_n = -(iref - i_bat);
      default:        e_n = '0;
    endcase
  end

  // PID update of the active converter's duty.
  fx_t d_raw;
  always_comb begin
    unique case (mode)
      MODE_CHARGE, MODE_CV:
        d_raw = duty1 + fx_mul(F_KPC, e) + fx_mul(F_KIC, sum1) + fx_mul(F_KDC, deriv);
      MODE_DISCHARGE:
        d_raw = duty2 + fx_mul(F_KPD, e) + fx_mul(F_KID, sum2) + fx_mul(F_KDD, deriv);
      default:
        d_raw = '0;
    endcase
  end

  // clamp to 0..100 %
  fx_t  d_sat;
  logic sat_hi, sat_lo;
  always_comb begin
    sat_hi = (mode != MODE_REST) && (d_raw > HUNDRED);
    sat_lo = (mode != MODE_REST) && !sat_hi && d_raw[W-1];
    d_sat  = sat_hi ? HUNDRED : (sat_lo ? FX_ZERO : d_raw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      e           <= '0;
      e_prev      <= '0;
      de          <= '0;
      sum1        <= '0;
      sum2        <= '0;
      deriv       <= '0;
      cv_latched  <= 1'b0;
      full        <= 1'b0;
      mode        <= MODE_REST;
      duty1       <= '0;
      duty2       <= '0;
      relay_close <= 1'b0;
      div_start   <= 1'b0;
      done        <= 1'b0;
      clamp_hi    <= 1'b0;
      clamp_lo    <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      clamp_hi  <= 1'b0;
      clamp_lo  <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          mode       <= mode_n;
          full       <= full_n;
          cv_latched <= cv_n;
          e          <= e_n;
          // entering CV restarts the charging loop on the voltage error
          if (cv_n && !cv_latched) begin
            de   <= '0;
            sum1 <= fx_mul(e_n, dn);
          end else begin
            de <= e_n - e_prev;
            if (mode_n == MODE_CHARGE || mode_n == MODE_CV) sum1 <= sum1 + fx_mul(e_n, dn);
            if (mode_n == MODE_DISCHARGE)                   sum2 <= sum2 + fx_mul(e_n, dn);
          end
          unique case (mode_n)
            MODE_CHARGE, MODE_CV: begin duty2 <= '0; relay_close <= 1'b0; end
            MODE_DISCHARGE:       begin duty1 <= '0; relay_close <= 1'b1; end
            default:              begin duty1 <= '0; duty2 <= '0; relay_close <= 1'b0; end
          endcase
          if (dn != '0 && mode_n != MODE_REST) begin
            div_start <= 1'b1;
            st        <= S_DIV;
          end else begin
            deriv <= '0;
            st    <= S_DUTY;
          end
        end
        S_DIV: if (div_done) begin
          deriv <= div_q;
          st    <= S_DUTY;
        end
        S_DUTY: begin
          clamp_hi <= sat_hi;
          clamp_lo <= sat_lo;
          unique case (mode)
            MODE_CHARGE, MODE_CV: duty1 <= d_sat;
            MODE_DISCHARGE:       duty2 <= d_sat;
            default: ;
          endcase
          e_prev <= e;
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (st != S_IDLE);
endmodule
