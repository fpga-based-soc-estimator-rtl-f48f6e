// ekf_soc: extended Kalman filter estimating the state of charge of a
// lead-acid battery on a second-order equivalent circuit model.
//
// Model (paper): state x = [s, V1, V2] (SoC as a fraction and the voltages
// of the two RC pairs), input u = I (A, positive into the battery), output
// the terminal voltage y = Voc(s) + V1 + V2 + I R0.  Per sample of length
// dn:
//   a_k = e^(-dn/(R_k C_k)),  A = diag(1, a1, a2)
//   s-  = s + eta dn I / Q,   V_k- = a_k V_k + R_k (1 - a_k) I
//   P-  = A P A^T + J                                   (step 2)
//   C   = [dVoc/ds(s-), 1, 1]
//   h   = P- C^T,  S = C h + R,  K = h / S               (step 3)
//   y-  = Voc(s-) + V1- + V2- + I R0                     (step 4)
//   x+  = x- + K (V - y-)                                (step 5)
//   P+  = P- - K h^T  (= (1 - K C) P-, P symmetric)      (step 6)
// R0, R1, C1, R2, C2 come from the HPPC tables (ecm_param_lut) at the SoC
// of the previous estimate, from the charging table when I >= 0.
//
// Departures and choices: the paper prints B_n with -R_k(1 - a_k) but its
// continuous model dV/dt = -V/(RC) + I/C and its output equation give
// +R_k(1 - a_k); the positive sign is used.  Step 4 is printed as C x- + D I
// with C holding dVoc/ds; the nonlinear output equation above is used
// instead, C only enters the gain and covariance.  Step 3 is printed with
// P^-1 where P- is meant.  The coulombic efficiency ETA, the initial state
// and covariance, and the noise covariances J (diagonal) and R are not given
// and are parameters here.  The SoC estimate is clamped to 0..1.
//
// Sequencing: one divider and one exponential unit are shared; a pass does
// dn/tau1, dn/tau2, e^-x twice, prediction, output, 1/S and the update,
// about 3*(W+FRAC) + 40 clocks.  Pulse start with i_in, v_in and dn valid
// (they are sampled at start); done pulses when the outputs are updated.
//
// The handshake assertions are disabled during reset with disable iff (!rst_n);
// lint therefore reports rst_n as used both synchronously and asynchronously.
// The assertions are not part of the synthesized logic, so the note stands.
module ekf_soc
  import bms_pkg::*;
#(
  parameter real Q_AH  = 100.0,   // capacity, Ah
  parameter real ETA   = 1.0,     // coulombic efficiency
  parameter real SOC0  = 1.0,     // initial SoC estimate
  parameter real P0_S  = 1.0e-2,  // initial variance of s
  parameter real P0_V  = 1.0e-4,  // initial variance of V1, V2 (V^2)
  parameter real J_S   = 1.0e-10, // process noise of s per sample
  parameter real J_V   = 1.0e-7,  // process noise of V1, V2 per sample
  parameter real R_V   = 1.0e-2   // measurement noise of V (V^2)
)(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  i_in,     // A
  input  fx_t  v_in,     // V, measured terminal voltage
  input  fx_t  dn,       // s
  output logic busy,
  output logic done,
  output fx_t  soc,      // estimated SoC, fraction
  output fx_t  v1,       // estimated RC-pair voltages, V
  output fx_t  v2,
  output fx_t  p_soc,    // variance of the SoC estimate
  output fx_t  y_pred,   // predicted terminal voltage of the last pass
  output logic [3:0] tab_idx
);
  localparam fx_t K_COUL = fx_const(ETA / (Q_AH * 3600.0));
  localparam fx_t F_JS = fx_const(J_S), F_JV = fx_const(J_V), F_R = fx_const(R_V);

  typedef enum logic [3:0] {
    S_IDLE, S_TAU, S_DIV1, S_DIV2, S_EXP1, S_EXP2, S_PRED, S_OUT, S_DIVS
  } state_e;
  state_e st;

  fx_t x [3];
  fx_t P [3][3];
  fx_t xm [3];
  fx_t Pm [3][3];
  fx_t i_q, v_q, dn_q;
  ecm_prm_t prm;
  fx_t tau2, xa1, xa2, a1, a2;
  fx_t h [3];
  fx_t innov;
  fx_t hh [3], kk [3];             // P- C^T and the Kalman gain
  fx_t yp, s_den, s_new;           // predicted output, S, updated SoC

  // parameter table at the previous estimate
  ecm_prm_t  lut_prm;
  logic [3:0] lut_idx;
  ecm_param_lut u_lut (.soc(x[0]), .charging(!i_in[W-1]), .idx(lut_idx), .prm(lut_prm));

  // OCV curve at the predicted SoC
  fx_t voc, dvoc;
  ocv_poly u_ocv (.soc(xm[0]), .voc(voc), .dvoc(dvoc));

  // shared divider
  logic div_start, div_busy, div_done;
  fx_t  div_num, div_den, div_q;
  fxp_div u_div (.clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
                 .busy(div_busy), .done(div_done), .quo(div_q));

  // shared exponential
  logic exp_start, exp_busy, exp_done;
  fx_t  exp_x, exp_y;
  exp_neg u_exp (.clk, .rst_n, .start(exp_start), .x(exp_x),
                 .busy(exp_busy), .done(exp_done), .y(exp_y));

  // the shared units are started only when idle
  a_div_idle: assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !div_busy);
  a_exp_idle: assert property (@(posedge clk) disable iff (!rst_n) exp_start |-> !exp_busy);

  fx_t a_vec [3];
  always_comb begin
    a_vec[0] = FX_ONE;
    a_vec[1] = a1;
    a_vec[2] = a2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      x[0] <= fx_const(SOC0);
      x[1] <= '0;
      x[2] <= '0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          P[r][c]  <= (r != c) ? FX_ZERO : (r == 0 ? fx_const(P0_S) : fx_const(P0_V));
          Pm[r][c] <= '0;
        end
      for (int r = 0; r < 3; r++) begin
        xm[r] <= '0;
        h[r]  <= '0;
      end
      i_q <= '0; v_q <= '0; dn_q <= '0;
      prm <= '0;
      tau2 <= '0; xa1 <= '0; xa2 <= '0; a1 <= '0; a2 <= '0;
      innov <= '0; y_pred <= '0; tab_idx <= '0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
      exp_start <= 1'b0; exp_x <= '0;
      done <= 1'b0;
    end else begin
      div_start <= 1'b0;
      exp_start <= 1'b0;
      done      <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          i_q     <= i_in;
          v_q     <= v_in;
          dn_q    <= dn;
          prm     <= lut_prm;
          tab_idx <= lut_idx;
          st      <= S_TAU;
        end
        S_TAU: begin
          tau2      <= fx_mul(prm.r2, prm.c2);
          div_num   <= dn_q;
          div_den   <= fx_mul(prm.r1, prm.c1);
          div_start <= 1'b1;
          st        <= S_DIV1;
        end
        S_DIV1: if (div_done) begin
          xa1       <= div_q;
          div_num   <= dn_q;
          div_den   <= tau2;
          div_start <= 1'b1;
          st        <= S_DIV2;
        end
        S_DIV2: if (div_done) begin
          xa2       <= div_q;
          exp_x     <= xa1;
          exp_start <= 1'b1;
          st        <= S_EXP1;
        end
        S_EXP1: if (exp_done) begin
          a1        <= exp_y;
          exp_x     <= xa2;
          exp_start <= 1'b1;
          st        <= S_EXP2;
        end
        S_EXP2: if (exp_done) begin
          a2 <= exp_y;
          st <= S_PRED;
        end
        S_PRED: begin
          // step 1: state time update
          xm[0] <= x[0] + fx_mul(K_COUL, fx_mul(dn_q, i_q));
          xm[1] <= fx_mul(a1, x[1]) + fx_mul(fx_mul(prm.r1, FX_ONE - a1), i_q);
          xm[2] <= fx_mul(a2, x[2]) + fx_mul(fx_mul(prm.r2, FX_ONE - a2), i_q);
          // step 2: covariance time update, A diagonal
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++)
              Pm[r][c] <= fx_mul(fx_mul(a_vec[r], a_vec[c]), P[r][c])
                        + ((r != c) ? FX_ZERO : (r == 0 ? F_JS : F_JV));
          st <= S_OUT;
        end
        S_OUT: begin
          // step 3 (first half) and step 4
          for (int c = 0; c < 3; c++) h[c] <= hh[c];
          y_pred    <= yp;
          innov     <= v_q - yp;
          div_num   <= FX_ONE;
          div_den   <= s_den;
          div_start <= 1'b1;
          st        <= S_DIVS;
        end
        S_DIVS: if (div_done) begin
          // steps 3, 5, 6 with K = h / S
          x[0] <= s_new;
          x[1] <= xm[1] + fx_mul(kk[1], innov);
          x[2] <= xm[2] + fx_mul(kk[2], innov);
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++)
              P[r][c] <= Pm[r][c] - fx_mul(kk[r], h[c]);
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // combinational parts of the output and update steps:
  // h = P- C^T, S = C h + R, y- from the output equation (used in S_OUT),
  // K = h / S and the clamped SoC update (used in S_DIVS)
  always_comb begin
    for (int c = 0; c < 3; c++)
      hh[c] = fx_mul(dvoc, Pm[0][c]) + Pm[1][c] + Pm[2][c];
    yp    = voc + xm[1] + xm[2] + fx_mul(prm.r0, i_q);
    s_den = fx_mul(dvoc, hh[0]) + hh[1] + hh[2] + F_R;
    for (int r = 0; r < 3; r++) kk[r] = fx_mul(h[r], div_q);
    s_new = xm[0] + fx_mul(kk[0], innov);
    if (s_new[W-1])          s_new = FX_ZERO;
    else if (s_new > FX_ONE) s_new = FX_ONE;
  end

  always_comb begin
    busy  = (st != S_IDLE);
    soc   = x[0];
    v1    = x[1];
    v2    = x[2];
    p_soc = P[0][0];
  end
endmodule
