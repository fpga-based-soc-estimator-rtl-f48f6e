// bms_top: FPGA processing unit of the battery charging/discharging
// controller with SoC estimation.
//
// The unit runs the paper's control loop once per sampling tick:
//   1. take the reference current Iref from the user interface;
//   2. acquire battery/load voltage and current from the ADC and the
//      sampling interval dn (adc_scale, sample_timer);
//   3. run the extended Kalman filter SoC estimator (ekf_soc);
//   4. update the display outputs with I, V and SoC;
//   5. choose the mode, drive the relay and compute the duty cycles with the
//      PID law (cc_pid_controller);
//   6. hand the duty cycles to the two gate-pulse generators (pwm_gen) for
//      G1 (charging converter) and G2 (discharging converter).
// The ADC chip, the touch-screen user interface and the power stage are
// outside: the ADC is reached through a start/valid handshake with four
// parallel codes, Iref comes in as a fixed-point number and the display
// values go out as fixed-point numbers.
//
// Loop timing is this design's choice (the paper gives no sampling rate):
// a free-running tick every LOOP_CYCLES clocks starts an iteration; a tick
// that arrives while an iteration is still running is remembered and starts
// the next one as soon as the current one ends (overrun counts how often).
// adc_start is a one-clock pulse; the ADC answers with adc_valid and the
// codes held for that clock.  An iteration takes the ADC latency plus about
// 4*(W+FRAC) + 60 clocks.
//
// The handshake assertions are disabled during reset with disable iff (!rst_n);
// lint therefore reports rst_n as used both synchronously and asynchronously.
// The assertions are not part of the synthesized logic, so the note stands.
module bms_top
  import bms_pkg::*;
#(
  parameter real CLK_HZ      = 50.0e6,
  parameter real F_SW        = 20.0e3,
  parameter int  LOOP_CYCLES = 500_000,  // 10 ms at 50 MHz
  parameter int  ADC_BITS    = 12,
  parameter real Q_AH        = 100.0,
  parameter real SOC0        = 1.0,
  parameter real V_FLOAT     = 16.0
)(
  input  logic                clk,
  input  logic                rst_n,
  // user interface
  input  fx_t                 iref,        // A, > 0 charge, < 0 discharge, 0 rest
  output fx_t                 disp_v,      // V, battery terminal voltage
  output fx_t                 disp_i,      // A, battery current
  output fx_t                 disp_soc,    // SoC estimate, fraction
  output logic                disp_valid,  // pulses when the display values change
  // ADC
  output logic                adc_start,
  input  logic                adc_valid,
  input  logic [ADC_BITS-1:0] adc_code [4],
  // power stage
  output logic                g1,          // gate pulses, charging converter
  output logic                g2,          // gate pulses, discharging converter
  output logic                relay,       // 1: relay closed (discharge path)
  // status
  output mode_e               mode,
  output fx_t                 duty1,
  output fx_t                 duty2,
  output logic                pid_clamp_hi,
  output logic                pid_clamp_lo,
  output logic                cv_full,
  output logic [15:0]         overrun,
  // estimator and load-side observation
  output fx_t                 v_load,      // V, converter output voltage
  output fx_t                 i_load,      // A, load current
  output fx_t                 soc_var,     // variance of the SoC estimate
  output fx_t                 v_pred,      // model-predicted terminal voltage
  output logic [3:0]          ecm_row      // ECM table row in use (SoC / 10 %)
);
  typedef enum logic [2:0] {T_WAIT, T_ACQ, T_SCALE, T_EKF, T_DISP, T_PID} tstate_e;
  tstate_e st;

  // sampling tick
  logic [$clog2(LOOP_CYCLES+1)-1:0] tick_cnt;
  logic tick, pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tick_cnt <= '0;
    else if (tick_cnt == ($clog2(LOOP_CYCLES+1))'(LOOP_CYCLES - 1)) tick_cnt <= '0;
    else tick_cnt <= tick_cnt + 1'b1;
  end
  always_comb tick = (tick_cnt == ($clog2(LOOP_CYCLES+1))'(LOOP_CYCLES - 1));

  // measurement
  logic  meas_valid;
  meas_t meas;
  adc_scale #(.ADC_BITS(ADC_BITS)) u_adc (
    .clk, .rst_n, .adc_valid, .adc_code, .meas_valid, .meas);

  logic dn_valid;
  fx_t  dn;
  logic [31:0] dn_cycles;
  sample_timer #(.CLK_HZ(CLK_HZ)) u_tmr (
    .clk, .rst_n, .sample(adc_valid), .dn_valid, .dn, .dn_cycles);

  // SoC estimator
  logic ekf_start, ekf_busy, ekf_done;
  fx_t  soc, v1, v2;
  ekf_soc #(.Q_AH(Q_AH), .SOC0(SOC0)) u_ekf (
    .clk, .rst_n, .start(ekf_start), .i_in(meas.i_bat), .v_in(meas.v_bat), .dn,
    .busy(ekf_busy), .done(ekf_done), .soc, .v1, .v2, .p_soc(soc_var), .y_pred(v_pred), .tab_idx(ecm_row));

  // charging/discharging controller
  fx_t  iref_q;
  logic pid_start, pid_busy, pid_done;
  cc_pid_controller #(.V_FLOAT(V_FLOAT)) u_pid (
    .clk, .rst_n, .start(pid_start), .iref(iref_q), .i_bat(meas.i_bat),
    .v_bat(meas.v_bat), .soc, .dn, .busy(pid_busy), .done(pid_done),
    .duty1, .duty2, .relay_close(relay), .mode, .full(cv_full),
    .clamp_hi(pid_clamp_hi), .clamp_lo(pid_clamp_lo));

  // gate pulses
  logic ps1, ps2;
  pwm_gen #(.CLK_HZ(CLK_HZ), .F_SW(F_SW)) u_pwm1 (
    .clk, .rst_n, .duty(duty1), .pwm(g1), .period_start(ps1));
  pwm_gen #(.CLK_HZ(CLK_HZ), .F_SW(F_SW)) u_pwm2 (
    .clk, .rst_n, .duty(duty2), .pwm(g2), .period_start(ps2));

  // Rules of the sequencing: the estimator and the controller are started
  // only when idle, the two gates are never on together (only one converter
  // runs in a mode), and the two pulse generators stay in phase so that a
  // mode change takes effect on both gates at the same period boundary.
  a_ekf_idle: assert property (@(posedge clk) disable iff (!rst_n) ekf_start |-> !ekf_busy);
  a_pid_idle: assert property (@(posedge clk) disable iff (!rst_n) pid_start |-> !pid_busy);
  a_one_gate: assert property (@(posedge clk) disable iff (!rst_n) !(g1 && g2));
  a_in_phase: assert property (@(posedge clk) disable iff (!rst_n) ps1 == ps2);

  // loop sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= T_WAIT;
      pending    <= 1'b0;
      overrun    <= '0;
      iref_q     <= '0;
      adc_start  <= 1'b0;
      ekf_start  <= 1'b0;
      pid_start  <= 1'b0;
      disp_v     <= '0;
      disp_i     <= '0;
      disp_soc   <= fx_const(SOC0);
      disp_valid <= 1'b0;
      v_load     <= '0;
      i_load     <= '0;
    end else begin
      adc_start  <= 1'b0;
      ekf_start  <= 1'b0;
      pid_start  <= 1'b0;
      disp_valid <= 1'b0;
      if (tick) begin
        if (st != T_WAIT || pending) overrun <= overrun + 1'b1;
        pending <= 1'b1;
      end
      unique case (st)
        T_WAIT: if (pending || tick) begin
          pending   <= 1'b0;   // this start consumes the tick
          iref_q    <= iref;
          adc_start <= 1'b1;
          st        <= T_ACQ;
        end
        T_ACQ:   if (adc_valid) st <= T_SCALE;
        T_SCALE: if (meas_valid && dn_valid) begin
          ekf_start <= 1'b1;
          st        <= T_EKF;
        end
        T_EKF:   if (ekf_done) st <= T_DISP;
        T_DISP: begin
          disp_v     <= meas.v_bat;
          disp_i     <= meas.i_bat;
          disp_soc   <= soc;
          v_load     <= meas.v_load;
          i_load     <= meas.i_load;
          disp_valid <= 1'b1;
          pid_start  <= 1'b1;
          st         <= T_PID;
        end
        T_PID:   if (pid_done) st <= T_WAIT;
        default: st <= T_WAIT;
      endcase
    end
  end
endmodule
