// fxp_div: sequential signed fixed-point divider, quo = num / den.
//
// The controller needs three kinds of division: de/dn in the PID
// derivative term (Fig. 5), dn/(R*C) for the exponentials of the discrete
// state matrix A_n, and the inverse of the scalar innovation variance
// C P C^T + R in the Kalman gain (Algorithm step 3).  The paper gives the
// formulas only; this unit is the simplest hardware that evaluates them.
//
// It works on magnitudes with a restoring shift-and-subtract loop, one
// quotient bit per clock, over |num| << FRAC (W+FRAC bits), then applies the
// sign.  A quotient that does not fit in fx_t, and any division by zero,
// saturates to FX_MAX / FX_MIN with the sign of the true result.
//
// Interface: pulse start with num/den valid; busy stays high for exactly
// W+FRAC cycles and done pulses for one cycle in the cycle after the last
// step, with quo held until the next start.  done is high
// W+FRAC+1 clocks after the cycle in which start is high.
module fxp_div
  import bms_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  num,
  input  fx_t  den,
  output logic busy,
  output logic done,
  output fx_t  quo
);
  localparam int NB = W + FRAC;           // quotient bits produced

  logic [NB-1:0] dividend;                 // shifts left, quotient enters at bit 0
  logic [W:0]    rem;
  logic [W-1:0]  dmag;
  logic          neg;
  logic          dzero;
  logic [$clog2(NB+1)-1:0] cnt;

  logic [W:0] rem_shift;
  logic [W:0] rem_sub;
  always_comb begin
    rem_shift = {rem[W-1:0], dividend[NB-1]};
    rem_sub   = rem_shift - {1'b0, dmag};
  end

  // Final magnitude check: bits above W-2 must be zero to fit a signed result.
  logic fits;
  always_comb fits = (dividend[NB-1:W-1] == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dividend <= '0;
      rem      <= '0;
      dmag     <= '0;
      neg      <= 1'b0;
      dzero    <= 1'b0;
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        dividend <= {(num[W-1] ? W'(-num) : W'(num)), {FRAC{1'b0}}};
        dmag     <= den[W-1] ? W'(-den) : W'(den);
        neg      <= num[W-1] ^ den[W-1];
        dzero    <= (den == '0);
        rem      <= '0;
        cnt      <= ($clog2(NB+1))'(NB);
        busy     <= 1'b1;
      end else if (busy) begin
        if (cnt != 0) begin
          if (!rem_sub[W]) begin
            rem      <= rem_sub;
            dividend <= {dividend[NB-2:0], 1'b1};
          end else begin
            rem      <= rem_shift;
            dividend <= {dividend[NB-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Result formatting.  After the last step dividend holds the quotient
  // and stays unchanged until the next start.
  always_comb begin
    if (dzero || !fits) quo = neg ? FX_MIN : FX_MAX;
    else                quo = neg ? -fx_t'(dividend[W-1:0]) : fx_t'(dividend[W-1:0]);
  end
endmodule
