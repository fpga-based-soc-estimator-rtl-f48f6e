// exp_neg: sequential evaluation of y = e^(-x) for x >= 0 in fixed point.
//
// The discrete battery model of the EKF needs a_k = e^(-dn/(R_k C_k)) for
// both RC pairs, every sample, because dn is measured and R, C change with
// the SoC and the current direction (A_n, B_n of the discrete state-space
// model).  The paper gives the formula, not the hardware; this unit is this
// design's own choice of the simplest iterative method:
//   1. range reduction: halve x (m times) until x <= 0.5 (at most MMAX times);
//   2. Taylor series: sum = 1 + sum_{k=1..TERMS} (-x)^k / k!, one term per
//      clock, each term obtained from the last as term * (-x) * (1/k);
//   3. undo the reduction by squaring the sum m times, one square per clock.
// With x <= 0.5 and TERMS = 12 the truncation error is below 1e-12.
// A negative x is treated as 0 (y = 1).
//
// Interface: pulse start with x valid; done pulses for one clock when y is
// ready, y holds until the next start.  done is high 2 + 2m + TERMS clocks
// after the cycle in which start is high (m = number of halvings).
module exp_neg
  import bms_pkg::*;
#(
  parameter int TERMS = 12,     // series terms after range reduction
  parameter int MMAX  = 20      // maximum number of halvings
)(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic busy,
  output logic done,
  output fx_t  y
);
  localparam fx_t HALF = fx_const(0.5);

  // 1/k for k = 1..16 (the series uses the first TERMS entries).
  localparam fx_t INV_K [1:16] = '{
    fx_const(1.0/1.0),  fx_const(1.0/2.0),  fx_const(1.0/3.0),  fx_const(1.0/4.0),
    fx_const(1.0/5.0),  fx_const(1.0/6.0),  fx_const(1.0/7.0),  fx_const(1.0/8.0),
    fx_const(1.0/9.0),  fx_const(1.0/10.0), fx_const(1.0/11.0), fx_const(1.0/12.0),
    fx_const(1.0/13.0), fx_const(1.0/14.0), fx_const(1.0/15.0), fx_const(1.0/16.0)
  };

  typedef enum logic [1:0] {S_IDLE, S_REDUCE, S_SERIES, S_SQUARE} state_e;
  state_e st;

  fx_t xr;                    // reduced argument
  fx_t term, sum;
  logic [4:0] k;              // current series index, 1..TERMS
  logic [$clog2(MMAX+1)-1:0] m;

  // next series term  term * (-xr) / k
  fx_t nt;
  always_comb nt = fx_mul(fx_mul(term, -xr), INV_K[(k >= 5'd1 && k <= 5'd16) ? k : 5'd1]);


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      xr   <= '0;
      term <= '0;
      sum  <= '0;
      k    <= '0;
      m    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          xr   <= x[W-1] ? FX_ZERO : x;
          m    <= '0;
          term <= FX_ONE;
          sum  <= FX_ONE;
          k    <= 5'd1;
          st   <= S_REDUCE;
        end
        S_REDUCE: begin
          if (xr > HALF && m < ($clog2(MMAX+1))'(MMAX)) begin
            xr <= xr >>> 1;
            m  <= m + 1'b1;
          end else begin
            st <= S_SERIES;
          end
        end
        S_SERIES: begin
          term <= nt;
          sum  <= sum + nt;
          k    <= k + 1'b1;
          if (k == 5'(TERMS)) st <= (m != 0) ? S_SQUARE : S_IDLE;
          if (k == 5'(TERMS) && m == 0) done <= 1'b1;
        end
        S_SQUARE: begin
          sum <= fx_mul(sum, sum);
          m   <= m - 1'b1;
          if (m == 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (st != S_IDLE);
  always_comb y    = sum;

  initial assert (TERMS >= 1 && TERMS <= 16) else $error("exp_neg: TERMS must be 1..16");
endmodule
