// hyft_fx2fp: exponent/mantissa pair to floating point (FX2FP).
//
// Input is an unbiased signed exponent `e` and a signed fixed-point mantissa
// term `m` with MAN_W fraction bits and range (-1, 3); the value meant is
// 2^e * (1 + m). Three cases give a normalised number without a leading-one
// detector or a barrel shifter:
//   m <  0 : exponent e-1, mantissa 1+m      (the rule 2^u(1+v/2) = 2^(u-1)(1+(1+v))
//                                              of the exponent unit, applied to v=m)
//   0<=m<1 : exponent e,   mantissa m
//   m >= 1 : exponent e+1, mantissa (m-1)/2  (only the multiplication can get here)
// The first case makes the result the piecewise-linear antilog
// 2^floor(x) * (1 + frac(x)) of x = e + m, which is what the log-domain
// division and the exponent unit need.
// The exponent is then biased; results below the smallest normal number are
// flushed to zero, results above the largest finite one saturate to it.
// `zero` forces a +0 result. The sign field is `sgn`.
//
// Purely combinational. The m<0 rule is the paper's; the m>=1 case, the
// flush-to-zero and the saturation are choices of this implementation.
module hyft_fx2fp #(
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 10,
  parameter int unsigned E_W   = 10,   // width of the signed exponent input
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W,
  localparam int unsigned M_W  = MAN_W + 3
) (
  input  logic signed [E_W-1:0] e,
  input  logic signed [M_W-1:0] m,
  input  logic                  sgn,
  input  logic                  zero,
  output logic [FP_W-1:0]       fp
);
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int EMAX = (1 << EXP_W) - 2;     // largest biased finite exponent

  logic signed [M_W-1:0] one;
  logic signed [M_W-1:0] mn;
  logic        [M_W-1:0] mn_u;
  int                    eo;
  int                    eb;

  always_comb begin
    one = M_W'(1) <<< MAN_W;
    if (m < 0) begin
      eo = int'(e) - 1;
      mn = m + one;
    end else if (m < one) begin
      eo = int'(e);
      mn = m;
    end else begin
      eo = int'(e) + 1;
      mn = (m - one) >>> 1;
    end
    mn_u = mn;
    eb = eo + BIAS;
    if (zero || eb <= 0) begin
      fp = '0;
    end else if (eb > EMAX) begin
      fp = {sgn, EXP_W'(EMAX), {MAN_W{1'b1}}};
    end else begin
      fp = {sgn, EXP_W'(eb), mn_u[MAN_W-1:0]};
    end
  end
endmodule
