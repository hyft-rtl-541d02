// hyft_fp2fx: floating-point to fixed-point converter (FP2FX).
//
// Converts one IEEE-754 style number (1 sign, EXP_W exponent, MAN_W mantissa
// bits, bias 2^(EXP_W-1)-1) to a fixed-point number with INT_W integer bits
// and FRAC_W fraction bits. With SIGNED=1 the result is two's complement and
// the sign bit is one of the INT_W integer bits; with SIGNED=0 the sign of
// the input is ignored (used for e^{z'}, which is never negative).
//
// The significant bits are positioned by one barrel shift. The runtime input
// `prec` is the Precision control: only the top `prec` of the FRAC_W fraction
// bits are kept, the rest are cleared, so the binary point stays fixed while
// the resolution is configurable. Values too large for the format, infinities
// and NaNs saturate to the largest magnitude; zeros and subnormals give 0.
// Rounding is toward zero (the magnitude is truncated, then negated).
//
// Purely combinational; no clock. The converter itself and its Precision
// input follow the paper; saturation, subnormal flushing and the rounding
// direction are choices of this implementation.
module hyft_fp2fx #(
  parameter int unsigned EXP_W  = 5,
  parameter int unsigned MAN_W  = 10,
  parameter int unsigned INT_W  = 8,
  parameter int unsigned FRAC_W = 10,
  parameter bit          SIGNED = 1'b1,
  localparam int unsigned FP_W  = 1 + EXP_W + MAN_W,
  localparam int unsigned FX_W  = INT_W + FRAC_W,
  localparam int unsigned PW    = $clog2(FRAC_W + 1)
) (
  input  logic [FP_W-1:0] fp,
  input  logic [PW-1:0]   prec,
  output logic [FX_W-1:0] fx
);
  localparam int unsigned MW   = FX_W - (SIGNED ? 1 : 0);  // magnitude bits
  localparam int unsigned WW   = MW + MAN_W + 2;           // shift workspace
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;

  logic              sgn;
  logic [EXP_W-1:0]  ex;
  logic [MAN_W:0]    sig;
  logic [WW-1:0]     wide;
  logic [MW-1:0]     mag;
  logic [MW-1:0]     mask;
  int                sh;
  int unsigned       drop;

  always_comb begin
    sgn  = fp[FP_W-1];
    ex   = fp[FP_W-2 -: EXP_W];
    sig  = (ex == '0) ? '0 : {1'b1, fp[MAN_W-1:0]};
    sh   = int'(ex) - BIAS - int'(MAN_W) + int'(FRAC_W);
    wide = '0;
    mag  = '0;
    if (ex == '1) begin
      mag = '1;                                    // Inf/NaN: saturate
    end else if (sh >= 0) begin
      if (sh >= int'(MW) + 1) begin
        mag = (sig == '0) ? '0 : '1;
      end else begin
        wide = WW'(sig) << sh;
        mag  = (wide >= (WW'(1) << MW)) ? '1 : wide[MW-1:0];
      end
    end else begin
      if (-sh <= int'(MAN_W) + 1) begin
        wide = WW'(sig) >> (-sh);
        mag  = (wide >= (WW'(1) << MW)) ? '1 : wide[MW-1:0];
      end
    end
    // Precision: keep only the top `prec` fraction bits.
    drop = (int'(prec) >= int'(FRAC_W)) ? 0 : (FRAC_W - int'(prec));
    mask = ~((MW'(1) << drop) - MW'(1));
    mag  = mag & mask;
    if (SIGNED && sgn) fx = FX_W'(-{1'b0, mag});
    else               fx = FX_W'(mag);
  end
endmodule
