// hyft_exp_unit: hybrid exponent unit, N lanes.
//
// Each lane takes a fixed-point input z (signed, FXI integer and FXF fraction
// bits) and the shared fixed-point maximum z_max, and returns e^(z - z_max)
// as a floating-point number (sign 0, EXP_W/MAN_W fields).
//
//   z'  = z - z_max                                 (fixed-point subtract)
//   t   = z' + (z' >>> 1) - (z' >>> 4)              (z' * 1.0111b = z' * 1.4375,
//                                                     the Booth-recoded log2(e))
//   U   = floor(t), F = frac(t)                      (read straight off the
//                                                     binary point, no shifter)
//   e^z' ~ 2^(u-1) (1 + (1+v))  with u = U+1, v = F-1 when F != 0,
//        = 2^U (1 + F)           in both cases
// so the FX2FP stage receives exponent U and mantissa F. Results below the
// smallest normal number are flushed to zero.
//
// Purely combinational; the enclosing pipeline registers the outputs. The
// shift-and-add constant, the integer/fraction split and the FX2FP rule are
// the paper's. Taking the fraction from a two's complement floor (so that
// F is non-negative) is an equivalent re-arrangement chosen here. A positive
// z' (possible when the max search skips elements, STEP > 1) is handled the
// same way and gives a result above 1.
module hyft_exp_unit #(
  parameter int unsigned N     = 8,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 10,
  parameter int unsigned FXI   = 8,
  parameter int unsigned FXF   = 10,
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W,
  localparam int unsigned FX_W = FXI + FXF
) (
  input  logic [N-1:0][FX_W-1:0] z_fx,
  input  logic        [FX_W-1:0] zmax_fx,
  output logic [N-1:0][FP_W-1:0] exp_fp
);
  localparam int unsigned T_W = FX_W + 2;     // room for z' and the x1.4375 growth
  localparam int unsigned E_W = T_W - FXF + 1;
  localparam int unsigned M_W = MAN_W + 3;

  for (genvar i = 0; i < int'(N); i++) begin : g_lane
    logic signed [T_W-1:0] zd;
    logic signed [T_W-1:0] t;
    logic signed [E_W-1:0] u_int;
    logic        [FXF-1:0] frac;
    logic        [MAN_W-1:0] man;
    logic signed [M_W-1:0] m;

    always_comb begin
      zd    = T_W'(signed'(z_fx[i])) - T_W'(signed'(zmax_fx));
      t     = zd + (zd >>> 1) - (zd >>> 4);
      u_int = E_W'(t >>> FXF);
      frac  = t[FXF-1:0];
      if (MAN_W >= FXF) man = MAN_W'({frac, {(MAN_W - FXF + 1){1'b0}}} >> 1);
      else              man = frac[FXF-1 -: MAN_W];
      m     = M_W'({3'b000, man});
    end

    hyft_fx2fp #(.EXP_W(EXP_W), .MAN_W(MAN_W), .E_W(E_W)) u_fx2fp (
      .e(u_int), .m(m), .sgn(1'b0), .zero(1'b0), .fp(exp_fp[i])
    );
  end
endmodule
