// hyft_lod: leading-one detector turning an unsigned fixed-point value into
// floating point (the LOD at the output of the hybrid adder tree).
//
// The input has IN_W bits of which FRAC_W are fraction bits. The position p
// of the most significant 1 gives the exponent p - FRAC_W; the bits below it,
// left-aligned and truncated to MAN_W bits, give the mantissa. A zero input
// gives +0. Exponents outside the normal range flush to zero or saturate.
//
// Purely combinational. The paper names the LOD; the priority scan, the
// truncation and the range handling are this implementation's.
module hyft_lod #(
  parameter int unsigned IN_W   = 20,
  parameter int unsigned FRAC_W = 16,
  parameter int unsigned EXP_W  = 5,
  parameter int unsigned MAN_W  = 10,
  localparam int unsigned FP_W  = 1 + EXP_W + MAN_W
) (
  input  logic [IN_W-1:0] fx,
  output logic [FP_W-1:0] fp
);
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int EMAX = (1 << EXP_W) - 2;
  localparam int unsigned WW = IN_W + MAN_W;

  int            pos;
  int            eb;
  logic [WW-1:0] al;

  always_comb begin
    pos = -1;
    for (int i = 0; i < int'(IN_W); i++) begin
      if (fx[i]) pos = i;
    end
    al = '0;
    eb = 0;
    fp = '0;
    if (pos >= 0) begin
      // Shift so that the leading one lands at bit WW-1 and drop it.
      al = WW'(fx) << (WW - 1 - pos);
      eb = pos - int'(FRAC_W) + BIAS;
      if (eb > EMAX)    fp = {1'b0, EXP_W'(EMAX), {MAN_W{1'b1}}};
      else if (eb > 0)  fp = {1'b0, EXP_W'(eb), al[WW-2 -: MAN_W]};
    end
  end
endmodule
