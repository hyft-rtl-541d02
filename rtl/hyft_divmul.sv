// hyft_divmul: hybrid division/multiplication unit (one lane).
//
// Operands A and B are floating point. A "bit select" splits each into its
// exponent and mantissa fields; the arithmetic is then done on those fields
// in fixed point, in the logarithmic domain:
//   OP_DIV: A/B ~ 2^(eA-eB) (1 + mA - mB)           (log2(1+x) ~ x)
//   OP_MUL: A*B ~ 2^(eA+eB) (1 + mA + mB + mA*mB')
// where mB' is the upper half of B's mantissa bits, so the "simplified
// multiplier" is MAN_W x MAN_W/2 bits instead of MAN_W x MAN_W. Ctrl (`op`)
// selects one exponent and one mantissa result, and the shared FX2FP block
// normalises the pair: a negative mantissa term m becomes exponent-1 and
// mantissa 1+m, a term of 1 or more becomes exponent+1 and mantissa (m-1)/2.
// The sign is the XOR of the operand signs. A zero A (or a zero B for the
// multiplication) gives 0; a zero divisor is treated as 1.
//
// Purely combinational. The two datapaths, the shared FX2FP and the
// half-width multiplier are the paper's; which half of which multiplicand
// is kept, and the zero handling, are this implementation's.
module hyft_divmul
  import hyft_pkg::*;
#(
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 10,
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W
) (
  input  logic [FP_W-1:0] a,
  input  logic [FP_W-1:0] b,
  input  divmul_op_e      op,
  output logic [FP_W-1:0] y
);
  localparam int unsigned H   = MAN_W - MAN_W / 2;  // kept bits of mB (upper half)
  localparam int unsigned E_W = EXP_W + 3;
  localparam int unsigned M_W = MAN_W + 3;
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;

  // bit select
  logic [EXP_W-1:0] ea, eb;
  logic [MAN_W-1:0] ma, mb;
  assign ea = a[FP_W-2 -: EXP_W];
  assign eb = b[FP_W-2 -: EXP_W];
  assign ma = a[MAN_W-1:0];
  assign mb = b[MAN_W-1:0];

  logic signed [E_W-1:0] e_sub, e_add, e_sel;
  logic signed [M_W-1:0] m_sub, m_add, m_sel;
  logic [MAN_W+H-1:0]    prod;
  logic                  zero;

  always_comb begin
    e_sub = E_W'(ea) - E_W'(eb);
    e_add = E_W'(ea) + E_W'(eb) - E_W'(2 * BIAS);
    m_sub = M_W'(ma) - M_W'(mb);
    prod  = (MAN_W+H)'(ma) * (MAN_W+H)'(mb[MAN_W-1 -: H]);   // simplified multiplier
    m_add = M_W'(ma) + M_W'(mb) + M_W'(prod >> H);
    if (op == OP_MUL) begin
      e_sel = e_add;
      m_sel = m_add;
      zero  = (ea == '0) || (eb == '0);
    end else begin
      e_sel = (eb == '0) ? E_W'(signed'({1'b0, ea}) - BIAS) : e_sub;
      m_sel = (eb == '0) ? M_W'(ma) : m_sub;
      zero  = (ea == '0);
    end
  end

  hyft_fx2fp #(.EXP_W(EXP_W), .MAN_W(MAN_W), .E_W(E_W)) u_fx2fp (
    .e(e_sel), .m(m_sel), .sgn(a[FP_W-1] ^ b[FP_W-1]), .zero(zero), .fp(y)
  );
endmodule
