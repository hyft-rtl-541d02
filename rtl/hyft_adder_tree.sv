// hyft_adder_tree: hybrid adder tree producing the softmax denominator.
//
// The N exponentials e^{z'} arrive in floating point. Each is converted by an
// FP2FX to an unsigned fixed-point number with one integer bit and ACCF
// fraction bits (no sign bit is needed: e^{z'} lies in (0,1]); the runtime
// input `prec` keeps only its top `prec` fraction bits. The N fixed-point
// values are summed by a binary tree of adders whose width grows by one bit
// per level, and the sum is turned back into floating point by a leading-one
// detector (LOD).
//
// Purely combinational; the enclosing pipeline registers the result. The
// structure (FP2FX, adder tree, LOD, one integer bit, configurable fraction)
// is the paper's; ACCF=16 is a choice of this implementation. Values of 2 or
// more (only possible when the max search skipped the true maximum) saturate
// in the FP2FX to just under 2.
module hyft_adder_tree #(
  parameter int unsigned N     = 8,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 10,
  parameter int unsigned ACCF  = 16,
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W,
  localparam int unsigned PW   = $clog2(ACCF + 1),
  localparam int unsigned LV   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SUM_W = 1 + ACCF + LV
) (
  input  logic [N-1:0][FP_W-1:0] add_in,
  input  logic [PW-1:0]          prec,
  output logic [SUM_W-1:0]       sum_fx,
  output logic [FP_W-1:0]        sum_fp
);
  localparam int unsigned NP = 1 << LV;          // leaves, padded to a power of 2

  // tree[l][k]: node k of level l; level 0 holds the converted leaves.
  logic [LV:0][NP-1:0][SUM_W-1:0] tree;

  for (genvar i = 0; i < int'(NP); i++) begin : g_leaf
    if (i < int'(N)) begin : g_conv
      logic [ACCF:0] fx;
      hyft_fp2fx #(.EXP_W(EXP_W), .MAN_W(MAN_W), .INT_W(1), .FRAC_W(ACCF),
                   .SIGNED(1'b0)) u_fp2fx (
        .fp(add_in[i]), .prec(prec), .fx(fx)
      );
      assign tree[0][i] = SUM_W'(fx);
    end else begin : g_pad
      assign tree[0][i] = '0;
    end
  end

  for (genvar l = 1; l <= int'(LV); l++) begin : g_lvl
    for (genvar k = 0; k < int'(NP); k++) begin : g_node
      if (k < int'(NP >> l)) begin : g_add
        assign tree[l][k] = tree[l-1][2*k] + tree[l-1][2*k+1];
      end else begin : g_zero
        assign tree[l][k] = '0;
      end
    end
  end

  assign sum_fx = tree[LV][0];

  hyft_lod #(.IN_W(SUM_W), .FRAC_W(ACCF), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_lod (
    .fx(sum_fx), .fp(sum_fp)
  );
endmodule
