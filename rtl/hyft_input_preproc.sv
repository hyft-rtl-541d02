// hyft_input_preproc: parameterized input pre-processor.
//
// Holds one input vector of N floating-point numbers in a data buffer and
// searches its maximum, then presents every element and the maximum in
// signed fixed point (FXI integer bits, FXF fraction bits) for the exponent
// unit.
//
// Max search: on each cycle with `en` high the buffer is read at CMP
// addresses base, base+STEP, ..., base+(CMP-1)*STEP (addresses >= N are
// ignored), a comparator tree picks the largest, and a final comparator
// merges it into the max buffer. The base address comes from a multiplexer
// steered by SEL: with `sel` high it is the external `addr_in` and the max
// buffer is restarted, otherwise it is the internal address register, which
// advances by CMP*STEP per cycle. STEP=1 looks at every element; STEP=2 at
// every other one, halving the search time at the cost of possibly missing
// the true maximum. A search therefore takes ceil(N / (CMP*STEP)) cycles.
//
// Comparisons are done on the floating-point bit patterns, mapped to an
// order-preserving unsigned key (negative numbers inverted, positive numbers
// with the sign bit set). FP2FX converters run in parallel on all buffer
// entries and on the max buffer; `prec` (Precision) sets their fraction bits.
//
// `last` is high during the search cycle whose reads reach the end of the
// buffer, i.e. the final cycle of the search.
//
// Timing: `load` writes `data_in` into the buffer at the clock edge. Each
// `en` cycle updates the max buffer at the clock edge. Outputs are
// combinational from the buffer and the max buffer.
//
// The data buffer, STEP adder, SEL multiplexer, comparator tree, max buffer
// and FP2FX converters are those of the paper's figure; the number of
// comparator inputs (CMP=4, as drawn), the advance of CMP*STEP per cycle and
// the comparison key are choices of this implementation.
module hyft_input_preproc #(
  parameter int unsigned N     = 8,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned MAN_W = 10,
  parameter int unsigned FXI   = 8,
  parameter int unsigned FXF   = 10,
  parameter int unsigned CMP   = 4,
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W,
  localparam int unsigned FX_W = FXI + FXF,
  localparam int unsigned AW   = $clog2(N) + 1,
  localparam int unsigned PW   = $clog2(FXF + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic [N-1:0][FP_W-1:0] data_in,
  input  logic                   en,
  input  logic                   sel,
  input  logic [AW-1:0]          addr_in,
  input  logic [AW-1:0]          step,
  input  logic [PW-1:0]          prec,
  output logic                   last,
  output logic [N-1:0][FP_W-1:0] data_fp,
  output logic [N-1:0][FX_W-1:0] fixed_out,
  output logic [FP_W-1:0]        max_fp,
  output logic [FX_W-1:0]        max_out
);
  localparam int unsigned WA = AW + $clog2(CMP) + 2;   // wide address arithmetic

  logic [N-1:0][FP_W-1:0] buf_q;       // data buffer
  logic [FP_W-1:0]        max_q;       // max buffer
  logic [AW-1:0]          addr_q;      // address register
  logic [WA-1:0]          base;
  logic [FP_W-1:0]        grp_max;
  logic                   grp_vld;
  logic [WA-1:0]          nxt;

  function automatic logic [FP_W-1:0] key(input logic [FP_W-1:0] v);
    return v[FP_W-1] ? ~v : {1'b1, v[FP_W-2:0]};
  endfunction

  // Comparator tree over the CMP strided reads.
  always_comb begin
    logic [WA-1:0] ad;
    base    = sel ? WA'(addr_in) : WA'(addr_q);
    grp_max = '0;
    grp_vld = 1'b0;
    for (int j = 0; j < int'(CMP); j++) begin
      ad = base + WA'(j) * WA'(step);
      if (ad < WA'(N)) begin
        if (!grp_vld || key(buf_q[ad[AW-1:0]]) > key(grp_max)) grp_max = buf_q[ad[AW-1:0]];
        grp_vld = 1'b1;
      end
    end
    nxt = base + WA'(CMP) * WA'(step);
    last = (nxt >= WA'(N));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      max_q  <= '0;
      addr_q <= '0;
    end else begin
      if (load) buf_q <= data_in;
      if (en) begin
        addr_q <= (nxt >= WA'(N)) ? AW'(N) : AW'(nxt);
        if (grp_vld && (sel || key(grp_max) > key(max_q))) max_q <= grp_max;
      end
    end
  end

  assign data_fp = buf_q;
  assign max_fp  = max_q;

  for (genvar i = 0; i < int'(N); i++) begin : g_cvt
    hyft_fp2fx #(.EXP_W(EXP_W), .MAN_W(MAN_W), .INT_W(FXI), .FRAC_W(FXF), .SIGNED(1'b1))
      u_fp2fx (.fp(buf_q[i]), .prec(prec), .fx(fixed_out[i]));
  end

  hyft_fp2fx #(.EXP_W(EXP_W), .MAN_W(MAN_W), .INT_W(FXI), .FRAC_W(FXF), .SIGNED(1'b1))
    u_fp2fx_max (.fp(max_q), .prec(prec), .fx(max_out));
endmodule
