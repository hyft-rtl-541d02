// tb_hyft_fp2fx: self-checking test of the FP2FX converter.
//
// Instances: the signed 8.10 format of the input pre-processor and the
// unsigned 1.16 format of the adder tree, fed with FP16, and the unsigned
// 1.16 format fed with FP32 values up to 8 (saturation after a right shift). Random FP16 inputs and random
// Precision values are applied; the expected fixed-point value is computed
// with real arithmetic (truncate toward zero to `prec` fraction bits,
// saturate at the format limit). Directed cases cover zero, Inf and the
// saturation limit.
module tb_hyft_fp2fx;
  import hyft_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [15:0] fp;
  logic [3:0]  prec_s;
  logic [4:0]  prec_u;
  logic [17:0] fx_s;
  logic [16:0] fx_u;
  int checks = 0, failures = 0;

  hyft_fp2fx #(.EXP_W(5), .MAN_W(10), .INT_W(8), .FRAC_W(10), .SIGNED(1'b1)) dut_s (
    .fp(fp), .prec(prec_s), .fx(fx_s));
  hyft_fp2fx #(.EXP_W(5), .MAN_W(10), .INT_W(1), .FRAC_W(16), .SIGNED(1'b0)) dut_u (
    .fp(fp), .prec(prec_u), .fx(fx_u));

  // FP32 input into the unsigned 1.16 format (wide mantissa: right shifts
  // can overflow the format too).
  logic [31:0] fp32;
  logic [16:0] fx32;
  hyft_fp2fx #(.EXP_W(8), .MAN_W(23), .INT_W(1), .FRAC_W(16), .SIGNED(1'b0)) dut_32 (
    .fp(fp32), .prec(5'd16), .fx(fx32));

  function automatic longint expect_fx(input real v, input int intw, input int frac,
                                       input int p, input bit sgn_ok);
    real a, lim;
    longint mag, maxmag;
    maxmag = (longint'(1) << (intw + frac - (sgn_ok ? 1 : 0))) - 1;
    a = rabs(v);
    lim = pow2(intw - (sgn_ok ? 1 : 0));
    if (a >= lim) mag = maxmag;
    else mag = longint'($floor(a * pow2(p)));
    if (a >= lim) mag = (mag >> (frac - p)) << (frac - p);
    else mag = mag << (frac - p);
    return (sgn_ok && v < 0.0) ? -mag : mag;
  endfunction

  task automatic check(input logic [15:0] f, input int ps, input int pu);
    real v;
    longint es, eu;
    fp = f; prec_s = 4'(ps); prec_u = 5'(pu);
    #1;
    v = fp2r(f, 5, 10);
    if (f[14:10] == 5'h1f) v = f[15] ? -1.0e9 : 1.0e9;
    es = expect_fx(v, 8, 10, ps, 1'b1);
    eu = expect_fx(rabs(v), 1, 16, pu, 1'b0);
    checks += 2;
    if (longint'(signed'(fx_s)) != es) begin
      failures++;
      $display("FAIL signed fp=%h prec=%0d got=%0d exp=%0d", f, ps, signed'(fx_s), es);
    end
    if (longint'(fx_u) != eu) begin
      failures++;
      $display("FAIL unsigned fp=%h prec=%0d got=%0d exp=%0d", f, pu, fx_u, eu);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h0000, 10, 16);   // zero
    check(16'h3c00, 10, 16);   // 1.0
    check(16'hbc00, 10, 16);   // -1.0
    check(16'h7c00, 10, 16);   // +Inf saturates
    check(16'hd800, 10, 16);   // -128 saturates
    check(16'h57ff, 10, 16);   // 127.9 in range
    check(16'h3555, 3, 4);     // reduced precision
    for (int i = 0; i < 1000; i++) begin
      real v32;
      v32 = real'($urandom_range(1, 80000)) / 10000.0;
      fp32 = 32'(r2fp(v32, 8, 23));
      #1;
      checks++;
      if (longint'(fx32) != expect_fx(fp2r(64'(fp32), 8, 23), 1, 16, 16, 1'b0)) begin
        failures++;
        $display("FAIL fp32 %g got=%0d", v32, fx32);
      end
    end
    for (int i = 0; i < 3000; i++) begin
      logic [15:0] r;
      r = 16'($urandom);
      // keep most exponents in a useful range
      if (i % 2 == 0) r[14:10] = 5'(6 + $urandom_range(0, 16));
      check(r, $urandom_range(0, 10), $urandom_range(0, 16));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
