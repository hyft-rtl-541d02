// tb_hyft_fx2fp: self-checking test of the FX2FP normaliser.
//
// Random exponent/mantissa pairs cover the three cases m<0, 0<=m<1 and
// m>=1. The expected value is computed with reals: the antilog
// 2^floor(e+m) * (1+frac(e+m)) for m<1, and 2^e * (1+m) for m>=1 (checked
// to within the one bit the halving drops). Flush-to-zero, saturation and
// the zero and sign inputs are checked with directed cases.
module tb_hyft_fx2fp;
  import hyft_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [9:0]  e;
  logic signed [12:0] m;
  logic               sgn, zero;
  logic [15:0]        fp;
  int checks = 0, failures = 0;

  hyft_fx2fp #(.EXP_W(5), .MAN_W(10), .E_W(10)) dut (.e(e), .m(m), .sgn(sgn), .zero(zero), .fp(fp));

  task automatic check_val(input int ei, input int mi, input real expv, input real tol);
    real got;
    e = 10'(ei); m = 13'(mi); sgn = 1'b0; zero = 1'b0;
    #1;
    got = fp2r(64'(fp), 5, 10);
    checks++;
    if (rabs(got - expv) > tol) begin
      failures++;
      $display("FAIL e=%0d m=%0d got=%g exp=%g (%h)", ei, mi, got, expv, fp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, expv;
    int ei, mi;
    // directed
    check_val(0, 0, 1.0, 0.0);
    check_val(-1, 512, 0.75, 0.0);
    check_val(0, -512, 0.75, 0.0);           // 2^-1 * (1 + 0.5)
    check_val(0, 1024, 2.0, 0.0);            // m = 1 -> exponent+1
    check_val(-20, 0, 0.0, 0.0);             // flush to zero
    check_val(20, 0, 65504.0, 0.0);          // saturate
    e = 0; m = 0; sgn = 1'b1; zero = 1'b0; #1;
    checks++; if (fp != 16'hbc00) begin failures++; $display("FAIL sign %h", fp); end
    zero = 1'b1; #1;
    checks++; if (fp != 16'h0000) begin failures++; $display("FAIL zero %h", fp); end
    for (int i = 0; i < 3000; i++) begin
      ei = $urandom_range(0, 24) - 12;
      mi = $urandom_range(0, 4 * 1024 - 2) - 1023;   // m in (-1, 3)
      x  = real'(ei) + real'(mi) / 1024.0;
      if (mi < 1024) expv = antilog(x);
      else           expv = pow2(ei) * (1.0 + real'(mi) / 1024.0);
      check_val(ei, mi, expv, (mi < 1024) ? 0.0 : pow2(ei) / 1024.0);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
