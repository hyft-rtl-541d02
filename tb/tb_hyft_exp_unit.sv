// tb_hyft_exp_unit: self-checking test of the hybrid exponent unit (N=8).
//
// Random fixed-point inputs (8.10) below a random maximum are applied. The
// expected result is the approximation the unit is meant to compute, built
// with reals: t = (z - z_max) * 1.4375, e = 2^floor(t) * (1 + frac(t)).
// The tolerance covers the truncating shifts of the shift-and-add and the
// 10-bit mantissa. Results must also stay within 8% of the true e^(z-z_max)
// for small |z - z_max|. Directed cases: z = z_max gives exactly 1.0,
// z - z_max = -1 gives exactly 0x3640, very negative inputs flush to zero.
module tb_hyft_exp_unit;
  import hyft_tb_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0][17:0] z_fx;
  logic [17:0]        zmax_fx;
  logic [N-1:0][15:0] exp_fp;
  int checks = 0, failures = 0;

  hyft_exp_unit #(.N(N), .EXP_W(5), .MAN_W(10), .FXI(8), .FXF(10)) dut (
    .z_fx(z_fx), .zmax_fx(zmax_fx), .exp_fp(exp_fp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int zm, zi;
    real zd, model, got, tru;
    // directed
    zmax_fx = 18'(3 * 1024);
    for (int i = 0; i < N; i++) z_fx[i] = 18'(3 * 1024 - i * 1024);
    z_fx[7] = 18'(-100 * 1024);
    #1;
    checks += 3;
    if (exp_fp[0] != 16'h3c00) begin failures++; $display("FAIL e^0 = %h", exp_fp[0]); end
    if (exp_fp[1] != 16'h3640) begin failures++; $display("FAIL e^-1 = %h", exp_fp[1]); end
    if (exp_fp[7] != 16'h0000) begin failures++; $display("FAIL flush = %h", exp_fp[7]); end
    for (int it = 0; it < 500; it++) begin
      zm = $urandom_range(0, 60 * 1024) - 30 * 1024;
      zmax_fx = 18'(zm);
      for (int i = 0; i < N; i++) begin
        zi = zm - int'($urandom_range(0, (it % 2) ? 3 * 1024 : 14 * 1024));
        if (zi < -128 * 1024 + 1) zi = -128 * 1024 + 1;
        z_fx[i] = 18'(zi);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        zd    = real'(int'(signed'(z_fx[i])) - zm) / 1024.0;
        model = antilog(zd * 1.4375);
        got   = fp2r(64'(exp_fp[i]), 5, 10);
        tru   = $exp(zd);
        checks++;
        if (model < pow2(-14)) begin
          if (got > pow2(-13)) begin failures++; $display("FAIL underflow zd=%g got=%g", zd, got); end
        end else if (rabs(got - model) > model * 0.004 + pow2(-24)) begin
          failures++;
          $display("FAIL zd=%g got=%g model=%g", zd, got, model);
        end
        if (zd > -3.0) begin
          checks++;
          if (rabs(got - tru) > 0.08 * tru) begin
            failures++;
            $display("FAIL accuracy zd=%g got=%g true=%g", zd, got, tru);
          end
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
