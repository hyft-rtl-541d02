// tb_hyft_adder_tree: self-checking test of the hybrid adder tree (N=8).
//
// Random exponentials in (0,1] (as FP16) are summed at random Precision
// settings. Expected: each input truncated to `prec` fraction bits, summed
// exactly in reals (also compared with the fixed-point sum output), then
// truncated to an 11-bit significand for the floating-point output.
module tb_hyft_adder_tree;
  import hyft_tb_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0][15:0] add_in;
  logic [4:0]         prec;
  logic [19:0]        sum_fx;
  logic [15:0]        sum_fp;
  int checks = 0, failures = 0;

  hyft_adder_tree #(.N(N), .EXP_W(5), .MAN_W(10), .ACCF(16)) dut (
    .add_in(add_in), .prec(prec), .sum_fx(sum_fx), .sum_fp(sum_fp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, s, got, ulp;
    int p, k;
    for (int it = 0; it < 2000; it++) begin
      p = (it < 1000) ? 16 : $urandom_range(0, 16);
      prec = 5'(p);
      s = 0.0;
      for (int i = 0; i < N; i++) begin
        if (i == 0) v = 1.0;
        else v = $exp(-real'($urandom_range(0, 12000)) / 1000.0);
        add_in[i] = 16'(r2fp(v, 5, 10));
        v = fp2r(64'(add_in[i]), 5, 10);
        s += $floor(v * pow2(p)) / pow2(p);
      end
      #1;
      checks++;
      if (real'(sum_fx) / 65536.0 != s) begin
        failures++;
        $display("FAIL fixed sum got=%g exp=%g", real'(sum_fx) / 65536.0, s);
      end
      got = fp2r(64'(sum_fp), 5, 10);
      k = 0;
      while (s >= pow2(k + 1)) k++;
      ulp = pow2(k - 10);
      checks++;
      if (!(got <= s && s - got < ulp)) begin
        failures++;
        $display("FAIL float sum got=%g exp=%g", got, s);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
