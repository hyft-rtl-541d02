// tb_hyft_lod: self-checking test of the leading-one detector.
//
// Random unsigned 4.16 fixed-point values (as they come out of an 8-input
// adder tree) of every magnitude are converted; the result must be the
// value truncated to an 11-bit significand, computed with reals, or zero
// for values below the smallest FP16 normal number.
module tb_hyft_lod;
  import hyft_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [19:0] fx;
  logic [15:0] fp;
  int checks = 0, failures = 0;

  hyft_lod #(.IN_W(20), .FRAC_W(16), .EXP_W(5), .MAN_W(10)) dut (.fx(fx), .fp(fp));

  task automatic check(input logic [19:0] v);
    real val, got, ulp;
    int k;
    fx = v;
    #1;
    val = real'(v) / 65536.0;
    got = fp2r(64'(fp), 5, 10);
    k = 0;
    while (val >= pow2(k + 1)) k++;
    while (val > 0.0 && val < pow2(k)) k--;
    ulp = pow2(k - 10);
    checks++;
    if ((v == 0 || val < pow2(-14)) ? (got != 0.0) : !(got <= val && val - got < ulp)) begin
      failures++;
      $display("FAIL fx=%h got=%g exp=%g", v, got, val);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(20'h0);
    check(20'h1);
    check(20'h10000);
    check(20'hfffff);
    for (int i = 0; i < 3000; i++) begin
      check(20'($urandom) >> $urandom_range(0, 19));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
