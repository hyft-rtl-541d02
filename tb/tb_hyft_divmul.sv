// tb_hyft_divmul: self-checking test of the division/multiplication unit.
//
// Division: random softmax-like operands (A in (0,1], B in [1,8]) and
// general ones. Expected = antilog((eA + mA) - (eB + mB)) in reals, i.e.
// the log-subtract approximation; it must also be within 13% of the true
// quotient. Multiplication: expected = 2^(eA+eB) (1 + mA + mB + mA*mB'),
// mB' = mB truncated to its upper 5 bits, within one output ulp; and within
// 4% of the true product. Zero operands and signs are checked directly.
module tb_hyft_divmul;
  import hyft_tb_pkg::*;
  import hyft_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [15:0] a, b, y;
  divmul_op_e  op;
  int checks = 0, failures = 0;

  hyft_divmul #(.EXP_W(5), .MAN_W(10)) dut (.a(a), .b(b), .op(op), .y(y));

  function automatic real lg(input logic [15:0] x);   // e + m of a positive number
    return real'(int'(x[14:10]) - 15) + real'(x[9:0]) / 1024.0;
  endfunction

  task automatic run(input logic [15:0] ai, input logic [15:0] bi, input divmul_op_e o);
    real va, vb, got, model, tru, ma, mb, mbh, tol;
    a = ai; b = bi; op = o;
    #1;
    va = rabs(fp2r(64'(ai), 5, 10));
    vb = rabs(fp2r(64'(bi), 5, 10));
    got = rabs(fp2r(64'(y), 5, 10));
    if (o == OP_DIV) begin
      model = antilog(lg(ai) - lg(bi));
      tru = va / vb;
      tol = model * pow2(-11);
    end else begin
      ma = real'(ai[9:0]) / 1024.0;
      mb = real'(bi[9:0]) / 1024.0;
      mbh = real'(bi[9:5]) / 32.0;
      model = pow2(int'(ai[14:10]) + int'(bi[14:10]) - 30) * (1.0 + ma + mb + ma * mbh);
      tru = va * vb;
      tol = model * pow2(-9);
    end
    checks += 3;
    if (model < pow2(-14)) begin          // below the FP16 normal range: flushed
      model = 0.0;
      tru = 0.0;
    end
    if (rabs(got - model) > tol) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h got=%g model=%g", o, ai, bi, got, model);
    end
    if (rabs(got - tru) > ((o == OP_DIV) ? 0.13 : 0.04) * tru) begin
      failures++;
      $display("FAIL accuracy op=%0d a=%h b=%h got=%g true=%g", o, ai, bi, got, tru);
    end
    if (y[15] != (ai[15] ^ bi[15])) begin
      failures++;
      $display("FAIL sign a=%h b=%h y=%h", ai, bi, y);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] ra, rb;
    // directed
    a = 16'h3800; b = 16'h4000; op = OP_DIV; #1;        // 0.5 / 2 = 0.25
    checks++; if (y != 16'h3400) begin failures++; $display("FAIL 0.5/2 = %h", y); end
    a = 16'h3e00; b = 16'h3e00; op = OP_MUL; #1;        // 1.5 * 1.5 = 2.25
    checks++; if (y != 16'h4080) begin failures++; $display("FAIL 1.5*1.5 = %h", y); end
    a = 16'h0000; b = 16'h3e00; op = OP_DIV; #1;
    checks++; if (y != 16'h0000) begin failures++; $display("FAIL 0/x = %h", y); end
    a = 16'h3e00; b = 16'h0000; op = OP_MUL; #1;
    checks++; if (y != 16'h0000) begin failures++; $display("FAIL x*0 = %h", y); end
    for (int i = 0; i < 2000; i++) begin
      ra = 16'(r2fp($exp(-real'($urandom_range(0, 9000)) / 1000.0), 5, 10));
      rb = 16'(r2fp(1.0 + real'($urandom_range(0, 7000)) / 1000.0, 5, 10));
      run(ra, rb, OP_DIV);
      ra = {1'($urandom), 5'($urandom_range(8, 22)), 10'($urandom)};
      rb = {1'($urandom), 5'($urandom_range(8, 22)), 10'($urandom)};
      run(ra, rb, OP_DIV);
      run(ra, rb, OP_MUL);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
