// tb_hyft_workloads: the configurations evaluated for the design besides the
// default one: 128-element vectors in FP16, 8-element vectors in FP32 and
// 128-element vectors in FP32. Each runs softmax jobs (STEP 1 and 2) and a
// backward job through its own hyft_top instance (see hyft_wl_driver), one
// configuration after the other, and all results are checked.
module tb_hyft_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;

  hyft_wl_driver #(.N(128), .EXP_W(5), .MAN_W(10), .JOBS(6)) u_n128_fp16 (.clk, .start(1'b1), .done(d0), .checks(c0), .failures(f0));
  hyft_wl_driver #(.N(8),   .EXP_W(8), .MAN_W(23), .JOBS(40)) u_n8_fp32   (.clk, .start(d0), .done(d1), .checks(c1), .failures(f1));
  hyft_wl_driver #(.N(128), .EXP_W(8), .MAN_W(23), .JOBS(6)) u_n128_fp32 (.clk, .start(d1), .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2);
    $display("N=128 FP16: checks=%0d failures=%0d", c0, f0);
    $display("N=8   FP32: checks=%0d failures=%0d", c1, f1);
    $display("N=128 FP32: checks=%0d failures=%0d", c2, f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
