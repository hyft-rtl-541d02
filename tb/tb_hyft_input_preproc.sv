// tb_hyft_input_preproc: self-checking test of the input pre-processor.
//
// N=8, CMP=4. Random FP16 vectors are loaded and searched with STEP 1, 2
// and 3. Checked: the search takes ceil(N/(CMP*STEP)) cycles (the `last`
// flag), the max buffer holds the largest of the elements at indices
// 0, STEP, 2*STEP, ... (computed in reals), and every fixed-point output
// equals the real value truncated toward zero to `prec` fraction bits.
module tb_hyft_input_preproc;
  import hyft_tb_pkg::*;

  localparam int N = 8;
  localparam int CMP = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               rst_n, load, en, sel, last;
  logic [N-1:0][15:0] data_in, data_fp;
  logic [3:0]         addr_in, step;
  logic [3:0]         prec;
  logic [N-1:0][17:0] fixed_out;
  logic [15:0]        max_fp;
  logic [17:0]        max_out;
  int checks = 0, failures = 0;

  hyft_input_preproc #(.N(N), .EXP_W(5), .MAN_W(10), .FXI(8), .FXF(10), .CMP(CMP)) dut (
    .clk, .rst_n, .load, .data_in, .en, .sel, .addr_in, .step, .prec, .last,
    .data_fp, .fixed_out, .max_fp, .max_out);

  function automatic int trunc_fx(input real v, input int p);
    real a;
    int m;
    a = rabs(v);
    m = int'($floor(a * pow2(p))) << (10 - p);
    return (v < 0.0) ? -m : m;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real vals[N];
    real mx;
    int cyc, st, p, expc;
    rst_n = 1'b0; load = 1'b0; en = 1'b0; sel = 1'b0; addr_in = '0; step = 4'd1; prec = 4'd10;
    data_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 600; it++) begin
      st = 1 + (it % 3);
      p  = (it % 5 == 0) ? $urandom_range(0, 10) : 10;
      for (int i = 0; i < N; i++) begin
        vals[i] = (real'($urandom_range(0, 40000)) - 20000.0) / 1000.0;
        data_in[i] = 16'(r2fp(vals[i], 5, 10));
        vals[i] = fp2r(64'(data_in[i]), 5, 10);
      end
      @(negedge clk) load = 1'b1;
      @(negedge clk) begin load = 1'b0; step = 4'(st); prec = 4'(p); en = 1'b1; sel = 1'b1; end
      cyc = 0;
      forever begin
        #1;
        cyc++;
        if (last) break;
        @(negedge clk) sel = 1'b0;
        if (cyc > 20) break;
      end
      @(negedge clk) begin en = 1'b0; sel = 1'b0; end
      expc = (N + CMP * st - 1) / (CMP * st);
      checks++;
      if (cyc != expc) begin failures++; $display("FAIL search cycles %0d exp %0d step %0d", cyc, expc, st); end
      mx = -1.0e9;
      for (int i = 0; i < N; i += st) if (vals[i] > mx) mx = vals[i];
      checks++;
      if (fp2r(64'(max_fp), 5, 10) != mx) begin
        failures++;
        $display("FAIL max got=%g exp=%g step=%0d", fp2r(64'(max_fp), 5, 10), mx, st);
      end
      checks++;
      if (int'(signed'(max_out)) != trunc_fx(mx, p)) begin
        failures++;
        $display("FAIL max fixed got=%0d exp=%0d", signed'(max_out), trunc_fx(mx, p));
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(signed'(fixed_out[i])) != trunc_fx(vals[i], p)) begin
          failures++;
          $display("FAIL fixed[%0d] got=%0d exp=%0d", i, signed'(fixed_out[i]), trunc_fx(vals[i], p));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
