// hyft_wl_driver: runs one configuration of the Hyft accelerator through a
// set of softmax and backward jobs and checks every result.
//
// Instantiates hyft_top with the given vector length and floating-point
// format, sends JOBS forward jobs (inputs uniform in [-4,4], STEP 1 and 2)
// and one backward job, and compares results with a real-number model of
// the design's approximations (tolerance for bit-level truncation) and,
// for STEP=1, with the exact softmax. Also checks the latency of the first
// job, K+3 cycles with K = ceil(N/(4*STEP)). Starts when `start` is high;
// raises `done` when finished
// and reports its counts on `checks`/`failures`.
module hyft_wl_driver
  import hyft_pkg::*;
  import hyft_tb_pkg::*;
#(
  parameter int N     = 128,
  parameter int EXP_W = 5,
  parameter int MAN_W = 10,
  parameter int JOBS  = 6
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int FP_W = 1 + EXP_W + MAN_W;
  localparam int AW   = $clog2(N) + 1;
  localparam int RW   = $clog2(N);
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;

  logic                   rst_n, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [N-1:0][FP_W-1:0] in_vec, out_vec;
  job_mode_e              in_mode, out_mode;
  logic [AW-1:0]          cfg_step;
  logic [3:0]             cfg_prec;
  logic [4:0]             cfg_sum_prec;
  logic [RW-1:0]          out_row;

  hyft_top #(.N(N), .EXP_W(EXP_W), .MAN_W(MAN_W)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_vec, .in_mode, .cfg_step, .cfg_prec,
    .cfg_sum_prec, .out_valid, .out_ready, .out_vec, .out_mode, .out_row, .out_last);

  function automatic real tr(input real v);      // truncate to 10 fraction bits
    real a;
    a = $floor(rabs(v) * 1024.0) / 1024.0;
    return (v < 0.0) ? -a : a;
  endfunction

  function automatic real lg(input real x);
    int k;
    k = 0;
    while (x >= pow2(k + 1)) k++;
    while (x < pow2(k)) k--;
    return real'(k) + (x / pow2(k) - 1.0);
  endfunction

  task automatic wait_out();
    @(posedge clk); #1;
    while (!out_valid) begin @(posedge clk); #1; end
  endtask

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    run_all();
    done = 1'b1;
  end

  task automatic run_all();
    real z[N], s[N], ex[N], mx, sum, tot, got, mdl, tru, a, b, ma, mbh;
    int step, lat;
    done = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_vec = '0; in_mode = MODE_FWD;
    cfg_step = AW'(1); cfg_prec = 4'd10; cfg_sum_prec = 5'd16; out_ready = 1'b1;
    wait (start);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int jb = 0; jb <= JOBS; jb++) begin
      step = (jb % 2) + 1;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (jb < JOBS) z[i] = (real'($urandom_range(0, 8000)) - 4000.0) / 1000.0;
        else           z[i] = real'($urandom_range(1, 1000)) / real'(N * 600);
        in_vec[i] = FP_W'(r2fp(z[i], EXP_W, MAN_W));
        z[i] = fp2r(64'(in_vec[i]), EXP_W, MAN_W);
      end
      in_mode  = (jb < JOBS) ? MODE_FWD : MODE_BWD;
      cfg_step = AW'(step);
      in_valid = 1'b1;
      @(posedge clk);
      #1 in_valid = 1'b0;
      lat = 0;
      while (!out_valid) begin @(posedge clk); #1; lat++; end
      if (jb == 0) begin
        checks++;
        if (lat != (N + 3) / 4 + 3) begin
          failures++;
          $display("FAIL N=%0d latency %0d expected %0d", N, lat, (N + 3) / 4 + 3);
        end
      end
      if (jb < JOBS) begin
        // real-number model of the design's approximations
        mx = -1.0e30;
        for (int i = 0; i < N; i += step) if (z[i] > mx) mx = z[i];
        sum = 0.0; tot = 0.0;
        for (int i = 0; i < N; i++) begin
          ex[i] = antilog((tr(z[i]) - tr(mx)) * 1.4375);
          if (ex[i] < pow2(1 - BIAS)) ex[i] = 0.0;
          sum += $floor((ex[i] >= 2.0 ? 2.0 - pow2(-16) : ex[i]) * 65536.0) / 65536.0;
          tot += $exp(z[i] - mx);
        end
        for (int i = 0; i < N; i++) begin
          s[i] = (ex[i] == 0.0) ? 0.0 : antilog(lg(ex[i]) - lg(sum));
          if (s[i] < pow2(1 - BIAS)) s[i] = 0.0;
          got = fp2r(64'(out_vec[i]), EXP_W, MAN_W);
          checks++;
          if (rabs(got - s[i]) > 0.02 * s[i] + pow2(-13)) begin
            failures++;
            $display("FAIL N=%0d e=%0d elem %0d got=%g model=%g", N, EXP_W, i, got, s[i]);
          end
          if (step == 1) begin
            tru = $exp(z[i] - mx) / tot;
            checks++;
            if (rabs(got - tru) > 0.15 * tru + 0.002) begin
              failures++;
              $display("FAIL N=%0d accuracy elem %0d got=%g softmax=%g", N, i, got, tru);
            end
          end
        end
      end else begin
        for (int r = 0; r < N; r++) begin
          if (r > 0) wait_out();
          checks++;
          if (int'(out_row) != r) begin failures++; $display("FAIL row %0d", out_row); end
          for (int i = 0; i < N; i++) begin
            a = z[i]; b = z[r];
            ma  = real'(in_vec[i][MAN_W-1:0]) / pow2(MAN_W);
            mbh = real'(in_vec[r][MAN_W-1 -: (MAN_W - MAN_W / 2)]) / pow2(MAN_W - MAN_W / 2);
            mdl = pow2(int'(in_vec[i][FP_W-2 -: EXP_W]) + int'(in_vec[r][FP_W-2 -: EXP_W]) - 2 * BIAS)
                  * (1.0 + ma + real'(in_vec[r][MAN_W-1:0]) / pow2(MAN_W) + ma * mbh);
            if (mdl < pow2(1 - BIAS)) begin mdl = 0.0; a = 0.0; end
            got = fp2r(64'(out_vec[i]), EXP_W, MAN_W);
            checks++;
            if (rabs(got - mdl) > mdl * pow2(-8) + pow2(-30)) begin
              failures++;
              $display("FAIL N=%0d bwd row %0d elem %0d got=%g model=%g", N, r, i, got, mdl);
            end
            checks++;
            if (rabs(got - a * b) > 0.04 * a * b + pow2(-30)) begin
              failures++;
              $display("FAIL N=%0d bwd accuracy got=%g true=%g", N, got, a * b);
            end
          end
        end
        checks++;
        if (!out_last) begin failures++; $display("FAIL out_last"); end
      end
      @(posedge clk);
    end
  endtask
endmodule
