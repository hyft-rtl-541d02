// tb_hyft_top: end-to-end test of the Hyft accelerator at its default size
// (N=8, FP16, CMP=4, 8.10 fixed point, 16-bit adder-tree fraction).
//
// A stream of jobs goes through the three-stage pipeline: forward softmax
// vectors with STEP 1, 2 and 3, reduced Precision settings, vectors wide
// enough that some exponentials underflow, and backward jobs that return the
// rows of s s^T. The output side applies random back-pressure in part of
// the run.
//
// Expected values come from a real-number model of the same approximations
// (fixed-point truncation, z'*1.4375, piecewise-linear 2^x, fixed-point sum,
// log-domain division, half-width mantissa product), with a tolerance for
// the bit-level truncations; forward results with STEP=1 and full precision
// are also compared with the exact softmax. Latency and throughput are
// checked on directed jobs: an isolated STEP=1 job appears K+3 = 5 cycles
// after it is accepted, and back-to-back jobs come out every K+1 = 3
// cycles. Each mechanism (stall, input back-pressure, STEP>1, backward job,
// mode switch, reduced precision, underflow, all three stages busy) is
// counted and must occur.
module tb_hyft_top;
  import hyft_pkg::*;
  import hyft_tb_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               rst_n;
  logic               in_valid, in_ready;
  logic [N-1:0][15:0] in_vec;
  job_mode_e          in_mode;
  logic [3:0]         cfg_step;
  logic [3:0]         cfg_prec;
  logic [4:0]         cfg_sum_prec;
  logic               out_valid, out_ready;
  logic [N-1:0][15:0] out_vec;
  job_mode_e          out_mode;
  logic [2:0]         out_row;
  logic               out_last;

  hyft_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_vec, .in_mode, .cfg_step, .cfg_prec,
    .cfg_sum_prec, .out_valid, .out_ready, .out_vec, .out_mode, .out_row, .out_last);

  typedef struct {
    logic [N-1:0][15:0] v;
    job_mode_e          mode;
    int                 step;
    int                 prec;
    int                 sprec;
  } job_t;

  job_t jobs[$];       // expected, in order
  int checks = 0, failures = 0;
  int n_stall = 0, n_inbp = 0, n_step2 = 0, n_step3 = 0, n_bwd = 0, n_switch = 0;
  int n_prec = 0, n_uflow = 0, n_overlap = 0;
  longint cyc = 0;
  bit    rand_ready = 1'b0;

  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- model
  function automatic real trunc_fx(input real v, input int p);
    real a;
    a = $floor(rabs(v) * pow2(p)) / pow2(p);
    return (v < 0.0) ? -a : a;
  endfunction

  function automatic real lg(input real x);   // floor(log2 x) + mantissa, x > 0
    int k;
    k = 0;
    while (x >= pow2(k + 1)) k++;
    while (x < pow2(k)) k--;
    return real'(k) + (x / pow2(k) - 1.0);
  endfunction

  task automatic model_fwd(input job_t j, output real s[N], output real ex[N]);
    real zf[N], mx, zm, sum, e;
    mx = -1.0e9;
    for (int i = 0; i < N; i++) zf[i] = trunc_fx(fp2r(64'(j.v[i]), 5, 10), j.prec);
    for (int i = 0; i < N; i += j.step) if (fp2r(64'(j.v[i]), 5, 10) > mx) mx = fp2r(64'(j.v[i]), 5, 10);
    zm = trunc_fx(mx, j.prec);
    sum = 0.0;
    for (int i = 0; i < N; i++) begin
      e = antilog((zf[i] - zm) * 1.4375);
      if (e < pow2(-14)) e = 0.0;
      if (e > 65504.0) e = 65504.0;          // FP16 saturation (skipped maximum)
      ex[i] = e;
      if (e >= 2.0) e = 2.0 - pow2(-16);
      sum += $floor(e * pow2(j.sprec)) / pow2(j.sprec);
    end
    for (int i = 0; i < N; i++) begin
      s[i] = (ex[i] == 0.0) ? 0.0 : antilog(lg(ex[i]) - lg(sum));
      if (s[i] < pow2(-14)) s[i] = 0.0;
      if (s[i] > 65504.0) s[i] = 65504.0;
    end
  endtask

  // ---------------------------------------------------------------- stimulus
  function automatic job_t make_job(input job_mode_e m, input int kind);
    job_t j;
    real x, tot;
    real ex[N];
    j.mode = m;
    j.step = 1; j.prec = 10; j.sprec = 16;
    if (m == MODE_FWD) begin
      if (kind % 4 == 1) j.step = 2;
      if (kind % 8 == 3) j.step = 3;
      if (kind % 5 == 2) begin j.prec = $urandom_range(4, 9); j.sprec = $urandom_range(8, 15); end
      for (int i = 0; i < N; i++) begin
        if (kind % 6 == 5) x = (real'($urandom_range(0, 30000)) - 15000.0) / 1000.0;  // wide: underflow
        else               x = (real'($urandom_range(0, 8000)) - 4000.0) / 1000.0;
        j.v[i] = 16'(r2fp(x, 5, 10));
      end
    end else begin
      tot = 0.0;
      for (int i = 0; i < N; i++) begin ex[i] = real'($urandom_range(1, 1000)); tot += ex[i]; end
      for (int i = 0; i < N; i++) j.v[i] = 16'(r2fp(ex[i] / tot, 5, 10));
    end
    return j;
  endfunction

  task automatic send(input job_t j);
    in_vec = j.v; in_mode = j.mode; cfg_step = 4'(j.step); cfg_prec = 4'(j.prec);
    cfg_sum_prec = 5'(j.sprec);
    in_valid = 1'b1;
    @(posedge clk);
    while (!in_ready) begin n_inbp++; @(posedge clk); end
    jobs.push_back(j);
    #1 in_valid = 1'b0;
  endtask

  // ---------------------------------------------------------------- checker
  job_mode_e last_mode = MODE_FWD;
  int        got_jobs = 0;

  task automatic check_fwd(input job_t j, input logic [N-1:0][15:0] y);
    real s[N], ex[N], got, zt[N], mx, tot;
    model_fwd(j, s, ex);
    for (int i = 0; i < N; i++) if (ex[i] == 0.0) n_uflow++;
    for (int i = 0; i < N; i++) begin
      got = fp2r(64'(y[i]), 5, 10);
      checks++;
      if (rabs(got - s[i]) > 0.02 * s[i] + pow2(-13)) begin
        failures++;
        $display("FAIL fwd elem %0d got=%g model=%g (step %0d prec %0d/%0d)", i, got, s[i],
                 j.step, j.prec, j.sprec);
      end
    end
    if (j.step == 1 && j.prec == 10) begin
      mx = -1.0e9; tot = 0.0;
      for (int i = 0; i < N; i++) begin zt[i] = fp2r(64'(j.v[i]), 5, 10); if (zt[i] > mx) mx = zt[i]; end
      for (int i = 0; i < N; i++) tot += $exp(zt[i] - mx);
      for (int i = 0; i < N; i++) begin
        got = fp2r(64'(y[i]), 5, 10);
        checks++;
        if (rabs(got - $exp(zt[i] - mx) / tot) > 0.15 * $exp(zt[i] - mx) / tot + 0.002) begin
          failures++;
          $display("FAIL accuracy elem %0d got=%g softmax=%g", i, got, $exp(zt[i] - mx) / tot);
        end
      end
    end
  endtask

  task automatic check_bwd_row(input job_t j, input int r, input logic [N-1:0][15:0] y);
    real a, b, ma, mbh, model, got;
    for (int i = 0; i < N; i++) begin
      a = fp2r(64'(j.v[i]), 5, 10);
      b = fp2r(64'(j.v[r]), 5, 10);
      ma  = real'(j.v[i][9:0]) / 1024.0;
      mbh = real'(j.v[r][9:5]) / 32.0;
      model = (a == 0.0 || b == 0.0) ? 0.0 :
              pow2(int'(j.v[i][14:10]) + int'(j.v[r][14:10]) - 30)
              * (1.0 + ma + real'(j.v[r][9:0]) / 1024.0 + ma * mbh);
      if (model < pow2(-14)) model = 0.0;
      got = fp2r(64'(y[i]), 5, 10);
      checks++;
      if (rabs(got - model) > model * pow2(-8) + pow2(-24)) begin
        failures++;
        $display("FAIL bwd row %0d elem %0d got=%g model=%g", r, i, got, model);
      end
    end
  endtask

  int bwd_row = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_stall++;
      if (dut.s1_q != dut.S1_IDLE && dut.r12_v && dut.r23_v) n_overlap++;
      if (out_valid && out_ready) begin
        if (jobs.size() == 0) begin
          failures++; $display("FAIL unexpected output");
        end else begin
          checks++;
          if (out_mode != jobs[0].mode) begin failures++; $display("FAIL mode order"); end
          if (jobs[0].mode == MODE_FWD) begin
            check_fwd(jobs[0], out_vec);
            checks++;
            if (!out_last) begin failures++; $display("FAIL fwd out_last"); end
            if (jobs[0].step == 2) n_step2++;
            if (jobs[0].step == 3) n_step3++;
            if (jobs[0].prec < 10) n_prec++;
            if (got_jobs > 0 && last_mode != MODE_FWD) n_switch++;
            last_mode = MODE_FWD;
            void'(jobs.pop_front());
            got_jobs++;
          end else begin
            checks++;
            if (int'(out_row) != bwd_row) begin failures++; $display("FAIL bwd row %0d exp %0d", out_row, bwd_row); end
            check_bwd_row(jobs[0], bwd_row, out_vec);
            if (bwd_row == N - 1) begin
              checks++;
              if (!out_last) begin failures++; $display("FAIL bwd out_last"); end
              n_bwd++;
              if (got_jobs > 0 && last_mode != MODE_BWD) n_switch++;
              last_mode = MODE_BWD;
              void'(jobs.pop_front());
              got_jobs++;
              bwd_row = 0;
            end else begin
              bwd_row++;
            end
          end
        end
      end
    end
  end

  always @(negedge clk) out_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- main
  task automatic expect_count(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("mechanism %-24s seen %0d times", name, n);
  endtask

  initial begin
    longint t0, t1, t2, t3;
    job_t j;
    rst_n = 1'b0; in_valid = 1'b0; in_vec = '0; in_mode = MODE_FWD; cfg_step = 4'd1;
    cfg_prec = 4'd10; cfg_sum_prec = 5'd16;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);

    // latency of an isolated STEP=1 job
    #1;
    j = make_job(MODE_FWD, 0);
    send(j);
    t0 = cyc;
    while (!out_valid) @(posedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 != 5) begin failures++; $display("FAIL latency %0d cycles, expected 5", t1 - t0); end
    else $display("latency of a STEP=1 job: %0d cycles", t1 - t0);
    repeat (3) @(posedge clk);

    // throughput: back-to-back STEP=1 jobs, one result every K+1 = 3 cycles
    #1;
    fork
      begin
        for (int k = 0; k < 6; k++) send(make_job(MODE_FWD, 0));
      end
      begin
        @(posedge clk);
        while (!(out_valid && out_ready)) @(posedge clk);
        t2 = cyc;
        repeat (5) begin
          @(posedge clk);
          while (!(out_valid && out_ready)) @(posedge clk);
        end
        t3 = cyc;
        checks++;
        if (t3 - t2 != 15) begin failures++; $display("FAIL 6 results took %0d cycles, expected 15", t3 - t2); end
        else $display("back-to-back results every %0d cycles", (t3 - t2) / 5);
      end
    join
    while (jobs.size() != 0) @(posedge clk);

    // random mix, with output back-pressure for the second half
    for (int k = 0; k < 400; k++) begin
      if (k == 200) rand_ready = 1'b1;
      #1;
      send(make_job(($urandom_range(0, 4) == 0) ? MODE_BWD : MODE_FWD, k));
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(posedge clk);
    end
    while (jobs.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);

    expect_count("output stall", n_stall);
    expect_count("input back-pressure", n_inbp);
    expect_count("STEP=2 max search", n_step2);
    expect_count("STEP=3 max search", n_step3);
    expect_count("backward job", n_bwd);
    expect_count("fwd/bwd mode switch", n_switch);
    expect_count("reduced precision", n_prec);
    expect_count("exponent underflow", n_uflow);
    expect_count("three stages busy", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
