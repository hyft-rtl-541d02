// hyft_top: Hyft softmax accelerator, three-stage vector-wise pipeline.
//
// Softmax s_i = e^(z_i - z_max) / sum_j e^(z_j - z_max) over an N-element
// floating-point vector, with every intermediate result kept in whichever
// number format makes the next operation cheap:
//   stage 1  input pre-processor: max search on the floating-point inputs,
//            then FP2FX of all elements and of the maximum (fixed point);
//   stage 2  hybrid exponent unit (fixed point in, floating point out) and
//            hybrid adder tree (FP2FX, fixed-point adds, LOD back to float);
//   stage 3  N hybrid division/multiplication units (log-domain float ops).
// The three stages work on three different vectors at once; a vector moves on
// when the next stage's register is free. The data dependency of softmax
// (the maximum and the sum must be complete before the next step) is thus
// respected per vector while the hardware stays busy.
//
// Backward (training) jobs, in_mode = MODE_BWD, carry a forward result s.
// They skip the max search and the exponent stage and use the division/
// multiplication units as multipliers: row j of s s^T (s_i*s_j, i=0..N-1)
// comes out on beat j, N beats per job, out_row = j, out_last on the last.
// Forming diag(s) - s s^T from these products is left to the consumer.
//
// Interface: valid/ready on input and output. A job is accepted when
// in_valid && in_ready; in_mode, cfg_step (STEP of the max search),
// cfg_prec (fraction bits of the pre-processor's fixed point) and
// cfg_sum_prec (fraction bits inside the adder tree) are sampled with it and
// travel with the vector. Output data is held while out_valid && !out_ready
// (a stall), which backs up the pipeline to the input.
//
// Timing, forward job, no stall: accepted at clock edge 0, K = ceil(N /
// (CMP*STEP)) search edges, hand-off to stage 2 at edge K+1, stage-2 result
// registered at edge K+2, out_valid after edge K+3. A new job can be
// accepted on the hand-off edge, so one vector is finished every K+1 cycles.
//
// The stage split, the blocks and the formats follow the paper; the
// handshakes, the per-job configuration, the cycle-level schedule and the
// row-by-row backward schedule are this implementation's.
module hyft_top
  import hyft_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned EXP_W = EXP_W_DEF,
  parameter int unsigned MAN_W = MAN_W_DEF,
  parameter int unsigned FXI   = FXI_DEF,
  parameter int unsigned FXF   = FXF_DEF,
  parameter int unsigned ACCF  = ACCF_DEF,
  parameter int unsigned CMP   = CMP_DEF,
  localparam int unsigned FP_W = 1 + EXP_W + MAN_W,
  localparam int unsigned FX_W = FXI + FXF,
  localparam int unsigned AW   = $clog2(N) + 1,
  localparam int unsigned PW   = $clog2(FXF + 1),
  localparam int unsigned SPW  = $clog2(ACCF + 1),
  localparam int unsigned RW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // job input
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [N-1:0][FP_W-1:0] in_vec,
  input  job_mode_e              in_mode,
  input  logic [AW-1:0]          cfg_step,
  input  logic [PW-1:0]          cfg_prec,
  input  logic [SPW-1:0]         cfg_sum_prec,
  // result output
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [N-1:0][FP_W-1:0] out_vec,
  output job_mode_e              out_mode,
  output logic [RW-1:0]          out_row,
  output logic                   out_last
);
  // ---------------------------------------------------------------- stage 1
  typedef enum logic [1:0] {S1_IDLE, S1_SEARCH, S1_HOLD} s1_state_e;

  s1_state_e              s1_q;
  logic                   s1_first_q;
  job_mode_e              s1_mode_q;
  logic [AW-1:0]          s1_step_q;
  logic [PW-1:0]          s1_prec_q;
  logic [SPW-1:0]         s1_sprec_q;
  logic                   pp_load, pp_en, pp_last;
  logic [N-1:0][FP_W-1:0] pp_data_fp;
  logic [N-1:0][FX_W-1:0] pp_fixed;
  logic [FP_W-1:0]        pp_max_fp;
  logic [FX_W-1:0]        pp_max_fx;
  logic                   xfer12;      // stage 1 hands its vector to stage 2
  logic                   accept;

  // stage 1 -> 2 register
  logic                   r12_v;
  job_mode_e              r12_mode;
  logic [SPW-1:0]         r12_sprec;
  logic [N-1:0][FX_W-1:0] r12_fx;
  logic [FX_W-1:0]        r12_max;
  logic [N-1:0][FP_W-1:0] r12_fp;
  logic                   xfer23;

  // stage 2 -> 3 register
  logic                   r23_v;
  job_mode_e              r23_mode;
  logic [N-1:0][FP_W-1:0] r23_a;
  logic [FP_W-1:0]        r23_sum;
  logic [RW-1:0]          row_q;
  logic                   fire3;       // stage 3 writes the output register
  logic                   done3;       // ... and with it finishes its job

  hyft_input_preproc #(.N(N), .EXP_W(EXP_W), .MAN_W(MAN_W), .FXI(FXI), .FXF(FXF),
                       .CMP(CMP)) u_pre (
    .clk, .rst_n,
    .load(pp_load), .data_in(in_vec),
    .en(pp_en), .sel(s1_first_q), .addr_in('0), .step(s1_step_q),
    .prec(s1_prec_q), .last(pp_last),
    .data_fp(pp_data_fp), .fixed_out(pp_fixed), .max_fp(pp_max_fp), .max_out(pp_max_fx)
  );

  assign xfer12   = (s1_q == S1_HOLD) && (!r12_v || xfer23);
  assign in_ready = (s1_q == S1_IDLE) || xfer12;
  assign accept   = in_valid && in_ready;
  assign pp_load  = accept;
  assign pp_en    = (s1_q == S1_SEARCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_q       <= S1_IDLE;
      s1_first_q <= 1'b0;
      s1_mode_q  <= MODE_FWD;
      s1_step_q  <= AW'(1);
      s1_prec_q  <= '0;
      s1_sprec_q <= '0;
    end else begin
      if (accept) begin
        s1_mode_q  <= in_mode;
        s1_step_q  <= (cfg_step == '0) ? AW'(1) : cfg_step;
        s1_prec_q  <= cfg_prec;
        s1_sprec_q <= cfg_sum_prec;
        s1_first_q <= 1'b1;
        s1_q       <= (in_mode == MODE_FWD) ? S1_SEARCH : S1_HOLD;
      end else if (xfer12) begin
        s1_q <= S1_IDLE;
      end else if (s1_q == S1_SEARCH) begin
        s1_first_q <= 1'b0;
        if (pp_last) s1_q <= S1_HOLD;
      end
    end
  end

  // ---------------------------------------------------------------- stage 2
  logic [N-1:0][FP_W-1:0] exp_fp;
  logic [FP_W-1:0]        sum_fp;
  logic [1 + ACCF + ((N > 1) ? $clog2(N) : 1) - 1:0] sum_fx;

  hyft_exp_unit #(.N(N), .EXP_W(EXP_W), .MAN_W(MAN_W), .FXI(FXI), .FXF(FXF)) u_exp (
    .z_fx(r12_fx), .zmax_fx(r12_max), .exp_fp(exp_fp)
  );

  hyft_adder_tree #(.N(N), .EXP_W(EXP_W), .MAN_W(MAN_W), .ACCF(ACCF)) u_add (
    .add_in(exp_fp), .prec(r12_sprec), .sum_fx(sum_fx), .sum_fp(sum_fp)
  );

  assign xfer23 = r12_v && (!r23_v || done3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r12_v     <= 1'b0;
      r12_mode  <= MODE_FWD;
      r12_sprec <= '0;
      r12_fx    <= '0;
      r12_max   <= '0;
      r12_fp    <= '0;
    end else begin
      if (xfer12) begin
        r12_v     <= 1'b1;
        r12_mode  <= s1_mode_q;
        r12_sprec <= s1_sprec_q;
        r12_fx    <= pp_fixed;
        r12_max   <= pp_max_fx;
        r12_fp    <= pp_data_fp;
      end else if (xfer23) begin
        r12_v <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- stage 3
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r23_v    <= 1'b0;
      r23_mode <= MODE_FWD;
      r23_a    <= '0;
      r23_sum  <= '0;
    end else begin
      if (xfer23) begin
        r23_v    <= 1'b1;
        r23_mode <= r12_mode;
        r23_a    <= (r12_mode == MODE_FWD) ? exp_fp : r12_fp;
        r23_sum  <= sum_fp;
      end else if (done3) begin
        r23_v <= 1'b0;
      end
    end
  end

  logic [N-1:0][FP_W-1:0] dm_y;
  logic [FP_W-1:0]        dm_b;
  divmul_op_e             dm_op;

  assign dm_op = (r23_mode == MODE_FWD) ? OP_DIV : OP_MUL;
  assign dm_b  = (r23_mode == MODE_FWD) ? r23_sum : r23_a[row_q];

  for (genvar i = 0; i < int'(N); i++) begin : g_dm
    hyft_divmul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_dm (
      .a(r23_a[i]), .b(dm_b), .op(dm_op), .y(dm_y[i])
    );
  end

  assign fire3 = r23_v && (!out_valid || out_ready);
  assign done3 = fire3 && ((r23_mode == MODE_FWD) || (row_q == RW'(N - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q     <= '0;
      out_valid <= 1'b0;
      out_vec   <= '0;
      out_mode  <= MODE_FWD;
      out_row   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (fire3) begin
        out_valid <= 1'b1;
        out_vec   <= dm_y;
        out_mode  <= r23_mode;
        out_row   <= (r23_mode == MODE_FWD) ? '0 : row_q;
        out_last  <= done3;
        row_q     <= done3 ? '0 : row_q + RW'(1);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // Output handshake: data must hold while it waits for out_ready.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_vec) && $stable(out_row));

endmodule
