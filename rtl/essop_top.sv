// essop_top: the ESSOP array. It computes the weight-update outer product
// dW = Delta * X^T of a network layer with stochastic-computing multipliers,
// one row (one Delta^j against all N elements of X) every M clocks.
//
// Structure, left to right:
//   - configuration register G (sequence length M, learning-rate shift);
//   - two LFSR random number generators, R_X and R_Delta, each yielding one
//     random mantissa per clock, reused across all elements of its vector and
//     across all rows of one outer product;
//   - bit assembly turning E_X / E_Delta (exponent field of the vector's
//     absolute maximum) and the random mantissa into an FP16 threshold in
//     [0, 2^(E-14)), shared by the vector's comparators;
//   - N comparators C_X1..C_XN and one C_Delta producing one Bernoulli bit
//     per element per clock;
//   - F~scale, the power-of-two output scale, computed once;
//   - N unit cells U_1..U_N: XOR of signs, AND of Bernoulli bits, ones counter
//     and shift logic, each holding one FP16 weight update dw[i];
//   - a sequencer running each row for M clocks.
//
// Interface and timing: x, e_x, delta and e_d must be held stable while a row
// runs (busy high). Pulse start (with new_op for the first row of a new outer
// product) when idle or in the row's last clock. The row runs for the next M
// clocks; done pulses in the clock after the M-th, when dw[i] = F~scale * count_i with sign
// x[i] ^ delta, an estimate of delta * x[i] * 2^-lr_shift. dw holds until the
// next row ends. Configuration writes (cfg_we) are ignored while busy.
//
// The arrangement follows the paper's array of N = 64 unit cells with
// peripheral comparators, two RNGs and a configuration register; the FP16
// format and M = 16 are the paper's ESSOP16(16). The control handshake and
// the details noted in each submodule are this design's own.
module essop_top
  import essop_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned M_MAX = M_MAX_DEF,
  parameter int unsigned P     = MAN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // operands
  input  fp16_t            x [N],
  input  fexp_field_t      e_x,
  input  fp16_t            delta,
  input  fexp_field_t      e_d,
  // configuration register G
  input  logic             cfg_we,
  input  logic [SEQ_W-1:0] cfg_seq_len,
  input  logic [LR_W-1:0]  cfg_lr_shift,
  // control
  input  logic             start,
  input  logic             new_op,
  output logic             busy,
  output logic             done,
  // weight updates dW^{j,1..N}
  output fp16_t            dw [N]
);

  essop_cfg_t       cfg;
  logic             first, last;
  logic             rng_step, rng_capture, rng_restart;
  logic [P-1:0]     rnd_x, rnd_d;
  logic [FP_W-2:0]  thr_x, thr_d;
  logic             bern_d, sign_d;
  logic [N-1:0]     bern_x, sign_x;
  fexp_t            fexp;

  essop_config #(.M_MAX(M_MAX)) u_cfg (
    .clk, .rst_n,
    .we          (cfg_we && !busy),
    .wr_seq_len  (cfg_seq_len),
    .wr_lr_shift (cfg_lr_shift),
    .cfg
  );

  essop_sequencer #(.M_MAX(M_MAX)) u_seq (
    .clk, .rst_n,
    .start, .new_op,
    .seq_len (cfg.seq_len),
    .busy, .first, .last, .done,
    .rng_step, .rng_capture, .rng_restart
  );

  essop_rng #(.P(P), .SEED(16'hACE1)) u_rng_x (
    .clk, .rst_n, .step(rng_step), .capture(rng_capture), .restart(rng_restart), .rnd(rnd_x)
  );

  essop_rng #(.P(P), .SEED(16'h1D2B)) u_rng_d (
    .clk, .rst_n, .step(rng_step), .capture(rng_capture), .restart(rng_restart), .rnd(rnd_d)
  );

  essop_rand_fp16 #(.P(P)) u_asm_x (.e_max(e_x), .rnd(rnd_x), .thr(thr_x));
  essop_rand_fp16 #(.P(P)) u_asm_d (.e_max(e_d), .rnd(rnd_d), .thr(thr_d));

  essop_comparator u_cmp_d (
    .val (delta), .rnd ({delta[FP_W-1], thr_d}), .bern (bern_d), .sign (sign_d)
  );

  essop_fscale u_fscale (
    .e_x, .e_d, .seq_len (cfg.seq_len), .lr_shift (cfg.lr_shift), .fexp
  );

  for (genvar i = 0; i < N; i++) begin : g_cell
    essop_comparator u_cmp_x (
      .val (x[i]), .rnd ({x[i][FP_W-1], thr_x}), .bern (bern_x[i]), .sign (sign_x[i])
    );

    essop_unit_cell #(.M_MAX(M_MAX)) u_cell (
      .clk, .rst_n, .first, .last,
      .bern_x (bern_x[i]), .sign_x (sign_x[i]),
      .bern_d, .sign_d,
      .fexp,
      .dw (dw[i])
    );
  end

endmodule
