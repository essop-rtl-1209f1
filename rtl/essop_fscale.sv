// essop_fscale: computes the power-of-two scale factor F~scale that turns a
// unit cell's ones count into a weight update.
//
// The random thresholds of X and Delta are scaled to y_x = 2^(e_x-14) and
// y_d = 2^(e_d-14), the powers of two just above any number with those
// exponent fields, so a count c out of M estimates |x*delta| / (y_x*y_d) * M.
// The scale is F_scale = y_x*y_d/M, rounded down to a power of two:
//     F~scale = 2^(floor(log2 F_scale) - lr_shift)
//             = 2^(e_x + e_d - 28 - ceil(log2 M) - lr_shift)
// and is output as the signed FP16 biased exponent
//     fexp = e_x + e_d - 13 - ceil(log2 M) - lr_shift,
// which may lie outside 1..30; the shift logic handles that. lr_shift folds a
// learning rate of 2^-lr_shift into the scale. Purely combinational; computed
// once at the periphery and shared by all unit cells.
//
// From the paper: F~scale as the power of two below F_scale, computed at the
// periphery, and the learning rate folded into it. Using the power-of-two
// bounds y_x, y_d in place of the exact maxima is this design's own choice;
// it keeps the estimate unbiased.
module essop_fscale
  import essop_pkg::*;
(
  input  fexp_field_t      e_x,
  input  fexp_field_t      e_d,
  input  logic [SEQ_W-1:0] seq_len,
  input  logic [LR_W-1:0]  lr_shift,
  output fexp_t            fexp
);

  logic [2:0] clog_m;   // ceil(log2 seq_len), seq_len in 1..16

  always_comb begin
    clog_m = '0;
    for (int unsigned b = 0; b < 5; b++)
      if (seq_len > SEQ_W'(1 << b)) clog_m = 3'(b + 1);
  end

  // 2^(e_x-14) * 2^(e_d-14) has biased exponent e_x + e_d - 2*(BIAS-1) + BIAS.
  localparam fexp_t OFFSET = fexp_t'(FP_BIAS - 2 * (FP_BIAS - 1));   // -13

  assign fexp = fexp_t'($signed({3'b000, e_x}) + $signed({3'b000, e_d})
                        + OFFSET - $signed({5'b00000, clog_m})
                        - $signed({4'b0000, lr_shift}));

endmodule
