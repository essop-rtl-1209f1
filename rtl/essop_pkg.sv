// essop_pkg: types and constants shared by the ESSOP stochastic outer-product
// array. The array works on IEEE half-precision (FP16) operands: 1 sign bit,
// 5 exponent bits (bias 15) and 10 mantissa bits, as in the ESSOP16 variant.
// The constants below are fixed by that format; the default Bernoulli
// sequence length M_MAX = 16 is the ESSOP16(16) configuration. The widths of
// the configuration fields and of the signed exponent used inside the shift
// logic are this design's own choices.
package essop_pkg;

  localparam int unsigned FP_W    = 16;  // FP16 word
  localparam int unsigned EXP_W   = 5;   // FP16 exponent field
  localparam int unsigned MAN_W   = 10;  // FP16 mantissa field
  localparam int          FP_BIAS = 15;  // FP16 exponent bias
  localparam int unsigned M_MAX_DEF = 16; // longest Bernoulli sequence
  localparam int unsigned SEQ_W   = 5;   // holds 1..16
  localparam int unsigned LR_W    = 4;   // learning-rate right shift 0..15
  localparam int unsigned FEXP_W  = 8;   // signed biased exponent of F~scale

  typedef logic [FP_W-1:0]  fp16_t;
  typedef logic [EXP_W-1:0] fexp_field_t;
  typedef logic signed [FEXP_W-1:0] fexp_t;

  // Largest finite FP16 magnitude; used when a result overflows.
  localparam logic [FP_W-2:0] FP16_MAX_MAG = 15'h7BFF;

  // Contents of configuration register G.
  typedef struct packed {
    logic [SEQ_W-1:0] seq_len;   // Bernoulli sequence length M, 1..M_MAX
    logic [LR_W-1:0]  lr_shift;  // extra right shift folded into F~scale
  } essop_cfg_t;

endpackage
