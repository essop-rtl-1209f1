// essop_rand_fp16: bit assembly of the FP16 random threshold y_max * u.
//
// The threshold a vector's elements are compared with must be uniform in
// [0, y_max), where y_max is a power of two no smaller than the vector's
// largest magnitude. Because y_max is a power of two, no multiplier is needed:
// its exponent becomes the threshold's exponent and the random bits its
// mantissa. With e_max the FP16 exponent field of the vector's absolute
// maximum, y_max = 2^(e_max-14), and u = rnd / 2^P,
//     thr = u * 2^(e_max-14) = 1.f * 2^(e_max - lz - 15)
// where lz is the number of leading zeros of rnd and f the bits below its
// leading one. So the exponent field is e_max - lz (exactly e_max when the top
// random bit is 1) and the mantissa is rnd shifted past its leading one.
// Thresholds below the smallest normal number (e_max - lz <= 0) and u = 0
// give +0.
//
// The output carries no sign: one instance serves all N comparators of a
// vector, each of which attaches the sign of its own element. Purely
// combinational.
//
// From the paper: exponent from the absolute maximum, RNG bits as mantissa,
// no multiplication. The leading-zero normalisation (a literal concatenation
// with FP16's hidden one would only span [2^e, 2^(e+1))) and the flush to zero
// are this design's own.
module essop_rand_fp16
  import essop_pkg::*;
#(
  parameter int unsigned P = 10
) (
  input  fexp_field_t       e_max,
  input  logic [P-1:0]      rnd,
  output logic [FP_W-2:0]   thr
);

  localparam int unsigned LZ_W = $clog2(P + 1);

  logic [LZ_W-1:0]      lz;
  logic                 found;
  logic [P+MAN_W-1:0]   wide;
  logic [MAN_W-1:0]     man;

  // Leading-zero count of rnd (lz = P when rnd = 0).
  always_comb begin
    lz    = LZ_W'(P);
    found = 1'b0;
    for (int i = P - 1; i >= 0; i--) begin
      if (!found && rnd[i]) begin
        lz    = LZ_W'(P - 1 - i);
        found = 1'b1;
      end
    end
  end

  // Drop the leading one and left-align the rest into the mantissa.
  always_comb begin
    wide = {rnd, {MAN_W{1'b0}}} << (lz + 1'b1);
    man  = wide[P+MAN_W-1 -: MAN_W];
  end

  always_comb begin
    if (!found || (6'(e_max) <= 6'(lz)))
      thr = '0;
    else
      thr = {EXP_W'(e_max - EXP_W'(lz)), man};
  end

endmodule
