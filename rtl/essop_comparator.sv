// essop_comparator: the comparator C of one vector element (C_Xi or C_Delta).
//
// Each clock it produces one Bernoulli bit of the element's stochastic
// representation: bern = (|val| >= |rnd|), where rnd is the FP16 random number
// built from the vector's exponent E, the RNG mantissa and the element's own
// sign. For non-negative IEEE numbers, magnitude order equals the unsigned
// order of the 15 exponent-and-mantissa bits, so the compare is a 15-bit
// unsigned >= (subnormals included). The element's sign bit is passed on to
// the unit cell. The sign bit of rnd equals that of val (it is copied from the
// element when the random number is assembled) and plays no part in the
// magnitude compare, so it is left unused. Purely combinational.
//
// From the paper: the >= on magnitudes and one bit per compare. Treating
// Inf/NaN by bit pattern is this design's own choice.
module essop_comparator
  import essop_pkg::*;
(
  input  fp16_t val,
  input  fp16_t rnd,
  output logic  bern,
  output logic  sign
);

  assign bern = (val[FP_W-2:0] >= rnd[FP_W-2:0]);
  assign sign = val[FP_W-1];

endmodule
