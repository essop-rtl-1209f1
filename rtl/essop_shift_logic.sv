// essop_shift_logic: scales a unit cell's ones count by F~scale and packs the
// product as an FP16 number.
//
// F~scale is a power of two, given as the signed FP16 biased exponent fexp
// (F~scale = 2^(fexp-15)), so the product cnt * F~scale needs no multiplier:
// the sign is the XOR of the operand signs, F~scale goes to the exponent and
// the count to the mantissa. The count is normalised on the way: with
// L = floor(log2 cnt), the exponent field is fexp + L and the mantissa holds
// the count bits below its leading one. The result is exact whenever it is in
// the normal FP16 range. Exponents of 31 and more saturate to the largest
// finite value 0x7BFF (with sign); exponents of 0 or less and cnt = 0 give a
// signed zero. Purely combinational.
//
// From the paper: sign from the XOR, F~scale as exponent, count as mantissa.
// The normalisation by L, the saturation and the flush to zero are this
// design's own.
module essop_shift_logic
  import essop_pkg::*;
#(
  parameter int unsigned CNT_W = 5
) (
  input  logic             sign,
  input  logic [CNT_W-1:0] cnt,
  input  fexp_t            fexp,
  output fp16_t            dw
);

  localparam int unsigned L_W = $clog2(CNT_W) + 1;

  logic [L_W-1:0]         lead;
  logic                   nz;
  logic signed [FEXP_W:0] exp_s;
  logic [CNT_W+MAN_W-1:0] wide;
  logic [MAN_W-1:0]       man;

  // Position of the leading one of cnt.
  always_comb begin
    lead = '0;
    nz   = 1'b0;
    for (int i = 0; i < CNT_W; i++) begin
      if (cnt[i]) begin
        lead = L_W'(i);
        nz   = 1'b1;
      end
    end
  end

  always_comb begin
    exp_s = (FEXP_W+1)'(fexp) + $signed({1'b0, (FEXP_W)'(lead)});
    wide  = {{MAN_W{1'b0}}, cnt} << (L_W'(MAN_W) - lead);
    man   = wide[MAN_W-1:0];
    if (!nz || exp_s <= 0)
      dw = {sign, 15'h0000};
    else if (exp_s >= 31)
      dw = {sign, FP16_MAX_MAG};
    else
      dw = {sign, exp_s[EXP_W-1:0], man};
  end

endmodule
