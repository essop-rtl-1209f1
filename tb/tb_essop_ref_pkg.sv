// tb_essop_ref_pkg: reference models for the ESSOP testbenches, written
// independently of the RTL. FP16 numbers are decoded to and encoded from
// 'real' with plain arithmetic, the LFSR is stepped one bit at a time from
// its polynomial, and the expected Bernoulli bits and weight updates are
// worked out from those real values.
package tb_essop_ref_pkg;

  // FP16 bit pattern -> real value (finite numbers, subnormals included).
  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    int  m;
    real v;
    e = int'(h[14:10]);
    m = int'(h[9:0]);
    if (e == 0) v = real'(m) * (2.0 ** -24);
    else        v = (1.0 + real'(m) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // Real value that is exactly representable (or out of range) -> FP16,
  // with the design's rules: below 2^-14 -> signed zero, above 65504 ->
  // 0x7BFF with sign.
  function automatic logic [15:0] real_to_fp16(input real v, input logic sgn);
    real a;
    int  e;
    real f;
    a = (v < 0.0) ? -v : v;
    if (a < 2.0 ** -14) return {sgn, 15'h0};
    if (a > 65504.0)    return {sgn, 15'h7BFF};
    e = 0;
    f = a;
    while (f >= 2.0) begin f = f / 2.0; e++; end
    while (f < 1.0)  begin f = f * 2.0; e--; end
    return {sgn, 5'(e + 15), 10'(int'((f - 1.0) * 1024.0))};
  endfunction

  // One bit-step of the x^16+x^14+x^13+x^11+1 Fibonacci LFSR.
  function automatic logic [15:0] lfsr_bit(input logic [15:0] s);
    logic fb;
    fb = s[15] ^ s[13] ^ s[12] ^ s[10];
    return {s[14:0], fb};
  endfunction

  function automatic logic [15:0] lfsr_steps(input logic [15:0] s, input int n);
    logic [15:0] t;
    t = s;
    repeat (n) t = lfsr_bit(t);
    return t;
  endfunction

  // Threshold value u * 2^(e-14), u = rnd/2^p, zero below the normal range.
  function automatic real thr_real(input int e, input int rnd, input int p);
    real t;
    t = (real'(rnd) / (2.0 ** p)) * (2.0 ** (e - 14));
    if (t < 2.0 ** -14) t = 0.0;
    return t;
  endfunction

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int clog2i(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage
