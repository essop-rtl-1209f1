// essop_unit_cell: one stochastic-computing multiplier (unit cell U_i).
//
// Each clock of a row it ANDs the Bernoulli bit of X^i with that of Delta^j
// and counts the ones. After M clocks the count, scaled by F~scale in the
// shift logic and signed with the XOR of the two sign bits, is the FP16
// estimate of Delta^j * X^i (times the learning rate folded into F~scale).
//
// Timing: 'first' marks the first clock of a row, 'last' the M-th (both high
// when M = 1). On 'first' the counter is loaded with that clock's AND result
// instead of being cleared beforehand, and on 'last' the packed result of the
// final count is written to the output register dw. So dw holds the row's
// result from the clock after 'last' until the next row's 'last', and rows can
// follow each other every M clocks.
//
// From the paper: XOR for the sign, a 2-input AND, a ones counter over M
// clocks, the shift logic and a storage element for the result. The register
// (the paper mentions a latch or a memory location), the load-on-first counter
// and the reset value are this design's own.
module essop_unit_cell
  import essop_pkg::*;
#(
  parameter int unsigned M_MAX = M_MAX_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  first,
  input  logic  last,
  input  logic  bern_x,
  input  logic  sign_x,
  input  logic  bern_d,
  input  logic  sign_d,
  input  fexp_t fexp,
  output fp16_t dw
);

  localparam int unsigned CNT_W = $clog2(M_MAX + 1);

  logic             hit, sign_p;
  logic [CNT_W-1:0] cnt_q, cnt_next;
  fp16_t            packed_dw;

  assign hit    = bern_x & bern_d;   // SC multiply of the two bits
  assign sign_p = sign_x ^ sign_d;   // product sign

  always_comb begin
    if (first) cnt_next = CNT_W'(hit);
    else       cnt_next = cnt_q + CNT_W'(hit);
  end

  essop_shift_logic #(.CNT_W(CNT_W)) u_shift (
    .sign (sign_p),
    .cnt  (cnt_next),
    .fexp (fexp),
    .dw   (packed_dw)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q <= '0;
      dw    <= '0;
    end else begin
      cnt_q <= cnt_next;
      if (last) dw <= packed_dw;
    end
  end

endmodule
