// essop_rng: one of the two random number generators of the array (R_X for
// the activations, R_Delta for the error gradient).
//
// A 16-bit Fibonacci LFSR (x^16 + x^14 + x^13 + x^11 + 1, maximal length) is
// advanced P bit-steps per clock, so that successive P-bit samples do not
// overlap. The low P bits of the state are the random fraction u = rnd/2^P in
// [0,1) that becomes the mantissa part of the random threshold.
//
// Random numbers are reused: every row of one outer product is compared with
// the same M numbers, and only a new outer product moves on to fresh ones. A
// snapshot register holds the state at which the current outer product began.
//   capture : new outer product; the (stepped, if step is also high) state
//             becomes both the current state and the snapshot.
//   restart : another row of the same outer product; reload the snapshot.
//   step    : advance to the next number (one per clock of a row).
// restart wins over capture, capture over a plain step. rnd is the registered
// state, valid in the clock after the control that produced it.
//
// From the paper: an LFSR as RNG, sampling a few of its bits, and M numbers
// per generator per outer product. Polynomial, width, seed, the P-step
// advance and the snapshot mechanism are this design's own.
module essop_rng #(
  parameter int unsigned     P      = 10,
  parameter int unsigned     LFSR_W = 16,
  parameter logic [LFSR_W-1:0] SEED = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic         capture,
  input  logic         restart,
  output logic [P-1:0] rnd
);

  logic [LFSR_W-1:0] state_q, snap_q, stepped, cand;

  initial assert (P <= LFSR_W) else $error("essop_rng: P must not exceed LFSR_W");

  // P single-bit LFSR shifts, unrolled.
  always_comb begin
    stepped = state_q;
    for (int unsigned s = 0; s < P; s++)
      stepped = {stepped[LFSR_W-2:0],
                 stepped[15] ^ stepped[13] ^ stepped[12] ^ stepped[10]};
  end

  assign cand = step ? stepped : state_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= SEED;
      snap_q  <= SEED;
    end else if (restart) begin
      state_q <= snap_q;
    end else if (capture) begin
      state_q <= cand;
      snap_q  <= cand;
    end else begin
      state_q <= cand;
    end
  end

  assign rnd = state_q[P-1:0];

endmodule
