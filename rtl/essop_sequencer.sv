// essop_sequencer: runs one row of the outer product in M clocks.
//
// A row is one element Delta^j against the whole vector X. start (sampled
// when idle, or in the last clock of a running row) begins a row of seq_len
// clocks; new_op, sampled with start, says the row opens a new outer product.
// While a row runs, 'first' and 'last' mark its first and final clock for the
// unit cells, busy is high, and the RNGs step once per clock. done pulses for
// one clock after 'last': the unit cells' outputs then hold the row's
// results. A start in the last clock chains the next row with no gap, so rows
// complete every M clocks.
//
// RNG control: a start with new_op makes the RNGs capture their current state
// as the first number of the new outer product; a start without it makes them
// restart from the snapshot, so every row of an outer product sees the same
// M random numbers.
//
// The host must not raise start during a row except in its last clock; an
// assertion checks that. The whole handshake is this design's own: the paper
// only states that a product takes M clocks and the design is sequential.
module essop_sequencer
  import essop_pkg::*;
#(
  parameter int unsigned M_MAX = M_MAX_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             new_op,
  input  logic [SEQ_W-1:0] seq_len,
  output logic             busy,
  output logic             first,
  output logic             last,
  output logic             done,
  output logic             rng_step,
  output logic             rng_capture,
  output logic             rng_restart
);

  logic             running_q;
  logic [SEQ_W-1:0] k_q, len_q;
  logic             accept;

  assign first  = running_q && (k_q == '0);
  assign last   = running_q && (k_q == len_q - 1'b1);
  assign busy   = running_q;
  assign accept = start && (!running_q || last);

  assign rng_step    = running_q;
  assign rng_capture = accept && new_op;
  assign rng_restart = accept && !new_op;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running_q <= 1'b0;
      k_q       <= '0;
      len_q     <= SEQ_W'(M_MAX);
      done      <= 1'b0;
    end else begin
      done <= last;
      if (accept) begin
        running_q <= 1'b1;
        k_q       <= '0;
        len_q     <= seq_len;
      end else if (last) begin
        running_q <= 1'b0;
      end else if (running_q) begin
        k_q <= k_q + 1'b1;
      end
    end
  end

  // Host protocol: a new row may only start when idle or in the last clock.
  a_start_ok: assert property (@(posedge clk) disable iff (!rst_n)
                               start |-> (!running_q || last))
    else $error("essop_sequencer: start while a row is running");

  // The stored length must be one the counters can count.
  a_len_ok: assert property (@(posedge clk) disable iff (!rst_n)
                             accept |-> (seq_len >= 1 && seq_len <= SEQ_W'(M_MAX)))
    else $error("essop_sequencer: sequence length out of range");

endmodule
