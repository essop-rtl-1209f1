// essop_config: configuration register G of the array.
//
// Holds the Bernoulli sequence length M and the learning-rate shift folded
// into F~scale (see essop_fscale). A write (we high for one clock) stores both
// fields; a sequence length of 0 or above M_MAX is clamped into 1..M_MAX, so
// the register never holds a length the unit-cell counters cannot count. The
// new values are visible the clock after the write. Reset gives M = M_MAX and
// no learning-rate shift.
//
// From the paper: a configuration register holding the sequence length. The
// learning-rate field, the clamping, the write port and the reset values are
// this design's own.
module essop_config
  import essop_pkg::*;
#(
  parameter int unsigned M_MAX = M_MAX_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [SEQ_W-1:0] wr_seq_len,
  input  logic [LR_W-1:0]  wr_lr_shift,
  output essop_cfg_t       cfg
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg.seq_len  <= SEQ_W'(M_MAX);
      cfg.lr_shift <= '0;
    end else if (we) begin
      if (wr_seq_len == '0)                 cfg.seq_len <= SEQ_W'(1);
      else if (wr_seq_len > SEQ_W'(M_MAX))  cfg.seq_len <= SEQ_W'(M_MAX);
      else                                  cfg.seq_len <= wr_seq_len;
      cfg.lr_shift <= wr_lr_shift;
    end
  end

endmodule
