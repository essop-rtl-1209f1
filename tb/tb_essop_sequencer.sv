// tb_essop_sequencer: row timing. For sequence lengths 1..16 a row must run
// exactly M clocks (first in the first, last in the M-th), done must pulse in
// the clock after last, the RNG controls must follow start/new_op, and a
// start in the last clock must chain the next row with no idle clock.
module tb_essop_sequencer;
  logic clk = 0, rst_n = 0, start = 0, new_op = 0;
  logic [4:0] seq_len = 16;
  logic busy, first, last, done, rng_step, rng_capture, rng_restart;
  int checks = 0, failures = 0;

  essop_sequencer #(.M_MAX(16)) dut (.clk, .rst_n, .start, .new_op, .seq_len,
    .busy, .first, .last, .done, .rng_step, .rng_capture, .rng_restart);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // run one row of length m starting now (at a negedge); if chain, raise
  // start again in its last clock.
  task automatic run_row(input int m, input logic nop, input logic chain);
    start = 1; new_op = nop; seq_len = 5'(m);
    #1;
    chk(rng_capture == nop && rng_restart == !nop, "rng control at start");
    @(negedge clk);
    start = 0;
    for (int k = 0; k < m; k++) begin
      chk(busy && rng_step, "busy during row");
      chk(first == (k == 0), "first");
      chk(last == (k == m - 1), "last");
      chk(!done || k == 0, "no done inside row");
      if (k == m - 1 && chain) break;
      @(negedge clk);
    end
    if (!chain) begin
      chk(!busy && done, "done after M clocks");
      @(negedge clk);
      chk(!done, "done is one pulse");
    end
  endtask

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done, "idle after reset");
    for (int m = 1; m <= 16; m++) run_row(m, (m % 3) == 1, 1'b0);
    // back to back rows: chain each in the last clock
    run_row(8, 1'b1, 1'b1);
    run_row(8, 1'b0, 1'b1);
    run_row(8, 1'b0, 1'b0);
    // start while running (not last) is ignored
    start = 1; new_op = 1; seq_len = 4; @(negedge clk); start = 0;
    @(negedge clk);
    chk(busy && !first && !last, "row running, second clock");
    @(negedge clk); @(negedge clk);
    chk(last, "4-clock row last");
    @(negedge clk);
    chk(done && !busy, "4-clock row done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
