// tb_essop_rng: checks the random number generator against a bit-serial LFSR
// model: reset gives the seed, each step advances P bit-steps, restart
// replays the numbers from the snapshot, and capture makes the current
// (stepped) state the new snapshot.
module tb_essop_rng;
  import tb_essop_ref_pkg::*;

  localparam int P = 10;
  localparam logic [15:0] SEED = 16'hACE1;
  logic clk = 0, rst_n = 0, step = 0, capture = 0, restart = 0;
  logic [P-1:0] rnd;
  logic [15:0] model, snap;
  int checks = 0, failures = 0;

  essop_rng #(.P(P), .SEED(SEED)) dut (.clk, .rst_n, .step, .capture, .restart, .rnd);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what);
    checks++;
    if (rnd !== model[P-1:0]) begin
      failures++;
      $display("FAIL %s rnd=%h want %h", what, rnd, model[P-1:0]);
    end
  endtask

  initial begin
    logic [P-1:0] first_row [16];
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    model = SEED; snap = SEED;
    chk("reset");
    // capture with no step: snapshot = seed
    capture = 1; @(negedge clk); capture = 0;
    chk("capture");
    // one row: 16 steps
    for (int k = 0; k < 16; k++) begin
      first_row[k] = rnd;
      step = 1; @(negedge clk);
      model = lfsr_steps(model, P);
      chk("step");
    end
    step = 0;
    // restart replays the same numbers
    restart = 1; @(negedge clk); restart = 0;
    model = snap;
    for (int k = 0; k < 16; k++) begin
      checks++;
      if (rnd !== first_row[k]) begin failures++; $display("FAIL replay k=%0d", k); end
      step = 1; @(negedge clk);
      model = lfsr_steps(model, P);
      chk("replay step");
    end
    // capture while stepping (chained new outer product)
    capture = 1; step = 1; @(negedge clk); capture = 0; step = 0;
    model = lfsr_steps(model, P); snap = model;
    chk("capture+step");
    checks++;
    if (rnd === first_row[0]) begin failures++; $display("FAIL new op reused old number"); end
    step = 1; repeat (5) begin @(negedge clk); model = lfsr_steps(model, P); chk("step2"); end
    // restart wins over step
    restart = 1; @(negedge clk); restart = 0; step = 0;
    model = snap;
    chk("restart over step");
    // long random control sequence
    repeat (2000) begin
      step    = $urandom_range(1);
      capture = ($urandom_range(7) == 0);
      restart = ($urandom_range(7) == 0);
      @(negedge clk);
      if (restart)      model = snap;
      else if (capture) begin model = step ? lfsr_steps(model, P) : model; snap = model; end
      else if (step)    model = lfsr_steps(model, P);
      chk("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
