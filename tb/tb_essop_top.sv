// tb_essop_top: end-to-end test of the ESSOP array at its default size
// (N = 64 unit cells, M up to 16), with no parameter overrides.
//
// The testbench plays the host: it writes the configuration register, holds
// the activation vector X with its exponent E_X, and feeds one error-gradient
// element Delta^j per row, computing E_Delta from the whole gradient vector.
// A reference model built only from the LFSR polynomial and real arithmetic
// predicts every Bernoulli bit, every ones count and every FP16 weight update,
// so each output of each row is checked exactly. It also checks that a row
// takes M clocks (done one clock after the M-th; one row every M clocks when
// rows are chained), and that the stochastic estimates approach the exact
// products: the RMS error, relative to the scale 2^(E_X-14)*2^(E_Delta-14),
// must stay below 0.6/sqrt(M) + 0.02.
//
// Operations run: a full 64 x 64 outer product with M = 16 (ESSOP16(16)),
// rows chained; M = 8 with a learning-rate shift; M = 2 with idle clocks
// between rows; one outer product whose results overflow (saturate) and one
// whose results underflow (flush to zero); and a configuration write issued
// during a row, which must be ignored. Each of these mechanisms is counted
// and must have happened at least once.
module tb_essop_top;
  import essop_pkg::*;
  import tb_essop_ref_pkg::*;

  localparam int N = 64;
  localparam int P = 10;

  logic clk = 0, rst_n = 0;
  fp16_t x [N];
  logic [4:0] e_x = 0, e_d = 0;
  fp16_t delta = 0;
  logic cfg_we = 0;
  logic [4:0] cfg_seq_len = 16;
  logic [3:0] cfg_lr_shift = 0;
  logic start = 0, new_op = 0;
  logic busy, done;
  fp16_t dw [N];

  essop_top dut (.clk, .rst_n, .x, .e_x, .delta, .e_d, .cfg_we, .cfg_seq_len,
                 .cfg_lr_shift, .start, .new_op, .busy, .done, .dw);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // mechanism counters
  int n_m16 = 0, n_m8 = 0, n_m2 = 0, n_reuse = 0, n_newop = 0, n_chain = 0,
      n_idle_gap = 0, n_neg = 0, n_sat = 0, n_flush = 0, n_lr = 0, n_cfg_ignored = 0;

  // reference RNG model
  logic [15:0] sx_start, sd_start, sx_snap, sd_snap;
  int last_m = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycles);
    end
  endtask

  // random finite FP16 with exponent field in [emax-spread, emax]
  function automatic fp16_t rnd_fp16(input int emax, input int spread);
    int e;
    logic s;
    logic [31:0] r;
    e = emax - int'($urandom_range(spread));
    if (e < 0) e = 0;
    r = $urandom;
    s = r[31];
    if (r[3:0] == 4'h0) return {s, 15'h0};
    return {s, 5'(e), r[25:16]};
  endfunction

  function automatic int max_exp(input fp16_t v []);
    int m;
    m = 0;
    foreach (v[i]) if (int'(v[i][14:10]) > m) m = int'(v[i][14:10]);
    return m;
  endfunction

  // expected FP16 results of one row, from the row's starting RNG states
  task automatic expect_row(input fp16_t d, input int m, input int lr,
                            input logic [15:0] stx, input logic [15:0] std,
                            output fp16_t exp_dw [N], output real sq_err,
                            output int n_fl);
    int   ux [16], ud [16];
    logic [15:0] tx, td;
    int   cnt, cm, ex, ed;
    real  scale, est, truth, yxy;
    logic bx, bd;
    tx = stx; td = std;
    for (int k = 0; k < m; k++) begin
      ux[k] = int'(tx[P-1:0]);
      ud[k] = int'(td[P-1:0]);
      tx = lfsr_steps(tx, P);
      td = lfsr_steps(td, P);
    end
    ex    = int'(e_x) - 14;
    ed    = int'(e_d) - 14;
    yxy   = (2.0 ** ex) * (2.0 ** ed);
    cm    = clog2i(m);
    scale = yxy / (2.0 ** cm) / (2.0 ** lr);
    sq_err = 0.0;
    n_fl   = 0;
    for (int i = 0; i < N; i++) begin
      cnt = 0;
      for (int k = 0; k < m; k++) begin
        bx = absr(fp16_to_real(x[i])) >= thr_real(int'(e_x), ux[k], P);
        bd = absr(fp16_to_real(d))    >= thr_real(int'(e_d), ud[k], P);
        if (bx && bd) cnt++;
      end
      exp_dw[i] = real_to_fp16(real'(cnt) * scale, x[i][15] ^ d[15]);
      if (cnt > 0 && real'(cnt) * scale < 1.0 / 16384.0) n_fl++;
      est   = real'(cnt) / real'(m) * yxy;
      truth = absr(fp16_to_real(x[i]) * fp16_to_real(d));
      est    = (est - truth) / yxy;
      sq_err += est * est;
    end
  endtask

  task automatic write_cfg(input int m, input int lr);
    @(posedge clk); #1;
    cfg_we = 1; cfg_seq_len = 5'(m); cfg_lr_shift = 4'(lr);
    @(posedge clk); #1;
    cfg_we = 0;
  endtask

  // One outer product: rows of the gradient vector dv against the current X.
  // chain = start each next row in the last clock of the previous one.
  // cfg_poke = issue a configuration write in the middle of the first row.
  task automatic run_op(input int m, input int lr, input fp16_t dv [],
                        input logic chain, input logic cfg_poke, output real rms);
    fp16_t exp_dw [N];
    real   sq, sq_tot;
    int    nfl;
    int    nrows;
    logic [15:0] row_x, row_d;
    nrows  = dv.size();
    sq_tot = 0.0;
    write_cfg(m, lr);
    e_d = 5'(max_exp(dv));
    // RNG model: a new outer product continues after the previous row's M numbers
    sx_start = lfsr_steps(sx_start, P * last_m);
    sd_start = lfsr_steps(sd_start, P * last_m);
    sx_snap = sx_start; sd_snap = sd_start;
    last_m = m;
    n_newop++;
    if (m == 16) n_m16++;
    if (m == 8)  n_m8++;
    if (m == 2)  n_m2++;
    if (lr != 0) n_lr++;
    // first row
    @(posedge clk); #1;
    delta = dv[0]; start = 1; new_op = 1;
    for (int j = 0; j < nrows; j++) begin
      row_x = sx_snap; row_d = sd_snap;
      expect_row(dv[j], m, lr, row_x, row_d, exp_dw, sq, nfl);
      n_flush += nfl;
      sq_tot += sq;
      // accept edge (for a chained row it was the previous row's final edge)
      if (j == 0 || !chain) begin
        @(posedge clk); #1;
        start = 0; new_op = 0;
      end
      if (j > 0) n_reuse++;
      chk(busy, "busy after start");
      // row clocks 1..m-1 after the accept edge
      for (int k = 1; k < m; k++) begin
        if (cfg_poke && j == 0 && k == 1) begin
          cfg_we = 1; cfg_seq_len = 5'(3); cfg_lr_shift = 4'(9);
        end
        @(posedge clk); #1;
        cfg_we = 0;
        chk(!done && busy, "no done inside a row");
      end
      // now in the last clock
      if (chain && j + 1 < nrows) begin
        start = 1; n_chain++;
      end
      @(posedge clk); #1;
      chk(done, "done one clock after the M-th row clock");
      for (int i = 0; i < N; i++) begin
        chk(dw[i] == exp_dw[i], $sformatf("dw[%0d] row %0d (got %h want %h)", i, j, dw[i], exp_dw[i]));
        if (dw[i][15] && dw[i][14:0] != 0) n_neg++;
        if (dw[i][14:0] == 15'h7BFF) n_sat++;
      end
      if (cfg_poke && j == 0) n_cfg_ignored++;
      if (j + 1 < nrows && !chain) begin
        chk(!busy, "idle between rows");
        n_idle_gap++;
        @(posedge clk); #1;
        chk(!done, "done is a single pulse");
        delta = dv[j + 1]; start = 1;
      end else if (chain && j + 1 < nrows) begin
        chk(busy, "chained row running");
        start = 0;
        delta = dv[j + 1];
      end
    end
    rms = $sqrt(sq_tot / (nrows * N));
    @(posedge clk); #1;
  endtask

  initial begin
    fp16_t dv [];
    real rms;
    for (int i = 0; i < N; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    sx_start = 16'hACE1; sd_start = 16'h1D2B; last_m = 0;

    // 1. full 64 x 64 outer product, ESSOP16(16), rows chained
    for (int i = 0; i < N; i++) x[i] = rnd_fp16(17, 5);
    e_x = 5'(max_exp(x));
    dv = new[N];
    foreach (dv[j]) dv[j] = rnd_fp16(12, 5);
    run_op(16, 0, dv, 1'b1, 1'b0, rms);
    $display("M=16 rms error %f", rms);
    chk(rms < 0.6 / $sqrt(16.0) + 0.02, "M=16 accuracy");

    // 2. M = 8 with learning rate 2^-2, chained, new X
    for (int i = 0; i < N; i++) x[i] = rnd_fp16(14, 4);
    e_x = 5'(max_exp(x));
    dv = new[16];
    foreach (dv[j]) dv[j] = rnd_fp16(9, 4);
    run_op(8, 2, dv, 1'b1, 1'b0, rms);
    $display("M=8 rms error %f", rms);
    chk(rms < 0.6 / $sqrt(8.0) + 0.02, "M=8 accuracy");

    // 3. M = 2, idle clock between rows, config write during the first row
    dv = new[16];
    foreach (dv[j]) dv[j] = rnd_fp16(20, 3);
    run_op(2, 0, dv, 1'b0, 1'b1, rms);
    $display("M=2 rms error %f", rms);
    chk(rms < 0.6 / $sqrt(2.0) + 0.02, "M=2 accuracy");

    // 4. overflow: large operands saturate
    for (int i = 0; i < N; i++) x[i] = rnd_fp16(30, 1);
    e_x = 5'(max_exp(x));
    dv = new[2];
    foreach (dv[j]) dv[j] = {1'b0, 5'd30, 10'($urandom)};
    run_op(16, 0, dv, 1'b1, 1'b0, rms);

    // 5. underflow: tiny operands flush to zero
    for (int i = 0; i < N; i++) x[i] = {x[i][0], 5'd4, 10'($urandom)};
    e_x = 5'(max_exp(x));
    dv = new[2];
    foreach (dv[j]) dv[j] = {1'b1, 5'd6, 10'($urandom)};
    run_op(16, 0, dv, 1'b0, 1'b0, rms);

    $display("mechanisms: M16=%0d M8=%0d M2=%0d reuse=%0d newop=%0d chain=%0d gap=%0d neg=%0d sat=%0d flush=%0d lr=%0d cfg_ignored=%0d",
             n_m16, n_m8, n_m2, n_reuse, n_newop, n_chain, n_idle_gap, n_neg, n_sat, n_flush, n_lr, n_cfg_ignored);
    chk(n_m16 > 0, "mechanism: M=16");
    chk(n_m8 > 0, "mechanism: M=8");
    chk(n_m2 > 0, "mechanism: M=2");
    chk(n_reuse > 0, "mechanism: random numbers reused across rows");
    chk(n_newop > 1, "mechanism: new outer product");
    chk(n_chain > 0, "mechanism: back-to-back rows");
    chk(n_idle_gap > 0, "mechanism: idle gap");
    chk(n_neg > 0, "mechanism: negative product");
    chk(n_sat > 0, "mechanism: saturation");
    chk(n_flush > 0, "mechanism: flush to zero");
    chk(n_lr > 0, "mechanism: learning-rate shift");
    chk(n_cfg_ignored > 0, "mechanism: config write ignored while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
