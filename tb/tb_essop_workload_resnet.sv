// tb_essop_workload_resnet: weight-update outer products shaped like the
// layers of ResNet-32 on CIFAR-10, run on the default array (N = 64, no
// parameter overrides) with Bernoulli sequence lengths 16, 8 and 2.
//
// A convolution layer's update is dW = Delta * X^T with Delta of length
// C_out and X an im2col column of length 9*C_in (3x3 kernels); the final
// layer is 10 x 64. Layer shapes used: 16 x 27 (first convolution), 16 x 144
// (stage 1), 32 x 288 (stage 2), 64 x 576 (stage 3) and 10 x 64 (fully
// connected). X is longer than the 64 unit cells, so the host cuts it into
// tiles of 64 (zero padded); every row of every tile belongs to one outer
// product and so reuses the same M random numbers, with E_X taken over the
// whole X. Activations are non-negative (post-ReLU, half of them zero) and
// gradients are signed.
//
// Every FP16 output is checked exactly against a reference model built from
// the LFSR polynomial and real arithmetic. All rows of a layer are chained,
// and the layer must take exactly rows * M clocks from the first start to the
// last result. The estimated dW must match the exact product to an RMS error
// (relative to 2^(E_X-14) * 2^(E_Delta-14)) below 0.6/sqrt(M) + 0.02.
module tb_essop_workload_resnet;
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

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;

  logic [15:0] sx, sd;   // RNG model: first state of the current outer product
  int last_m = 0;
  int n_layers = 0, n_tiles = 0;

  initial begin
    repeat (400000) @(posedge clk);
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

  function automatic fp16_t gen(input int emax, input int spread, input logic relu);
    logic [31:0] r;
    int e;
    r = $urandom;
    e = emax - int'(r[7:4] % (spread + 1));
    if (relu && r[8]) return 16'h0000;
    if (!relu && r[3:0] == 4'h0) return 16'h0000;
    return {relu ? 1'b0 : r[31], 5'(e), r[25:16]};
  endfunction

  task automatic run_layer(input string name, input int cout, input int cin9, input int m);
    fp16_t xf [];
    fp16_t dv [];
    fp16_t xt [N];
    logic [15:0] tx, td;
    int ux [16], ud [16];
    int ntiles, nrows, row, cnt, c_first, c_last, me, cm, a, b;
    real yxy, scale, est, truth, sq;
    logic bx, bd;
    fp16_t want;

    xf = new[cin9];
    dv = new[cout];
    foreach (xf[i]) xf[i] = gen(15, 6, 1'b1);
    foreach (dv[j]) dv[j] = gen(8, 6, 1'b0);
    me = 0; foreach (xf[i]) if (int'(xf[i][14:10]) > me) me = int'(xf[i][14:10]);
    e_x = 5'(me);
    me = 0; foreach (dv[j]) if (int'(dv[j][14:10]) > me) me = int'(dv[j][14:10]);
    e_d = 5'(me);
    ntiles = (cin9 + N - 1) / N;
    nrows  = ntiles * cout;

    // configuration, then the RNG model for a new outer product
    @(posedge clk); #1;
    cfg_we = 1; cfg_seq_len = 5'(m); cfg_lr_shift = 0;
    @(posedge clk); #1;
    cfg_we = 0;
    sx = lfsr_steps(sx, P * last_m);
    sd = lfsr_steps(sd, P * last_m);
    last_m = m;
    tx = sx; td = sd;
    for (int k = 0; k < m; k++) begin
      ux[k] = int'(tx[P-1:0]); ud[k] = int'(td[P-1:0]);
      tx = lfsr_steps(tx, P);  td = lfsr_steps(td, P);
    end
    a = int'(e_x) - 14; b = int'(e_d) - 14; cm = clog2i(m);
    yxy   = (2.0 ** a) * (2.0 ** b);
    scale = yxy / (2.0 ** cm);
    sq = 0.0;

    // first row: tile 0, gradient element 0
    for (int i = 0; i < N; i++) xt[i] = (i < cin9) ? xf[i] : 16'h0000;
    x = xt;
    delta = dv[0]; start = 1; new_op = 1;
    @(posedge clk); #1;
    c_first = cycles;
    new_op = 0;
    start = 0;
    for (row = 0; row < nrows; row++) begin
      int t, j;
      t = row / cout;
      j = row % cout;
      for (int k = 1; k < m; k++) begin
        @(posedge clk); #1;
        chk(!done, "no done inside a row");
      end
      start = (row + 1 < nrows);
      @(posedge clk); #1;
      start = 0;
      chk(done, "done after M clocks");
      // check this row against the model
      for (int i = 0; i < N; i++) begin
        cnt = 0;
        for (int k = 0; k < m; k++) begin
          bx = absr(fp16_to_real(xt[i])) >= thr_real(int'(e_x), ux[k], P);
          bd = absr(fp16_to_real(dv[j])) >= thr_real(int'(e_d), ud[k], P);
          if (bx && bd) cnt++;
        end
        want = real_to_fp16(real'(cnt) * scale, xt[i][15] ^ dv[j][15]);
        chk(dw[i] == want, $sformatf("%s M=%0d tile %0d row %0d dw[%0d] got %h want %h",
                                     name, m, t, j, i, dw[i], want));
        if (t * N + i < cin9) begin
          est   = fp16_to_real(dw[i]) / yxy;
          truth = fp16_to_real(xt[i]) * fp16_to_real(dv[j]) / yxy;
          sq += (est - truth) * (est - truth);
        end
      end
      // inputs of the next row (tile changes when the gradient index wraps)
      if (row + 1 < nrows) begin
        t = (row + 1) / cout;
        j = (row + 1) % cout;
        if (j == 0) begin
          for (int i = 0; i < N; i++) xt[i] = (t * N + i < cin9) ? xf[t * N + i] : 16'h0000;
          x = xt;
          n_tiles++;
        end
        delta = dv[j];
      end
    end
    c_last = cycles;
    chk(c_last - c_first == nrows * m, $sformatf("%s: %0d rows took %0d clocks, want %0d",
                                                 name, nrows, c_last - c_first, nrows * m));
    sq = $sqrt(sq / (cout * cin9));
    $display("%s (%0d x %0d) M=%0d: %0d tiles, %0d rows, %0d clocks, rms error %f",
             name, cout, cin9, m, ntiles, nrows, c_last - c_first, sq);
    chk(sq < 0.6 / $sqrt(real'(m)) + 0.02, $sformatf("%s M=%0d accuracy", name, m));
    n_layers++;
    @(posedge clk); #1;
  endtask

  initial begin
    for (int i = 0; i < N; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    sx = 16'hACE1; sd = 16'h1D2B; last_m = 0;
    run_layer("conv1",       16,  27, 16);
    run_layer("stage1 conv", 16, 144, 16);
    run_layer("stage2 conv", 32, 288, 16);
    run_layer("stage3 conv", 64, 576, 16);
    run_layer("fc",          10,  64, 16);
    run_layer("stage3 conv", 64, 576, 8);
    run_layer("stage3 conv", 64, 576, 2);
    chk(n_layers == 7, "all layers run");
    chk(n_tiles > 0, "X tiled over several passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
