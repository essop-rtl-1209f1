// tb_essop_comparator: random and corner-case FP16 pairs. The Bernoulli bit
// must equal |val| >= |rnd| computed on real values, and the sign output must
// be the sign of val.
module tb_essop_comparator;
  import tb_essop_ref_pkg::*;

  logic [15:0] val, rnd;
  logic bern, sign;
  int checks = 0, failures = 0;

  essop_comparator dut (.val, .rnd, .bern, .sign);

  task automatic check_one(input logic [15:0] v, input logic [15:0] r);
    logic want;
    val = v;
    rnd = r;
    #1;
    want = absr(fp16_to_real(v)) >= absr(fp16_to_real(r));
    checks++;
    if (bern !== want || sign !== v[15]) begin
      failures++;
      $display("FAIL val=%h rnd=%h bern=%b want %b", v, r, bern, want);
    end
  endtask

  initial begin
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] a, b;
    check_one(16'h0000, 16'h0000);
    check_one(16'h3C00, 16'h3C00);
    check_one(16'hBC00, 16'h3C01);
    check_one(16'h3C01, 16'hBC00);
    check_one(16'h0001, 16'h0000);
    check_one(16'h0000, 16'h0001);
    check_one(16'h0400, 16'h03FF);
    repeat (20000) begin
      a = 16'($urandom);
      b = 16'($urandom);
      // keep to finite numbers
      if (a[14:10] == 5'h1F) a[14:10] = 5'h1E;
      if (b[14:10] == 5'h1F) b[14:10] = 5'h1E;
      // make near-equal magnitudes common
      if ($urandom_range(3) == 0) b = {b[15], a[14:1], $urandom_range(1) == 1};
      check_one(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
