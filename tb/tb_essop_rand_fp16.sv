// tb_essop_rand_fp16: exhaustive check of the random-threshold bit assembly.
// For every exponent field e (0..31) and every 10-bit random value the FP16
// threshold must decode to exactly rnd/2^10 * 2^(e-14), or to zero when that
// lies below the smallest normal FP16 number.
module tb_essop_rand_fp16;
  import tb_essop_ref_pkg::*;

  localparam int P = 10;
  logic [4:0]   e_max;
  logic [P-1:0] rnd;
  logic [14:0]  thr;
  int checks = 0, failures = 0;

  essop_rand_fp16 #(.P(P)) dut (.e_max, .rnd, .thr);

  initial begin
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 32; e++) begin
      for (int r = 0; r < (1 << P); r++) begin
        e_max = 5'(e);
        rnd   = P'(r);
        #1;
        checks++;
        if (fp16_to_real({1'b0, thr}) != thr_real(e, r, P)) begin
          failures++;
          if (failures < 10)
            $display("FAIL e=%0d rnd=%0d thr=%h got %g want %g", e, r, thr,
                     fp16_to_real({1'b0, thr}), thr_real(e, r, P));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
