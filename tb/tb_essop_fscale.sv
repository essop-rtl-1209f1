// tb_essop_fscale: all exponent pairs, sequence lengths 1..16 and a spread of
// learning-rate shifts. fexp must be the biased exponent of
// floor(log2(2^(e_x-14) * 2^(e_d-14) / M)) - lr_shift.
module tb_essop_fscale;
  import tb_essop_ref_pkg::*;

  logic [4:0] e_x, e_d, seq_len;
  logic [3:0] lr_shift;
  logic signed [7:0] fexp;
  int checks = 0, failures = 0;

  essop_fscale dut (.e_x, .e_d, .seq_len, .lr_shift, .fexp);

  initial begin
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int want;
    real fs;
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b += 3)
        for (int m = 1; m <= 16; m++)
          for (int l = 0; l < 16; l += 5) begin
            e_x = 5'(a); e_d = 5'(b); seq_len = 5'(m); lr_shift = 4'(l);
            #1;
            // floor(log2(F_scale)) from the real value
            fs = (2.0 ** (a - 14)) * (2.0 ** (b - 14)) / real'(m);
            want = 0;
            while (2.0 ** (want + 1) <= fs) want++;
            while (2.0 ** want > fs) want--;
            want = want - l + 15;
            checks++;
            if (int'(fexp) != want) begin
              failures++;
              if (failures < 10) $display("FAIL ex=%0d ed=%0d m=%0d lr=%0d fexp=%0d want %0d", a, b, m, l, fexp, want);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
