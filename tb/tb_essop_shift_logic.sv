// tb_essop_shift_logic: every count 0..16, both signs and every F~scale
// exponent from -40 to 60. The packed FP16 word must equal the real product
// cnt * 2^(fexp-15) with the design's rules (zero below the normal range,
// 0x7BFF above it).
module tb_essop_shift_logic;
  import tb_essop_ref_pkg::*;

  logic             sign;
  logic [4:0]       cnt;
  logic signed [7:0] fexp;
  logic [15:0]      dw;
  int checks = 0, failures = 0;

  essop_shift_logic #(.CNT_W(5)) dut (.sign, .cnt, .fexp, .dw);

  initial begin
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] want;
    for (int s = 0; s < 2; s++)
      for (int c = 0; c <= 16; c++)
        for (int f = -40; f <= 60; f++) begin
          sign = s[0];
          cnt  = 5'(c);
          fexp = 8'(f);
          #1;
          want = real_to_fp16(real'(c) * (2.0 ** (f - 15)), s[0]);
          checks++;
          if (dw !== want) begin
            failures++;
            if (failures < 10) $display("FAIL s=%0d cnt=%0d fexp=%0d dw=%h want %h", s, c, f, dw, want);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
