// tb_essop_unit_cell: drives random Bernoulli bits and signs into one unit
// cell for rows of 1..16 clocks, back to back, and checks after each row
// that dw = (sign_x ^ sign_d) * popcount(bern_x & bern_d) * 2^(fexp-15),
// latched exactly in the clock after 'last' and held until the next row ends.
module tb_essop_unit_cell;
  import tb_essop_ref_pkg::*;

  logic clk = 0, rst_n = 0, first = 0, last = 0;
  logic bern_x = 0, sign_x = 0, bern_d = 0, sign_d = 0;
  logic signed [7:0] fexp = 8'sd15;
  logic [15:0] dw;
  int checks = 0, failures = 0;

  essop_unit_cell #(.M_MAX(16)) dut (.clk, .rst_n, .first, .last, .bern_x, .sign_x,
    .bern_d, .sign_d, .fexp, .dw);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] want, prev;
    int cnt, m, f;
    logic sx, sd;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    prev = dw;
    repeat (400) begin
      m  = $urandom_range(1, 16);
      f  = $urandom_range(0, 40) - 5;
      sx = $urandom_range(1);
      sd = $urandom_range(1);
      cnt = 0;
      fexp = 8'(f);
      for (int k = 0; k < m; k++) begin
        first  = (k == 0);
        last   = (k == m - 1);
        // density varies so that all counts occur
        bern_x = ($urandom_range(15) < 15) ? 1'b1 : $urandom_range(1) == 1;
        bern_d = $urandom_range(1);
        sign_x = sx;
        sign_d = sd;
        if (bern_x && bern_d) cnt++;
        @(negedge clk);
        if (k < m - 1) begin
          checks++;
          if (dw !== prev) begin failures++; $display("FAIL dw changed inside row"); end
        end
      end
      want = real_to_fp16(real'(cnt) * (2.0 ** (f - 15)), sx ^ sd);
      checks++;
      if (dw !== want) begin
        failures++;
        $display("FAIL m=%0d cnt=%0d fexp=%0d dw=%h want %h", m, cnt, f, dw, want);
      end
      prev = dw;
      first = 0; last = 0;
      // sometimes an idle clock between rows
      if ($urandom_range(1) == 1) begin
        bern_x = 1; bern_d = 1;
        @(negedge clk);
        checks++;
        if (dw !== prev) begin failures++; $display("FAIL dw changed while idle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
