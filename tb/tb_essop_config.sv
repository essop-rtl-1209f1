// tb_essop_config: reset values, plain writes, clamping of out-of-range
// sequence lengths, and that nothing changes without a write.
module tb_essop_config;
  import essop_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] wr_seq_len = 0;
  logic [3:0] wr_lr_shift = 0;
  essop_cfg_t cfg;
  int checks = 0, failures = 0;

  essop_config #(.M_MAX(16)) dut (.clk, .rst_n, .we, .wr_seq_len, .wr_lr_shift, .cfg);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cfg(input int m, input int l);
    checks++;
    if (int'(cfg.seq_len) != m || int'(cfg.lr_shift) != l) begin
      failures++;
      $display("FAIL cfg=%0d/%0d want %0d/%0d", cfg.seq_len, cfg.lr_shift, m, l);
    end
  endtask

  initial begin
    int em, el;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    expect_cfg(16, 0);
    em = 16; el = 0;
    for (int m = 0; m < 32; m++) begin
      we = 1; wr_seq_len = 5'(m); wr_lr_shift = 4'(m % 16);
      @(negedge clk);
      we = 0;
      em = (m == 0) ? 1 : (m > 16 ? 16 : m);
      el = m % 16;
      expect_cfg(em, el);
      wr_seq_len = 5'($urandom); wr_lr_shift = 4'($urandom);
      @(negedge clk);
      expect_cfg(em, el);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
