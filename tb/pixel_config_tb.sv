// pixel_config_tb: self-checking test of the per-pixel configuration register.
// Shifts random words in, checks the decoded masks and tuning codes, checks
// that the word holds while cfg_shift is low, and that it leaves at cfg_out
// MSB first while the next word is shifted in.
module pixel_config_tb;
  import clictd_pkg::*;

  logic clk = 0, rst_n = 0, cfg_shift = 0, cfg_in = 0, cfg_out;
  pix_cfg_t cfg;
  int checks = 0, failures = 0;

  pixel_config dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  initial begin
    logic [CFG_W-1:0] w, prev;
    repeat (2) @(negedge clk);
    chk(cfg, 0, "reset value");
    rst_n = 1;
    prev = '0;
    for (int n = 0; n < 20; n++) begin
      w = CFG_W'($urandom);
      for (int b = CFG_W - 1; b >= 0; b--) begin
        @(negedge clk);
        chk(cfg_out, prev[b], "cfg_out");
        cfg_shift = 1; cfg_in = w[b];
      end
      @(negedge clk) cfg_shift = 0;
      chk(cfg, w, "word");
      for (int s = 0; s < N_SUB; s++) begin
        chk(cfg.mask[s], w[s], "mask");
        chk(cfg.tune[s], w[N_SUB + TUNE_W*s +: TUNE_W], "tune");
      end
      cfg_in = ~cfg_in;
      repeat (5) @(negedge clk);
      chk(cfg, w, "hold");
      prev = w;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
