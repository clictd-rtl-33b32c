// clock_gate_tb: self-checking test of the latch-based clock-gating cell.
// The enable changes at random times, also while the clock is high. Checks
// that the gated clock is low whenever the clock is low, that each clock high
// phase passes whole or not at all, and that it passes exactly when the enable
// (or test_en) was high at the end of the preceding low phase.
module clock_gate_tb;
  logic clk = 0, en = 0, test_en = 0, gclk;
  int checks = 0, failures = 0;
  logic en_at_rise;

  clock_gate dut (.*);

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0b exp %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    for (int c = 0; c < 400; c++) begin
      // low phase: 10 units, enable may change in the middle
      #4 en = 1'($urandom); test_en = ($urandom_range(0, 7) == 0);
      #2 chk(gclk, 1'b0, "low while clk low");
      #4 en_at_rise = en | test_en;
      clk = 1;
      #1 chk(gclk, en_at_rise, "passes at rise");
      #3 en = 1'($urandom); test_en = 1'b0;   // change while high: no glitch
      #1 chk(gclk, en_at_rise, "whole high phase");
      #5 clk = 0;
      #1 chk(gclk, 1'b0, "falls with clk");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
