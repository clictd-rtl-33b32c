// clock_gate: integrated clock-gating cell (latch + AND).
//
// The CLICTD pixel logic saves digital power by gating its clock. This cell
// is the usual glitch-free form: the enable is captured by a latch that is
// transparent while the clock is low, and the gated clock is the clock ANDed
// with the latched enable. An enable raised during cycle n (after the rising
// edge) therefore lets the rising edge that ends cycle n through; test_en
// forces the clock on. The paper only states that clock gating is used; the
// cell itself is this implementation's choice.
module clock_gate (
  input  logic clk,
  input  logic en,
  input  logic test_en,
  output logic gclk
);
  logic en_l;

  always_latch begin
    if (!clk) en_l = en | test_en;
  end

  assign gclk = clk & en_l;
endmodule
