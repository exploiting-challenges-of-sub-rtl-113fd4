// clock_gate: latch-based clock gate, the usual integrated clock-gating cell.
//
// The enable is sampled by a latch that is transparent while clk is low, so
// it can only change while the clock is low and the gated clock has no
// glitches; gclk = clk AND latched enable. The latch is intended.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  timeunit 1ns;
  timeprecision 1ps;

  logic en_l;

  always_latch begin
    if (!clk) en_l = en;
  end

  assign gclk = clk & en_l;

endmodule
