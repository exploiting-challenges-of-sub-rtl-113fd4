// clock_generator: programmable clock generator of a test-site block.
//
// An on-chip ring oscillator (behavioural model, on its own supply in silicon)
// feeds a power-of-two divider with 32 modes (clk_mode_divider). ENABLE starts
// the oscillator. When ENABLE is low the block is clocked from the CLKOFFCHIP
// pin instead, which allows debugging with an external clock. The output is
// the functional clock of the block, before clock gating.
//
// Interface: enable (ENABLE pin), clk_offchip (CLKOFFCHIP pin), mode (5 bits,
// from the scan wrapper's held input vector), clk (functional clock). The
// on-chip clock period is 2 * 13 * STAGE_DELAY_PS * 2^mode picoseconds.
//
// Following the source: 32 frequency modes, an ENABLE pin and an off-chip
// clock pin. This design's choices: oscillator plus 2^mode divider, and the
// selection of the off-chip clock by ENABLE low.
module clock_generator #(
  parameter int unsigned STAGE_DELAY_PS = 10,
  parameter int unsigned MODE_W         = 5
) (
  input  logic              enable,
  input  logic              clk_offchip,
  input  logic [MODE_W-1:0] mode,
  output logic              clk
);
  timeunit 1ns;
  timeprecision 1ps;

  logic osc, clk_div;

  ring_oscillator #(.STAGES(13), .STAGE_DELAY_PS(STAGE_DELAY_PS)) u_osc (
    .enable (enable),
    .ro     (osc)
  );

  clk_mode_divider #(.MODE_W(MODE_W)) u_div (
    .osc     (osc),
    .enable  (enable),
    .mode    (mode),
    .clk_div (clk_div)
  );

  assign clk = enable ? clk_div : clk_offchip;

endmodule
