// clk_mode_divider: programmable power-of-two clock divider of the clock
// generator.
//
// A 31-bit ripple-free binary counter runs on the oscillator clock; mode 0
// passes the oscillator through and mode k (1..31) takes counter bit k-1,
// which divides the oscillator frequency by 2^k. That gives 32 frequency
// modes spanning more than nine decades. The counter is cleared while enable
// is low. Changing mode while running may give one short clock period; the
// block's clock is stopped (scan evaluate off) when the mode changes.
//
// This divider is this design's construction: the source states only that the
// generator has 32 frequency modes spanning KHz to GHz.
module clk_mode_divider #(
  parameter int unsigned MODE_W = 5,
  localparam int unsigned MODES = 1 << MODE_W
) (
  input  logic              osc,
  input  logic              enable,
  input  logic [MODE_W-1:0] mode,
  output logic              clk_div
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [MODES-2:0] cnt;
  logic [MODES-1:0] taps;

  always_ff @(posedge osc or negedge enable) begin
    if (!enable) cnt <= '0;
    else         cnt <= cnt + 1'b1;
  end

  assign taps    = {cnt, osc};
  assign clk_div = taps[mode];

endmodule
