// ro_divider: frequency divider by 2^DIV_BITS (2^14 by default) behind a ring
// oscillator, so that the oscillator frequency can be measured at a slow pin.
//
// A DIV_BITS-bit binary counter counts rising edges of clk_in; its most
// significant bit is the divided output, which therefore has a period of
// 2^DIV_BITS input periods and a 50% duty cycle. While enable is low the
// counter is held cleared, so every measurement starts from zero.
//
// Following the source: the 14-bit divider on the ring oscillator output.
// This design's choice: the asynchronous clear from ENABLE.
module ro_divider #(
  parameter int unsigned DIV_BITS = 14
) (
  input  logic clk_in,
  input  logic enable,
  output logic div_out
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [DIV_BITS-1:0] cnt;

  always_ff @(posedge clk_in or negedge enable) begin
    if (!enable) cnt <= '0;
    else         cnt <= cnt + 1'b1;
  end

  assign div_out = cnt[DIV_BITS-1];

endmodule
