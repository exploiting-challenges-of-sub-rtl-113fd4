// ring_oscillator: behavioural model of the standard-cell ring oscillator.
//
// This is a behavioural model, not synthesizable logic: the real part is a
// loop of STAGES inverting cells, a NAND2 whose second input is the ENABLE pin
// followed by STAGES-1 inverters, with the last inverter's output fed back to
// the NAND. Its frequency is set by the cells' delay, an analog property,
// modelled here as STAGE_DELAY_PS picoseconds per stage. With ENABLE low the
// NAND output is high and, after an even number of inverters, the output rests
// high. With ENABLE high the output toggles every STAGES stage delays, a period
// of 2 * STAGES * STAGE_DELAY_PS.
//
// Following the source: the NAND-plus-12-inverter structure (13 stages) and
// the ENABLE control. This model's choice: the stage delay value. The same
// model stands in for the oscillator of the programmable clock generator.
module ring_oscillator #(
  parameter int unsigned STAGES         = 13,
  parameter int unsigned STAGE_DELAY_PS = 10
) (
  input  logic enable,
  output logic ro
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned HALF_PS = STAGES * STAGE_DELAY_PS;

  initial ro = 1'b1;

  always begin
    if (!enable) begin
      ro = 1'b1;
      @(posedge enable);
    end else begin
      #(HALF_PS * 1ps);
      ro = enable ? ~ro : 1'b1;
    end
  end

endmodule
