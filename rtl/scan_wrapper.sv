// scan_wrapper: shift/scan wrapper that lets a fast block be tested through
// a few slow pins.
//
// One scan chain of IN_W + OUT_W bits runs from SCAN_IN through an input
// section (upper IN_W bits) and an output section (lower OUT_W bits) to
// SCAN_OUT. Under the 3-bit control CTL_SIG the wrapper, on each rising edge
// of scan_clk:
//   HOLD    (000) keeps everything,
//   SHIFT   (001) shifts the chain one place towards SCAN_OUT,
//   UPDATE  (010) copies the input section into the held vector din, which
//                 drives the block and stays stable while shifting,
//   EVAL    (011) raises eval, asking for the block's fast clock to run,
//   CAPTURE (100) loads the block outputs dout into the output section.
// Codes 101 to 111 hold. Shifting the full chain length with no update or
// capture between is the flush test: what goes in comes out N shifts later.
//
// Timing: the tester launches SCAN_IN and CTL_SIG on the falling edge of
// scan_clk and the wrapper samples them on the rising edge. SCAN_OUT is the
// last chain bit, valid after each rising edge. Shifting IN_W + OUT_W times
// moves bit k of what was shifted in (first bit k = 0) to chain bit k, so
// din bit j is the (OUT_W + j)-th bit shifted in, and the bits shifted out
// are the previous output section, LSB first, then the previous input
// section. RESETB low clears the chain, din and eval asynchronously.
//
// Following the source: serial input, on-chip buffering, serial output at low
// speed, a 3-bit control with five used codes, launch on the falling and
// capture on the rising scan clock edge, and the RESETB pin. This design's
// choices: the five operations, their codes, and the single chain.
module scan_wrapper
  import testsite_pkg::*;
#(
  parameter int unsigned IN_W  = 39,
  parameter int unsigned OUT_W = 16
) (
  input  logic             scan_clk,
  input  logic             resetb,
  input  logic [2:0]       ctl_sig,
  input  logic             scan_in,
  output logic             scan_out,
  output logic [IN_W-1:0]  din,
  input  logic [OUT_W-1:0] dout,
  output logic             eval
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N = IN_W + OUT_W;

  ctl_e         ctl;
  logic [N-1:0] chain;

  assign ctl = ctl_e'(ctl_sig);

  always_ff @(posedge scan_clk or negedge resetb) begin
    if (!resetb) begin
      chain <= '0;
      din   <= '0;
      eval  <= 1'b0;
    end else begin
      eval <= (ctl == CTL_EVAL);
      unique case (ctl)
        CTL_SHIFT:   chain <= {scan_in, chain[N-1:1]};
        CTL_UPDATE:  din   <= chain[N-1 -: IN_W];
        CTL_CAPTURE: chain[OUT_W-1:0] <= dout;
        default:     ;
      endcase
    end
  end

  assign scan_out = chain[0];

endmodule
