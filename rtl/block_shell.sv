// block_shell: the test infrastructure around one design block of the test
// site: scan wrapper, programmable clock generator, clock gate and CLK_OUT
// divider.
//
// The block under test sees only din (the held scan vector), its gated clock
// gclk and its reset rst_n, and returns dout. The top MODE_W bits of din
// select the clock generator's frequency mode. The scan wrapper's eval request
// is brought into the functional clock domain by a two-flop synchroniser and
// enables a latch-based clock gate, so the block is clocked only while the
// tester holds CTL_SIG at EVAL (two or three functional cycles of delay at
// each end). Outputs are captured by the scan clock after the block has
// stopped, so they are quasi-static when sampled. CLK_OUT is the functional
// clock divided by 2^CLKOUT_DIV_BITS so that its frequency can be measured off
// chip. rst_n is RESETB.
//
// Pins per block (8 in, 2 out): CTL_SIG<2:0>, SCAN_CLK, SCAN_IN, RESETB,
// ENABLE, CLKOFFCHIP; SCAN_OUT, CLK_OUT. The pin count follows the source;
// which signals they are, the synchroniser, the clock gate and the CLK_OUT
// divider are this design's choices.
module block_shell
  import testsite_pkg::*;
#(
  parameter int unsigned IN_W            = 39,
  parameter int unsigned OUT_W           = 16,
  parameter int unsigned CLKOUT_DIV_BITS = 4,
  parameter int unsigned STAGE_DELAY_PS  = 10
) (
  input  logic [2:0]       ctl_sig,
  input  logic             scan_clk,
  input  logic             scan_in,
  input  logic             resetb,
  input  logic             enable,
  input  logic             clkoffchip,
  output logic             scan_out,
  output logic             clk_out,
  // block under test
  output logic [IN_W-1:0]  din,
  input  logic [OUT_W-1:0] dout,
  output logic             gclk,
  output logic             rst_n
);
  timeunit 1ns;
  timeprecision 1ps;

  logic                       eval;
  logic                       fclk;
  logic [1:0]                 eval_sync;
  logic [CLKOUT_DIV_BITS-1:0] clkout_cnt;

  scan_wrapper #(.IN_W(IN_W), .OUT_W(OUT_W)) u_scan (
    .scan_clk (scan_clk),
    .resetb   (resetb),
    .ctl_sig  (ctl_sig),
    .scan_in  (scan_in),
    .scan_out (scan_out),
    .din      (din),
    .dout     (dout),
    .eval     (eval)
  );

  clock_generator #(.STAGE_DELAY_PS(STAGE_DELAY_PS), .MODE_W(MODE_W)) u_clkgen (
    .enable      (enable),
    .clk_offchip (clkoffchip),
    .mode        (din[IN_W-1 -: MODE_W]),
    .clk         (fclk)
  );

  always_ff @(posedge fclk or negedge resetb) begin
    if (!resetb) eval_sync <= '0;
    else         eval_sync <= {eval_sync[0], eval};
  end

  clock_gate u_cg (
    .clk  (fclk),
    .en   (eval_sync[1]),
    .gclk (gclk)
  );

  always_ff @(posedge fclk or negedge resetb) begin
    if (!resetb) clkout_cnt <= '0;
    else         clkout_cnt <= clkout_cnt + 1'b1;
  end

  assign clk_out = clkout_cnt[CLKOUT_DIV_BITS-1];
  assign rst_n   = resetb;

endmodule
