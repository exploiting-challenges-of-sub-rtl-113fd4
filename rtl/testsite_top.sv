// testsite_top: the 14 nm test site with its digital design blocks.
//
// Three blocks are tested through scan: block 0 is the smart parallel-access
// SRAM (pa_sram, 32x32 image, 2x2 window), block 1 the synthesized 1R-1W
// SRAM (sram_1r1w, 256 x 16), block 2 the 32-bit Booth-Wallace multiplier.
// Each has its own block_shell (scan wrapper, programmable clock generator,
// clock gate, CLK_OUT divider) and its own eight input and two output pins,
// given here as arrays indexed by block. Two ring oscillator structures,
// ring 0 built from 10T_BiDir cells and ring 1 from the 30% slower 10T_UniDir
// cells, each drive a 2^14 divider to an RO_OUT pin.
//
// Scan vectors: block 0 carries pa_in_t / pa_out_t, block 1 sram_in_t /
// sram_out_t, block 2 mult_in_t / mult_out_t (testsite_pkg). An operation is:
// shift a vector in, UPDATE, EVAL for some scan cycles (the block repeats the
// operation on every functional clock, which is harmless for writes, reads
// and multiplies), CAPTURE after the block stopped, shift the result out.
//
// Following the source: the set of blocks (without the traditional-design
// baselines), a scan wrapper and clock generator per block, 8 inputs and 2
// outputs per block, 13-stage ring oscillators with 2^14 dividers. This
// design's choices: the vector layouts, the pin functions and the stage delays
// of the oscillator models.
module testsite_top
  import testsite_pkg::*;
#(
  parameter int unsigned CLKOUT_DIV_BITS = 4
) (
  input  logic [2:0] ctl_sig    [3],
  input  logic       scan_clk   [3],
  input  logic       scan_in    [3],
  input  logic       resetb     [3],
  input  logic       enable     [3],
  input  logic       clkoffchip [3],
  output logic       scan_out   [3],
  output logic       clk_out    [3],
  input  logic [1:0] ro_enable,
  output logic [1:0] ro_out
);
  timeunit 1ns;
  timeprecision 1ps;

  // ------------------------------------------ block 0: smart parallel-access SRAM
  pa_in_t  pa_in;
  pa_out_t pa_out;
  logic    pa_clk, pa_rst_n;
  logic    pa_rvalid;

  block_shell #(.IN_W($bits(pa_in_t)), .OUT_W($bits(pa_out_t)),
                .CLKOUT_DIV_BITS(CLKOUT_DIV_BITS)) u_pa_shell (
    .ctl_sig (ctl_sig[0]), .scan_clk (scan_clk[0]), .scan_in (scan_in[0]),
    .resetb  (resetb[0]),  .enable   (enable[0]),   .clkoffchip (clkoffchip[0]),
    .scan_out (scan_out[0]), .clk_out (clk_out[0]),
    .din (pa_in), .dout (pa_out), .gclk (pa_clk), .rst_n (pa_rst_n)
  );

  pa_sram u_pa (
    .clk    (pa_clk),
    .we     (pa_in.we),
    .wx     (pa_in.wx),
    .wy     (pa_in.wy),
    .wdata  (pa_in.wdata),
    .re     (pa_in.re),
    .rx     (pa_in.rx),
    .ry     (pa_in.ry),
    .rwin   (pa_out.rwin),
    .rvalid (pa_rvalid)
  );

  // ------------------------------------------------- block 1: 1R-1W SRAM 256x16
  sram_in_t  sr_in;
  sram_out_t sr_out;
  logic      sr_clk, sr_rst_n;
  logic      sr_rvalid;

  block_shell #(.IN_W($bits(sram_in_t)), .OUT_W($bits(sram_out_t)),
                .CLKOUT_DIV_BITS(CLKOUT_DIV_BITS)) u_sr_shell (
    .ctl_sig (ctl_sig[1]), .scan_clk (scan_clk[1]), .scan_in (scan_in[1]),
    .resetb  (resetb[1]),  .enable   (enable[1]),   .clkoffchip (clkoffchip[1]),
    .scan_out (scan_out[1]), .clk_out (clk_out[1]),
    .din (sr_in), .dout (sr_out), .gclk (sr_clk), .rst_n (sr_rst_n)
  );

  sram_1r1w u_sram (
    .clk    (sr_clk),
    .we     (sr_in.we),
    .waddr  (sr_in.waddr),
    .wdata  (sr_in.wdata),
    .re     (sr_in.re),
    .raddr  (sr_in.raddr),
    .rdata  (sr_out.rdata),
    .rvalid (sr_rvalid)
  );

  // ----------------------------------------------- block 2: 32-bit multiplier
  mult_in_t  mu_in;
  mult_out_t mu_out;
  logic      mu_clk, mu_rst_n;
  logic      mu_valid;

  block_shell #(.IN_W($bits(mult_in_t)), .OUT_W($bits(mult_out_t)),
                .CLKOUT_DIV_BITS(CLKOUT_DIV_BITS)) u_mu_shell (
    .ctl_sig (ctl_sig[2]), .scan_clk (scan_clk[2]), .scan_in (scan_in[2]),
    .resetb  (resetb[2]),  .enable   (enable[2]),   .clkoffchip (clkoffchip[2]),
    .scan_out (scan_out[2]), .clk_out (clk_out[2]),
    .din (mu_in), .dout (mu_out), .gclk (mu_clk), .rst_n (mu_rst_n)
  );

  booth_wallace_mult #(.WIDTH(32)) u_mult (
    .clk       (mu_clk),
    .rst_n     (mu_rst_n),
    .in_valid  (1'b1),
    .a         (mu_in.a),
    .b         (mu_in.b),
    .p         (mu_out.p),
    .out_valid (mu_valid)
  );

  // ------------------------------------------------ ring oscillator structures
  localparam int unsigned RO_DELAY_PS [2] = '{10, 13};   // BiDir, UniDir

  for (genvar r = 0; r < 2; r++) begin : g_ro
    logic ro;
    ring_oscillator #(.STAGES(13), .STAGE_DELAY_PS(RO_DELAY_PS[r])) u_ro (
      .enable (ro_enable[r]),
      .ro     (ro)
    );
    ro_divider #(.DIV_BITS(14)) u_div (
      .clk_in  (ro),
      .enable  (ro_enable[r]),
      .div_out (ro_out[r])
    );
  end

endmodule
