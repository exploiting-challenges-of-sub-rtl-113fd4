// testsite_pkg: types and constants shared by the test-site blocks.
//
// The scan wrapper of every block is driven by a 3-bit control word. Five of
// the eight codes have a meaning; the assignment of codes to operations is
// this design's own choice (the source only states that five of eight codes
// are used). The packed structs below are the input and output vectors that
// each block's scan chain carries; their field order is also this design's
// choice. Vectors are shifted in and out least significant bit first; the
// clock mode is always the most significant field, which block_shell uses.
package testsite_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [2:0] {
    CTL_HOLD    = 3'b000,  // chain and held vector keep their values
    CTL_SHIFT   = 3'b001,  // chain shifts one bit per scan clock
    CTL_UPDATE  = 3'b010,  // held input vector <= input section of the chain
    CTL_EVAL    = 3'b011,  // functional clock of the block runs
    CTL_CAPTURE = 3'b100   // output section of the chain <= block outputs
  } ctl_e;

  localparam int unsigned MODE_W = 5;   // 32 clock-generator frequency modes

  // 32-bit multiplier block
  typedef struct packed {
    logic [MODE_W-1:0] clk_mode;
    logic [31:0]       a;
    logic [31:0]       b;
  } mult_in_t;
  typedef struct packed {
    logic [63:0]       p;
  } mult_out_t;

  // 1R-1W 256x16 SRAM block
  typedef struct packed {
    logic [MODE_W-1:0] clk_mode;
    logic              we;
    logic [7:0]        waddr;
    logic [15:0]       wdata;
    logic              re;
    logic [7:0]        raddr;
  } sram_in_t;
  typedef struct packed {
    logic [15:0]       rdata;
  } sram_out_t;

  // Smart parallel-access SRAM block (32x32 image, 2x2 window, 8-bit pixels)
  typedef struct packed {
    logic [MODE_W-1:0] clk_mode;
    logic              we;
    logic [4:0]        wx;
    logic [4:0]        wy;
    logic [7:0]        wdata;
    logic              re;
    logic [4:0]        rx;
    logic [4:0]        ry;
  } pa_in_t;
  typedef struct packed {
    logic [31:0]       rwin;
  } pa_out_t;

endpackage
