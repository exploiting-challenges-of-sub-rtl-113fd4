// tb_testsite_top: end-to-end test of the whole test site at its default
// sizes, driven only through the chip's pins, as a wafer tester would.
//
// For each scanned block: RESETB pulse, flush test of the scan chain, then
// operations made of shift-in, UPDATE, EVAL, HOLD, CAPTURE and shift-out.
//   block 0, smart PA SRAM: the whole 32 x 32 image is written pixel by pixel,
//     then windows are read at every alignment on the banks and across the
//     image edges, and compared with a reference image;
//   block 1, 1R-1W SRAM: random writes, then reads of the same words;
//   block 2, multiplier: random and corner products on the on-chip clock in
//     each of modes 0..5 (a frequency sweep as for a shmoo plot), then on
//     CLKOFFCHIP with ENABLE low.
// The clock generator is checked through CLK_OUT (functional clock / 16) in
// two frequency modes (a mode switch) and on the off-chip clock, and both
// ring oscillators through RO_OUT (2^14 divider): 2 x 13 x 10 ps x 2^14 for
// the BiDir ring, 30% longer for the UniDir ring. Each mechanism is counted and
// one that never happened counts as a failure.
module tb_testsite_top
  import testsite_pkg::*;
;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned IN_W  [3] = '{$bits(pa_in_t),  $bits(sram_in_t),  $bits(mult_in_t)};
  localparam int unsigned OUT_W [3] = '{$bits(pa_out_t), $bits(sram_out_t), $bits(mult_out_t)};

  logic [2:0] ctl_sig    [3];
  logic       scan_clk   [3];
  logic       scan_in    [3];
  logic       resetb     [3];
  logic       enable     [3];
  logic       clkoffchip [3];
  logic       scan_out   [3];
  logic       clk_out    [3];
  logic [1:0] ro_enable, ro_out;

  logic sclk = 1'b0;
  logic offclk = 1'b0;

  testsite_top dut (.*);

  always #5 sclk = ~sclk;        // scan clock, 100 MHz
  always #1 offclk = ~offclk;    // off-chip clock, 500 MHz
  for (genvar b = 0; b < 3; b++) begin : g_pins
    assign scan_clk[b]   = sclk;
    assign clkoffchip[b] = offclk;
  end

  int unsigned checks = 0, failures = 0;
  int unsigned n_shift = 0, n_update = 0, n_eval = 0, n_capture = 0, n_hold = 0;
  int unsigned n_flush = 0, n_reset = 0, n_mode_switch = 0, n_offchip = 0;
  int unsigned n_ro [2] = '{0, 0};
  int unsigned n_align [4] = '{0, 0, 0, 0};
  int unsigned n_wrap = 0, n_pa_write = 0, n_pa_read = 0;
  int unsigned n_sram_write = 0, n_sram_read = 0, n_mult = 0, n_shmoo = 0;

  logic [7:0] img [32][32];

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  // one scan clock: launch on the falling edge, chip samples on the rising one
  task automatic step(input int b, input logic [2:0] c, input logic si, output logic so);
    @(negedge sclk);
    ctl_sig[b] = c; scan_in[b] = si;
    so = scan_out[b];
    @(posedge sclk);
  endtask

  task automatic reset_block(input int b);
    @(negedge sclk);
    ctl_sig[b] = CTL_HOLD; scan_in[b] = 0; resetb[b] = 0;
    @(negedge sclk);
    check(scan_out[b] == 1'b0, "RESETB clears the chain");
    resetb[b] = 1;
    n_reset++;
  endtask

  task automatic flush(input int b);
    int unsigned n;
    logic so;
    logic [255:0] stream;
    n = IN_W[b] + OUT_W[b];
    for (int k = 0; k < 8; k++) stream[k*32 +: 32] = $urandom;
    for (int k = 0; k < 2*n; k++) begin
      step(b, CTL_SHIFT, stream[k], so);
      n_shift++;
      if (k >= n) check(so == stream[k-n], "flush test");
    end
    n_flush++;
  endtask

  // one operation: shift vector in, UPDATE, EVAL, wait, CAPTURE, shift out
  task automatic op(input int b, input logic [127:0] vin, input int eval_cycles,
                    input bit want_result, output logic [127:0] vout);
    logic so;
    int unsigned n;
    n = IN_W[b] + OUT_W[b];
    vout = '0;
    for (int k = 0; k < n; k++) begin
      step(b, CTL_SHIFT, (k < OUT_W[b]) ? 1'b0 : vin[k - OUT_W[b]], so);
      n_shift++;
    end
    step(b, CTL_UPDATE, 1'b0, so);  n_update++;
    repeat (eval_cycles) begin step(b, CTL_EVAL, 1'b0, so); n_eval++; end
    repeat (2) begin step(b, CTL_HOLD, 1'b0, so); n_hold++; end
    if (want_result) begin
      step(b, CTL_CAPTURE, 1'b0, so);  n_capture++;
      for (int k = 0; k < OUT_W[b]; k++) begin
        step(b, CTL_SHIFT, 1'b0, so);
        vout[k] = so;
        n_shift++;
      end
    end
  endtask

  // signals whose period is measured: 0/1 RO_OUT of ring 0/1, 2+b CLK_OUT of block b
  task automatic wait_rise(input int id);
    case (id)
      0:       @(posedge ro_out[0]);
      1:       @(posedge ro_out[1]);
      2:       @(posedge clk_out[0]);
      3:       @(posedge clk_out[1]);
      default: @(posedge clk_out[2]);
    endcase
  endtask

  task automatic measure(input int id, input real expect_ns, input string what);
    realtime t0, t1;
    wait_rise(id);
    wait_rise(id); t0 = $realtime;
    wait_rise(id); t1 = $realtime;
    check((t1 - t0) > expect_ns * 0.995 && (t1 - t0) < expect_ns * 1.005,
          $sformatf("%s: period %0.3f ns, expected %0.3f ns", what, t1 - t0, expect_ns));
  endtask

  // ------------------------------------------------------------ block 0 ops
  task automatic pa_write(input int x, input int y, input logic [7:0] d);
    pa_in_t v;
    logic [127:0] r;
    v = '0; v.clk_mode = 5'd1; v.we = 1; v.wx = 5'(x); v.wy = 5'(y); v.wdata = d;
    op(0, 128'(v), 2, 1'b0, r);
    img[y][x] = d;
    n_pa_write++;
  endtask

  task automatic pa_read(input int x, input int y);
    pa_in_t v;
    logic [127:0] r;
    logic [31:0] expw;
    v = '0; v.clk_mode = 5'd1; v.re = 1; v.rx = 5'(x); v.ry = 5'(y);
    op(0, 128'(v), 2, 1'b1, r);
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++)
        expw[(dy*2 + dx)*8 +: 8] = img[(y + dy) % 32][(x + dx) % 32];
    check(r[31:0] == expw, $sformatf("PA window at (%0d,%0d): %h, expected %h", x, y, r[31:0], expw));
    n_align[(y % 2) * 2 + (x % 2)]++;
    if (x == 31 || y == 31) n_wrap++;
    n_pa_read++;
  endtask

  initial begin
    logic [127:0] r;
    for (int b = 0; b < 3; b++) begin
      ctl_sig[b] = CTL_HOLD; scan_in[b] = 0; resetb[b] = 1; enable[b] = 0;
    end
    ro_enable = 2'b00;

    // ---------------------------------------------------- ring oscillators
    #2;
    check(ro_out == 2'b00, "RO dividers cleared while disabled");
    ro_enable = 2'b11;
    fork
      begin measure(0, 2.0 * 13 * 0.010 * 16384, "BiDir RO_OUT"); n_ro[0]++; end
      begin measure(1, 2.0 * 13 * 0.013 * 16384, "UniDir RO_OUT"); n_ro[1]++; end
    join
    ro_enable = 2'b00;

    // ------------------------------------------------ block 1: 1R-1W SRAM
    begin
      sram_in_t v;
      logic [15:0] data [16];
      logic [7:0]  addr [16];
      enable[1] = 1;
      reset_block(1);
      flush(1);
      // mode 0, then measure CLK_OUT; mode 3, measure again
      v = '0; v.clk_mode = 5'd0;
      op(1, 128'(v), 1, 1'b0, r);
      measure(3, 16 * 0.26, "CLK_OUT mode 0");
      v.clk_mode = 5'd3;
      op(1, 128'(v), 1, 1'b0, r);
      measure(3, 16 * 0.26 * 8, "CLK_OUT mode 3");
      n_mode_switch++;
      for (int i = 0; i < 16; i++) begin
        addr[i] = 8'(i * 17 + $urandom_range(16));
        data[i] = 16'($urandom);
        v = '0; v.clk_mode = 5'd0; v.we = 1; v.waddr = addr[i]; v.wdata = data[i];
        op(1, 128'(v), 2, 1'b0, r);
        n_sram_write++;
      end
      for (int i = 0; i < 16; i++) begin
        v = '0; v.clk_mode = 5'd0; v.re = 1; v.raddr = addr[i];
        op(1, 128'(v), 2, 1'b1, r);
        check(r[15:0] == data[i], $sformatf("SRAM read %0d: %h expected %h", addr[i], r[15:0], data[i]));
        n_sram_read++;
      end
      enable[1] = 0;
    end

    // -------------------------------------------------- block 2: multiplier
    begin
      mult_in_t v;
      logic [31:0] a, bb;
      enable[2] = 1;
      reset_block(2);
      flush(2);
      // on-chip clock, swept over modes 0..5 as one row of a shmoo plot
      // (two products per mode), then six products on CLKOFFCHIP
      for (int i = 0; i < 18; i++) begin
        a  = (i == 0) ? 32'hFFFF_FFFF : $urandom;
        bb = (i == 0) ? 32'hFFFF_FFFF : $urandom;
        if (i == 12) enable[2] = 0;   // from here on the block runs on CLKOFFCHIP
        v = '0; v.clk_mode = (i < 12) ? 5'(i / 2) : 5'd0; v.a = a; v.b = bb;
        op(2, 128'(v), 8, 1'b1, r);
        check(r[63:0] == 64'(a) * 64'(bb),
              $sformatf("product %h x %h in mode %0d", a, bb, v.clk_mode));
        n_mult++;
        if (!enable[2]) n_offchip++;
        else if (i % 2 == 1) n_shmoo++;
      end
      measure(4, 16 * 2.0, "CLK_OUT on CLKOFFCHIP");
    end

    // ------------------------------------------------ block 0: smart PA SRAM
    enable[0] = 1;
    reset_block(0);
    flush(0);
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++)
        pa_write(x, y, 8'($urandom));
    // all four bank alignments, the edges and random positions
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 4; x++)
        pa_read(x, y);
    pa_read(31, 0); pa_read(0, 31); pa_read(31, 31); pa_read(30, 31); pa_read(31, 30);
    for (int i = 0; i < 24; i++) pa_read($urandom_range(31), $urandom_range(31));
    // overwrite one pixel and read every window that contains it
    pa_write(17, 9, 8'h5A);
    pa_read(17, 9); pa_read(16, 9); pa_read(17, 8); pa_read(16, 8);

    // ------------------------------------------------ mechanism coverage
    $display("shift=%0d update=%0d eval=%0d hold=%0d capture=%0d flush=%0d reset=%0d",
             n_shift, n_update, n_eval, n_hold, n_capture, n_flush, n_reset);
    $display("mode_switch=%0d shmoo_modes=%0d offchip_ops=%0d ro_bidir=%0d ro_unidir=%0d",
             n_mode_switch, n_shmoo, n_offchip, n_ro[0], n_ro[1]);
    $display("pa_write=%0d pa_read=%0d align=%0d/%0d/%0d/%0d wrap=%0d sram_w=%0d sram_r=%0d mult=%0d",
             n_pa_write, n_pa_read, n_align[0], n_align[1], n_align[2], n_align[3], n_wrap,
             n_sram_write, n_sram_read, n_mult);
    check(n_shift > 0 && n_update > 0 && n_eval > 0 && n_hold > 0 && n_capture > 0, "all scan operations used");
    check(n_flush == 3 && n_reset == 3, "flush test and reset on every block");
    check(n_mode_switch > 0, "clock mode switch");
    check(n_offchip > 0, "off-chip clock used");
    check(n_shmoo == 6, "multiplier correct in clock modes 0..5");
    check(n_ro[0] > 0 && n_ro[1] > 0, "both ring oscillators measured");
    check(n_align[0] > 0 && n_align[1] > 0 && n_align[2] > 0 && n_align[3] > 0, "all window alignments");
    check(n_wrap > 0, "window across the image edge");
    check(n_pa_write == 1025 && n_sram_write > 0 && n_sram_read > 0 && n_mult > 0, "every block operated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
