// tb_pa_sram: self-checking test of the smart parallel-access SRAM.
//
// Loads a full 32 x 32 image of random 8-bit pixels through the write port,
// then reads every one of the 1024 window positions (so every alignment of the
// window on the banks and every wrap at the image edge occurs), then mixes
// random reads with random writes. Each window is compared with the four
// pixels (x+dx, y+dy) mod 32 of a reference image, one cycle after the read,
// which checks the one-window-per-cycle rate and the one-cycle latency.
module tb_pa_sram;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 1'b0;
  logic        we, re, rvalid;
  logic [4:0]  wx, wy, rx, ry;
  logic [7:0]  wdata;
  logic [31:0] rwin;

  int unsigned checks = 0, failures = 0;
  int unsigned wraps = 0;
  logic [7:0]  img [32][32];   // [y][x]
  logic [31:0] exp_w;
  logic        exp_v;

  pa_sram dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] window(int x, int y);
    logic [31:0] w;
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++)
        w[(dy*2 + dx)*8 +: 8] = img[(y + dy) % 32][(x + dx) % 32];
    return w;
  endfunction

  task automatic check_prev();
    checks++;
    if (exp_v) begin
      if (!(rvalid && rwin == exp_w)) begin
        failures++;
        $display("FAIL window: got %h/%b exp %h", rwin, rvalid, exp_w);
      end
    end else if (rvalid) begin
      failures++;
      $display("FAIL rvalid without read");
    end
  endtask

  initial begin
    we = 0; re = 0; wx = 0; wy = 0; rx = 0; ry = 0; wdata = 0; exp_v = 0;
    for (int y = 0; y < 32; y++) begin
      for (int x = 0; x < 32; x++) begin
        @(negedge clk);
        we = 1; wx = 5'(x); wy = 5'(y); wdata = 8'($urandom); img[y][x] = wdata;
      end
    end
    @(negedge clk); we = 0;
    @(negedge clk);
    // every window position, back to back
    for (int y = 0; y < 32; y++) begin
      for (int x = 0; x < 32; x++) begin
        @(negedge clk);
        check_prev();
        re = 1; rx = 5'(x); ry = 5'(y);
        exp_v = 1; exp_w = window(x, y);
        if (x == 31 || y == 31) wraps++;
      end
    end
    // random reads mixed with writes (same-cycle write sees old pixel)
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check_prev();
      re = ($urandom_range(3) != 0);
      rx = 5'($urandom); ry = 5'($urandom);
      we = ($urandom_range(1) == 1);
      wx = (t % 3 == 0) ? rx : 5'($urandom);
      wy = (t % 3 == 0) ? ry : 5'($urandom);
      wdata = 8'($urandom);
      exp_v = re;
      exp_w = window(rx, ry);
      if (we) img[wy][wx] = wdata;
    end
    @(negedge clk);
    check_prev();
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
