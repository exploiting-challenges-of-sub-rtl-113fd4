// tb_pa_sram_windows: the parallel-access SRAM at the other window sizes of
// the design-space exploration (4x2 and 4x4 windows over a 32x32 image) and
// with a 64x64 image, whose 32-row banks span two BA+ per column.
//
// Each instance is loaded with a random image through its write port and then
// reads random windows, every one compared with the reference image one cycle
// later. A window of 2^A x 2^B pixels spreads over 2^A x 2^B banks.
// The 4x2 and 4x4 windows on a 32x32 image are design points of the
// source's exploration; the 64x64 image is this test's own addition, to reach
// the multi-BA+ bank columns.
module tb_pa_sram_windows;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned done = 0;

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instance parameters: {M, N, A, B}
  function automatic int unsigned cfg(int unsigned i, int unsigned k);
    int unsigned t [3][4];
    t = '{'{5, 5, 2, 1}, '{5, 5, 2, 2}, '{6, 6, 1, 1}};
    return t[i][k];
  endfunction

  for (genvar i = 0; i < 3; i++) begin : g_cfg
    localparam int unsigned M = cfg(i, 0), N = cfg(i, 1), A = cfg(i, 2), B = cfg(i, 3);
    localparam int unsigned WX = 1 << A, WY = 1 << B, W = 1 << M, H = 1 << N;

    logic                  we, re, rvalid;
    logic [M-1:0]          wx, rx;
    logic [N-1:0]          wy, ry;
    logic [7:0]            wdata;
    logic [WX*WY*8-1:0]    rwin, expw;
    logic [7:0]            img [H][W];

    pa_sram #(.M(M), .N(N), .A(A), .B(B)) dut (.*);

    initial begin
      bit exp_v;
      we = 0; re = 0; wx = 0; wy = 0; rx = 0; ry = 0; wdata = 0; exp_v = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          we = 1; wx = M'(x); wy = N'(y); wdata = 8'($urandom); img[y][x] = wdata;
        end
      @(negedge clk); we = 0;
      for (int t = 0; t <= 1500; t++) begin
        @(negedge clk);
        if (exp_v) begin
          checks++;
          if (!(rvalid && rwin == expw)) begin
            failures++;
            $display("FAIL cfg %0d window: %h expected %h", i, rwin, expw);
          end
        end
        re = (t < 1500);
        rx = M'($urandom); ry = N'($urandom);
        for (int dy = 0; dy < WY; dy++)
          for (int dx = 0; dx < WX; dx++)
            expw[(dy*WX + dx)*8 +: 8] = img[(int'(ry) + dy) % H][(int'(rx) + dx) % W];
        exp_v = re;
      end
      done++;
    end
  end

  initial begin
    wait (done == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
