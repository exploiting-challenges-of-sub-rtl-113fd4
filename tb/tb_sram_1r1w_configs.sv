// tb_sram_1r1w_configs: the 1R-1W SRAM in other configurations of the
// synthesis engine's design space: 256x8 and 256x32 built from 32x8 and 32x32
// BA+ (the two explored design spaces), and 256x16 as 2 x 2 banks of 16x8 BA+.
//
// Each instance writes every word, then runs random simultaneous reads and
// writes against a reference array, checking data and the one-cycle latency.
// The 256-word size and the 32x8 / 32x32 BA+ follow the design-space examples
// of the synthesis engine; the bank arrangements tested are this test's
// choice.
module tb_sram_1r1w_configs;
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

  // {WIDTH, BA_ENTRIES, BANK_ROWS, BANK_COLS}
  function automatic int unsigned cfg(int unsigned i, int unsigned k);
    int unsigned t [3][4];
    t = '{'{8, 32, 1, 1}, '{32, 32, 2, 1}, '{16, 16, 2, 2}};
    return t[i][k];
  endfunction

  for (genvar i = 0; i < 3; i++) begin : g_cfg
    localparam int unsigned W = cfg(i, 0);

    logic         we, re, rvalid;
    logic [7:0]   waddr, raddr;
    logic [W-1:0] wdata, rdata, exp_q;
    logic [W-1:0] model [256];

    sram_1r1w #(.WORDS(256), .WIDTH(W), .BA_ENTRIES(cfg(i, 1)),
                .BANK_ROWS(cfg(i, 2)), .BANK_COLS(cfg(i, 3))) dut (.*);

    initial begin
      bit exp_v;
      we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; exp_v = 0;
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        we = 1; waddr = 8'(a); wdata = W'({$urandom, $urandom}); model[a] = wdata;
      end
      for (int t = 0; t <= 2000; t++) begin
        @(negedge clk);
        if (exp_v) begin
          checks++;
          if (!(rvalid && rdata == exp_q)) begin
            failures++;
            $display("FAIL cfg %0d: %h expected %h", i, rdata, exp_q);
          end
        end
        we = (t < 2000) && ($urandom_range(1) == 1);
        re = (t < 2000);
        waddr = 8'($urandom);
        raddr = (t % 5 == 0) ? waddr : 8'($urandom);
        wdata = W'({$urandom, $urandom});
        exp_v = re;
        exp_q = model[raddr];
        if (we) model[waddr] = wdata;
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
