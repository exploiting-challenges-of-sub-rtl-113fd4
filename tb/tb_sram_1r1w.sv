// tb_sram_1r1w: self-checking test of the 256 x 16 1R-1W SRAM.
//
// Writes every word, then runs random simultaneous reads and writes against a
// reference array. Checks the data and the one-cycle read latency (rvalid and
// rdata in the cycle after re), and old-data on a read of the word being
// written.
module tb_sram_1r1w;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 1'b0;
  logic        we, re, rvalid;
  logic [7:0]  waddr, raddr;
  logic [15:0] wdata, rdata;

  int unsigned checks = 0, failures = 0;
  logic [15:0] model [256];
  logic [15:0] exp_q;
  logic        exp_v;

  sram_1r1w dut (.*);

  always #5 clk = ~clk;

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: rdata=%h rvalid=%b exp=%h/%b", what, rdata, rvalid, exp_q, exp_v);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = 16'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // read every word back in order: latency exactly one cycle
    for (int a = 0; a <= 256; a++) begin
      @(negedge clk);
      if (a > 0) check(rvalid && rdata == model[a-1], "sequential read");
      re = (a < 256); raddr = 8'(a);
    end
    @(negedge clk);
    check(!rvalid, "rvalid low without read");
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t > 0) begin
        if (exp_v) check(rvalid && rdata == exp_q, "random read");
        else       check(!rvalid, "no read");
      end
      we = ($urandom_range(1) == 1);
      re = ($urandom_range(3) != 0);
      waddr = 8'($urandom);
      raddr = (t % 5 == 0) ? waddr : 8'($urandom);
      wdata = 16'($urandom);
      exp_v = re;
      exp_q = model[raddr];
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
