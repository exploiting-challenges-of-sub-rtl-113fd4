// tb_booth_wallace_mult: self-checking test of the 32-bit Booth-Wallace
// multiplier.
//
// Corner operands (0, 1, all ones, alternating patterns, single bits, which
// exercise every Booth digit including -2a and -a) and random operands, one
// per clock. Each product is compared with the 64-bit product computed by the
// simulator, one clock after the operands (the output register), with
// out_valid high; out_valid low after in_valid low and after reset.
module tb_booth_wallace_mult;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 1'b0;
  logic        rst_n, in_valid, out_valid;
  logic [31:0] a, b;
  logic [63:0] p;

  int unsigned checks = 0, failures = 0;
  logic [63:0] exp_p;
  logic        exp_v;

  booth_wallace_mult dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_prev();
    checks++;
    if (exp_v ? !(out_valid && p == exp_p) : out_valid) begin
      failures++;
      $display("FAIL p=%h valid=%b exp=%h/%b", p, out_valid, exp_p, exp_v);
    end
  endtask

  initial begin
    logic [31:0] corners [10] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'hAAAA_AAAA,
                                 32'h5555_5555, 32'h8000_0000, 32'h7FFF_FFFF,
                                 32'hCCCC_CCCC, 32'h0000_FFFF, 32'h1234_5678};
    rst_n = 0; in_valid = 0; a = 0; b = 0; exp_v = 0;
    #12 rst_n = 1;
    @(negedge clk);
    check_prev();
    for (int i = 0; i < 10; i++) begin
      for (int j = 0; j < 10; j++) begin
        @(negedge clk);
        if (i + j > 0) check_prev();
        in_valid = 1; a = corners[i]; b = corners[j];
        exp_v = 1; exp_p = 64'(a) * 64'(b);
      end
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check_prev();
      in_valid = ($urandom_range(7) != 0);
      a = $urandom; b = $urandom;
      if (t % 4 == 0) a = a >> $urandom_range(31);
      exp_v = in_valid;
      if (in_valid) exp_p = 64'(a) * 64'(b);
    end
    @(negedge clk);
    check_prev();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
