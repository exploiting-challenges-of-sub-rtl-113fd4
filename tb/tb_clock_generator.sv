// tb_clock_generator: test of the programmable clock generator.
//
// With ENABLE high, for several of the 32 modes, the period of the generated
// clock must be 260 ps x 2^mode (13-stage oscillator at 10 ps per stage,
// divided by 2^mode). With ENABLE low the output must follow CLKOFFCHIP.
module tb_clock_generator;
  timeunit 1ns;
  timeprecision 1ps;

  logic       enable, clk_offchip, clk;
  logic [4:0] mode;
  int unsigned checks = 0, failures = 0;
  int unsigned modes_tested = 0;
  realtime t0, t1;

  clock_generator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  initial begin
    int unsigned ms [5] = '{0, 1, 3, 7, 12};
    enable = 0; clk_offchip = 0; mode = 0;
    // off-chip clock path
    for (int i = 0; i < 8; i++) begin
      #3 clk_offchip = ~clk_offchip;
      #0.001;
      check(clk == clk_offchip, "clk follows CLKOFFCHIP when ENABLE is low");
    end
    clk_offchip = 0;
    enable = 1;
    foreach (ms[i]) begin
      real expect_ns;
      mode = 5'(ms[i]);
      expect_ns = 0.26 * (2.0 ** ms[i]);
      repeat (2) @(posedge clk);
      t0 = $realtime;
      @(posedge clk);
      t1 = $realtime;
      check((t1 - t0) > expect_ns * 0.999 && (t1 - t0) < expect_ns * 1.001,
            $sformatf("mode %0d period", ms[i]));
      modes_tested++;
    end
    check(modes_tested == 5, "modes tested");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
