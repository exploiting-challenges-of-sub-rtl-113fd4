// tb_ro_divider: test of the 2^14 ring oscillator divider.
//
// Drives clk_in with a 1 ns clock. After ENABLE rises, the output must first
// rise after exactly 2^13 input rising edges and then toggle every 2^13 edges
// (period 2^14 input periods). ENABLE low must clear it at once.
module tb_ro_divider;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk_in = 1'b0, enable, div_out;
  int unsigned checks = 0, failures = 0;
  int unsigned edges = 0;

  ro_divider dut (.*);

  always #0.5 clk_in = ~clk_in;
  always @(posedge clk_in) if (enable) edges++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s edges=%0d", what, edges); end
  endtask

  initial begin
    enable = 0;
    #3.2;
    check(div_out == 1'b0, "cleared while disabled");
    enable = 1;
    for (int k = 1; k <= 6; k++) begin
      @(div_out);
      check(edges == k * 8192, "output toggles every 2^13 input edges");
    end
    #10.2;
    enable = 0;
    #0.1;
    check(div_out == 1'b0, "ENABLE low clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
