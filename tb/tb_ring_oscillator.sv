// tb_ring_oscillator: test of the ring oscillator model.
//
// With ENABLE low the output must rest high; with ENABLE high it must toggle
// with a period of 2 x 13 stages x 10 ps = 260 ps; after ENABLE falls it must
// rest high again within one pass through the ring (130 ps). Periods are measured between rising edges.
module tb_ring_oscillator;
  timeunit 1ns;
  timeprecision 1ps;

  logic enable, ro;
  int unsigned checks = 0, failures = 0;
  int unsigned rises = 0;
  realtime t_last, t_now;

  ring_oscillator dut (.*);

  initial begin
    #100;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  initial begin
    enable = 0;
    #1;
    check(ro == 1'b1, "rests high when disabled");
    #1;
    check(ro == 1'b1, "stays high when disabled");
    enable = 1;
    @(posedge ro);                    // first rise after the first full period
    t_last = $realtime;
    for (int i = 0; i < 20; i++) begin
      @(posedge ro);
      t_now = $realtime;
      check((t_now - t_last) > 0.259 && (t_now - t_last) < 0.261, "period 260 ps");
      t_last = t_now;
      rises++;
    end
    @(negedge ro);
    #0.05;
    enable = 0;
    #0.135;                           // one pass through the 13 stages
    check(ro == 1'b1, "returns high on disable");
    #2;
    check(ro == 1'b1, "stays high after disable");
    check(rises == 20, "oscillated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
