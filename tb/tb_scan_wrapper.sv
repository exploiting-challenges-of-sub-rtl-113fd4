// tb_scan_wrapper: self-checking test of the shift/scan wrapper.
//
// Inputs are launched on the falling and sampled on the rising scan clock
// edge. Checked: reset clears chain, din and eval; the flush test (a random
// stream reappears at SCAN_OUT exactly IN_W + OUT_W shifts later); UPDATE
// puts the input section on din and HOLD/unused codes change nothing;
// EVAL raises eval one edge later for exactly as long as it is applied;
// CAPTURE loads dout, which then shifts out LSB first.
module tb_scan_wrapper;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned IN_W  = 39;
  localparam int unsigned OUT_W = 16;
  localparam int unsigned N     = IN_W + OUT_W;

  logic             scan_clk = 1'b0, resetb, scan_in, scan_out, eval;
  logic [2:0]       ctl_sig;
  logic [IN_W-1:0]  din;
  logic [OUT_W-1:0] dout;

  int unsigned checks = 0, failures = 0;

  scan_wrapper #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  always #10 scan_clk = ~scan_clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $realtime); end
  endtask

  // one scan clock with the given control and serial input; returns SCAN_OUT
  // as seen before the rising edge
  task automatic step(input logic [2:0] c, input logic si, output logic so);
    @(negedge scan_clk);
    ctl_sig = c; scan_in = si;
    so = scan_out;
    @(posedge scan_clk);
    #1;
  endtask

  initial begin
    logic so;
    logic [2*N-1:0]  stream;
    logic [N-1:0]    outbits;
    logic [IN_W-1:0] vec;
    logic [OUT_W-1:0] res;
    ctl_sig = 3'b000; scan_in = 0; dout = '0;
    resetb = 0;
    #25;
    check(din == '0 && !eval && scan_out == 0, "reset clears");
    resetb = 1;
    // flush test
    stream = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < 2*N; k++) begin
      step(3'b001, stream[k], so);
      if (k >= N) check(so == stream[k-N], "flush: bit reappears after N shifts");
    end
    // load a vector: OUT_W dummy bits then din LSB first
    vec = {$urandom, $urandom};
    for (int k = 0; k < N; k++) step(3'b001, (k < OUT_W) ? 1'b0 : vec[k-OUT_W], so);
    check(din == '0, "din not changed by shifting");
    step(3'b010, 1'b0, so);
    check(din == vec, "UPDATE loads din");
    step(3'b000, 1'b1, so);
    step(3'b101, 1'b1, so);
    step(3'b110, 1'b1, so);
    step(3'b111, 1'b1, so);
    check(din == vec && !eval, "HOLD and unused codes keep din");
    // EVAL for 5 cycles
    for (int k = 0; k < 5; k++) begin
      step(3'b011, 1'b0, so);
      check(eval, "eval high during EVAL");
    end
    step(3'b000, 1'b0, so);
    check(!eval, "eval low after EVAL");
    // CAPTURE and shift out
    res = OUT_W'($urandom);
    dout = res;
    step(3'b100, 1'b0, so);
    dout = ~res;
    for (int k = 0; k < N; k++) begin
      step(3'b001, 1'b0, so);
      outbits[k] = so;
    end
    check(outbits[OUT_W-1:0] == res, "captured result shifts out LSB first");
    check(outbits[N-1:OUT_W] == vec, "input section follows the result");
    check(din == vec, "din kept through shifting");
    // asynchronous reset mid-operation
    #3 resetb = 0;
    #1;
    check(din == '0 && scan_out == 0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
