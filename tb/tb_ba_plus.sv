// tb_ba_plus: self-checking test of the augmented bitcell array.
//
// Random writes and reads with one-hot wordlines, against a reference array.
// Checks that read data appear one clock after the read with arbl_drive high,
// that a same-cycle read of the entry being written returns the old word, and
// that the BA+ drives nothing (arbl = 0, arbl_drive = 0) when not read.
module tb_ba_plus;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned ENTRIES = 16;
  localparam int unsigned WIDTH   = 16;

  logic               clk = 1'b0;
  logic               wen, ren;
  logic [ENTRIES-1:0] wwl, rwl;
  logic [WIDTH-1:0]   wbl, arbl;
  logic               arbl_drive;

  int unsigned checks = 0, failures = 0;
  logic [WIDTH-1:0] model [ENTRIES];
  logic [WIDTH-1:0] exp_q;
  logic             exp_drive;

  ba_plus #(.ENTRIES(ENTRIES), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: arbl=%h drive=%b exp=%h/%b", what, arbl, arbl_drive, exp_q, exp_drive);
    end
  endtask

  initial begin
    int unsigned we_i, re_i;
    wen = 0; ren = 0; wwl = '0; rwl = '0; wbl = '0;
    // initialise every entry
    for (int e = 0; e < ENTRIES; e++) begin
      @(negedge clk);
      wen = 1; wwl = ENTRIES'(1) << e; wbl = WIDTH'($urandom); model[e] = wbl;
    end
    @(negedge clk); wen = 0;
    @(negedge clk);
    check(arbl == '0 && !arbl_drive, "idle drives nothing");
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // outcome of the previous cycle
      if (t > 0) begin
        if (exp_drive) check(arbl_drive && arbl == exp_q, "read data");
        else           check(!arbl_drive && arbl == '0, "no read, no drive");
      end
      we_i = $urandom_range(ENTRIES-1);
      re_i = (t % 7 == 0) ? we_i : $urandom_range(ENTRIES-1);
      wen = ($urandom_range(1) == 1);
      ren = ($urandom_range(3) != 0);
      wwl = ENTRIES'(1) << we_i;
      rwl = ENTRIES'(1) << re_i;
      wbl = WIDTH'($urandom);
      exp_drive = ren;
      exp_q     = model[re_i];          // old data on a same-cycle write
      if (wen) model[we_i] = wbl;
    end
    @(negedge clk);
    if (exp_drive) check(arbl_drive && arbl == exp_q, "read data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
