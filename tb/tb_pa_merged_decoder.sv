// tb_pa_merged_decoder: exhaustive test of the merged X/Y decoders.
//
// For every window origin (x, y) of the 32 x 32 image and every bank column
// and row, the expected select is worked out directly: of the two window
// columns x and x+1 (mod 32), take the one whose low bit is the bank's; its
// bank column is that coordinate shifted right by one. Likewise for rows.
module tb_pa_merged_decoder;
  timeunit 1ns;
  timeprecision 1ps;

  logic [4:0]  x, y;
  logic [15:0] colsel [2];
  logic [15:0] rowsel [2];

  int unsigned checks = 0, failures = 0;

  pa_merged_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int xi = 0; xi < 32; xi++) begin
      for (int yi = 0; yi < 32; yi++) begin
        x = 5'(xi); y = 5'(yi);
        #1;
        for (int p = 0; p < 2; p++) begin
          int cx, cy;
          cx = ((xi % 2) == p) ? xi : (xi + 1) % 32;
          cy = ((yi % 2) == p) ? yi : (yi + 1) % 32;
          checks += 2;
          if (colsel[p] != (16'(1) << (cx / 2))) begin
            failures++;
            $display("FAIL x=%0d bank col %0d: %h", xi, p, colsel[p]);
          end
          if (rowsel[p] != (16'(1) << (cy / 2))) begin
            failures++;
            $display("FAIL y=%0d bank row %0d: %h", yi, p, rowsel[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
