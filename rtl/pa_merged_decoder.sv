// pa_merged_decoder: shared X and Y decoders of the smart parallel-access SRAM.
//
// The image of 2^M x 2^N pixels is interleaved over 2^A x 2^B banks: pixel
// (x, y) lives in bank (x mod 2^A, y mod 2^B) at bank column x >> A and bank
// row y >> B. For a window whose origin is (x, y), the bank column px holds the
// window pixel whose column is x + ((px - x) mod 2^A), and its bank column
// address is (x >> A) when px >= (x mod 2^A) and (x >> A) + 1 otherwise. So all
// banks need only two column addresses: the origin's, and the next one. One
// decoder turns (x >> A) into a one-hot vector; the next column's one-hot
// vector is the same vector rotated by one place, which costs only wiring.
// Each bank column then selects one of the two. Rows work the same way. This is
// the address commonality that lets all banks share one decoder per axis
// instead of having a decoder each.
//
// Combinational. Rotation makes windows wrap around the image edge.
//
// Following the source: merged (shared) X and Y decoders exploiting the
// address pattern commonality of a parallel access. This design's choice: the
// interleaving by low address bits, the rotate-by-one construction and the
// wrap-around at the image edge.
module pa_merged_decoder #(
  parameter int unsigned M = 5,
  parameter int unsigned N = 5,
  parameter int unsigned A = 1,
  parameter int unsigned B = 1,
  localparam int unsigned NBX = 1 << A,
  localparam int unsigned NBY = 1 << B,
  localparam int unsigned C   = 1 << (M - A),
  localparam int unsigned R   = 1 << (N - B)
) (
  input  logic [M-1:0] x,
  input  logic [N-1:0] y,
  output logic [C-1:0] colsel [NBX],
  output logic [R-1:0] rowsel [NBY]
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [C-1:0] col0, col1;
  logic [R-1:0] row0, row1;

  always_comb begin
    col0 = '0;
    row0 = '0;
    col0[x[M-1:A]] = 1'b1;
    row0[y[N-1:B]] = 1'b1;
  end

  if (C > 1) begin : g_crot
    assign col1 = {col0[C-2:0], col0[C-1]};
  end else begin : g_cone
    assign col1 = col0;
  end
  if (R > 1) begin : g_rrot
    assign row1 = {row0[R-2:0], row0[R-1]};
  end else begin : g_rone
    assign row1 = row0;
  end

  for (genvar px = 0; px < NBX; px++) begin : g_bx
    if (A > 0) begin : g_a
      assign colsel[px] = (px < 32'(x[A-1:0])) ? col1 : col0;
    end else begin : g_a0
      assign colsel[px] = col0;
    end
  end
  for (genvar py = 0; py < NBY; py++) begin : g_by
    if (B > 0) begin : g_b
      assign rowsel[py] = (py < 32'(y[B-1:0])) ? row1 : row0;
    end else begin : g_b0
      assign rowsel[py] = row0;
    end
  end

endmodule
