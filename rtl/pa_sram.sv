// pa_sram: smart parallel-access SRAM.
//
// Stores an image of 2^M x 2^N pixels (32 x 32 by default) of PIX_W bits and
// returns, in one cycle, the 2^A x 2^B pixel window (2 x 2 by default) whose
// top-left pixel is any (rx, ry). Conflict-free access comes from interleaving
// the pixels over 2^A x 2^B banks by the low bits of their coordinates: the
// pixels of any window fall into different banks. Every bank is a grid of
// augmented bitcell arrays (ba_plus), one BA+ per bank column of pixels, with
// BA_ENTRIES bank rows per BA+; the BA+ of a bank share one read bitline.
// Instead of a row and a column decoder per bank, the merged decoder
// (pa_merged_decoder) decodes the window origin once per axis and hands every
// bank either that one-hot select or its one-place rotation. The row select
// drives the read wordlines, the column select enables the one BA+ per bank
// (and per group of BA_ENTRIES rows) that holds the wanted pixel. A small
// reorder network then puts the bank outputs in window order.
//
// Interface and timing: one pixel write per cycle (we, wx, wy, wdata) on the
// write port and one window read per cycle (re, rx, ry) on the read port.
// rwin appears one cycle after re with rvalid high; pixel (rx+dx, ry+dy) is at
// rwin[(dy*2^A + dx)*PIX_W +: PIX_W]. Coordinates wrap around the image edge.
//
// Following the source: the image and window sizes, single-cycle window
// access, interleaved banks, BA+ storage and merged X/Y decoders. This
// design's choices: 8-bit pixels (1 KB over 1024 pixels), the pixel-to-bank
// mapping, BA+ of BA_ENTRIES x PIX_W so that a pixel write needs no mask, a
// separate one-pixel write port, and wrap-around at the edge.
module pa_sram #(
  parameter int unsigned M          = 5,
  parameter int unsigned N          = 5,
  parameter int unsigned A          = 1,
  parameter int unsigned B          = 1,
  parameter int unsigned PIX_W      = 8,
  parameter int unsigned BA_ENTRIES = 16,
  localparam int unsigned NBX  = 1 << A,
  localparam int unsigned NBY  = 1 << B,
  localparam int unsigned NWIN = NBX * NBY,
  localparam int unsigned C    = 1 << (M - A),
  localparam int unsigned R    = 1 << (N - B),
  localparam int unsigned RG   = (R + BA_ENTRIES - 1) / BA_ENTRIES,
  localparam int unsigned ENT  = (R < BA_ENTRIES) ? R : BA_ENTRIES
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [M-1:0]           wx,
  input  logic [N-1:0]           wy,
  input  logic [PIX_W-1:0]       wdata,
  input  logic                   re,
  input  logic [M-1:0]           rx,
  input  logic [N-1:0]           ry,
  output logic [NWIN*PIX_W-1:0]  rwin,
  output logic                   rvalid
);
  timeunit 1ns;
  timeprecision 1ps;

  // ---------------------------------------------------------------- read decode
  logic [C-1:0] colsel [NBX];
  logic [R-1:0] rowsel [NBY];

  pa_merged_decoder #(.M(M), .N(N), .A(A), .B(B)) u_dec (
    .x      (rx),
    .y      (ry),
    .colsel (colsel),
    .rowsel (rowsel)
  );

  // --------------------------------------------------------------- write decode
  logic [C-1:0]   wcol;
  logic [R-1:0]   wrow;
  logic [NBX-1:0] wbx;
  logic [NBY-1:0] wby;

  always_comb begin
    wcol = '0;
    wrow = '0;
    wbx  = '0;
    wby  = '0;
    wcol[wx[M-1:A]] = 1'b1;
    wrow[wy[N-1:B]] = 1'b1;
    wbx[32'(wx) % NBX] = 1'b1;
    wby[32'(wy) % NBY] = 1'b1;
  end

  // ---------------------------------------------------------------------- banks
  logic [PIX_W-1:0] bank_out [NBY][NBX];

  for (genvar by = 0; by < NBY; by++) begin : g_by
    for (genvar bx = 0; bx < NBX; bx++) begin : g_bx
      logic [PIX_W-1:0] arbl  [RG][C];
      logic [RG*C-1:0]  drive;
      logic [RG*C-1:0]  ren;

      for (genvar rg = 0; rg < RG; rg++) begin : g_rg
        for (genvar c = 0; c < C; c++) begin : g_c
          logic [ENT-1:0] rwl, wwl;
          assign ren[rg*C + c] = re & colsel[bx][c] & (|rwl);
          assign rwl = rowsel[by][rg*ENT +: ENT];
          assign wwl = wrow[rg*ENT +: ENT];
          ba_plus #(.ENTRIES(ENT), .WIDTH(PIX_W)) u_ba (
            .clk        (clk),
            .wen        (we & wbx[bx] & wby[by] & wcol[c] & (|wwl)),
            .wwl        (wwl),
            .wbl        (wdata),
            .ren        (ren[rg*C + c]),
            .rwl        (rwl),
            .arbl       (arbl[rg][c]),
            .arbl_drive (drive[rg*C + c])
          );
        end
      end

      // shared array read bitline of the bank
      always_comb begin
        bank_out[by][bx] = '0;
        for (int unsigned rg = 0; rg < RG; rg++)
          for (int unsigned c = 0; c < C; c++)
            bank_out[by][bx] = bank_out[by][bx] | arbl[rg][c];
      end

      // conflict-free access: at most one BA+ of a bank is read, so at most one
      // drives the bank's read bitline
      a_one_reader: assert property (@(posedge clk) $onehot0(ren));
    end
  end

  // ------------------------------------------------------------ output reorder
  logic [M-1:0] rx_q;
  logic [N-1:0] ry_q;
  logic         re_q;

  always_ff @(posedge clk) begin
    re_q <= re;
    if (re) begin
      rx_q <= rx;
      ry_q <= ry;
    end
  end

  always_comb begin
    rwin = '0;
    for (int unsigned dy = 0; dy < NBY; dy++) begin
      for (int unsigned dx = 0; dx < NBX; dx++) begin
        int unsigned sx, sy;  // bank coordinates; only their low bits are used
        sx = (32'(rx_q) + dx) % NBX;
        sy = (32'(ry_q) + dy) % NBY;
        rwin[(dy*NBX + dx)*PIX_W +: PIX_W] = bank_out[sy][sx];
      end
    end
  end

  assign rvalid = re_q;

endmodule
