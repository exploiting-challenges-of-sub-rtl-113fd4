// sram_1r1w: synthesized one-read one-write SRAM, 256 words x 16 bits by
// default, in the bank arrangement of the 1R-1W synthesis engine.
//
// The memory is a grid of BANK_ROWS x BANK_COLS banks. A bank column holds
// WIDTH/BANK_COLS bits of every word, a bank row holds a contiguous part of
// the address space. Each bank is NBA augmented bitcell arrays
// (ba_plus, BA_ENTRIES x WIDTH/BANK_COLS) placed side by side that share the
// bank's write bitlines and its global read bitline. Standard-cell logic
// splits the address into {bank row, BA+ in bank, entry}, decodes entry and
// BA+ one-hot, and raises the wordline enable of the selected BA+ only, in
// every bank column of the selected bank row. Since a BA+ drives the read
// bitline only while it is read, a bank's global read bitline is the OR of its
// BA+ outputs; the read bank row is then selected by a registered bank-row
// address.
//
// Interface and timing: one write (we, waddr, wdata) and one read (re, raddr)
// per cycle, on separate ports. Read data appear on rdata one cycle after re,
// with rvalid high. A read of the address being written in the same cycle
// returns the old word.
//
// Following the source: 256 x 16 organisation, 1R-1W ports, banks in rows and
// columns made of BA+ that share global read and write bitlines, decoders in
// standard-cell logic, and the configuration parameters (bank rows, bank
// columns, BA+ per bank, BA+ size). This design's choices: the default of one
// bank of sixteen 16x16 BA+ (the configuration of the taped-out instance is
// not given), the address bit order and the meaning of a bank column as a
// slice of the word.
module sram_1r1w #(
  parameter int unsigned WORDS      = 256,
  parameter int unsigned WIDTH      = 16,
  parameter int unsigned BA_ENTRIES = 16,
  parameter int unsigned BANK_ROWS  = 1,
  parameter int unsigned BANK_COLS  = 1,
  localparam int unsigned AW  = $clog2(WORDS),
  localparam int unsigned BW  = WIDTH / BANK_COLS,
  localparam int unsigned NBA = WORDS / (BANK_ROWS * BA_ENTRIES),   // BA+ per bank
  localparam int unsigned RW  = (BANK_ROWS > 1) ? $clog2(BANK_ROWS) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  output logic             rvalid
);
  timeunit 1ns;
  timeprecision 1ps;

  // address fields: {bank row, BA+ within the bank, entry}
  function automatic int unsigned f_entry(logic [AW-1:0] a);
    return int'(a) % BA_ENTRIES;
  endfunction
  function automatic int unsigned f_ba(logic [AW-1:0] a);
    return (int'(a) / BA_ENTRIES) % NBA;
  endfunction
  function automatic int unsigned f_row(logic [AW-1:0] a);
    return int'(a) / (BA_ENTRIES * NBA);
  endfunction

  logic [BA_ENTRIES-1:0] wwl, rwl;
  logic [NBA-1:0]        wsel, rsel;
  logic [BANK_ROWS-1:0]  wrow, rrow;
  logic [RW-1:0]         rrow_q;
  logic                  re_q;

  // entry, BA+ and bank-row decoders
  always_comb begin
    wwl  = '0;
    rwl  = '0;
    wsel = '0;
    rsel = '0;
    wrow = '0;
    rrow = '0;
    wwl[f_entry(waddr)] = 1'b1;
    rwl[f_entry(raddr)] = 1'b1;
    wsel[f_ba(waddr)]   = 1'b1;
    rsel[f_ba(raddr)]   = 1'b1;
    wrow[f_row(waddr)]  = we;
    rrow[f_row(raddr)]  = re;
  end

  logic [WIDTH-1:0] bank_rbl [BANK_ROWS];

  for (genvar r = 0; r < BANK_ROWS; r++) begin : g_row
    for (genvar c = 0; c < BANK_COLS; c++) begin : g_col
      logic [BW-1:0]  arbl [NBA];
      logic [NBA-1:0] drive;
      logic [NBA-1:0] ren;

      for (genvar g = 0; g < NBA; g++) begin : g_ba
        assign ren[g] = rrow[r] & rsel[g];
        ba_plus #(.ENTRIES(BA_ENTRIES), .WIDTH(BW)) u_ba (
          .clk        (clk),
          .wen        (wrow[r] & wsel[g]),
          .wwl        (wwl),
          .wbl        (wdata[c*BW +: BW]),
          .ren        (ren[g]),
          .rwl        (rwl),
          .arbl       (arbl[g]),
          .arbl_drive (drive[g])
        );
      end

      // the bank's global read bitline: the one driving BA+ wins
      always_comb begin
        bank_rbl[r][c*BW +: BW] = '0;
        for (int unsigned g = 0; g < NBA; g++)
          bank_rbl[r][c*BW +: BW] = bank_rbl[r][c*BW +: BW] | arbl[g];
      end

      // at most one BA+ of a bank is read, so at most one drives its bitline
      a_one_reader: assert property (@(posedge clk) $onehot0(ren));
    end
  end

  always_ff @(posedge clk) begin
    re_q <= re;
    if (re) rrow_q <= RW'(f_row(raddr));
  end

  assign rdata  = (BANK_ROWS > 1) ? bank_rbl[rrow_q] : bank_rbl[0];
  assign rvalid = re_q;

endmodule
