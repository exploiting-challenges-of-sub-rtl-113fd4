// ba_plus: augmented bitcell array (BA+), the storage building block of the
// synthesized memories.
//
// A BA+ is a small array of 8T bitcells (ENTRIES words of WIDTH bits) wrapped
// in static logic so that a synthesis flow can treat it like a standard cell:
// clock-enabled write and read wordline drivers with no decoder (the wordlines
// arrive already one-hot), a local sense stage and a tri-state driver onto an
// array read bitline that several BA+ share. The 8T cell has a separate write
// port (WWL/WBL) and read port (RWL/RBL), so one write and one read can happen
// in the same cycle.
//
// Timing: a write happens at the rising clock edge when wen is high, into the
// entry whose wwl bit is set. A read is launched at the rising edge when ren is
// high; the local sense holds the entry selected by rwl and drives it onto
// arbl from then on, with arbl_drive high, until the next clock edge. A read
// and a write of the same entry in one cycle return the old data.
//
// Following the source: the sizes (16 x 16 by default), the absence of decode,
// the separate read and write ports and the shared read bitline. This design's
// choices: a registered local sense (one cycle read latency), and the
// tri-state driver modelled as data gated by arbl_drive so that the shared
// bitline is the OR of all BA+ outputs, which is what a two-state flow can
// represent. In silicon the array is a custom bitcell macro, here an array of
// registers.
module ba_plus #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned WIDTH   = 16
) (
  input  logic               clk,
  input  logic               wen,
  input  logic [ENTRIES-1:0] wwl,
  input  logic [WIDTH-1:0]   wbl,
  input  logic               ren,
  input  logic [ENTRIES-1:0] rwl,
  output logic [WIDTH-1:0]   arbl,
  output logic               arbl_drive
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH-1:0] cells [ENTRIES];
  logic [WIDTH-1:0] sense_d;
  logic [WIDTH-1:0] sense_q;
  logic             drive_q;

  // write wordline drivers: clock enabled, one-hot wordlines
  always_ff @(posedge clk) begin
    if (wen) begin
      for (int unsigned e = 0; e < ENTRIES; e++) begin
        if (wwl[e]) cells[e] <= wbl;
      end
    end
  end

  // read bitlines of the raised wordline merge in the local sense
  always_comb begin
    sense_d = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      if (rwl[e]) sense_d = sense_d | cells[e];
    end
  end

  always_ff @(posedge clk) begin
    drive_q <= ren;
    if (ren) sense_q <= sense_d;
  end

  assign arbl       = drive_q ? sense_q : '0;
  assign arbl_drive = drive_q;

  // the wordlines come from an external decoder: at most one may be high
  a_wwl_onehot: assert property (@(posedge clk) wen |-> $onehot0(wwl));
  a_rwl_onehot: assert property (@(posedge clk) ren |-> $onehot0(rwl));

endmodule
