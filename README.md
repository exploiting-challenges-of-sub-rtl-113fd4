# Smart memories on a 14 nm test site: RTL

Below 20 nm, a memory compiler's hand-drawn periphery cells stop scaling well.
But the bitcells and the standard cells now have to follow the same strict,
grating-like layout rules, so they can sit right next to each other. That makes
a different way of building embedded memory practical. Instead of compiling a
memory from fixed periphery cells, you *synthesize* it: small bitcell arrays
with a static interface (augmented bitcell arrays, **BA+**) are placed like
large standard cells, and ordinary synthesized logic supplies the decoders,
the bitline merging and any application-specific function. A memory built
this way can be shaped to its application. The showcase is a
**parallel-access SRAM** for imaging. It returns a whole 2x2 block of pixels
from anywhere in a 32x32 image in one cycle. It manages this with shared
("merged") row and column decoders, where a conventional design needs one
decoder pair per bank.

This repository has synthesizable SystemVerilog for the digital content of
such a test site:

| block | module | what it is |
|---|---|---|
| BA+ | `ba_plus` | 16 x 16 array of 8T cells: separate write and read ports, no decoder, registered local sense, shared read bitline |
| smart parallel-access SRAM | `pa_sram`, `pa_merged_decoder` | 32x32 image of 8-bit pixels, any 2x2 window per cycle |
| synthesized 1R-1W SRAM | `sram_1r1w` | 256 words x 16 bits, built from BA+ in a grid of banks |
| multiplier | `booth_wallace_mult` | 32 x 32 -> 64 bit, radix-4 Booth with a Wallace tree |
| scan wrapper | `scan_wrapper` | serial in, parallel hold, capture, serial out, under a 3-bit control |
| clock generator | `clock_generator`, `clk_mode_divider` | on-chip oscillator and a divider with 32 modes, or an off-chip clock |
| ring oscillators | `ring_oscillator` (model), `ro_divider` | 13-stage rings, divided by 2^14 |
| test site | `testsite_top`, `block_shell`, `clock_gate` | three scanned blocks plus two ring oscillators |

Shared types are in `testsite_pkg`. The two ring oscillators (the ring test
structure and the clock generator's oscillator) are behavioural models with
delays. Everything else is synthesizable.

```
testsite_top
 |- block 0: block_shell (scan_wrapper, clock_generator, clock_gate) + pa_sram
 |             pa_sram = pa_merged_decoder + 4 banks x 16 ba_plus (16 x 8) + reorder
 |- block 1: block_shell + sram_1r1w = 16 ba_plus (16 x 16) + decoders
 |- block 2: block_shell + booth_wallace_mult
 |- ring 0 (10T_BiDir cells) : ring_oscillator + ro_divider
 `- ring 1 (10T_UniDir cells): ring_oscillator + ro_divider
```

## The BA+ building block

A BA+ is a small bitcell array packaged so that a synthesis and place-and-route
flow can use it like any other cell. It has `ENTRIES` words of `WIDTH` bits.
Each 8T cell has a write port (write wordline and bitlines) and a separate
read port (read wordline and read bitline). So one write and one read can
happen in the same cycle. The BA+ has no decoder: its wordline inputs `wwl`
and `rwl` come in already one-hot, and `wen`/`ren` are the clock enables of
its wordline drivers. Decoding belongs to the surrounding logic, and that is
what allows it to be customised.

Reads go through a local sense stage onto an array read bitline that several
BA+ share. In silicon this is a tri-state driver. Here the local sense is a
register loaded at the clock edge of a read, and the driver is data gated by
`arbl_drive`. A shared bitline is therefore the OR of the outputs of the BA+
on it. This is correct as long as only one of them is read at a time, and an
assertion checks that at every level. Read data come out one cycle after
the read. A read and a write of the same entry in the same cycle return the
old word.

## The smart parallel-access SRAM

**Problem.** An image of 2^M x 2^N pixels (32 x 32) must deliver, in one cycle,
the 2^A x 2^B window (2 x 2) whose top-left pixel is any (x, y). Image
interpolation needs this, for example.

**Banks.** The pixels are interleaved over 2^A x 2^B banks by the low bits of
their coordinates. Pixel (x, y) lives in bank (x mod 2^A, y mod 2^B), at bank
column x >> A and bank row y >> B. The pixels of any window then all fall in
different banks, so the access is free of conflicts. With the defaults each
bank holds 16 x 16 pixels. A bank is sixteen BA+ of 16 entries x 8 bits, one
BA+ per bank column. The BA+ entry is the bank row, and the BA+ of a bank
share the bank's read bitline. A pixel write therefore writes one whole BA+
word, and no write mask is needed.

**Merged decoders.** Which bank row and column does each bank need? Take
bank column px and the window origin x. The window column that falls in this
bank is x + ((px - x) mod 2^A). Its bank column address is

```
  x >> A          if px >= (x mod 2^A)
  (x >> A) + 1    otherwise
```

So across all banks only two column addresses exist: the origin's and the
next one. `pa_merged_decoder` decodes `x >> A` once into a one-hot vector.
Rotating that vector by one place gives the one-hot vector for the next
column, which costs only wiring. Each bank column then takes one of the two.
Rows work in the same way. For a 2x2 window this replaces eight decoders
(a row and a column decoder per bank) with two decoders and some
multiplexers. Rotation also makes windows wrap around the image edge: the
window at x = 31 includes column 0.

**Read path.** The row select drives the read wordlines of all the BA+ in a
bank. The column select enables the read of exactly one of them, which then
drives the bank's read bitline. This is where the BA+ with its shared bitline
pays off. One cycle later a reorder network uses the registered low address
bits to put the bank outputs in window order. Pixel (x+dx, y+dy) comes out at
`rwin[(dy*2^A + dx)*8 +: 8]`.

**Ports and timing.** The write port takes one pixel per cycle (`we`, `wx`,
`wy`, `wdata`). The read port takes one window per cycle (`re`, `rx`, `ry`),
with `rwin`/`rvalid` one cycle later. Both ports can be used in the same
cycle. A window read in the cycle that writes one of its pixels returns the
old pixel.

**Other sizes.** M, N, A and B are parameters. The same RTL gives 4x2 and 4x4
windows, which are the other design points of the exploration. It also gives
larger images: when a bank has more rows than a BA+ has entries, a bank column
spans several BA+ and the row select picks among them. `tb_pa_sram_windows`
runs 4x2 and 4x4 windows on 32x32, and 2x2 on 64x64.

## The synthesized 1R-1W SRAM

`sram_1r1w` is the plain memory that the same synthesis approach produces. It
is a grid of `BANK_ROWS` x `BANK_COLS` banks. A bank column stores a slice of
each word and a bank row stores a range of addresses. A bank is a row of BA+
that share its write and read bitlines. The address splits into {bank row,
BA+ in the bank, entry}. Entry and BA+ are decoded one-hot in logic, and only
the selected BA+ gets a wordline enable. The default is one bank of sixteen
16x16 BA+, which gives 256 x 16. `tb_sram_1r1w_configs` also runs 256x8 with
32x8 BA+, 256x32 with 32x32 BA+ in two bank rows, and 256x16 as 2 x 2 banks.
The read latency is one cycle.

## The multiplier

`booth_wallace_mult` multiplies unsigned 32-bit operands. Radix-4 Booth
recoding turns overlapping 3-bit groups of `b` into digits from -2 to +2, which
gives 17 partial products of 64 bits (two's complement, so negative digits need
no special sign handling). A Wallace tree reduces them with 3:2 carry-save
adders, three rows into two per layer (17, 12, 8, 6, 4, 3, 2). A final adder
then sums the last two rows. The product is registered, one cycle after
`in_valid`.

## Testing through eight pins: scan wrapper and clock generator

Each scanned block runs at GHz rates but has only eight input pins and two
output pins:

| pin | use |
|---|---|
| CTL_SIG<2:0> | scan wrapper operation |
| SCAN_CLK, SCAN_IN, SCAN_OUT | slow serial interface |
| RESETB | asynchronous reset of the scan wrapper and the block, active low |
| ENABLE | runs the on-chip clock generator; when low, the block runs on CLKOFFCHIP |
| CLKOFFCHIP | external clock |
| CLK_OUT | functional clock / 16, for measuring the frequency |

**Scan chain.** One chain runs SCAN_IN -> input section (IN_W bits) -> output
section (OUT_W bits) -> SCAN_OUT. The tester launches CTL_SIG and SCAN_IN on
the falling edge of SCAN_CLK, and the wrapper acts on the rising edge:

| CTL_SIG | operation |
|---|---|
| 000 | HOLD |
| 001 | SHIFT: one place towards SCAN_OUT |
| 010 | UPDATE: the held vector `din`, which drives the block, takes the input section |
| 011 | EVAL: the block's clock runs |
| 100 | CAPTURE: the output section takes the block's outputs |
| 101-111 | HOLD |

**One operation.** Shift OUT_W filler bits and then the input vector, LSB
first (IN_W + OUT_W shifts in all). Apply UPDATE, then EVAL for a few scan
cycles, then HOLD for two, then CAPTURE. Finally shift OUT_W times and read
the result LSB first from SCAN_OUT. While EVAL is held, the block repeats the
same operation on every fast clock. A write, a read or a multiply gives the
same result when repeated, so the outcome does not depend on how many fast
cycles ran. The **flush test** is shifting a pattern through the whole chain
and seeing it come out IN_W + OUT_W shifts later.

Vector layouts (`testsite_pkg`; the clock mode is always the top field):

| block | input vector, MSB to LSB | output |
|---|---|---|
| 0 PA SRAM | clk_mode[5], we, wx[5], wy[5], wdata[8], re, rx[5], ry[5] (35 bits) | rwin[32] |
| 1 1R-1W SRAM | clk_mode[5], we, waddr[8], wdata[16], re, raddr[8] (39 bits) | rdata[16] |
| 2 multiplier | clk_mode[5], a[32], b[32] (69 bits) | p[64] |

**Clock path.** In `block_shell`, a ring oscillator (nominally 260 ps per
period) feeds a divider with 32 modes: mode k divides by 2^k. When ENABLE is
low the off-chip clock is used instead. The EVAL request crosses into the
fast clock domain through a two-flop synchroniser and enables a latch-based
clock gate. The block is therefore clocked only during EVAL, with two or three
fast cycles of delay at each end. CAPTURE samples outputs that no longer
change.

## Ring oscillators

Each ring is a NAND2 with ENABLE on one input, followed by 12 inverters, with
the output fed back to the NAND. That makes 13 inverting stages. A 14-bit
counter divides the output by 2^14 for the RO_OUT pin and is cleared while
ENABLE is low. The model sets the stage delay to 10 ps for the ring of
10T_BiDir cells and 13 ps for the ring of 10T_UniDir cells. These values
reflect only the measured result that the UniDir ring is about 30% slower;
they are not measured delays.

## How far to trust it, and where it departs from the source

These parts follow the source: the set of blocks; the sizes (32x32 image with
a 2x2 window, 256 x 16 SRAM, 16 x 16 BA+, 32-bit multiplier, 13 stages, 2^14
divider, 32 clock modes); BA+ without decode and with separate read and write
ports and a shared read bitline; interleaved banks; merged X/Y decoders; a
Booth-Wallace multiplier; a scan wrapper with a 3-bit control of which five
codes are used, launch on the falling and capture on the rising scan edge,
and eight input and two output pins per block.

The source does not give the following, so they are this design's own choices:

- the pixel width of 8 bits, inferred from a 1 KB memory for 1024 pixels;
- the mapping of pixels to banks, the rotate-by-one decoder construction and
  the wrap-around at the image edge;
- 16x8 BA+ in the PA SRAM, chosen so that pixel writes need no mask;
- the radix of the Booth recoding, unsigned operands, and the output
  register;
- the five scan operations and their codes, the single chain, and the vector
  layouts;
- the clock generator's oscillator-plus-divider structure, and the use of
  ENABLE to select the off-chip clock;
- the one-cycle registered read of the BA+;
- the bank configuration of the 1R-1W SRAM.

The source calls the 1R-1W SRAM both "256x16" and "1KB". 256 x 16 bits is
512 bytes. This design follows 256 x 16.

The BA+ is a custom layout macro in silicon and a register array here. Its
tri-state bitline is modelled as an OR. The oscillators are delay models. The
ring oscillators and the clock generator therefore show the intended
structure and behaviour, but no real frequencies. Each block in silicon
also has six power pins, with separate supplies for the block, the scan
wrapper, the clock generator's oscillator and the ESD structures. Tuning the
frequency with the oscillator's supply is outside a logic model. Here it
appears only as the `STAGE_DELAY_PS` parameter. The traditional,
compiled-periphery baselines that the smart memories were compared against
are not part of this design.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl -y tb +libext+.sv --top-module tb_testsite_top \
  rtl/testsite_pkg.sv tb/tb_testsite_top.sv -o sim
./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_testsite_top` | the whole site at default sizes, through its pins only. It writes the full 32x32 image, reads windows at all four alignments and across the edges, does SRAM writes and reads, runs multiplies on the on-chip clock in modes 0 to 5 (one row of a shmoo plot) and on the off-chip clock, switches the clock mode, and measures CLK_OUT and both RO_OUT periods. It counts every mechanism; about 4 s. |
| `tb_pa_sram`, `tb_pa_sram_windows` | all 1024 window positions against a reference image; other window and image sizes |
| `tb_pa_merged_decoder` | every origin, exhaustively |
| `tb_sram_1r1w`, `tb_sram_1r1w_configs` | random read/write traffic; other bank and BA+ configurations |
| `tb_ba_plus` | write/read ports, read-during-write, bitline driver enable |
| `tb_booth_wallace_mult` | all Booth digits, random operands, latency |
| `tb_scan_wrapper` | reset, flush, update, hold, eval, capture/shift-out |
| `tb_clock_generator`, `tb_ring_oscillator`, `tb_ro_divider` | periods in several modes, off-chip clock, enable behaviour |

## Changing it

- Image and window: `pa_sram #(.M, .N, .A, .B, .PIX_W, .BA_ENTRIES)`. If the
  size changes inside `testsite_top`, change `pa_in_t`/`pa_out_t` to match.
- Memory: `sram_1r1w #(.WORDS, .WIDTH, .BA_ENTRIES, .BANK_ROWS, .BANK_COLS)`.
  WORDS must be a multiple of BANK_ROWS x BA_ENTRIES, and WIDTH of BANK_COLS.
- BA+ shape: `ba_plus #(.ENTRIES, .WIDTH)`.
- Multiplier width: `booth_wallace_mult #(.WIDTH)` (even widths).
- Oscillator speed: `STAGE_DELAY_PS` on `ring_oscillator`/`clock_generator`.
  The CLK_OUT divider is `testsite_top #(.CLKOUT_DIV_BITS)`.
