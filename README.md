# In-memory median denoising SRAM for event-camera frames

Event cameras report pixels whose brightness changed. Accumulating their events
over a short window gives a *binary* frame: 1 where something moved, 0
elsewhere, sprinkled with isolated noise pixels. A median filter removes that
noise, and on a binary image the median of an n x n window is just its
majority: the pixel becomes 1 if at least ceil(n²/2) of the n² pixels are 1.

This design takes two further steps.

1. **Non-overlap median filtering (NOMF).** Instead of sliding the window one
   pixel at a time and deciding only the centre pixel, the frame is cut into
   disjoint n x n tiles (stride n) and the majority decision of a tile is
   written to *all* n² of its pixels. Object edges move by at most a pixel or
   two, noise disappears, every pixel is read once instead of n² times, and the
   result can overwrite the frame in place.
2. **Doing it inside the SRAM.** The frame is held in a 320 x 240 single-bit
   SRAM. If the n word lines of a tile's rows are raised together and the bit
   lines of its n columns are tied together, all n² cells discharge one shared
   bit-line pair at once. Cells storing 0 pull BL down, cells storing 1 pull BLB
   down; whichever side has more cells wins the race, and the fallen line then
   acts like a write driver and flips the minority cells. No sense amplifier,
   adder or comparator is involved: the tile is its own majority gate. With all
   banks enabled, one band of n rows across all 320 columns is filtered per
   two-cycle step (precharge, then evaluate), so a whole 240-row frame takes
   2 * 240 / n cycles: 160 cycles, 0.8 µs at 200 MHz, for 3 x 3 tiles and 96
   cycles for 5 x 5 tiles.

The SystemVerilog here describes that array at the level of word lines, bit-line
pairs and banks. The analog race is replaced by an exact count of the cells
pulling each line, which is its nominal behaviour (see "What the model
abstracts").

## Organisation of the array

```
             +-------------+   gwl[239:0]   +-------------------------------------+
 row addr -->| row_decoder |--> gwl_mux --->| 22 x sram_bank (15 cols x 240 rows)  |
             +-------------+   (1 row, or   |   each: lwl_driver + cells          |
                               n rows)      +-------------------------------------+
                                                 | cnt0/cnt1 per column  ^ line state
                                                 v                       |
                                            bl_short (ties n columns) ---+
                                                 | g0/g1 per column      |
                                                 v                       |
 col addr --> column_decoder --drv_en-->   bitline_array (precharge, race,
              (bank select, column,             write driver) ----> sense_amp --> rdata
               write driver)
                        ^
 commands --> imc_controller (precharge / word-line cycles, bands)
```

| Module | Role |
|---|---|
| `imc_pkg` | Shared types: kernel size `ksize_e` (K3, K5), command `cmd_e`, bit-line state `line_e`. |
| `imc_denoise_sram` | Top level; wires the blocks below. Parameters `ROWS` = 240, `COLS` = 320, `BANK_COLS` = 15. |
| `imc_controller` | Accepts commands and produces the precharge and word-line cycles; steps the filter through the bands. |
| `row_decoder` | Row address to one-hot row select. |
| `gwl_mux` | Global word lines: one row in normal mode, the n rows of a band in filter mode. |
| `column_decoder` | Bank select (every bank in filter mode), one-hot column select and the single-bit write driver enable. |
| `sram_bank` | One bank of cells (15 columns, the last bank 5) with its `lwl_driver`; reports per-column pull counts and writes the settled line value back. |
| `lwl_driver` | Passes the global word lines to a bank only when it is selected and in the word-line cycle. |
| `bl_short` | The transmission-gate network that ties the bit lines of n adjacent columns during filtering. |
| `bitline_array` | All BL/BLB pairs: precharge, discharge race, write-driver override, stale levels. |
| `sense_amp` | Latches the selected column's bit at the end of a read. |

Pixel (x, y) of a frame is stored at column x, row y. Columns are grouped into
banks of 15 (columns 0-14, 15-29, ..., 315-319). Bank widths are multiples of 3
and 5, so no kernel ever straddles two banks. Banks exist to cut bit-line power
in normal mode, where only the addressed bank's word line is raised.

## The discharge race, and how it is modelled

This is the part worth understanding before reading the code. Everything the
array does, in both modes, is the same physical event: some word lines rise and
some cells pull on some bit-line pairs. The model makes that event explicit.

**Pull counts.** During the word-line cycle each bank reports, per column,
`cnt0` (raised cells storing 0, pulling BL) and `cnt1` (raised cells storing 1,
pulling BLB). A stored 1 means the cell's true node is high, so its access
transistor on the BLB side discharges BLB.

**Shorting.** `bl_short` adds the counts of the n columns of a group when S
(the filter mode) is high, so every column of a tile sees the tile's totals
`g0` and `g1`. With S low every column stands alone.

**Settling.** `bitline_array` turns totals into one of four states per column:

| Condition (in priority order) | State | Effect on raised cells |
|---|---|---|
| column's write driver enabled | `LINE_BLB_LOW` for 1, `LINE_BL_LOW` for 0 | written |
| pair not precharged since its last discharge | previous state | the stale level is written |
| g0 > g1 | `LINE_BL_LOW` | all become 0 |
| g1 > g0 | `LINE_BLB_LOW` | all become 1 |
| g0 = g1 > 0 | `LINE_TIE` | unchanged |
| g0 = g1 = 0 | `LINE_PRE` | (no raised cells) |

At the closing clock edge each bank writes the settled value into every cell
on a raised word line. This single rule gives:

* **read** - one cell against precharged lines: it wins and keeps its value;
  the sense amplifier latches which line fell;
* **write** - the driver overpowers the cell;
* **half-selected cells** - the other columns of the addressed bank see a read
  and are left intact (the half-select driver keeps their lines precharged
  beforehand);
* **filter** - n² cells race; the majority wins and the minority flips. A 3 x 3
  tile with four 1s and five 0s becomes all 0.

The stale-level row of the table is why each access starts with a precharge
cycle: a pair left discharged by the previous access would otherwise act as a
write driver on the next one. The controller never skips the precharge; the
`bitline_array` testbench exercises the stale case directly.

**Edge kernels.** 320 is a multiple of 5 but not of 3. With 3 x 3 tiles the
last two columns (318, 319) form a 3 x 2 tile of six cells that is still
shorted and filtered; three 1s against three 0s is a tie and leaves the cells
as they are. 240 rows divide by both 3 and 5.

## What the model abstracts

* The race is decided by exact counts. In silicon, current and capacitance
  mismatch can let a 4-against-5 tile go the wrong way at low supply voltage;
  the circuit was sized so that this does not occur at 1.2 V, which is the
  behaviour modelled. Device sizing, low-threshold devices and the cell layout
  have no RTL counterpart.
* Voltages are reduced to the four line states above. Timing inside a cycle
  is not modelled; one word-line cycle always settles.
* `sram_bank` stores its cells as a memory with five read and five write
  ports. It locates the first raised word line and works on the five rows
  from there, which covers every pattern the array produces (one row, or an
  aligned band of 3 or 5). Raising lines further apart is not supported and an
  assertion reports it.
* The cells have no reset, as in any SRAM. `rst_n` resets the controller, the
  bit-line state and the read latch.

## Command interface and timing

The top level takes one command at a time on a valid/ready handshake:

| `cmd` | Operands | Cycles from accept to `done` |
|---|---|---|
| `CMD_WRITE` | `row`, `col`, `wdata` | 2 |
| `CMD_READ` | `row`, `col` | 2; `rdata` valid while `done` is high and held until the next read |
| `CMD_FILTER` | `ksize` (K3 or K5) | 2 * ROWS / n: 160 (3 x 3) or 96 (5 x 5) at full size |

A command is accepted at a rising edge where `cmd_valid` and `cmd_ready` are
both high. The next cycle is a precharge cycle, the one after it the word-line
cycle. `done` is high for one cycle after the last word-line cycle, and
`cmd_ready` is already high in that cycle, so commands can follow back to back.
During a filter the bands are processed top to bottom (rows 0..n-1 first), all
22 banks selected and the bit-line short held on.

Writes are single-bit on purpose: events arrive one pixel at a time and are not
contiguous, so there is no word-wide write path.

## Where this RTL departs from, or adds to, the published design

Taken from the published design: the 320 x 240 array, 22 banks of 15 columns,
the row decoder / global word-line mux / local word-line / bit-line short /
sense amplifier / column decoder structure, single-bit writes with half-select
drivers, 3 x 3 and 5 x 5 kernels formed by n word lines and n tied columns, the
two-cycle precharge-then-evaluate step, all banks selected in filter mode, and
the row-band repetition until the frame is done.

This design's own choices: the command interface and its handshake; two-cycle
normal reads and writes; deriving the n word lines of a band from the decoder
line of its first row; the kernel grid starting at row 0 and column 0; the
treatment of the 3 x 2 edge tile and of ties; the four-state line abstraction
and the stale-level behaviour; the sense amplifier as a latch.

Published timing figures disagree for 5 x 5 tiles. One quotes about 0.6 µs
per frame (1.66 frames/µs), i.e. 120 cycles at 200 MHz. The quoted throughput
of 153 GOPS implies 0.48 µs instead. That throughput counts n² - 1
additions per tile: 24 x 48 x 64 = 73,728 operations. This RTL follows the
two-cycle band step and takes 96 cycles (0.48 µs), consistent with the
throughput figure. For 3 x 3 tiles all figures agree: 160 cycles, 0.8 µs,
and 8 x 80 x 106.7 operations, i.e. 85.3 GOPS. The end-to-end testbenches
print the cycle count and the GOPS figure for each kernel size, together with
the fraction of pixels flipped. The published design measured about 3.6 %
flipped pixels on real recordings; the synthetic test frames are noisier.

Frame sizes: a DAVIS240-class sensor gives 240 x 180 frames, which fit in the
array with room to spare; anything up to 320 x 240 (QVGA) fits.

## Simulating

All files are SystemVerilog 2017. Every testbench is self-checking and ends
with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/imc_pkg.sv \
    tb/imc_denoise_sram_tb.sv --top-module imc_denoise_sram_tb -Mdir obj
./obj/Vimc_denoise_sram_tb
```

Replace the testbench name for the others:

| Testbench | What it covers |
|---|---|
| `imc_denoise_sram_tb` | End to end at 30 rows x 35 columns (banks of 15, 15, 5): load, read back, 3 x 3 filter, 5 x 5 filter against a software NOMF, filter latency, a tied edge tile, and a count of each mechanism. Runs in well under a second. |
| `imc_denoise_sram_full_tb` | The same at the default 320 x 240 size: 153,600 writes, 230,400 reads, one frame per kernel size. About 3 minutes. |
| `imc_controller_tb` | Cycle-by-cycle strobes; 160 / 96 cycle filter latency. |
| `sram_bank_tb`, `bl_short_tb`, `bitline_array_tb`, `column_decoder_tb`, `row_decoder_tb`, `gwl_mux_tb`, `lwl_driver_tb`, `sense_amp_tb` | Each block against an independent model. |

The testbench frames are generated inside the testbench: uniform salt noise
(6 % of pixels) plus a few solid rectangles standing in for moving objects.

To change the array size, override `ROWS`, `COLS` and `BANK_COLS` on
`imc_denoise_sram`. `ROWS` should be a multiple of 15 so that both kernel
sizes tile it exactly, and `BANK_COLS` a multiple of 15 so that no kernel
crosses a bank.
