# In-memory binary image filtering (IMF) — SystemVerilog model

A neuromorphic vision sensor (NVS) reports only pixels that changed. Sampled
every few tens of milliseconds, its events make an *event-based binary image*
(EBBI): a frame of 0s with 1s where something moved, plus scattered noise
pixels. Before a frame is handed to an object detector it has to be denoised,
and frames that turn out blank should not be processed at all.

The design here does the denoising inside the SRAM that stores the frame. The
filter is a *non-overlapping median filter* (NOMF): the frame is cut into
disjoint n x n patches (n = 3 or 5) and every pixel of a patch takes the
patch's majority value. For a binary image the median of a window is its
majority, so this is a median filter with stride n whose decision is applied to
all n² pixels, not only the centre. In silicon the majority comes for free
from a read disturb. The n word lines of a patch are raised together and the n
columns of the patch share one bit-line pair. Whichever value most of the
n² cells hold discharges its bit line first, and the cells holding the other
value flip. A whole band of 320 x n pixels is decided in two clock cycles.

This repository gives RTL for the digital parts (AER receiver, clock-crossing
FIFO, controller, decoders, word-line and bit-line control, the valid-frame
detector) and a cycle-level behavioural model of the cell array. It follows
the published description of a 65 nm test chip with a 320 x 240 macro. The
chip-level choices the publication leaves open are this design's own, and are
listed under "Departures and own choices".

## Block diagram

```
              aer_clk domain          |               sys_clk domain
                                      |
 sensor --aer_data[9:0]--> +--------+ |  +-----------+      +--------------------------------+
        --aer_req-------->| aer_rx |=|=>|async_fifo |=====>| imf_controller                 |
        <-aer_ack---------|        | |  | 128 x 32  |empty |  row_decoder  column_decoder   |
 frame_end -------------->+--------+ |  +-----------+      +---+------------------------+---+
                                      |                     gwl,wl   bl,blb,bs,Filter,Pchrg
                                      |                         v                        v
                                      |  +-----------------------------------------------------+
                                      |  | sram_macro  (22 banks x 15 columns x 240 rows)      |
                                      |  |  wordline_driver: GWL mux (Filter) + per-bank LWL   |
                                      |  |  bl_short_ctrl:   gates joining n columns          |
                                      |  |  sram_array:      cells, drivers, sense amplifiers  |
                                      |  +-------------------------+---------------------------+
                                      |          bl_sense[319:0]   |   rd_data[319:0]
                                      |  +-----------------------+ |
                                      |  | valid_frame_detector  |<+
                                      |  +-----------+-----------+
                                      |        valid_fr -> controller -> frame_valid
```

| File | Role |
|---|---|
| `rtl/imf_pkg.sv` | sizes (320, 240, 22 banks of 15, 16 clear rows, 128 x 32 FIFO), FIFO entry struct, controller phase enum |
| `rtl/imf_top.sv` | the processor, two clock domains |
| `rtl/aer_rx.sv` | 4-phase AER receiver, two words per event, back-pressure |
| `rtl/async_fifo.sv` | Gray-pointer dual-clock FIFO, first-word fall-through |
| `rtl/imf_controller.sv` | clear / write / filter sequencer, readout, valid-frame flag |
| `rtl/row_decoder.sv` | 240-bit row buses: one row, 16-row clear group, n-row filter group |
| `rtl/column_decoder.sv` | per-column bit-line drive levels, bank select |
| `rtl/sram_macro.sv` | the macro: word-line driver, bit-line short control, array |
| `rtl/wordline_driver.sv` | GWL multiplexer (select = Filter) and per-bank local word lines |
| `rtl/bl_short_ctrl.sv` | transmission-gate enable patterns 110110… / 1111011110… |
| `rtl/sram_array.sv` | behavioural model of the cells and the read-disturb majority |
| `rtl/valid_frame_detector.sv` | NOR/NAND tree over the bit lines plus a flop |

## How the array filters

### Patches, banks and the short gates

Column c of the macro belongs to bank c/15. Fifteen is the least common
multiple of 3 and 5, so with either kernel size a patch never straddles two
banks. That is why the 320 columns form 22 banks, the last one only 5
columns wide. In filter mode `bl_short_ctrl` closes the transmission gates
between columns c and c+1 according to

* n = 3: s = 1 1 0 1 1 0 … (s[c] = 1 unless c mod 3 = 2)
* n = 5: s = 1 1 1 1 0 1 1 1 1 0 … (s[c] = 1 unless c mod 5 = 4)

so columns {0,1,2}, {3,4,5}, … (or {0..4}, {5..9}, …) each share one BL and one
BLB. With n = 3, 320 is not a multiple of 3: columns 318 and 319 form a
two-column patch at the right edge. The 240 rows divide evenly by both 3 and 5.

### One filter step, two cycles

While Filter is high all 22 bank selects are high (`0x3FFFFF`) and the
controller walks down the frame in groups of n rows:

| cycle | Filter | Pchrg | word lines | what happens |
|---|---|---|---|---|
| 2g | 1 | 0 | none | both bit lines of every column are precharged |
| 2g+1 | 1 | 1 | rows n·g … n·g+n−1 | the patches of this band race and flip to their majority |

The band of 320 x n pixels is done at the end of the second cycle. A frame of R
rows therefore takes 2·⌈R/n⌉ cycles: 160 for 3 x 3 on 240 rows, 96 for 5 x 5,
and 120 for 3 x 3 on a 240 x 180 sensor frame (1.7 µs at 70 MHz).

### The majority model

In an evaluate cycle `sram_array` does the following for every group of
joined columns. It counts the raised cells (m) and how many of them hold 1
(k), then writes (2k ≥ m) into every raised cell of the group. For a full
patch, m = n² is odd and the rule is k ≥ ⌈n²/2⌉, the binary median. The only
possible tie is in the 2-column edge patch (m = 6). The model resolves it to
1, whereas in silicon a tie has no defined outcome.

The silicon version of this step is analog: cells holding 0 pull BL down, cells
holding 1 pull BLB down, and the faster line flips the minority cells. Its
error rate depends on mismatch, supply and temperature. The model is ideal: it
never makes such an error. `bl_sense[c]` reports the level BL of column c
settles to in an evaluate cycle (1 = not discharged = patch decided 1). In
every other cycle it reports 1, the precharged level.

Outside filter mode the array does ordinary SRAM work:

* **Write / clear.** Each column receives two drive levels from
  `column_decoder`. bl ≠ blb writes bl into the raised cells of that column.
  bl = blb = 1 means the pair is only precharged (a half-selected column), so
  those cells keep their value.
* **Read.** `rdata[c]` is 1 when no raised cell of column c holds 0, that is,
  when BL stays high. It is registered and appears one cycle after `rd`.

The cells have no reset. As on the chip, every frame starts with a clear.

## One frame, phase by phase

`imf_controller` runs these phases (state names are in `imf_pkg`):

1. **CLEAR**, 15 cycles. Cycle g raises rows 16g … 16g+15 in all banks and
   drives BL = 0 / BLB = 1 on every column. Raising 16 rows at a time, not all
   240, limits the surge current on the bit lines.
2. **WRITE**, one event per cycle. The FIFO head gives (x, y). The controller
   raises row y and drives only column x to BL = 1 / BLB = 0, with only bank
   x/15 selected. All other columns stay precharged. An event outside
   320 x 240 is popped and dropped. Popping the end-of-frame marker ends the
   phase.
3. **FILTER**, 2·⌈rows/n⌉ cycles, as above. The kernel size (`ksize5`) and
   the number of rows (`frame_rows`, 1 … 240; 0 means 240) are sampled at
   `start`.
4. **DONE**, one cycle. Then `done` pulses and `frame_valid` is final.

In IDLE, `rd_en`/`rd_row` read one 320-bit row per cycle; `rd_data` is valid
one cycle later with `rd_valid`.

## Getting events in: AER and the FIFO

The sensor side speaks a 4-phase handshake on a 10-bit bus:

```
aer_req  __/‾‾‾‾‾‾‾‾‾‾\________/‾‾‾
aer_ack  ______/‾‾‾‾‾‾‾‾‾‾\________
             data valid while req high
```

`aer_req` is synchronized with two flops. Ack rises on the third aer_clk edge
after Req and falls after Req falls. A pixel address (9-bit x, 8-bit y) does
not fit in 10 bits, so an event is two words:

| data[9] | data[8] | data[7:0] |
|---|---|---|
| 0 (row word) | polarity | y |
| 1 (column word) | x[8] | x[7:0] |

A column word completes an event. `{x, y}` goes into the FIFO in the same
cycle as the handshake, with `wren`. Polarity is not stored: a binary frame
marks a pixel for an event of either polarity.

The FIFO is 128 entries of 32 bits (`fifo_entry_t`: eof flag, 14 unused
bits, x, y). Gray-coded pointers cross the two clocks.
If it is full, `aer_rx` withholds Ack for the column word (`aer_stall` is
high) and the sender waits; no event is lost. This happens when events
arrive faster than the controller drains them, for example while the
controller is still idle or clearing.

A pulse on `frame_end` (aer_clk) queues an end-of-frame marker behind all
events already received. Events that arrive after that point wait until the
marker has been written, so no event of the next frame overtakes it. The
controller therefore never has to guess when the burst of a frame has fully
crossed the clock boundary.

The publication runs aer_clk faster than sys_clk. A 4-phase transfer takes several
aer_clk cycles per word, so the FIFO fills slowly. The testbenches use
4 ns and 10 ns.

## Valid-frame detector

After an evaluate cycle a patch's BL is high exactly when the patch decided 1.
All columns of a patch share their BL, so one tap per patch is enough: columns
0, n, 2n, …. `valid_frame_detector` ORs the taps through a tree of 3-input
gates that alternate NOR and NAND from level to level. For the 107 taps of a
320-wide macro with n = 3 there are five levels (NOR, NAND, NOR, NAND, NOR)
plus a final inverter. A flop samples the tree at the clock edge that ends each
evaluate cycle. It is cleared asynchronously in the first precharge cycle of the
filter phase. The controller ORs its output over the whole filter phase into
`frame_valid`. A frame whose objects survive filtering reports 1. A frame of
isolated noise is wiped to zeros and reports 0, so the frame can be dropped
without reading it out.

The tree is sized for n = 3, ⌈W/3⌉ taps. For n = 5 the taps move to columns
0, 5, 10, … and the leftover inputs are tied to the neutral value of their
gate (0 into a NOR, 1 into a NAND).

## Parameters

Every module takes its sizes as parameters with the chip's values as
defaults (from `imf_pkg`):

| Parameter | Default | Meaning |
|---|---|---|
| `W` / `IMF_W` | 320 | columns (x) |
| `H` / `IMF_H` | 240 | rows (y) |
| `NB` / `NBANK` | 22 | banks, ⌈W/15⌉ |
| `BCOLS` / `BANK_COLS` | 15 | columns per bank, lcm(3, 5) |
| `NCLR` / `CLR_WLS` | 16 | rows raised per clear cycle; H/NCLR clear cycles |
| FIFO `DEPTH` × `WIDTH` | 128 × 32 | event buffer |
| AER `DW` | 10 | AER data bus |

The address widths (`XW` = 9, `YW` = 8) and the 4-bit clear-group counter
assume the default geometry. Changing W or H beyond 512 x 256 needs those
widened too.

## Departures and own choices

Taken from the publication: the block set and signal names of the top level;
the 320 x 240 / 22 x 15 organisation; the 128 x 32 asynchronous buffer; the
10-bit 4-phase AER bus; the two clocks; the phase order; 16 rows per clear
cycle; the single-bit write with one bank selected; the filter schedule of
two cycles per n rows with all banks selected; the short-gate patterns; the
majority rule; Pchrg high together with each group's word lines and low in
the precharge cycle between; the NOR/NAND tree and flop of the valid-frame detector.

This design's own, where the publication is silent:

* **AER word format.** Two words per event as tabled above. The publication
  gives only the bus width, and that it carries address and polarity.
* **End-of-frame marker**, `frame_end`, and the `start`/`done`/`busy`
  handshake. The publication's top-level diagram also routes the AER write
  strobe to the controller. Here the controller sees events only through the
  FIFO.
* **FIFO full flag and back-pressure** on Ack. Only the FIFO's empty flag is
  described.
* **Decoders in the controller.** The text says the controller sends 240-bit
  row and 320-bit column buses to the macro, while the macro drawing also shows
  a row and a column decoder. The function is the same either way.
* **Bit-line driver abstraction.** Two levels per column instead of the
  transistor-level clear / write / half-select / precharge drivers.
* **`frame_rows`.** A frame shorter than 240 rows is filtered only over its
  own rows (120 cycles for 180 rows), which matches the 1.7 µs quoted for a
  240 x 180 frame at 70 MHz.
* **Readout port.** The test chip is read through an FPGA. Its chip-side
  interface is not described.
* **Valid-frame detector.** The fabricated chip did not contain it: it is
  proposed as an addition. Here it is built for the full 320 columns and both
  kernel sizes. Its delay cell is replaced by sampling on the clock edge.
* **Reset.** One asynchronous active-low reset for both clock domains.

Not modelled:

* the analog behaviour of the cells and gates, meaning bit errors from
  mismatch, supply and temperature, and currents and energy;
* configuration registers, which are named but not described;
* the suggested trim capacitors on the bit lines.

**Throughput.** The publication's headline 134.4 GOPS is 2 ops x 320 x 3
pixels x 70 MHz, i.e. one band per cycle. Elsewhere it states two cycles per
band, which this design follows: 67.2 GOPS at 70 MHz. The publication notes
that a one-cycle version would double throughput at about the same energy.

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. Each has a cycle-count watchdog. Build and
run any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/imf_pkg.sv tb/tb_imf_top.sv --top-module tb_imf_top -Mdir obj_top
./obj_top/Vtb_imf_top +verilator+rand+reset+2
```

`-Irtl` lets Verilator find each module in `rtl/<name>.sv`. Yosys with the
slang front end also reads the RTL. The array model is written in
synthesizable form, but it is a model of an analog macro, not a netlist to
tape out.

| Testbench | What it shows |
|---|---|
| `tb_bl_short_ctrl` | gate-enable patterns for n = 3, 5 and idle |
| `tb_wordline_driver` | GWL mux and bank gating, random |
| `tb_row_decoder` | single rows, 15 clear groups, all filter groups |
| `tb_column_decoder` | drive levels and bank for every x, clear, idle |
| `tb_async_fifo` | order, full and empty across unrelated clocks |
| `tb_aer_rx` | two-word events, markers, stall while full, 3-cycle Req→Ack |
| `tb_sram_array` | clear, writes, reads, n = 3 and 5 filter vs. software NOMF, bl_sense |
| `tb_sram_macro` | same through the macro's ports, unselected-bank writes ignored |
| `tb_valid_frame_detector` | tree = OR of taps at widths 320 and 240, hold, reset |
| `tb_imf_controller` | every output in every phase, cycle counts 15 / 2⌈R/n⌉, reads |
| `tb_imf_top` | four full-size frames end to end (see below) |
| `tb_imf_patterns` | all 8480 3 x 3 patches loaded with k = 5 and k = 4 ones |

`tb_imf_top` runs the processor at its default size. A sensor model streams
AER events and a host model reads back all 240 rows. Every pixel is compared
with a software NOMF of the events sent. The frames cover 3 x 3 and 5 x 5
filtering, a frame sent before `start` (so the FIFO fills and the sender is
stalled), out-of-frame events, a noise-only frame that must come out blank
with `frame_valid` = 0, and a 240 x 180 frame that must filter in 120 cycles.
The testbench counts each of these events and fails if one never happens.
It takes a few seconds to simulate.

`tb_imf_patterns` mirrors the patch-pattern characterization of the silicon.
Every full 3 x 3 patch (106 x 80 = 8480) is loaded over AER with its own
random pattern of k ones. The ideal model must fill every patch with 1s for
k = 5 and clear it for k = 4. It simulates about 75,000 AER events and takes
about a minute.
