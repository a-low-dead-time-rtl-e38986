# Divide-and-conquer fine-time encoder for tapped-delay-line TDCs

An FPGA time-to-digital converter (TDC) of the tapped-delay-line (TDL) kind
sends a waveform started by the hit down a carry chain. On every clock edge
a row of flip-flops takes a snapshot of all the taps. The fine time is where
the waveform's edge or edges sit in that snapshot. The encoder has to turn a
snapshot of a few hundred bits into that position, in binary, on every
clock. Three things make this hard:

* **Bubbles.** Near an edge the snapshot is rarely clean. On 28 nm devices
  `111…1100110100…000` is normal, so simply looking for the first 1→0 step
  gives wrong answers.
* **Non-thermometer codes.** Wave-union and half-length delay lines carry
  pulses, not steps. Their snapshots look like `00…0011…1100…00` and can
  hold two or four edges. Counting all the ones, as a Wallace-tree or
  ones-counter encoder does, no longer gives a position.
* **Cost.** TDCs with many channels are limited by LUTs and flip-flops per
  channel, and the encoder is the largest part of a channel.

This RTL implements the encoding method from *"A Low Dead Time, Resource
efficient Encoding Method for FPGA based High-Resolution TDL TDCs"* (Dong,
Feng, Wang, Shen, Liu, An; USTC). It wraps the encoder in a complete TDC
channel: sampling flip-flops, coarse counter, FIFO write enable and a
timestamp FIFO. The launcher and the carry chain are FPGA primitives
placed by hand, so they are not part of the RTL. The channel takes the tap
outputs as an input.

## The idea: count locally, locate coarsely, add up

The snapshot is cut into pieces of `W` = 24 taps. Tap 0 is the cell nearest
the launcher, and piece `i` holds taps `24i … 24i+23`.

1. **Local sums.** Each piece's ones are counted. The count is 5 bits wide
   (0..24). In hardware each group of six taps goes through a 6-input LUT
   that returns its count on 3 bits, and an adder tree sums the four
   groups (`pre_encoded_cell`).
2. **Flags and Sel.** The *flag* of a piece is the MSB of its local sum.
   For a 24-bit piece the flag is set when the piece holds at least 16
   ones, so it says whether the piece is "mostly high". The *Sel array*
   XORs neighbouring flags: `Sel[i] = Flag[i+1] ^ Flag[i]`. A set Sel bit
   means a transition lies somewhere in pieces `i` and `i+1`. Bubbles only
   move the count inside those pieces, so they cannot create a second Sel
   bit as long as they stay within the two pieces (`pre_encoder`).
3. **Locate and add.** A priority encoder returns the first set Sel bit `P`.
   Two multiplexers pick the local sums of pieces `P` and `P+1`. The
   arithmetic block then computes the position:

   | kind of transition | flags of P, P+1 | position R |
   |---|---|---|
   | 1→0 (ones ahead of it) | 1, 0 | `P·W + (sum_P + sum_P+1)` |
   | 0→1 (zeros ahead of it) | 0, 1 | `P·W + (2W − sum_P − sum_P+1)` |

   The position is the number of taps ahead of the transition. For a
   1→0 step it is the same answer a ones counter over the whole line would
   give, bubbles included. But only two local sums are added, not all of
   them. `W` is a constant, so `P·W` needs only shifts and adds (`ma_block`).

A worked example with a 1→0 edge. The local sums are 24, 24, 21, 0, 0, so
the flags are `1 1 1 0 0` and the Sel array is `0 0 1 0`. That gives
`P = 2` and `R = 2·24 + 21 + 0 = 69`. With local sums 24, 24, 23, 1, 0 the
result is `2·24 + 23 + 1 = 72`: the stray 1 in the fourth piece is
counted. `ma_block_tb` checks both cases.

## Several edges: the stage cascade

A wave-union snapshot holds several transitions, and so several set Sel
bits. The back end is a chain of identical stages (`backend_stage`), one per
edge. Each stage contains:

* a data buffer holding all local sums;
* a priority encoder that returns the first set Sel bit ("Encoded") and the
  Sel array with that bit cleared ("Masked");
* the multiplexers and the arithmetic block for that bit.

Stage *k* thus finds the *k*-th transition from tap 0 and hands the masked
Sel array on to stage *k+1*. Every stage registers its outputs, so the chain
is a pipeline that takes a new snapshot on every clock. `backend_encoder`
delays the earlier stages' results so that all results of one snapshot
arrive together, then forms the fine code in a last register.

| `MODE` | used for | fine code | valid (en-flag) when |
|---|---|---|---|
| `MODE_NORMAL` | step signal, normal TDL TDC | position of the 1→0 edge | stage 1 found a 1→0 transition |
| `MODE_HALF_LENGTH` | square pulse, half-length line | `{kind, position}` of the first transition, kind 1 = 1→0 | stage 1 found any transition |
| `MODE_WAVE_UNION` | wave union A, `EDGES` = 2 or 4 | sum of the `EDGES` positions | all `EDGES` stages found a transition |

`edges_o` reports how many transitions were found, which tells an
incomplete wave-union snapshot apart from an empty one.

The half-length line covers only a little more than half a clock period.
Depending on where the pulse is, the snapshot is `1…10…0`, `0…01…10…0` or
`0…01…1`. Only the first transition counts. The kind bit says which edge
it was, and calibration treats the two kinds as two separate code ranges.

## Where the method stops working

These limits come from the method itself, not from this implementation.
The testbenches place their stimulus inside them.

* **Bubble depth.** Bubbles are corrected only when the whole blurred
  region lies inside pieces `P` and `P+1`. If the first of the two pieces
  drops below 16 ones, the window moves one piece towards tap 0. A blur
  that then reaches into piece `P+2` loses the ones it has there. For
  example, a blur spanning taps 107–120 with 15 ones in piece 4 gives 111
  instead of 112. The testbenches keep bubbles (up to 14 taps wide) inside
  the piece that holds the edge. They also check the worst case the
  reference design claims to handle: a 16-tap blur starting right after
  a clean piece. Wider pieces, set with the `PIECE_W`
  parameter (a multiple of 6), tolerate deeper bubbles.
* **Dead ends of the line.** A transition is found only if the flags
  change somewhere. With 24-tap pieces and clean data:
  * a 1→0 edge is found for positions 16 … `TAPS`−9;
  * a 0→1 edge is found for positions 9 … `TAPS`−16.

  A real line is made longer than the range it has to cover, so the
  ends are not used.
* **Edge spacing in wave-union mode.** The arithmetic assumes that, apart
  from the selected pair, all taps between the previous transition and this
  one have one level. Transitions closer than about `2W` taps can therefore
  be placed wrongly. Example: a pulse from tap 30 to tap 60 gives 30 and
  54. The testbenches use spacings of at least `2W + 14` = 62 taps. The
  source only asks for pulses longer than 24 taps.

## Timing, dead time and the write enable

| from | to | clocks |
|---|---|---|
| taps_i sampled (clock edge *n*) | raw data in `tdl_sampler` | edge *n* |
| raw data | local sums + Sel (`pre_encoder`) | 1 |
| Sel | result of stage *k* | *k* |
| last stage | `fine_o`, `fine_valid_o` | 1 |

The total is `LATENCY = EDGES + 2` clocks after the sampling edge: 3 for a
normal or half-length channel, 4 for double-edge and 6 for four-edge.
Every register takes new data on every clock, so the encoder itself has a
dead time of one clock period.

A hit can show up in two successive snapshots when the delay line is longer
than one clock period. `hit_write_enable` therefore writes to the FIFO only
when the encoder is valid now and was not valid in the period before. As a
result the channel as a whole has a dead time of two clock periods.

The coarse counter runs free on the same clock. The timestamp must carry the
coarse time of the sampling period, not of the output period. Because the
counter advances by exactly one per clock, the channel reports
`count − LATENCY`. That replaces a pipeline of counter values with one
subtractor.

## Channel interface (`tdl_tdc_channel`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | system clock (400 MHz in the reference design); asynchronous active-low reset |
| `taps_i` | in | `TAPS` | tap outputs of the delay line, tap 0 nearest the launcher |
| `fine_valid_o`, `fine_o` | out | 1, `FINE_W` | encoder en-flag and fine code, every clock |
| `edges_o` | out | `clog2(EDGES+1)` | transitions found |
| `coarse_o` | out | `COARSE_W` | coarse time of the sampling period belonging to `fine_o` |
| `wr_en_o` | out | 1 | FIFO write (valid now, not valid in the period before) |
| `rd_en_i` | in | 1 | pop the head of the timestamp FIFO |
| `ts_o` | out | `COARSE_W+FINE_W` | `{coarse, fine}`, first-word fall-through |
| `ts_empty_o`, `ts_full_o` | out | 1 | FIFO state |
| `ts_drop_cnt_o` | out | 16 | timestamps dropped while the FIFO was full (saturating) |

| parameter | default | meaning |
|---|---|---|
| `TAPS` | 216 | delay-line taps (54 CARRY4 × 4); a multiple of `PIECE_W` |
| `PIECE_W` | 24 | piece width; a multiple of 6 |
| `EDGES` | 1 | back-end stages (edges per snapshot) |
| `MODE` | `MODE_NORMAL` | see the mode table above |
| `COARSE_W` | 24 | coarse counter bits (41.9 ms at 400 MHz) |
| `FIFO_DEPTH` | 16 | timestamp FIFO words, a power of two |

`FINE_W` follows from the mode and the size. It is `clog2(TAPS+1)` for
normal mode, one more bit for half-length, and `clog2(EDGES·TAPS+1)` for
wave union.

The four channels of the reference implementation (Artix-7, 400 MHz) are
these settings:

| channel | `TAPS` | `EDGES` | `MODE` | `FINE_W` |
|---|---|---|---|---|
| normal TDL TDC | 216 | 1 | `MODE_NORMAL` | 8 |
| half-length delay line TDC | 120 | 1 | `MODE_HALF_LENGTH` | 8 |
| double-edge wave union | 288 | 2 | `MODE_WAVE_UNION` | 10 (reference: 9) |
| four-edge wave union | 360 | 4 | `MODE_WAVE_UNION` | 11 |

## Files

`rtl/`, bottom-up:

| file | content |
|---|---|
| `tdc_pkg.sv` | mode and transition-kind enums, fine-code width and latency functions |
| `lut_popcount6.sv` | 6-input ones count, the function of one LUT group |
| `pre_encoded_cell.sv` | local sum of one piece: LUT groups + adder tree |
| `pre_encoder.sv` | all pieces, flags, Sel array, output buffer |
| `sel_priority_encoder.sv` | first set Sel bit and the masked Sel array |
| `ma_block.sv` | position from `P` and two local sums, for both kinds |
| `backend_stage.sv` | one pipelined back-end stage |
| `backend_encoder.sv` | `EDGES` stages, alignment, final code and valid |
| `tdl_sampler.sv` | sampling flip-flops |
| `coarse_counter.sv` | free-running coarse counter |
| `hit_write_enable.sv` | FIFO write enable from two adjacent periods |
| `timestamp_fifo.sv` | timestamp FIFO with drop counter |
| `tdl_tdc_channel.sv` | the channel (top) |

`tb/` holds one self-checking testbench per module (`<module>_tb.sv`),
plus the following:

* `tdc_tb_pkg.sv` builds snapshots with bubbles and computes the reference
  positions. Reference positions are found by counting taps between
  neighbouring transition zones, never with the encoder's own arithmetic.
* `tdl_tdc_channel_tb.sv` runs the default channel end to end. It checks
  the fine code, coarse time, write enable and every FIFO word. It also
  makes sure that each of these happened at least once: bubbled edges,
  repeated snapshots, rejected 0→1 snapshots, a full FIFO and dropped
  writes.
* `tdc_modes_tb.sv` runs the half-length, double-edge and four-edge
  channels side by side at their full sizes.
* `tdc_cable_delay_tb.sv` repeats the two measurements used to evaluate a
  TDL TDC for all four channel types, each in a `tdc_pair_bench.sv`: two
  channels of the same type, an ideal delay line with equal taps in front
  of each, a 400 MHz clock and 200,000 hits at random phase. Channel B sees
  every hit 3.1 ns after channel A.
  * *Cable-delay test.* The interval computed from the two FIFO words must
    be within one bin (tap delay / edges) of 3.1 ns.
  * *Code-density test.* The histogram of codes must be flat and without
    gaps over one clock period.

  The tap delays are set to the average bin sizes measured on the real
  lines, multiplied by the number of edges. The wave-union launcher model
  spaces its edges 53 taps plus 1/EDGES of a tap apart. That offset is what
  gives the sum of positions its finer step. On a real line, uneven tap
  delays play the same role. The results are below. With equal taps, the
  RMS error is quantisation only.

  | type | fine codes seen | average bin | RMS interval error |
  |---|---|---|---|
  | normal, 216 taps | 169 | 14.79 ps | 7.33 ps |
  | half-length, 120 taps | 172 | 14.53 ps | 4.48 ps |
  | double-edge, 288 taps | 338 | 7.40 ps | 2.35 ps |
  | four-edge, 360 taps | 658 | 3.80 ps | 1.02 ps |

Every testbench prints `TB_RESULT checks=N failures=M`. It also has a
watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tdc_pkg.sv tb/tdc_tb_pkg.sv tb/tdl_tdc_channel_tb.sv \
    --top-module tdl_tdc_channel_tb -o sim
./obj_dir/sim
```

Replace the testbench name to run any other testbench. Each one runs in
under a minute. For lint: `verilator --lint-only -Wall -Irtl -y rtl
+libext+.sv rtl/tdc_pkg.sv rtl/<module>.sv`. The only remaining warnings
are for the local sums and Sel bits after the last back-end stage, which
are unused and are removed by synthesis.

## Choices made here, and departures from the reference design

The source describes the encoder in detail: the pre-encoded cell, flags,
Sel, the formulas and the stage cascade. It says much less about the rest
of the channel. The following are this design's own choices:

* **Priority order.** The lowest Sel index (nearest tap 0) wins. This
  matches the half-length rule that the first transition in the snapshot
  is the one used.
* **Pipelining.** There is one register rank after the pre-encoder and one
  per stage, plus an output register. The reference design gives only the
  result: a new snapshot every clock.
* **Normal mode.** A 0→1 snapshot is rejected (no valid). It can appear
  when the hit signal ends.
* **Write-enable rule.** The exact rule `valid ∧ ¬valid_prev` is chosen
  here. The reference only says that the flags of two adjacent periods
  are used.
* **Coarse time.** The counter is 24 bits wide and the channel reports the
  sampling period's count.
* **Timestamp FIFO.** 16 words, first-word fall-through; writes into a full
  FIFO are dropped and counted.
* **Double-edge code width.** The double-edge wave-union code is 10 bits
  wide, not the reference's 9, because two positions on 288 taps can add
  up to 576. The measured codes of the reference (66–403) fit either
  width.

Not in the RTL:

* **Launcher and carry chain.** They are placement-dependent FPGA
  primitives.
* **Bin-by-bin calibration.** The code-density histogram and its look-up
  table are built off-chip from the read-out timestamps.
* **Read-out link and clock generator.** Both are board-level parts. The
  FIFO's read side is the channel's interface to the read-out.

## How far it is verified

Every module is checked against a reference computed in its testbench:
exhaustive or random inputs for the combinational parts, and cycle-exact
latency and throughput checks for the pipelined ones. All testbenches
pass. Each one was also run against a deliberately broken copy of its
module and reported failures.

The FPGA resource figures of the reference design (LUTs and registers per
channel) depend on Xilinx mapping and have not been reproduced. The
resolution results (14.8 ps bins, 15 ps RMS for the normal channel) depend
on the silicon and cannot be reproduced in simulation either. What can be
shown in simulation is that the encoder adds no error of its own: with an
ideal line, the cable-delay and code-density tests see only the
quantisation of the taps.
