# Improved fat tree encoder for a wave union TDC

A tapped-delay-line TDC in an FPGA measures the time of a hit by looking at how
far a signal edge has travelled along a chain of carry cells when the system
clock samples them. A *wave union* TDC does not send a single edge into the
chain: a small ring oscillator (the launcher) at the foot of the chain starts
when the hit arrives, so every following clock cycle catches a fresh edge, and
averaging several of those edges gives finer bins and better precision than
the cell delay alone allows.

The price is paid in the encoder. The sampled chain is no longer a thermometer
code (`000…0111…1`): it holds runs of ones and zeros such as `0…01…10…0` or
`1…10…01…1`, it is 276 bits wide, bubbles caused by metastability and uneven
cell delays appear next to the edges, and a new sample arrives every 8.33 ns
(120 MHz), so a code must be accepted every clock. This RTL implements the
*improved fat tree encoder* (IFTE) that solves this in two stages:

1. a 4-input AND per tap that finds the single valid 1-0 transition and
   removes one- and two-bit bubbles, giving a one-out-of-N code;
2. a fat tree of OR gates with a register after every gate, which turns the
   one-out-of-N code into a 9-bit binary index at full clock rate.

Around the encoder, the RTL builds a complete two-channel TDC in the form the
paper "A Fast Improved Fat Tree Encoder for Wave Union TDC in an FPGA" (Shen
et al.) describes it: delay line with launcher, sampling registers, encoder, a
recorder that stores 16 consecutive fine times per hit, a shared coarse
counter and a readout FIFO per channel. The delay line itself is physical
and is given as a behavioural simulation model.

## Signal chain

```
            +-------------------+   taps    +----------+  raw   +---------------------------+
 hit[c] --->| wu_delay_line     |---------->| sampling |------->| ifte                      |
            | launcher + 276    |  276 bit  | flip-    | 276 bit|  nt2onc  -> on2bcc        |
            | taps (behavioural)|           | flops    |        |  (1 clk)    (8 clk)       |
            +-------------------+           +----------+        +---------------------------+
                                                                    | fine[8:0], valid
                                                                    v
 coarse_counter (shared) --- coarse[20:0] ------------------> hit_recorder --> sync_fifo --> rd_*
```

`wu_tdc` holds one `coarse_counter` and two `wu_tdc_channel`s; each channel
holds everything else in the picture.

## What the sampled delay line looks like

Tap 0 is next to the launcher. The launcher output is a square wave started
by a rising edge, so a rising edge that has reached tap `e` reads, from the
top tap down, as `…000111…` with `I[e] = 1` and `I[e+1] = 0`. That 1-0
position is the *valid edge*; its index is the fine time (how long ago, in tap
delays, the edge left the launcher).

Three delays are arranged so that a sample holds at most one valid edge:

    T_OSC (launcher period) > T_TDL (whole line) > T_CLK (clock period)

With the defaults, 9491 ps > 276 × 31 ps = 8556 ps > 8333 ps. The line is
longer than a clock period so no part of the period is missed; the oscillator
period is longer than the line so two rising edges never sit in it at once.
This leaves four shapes a sample can take:

| pattern | raw code, tap N-1 … tap 0 | valid edge | encoder output |
|---|---|---|---|
| 1 | `00…0011…11` | top of the ones | its index |
| 2 | `0…01…10…0`  | top of the ones | its index |
| 3 | `11…1100…00` | none (only a falling edge inside) | 275, the "no edge" flag |
| 4 | `1…10…01…1`  | top of the lower ones | its index |

Pattern 3 gives 275 because the edge detector wraps round from the top tap to
tap 0 (next section): the ones at the top followed by the zeros at the bottom
look like an edge at tap 275. A fine time of 275 lies beyond one clock period
(268 bins), so it can never be a real measurement and serves as a flag.

## Stage 1: edge detection with bubble suppression (`nt2onc`)

For every tap

    H[i] = I[i] & ~I[i+1] & ~I[i+2] & ~I[i+3]       (indices modulo 276)

followed by a flip-flop. Looking for `0001` instead of `01` is what suppresses
bubbles: a bubble is a zero or two wrongly inside the run of ones just below
the edge, `0000101111` or `0000100111` instead of `0000111111`. A plain
`01` detector would fire twice there; the 4-bit detector fires only at the
real edge, because below the bubble the next three taps are not all zero.
Bubbles of three or more bits are not suppressed.

Consequence of the wrap-round: a pattern-1 edge in the top three taps
(index ≥ 273) is not detected, because the detector then sees the ones at
taps 0–2. With the default timing this cannot happen: the run of ones below
such an edge would span 273 taps (8.5 ns), longer than the launcher's high
time of 4.7 ns. Pattern-2 edges that high are detected, because taps 0–2 are
then low.

## Stage 2: the pipelined fat tree (`on2bcc`)

The one-out-of-N code (widened with zeros to N = 512 = 2^9) is encoded by two
sets of OR trees.

**Basic tree.** Pairs are ORed level by level, with a register after every
2-input OR:

    TP(0,i) = H[i]
    TP(k,i) = TP(k-1,2i) | TP(k-1,2i+1)         k = 1 … n-1, registered

`TP(k,i)` is 1 when the single 1 of H lies in the block of indices
`[i·2^k, (i+1)·2^k)`. Its odd nodes `OR(k,i) = TP(k,2i+1)` are the upper
halves of the blocks of size 2^(k+1), that is, exactly the places where bit k
of the index is 1.

**Output bit trees.** Bit k of the binary code is therefore the OR of all
`OR(k,i)`, i < N/2^(k+1). These wide ORs are built from 4-input ORs (one FPGA
look-up table each) with a register after every level (`or_tree_pipe`).

**Equal latency.** The MSB is `B[n-1] = TP(n-1,1)` itself and is ready after
the n-1 registers of the basic tree. Bit k needs k basic-tree levels plus
ceil(log4(N/2^(k+1))) output-tree levels, never more than n-1, and gets the
missing registers after its last level. For n = 9:

| bit k | OR(k,i) inputs | basic-tree regs | 4-input levels | padding regs | latency |
|---|---|---|---|---|---|
| 0 | 256 | 0 | 4 | 4 | 8 |
| 1 | 128 | 1 | 4 | 3 | 8 |
| 2 | 64  | 2 | 3 | 3 | 8 |
| 3 | 32  | 3 | 3 | 2 | 8 |
| 4 | 16  | 4 | 2 | 2 | 8 |
| 5 | 8   | 5 | 2 | 1 | 8 |
| 6 | 4   | 6 | 1 | 1 | 8 |
| 7 | 2   | 7 | 1 | 0 | 8 |
| 8 | 1   | 8 | 0 | 0 | 8 |

Why pipeline at all: in an ASIC the fat tree is laid out by hand so that all
paths are equally fast; in an FPGA routing delays are unpredictable, and a
register after every gate limits every path to one gate plus its routing, so
the tools meet timing without hand placement.

**valid.** The last OR of the basic tree, `TP(n-1,0) | TP(n-1,1)`, is 1 when H
held any 1. It tells the index 0 from "nothing at all" (an idle, all-zero
line) and is used by the recorder to see a hit.

If H held several 1s (a bubble of three bits or more), the output is the OR of
their indices; nothing flags this.

`ifte` joins the two stages: `raw` in, `fine` and `valid` out 9 clocks later
(1 + 8), one code per clock.

## Recording a hit (`hit_recorder`, `sync_fifo`, `coarse_counter`)

The recorder waits until the encoder has reported an empty line (valid low)
for 11 consecutive clocks; it is then armed. The first clock with valid high
is the start of a hit: that fine time and those of the next 15 clocks (K = 16
words) are written to the FIFO, whether or not each cycle held an edge. Then
it waits for the line to go quiet again, so the rest of the oscillation is
ignored. After reset it starts in the waiting state, which also flushes the
encoder pipeline (its registers have no reset).

Each FIFO word (32 bits, `wu_tdc_pkg::tdc_word_t`):

| bits | field | meaning |
|---|---|---|
| 31 | first | first word of a hit |
| 30 | valid | the encoder saw an edge or the no-edge flag |
| 29:9 | coarse | coarse count when the word was written |
| 8:0 | fine | tap index of the edge; 275 = no edge in this sample |

The sample behind a word was taken at the clock edge whose coarse count is
`coarse - 10` (1 sampling + 9 encoder clocks). The launcher edge it caught
left the launcher at

    t = (coarse - 10) · T_CLK - fine · T_TAP

The first word gives the hit time. Successive words of one hit catch
successive launcher edges, `T_OSC` apart; the period can be rebuilt from two
words with real edges where the fine time dropped (a new edge) as
`T_OSC = (fine_i - fine_(i+1)) · T_TAP + T_CLK`. Averaging the hit times
derived from several edges of one hit is the wave union gain; it is left to
whatever reads the FIFO.

A word that meets a full FIFO is dropped and sets the channel's sticky
`overflow` flag; the recorder keeps its 16-cycle window, so a hit may lose
some or all of its words. The FIFO is first-word-fall-through: `rd_data` is
valid while `empty` is low and `rd_en` pops it.

## The delay line model (`wu_delay_line`)

Not synthesizable. While `hit` is high the launcher is a 50 % square wave of
period `TOSC_PS` starting with a rising edge; tap i carries it delayed by
`i · TAP_PS`. When `hit` falls the launcher stops at 0 and the line drains.
Tap values are recomputed every `STEP_PS` (one tap delay), so edge positions
are quantised to about one tap. `BUBBLE_PCT` clears one or two taps just
below each rising front in that percentage of updates, to exercise bubble
suppression. All cells have the same delay and there is no jitter, so the
model shows that the logic encodes correctly; it says nothing about the
precision or bin widths of real silicon. For a real FPGA replace this module
by the carry chain; everything else in the channel is synthesizable.

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `RAW_W` / `N_TAPS` | 276 | pkg, `ifte`, `nt2onc`, channel | published |
| `ENC_LOG2` / `NLOG` | 9 (N = 512) | pkg, `on2bcc`, `ifte` | published |
| `K_CYCLES` / `K` | 16 | pkg, `hit_recorder` | published |
| `NUM_CH` / `NCH` | 2 | pkg, `wu_tdc` | published |
| `TAP_PS` | 31 | model | published mean bin (8333 ps / 268) |
| `TOSC_PS` | 9491 | model | published measured period |
| `COARSE_W` | 21 | pkg | own choice |
| `FIFO_DEPTH` | 256 | channel, `wu_tdc` | own choice |
| `QUIET` | 11 | `hit_recorder` | own choice |
| `BUBBLE_PCT` | 10 in `wu_tdc`, 0 in the model | model | own choice |
| clock | 8333 ps | testbenches | published (120 MHz) |

`on2bcc` and `ifte` work for any `NLOG` ≥ 2 and `RAW_W` ≤ 2^NLOG; the word
layout in the package fixes the channel to a 9-bit fine time.

## Files

| file | content |
|---|---|
| `rtl/wu_tdc_pkg.sv` | sizes and the FIFO word type |
| `rtl/nt2onc.sv` | stage 1 |
| `rtl/or_tree_pipe.sv` | pipelined 4-input OR tree with latency padding |
| `rtl/on2bcc.sv` | stage 2, the fat tree |
| `rtl/ifte.sv` | the two-stage encoder |
| `rtl/coarse_counter.sv`, `rtl/hit_recorder.sv`, `rtl/sync_fifo.sv` | recording and readout |
| `rtl/wu_delay_line.sv` | behavioural delay line with launcher |
| `rtl/wu_tdc_channel.sv`, `rtl/wu_tdc.sv` | one channel, the two-channel top |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_pattern_pkg.sv` builds the four tap patterns with bubbles |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
(a watchdog ends a hung run as a failure). With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_wu_tdc \
  -y rtl -y tb +libext+.sv rtl/wu_tdc_pkg.sv tb/tb_pattern_pkg.sv tb/tb_wu_tdc.sv
./obj_dir/Vtb_wu_tdc
```

Replace `tb_wu_tdc` by any other testbench name. What they check:

* `tb_nt2onc`, `tb_ifte` – the full 276-bit width with random patterns of all
  four kinds, with and without one- and two-bit bubbles; expected indices come
  from how the pattern was built. `tb_ifte` also checks the 9-clock latency.
* `tb_on2bcc` – all 512 indices and random ones, one per clock, value and
  8-clock latency.
* `tb_hit_recorder`, `tb_sync_fifo`, `tb_coarse_counter` – against queue and
  counter models, including full/empty, overflow and wrap.
* `tb_wu_delay_line` – the model against the closed-form travelling wave.
* `tb_wu_tdc_channel` – one channel with 30 % bubbles.
* `tb_wu_tdc` – the whole design at its default parameters (about 1 s):
  40 hits into both channels with a 3217 ps cable delay between them. Every
  word is checked exactly against a reference scan of its tap sample and
  within 2 taps against the launcher position; the rebuilt hit times, the
  channel-to-channel interval and the mean launcher period (about 9490 ps) are
  checked; reading is stalled to force FIFO overflow. It fails unless all four
  patterns, bubbles, the no-edge flag, ignored late edges and overflow occur.
* `tb_wu_tdc_workloads` – the two measurements of the original evaluation on
  the default design (about 6 s). 200 hits at random clock phases; the launcher
  period rebuilt from successive fine times (every value must be within two
  taps of the model's period; a run gives a mean of 9490.9 ps), and the cable
  delay test with the hit time averaged over the first 1, 4 and 8 launcher
  edges of each hit. With the ideal uniform line of the model the only error is
  bin quantisation; a run gives a per-channel RMS of about 11.8, 4.7 and 2.8 ps
  for 1, 4 and 8 edges, which shows the wave union gain but not the silicon
  figures (14.3 ps and 7.7 ps for 1 and 8 edges on the original board).
  The averaging used there, `t = edge_time - fine·T_TAP - m·T_OSC` over edges
  m = 0…M-1, lives in the testbench, not in the RTL.

## How far to trust it, and where it departs from the paper

* The encoder equations, the 4-input AND detector, the register after every
  basic-tree OR, the 4-input output trees and the equal-latency padding follow
  the paper. The paper's drawing of the 16-input example shows padding that
  does not give equal latencies under its own equations (three registers on
  bits 2, 1 and 0, none on bit 3); this RTL follows the text and computes the
  padding per bit, as in the table above. The example values printed in that
  drawing (H[10] = 1 giving `0010`) are inconsistent with the equations and
  are not used.
* Register placement is checked only by simulation; whether it closes timing
  at 120 MHz in a given FPGA is not checked here.
* The `valid` output, the recorder's arming rule, the word layout, the FIFO,
  the coarse counter width and overflow handling are this design's choices:
  the paper names the FIFO and the counter and says that K = 16 cycles are
  recorded after a valid hit, nothing more.
* The paper writes the period formula as `t_(i+1) - t_i + T_CLK`. With the
  fine time defined as here (edge position counted from the launcher) the
  sign is reversed, `t_i - t_(i+1) + T_CLK`; the paper's form holds if fine
  times are counted the other way.
* The launcher's internal structure (the multiplexer and feedback in the
  paper's block diagram), how it stops, and the combination of 4 or 8 edges
  into one measurement are not specified in enough detail and are not built
  as logic; the model only reproduces what the taps show.
* The PXI readout of the original evaluation board is not part of the design;
  the FIFO read ports stand in for it.
