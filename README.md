# 16-channel wave union TDC: RTL

A time-to-digital converter (TDC) gives each incoming pulse a time tag with a
resolution far finer than one clock period. This design does it in FPGA fabric,
in the way of the wave union TDC described by B. A. Bryce and K. M. Marcotte in
"Low Power 16-channel Wave Union TDC in a Radiation Tolerant FPGA" (Lattice
CertusPro-NX). The design trades speed for low power and small area:

* A 200 MHz reference clock drives a plain counter. The counter gives the
  coarse time in 5 ns steps.
* Within one period, an event launches a multi-edge waveform (the *wave union*)
  into a 320-tap carry-chain delay line. The next reference clock edge freezes
  the line.
* A small sequential encoder on a 100 MHz clock reads the frozen line 8 bits at
  a time and turns it into a fine code. It takes at most 42 cycles, so one
  channel handles about 2 million events per second. That is far below the
  200 MHz limit of a one-cycle encoder, but enough for particle instruments,
  and it keeps the encoder small.

The top level holds 16 such channels. They share one coarse counter, so tags
from different channels can be subtracted directly, which is how
time-of-flight is measured.

This RTL is an independent rendering of the design from its published
description. It is not the authors' code. Where the description is silent, the
choices are this design's own, and they are listed in
[What is from the source and what is chosen here](#what-is-from-the-source-and-what-is-chosen-here).

## One measurement, step by step

```
hit_pad ─┐
         ├─ MUX ─ LATCH ──┬─ launcher ─ main delay line (320 taps) ─┐
alt_clk ─┘  cal_sel   ▲   │                                          │ taps
                      │   └─ enable flop (clk_ref) ── En̅ ─ capture register (clk_ref)
                     arm                                             │ snap (frozen)
                      │                        ┌─────────────────────┴───────────────┐
                      │                 ones side (from tap 0)        zeros side (from tap 319)
                      │                 controller, comb/chunk MUX,   controller, comb/chunk MUX,
                      │                 8-bit run encoder, accum.     8-bit run encoder, accum.
                      │                        └──────────── + ──────────────────────┘
                      └──────── encoder controller ── {coarse, fine} ── FIFO ── rd port
```

1. **Arm.** The latch is clear and the capture register samples the line on
   every `clk_ref` edge. Nothing is recorded.
2. **Event.** A rising edge on `hit_pad` (or on `alt_clk` when `cal_sel` is
   set) sets the latch (`wu_input_latch`). Its output, `launch`, goes into the
   launcher. The launcher starts a waveform with several edges at fixed
   spacing down the line (`wu_delay_line`).
3. **Stop.** At the next `clk_ref` edge the enable flop takes `launch`, and the
   register takes its last sample: that sample shows where the edges had got
   to. After that edge the flop's output (`frozen`) disables the register.
   The same edge freezes the coarse count (`wu_capture_reg`). The stored count
   is the counter value during the period in which the event arrived.
4. **Encode.** The encoder controller (`wu_fine_encoder`) sees `frozen`
   through a two-flop synchroniser. It then starts the two edge encoders
   (`wu_edge_encoder`), which run side by side for up to 40 cycles. Then it
   adds their counts (one cycle) and writes `{coarse, fine}` to the channel
   FIFO (one cycle).
5. **Re-arm.** The controller raises `arm`. That clears the latch and the
   enable flop. It holds `arm` until it has seen `frozen` fall, then drops it,
   and the channel is ready again. Events that arrive from step 2 until here
   are lost. This dead time is about 47 encoder cycles, below 0.5 µs.

## The encoder: combs, chunks and the cycle budget

The hardest part of the design to follow is how the encoder finds edges
without a 320-bit priority encoder.

**Combs against bubbles.** Near a transition, the sampled line can show
*bubbles*: for example `…1 1 0 1 0 0…`, where a tap that the edge has passed
reads wrong. So the 320 taps are split into 4 interleaved combs (segments):
comb *s* holds taps *s*, *s*+4, *s*+8, … (80 taps). Neighbouring taps of one
comb are 4 taps apart in the line, so a bubble one or two taps wide near an
edge cannot break a comb's run. Each comb is read on its own. Each comb's run
ends near the true edge, and the four runs add up to the edge position in taps.

**Chunks for a small encoder.** Each comb is cut into 10 chunks of 8 bits.
Take the ones side. Its controller starts at chunk 0 of comb 0, the end at tap
0, and feeds one chunk per cycle through a multiplexer to an 8-bit encoder.
That encoder gives the length of the run of ones at the chunk's start. If the
run is 8, the whole chunk is ones and the edge lies further on, so the
controller adds 8 and goes to the next chunk of the same comb. If the run is
shorter, the edge is in this chunk, so it adds the run and goes to comb 1. The
zeros side does the same from tap 319, counting zeros. It is the same logic on
the inverted, reversed line.

**Budget.** One side needs one cycle for each chunk it visits, up to and
including the chunk that holds the edge. That is between 4 (edges within the
first 8 taps of every comb) and 4 × 10 = 40 cycles. The two sides run in
parallel, and add and store take 2 more cycles, so an event takes at most
N·M + K = 4·10 + 2 = **42 encoder cycles** (420 ns at 100 MHz).
The worst case comes when one side's run covers its whole line, for example
an event a few picoseconds before the clock edge, when the line is still all
zeros.

Example: the line is frozen 237 ps after an event, with 20 ps taps and the
waveform of the delay line model (rise, fall at 200 ps, rise at 400 ps).
Taps 1–10 read 1, and every other tap reads 0. Ones side: comb 0 starts with
tap 0 = 0, so its run is 0. Comb 1 has taps 1, 5, 9 set, so 3. Comb 2 has
2, 6, 10, so 3. Comb 3 has 3, 7, so 2. The sum is 8, after 4 cycles. Zeros side: the runs
from the far end are 77, 77, 77 and 78, so 309, after 4 × 10 = 40 cycles.
fine = 317, and the record is written 42 cycles after the start.

## The fine code, and a point the source leaves open

The source defines the fine code as the sum of two lengths: the run of *ones*
counted from the left-hand end of the line (tap 0, the launcher end) and the
run of *zeros* counted from the right-hand end. The RTL does exactly that
(`ev.fine = ones_cnt + zeros_cnt`, 10 bits).

Be aware of what this implies. Suppose two edges of the wave union move down
the line together. The ones run from the left grows with the event-to-clock
time, and the zeros run from the right shrinks at the same rate. So their sum
changes only through tap non-uniformity and where the gap between edges sits.
The source gives no launcher waveform, tap mapping or sign convention that
would settle how its sum becomes a monotonic time. The RTL keeps the stated
definition and does not guess a different one. If your launcher and tap
ordering call for the usual wave union code (the sum of the two edge
*positions*), change one line in `wu_fine_encoder`: use
`ones_cnt + (N_TAPS - zeros_cnt)`. The encoders, their cycle budget and all
the other logic stay the same.

Turning codes into picoseconds is done outside this RTL, in either of two
ways. One uses a delay generator locked to the reference clock. The other
builds a *code density* histogram from events that fall uniformly within the
period, from `alt_clk`, a clock uncorrelated with the reference clock. Each
code's width is proportional to its count. `cal_sel` routes `alt_clk` to one
channel for this. Histogramming and the code-to-time table belong to the
post-processing, and are not part of this RTL.

## Time tags and read-out

A record is `wu_tdc_pkg::tdc_event_t`, packed as `{coarse[31:0], fine[9:0]}`.

* `coarse`: the shared counter value while the event arrived, counting 5 ns
  periods from reset and wrapping after about 21 s.
* `fine`: the encoder code above. It is 10 bits wide; a 320-tap line gives at
  most 640.

Each channel has a 16-deep first-word-fall-through FIFO on `clk_enc`.
`rd_data[c]` shows the oldest record whenever `rd_empty[c]` is low, and
`rd_en[c]` pops it. If the FIFO is full, a new record is dropped and counted in
`drops[c]`, which saturates at 65535. `rd_full`, `rd_level` and `busy` (the
channel is encoding or re-arming) are brought out too.

## Clocks and reset

| clock | frequency | clocks |
|---|---|---|
| `clk_ref` | 200 MHz, external low-jitter oscillator, no PLL | coarse counter, capture register, enable flop |
| `clk_enc` | 100 MHz, edge-aligned with `clk_ref` | encoder, FIFO, read ports |
| event/`alt_clk` | asynchronous | input latch |

`frozen` crosses from `clk_ref` to `clk_enc` through a two-flop synchroniser.
The tap snapshot and the coarse tag do not need one, because they hold still
while `frozen` is high. `arm` is a registered `clk_enc` signal and drives
asynchronous clears in the `clk_ref` domain. `rst` is synchronous to `clk_enc`
and must be held for at least two `clk_enc` cycles. During reset, `arm`
toggles, so that the latch and the enable flop are cleared whatever state they
power up in.

Lint reports `SYNCASYNCNET` on `launch` and on the taps. This is inherent in a
TDC: the asynchronous event is sampled by reference clock flops, and
metastability there is part of the measurement.

## The delay line model

`wu_delay_line` is a behavioural model, not synthesizable. The real line is
placed CCU2 carry logic: 23 cells form the launcher and 137 the main line, with
two taps per cell. Each tap is a transport delay of `TAP_PS` (default 20 ps,
so the 320 taps cover 6.4 ns, more than one 5 ns period). The launcher turns
the rising edge of `launch` into rise → fall after `WU_FALL_PS` (200 ps) →
rise after `WU_RISE_PS` (400 ps). When `launch` is cleared, a single falling
edge sweeps the line back to zero. The model's taps are uniform and free of
bubbles. Real carry chains are not, which is why the encoder uses combs and the
system needs calibration. Bubbles are tested directly in the encoder
testbenches. On an FPGA, replace this module with the placed carry chain and
keep its ports.

## What is from the source and what is chosen here

From the source: 16 channels; a 200 MHz reference clock and a counter for the
coarse time; the input multiplexer (pad or calibration clock) and launch latch
with reset/arm; a launcher plus main line giving 320 taps; the parallel
register, disabled by a reference-clocked enable flop at the next edge; 4
interleaved combs of 10 chunks with an 8-bit chunk encoder; separate ones
(from the left) and zeros (from the right) sides, each with its controller,
multiplexer and accumulator; the fine code as the sum of the two; the 100 MHz
encoder and the worst case of N·M + K = 42 cycles; the controller re-arming the
channel; a FIFO of {fine, coarse} records.

Chosen here: how the latch is built (an event-clocked flop with an
asynchronous clear); the per-channel calibration select; the waveform and tap
delay of the line model; the 32-bit coarse counter, shared by all channels; the
10-bit fine code; the synchroniser and the arm/frozen handshake; the two sides
running in parallel, with K split into one add and one store cycle; the FIFO
depth (16), read protocol and drop counter; taking `clk_enc` as an input.

Measured against the source. The source quotes 2.3 million events per second
from the 42-cycle budget alone. This RTL adds synchronisation and re-arm
cycles. Its measured dead time is at most 475 ns, about 2.1 million events per
second, still well above the 1 million events per second the design aims for.

## Files

| file | contents |
|---|---|
| `rtl/wu_tdc_pkg.sv` | sizes (320 taps, 4 × 10 × 8 encoder, 16 channels) and the record type |
| `rtl/wu_input_latch.sv` | source multiplexer and launch latch |
| `rtl/wu_delay_line.sv` | behavioural launcher and tapped delay line |
| `rtl/wu_capture_reg.sv` | freezing register, enable flop, coarse tag |
| `rtl/wu_coarse_counter.sv` | free-running coarse counter |
| `rtl/wu_edge_encoder.sv` | one side of the encoder: comb/chunk scan and accumulation |
| `rtl/wu_fine_encoder.sv` | both sides, the sum, the store and re-arm sequence |
| `rtl/wu_event_fifo.sv` | per-channel record FIFO |
| `rtl/wu_tdc_channel.sv` | one complete channel |
| `rtl/wu_tdc_top.sv` | 16 channels and the shared counter |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a run that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_wu_tdc_top -y rtl -y tb +libext+.sv -Irtl \
  rtl/wu_tdc_pkg.sv tb/tb_wu_tdc_top.sv
./obj_dir/Vtb_wu_tdc_top
```

Replace `tb_wu_tdc_top` with any other testbench. The package must come first
on the command line. The full 16-channel build takes a few minutes, because of
the 5120 delay-line processes. The run takes well under a minute.

What the testbenches check:

* `tb_wu_edge_encoder` runs clean edges at every position, wave-union
  patterns with bubbles, random words, and all-ones and all-zeros lines. For
  each side it checks the count and the exact cycle count against a
  loop-based reference, and it checks that the 40-cycle worst case is reached.
* `tb_wu_fine_encoder` checks the fine code, the coarse pass-through and the
  latency (the larger side's chunk count + 2, at most 42, with 42 reached). It
  also checks the one-cycle strobe and the arm/frozen handshake.
* `tb_wu_tdc_channel` checks events at chosen picosecond offsets against the
  tap pattern worked out from the line model. It also covers the calibration
  input, a second hit lost while busy, overflow of a 2-deep FIFO, and a dead
  time under 1 µs.
* `tb_wu_tdc_top` runs the whole design at its default size. It drives all 16
  channels, several of them within one period, and differential pairs 0.22 ns,
  333.46 ns and 666.68 ns apart (the separations of the source's examples).
  It also covers calibration on one channel while the others ignore `alt_clk`,
  a lost hit, FIFO overflow and the 42-cycle worst case, and it fails if any of
  these never happens.
* `tb_wu_input_latch`, `tb_wu_delay_line`, `tb_wu_capture_reg`,
  `tb_wu_coarse_counter` and `tb_wu_event_fifo` test those blocks on their own.

What is not verified: timing closure and placement on a real FPGA, real tap
non-uniformity, and the code-to-time relationship of real silicon.
