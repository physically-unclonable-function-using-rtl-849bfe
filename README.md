# Waveform ring-oscillator PUF (wRO-PUF)

A physically unclonable function gives each chip an ID that nobody has to
program. Instead, the ID comes from random manufacturing variation. A classic
ring-oscillator PUF (RO-PUF) gets one bit per pair of oscillators: it compares
their frequencies with two counters. A 128-bit ID then needs hundreds of
oscillators and thousands of clock cycles.

The waveform RO-PUF gets a whole word from a single pair of oscillators, and it
does so within one or two system-clock cycles. Both oscillators start from 0
when an enable rises. RO2 clocks a chain of flip-flops, and the chain samples
RO1. So the chain records RO1's start-up waveform, seen at RO2's rate of about
1 GHz. The recorded bit pattern depends on how the two periods and start-up
delays of one chip relate to each other. A row of flip-flops on the ordinary
system clock then copies the chain and presents the bits as the ID.

This repository holds SystemVerilog for that circuit. The two rings are
behavioural models. The flip-flop rows are synthesizable. Self-checking
testbenches compare every captured word with an independent, closed-form
prediction.

## How a pair of oscillators turns into bits

Let RO1 have period t1 and RO2 have period t2. Both rest at 0 while `en` is
low. After `en` rises, each one stays at 0 for its start-up delay and then
toggles every half period. The k-th rising edge of RO2 stores RO1's value at
that moment into the chain.

* **First bit.** If RO1 is slower (t1 > t2), RO2 rises first and samples a 0.
  If RO1 is faster, RO2 samples a 1. On its own, this bit is what a classic
  RO-PUF measures.
* **Following bits.** Every sample lands a little later in RO1's cycle than the
  sample before it. The sampling point therefore walks through RO1's waveform
  and comes back to the same phase after about t1/|t1 - t2| samples. The sample
  stream is a square wave with that beat period. For example, t1/t2 = 1.2 gives
  runs of about three equal bits. A ratio of 1.1 gives runs of five or six.
  Over a 16-bit word, you see about 2·15·|t1 - t2|/t1 changes between
  neighbouring bits.
* **Why this is unique.** Both the first bit and the beat phase depend on the
  absolute start-up delays and on the ratio of the periods. A small shift in
  either one moves the bit boundaries in the word. This analog detail is what
  lets one pair produce more than one bit.

The hardware only samples. It does not compare, count or decide anything, so
the whole circuit is two rings and two rows of flip-flops.

## The reading circuit

```
            +------ RO2 (sampling clock) -------------------------+
            |            |            |                   |
   RO1 --> [FF0] ----> [FF1] ----> [FF2] --> ... --> [FF15]       sampling chain
             |           |           |                   |        (sample_shift_reg)
           [C0]        [C1]        [C2]      ...       [C15]      capture row, system clock
             |           |           |                   |        (id_capture_reg)
           out0        out1        out2               out15
```

* `sample_shift_reg`: `ID_BITS` flip-flops on RO2. The first one samples RO1.
  Each of the others takes the Q output of the one before it. After every RO2
  edge, `taps[0]` is the newest sample and `taps[ID_BITS-1]` the oldest.
* `id_capture_reg`: `ID_BITS` flip-flops on the system clock `clk`. They copy
  all taps on every rising `clk` edge. Bit i of the output is out*i*.
* `wro_puf_unit`: one pair, made of RO1, RO2, the chain and the capture row.
* `wro_puf_top`: `N_PAIRS` units that share `en` and `clk`. The word of pair p
  is in `id[p*ID_BITS +: ID_BITS]`.

The capture row is where the ~1 GHz RO2 domain meets the system clock. There
is deliberately no synchroniser. A tap that changes close to a `clk` edge can
be captured either way, and on silicon this adds to the bit noise of the PUF.
The testbenches place the edges so that this never happens in simulation.

## Timing and how to read an ID

At the defaults, RO1 has t1 = 1000 ps and RO2 has t2 = 910 ps, with
`clk` = 100 MHz. The chain then holds 16 samples of the current run
16 × 0.91 ns ≈ 14.6 ns after `en` rises. That is at the second `clk` edge.
From then on, every `clk` cycle gives a fresh 16-bit word per pair. The words
overlap by about 5 bits, because only about 11 RO2 periods fit into one clock
period. A 128-bit ID is read as 8 consecutive words from one pair (8 clocks
after the fill clock), or as 4 words each from two pairs (`N_PAIRS = 2`,
4 rings and 64 flip-flops). A classic counter-based RO-PUF needs on the order
of 2000 clock cycles for 128 bits.

A measurement goes like this:

1. Pulse `rst_n` low once after power-up.
2. Raise `en`, preferably at a fixed phase of `clk` so that repeated
   measurements line up.
3. Throw away the words captured before the chain is full. Those words still
   hold zeros or bits left over from the previous run. At the defaults, this
   means the first capture after `en`.
4. Collect as many full words as the ID needs.
5. Drop `en`. The rings stop within half a period and return to 0. The chain
   holds its contents, and one more `clk` edge copies the final chain into
   `id`.

To get the same ID again, raise `en` again. You do not need a reset, because
one full chain length of new samples replaces all old bits.

On real silicon, measurements of the same chip disagree in a few bits
(noise and supply voltage both change the periods). The usual approach is to
take the most frequent pattern over many runs, and an error-correcting code can
be layered on top. Neither is part of this RTL.

## The ring-oscillator model

`ring_osc` is a behavioural model and cannot be synthesized. A real ring is a
short loop of standard cells, and its period comes from process variation,
which logic cannot express. The model has two parameters:

* `HALF_PERIOD_PS`: half of the oscillation period.
* `FIRST_RISE_PS`: the delay from `en` rising to the first rising edge.
  The default is one half period.

Behaviour:

* The output is 0 while `en` is low.
* When `en` rises, the output rises after `FIRST_RISE_PS` and then toggles
  every `HALF_PERIOD_PS`.
* When `en` falls, the model finishes the current half period and drives 0.

To model different chips or different pairs, give each instance its own
numbers. In `wro_puf_top`, pair p gets the base half periods plus
p × `RO1_PAIR_STEP_PS` / `RO2_PAIR_STEP_PS`. With the defaults, pair 0 has
t1 > t2 and pair 1 has t1 < t2. The model is free of noise, so repeated runs
give identical words.

For synthesis, replace `ring_osc` with a hand-placed ring of cells. The
flip-flop rows should be placed close to the rings, because long or noisy
wiring between the rings and the chain degrades the PUF.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| all | `ID_BITS` | 16 | flip-flops per row, bits per word |
| `wro_puf_top` | `N_PAIRS` | 1 | number of RO pairs |
| `wro_puf_top`, `wro_puf_unit` | `RO1_HALF_PS` | 500 | RO1 half period (t1 = 1 ns, ~1 GHz) |
| `wro_puf_top`, `wro_puf_unit` | `RO2_HALF_PS` | 455 | RO2 half period (t1/t2 ≈ 1.1) |
| `wro_puf_unit` | `RO1_FIRST_PS`, `RO2_FIRST_PS` | one half period | start-up delay to the first rising edge |
| `wro_puf_top` | `RO1_PAIR_STEP_PS`, `RO2_PAIR_STEP_PS` | -31, 17 | per-pair timing spread |

The shared defaults are in `rtl/wro_puf_pkg.sv`.

## What follows the published circuit and what is this design's own choice

These parts follow the published circuit:

* Two rings on a common enable, both starting from 0.
* RO2 clocks a 16-stage chain that samples RO1, and every stage is tapped.
* A 16-bit capture row on the system clock, with outputs out0 to out15.
* RO1 at about 1 GHz and a 50–100 MHz system clock.
* One pair as the measured configuration, and two pairs for a 128-bit ID.

These are this design's own choices:

* The RO2 period (910 ps) and the per-pair spread.
* The start-up delay equal to one half period.
* How the model stops when `en` falls.
* Sampling and capture on rising edges.
* The asynchronous active-low reset on both rows. It exists so that an unfilled
  chain reads as zeros instead of stale state.

One point of the published material is inconsistent. It gives one pair for the
uncoupled chips in one place and two pairs for a 32-bit ID in another. The
default here is one pair, the circuit shown for the reading unit, and
`N_PAIRS` covers the other case.

These parts are not included:

* The variants in which the two rings are coupled, either by a cross-coupled
  inverter loop or capacitively through an extra gate. They were found worse:
  the first gave fixed outputs, and the second had poor reproducibility.
* The (31, 16, 7) BCH error correction used when evaluating the IDs.
* Supply-voltage monitoring, ID correction and the voltage regulator. They are
  only suggested as remedies for the ID's dependence on the supply voltage.
* Pads.
* Anything that models noise, temperature or supply dependence. On silicon,
  the ID drifts as the supply voltage moves away from its nominal value.
* Timing variation of the sampling flip-flops themselves. On silicon it
  also shapes the response, because the flip-flops sample signals near 1 GHz.

## Verification

All testbenches print `TB_RESULT checks=N failures=M` and stop themselves
through a watchdog if they hang.

| Testbench | What it checks |
|---|---|
| `tb_ring_osc` | Every edge of the model lands on the closed-form time grid. The rest value is 0. The first rise comes after `FIRST_RISE_PS`. The model stops within half a period. It restarts correctly. |
| `tb_sample_shift_reg` | The chain against its own history model, using an irregular clock and random data. It holds while the clock is low or stopped. The asynchronous reset works. |
| `tb_id_capture_reg` | The taps change several times per clock. The output must equal the taps at each rising edge and hold between edges. The reset works. |
| `tb_wro_puf_unit` | Three pairs side by side: t1/t2 = 1.2, t1/t2 ≈ 1.1, and t1 < t2. Every word is compared with the reference. The first sample is 0 or 1 according to t1 vs t2. The number of bit changes in a full word matches the beat period. The chain is full by the second clock edge. |
| `tb_wro_puf_top` | Two pairs over five runs. Words are compared with the reference. The testbench counts restarts, both first-sample polarities, filling and full captures, repeated identical 128-bit IDs, and holding while stopped. Each of these must happen at least once. |
| `tb_wro_puf_full` | The same end-to-end test on `wro_puf_top` at its default parameters. |
| `tb_wro_puf_eval` | Ten modelled chips, each with its own ring timings, measured 20 times. Every ID is checked against the reference. The testbench computes uniformity, reliability and uniqueness, and requires that the noise-free model be fully reliable and that no two chips share an ID. |

The figures of merit in `tb_wro_puf_eval` use the usual definitions. Let L be
the ID length and R_i the most frequent ID of chip i. Then:

* uniformity is the mean fraction of ones in an ID;
* reliability of chip i is 1 minus the mean Hamming distance between R_i and
  each of its measurements, divided by L;
* uniqueness is the mean Hamming distance between R_i and R_j over all chip
  pairs, divided by L.

For the chosen timing spread, this population reaches about 58 % uniformity,
100 % reliability and 50 % uniqueness. The model has no noise, which is why
reliability is perfect, and these numbers say nothing about silicon. The
measured chips were reported at roughly 39 %, 94 % and 49 %.

The reference is `tb/tb_wro_ref_pkg.sv`. It computes the value of RO1 at every
RO2 rising edge in closed form and never simulates the rings. It also counts
coincident edges, which would make a simulation race, and every testbench
requires that count to be zero.

Build and run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb \
    rtl/wro_puf_pkg.sv tb/tb_wro_ref_pkg.sv tb/tb_wro_puf_full.sv \
    --top-module tb_wro_puf_full
./obj_dir/Vtb_wro_puf_full
```

For another testbench, replace the last file and the top-module name. The
testbenches need `--timing`, because the ring model and the stimulus use
delays. `-Wno-fatal` keeps warnings from stopping the build. The only remaining
warnings are about the random delays of the stimulus. Simulation uses
2-state values, so every flip-flop that is read gets reset first.

Synthesis sees only the flip-flop rows: 16 + 16 flip-flops per pair, with no
other logic. `ring_osc` has to be swapped for a physical ring before any module
above it can be synthesized.
