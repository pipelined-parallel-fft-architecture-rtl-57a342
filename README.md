# An 8-point pipelined FFT in the R2MDC form

This is a streaming 8-point Fast Fourier Transform. It takes one complex
sample per clock, in natural order, and never stalls. Every 8 clocks it
delivers the 8 frequency bins of one frame, two bins per clock on four
consecutive clocks, in bit-reversed order.

The structure is the **radix-2 multi-path delay commutator** (R2MDC). A
radix-2 decimation-in-frequency (DIF) FFT always combines two samples that
are a fixed distance apart: 4 in stage 1, 2 in stage 2, 1 in stage 3. A
sequential input delivers those samples on different clocks. R2MDC solves
this in a simple way:

- it splits the data into two streams that travel side by side;
- delay lines hold one stream back until its partner arrives;
- a 2x2 switch (the *commutator*) re-pairs the two streams between stages.

Each stage has one butterfly. The whole 8-point transform needs three
butterflies (three complex multipliers, so 12 real multipliers), ten
delay registers and three switches. The price of this simplicity is
utilisation: each butterfly works on only 4 of every 8 clocks.

The RTL is plain synthesizable SystemVerilog. Every module has a
self-checking testbench, and a top-level testbench checks the whole
pipeline bit for bit against an integer model.

## 1. The algorithm

The N-point DFT is `X(k) = sum_n x(n) W^(nk)`, with `W = exp(-j 2 pi / N)`.
A DIF FFT splits the *outputs* into even and odd bins:

```
X(2k)   = DFT_{N/2} of  g(n) = x(n) + x(n + N/2)
X(2k+1) = DFT_{N/2} of  h(n) = (x(n) - x(n + N/2)) * W_N^n        n = 0 .. N/2-1
```

It then repeats the split on each half. For N = 8 this gives three stages
of butterflies. Every butterfly maps a pair (a, b) to:

```
A = a + b
B = (a - b) * W8^k
```

The twiddle exponents are:

| stage | distance between a and b | twiddles used          |
|-------|--------------------------|------------------------|
| 1     | 4                        | W8^0, W8^1, W8^2, W8^3 |
| 2     | 2                        | W8^0, W8^2             |
| 3     | 1                        | W8^0                   |

Because the outputs are split rather than the inputs, they come out in
bit-reversed order: X(0), X(4), X(2), X(6), X(1), X(5), X(3), X(7).

## 2. The pipeline

```
            distributor
 din ──────►[ 1 → 2 ]──upper──►[4D]──────────────────────────►┐
                      └─lower─────────────────────────────────►┤ BF1  W8^0..3
                                                               │
   BF1.A ─────────────────────────►┌──────────┐──►[2D]────────►┐
   BF1.B ──►[2D]──────────────────►│ switch 2 │───────────────►┤ BF2  W8^0, W8^2
                                   └──────────┘                │
   BF2.A ─────────────────────────►┌──────────┐──►[1D]────────►┐
   BF2.B ──►[1D]──────────────────►│ switch 3 │───────────────►┤ BF3  W8^0
                                   └──────────┘                │
                                          BF3.A ─► stream 1 (oint1, oimg1)
                                          BF3.B ─► stream 2 (oint2, oimg2)
```

There are 4 + 2 + 2 + 1 + 1 = 10 delay registers. In each stage the
lower stream is delayed before the switch and the upper stream after it.
Each butterfly registers its outputs, which adds one clock per stage.

**Stage 1.** The distributor sends x(0)..x(3) of a frame into the 4-deep
delay line and lets x(4)..x(7) pass directly. On clocks 4..7 of the frame,
x(m) leaves the delay line just as x(m+4) arrives, and BF1 forms:

- g(m) = x(m) + x(m+4) on its upper output;
- h(m) = (x(m) - x(m+4)) W8^m on its lower output.

**Stage 2.** Stage 2 must pair g(0) with g(2), g(1) with g(3), h(0) with
h(2) and h(1) with h(3).
- The first two g values go straight into the upper 2-deep delay.
- The switch then crosses, for two clocks. g(2) and g(3) go straight to
  BF2, where g(0) and g(1) are waiting. At the same time h(0) and h(1),
  which were held back by the lower 2D line, go into the upper delay.
- The switch then returns to straight, and h(2) and h(3) meet h(0) and
  h(1).

**Stage 3.** Stage 3 does the same with distance 1. Its switch toggles on
every clock.

### Schedule of one frame

Clock t counts from the clock on which x(0) enters. The next frame starts
at t = 8 and overlaps with the tail of this one. Here u1/l1 and u2/l2 are
the upper/lower outputs of BF1 and BF2, indexed in the order they leave.

| t  | input | BF1 pair, twiddle | BF1 out  | switch 2 | BF2 pair, twiddle | switch 3 | BF3 pair     | outputs (stream 1, stream 2) |
|----|-------|-------------------|----------|----------|-------------------|----------|--------------|------------------------------|
| 0-3| x(t) → 4D | -             |          |          |                   |          |              |                              |
| 4  | x(4)  | x0, x4  W^0       |          |          |                   |          |              |                              |
| 5  | x(5)  | x1, x5  W^1       | u1(0), l1(0) | straight |               |          |              |                              |
| 6  | x(6)  | x2, x6  W^2       | u1(1), l1(1) | straight |               |          |              |                              |
| 7  | x(7)  | x3, x7  W^3       | u1(2), l1(2) | cross | u1(0), u1(2)  W^0 |          |              |                              |
| 8  | next  |                   | u1(3), l1(3) | cross | u1(1), u1(3)  W^2 | straight |              |                              |
| 9  |       |                   |          | straight | l1(0), l1(2)  W^0 | cross    | u2(0), u2(1) |                              |
| 10 |       |                   |          | straight | l1(1), l1(3)  W^2 | straight | l2(0), l2(1) | X(0), X(4)                   |
| 11 |       |                   |          |          |                   | cross    | u2(2), u2(3) | X(2), X(6)                   |
| 12 |       |                   |          |          |                   | straight | l2(2), l2(3) | X(1), X(5)                   |
| 13 |       |                   |          |          |                   |          |              | X(3), X(7)                   |

All switch settings and twiddle exponents are fixed functions of a
modulo-8 counter. `r2mdc_ctrl` holds that counter; its header lists the
formulas.

The latency from x(0) in to X(0) out is 10 clocks. The throughput is one
frame per 8 clocks, which is one sample per clock.

### Valid tags

Each word in the pipeline carries a one-bit *valid* tag next to its real
and imaginary parts. The distributor gives the tag to whichever path it
feeds. A butterfly's output is valid when both of its inputs were valid.
The tags have two uses:
- the last butterfly's tag drives `out_valid`, so the pipeline-fill clocks
  after reset are never mistaken for results;
- they give an exact timing invariant. At every butterfly, both inputs
  are valid or neither is. The top module asserts this, and any error in a
  delay length or switch schedule breaks it.

## 3. Arithmetic

Each component (real or imaginary) is a two's-complement integer.

| point                  | width (default) | note                                       |
|------------------------|-----------------|--------------------------------------------|
| input `idatar/idataim` | 8               | sign-extended to 9 on entry                |
| after BF1              | 10              | +1 bit per butterfly                       |
| after BF2              | 11              |                                            |
| after BF3              | 12              | X(k) with no overflow for any input        |
| output `oint*/oimg*`   | 9               | X(k) / 8, rounded                          |

**Why no overflow.** The magnitude of a complex number at most doubles in
each butterfly: |A|, |B| <= |a| + |b|, and |W| = 1. A single component
can still grow by sqrt(2) in the multiplier: (a + ja) * W8^1 has a real
part of sqrt(2)·a. Extending the input by one bit before stage 1 absorbs
this once. After that, the magnitude bound 2^s · 128 · sqrt(2) stays
below the range of the stage-s word. The testbench drives the worst
cases: all samples -128 - 128j, and alternating full-scale values.

**Twiddles.** `twiddle_rom` holds W8^0..W8^3 with 8 fractional bits and 2
integer bits, so that +1 and -1 are exact:

| k | real part | imaginary part |
|---|-----------|----------------|
| 0 | 256       | 0              |
| 1 | 181       | -181           |
| 2 | 0         | -256           |
| 3 | -181      | -181           |

The value 181 is round(256 / sqrt 2).

**Complex multiplier.** `cmplx_mult` uses four real multipliers, one
subtractor and one adder. It rounds the result half up: it adds 2^7 and
shifts right arithmetically by 8. Stage 3 multiplies by W8^0 = 256/256,
which is exact. Its multiplier is kept as a general complex multiplier, so
each butterfly has four real multipliers, 12 in all.

**Output scaling.** The 12-bit result is rounded half up and shifted right
by 3 bits, giving X(k)/8. That is the DFT normalised by 1/N, and it can
never overflow 9 bits (|X(k)|/8 <= 181). With `OUT_W = 12` the full result
comes out unscaled.

## 4. Interface

| port               | dir | width | meaning                                                         |
|--------------------|-----|-------|-----------------------------------------------------------------|
| `clck`             | in  | 1     | clock; every register is rising-edge                            |
| `rst`              | in  | 1     | synchronous reset, active high                                  |
| `idatar`, `idataim`| in  | IN_W  | input sample, real and imaginary; one per clock, always taken   |
| `oint1`, `oimg1`   | out | OUT_W | stream 1: X(0), X(2), X(1), X(3) on successive valid clocks     |
| `oint2`, `oimg2`   | out | OUT_W | stream 2: X(4), X(6), X(5), X(7) on the same clocks             |
| `out_valid`        | out | 1     | high on the four result clocks of each frame                    |
| `in_out2`          | out | 32    | number of input samples taken since reset                       |

**Frames.** Frames are aligned to reset. The sample presented on the first
clock after `rst` falls is x(0) of frame 0. Every 8th clock after that
starts a new frame. There is no gap and no input handshake. When the
source has nothing to send it should send zeros; those zeros are
transformed like any other frame.

**Output index.** On the j-th valid clock of a frame (j = 0..3), stream 1
carries bin bitrev2(j) and stream 2 carries bin 4 + bitrev2(j).

Parameters of `fft_full`:
- `IN_W` = 8: input width;
- `OUT_W` = 9: output width, at most IN_W + 4;
- `TW_FRAC` = 8: fractional bits of the twiddles.

The transform length is fixed at 8.

## 5. Files

| file                | content                                                         |
|---------------------|-----------------------------------------------------------------|
| `rtl/fft_pkg.sv`    | default widths, the switch-setting enum, the constant function for round(2^f / sqrt 2) |
| `rtl/delay_line.sv` | DEPTH-clock shift register on one packed word                   |
| `rtl/commutator.sv` | 2x2 straight / cross switch; also the input distributor         |
| `rtl/twiddle_rom.sv`| W8^0..W8^3 in fixed point                                       |
| `rtl/cmplx_mult.sv` | complex multiply, 4 real multipliers, rounding                  |
| `rtl/butterfly.sv`  | A = a + b, B = (a - b) W, registered, valid tag                 |
| `rtl/r2mdc_ctrl.sv` | modulo-8 counter and the switch / twiddle schedule; sample counter |
| `rtl/fft_full.sv`   | the top: three stages wired as in section 2, output scaling, assertions |
| `tb/tb_*.sv`        | one self-checking testbench per module, and `tb_fft_full` for the top |

Coarse synthesis of the top gives these sizes:
- 12 real multipliers;
- 170 flip-flop bits in the butterfly output registers and the counters;
- 206 bits in the five delay lines, which synthesis maps to memories.

## 6. Verification

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. A watchdog ends the run as a failure if the test hangs.

- `tb_delay_line`, `tb_commutator`, `tb_twiddle_rom`, `tb_cmplx_mult`,
  `tb_butterfly` and `tb_r2mdc_ctrl` check each module against values
  computed independently in the testbench. The sources are:
  - cos / sin for the twiddles;
  - 64-bit integer products for the multiplier;
  - a history queue for the delays;
  - the schedule written as modular arithmetic for the controller.

  They also check the one-clock latency of the butterfly and the exact
  delay of the lines.
- `tb_fft_full` runs the top at its default parameters. It streams 120
  frames back to back:
  - constant input 2 (real only, and real and imaginary);
  - an impulse;
  - a complex tone at each of the 8 bins;
  - full-scale extremes;
  - random samples.

  The testbench transforms each frame with its own array model of the DIF
  flow graph, which has no delays or switches. Each output must match it
  bit for bit, and must lie within 1.5 LSB of the exact floating-point
  DFT / 8. The test also checks:
  - the 10-clock latency;
  - the four consecutive output clocks per frame;
  - the bit-reversed bin order;
  - the sample counter.

  It then resets the pipeline in the middle of a frame, while the pipeline
  is full. Four frames are replayed after the reset. They must come out
  unchanged, with the framing, latency and sample count restarted from
  the reset.

  Finally it counts how often each mechanism acted: the distributor in
  both directions, each switch straight and crossed with data on it, every
  twiddle at BF1 and BF2, complete output frames, and the mid-frame reset.
  It fails if any count is zero.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_fft_full.sv \
          --top-module tb_fft_full -Mdir obj_tb_fft_full -o sim
./obj_tb_fft_full/sim
```

Replace `tb_fft_full` with any other testbench name. Every run takes well
under a second.

## 7. Relation to the published design, and what is this implementation's own

The published description gives:
- the 8-point radix-2 DIF flow graph and its twiddles;
- the R2MDC structure: a distributor, delays of 4, 2, 2, 1 and 1 placed
  as in section 2, and two crossing switches;
- the butterfly, A = a + b and B = (a - b) W, with a four-multiplier
  complex product;
- the name of the top block and its ports: `clck`, `idatar`, `idataim`,
  `oint1`, `oimg1`, `oint2`, `oimg2` and `in_out2`;
- from the top block's port list, an 8-bit input and a 9-bit output (the
  most significant bit indices printed there are 7 and 8).

Its resource count of 12 multipliers agrees with this RTL.

The following are choices made here, because the description does not give
them:

- **Control.** The exact switch schedule and twiddle sequence (section 2)
  were derived from the flow graph and the delay placement. Only the
  existence of "control logic" is stated.
- **Pipelining.** There is one register after each butterfly. Without
  those registers the latency would be 7 clocks instead of 10.
- **Numbers.** The 9-bit input extension, the one-bit growth per stage,
  the twiddle precision, round-half-up rounding, and the 1/8 scaling of
  the output are all choices made here.
- **Reset, `out_valid`, valid tags.** The published block shows only a
  clock input and no reset or valid signals.
- **`in_out2`.** The published block has a 32-bit output of this name
  whose function is not stated. Its published waveform shows it stepping
  8, 9, a, b, c and then back to 8. Here it is a plain count of input
  samples, and does not reproduce that wrap.
- **Published simulation.** The published waveform drives a constant
  input of 2, but it is not readable as a clock-by-clock schedule. It was
  not used to set the latency or the order of the outputs. Its result
  value is shown in an unexplained radix and was not matched. The text
  and the waveform also disagree on whether the imaginary input is 2 or
  0, so the testbench runs both. In this design either frame gives
  X(0) = 16, output as 2 after the 1/8 scaling, and zero in the other
  bins.
- **Inverse transform.** The published text mentions that the same
  structure serves an inverse FFT, but describes no inverse mode. None is
  provided here. Because the twiddles are W8^k with a negative exponent,
  an inverse transform can be had by the usual trick: swap the real and
  imaginary parts on input and on output.
- **Other published resource counts.** The published table also reports
  43 adders/subtractors, 56 registers, 317 multiplexers and 6 XORs for a
  vendor FPGA flow. These depend on that tool and that implementation's
  word widths, and this RTL does not try to match them.
