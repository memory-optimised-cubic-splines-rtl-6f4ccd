# Cubic-spline pulse envelopes from three adders

Qubit control pulses for atoms and ions are long (microseconds to milliseconds), smooth,
and sampled at hundreds of MS/s to 1 GS/s. Storing every sample takes tens to hundreds of
kilobits per pulse and per channel. This RTL rebuilds such an envelope in real time from a
handful of cubic-polynomial segments instead. Each segment costs four coefficients. The
envelope then modulates a carrier in a direct-digital-synthesis (DDS) channel.

The hardware is small because it needs no multiplier. A cubic sampled at integer steps can
be generated by three chained accumulators (the "Bowler" recursion). The cost is that the
coefficients are rounded fixed-point numbers, and the rounding error grows with the cube of
the segment length. That trade-off is explained below, because it decides how this block
can be used.

A second saving is mirroring. A pulse that is symmetric about its centre (Gaussian,
Blackman) needs only its first half stored. The hardware plays the stored segments
forwards, then runs the same recursion backwards in time.

## Signal chain

```
            Avalon-MM write                       start_pulse / start_addr / seg_num / pulse_sym
                 |                                              |
  +--------------v------------------------------------------ pulse_shaper ------------------+
  | avalon_wr_if -> seg_memory (4 banks) -> coef_regs -> spline_pipeline -> y -> pulse_out  |
  |                        ^                                  ^  (3 x spline_acc,           |
  |                        +----------- spline_ctrl ----------+   3 x turn_store)           |
  +---------------------------------------------------------------------|-------------------+
                                                                        v
   freq_word, phase_word -> nco -------------------------------> amp_mixer -> dac_data (to the RF DAC)
```

`dds_top` is the top level. The RF DAC and the analog chain behind it are not part of the
RTL: `dac_data`/`dac_valid` is the sample bus that would feed the DAC.

## The recursion

Let one segment be the cubic `P(t) = p0 + p1 t + p2 t^2 + p3 t^3`, where t = 0, 1, 2, … is
the sample index inside the segment. Store these start values:

```
alpha0 = p0
beta0  = p1 - p2 + p3
gamma0 = 2 p2 - 6 p3
delta  = 6 p3
```

Then step:

```
gamma_t = gamma_{t-1} + delta
beta_t  = beta_{t-1}  + gamma_t
alpha_t = alpha_{t-1} + beta_t          and the output sample y_t = alpha_t = P(t)
```

Each step is exact integer addition. So after n steps the output equals the closed form
`alpha0 + n beta0 + n(n+1)/2 gamma0 + n(n+1)(n+2)/6 delta`. The testbenches of the
envelope path check against this closed form, not against a copy of the recursion.

Widths:

- gamma, beta and alpha are 36-bit signed fixed point with 20 fractional bits.
- The output `pulse_out` is the top 16 bits of alpha: sign plus 15 integer bits, truncated.
- `alpha0` is stored as a 16-bit integer, because it is only ever the first output sample.

**Why segment length matters.** Rounding beta0, gamma0 and delta to 20 fractional bits
leaves errors e_b, e_g and e_d. After n steps these add up to

`e_a + n e_b + n(n+1)/2 e_g + n(n+1)(n+2)/6 e_d`.

The error therefore grows as n³. `tb_workloads` checks this formula sample by sample
against a floating-point cubic. It holds to 1e-3 LSB.

With plain round-to-nearest coefficients the error is large for long segments. A Blackman
pulse of 30000 LSB peak, played as 6 segments of 3334 samples, is off by up to 2800 LSB.
With 20 segments of 1000 samples it is off by about 50 LSB.

The cure is on the software side, not in this RTL: use shorter segments, or pick the rounded
coefficients so that their accumulated errors cancel (a rounding-aware fit). The hardware
reproduces any coefficient set bit-exactly, so an offline fit can predict its output exactly.

`tb_workloads` contains a simple rounding-aware fit:

1. Round delta.
2. Shift gamma by the least-squares amount that lets the quadratic term cancel the cubic
   error term over the segment, then round it.
3. Do the same for beta, then for alpha.

The table gives the worst rounding error: hardware output minus the unrounded cubic, in
output LSB.

| Pulse | Plain rounding | Rounding-aware |
|---|---|---|
| Blackman, 20000 samples, 6 segments, mirrored | 2794 | 364 |
| Gaussian, 30000 samples, 7 segments | 5683 | 735 |
| Gaussian, 40000 samples, 4 segments | wraps | 6745 |
| Gaussian, 40000 samples, 10 segments | 3592 | 466 |
| Blackman, 40000 samples, 4 segments | wraps | 2082 |
| Blackman, 40000 samples, 10 segments | 1224 | 161 |
| Sigmoid, 40000 samples, 4 segments | 8911 | 1163 |
| Sigmoid, 40000 samples, 10 segments | 1550 | 202 |

"wraps" means the error left the 36-bit range and the accumulator wrapped. The output is
then useless, although still bit-exact to the recursion.

Gradient-based optimisation of all four coefficients against the target pulse does better;
it is an offline step and makes no difference to the hardware.

## Pipeline and timing

`spline_pipeline` holds three accumulators:

| Register | Holds | Timing |
|---|---|---|
| sp0 | gamma | |
| sp1 | beta | one clock behind sp0 |
| sp2 | alpha | one clock behind sp1 |
| y | output | |

Each adder therefore sits between two registers, and one sample leaves every clock.

The stagger means a new segment's coefficients must arrive one stage apart: delta and gamma0
in the load cycle, beta0 one clock later, alpha0 two clocks later. `coef_regs` does this
delaying. On the first sample of a forward segment, y takes alpha0 directly; after that it
takes sp2. So the segment's value at t = 0 is exact, and stage 2 already computes alpha_1 in
that same cycle.

Each stage executes one operation code per clock (`acc_op_e`):

| Code | Update | When |
|---|---|---|
| LOAD | acc = coefficient + addend | first sample of a forward segment |
| ADD | acc = acc + addend | forward step |
| SUB | acc = acc − (preceding stage one clock earlier) | backward step |
| TURN | acc = stored final value | start of a backward segment |

The operation codes are issued for stage 0 and travel down the stages with the data.

**Stitching.** There is no gap between segments. A segment's memory word is read one load
ahead (prefetch), so the next LOAD or TURN always finds its coefficients in the memory's
output register. Segments of length 1 work as well.

**Latency.** If `start_pulse` is sampled at clock edge 0, the first sample is on `pulse_out`
after edge 3. A pulse of L samples gives L consecutive clocks with `pulse_valid` high, and
`pulse_done` is high with the last sample. The DAC bus is one clock later.

## Mirrored pulses

With `pulse_sym = 1`, a pulse of `seg_num` stored segments plays in this order:

1. Segments 0 … seg_num−1 forwards.
2. Segments seg_num−1 … 0 backwards, each from its last sample to its first.

The output is the forward samples followed by the same samples in reverse. The centre
sample appears twice. For example, one 4-sample segment gives a0 a1 a2 a3 a3 a2 a1 a0.

Running the recursion backwards means inverting it:

```
alpha'_t = alpha'_{t-1} - beta'_{t-1}
beta'_t  = beta'_{t-1}  - gamma'_{t-1}
gamma'_t = gamma'_{t-1} - delta
```

The start values are the final values the forward pass reached on that segment (alpha, beta
and gamma at the last sample). Because the backward step needs the preceding stage's value
from one clock earlier, each accumulator also outputs a one-clock-delayed copy (`acc_prev`).
This keeps the one-clock stagger in both directions.

**Where the start values come from.** Those final values are never in segment memory. Each
stage writes them, on the last forward sample of every segment, into a small per-stage
`turn_store` (64 entries). On the last sample before a backward segment, each stage reloads
its value one clock after the previous stage (TURN).

**Worked example.** This is one stored segment of 4 samples, played mirrored. Its
coefficients are alpha0 = 100, beta0 = 10, gamma0 = 2 and delta = 1, so the forward samples
are 100, 113, 130 and 152.

- Cycle 0 is the clock after `start_pulse` was sampled.
- Each row gives the operation each stage performs in that cycle, and the register values
  after the clock edge that ends it.
- Integer parts only.

| Cycle | Stage 0 op | Stage 1 op | Stage 2 op | sp0 (gamma) | sp1 (beta) | sp2 (alpha) | y |
|---|---|---|---|---|---|---|---|
| 0 | LOAD | | | 3 | | | |
| 1 | ADD | LOAD | | 4 | 13 | | |
| 2 | ADD | ADD | LOAD | 5 | 17 | 113 | 100 |
| 3 | TURN | ADD | ADD | 5 | 22 | 130 | 113 |
| 4 | SUB | TURN | ADD | 4 | 22 | 152 | 130 |
| 5 | SUB | SUB | TURN | 3 | 17 | 152 | 152 |
| 6 | SUB | SUB | SUB | 2 | 13 | 130 | 152 |
| 7 | SUB | SUB | SUB | 1 | 10 | 113 | 130 |
| 8 | | SUB | SUB | | 8 | 100 | 113 |
| 9 | | | SUB | | | 90 | 100 (`pulse_done`) |

How to read the table:

- Each stage turns in the slot where it would otherwise compute a value past the segment end.
  Stage 0 would compute gamma_4, which no sample needs, so it reloads gamma_3 = 5 instead.
- The first backward sample repeats the last forward sample: y is 152 twice.
- Stage 1's first SUB (cycle 5) uses stage 0's value from one clock earlier, 5. That gives
  22 − 5 = 17 = beta_2.
- Values past the last sample (sp2 = 90) are never output.

At the symmetry centre the segment being reversed is the one that just ended. There the
value is passed straight through (bypass), and the memory is not read again: length and
delta are reused. A mirrored pulse may therefore have at most 64 stored segments.

## Memory map and programming

The Avalon-MM port is write-only, has no wait states, and takes one 36-bit word per write.
The address is `avs_address = {segment index (10 bits), bank (2 bits)}`:

| Bank | Content |
|---|---|
| 0 | `{length[19:0], alpha0[15:0]}`, where length is the number of samples in the segment (0 is played as 1) |
| 1 | beta0, 36-bit two's complement, 20 fractional bits |
| 2 | gamma0, same format |
| 3 | delta, same format |

A pulse is `seg_num` consecutive segments starting at `start_addr`. `start_pulse` is ignored
while a pulse is running, and when `seg_num` is 0.

Memory size: 1024 segments, stored as four banks of 1024 × 36 bits (four block RAMs). A
segment can be up to 2^20 − 1 samples long. That covers every pulse discussed for this
design:

| Pulse | Samples | Segments |
|---|---|---|
| Blackman gate pulse, 20 µs at 1 GS/s | 20000 | 4–20 |
| Piecewise-quadratic atom-transport ramp, 31 µs at 500 MS/s | 15500 | 2–20 |
| Gaussian | 30000 | 7 |
| Gaussian, Blackman and sigmoid pulses | 40000 | 4–10 |

Transport ramps of several hundred µs also fit.

## Oscillator and mixer

`nco` is a 32-bit phase accumulator. Its top 10 bits (after adding `phase_word`) index a
1024-entry sine table. The table is computed at elaboration as
`round(32767 · sin(2π i / 1024))`. The output frequency is `f_clk · freq_word / 2^32`. The
oscillator runs freely from reset, so successive pulses keep a fixed phase relation.

`amp_mixer` computes `(envelope · carrier) >> 15` and saturates the single product that
overflows. Outside a pulse its output is 0.

## How far this follows the source design

**Taken from the published description:**
- the recursion and its start values;
- the 36-bit accumulators with 20 fractional bits;
- the 16-bit truncated output and the 16-bit alpha0;
- three accumulators producing one sample per clock;
- the block structure: Avalon write interface, four-bank segment memory, coefficient
  registers, three accumulators, output register, control FSM;
- the port names clk, rst, avs_write, writedata, avs_address, start_pulse, start_addr,
  seg_num, pulse_out, pulse_running, pulse_valid, pulse_done;
- the backward recursion with its sign inversion, its start from the forward pass's final
  values, and the stage-by-stage staggered reload shown in its timing diagram;
- the DDS chain of envelope × NCO into a DAC.

**This design's own choices:**
- the address map, and where segment lengths are kept. The coefficients of a segment need
  124 bits, because alpha0 needs only 16. This layout still keeps four 36-bit words per
  segment (144 bits) and puts the segment length in the 20 bits that alpha0 frees;
- the `pulse_sym` mode input;
- the LOAD/ADD/SUB/TURN schedule and the prefetch;
- the turn-around store, which lets every backward segment (not only the centre one)
  restart;
- the exact meaning and timing of the status outputs;
- the 3-clock latency;
- synchronous active-high reset;
- all NCO and mixer details.

**Deviations and known limitations:**
- One published formula gives the backward output as
  `alpha' + beta' + gamma' + delta'`. That does not equal alpha' and would not mirror the
  first half. This RTL outputs alpha', as the published timing diagram does.
- The same diagram labels one gamma-stage value "sp0+g0". The RTL uses gamma + delta, as
  the recursion requires.
- The source design also had a variant producing 4 samples per clock at 250 MHz. It is not
  implemented here: this RTL makes one sample per clock, so 1 GS/s needs a 1 GHz clock.
- The reported 575 MHz on an RFSoC and the resource counts are implementation results that
  this RTL has not been checked against.
- Overflow of the 36-bit accumulators wraps silently.

## Files

| File | Contents |
|---|---|
| `rtl/spline_pkg.sv` | widths, `segment_t`, the `ctrl_t` control word, operation codes |
| `rtl/dds_top.sv` | top: `pulse_shaper` + `nco` + `amp_mixer` |
| `rtl/pulse_shaper.sv` | envelope generator |
| `rtl/avalon_wr_if.sv` | Avalon write port and bank demultiplexer |
| `rtl/seg_memory.sv` | four-bank segment memory |
| `rtl/coef_regs.sv` | staggered coefficient registers |
| `rtl/spline_ctrl.sv` | pulse FSM |
| `rtl/spline_pipeline.sv` | three accumulators, turn-around stores, output register |
| `rtl/spline_acc.sv` | one accumulator |
| `rtl/turn_store.sv` | one turn-around store |
| `rtl/nco.sv`, `rtl/amp_mixer.sv` | oscillator and multiplier |

`tb/tb_<module>.sv` is a self-checking testbench for each module. Two testbenches go
further:

- `tb_dds_top` runs the whole channel at default parameters. It includes a complete
  20000-sample mirrored pulse, and it counts each mechanism (stitching, centre turn,
  store-served turns, backward steps, one-sample and zero-length segments, ignored starts).
- `tb_workloads` fits Blackman, Gaussian, sigmoid and transport-ramp pulses in the
  testbench, with and without the rounding-aware fit. It plays them and checks bit-exactness
  and the error-accumulation formula.

Every testbench prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/spline_pkg.sv tb/tb_dds_top.sv \
          --top-module tb_dds_top -Mdir obj_dds
./obj_dds/Vtb_dds_top
```

Replace `tb_dds_top` with any other testbench name. The package must come first on the
command line; `-Irtl` lets Verilator find the modules. Each run finishes in well under a
second.

To change the memory depth, set `SEG_AW` on `dds_top`. To change the turn-around store
depth, set `SYM_IDX_W` in the package.
