# In-filter template-SVM acoustic classifier

This is a small classifier for audio and other time-series signals. It decides
between two classes, for example "target speaker" against "anyone else". It has
no separate feature extractor. The filter bank that models the cochlea *is* the
SVM kernel.

Each of P band-pass filters gives one feature per window. Over a window of W
samples, a filter's output is rectified and summed, and the sum is then
standardised. Call that number Φ_p. The decision is then

    f = Σ_p Q_p Φ_p + b          label = sgn(f)

with one trained weight Q_p per filter. A normal SVM needs one
multiply-accumulate per support vector, often thousands of them. This design
needs only P of them per window (P = 30 by default). The training that picks
Q_p, b, μ_p and σ_p happens offline. The chip only applies the results.

The RTL targets the published operating point:

- a 25 MHz clock;
- 12-bit audio samples at 16 kHz, i.e. one sample every 1562 cycles;
- P = 30 filters;
- one decision per 1-second window (W = 16000 samples).

## Data flow

```
 x_n ──► CAR-IHC kernel ──d_{p,n}──► window sums ──s_p──► STD ──Φ_p──► MAC ──► + b ──► f, label
          │  (one shared          (26-bit per p,    (÷σ_p)  (×Q_p)
          │   resonator, run       >>14 → 12 bit)     ▲        ▲         ▲
          │   P times/sample)                        SMEM     WMEM      BMEM
         FCMEM (a0,c0,r,k,g per filter)
```

| Module | Role |
|---|---|
| `infilter_svm_top` | Top level: the sample handshake, the configuration port and the result outputs |
| `car_ihc_kernel` | Sequencer. Runs the one resonator datapath over filters 0..P-1 for each sample |
| `car_block` | Resonator datapath. Four shared pipelined multipliers (`pipe_mult`) and the state memory |
| `ihc_block` | Half-wave rectifier (inner hair cell model) |
| `window_accum` | Per-filter 26-bit window sums, `>>14` to 12 bits, and the output buffer |
| `svm_backend` | Once-per-window sequencer for STD, then MAC, then bias |
| `std_block` | (s − μ)/σ by a restoring divider, then `>>4` to 8 bits |
| `mac_block` | Σ Φ_p·Q_p, rescaling, the bias add and the sign |
| `fcmem`, `smem`, `wmem`, `bmem` | Parameter stores written through the configuration port |
| `svm_pkg` | Shared widths, formats and types |

## The resonator cascade: the hard part

### Filter

Filter p is a two-pole, two-zero resonator:

    H_p(z) = g [z² + (−2a0 + k·c0) r z + r²] / [z² − 2a0 r z + r²]

Here:

- a0 = cos θ and c0 = sin θ set the resonance frequency θ;
- r is the pole radius, which sets the damping;
- k places the zeros;
- g sets the gain.

The filters form a cascade. Filter 0 takes the audio sample. Filter p takes the
output of filter p−1. Every filter output b_{p,n} is also tapped and rectified
(`d = max(0, b)`), and that gives channel p. The filters are tuned from high
to low frequency, so each tap is a band-pass channel of the kind a point along
the cochlea would give.

### Coupled form

The filter is computed in coupled form. Each filter has two state variables, A
and B. With u the filter's input:

    A' = r (a0·A − c0·B) + u
    B' = r (c0·A + a0·B)
    y  = g (u + k·B')

Eliminating A and B gives exactly H_p(z) above. The zeros come from feeding u
forward and adding k·B'.

Two select lines, `sel1` and `sel2`, can force A' and B' to zero. In normal
running both are 1. The design uses them to clear the state: after reset, and
at the end of every window, a clear pass writes zeros into all P state pairs.

### Time multiplexing

There is only one copy of this datapath. For each sample, `car_ihc_kernel`
steps p from 0 to P−1 and does the following for each filter:

1. It reads (a0, c0, r, k, g) for filter p from FCMEM.
2. It reads A and B for filter p from the state memory.
3. It drives u: the sample for p = 0, otherwise the previous filter's y, held
   in a register.
4. It waits for the multiplier chain.
5. It writes A' and B' back and hands `d_{p,n}` to the window sums.

Each multiplier is a pipeline of `MUL_LAT = 2` stages. Four products happen
in series: the a0/c0 products, ×r, ×k and ×g. A filter therefore takes
4·MUL_LAT + 1 = 9 cycles, counting the write-back cycle.

A filter step needs eight products in all, but only four multipliers exist.
They are shared by phase, using the step counter of the sequencer (L =
MUL_LAT):

| Steps | M0 | M1 | M2 | M3 |
|---|---|---|---|---|
| 0 .. L−1 | a0·A | c0·B | a0·B | c0·A |
| L .. 2L−1 | r·(a0A − c0B) | r·(c0A + a0B) | (a0·B held) | (c0·A held) |
| 2L .. 3L−1 | – | – | k·B' | – |
| 3L .. 4L | – | – | k·B' | g·(u + k·B') |

The two r products come out at step 2L. They are caught in a register there,
because M0 and M1 are free afterwards. The controller must hold p, u and the
coefficients steady for the whole step. The result is bit-identical to giving
each product its own multiplier.

A sample takes P·9 + 1 = **271 cycles** at P = 30, or about 11 µs at 25 MHz.
`x_ready` (the "CAR Done" condition) is high only between samples. A sample
offered while the kernel is busy waits.

### Fixed-point format

- Samples, states and filter outputs are 12-bit two's complement and saturate
  at every write.
- Coefficients are 12-bit Q2.10, covering −2 to +2 in steps of 1/1024.
- Every product is truncated by an arithmetic right shift of 10.

FCMEM holds one 60-bit word per filter, `{a0, c0, r, k, g}` with a0 in the top
bits.

To design a filter, pick a centre frequency f_c and a damping ζ. Then set:

- θ = 2π f_c / f_s;
- a0 = cos θ and c0 = sin θ;
- r = 1 − ζ θ;
- k = c0 (a common choice);
- g so that the DC gain equals one.

Multiply each value by 1024 and round. The full-size testbench does this for
30 filters, spaced on the Greenwood cochlear map from 6 kHz down to 100 Hz.
For non-audio signals (ECG, EEG, vibration), only these coefficients and the
sample rate change. The hardware stays the same.

## Window sums

`window_accum` adds each d_{p,n} (at most 11 bits, since it is never negative)
into the 26-bit accumulator of channel p. The sum of 16000 such values fits in
26 bits.

After the W-th sample, each sum is shifted right by 14 to 12 bits. It is
stored in an output buffer, and the accumulator restarts at zero. Then
`window_done` pulses.

The buffer lets the next window start at once. The back end reads the finished
sums while the kernel is already filtering new samples.

## Back end: standardise, weigh, decide

`svm_backend` runs once per window and walks p = 0..P−1 serially. For each p:

1. **STD.** It computes Φ = (s_p − μ_p)/σ_p with a 20-step restoring divider.
   - |s − μ| is scaled by 2⁸, so the 12-bit result is in Q3.8.
   - The result saturates at ±2047. σ = 0 gives the saturated value.
   - A right shift by 4 then gives the 8-bit Φ_p in Q3.4.
2. **MAC.** It adds Φ_p·Q_p (8-bit × 8-bit) to the accumulator.

After the last template:

- the sum is shifted right by 6 and saturated to 8 bits;
- the 8-bit bias b is added, giving a 9-bit score that cannot overflow;
- the label is 1 when f ≥ 0.

`res_valid` pulses once, with `res_score` and `res_label`.

The back end takes 22·P + 2 = 662 cycles at P = 30. The samples arrive 1562
cycles apart, so it finishes before the next window could end.

When training in floating point, match these scalings:

- μ_p and σ_p in units of the 12-bit sum (the raw sum / 2¹⁴), stored unsigned;
- Q_p as signed 8-bit;
- b as signed 8-bit, in units of Σ Φ_code·Q_p / 2⁶, where Φ_code is the
  Q3.4 integer. With Φ real, that is Σ Φ·Q_p / 4.

## Interfaces and timing of the top level

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock and asynchronous active-low reset |
| `x_valid`, `x_data`, `x_ready` | in/in/out | 1/12/1 | Sample handshake. A sample is taken on a cycle with `x_valid && x_ready` |
| `cfg_we`, `cfg_sel`, `cfg_addr`, `cfg_data` | in | 1/2/⌈log2 P⌉/60 | Parameter writes (see below) |
| `res_valid`, `res_score`, `res_label` | out | 1/9/1 | One result per window |
| `car_done` | out | 1 | Pulses when the last filter of a sample is finished |
| `window_done` | out | 1 | Pulses when a window's sums are stored |

`cfg_sel` picks the memory that a write goes to. `cfg_addr` is the filter
index, which `BMEM` ignores. The narrower memories take the low bits of
`cfg_data`:

| `cfg_sel` | Memory | Word written |
|---|---|---|
| `CFG_FCMEM` | FCMEM | `{a0, c0, r, k, g}` (60 bits) |
| `CFG_SMEM` | SMEM | `{μ, σ}` (24 bits) |
| `CFG_WMEM` | WMEM | Q_p (8 bits) |
| `CFG_BMEM` | BMEM | b (8 bits) |

The parameters must be written before any samples are sent. They are not
double-buffered.

Timing:

- After reset, the kernel spends P cycles on its clear pass before `x_ready`
  rises.
- Each sample then takes 271 cycles.
- At the end of a window, the clear pass adds another P cycles.

At 25 MHz the kernel's 271 cycles per sample leave room to spare:

- At 16 kHz (1562 cycles per sample), P can grow to about 170 before the
  kernel runs out of time.
- With P = 30, the sample rate can go up to about 90 kHz.

In general the sample rate must stay at or below f_clk / ((4·MUL_LAT + 1)·P + 1). The clock
can be lowered to save power when the signal is slow. For example, a 400 kHz
clock still keeps up with about 1.5 kHz sampling at P = 30. That is enough for
ECG, EEG or muscle signals, but not for audio.

## Departures from the published design

- **Word widths.** The published text disagrees with itself. It says the
  CAR-IHC kernel uses 12-bit fixed point, and its block diagram shows 12-bit
  paths with a 26-bit sum. Elsewhere it speaks of 16-bit samples, 16-bit
  kernel outputs and a 30-bit sum. This RTL follows the 12-bit, 26-bit
  figures. For a 16-bit build, set `DW` = 16, `ACC_W` = 30 and `S_SHIFT` =
  18 in `svm_pkg`. The other widths follow from these.
- **Cycle count.** The published design needs "about 300" cycles per sample.
  This one needs 271. The pipeline depth is not published.
- **Multipliers.** The published build uses 4 DSP slices and reuses its
  multipliers over several cycles. This datapath also uses four shared
  multipliers. Which product runs on which multiplier, and when, is this
  design's own schedule.
- **Coefficient memory.** One published caption calls it block RAM, but the
  resource table lists no block RAM. Here FCMEM and the other stores are small
  register arrays with asynchronous read. A synthesiser maps them to LUT RAM or
  flip-flops.
- **Own choices.** The following are not published:
  - the coefficient, Φ and score formats (Q2.10, Q3.8 and Q3.4, and the final
    shift of 6);
  - the divider;
  - the handshake and configuration port;
  - clearing the filter state between windows;
  - the window buffer;
  - the tie rule (f = 0 gives label 1).

The published flow chart and block diagram fix these parts, and the RTL keeps
them:

- the block order;
- the widths of the sum (26 bits), the shift of 14, the STD output (12 bits)
  and the shift of 4;
- the 8-bit Q and b;
- the sel1/sel2 coupled form.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one compares the module against an independent model. It ends by printing
`TB_RESULT checks=N failures=M`.

`tb_infilter_svm_top` runs the whole classifier at its default parameters
(P = 30, W = 16000):

- It designs 30 cochlear filters and trains μ, σ, Q and b from two one-second
  examples: a 300 Hz tone and a 3 kHz tone.
- It classifies both windows. The first is fed at the real 1562-cycle sample
  rate. The second is fed back to back, so the ready/stall path is exercised.
- A bit-exact model checks every one of the 960,000 rectified filter outputs,
  the 60 window sums, both scores and both labels.
- It checks the 271-cycle sample time and the back-end time.
- It counts each mechanism at least once: clear passes, CAR Done, rectifier
  zeroing, stalls, window ends, and both output labels.

It takes about 20 s of simulation.

`tb_rate_limits` checks two scaling points:

- 120 filters with a sample every 1562 cycles;
- 30 filters with a sample every 312 cycles (80 kHz).

In both, the kernel must always be ready when the next sample arrives.

To simulate with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/svm_pkg.sv tb/tb_infilter_svm_top.sv \
          --top-module tb_infilter_svm_top -Mdir obj && ./obj/Vtb_infilter_svm_top
```

Any other testbench works the same way: replace the file name and the top
module name.

### Limits of trust

- The arithmetic is checked only against this design's own bit-exact model.
  Its accuracy on real datasets has not been measured here. That would need
  the offline-trained parameters.
- The coefficients in the testbench are plausible cochlear values. They are
  not the published tuning.
- No synthesis timing closure at 25 MHz has been done. The logic between
  multiplier stages is short.
