# Buffer-free 2-parallel FFT → H → IFFT cascade

Fast convolution runs a block of samples through an FFT, multiplies the spectrum bin by
bin with a fixed filter spectrum H, and runs the product through an IFFT:
`y = IFFT(FFT(x) · H)`, a circular convolution of `x` with `h = IDFT(H)`. In a
*partly-parallel* pipeline (here two samples per clock) each FFT stage is a single
butterfly time-shared over all N/2 butterflies of that stage. The usual folded FFT
produces its bins in bit-reversed order. If the IFFT is folded the same way as the FFT,
it expects natural order, so a reorder buffer must sit between the two. That buffer costs
memory and latency, and the IFFT output then comes out scrambled as well.

This RTL implements the alternative described in K. K. Parhi, *"A Low-Latency FFT-IFFT
Cascade Architecture"*. The IFFT is folded so that every stage executes its butterflies in
**bit-reversed order**. That is exactly the order in which the FFT delivers its bins, so
each FFT output pair is consumed in the cycle it appears. No intermediate buffer is
needed, and the IFFT output still comes out in natural order. The hardware of the IFFT is
the same as the FFT's: log2 N butterflies, log2 N − 1 twiddle multipliers and
delay-switch-delay units. Only the order of the DSD sizes is reversed.

Two configurations are built from the same modules:

| `CHANNELS` | what it is | samples per cycle | frame length |
|---|---|---|---|
| 1 (default) | one 2-parallel stream (the paper's "Proposed I") | 2 of one signal | N/2 cycles |
| 2 | two channels interleaved (the paper's "Proposed II") | 1 of each channel | N cycles |

## Data path

```
CHANNELS = 1
 in_u ─┐ DSD   ┌─ BF A ─⊗─ DSD  ─ BF B ─⊗─ DSD  ─ ... ─ BF   ┐   (mdc_fft)
 in_l ─┘ (N/4) └─        N/4          N/8              last ┘
           │                                                ⊗ H   (pointwise_mult)
 out_u ─┐                                                   │
 out_l ─┘ BF last ─ DSD  ─⊗─ ... ─ BF B ─ DSD ─⊗─ BF A ─────┘      (asap_ifft)
                    N/4               2        1
CHANNELS = 2: the first DSD is N/2 (channel interleaving), and a further DSD(N/2)
              after the IFFT splits the channels again (de-interleaving).
```

- **BF** (`bf2`) computes `(a+b)/2` and `(a−b)/2`.
- **⊗** (`cplx_mult`) is a complex multiplier. Inside a stage it multiplies the
  difference output by the twiddle factor. Between the transforms it multiplies by H.
- **DSD** (`dsd`) is a delay-switch-delay commutator. It regroups the two lanes so that
  the next stage finds both operands of a butterfly on the same cycle.
- `fft_stage` (BF + twiddle table + multiplier) is the repeating stage of `mdc_fft` and
  `asap_ifft`. `delay_line` is the circular-buffer delay inside each DSD.

## How a DSD pairs samples

A DSD of size D first delays the lower lane by D cycles. A 2×2 switch then passes the
lanes straight or crosses them. Finally the upper lane is delayed by D cycles. The switch
is crossed for D cycles, then straight for D cycles, and so on. The effect: a value that
enters on the upper lane at cycle t leaves on the upper lane at t + D. A value that enters
on the upper lane D cycles later crosses over to the lower lane. The two therefore leave
together, which pairs values that were produced D cycles apart. The unit stores 2D words
and uses two 2:1 multiplexers.

Each module drives the switch from a position counter. The switch is crossed when bit
log2 D is set in the position of the pair entering the unit:

- `mdc_fft`: butterfly position k = index j.
- `asap_ifft`: position k, while the butterfly index is j = bitrev(k).

## The two schedules (N = 16)

Cycle numbers count from the first input. The FFT processes its butterflies in natural
order. Its stages start N/4, N/8, …, 1 cycles apart, which is why its DSDs are sized that
way:

| FFT stage | butterfly order | cycles |
|---|---|---|
| A | A0 A1 … A7 | 4 … 11 |
| B | B0 B1 … B7 | 8 … 15 |
| C | C0 … C7 | 10 … 17 |
| D | D0 … D7 | 11 … 18 |

Butterfly D_k of the last stage produces bins X_{bitrev(k)} and X_{bitrev(k)+8}: X0/X8,
then X4/X12, X2/X10, and so on. That pair is exactly the input pair of IFFT butterfly
A_{bitrev(k)}. The IFFT therefore runs stage A in the order A0 A4 A2 A6 A1 A5 A3 A7, in
the same cycles 11 … 18.

In that order, the two partners of an IFFT stage-B butterfly (A_j and A_{j+4}) leave
stage A on adjacent cycles. The partners of a stage-C butterfly leave stage B two cycles
apart, and so on. So the IFFT's DSDs are 1, 2, 4, …, N/4, the FFT's sizes in reverse,
and the IFFT's total delay is the same N/2 − 1 cycles. Every IFFT stage keeps the
bit-reversed order:

| IFFT stage | butterfly order | cycles |
|---|---|---|
| A | A0 A4 A2 A6 A1 A5 A3 A7 | 11 … 18 |
| B | B0 B4 B2 B6 B1 B5 B3 B7 | 12 … 19 |
| C | C0 C4 C2 C6 C1 C5 C3 C7 | 14 … 21 |
| D | D0 D4 D2 D6 D1 D5 D3 D7 | 18 … 25 |

Butterfly D_{bitrev(k)} produces y_k and y_{k+8}. The output is therefore y0/y8, y1/y9,
…, y7/y15, in natural order. In these tables a butterfly takes no cycle, which is what
`PIPE = 0` builds. The first output appears 1.25N − 2 = 18 cycles after the first input.

The twiddle of butterfly j in stage s is W_N^(m·2^s), with m = j mod N/2^(s+1). The IFFT
uses the conjugate and looks it up with j = bitrev(position). The tables are computed at
elaboration from cos/sin (`fft_pkg::twiddle`), so any power-of-two N works without table
files.

## Lane order at the ports

**CHANNELS = 1.** A frame is N/2 consecutive enabled cycles. Let p be the position in the
frame:

| position | `in_u` | `in_l` |
|---|---|---|
| p < N/4 | x[p] | x[p+N/4] |
| p ≥ N/4 | x[p+N/4] | x[p+N/2] |

With this order the input DSD(N/4) hands butterfly A_k the pair (x_k, x_{k+N/2}) at
position N/4 + k, which is the FFT schedule above. On the output, `out_pos` = k carries
`out_u` = y[k] and `out_l` = y[k+N/2].

**CHANNELS = 2.** A frame is N enabled cycles. `in_u` carries sample n of channel 0 and
`in_l` sample n of channel 1. The interleaving DSD(N/2) turns this into N/2 butterfly
pairs of channel 0 followed by N/2 pairs of channel 1, and the cores run the two
half-frames back to back. The de-interleaving DSD(N/2) at the end returns `out_u` =
y0[n] and `out_l` = y1[n] for `out_pos` = n. Both channels use the same H.

## Cost and latency

With `PIPE = 0` the built structure has exactly the counts the paper tabulates:

| | memory words (DSD) | DSD muxes | first-in → first-out | at N = 1024 |
|---|---|---|---|---|
| CHANNELS = 1 | 2.5N − 4 | 4 log2N − 2 | 1.25N − 2 | 2556 words, 38 muxes, 1278 cycles |
| CHANNELS = 2 | 4N − 4 | 4 log2N | 1.5N − 2 at the IFFT output, 2N − 2 at the ports | 4092 words, 40 muxes, 1534 / 2046 cycles |

For the two-channel mode, the paper's table states the latency as "1.5N − 2 (2046)".
1.5N − 2 counts to the IFFT output (1534 at N = 1024). 2046 = 2N − 2 includes the
de-interleaver. Both are reproduced here. Both transforms use log2 N butterflies and
log2 N − 1 twiddle multipliers (10 and 9 at N = 1024), plus two H multipliers.
Throughput is two samples per clock.

`PIPE = 1` registers every stage output and the H product. It adds 2·log2N + 1 cycles of
latency and removes the long combinational paths: with `PIPE = 0`, a value that crosses
in a DSD goes straight into the next butterfly in the same cycle.

## Number format and accuracy

- **Samples**: `cplx_t`, two signed 24-bit parts (`fft_pkg::DW`).
- **Coefficients** (twiddles and H): `coef_t`, two signed 18-bit parts with 16 fraction
  bits, so 1.0 = 65536 and |H| < 2 (`CW`, `CFRAC`).
- **Butterflies** halve their outputs with truncation, so no stage can overflow. Each
  transform is therefore scaled by 1/N, and the cascade computes `y = (x ⊛ h) / N`.
- **Multipliers** round to nearest and saturate.

Measured against a double-precision model with random full-scale data, the cascade
output is within 3 LSB at N = 16 … 1024. A single transform with near-full-scale input is
within about 10 LSB on outputs of order 2^20. That error is set by the 2^−17 precision of
the twiddles.

## Interface and flow control (`fft_ifft_cascade`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset (clears counters and delay pointers) |
| `in_valid` | in | advance enable: every register moves only on cycles where it is high |
| `in_u`, `in_l` | in | input lanes, in the order given above |
| `h_bin_u`, `h_bin_l` | out | bin numbers of H needed in this cycle: bitrev(k) and bitrev(k)+N/2 |
| `h_u`, `h_l` | in | H[h_bin_u], H[h_bin_l], in the same cycle (for example from a ROM or RAM) |
| `out_valid` | out | the output lanes hold a result sample |
| `out_pos` | out | position of the output pair within its frame |
| `out_u`, `out_l` | out | output lanes |

Frames follow each other without gaps, counted in enabled cycles from the first enabled
cycle after reset. Dropping `in_valid` freezes the whole pipeline, so input may pause
anywhere. Output only advances when input does, so to drain the last frame, keep feeding
samples (zeros, for example) for the latency.

## What follows the paper and what is added

These follow the paper:

- the folded 2-parallel DIF structure;
- the DSD sizes and their order in the FFT and the IFFT;
- the natural-order FFT schedule and the bit-reversed ASAP IFFT schedule;
- the input regrouping DSD(N/4), and the interleaving and de-interleaving DSD(N/2);
- the resulting memory, multiplexer and latency counts.

The paper does not specify the following; they are choices of this RTL:

- **Input lane order.** The paper's architecture figure labels the inputs x_k and
  x_{k+1}. Its schedule, however, starts butterfly A_k at cycle N/4 + k behind a DSD(N/4)
  and then uses a DSD(N/4) after stage A. Only the lane order given above satisfies both.
- **Eq. (5) against the schedule figure.** One equation of the paper lists the X-channel
  output stage of the interleaved IFFT as D0 D2 D4 D6 …. Its schedule figure shows the
  bit-reversed D0 D4 D2 D6 …, the only order that yields natural-order output. The RTL
  follows the figure.
- Word widths, per-stage halving, rounding and saturation.
- The way H is supplied: bin-number request, answered in the same cycle.
- The enable-based flow control, `out_valid` and `out_pos`.
- The optional pipeline registers (`PIPE`).
- Delay lines built as circular buffers, so they map to memories.

The reorder buffer of the conventional cascade is not built, since removing it is the
point of the design.

## Files

| file | content |
|---|---|
| `rtl/fft_pkg.sv` | widths, `cplx_t`/`coef_t`, twiddle formula, latency formula |
| `rtl/bf2.sv` | radix-2 butterfly |
| `rtl/cplx_mult.sv` | complex multiplier |
| `rtl/delay_line.sv` | D-cycle delay, circular buffer |
| `rtl/dsd.sv` | delay-switch-delay unit |
| `rtl/fft_stage.sv` | butterfly + twiddle table + multiplier of one stage |
| `rtl/mdc_fft.sv` | 2-parallel FFT, natural order in, bit-reversed out |
| `rtl/pointwise_mult.sv` | H multiplication and bin numbering |
| `rtl/asap_ifft.sv` | 2-parallel IFFT, bit-reversed in, natural order out |
| `rtl/fft_ifft_cascade.sv` | top level |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/tb_cascade_full.sv` | default build (N = 1024, one stream) end to end |
| `tb/tb_cascade_interleaved_1024.sv` | two-channel build at N = 1024 end to end |
| `tb/tb_ref_pkg.sv`, `tb/cascade_driver.sv`, `tb/xform_checker.sv` | reference DFT, stimulus and checkers |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_cascade_full.sv --top-module tb_cascade_full -Mdir obj_full
./obj_full/Vtb_cascade_full
```

Replace `tb_cascade_full` with any `tb_<module>` to test one block. The testbenches check
the following:

- `tb_fft_ifft_cascade` runs four small configurations: N = 16/32/64, one and two
  channels, with and without `PIPE`. It uses random stalls and checks every output
  against a double-precision circular convolution. It also checks the exact cycle of the
  first output (1.25N − 2 and 2N − 2 for `PIPE = 0`).
- `tb_mdc_fft` and `tb_asap_ifft` check each transform on the exact cycle its latency
  predicts.
- `tb_dsd` also replays the 16-point input regrouping from the schedule above.

The full-size runs take a few seconds each.

To change the transform size or mode, set `N` (a power of two, at least 8), `CHANNELS`
and `PIPE` on `fft_ifft_cascade`. To change the word widths, edit `DW`, `CW` and `CFRAC`
in `fft_pkg`.
