# Two-channel FFT by channel interleaving on an R2MDC pipeline

A radix-2 multipath delay commutator (R2MDC) FFT has two data paths and a
butterfly on every stage, but each butterfly is busy only half of the time:
for a single channel, stage 0 has to wait N/2 cycles for x[n+N/2] before it can
pair it with x[n], and the later stages idle in the same way. This design lets
a second channel use exactly those idle slots. Two complex channels, X and Y,
arrive in parallel at one sample each per clock. A small delay-switch-delay
circuit (DSD) re-arranges them so that the pipeline sees channel X's butterfly
pairs for N/2 cycles, then channel Y's for N/2 cycles, with no gap. Every
butterfly is then busy on every cycle. A second DSD at the end puts each
channel back on its own output, and a half-size bit-reversal circuit returns
the bins to natural order.

The RTL implements this scheme for N = 16 and two channels, the configuration
the architecture is presented in, as synthesizable SystemVerilog. It is
bit-exact against an independent fixed-point model.

```
 x_in ─┐   ┌─────────┐   ┌────────── r2mdc_core ───────────┐   ┌─────────┐   ┌────────────┐
       ├──►│ 8-DSD   │══►│ BF A ─ 4D/sw/4D ─ BF B ─ 2D/sw/2D│══►│ 8-DSD   │══►│ bitrev (3D)│─► x_out
 y_in ─┘   │ (pre)   │   │  ─ BF C ─ 1D/sw/1D ─ BF D        │   │ (post)  │   │ bitrev (3D)│─► y_out
           └─────────┘   └──────────────────────────────────┘   └─────────┘   └────────────┘
                ▲                 ▲ a_idx                          ▲ post_sel      ▲ br_pos
                └──────────────── fft_ctrl: one 4-bit frame counter ────────────────┘
```

## Schedule: who uses a butterfly when

The whole design depends on one schedule. Count cycles from the cycle in which
x[0] and y[0] are at the inputs (t = 0). For N = 16:

| butterfly | busy with channel X | busy with channel Y |
|---|---|---|
| BF A (stage 0) | cycles 8 .. 15 | 16 .. 23 |
| BF B (stage 1) | 12 .. 19 | 20 .. 27 |
| BF C (stage 2) | 14 .. 21 | 22 .. 29 |
| BF D (stage 3) | 15 .. 22 | 23 .. 30 |

Consecutive frames follow every 16 cycles, so each butterfly is busy on every
cycle.

Written as the order in which each stage executes the butterflies of the 16-point
DIF flow graph (A0..A7 are the stage-0 butterflies of channel X, A'0..A'7 those
of Y, and so on):

```
A = A0 A1 A2 A3 A4 A5 A6 A7 A'0 A'1 A'2 A'3 A'4 A'5 A'6 A'7
B = B'4 B'5 B'6 B'7 B0 B1 B2 B3 B4 B5 B6 B7 B'0 B'1 B'2 B'3
C = C'2 C'3 C'4 C'5 C'6 C'7 C0 C1 C2 C3 C4 C5 C6 C7 C'0 C'1
D = D'1 D'2 D'3 D'4 D'5 D'6 D'7 D0 D1 D2 D3 D4 D5 D6 D7 D'0
```

Butterfly j of stage s runs N/2^(s+1) cycles later than on the stage before.
So stage B lags A by 4 cycles, C lags B by 2 and D lags C by 1. These lags are
exactly the commutator delays 4D, 2D and 1D. A single-channel R2MDC leaves the
eight slots of each row empty; the primed (Y) operations fill them.

## Pre-processing: the delay-switch-delay (DSD)

`dsd` (DELAY = 8) has a DELAY-register line on its lower input, a 2x2 switch,
and a DELAY-register line on the upper switch output. The select is high for
the first 8 cycles of each 16-cycle frame. With x on the upper input and y on
the lower input:

```
in_u   x0 .. x15            out_u (from t = 8)  x0 .. x7   y0 .. y7
in_l   y0 .. y15            out_l (from t = 8)  x8 .. x15  y8 .. y15
```

So from t = 8, the two outputs carry the butterfly pair (x[n], x[n+8]), and
from t = 16 the pair (y[n], y[n+8]). The first butterfly therefore needs no
delay line of its own. The DSD holds 16 words and has a latency of 8 cycles.
Both numbers equal (M-1)·N and (M-1)·N/M for M = 2 channels.

`mc_interleaver` generalises this to M = 2, 4 or 8 channels. It has log2(M)
stages of M/2 DSDs each:

- Stage s merges lanes M/2^(s+1) apart. Its DSDs have delay D0/2^s.
- For 8 channels and N = 64 the three delays are 32, 16 and 8. For N = 16 they are 8, 4 and 2.
- Each DSD's upper output stays on the lower-numbered lane. Its lower output goes to the higher-numbered lane.
- After the last stage, every cycle carries M samples of one channel: indices n + r·N/M, with lane r holding r.
- The channels take turns, N/M cycles each.
- Registers: M·(N/2 + N/4 + ...) = (M-1)·N words. Latency: (M-1)·N/M cycles.

With D0 = M/2 instead (delays 4, 2, 1 for 8 channels; a 1-DSD for 2), each
cycle carries M consecutive samples of one channel, and the channel changes
every cycle. That is the input form of an M-parallel FFT. Both variants are
tested.

The top uses this module with M = 2, where it is the single 8-DSD above. An FFT
that would consume 4 or 8 interleaved lanes is not part of this design.

## The interleaved R2MDC core

`r2mdc_core` has four butterflies (`bf_r2`). Three commutators
(`mdc_commutator`, delays 4, 2, 1) sit between them. Each commutator delays the
lower butterfly output by D, passes both paths through a 2x2 switch, and delays
the upper switch output by D. It holds 2D registers, so the core holds 14 words.

A single input, `a_idx`, drives all the core's control. `a_idx` is the position
(0..15) of the pair now at BF A: 0..7 for channel X, 8..15 for channel Y. Each
later stage sees the time index t_s = t_(s-1) − N/2^(s+1), and from it:

- `swap_s` = bit log2(N/2^(s+1)) of t_(s-1). The switch crosses during the second half of each 2D window.
- The twiddle exponent of stage s = (t_s mod N/2^(s+1)) · 2^s. BF D always uses W^0 and has no multiplier.

Seven cycles after pair j entered, BF D gives X[br(j)] on its upper output and
X[br(j)+8] on its lower output. Here br reverses a 3-bit index: j = 0..7 gives
bins 0 4 2 6 1 5 3 7. Channel X comes first, then channel Y. The core is
written for any power-of-two N; it has been simulated at N = 16 and N = 64.

## Post-processing and the half-size bit reversal

The BF D outputs pass through a second 8-DSD with the same structure. Its upper
input is direct and its lower input is delayed. It puts X[br(j)] then
X[br(j)+8] on the upper output, and the same bins of Y on the lower output.
Each channel is now in natural order at the half level: bins 0..7, then bins
8..15. Inside each half the order is bit-reversed over only 3 bits. So an
8-point bit reversal suffices, not a 16-point one.

`bitrev_half` performs the reversal with `reoc` swap circuits. A reoc is a
D-register line between two multiplexers that share one select:

- Select high: the line takes the input and the output is the line's end, a plain delay of D.
- Select low: the input goes straight to the output, and the sample leaving the line re-enters it.

A sample bypassed at time t thus overtakes the sample that entered at t − D,
which swaps the two. Reversing a B-bit index needs one reoc per bit pair (i, B−1−i):

- Its delay is 2^(B−1−i) − 2^i.
- It bypasses exactly when the position has bit B−1−i set and bit i clear.

For 8 points this is one reoc of 3 registers. The select is low at positions 4
and 6 of each 8-sample block. For 32 points (N = 64) it is two reocs, of 15 and
6 registers.

## Control and interface

`fft_ctrl` holds one log2(N)-bit counter: the frame position of the samples now
at the inputs. `in_sop` forces the position to 0. After that the counter keeps
counting, so frames must follow back to back. An assertion flags an `in_sop`
off the frame boundary once output has started. Every other control is a
constant offset of this count:

| signal | value (N = 16) | used by |
|---|---|---|
| `in_pos` | pos | pre-processing interleaver (select = pos < 8) |
| `a_idx` | pos − 8 | r2mdc_core |
| `post_sel` | (pos − 15) mod 16 < 8 | post-processing DSD |
| `br_pos` | (pos − 15) mod 8 | bit reversal |
| `out_sop` | in_sop delayed 26 cycles | output framing |

Top-level ports (`mcfft_arch3_top`):

| port | dir | type | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset (all registers to 0) |
| in_sop | in | 1 | sample 0 of a frame on x_in / y_in |
| x_in, y_in | in | `cin_t` (16-bit re, im) | one sample per channel per clock |
| out_sop | out | 1 | bin 0 on x_out / y_out |
| out_valid | out | 1 | high from the first out_sop on |
| x_out, y_out | out | `cplx_t` (21-bit re, im) | X[k], Y[k], k = 0..15 on consecutive cycles |

Latency from in_sop to out_sop is 26 cycles. This is the sum of 8 (pre), 7 (the
butterfly stages), 8 (post) and 3 (bit reversal). Throughput is one 16-point
transform per channel every 16 cycles.

## Arithmetic

- **Input and internal words.** Inputs are 16-bit two's complement. They are sign-extended to 21 bits (16 + log2 N + 1) and no stage scales. The extra bit covers a twiddle rotation that moves a full-scale magnitude into one component.
- **Twiddles.** W_N^k = exp(−j2πk/N) is rounded to 16 bits with 14 fraction bits. `fft_pkg::twiddle` computes the table at elaboration time, so there is no table file.
- **Products.** The four real products are summed and shifted right by 14, truncating toward −∞.
- **Accuracy.** The end-to-end testbench checks the fixed-point result against a floating-point DFT, with a tolerance of 20 LSBs per component.
- **Changing the widths.** All widths are in `fft_pkg`. For N = 64 with 16-bit inputs, raise `DW` to IN_W + 7.

## Register budget

| part | words (N = 16) |
|---|---|
| pre-processing 8-DSD | 16 |
| FFT commutators 4D, 2D, 1D (2 each) | 14 |
| post-processing 8-DSD | 16 |
| bit reversal, 3 per channel | 6 |

These four numbers match the published register counts of this architecture. The
control adds a 4-bit counter and the 26-bit shift register that carries in_sop
to out_sop.

## Where this RTL makes its own choices

The block structure follows the published architecture: the DSDs, the R2MDC
with 4D/2D/1D commutators, the post-processing DSD and the half-size bit
reversal. The following are this design's own:

- All word widths, the twiddle rounding, and the four-multiplier complex product.
- The butterflies are combinational, so the register count above holds exactly. The price is a long combinational path: BF A through the crossed switches to BF D. For high clock rates, add equal pipeline registers to both butterfly outputs and shift the control offsets to match.
- The timing of every switch, twiddle and bit-reversal select. These are derived from the schedule above; the architecture states only that the control is counter based.
- The 8D after the pre-processing switch is kept. It aligns x[n] with x[n+8] and is counted in the 16 pre-processing registers.
- The frame signals `in_sop`, `out_sop` and `out_valid`, and the reset of all data registers.

The architecture is also described in two alternative forms, not built here. One
is a 2-parallel FFT with 1-DSD pre-processing. The other uses reorder-circuit
pre-processing.

## Files

| file | content |
|---|---|
| `rtl/fft_pkg.sv` | sizes, complex types, twiddle function |
| `rtl/delay_line.sv` | nD register chain |
| `rtl/dsd.sv` | delay-switch-delay |
| `rtl/mc_interleaver.sv` | M-channel DSD interleaver |
| `rtl/bf_r2.sv` | radix-2 DIF butterfly with twiddle multiplier |
| `rtl/mdc_commutator.sv` | R2MDC delay commutator |
| `rtl/r2mdc_core.sv` | interleaved R2MDC FFT |
| `rtl/reoc.sv` | reorder (swap) circuit |
| `rtl/bitrev_half.sv` | N/2-point serial bit reversal |
| `rtl/fft_ctrl.sv` | frame counter and control |
| `rtl/mcfft_arch3_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. Each has a watchdog.

- `tb_mcfft_arch3_top` runs 8 back-to-back frames at the default size: impulse, DC, full-scale extremes and random data. It checks every bin bit for bit against an independent fixed-point DIF model, and the model itself against a floating-point DFT. It checks the 26-cycle latency. It also counts how often each DSD, commutator and reorder switch position is used.
- `tb_mcfft_arch3_n64` repeats this at N = 64.

To run a testbench with Verilator (5.x), from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_mcfft_arch3_top.sv \
          --top-module tb_mcfft_arch3_top
./obj_dir/Vtb_mcfft_arch3_top
```

Substitute any other `tb_*` name. To lint a module:
`verilator --lint-only -Wall -Irtl rtl/fft_pkg.sv rtl/<module>.sv --top-module <module>`.
