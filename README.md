# A dead-time-free 4 GHz FFT spectrometer in SystemVerilog

Searches for wave-like dark matter (hidden photons, axions) look for a very
narrow line, about one part in a million of its frequency wide, somewhere in a
band many GHz wide. The instrument that finds it has to turn a 4 GHz wide band
into power spectra with ~16 kHz bins, and it has to do that for every sample
that arrives. A spectrometer that drops samples while it is busy loses
observing time in direct proportion to what it drops.

This RTL is such a spectrometer. A complex (I/Q) baseband signal, sampled by
two 12-bit converters at 4.096 GS/s each, enters as 8 I/Q pairs per 512 MHz
clock. Every block of N = 2^18 consecutive samples is Fourier-transformed,
squared to power, and M = 1024 consecutive power spectra are summed per bin.
The finished sum (one spectrum per 65.536 ms) is put in natural frequency
order and streamed out over AXI4-Stream to a DMA engine. Nothing in the path
ever waits: the FFT accepts a new 16-sample beat every FFT clock, and the
accumulator starts the next sum on the very next spectrum.

The two ideas that make this fit in a mid-size FPGA are:

1. **A 16-lane FFT built from 16 small serial FFTs and one 16-point parallel
   FFT.** Only 15 general "twiddle" rotators are needed between the two.
2. **A split twiddle table.** Each general rotation by W_N^m is done with two
   small tables and two complex multiplies instead of one table of N/4 entries.
   This cuts the table memory from O(N) to O(sqrt N).

## Data path

```
 adc_i[8], adc_q[8] @ adc_clk (512 MHz)
        │
 input_distributer     16 dual-clock FIFOs, lane r gets time sample 16t+r
        │ 16 lanes @ fft_clk
 16 × sdf_fft          serial radix-2 FFT of N/16 points per lane (bit-reversed out)
        │
 15 × split_lut_rotator   lane r (r=1..15) rotated by W_N^(k_lo·r); lane 0 delayed
        │
 fft16_r24             16-point radix-2^4 FFT across the lanes
        │
 16 × power_calc       re²+im² → FP32 (or 54-bit fixed point)
        │
 accumulator           partial-sum RAM, 16 bins per beat, M spectra per round
        │ buffer writes
 spectrum_buffer       one finished spectrum, written @ fft_clk, read @ dma_clk
        │
 spectrum_readout      bit-reversed → natural order, AXI4-Stream @ dma_clk (100 MHz)
```

`fft_block` groups the first five rows. `spectrometer_top` adds the
accumulator, buffer and readout, and brings out the following ports:

- the converter sample bus;
- the AXI4-Stream master;
- three status outputs: `fifo_overflow`, `readout_busy` and `overrun_count`;
- the `frame` counter.

## Getting 16 lanes out of 8

The converter delivers 8 time-consecutive samples per 512 MHz clock. Logic at
512 MHz is hard to close timing on, so the design widens the path to 16 lanes
and halves the clock. `input_distributer` writes alternate converter beats
into lanes 0–7 and 8–15 of sixteen asynchronous FIFOs. Once every FIFO holds a
word, it pops all sixteen at once on `fft_clk`. Lane r therefore carries
samples 16t + r, t = 0, 1, 2, …

The FFT clock is an independent input. It must be at least half the converter
clock (256 MHz) to keep up. Running it faster only leaves idle beats, and the
whole pipeline tolerates those. If it is too slow, a FIFO fills, the sample is
dropped, and the sticky `fifo_overflow` output is set.

Each FIFO uses Gray-coded pointers and two-flop synchronisers. It is
first-word-fall-through.

## The FFT decomposition

Write the bin index as k = k_lo + (N/16)·k_hi, with k_lo < N/16 and k_hi < 16.
Write the time index as t = t_lo + 16·t_hi, with t_lo < 16. The N-point DFT
then splits into three steps:

```
X(k) = Σ_{t_lo} W16^(k_hi·t_lo) · W_N^(k_lo·t_lo) · [ Σ_{t_hi} W_{N/16}^(k_lo·t_hi) x(t_lo + 16 t_hi) ]
```

1. The bracket is a separate N/16-point DFT of lane t_lo. `sdf_fft` computes
   it as a classic radix-2 decimation-in-frequency single-path delay-feedback
   pipeline. Stage s has a butterfly with a feedback memory of
   2^(log2(N/16)−1−s) words, then a twiddle multiply. It takes one sample per
   valid clock and outputs in bit-reversed order. Each stage widens the data by
   one bit: 12 → 26 bits for N/16 = 2^14.
2. The middle factor W_N^(k_lo·t_lo) is the "general rotation". It is the
   only place that needs twiddles of the full N. Lane 0 needs no rotation.
   Lanes 1–15 each get a `split_lut_rotator`. Because the SDF output is
   bit-reversed, the p-th beat of a spectrum carries k_lo = bitrev(p), and
   lane r is rotated by W_N^(bitrev(p)·r).
3. The outer sum over t_lo is a 16-point DFT across the lanes. `fft16_r24`
   computes it as radix-2^4: four columns of radix-2 butterflies. Between the
   columns are trivial rotations, which are multiplies by −i (a swap and a
   sign change). In the middle is one set of constant W16 rotations
   (cos/sin of multiples of π/8, as constant multipliers). Every column is
   registered, so the latency is 5 clocks. Output lane r holds
   k_hi = bitrev4(r).

So beat p, lane r of the FFT output is bin **k = bitrev(p) + bitrev4(r)·N/16**.
Nothing is reordered inside the pipeline. The accumulator works in this order,
and only the final readout puts bins in natural order.

## The split twiddle table

A general rotation by W_N^m, m < N, would normally need a table of N/4
cosines. At N = 2^18 that is 64 K words per rotator. The rotator here splits
the exponent's n bits into three fields:

```
W_N^m = W_4^(m[n-1:n-2]) · W_{N/L}^(m[n-3:l]) · W_N^(m[l-1:0])      L = 2^l
```

- **Quadrant.** The top two bits select a multiply by 1, −i, −1 or +i. This
  is a swap and a sign change, not a multiplier.
- **Coarse.** The coarse angle j < N/(4L) reads one quarter-wave cosine table
  of N/(4L) entries. Its sine is the same table read at N/(4L) − j, with
  sin = 0 at j = 0.
- **Fine.** The fine angle f < L reads a cosine table and a sine table of L
  entries each.

The total is 2L + N/(4L) stored numbers. It is smallest for l = (n−3)/2
(odd n) or l = (n−4)/2 (even n). For n = 18 that is 128 + 128 + 512 = 768
numbers instead of 65 536.

The cost is a second complex multiply. The pipeline is 3 clocks:

1. quadrant swap and coarse table read;
2. coarse multiply and fine table read;
3. fine multiply, rounding and saturation.

Coefficients are 18-bit Q1.16 (+1.0 is representable). The products are
rounded half-up. The tables are computed at elaboration from `$cos`/`$sin`,
so no data files are needed.

The same rotator is used for the twiddles inside each SDF stage (with n equal
to that stage's span). That was convenient, but it is more than needed: the
small stages could use a plain table.

## Word widths, and where they are exact

Widths grow by one bit per radix-2 stage:

| Point in the path | N = 2^18 | N = 2^17 |
|---|---|---|
| Input | 12 bits | 12 bits |
| After the SDF | 26 bits | 25 bits |
| After the 16-point FFT | 30 bits | 29 bits |
| Power | FP32 | 54-bit fixed point |
| Sum | FP32 | 64-bit fixed point |

The rotators keep their output width equal to their input width.

A rotation does not change a vector's length, but it can move a point from a
corner of the I/Q square onto an axis, where it needs √2 more range. One bit
of growth per stage is therefore exact only while every input sample has
|x| = √(I² + Q²) ≤ 2047. That holds for any signal that stays inside the
converter's full-scale circle. Corner inputs (I and Q both near full scale)
can saturate a rotator. Saturation is symmetric and never wraps. The
testbenches generate their stimuli inside the circle.

The fixed-point power is the exact 58-bit square with its 4 lowest bits
dropped. The FP32 power is rounded to nearest even. The FP32 accumulator adds
non-negative numbers with round-to-nearest-even. Over 1024 sums that gives a
relative error of a few 10^-7 per addition, as for any float accumulation.
The 64-bit fixed-point sum cannot overflow: 1024 · 2^54 = 2^64.

## Accumulation without dead time

`accumulator` keeps a partial-sum RAM of N/16 words of 16 sums. For each beat
p it does three things:

1. It reads word p in the beat's own clock.
2. It adds the 16 new powers one clock later. On the first spectrum of a round
   it adds them to zero instead of to the stored value.
3. It writes the result back.

On the last (M-th) spectrum the sums go to `spectrum_buffer` instead. A
`dump_start` pulse marks the first such write and a `dump_done` pulse the
last. The next spectrum starts the next round on the following beat, so no
input is ever skipped.

`spectrum_readout` sees `dump_done` and passes a toggle handshake into the
DMA clock domain. It then streams bins k = 0 … N−1. For each bin it reads
buffer address bitrev(k mod N/16) and takes lane bitrev4(k / (N/16)).
`tlast` marks bin N−1. The stream obeys AXI4-Stream back-pressure. An
assertion checks that the data holds while `tready` is low.

At 100 MHz a whole spectrum of 2^18 words takes 2.6 ms, far inside the
65.536 ms round. A new dump that begins while a readout is still running is
not stopped: it overwrites the buffer, and `overrun_count` counts it. This
happens only if the DMA side stalls for most of a round.

## Clocks and resets

There are three clock domains:

| Domain | Clock | Blocks |
|---|---|---|
| Converter | `adc_clk` | FIFO write side |
| FFT | `fft_clk` | FFT, power, accumulator, buffer write |
| DMA | `dma_clk` | buffer read, readout |

Each domain has its own active-low reset. They cross in only two places:

- the sample FIFOs, through Gray pointers;
- the readout handshake, a toggle plus two-flop synchroniser each way.

The buffer data is read only after the handshake, so it is never sampled
while it changes.

## Parameters

The defaults are the high-resolution build: `LOG2N = 18`, `FMT = FMT_FP32`,
`M = 1024`. The alternative build is `LOG2N = 17, FMT = FMT_FIXED`, with
54-bit power and 64-bit sums. Shared constants and the float helpers
(`u64_to_fp32`, `fp32_add_pos`, `bitrev`) live in `spec_pkg`. Further
parameters:

- `FIFO_AW`: log2 of the FIFO depth, default 16 words.
- The FFT clock frequency is set outside the RTL. The converter rate of
  4.096 GS/s needs at least 256 MHz. The 4.8 GS/s throughput the original
  instrument quotes corresponds to 300 MHz.

## Where this RTL departs from the original instrument

- The original used a vendor FFT core for the 16 serial sub-FFTs. It also
  used vendor clock-crossing FIFOs, and high-level synthesis for the
  distributer, the 16-point FFT, the power and the accumulator. Here all of
  them are hand-written RTL that follows the same structure. Rounding,
  scaling, latencies, coefficient width (18 bits) and table contents are this
  design's own.
- The split-table rotator is used in every SDF stage as well, not only in the
  15 largest rotators.
- The original gives two figures for the FFT clock: half of 512 MHz, and a
  throughput of 4.8 GS/s (16 × 300 MHz). Here the FFT clock is simply an
  independent input.
- The converter's own logic (the vendor data-converter core), the DMA engine,
  the processor and its software are outside this RTL. The RTL takes the
  converter's sample bus as input and ends in an AXI4-Stream master.
- The buffer is single. A spectrum completed while the previous one is still
  being streamed overwrites it and is counted in `overrun_count`. The
  original does not say how it handles this case.
- The start of the first spectrum is simply the first 16-lane beat after
  reset. No external frame alignment is provided.

## Testbenches

Each testbench in `tb/` is self-checking against an independent model. Each
ends by printing `TB_RESULT checks=… failures=…`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_async_fifo` | random two-clock traffic, fill to full, dropped write |
| `tb_input_distributer` | lane order at a fast FFT clock; overflow at a too-slow one |
| `tb_split_lut_rotator` | n = 17, 18 and 5 against a real-valued rotation, including latency |
| `tb_sdf_fft` | 64-point transform against a direct DFT |
| `tb_fft16_r24` | against a direct 16-point DFT; latency 5 |
| `tb_power_calc` | exact fixed-point and bit-exact FP32 results |
| `tb_accumulator` | sums, round boundaries and dump pulses, both formats |
| `tb_spectrum_buffer` | two-clock writes and reads |
| `tb_spectrum_readout` | natural order, tlast, back-pressure, overrun counting |
| `tb_fft_block` | 256-point spectra against a direct DFT, three frames |
| `tb_spectrometer_top` | end to end at N = 256, M = 16, four rounds (details below) |
| `tb_spectrometer_full` | one round at the defaults, N = 2^18 and M = 1024 (details below) |
| `tb_spectrometer_fixed17` | one round of the N = 2^17 fixed-point build, M = 1024: the tone bin must sum to M·(1000·N)²/16, because 4 low bits of the power are dropped |

`tb_spectrometer_top` runs with idle converter and FFT beats, random
back-pressure, one forced overrun, and a slowed FFT clock that overflows the
FIFOs. It counts each of these and fails if one never happens.

`tb_spectrometer_full` feeds a complex tone on bin 70001 for 1025 frames. It
checks the streamed sum at that bin, M·(1000·N)², and checks that every other
bin stays below 10^-6 of it.

To run one with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/spec_pkg.sv \
          $(ls rtl/*.sv | grep -v spec_pkg) \
          tb/tb_fft_block.sv --top-module tb_fft_block -o sim
./obj_dir/sim +verilator+rand+reset+2
```

List `rtl/spec_pkg.sv` first, because the other files import it. Most
testbenches finish in seconds. The full-size one simulates about 67 ms of
converter time, which takes about four minutes.
