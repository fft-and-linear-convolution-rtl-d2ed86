# Bit-slicing multiplication for FFT and linear convolution: RTL

This design multiplies by table look-up rather than with a multiplier array,
and builds two signal-processing engines on that multiplier. A 16-bit operand
is cut into four 4-bit slices. Every pair of slices, one from each operand, is
multiplied by a small look-up table, which gives 16 tables working in parallel.
The sixteen partial products are shifted into place and added.

Two engines use this *bit slicing multiplier* (BSM):

* **a GEMM linear-convolution engine.** It convolves an input of up to 15
  samples with a kernel of up to 15 samples. It forms every product
  `X(i)·H(j)` with the BSM and adds each one into register `i+j` of a
  32-entry accumulator file.
* **a 64-point radix-2 single-path delay-feedback (R2SDF) FFT.** It uses
  decimation in frequency and takes one complex 12-bit sample per clock. Each
  of its six butterflies does its twiddle rotation with four BSMs. A sort unit
  at the end restores natural bin order.

The RTL follows the structure of the conference paper *"FFT and Linear
Convolution Implementation with Bit Slicing Multiplier: A Novel Approach"*
(Aravind Kumar N, Hari Krishna S, Anita Angeline A): its block diagrams,
widths, unit names and example waveforms. The paper describes the blocks in
prose and diagrams but gives no control details. Where it says nothing, the
choices are this implementation's own; they are marked as such below and in
each file's header.

## 1. The bit slicing multiplier (`bsm`, `bsm_lut`)

```
A_in[15:0] ──┐  digit slicing   a3 a2 a1 a0      16 LUTs            shifters         32-bit
B_in[15:0] ──┘  decoder         b3 b2 b1 b0  ──► a_k × b_l  ──►  << 4(k+l)  ──►  adder ──► reg ──► mult_out[31:0], done
```

* `A = a3·2^12 + a2·2^8 + a1·2^4 + a0`, where `a0..a2` are unsigned slices
  and `a3` is a *signed* slice (−8..7). The same holds for B. So
  `A·B = Σ a_k·b_l·2^{4(k+l)}` is exact in two's complement. Each LUT
  therefore comes in one of four signedness variants, fixed by the
  parameters `A_SIGNED`/`B_SIGNED`. Each is a 256-entry table computed at
  elaboration that holds a 9-bit signed product, sign-extended to 32 bits.
* The multiplier has one register stage: operands in cycle *t*, product and
  `done` in cycle *t+1*, a new product every clock. The example products in
  the paper's simulation (for instance 22115 × −10743 = −237581445) are
  reproduced exactly and checked in `tb_bsm`.

## 2. The linear-convolution engine (`gemm_conv`)

```
X(n) ─► ┌───────────┐ A_in ┌─────┐ result_out ┌────────┐ 32×32 ┌──────────────┐ result
H(m) ─► │ conv_fifo │─────►│ bsm │───────────►│ 1×32   │──────►│ conv_regfile │──────►
        └───────────┘ B_in └─────┘            │ demux  │       │ 32 acc + add │ rcv_bit
   assign_read_en ▲          │ done_bit       └────────┘       └──────────────┘
        ┌─────────┴─┐        ▼                   ▲ select_out = i+j
 n,m ─► │conv_assign│   ┌─────────────┐          │
        └───────────┘   │ conv_select │──────────┘
                        └─────────────┘
```

One operation goes through three phases.

1. **Load.** The input X goes in through `buf_A_in` while `wr_A_en` is high.
   The kernel H goes in through `buf_B_in` while `wr_B_en` is high. Both load
   one sample per clock, in index order. `seq_A_no = n` and `seq_B_no = m`
   give the lengths, with 1 ≤ n, m ≤ 15 because they are 4 bits wide.
2. **Multiply and place.** The assign unit counts the writes. When exactly n
   and m samples are in, it raises `assign_read_en` for n·m clocks. For each
   read, the buffer issues the next pair in the order
   `(X0,H0) (X0,H1) … (X0,Hm-1) (X1,H0) …`, so the kernel is re-read for each
   input sample. The BSM multiplies the pair. The select unit follows the same
   `(i, j)` sequence and drives `select_out = i+j`. The demultiplexer then
   hands the product to accumulator `i+j`, whose own adder adds it in.
3. **Output.** After the last product, `y(0) … y(n+m−2)` leave on `result`,
   one per clock, with `rcv_bit` high. The accumulators then clear
   themselves and the buffer is empty, ready for the next operation.

Timing: count the clock edge that writes the last sample as edge 0. Pairs
are read on edges 2 … n·m+1, and `y(0)` is valid after edge n·m+4. The full
15 × 15 case therefore produces its first output 229 clocks after loading
finishes, and its 29th output 28 clocks later. Samples are signed 16-bit and
accumulators 32-bit; the accumulators wrap only for near-full-scale 15 × 15
inputs.

Rules: n and m stay constant during an operation, exactly n and m samples
are written, and no samples are written while the products are being read. An
assertion in `conv_fifo` flags a read from an empty buffer.

## 3. The 64-point R2SDF FFT (`fft_r2sdf`)

### 3.1 Stage structure

```
din ─► [stage 0: L=32] ─► [stage 1: L=16] ─► … ─► [stage 5: L=1] ─► fft_sort ─► dout
           │  ▲                                                       (bit-reversed → natural)
       fft_delay (L words)  ◄─►  fft_butterfly  ◄── fft_rom (L twiddles + counter)
```

Stage *s* has `L = N / 2^(s+1)` and carries out the decimation-in-frequency
split

```
X[2k]   ← x[n] + x[n+L]
X[2k+1] ← (x[n] − x[n+L]) · W_{2L}^n          n = 0 … L−1
```

on consecutive groups of 2L samples. It uses one delay line of L words and no
other storage.

### 3.2 The per-stage schedule (the part that takes some thought)

Each stage's ROM unit holds a counter over 2L positions. Its top bit is the
butterfly's *phase*:

| phase | counter | into the delay line | to the next stage |
|---|---|---|---|
| 0 (first half) | k = 0 … L−1 | the new sample x[k] (it waits) | the word leaving the delay line × `W_{2L}^k` |
| 1 (second half) | L … 2L−1 | `x[k] − x[k+L]` (delayed − new) | `x[k] + x[k+L]` |

During the second half, each new sample meets its partner, which entered L
clocks earlier and is just leaving the delay line. The sum goes straight on.
The difference goes back into the delay line. During the *next* group's first
half that difference leaves again, exactly when the counter is at its index
k, and is rotated by `W_{2L}^k`. So a stage emits L sums followed by L rotated
differences, which is the in-place order of the textbook algorithm. After six
stages, bin `X[bitrev(i)]` is the i-th word of each frame.

The rotation uses four BSMs (`re·wr`, `im·wi`, `re·wi`, `im·wr`). Sums go
through the same four multipliers with the twiddle 1 + 0j. That is exact, and
it gives both kinds of result the same two-clock latency (multiplier register
plus output register), so the output stream stays in order without
realignment.

**Starting, flushing and frame spacing.** The counter starts with the first
valid sample from the previous stage and runs while the stage is *active*:
either a valid input arrives, or the delay line still holds valid words
(`pend`, computed from a valid flag stored with each word). After a frame's
last sample, the delay line still holds L differences. The counter runs once
more through the first half without input to rotate them and send them on,
then returns to zero. No dummy samples are needed to drain the pipeline.
Consequently a frame is 64 samples on 64 consecutive clocks, and the next
frame must follow either immediately or after at least N/2 = 32 idle clocks.
An assertion in every ROM unit (`a_frame_aligned`) reports a frame that
starts in the middle of a group.

### 3.3 Sort unit

The sort unit writes each result to the bit-reversed address of its arrival
count, then reads the array out in order in N clocks. It has two banks: one
frame is read while the next is written, so frames can stream back to back.

### 3.4 Timing

Count the clock edge that takes input sample 0 as edge 0.

* Stage *s* adds L + 2 clocks of latency.
* The last stage delivers its first (bit-reversed) word after edge N + 11 and
  its last after edge 2N + 10.
* `X[0]` leaves the sort unit after edge **2N + 11 = 139**, and the other 63
  bins follow on consecutive clocks. For a general size N the figure is
  2N + 2·log2(N) − 1.
* Throughput is one sample per clock.

### 3.5 Number format and accuracy

* Input: 12-bit signed real and imaginary parts. They are sign-extended to
  the 16-bit internal width.
* Internal and output samples: 16-bit signed, unscaled, so
  `X[k] = Σ x[n]·W_N^{nk}`. Add, subtract and the final truncation all wrap
  modulo 2^16.
* Twiddles: one 24-bit ROM word holding two 12-bit signed parts with 10
  fraction bits (1.0 = 1024), rounded to nearest.
* After each rotation, the 32-bit products are combined and shifted right by
  10 bits (floor), then truncated to 16 bits.

With random full-scale 12-bit input, the bins have an RMS of about 9.5k per
component. Occasional peaks exceed 16 bits and wrap. Against a
double-precision DFT, the mean SNR measured by `tb_fft_r2sdf` over random
full-scale frames is about **58 dB**. The paper reports a mean of 50.95 dB
for its own (unspecified) fixed-point format.

## 4. Where this RTL departs from, or goes beyond, the published design

* **FFT word width.** The paper says samples are extended to 24 bits to
  match the 24-bit twiddles and then "truncated back to 12 bits". Its FFT
  diagram and output waveform, however, show 16-bit outputs with values such
  as 16328, which 12 bits cannot hold. This RTL follows the 16-bit outputs and
  keeps 16 bits through every stage. The diagram's "24" on the
  butterfly–delay connections is read as the width of one packed word in the
  paper's version. Here a delay word is 2 × 16 bits.
* **Twiddle format.** "24-bit twiddle factors" is implemented as two 12-bit
  parts with 10 fraction bits. The paper does not give the split or the
  fraction length. The paper generates the table with a script; here it is
  computed from `$cos`/`$sin` at elaboration.
* **BSM inside the FFT.** The paper's FFT section does not say which
  multiplier rotates the differences. Its title and abstract place the BSM in
  both algorithms, so the butterflies use four BSMs each.
* **Twiddle timing.** The paper says the ROM supplies the twiddle "during the
  second half" of the counter. Here the rotation happens in the first half of
  the following group, which is when the differences leave the delay line.
  The effect is the same.
* **Control details are this implementation's own.** These include the
  start condition of the assign unit, the pair order, the select unit's n/m
  inputs and end flag, the accumulator streaming order and clearing, the
  valid flags and flush of the FFT, and the sort unit's second bank.
* **Convolution waveform signal `ALUop_i`.** The convolution waveform shows a
  5-bit signal of this name whose function is not described, so it is not
  implemented. The same waveform shows a 0 on `result` before the first
  output; this RTL starts directly with y(0).
* **One top.** The paper treats the multiplier, the convolution engine and
  the FFT as separate designs. `bsm_dsp_top` only places the two engines side
  by side on a shared clock and active-low reset. The convolution engine
  keeps the active-high `rst` of its published waveform.
* **FFT latency.** The paper gives no latency or clock period. Its FFT
  waveforms print two cursor times: 400 ns where the first sample enters and
  13,249.821 ns where the first output appears, 12,850 ns apart. The 139-clock
  latency of this RTL (section 3.4) is its own pipeline's. It was not fitted to
  that interval, because the interval cannot be converted to clocks without
  a printed period.
* **Not reproducible.** The FPGA resource, power and delay figures (Spartan-7)
  cannot be reproduced here. As a rough cross-check, a generic synthesis of
  this RTL gives flip-flop counts close to the published register counts:
  33 for the multiplier (published 32), about 1140 for the convolution
  engine (1227), and about 2980 for the FFT (2792). The look-up tables of
  the multipliers are synthesised as ROMs here, so LUT counts cannot be
  compared.

## 5. Files

| file | contents |
|---|---|
| `rtl/dsp_pkg.sv` | widths, the complex-sample and twiddle types, shared constants |
| `rtl/bsm_lut.sv`, `rtl/bsm.sv` | slice look-up table; 16 × 16 bit slicing multiplier |
| `rtl/conv_fifo.sv`, `conv_assign.sv`, `conv_select.sv`, `conv_demux.sv`, `conv_regfile.sv` | convolution sub-blocks |
| `rtl/gemm_conv.sv` | convolution engine |
| `rtl/fft_delay.sv`, `fft_rom.sv`, `fft_butterfly.sv`, `fft_sort.sv` | FFT stage parts and sort unit |
| `rtl/fft_r2sdf.sv` | 64-point FFT (parameter `N`, a power of two, at least 4) |
| `rtl/bsm_dsp_top.sv` | top: both engines |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_fft_ref_pkg.sv` | bit-exact fixed-point DIF model, double-precision DFT, SNR |
| `tb/tb_fft_small.sv` | the FFT at N = 8 (the size of the textbook flow graph) and N = 16 |

## 6. Simulating

Every testbench checks itself against values computed independently: direct
integer products, direct convolution, a bit-exact fixed-point model of the
FFT and a floating-point DFT. Each also checks the latencies given above, and
ends by printing `TB_RESULT checks=<n> failures=<n>`. Each one builds and runs
with plain Verilator 5 from the repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/dsp_pkg.sv tb/tb_fft_ref_pkg.sv tb/tb_bsm_dsp_top.sv --top-module tb_bsm_dsp_top
./obj_dir/Vtb_bsm_dsp_top
```

Leave out `tb/tb_fft_ref_pkg.sv` for testbenches that do not import it.

`tb_bsm_dsp_top` runs the whole design at its default sizes, with both
engines busy at the same time:

* the published 15 × 15 convolution (X = 1…15, H = 4…18, giving
  4, 13, 28, 50, …), the 1 × 1 and 15 × 1 extremes, and random signed
  operations;
* six FFT frames: back to back, after a 32-clock gap, after a long gap, and
  one whose bins overflow the 16-bit output.

It also counts that every mechanism actually occurred: back-to-back frames,
flushes, wrap-around, multi-product accumulation, the 15 × 15 limit, and
overlap of the two engines. `tb_fft_r2sdf` additionally prints the mean
SNR, and `tb_fft_small` checks the FFT at N = 8 and N = 16.

To change sizes: `fft_r2sdf #(.N(...))` accepts other powers of two. The
per-stage delays, ROMs and sort unit follow from N. The convolution limits
follow from `CONV_LEN_W`, `CONV_NREG` and `CONV_SEL_W` in `dsp_pkg` (keep
`CONV_NREG >= 2^(CONV_LEN_W+1) - 3` and `CONV_SEL_W = log2(CONV_NREG)`). The multiplier is
written for 16-bit operands in 4-bit slices (`BSM_W`, `BSM_P`).
