# FPDA: a reconfigurable DSP array built from common modules

A Field Programmable DSP Array (FPDA) is configurable like an FPGA, but its fabric is made of
arithmetic "common modules" instead of generic logic blocks: look-up tables, adders, subtractors,
multipliers, registers, scaling accumulators and a 1-bit counter. Five DSP functions share one
device, and a mode decoder selects which of them is connected to the chip's pins. The five
functions are a 16-tap FIR filter, an IIR filter, a 16-point DCT, a scalable 16-point FFT and a
three-level discrete wavelet transform (DWT). The filters and the DCT avoid multipliers by using
distributed arithmetic (DA): they replace products with look-ups of precomputed partial sums.
Only the FFT uses real multipliers, and it needs just three per butterfly.

This RTL implements the architecture of Sinha, Sarkar, Acharyya and Chakraborty, "A Novel
Reconfigurable Architecture of a DSP Processor for Efficient Mapping of DSP Functions using Field
Programmable DSP Arrays". The paper gives datapath figures for every function and a top-level
block diagram. Word widths, handshakes, sequencing and number formats are not in the paper. They
were chosen for this RTL, and each choice is marked below and in the header comment of the file
concerned.

## Structure

```
            d[2:0] ──► decoder ──► C1..C5 (registered, one-hot)
                                        │
  x_in/in_valid ─┐                      ▼
  blk_x_*/start ─┼──►  interconnection matrix (icm)  ──► res_valid/res_data   (stream results)
  cfg_* (LUTs) ──┘        │    ▲                      ──► blk_done/blk_re/im (block results)
                          ▼    │
        pda_fir (FIR, C1)   iir (C2)   dct16 (C3)   fft16 (C4)   dwt (C5)
```

| code `d` | control | function | input | result |
|---|---|---|---|---|
| 1 | C1 | 16-tap FIR | sample stream | `res_data[0]` |
| 2 | C2 | IIR (16 forward + 15 feed-backward taps) | sample stream | `res_data[0]` |
| 3 | C3 | 16-point DCT | block `blk_x_re` | `blk_re[0..15]` |
| 4 | C4 | FFT, N = 2, 4, 8 or 16 | block `blk_x_re/im` | `blk_re/im[0..N-1]` |
| 5 | C5 | 3-level DWT | sample stream | `res_data[0..3]` = bands H1, H2, H3, low |
| 0, 6, 7 | none | idle | | |

The C1..C5 assignment is the paper's. The numeric codes are this design's. Only one function is
active at a time. A unit that is not selected receives no sample, start or configuration strobes,
so it keeps its state: a FIR filter resumes with its delay line intact after an FFT has run.

## Parallel distributed arithmetic in the filters

A FIR output is `y[n] = Σ c[k]·x[n−k]`. Full DA for 16 taps would need one LUT with 2^16 words.
The paper instead splits every 8-bit sample into two nibbles. The unit for one coefficient
(`pda_coef_unit`) has two 16-word LUTs. One is addressed by bits 3..0 of the sample and the other
by bits 7..4, and one adder forms

```
x·c = (LUT_hi[x[7:4]] << 4) + LUT_lo[x[3:0]]
LUT_lo[n] = n·c                 n = 0..15
LUT_hi[n] = signed4(n)·c        (n − 16 for n ≥ 8: carries the sign of x)
```

All nibbles of all taps are looked up in the same clock ("parallel" DA). `pda_fir` puts 16 such
units behind a 16-sample delay line and sums them with a balanced tree of 15 adders. That is 32
LUTs, 31 adders and 16 registers, as the paper lists for its FIR. The LUTs are plain writable
memories (`da_lut`). Loading `n·c` into them is the configuration of a coefficient. The hardware
does not care what the words mean, so the same filter can run any coefficient set, in any
fixed-point format. The testbenches use 16-bit integer coefficients, or Q1.15 for the wavelet
filters. The result is the exact integer sum (28 bits for 16 taps).

Timing: a sample is accepted on a clock where `in_valid` is high, at most one per clock. Its
result leaves two clocks later with `out_valid`: one clock for the delay line and one for an output
register. The output register means no path runs combinationally from an input pin to an output
pin.

### IIR as two FIR filters

The paper builds the IIR filter without a feedback path. It expands the recursion
`y[n] = Σ a[l]x[n−l] + Σ b[m]y[n−m]` so that the past outputs become past inputs. For three taps:

```
y2 = a0x2 + a1x1 + a2x0 + x0·(b2·b1·a0) + x1·(b2·a0)
```

`iir` is therefore a 16-tap forward filter on x[n]..x[n−15], plus a 15-tap "feed-backward" filter
on x[n−1]..x[n−15] with its own LUTs, plus one adder. The configuration loads the expanded
products into the feed-backward LUTs. The response is a truncated IIR: anything beyond 15 samples
of memory is lost. This follows the paper's equations and its statement that both filters see the
same input. A recursive IIR with a true output feedback path is not what the paper describes and
is not built. Latency is 3 clocks.

### Decimator and wavelet pyramid

A `decimator` is an 8-tap filter of the kind above, followed by a parallel-load register that a
1-bit counter enables on every second filter result. It keeps the results of samples 0, 2, 4, …:
one sample per clock goes in and one result per two clocks comes out. The paper clocks the counter
directly with the system clock. Here it toggles per filter result, which behaves the same at full
rate and stays correct when a decimator is fed at half rate.

`dwt` arranges six decimators as a three-level Mallat tree. At each level, a high-pass branch gives
an output band and a low-pass branch feeds the next level. The last level's low-pass branch gives
the fourth band. The filters take 8-bit samples, so the low band is shifted right by `LVL_SHIFT`
(16) and saturated to 8 bits before it enters the next level. With Q1.15 Daubechies coefficients
(gain √2), this keeps every level in range. The width reduction is this design's own choice.

## Scalable FFT: one butterfly column, rerouted every stage

`fft16` has 16 complex registers and 8 butterfly units. Unit i always takes REG i and REG i+8 and
drives outputs B i = a + w·b and B i+8 = a − w·b. Instead of 4 × 8 butterflies, the design loads
the butterfly outputs back into the registers through a 4:1 multiplexer per register, once per
stage. The select is the stage number s = {s1, s0}. The routing below is copied from the paper's
figure. Entries marked X/B pass through one of fourteen 2:1 multiplexers controlled by s2.

| reg | s=1 | s=2 | s=3 |  | reg | s=1 | s=2 | s=3 |
|---|---|---|---|---|---|---|---|---|
| 0 | X0/B0 | X0/B0 | X0/B0 | | 8 | X4/B4 | X2/B2 | X1/B1 |
| 1 | X1/B1 | X1/B1 | B8 | | 9 | X5/B5 | X3/B3 | B9 |
| 2 | X2/B2 | B4 | B2 | | 10 | X6/B6 | B6 | B3 |
| 3 | X3/B3 | B5 | B10 | | 11 | X7/B7 | B7 | B11 |
| 4 | B8 | B8 | B4 | | 12 | B12 | B10 | B5 |
| 5 | B9 | B9 | B12 | | 13 | B13 | B11 | B13 |
| 6 | B10 | B12 | B6 | | 14 | B14 | B14 | B7 |
| 7 | B11 | B13 | B14 | | 15 | B15 | B15 | B15 |

For s = 0, every register loads its sample X r. The wiring implements an in-place radix-2 FFT with
natural-order input, with pair spacings of 8, 4, 2 and 1. It leaves the results in bit-reversed
positions. One entry of the figure is hard to read (REG 4 at s=2 looks like "B9"). B8 is the only
value consistent with the rest of the wiring and with a correct transform, and it is used here.

**Scalability (s2).** With s2 = 1, the 2:1 multiplexers substitute raw samples for butterfly
outputs. Loading the samples at stage 1, 2 or 3 instead of 0 therefore starts an 8-, 4- or
2-point FFT on X0..X(N−1) in the first registers, and the remaining stages finish it. The twiddles
of those stages are already right for the smaller transform.

**Twiddles.** The complex multiplier (`cmult`) uses three real multipliers:

```
R = (cos t − sin t)·b + cos t·(a − b)
I = (cos t + sin t)·a − cos t·(a − b)          (a + jb)(cos t + j sin t)
```

The table (`twiddle_rom`) therefore stores cos t, cos t − sin t and cos t + sin t for
W16^k (t = −2πk/16), in Q2.14. The exponents are not printed in the paper. This design derives
them from the routing: per butterfly unit 0..7 they are 0,…,0 in stage 1, then 0 0 0 0 4 4 4 4,
then 0 0 2 2 4 4 6 6, and finally 0 4 1 5 2 6 3 7.

**Sequencing.** The sequencer is this design's own. `start` with `log2n` loads the samples at
stage 4 − log2n, with s2 set when N < 16. The unit then steps through the remaining stages, one
per clock. After the last stage it writes the butterfly outputs into an output register in
natural order. `done` rises log2n + 1 clocks after `start` (5 for N = 16). Inputs are 8 bits and
the registers 16 bits, so no stage needs scaling: |X[k]| ≤ 16·128·√2 < 2^15. Products are truncated
to 16 bits. Against an exact DFT, the error stays within a few LSB.

## DCT by bit-serial distributed arithmetic

`dct16` computes `Y[k] = Σ_{n=0}^{15} x[n]·cos((2n+1)kπ/32)` for k = 0..15. It does not apply the
normalisation (2/N)·C_k: this is the cosine sum that the paper's coefficient matrices describe.
It uses the standard even/odd split:

* Four input combination blocks (`dct_comb`). Block i takes x_i, x_{15−i}, x_{7−i} and x_{8+i}.
  It forms (x_i + x_{15−i}) ± (x_{7−i} + x_{8+i}), x_i − x_{15−i} and x_{7−i} − x_{8+i}.
* Y0, Y4, Y8 and Y12 are 4-term sums over the "sum of sums" inputs, and Y2 … Y14 over the
  "difference of sums" inputs. That gives one 16-word LUT per output: LUT0..7.
* Each odd output Y(2m+1) is an 8-term sum over x_n − x_{15−n}. It is split into two 4-term
  LUTs (LUT 8+m for n = 0..3 and LUT 16+m for n = 4..7), whose words one adder combines.

Unlike the filters, the DCT runs true bit-serial DA. The sixteen combined inputs (10 bits,
sign-extended) are held in shift registers. Each clock, one bit-plane, sign plane first, addresses
all 24 LUTs. Sixteen scaling accumulators (`scaling_acc`) each form `acc = 2·acc ± LUT word`; the
sign plane is subtracted. After 10 planes they hold the exact sums. The LUT words are sums of
Q1.14 cosines, computed at elaboration from a 17-entry table of cos(mπ/32) (`dct_lut`), so Y
carries 14 fraction bits. `done` comes 11 clocks after `start`.

The paper prints the coefficient matrices with a few slips: rows Y10 and Y14 of the even-odd
matrix, and "x3+12" for x3+x12. The LUTs here follow the DCT definition, not the printed rows.

## Using the top level

`fpda_top` has no parameters. All its sizes are the paper's or fixed in `fpda_pkg`.

* **Mode.** Drive `d`. The control word is registered, so the new mode is active one clock later.
  `c` and `mode` show it.
* **LUT configuration** (filter modes only; the FFT and DCT tables are constants). Select the mode,
  then write one word per clock with `cfg_we`, `cfg_sel`, `cfg_addr` (word 0..15) and `cfg_data`
  (20 bits):
  * FIR: `cfg_sel = {tap[3:0], hi}`
  * IIR: `cfg_sel = {bwd, tap[3:0], hi}`. The forward filter has taps 0..15. The feed-backward
    filter has taps 0..14, and its tap j multiplies x[n−1−j].
  * DWT: `cfg_sel = {level[1:0], lowpass, tap[2:0], hi}`
  * Contents: `lo` word n = n·c, `hi` word n = (n<8 ? n : n−16)·c.
* **Streams** (FIR, IIR, DWT). Use `x_in`/`in_valid`, at most one sample per clock.
  `res_valid[l]`/`res_data[l]` carry the results, 32-bit sign-extended. Latency is 2 clocks for
  the FIR, 3 for the IIR and 3 for the first DWT level.
* **Blocks** (FFT, DCT). Hold `blk_x_re`/`blk_x_im` and pulse `start`, with `log2n` for the FFT.
  Read `blk_re`/`blk_im` when `blk_done` pulses. The results stay until the next start.

## What follows the paper and what does not

Taken from the paper:
* the function set and one-hot mode table
* the 8-bit nibble-split parallel-DA filters (2 LUTs per coefficient, 16 taps)
* the IIR as forward plus feed-backward FIR on the same input
* the decimator of filter, 1-bit counter and parallel-load register
* the three-level DWT tree and the Daubechies 8-tap coefficients (used as test data)
* the FFT's 8-butterfly column, stage multiplexer routing and s2 scalability
* the three-multiplier complex multiplier
* the DCT's even/odd decomposition, 24 LUTs and scaling accumulators

This design's own choices:
* all word widths beyond the 8-bit samples
* writable LUTs with a configuration port
* valid/start/done handshakes, output registers and latencies
* the mode code and the registered control word
* the FFT sequencer, twiddle exponents, output reordering and Q2.14 twiddles
* bit-serial MSB-first DCT timing and Q1.14 cosines
* the wavelet level-to-level scaling

Where this departs from the paper:
* **No shared common-module pool.** The paper's resource table counts the maximum of each module
  type over all functions. This implies that the interconnection matrix lends one pool of adders,
  LUTs and multipliers to whichever function is active. The paper never says how that switching
  works. Here each function owns its modules, and the matrix (`icm`) switches whole function
  units: it gates strobes and multiplexes results. The area is therefore the sum over the
  functions, not the maximum.
* **IIR.** Truncated, as the paper's equations imply (see above).
* **DWT decimator size.** The resource table gives the decimator 8 LUTs. The text says it reuses
  the FIR architecture, which gives 16 for 8 taps. The RTL follows the text. It builds all six
  filters of the pyramid figure, where the table counts one decimator.
* **Unexplained multiplexers.** The 2:1 multiplexers that the resource table lists for the FIR,
  IIR and DCT have no stated purpose and are not built.
* **FPGA results.** The paper's Virtex-5 utilisation and timing figures are not reproduced.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. It compares against models written
independently in the testbench:
* exact convolution sums for the filters
* a level-by-level pyramid model for the DWT
* a floating-point DFT for the FFT, within 6 LSB
* exact sums of rounded cosines for the DCT

Where the design fixes a latency, the testbenches check it. `tb_fpda_top` runs the whole array at
full size. It goes through every mode and reloads the FIR LUTs with new coefficients. It runs the
FFT at 16 and 8 points, and all four DWT bands with the Daubechies filters. It sends samples while
no stream function is selected and checks that they are ignored. Finally, it returns to the FIR
and checks that the filter kept its state. It counts each of these events and fails if any never
happens.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/fpda_pkg.sv tb/tb_fpda_top.sv --top-module tb_fpda_top
./obj_dir/Vtb_fpda_top
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`. The full-size top-level test runs
in a few seconds.

## Files

* `rtl/fpda_pkg.sv`: widths, mode enum, complex and twiddle types, twiddle and cosine tables
* DA building blocks: `rtl/da_lut.sv`, `rtl/pda_coef_unit.sv`, `rtl/pda_fir.sv`
* filter functions: `rtl/iir.sv`, `rtl/decimator.sv`, `rtl/dwt.sv`
* FFT: `rtl/cmult.sv`, `rtl/butterfly.sv`, `rtl/twiddle_rom.sv`, `rtl/fft16.sv`
* DCT: `rtl/dct_comb.sv`, `rtl/dct_lut.sv`, `rtl/scaling_acc.sv`, `rtl/dct16.sv`
* control and top: `rtl/decoder.sv`, `rtl/icm.sv`, `rtl/fpda_top.sv`
* `tb/tb_*.sv`: one testbench per module; `tb_fpda_top` is the end-to-end test
