# Reconfigurable 8-tap FIR filter with multiplexer-based distributed arithmetic

This is a multiplier-free FIR filter,

    y(n) = h0·x(n) + h1·x(n-1) + … + h7·x(n-7),

built on distributed arithmetic (DA). The filter takes 16-bit two's-complement samples and
coefficients and gives a 34-bit output. It does not multiply a sample by a coefficient. It
handles the eight stored samples one bit position ("bit plane") at a time. Each plane's bits
choose a sum of coefficients, and that sum is shifted and accumulated. A classic DA filter reads
the coefficient sums from a 2^K-entry look-up table. Here the table is replaced by four small
multiplexers, each serving a pair of taps, and an adder tree of carry look-ahead adders. The
coefficients are plain inputs, so the filter can be reprogrammed at run time without refilling
any table. One output takes 16 clock cycles, one per sample bit.

The RTL follows a published description of this architecture: a block diagram of the chain,
a diagram of the partial product generator, and the sizes 8 taps, 16-bit data, 16-bit
coefficients and a 34-bit accumulator. Everything that description leaves open was decided
here. Those decisions are listed in [Departures and choices](#departures-and-choices).

## The arithmetic

Write each sample in two's complement with bits b_i, i = 0 … 15:

    x = -b15·2^15 + Σ_{i=0}^{14} b_i·2^i

Then the filter sum regroups by bit plane:

    y = Σ_{i=0}^{14} 2^i · P_i  −  2^15 · P_15,     P_i = Σ_{k=0}^{7} h_k · b_i(x(n-k))

P_i is a sum of the coefficients whose tap has bit i set. It depends only on the 8-bit pattern
of plane i, so a conventional DA filter stores all 256 values of P in a table. The sign plane
(i = 15) is subtracted, not added. That is the only thing that makes the inputs signed.

## Partial product generator (`ppg`)

The 256-entry table is split into four 4-entry tables, one per tap pair (h0,h1), (h2,h3),
(h4,h5), (h6,h7). Each small table is a 4-to-1 multiplexer, not a memory:

| select {b(x_{2j+1}), b(x_{2j})} | output |
|---|---|
| 00 | 0 |
| 01 | h_{2j} |
| 10 | h_{2j+1} |
| 11 | h_{2j} + h_{2j+1} (from a CLA on the two coefficients) |

The four multiplexer outputs feed a two-level adder tree: two CLAs, then one. The tree's
result is P_i. It is registered together with a small tag. The tag says whether the cycle
carries a plane, gives the plane index i, and marks the first plane (i = 0) and the last one
(i = 15). The same generator is used for all 16 planes of an output, one after another.
Sharing it this way is where the area saving comes from.

The RTL builds the generator for any power-of-two tap count `NTAPS` ≥ 2. It uses `NTAPS/2`
multiplexers and a heap-ordered tree of `NTAPS/2 − 1` adders.

## Datapath and timing

```
 x_in ─► input_buffer_addr_gen ─► ppg ─────► shifter ─► accumulator ─► y, y_valid
 (16b)   8×16b delay line         4 mux +    P·2^i      acc ± (P·2^i)   (34b)
         + bit counter            CLA tree   (comb.)    CLA, register
         address register (8b)    register
```

* **Input buffer and address generator.** When a sample is accepted it is shifted into an
  8-deep delay line, so `taps[k] = x(n-k)`. A 4-bit counter then walks i = 0 … 15, least
  significant bit first. Each cycle it stores `{taps[7][i], …, taps[0][i]}` in the address
  register, with the tag.
* **PPG.** Forms P_i from the address and the coefficients and registers it (see above).
* **Shifter.** Sign-extends P_i to 34 bits and shifts it left by i. This is combinational.
* **Accumulator.** A 34-bit CLA. On the first plane it loads the shifted value, ignoring the
  old contents. On middle planes it adds. On the last plane it subtracts (inverted operand,
  carry in 1), and the result goes to `y`.

The pipeline has three register stages: address, partial product and accumulator. Plane i of
a sample accepted on clock edge t is in the address register after edge t+1+i. It is in the
PPG register after edge t+2+i and is accumulated on edge t+3+i. So the output of a sample
accepted on edge t is registered on edge **t+L+2** = t+18. `y_valid` is high for the one cycle
after that edge. `y` holds its value until the next output.

`in_ready` is high while the address generator is idle, and also in the cycle in which it
selects the last plane of the current sample. A sample held on `x_in` with `in_valid` high is
therefore taken every 16 cycles with no gap. Sample rate = f_clk / 16. Planes of consecutive
samples follow each other through the pipeline with no bubble. The accumulator's "first"
restart keeps them apart.

## Interface of `fir_da_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | single clock for all stages |
| `rst_n` | in | 1 | synchronous, active low; clears the sample history, the pipeline and `y` |
| `coef[0:7]` | in | 8 × 16, signed | h0 … h7 |
| `in_valid` / `in_ready` | in / out | 1 | sample handshake; a sample is taken on a rising edge when both are high |
| `x_in` | in | 16 | sample, two's complement |
| `y` | out | 34 | output, two's complement |
| `y_valid` | out | 1 | one-cycle pulse when `y` is new |

**Reconfiguring.** The coefficients are not registered inside the filter. To switch to a new
filter, change `coef` between outputs. The new set must be present from the edge that accepts
a sample until that sample's `y_valid`. An output computed while `coef` changes mixes the two
sets. The sample history is kept across a coefficient change. To start from zero history,
pulse `rst_n`.

## Word widths

| quantity | width here | width in the source description | why |
|---|---|---|---|
| sample, coefficient | 16 | 16 | — |
| multiplexer output | 19 (whole tree is 19 wide) | 17 | one adder width keeps the tree regular |
| P_i (sum of 8 coefficients) | 19 | 18 | eight 16-bit signed values can reach −2^18; 18 bits overflow for large coefficient sets |
| shifted P_i | 34 | 32 (diagram label) | a 19-bit value shifted by up to 15 needs 34 bits |
| accumulator, y | 34 | 34 | see below |

With 16-bit operands, |y| ≤ 8·2^15·2^15 = 2^33. Every result fits a 34-bit signed word except
exactly +2^33. That value needs all eight taps and all eight coefficients at −32768 (or a
mixture of signs giving the same products). The accumulator works modulo 2^34, so that one case
wraps to −2^33. Partial sums of planes 0 … 14 always fit.

## Departures and choices

What follows the source: the chain of blocks, the pair multiplexers with entries 0 / h / h' /
h+h', the CLA-based pair sums and adder tree, LSB-first processing with one plane per clock,
subtraction of the sign plane, and the sizes K = 8, L = 16, 16-bit coefficients and a 34-bit
output.

Decided here:

* **Adder.** The source calls its adders "modified carry look-ahead" adders without giving the
  modification. `cla_adder` is a plain carry look-ahead adder. It has 4-bit groups with full
  look-ahead inside each group, and the groups are chained.
* **Multiplexer select order.** The source's diagram labels the select "x0(i) x1(i)" and
  numbers the inputs 0, h0, h1, h0+h1. It is read here so that each sample bit selects its own
  coefficient: select bit 0 is tap 2j, select bit 1 is tap 2j+1.
* **Address bits per cycle.** One sentence of the source speaks of "8 addresses each of which
  2 bits wide". Its diagram, however, shows four multiplexers with one 2-bit select each, used
  once per bit position. The diagram is followed: each cycle takes one bit from each of the
  eight samples, grouped as four 2-bit selects.
* **Pipeline registers.** The source calls the adder tree "pipelined" but does not place the
  registers. Here there is one register after the address selection, one after the whole PPG
  tree and the accumulator itself. There are no registers inside the tree.
* **Widths.** P_i is 19 bits and the shifter path 34 bits (table above).
* **Handshake, reset, output register and `y_valid`.** These are this design's own.
* **Tap count.** The source's results section once speaks of a "34-tap" filter but gives its
  figures for K = 8. Its diagrams also show eight taps. This RTL is an 8-tap filter. A longer
  filter needs `NTAPS` raised to the next power of two (64 for 34 taps), with the unused
  coefficients set to zero. It also needs wider P and accumulator words. `PW` follows `NTAPS`
  automatically; `OW` must be set by hand to CW + XW + log2(NTAPS) − 1.
* **Not included.** Two things are left out. The first is the plain single-table DA filter and
  the two-way partitioned table, which the source uses only to motivate the design. The second
  is the carry-save-adder variant it compares against. FPGA cell counts, timing and power are
  not reproduced.

## Files

| file | content |
|---|---|
| `rtl/fir_da_pkg.sv` | sizes (K, L, COEF_W, PP_W, OUT_W) and the pipeline tag `bit_tag_t` |
| `rtl/cla_adder.sv` | W-bit carry look-ahead adder |
| `rtl/input_buffer_addr_gen.sv` | delay line, bit counter, address register, handshake |
| `rtl/ppg.sv` | pair multiplexers, CLA tree, PPG register |
| `rtl/shifter.sv` | sign extension and shift by the plane index |
| `rtl/accumulator.sv` | shift-accumulate with sign-plane subtraction, output register |
| `rtl/fir_da_top.sv` | the filter |
| `tb/*_tb.sv` | one self-checking testbench per module |

## Verification

Each testbench computes its expected values independently, using ordinary `+` and `*` on
wider integers. It ends by printing `TB_RESULT checks=N failures=M`.

* `cla_adder_tb`: 19- and 34-bit adders; corner operands, every carry-chain start and random
  operands.
* `input_buffer_addr_gen_tb`: a reference delay line. The address and tag are checked every
  cycle. Samples are sent both back to back (taken exactly every 16 cycles) and after random
  idle gaps.
* `ppg_tb`: all 256 address patterns under 12 coefficient sets. These include all −32768 and
  all +32767, which reach the extremes of the 19-bit sum. A 4-tap instance checks the generic
  tree.
* `shifter_tb`: all shift amounts with corner and random values.
* `accumulator_tb`: 200 random plane sequences, including idle cycles between planes and the
  most negative operand on the sign plane.
* `fir_da_top_tb`: the whole filter at its default size. A reference FIR model checks every
  output's value and its arrival edge (t+18). It includes impulse responses, which must read
  the coefficients back, and seven coefficient reconfigurations. It also includes back-to-back
  and gapped input, negative samples, full-scale samples and coefficients, and a reset in
  mid-stream. The testbench counts each of these, and it also checks that every pair
  multiplexer saw all four select values. Any count left at zero is a failure.

All six pass. Each one also fails when the module it tests has a deliberate bug put in: a
broken carry chain, MSB-first addressing, swapped multiplexer inputs, zero extension in the
shifter, the sign plane added instead of subtracted, or the shift amount taken from the wrong
pipeline stage.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fir_da_pkg.sv tb/fir_da_top_tb.sv --top-module fir_da_top_tb -o sim
./obj_dir/sim
```

Swap in any other `tb/<name>_tb.sv` and its top module name in the same way. `-Wno-fatal` keeps
lint warnings, such as unused bits of the padded CLA groups, from stopping the build. Verilator has two
states only, so every register that is read is reset. The testbenches drive reset before
checking anything.
