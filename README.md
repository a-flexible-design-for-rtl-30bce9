# Distributed-arithmetic FIR filter with a mixed LUT / compressor datapath

An N-tap FIR filter computes

    y[t] = sum_{i=0}^{N-1} coef[i] * x[t-i]

Distributed arithmetic (DA) avoids the N multipliers. It works on the input
samples one bit at a time. Take bit j of each of the last N samples, and call
those N bits a *bit plane*. The plane selects a subset of the coefficients,
and their sum is one partial result S_j. For B-bit two's-complement samples,

    y[t] = -2^(B-1) * S_(B-1) + sum_{j=0}^{B-2} 2^j * S_j

so a filter output is B plane sums combined by shift-and-add.

The classic DA filter looks up S_j in a single table addressed by all N plane
bits. That table has 2^N words, which is hopeless for the 100+ tap filters
used in ADC decimation. The opposite extreme is "LUT-less". There, every plane
bit gates its own coefficient into an adder tree. That avoids the table, but
the tree is as tall as N is large.

This design mixes the two. Of the N plane bits:

* **K = k_1 + ... + k_M bits address M small LUTs.** LUT j has k_j address
  bits and holds the 2^k_j possible partial sums of its k_j coefficients.
  The widths may differ from LUT to LUT.
* **the remaining N - K bits drive 2-1 multiplexers.** Each passes its
  coefficient, or zero.

The M LUT words and the N - K multiplexer words then go into one
**(N-K+M):2 compressor**, a carry-save tree with no carry propagation, and a
**carry-lookahead adder** adds the two words it produces. Changing M and the k_j
moves the design between the two extremes: M = 0 is LUT-less, and K = N
feeds the compressor from LUTs only. A third form, the *partitioned LUT*,
drops the compressor: with `USE_COMPRESSOR = 0` the words are added by a
tree of carry-lookahead adders (`da_add_tree`). That is only sensible when
there are few words, typically K = N. The point of the architecture is that a
design-space search can pick the split (and the compressor cells) that
minimises delay, power or their product for a given N. That search is an
offline algorithm and is not part of this RTL. Here the split is given by
the parameters `M` and `KI`, the list of widths k_j.

The default configuration is the largest filter of the reference evaluation:
N = 143 taps, B = 3-bit samples, C = 16-bit coefficients, 40 MHz sample rate.
The partition M = 16 LUTs of KI = 4 address bits is this design's own choice,
because no optimised partition was published. So 64 taps go through LUTs, 79
through multiplexers, and the compressor is a 95:2.

## Block diagram

```
            +------------------------------ da_unit ------------------------------+
 in_sample  |                                                                     |
 ---------> | da_shift_reg   plane[K-1:0] --> da_lut_layer (M x da_lut) --M words--+--+
            | (N x B bits)                                                        |  |
            |  bit_sel ->    plane[N-1:K] --> da_mux_layer (N-K words) -----------+--+
            |                                      ^                              |  |
            |                 da_coef_regs --------+---- (fill source for LUTs)   |  v
            |                                                 da_compressor (H:2) |
            |                                                    sum | carry      |
            |                                                    da_cla           |
            +------------------------------------------------------+--------------+
                                                                   | S_j
                                                  da_add_shift  (acc = 2*acc +/- S_j)
                                                                   |
                                                                 out_y
```

`da_fir` is the top. It holds `da_coef_regs`, `da_shift_reg`, `da_unit` and
`da_add_shift`, and it contains a small controller that steps through the bit
planes.

## How one output is produced

1. A sample is accepted in cycle c, when `in_valid` and `in_ready` are both
   high. At the end of that cycle it enters tap 0 of the delay line, and
   every older sample moves up one tap.
2. In cycles c+1 .. c+B the controller selects planes B-1, B-2, ..., 0. It
   goes most significant plane first. In each cycle the DA unit forms S_j
   combinationally: LUT read, multiplexers, compressor tree, CLA.
3. The accumulator computes `acc = -S_(B-1)` in the first plane cycle and
   `acc = 2*acc + S_j` in each later one. The sign plane is the only one that
   is subtracted. After plane 0 the result goes into `out_y`, and
   `out_valid` is high for one cycle, in cycle c+B+1.
4. A new sample may be accepted in the cycle of plane 0. With `in_valid`
   held high, the filter therefore takes one sample every B clocks. For the
   40 MHz sample rate with B = 3, that means a 120 MHz clock.

Everything is in two's complement. The widths grow so that no result can
overflow:

| quantity | width (default) |
|---|---|
| sample x | B = 3 |
| coefficient | C = 16 |
| LUT word (LUT with k_j taps) | C + ceil(log2 k_j) = 18 for k_j = 4 |
| compressor, CLA, plane sum S_j | OW = C + ceil(log2 N) = 24 |
| accumulator and `out_y` | OW + B = 27 |

The LUT words and the multiplexer outputs are sign-extended to OW before they
enter the compressor. The compressor and the CLA work modulo 2^OW, which is
exact because OW is wide enough for any sum of N coefficients.

## The LUTs and how they are filled

A basic LUT (`da_lut`, with its own parameter KI = k_j) has two parts. A KI-to-2^KI decoder turns the address
into a one-hot word select. A 2^KI-word register array is read through an
AND-OR network. Word `a` must hold the sum of `coef[b]` over every bit b set
in `a`.

The architecture only says that these sums are computed in advance. This
design computes them on chip, from the coefficient registers, so changing
the filter takes nothing more than register writes. On a `lut_fill` request,
every LUT writes words 1 .. 2^KI - 1 in order, one per clock:

    mem[a] = mem[a & (a-1)] + coef[index of the lowest set bit of a]

`a & (a-1)` is `a` with its lowest set bit cleared, a smaller address that
has already been written. Word 0 is always zero. So each LUT needs a single
adder, and all LUTs fill in parallel. The widest LUT sets the fill time, which is
2^max(k_j) - 1 cycles: 15 with the default 4-bit LUTs.
`lut_busy` is high meanwhile, and `in_ready` is held low.

## The compressor tree

`da_compressor` reduces H operands to a sum word and a carry word. It is
built as a series of levels. Each level puts its operands through as many
4:2 compressors as fit. A remainder of three goes through a 3:2 compressor,
and a remainder of one or two passes to the next level. The levels repeat
until two words are left. A constant function works out the operand count
of each level when the design is elaborated. For the default 95 operands the
counts are 95, 48, 24, 12, 6, 4, 2. That is six levels. Only the first
level needs a 3:2 cell.

The 4:2 cell (`comp_4_2`) is the classic one:

    cout = maj(x1, x2, x3)      s1 = x1 ^ x2 ^ x3
    sum  = s1 ^ x4 ^ cin        carry = maj(s1, x4, cin)

Here cin is the neighbouring lower bit's cout. Because cout does not depend
on cin, the lateral carries never ripple. That property is what makes a
4:2 usable as a tree node.

The reference architecture builds its h:2 compressor from a library of
optimised cells (3:2, 4:2, 5:2, 6:2, 7:2, 9:2). A dynamic program over cell
delays and powers picks the mix. That library and its figures are not
available, so this RTL uses a plain balanced 4:2/3:2 tree. It has the same
function and a comparable logarithmic depth, but it is not the optimised
structure. Anyone with characterised cells can replace `da_compressor`
without touching its interface.

`da_cla` adds the two words. Its carries come from a Kogge-Stone parallel
prefix over the bit generate/propagate pairs.

## Interface of `da_fir`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears every register, LUTs included) |
| `coef_we`, `coef_addr`, `coef_wdata` | in | 1, clog2(N), C | write one coefficient per clock; `coef[i]` multiplies x[t-i] |
| `lut_fill` | in | 1 | rebuild all LUTs from the coefficient registers; ignored while busy or while a sample is in flight |
| `lut_busy` | out | 1 | LUT fill in progress |
| `in_valid`, `in_ready`, `in_sample` | in/out/in | 1, 1, B | sample input, valid/ready handshake |
| `out_valid`, `out_y` | out | 1, C+clog2(N)+B | one-cycle pulse with the filter output |

Parameters: `N` (taps), `M` (number of LUTs), `KI` (the address widths
k_1 .. k_M, of type `da_pkg::lut_bits_t`: a list of 64 entries of which the
first M are used), `B` (sample bits), `C` (coefficient bits) and `USE_COMPRESSOR` (1 for the
compressor tree plus CLA, the default; 0 for the CLA adder tree). The LUT
widths must add up to at most N. LUT 0 takes the newest taps, LUT 1 the next
ones, and so on. A partition of one 5-bit, one 3-bit and one 2-bit LUT
followed by multiplexers is written

    da_fir #(.N(31), .M(3), .KI('{0: 5, 1: 3, 2: 2, default: 0})) u_fir (...);

A fill lasts 2^max(k_j) - 1 cycles. Shared defaults live in `rtl/da_pkg.sv`.

Sequence of use: write all N coefficients, pulse `lut_fill`, wait for
`lut_busy` to fall, then stream samples. To change coefficients, stop
offering samples until the last `out_valid`, write the new values, and fill
again. The delay line keeps its contents across a refill. Two assertions in
`da_fir` check the controller's rules: the window never shifts in the middle
of a sample, and a fill never overlaps one.

## Files

| file | block |
|---|---|
| `rtl/da_pkg.sv` | default sizes (B, C, N, M, KI) and the width helper |
| `rtl/da_fir.sv` | top level and plane controller |
| `rtl/da_shift_reg.sv` | N-tap delay line with bit-plane select |
| `rtl/da_coef_regs.sv` | coefficient register file |
| `rtl/da_unit.sv` | DA unit: LUT layer + MUX layer + compressor + CLA |
| `rtl/da_lut_layer.sv`, `rtl/da_lut.sv` | M basic LUTs; one LUT with its fill sequencer |
| `rtl/da_mux_layer.sv` | 2-1 multiplexers for the non-LUT taps |
| `rtl/da_compressor.sv` | H:2 compressor tree, built level by level |
| `rtl/comp_4_2.sv`, `rtl/comp_3_2.sv` | word-wide 4:2 and 3:2 compressors |
| `rtl/da_cla.sv` | carry-lookahead (parallel-prefix) adder |
| `rtl/da_add_tree.sv` | CLA adder tree, used in place of the compressor when `USE_COMPRESSOR = 0` |

Each module has a testbench in `tb/tb_<module>.sv`. Each testbench checks
against values it works out on its own and prints
`TB_RESULT checks=<n> failures=<n>`. Three of them cover more than one
module:

* `tb/tb_da_unit.sv` checks the default partition, a LUT-less one, a
  LUT-only one with unequal LUTs (3, 4 and 5 bits), and the same LUTs
  without a compressor, all against direct sums.
  `tb/tb_da_lut_layer.sv` also uses unequal widths.
* `tb/tb_da_fir.sv` runs the whole filter at its default size. It writes
  full-scale and then random coefficients, does two LUT fills, and pushes
  950 samples through with gaps and back-to-back runs, negative and
  full-scale among them. It checks every output against a direct
  convolution, and it checks the 15-cycle fill, the B+1 cycle latency and the
  one-sample-per-B-cycles rate.
* `tb/tb_da_fir_table1.sv` runs eight filters side by side, one for each
  order of the reference evaluation (8, 18, 31, 72, 108 and 143 taps) plus a
  LUT-less 31-tap filter, an LUT-only 8-tap filter, and that 8-tap filter
  again without its compressor. The coefficients are
  Hamming-windowed sinc lowpass designs computed in the testbench, with each
  cutoff midway between the pass and stop edges of the specification. The
  input is a 3-bit quantised two-tone signal.

The specifications of the evaluated filters, all sampled at 40 MHz with B = 3
and C = 16, are:

| order | pass/stop edge (MHz) | pass ripple/stop attenuation (dB) |
|---|---|---|
| 8 | 1.2 / 3.8 | 3 / 20 |
| 18 | 1.2 / 3.8 | 3 / 40 |
| 31 | 1.6 / 3.0 | 3 / 40 |
| 72 | 2.2 / 2.8 | 3 / 40 |
| 108 | 2.2 / 2.8 | 3 / 60 |
| 143 | 2.2 / 2.8 | 3 / 80 |

Every one fits the default 143-tap build, with the unused taps given zero
coefficients. The windowed-sinc designs in the testbench are for functional
testing only. They are not claimed to meet the stop-band figures in the
table.

To simulate with Verilator, run this from the directory that holds `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/da_pkg.sv tb/tb_da_fir.sv \
        --top-module tb_da_fir -Mdir obj_tb_da_fir
    ./obj_tb_da_fir/Vtb_da_fir

Replace `tb_da_fir` with any other testbench name. Every testbench finishes
in seconds.

## What is taken from the architecture and what is this design's own

Taken from the reference architecture:

* the three-part datapath: a shift register delivering N plane bits; a DA
  unit made of a LUT layer, C x (N-K) 2-1 multiplexers, an (N-K+M):2
  compressor and a CLA; and an add/shift accumulator with a sign-controlled
  add/subtract
* a basic LUT built as a KI-to-2^KI decoder plus 2^KI words of C + log2 KI
  bits
* the sizes B = 3, C = 16, the 143-tap maximum and the six evaluated
  orders

This design's own choices, where the description is silent:

* the default LUT partition, M = 16 LUTs of 4 bits. The LUTs take the first
  K taps. The list of widths is capped at 64 LUTs.
* the balanced 4:2/3:2 compressor tree, in place of a tree optimised over a
  characterised cell library. There are no 5:2 .. 9:2 cells.
* the Kogge-Stone form of the carry-lookahead adder, and the balanced CLA
  tree that adds the words when there is no compressor
* on-chip LUT filling from the coefficient registers, and the coefficient
  write port
* samples treated as B-bit integers, processed MSB plane first with a
  left-shifting accumulator. The printed equations mix 2^-j and 2^j
  weights. The integer form is equivalent up to a fixed scale and avoids
  that ambiguity.
* the valid/ready handshake, the controller, the output register and all
  reset behaviour
* a fully combinational DA unit, so one plane takes one clock and there
  are no pipeline registers inside it

Not built:

* the 5:2, 6:2, 7:2 and 9:2 cells. Their gate-level designs come from
  other work.
* the design-space search that picks M, KI and the compressor mix. It is
  a software algorithm, and it needs cell delay and power data that are not
  published.

## Trust and limits

Every block is checked on its own and in the full filter, against direct
arithmetic. The filter is bit-exact against a convolution at every evaluated
order. What has not been checked is timing. The headline claim of the
architecture is a shorter critical path than the LUT-less form, and that
depends on gate delays and on the optimised compressor mix. Neither is
reproduced here, so this RTL shows the function of the architecture and its
flexibility, not its delay figures. At the default size the whole DA unit
(LUT read, a six-level 4:2 tree and a 24-bit CLA) sits in one clock period.
A 120 MHz clock for a 40 MHz sample rate is plausible in a modern process,
but it has not been shown.
