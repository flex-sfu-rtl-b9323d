# Flex-SFU: a programmable piecewise-linear activation unit

Modern neural networks use activation functions such as GELU, SiLU, Tanh,
Sigmoid and the exponential inside Softmax. Each of them costs many
arithmetic operations on a general-purpose vector unit. Flex-SFU replaces
that work with one table lookup and one multiply-add per element. The
function is approximated by straight segments, `f(x) ≈ m_i·x + q_i`, and the
unit's only job is to find, for every input element, the segment `i` it
falls in and to return `m_i` and `q_i`. The vector unit's own multiply-add
then computes the result.

What sets the design apart is that the segment boundaries (breakpoints) are
not fixed bit fields of the input. They are stored values that can lie
anywhere, so segments can be short where the function bends and long where
it is straight. The segment is found by a pipelined binary search over the
stored breakpoints. The search works on 8-, 16- and 32-bit data in fixed or
floating point, and four 8-bit or two 16-bit elements share one 32-bit word.

This repository holds synthesizable SystemVerilog for the unit as described
in the paper *"Flex-SFU: Accelerating DNN Activation Functions by
Non-Uniform Piecewise Approximation"* (Reggiani, Andri, Cavigelli). It also
holds self-checking testbenches. The paper gives the block structure, the
memory organisation and the latencies. Details it leaves open are chosen
here and marked as such below.

## Structure

```
 instr_i ──► instr_decoder ──► dcu ──┬─► cluster 0:  adu (log2(DEPTH) stages) ──► ltc ──► m, q, x
 data_i  ─────────────────────────►  │                                                    (to the
                                     └─► cluster NC-1: ...                                 vector MADD)
```

| Module | Role |
|---|---|
| `flex_sfu` | top level: decoder, data control unit, `NC` clusters |
| `instr_decoder` | splits an instruction word into operation, format, index |
| `dcu` | data control unit: routes loads to the memories, streams elements into the clusters, holds loads back while elements are in flight |
| `adu` | address decoding unit: the binary search, one `adu_stage` per tree level |
| `adu_stage` | one tree level: breakpoint memory, comparator, next-address generator |
| `simd_spm` | SIMD single-port memory: four slices, each with its own read address |
| `simd_comparator` | greater-than on 4×8, 2×16 or 1×32-bit fixed or floating-point elements |
| `next_addr_gen` | appends each element's comparison bit to the tree address of its slices |
| `ltc` | lookup-table cluster: the `DEPTH` coefficient pairs `(m, q)` |
| `flex_sfu_pkg` | shared types: formats, opcodes, decoded control word |

Parameters of the top: `DEPTH` is the number of segments, default 32, a
power of two from 4 up. `NC` is the number of clusters, default 1. Each
cluster takes 32 bits of `data_i` per cycle.

## The binary search tree

With `DEPTH` segments there are `DEPTH-1` breakpoints `b[0] ≤ b[1] ≤ … ≤
b[DEPTH-2]`. Segment `i` covers `b[i-1] < x ≤ b[i]`. Segment 0 is everything
at or below `b[0]`, and segment `DEPTH-1` is everything above the last
breakpoint. A value equal to a breakpoint belongs to the segment on its
left.

The breakpoints are stored as a balanced in-order search tree, one tree level
per pipeline stage. Stage `s` holds `2^s` breakpoints. For `DEPTH = 8`:

```
stage 0:            b3
stage 1:      b1          b5
stage 2:   b0    b2    b4    b6
```

An element enters stage 0 at address 0. In each stage it is compared with
the breakpoint at its address. The comparison bit `c` (1 if the element is
greater) is appended to the address, giving `a' = 2a + c`. After the last
stage the address is the segment number. `ld.bp` takes the breakpoint's
sorted index `i` and stores it at the right place by itself. Let `n = i+1`
and `t` be the number of trailing zero bits of `n`. Then `b[i]` goes to
stage `log2(DEPTH)-1-t` at address `n >> (t+1)`.

The search only ever compares. So the breakpoints need no particular
spacing, and the segments need not be of equal length.

## SIMD slices and number formats

Every memory is made of four slices, one per byte of the 32-bit word. Each
slice has its own read address.

* **8-bit data.** The word holds four elements. Each slice follows its own
  path through the tree, so the four elements find four different segments
  in the same cycle.
* **16-bit data.** The two slices of an element always carry the same
  address, because the next-address generator gives both slices the
  comparison result of that element.
* **32-bit data.** All four slices move together.

The breakpoint memory of a stage stores 8 bits per slice. The coefficient
memory (`ltc`) stores 16 bits per slice: one byte of `m` and one byte of
`q`. So a 16-bit element's `m` sits in two neighbouring slices. The memory
size does not depend on the data width. The rate is always 32 bits per cycle
per cluster: four, two or one element(s) per cycle.

A loaded word is stored exactly as given. To run one function on all four
8-bit lanes, software writes each breakpoint and coefficient four times into
the word, once per lane (twice for 16-bit). Different values per lane are
also legal. They give each lane its own function, and the testbenches use
this to check the lanes independently.

The comparator has two modes:

* **Fixed point** is two's complement. The position of the binary point does
  not matter for ordering.
* **Floating point** is sign-magnitude with the exponent above the mantissa.
  IEEE single, IEEE half and the usual 8-bit layouts all work this way, so
  one comparator serves them all. It never needs to know the exponent width.
  `+0` equals `-0`. NaNs are not treated specially.

The format travels with every element through the pipeline. Elements of
different formats can therefore follow each other back to back.

## Instructions and loading

The paper names three instructions: `ld.bp`, `ld.cf` and `exe.af`. The
16-bit encoding used here is this design's own:

| bits | field |
|---|---|
| `[1:0]` | opcode: 0 nop, 1 `ld.bp`, 2 `ld.cf`, 3 `exe.af` |
| `[3:2]` | element width: 0 = 8, 1 = 16, 2 = 32 bits, 3 = reserved (flagged on `illegal_o`, executed as nop) |
| `[4]` | 1 = floating point |
| `[5]` | `ld.cf` only: 0 loads the slope word `m`, 1 the offset word `q` |
| `[7:6]` | reserved, must be 0 (flagged on `illegal_o`, executed as nop) |
| `[15:8]` | breakpoint index (`ld.bp`) or segment index (`ld.cf`) |

The source word comes on `data_i`. Loads use the first 32 bits and broadcast
them to every cluster. A function with `DEPTH` segments is loaded with
`DEPTH-1` `ld.bp` and `2·DEPTH` `ld.cf` instructions. `exe.af` sends one word
per cluster.

`in_valid_i`/`in_ready_o` is a valid/ready handshake. `exe.af` and nop are
always accepted. There is no backpressure on the output side, so the unit
cannot deadlock. A load waits (`in_ready_o` low) until every element already
issued has left the unit. This has two effects:

* A memory write never meets a read in the same cycle, which a single-port
  memory could not serve.
* No element sees a half-replaced function.

## Timing

One element word enters per cycle, and the results leave in order, one word
per cycle. An `exe.af` presented in cycle 0 gives `out_valid_o` in cycle
`log2(DEPTH) + 3`:

| cycle | where the element is |
|---|---|
| 1 | dispatch register in the DCU |
| 2 … log2(DEPTH)+1 | one ADU stage each: the address read of this level's breakpoint, then compare and next address |
| log2(DEPTH)+2 | coefficient memory read |
| log2(DEPTH)+3 | `out_m_o`, `out_q_o`, `out_data_o`, `out_fmt_o` valid |

The paper reports a latency of 7, 8, 9, 10 and 11 cycles for 4 to 64
segments, including the multiply-add. That is `log2(DEPTH)+5`, which matches
this pipeline followed by a two-cycle multiply-add. The paper does not break
its latency down. So the split into one dispatch cycle, one cycle per tree
level, two lookup cycles and two multiply-add cycles is an interpretation.
The figure draws registers at the input of each stage and at the table
outputs, and this pipeline follows them. The figure also draws the load data
through a register in every stage. Here, loads go from the DCU register to
all memories in the same cycle, which has the same effect.

Measured with `tb_throughput` (one cluster, function reloaded before every
tensor):

| depth | latency (+2 MADD) | 8192 words, 8-bit | 256 words, 8-bit | load instructions |
|---|---|---|---|---|
| 4  | 5 (7)  | 3.99 act/cycle | 3.75 act/cycle | 11 |
| 8  | 6 (8)  | 3.99 | 3.58 | 23 |
| 16 | 7 (9)  | 3.97 | 3.29 | 47 |
| 32 | 8 (10) | 3.95 | 2.84 | 95 |
| 64 | 9 (11) | 3.90 | 2.24 | 191 |

Large tensors reach the peak of 4, 2 and 1 elements per cycle for 8-, 16- and
32-bit data, as the paper states (2.4, 1.2 and 0.6 GAct/s at 600 MHz).

For short tensors this design is slower than the paper's throughput plot.
The reason is loading: each breakpoint and each of `m` and `q` costs one
instruction here. The paper's curves imply cheaper loading, but the paper
does not say how its loads are packed.

## Departures from the paper and open points

* **Multiply-add not included.** It belongs to the host vector unit in the
  paper. The top stops at `m`, `q` and the delayed input. `tb_activation`
  models the multiply-add in the testbench.
* **Own choices where the paper says nothing:**
  * the instruction encoding
  * the valid/ready handshake and the rule that loads wait for the pipeline
    to drain
  * that `m` and `q` are loaded by separate instructions
  * two's complement fixed point
  * "equal goes left"
  * asynchronous active-low reset of the valid flags only; memories and data
    registers are not reset
* **Memories are register arrays.** No SRAM macro is used, and the
  single-port rule is checked by an assertion.
* **"Segments" and "breakpoints".** The paper uses both words for the table
  depth. Here `DEPTH` is the number of segments, so `DEPTH-1` breakpoints are
  stored. The paper's own definition supports this: n breakpoints bound n+1
  segments.
* **Breakpoint placement is software.** The paper places breakpoints with an
  offline optimiser (gradient descent on the mean squared error, with
  removal and reinsertion of breakpoints). Those values are not published.
  The activation test therefore uses uniformly spaced breakpoints.
* **No 64-bit elements.** For the vector-unit integration the paper gives
  two clusters per lane and lists 1×64-bit among the formats. Here each
  cluster searches its own 32-bit word, so `NC = 2` gives 2×32, 4×16 or
  8×8 elements per cycle, but not one 64-bit element.

## Simulation

All files are plain SystemVerilog-2017. With Verilator 5, from the directory
holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/flex_sfu_pkg.sv tb/tb_ref_pkg.sv tb/tb_flex_sfu.sv --top-module tb_flex_sfu
./obj_dir/Vtb_flex_sfu
```

Replace `tb_flex_sfu` by any other testbench name. Every testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops on a watchdog if it hangs.
Testbenches that use real-valued references import `tb_ref_pkg`.

| Testbench | What it checks |
|---|---|
| `tb_flex_sfu` | Whole unit at its defaults (`DEPTH` 32, `NC` 1). It runs all six formats with per-lane random sorted breakpoints and random coefficients, then 200 back-to-back elements each. It checks every output against a linear-scan reference, plus the latency, throughput, held loads, inputs equal to a breakpoint, inputs beyond both ends and the illegal instruction. |
| `tb_activation` | GELU, SiLU, Tanh, Sigmoid and Exp with two clusters and a multiply-add model: FP32 with 4, 8, 16 and 32 segments, and 16-bit Q4.11 fixed point (two elements per word) with 32. It checks that the coefficients are selected bit for bit, that the mean squared error at 32 segments stays within a bound (observed about 3e-5 for GELU and 1e-6 for Sigmoid with uniform breakpoints), and that from 8 segments on each doubling at least halves the error (observed about 20x; the paper reports about 16x). |
| `tb_throughput` | Latency and rate for 4 to 64 segments, 8/16/32-bit data, tensors of 2, 256 and 8192 words. |
| `tb_adu`, `tb_ltc`, `tb_dcu`, `tb_simd_spm`, `tb_simd_comparator`, `tb_next_addr_gen`, `tb_instr_decoder` | The single blocks, each against an independent model. |

To change the table size or the number of clusters, override `DEPTH` and
`NC` on `flex_sfu`. Everything below them is sized from these two.
