# FQA piecewise polynomial unit for activation functions

Neural-network accelerators need non-linear activation functions such as
sigmoid and tanh, and a cheap way to build them is a piecewise polynomial
approximation (PPA). The input range is cut into segments. A bank of
comparators finds the segment of each input. A small table holds each
segment's polynomial coefficients, and one fixed arithmetic unit evaluates
the polynomial.

The design here follows the FQA ("full-space quantization-driven")
architecture. Its main idea is that the hardware and the coefficients are
designed together, at the bit level:

* Each arithmetic stage has its own fractional word length (FWL). Multipliers
  throw away low product bits, and adders are only as wide as they need to be.
* Truncating a product shifts which quantized coefficients are best. The
  coefficients are therefore found offline by searching the whole quantized
  coefficient space against this exact datapath, not by rounding a
  floating-point fit. With coefficients found this way, the same error needs
  far fewer segments, so the coefficient table is smaller.
* The first multiplier can be replaced by a few shifters and adders. This
  works whenever the first coefficient has few one-bits (low Hamming weight),
  whatever its word length.

The RTL is the hardware half of that scheme: segment index generator,
coefficient memory and computation unit, all programmable at run time. The
coefficient search is offline software and is not part of the RTL. Its output
is what you load through the configuration port.

## The computation

For an input `x` in segment `i`, the unit computes, in Horner form,

```
order 1:  y = T1(a1*x) + b
order 2:  y = T2( (T1(a1*x) + a2) * x ) + b
```

`T1` and `T2` cut a product down to `WO1` and `WO2` fractional bits. The
dropped bits are simply discarded from the two's-complement value, which
rounds toward minus infinity (floor). Nothing else ever loses precision:

* Every addition is exact, at the finer of its two operands' FWLs.
* Every stage has enough integer bits that it cannot overflow.

The FWLs are independent parameters:

| parameter | meaning |
|---|---|
| `WI`  | FWL of the input `x` (unsigned; `XIW` integer bits, 0 for [0,1)) |
| `WA1` | FWL of `a1` |
| `WO1` | FWL kept after the first product |
| `WA2` | FWL of `a2` (order 2) |
| `WO2` | FWL kept after the second product (order 2) |
| `WB`  | FWL of `b` |
| `CIW` | integer bits of `a1`, `a2`, `b`, sign included (default 2: range [-2, 2)) |

The second multiplier's input has FWL `max(WO1, WA2)`. The result has FWL
`Y_F = max(WOn, WB)`, where `WOn` is the FWL of the last product. The
integer widths are derived in one place, the functions in `fqa_pkg`, and the
result port `y_out` is `Y_W` bits wide. For the default configuration this is
15 bits: 7 integer and 8 fractional.

The multiplier is `trunc_mult`. It forms the exact signed×unsigned product
and shifts it right arithmetically by the number of dropped bits. The output
FWL must not exceed the full-precision FWL; elaboration fails if it does.

### Concatenation adders

Each addition meets a product and a coefficient whose FWLs usually differ.
The operand with the finer FWL has `|ΔF|` low bits that the other operand does
not have (they are zero there). So:

* these bits cannot produce a carry;
* `concat_adder` sends only the upper bits through an adder that is
  `min(FWL)` fractional bits wide;
* it appends the surplus low bits to the sum unchanged.

The result is bit-identical to a full-width addition, with a narrower adder.
Both arrangements occur and both are built:

* the product is finer than the coefficient (for example `WO1 = 16`,
  `WB = 14`);
* the coefficient is finer than the product.

### Shift-add first stage (FQA-Sm-On)

With `SHIFTERS = m > 0`, the first multiplier becomes `shift_add_mult`: `m`
shifters and a chain of `m−1` adders. The table does not store `a1` as a
binary number. It stores `m` shift terms, each 2 + ⌈log2(WA1+1)⌉ bits:

```
term k = code[k*TW +: TW] = {en, neg, sh}     value: en ? (neg ? -1 : +1) * x * 2^-sh : 0
```

`sh` runs from 0 to `WA1`. The terms are added at full precision (FWL
`WI + WA1`) and then truncated to `WO1` like the multiplier output. The
result is therefore bit-identical to `trunc_mult` given the same value of
`a1`, and the two can be swapped without recomputing anything else.

Any `a1` whose magnitude has at most `m` one-bits can be encoded, whatever
`WA1` is. This Hamming-weight rule is what the coefficient search must obey.
Because each term carries its own sign, signed-digit codes work too. For
example, −15/64 can be written as −16/64 + 1/64, using two terms instead of
four.

## Finding the segment and its coefficients

`seg_index_gen` holds the start points of segments 1..SEGS−1 in registers.
Segment 0 always starts at 0. It compares `x` with all of them at once, using
SEGS−1 comparators, and the index is the number of start points that `x` has
reached. The start points must therefore be loaded in ascending order. Two
adjacent start points make a segment that holds a single input value. The
search does produce such segments near steep or awkward parts of the curve,
and they cost nothing special. After reset the start points split the input
range uniformly.

`coef_memory` is a register file of `{a1, a2, b}` entries, read
combinationally through the segment index. It is zero after reset.

### Shared entries

The search does not find one coefficient set per segment but a whole range
of them: every set that keeps the segment within the error bound. Where the
ranges of two segments overlap, both segments can use one stored set. Such
segments are never neighbours. If they were, the common set would cover both
and the search would have made them a single segment.

`ENTRIES` sets how many coefficient sets are stored. With the default
`ENTRIES = SEGS` every segment has its own entry and nothing more is built.
With `ENTRIES < SEGS` the memory holds `ENTRIES` sets plus a map of `SEGS`
registers, each ⌈log2 ENTRIES⌉ bits wide, naming the entry each segment
uses. The map resets to segment k → entry min(k, ENTRIES−1).

In a writable memory the map has a cost. Storage shrinks only if the saved
sets outweigh the map, that is if (SEGS − ENTRIES) × set width >
SEGS × ⌈log2 ENTRIES⌉. In the default configuration a set is 38 bits and a
map register 4 bits, so more than one of 10 segments must share. A fixed
coefficient table has no such cost, since shared constants simply merge in
the logic. The tests include two tables with one shared pair each:

* In the 10-segment FQA-S3-O2 sigmoid table, segments 3 and 9 accept a common
  set, so 9 entries suffice.
* In the 13-segment FQA-S1-O2 table, segments 6 and 12 accept a common set,
  so 12 entries suffice.

Whole sets are shared, not single coefficients.

### Configuration port

`cfg` (`fqa_pkg::cfg_req_t`) is a one-cycle write:

| field | |
|---|---|
| `we`   | write strobe |
| `sel`  | `CFG_BREAK` start point, `CFG_A1`, `CFG_A2`, `CFG_B`, `CFG_MAP` entry used by a segment |
| `addr` | segment number for start points (1..SEGS−1; address 0 is ignored) and map; entry number for coefficients (the same as the segment when `ENTRIES = SEGS`) |
| `data` | value in its low bits: start point as an unsigned input code; entry number for `CFG_MAP`; `a2`, `b` and (with `SHIFTERS = 0`) `a1` as two's-complement integers in units of 2^−FWL; with shifters, the shift code above |

Writes to addresses at or beyond SEGS (ENTRIES for coefficients) are
ignored, and so are map writes that name a missing entry. A write takes effect at the
clock edge where it is sampled. A result already in the output register is
not affected, so the unit can be reprogrammed, for example from sigmoid to
tanh, while samples keep flowing. The samples already issued come out with the
old function.

## Timing

`fqa_ppa` registers `x_in` at the edge where `in_valid` is high. The index
generator, memory read and computation unit form one combinational path, and
the result is registered at the next edge. `out_valid`, `y_out` and `seg_out`
(the segment used) therefore appear two clock edges after the input is
presented. One sample can be accepted every cycle. There is no back-pressure.
The asynchronous reset `rst_n` is active low.

## Schemes and default configuration

| scheme | parameters |
|---|---|
| FQA-O1 | `ORDER=1, SHIFTERS=0` |
| FQA-O2 | `ORDER=2, SHIFTERS=0` |
| FQA-Sm-O1 | `ORDER=1, SHIFTERS=m` |
| FQA-Sm-O2 | `ORDER=2, SHIFTERS=m` |

The defaults are FQA-S3-O2 with every FWL 8 and 10 segments. In the 8-bit
comparison this is the configuration with the smallest area. Orders above 2
are not built.

## Coefficient tables used in the tests

The tables in the testbenches come from an offline search on this exact
datapath, in integer arithmetic with the floor truncations:

1. Take all `a1` (limited to Hamming weight ≤ m for shift-add schemes) and
   `a2` in a range.
2. Start a segment at the first uncovered input and extend it one input at a
   time.
3. At each input, keep only the `(a1, a2)` pairs for which some `b` still keeps
   `|y − f(x)|` within the error bound over the whole segment.
4. End the segment when no pair is left, and start the next one.
5. Lower the error bound by bisection until the segment count just fits the
   hardware's SEGS.

Step 5 is the "fixed hardware, minimum error" use of a programmable unit.

The 16-bit cases keep the 8-bit input (8 fractional bits) and widen only the
coefficients, products and output. At 16-bit output precision the search
reproduces every published segment count, at the published maximum error of 7.599e-6 for sigmoid and 7.606e-6
for tanh on [0,1):

| function | scheme | FWLs (`WA1`, `WO1`, `WA2`, `WO2`, `WB`) | segments |
|---|---|---|---|
| sigmoid | FQA-O1    | 16, 16, –, –, 14   | 33 |
| sigmoid | FQA-O2    | 8, 16, 16, 16, 16  | 12 |
| sigmoid | FQA-S1-O2 | 8, 16, 16, 16, 16  | 18 |
| sigmoid | FQA-S3-O2 | 8, 16, 16, 16, 16  | 12 |
| sigmoid | FQA-S5-O1 | 9, 16, –, –, 16    | 75 |
| tanh    | FQA-O1    | 14, 16, –, –, 16   | 79 |
| tanh    | FQA-O2    | 8, 16, 16, 16, 16  | 16 |
| tanh    | FQA-S4-O2 | 8, 16, 16, 16, 16  | 17 |

The order-1 tables are not stored in the testbench. Instead the workload
runner performs the same greedy search in SystemVerilog, at the given error
bound, before it programs the unit: every `a1` in [0, 1] is a
candidate, and for each one it keeps the interval of `b` that still meets the
bound. It checks that the search needs exactly the published count.

At 8-bit output precision it reproduces the order-1 counts. For sigmoid at
the optimum error 1.953e-3 (half an output LSB) it needs:

* 18 segments for FQA-O1;
* 18 segments for FQA-S4-O1;
* 24 segments for FQA-S2-O1.

For 8-bit tanh with FQA-O1 it needs 15 segments. The FQA-O1 sigmoid
boundaries (with `WA1 = 8`) match the published segmentation at every
boundary but one: a short segment that starts at x = 0.5 ends two inputs
earlier.

For the 8-bit order-2 schemes the search needs slightly more than the
published figures:

* FQA-S3-O2 sigmoid needs 11 segments for the exact optimum, against 10
  reported. With 10 segments its best error is 1.9665e-3.
* FQA-O2 with `WA1 = 6` reaches 2.100e-3 with 10 segments.
* FQA-O2 and FQA-S4-O2 tanh reach 2.02e-3 with 8 segments (published:
  1.945e-3).

The cause is most likely a detail of the datapath, such as how `a2` is aligned
or the `a1`/`a2` search ranges, that differs from the authors'. The testbenches
check each table at the error the search achieved.

## Departures and own choices

Where the method leaves something open, this design chose as follows:

* floor truncation at multiplier outputs;
* two integer bits for coefficients;
* the shift-code format with a sign per term;
* the registered input and output and the valid flags;
* start points and coefficients in writable registers with a configuration
  port;
* reset values;
* the result kept at `max(WOn, WB)` fractional bits, with no extra rounding
  stage to a narrower output;
* the segment-to-entry map for shared coefficient sets, and sharing whole
  sets rather than single coefficients;
* the second multiplier's input FWL, taken as `max(WO1, WA2)`, the FWL of
  the sum that feeds it.

The method is stated for any polynomial order n, with n multipliers and n
adders in a chain. Orders above 2 are not built. The published results use
only orders 1 and 2.

The published 16-bit results are read as an 8-bit input with a 16-bit
output, as their word-length tables give, and the 8-bit error target as
1.953e-3, half an output LSB.

## Files and simulation

RTL (`rtl/`):

| file | contents |
|---|---|
| `fqa_pkg.sv` | configuration types, width functions |
| `fqa_ppa.sv` | top level |
| `seg_index_gen.sv` | comparator index generator |
| `coef_memory.sv` | coefficient register file |
| `fqa_compute.sv` | Horner unit (order 1 or 2) |
| `trunc_mult.sv` | truncating multiplier |
| `shift_add_mult.sv` | shift-add first stage |
| `concat_adder.sv` | concatenation adder |

Testbenches (`tb/`) are self-checking. Each prints
`TB_RESULT checks=N failures=M`.

* `tb_fqa_ppa`: the default unit end to end. It streams sigmoid and tanh
  tables over all inputs and checks three things: bit-exact results, error
  against the real function, and the two-cycle latency at one result per
  cycle. It also reprograms the unit while samples are still in flight.
* `tb_fqa_workloads`: eighteen more scheme and precision settings, ten at
  8-bit and eight at 16-bit output precision, two of them with shared
  entries (`ppa_workload_runner`). Each
  instance builds the unit with that scheme's parameters, loads its table,
  sweeps all 256 inputs and checks the results bit-exactly and against the
  error bound.
* `tb_fqa_compute`: the computation unit, through `fqa_compute_checker`. It
  covers seven FWL configurations, including the 16-bit-output ones, with
  random operands.
* `tb_trunc_mult`, `tb_concat_adder`, `tb_shift_add_mult`, `tb_seg_index_gen`,
  `tb_coef_memory`: the individual blocks.

With Verilator 5, from the project root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fqa_pkg.sv rtl/*.sv \
    tb/ppa_workload_runner.sv tb/fqa_compute_checker.sv tb/tb_fqa_ppa.sv \
    --top-module tb_fqa_ppa -o sim && ./obj_dir/sim
```

Change `--top-module` and the last testbench file to run another testbench.
Each one runs in well under a second.
