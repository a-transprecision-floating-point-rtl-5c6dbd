# SmallFloatUnit: a transprecision floating-point unit

Most of the floating-point work in a small embedded program needs less
precision than binary32 gives. Some values need the binary32 exponent range
but only a few significant bits. Others need binary16's precision but not its
range. A few need only a handful of bits. *Transprecision* computing gives
each variable the narrowest format that still meets the accuracy target of
the final result. That saves energy twice: narrow arithmetic is cheaper, and
two or four narrow values fit in one 32-bit register or memory word.

This RTL implements a floating-point unit for such a type system. It sits
next to a 32-bit core and works on four formats:

| format      | sign | exponent | mantissa | note                                          |
|-------------|------|----------|----------|-----------------------------------------------|
| binary32    | 1    | 8        | 23       | IEEE single precision                         |
| binary16alt | 1    | 8        | 7        | binary32's range, little precision            |
| binary16    | 1    | 5        | 10       | IEEE half precision                           |
| binary8     | 1    | 5        | 2        | binary16's range, so casts to it never saturate |

It adds, subtracts and multiplies in each format. It casts between the
formats and to and from signed and unsigned integers. It can run the 16-bit
and 8-bit operations as SIMD vectors: two binary16/binary16alt operations, or
four binary8 operations, on the sub-words of one 32-bit operand pair.

## Structure: slices and lanes

The unit is built from fixed-width *slices*. Each slice holds every operation
whose widest operand or result has the slice's width:

| slice (count)   | arithmetic                                  | FP <-> int                         | FP <-> FP                                  |
|-----------------|---------------------------------------------|------------------------------------|--------------------------------------------|
| `slice32` (1)   | binary32 add/sub, mul                       | binary32, 16, 16alt, 8 <-> int32   | binary32 <-> binary16, binary16alt, binary8 |
| `slice16` (2)   | binary16 add/sub, mul; binary16alt add/sub, mul | binary16, 16alt <-> int16      | binary16 <-> 16alt, binary16 <-> 8, binary16alt <-> 8 |
| `slice8` (4)    | binary8 add/sub, mul                        | binary8 <-> int8                   | none                                       |

Every box in this table is its own hardware unit. No logic is shared between
formats, so an idle format costs leakage only. Each bidirectional cast is one
`fp_fp_conv` or `fp_int_conv`, holding both directions.

All seven slices see the same 32-bit OpA and OpB. `operand_distribution`
decodes the request and picks the slice width. It then gives each lane of
that width its sub-word: 16-bit lane *j* gets bits `[16j+15:16j]` and 8-bit
lane *k* gets bits `[8k+7:8k]`. A scalar operation uses lane 0 only. A
vectorial one (`vectorial = 1`) uses every lane of its width. Every other lane
gets all-zero operands and an all-zero control word. This is **operand
isolation**: unused logic sees constant inputs and does not switch. Inside a
slice the same is done once more, per unit. `output_selection` puts the
completing lanes back at the same bit positions. Bits that no lane wrote are
zero. A narrow result in a wider lane is right-aligned with zeros above it, as
in binary32 -> binary8 in `slice32` or binary16 -> binary8 in a `slice16` lane.

So a vectorial binary16 -> binary8 cast of `{x1, x0}` returns
`{8'h0, y1, 8'h0, y0}`. Only the slice width is SIMD here. The cast does not
pack the bytes together.

## Request interface and timing

```
smallfloat_unit #(.PIPE_WIDE(1)) (
  clk_i, rst_ni,                                   // rst_ni: asynchronous, active low
  in_valid_i, in_ready_o, req_i, opa_i, opb_i,     // request
  out_valid_o, out_illegal_o, res_o);              // result
```

`req_i` is a `tpfpu_pkg::fpu_req_t`:

| field        | meaning                                                                 |
|--------------|-------------------------------------------------------------------------|
| `op`         | `OP_ADD`, `OP_SUB`, `OP_MUL`, `OP_F2F`, `OP_F2I`, `OP_I2F`              |
| `src_fmt`    | format of the operands (arithmetic, F2F, F2I)                           |
| `dst_fmt`    | format of the result (F2F, I2F)                                          |
| `int_fmt`    | `INT32`, `INT16` or `INT8`: integer side of F2I/I2F; it also selects the slice |
| `int_signed` | integer side is two's complement                                        |
| `vectorial`  | use every lane of the slice width                                        |

The operand of a cast sits in the low bits of its lane. A request presented in
cycle *c* is accepted at the clock edge that ends cycle *c* if `in_valid_i`
and `in_ready_o` are both high. Its result is on `res_o` for exactly one
cycle, with `out_valid_o` high:

* **in cycle c+1** for all casts and for binary8 arithmetic. The slice
  computes combinationally in cycle *c*, and the output register catches the
  result.
* **in cycle c+2** for binary32, binary16 and binary16alt add/sub/mul. These
  units have one internal pipeline register. A new request can still be
  accepted every cycle, so the throughput is one operation per cycle.

Mixing the two latencies gives a structural hazard. A single-cycle operation
accepted right after a pipelined one would finish in the same cycle, on the
one output register. The issue logic solves this with a single **stall
rule**: in the cycle after a pipelined operation was accepted, `in_ready_o` is
low for a single-cycle request. Pipelined requests are never stalled. Nothing
else stalls, and results have no back-pressure. The slices check the rule
with an assertion (`a_no_collision`).

Some requests have no unit: binary8 <-> int16, binary32 <-> int16, a cast to
the same format, and so on. They are accepted, finish after one cycle with
`res_o = 0`, and raise `out_illegal_o`.

`PIPE_WIDE = 0` removes the pipeline registers. Every operation then finishes
in one cycle and the unit never stalls.

## Arithmetic

All arithmetic and conversion units share one back end, `fp_norm_round`. It
takes an exact magnitude `M` (W bits) and a biased exponent `E` meaning
`M / 2^(W-1) * 2^(E - bias)`. It then:

1. finds the leading one;
2. shifts left to a normal number, or, when the exponent would drop below 1,
   shifts only as far as the denormal range allows or shifts right, ORing the
   lost bits into a sticky bit;
3. rounds to nearest, ties to even, by adding the round bit to the packed
   `{exponent, mantissa}`. A carry out of the mantissa moves into the
   exponent. So denormal -> normal and largest finite -> infinity need no
   special case;
4. returns infinity when the exponent overflows.

Each front end only has to produce an exact `M` and `E`:

* **`fp_addsub`** orders the operands by magnitude. It shifts the smaller
  significand right with guard, round and sticky bits, then adds or
  subtracts. This is the standard three-extra-bit scheme: after a
  cancellation of more than one bit, the alignment shift was at most one, so
  no information was lost. An exact zero difference is +0. −0 + −0 is −0.
* **`fp_mul`** multiplies the two (MAN+1)-bit significands exactly
  (2·MAN+2 bits) and adds the exponents. Denormal inputs need no
  pre-normalisation because the back end's leading-one shift handles them.
* **`fp_to_fp`** (two per `fp_fp_conv`) re-biases the exponent. Narrowing
  rounds, overflows to infinity and underflows into denormals. Widening is
  exact.
* **`fp_int_conv`**: integer -> float sends `|x|` to the back end.
  Float -> integer builds a fixed-point value with MAN+2 fraction bits and
  rounds to nearest even. Out-of-range results saturate: NaN and large
  positive values give the largest integer, large negative values give the
  smallest, and negative values give 0 when unsigned. This is the RISC-V F
  extension's behaviour.

Special values: any NaN input, inf − inf and inf × 0 give the canonical quiet
NaN (sign 0, exponent all ones, mantissa MSB set, rest zero). There are no
exception flags, and round-to-nearest-even is the only rounding mode.

For binary32 and the 16-bit formats, the pipeline register sits between the
front end and `fp_norm_round`. For the adder that is after the significand
addition; for the multiplier, after the product. It loads only when the unit
is used, so an idle unit does not toggle.

## Where this RTL follows the published design and where it does not

Taken from the published description:

* the four formats;
* the slice structure (one 32-bit, two 16-bit, four 8-bit slices), with the
  exact unit list of each slice;
* the 32-bit OpA/OpB/Res interface;
* operand isolation by forcing zero;
* scalar versus vectorial operation;
* latency 2 with one operation per cycle for binary32/16/16alt arithmetic,
  and latency 1 for binary8 and all casts.

Departures and own choices:

* **Operation units.** The published unit instantiates a vendor library's FP
  datapath components. Here each unit is written from its function, so their
  area, timing and rounding details may differ from that library.
* **Pipelined multipliers.** The description says all binary32 and 16-bit
  arithmetic is pipelined. Its block diagram, however, marks only the
  adders. This RTL pipelines the multipliers too.
* **Own choices, where the description says nothing:** round-to-nearest-even
  only, no flags, canonical NaN, saturating float-to-integer casts, the
  request encoding, the ready/valid handshake and stall rule, the illegal
  request path, the lane bit mapping, zero-filled unused result bits, the
  reset, and the place of the pipeline register.
* **Not included.** Input registers at the unit's boundary are left out: the
  core is expected to provide them. The only register at the boundary is the
  output register. The unit is not integrated into a core.

## Files

| file | contents |
|------|----------|
| `rtl/tpfpu_pkg.sv` | formats, operation and request types, slice control word |
| `rtl/smallfloat_unit.sv` | top: issue control, stall rule, slices, output register |
| `rtl/operand_distribution.sv` | decode, lane routing, operand isolation |
| `rtl/output_selection.sv` | result assembly |
| `rtl/slice32.sv`, `rtl/slice16.sv`, `rtl/slice8.sv` | the slices |
| `rtl/fp_addsub.sv`, `rtl/fp_mul.sv` | arithmetic units (parameters `EXP`, `MAN`, `PIPE`) |
| `rtl/fp_fp_conv.sv`, `rtl/fp_to_fp.sv` | FP <-> FP casts |
| `rtl/fp_int_conv.sv` | FP <-> integer casts |
| `rtl/fp_norm_round.sv` | shared normalise/round/pack back end |

Synthesised with a generic coarse-grained flow, the whole unit has about 8,500
word-level cells and 549 flip-flop bits. The flip-flops are the output
register, the pipeline registers of the ten pipelined units and the slices'
completion tags.

## Verification

The testbenches are self-checking. They compare against a reference model
(`tb/tb_fp_ref_pkg.sv`) that shares no code with the RTL. The model widens
the operands exactly to the simulator's double-precision `real`, computes in
double, and rounds to the target format with its own bit-field rounding
routine. For add, subtract and multiply on formats with at most 24
significand bits, this double rounding gives the correctly rounded result,
because double has more than 2p+2 significand bits. `tb/tb_fpu_ref_pkg.sv`
adds the request-level model: slice choice, lanes, latency and random legal
requests.

| testbench | what it covers |
|-----------|----------------|
| `tb_fp_addsub`, `tb_fp_mul` | all four formats: 20,000 random cycles each with special values, denormals and near-cancelling pairs; binary8 exhaustively; pipeline latency and hold while idle |
| `tb_fp_fp_conv` | all six format pairs, both directions: every 16-bit and 8-bit input, plus 100,000 random binary32 inputs |
| `tb_fp_int_conv` | all seven pairs, signed and unsigned: 16- and 8-bit inputs exhaustively, plus random 32-bit inputs near the integer limits |
| `tb_slice32`, `tb_slice16` | random streams of every operation of the slice; result in the issue cycle (casts) or one cycle later (arithmetic) |
| `tb_slice8` | every operation, exhaustively over both operands |
| `tb_operand_distribution`, `tb_output_selection` | decode, lane routing, isolation and result assembly against the model |
| `tb_smallfloat_unit` | end to end at default parameters, 200,000 cycles of random traffic (see below) |
| `tb_conv5x5` | a 5×5 convolution (see below) |
| `tb_jacobi`, `tb_knn`, `tb_pca`, `tb_dwt`, `tb_svm` | the arithmetic of five more near-sensor kernels (see below) |

`tb_smallfloat_unit` sends random traffic over all slices, scalar and
vectorial, plus illegal requests. A per-cycle scoreboard checks `res_o`,
`out_valid_o`, `out_illegal_o` and `in_ready_o`. It also looks inside the
unit to check that unused lanes see zero operands. It counts the stall,
back-to-back pipelined issue, both vector widths and illegal requests, and
fails if any of them never happens.

`tb_conv5x5` runs a 5×5 convolution, the kind of near-sensor kernel this unit
targets, on a 12×12 binary16 image. It computes two output pixels per
request with vectorial binary16 multiply and add, then casts the outputs to
binary8 (vectorial) and binary32. It checks every result bit-exactly, checks
the error against a double-precision convolution, and checks that 25
back-to-back pipelined multiplies finish in 26 cycles.

Five more kernel testbenches drive the unit the way a core running each
kernel would. The data sizes are small and are this design's choice. The
testbench plays the core's part: it holds the data and does the control
flow. Each one checks every unit result bit-exactly against the model.
Each one also checks the kernel's output against double precision.

* `tb_jacobi`: 4 sweeps of a Jacobi heat-grid stencil on an 8×8 grid.
  It uses binary32 adds, a cast to binary16alt, a multiply by 0.25 in
  binary16alt and a cast back.
* `tb_knn`: 3 nearest neighbours among 64 binary8 points. It uses 4-way
  vectorial binary8 subtract and multiply and scalar binary8 adds. Because
  binary8 has only 3 significand bits, the test does not require the same
  neighbours as a double-precision search. It requires each chosen
  neighbour to lie within the binary8 rounding bound of the true K-th
  distance.
* `tb_pca`: the covariance stage of a principal component analysis. It
  uses scalar binary32 means, differences and products, then
  binary32↔binary16alt casts. The eigen-decomposition is not run, because
  it needs division and square root, which this unit lacks.
* `tb_dwt`: one Haar wavelet level on 64 binary16alt samples. It uses
  vectorial add, subtract and multiply by 1/√2, then a vectorial cast of
  the details to binary8.
* `tb_svm`: linear-SVM decision values for 24 samples of 16 binary16
  features. It uses vectorial multiply-accumulate, a scalar add to combine
  the two lanes, and a cast to binary32.

Run any of them with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tpfpu_pkg.sv tb/tb_fp_ref_pkg.sv tb/tb_fpu_ref_pkg.sv \
    tb/tb_smallfloat_unit.sv --top-module tb_smallfloat_unit
./obj_dir/Vtb_smallfloat_unit
```

Each prints `TB_RESULT checks=N failures=0` on success. Each runs in a few
seconds at most.

## Changing it

* The format widths are parameters of the arithmetic units. A new format
  needs new instances in a slice, plus an entry in `fp_fmt_e`, `exp_bits`
  and `man_bits`.
* To share one multiplier between binary16 and binary16alt, or to add a
  rounding-mode input, change the front ends: `fp_norm_round` is the only
  place that rounds. A rounding mode would go into its `round_up` term.
* `PIPE` on `fp_addsub`/`fp_mul` moves a unit between the single-cycle and
  pipelined classes. `is_pipelined()` in `tpfpu_pkg` and the slices'
  `pipe_op` must then agree, because the issue logic's stall rule depends on
  them.
