# A transprecision floating-point unit

This design is a floating-point unit (FPU) that works in five formats: FP64, FP32, FP16, FP16alt (1-8-7, the bfloat16 layout) and FP8 (1-5-2). Any format narrower than the 64-bit datapath can also be processed as a SIMD vector, with two FP32, four FP16/FP16alt or eight FP8 elements per operation. The point is to let software pick the cheapest precision that is good enough for each part of a computation, without needing a separate FPU for each format. The unit is parametric: which formats exist, how each group of operations is built, and how deep each pipeline is are all parameters. The defaults give the configuration for a 64-bit application core:

| operation group | operations | slice kind | latency (cycles) FP64/FP32/FP16/FP16alt/FP8 | lanes |
|---|---|---|---|---|
| ADDMUL | FMADD, FNMSUB (op_mod: FMSUB/FNMADD), ADD/SUB, MUL | one parallel slice per format | 4 / 3 / 3 / 3 / 2 | 1 / 2 / 4 / 4 / 8 |
| DIVSQRT | DIV, SQRT | one merged scalar unit | 21 / 11 / 7 / 6 / 4 | 1 |
| COMP (NONCOMP) | SGNJ, MIN/MAX, compare, classify | one parallel slice per format | 1 | 1 / 2 / 4 / 4 / 8 |
| CONV | FP-FP, FP-int, int-FP, cast-and-pack | one merged multi-format slice | 2 | 8 lanes of 64, 64, 16, 16, 8, 8, 8, 8 bits |

All arithmetic follows IEEE 754-2008. Results are rounded once, in all five rounding modes (RNE, RTZ, RDN, RUP, RMM). Gradual underflow is supported, and tininess is detected after rounding. All five flags are reported (NV, DZ, OF, UF, NX). A NaN result is always the canonical quiet NaN. Sign injection, min/max, compare and classify behave as in RISC-V. A scalar result narrower than 64 bits is NaN-boxed: the unused upper bits are set to one.

## Structure and data flow

`fpnew_top` takes one operation per handshake: up to three 64-bit operands, the operation, a modifier bit, the formats, the rounding mode and a tag. `get_opgroup(op)` in `fpnew_pkg` decides which of four *operation group blocks* (`fpnew_opgroup_block`) gets the operation. The other blocks see all-zero operands, so they do not toggle. This is the power-saving scheme used throughout: a unit that is not working gets constant inputs. A round-robin arbiter (`fpnew_rr_arb`) puts the blocks' results onto the single output. The tag travels with its operation. Short operations can overtake long ones, so results may leave in a different order from the one in which they entered, and the tag says which result is which.

Inside a block there are two ways to build the hardware:

* **Parallel slices** (`fpnew_opgroup_fmt_slice`) give each format its own hardware. The destination format selects the slice. A second round-robin arbiter merges the slices' outputs, so operations in different formats can overlap in their pipelines. A slice holds `64 / width` identical lanes. Lane *i* is wired to bits `[i*w +: w]` of each operand. A scalar operation uses lane 0, and the operands of the other lanes are forced to zero.
* **Merged slices** share one unit among all formats. DIVSQRT uses `fpnew_divsqrt_multi`. CONV uses `fpnew_opgroup_multifmt_slice`, which has eight conversion lanes (`fpnew_cast_multi`). Lane *i* only has to serve formats that fit into its width. Lanes 0 and 1 are 64 bits wide so that cast-and-pack can convert two FP64 or FP32 values into two elements of a narrow vector.

Pipeline registers (`fpnew_pipe`) come after each combinational unit. Synthesis is expected to retime them into the unit. Every stage speaks the valid-ready handshake. A stalled output freezes its stage, while empty stages in front of it keep filling ("bubble popping"), so a pipeline with *n* registers can buffer *n* results.

### Timing convention

An operation handed over in cycle *t* (valid and ready both high at the rising edge) comes out in cycle *t + L*, where *L* is the latency in the table above. With the output always ready, the ADDMUL, COMP and CONV slices accept one operation per cycle. The DIVSQRT unit takes one operation at a time. While it is working, its `in_ready` is low.

## The units

**FMA (`fpnew_fma`).** The product of the two p-bit significands is exact and 2p bits wide. It sits at a fixed place in a 3p+4 bit adder. The addend is shifted against it. The shift is clamped at both ends, and the bits shifted out below the adder collapse into a sticky bit. After the signed addition (an effective subtraction is complemented if the result is negative), a leading-zero count normalises the sum, and `round_pack` rounds it. ADD is computed as a·1+b and MUL as a·b+(−0), which gives IEEE-correct signs for zero results. Special operands bypass the datapath.

**Division and square root (`fpnew_divsqrt_multi`).** The unit is iterative and works for all five formats. Each cycle it produces three quotient or root bits: non-restoring division and restoring square root, each with three radix-2 steps per cycle. A p-bit format needs ceil(p/3) iterations. With one cycle to accept the operation and two to normalise and round, the latency is 3 + ceil(p/3). The input `iter_override_i` can lower the number of iterations to trade precision for latency. When it is nonzero and smaller than the full count, 3 + override cycles are taken and the result is rounded from the shorter quotient.

**Comparison unit (`fpnew_noncomp`).** One magnitude/sign comparator serves all the operations. The rounding-mode field selects the variant: for SGNJ, RNE/RTZ/RDN/RUP give J/JN/JX/move. For MIN/MAX, RNE gives min and RTZ gives max. For compare, RNE/RTZ/RDN give ≤ / < / =, and op_mod inverts the answer. Compare and classify return integers: a vector compare writes each element's answer into that element.

**Conversion unit (`fpnew_cast_multi`).** Every source is first converted to a common form: sign, exponent, and a 64-bit mantissa with the integer bit at position 63. A single rounding stage then produces the target: `round_pack` for FP targets, or an integer rounding and saturation step for integer targets (RISC-V rules: NaN gives the largest integer, out-of-range values saturate and raise NV). `op_mod` selects unsigned integers.

**Shared rounding (`fpnew_pkg::round_pack`).** This is the one place where rounding, subnormal handling, overflow (to infinity or to the largest finite number, depending on the mode) and flag generation are implemented. Every unit uses it.

## Interface of `fpnew_top`

| signal | meaning |
|---|---|
| `operands_i[2:0][63:0]` | a, b, c; narrow scalar values are LSB-aligned |
| `op_i`, `op_mod_i` | operation (`fpnew_pkg::operation_e`) and its modifier |
| `rnd_mode_i` | rounding mode, or the variant selector for the COMP operations |
| `src_fmt_i`, `dst_fmt_i`, `int_fmt_i` | formats; `dst_fmt_i` selects the parallel slice |
| `vectorial_op_i` | SIMD operation on all elements |
| `iter_override_i[4:0]` | 0 = full-precision division/square root |
| `tag_i` / `tag_o` | 8-bit tag returned with the result |
| `in_valid_i`, `in_ready_o`, `out_valid_o`, `out_ready_i` | handshakes |
| `result_o`, `status_o`, `busy_o` | result, flags {NV,DZ,OF,UF,NX}, any operation in flight |

## Verification

Each unit has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog. The arithmetic testbenches compare against results computed with an exact rational reference model. Those results are embedded as directed vectors: random operands, special values, subnormals, all rounding modes. Random checks (`$urandom`) then add algebraic properties, for example MUL equals FMA with c = −0, commutativity, round trips, and a compare being the opposite of its inverse. The divide/square-root testbench checks the latency of every format (21/11/7/6/4 cycles) and the iteration override. The pipeline, arbiter and parallel-slice testbenches use random back-pressure, and check latency, ordering, fairness, result holding and operand silencing. To run one:

```
verilator --binary --timing --assert rtl/fpnew_pkg.sv rtl/fpnew_fma.sv tb/tb_fpnew_fma.sv --top-module tb_fpnew_fma
./obj_dir/Vtb_fpnew_fma
```

Add the RTL files of every module the testbench instantiates (the pipe, lanes and arbiter for the slice and block testbenches).

## Limits and departures

* **No end-to-end testbench for `fpnew_top` yet.** The operation group block and the merged CONV slice have no testbench of their own either. They are built from units that are verified, but their own routing logic (block selection, format-slice arbitration, vector assembly in the CONV slice, cast-and-pack) has only been linted.
* Every conversion lane has a 64-bit internal datapath, even the 8- and 16-bit lanes. The result is correct but larger than needed.
* The FMA is one combinational block followed by its pipeline registers, and relies on retiming instead of explicit pipeline stages inside the datapath.
* The lane widths of the CONV slice follow the configuration table (two 64-bit lanes). The general lane-width rule would give 32 bits for lane 1, but that is not enough for cast-and-pack of FP64 values.
* Only the 64-bit application-core configuration is provided. Expanding operations (a narrow product accumulated into a wider format) and the merged multi-format FMA of the microcontroller configuration are not implemented.
* Coarse synthesis of the whole flattened top with yosys takes longer than ten minutes, mostly in resource sharing across the eight conversion lanes. The individual units synthesise in seconds.
