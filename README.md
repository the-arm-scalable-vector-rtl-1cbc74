# An SVE vector execution unit in SystemVerilog

The Scalable Vector Extension (SVE) of AArch64 lets one binary run on hardware
whose vector registers are anywhere from 128 to 2048 bits wide. Software never
learns the width at compile time. The hardware makes that possible with three
things:

- **Predicates.** Every vector instruction is governed by a predicate register,
  with one enable bit per vector byte.
- **Loop-control instructions.** They build those predicates from scalar loop
  bounds (`whilelo`), advance induction variables by "one vector's worth"
  (`incd`, `incp`), and report the result as condition flags that ordinary
  branches can test.
- **Speculative, partitioned execution.** A first-faulting load (`ldff1`)
  turns a fault on any element after the first active one into a cleared bit
  in the first-fault register (FFR). The break instructions (`brka`, `brkb`)
  and the serial-walk instructions (`pnext`, `ctermeq`) then confine work to
  the part of the vector that is safe.

This RTL implements the execution side of that idea. It holds the SVE
architectural state and runs a useful subset of the instructions, with these
properties:

- The register width is a parameter, 2048 bits by default.
- The width actually in force is chosen at run time through the ZCR control
  registers.
- The same instruction stream gives the same result at every width.

The test benches run the standard examples unchanged at 128, 256, 384, 512 and
2048 bits: `daxpy`, `strlen` with first-faulting loads, and a linked-list walk.

## Architectural state and the vector length

| State | Size | Module |
|---|---|---|
| Z0–Z31 | `LEN_MAX`×128 bits | `sve_zregs` (3 read ports, 1 write port) |
| P0–P15, FFR | `LEN_MAX`×16 bits (1 bit per byte) | `sve_pregs` (4 read ports) |
| NZCV | 4 bits | `sve_core` |
| ZCR_EL1..3 | 4-bit LEN field each | `sve_zcr` |

**Advanced SIMD overlay.** The low 128 bits of Z*n* are the Advanced SIMD
register V*n*. The `v_*` port of the top models Advanced SIMD writes. Such a
write clears Z*n* above bit 127, as the architecture requires.

**Predicate layout.** An element of E bytes is enabled by the predicate bit of
its lowest byte. A predicate therefore governs 8-, 16-, 32- and 64-bit elements
alike. For example, bits 0, 8, 16, … enable the 64-bit elements.

**Vector length.** `eff_len` is the vector length in force, counted in
128-bit units. It is the smallest of:

- `LEN_MAX`;
- LEN+1 of the ZCR register of the current exception level;
- LEN+1 of the ZCR register of every higher exception level.

A level may write only its own register or a lower level's. A write from
below is ignored and flagged on `zcr_wr_denied`.

Every unit works on the first `eff_len`×128 bits. Every vector or predicate
result is written as zero above that. This is what makes a program
length-agnostic: lanes beyond the current length can never leak old data.

## Micro-operation interface

The top module is `sve_core`. It does not fetch or decode instructions. A host
core is assumed in front of it, and that host does the following:

- keeps the general-purpose registers;
- executes scalar code and branches;
- passes each SVE instruction as a decoded micro-operation, `sve_uop_t`
  (defined in `sve_pkg`).

The micro-operation carries these fields:

- `op`, `esz`;
- register numbers `zd`, `zn`, `zm`, `pd`, `pg`, `pn`, `pm`;
- the modifier bits `setflags`, `zeroing`, `unpred`, `use_imm`;
- the scalar operands already read from the host, `xn`, `xm` and `imm`.

Scalar results come back on `xd`/`xd_valid`, and the flags on `nzcv`. The host
branches on the flags:

| Branch | Condition tested |
|---|---|
| `b.first` | N |
| `b.none` | Z |
| `b.last` | !C |
| `b.tcont` | N == V |

The flags follow the SVE convention, computed relative to the governing
predicate:

- N = the first active element is true;
- Z = no active element is true;
- C = the last active element is **not** true;
- V = 0.

**Timing.** One operation runs at a time, in order.

- An operation is accepted when `uop_valid && uop_ready`.
- A register-to-register operation updates the state at the accepting clock
  edge. `done` (and `xd_valid`, if it has a scalar result) is high in the
  following cycle. `uop_ready` stays high, so one such operation can be
  accepted per cycle.
- Memory operations and `fadda` take several cycles. They hold `uop_ready` low
  until they finish.

**Predicate registers usable as the governor.** Data-processing and memory
operations may use only P0–P7: bit 3 of `pg` is ignored for them. Operations
that produce predicates may use all of P0–P15.

`sve_insn_class` is included for a front end to use. It classifies a 32-bit
A64 word:

- the top-level group from bits 28:25, where 0010 = SVE;
- the SVE sub-group from bits 31:29 and 24 (integer DP, permute, compare,
  predicate, FP, and the gather/contiguous/scatter memory groups).

Decoding the individual encodings below that level is not part of this design.

## Predicate unit and loop control

`sve_pred_unit` is combinational. It implements these instructions:

- `ptrue` and `pfalse`;
- `whilelt` (signed) and `whilelo` (unsigned);
- `pnext`;
- `brka` and `brkb`, zeroing or merging;
- `and`, `orr` and `eor` on predicates;
- `rdffr`, `setffr` and `wrffr`.

The "S" forms also set the flags, through `sve_pred_flags`.

`while` sets element *i* when *xn + i < xm*. It is computed without
overflow: the comparison is against the distance *xm − xn*, not by adding
*i*. An element is also set only while every lower element is set. A bound
near the top of the range therefore gives a correct partial predicate instead
of wrapping.

`pnext` finds the first active element above the last true element of the
input predicate. `sve_count_unit` implements the scalar side:

- `inc`: adds imm × elements-per-vector to a scalar;
- `incp`: adds the number of active elements to a scalar;
- `ctermeq` and `ctermne`: compare two scalars and update N and V as follows.
  - Terminate: N = 1, V = 0.
  - Otherwise: N = 0, V = !C, so that `b.tcont` (N == V) continues the serial
    loop only while the `pnext` walk has not reached the last element.

## Vector datapath

There are three units in the datapath.

**`sve_valu` (integer ALU).** It holds one lane per element for each of the
four element sizes, built from `sve_valu_lane`, and selects the set for the
current size. It implements:

- `dup`, `cpy`, `index`, `movprfx`;
- `add`, `sub`, `mul`, `mla`;
- `and`, `orr`, `eor`;
- `cmpeq`, `cmpne`, `cmplt`, `cmpge`, which write a predicate and set the
  flags.

The forms are:

- Predicated forms are destructive (`zdn = zdn op zm`). Inactive elements keep
  their value under `/m` and become zero under `/z`.
- Unpredicated forms are constructive (`zd = zn op zm`).
- `movprfx` is a plain vector copy, optionally predicated.

**`sve_reduce`.** It implements `eorv`, `orv`, `andv` and `uaddv` of the
active elements, in one cycle.

**`sve_fp_unit`.** It handles double precision only.

- `fmla` uses one fused multiply-add per 64-bit lane (`sve_fma64`). It is
  combinational.
- `fadda` is the strictly ordered sum. It runs through one fused adder, one
  element per cycle, in increasing element order. The result is therefore
  bit-identical to the scalar loop at every vector length.
  - Latency: `done` comes 2×`eff_len`+1 clock edges after `fadda` is accepted.

`sve_fma64` is an IEEE 754 binary64 fused multiply-add:

- round to nearest even only;
- subnormals supported;
- a NaN result is the default quiet NaN;
- no exception flags.

It works as follows:

1. It forms the exact 106-bit product.
2. It aligns the product and the addend in a 168-bit window. Addend bits that
   fall below the window are kept as a sticky bit.
3. It normalises and rounds once.

## Load/store unit and first-fault partitioning

`sve_lsu` cracks every vector memory operation into element accesses, one per
active element. The operations are:

| Operation | Address of element k |
|---|---|
| contiguous `ld1`/`st1` | xn + ((xm + k) << esz) |
| broadcast `ld1r` | xn + imm (one access, written to every active element) |
| gather `ld1` / scatter `st1` | element k of zn + imm (bytes) |
| first-faulting `ldff1` | as contiguous or gather |

The memory port carries one element access at a time:

- A request (`mem_req_t`: address, write, size, data) is held until
  `mem_req_ready`.
- One response (`mem_rsp_t`: data and a fault bit) follows, in a later cycle.

With a memory that is always ready and answers in the next cycle, an operation
costs:

- 2 cycles per active element;
- 1 cycle per inactive element;
- 2 cycles to finish.

The fault rules:

- **A fault on the first active element, or on any element of a normal
  load/store:** the operation stops. `trap` and `fault_addr` pulse with
  `done`. Stores already made stay made.
- **A fault on a later active element of a first-faulting load:** it is
  suppressed. FFR is cleared from that element upward, and the unloaded
  elements are written as zero.

Software then runs this sequence:

1. It reads the safe partition with `rdffr`.
2. It processes that partition.
3. On the next iteration it retries. The faulting element is now first, so
   the fault traps for real.

The `strlen` test shows exactly this sequence. A string that ends just before
a faulting page completes. One that runs into the page traps on the retry.

## Where this departs from an SVE processor

- **No full decoder, no scalar core, no caches.** The host side is played by
  the test bench. Memory is a behavioural model inside the test benches.
- **Memory is cracked to one element per access**, including contiguous
  accesses. Cost grows with the number of elements, not with the number of
  cache lines.
- **Single issue, in order.** Register-to-register operations take one cycle.
  Reductions and permutes are done in one cycle, not in time proportional to
  the length.
- **Instruction subset.** The subset is the one listed above.
  - Floating point is 64-bit `fmla` and `fadda` only.
  - There are no permutes beyond `dup`/`cpy`/`index`, no widening or
    narrowing, and no non-temporal or structure loads.
- **Choices where the architecture is not pinned down here.** These are the
  LEN field encoding (length = (LEN+1)×128), the write-permission rule for
  ZCR, reset values (all zero, ZCR to the largest length), and the
  micro-operation format.
- **Size.** `LEN_MAX` = 16, the 2048-bit architectural maximum. Smaller
  implementations are reached by setting ZCR. Changing `LEN_MAX` builds a
  narrower unit.
- **Synthesis size.** The register files alone hold 65,536 + 4,352 flip-flop
  bits at the default size. Synthesis of the full top at this size is slow.

## Files

| File | Contents |
|---|---|
| `rtl/sve_pkg.sv` | constants, element sizes, opcodes, `sve_uop_t`, flag and memory structs |
| `rtl/sve_core.sv` | top: state, units, write-back and handshake |
| `rtl/sve_insn_class.sv` | A64 / SVE instruction-group classifier |
| `rtl/sve_zcr.sv` | ZCR_EL1..3 and the effective length |
| `rtl/sve_zregs.sv`, `rtl/sve_pregs.sv` | Z file, and P file with FFR |
| `rtl/sve_elem_mask.sv` | which predicate bits start an element inside the length |
| `rtl/sve_pred_flags.sv` | N/Z/C/V from a result and its governing predicate |
| `rtl/sve_pred_unit.sv` | predicate-generating instructions |
| `rtl/sve_count_unit.sv` | `inc`, `incp`, `ctermeq`/`ctermne` |
| `rtl/sve_valu.sv`, `rtl/sve_valu_lane.sv` | integer vector ALU |
| `rtl/sve_reduce.sv` | horizontal reductions |
| `rtl/sve_lsu.sv` | cracked load/store unit with first-fault handling |
| `rtl/sve_fma64.sv`, `rtl/sve_fp_unit.sv` | binary64 fused multiply-add; `fmla` and `fadda` |
| `tb/tb_<module>.sv` | one self-checking test bench per module |

## Simulating

Every test bench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog that counts a failure if the simulation hangs. From the top directory:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/sve_pkg.sv tb/tb_sve_core.sv --top-module tb_sve_core -Mdir obj
./obj/Vtb_sve_core
```

To run another bench, substitute its name for `tb_sve_core`.

`tb_sve_core` runs the top at its default 2048-bit size, and it is the
slowest to build. It has these parts:

- It plays the host core and runs `daxpy`, `strlen` and the list walk at
  several vector lengths.
- It checks the instruction counts of the `daxpy` walk-through for n = 3:
  19 instructions at 128 bits and 12 at 256 bits, counting `ret`.
- It counts each mechanism: partial while-predicate, suppressed fault, trap,
  length switch, denied ZCR write, Advanced SIMD zeroing, `pnext`, `ctermeq`
  stop, break, gather, memory stall, `movprfx`, reduction, the P0–P7
  restriction, instruction classification and `fadda`.
- It fails if any of those mechanisms never happened.

The unit test benches work as follows:

- They drive random operands and compare against reference models written
  independently in the bench.
- Several run the module at a smaller `LEN_MAX` to keep simulation short.
- The load/store bench replays the first-fault example:
  - all four elements active, with the third one faulting: FFR becomes
    T T F F from element 0;
  - the first two elements inactive: the access to the faulting address traps.
