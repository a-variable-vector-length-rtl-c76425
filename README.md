# Variable-vector-length SIMD unit

A wide SIMD unit is only useful when the code has enough independent
operations to fill it. A fixed 512-bit unit wants 16 single-precision
additions at once. A binary translator that vectorises code at run time often
finds fewer: four additions in a short loop, or two results that have to be
gathered from scalar code. Normal SIMD instruction sets leave such code in
scalar form. They also spend long shuffle sequences to collect scalar results
into one register.

This design is a 512-bit SIMD execution unit. Its instruction set has three
features that let translated code use a wide datapath anyway:

1. **Per-instruction vector length.** Every vector instruction carries the
   number of low-order lanes it uses (1..16). The other lanes do not start
   any computation and their register elements are not written. Since they
   never compute, they cannot raise false exceptions such as a division by
   zero on stale data. Stores write only the active elements. No
   vector-length register has to be written first.
2. **Selective Writing (SWR).** A scalar instruction computes in lane 0. It
   writes its result to *any* element of the destination register, chosen by
   an immediate. Four scalar producers can therefore build the operand vector
   of a vector consumer in place, with no shuffle instructions.
3. **PACKPS.** This permutation takes one chosen element from each of two
   source registers. It writes them to two chosen elements of the destination
   and leaves the rest untouched. Collecting N values from N registers takes
   N/2 instructions instead of N-1.

Each register can also be viewed as eight 64-bit elements (the `dp` bit).
Double-precision FP operations then run on pairs of lanes. All three features
work the same way on 64-bit elements.

The top module is `simd_unit` (`rtl/simd_unit.sv`).

## Instruction format and semantics

`instr_t` in `rtl/simd_pkg.sv` is a packed struct:

| field     | width | meaning |
|-----------|-------|---------|
| `op`      | 5     | operation (table below) |
| `scalar`  | 1     | scalar form: computes in lane 0 (lanes 0-1 for `dp`) and writes element `imm[3:0]` (`imm[2:0]` for `dp`) |
| `dp`      | 1     | 64-bit elements: `vl` counts 64-bit elements, FP uses double precision |
| `vl`      | 5     | active low-order elements of a vector instruction; 0 = none; for `dp`, values above 8 mean all 8 |
| `vd, vs1, vs2` | 7 each | registers (128 vector registers of 512 bits) |
| `mem_src` | 1     | the second operand is `mem_data` (memory operand) instead of `vs2` |
| `imm`     | 16    | SWR element index or PACKPS selectors |

| op | unit (latency) | per element |
|----|----------------|-------------|
| IADD ISUB IAND IOR IXOR | simple int (1) | 32-bit integer |
| MOV | simple int (1) | `b`; a load when `mem_src`=1 |
| IMUL | int mul (3) | low 32 bits of the product |
| IDIV | int div (10) | signed, truncating; x/0 = 0xFFFFFFFF and raises `dz` |
| FADD FSUB | simple FP (2) | IEEE single, or double when `dp` |
| FMUL | FP mul (4) | IEEE single / double |
| FDIV | FP div (20) | IEEE single / double; finite/0 raises `dz` |
| PACK | PACKPS (1) | `vd[imm[7:4]] = vs1[imm[3:0]]`, `vd[imm[15:12]] = vs2[imm[11:8]]` |
| STORE | none | `vs1` goes to the store port, masked to the active elements |

With `dp`, the integer operations, MOV and STORE act on the two 32-bit halves
of each 64-bit element. Only the lane mask changes for them.

## Block structure

```
            instr ──► issue_ctrl ─(fire, lanes, write-back queue)─┐
                         │                                         │
 vrf (128 x 512 b) ──► operand_network ◄── mem_data               │
   ▲                     │  (per-lane mux: RF / memory / forward)  │
   │                     ▼                                         │
   │     16 x simd_lane (PR -> int, imul, idiv, fadd, fmul, fdiv)   │
   │      8 x dp_lane   (PR -> fp64 add, mul, div; one per pair)   │
   │      packps_unit   (PR -> permute)                            │
   │                     ▼                                         │
   └──── wb_shuffle (broadcast / element enables / dz) ◄───────────┘
```

| file | role |
|------|------|
| `simd_pkg.sv` | sizes, latencies, opcodes, `instr_t`, lane-mask decode (`lanes_of`, `scalar_en`) |
| `issue_ctrl.sv` | in-order issue, hazards, write-back scheduling |
| `vrf.sv` | 128 x 512-bit register file, two read ports, one write port with per-element enables |
| `operand_network.sv` | per-lane operand multiplexers with forwarding and the memory operand |
| `simd_lane.sv` | one 32-bit lane: operand pipeline register and one slice of each unit |
| `dp_lane.sv` | double-precision FP slice for one lane pair |
| `int_alu.sv`, `int_mul.sv`, `int_div.sv` | integer units |
| `fp_add.sv`, `fp_mul.sv`, `fp_div.sv` | IEEE FP units, parameterised by exponent and fraction width |
| `packps_unit.sv` | PACKPS |
| `wb_shuffle.sv` | shuffle network and element write-enable generation |
| `simd_unit.sv` | top |

## Pipeline timing

An instruction is offered with `in_valid` (and `mem_data` when it uses a
memory operand). It issues in the cycle *t* in which `in_ready` is high. The
register file is read and the operand multiplexers select in cycle *t*. The
operands are captured in each lane's operand pipeline register at the end of
*t*. A unit of latency *L* has its result in the unit's output register in
cycle *t+L+1*. That cycle is the write-back cycle: the `wb_*` outputs show it
and the register file is written at its end.

A dependent instruction can issue in the write-back cycle itself. The
operand multiplexers take the value from the write-back bus. So the
issue-to-issue distance of a dependence is *L+1*:

| unit | L | dependent may issue at |
|------|---|------------------------|
| simple int, PACKPS | 1 | t+2 |
| int mul | 3 | t+4 |
| int div | 10 | t+11 |
| simple FP | 2 | t+3 |
| FP mul | 4 | t+5 |
| FP div | 20 | t+21 |

Stores drive `st_valid/st_data/st_mask` in cycle *t+1*.

## Hazards and stalls (issue_ctrl)

This is the part most likely to hide bugs. Every rule is checked by a
directed test (`tb_issue_ctrl`) and by the random end-to-end test.

- **Scoreboard.** There is one `pending` bit per register. It is set at
  issue and cleared at write-back.
- **RAW.** A source whose register is pending stalls the instruction. The
  exception is a register being written back in this very cycle, which is
  forwarded. MOV does not read `vs1`. An instruction with a memory operand
  and a STORE do not read `vs2`.
- **WAW.** A pending destination stalls. At most one write per register is
  in flight, so results of different latencies can never retire out of order
  into the same register.
- **Write-back slot.** There is one write-back port. A queue indexed by
  "cycles until write-back" holds the destination, lane mask, scalar/dp flags
  and element index of every instruction in flight. An instruction of
  latency *L* claims entry *L*, which shifts down to entry 0 at write-back.
  If that slot is already taken by an earlier, longer-latency instruction,
  the newer instruction waits. The test is on entry *L+1*, because the queue
  shifts in the same cycle.
- **Dividers.** The integer and FP dividers are iterative and not pipelined.
  A second division of the same kind waits until the first has left the
  divider (LAT-1 cycles). The single- and double-precision FP dividers share
  one occupancy counter.

In a given cycle there is only ever one result on the write-back bus, and
every lane of a vector instruction finishes in the same cycle. Assertions in
`simd_unit`, `simd_lane`, `dp_lane` and `issue_ctrl` check this in
simulation.

## Masking and exceptions

`lanes_of(scalar, dp, vl)` turns the instruction fields into a 16-bit lane
mask:

- vector: the low `vl` lanes, or the low `2*vl` lanes for `dp`;
- scalar: lane 0, or lanes 0-1 for `dp`.

A lane outside the mask gets no issue pulse, so none of its units start. The
write enables come from the same mask, and so does the divide-by-zero flag
`wb_dz`: it is the OR of the flags of the enabled lanes only. The end-to-end
test includes an integer division whose masked-off lanes divide by zero. It
must not raise `dz`.

The masked store sends only the active elements (`st_mask`). Loads are MOV
instructions with a memory operand. The unit writes only the active
elements, but masking the memory *access* itself belongs to the host's load
path, which supplies `mem_data`.

## Selective Writing and the shuffle path

A scalar instruction computes in lane 0 (lanes 0-1 for `dp`). In
`wb_shuffle`, that result is broadcast to every element position of the
write-back bus. Only the element named by the immediate is write-enabled.
The same bus feeds the forwarding inputs of every lane's operand
multiplexer. A consumer therefore picks up the value in any element position
in the write-back cycle. The scalar instruction is not slower than a normal
one: its "shuffle" is just the multiplexer input that lets any lane take
lane 0's result.

Forwarding is per element. A lane forwards only when the element it needs
is write-enabled in the write-back. An element that is not written comes
from the register file, which still holds the old value.

## PACKPS

`packps_unit` captures both source vectors and the immediate in its operand
register. One cycle later it produces the two moved elements and a 16-bit
write-enable mask with exactly those two bits set. All other elements of the
destination keep their values. This is why PACK reports a RAW dependence on
`vs1` and `vs2` but does not read `vd`: the keeping is done by the
per-element write enables, not by merging. If both destination indices are
equal, the second source wins. For `dp`, the low three bits of each 4-bit
field select a 64-bit element and a whole lane pair is moved.

## Floating-point arithmetic

`fp_add`, `fp_mul` and `fp_div` are generic in `EXP_W`/`MAN_W`. The lanes
use 8/23 (single) and the lane-pair slices use 11/52 (double).

- Adder: two stages. The first unpacks, orders by magnitude, and aligns with
  guard, round and sticky bits. The second adds, normalises and rounds.
- Multiplier: four stages. The product is formed in stage 1 and rounded in
  stage 2; stages 3 and 4 only carry the result.
- Divider: restoring division, 2 (single) or 4 (double) quotient bits per
  cycle. It computes at least three bits beyond the result precision and
  folds the remainder into the sticky bit.

All three units use the same conventions:

- round to nearest, ties to even;
- subnormal inputs and outputs are flushed to zero (the evaluated programs
  are compiled with `-ffast-math`);
- every NaN result is the canonical quiet NaN (`0x7FC00000` /
  `0x7FF8000000000000`);
- an exact zero sum is +0, except -0 + -0 (or -0 - +0), which gives -0.

## Sizes

Defaults, with no parameter overrides: 512-bit registers, 16 lanes of 32
bits (or 8 of 64 bits), 128 vector registers, latencies int 1 / imul 3 /
idiv 10 / fadd 2 / fmul 4 / fdiv 20 / PACKPS 1. The register file is 64 Kibit.
A generic yosys synthesis of the top gives about 9,200 cells (wide
arithmetic counted as single cells), 25,300 flip-flop bits and the
65,584-bit register-file and issue memories.

## Simulation

All testbenches are self-checking and print
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```sh
# full-size end-to-end test of the top
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/simd_pkg.sv tb/fp_ref_pkg.sv tb/tb_simd_unit.sv --top-module tb_simd_unit
./obj_dir/Vtb_simd_unit

# any block test, e.g. the FP adder
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/simd_pkg.sv tb/fp_ref_pkg.sv tb/tb_fp_add.sv --top-module tb_fp_add
./obj_dir/Vtb_fp_add
```

`-Wno-fatal` keeps Verilator's width and lifetime warnings on some
testbench code from stopping the build. The RTL itself builds without it.

`tb_simd_unit` uses the top with its default parameters. It first loads all
128 registers through memory-operand MOVs. It then runs two directed
sequences: the masked division hiding a divide-by-zero, and four scalar
results written into elements 0..3 and consumed by a 4-lane vector add. After
that come 4000 random instructions, about a third with 64-bit elements. They
use a 12-register window so that dependences, stalls and forwarding are
frequent. A reference model is updated in program order at issue. Every
write-back is checked for cycle, register, enables, data and `dz`, and every
store for data and mask. All registers are read back at the end. The test
also requires that every mechanism occurred: masked lanes, SWR, PACKPS,
memory operands, forwarding, each stall kind, each unit, double-precision
FP, and a hidden divide-by-zero.

The FP references (`tb/fp_ref_pkg.sv`) compute single precision exactly in
double and round once. Double precision uses the simulator's `real`
arithmetic. Both apply the same flush-to-zero and NaN conventions as the
hardware.

## Where this design departs from or adds to the paper

- **Encoding.** The paper says only that the lane count and the scalar
  destination element are encoded in the instruction. The field layout,
  opcodes, `vl` = 0 meaning "no lanes", and the `dp` bit are this design's
  choices. The opcode set covers one operation class per functional unit of
  the evaluated machine plus PACKPS, MOV/load and store.
- **Double precision.** The paper's examples (ADDSS, ADDPS, PACKPS) are
  single precision, but most of its SPECFP programs are double precision. It
  does not say how the lanes handle 64-bit data. Here a 64-bit element uses
  a lane pair with separate double-precision FP slices. Those slices have
  the same latencies as the single-precision units.
- **One instruction per cycle.** The host core of the evaluation issues two
  instructions per cycle. This unit accepts at most one, and it has a single
  write-back port.
- **Latencies.** Table-given latencies are used as they are. PACKPS is
  given latency 1, which is an assumption: the paper says only that it is
  similar to SHUFPS. The register-file read is not a separate pipeline
  stage, so a dependent instruction can issue *L+1* cycles after its
  producer.
- **Units.** The integer multiply and divide are separate circuits, and the
  dividers are iterative (not pipelined). The FP rounding, subnormal and NaN
  behaviour is this design's choice.
- **Not built.** The translation software (interpreter, translator,
  vectorizer), the host core, caches and memory are outside this design.
  Memory operands arrive on `mem_data` and stores leave through the store
  port. A physically narrower 128- or 256-bit configuration (VLEN) was not
  built or tested. The narrower *logical* lengths are just `vl` = 4 or 8.
