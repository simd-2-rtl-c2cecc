# SIMD² — one matrix unit for many semiring-like matrix problems

A GEMM accelerator (a tensor core, a TPU matrix unit) gets its efficiency from a data-flow
pattern rather than from the multiply-add itself: one operand is broadcast across an array of
ALUs and the results are reduced down the columns, so an N×N array does N² operations on only
O(N) words of register-file bandwidth. Many other matrix algorithms have exactly the same
shape, `D[i][j] = C[i][j] ⊕ ⨁ₖ (A[i][k] ⊗ B[k][j])`, with a different pair of operators:
shortest paths use (min, +), transitive closure uses (or, and), and so on. SIMD² keeps the
broadcast-and-reduce array of a matrix unit and only makes its two ALUs configurable, so the
same hardware runs nine such instructions:

| instruction | ⊕ (reduce) | ⊗ (combine)  | typical use                            |
|-------------|-----------|--------------|----------------------------------------|
| `mma`       | +         | ×            | matrix multiplication                   |
| `minplus`   | min       | +            | all-pairs shortest paths               |
| `maxplus`   | max       | +            | critical (longest) paths               |
| `minmul`    | min       | ×            | minimum-reliability paths              |
| `maxmul`    | max       | ×            | maximum-reliability paths              |
| `minmax`    | min       | max          | minimum spanning tree                  |
| `maxmin`    | max       | min          | maximum-capacity paths                 |
| `orand`     | or        | and          | transitive closure                     |
| `addnorm`   | +         | \|a−b\|²     | L2 (Euclidean) distances               |

This repository is synthesizable SystemVerilog for that unit as it sits inside one GPU subcore:
the two configurable ALUs, the 4×4 array built from them, the sequencer that runs one 16×16×16
instruction on the array, the instruction decoder, a fragment register file and the load/store
path to shared memory. Operands A and B are fp16, C and D are fp32.

## Block structure

```
                 instr (valid/ready)                       smem_req / gnt / rvalid / rdata
                        │                                              │
  simd2_core ───────────┼──────────────────────────────────────────────┼───────────
  │   instruction reg ──┴─► simd2_decoder ─► (⊕ op, ⊗ op)              │
  │          │                                   │                     │
  │          ▼                                   ▼                     │
  │   matrix_regfile ◄──── rows of D ──── simd2_mmo_seq         simd2_ldst ◄┘
  │   4 fp16 + 4 fp32     A,B,C,D frags ──►  │ tile walker         │ strided 16x16
  │   16x16 fragments  ◄─────────────────────┼─────── elements ────┘ load / store
  │                                          ▼
  │                                     simd2_unit (4x4)
  │                                   16 × { otimes_alu → oplus_alu }
```

| file | role |
|------|------|
| `rtl/simd2_pkg.sv` | opcodes, ALU operation codes, instruction and memory-request structs, fp16→fp32 and compare helpers |
| `rtl/fp32_add.sv`, `rtl/fp32_mul.sv` | combinational fp32 adder and multiplier used inside the ALUs |
| `rtl/otimes_alu.sv` | ⊗ ALU: mul, add, min, max, and, L2 distance (fp16 in, fp32 out) |
| `rtl/oplus_alu.sv` | ⊕ ALU: add, subtract, min, max, or (fp32) |
| `rtl/simd2_decoder.sv` | instruction → (⊕, ⊗) configuration, per the table above |
| `rtl/simd2_unit.sv` | the 4×4 array: broadcast bus per row, reduction chain per column |
| `rtl/simd2_mmo_seq.sv` | runs one 16×16×16 instruction as 64 tile steps on the array |
| `rtl/matrix_regfile.sv` | fragment storage (the part of the GPU register file SIMD² uses) |
| `rtl/simd2_ldst.sv` | load/store of a 16×16 matrix with a leading dimension |
| `rtl/simd2_core.sv` | top: instruction port, control, and the blocks above |

## How an instruction flows through the array

This is the part that needs the most care when reading the RTL.

**The array.** `simd2_unit` is N×N processing elements (N = 4). Element (k, j) owns one ⊗ ALU
and one ⊕ ALU. Row k of the array has a broadcast bus carrying a single element of A; element
(k, j) gets its own element of B. Column j is a reduction chain: the value entering at the top
is the accumulator C, each element folds its ⊗ output into it with ⊕ and passes it down, and the
bottom of the column is one element of the result. So with `a_row = A[i][0..3]`,
`b_tile = B[0..3][0..3]`, `c_row = C[i][0..3]` the array produces in one pass

    d[j] = ((((C[i][j] ⊕ A[i][0]⊗B[0][j]) ⊕ A[i][1]⊗B[1][j]) ⊕ A[i][2]⊗B[2][j]) ⊕ A[i][3]⊗B[3][j])

i.e. one 4-wide row of a 4×4×4 tile product. Rows enter back to back, one per cycle; the
result is registered and appears one cycle later, for every opcode.

**The instruction.** An instruction works on 16×16 fragments, so `simd2_mmo_seq` cuts it into
(16/4)³ = 64 tile steps of 4 rows each:

    for ti in 0..3, tj in 0..3            -- output tile D[ti][tj]
      for tk in 0..3                      -- reduction tile
        for i in 0..3                     -- row inside the tile, one per cycle
          a_row  = A[4ti+i][4tk .. 4tk+3]
          b_tile = B[4tk .. 4tk+3][4tj .. 4tj+3]
          c_row  = (tk == 0) ? C[4ti+i][4tj ..] : D[4ti+i][4tj ..]   -- partial result

The partial result of a row is written into the destination fragment one cycle after the row
entered and is read back four cycles later, when the next reduction tile reaches the same row
(this is why N ≥ 2 is required). Because the partial result lives in the destination, `rd` may
equal `rc` (D overwrites C in place), which the tiled algorithms use.

**Result order.** The fold is strictly in k order: D[i][j] = C ⊕ p₀ ⊕ p₁ ⊕ … ⊕ p₁₅ evaluated
left to right. For min, max and or the order does not matter; for the two additive reductions
(`mma`, `addnorm`) it fixes the rounding, and the testbenches compute their references in the
same order.

**Timing.** The sequencer issues 256 rows in 256 cycles, the last result is written one cycle
later (257 cycles from `start` to `done`). Seen from the core's instruction port an arithmetic
instruction takes 259 cycles from acceptance to `instr_done`, whatever the opcode.

## The two ALUs and their number conventions

`otimes_alu` widens both fp16 operands exactly to fp32 (subnormals included) and then computes
one of: `a*b`, `a+b`, `min`, `max`, `and`, `(a−b)²`. It contains one fp32 adder and one fp32
multiplier: the L2 distance uses the adder to subtract and the multiplier to square the
rounded difference. A product of two fp16 values is exact in fp32; sums and L2 distances are
rounded.

`oplus_alu` combines the partial result with the ⊗ output: add, subtract, min, max, or.
Subtract is provided (adder with the second operand negated) although no instruction uses it.

Conventions (the source paper does not specify them):

* fp32 add and multiply round to nearest even; subnormal fp32 inputs read as zero and results
  below the smallest normal flush to a signed zero; every NaN result is `0x7fc00000`.
* `min`/`max` order values numerically with −0 < +0. NaNs are not treated specially, so keep
  NaNs out of min/max instructions (infinities are fine: +∞ is the usual "no edge" value of
  `minplus`).
* `and`/`or` treat a value as true when it is not ±0, and return 1.0 or +0.0.

## Interfaces

**Instruction port** (`simd2_core`): `instr_valid`/`instr_ready` handshake, `instr_ready` high
only while idle; one instruction in flight; `instr_done` pulses once per accepted instruction.
`simd2_instr_t` fields:

| field | width | meaning |
|-------|-------|---------|
| `opcode` | 4 | 0–8 the arithmetic instructions in table order, 9 `LOAD_H` (fp16), 10 `LOAD_F` (fp32), 11 `STORE` (fp32); other values complete as no-ops |
| `rd` | 3 | destination fp32 fragment (arithmetic), or the fragment loaded/stored (fp16 file for `LOAD_H`, fp32 file otherwise) |
| `ra`, `rb` | 3 | fp16 fragments A and B |
| `rc` | 3 | fp32 fragment C |
| `addr` | 32 | shared-memory byte address of element (0,0) |
| `ld` | 16 | leading dimension in elements; element (r,c) is at `addr + (r*ld + c)*size` |

**Shared-memory port** (`smem_req_t` plus `smem_gnt`, `smem_rvalid`, `smem_rdata`): one 32-bit
word per request. A request is accepted in a cycle with `req && gnt`; while `gnt` is low the
request is held unchanged (a stall). Read data comes back with `rvalid` exactly one cycle after
acceptance, in order. fp16 elements use the half selected by `addr[1]` (`be` marks it on
writes). Unstalled, a load or store of a 16×16 fragment takes 260 cycles from acceptance to
`instr_done` (258 inside `simd2_ldst`); each stalled cycle adds one. Assertions in `simd2_ldst` check the hold-while-stalled and reply rules.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `N` | 4 | core, seq, unit | array dimension (4×4 is the configuration of the source paper; 8×8 also works) |
| `FRAG` | 16 | core, seq, regfile, ldst | fragment dimension of the instructions; must be a multiple of N |
| `NUM_H`, `NUM_F` | 4, 4 | core, regfile | number of fp16 and fp32 fragments (own choice) |

With N = 8 an instruction takes (16/8)³·8 + 1 = 65 sequencer cycles.

## What follows the paper and what is this design's own

Taken from the paper: the nine instructions and their operator pairs; fp16 operands with fp32
accumulation; 16×16 fragments for load, store and arithmetic; a 4×4 unit with a broadcast bus
per row and a reduction per column; the ⊗ ALU sub-units (mul, min/max, add/and, L2 distance)
and ⊕ sub-units (add, min/max, or, plus subtract from the text); equal latency for all
arithmetic instructions; load/store with a leading dimension.

Own choices, where the paper is silent: all encodings, the instruction and memory protocols,
the register-file organisation and size, rounding/subnormal/NaN rules, the truth value of
floating-point data for and/or, where C enters the columns, the mapping of a 16×16×16
instruction onto the 4×4 array, the single pipeline register, and all cycle counts.

Departures and gaps:

* The paper's figure calls the column reduction a *tree* but draws a chain; the RTL is a chain.
* The paper's instruction table lists `load` as fp16 only, but its example code loads the fp32
  accumulator; both an fp16 and an fp32 load exist here.
* In the paper the fragments live in the GPU register file, spread over the threads of a warp,
  and are shared with the CUDA cores. Here they are a separate fragment store; the warp
  scheduler, CUDA cores, caches and shared memory are not part of the RTL and connect through
  the instruction and shared-memory ports.
* The paper's hardware overlaps instructions in a GPU pipeline; this core runs one
  instruction at a time and the ALU array is combinational between registers, with no attempt
  at the paper's clock rate.
* A GPU SM holds four subcores, each with its own SIMD² unit; the RTL models one. The
  programming interface's `fillmatrix` has no instruction here: fragments are filled through
  memory. Tiling a large matrix into 16×16×16 instructions, and converting fp32 results back
  to fp16 operands between iterations, is software (see `simd2_graph_tb`).
* Other precisions the paper sizes in its area study (8/32/64-bit inputs) are not built.

## Simulating

All testbenches are self-checking and end with a `TB_RESULT checks=… failures=…` line.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/simd2_pkg.sv tb/simd2_ref_pkg.sv tb/simd2_core_tb.sv --top-module simd2_core_tb
./obj_dir/Vsimd2_core_tb
```

| testbench | checks |
|-----------|--------|
| `otimes_alu_tb`, `oplus_alu_tb` | directed cases and thousands of random operands (with ±∞, ±0, subnormals) against double-precision reference arithmetic rounded to fp32 |
| `simd2_decoder_tb` | every opcode against the instruction table |
| `simd2_unit_tb` | random rows for all nine operator pairs, back to back, latency 1 |
| `simd2_mmo_seq_tb` | a full 16×16×16 instruction per opcode, 257-cycle timing, D aliased on C |
| `matrix_regfile_tb` | all write and read ports |
| `simd2_ldst_tb` | strided fp16/fp32 loads and stores, with and without random stalls, 258-cycle timing |
| `simd2_core_tb` | end to end at default parameters: load, compute and store for each instruction, 20 % memory stalls, back-pressure, aliasing, undefined opcode; 259-cycle arithmetic latency; counts each mechanism |
| `simd2_graph_tb` | 32-vertex graphs solved to convergence by repeated tiled instructions, as in the all-pairs Bellman-Ford scheme: shortest paths (`minplus`), longest paths on a DAG (`maxplus`), maximum capacity (`maxmin`), maximum and minimum reliability (`maxmul`, `minmul`), minimax paths (`minmax`) and transitive closure (`orand`), each checked against Floyd–Warshall |

`tb/simd2_ref_pkg.sv` holds the reference arithmetic (computed in `real`, then rounded to fp32
by bit manipulation) and `tb/smem_model.sv` a behavioural shared memory with random stalls.
The simulator is two-state, so every register that is read is reset or written first.
