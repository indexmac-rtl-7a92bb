# vindexmac: indirect register-file reads for structured-sparse matrix multiplication on a RISC-V vector engine

With N:M structured sparsity, each block of M consecutive weights has at most N non-zeros (1:4 or 2:4 here). That lets a sparse × dense product C = A × B run mostly from the vector register file. Every column index of a non-zero weight falls inside a small, known window of rows of B. So a tile of B, L rows of one vector each, can be loaded into vector registers once and kept there. The row a non-zero of A needs is then just "register number = tile base + column index".

The custom instruction

    vindexmac.vx vd, vs2, rs        vd[i] += vs2[0] * vrf[rs[4:0]][i]     (i < vl)

carries out one step of the row-wise (Gustavson) product using such a tile:

- `vs2[0]` holds the current non-zero value of A.
- The scalar `rs` holds the register number of the row of B it multiplies.
- `vd` accumulates a row of C.

It replaces the per-non-zero vector load of B, plus a scalar-vector multiply-accumulate, with one register-to-register instruction.

The hardware cost is one 5-bit 2-to-1 multiplexer. A scalar-vector multiply-add (`vmacc.vx`) already reads three vector registers: vs1's port, vs2 and vd. `vindexmac` addresses the vs1 port with the low five bits of the scalar operand instead. The scalar core of a decoupled vector machine already sends that operand with the instruction.

This repository gives synthesizable SystemVerilog for a small decoupled vector engine built around that idea. It runs both sparse kernels end to end: with `vindexmac`, and the baseline that loads B rows from memory.

## Organisation

```
scalar core (testbench) --insn, rs1 value-->  vector_engine  --mem_req/resp-->  memory (testbench)
                        <--vl / element 0---
    vector_engine
      vdecoder            RVV decode, incl. vindexmac
      vrf_read_addr_mux   port-0 address = vindexmac ? rs[4:0] : vs1
      vrf                 32 x 512-bit registers, 3 read ports, 1 write port
      vmac_lanes          16 x 32-bit multiply-accumulate / add lanes
      vslide_unit         slide towards element 0
      vlsu                unit-stride vle32 / vse32 over a vector-wide memory port
```

`indexmac_pkg` holds the encodings, the decoded-instruction struct and the operand-source enum. Defaults: VLEN = 512, ELEN = 32 (16 lanes), XLEN = 64, and 32 vector registers. These are the sizes of the engine the design is meant to extend.

## How a vindexmac executes

The engine retires one instruction at a time, in order. An instruction accepted at clock edge *t* becomes the current one. During the following cycle, the three register-file ports are read combinationally:

| port | address | data used as |
|------|---------|--------------|
| 0 | `vs1`, or `rs[4:0]` for vindexmac (the multiplexer) | vector multiplicand `va` |
| 1 | `vs2` | `vb`; for vindexmac only `vb[0]` is used, broadcast to all lanes |
| 2 | `vd` | accumulator `vc` |

Each lane *i* computes `vc[i] + vb[0] * va[i]`. The result is written to `vd` at edge *t+1*, but only for elements i < vl: the write enable is per element, so the tail stays as it was. At that same edge the next instruction is accepted. A stream of `vindexmac` therefore runs at one instruction, i.e. 16 multiply-accumulates, per cycle. It has no hazards, because every read happens after the previous write.

`vmacc.vx`, `vmacc.vv` and `vindexmac.vx` share the multiplier and the adder. They differ only in the lane operand source (`src_e`): VX broadcasts the scalar, VV takes `vs1[i]`, and IDX broadcasts `vs2[0]` and takes the indirectly read register as the vector.

The instruction has the ordinary OPMVX (`.vx`) layout, and the decoder places it at funct6 = `101100`:

```
31    26 25 24  20 19  15 14 12 11   7 6      0
101100    1  vs2    rs     110    vd   1010111
```

That funct6 code is unused in RVV 1.0. The choice of this code is this design's own.

## The kernel it accelerates

For one B tile held in v16..v31 (L = 16 rows) and each row *i* of A:

```
vsetvli  vl = nnz                 ; non-zeros of this row within the tile
vle32    v1, values[i]            ; non-zero values
vle32    v2, col_idx[i]           ; column index inside its block, 0..M-1
vadd.vv  v2, v2, v4               ; v4[e] = 16 + (e / N) * M  -> register numbers
vsetvli  vl = 16
vle32    v3, C[i]                 ; partial row of C
repeat nnz times:
  vmv.x.s        x12, v2          ; register number to the scalar core
  vindexmac.vx   v3, v1, x12      ; v3 += v1[0] * v[x12]
  vslidedown.vi  v1, v1, 1        ; next non-zero to element 0
  vslide1down.vx v2, v2, x0
vse32    v3, C[i]
```

The baseline replaces `vindexmac` with `vle32 v7, &B[row]`, `vmv.x.s` of the value, and `vmacc.vx`: one extra vector load and one extra move per non-zero. The column indices are block-relative, the compressed format in which at most N of every M entries are kept. The offset vector `v4` turns them into register numbers, and the tile size must satisfy L ≤ M·VL/N. With four rows of A processed together (four C, four value and four index registers), the tile, the offset vector and the per-row registers use 29 of the 32 registers.

## Interfaces of the top (`vector_engine`)

- **Instruction channel:** `insn_valid/insn_ready/insn/insn_rs1`. A valid/ready handshake; `insn_rs1` is the value of scalar register rs1. The offerer must hold an instruction stable until it is accepted, and an assertion checks this. `insn_ready` is low while a load or store is outstanding.
- **Scalar results:** `res_valid/res_rd/res_data`. `vsetvli` returns the new vl and `vmv.x.s` returns element 0, sign-extended. Both come in the cycle after acceptance, with no back-pressure.
- **`illegal`:** a one-cycle pulse when an unsupported instruction is dropped. Unsupported means masked forms, widths other than 32 bits, or non-unit-stride accesses. A `vsetvli` asking for SEW ≠ 32 or LMUL ≠ 1 sets vl = 0.
- **Memory port:** `mem_req_valid/ready/addr/we/wdata/be` and `mem_resp_valid/rdata`. One request per vector access, with element *i* at byte address `addr + 4i` and byte enables for the first vl elements. One access is outstanding at a time. A response answers each request, loads and stores alike. The request is held stable until accepted, and an assertion checks this.
- **Reset:** `rst_n` is synchronous and active low. It clears all vector registers and sets vl = 16.

## What follows the source design and what does not

These parts follow the design as published:

- the instruction's semantics and operand roles;
- the 5-bit multiplexer on one read port as the only addition;
- three read ports (indirect/vs1, vs2, vd);
- 512-bit vectors of 16 × 32-bit elements;
- a decoupled engine that receives the scalar operand from the scalar core with the instruction;
- a B tile of L = 16 registers, and N:M = 1:4 and 2:4;
- the two kernels.

This implementation's own choices:

- **The engine itself.** The published work adds the instruction to an existing simulated decoupled vector engine whose micro-architecture is not described. The sequencer here is deliberately simple: in order, one instruction at a time, single-cycle arithmetic, a blocking memory access. Cycle counts are therefore not comparable with the published speedups (about 1.6–2.15× per layer, and on average 48 % (1:4) and 65 % (2:4) fewer memory accesses).
- **Element type.** Integers modulo 2^32, as `vmacc`; the published text does not say whether elements are integer or floating point.
- **Encoding and instruction subset.** The funct6 value, and only the instructions the kernels need.
- **Memory side.** A single vector-wide port replaces the 16 load and 16 store queues towards the L2 cache. Accesses are not split at cache-line boundaries.
- **Reset values, scalar-result path and handshakes.**

Not built at all: the out-of-order scalar core, the caches, DRAM and the load/store queues. The testbenches model the scalar core and memory behaviourally (`tb/vmem_model.sv`: fixed latency, random back-pressure).

## Verification

Each module has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`. `tb_vector_engine` runs the whole engine at its default size:

- the `vindexmac.vx v5,v8,x5` example with x5 = 7;
- the 3×3 × 3×4 row-wise example, whose first output row is 50 57 20 20, at vl = 4 with the tail checked untouched;
- one B tile against 8 rows of a 1:4 and a 2:4 sparse A, with both kernels checked against a reference product;
- a burst of 8 `vindexmac`, checked to issue in 8 consecutive cycles;
- an illegal (masked) `vindexmac`, and a `vindexmac` at vl = 0.

It counts every mechanism (both slides, scalar moves, tail-undisturbed writes, memory back-pressure, instruction stalls, illegal instruction) and fails if one never occurs. One run of the tile test gives the following for 8 rows:

| sparsity | vindexmac kernel cycles | baseline cycles | memory accesses vs. baseline |
|---|---|---|---|
| 1:4 | ≈750 | ≈1050 | 49 vs 65 |
| 2:4 | ≈920 | ≈1640 | 49 vs 97 |

The cycle counts vary a little with the random back-pressure of the memory model.

`tb_workload_gemm` runs a small convolution layer as a multi-tile GEMM. It has two B tiles along the reduction dimension, with C reloaded between them, and rows of A processed four at a time with interleaved `vindexmac`. It is checked against a reference for both sparsities.

To simulate with Verilator 5 (package files first):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/indexmac_pkg.sv tb/rvv_asm_pkg.sv tb/tb_vector_engine.sv --top-module tb_vector_engine
./obj_dir/Vtb_vector_engine
```

The testbenches run in seconds. `tb/rvv_asm_pkg.sv` has encoder functions for every supported instruction, for writing new programs.

## Changing it

- **VLEN and ELEN** are parameters of every module. The lane count follows as VLEN/ELEN, and `vl` widens with it.
- **A pipelined or chained engine** needs read-after-write checks in `vector_engine`. None exist today because every instruction reads after the previous one has written.
- **A different encoding** for `vindexmac` means changing `F6_VINDEXMAC` in `indexmac_pkg` and the encoder in `tb/rvv_asm_pkg.sv`.
