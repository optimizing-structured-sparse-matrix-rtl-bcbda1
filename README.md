# A RISC-V vector engine with an indexed multiply-accumulate for N:M sparse matrices

## The idea

Pruned neural networks often use *structured* sparsity: in every block of
`M` consecutive weights of a row, at most `N` are non-zero (1:4 and 2:4 are
the usual patterns). A sparse weight matrix `A` can then be stored as its
packed non-zero values plus, for each value, a column index of only
`log2(M)` bits that gives its position inside its block.

The product `C = A x B` with a dense `B` is computed row by row:
`C[i,:] = sum_k A[i,k] * B[k,:]`. Every non-zero of row `i` of `A` scales one
whole row of `B`, which maps naturally onto a vector unit: one vector
multiply-accumulate per non-zero. On a standard RISC-V vector unit each of
these needs the matching row of `B` to be loaded from memory first. That
vector load is the bottleneck.

Structured sparsity bounds the column indexes. So a *tile* of `L` rows of `B`
can be loaded into the vector register file once, and every non-zero that
falls in those `L` columns of `A` is known to need one of them. The missing
piece is a way to pick a register *by a run-time value*. The design adds one
instruction for this:

```
vindexmac.vx vd, vs2, rs        vd[i] += vs2[0] * vrf[rs[4:0]][i]     for i < vl
```

The scalar register `rs` holds a register *number*. `vrf[rs[4:0]]` is the
tile row to use, and element 0 of `vs2` is the non-zero value. After each
`vindexmac` the kernel slides `vs2` down by one element, so the next
non-zero moves into element 0. The row of `B` is never reloaded from memory.

In hardware, the instruction costs almost nothing. A vector
multiply-accumulate already reads three registers (two sources and the
accumulator) and already receives a scalar operand from the scalar core. The
only addition is a 5-bit 2-to-1 multiplexer on the address of one read port,
which selects either the instruction's `vs1` field or `rs[4:0]`.

This repository holds synthesizable SystemVerilog for such an engine:
32 vector registers of 512 bits, 16 fp32 lanes, fed with instructions by a
scalar core and backed by an L2 cache port.

## Block structure

```
 scalar core                                                        L2 port
 (insn + value of rs1)                                           (64-byte lines)
        |                                                               ^
        v                                                               |
  +-----------+    +-------------+      +----------------------------+  |
  | sync_fifo |--->| vec_decoder |----->|  sequencer (in order)      |  |
  | 8 entries |    +-------------+      +----------------------------+  |
  +-----------+      |  vs1 rs  vs2  vd                |        |       |
                     v   v    |   |                   |   +---------+  |
              vrf_index_mux   |   |                   |   | vec_lsu |--+
              (idx_sel)       |   |                   |   +---------+
                     |        |   |                   |        | load data
                     v        v   v                   |        v
             +-----------------------------------------------------+
             | vrf  32 x 512 b   read ports A, B, C   write port W |
             +-----------------------------------------------------+
                  A |        B |        C |                  ^
                    v          v          v                  |
             +---------------------------------+             |
             | vec_mac_lanes: 16 x fp32_fma     |------------>|
             | vec_slide, vmv splat            |-------------+
             +---------------------------------+
```

| module | role |
|---|---|
| `vec_pkg` | sizes, opcodes and the `vreq_t` / `vdec_t` types |
| `sync_fifo` | instruction queue, carrying each instruction with its scalar operand |
| `vec_decoder` | decodes the supported RVV subset, including `vindexmac.vx` |
| `vrf_index_mux` | the `vs1` / `rs[4:0]` multiplexer on read port A |
| `vrf` | 32 x 512-bit register file, three combinational read ports, one write port with per-element enables |
| `vec_mac_lanes` | 16 fp32 fused multiply-add lanes with three operand pairings |
| `fp32_fma` | one IEEE-754 binary32 fused multiply-add |
| `vec_slide` | slide-down by an element count |
| `vec_lsu` | unit-stride 32-bit loads and stores through the L2 port, up to 16 loads and 16 stores in flight, with an in-order tracker and a pending-load bit per register |
| `vector_engine` | top: the blocks above plus the sequencer |

### How `vindexmac` uses the read ports

| port | address | `vfmacc.vv vd, vs1, vs2` | `vindexmac.vx vd, vs2, rs` |
|---|---|---|---|
| A | `idx_sel ? rs[4:0] : vs1` | `vs1` (multiplicand vector) | the tile row `vrf[rs[4:0]]` |
| B | `vs2` | `vs2` (multiplicand vector) | `vs2`; only element 0 is used and broadcast to all lanes |
| C | `vd` | accumulator | accumulator |
| W | `vd` | result | result |

`vec_mac_lanes` has three modes:

- vector-vector: `vfmacc.vv`;
- scalar-vector: `vfmacc.vf`, with the scalar taken from the instruction's operand;
- indexed: `vindexmac`, where lane `i` computes `acc[i] + vb[0] * va[i]`.

Apart from the decode of one more funct6 value, the multiplexer is the only
logic that exists for `vindexmac`.

`vrgather.vx` needs no datapath of its own either. Element 0 of `vs2` slid
down by the index is `vs2[index]`, or 0 past the end, so the engine takes
it from `vec_slide` and splats it.

## Instruction set and encoding

All instructions work on 32-bit elements, unmasked (`vm = 1`). The standard
RISC-V encodings are used:

| instruction | major opcode / funct3 | funct6 | effect |
|---|---|---|---|
| `vsetvli rd, rs1, vtypei` | OP-V / 111, bit31 = 0 | - | `vl = min(AVL, 16)`; AVL = 16 if `rs1 = x0` and `rd != x0` |
| `vsetivli rd, uimm, vtypei` | OP-V / 111, bits31:30 = 11 | - | `vl = min(uimm, 16)` |
| `vle32.v vd, (rs1)` | LOAD-FP, width 110 | - | load 16 words from address `rs1` |
| `vse32.v vs3, (rs1)` | STORE-FP, width 110 | - | store the first `vl` words |
| `vfmacc.vv vd, vs1, vs2` | OP-V / OPFVV 001 | 101100 | `vd[i] += vs1[i] * vs2[i]` |
| `vfmacc.vf vd, rs1, vs2` | OP-V / OPFVF 101 | 101100 | `vd[i] += f[rs1] * vs2[i]` |
| `vindexmac.vx vd, vs2, rs` | OP-V / OPIVX 100 | **111111** | `vd[i] += vs2[0] * vrf[rs[4:0]][i]` |
| `vslidedown.vx / .vi` | OPIVX 100 / OPIVI 011 | 001111 | `vd[i] = vs2[i+off]`, 0 past the top |
| `vmv.v.x / vmv.v.i` | OPIVX 100 / OPIVI 011, vs2 = 0 | 010111 | splat a scalar or a sign-extended 5-bit immediate |
| `vrgather.vx / .vi` | OPIVX 100 / OPIVI 011 | 001100 | `vd[i] = vs2[x]`, or 0 if `x >= 16` (the standard-RVV way to broadcast one non-zero) |

`vindexmac` has the ordinary `.vx` layout: `vd` in bits 11:7, `vs2` in 24:20
and the scalar register in 19:15. That last field is where a `.vv`
instruction keeps `vs1`, so the multiplexer chooses between the field itself
and the value of the register the field names.

**The funct6 value 111111 is this design's choice.** It is an unused slot in
the OPIVX space. Change `F6_VINDEXMAC` in `vec_pkg` if it collides with
another extension.

Any other instruction, including a masked form, gives a one-cycle `illegal`
pulse and is dropped. `vtype` is not decoded: the engine always works with
e32 and m1.

## Timing

- **Arithmetic and `vsetvli`.** The instruction at the head of the queue
  reads its operands, computes and is written back in one cycle. A chain of
  dependent `vindexmac` / `vslidedown` pairs therefore runs at one
  instruction per clock.
- **Register reads and writes.** Reads are combinational and a write lands
  at the clock edge. The next arithmetic instruction sees the result without
  a bypass, because an arithmetic instruction finishes in its issue cycle.
- **Loads and stores.** A memory instruction issues as soon as `vec_lsu`
  has room for it: a free slot in its 16 load or 16 store queues, and a free
  request register. It leaves the queue at once, so later instructions keep
  issuing while the access is in flight. A new request can go to the L2
  every cycle. With an L2 that accepts at once, an access completes
  `LAT + 2` cycles after issue. That is 10 cycles with the 8-cycle L2 hit
  latency of the evaluated system.
- **Responses.** Responses come back in request order. Load data is written
  in the response cycle through the single write port, which the load then
  owns: no arithmetic instruction or `vsetvli` issues in a cycle with a
  response. This also keeps `retire` to one pulse per cycle.
- **Load-use hazards.** `vec_lsu` keeps a bit per register, `pend_ld`, which
  is set while a load to that register is in flight. The head instruction
  waits while any register it reads or writes has its bit set. This covers
  loading a register that another load in flight already targets, and a
  store of a register whose load has not returned. Stores read their data
  at issue. The L2 handles accesses in order, so a load after a store to the
  same address sees the stored data.
- **Instruction queue.** The scalar core sees `vreq_ready` low only when the
  8-entry queue is full and nothing leaves it that cycle.

In the kernel below, the 16 tile-row loads therefore go out back to back,
and the first `vindexmac` waits only for the row it names. Four rows of a
1:4 matrix (64 columns) take 567 cycles on the default engine. If every
access blocked the engine, they would take 3077 cycles. Four rows of a 2:4
matrix take 359 cycles instead of 1669.

The whole arithmetic path is combinational: decode, register read, the fp32
FMA with its 48-bit product, alignment and normalisation, and the write-back
mux. It is correct logic, but it has not been timed. At the 1 GHz clock the
evaluated system assumes, the lanes would need pipeline stages, and the
scoreboard would then need to cover arithmetic results as well as loads.

## Running the sparse kernel

The scalar side computes every address and register index. The engine only
executes. With a tile of `L = 16` rows of `B` in `v0..v15`, the non-zeros of
row `i` of `A` in `v16` and the row of `C` in `v17`, the kernel runs as follows
for each row of `A`:

```
vle32.v  v16, (values + i*64)          # VL = 16 packed non-zeros of row i
vle32.v  v17, (C + i*64)
for t in 0 .. (M/N)*(VL/L) - 1:        # tiles: 4 for 1:4, 2 for 2:4
    for k in 0 .. L-1:  vle32.v vk, (B + (t*L + k)*64)
    for each of the L*N/M non-zeros j of this tile:
        idx = ((j / N) mod (L / M)) * M + col_idx[i][j]    # register 0..15
        vindexmac.vx v17, v16, idx
        vslidedown.vi v16, v16, 1
vse32.v  v17, (C + i*64)
```

`idx` is the non-zero's column relative to the tile: its block inside the
tile times `M`, plus the stored in-block column. The index formula in the
published algorithm reduces the block number modulo `L` instead of `L/M`.
For every tile after the first, that gives register numbers of 16 and above,
which lie outside the tile. The kernel above uses `L/M`, and the testbenches
check the products it gives.

The published pseudo-code writes the step after each `vindexmac` as a slide
"to the right" (`vs1 >> 1`). What the kernel needs is for element 1 to move
into element 0, which RISC-V calls `vslidedown` by one, and that is what is
implemented.

The kernel is usually unrolled over rows. With eight rows at a time, the
non-zeros of rows `i..i+7` sit in `v16..v23` and their rows of `C` in
`v24..v31`. Each tile of `B` is then loaded once for all eight rows. For
each non-zero position `j` the eight `vindexmac.vx v(24+r), v(16+r), idx`
go out back to back, followed by the eight slides. This uses all 32
registers. It is the best configuration of the published study, with eight
rows and the tile loop fully unrolled. On the default engine, 16 rows of a
1:4 matrix take 779 cycles this way and 2235 cycles one row at a time. For
2:4, they take 675 and 1403 cycles.

The baseline with standard instructions only loads, for every non-zero,
the row of `B` its column names (`vle32.v`). It then broadcasts the
non-zero with `vrgather.vx` and accumulates with `vfmacc.vv`. Unrolled over
eight rows the same way, that baseline needs 3133 cycles for either
pattern, which makes the `vindexmac` kernel 4.0 times faster for 1:4 and 4.6
times faster for 2:4. The gain comes from loading each row of `B` once per
tile instead of once per non-zero. These cycle counts come from an L2 that
always hits. They are not the published measurements, which include cache
misses and a full out-of-order core.

Larger matrices are handled by repeating this schedule in software. Rows of
`A` are processed in groups of `m*L` columns, each group keeping its rows of
`B` resident, and the columns of `B` in slices of `VL`. The slices can also
be spread over several engines. None of this needs anything more from the
hardware.

## Numerics

`fp32_fma` computes `a*b + c` with one rounding, to nearest with ties to
even, as RISC-V `vfmacc` does:

1. The 24 x 24-bit significand product is kept exact in 48 bits.
2. The operand with the smaller exponent is shifted right, with three guard
   bits and a sticky bit.
3. The two are added, or the smaller is subtracted from the larger, and the
   sum is normalised by a leading-one search.
4. The sum is rounded once.

Subnormal inputs count as zero and subnormal results are flushed to a signed
zero. NaN inputs, `inf * 0` and `inf - inf` give the quiet NaN `0x7fc00000`.
Overflow gives a signed infinity. An exact zero sum is `+0`. No exception
flags are kept.

## Top-level interface (`vector_engine`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset (empties the queue, `vl = 16`) |
| `vreq_valid`, `vreq_ready` | in/out | 1 | instruction handshake, a transfer on both high at the clock edge |
| `vreq_insn` | in | 32 | vector instruction |
| `vreq_rs1` | in | 64 | value of the scalar register in bits 19:15 (address, AVL, index or fp32 scalar in bits 31:0) |
| `l2_req_valid`, `l2_req_ready` | out/in | 1 | L2 request handshake; request fields stay stable while waiting |
| `l2_req_we`, `l2_req_addr` | out | 1, 64 | write flag and byte address of the 64-byte access |
| `l2_req_wdata`, `l2_req_be` | out | 512, 64 | store data and byte enables (4 per active element) |
| `l2_resp_valid`, `l2_resp_rdata` | in | 1, 512 | one pulse per request, in order; load data, or the acknowledgement of a store |
| `vl` | out | 5 | current vector length |
| `retire`, `illegal` | out | 1 | one-cycle pulses per completed or dropped instruction |
| `idle` | out | 1 | queue empty and no memory access in flight |

The L2 port can have up to 16 loads and 16 stores outstanding, and must
answer them in request order. It may take any byte address, and the L2 side
deals with accesses that cross a line.

## Parameters

| parameter | default | where |
|---|---|---|
| `VLEN` | 512 bits (16 lanes) | `vector_engine`, and every datapath block |
| `QDEPTH` | 8 | `vector_engine` (instruction queue) |
| `NLDQ`, `NSTQ` | 16, 16 | `vec_lsu` (loads and stores in flight) |
| `NREGS` | 32 | `vrf` (architectural; the `vindexmac` index is 5 bits) |

The lane count is `VLEN/32`, so every register is processed in one pass. The
engine has been simulated at `VLEN` = 256, 512 and 1024, the three vector
lengths (8, 16 and 32 elements) of the scaling study.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_fp32_fma` | special cases, and 24,000 random and round-half cases, bit-exact against a double-precision reference |
| `tb_vrf` | three-port reads against a shadow copy, masked writes, read-during-write returns the old value |
| `tb_vrf_index_mux` | both select settings, with random upper scalar bits |
| `tb_vec_mac_lanes` | the three operand pairings, lane by lane |
| `tb_vec_slide` | offsets 0 to 20 and random 64-bit offsets |
| `tb_vec_decoder` | every supported encoding with random fields; masked, unknown and wrong-width forms are illegal |
| `tb_sync_fifo` | random push and pop against a queue model, including full and empty |
| `tb_vec_lsu` | isolated accesses with their latency and `pend_ld`; a random overlapped stream of loads and stores checked response by response; 16 loads and 16 stores in flight but never more; the final memory image |
| `tb_vector_engine` | the full-size engine end to end (see below) |
| `tb_vl_scaling` | the same kernel on 256-, 512- and 1024-bit engines |
| `tb_proposed84` | the kernel unrolled over eight rows, against the rolled kernel and the standard-RVV baseline, on 16 rows of 1:4 and 2:4 matrices; all 32 registers in use |

`tb_vector_engine` plays the scalar core. It runs the kernel above on four
rows of a 1:4 matrix (64 columns, 4 tiles) and on four rows of a 2:4 matrix
(32 columns, 2 tiles), and compares `C` bit for bit with a reference that
performs the same fused multiply-adds in the same order. The active cycles
must be at least one per instruction, and fewer than `n_mem * 11 + n_other`,
which is what fully serialised accesses would cost. A second program covers the
rest of the instruction set: `vl < 16` with undisturbed tail elements,
`vfmacc.vv` and `.vf`, `vmv`, `vslidedown.vx`, and an illegal masked
instruction. The testbench also counts how often each mechanism occurred: an
indexed read, port A addressed by `vs1`, a stall on a pending load,
several loads in flight, a full instruction queue, a masked write, an
illegal drop and a `vl` change. It fails if any of them
never happened.

`tb/l2_model.sv` is a behavioural stand-in for the L2. It has 64 KiB of
storage that always hits, an 8-cycle latency, one request accepted per
cycle, in-order responses, and optional random back-pressure. `tb/spmm_harness.sv` contains the parameterised kernel driver
that `tb_vl_scaling` uses.

A typical run with plain Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_vector_engine \
  rtl/vec_pkg.sv tb/tb_fp_pkg.sv tb/tb_rvv_pkg.sv tb/tb_vector_engine.sv
./obj_dir/Vtb_vector_engine
```

Verilator finds the other modules by name through `-I`. For the other
testbenches, change `--top-module` and the last file. `tb_vl_scaling` also
needs `tb/spmm_harness.sv`.

## Where this design departs from the evaluated system, and what is missing

- **Sequencer.** The evaluated engine is a full decoupled vector unit from
  earlier work. The sequencer here is much simpler. It issues one
  instruction per cycle, in order, and only memory accesses overlap with
  later work. The datapath widths and the register file organisation follow
  the paper. The issue logic does not.
- **Memory access.** As in the evaluated system, the engine reaches the L2
  directly, with 16 load and 16 store queues. How those queues are
  organised is not described. Here they are counted slots of one in-order
  tracker, and the L2 must answer in order. An L2 that reorders responses
  would need tags on the port.
- **Instruction subset.** Only the instructions the sparse kernels need are
  decoded: the `vindexmac` kernel, and the standard-RVV baseline, which
  uses `vrgather.vx` with `vfmacc.vv`. The other baseline variants move
  vector elements to scalar registers (`vfmv.f.s`) and are not supported.
  The engine has no path back to the scalar core.
- **Own choices.** The funct6 of `vindexmac`, the queue depth, flush-to-zero,
  the L2 handshake and the single-cycle arithmetic were all chosen here.
- **Not built.** The scalar core, the L1 and L2 caches, DRAM and the
  multicore interconnect are outside the design. The register file is
  written as flip-flops, not as an SRAM macro.
