# Violet: a tiled SIMD deep-learning accelerator in SystemVerilog

Violet is a many-core deep-learning accelerator. It has no fixed systolic array or dataflow
engine. Instead it exposes three problems to software, each with its own small piece of
hardware:

- **Orchestration** (feeding the SIMD lanes with the right operands). A transpose engine turns
  row-major cache lines into column vectors. This lets one 512-bit SIMD instruction do sixteen
  4-element int8 dot products with 32-bit accumulation.
- **Movement** (getting data near the compute). The LLC never waits to be asked. A programmable
  data-movement core in every tile *pushes* cache lines to the tiles that will need them. Each
  packet header names every destination, so the mesh can copy a packet wherever its paths split.
- **Placement** (deciding which core runs what). A global scheduler hands out work items that
  software has already placed on specific tiles.

This RTL describes the main configuration: 2048 identical tiles on a 64 x 32 mesh, with two
HBM2 channels behind the distributed LLC. It is written in SystemVerilog 2017 and simulates
with plain Verilator.

## Tile

Each tile (`violet_tile`) contains two groups of blocks.

**Movement side**
- `mesh_router`: a five-port multicast router.
- `llc_slice`: this tile's 64 KB share of the global LLC.
- `l2_slice`: a 16 KB slice of the group L2.
- `l1_cache`: a 32 KB private L1 with two read ports.
- `dm_engine`: the data-movement core.

**Orchestration side**
- `orch_core`: the two-issue orchestration core.
- `vrf`: 32 x 512-bit registers, two read ports and one write port.
- `transpose_engine`: the transpose engine.
- `simd_engine`: the SIMD datapath.

The sizes come from the chip totals: 64 MB of L1, 32 MB of L2 and 128 MB of LLC, each split
over 2048 tiles. A line is 64 bytes, the same as one vector register.

### How a line reaches a core

1. **Home tile.** A line address `L` (28 bits, so 16 GB of HBM) is *homed* in tile
   `L mod 2048`. This static interleave is the only address map.
2. **LLC slice.** The home tile's LLC slice is a direct-mapped, write-back, write-allocate cache
   of HBM. It serves one request at a time.
   - A hit answers three cycles after the request is taken.
   - A miss first writes back a dirty victim, then fills the line from memory.
3. **Data-movement program.** The data-movement core runs a list of descriptors written by the
   host:

   ```
   {from_l2, src_line, count, dst_level, dst_line, dst_mask[NTILES], last}
   ```

   For each of `count` lines it reads the line from the local LLC slice, or from the L2 slice if
   `from_l2` is set. It then sends one packet:

   ```
   {dst_mask, dst_level, dst_line, data[511:0]}
   ```

   `dst_level` selects where the line lands at every destination:
   - **L1**: the core's staging cache;
   - **L2**: the group slice, from which the line can be pushed on again;
   - **LLC**: a write into that tile's LLC slice.
4. **Router.** The router splits a packet's mask into five regions, using X-then-Y
   dimension order (local / east / west / north / south).
   - A packet leaves on every output whose region still holds destination bits. Each copy
     carries only the bits of its own region.
   - When a packet leaves on two or more outputs in the same cycle, that is a *fork*. This is
     where the multicast saves network traffic.
   - Each output has round-robin arbitration. An input pops its head packet once every region
     it needs has accepted it, possibly over several cycles.
   - A hop costs two cycles: one in the input FIFO and one in the output register.
5. **L1 and the core.** A line only ever enters the L1 by being pushed. The L1 never requests
   anything. When the core loads a line that has not arrived yet, it simply stalls until the
   packet lands.

### How the core uses it

The core issues 64-bit bundles: slot 0 holds a memory, scalar or branch instruction, and slot 1
holds a SIMD instruction. Both read their operands combinationally and write at the clock edge,
so there are no hazards to track. A bundle is split over two cycles when it needs more ports
than the tile has:
- a slot-0 instruction that uses the VRF, paired with any SIMD op, is split;
- VMLA and VMAC4 read three registers through two ports, so they take two cycles.

| slot | op | meaning |
|---|---|---|
| 0 | `LI s[a], imm` / `ADDI s[a], s[b], imm` | scalar setup |
| 0 | `DBNZ s[a], off` | decrement; branch if the count was not 1 |
| 0 | `VLD v[a], s[b]+imm` | load one L1 line into a vector register |
| 0 | `VLB4X4 v[a], s[b]+imm` | load the 4 bytes at the address and broadcast them to all 16 lanes |
| 0 | `VLD4T s[a]+imm, s[b]+imm` | feed two L1 lines (both read ports) into the transpose engine |
| 0 | `VLDL v[a], s[b]+imm` / `VST v[a], s[b]+imm` | read or write a line of the tile's own LLC slice |
| 0 | `HALT` | end of the micro-kernel |
| 1 | `VADD`, `VMUL`, `VMLA` | int32 lane arithmetic |
| 1 | `VMAC4 v[a], v[b], v[c]` | `v[a] += dot4(v[b], v[c])`: int8 x int8 into int32 |
| 1 | `VFMA v[a], v[b], tmm[c]` | `v[a] += dot4(v[b], column c of the transpose engine)` |
| 1 | `VZERO v[a]` | clear |

Encoding: `op[31:26] a[25:21] b[20:16] c[15:11]`, with `imm16` in `[15:0]`. The exact opcodes
are in `violet_pkg`.

The start argument of a kernel arrives in `s1`. Addresses are byte addresses, and a line
address is the byte address divided by 64.

## The transposed matrix-multiply step

This is the part that makes the design work, so here it is in detail.

**Registers.** A vector register holds 16 int32 accumulators, or 64 int8 values seen as 16
groups of four.

**Transpose engine.** It has two banks of 16 rows x 64 bytes. `VLD4T` writes two lines per
cycle into the *write* bank. After 16 lines the banks swap, and the old write bank becomes the
*read* bank. Column `c` of the read bank is the 32-bit group `c` of each of the 16 rows, placed
in lanes 0..15.

**One chunk of A x B.** To compute 16 rows by 4 columns of C:

1. Sixteen lines of A go through the transpose engine, 8 `VLD4T` bundles.
2. For each k-group `c`, `VLB4X4` broadcasts 4 consecutive bytes of B's column (`B^T` row)
   to all lanes.
3. `VFMA acc_n, bcast, tmm[c]` then adds `A[m][4c..4c+3] . B[4c..4c+3][n]` into lane `m`.

Because there are two L1 ports and two banks, the transposed loads for the next block overlap
the MACs of this one. When a `VLD4T` sits next to a `VFMA` in the same bundle, the pair issues
every cycle.

`tb_orch_core` checks this directly: 8 such bundles take 9 cycles, including the `HALT`.

## Scheduler and host

**Scheduler.** `thread_scheduler` holds a queue of work items:

```
{kind: core | dm, tile, start pc or descriptor index, argument}
```

It dispatches them in order, one every two cycles. An item whose target engine is still busy
waits at the head of the queue; each such wait is counted. `sched_done` rises once the queue is
empty and every engine is idle. The queue carries only placement: the software has already
chosen which tile runs each item.

**Host port.** The host port on `violet_top` selects a tile with `host_tile`. It can then:
- read or write a line of that tile's LLC slice;
- write the tile's instruction memory (one 64-bit bundle per address);
- write the tile's descriptor memory.

**Memory ports.** There are two line-wide memory ports, one per HBM stack. Each serves half of
the tiles through a round-robin arbiter. A read holds the arbiter until its data returns.

**Counters.** The top counts every mechanism the design has: forks, L1 stalls, bundle splits,
transposed MACs, transpose bank swaps, LLC misses, LLC write-backs and scheduler waits. Each is
a 32-bit count summed over all tiles.

## What is not here, and where this RTL departs from the paper

Missing:
- **FP16.** The SIMD engine is integer only. The FP16 multiply-accumulate (two elements per
  dot, 262 TOPS on the real chip) is not implemented, so training workloads cannot run.
- **Strided vector loads.** Not implemented. The broadcast load is.
- **Host link and HBM.** The PCIe-like host link, the HBM controllers and PHYs, and the DRAM are
  outside the RTL. They appear as the plain host and memory ports described above.

Choices made here that the paper does not specify:
- **Path from memory.** Memory reaches each LLC slice over a dedicated channel through the
  arbiters, not over the mesh.
- **Stores.** A core's stores go only to its own LLC slice. Results for another tile must be
  pushed by a data-movement program.
- **Mesh and packet format.** The mesh shape (64 x 32), the routing order, the buffer depths,
  the packet and descriptor formats, and the full 2048-bit destination mask in each header.
- **Caches.** All caches are direct-mapped. The L1 and L2 slices only accept pushed lines and
  never write back.
- **Core.** The instruction set, its encoding and the bundle-split rules are this design's own.
  The paper only lists the kinds of instructions and the port counts.
- **Throughput.** The real chip reaches its peak only with pipelined arithmetic. This RTL is
  functionally complete but does each operation in a single cycle, and is meant as a reference
  model of the architecture rather than a timing-closed implementation.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/violet_pkg.sv tb/tb_orch_core.sv --top-module tb_orch_core -o sim
./obj_dir/sim
```

The module files are found through `-Irtl`, or add `-y rtl`.

| testbench | what it does |
|---|---|
| `tb_simd_engine` | Random operands for every op against a lane-by-lane model. |
| `tb_vrf` | Random reads and writes against a model. |
| `tb_transpose_engine` | Random rows in, every column checked against the row data, plus bank-swap timing. |
| `tb_l1_cache`, `tb_l2_slice` | Random fills and reads against a model. |
| `tb_llc_slice` | 16-line slice in a 4-tile system. Random traffic checks misses, write-backs and the 3-cycle hit latency. |
| `tb_mesh_router` | The centre router of a 3 x 3 mesh. Random multicast masks; each destination must get exactly one copy, and each hop must take 2 cycles. |
| `tb_dm_engine` | Descriptor programs, checked packet by packet. |
| `tb_orch_core` | Three micro-kernels: a 16 x 4 matmul chunk in a loop, every other instruction, and the one-bundle-per-cycle VLD4T/VFMA stream. |
| `tb_thread_scheduler` | In-order dispatch, waits for busy engines, and the completion pulse. |
| `tb_violet_tile` | One tile of a 2 x 1 mesh: host access, pushes to both tiles, L2 re-push, network writes into the LLC, and a kernel run. |
| `tb_violet_top` | A 2 x 2 chip, end to end: a 16 x 64 by 64 x 16 int8 matmul. Operands come from HBM, are pushed with multicast, and are computed on all four cores. The result is checked against a reference. Every mechanism counter must be non-zero. |

**Largest simulated size.** The largest top-level configuration simulated is the 2 x 2 mesh,
which runs in about 1500 cycles. The full 2048-tile chip is only elaborated and linted. Each
packet carries a 2048-bit destination mask, and the model needs several GB of memory just to
elaborate, so it is not simulated.

**Changing sizes.** Mesh size, cache sizes, instruction-memory depth, descriptor count and
queue depth are parameters of `violet_top` and `violet_tile`. Architectural constants (vector
width, line size, register count, transpose depth) are in `violet_pkg`.
