# FractalSync: a hardware barrier tree for a tiled AI accelerator

In a bulk-synchronous parallel (BSP) program every processing element
computes, communicates, and then waits at a barrier until all its peers have
arrived. On a mesh of many tiles, a barrier built from atomic memory
operations over the network-on-chip costs hundreds to thousands of cycles.
FractalSync replaces it with a small dedicated network: a binary tree of
identical synchronization modules laid out as an H-tree over the mesh. Each
module joins two neighbours, so a whole k x k mesh needs k²−1 modules and a
barrier crosses 2·log2(k) levels up and as many down. A barrier does not have
to span the whole mesh. A tile may stop at any tree level, so the tiles under
one tree node form an independent *synchronization domain*.

This repository holds SystemVerilog RTL for that network and for the tile
logic that connects it to the control core. The design follows the paper
*FractalSync: Lightweight Scalable Global Synchronization of Massive Bulk
Synchronous Parallel AI Accelerators* (Isachi et al.), which places the
network in the MAGIA tiled accelerator. The RTL is an independent
implementation. Where the paper leaves details open, the choices made here
are marked as such below and in each file's header.

## Tree, levels and domains

Tiles are numbered row-major (`tile = row*K + col`). The tree pairs them the
same way as the paper's 4x4 drawing:

| tree level | joins                                   | domain shape (4x4 mesh) |
|-----------:|-----------------------------------------|-------------------------|
| 1          | two horizontally adjacent tiles         | 1 x 2                   |
| 2          | two level-1 nodes, one above the other  | 2 x 2                   |
| 3          | two level-2 nodes side by side          | 2 x 4                   |
| 4 (root)   | two level-3 nodes, one above the other  | 4 x 4                   |

Pairing keeps alternating, horizontal and then vertical, for larger meshes.
Internally the tree uses a "tree order" index. It interleaves the column and
row bits: bit 0 is col[0], bit 1 is row[0], bit 2 is col[1], and so on. The
node at level *l* that serves tree index *t* is therefore number `t >> l`.
`fsync_pkg::tree_to_tile` converts tree order back to the row-major index.

A tile asks for a barrier with a one-hot level field. Bit 0 means "at the node
directly above me". A node that sees bit 0 clear forwards the request with the
field shifted down by one, so one wire is dropped per level. A k x k mesh
needs 2·log2(k) level wires at the tiles and one at the root.

Domains must be consistent. All tiles under a node that is used as a barrier
point must request that node's level in the same round. A tile that asks for a
different level than its partner is woken at once, with the error line set,
by the first node where the two requests meet. Tiles in other subtrees, which
may be waiting on that pair at a higher level, are not released. The
software must then recover, for example with a fresh barrier.

## The FractalSync module (`fractal_sync`)

Each module has two slave ports (towards tiles or child modules) and one
master port (towards its parent).

| signal            | dir | width   | protocol (this RTL)                                  |
|-------------------|-----|---------|-----------------------------------------------------|
| `slv_sync_i[p]`   | in  | 1       | one-cycle pulse: slave *p* has reached the barrier  |
| `slv_lvl_i[p]`    | in  | N       | one-hot level, valid while sync is high             |
| `slv_ack_i[p]`    | in  | 1       | one-cycle pulse: slave has seen its wake            |
| `slv_wake_o[p]`   | out | 1       | barrier released; held until both slaves acked      |
| `slv_error_o[p]`  | out | 1       | valid together with wake                            |
| `mst_sync_o`      | out | 1       | one-cycle pulse towards the parent                  |
| `mst_lvl_o`       | out | N−1     | `lvl[N-1:1]` of the request                         |
| `mst_ack_o`       | out | 1       | one-cycle pulse after both slaves acked             |
| `mst_wake_i`, `mst_error_i` | in | 1 | from the parent                                 |

Inside, following the paper's block diagram:

* **Level registers.** There is one per slave port, loaded only while that
  port's sync is high. A bypass hands the incoming level straight to the FSM
  when the last request arrives in the deciding cycle.
* **Two signal monitors** (`fsync_signal_mon`). One watches the sync inputs
  and one watches the ack inputs. Each keeps a sticky bit per port, so the
  two slaves may arrive in different cycles. The "both seen" report also
  includes the current inputs, so the monitor adds no cycle. The FSM clears
  the monitor when it uses the event.
* **Synch FSM**, with states Idle, Prop and Sync:
  * Idle → Sync: both slaves have asked, and either `lvl[0]` is set or an
    error was found.
  * Idle → Prop: both slaves have asked and `lvl[0]` is clear. The module
    sends `mst_sync` and `mst_lvl`.
  * Prop → Prop: the module waits for the parent.
  * Prop → Sync: the parent's wake has arrived. It is passed to the slaves in
    this same cycle.
  * Sync → Idle: both slaves have acked. If the module had forwarded the
    request, it pulses `mst_ack`.

  Wake is high in Sync, and in the Prop cycle where the parent's wake
  arrives.
* **Comparator and error logic** (`fsync_error_logic`). The comparator flags
  a level mismatch between the two slaves. The root also flags a request that
  asks to go above it. An error from the parent is passed down with its wake.
  The error flag stays set until the slaves have acked. Only slave 0's level
  decides whether to forward, because a mismatch is an error anyway.
* **Master wake/error register.** The FSM reacts only to a *rising* edge of
  the registered wake. This matters because a parent keeps its wake high
  until *both* of its children have acked. A child whose own slaves were
  quick may already have returned to Idle and forwarded a new request. It
  must not mistake the parent's old wake for the answer to that request. The
  paper does not discuss this case; the edge detection is this design's
  solution. The tile-side decoder uses the same rule.

### Timing

The module adds exactly one cycle in each direction:

```
cycle      t         t+1        t+2  ...   u        u+1
slv_sync   last req
state      Idle      Prop
mst_sync             1
mst_wake                                   1 (from parent)
slv_wake                                            1   (held until acks)
```

A barrier decided at the module itself raises `slv_wake` in cycle t+1. A
barrier at level *l* therefore releases the tiles 2·l − 1 cycles after the
last tile's sync pulse.

## Pipelined links (`fsync_pipe`, `PIPELINE = 1`)

In an H-tree the wires get longer towards the root. With tiles one pitch
apart, a parent at level *p* is 2^(⌈p/2⌉−2) pitches from each child: half a
pitch for levels 1 and 2, one pitch for levels 3 and 4, two for 5 and 6, and
four for 7 and 8. The pipelined variant puts one register stage per extra
pitch on each link. That is 1 stage on links into levels 5 and 6, and 3 on
links into levels 7 and 8, so no wire segment is longer than one NoC hop.
The paper states this goal and reports the resulting latencies; the
stage-count formula (`fsync_pkg::pipe_stages`) was derived here, and it
reproduces the paper's numbers exactly (see below). All signals of a link
are delayed together, so the handshake does not change. `PIPELINE = 0`, the
native tree, is the default.

## Tile side: `fsync(level)` over Xif

The control core reaches the tree through a custom instruction. It issues
the instruction on its eXtension Interface (Xif), and in this RTL the
interface is reduced to two channels:

* issue: valid/ready, with `instr`, `rs1` and `id`;
* result: valid/ready, with `id`, `data` and `err`.

`fsync_pkg` defines both as structs.

* **`xif_dispatcher`** compares opcode and funct3 against a table with one
  entry per unit: the iDMA control unit, RedMulE and FractalSync. It forwards
  the issue handshake to the matching unit. An instruction that matches no
  entry is answered at once with `accept = 0`. Results return through a
  fixed-priority arbiter. The logic is purely combinational. The encodings
  are placeholders chosen here, in the RISC-V custom opcode space (custom-1,
  custom-0 and custom-2, all with funct3 = 0), because the paper gives none.
* **`fsync_xif_decoder`** takes the level number from `rs1`: 1 is the tile's
  own pair, 2·log2(K) is the whole mesh. It turns that into the one-hot field
  and sends one sync pulse, one cycle after the issue handshake. It then
  waits for a rising edge of wake. One cycle later it pulses ack and presents
  the result, with `err` set if the tree reported an error. A level outside
  the valid range becomes an all-zero field, which the root rejects with an
  error. The core is stalled (issue not ready) while a barrier is open.

The overhead measure used in the paper is
S = max(cycle of the next instruction) − max(cycle of the fsync issue).
With one register stage on each side of the decoder, S = 2·l + 2 for a
barrier at level *l*. That matches the paper's cycle-accurate measurements:

| configuration | levels | native (RTL / paper) | pipelined (RTL / paper) |
|---------------|-------:|---------------------:|------------------------:|
| two neighbours|      1 | 4 / 4                | 4 / 4                   |
| 2x2           |      2 | 6 / 6                | 6 / 6                   |
| 4x4           |      4 | 10 / 10              | 10 / 10                 |
| 8x8           |      6 | 14 / 14              | 18 / 18                 |
| 16x16         |      8 | 18 / 18              | 34 / 34                 |

The decoder's two register stages were chosen to fit these numbers. The
paper does not describe the decoder's insides or the core pipeline, so the
agreement shows the tree's latency per level is right. It does not show the
tile interface matches the paper's own RTL.

## Top level: `magia_fsync_mesh`

Parameters:

* `K`: mesh side, a power of two. The default is 4, as in the paper's mesh
  figure.
* `PIPELINE`: selects the pipelined tree.

The module instantiates K² dispatcher/decoder pairs and one `fsync_tree` of
K²−1 modules. Its ports are per-tile arrays in row-major order:

* the core's Xif issue and result channels;
* the Xif target ports of each tile's iDMA control unit and RedMulE.

Reset (`rst_ni`) is asynchronous and active low for every register. All
state returns to idle; this is a design choice, since the paper does not
mention reset.

The rest of the MAGIA tile and mesh is not in this RTL. That covers the
cv32e40x core, the 16 KiB instruction cache, RedMulE (24x8 GEMM array), the
iDMA engine and its control unit, and the 32-bank 1 MiB L1 with its
interconnect. It also covers the AXI and OBI crossbars, the AMO unit, the
FlooNoC routers and the L2. The paper uses these as existing components and
does not describe them in enough detail to rebuild them. Their
synchronization-facing ports are the top's ports.

## Departures and open points

* Sync and ack are single-cycle pulses and wake is a level. The paper gives
  the signal names and the rule that wake stays high until all acks arrive,
  but no waveforms.
* The FSM's transition conditions, the level bypass and the same-cycle
  monitor report are this design's reading. The state names and arrows come
  from the paper.
* Errors are handled at the node where they are found. Nothing is forwarded
  to the root. The root's range check is an addition.
* Rising-edge detection of wake (stale-wake protection) is an addition.
* The Xif interface is a reduced subset, and the instruction encodings are
  placeholders.
* The pipeline stage count comes from H-tree geometry (see above), not from
  the paper's text.
* The paper's baselines (software barriers using atomics, "naive" and "XY")
  are not part of the design.

## Files

| file | content |
|------|---------|
| `rtl/fsync_pkg.sv` | FSM state type, Xif structs, encodings, `pipe_stages`, `tree_to_tile` |
| `rtl/fsync_signal_mon.sv` | sticky "all ports asserted" monitor |
| `rtl/fsync_error_logic.sv` | error flag for mismatch / master error |
| `rtl/fractal_sync.sv` | one FractalSync module |
| `rtl/fsync_pipe.sv` | link register stages |
| `rtl/fsync_tree.sv` | the H-tree network over 2^LEVELS tiles |
| `rtl/fsync_xif_decoder.sv` | fsync instruction ↔ tree handshake |
| `rtl/xif_dispatcher.sv` | opcode/funct3 router for offloaded instructions |
| `rtl/magia_fsync_mesh.sv` | top: K x K mesh synchronization fabric |

## Simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a cycle watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/fsync_pkg.sv tb/tb_magia_fsync_mesh.sv --top-module tb_magia_fsync_mesh -o sim
./obj_dir/sim
```

| testbench | what it shows |
|-----------|---------------|
| `tb_fsync_signal_mon`, `tb_fsync_error_logic`, `tb_fsync_pipe` | random stimulus against reference models |
| `tb_fractal_sync` | cycle-exact directed cases (listed below) |
| `tb_fsync_tree` | random domains on a 4-level native tree and a 6-level pipelined tree (below) |
| `tb_fsync_xif_decoder` | pulse timing, one-hot decoding, stall, result/ack, stale wake |
| `tb_xif_dispatcher` | routing, accept, ready path, result arbitration |
| `tb_magia_fsync_mesh` | end-to-end at the default 4x4 size (below) |
| `tb_sync_overhead` | paper's overhead measurement, neighbour to 8x8, both tree variants |
| `tb_sync_overhead_16x16`, `tb_sync_overhead_16x16_pipe` | the same for 16x16, native and pipelined (a few minutes each, mostly C++ build time) |

The directed cases in `tb_fractal_sync` are:

* local barrier;
* staggered arrival;
* propagation;
* level mismatch;
* error from the parent;
* stale parent wake;
* the root's range check.

`tb_fsync_tree` uses random domain partitions, plus the figure's partition
and two mismatches, one found at a leaf node and one at a level-2 node (its
error reaches the tiles through the level-1 nodes). Every wake time is checked to the cycle.

`tb_magia_fsync_mesh` runs BSP phases on core models, with iDMA and RedMulE
instructions, instructions that no unit accepts, and target back-pressure.
The phases cover:

* the figure's partition;
* a whole-mesh barrier;
* random domains;
* an error.

Each fsync result is checked against 2·l+1 cycles after the last issue in
its domain.

To try another size, override `K` / `PIPELINE` on `magia_fsync_mesh` or
`LEVELS` / `PIPELINE` on `fsync_tree`. `K` must be a power of two, at least 2.
The number of tree levels is `LEVELS = 2*log2(K)`.
