# DLS: a shared last-level cache without a directory

In a directory protocol, a store makes itself visible to everyone at once. The
directory has to know every sharer of every block. It then invalidates each of
those copies and collects an acknowledgement from each. Under a weak memory
model this eagerness is not needed: another core only has to see the store
after that core's next synchronization.

DLS (DirectoryLess Shared LLC) uses this freedom as follows:

* The LLC keeps no sharer list. Each LLC tag holds a single *owner* field, the
  core that may hold the block in EXC or MOD state (or none).
* Invalidation and Ack messages do not exist. Read-only (SHD) copies are never
  chased down.
* At a synchronization, a core marks all of its own SHD blocks *SUS*
  (suspicious). This is *self-suspicion*.
* A load that hits a SUS block uses the data it has at once, speculatively. At
  the same time it sends a Read to the LLC.
  * If the reply matches, the speculation commits and the block returns to SHD.
  * If it does not match, the core re-executes the load with the new data, and
    the block is refilled.
* Sharers are not tracked, so SHD and SUS blocks are evicted silently.

This repository holds synthesizable SystemVerilog for the memory side of a
16-tile chip that uses DLS:

* per tile, a private L1 data cache and one bank of the shared L2;
* per tile, a network interface;
* three 4x4 mesh networks joining the tiles.

The cores and the memory controller are not part of the RTL. Their interfaces
are ports of the top module, `dls_cmp`.

## Default configuration

| item | value |
|---|---|
| tiles / cores | 16, 4x4 mesh, tile n at (n mod 4, n div 4) |
| block | 64 bytes |
| private cache (`pc_ctrl`) | 64 KB, 4-way (256 sets), 3-cycle hit |
| LLC | 16 MB in 16 banks of 1 MB, 4-way (4096 sets), 10-cycle access |
| home bank of a block | low 4 bits of the line address |
| network | 128-bit flits, 2-stage routers, 2-cycle links |
| router input buffers | 8 flits |

## States

Private cache:

| state | meaning |
|---|---|
| INV | not present |
| SHD | read-only copy; may be stale after someone else's store |
| SUS | a SHD copy that has seen a synchronization since it was filled: loads speculate on it |
| EXC | only writable copy, clean; this core is the LLC's owner |
| MOD | only writable copy, dirty; this core is the owner |

The LLC has only three states. There is no shared state, because sharers are
not recorded.

| state | meaning |
|---|---|
| INV | not present; a request refills it from memory |
| EXC | the LLC data is current; the owner, if any, holds it EXC |
| MOD | the owner may hold newer data than the LLC |

## Messages and what each agent does

Each row shows a message, its direction and its network:

| message | direction | network | effect |
|---|---|---|---|
| Read | cache → bank | REQ | load miss, or the check of a speculative SUS load |
| RdEx | cache → bank | REQ | store to an INV/SHD/SUS block |
| Upgrade | cache → bank | REQ | store to an EXC block |
| Replace | cache → bank | REQ | eviction of an EXC block (no data) or MOD block (with data) |
| ShdIntervention | bank → owner | FWD | owner sends its data, MOD → EXC |
| ExcIntervention | bank → owner | FWD | owner sends its data, EXC/MOD → SHD |
| AckData | owner → bank | RESP | data answering an intervention |
| RepShd | bank → cache | RESP | data, fill SHD |
| RepExc | bank → cache | RESP | data, fill EXC (or MOD, see below) |
| AckChange | bank → cache | RESP | answer to Upgrade and Replace |

How the bank answers a request:

* **Read, block has no owner (or the requester is the owner):** RepExc, and the
  requester becomes owner. This rule keeps private data EXC/MOD in its cache,
  so a synchronization never makes it suspicious.
* **Read, owner holds it EXC:** RepShd at once, using the LLC data.
* **Read, owner holds it MOD:** ShdIntervention to the owner. The owner's
  AckData is forwarded in a RepShd and also written into the LLC.
* **RdEx:** ExcIntervention to the owner, if there is one. After the AckData,
  RepExc goes to the requester, which becomes the new owner.
* **Upgrade from the owner:** the block becomes MOD, and the bank answers
  AckChange.
* **Replace from the owner:** the owner field is cleared and the block becomes
  EXC. Data that comes with the Replace is written into the LLC. The bank
  answers AckChange.

When a hit needs no intervention, the bank replies 10 cycles after it accepts
the request. A miss first picks a victim way:

* an invalid way if one exists, otherwise round-robin;
* an owned victim is recalled with ExcIntervention;
* a dirty victim is written back;
* then the block is read from memory.

## Speculative loads on SUS blocks

A load that hits a SUS block returns its word on the core port at once, with
`core_resp_spec` set. The cache then sends a Read and stays busy until the
reply arrives. It compares the whole returned block with its SUS copy:

* **Equal:** the block becomes SHD, and `core_chk_ok` is reported.
* **Different:** the new block is installed. `core_chk_ok` is low, and
  `core_chk_data` carries the correct word.

The core must squash the load and everything that depends on it, and use that
word. The RepExc/RepShd reply sets the new state as for any fill.

A synchronization (`OP_SYNC` on the core port) goes through the same 3-cycle
pipeline as a hit. In its last cycle, every SHD block becomes SUS at once, and
`core_resp_valid` acknowledges the synchronization.

## Races, and where this design departs from the protocol as stated

DLS is described at the level of states and messages. A real network adds
races and deadlocks to that. The choices below are this design's own.

1. **Three physical networks.** Requests (REQ), interventions (FWD) and replies
   (RESP) travel on separate meshes. A bank waiting for an AckData can then
   never block the AckData behind its own requests. Each tile's cache and bank
   share the RESP injection port through a round-robin arbiter.
2. **One outstanding miss per cache, and one request at a time per bank.** The
   cache is blocking, with a single write-back slot for a Replace. The bank
   finishes each request, including any intervention, memory write-back and
   refill, before it accepts the next one.
3. **Interventions that arrive during a miss.**
   * An intervention for the block of an outstanding Read or RdEx waits until
     the reply has been taken. The bank may already have sent the reply, which
     is travelling on the RESP network.
   * An intervention for any other block is answered at once.
4. **Upgrade loses a race.** An ExcIntervention can reach a cache that has sent
   an Upgrade and is waiting for the AckChange. The cache answers the
   intervention and drops to SHD. When the AckChange then arrives, it sends a
   RdEx instead of writing. The bank serves an Upgrade from a core that is no
   longer the owner as a RdEx, and a Replace from a non-owner with a plain
   AckChange.
5. **RdEx leaves the block MOD.** The protocol has a store miss answered with
   an EXC block, followed by an Upgrade. With two cores storing to the same
   block, each can take the block away from the other between its RepExc and
   its Upgrade, forever. Here the cache performs its store as soon as the
   RepExc for a RdEx arrives, and the bank marks the block MOD when it sends
   that RepExc. A later Read from another core therefore fetches the data with
   ShdIntervention.
6. **RdEx to an EXC block waits for the AckData.** The protocol lets the bank
   answer at once from its own data. Here it always waits for the old owner's
   AckData. This also covers an owner whose Upgrade is still on its way.
7. **LLC evictions recall the owner.** An owned LLC victim is pulled back with
   ExcIntervention before the way is reused. Otherwise the owner would keep a
   writable copy of a block the LLC no longer tracks. SHD copies elsewhere may
   remain, and self-suspicion takes care of them.
8. **Staleness test.** A SUS block counts as current when its 64 bytes equal
   the reply's. A block rewritten with the same bytes therefore commits, which
   is safe.

## Networks

`mesh_router` is a 5-port wormhole router: local, N, E, S and W.

* **Stage 1:** an arriving flit is written into its port's 8-entry FIFO, and a
  head flit computes its output by XY routing.
* **Stage 2:** each output is given by round-robin to one input holding a head
  flit. It stays locked to that input until the tail flit has passed. Flits
  leave from registers.
* **Flow control:** with credits. One credit returns per flit that leaves an
  input FIFO.

`mesh_link` delays flits and credits by 2 cycles. `mesh_noc` builds the 4x4
mesh from routers and links. A header travels from a source's injection port
to the destination's ejection port in 2 cycles per router plus 2 per link. From
corner to corner that is 26 cycles at zero load.

`dls_ni` sends a message as a head flit followed by body flits:

* the head flit carries the header in its low bits: type, source, destination,
  a cache-or-bank bit, has-data and the line address;
* 4 body flits follow when the message carries a block.

`ni_tx` serialises a message into flits, and `ni_rx` reassembles one from
flits.

## Files

| file | contents |
|---|---|
| `rtl/dls_pkg.sv` | sizes, state and message enums, message and flit structs |
| `rtl/mesh_router.sv`, `rtl/mesh_link.sv`, `rtl/mesh_noc.sv` | the networks |
| `rtl/ni_tx.sv`, `rtl/ni_rx.sv`, `rtl/dls_ni.sv` | the network interface |
| `rtl/pc_ctrl.sv` | the private cache |
| `rtl/llc_bank.sv` | one LLC bank |
| `rtl/dls_cmp.sv` | the 16-tile top |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/dls_cmp_harness.sv` | end-to-end harness with 16 core models |
| `tb/dls_mem_model.sv` | behavioural main memory (40-cycle latency) |

The cache and tag arrays are plain register arrays.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_mesh_router` | 2-cycle latency; random traffic from all five inputs with route, order and exactly-once delivery checks |
| `tb_mesh_noc` | 26-cycle corner-to-corner latency; random all-to-all traffic |
| `tb_dls_ni` | four message streams through the interface, with random back-pressure |
| `tb_pc_ctrl` | every cache transition, directed: miss fills, 3-cycle hits, Upgrade, interventions, deferred interventions, SYNC, committed and squashed speculative loads, Replace |
| `tb_llc_bank` | every bank rule, directed: 10-cycle hit, RepExc/RepShd choice, both interventions, stale Upgrade/Replace, recall and write-back of a victim |
| `tb_dls_cmp` | end to end, with small caches (PC 2 sets x 2 ways, LLC 2 x 2): see below |
| `tb_dls_cmp_full` | the same harness with every parameter of `dls_cmp` at its default |

In the end-to-end harness, 16 core models run in phases separated by
barriers. In each phase:

* every word of a shared pool has one writer, or is read-only;
* cores issue random loads and stores;
* each load is checked against a reference copy that holds the value the
  weak model requires after the last barrier.

A speculative load is checked against its corrected word when it is squashed.
The harness counts each mechanism and fails if any never occurred:

* 3-cycle hits, and no response faster than that;
* committed and squashed SUS loads;
* Upgrade, both interventions, RepShd and RepExc;
* Replace with data;
* LLC recall;
* memory write-back.

To simulate with Verilator (5.x), for example the top:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dls_pkg.sv tb/tb_dls_cmp.sv --top-module tb_dls_cmp
./obj_dir/Vtb_dls_cmp
```

Every register that is read is reset, so the result does not depend on the
simulator's initial values. Building the full-size top takes a few minutes,
because the caches are large register arrays.

## Changing it

* Cache sizes and latencies are parameters of `dls_cmp`. `PC_SETS` and
  `LLC_SETS` must be powers of two. The LLC latency must be at least 2.
* The number of tiles and the mesh shape are constants in `dls_pkg`.
  * `NCORES` must equal `MESH_X * MESH_Y`.
  * The home-bank function takes `ID_W` low address bits.
* Message encodings and the flit format are also in `dls_pkg`. A message with
  data always takes `LINE_W / FLIT_W` body flits.

## Lint notes

Verilator reports two kinds of warnings that are left as they are:

* **SYNCASYNCNET** on `rst_n`: the reset is asynchronous in the flip-flops,
  and also serves as the `disable iff` condition of the assertions.
* **Unused parameters and bits:** some modules use only part of the shared
  package and of the address fields.
* **UNSIGNED:** a few comparisons become constant at some parameter values.
