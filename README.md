# An eight-core 3D MPSoC cluster with separate memory and message networks

Packet-switched networks-on-chip scale well for messages between processors, but they
make a poor path to a shared cache: every L2 access crosses the network twice, and at
even very low injection rates memory traffic congests a 2D mesh. The cluster described
here therefore gives each kind of traffic its own fabric:

* **memory traffic** travels from private L1 caches through a coherent, crossbar-like
  interconnect (modelled on ARM's CoreLink CCI) to a shared L2 cache, which in a 3D
  stack sits in the die below the cores and is reached through TSVs;
* **inter-processor messages** travel on a 4x2 mesh NoC, one router per core.

Inside a cluster all eight cores share one coherent, uniform-access (UMA) address space.
Larger systems are meant to be built from several such clusters that share no memory
and talk only by messages (a NORMA arrangement). This RTL implements one cluster: the
sixteen L1 caches, the coherent interconnect, the shared L2 and the message mesh. The
ARM cores, the interrupt controller, the DRAM and the pads are not included; their
connections are ports of the cluster.

```
              core 0 ... core 7    (not included: instruction, data and NoC ports)
               |  |  |
          +----+  |  +---------------------------+
          |       |                              |
       L1 I$    L1 D$   (x8, 32 KB, 2-way)     router (x8, 4x2 mesh)
          |       |                              |
  ========+=======+====== CCI-like interconnect  +--- message NoC
          request / response (128-bit) / snoop
                          |
                  (TSV tier boundary)
                          |
                 shared L2, 1 MB, 16-way
                          |
                   main memory port
```

## Files

| File | Contents |
|---|---|
| `rtl/mpsoc_pkg.sv` | address and line geometry, MOESI states, bus commands, flit format |
| `rtl/l1_cache.sv` | private L1 cache with MOESI snooping (used for both I and D) |
| `rtl/cci_interconnect.sv` | arbiter, snoop broadcast and data steering between L1s and L2 |
| `rtl/l2_cache.sv` | shared L2, pseudo-random replacement, write-back to memory |
| `rtl/noc_router.sv` | five-port wormhole router |
| `rtl/noc_mesh.sv` | 4x2 mesh of routers |
| `rtl/mpsoc_cluster.sv` | the cluster (top level) |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/mem_model.sv` | behavioural main memory used by the L2 and cluster testbenches |

## Geometry

| Item | Value |
|---|---|
| Physical address | 32 bits, byte addressed |
| Line | 64 bytes, moved as four 128-bit beats |
| L1 (each of 16) | 32 KB, 2 ways, 256 sets, LRU, tag 18 bits |
| L2 | 1 MB, 16 ways, 1024 sets, pseudo-random (LFSR), tag 16 bits |
| Coherence | MOESI among the L1 caches, by snooping |
| Core port | one 32-bit load/store or fetch at a time |
| NoC | 4x2 mesh, XY routing, wormhole, 34-bit flits, 4-flit input FIFOs |

Core c's data cache is interconnect master 2c and its instruction cache master 2c+1;
its router sits at x = c mod 4, y = c div 4.

## The coherent memory system

This is the part that needs the most care, because three modules cooperate in every
miss and the order of events matters.

### One owner of the bus at a time

The interconnect serialises coherent transactions. A cache that needs the bus raises
`bus_req`; a round-robin arbiter grants one master (`bus_gnt`), which keeps the bus
until it drops `bus_req`. While a master holds the bus no other cache can start a
transaction, so **the line states it looks at after the grant cannot change under it**.
That is why an L1 cache re-examines its line after the grant (state `S_DECIDE`)
instead of trusting what it saw before: while it waited, a snoop from another core may
have invalidated or downgraded the line, turning a planned upgrade into a full miss.

While it holds the bus a master issues commands, each closed by a one-cycle `done`:

| Command | Issued when | What the interconnect does |
|---|---|---|
| `WRITEBACK` | the victim of a miss is dirty (M or O) | fetches the 4 beats from the master (`wb_beat` selects, `wb_data` returns) and writes them to L2 |
| `RD_SHARED` | load or fetch miss | snoops all other caches (M->O, E->S); if one of them owns the line it sends the 4 beats itself, otherwise they are read from L2 |
| `RD_UNIQUE` | store miss | as above, but every other copy is invalidated |
| `UPGRADE` | store to a line held S or O | snoops with invalidate; no data moves |

`done_shared`, valid with `done`, tells whether any other cache hit in the snoop. A load
fill becomes S if so and E if not; a store fill becomes M.

A miss with a dirty victim is therefore two commands in one bus tenure: `WRITEBACK`, then
the read. A store completes with the bus still held, so the line it just obtained cannot
be stolen before the store lands.

### Snoop timing

`s_valid` goes to every master but the requester for one cycle. Each cache looks the line
up in that cycle, updates its state at the clock edge and presents `snp_hit` and
`snp_owner` the next cycle with `snp_resp_valid`. It also remembers where the line is,
so that an owner can hand out its four beats afterwards (`snp_beat` in, `snp_data` out),
even if the snoop has just invalidated its copy: the data array is not cleared by a state
change.

If an owner (M or O) answers, its data go straight to the requester and the L2 is not
touched: the memory side never sees a request that a snoop has already satisfied. With
MOESI, a shared read of a modified line leaves the old holder in O; the dirty line is
written to L2 only when the O/M holder evicts it.

### MOESI transitions of an L1 line

| From | Local load | Local store | Snoop, shared read | Snoop, invalidate |
|---|---|---|---|---|
| I | `RD_SHARED` -> E or S | `RD_UNIQUE` -> M | - | - |
| S | hit | `UPGRADE` -> M | stays S | -> I |
| E | hit | hit, silently -> M | -> S | -> I |
| O | hit | `UPGRADE` -> M | stays O, supplies data | -> I, supplies data |
| M | hit | hit | -> O, supplies data | -> I, supplies data |

An evicted M or O line is written back; S and E lines are dropped. Instruction caches use
the same module with stores tied off; they are snooped like data caches, so a store to
code invalidates stale instruction lines in every core.

The LRU bit and the state and tag of both ways of a set are one row of the L1's
state/tag array, written through a single port; a snoop and the cache's own request
never write it in the same cycle (see below). The L2 keeps tag, valid and dirty bits of
all sixteen ways of a set in one row in the same way. Both arrays are plain memories
without reset: after reset each cache clears its array one set per cycle (256 cycles for
an L1, 1024 for the L2) and keeps `req_ready` low until it has finished.

A cache does not act on its own request in a cycle in which it is being snooped
(`S_LOOKUP` waits one cycle), so a snoop and a local store never update the same line in
the same edge.

### The shared L2

The L2 stores lines and valid/dirty bits only; coherence is settled among the L1 caches
before a request reaches it. A request is looked up one cycle after it is accepted. The
victim of a miss is an invalid way if any, otherwise the way picked by a 16-bit LFSR
(x^16 + x^14 + x^13 + x^11 + 1) that advances every cycle. A dirty victim is written to
memory first. A read miss then fetches the line; a write miss does not, since L1 caches
always write whole lines. A tag is written only with the beat that makes the line valid,
so a victim keeps its own tag while it is being written back.

### Latencies on an idle cluster

Cycles from the clock edge at which the core's request is accepted to the response,
measured in simulation with the testbench memory model (6 cycles to the first beat):

| Case | Cycles |
|---|---|
| L1 hit | 2 |
| store to an S or O line (upgrade) | 10 |
| L1 miss, another L1 owns the line (cache-to-cache) | 14 |
| L1 miss, L2 hit | 17 |
| L1 miss, L2 miss (clean victim) | 28 |

## The message NoC

A message is a packet of 34-bit flits: a 2-bit kind (head, body, tail, or single for a
one-flit packet) and 32 bits of data. The head flit carries the destination in its low
six data bits, x in bits 2:0 and y in bits 5:3; the rest of the packet is free for the
software. Each router has five ports (local, north = y+1, south = y-1, east = x+1,
west = x-1), each with a 4-flit input FIFO. The head at the front of an input is routed X
first, then Y. A free output is granted round-robin among the heads that want it and then
stays with that input until the tail passes, so packets are never interleaved. Links use
valid/ready; a flit can cross one router per cycle, so a head needs |dx|+|dy|+1 cycles from
injection to ejection on an idle mesh. The ports on the outer edge of the mesh are tied
off: XY routing between cluster nodes never uses them.

## What follows the source architecture and what does not

Taken from the architecture: eight cores per cluster in a 4x2 arrangement; separate
instruction and data L1 caches per core on a CCI-like coherent interconnect; one shared
L2 per cluster in the tier below; L1 32 KB, 2-way, 64-byte lines, LRU; L2 1 MB, 16-way,
64-byte lines, pseudo-random replacement; MOESI; 128-bit data channels; separate request,
response and snoop layers; one memory interface; a packet-switched mesh for messages.

Choices of this implementation, where the architecture says nothing:

* The sizes are given as "32Kb" and "1Mb"; they are read as kilobytes and megabytes, the
  usual sizes for these caches.
* The interconnect is one serialised coherent bus, not a crossbar that overlaps
  transactions. Throughput under heavy sharing is therefore lower than a real CCI's;
  correctness is the same.
* The bus command set, handshakes, beat order, all latencies, the core port (word
  accesses, no byte enables), the write-back/write-allocate policies and the reset
  state (all lines invalid, reached by a clearing sweep after reset) are this design's
  own.
* The L2 holds no MOESI state of its own; the source lists MOESI for the L2 too, but
  with one L2 per cluster nothing needs to be tracked there.
* The NoC's router design, routing, flit format and FIFO depth are this design's own.
* Not built: the ARM cores, the generic interrupt controller (it connects only to the
  cores), main memory and its controller, the TSVs and pads (wires and ports here), the
  links between clusters, and the alternative stacks the source only sketches (split
  L2 instruction/data caches, an L3 tier, five-tier stacks).

## Size

Coarse (word-level) synthesis with yosys, memories kept as memory cells:

| Module | Cells | Flip-flop bits | Memory bits |
|---|---|---|---|
| `noc_router` | 821 | 70 | 1088 |
| `noc_mesh` | 6398 | 536 | 8704 |
| `l1_cache` | 214 | 131 | 273152 |
| `cci_interconnect` | 278 | 48 | 0 |
| `l2_cache` | 221 | 69 | 8683520 |
| `mpsoc_cluster` | 10058 | 2485 | 13062656 |

The caches' data, tag and state arrays are single-write-port memories without reset, so
they map onto SRAM macros; the flip-flops are almost all control state and NoC pointers.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a watchdog ends a
hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/mpsoc_pkg.sv rtl/l1_cache.sv \
    tb/tb_l1_cache.sv --top-module tb_l1_cache -o sim && ./obj_dir/sim
verilator --binary --timing --assert -Wno-fatal rtl/mpsoc_pkg.sv rtl/l1_cache.sv \
    rtl/cci_interconnect.sv rtl/l2_cache.sv rtl/noc_router.sv rtl/noc_mesh.sv \
    rtl/mpsoc_cluster.sv tb/mem_model.sv tb/tb_mpsoc_cluster.sv \
    --top-module tb_mpsoc_cluster -o sim && ./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_l1_cache` | loads against a word-level reference; E->M without a bus command; M->O on a shared snoop with the owner's data; upgrade from O and S; invalidation; 2-cycle hit; random traffic with evictions and write-backs |
| `tb_cci_interconnect` | one grant at a time; snoops to all masters but the requester; invalidate flag per command; cache-to-cache data without an L2 access; L2 data otherwise; write-back data; `done_shared`; round-robin order |
| `tb_l2_cache` | read data against a reference; hit latency; 40 dirty lines in one set force write-backs, all read back correctly |
| `tb_noc_router` | XY output choice, whole uninterleaved packets, per-flow order, no loss, one-cycle hop |
| `tb_noc_mesh` | delivery to the right node, integrity, order, no loss, 5-cycle corner-to-corner latency |
| `tb_mpsoc_cluster` | full-size cluster: 8 cores of concurrent loads, stores, fetches and messages; per-word coherence (no value from the future, no going back in time); final sweep of all words from all cores; every mechanism (cache-to-cache, upgrade, invalidation, instruction-cache invalidation, L1 and L2 write-backs, L2 misses, bus contention, NoC back-pressure) must occur |

All testbenches use the modules at their full sizes except the interconnect test,
which uses four masters instead of sixteen. The cluster testbench runs in well under a
second.

Address and data conventions of the testbenches: the memory model returns, for a word
never written, its byte address XOR `32'hA500_0000`; the cluster test's stores write
`{writer, address bits 13:2, sequence number}`, so any value read can be traced to the
store that produced it.
