# ATA-Cache: a GPU L1 shared through an aggregated tag array

In a GPU each core normally has a private L1. When several cores read the
same data, every L1 keeps its own copy, and every one of them fetches it
from the L2 separately. Earlier shared-L1 schemes try to fix this, but
each brings its own contention:

- In a *remote-sharing* L1, a core that misses first sends probes to the
  other L1s and waits for the answers before it goes to the L2.
- In a *decoupled-sharing* L1, each address range belongs to exactly one
  L1. Cores that want the same line then queue on the same cache bank.

ATA-Cache removes the probes. Each L1's tag array is taken out of the L1.
The tag arrays of all cores in a cluster sit side by side in one
**aggregated tag array**. A core's request is compared in one step against
every tag array of the cluster, so the core learns at once where its data
is:

- in its own L1 (the *local* cache);
- in another core's L1 (a *remote* cache);
- nowhere in the cluster, so it goes to the L2.

Every L1 still caches the whole address space. Cores with no shared data
therefore behave exactly as with private caches. A remote L1 is touched
only when it really holds the data.

This repository gives synthesizable SystemVerilog for that L1 side at the
evaluated size: 30 cores in 3 clusters of 10. Each core has a 64 KB,
64-way sectored L1 with 128-byte lines, 32-byte sectors, 4 banks, LRU
replacement and a 32-cycle hit latency. The SIMT cores, the L1-to-L2
network, the L2 and DRAM are not part of the design. They connect through
ports.

## Block structure

```
ata_gpu                        N_CLUSTERS x ata_cluster (no sharing between clusters)
└─ ata_cluster                 one sharing domain of N_CORES cores
   ├─ ata_aggregated_tag_array all tag arrays of the cluster + lookup logic
   │  ├─ ata_tag_array         x N_CORES   one core's tags, one bank per set, LRU
   │  ├─ ata_tag_selector      x N_CORES*WAYS   routes each request's set to its comparators
   │  ├─ ata_comparator_group  x N_CORES*N_CORES   WAYS tag comparators
   │  └─ ata_result_proc       x N_CORES   hit vector + hit way per tag array
   ├─ ata_l1_cache             x N_CORES   one core's L1 without tags
   │  ├─ ata_request_distributor   local / remote / L2 decision
   │  └─ ata_data_array        4 sector banks, dirty bit per line, owner + remote port
   └─ ata_l1_crossbar          L1-to-L1 network of the cluster
ata_pkg                        shared constants and the route_e enum
```

## The aggregated tag array: parallel lookup without bank conflicts

Each core looks up its own set index, and different cores may want
different sets of the same tag array in the same cycle. Two things make
that possible:

1. **One bank per set.** Every set of every tag array can be read in every
   cycle. In the RTL the tags are registers, so `ata_tag_array` simply
   presents all `SETS x WAYS` entries on `set_entry`.
2. **Tag selectors.** There is one selector per way of each tag array. It
   receives that way's entry from every set, plus the set index of every
   requesting core, and gives each core the entry of the set it asked for.
   This is a plain `SETS:1` multiplexer per (way, core).

Behind the selectors, `ata_comparator_group` compares one core's tag with
the `WAYS` selected tags of one array. It produces two bits per way:

- `line_match`: the line is valid and the tag is equal.
- `sector_hit`: the same, and the requested sector is valid as well (the
  cache is sectored).

`ata_result_proc` then reduces the comparators of one core over all
arrays. It gives the **hit vector** (bit *a* = tag array *a* holds the
sector) and the hit way in each array, in binary. For two cores, core 0
hitting only its own array gives `01`, and core 1 hitting both gives `11`.
In the paper's notation these are `[1,0]` and `[1,1]`.

The lookup is combinational from the request address to the hit vector.
`ata_l1_cache` registers the result in the cycle it accepts the request.
At the default size this logic is large. Each cluster has
10 x 10 x 64 = 6400 comparators of 22 bits, each fed by an 8:1
multiplexer. The paper states the same cost: the comparator groups and the
crossbar are the design's area overhead.

Only the owning core ever writes a tag array. It does so for LRU touches,
fills and line allocation, through the update port. Lookups by other cores
are pure reads, so the tag arrays need no write arbitration.

## Where a request goes

`ata_request_distributor` turns the hit vector into a route:

| request | local tag hit | remote tag hit | route |
|---|---|---|---|
| read  | yes | any | local data array (local always wins) |
| read  | no  | yes | one remote L1 through the crossbar |
| read  | no  | no  | L2 |
| write | yes | any | local data array updated, and written through to L2 |
| write | no  | any | L2 only (no allocation) |

Writes never touch another core's L1. The GPU's existing (non-coherent)
L1 rules therefore stay as they were: a core that already holds a copy
keeps it until the copy is replaced.

When several remote L1s hold the sector, the first holder after the
requesting core in cyclic order is used. This choice is this design's own;
the paper does not say which copy to use.

## One request through `ata_l1_cache`

Each L1 serves one request of its core at a time. Its state machine is:

```
IDLE --accept, latch lookup--> DIST
DIST --local read---> LREAD --bank grant--> LRWAIT --> RESP
DIST --remote read--> XREQ --crossbar accepts--> XWAIT --data--> FILL --> RESP
                                                  XWAIT --"unavailable"--> L2REQ
DIST --miss-------> L2REQ --> L2WAIT --data--> FILL --> RESP
DIST --write hit--> LWRITE --> L2REQ --accepted--> RESP
DIST --write miss-> L2REQ --accepted--> RESP
```

- **Fill.** Data that came from a remote L1 or from the L2 is written into
  the local L1, as in the paper's example where the data "returns to cache
  1" before the core gets it. If the tag is already present (only the
  sector was missing), just that sector is added. Otherwise the set's LRU
  victim is allocated: the first invalid way, else the least recently used
  way.
- **Latency.** The response is held until `HIT_LAT` (32) cycles after the
  request was accepted. An uncontended local hit therefore takes exactly
  32 cycles. Remote hits and L2 reads take longer: the crossbar and fill
  add cycles, and the L2 adds its own latency on top. The testbenches
  check the 32 cycles exactly.
- **Write acknowledge.** A write is acknowledged once the L2 port accepts
  it (the write is posted).

### Serving other cores, and the dirty bit

Another core's lookup may show a sector in this L1, but the line can still
change before the remote read arrives. Each L1 also serves remote reads
from the crossbar on the second port of its data array. The answer comes
one cycle after the bank grant. It carries the sector and an
*unavailable* flag, which is set when any of these holds:

- the line's **dirty bit** is set. A local write sets it, so a remote
  reader must not take this copy. A fill that allocates a new line clears
  it again.
- the owner's own tag entry at (set, way) no longer holds that tag and
  sector, because the line was replaced after the lookup.

A requester that receives *unavailable* reads the L2 instead. The dirty
bit and the fall-back to L2 are from the paper. The tag re-check is this
design's way of covering the replacement case, which the paper mentions
but does not resolve.

## Contention points

The design is about contention, and here is where it can still happen:

- **`ata_data_array` banks.** The four banks are single-ported, and a line's
  sector *s* lives in bank *s*. If the owner and a remote read want the
  same bank in the same cycle, one of them waits. The winner alternates per
  bank after each conflict. The `conflict` output and the `ev_bank_conflict`
  events count these.
- **`ata_l1_crossbar`.** Each destination L1 has a one-entry input register
  and a round-robin arbiter. Several cores reading the same remote L1 are
  served one per cycle; `xbar_stall` counts the losers. The response
  direction needs no arbiter, because each L1 has at most one remote read
  in flight. An assertion checks this.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_CLUSTERS` | 3 | clusters in `ata_gpu` |
| `N_CORES` | 10 | cores (and L1s) per cluster |
| `WAYS` | 64 | associativity |
| `SETS` | 8 | sets: 64 KB / (64 x 128 B) |
| `SECTORS` | 4 | 32-byte sectors per 128-byte line; also the number of data banks |
| `ADDR_W` | 32 | byte address width; tag = `ADDR_W - 10` bits |
| `HIT_LAT` | 32 | minimum request-to-response time |

Address split, in bits: `[4:0]` byte in sector, `[6:5]` sector, `[9:7]`
set, `[31:10]` tag. Data moves one 32-byte sector (256 bits) at a time.

## Ports of `ata_gpu`

Every per-core signal is an array indexed by the global core number
`cluster*N_CORES + core`.

- `core_req_valid/ready/write/addr/wdata`: a request is taken on
  `valid && ready`. `ready` is high only while that core's L1 is idle.
- `core_resp_valid/write/rdata`: a one-cycle response pulse. The core must
  take it; there is no back-pressure.
- `l2_req_valid/ready/write/addr/wdata`: towards the L2. A write completes
  on acceptance.
- `l2_resp_valid/rdata`: the sector for an outstanding read, one pulse.
- `ev_local_hit`, `ev_remote_hit`, `ev_l2_read`, `ev_redirect`,
  `ev_write`, `ev_bank_conflict`: one-cycle event pulses per core.
- `xbar_stall`: per cluster, the number of crossbar requests that lost
  arbitration in this cycle.

Reset (`rst_n`) is asynchronous and active low. It clears all valid and
dirty bits and all state machines; the data storage itself is not reset.

## What is this design's own

These points follow the paper:

- the aggregated tag array structure (bank per set, tag selectors,
  comparators, result unit);
- the three routes with local priority;
- writes handled only locally;
- the dirty bit with its fall-back to the L2;
- the crossbar between L1s;
- 10 cores per cluster and the cache geometry and latency.

These points are choices made here, because the paper does not state them:

- the 32-bit address and the one-sector access width;
- one outstanding request per core (no MSHRs, no hit-under-miss);
- write-through with no allocation on a write miss, writing full sectors;
- true LRU kept as age counters, touched only by the owner;
- sector-interleaved banks and their two-port arbitration;
- the crossbar's registers and round-robin arbitration;
- which remote copy is used;
- the tag re-check on a remote read;
- the way the 32-cycle latency is enforced.

Not covered at all:

- shared-memory, texture and atomic requests. The paper keeps these as in
  a private L1.
- invalidation and flush at kernel boundaries.

## Simulating

Each module's testbench is `tb/tb_<module>.sv`. Every testbench prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/ata_pkg.sv tb/tb_ata_cluster.sv --top-module tb_ata_cluster
./obj_dir/Vtb_ata_cluster
```

Give the package `rtl/ata_pkg.sv` on the command line; `-y rtl` finds the
modules by name.

The block testbenches work as follows:

- `tb_ata_tag_selector`, `tb_ata_comparator_group` and
  `tb_ata_result_proc` use random vectors against reference values
  computed in the testbench. `tb_ata_result_proc` also replays the paper's
  two-array example.
- `tb_ata_tag_array` checks every entry, the victim and the probe port
  against a reference model with an LRU recency list.
- `tb_ata_aggregated_tag_array` runs the worked example (`[1,0]` and
  `[1,1]`), then random fills and parallel lookups from every core.
- `tb_ata_request_distributor` checks every hit vector, for reads and
  writes.
- `tb_ata_data_array` runs random two-port traffic and checks the grants,
  the data and the dirty bits.
- `tb_ata_l1_crossbar` checks the round-robin winners, delivery of every
  request exactly once, and the response routing.
- `tb_ata_l1_cache` walks through every route of one L1, including the
  32-cycle local hit, the dirty and stale-tag answers, and write-through.

Two end-to-end testbenches share one structure:

- `tb_ata_cluster` uses one cluster reduced to 4 cores.
- `tb_ata_gpu` uses `ata_gpu` at its full default size: 30 cores, 64 KB
  each.

In both, every core has a 188-cycle L2 model behind it. The run covers:

- the paper's three routing cases;
- the dirty fall-back;
- a directed phase that makes several cores read one L1 while its owner
  reads the same bank;
- a random mix of shared reads, private reads and private writes on all
  cores at once.

Each read is compared with a memory image. Each mechanism has to happen at
least once: local hit, remote hit, L2 read, dirty fall-back, write, bank
conflict and crossbar contention.

At full size, one run of `tb_ata_gpu` covers 5667 cycles with 2358 checks.
All of these events occur:

| event | count |
|---|---|
| local hit | 244 |
| remote hit | 422 |
| L2 read | 383 |
| dirty fall-back | 1 |
| write | 202 |
| bank conflict | 5 |
| crossbar stall | 177 |

The simulation itself takes under a minute. Building it with a single
compiler job takes about half an hour; use `-j` to compile in parallel.
Almost all of that time is the C++ compile of the 3 x 10 x 10 x 64
comparator network.
