# Culsans: a snoop-based coherent cluster of write-back L1 data caches

This design is a small cache-coherent cluster of 2 to 4 cores. Each core has a
write-back L1 data cache. The caches stay coherent through a central Cache
Coherency Unit (CCU), and the CCU has a single AXI port to the rest of the
system (crossbar, last-level cache, main memory).

- Coherence follows MOESI. Each cache line stores three flags: valid,
  shared and dirty.
- Transactions are a subset of Arm AMBA ACE. The CCU snoops the other caches
  itself and orders all coherent traffic.
- The default configuration has two cores, each with a 16 KiB data cache.
  This matches the dual-core setup in which the published design was
  evaluated.

The processor pipelines are not part of the RTL. In their place, each core's
data cache has four request ports: page-table walker, load unit, accelerator
and store unit. These are the four requesters of the CVA6 data cache.

## Cache line states

| State     | ACE name    | valid | shared | dirty |
|-----------|-------------|:-----:|:------:|:-----:|
| Modified  | UniqueDirty | 1 | 0 | 1 |
| Owned     | SharedDirty | 1 | 1 | 1 |
| Exclusive | UniqueClean | 1 | 0 | 0 |
| Shared    | SharedClean | 1 | 1 | 0 |
| Invalid   | Invalid     | 0 | x | x |

A line is written without bus traffic only when it is valid and not shared
(E or M). A store on an S or O line first sends a CleanUnique, which
invalidates the other copies. A store miss fetches the line with ReadUnique.
A load miss fetches it with ReadShared.

## Structure

```
culsans_cluster                      top: NumCores caches + CCU
├── wb_dcache  (one per core)        write-back L1 data cache
│   ├── cache_ctrl ×4                PTW, load, accelerator, store port
│   ├── snoop_ctrl                   serves AC snoops, answers on CR/CD
│   ├── miss_handler                 ACE initiator: refill, write-back, upgrade,
│   │                                non-cacheable access, flush
│   ├── dcache_arbiter               static priority on the single SRAM port
│   └── sram_sp ×3                   flags, tags, data
└── ccu                              Cache Coherency Unit
    ├── ace_demux (one per core)     coherent vs. non-coherent split
    ├── ace_mux                      round-robin merge of the coherent requests
    ├── coherence_controller
    │   ├── ccu_decoder              request intake, collision lookup, AC snoops
    │   ├── collision_checker        table of lines in flight
    │   ├── snoop_unit               CR/CD collection in snoop order, R from snoop data
    │   └── memory_unit              memory reads/writes, write-back of snooped dirty data
    └── axi_mux                      joins both paths onto the memory AXI port
```

`culsans_pkg` holds the shared types and encodings: the channel structs, the
snoop encodings, the flag struct and the cache request types. `fifo_v` and
`rr_arb` are generic helpers.

### Data cache (`wb_dcache`)

The cache is direct mapped with 16-byte lines (two 64-bit beats) and uses
64-bit addresses. The three SRAMs (flags, tags, data) share one port. Six
agents compete for that port, and a static-priority arbiter picks the winner
(0 is the highest priority):

0. miss handler
1. snoop controller
2. PTW controller
3. load controller
4. accelerator controller
5. store controller

The snoop controller ranks above every core-side controller. This lets state
changes that coherence needs go ahead of new core requests.

**Cache controllers** handle one request at a time:
- The controller reads the flags, tag and data of the line. The response comes
  back one cycle later.
- On a load hit, it returns the data.
- On a store hit to an E or M line, it writes the data and sets the dirty flag.
- Everything else goes to the miss handler, and the controller then retries:
  misses, stores to shared lines, and non-cacheable addresses (below
  `CachedBase`, default 0x8000_0000).

Before writing a line, the controller checks whether anything touched it
after its lookup. Three things count:
- a snoop of the same line,
- the miss handler working on the same index,
- another agent's flag write to the same index.

If any of these happened, the controller looks the line up again. A store
therefore never overwrites a line that a snoop has just made shared or
invalid.

**The snoop controller** answers each AC request:

| snoop        | response                                   | new state           |
|--------------|--------------------------------------------|---------------------|
| ReadOnce     | data if valid                              | unchanged           |
| ReadShared   | data if valid, IsShared                    | shared set (M→O, E→S) |
| ReadUnique   | data if valid, PassDirty = dirty           | invalid             |
| CleanInvalid | data and PassDirty only if dirty           | invalid             |

While it works on a line, it sends that line's address to the controllers and
to the miss handler, marked as a snoop read or a snoop invalidation.

**The miss handler** is the cache's only ACE initiator.

A refill goes like this:
1. It reads the current occupant of the index (the victim).
2. If the victim is dirty, it writes the victim back with WriteBack.
3. It fetches the line with ReadShared (for a load) or ReadUnique (for a store).
4. It installs the line with shared = RRESP IsShared and dirty = RRESP
   PassDirty.

A snoop can reach the line while its refill is still in flight. If that snoop
read the line, it is installed shared. If the snoop invalidated it, it is
installed invalid.

The miss handler also does four other jobs:
- **Upgrades:** it sends CleanUnique, then clears the shared flag, unless a
  snoop intervened.
- **Atomic memory operations:** it performs the nine RISC-V AMOs (swap, add,
  and, or, xor, min, max, minu, maxu) on 32-bit or 64-bit data.
  - The old word is returned to the requester.
  - The operation is done inside the cache, on a line the cache holds
    uniquely. If the line is missing, it is fetched with ReadUnique. If it
    is shared, it is upgraded with CleanUnique.
  - The new value is written in the same SRAM write that installs or
    upgrades the line. No other core can snoop the line away between the
    fetch and the update, so two cores adding to one counter cannot starve
    each other.
  - If a snoop touches the line between the read and the write of an
    in-place AMO, the AMO starts again.
- **Non-cacheable accesses:** it uses ReadNoSnoop and WriteNoSnoop.
- **Flushes:** it walks every index, writes back the dirty lines and
  invalidates all lines.

After reset, the cache spends one cycle per line clearing the flags array.
`init_done_o` rises when this is finished.

### Cache Coherency Unit (`ccu`)

Each core's ACE port first enters an `ace_demux`. Requests with a snoop code,
or with an inner- or outer-shareable domain, are coherent. They go to the
`ace_mux`. All other requests go straight to the `axi_mux`.

The `ace_mux` merges the coherent requests of all cores round-robin. It also
tags each ID with the core:

| ID bits | meaning |
|---------|---------|
| `id[3:0]` | the core's own ID |
| `id[4]` | coherent path |
| `id[7:5]` | core index |

Responses are returned to the core using these same bits.

Inside the `coherence_controller`:

- **Decoder.** It takes AR and AW requests in turn and looks the line up in
  the collision table. A request to a line that is already in flight waits
  there, as does any request while the table is full. Otherwise the decoder:
  - enters the line in the table;
  - sends the AC snoop to every core except the initiator;
  - puts the transaction in the snoop-order FIFO.

  The snoop type follows from the request:
  - ReadOnce → ReadOnce
  - ReadShared → ReadShared
  - ReadUnique → ReadUnique
  - CleanUnique → CleanInvalid
  - WriteUnique → CleanInvalid
  - WriteBack → no snoop

  The decoder moves on as soon as every snooped core has accepted the AC.
  It does not wait for the CR responses, so several snoops can be open at
  once.
- **Snoop unit.** It pops the FIFO in order, which matches the AC order,
  because snoop channels carry no ID. It collects one CR from each snooped
  core.
  - If any core sends data, the lowest-numbered such core supplies the line.
  - For reads, the snoop unit buffers that line and sends it to the
    initiator as a two-beat R burst:
    - For ReadUnique, RRESP carries PassDirty.
    - For other reads, RRESP carries IsShared.
  - Everything else becomes a command for the memory unit. This covers reads
    that no cache could serve, writes, and CleanUnique. When a cache hands
    over dirty data, that data goes into the memory unit's write-back FIFO.
- **Memory unit.** It runs commands one at a time. For each command:
  1. It writes back any queued dirty line.
  2. It does the initiator's memory read, or forwards its write and
     returns B, or answers a CleanUnique with a single R beat.

  Memory-side IDs keep `id[4]` set, so the `axi_mux` returns their responses
  to the controller.
- **R multiplexer.** It joins the R bursts of the snoop unit and the memory
  unit without interleaving them.
- **Table release.** The line's table entry is freed on the last beat of its
  response.

All units pass work along through valid/ready handshakes. Transactions on
different lines can therefore be in different units at the same time. Only
requests to the same line are serialised.

## Top-level interface (`culsans_cluster`)

| port | direction | meaning |
|------|-----------|---------|
| `clk_i`, `rst_ni` | in | clock, active-low asynchronous reset |
| `req_i[c][p]` / `rsp_o[c][p]` | in/out | core `c`, port `p` (0 PTW, 1 load, 2 accelerator, 3 store) |
| `flush_i[c]` / `flush_done_o[c]` | in/out | whole-cache flush of core `c` |
| `init_done_o[c]` | out | flag clearing after reset finished |
| `m_ar/aw/w/r/b_*` | AXI master | memory port of the CCU |
| `ev_collision_stall_o`, `ev_snoop_hit_o`, `ev_snoop_wb_o` | out | one-cycle event strobes for statistics |

**Request handshake.** A request (`valid`, `we`, `addr`, `wdata`, `be`,
`amo`) stays asserted until `ready`. Later, a one-cycle `rvalid` completes
it. For a load it carries `rdata`, and for an AMO it carries the old word.
`amo` = `AmoNone` marks a plain load or store. For an AMO, `be` = 0x0F or
0xF0 selects a 32-bit operation on that half of the word. Any other `be`
selects a 64-bit operation.

**Parameters:**

| parameter | default | meaning |
|-----------|---------|---------|
| `NumCores` | 2 | number of cores |
| `DcacheBytes` | 16384 | capacity of each data cache |
| `CcuEntries` | 4 | size of the collision table |
| `CachedBase` | 0x8000_0000 | lowest cacheable address |

## What is and is not built

Built: the whole data cache, atomic memory operations included, and the
whole CCU, including:
- pipelined snooping;
- the collision table;
- snoop-to-initiator data forwarding;
- write-back of snooped dirty lines.

Not built:
- **The CVA6 pipelines.** Their requests enter through the cache ports
  instead.
- **The instruction cache.** The CCU accepts ReadOnce, which is what a
  coherent instruction fetch would send.
- **LR/SC (load-reserved / store-conditional).** Only the AMOs are built.
- **AMOs to non-cacheable addresses.** AMOs are done in the cache, so they
  must target cacheable memory.
- **The crossbar, last-level cache and main memory.** The testbenches use a
  behavioural memory in their place.

Choices this design makes where the published description is silent:
- direct mapping;
- the 16-byte line;
- the 64-bit data path;
- the ID layout;
- the collision table size (4 entries) and the snoop FIFO depth (4);
- one-at-a-time operation of the memory unit and of each cache controller;
- the "lowest-numbered core first" choice of the data supplier.

## Verification

Every block has a self-checking testbench in `tb/`:

- **Muxes, arbiter, SRAM and collision table:** directed and random
  stimulus, checked against reference models.
- **`tb_coherence_controller`:** the controller with behavioural snoop
  responders and memory. It checks each transaction type and the resulting
  states. It also checks the collision stall, and that a new snoop is
  issued before the previous snoop has been answered.
- **`tb_wb_dcache`:** one cache. It walks a line through all MOESI states
  and runs AMOs on missing, modified and shared lines. It then runs random
  loads, stores, AMOs and snoops against a reference memory.
- **`tb_culsans_cluster`:** the full-size two-core cluster with its default
  parameters. It runs a directed ping-pong sequence, then 3000 random
  loads, stores and AMOs on all eight ports over a small, heavily shared
  address pool, with flushes along the way. Next, four ports on the two
  cores add to one counter at the same time, and every old value must come
  back exactly once. At the end the test checks every load and the final
  memory contents.

  It also counts how often each coherence mechanism occurred and fails if
  any of them never did. The mechanisms counted are ReadShared, ReadUnique,
  CleanUnique, eviction write-back, non-coherent access, flush, collision
  stall, snoop hit, snoop write-back, queued snoops, store retry, AMOs and
  AMO restarts.

### Running a testbench

Each testbench is a top module with no ports. It prints
`TB_RESULT checks=N failures=M` before it finishes. The package has to come
first on the command line, and `-y` lets verilator find every other module
by its file name. For example, for the whole cluster:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl \
    rtl/culsans_pkg.sv tb/tb_culsans_cluster.sv --top-module tb_culsans_cluster
obj_dir/Vtb_culsans_cluster +verilator+rand+reset+2 +verilator+seed+3
```

`+verilator+seed+N` changes the random stream.
