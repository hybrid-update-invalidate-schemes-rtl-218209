# Hybrid update/invalidate MOESI coherence: RTL

Snooping caches usually keep coherence by invalidation. When a cache writes
a block that other caches may hold, it tells them to drop their copies. The
alternative is to send the new data along so that the others can keep their
copies. That update policy wins when the other cores will soon read the
block again. It wastes bus bandwidth when they will not.

This design makes the choice per write, at run time, from what the block
has recently seen. Each write to a shared or possibly-shared block is
announced either as an **invalidate** or as an **update**, and one of three
hybrid rules picks which:

| scheme | rule for a write to a block in O, S or I | extra state |
|---|---|---|
| **Threshold** | update if the block's counter ≥ `threshold`, else invalidate | a small counter per cache block |
| **Adapted-MOESI** | update if the block is in O, invalidate in S or I | none |
| **Number of Sharers** | update if the number of caches holding the block ≥ `min_sharers`, else invalidate | a sharer count from the snoop responses |

The counter of the Threshold scheme is zero when a block enters the cache.
It goes up by one each time the cache snoops a read request from another
core for that block, and down by one each time the local core writes the
block. Blocks that others keep reading therefore drift toward updates.
Blocks that one core keeps writing drift toward invalidates. A threshold of
1 gave the best overall trade-off in the published evaluation. For Number of
Sharers the best minimum was about half the number of cores. The
testbenches therefore default to those settings.

The RTL is a complete, synthesizable multi-core memory subsystem built
around that decision. It has N private first-level caches, one snooping bus,
a port to main memory and per-core traffic counters. The cores and main
memory are outside it: their ports are top-level ports.

## Contents

```
rtl/coh_pkg.sv          states, scheme codes, bus structs, widths
rtl/write_policy.sv     the update/invalidate decision (three schemes)
rtl/reuse_counter.sv    next value of the per-block counter
rtl/sharer_count.sv     population count of the snoop hits
rtl/l1_cache.sv         64 x 4 MOESI cache, snoop logic, uses the two above
rtl/bus_arbiter.sv      round-robin grant
rtl/snoop_bus.sv        transaction sequencer, snoop gathering, memory port
rtl/traffic_stats.sv    per-core counters of loads, stores and bus messages
rtl/coherent_system.sv  top: N caches + bus + counters
tb/                     one self-checking testbench per module, an
                        end-to-end test, the synthetic workloads and a
                        behavioural main-memory model
```

Default sizes are `N_CORES = 8`, `SETS = 64` and `WAYS = 4`. These are the
core count of all the published result charts and the 64-set, 4-block
caches of the evaluated system. The design accepts 2 to 16 cores: the core
id is 4 bits and the sharer count is 5 bits.

## The write decision in detail

`write_policy` is purely combinational. It takes the writer's MOESI state,
its counter and the total sharer count. It returns `need_bus` and
`do_update`:

* **M or E**: the writer knows it has the only copy. The write is silent:
  `need_bus = 0`, and E becomes M.
* **O, S or I**: the write must be announced, and `do_update` is chosen by
  the selected scheme. In I (a write miss), the counter input is 0.

The sharer count includes the writer itself when it holds a valid copy. The
published description does not say whether the writer counts; this is an
interpretation. With `min_sharers = 4` on 8 cores, an S block held by the
writer and three others is updated.

The scheme, threshold and sharer minimum are inputs of the top module. They
are not build parameters, so one netlist can be measured under all settings.
The two non-hybrid baselines of the study are not separate modes. Note,
though, that the Threshold scheme with `threshold = 0` always updates,
because the counter is never below 0.

## Counter rules as built

`reuse_counter` is 2 bits wide (`CNT_W`) and saturates at 0 and 3. That
covers the thresholds 1, 2 and 3 that were evaluated. The rules:

| event | counter |
|---|---|
| block filled (read miss or write miss) | 0 |
| this cache snoops another core's read request and holds the block | +1 (max 3) |
| local write to the block (silent or announced) | −1 (min 0) |

A write miss both fills and writes, and leaves 0. The counter is zeroed on
every fill, including fills supplied by another cache. Snooped updates and
invalidates leave the counter alone.

## MOESI behaviour of a cache

Processor side (`l1_cache`, one request outstanding):

| request | state of the block | action | new state |
|---|---|---|---|
| load | M, O, E, S | hit, no bus | unchanged |
| load | I | **read request** | E if no other cache holds it, else S |
| store | M, E | silent | M |
| store | O, S, I | **invalidate** | M |
| store | O, S, I | **update** | O if another cache holds the block, else M |

Snoop side (what the other caches do at the commit of a transaction):

| bus message | M | O | E | S |
|---|---|---|---|---|
| read request | → O, supplies data, counter +1 | supplies data, counter +1 | → S, counter +1 | counter +1 |
| invalidate | → I | → I | → I | → I |
| update | take data, → S | take data, → S | take data, → S | take data, → S |

A miss whose victim is dirty (M or O) hands the victim to the bus with the
request, and the bus writes it back before the commit. Victims are chosen
round-robin per set, with an invalid way taken first.

A block holds a single 32-bit word (`DATA_W`). It is addressed by a 32-bit
block address (`ADDR_W`): the low 6 bits select the set and the rest is the
tag. With one word per block a write miss overwrites the whole block, so it
needs no data from memory or from the old owner. Only read misses fetch
data.

## The bus transaction

`snoop_bus` runs one transaction at a time:

```
 IDLE ──grant──► SNOOP ──► [MEMWR] ──► [MEMRD] ──► COMMIT ──► IDLE
```

| phase | cycles | what happens |
|---|---|---|
| IDLE | 1 | `bus_arbiter` picks the next requester round-robin; its `bus_req_t` is latched |
| SNOOP | 1 | `snp_addr` broadcast; every cache answers `hit/owner/data` combinationally; hits of the others are counted (`snp_others`); the requester's `write_policy` answers with `breq_update`, which is latched |
| MEMWR | until `mem_ack` | only if the requester handed over a dirty victim |
| MEMRD | until `mem_ack` | only for a read request that no other cache owns |
| COMMIT | 1 | `cm` broadcast to all caches: `BUS_READ`, `BUS_INVAL` or `BUS_UPD`, with address, data and `shared`; every cache updates its arrays on this edge and the requester completes |

A transaction without memory access therefore takes 3 bus cycles. The
processor sees a response pulse one cycle after the commit. A load hit or a
silent store is answered 2 cycles after the request is accepted.

The memory port is a plain request/acknowledge pair. The bus holds
`mem_req`, `mem_we`, `mem_addr` and `mem_wdata` until memory pulses
`mem_ack` for one cycle, and read data are taken with the acknowledge. Any
latency may be attached.

## Ordering: why it is coherent

Only the bus changes another cache's copy, and it does so in the single
COMMIT cycle. Three details make that safe:

1. **Requests are rebuilt every cycle.** A waiting cache does not freeze
   its request. It recomputes the kind, victim and write-back from its
   current arrays. If another core's invalidate hits the block while a
   store waits, the store becomes a write miss. If the chosen victim is
   invalidated, its write-back disappears. The bus latches the request at
   the grant. From then until the commit, the requester's arrays cannot
   change.
2. **Owner data are taken at the commit, not at the snoop.** A core holding
   E may write silently (E → M) while a read request from another core
   waits for memory. The bus notices the new owner at commit time and
   forwards that owner's data instead of the stale memory data.
3. **Local hits pause during a commit.** A cache does not complete a hit in
   the cycle of a commit. A snoop and a local write therefore never update
   the same block on the same edge.

Assertions in the RTL check these rules during simulation: at most one
owner per snooped block, memory acknowledges only a pending request, the
granted request stays asserted until its commit, and a commit addressed to
a cache arrives only while that cache waits.

## Top-level interface (`coherent_system`)

| port | width | meaning |
|---|---|---|
| `scheme` | 2 | `SCH_THRESHOLD`, `SCH_ADAPTED`, `SCH_SHARERS` (`coh_pkg::scheme_e`) |
| `threshold` | `CNT_W` | Threshold scheme |
| `min_sharers` | 5 | Number of Sharers scheme |
| `cpu_req_valid/ready/we` | N each | per core: request handshake; accepted when both valid and ready |
| `cpu_req_addr/wdata` | N × 32 | block address, store data |
| `cpu_resp_valid/rdata/bus` | N, N × 32, N | completion pulse, load data, whether the bus was used |
| `mem_req/we/addr/wdata/ack/rdata` | 1/1/32/32/1/32 | main memory |
| `stats_clear` | 1 | zero all counters |
| `n_reads, n_writes, n_read_reqs, n_invals, n_updates, n_wbacks` | N × 32 each | per-core traffic counters |

`rst_n` is an asynchronous active-low reset. It sets every block to I and
the counters to 0. The tag, data and counter arrays are not reset; they are
only read behind a valid state.

The figure of merit in the study is the total number of bus transactions
per run: read requests + invalidates + updates, summed over cores.
`traffic_stats` gives exactly those counts per issuing core. It also counts
write-backs, which that metric leaves out.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog stops a testbench that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/coh_pkg.sv tb/tb_coherent_system.sv --top-module tb_coherent_system
./obj_dir/Vtb_coherent_system
```

Replace the testbench name for the others:

| testbench | what it establishes |
|---|---|
| `tb_write_policy` | exhaustive: every scheme × state × counter × threshold × sharer count against the rules above |
| `tb_reuse_counter` | exhaustive for 2- and 3-bit counters |
| `tb_sharer_count` | random and corner cases, 16 inputs |
| `tb_bus_arbiter` | round-robin order, one-hot grant, no grant without request |
| `tb_traffic_stats` | random event streams against counts kept in the testbench, including clear |
| `tb_l1_cache` | directed: fills in E/S, silent E→M, snooped M→O and counter +1, counter saturation, all three schemes' decisions, foreign update/invalidate, dirty and clean eviction, 2-cycle hit latency |
| `tb_snoop_bus` | four fake caches: grant order, sharer count, write-back/read presence and contents, commit command/data/shared flag, SNOOP→COMMIT in one cycle |
| `tb_coherent_system` | full default size. 20,000 serial operations checked one by one against a reference model of the whole protocol (data, bus message kind, write-back, final array contents), with the scheme changed every 400 operations. Then 8 cores issue 2,000 operations each concurrently with per-address single writers; reads must never go back in time. Every mechanism must occur (memory fill, cache-to-cache supply, load hit, silent store, invalidate, update under each scheme, write-back, counter saturation, bus contention) |
| `tb_workloads` | the three synthetic sharing patterns (below), each checked against a flat memory image |
| `tb_core_counts` | the system built with 2 and with 16 cores (Number of Sharers, minimum N/2+1), random shared/private traffic checked against a flat memory image; the 16-core run must see 16 sharers and both updates and invalidates |

`tb/main_memory_model.sv` is a behavioural memory that acknowledges after a
random latency of a few cycles. It stands in for main memory.

## Synthetic workloads

`tb_workloads` generates three sharing patterns on 8 cores: contended locks,
a neighbour-reading array sweep, and a server/client split between public
and private data. It runs the same trace under each scheme setting. The
patterns follow the descriptions the schemes were evaluated with. The range
sizes and the run length are this testbench's own: 50,000 operations per
run, against about five million in the original study. The printed table
(bus transactions, 8 cores) came out as follows with the seeds in the file:

|        | Thr1 | Thr2 | Thr3 | Adapted | Sh3 | Sh4 | Sh5 | Sh6 |
|---|---|---|---|---|---|---|---|---|
| Locks  | 36620 | 36847 | 37123 | 37212 | 35608 | 35616 | 35627 | 35675 |
| Arrays | 14369 | 17121 | 17451 | 9974 | 11493 | 22325 | 22325 | 22325 |
| Server | 31963 | 31960 | 31962 | 31959 | 32031 | 31991 | 31963 | 31965 |

These numbers come from this RTL and these generated traces. They are not
the published results and cannot be compared with them number for number,
since the traces differ. The four commercial benchmark traces
(Bodytrack, Dedup, Streamcluster and Swaptions) were not available, so they
are not run. Any trace of (core, load/store, address) can be played through
the processor ports the same way.

## What is this design's own

The hybrid rules, the counter rules, the MOESI states, the update and
invalidate semantics, the cache geometry and the per-core counts follow the
published scheme descriptions. Everything below is an implementation choice
where the description is silent:

* one 32-bit word per block, 32-bit block addresses;
* round-robin replacement;
* a 2-bit saturating counter, zeroed on every fill, not only fills from
  memory;
* the writer counts as one of the sharers;
* writer state after an update: O if another copy remains, else M;
* the atomic bus with its SNOOP/COMMIT phases, round-robin arbitration,
  write-back of dirty victims inside the miss transaction, and the
  request/acknowledge memory port;
* all timing: the study was untimed.

The Adapted-MOESI description contains the sentence "its state is almost
always zero". It is read here, as the later discussion states, as "the block
is almost always in the O state". The scheme as built updates exactly when
the writer holds the block in O.

Not built: the directory that the Number of Sharers scheme would use in a
directory protocol. On this snooping bus, the sharer count comes from the
snoop responses instead. Multi-word blocks, cache hierarchies beyond one
level, and the processor cores are also not built.
