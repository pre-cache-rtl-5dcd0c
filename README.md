# Pre-cache: keeping speculative loads out of the cache hierarchy

Meltdown, Spectre and their relatives all rely on one weakness. An instruction
that runs transiently is later squashed, but before that it leaves a line in a
cache, and that line can be detected afterwards by timing. Such an instruction
runs ahead of a fault, or down a mispredicted path.
The pre-cache removes the trace instead of the speculation. Every line brought
in for a load that has not committed yet goes into a small buffer next to the
L1 cache, and not into L1 or L2. The line moves into the real caches only when
the load commits. If the load is squashed, the line is thrown away. The caches
then hold data only from instructions that were architecturally executed.
Out-of-order and speculative execution keep running at full speed. A
speculative load still gets its data, and later loads to the same line hit in
the buffer.

This repository holds synthesizable SystemVerilog for the memory side of one
core built this way:

- the data pre-cache;
- the L1 data cache and the private L2;
- the L2 pre-cache directory;
- the L2 prefetch buffer;
- an L1 instruction cache with its instruction pre-cache;
- a TLB pre-cache.

It also holds a self-checking testbench for every block and one for the
whole core. The core pipeline, the shared L3 with the coherence protocol,
DRAM, the hardware prefetcher and the TLB are not included. They attach
through ports, and the testbenches model them.

## The data pre-cache and a load's path

`pre_cache` is a fully associative array of 32 lines of 64 bytes, 2 KB in all.
That is one line per load-queue entry. It is searched at the same time as L1, and a hit in
either returns data after the L1 latency of 4 cycles. A load that misses
both goes to L2 (10 more cycles) and then below L2. The line that comes back
is written only into the pre-cache. L1 and L2 are not touched: no
allocation, no replacement, no LRU update.

Each pre-cache entry has these fields:

| field | meaning |
|---|---|
| valid | entry in use |
| key | line address |
| data | the 64-byte line |
| level | where the load found the line: 0 = L1, 1 = L2, 2 = L3, 3 = memory |
| lock | set while a store-to-cache for this line is in progress |

A fill for a line that is already held is dropped. A fill into a full buffer
is refused. The load still receives its data, but the line is kept nowhere.
Nothing is lost, because the line has not entered any cache.

## Store-to-cache (STC): what happens at commit

When a load commits, `cm_*` presents its line address. If the line is in the
pre-cache, the entry is locked. Its data and hit level start a
*store-to-cache*, which copies the line into every level that missed during
the load:

| hit level | STC goes below L2? | L2 written | L1 written |
|---|---|---|---|
| L1 | no | no | no (only frees the entry) |
| L2 | no | no | yes |
| L3 | yes | yes | yes |
| memory | yes | yes | yes |

The STC starts at the level where the load hit, one level lower than the
last level that missed. There it must remove the line's entry from that
level's pre-cache directory (next section). In `precache_top` the STC has
up to four steps:

1. `S_STC_MREQ` / `S_STC_MWAIT` run only if the line came from below L2. An
   `MREQ_STC` request goes down. The shared levels take their locks there,
   drop their directory entry and make the coherence update. Coherence state
   changes only now, not when the speculative load was served. They may
   answer `mem_resp_abort`.
2. `S_STC_L2`: the L2 directory entry is removed. The prefetch buffer is told
   that the load committed. If the line came from below L2, it is written
   into L2.
3. `S_STC_L1`: the line is written into L1 and the pre-cache entry is freed.

Several commits to one line that is still locked share the STC already
running. The pre-cache reports this case as `cm_coalesced`.

**Aborts.** An STC can meet an invalidation for its line while it is still
acquiring locks: while it waits for the lower levels. The invalidation can
come from another core's store or from an eviction below. The STC is then
aborted. Nothing is written, and the pre-cache entry is dropped. A committed
store to the line aborts a pending STC in the same way, because the STC
data would be stale. Once the lower levels have answered, the two write
steps take one cycle each. Invalidations are held off during those cycles
(`ext_inv_ready` low), so an STC is never aborted halfway through writing.

## Pre-cache directories and inclusion

The cache hierarchy is inclusive: L2 holds everything that L1 holds. Suppose
a load found its line in L2, and L2 evicts the line before the load's STC
reaches L1. The STC would then put a line into L1 that L2 no longer has.
To prevent this, each level keeps a *pre-cache directory* (`precache_dir`).
It lists the lines that the pre-cache received from this level or from
below. The directories are inclusive upwards, the reverse of the caches.

Here there is one directory beside L2, with 32 entries:

- A load served by L2, by the prefetch buffer or from below records its
  line.
- Every L2 eviction, and every invalidation arriving from below, probes the
  directory. On a hit the pre-cache copy is invalidated and the entry is
  removed. If the pre-cache copy was locked by an STC, that STC is aborted.
- An STC passing L2 removes the entry.
- Directory entry i shadows pre-cache entry i. A squash clears exactly the
  directory entries whose pre-cache entries it clears, so a line being
  completed by an STC (locked) keeps its entry until that STC removes it.

An L2 eviction also back-invalidates L1, as any inclusive hierarchy does.

## Squash

`squash` has priority over every other request. In one cycle it:

- clears every pre-cache entry that belongs to a squashed load and is not
  locked by an STC (committed data is never discarded);
- kills the in-flight load if it is squashed; its data is neither returned
  nor buffered when it arrives;
- clears the matching L2 directory entries;
- drops every prefetch-buffer entry whose triggering load has not committed;
- is passed below on `squash_out`.

## Stores

A committed store follows these steps:

1. It removes its line from the pre-cache, aborting a pending STC of the line.
2. It removes the line from the L2 directory.
3. It writes its 64-bit word into L1 and L2, where the line is present.
4. It is written through below.

The data caches are write-through and do not allocate on a write, so a
store never brings a line in.

## Prefetch buffer

A hardware prefetcher leaves traces of its own. A prefetch triggered by a
squashed load would otherwise put a line into L2. `prefetch_buffer` is a
16-entry buffer beside L2. Each entry records four things:

- the line of the triggering load;
- the prefetched line and its data;
- a *filled* bit;
- a *commit* bit.

It works as follows:

- Prefetches (`pf_*`) allocate an entry, and the data returned from below
  fills it.
- When the trigger load's STC passes L2, the commit bit is set, and the
  filled line is moved into L2 one entry per cycle.
- Data arriving after the commit goes to L2 directly.
- A squash drops entries whose commit bit is clear.
- Loads that miss L2 may read a filled entry. That line then goes to the
  pre-cache, tagged as coming from below L2, so its own STC will write L2.
- Duplicate prefetches are refused, as are prefetches into a full buffer.

The prefetch algorithm itself is outside: the top only has its request port.

## Instruction pre-cache

The same attack works through instruction fetch. An indirect jump whose
target depends on a secret fetches a secret-dependent line into the
I-cache. `ipre_cache` keeps such lines out of the I-cache.

From the decode of an indirect jump until it resolves, fetched lines that
miss the I-cache fill the instruction pre-cache instead. `spec_mode` tells
the fetch unit which way to fill. The 28 blocks are kept in fetch order in a
circular array. Fetch can hit in them, through `if_from_ipc` at the top.

Indirect jumps can follow each other before the first one commits. To
release exactly the blocks that belong to one jump, the block keeps three
things:

- a counter of blocks filled since the youngest decoded indirect jump;
- a circular queue of up to 448 eight-bit counts: when another indirect jump
  is decoded, the counter is pushed into the queue and restarts;
- a head index pointing at the oldest unreleased block.

When the oldest jump commits, the next count is popped. If the jump's basic
block is still the youngest, the live counter is used instead. That many
blocks are copied from the head into the I-cache, one per cycle, and the
head advances. A mispredicted jump clears the blocks, the queue and the
counter. Lines fetched while no indirect jump is outstanding go straight to
the I-cache.

## TLB pre-cache

`tlb_pre_cache` applies the same rule to address translations. A page walk
done for an uncommitted instruction leaves its translation here, not in the
TLB, and lookups search it beside the TLB. When an instruction using that
page commits (`tcm_*`), the translation is written into the TLB one cycle
later (`tlb_wr_*`) and the entry is freed. A squash clears the rest; the
TLB side carries no sequence numbers. The storage is a `pre_cache` instance with 32 entries, keyed by the 20-bit
virtual page number (4 KB pages) and holding the 20-bit physical page
number.

## Cache arrays

`sa_cache` is one set-associative array with true-LRU replacement. It is
used three times:

| instance | size | organisation |
|---|---|---|
| L1 data cache | 32 KB | 128 sets x 4 ways |
| L1 instruction cache | 32 KB | 128 sets x 4 ways |
| L2 | 2 MB | 4096 sets x 8 ways |

All lines are 64 bytes. The array looks up combinationally. In one cycle it
does one of these operations, in this priority:

1. invalidate;
2. line write, which reports the valid line it displaces in the same cycle;
3. word write;
4. LRU touch.

The latencies are counted by the control in the top. Valid bits, tags, ages
and data are arrays read by set index and written one set per cycle, so
they map onto RAMs. After reset each array clears itself one set per cycle,
and `ready` stays low for `SETS` cycles. The top accepts no request until
all three arrays are ready, which takes 4096 cycles at the default L2 size.

## Top level: `precache_top`

**Data side.** The data side runs one operation at a time, in the priority
squash, commit, store, prefetch-buffer transfer, load. Its ports are:

- `ld_*`, `cm_*`, `st_*`: loads, commits and stores. Each request is a
  valid/ready handshake. `ld_resp_*` is a one-cycle pulse carrying the
  64-bit word and where it came from (`SRC_PRECACHE`, `SRC_L1`, `SRC_BELOW`).
- `ld_seq`, `squash_seq`: load sequence numbers, 6 bits for a 32-entry load
  queue plus a wrap bit, compared modulo 64. `squash` with `squash_seq`
  squashes that load and every younger one.
- `mem_*`: the port to the shared levels. Requests are `MREQ_LOAD` (must not
  change coherence state), `MREQ_STC` (take locks, update coherence, may
  answer abort) and `MREQ_STORE`. A response carries the line and the level
  that held it.
- `ext_inv_*`: invalidations from the shared levels.
- `pf_*` / `pf_mem_*`: prefetch requests and their data.

**Instruction side.** `if_*` carries fetch lookups and fills. `ijump_dec`,
`ijump_commit` and `mispredict` are one-cycle pulses from the pipeline.

**TLB side.** The ports are `tlb_lk_vaddr`/`tpc_*` for lookups, `walk_*`
for page-walk results, `tcm_*` for commits and `tlb_wr_*` for TLB writes.

**Events.** `events` (type `mem_events_t`) raises one bit in every cycle
that a mechanism acts. The mechanisms are:

- hits in the pre-cache, L1, L2 and the prefetch buffer;
- loads sent below L2;
- a refused fill;
- STC start, done and abort;
- directory invalidation;
- L2 eviction;
- squash kill and squash clear;
- prefetch-buffer transfer;
- store.

Load latency, counted from the cycle the load is accepted to the response,
is:

- 4 cycles on an L1 or pre-cache hit;
- 14 cycles on an L2 or prefetch-buffer hit;
- 14 cycles plus the lower port's delay otherwise.

## Parameters

All defaults are the sizes of the evaluated design:

| parameter | default | what it is |
|---|---|---|
| `PC_ENTRIES` | 32 | data pre-cache lines (= load-queue entries) |
| `L1_SETS`, `L1_WAYS` | 128, 4 | 32 KB L1 data and instruction caches |
| `L1_LAT` | 4 | L1 and pre-cache latency |
| `L2_SETS`, `L2_WAYS` | 4096, 8 | 2 MB L2 |
| `L2_LAT` | 10 | L2 latency |
| `PB_ENTRIES` | 16 | prefetch-buffer entries (stream buffers are usually 1 to 16 lines) |
| `IPC_BLOCKS` | 28 | instruction pre-cache blocks |
| `IPC_QDEPTH` | 448 | basic-block count queue (8-bit counts) |
| `TPC_ENTRIES` | 32 | TLB pre-cache entries |

The lines are 64 bytes and physical addresses are 32 bits (`precache_pkg`).

## Where this RTL departs from the described design

- **One request at a time.** The evaluated core overlaps many loads and
  STCs, and loads never wait for STCs. Here the data side runs one
  operation at a time. Latencies per access are the same, but throughput is
  not modelled.
- **One port per array.** The evaluated caches have 2 ports (L1) and 4 (L2).
- **Private levels only.** The shared L3 (8 MB, 16-way, 40 cycles), its
  pre-cache directory, the coherence protocol and memory are outside the
  RTL. The lower port defines what they must do: serve a speculative load
  without changing coherence state, take locks and update coherence on an
  STC, abort an STC invalidated during lock acquisition, and clear their
  directories on `squash_out`. The testbench model returns level L3 for
  lines that an earlier STC placed there, and level memory otherwise.
- **No coherence state in L1/L2.** Lines carry no MESI bits. The coherence
  update at STC time happens below, and invalidations arrive on
  `ext_inv_*`.
- **Write-through data caches with no write allocate.** This is this
  design's own choice. The evaluated design does not specify the write
  policy of the private levels.
- **Line ownership.** A pre-cache line belongs to the oldest load that used
  it. A younger load that hits the line does not take it over, so squashing
  that younger load leaves the line in place. Sharing of one line by several
  loads is not otherwise tracked.
- **Prefetch buffer squash.** The buffer does not keep load sequence
  numbers. A squash drops every entry whose triggering load has not
  committed, including triggers from older, surviving loads.
- **Prefetch buffer only at L2.** The described scheme puts a buffer at
  every level.
- **Instruction pre-cache.** Its block counter lives inside `ipre_cache`
  rather than in the decode stage. It counts filled blocks, which are the
  blocks that the instruction pre-cache actually holds.
- **Not built:**
  - the return-stack-buffer pre-cache, which is only named;
  - holding invalidations of speculative stores until commit. That variant
    is offered for a store design that invalidates at issue; here stores
    act only after commit.
  - the instruction pre-cache directories.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends by
printing `TB_RESULT checks=<n> failures=<n>` and has a watchdog. Each one
compares the block with an independent model in the testbench: queues of
keys for LRU, associative arrays for buffered lines, and a reference count
queue for the instruction pre-cache. Each one runs directed cases first and
then thousands of random operations.

| testbench | what it checks |
|---|---|
| `tb_pre_cache` | fill, lookup, lock and coalescing, done, invalidation of locked entries, squash by sequence number keeping older and locked lines, full buffer |
| `tb_precache_dir` | insert, remove, probe-and-remove, clear by a random mask, full directory |
| `tb_sa_cache` | reset sweep time, LRU victim choice, eviction reports, word writes, invalidation |
| `tb_prefetch_buffer` | commit bit, early and late data, transfer order, squash keeping committed entries, duplicates, full buffer |
| `tb_ipre_cache` | counts across back-to-back indirect jumps, release amounts, misprediction clear, full buffer |
| `tb_tlb_pre_cache` | walk fill, lookup, commit transfer one cycle later, squash |
| `tb_precache_top` | the whole core at default sizes, with the lower levels modelled by `lower_mem_model` |

`tb_precache_top` checks load latencies (4 and 14 cycles) and every data
word against a memory image. It runs these scenarios:

- a Meltdown/Spectre sequence: a transient load is squashed and its line is
  not in L1 or L2 afterwards;
- a Spectre training loop: 100 committed loads over a probe array with a
  4 KB stride, then one transient load;
- hit levels;
- the L2-eviction inclusion case;
- invalidations;
- STC aborts, from below and by an invalidation;
- stores;
- the prefetch buffer;
- squash of an in-flight load, and a full pre-cache;
- an ordered squash: the lines of older loads survive, younger ones go;
- the instruction pre-cache across two indirect jumps and a misprediction;
- the TLB pre-cache;
- a random mix of operations.

It counts each mechanism through `events` and fails if any of them never
happened.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb --top tb_precache_top \
    rtl/precache_pkg.sv tb/tb_precache_top.sv -Mdir obj_top
./obj_top/Vtb_precache_top
```

Change the top name for the other testbenches. `tb_precache_top` leaves
every parameter at its default and finishes in well under a second.

## Files

- `rtl/precache_pkg.sv`: shared widths, line and level types, request and
  event types.
- `rtl/pre_cache.sv`: data pre-cache. It is also the storage of the TLB
  pre-cache.
- `rtl/precache_dir.sv`: pre-cache directory.
- `rtl/sa_cache.sv`: set-associative LRU array for L1D, L1I and L2.
- `rtl/prefetch_buffer.sv`: L2 prefetch buffer.
- `rtl/ipre_cache.sv`: instruction pre-cache.
- `rtl/tlb_pre_cache.sv`: TLB pre-cache.
- `rtl/precache_top.sv`: one core's memory side.
- `tb/tb_*.sv`: testbenches.
- `tb/lower_mem_model.sv`: behavioural model of L3, its directories and
  memory.
