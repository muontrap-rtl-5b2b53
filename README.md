# MuonTrap capture layer: speculative filter caches in SystemVerilog

Spectre-style attacks work because a speculatively executed load leaves a
trace even after it is squashed. It brings a line into a cache, trains a
prefetcher or changes another core's coherence state, and a later timing
measurement can read that trace. MuonTrap stops the trace at the edge of the
core. Every speculative memory access lands in a tiny L0 *filter cache* (one
for data and one for instructions per core) and in a *filter TLB*. Nothing
speculative moves into the L1, the L2, the TLB or the prefetcher until an
instruction that used it commits. Whenever the core changes protection
domain, the filter structures are thrown away in a single cycle. Within one
domain the core still speculates freely and gets a 1-cycle L0 hit. Across
domains, speculation that never committed leaves no trace.

This repository holds synthesizable RTL for that layer. It covers four
cores' filter caches, filter TLBs, TLBs and flush logic, plus the shared
coherence gate and the commit-trained L2 stride prefetcher. The cores, L1
caches, L2 and page-table walker are conventional parts and are not included.
Their sides of the connections are ports of `muontrap_top`.

## The life of a filter-cache line

A filter-cache line is in one of three conditions:

| condition | meaning | visible outside the core? |
|---|---|---|
| invalid | valid bit clear | no |
| uncommitted | filled by a speculative access | no |
| committed | an instruction that used it has committed | yes, it has been written to the L1 |

1. **Fill.** A load or fetch that misses takes an MSHR and asks the next
   level for the line. The fill goes into the L0 only. The L1 does not
   allocate it, and it does not become inclusive or exclusive of the L1.
   The line records three things:
   - its virtual line address, for CPU-side lookups;
   - its physical line address, for snoops and write-through;
   - the level that supplied it (L1, L2 or memory).

   If the request was non-speculative, the line is committed immediately.
2. **Hit.** A load that hits answers one cycle after it is accepted.
3. **Commit.** The core sends `FC_COMMIT` when a load or fetch commits, and
   `FC_STORE` when a store commits. If the line is still uncommitted:
   - its committed bit is set;
   - the whole line is written through to the L1 (`wt` port);
   - a prefetch notification is sent, if the line came from a level that
     has a prefetcher;
   - on the data side, an SE line (see below) launches an upgrade.

   A store merges its bytes, always writes through and always requests an
   upgrade. A second commit to an already committed line does nothing more.
4. **Commit after eviction.** The line may have left the L0 before its
   instruction commits. The commit then sends a write-through with
   `refetch = 1` and no data. That tells the L1 to fetch the line itself,
   which is what an in-order machine would have done.
5. **Flush.** The valid bits are flip-flops held apart from the data and tag
   arrays, so `flush` clears all of them on one clock edge. The cache is
   write-through, so nothing is ever lost by discarding lines. Misses still
   outstanding at the flush are squashed. Their fills are neither installed
   nor answered, so pre-flush data cannot appear after the clear.

Indexing uses the line-address bits below the 4 KiB page offset. The 8 sets
of the 2 KiB, 4-way cache use bits [8:6], which are equal in the virtual and
the physical address. The CPU therefore looks up by virtual address with no
translation on the hit path, and snoops invalidate by physical address.

A fill first replaces any way that already holds the same physical line.
This way one physical line never has two virtual aliases in the L0. If there
is no alias, it takes an invalid way, and otherwise the set's round-robin
victim.

## Coherence without speculative side effects

Only the data filter caches take part in coherence. Their misses and
upgrades all pass through `spec_coherence_ctrl`. For each request it reads
the MESI state of the line in every core's private L1, using the
`dir_paddr`/`dir_state` lookup port in the same cycle. It then applies
these rules:

| request | other L1s hold the line | result |
|---|---|---|
| speculative miss | M or E somewhere | **NACK**: nothing is forwarded; the core retries once the access is non-speculative |
| non-speculative miss | M or E somewhere | forwarded, with `mem_downgrade` naming the owners that must drop to S; granted S |
| any miss | only in S | forwarded, granted S |
| any miss | nowhere (the requester's own L1 may hold it) | forwarded, granted **SE** |
| upgrade | line already E/M in the requester's own L1 | nothing further |
| upgrade | otherwise | invalidate **every** other data filter cache (`snoop_valid`), and forward with `mem_inv` |

A filter cache only ever holds S. SE is a pseudo-state that behaves exactly
like S. It only records that an unprotected system would have taken the
line in E. When an SE line commits, the filter cache launches an
asynchronous upgrade, so the program still gets E for lines that nobody
shares.

A speculative access can never change another core's L1 state:
- an access that would downgrade another core is refused with a NACK;
- an upgrade is only ever issued at commit.

The invalidate broadcast goes to all other filter caches, whatever they hold.
Its cost therefore reveals nothing about their contents. A non-speculative
request is never refused, which guarantees forward progress. An assertion
inside the block checks this.

The gate serves one request per cycle. Cores are chosen round-robin, and a
core's upgrade goes before its miss. A NACK answers on the core's fill port
in the same cycle. A granted request goes out through a one-entry register
on `mem_*`. The S/SE grant is stored per core and MSHR, and is attached
when the shared level answers on `mresp_*`. No new request is taken in a
cycle that delivers a response, so the two never meet on a fill port.

## Prefetch commit channel

A prefetcher trained on speculative addresses would carry speculation into
the L2. Here the prefetcher instead sees the *committed* stream. A filter
cache raises `pf_valid` with the line address and source level when a line
first commits. `PF_LEVELS` selects which levels have a prefetcher; by
default only the L2 does. The top forwards only notifications for lines
that came from the L2 to the shared `commit_prefetcher`.

The prefetcher works as follows:
- It takes one notification per cycle, chosen round-robin over the eight
  filter caches. Others in the same cycle are dropped and counted on
  `evt_drop`.
- It tracks up to 16 streams, keyed by 4 KiB physical page. Each stream
  keeps its last line and last stride.
- When the same stride is seen twice in a row, it asks the L2 to prefetch
  the line one stride ahead, within the page.
- `l2_pf_valid` pulses two cycles after the notification.

## Translations: filter TLB, TLB and re-walk

Each core has an instruction side and a data side (index `2*core` and
`2*core+1` of the `tr_*`/`walk_*`/`tcm_*` ports). Each side has an 8-entry
fully associative `filter_tlb` next to a 64-entry, ASID-tagged `tlb`. A
lookup (`tr_vpn`) checks both at once and is combinational.

- A walk result from a **speculative** walk goes into the filter TLB only,
  so it cannot evict an entry of the real TLB.
- A **non-speculative** walk result goes straight into the TLB.
- When an instruction that used a speculative translation commits
  (`tcm_*`), two things happen:
  - the entry is moved from the filter TLB into the TLB;
  - a non-speculative re-walk is requested (`rewalk_*`). The walker's own
    memory accesses went through the filter cache, and the re-walk commits
    them into the L1.
- A move and a non-speculative walk may arrive in the same cycle. The move
  wins, and `walk_ready` holds the walk back.

The filter TLB is cleared by the same flush as the filter caches. The TLB
keeps its entries across context switches, because they are ASID-tagged and
committed. `tlb_flush_all` clears it explicitly.

## When the layer is cleared

`flush_ctrl` raises a core's `flush` (combinational, so the clear happens on
that clock edge) on any of:
- a context switch;
- kernel entry;
- kernel exit;
- a flush instruction run when execution moves between isolated regions of
  one process (for example untrusted script code and its host);
- a misspeculation, if the running process asked for clear-on-misspeculate.
  The option is loaded with each context switch (`ctx_clear_on_misspec`),
  and is off by default.

One flush clears both filter caches and both filter TLBs of that core.

## Block structure

```
muontrap_top
├── per core c (g_core[c])
│   ├── flush_ctrl            u_flush
│   ├── filter_cache          u_fdcache   COHERENT=1, misses via the coherence gate
│   ├── filter_cache          u_ficache   COHERENT=0, misses to the l1i_* ports
│   └── per side s (g_side)   s=0 instructions, s=1 data
│       ├── filter_tlb        u_ftlb
│       └── tlb               u_tlb
├── spec_coherence_ctrl       u_coh       shared by all data filter caches
└── commit_prefetcher         u_l2pf      shared L2 stride prefetcher
```

`muontrap_pkg` holds the shared types. Requests (`fc_req_t`) carry the
operation, a speculative flag, the virtual and physical addresses, a 6-bit
load/store-queue tag, and a store word with its byte mask. Other structs:
- `fc_resp_t`: answers;
- `fc_wt_t`: write-throughs;
- `fc_fill_t`: fills, each carrying line data, source level, S/SE grant and
  NACK;
- `xlate_t`: translations.

All ports use valid/ready handshakes, apart from snoops, prefetch
notifications and the event pulses. A producer holds its valid signal and
payload until the consumer accepts them. Assertions in the filter cache and
the coherence gate check this.

The top port groups are:

| group | towards | content |
|---|---|---|
| `d_*`, `i_*` | core | data loads/commits/stores, instruction fetches/commits |
| `ctx_switch`, `kernel_*`, `region_flush`, `misspec`, `ctx_clear_on_misspec`, `asid` | core | domain events |
| `l1d_wt_*` | L1D | write-through and refetch requests |
| `l1i_*` | L1I | instruction misses, fills, write-through |
| `dir_paddr`, `dir_state` | L1Ds | MESI lookup used by the coherence gate |
| `mem_*`, `mresp_*` | shared level | data misses and upgrades, with downgrade/invalidate masks; responses |
| `tr_*`, `walk_*`, `tcm_*`, `rewalk_*`, `tlb_flush_all` | core / walker | translation |
| `l2_pf_*` | L2 | prefetches to perform |
| `evt_*` | observation | NACK, broadcast, downgrade, dropped notification |

## Timing summary

| operation | latency |
|---|---|
| filter-cache load hit | answer 1 cycle after acceptance |
| filter-cache miss | answer 1 cycle after the fill is accepted |
| NACK | fill port in the acceptance cycle; load answer (`nack=1`) the cycle after |
| flush | all valid bits clear on the next edge |
| invalidate broadcast | reaches the filter caches 1 cycle after the upgrade is accepted |
| TLB / filter-TLB lookup | combinational |
| filter TLB → TLB move | 1 cycle after the commit |
| prefetch | 2 cycles after the notification |

A filter cache accepts one operation per cycle. It stalls
(`req_ready = 0`) in these cases:
- a write-through or upgrade is waiting;
- a fill is arriving;
- a load misses while all four MSHRs are busy;
- a flush is in progress.

## Sizes

| parameter | default | origin |
|---|---|---|
| cores | 4 | evaluated system |
| data / instruction filter cache | 2 KiB, 4 ways, 64 B lines (8 sets), 4 MSHRs | evaluated system |
| TLB | 64 entries, fully associative, one per side | evaluated system (read as 64 per side) |
| filter TLB | 8 entries, fully associative | this design |
| prefetcher streams | 16 | this design |
| virtual / physical address | 48 / 40 bits | this design |
| page | 4 KiB | this design |
| ASID | 16 bits | this design |
| LSQ tag | 6 bits (32-entry LQ + 32-entry SQ) | sized for the evaluated core |

All sizes are parameters of `muontrap_top`: `NCORES`, `FC_SIZE`, `FC_WAYS`,
`FC_MSHRS`, `FTLB_ENTRIES`, `TLB_ENTRIES` and `PF_STREAMS`. The address
widths are in the package.

## Where this RTL goes beyond or departs from the description

- All handshakes and encodings are this design's own. That covers
  valid/ready, MSHR tags, the refetch flag, the level encoding and the
  same-cycle L1 state lookup.
- The prefetcher's organisation is this design's own: per-page streams, a
  trigger when a stride repeats, degree 1, and no back-pressure, so
  notifications can be dropped. So are the filter TLB's size and all
  replacement policies (round-robin).
- The filter TLB drops an entry once it has been moved to the TLB.
- Misses to a line that is already outstanding are not merged. Each takes
  its own MSHR and both fills land in the same way.
- The write-through carries a whole line (or a refetch), plus the
  committing store's word. How the L1 merges it is up to the L1.
- A store is presented to the filter cache only when it commits. To bring
  a speculative store's line in early (in S), the core issues a load to it.
- Simultaneous multithreading is not modelled: each core has one context.
- Not built:
  - the variant that accesses the L0 and L1 in parallel;
  - an unprotected L0;
  - the cores, L1s, L2, DRAM and page-table walker.
- `clear_on_misspec` of each flush controller stays internal and is not a
  top port.

## Simulating

Every testbench checks itself and ends with a line of the form
`TB_RESULT checks=N failures=M`. Each has a watchdog that fails it if it
hangs.

| testbench | device under test | what it covers |
|---|---|---|
| `tb_filter_cache` | `filter_cache` (data side) | hits and misses, committed bit, write-through once, stores, SE upgrade, refetch after eviction, aliasing, snoops, flush with squash, MSHR stall, prefetch notification by level |
| `tb_ifilter_cache` | `filter_cache` with `COHERENT=0` | fetch path: no upgrades or SE |
| `tb_spec_coherence_ctrl` | `spec_coherence_ctrl` | every row of the coherence table, round-robin, response blocking |
| `tb_filter_tlb` | `filter_tlb` (4 entries) | speculative fills, move and re-walk at commit, flush, replacement |
| `tb_tlb` | `tlb` (64 entries) | ASID matching, replacement over all 64 entries, flush |
| `tb_flush_ctrl` | `flush_ctrl` | each flush cause, per-process misspeculation option |
| `tb_commit_prefetcher` | `commit_prefetcher` (4 sources, 4 streams) | stride detection, stride change, page limit, separate pages, arbitration and drops |
| `tb_muontrap_top` | `muontrap_top` at default sizes | end to end; every mechanism above must happen at least once |
| `tb_muontrap_stress` | `muontrap_top` at default sizes | four cores run random loads, commits, stores and flushes over ten shared, colliding lines; checks load data, no NACK of non-speculative accesses, no write-through or upgrade of a line that only speculation touched, and no deadlock |

The top-level testbench models the outside world behaviourally. It plays:
- four cores;
- MESI L1 data caches, updated by write-throughs, downgrades, upgrades and
  invalidates;
- a shared level with a fixed 6-cycle latency;
- instruction L1s with a 3-cycle latency;
- a page-table walker.

It counts each mechanism and fails any count that stays at zero: NACK,
non-speculative downgrade, upgrade, broadcast, refetch, L2 prefetch, MSHR
stall, re-walk, instruction write-through, and a flush on every core.

With Verilator 5:

```sh
# one block
verilator --binary --timing --assert \
  rtl/muontrap_pkg.sv rtl/filter_cache.sv tb/tb_filter_cache.sv \
  --top-module tb_filter_cache
./obj_dir/Vtb_filter_cache +verilator+rand+reset+2

# the whole layer, at its default sizes (about a minute to build)
verilator --binary --timing --assert rtl/muontrap_pkg.sv \
  rtl/filter_cache.sv rtl/filter_tlb.sv rtl/tlb.sv rtl/flush_ctrl.sv \
  rtl/spec_coherence_ctrl.sv rtl/commit_prefetcher.sv rtl/muontrap_top.sv \
  tb/tb_muontrap_top.sv --top-module tb_muontrap_top
./obj_dir/Vtb_muontrap_top +verilator+rand+reset+2
```

The stress test builds the same way, with `tb/tb_muontrap_stress.sv` and
`--top-module tb_muontrap_stress` in place of the directed test; a different
`+verilator+seed+N` gives a different random sequence.

`+verilator+rand+reset+2` starts every register that is not reset at a
random value. All state that is read is reset, so the results do not depend
on it.

## How far to trust it

- Each block has been simulated against expectations written independently
  of the RTL. Each block test has also been shown to fail when its block is
  deliberately broken.
- The directed end-to-end test runs one scenario at full size. The stress
  test adds random contention by four cores on a few lines (about 1,200
  operations, over a hundred NACKs, downgrades, broadcasts and refetches
  per run). Stores in it rewrite the value a line already holds, so it
  does not check that a stale copy is never read after an invalidate.
- The surrounding caches are behavioural stand-ins. The exact meaning of
  `mem_downgrade`, `mem_inv` and `refetch` on the L1/L2 side is a contract
  that a real L1 and L2 would have to implement.
