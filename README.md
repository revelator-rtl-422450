# Hash-placed pages, fetched before the page walk ends

A page walk on an L2 TLB miss costs tens of cycles, and the data load waits for it. This
design removes most of that wait. It works by making the physical location of a page
something the hardware can recompute.

The operating system places each 4 KB page at one of a few frames picked by a keyed hash of
the virtual page number:

    PPN_i = CityHash(VPN, key, seed_i),   i = 1..N   (N = 3)

The OS tries these frames in order, one per *tier*. Only when all of them are taken does it
use its normal allocator. The last-level page-table frame for a 2 MB region is placed the
same way at `CityHash(VPN >> 9, key, seed_1)`.

On a miss, the engine in this repository runs the same hash in hardware. It then sends
early reads for:

- the candidate page-table line, while the walk is still at its upper levels;
- the candidate data lines.

When the walk returns the true frame, any early data line that was wrong is invalidated.

The RTL is SystemVerilog. It is written for Verilator and Yosys (slang front end).

## Blocks

| File | Role |
|---|---|
| `rtl/revelator_pkg.sv` | Widths (48-bit VA, 37-bit PA = 128 GB, 4 KB pages, 64 B lines), request and statistics types, CityHash constants |
| `rtl/city_hash.sv` | CityHash64 of a 24-byte message in two pipeline stages |
| `rtl/utilization_monitor.sv` | Per-tier allocation counters; marks tiers whose share is too small |
| `rtl/bandwidth_monitor.sv` | Turns memory contention into an allowed speculation degree 0..4 |
| `rtl/degree_filter.sv` | Combines the two monitors into the set of tiers to fetch |
| `rtl/spec_log.sv` | Per-walker log of speculative lines; invalidates the wrong ones after the walk |
| `rtl/numa_residency.sv` | Per-node residency counters, dominant node, 0.8 test |
| `rtl/hint_walker.sv` | Looks up the NUMA hint table of Bloom filters |
| `rtl/revelator_engine.sv` | Top level: sequencing, address formation, issue, statistics |

Some parts belong to the surrounding system, not to this engine:

- the OS allocator;
- the TLBs;
- the page-table walker;
- the caches and DRAM.

The engine meets them at its ports.

## One miss, cycle by cycle

1. **Accept (cycle 0).** A request is taken when the engine is idle and the walker's log is
   free. A walker's log is busy while it still has invalidations to send.
2. **Hash (cycles 1–2).** Four `city_hash` units run in parallel:
   - three tier units hash `(VPN, key, i)`;
   - one unit hashes `(VPN >> 9, key, 1)` for the page-table frame.

   Each unit has a two-cycle pipeline.
3. **Issue (cycle 3 onward).** Requests leave one per cycle on a valid/ready port, in this
   order:
   - the candidate PTE line `{frame, VPN[8:0], 000}`;
   - each data line the degree filter allows, `{frame_i, page offset}`, in tier order.

   The first request appears three cycles after acceptance. The next miss can be accepted
   in the cycle after the last request leaves.
4. **Resolve.** The walker reports the true PPN on `res_*`. Every logged data line on
   another page is queued for invalidation. A line on the true page counts as a correct
   speculation.

Each request is tagged with a kind: data, PTE, nested PTE, or hint data. The memory side
uses the tag to put speculative data only into the private L2.

### Forming a candidate address

The hash gives 64 bits, and a frame number needs 25. The node number takes the top 3 bits
of the PPN, and the low 22 bits of the hash become the frame inside the node. A page is
therefore always placed in the node the OS chose, and the hash only picks where inside it.

The hash message is three 64-bit little-endian words: page number, key, seed. The seed is
simply `i` for tier `i`.

## The speculation degree filter

This part decides how many of the N candidates become real memory requests. It has two
inputs.

**Allocation shares.** The OS reports the tier of every page it places. Tier 0 means the
normal allocator. The utilization monitor counts these reports. A tier stays eligible
while

    count_i * 256 >= 26 * total        (about 10 % of all allocations)

so no divider is needed. When any counter would overflow, all counters are halved together.
The shares stay the same, and old history fades out.

With the example ratios 0.6, 0.2 and 0.05, tiers 1 and 2 stay and the last tier is dropped.

**Memory contention.** The bandwidth monitor counts the cycles on which the memory system
signals busy during an epoch of 1024 cycles. At the end of the epoch it publishes:

    level          = min(4, busy * 5 / 1024)
    allowed_degree = 4 - level

So a quiet channel allows 4 fetches, and a channel busy more than 80 % of the time allows
none. The degree holds for the whole next epoch.

**Combining them.** The filter walks the tiers in order and keeps the first
`allowed_degree` eligible ones. If tier 2 has been dropped and the degree is 2, tiers 1 and 3
are fetched.

The page-table candidate is not counted against the degree. It is a single fetch, it is
turned on and off by its own enable, and it does not depend on the tier shares.

## Cleaning up after a wrong guess

Every issued data line is recorded in its walker's log: 4 walkers, 4 slots each. Four slots
is one per possible fetch: up to 3 tiers plus 1 hint fetch.

When the walk resolves:

- the log compares the page number of each line with the true PPN in a single cycle;
- it marks the mismatches for invalidation;
- it reports, in registered flags, whether there was any speculation and whether one line
  was right.

Marked lines leave one per cycle through a valid/ready invalidation port. The lowest walker
and slot go first.

While a walker still has marked lines, it is busy. The engine refuses a new miss on that
walker, and counts each refused cycle as a stall. This back-pressure means a log can never
overflow. It also means a slow invalidation path slows translation, which shows how much
the cleanup costs.

One case needs care. The NUMA hint fetch can be issued after its walk has already resolved,
because the hint walk takes several memory reads. The log remembers the page each walker
last resolved to. A late record is compared with that page straight away:

- if it is wrong, it is queued for invalidation;
- if it is right, it is forgotten.

The engine drops a pending hint whose walk resolved before the hint request was presented.
A hint request already on the port is never withdrawn, because the port protocol requires a
presented request to stay stable.

Only data lines are logged. A speculative PTE line cannot be checked against the data PPN
the walker returns. A nested PTE line has no walk of this engine to check it against. Both
are left to the normal cache replacement.

## NUMA: dominant node and hint walk

Eight counters record which node each resolved translation landed in. The dominant node is
the one with the largest count, with ties going to the lower node number. It is *strong*
when

    C_dom * 5 >= 4 * sum(C)      (share >= 0.8)

When the dominant node is strong, candidates are formed only inside it.

When it is weak, the candidates are still formed inside it. In parallel, the hint walker
reads the hint table:

- The VPN is split into a 9-bit index `VPN[22:14]` and a 14-bit key `VPN[13:0]`.
- The index selects one of 512 64-bit entries in the table's 4 KB root frame. Entry bit 63
  is the valid bit. The low 37 bits point to a group of eight 512-bit Bloom filters, one per
  node, laid out 64 bytes apart.
- The walker reads the filter of each non-dominant node in ascending order. It tests two
  bits in each:

      h0 = bits [21:13] of key * 0x9E37
      h1 = bits [21:13] of key * 0x7A5B

  It stops at the first node where both bits are set.

If a node is found, one extra fetch of the tier-1 candidate frame inside that node is issued
and logged like any other data fetch.

A walk reads at most 8 lines: 1 entry and 7 filters. An invalid entry ends the walk after
the first read.

## Virtual machines

**Horizontal speculation.** A request of kind `MISS_NESTED` carries the guest-physical
address of a guest page-table entry that the nested walk has reached. The engine:

- hashes the guest PPN with the hypervisor key;
- forms the host line that holds the entry;
- issues one such line per allowed tier, tagged as a nested PTE.

**Diagonal speculation.** This needs no extra logic. The hypervisor places host frames by
hashing the guest virtual page with its own key. Loading that key into `cfg_proc_key` makes
ordinary data misses predict host frames directly.

Both forms can be active at the same time.

## Interfaces

All ports of `revelator_engine` are plain signals or packed structs.

| Group | Signals | Protocol |
|---|---|---|
| Configuration | `cfg_spec_en`, `cfg_pte_en`, `cfg_hint_en`, `cfg_proc_key`, `cfg_hyp_key`, `cfg_hint_root` | Static while requests are in flight |
| OS report | `os_alloc_valid`, `os_alloc_tier` | One pulse per placed page; tier 0 means the normal allocator |
| Contention | `mem_busy` | Level, sampled every cycle |
| Requests | `miss_valid/ready`, `miss_kind`, `miss_addr`, `miss_ptw` | Valid/ready |
| Resolution | `res_valid`, `res_ptw`, `res_ppn` | One-cycle pulse per resolved data walk |
| Speculative reads | `sreq_valid/ready`, `sreq {line, kind, ptw}` | Valid/ready; stays stable until taken (asserted) |
| Invalidations | `inv_valid/ready`, `inv_line` | Valid/ready |
| Hint reads | `hrd_valid/ready`, `hrd_addr`, `hrd_resp_valid`, `hrd_resp_data[511:0]` | One outstanding line read |
| Statistics | `stats` | 13 32-bit event counters |

The statistics are:

- misses and nested requests;
- stall cycles;
- tier drops and degree cuts;
- data, PTE, nested and hint fetches;
- hint walks;
- walks with speculation, and correct walks;
- invalidations.

Reset is asynchronous and active-low.

## What follows the source design and what is this design's own

These parts follow the source design:

- the tiered keyed hash with three tiers;
- the 2-cycle hash;
- the single-hash page-table frame at `H1(VPN >> 9)`;
- issuing candidates in tier order;
- a filter that first drops weak tiers and then limits the count by bandwidth, with levels
  0–4;
- a per-walker bounded log with invalidation of wrong lines;
- private-L2-only fills;
- residency counters with the 0.8 threshold;
- a Bloom-filter hint table indexed by 9 VA bits and keyed by 14 bits, with 512-bit filters;
- one extra fetch in the hinted node;
- horizontal and diagonal speculation.

These are this design's own choices:

- CityHash v1.1 on a 24-byte message;
- seed `i`;
- reducing the hash to 22 bits inside the node;
- node number in the top PPN bits;
- the 10 % drop threshold;
- the 1024-cycle epoch and the equal-width contention bands;
- halving of counters on overflow;
- one miss in flight in the engine at a time;
- the PTE line going first and not counting against the degree;
- the hint-table entry format, filter hash functions and node order;
- using the tier-1 frame for the hint fetch;
- the late-record rule;
- walker count 4;
- all port protocols.

### Left out

**Revelator+THP.** This variant first tries a hash-placed 2 MB page, which would need a
second hash path at 2 MB granularity. It is not built. The engine handles 4 KB pages only.

**The OS.** Hint-table upkeep and the software that fills the allocation reports are
operating-system work and are not built. The testbench models them.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block with a model
written separately from the block, and has a cycle-count watchdog. The CityHash reference
(`tb/city_ref_pkg.sv`) works byte by byte, as the C reference does.

`tb_revelator_engine` runs the whole engine **at its default parameters**: 3 tiers,
4 walkers, 8 nodes, 1024-cycle epochs. It surrounds the engine with:

- a model OS that places pages by the same hash, drawing occupied frames at a chosen
  utilization;
- four walkers that resolve 40–100 cycles after a miss;
- a memory that answers with random ready signals and latencies;
- a hint table kept up to date by the model OS.

It checks every request line and kind against its own filter and NUMA models, as well as:

- the 3-cycle request latency;
- every invalidation;
- the correct-speculation and invalidation counts.

It runs through eight phases:

1. low utilization, so later tiers are dropped;
2. high utilization, so fallbacks and tier-3 placements occur;
3. contention, so the degree is cut;
4. saturation, so the degree is zero;
5. held invalidations, so walkers stall;
6. NUMA spill-over, so hint walks run, including late hint fetches;
7. nested requests;
8. speculation disabled.

It fails if any of these mechanisms never happened.

A typical run makes:

- 1,619 data misses and 81 nested requests;
- 764 correct speculations;
- 2,076 invalidations;
- 326 hint fetches.

It finishes in well under a second.

`tb_utilization_sweep` also runs the whole engine at its defaults. It repeats the
memory-utilization sweep at 0, 20, 40, 60 and 80 % occupancy, with 1,200 fresh pages per
level and each frame occupied independently. The engine's count of correct walks must match
the testbench's prediction exactly, and must lie within 0.06 of the analytic coverage. That
coverage is the sum of `(1-u)u^(i-1)` over the tiers kept.

| Utilization | Coverage | Analytic | Data fetches per miss | Tiers kept |
|---|---|---|---|---|
| 0 % | 0.999 | 1.000 | 1.00 | 1 |
| 20 % | 0.955 | 0.960 | 2.00 | 1, 2 |
| 40 % | 0.869 | 0.840 | 2.21 | 1, 2 (3 near the threshold) |
| 60 % | 0.798 | 0.784 | 2.97 | 1, 2, 3 |
| 80 % | 0.488 | 0.488 | 2.97 | 1, 2, 3 |

Without the filter every miss would cost 3 data fetches.

`tb_numa_spillover` runs the engine at its defaults on a NUMA spill-over study. It uses 800
fresh pages per point, with hints off and on. A page stays in home node 2, or with
probability s goes to one of the other seven nodes. The engine's count of correct walks must
match the count the testbench finds by matching each speculative request against the true
frame.

| Spill s | Coverage, hints off | Coverage, hints on | Hint walks per miss |
|---|---|---|---|
| 0 % | 0.999 | 0.999 | 0.00 |
| 10 % | 0.895 | 0.915 | 0.01 (warm-up only; the home node is strong) |
| 30 % | 0.700 | 0.938 | 0.89 |
| 50 % | 0.517 | 0.899 | 0.88 |

Hints do not recover every spilled page, for two reasons:

- only one hint walk runs at a time, so a miss that arrives during another walk goes
  without one;
- a hint fetch that arrives after its page walk has already resolved no longer helps.

`tb_virtualized` runs the engine at its defaults in the four virtualized configurations:
nested paging without speculation, Horizontal, Diagonal and Full. Each configuration makes
400 guest misses at 20 % host utilization. A guest miss makes four nested requests, one
for each guest page-table level, or one data miss, or both. The testbench checks that:

- the engine's nested and data fetch counts match the testbench's own filter model exactly;
- each fetch lies at a hash candidate of its page;
- nothing is fetched when speculation is off.

| Configuration | Nested steps covered | Data misses covered | Fetches per guest miss |
|---|---|---|---|
| Nested paging | — | — | 0 |
| Horizontal | 1.000 | — | 8.0 |
| Diagonal | — | 0.958 | 2.0 |
| Full | 1.000 | 0.968 | 10.0 |

The guest table pages are shared by neighbouring pages. As a result, the nested steps touch
only a few distinct pages, and their coverage depends on the tiers those pages took. In
this run all of them landed in kept tiers; other seeds give 0.76. That is why the testbench
checks nested coverage exactly against its own filter model rather than against an analytic
bound.

`tb_multicore` puts 4, 8 and 16 engines, one per core, on a single memory channel. The
channel serves one line every 2 cycles, and its busy signal feeds every engine's bandwidth
monitor. Each core has its own key and 150 misses to fresh pages, at 30 % utilization. Each
core's correct-walk count is checked exactly against the testbench's own matching.

| Cores | Accuracy | Data fetches per miss | Misses with the degree cut |
|---|---|---|---|
| 4 | 0.900 | 2.01 | 13 of 600 |
| 8 | 0.846 | 1.24 | 532 of 1,200 |
| 16 | 0.764 | 0.28 | 2,183 of 2,400 |

This is one run; with other seeds the 16-core accuracy ranges from 0.73 to 0.85. As the
channel fills, the monitors cut the degree. Accuracy falls towards the tier-1 share,
because tier 1 is always fetched first. This is a stress model: one shared channel and
streams of fresh pages. It is not a model of the real server mixes.

To run one testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/revelator_pkg.sv tb/city_ref_pkg.sv tb/tb_revelator_engine.sv \
    --top-module tb_revelator_engine -o sim
./obj_dir/sim
```

The four workload testbenches are run the same way, with the testbench's name in place of
`tb_revelator_engine`. They are `tb_utilization_sweep`, `tb_numa_spillover`,
`tb_virtualized` and `tb_multicore`. Each testbench ends by printing
`TB_RESULT checks=<n> failures=<n>`.

Some block testbenches shorten slow parameters:

| Testbench | Change | Why |
|---|---|---|
| `tb_bandwidth_monitor` | epochs of 100 cycles | shorter run |
| `tb_degree_filter` | epochs of 40 cycles | shorter run |
| `tb_utilization_monitor` | 6-bit counters | reach saturation |
| `tb_numa_residency` | 8-bit counters | reach saturation |

The engine-level testbenches, the full test and the four workloads, use the real sizes throughout.

## Lint notes

Verilator reports that `rst_n` is used both synchronously and asynchronously in `spec_log`
and `revelator_engine`. The synchronous use is only the `disable iff` of the protocol
assertions. The flip-flops themselves use an asynchronous reset.

The remaining lint messages are harmless. They are of three kinds:

- unused package constants in blocks that need only some of them;
- unused slices of wide buses, such as the upper VPN bits in the hint walker or the line
  offset of a formed address;
- monitor outputs that only the block testbenches observe, such as the raw counters and
  `epoch_end`.
