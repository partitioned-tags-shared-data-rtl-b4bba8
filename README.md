# SCP: a last-level cache with partitioned tags and a shared data pool

A shared last-level cache (LLC) leaks information between programs that share it. One security domain can evict another domain's lines (Prime+Probe). It can also time its own reload of a line that another domain may have brought in (Flush+Reload). Way partitioning gives each domain its own ways and closes both channels. The price is that a line two domains write must exist twice, or the partitions must be broken to keep one copy coherent.

SCP (secure and coherent partitioning) splits the cache along a different line. The **tags** are strictly partitioned: domain *d* owns `W_d` tag ways in every set, and only *d*'s own requests ever change them. The **data** is not partitioned. It is one pool of `N` entries, and a tag reaches its line through a **forward pointer**. A line used by several domains has one data entry and one coherence state. Each domain that uses it holds a tag pointing at that entry, and the entry's **refcount** says how many tags point there.

The pool has exactly as many entries as there are tags. So data space never runs out, and a data entry is freed only when the last tag pointing at it is evicted. That eviction is always done by the tag's own domain. Nothing one domain does can remove a line from another domain's view of the cache. Yet a write by any domain goes to the single shared copy, so ordinary MESI coherence between domains still works.

The RTL here is one LLC slice with the published default configuration: 8 domains, 8 tag ways per domain, 4096 sets, 64-byte lines, 16 MiB, and 2^18 data entries.

## What is in the slice

```
             request (domain, op, line address, data, page mode)
                                   |
                              +----v-----+         +-------------------+
                              | scp_ctrl |<------->| scp_latency_mask  |  release at 20 / T_miss
                              +----+-----+         +-------------------+
          set/tag lookup,          |   \---------->| scp_bloom_filter  |  peer scan needed?
          fills, LRU updates       |    \--------->| scp_leak_monitor  |  adaptive page budget
   +-------------+-------------+---+                +-------------------+
   | partition 0 | partition 1 | ... partition D-1   (scp_tag_partition x D)
   +------+------+------+------+------+
          |  hit / fp / victim (per partition)
     +----v----------+
     | scp_peer_find |   own hit + match among the other D-1 partitions
     +----+----------+
          | forward pointer (18 bits)
     +----v-----------+    +---------------+
     | scp_data_array |    | scp_free_list |   free slots, constant time
     +----------------+    +---------------+
     state, dirty, refcount, sharer vector, 64 B line
```

| Structure | Contents per entry | Default size |
|---|---|---|
| Tag partition (one per domain) | line-address tag (22 b), valid, forward pointer (18 b), LRU age (3 b) | 4096 sets x 8 ways |
| Data pool | MESI state (2 b), dirty, refcount (4 b = ceil(log2(D+1))), sharer vector (D b), line (512 b) | 262144 entries |
| Free list | slot index | up to 262144 |
| Bloom filter | 4-bit counter | 524288 counters, 3 hashes |
| Leakage table | page, window count, promoted flag | 64 pages |

A data entry holds no address. The address exists only in the tags that point at the entry. The sharer vector is the one a coherent LLC keeps anyway. It says which domains' private caches may hold the line, and it tells the controller where to send invalidations and downgrades.

Top module: `scp_llc` (file `rtl/scp_llc.sv`). Shared types and default sizes live in the package `scp_pkg`.

## The invariant that makes it work

Call a data entry *live* if its refcount is non-zero, and *free* otherwise. The controller keeps three rules.

1. **Refcount conservation.** For every entry, the refcount equals the number of valid tags, over all partitions, whose forward pointer names that entry.
2. **One entry per line.** All tags for line X point at the same entry. A domain that misses in its own partition looks for X in the other partitions (PeerProbe) before it reads memory. If X is found, the domain links a new tag to the existing entry rather than making a copy.
3. **Only a tag eviction frees data.** An entry is freed when its refcount drops to zero, and only a tag eviction lowers a refcount. There is no replacement policy on the data side.

Rules 1 and 3 give at most one live entry per valid tag. The pool has one entry per tag. So a free entry always exists when a domain needs one. When a miss evicts a tag whose entry thereby becomes free, that entry is reused directly. Otherwise the free list supplies one. The list is a circular FIFO of freed indices, plus a counter that hands out never-used indices after reset.

The end-to-end testbenches check rule 1 by walking every tag partition. They also check that live entries plus free-list entries equal `N`.

## Life of a request

The controller (`scp_ctrl`) serves one request at a time. The cycle counts below assume the default configuration.

**Lookup.** The set is read in the requester's partition; the result is registered one cycle later. On a match, the forward pointer is used to read the data entry. The requester's LRU is updated, and the coherence action below is applied. The response leaves **20 cycles** after the request was accepted.

**PeerProbe.** On a miss in the own partition, the response target becomes **T_miss = 200 cycles**. First the Bloom filter is asked (7 cycles at K = 3). If it answers *maybe*, the same set is compared in the other D-1 partitions in parallel. If the line is found, the requester's LRU victim is evicted if needed. Then a new tag is written whose forward pointer names the found entry, and that entry's refcount is incremented. No memory access takes place and no data moves. The response is still held until cycle 200, so finding a line in another domain's partition looks exactly like a memory miss.

**Allocate.** If no partition has the line, the memory read is issued at once. While it is in flight, the requester's victim is evicted and a slot is chosen, and the new tag is written when the data returns. The line enters the Bloom filter. The response leaves at cycle 200, or when memory answers if that is later (`mask_overrun` then flags it).

**Evict.** Evicting the requester's own victim tag follows these steps:

1. Invalidate the victim tag.
2. Clear the domain's bit in the line's sharer vector.
3. Decrement the line's refcount.

If the refcount stays above zero, nothing else happens. In particular, no other partition's tags are touched. At zero, the entry goes to I. It is written back if it is dirty or M. The line is removed from the Bloom filter, and the slot becomes free.

**Coherence on the shared entry.** The entry holds the line's only LLC state, so domains keep coherent with ordinary MESI transitions:

| Request | Other domains in sharer vector | Result |
|---|---|---|
| read | none | E |
| read | yes, line E/M | downgrade message to the holder, wait for ack, S (a *cross-domain downgrade*) |
| read | yes, line S | S |
| write | none | M (E->M and M->M silently) |
| write | yes | S->M upgrade: invalidate the others, wait for ack, M |

A peer's tag stays valid after another domain writes the line. Because it points at the same entry, its next access sees the new data and the current state. This is why tag isolation costs nothing for write-shared data.

## Timing classes and what they hide

The latency mask (`scp_latency_mask`) counts cycles from acceptance and releases the response at the target:

* own-partition hit: 20 cycles, whatever the line's state;
* any PeerProbe (found in a peer, or true miss): 200 cycles.

So the observable latency depends only on the requester's own partition. Whether another domain holds the line changes nothing, and neither does the Bloom filter's answer: a filter negative saves tag-read energy but not time.

Two things can still stretch a response, and neither is hidden by the mask:

* **Memory slower than T_miss.** The data cannot be sent before it exists. The response leaves when ready, and `mask_overrun` is raised. This depends only on memory, not on other domains' cache contents.
* **Coherence acknowledgements.** A hit or find that must downgrade or invalidate another domain's private copy waits for the acknowledgement. Its latency then reveals that another domain held the line E or M. This is the remaining E/M-versus-S channel, and it is what the page modes below control.

## Page modes and the leakage budget

Every request carries its page's 2-bit mode. The mode would come from a per-page field that system software sets and the TLB delivers:

| Code | Mode | Behaviour |
|---|---|---|
| `00` | SCP (permissive) | normal MESI on the shared entry, as above |
| `01` | SCP-WT | write-through: lines never enter E or M. Reads get S. A store updates the LLC copy (dirty, state S) and sends a *posted* invalidation to the other sharers without waiting, so no request ever waits on another domain. |
| `10` | SCP-adaptive | like SCP until the page uses up its leakage budget, then like SCP-WT |
| `11` | reserved | treated as adaptive |

The leakage monitor (`scp_leak_monitor`) counts cross-domain E/M->S downgrades on each adaptive page. A window is 1 ms: 3,000,000 cycles at 3 GHz. When a page's count in one window goes above `T_LEAK` (default 16), the page is *promoted* and behaves as write-through from then on. A one-cycle `promote_valid` with the page number tells system software to record the change in the page's mode field. The monitor is a 64-entry fully associative table. It replaces a free entry first, then one that is not promoted, then round robin. With `T_LEAK = 0`, adaptive pages are write-through from the start.

## The Bloom filter in front of PeerProbe

`scp_bloom_filter` holds `M` 4-bit counters, indexed by `K` multiplicative hashes of the line address. The hashes use fixed odd 64-bit constants and take the top log2(M) bits of the product. The filter works as follows:

* A line is inserted when it gets a data slot and removed when its refcount reaches zero. So the filter describes the lines present in the whole cache.
* A query that finds a zero counter proves that no partition holds the line. The peer tag read is then skipped.
* A counter at 15 is saturated. It is never changed again, so a line whose counter saturated can only cause false positives, never false negatives.
* The counters sit in rows of 16. Each hash is one read-modify-write of a row, taking two cycles, so an operation takes 2K+1 cycles.
* `bf_enable = 0` makes every query answer *maybe*.

## Interface of `scp_llc`

| Group | Signals | Protocol |
|---|---|---|
| status | `init_done` | high once the tag arrays (4096 cycles) and Bloom counters (32768 cycles) have been cleared after reset; requests are accepted only after it |
| request | `req_valid/ready`, `req_dom`, `req_op` (read/write), `req_addr` (34-bit line address), `req_wdata`, `req_be`, `req_mode` | one transfer per request; hold until `req_ready` |
| response | `rsp_valid`, `rsp_dom`, `rsp_rdata` | one-cycle pulse with the line after the access (write data merged) |
| memory read | `mem_rd_valid/ready/addr`, `mem_rsp_valid/data` | one outstanding read |
| writeback | `mem_wb_valid/ready/addr/data` | dirty victims |
| coherence | `coh_valid/ready`, `coh_type` (INV, DOWNGRADE, INV_POST), `coh_mask`, `coh_addr`, `coh_ack` | INV and DOWNGRADE wait for one `coh_ack` pulse that covers all masked domains; INV_POST is not acknowledged |
| system | `bf_enable`, `promote_valid`, `promote_page` | filter switch; page promotion notice |
| counters | `stats` (hits, finds, misses, Bloom skips, upgrades, downgrades, write-through stores, tag evictions, slot frees, writebacks, promotions), `bf_sat_event`, `mask_overrun`, `free_slots` | free-running; `free_slots` is the number of free data entries |

Reset (`rst_n`) is synchronous and active low.

## Where this RTL departs from the published design, and what it leaves out

* **One request at a time.** The published system has 32 MSHRs. This controller serves one request, so throughput is far below a real LLC, though the latency of each request class is as specified. Making it concurrent would need per-line locking around PeerProbe and the refcount updates.
* **One slice.** The whole 16 MiB sits in one slice. The original design speaks of per-slice partitions but gives no slice count or slice hash.
* **Cores, private caches, DRAM, TLB and OS are not included.** The slice brings out their ports. The testbenches model private caches as an acknowledgement delay and memory as a fixed-or-random latency.
* **The owner mask.** One passage of the description has PeerProbe set a per-entry "owner mask". Another states that no such mask is added and that the LLC's sharer vector is used. This RTL uses the sharer vector.
* **The leakage threshold.** The default `T_LEAK` is given as both 100 and 16 per millisecond. 16 is the evaluated setting and is used here. It is a parameter.
* **Cycle schedule.** The order of operations follows the description: memory read before victim selection, reuse of the freed slot, and Bloom update on slot allocate and free. The cycle-level schedule and all the handshakes are this design's own. So are the hash functions, the LRU encoding, the tag and Bloom reset sweeps, the mode encoding and the leakage-table organisation.
* **Private caches are seen only through messages.** Every store reaches the slice as a write request carrying its bytes. Acknowledgements carry no data, so a write-back private cache that must return a dirty line on a downgrade would need a data field next to `coh_ack`. When a domain's tag is evicted, its sharer bit is cleared as described, but no invalidation is sent to that domain's own private caches. An inclusive hierarchy would add one; it would reach only the evicting domain.
* **Pending acknowledgements stretch hits.** See "Timing classes" above. A hit that must downgrade or invalidate another domain's copy waits for the acknowledgement. This is the channel the write-through modes exist to close.

## Simulating

Every block has a self-checking testbench in `tb/`. Each ends by printing `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/scp_pkg.sv rtl/scp_llc.sv \
          tb/tb_scp_llc.sv --top-module tb_scp_llc -Mdir obj_llc
obj_llc/Vtb_scp_llc
```

Replace `scp_llc` by a block's module and testbench name to run that block alone. The controller's testbench is `tb_scp_ctrl`, and it drives a small `scp_llc`. `tb/scp_tb_mem.sv` is the behavioural memory used by the slice testbenches.

| Testbench | What it establishes |
|---|---|
| `tb_scp_tag_partition` | lookups, fills, LRU order and victims against a reference model; reset sweep length |
| `tb_scp_peer_find` | own/peer selection and enable masking for random hit patterns |
| `tb_scp_data_array` | one-cycle reads, byte-enable writes, metadata |
| `tb_scp_free_list` | FIFO order of freed slots, never-used slots, counts, empty |
| `tb_scp_bloom_filter` | no false negatives, exact counter values against a model, saturation, 2K+1-cycle operations |
| `tb_scp_latency_mask` | release exactly at max(target, ready), overrun flag |
| `tb_scp_leak_monitor` | promotion after `T_LEAK`+1 events in a window, window reset, modes, replacement; then 4000 random cycles against a reference model of the table |
| `tb_scp_ctrl` | directed: miss 200 cycles, hit 20, find 200 without a memory read, downgrade, upgrade, peer tag survives a write, write-through store with posted invalidation, Flush+Reload equal latencies, dirty eviction and writeback, shared eviction keeping the slot, adaptive promotion |
| `tb_scp_llc` | 4 domains, 2 ways, 4 sets: Prime+Probe and Flush+Reload probes, then 3000 random requests over three pages in the three modes with memory latency 150..230. Checks data against a reference image, latency classes, refcount conservation, and that every mechanism occurs |
| `tb_scp_llc_d16` | the same random end-to-end test with 16 domains (5-bit refcounts, 4-bit domain numbers) |
| `tb_scp_sharing` | the two-domain sharing workloads on a small slice: Disjoint (a streaming domain cannot evict the other's lines), ReadShared (one entry per line, both hit), ProdCons (one downgrade per read, one upgrade per write), LockContend, AsyncShare, and wt_threshold (promotion after `T_LEAK`+1 downgrades, write-through afterwards) |
| `tb_scp_shared_probe` | an attacker times reads of a line a victim writes in a quarter of the trials: a latency gap on a permissive page, none on a write-through page, none on an adaptive page once it is promoted |
| `tb_scp_bloom_sweep` | seven filters with m/n from 1/4 to 16: measured false-positive rate against (1-e^(-Kn/m))^K, before and after removing half of the lines |
| `tb_scp_llc_full` | the default configuration with no parameter changed: every operation above in directed form, promotion of an adaptive page after 17 downgrades, random traffic over 48 lines, refcount walk over all 262144 tags |

Every module parameter has the published value as its default. The tests shrink `D`, `WD`, `SETS`, the line width and the Bloom filter size only to run faster. `SETS` and `WD` must be powers of two, and `BF_M` a power of two of at least 16. The design itself holds no table files.
