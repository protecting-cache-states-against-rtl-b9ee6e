# STAR: an L1 data cache that leaks neither through side channels nor through speculation

A cache leaks a secret in two ways. A victim's secret-dependent access can
leave a line that an attacker later finds fast (flush-reload, hit-based), or
can evict an attacker's line that the attacker later finds slow (prime-probe,
miss-based). And a wrong-path load, executed speculatively and then squashed,
can do either of these things with data it was never allowed to read
(Spectre). STAR (Speculative and Timing Attack Resilient) closes both in the
L1 data cache with four cooperating mechanisms:

* **DomainID-tagged lines** ("no cross-domain hit"). Every line carries the
  6-bit security domain that filled it, and a hit needs address *and* domain
  to match. Another domain's lines are simply invisible, so cross-domain
  flush-reload sees nothing.
* **Randomised placement.** Either a fully associative cache with random
  replacement (STAR-FARR) or a NewCache-style remapping cache (STAR-NEWS).
  Which line a miss evicts does not depend on the address, so the victim's
  accesses cannot aim at the attacker's lines; prime-probe learns nothing.
* **SpecBit per line.** A line filled by a speculative load is marked; any
  non-speculative access to it clears the mark.
* **SFill-Inv** (speculative fill, invalidate on squash). Speculative loads
  fill the cache normally, so correct-path code runs at full speed. When a
  load is squashed the core sends a one-way invalidation for the line it
  fetched. Each cache level invalidates the line only if it is still marked
  speculative, so data that correct-path code has touched survives. The core
  does not wait for the invalidation to finish, so no restoration time can be
  measured.

This repository holds synthesizable SystemVerilog for the cache subsystem of
one core: the STAR L1 data cache (both variants), the SFill-Inv logic on the
load-queue side, and a 2 MB L2, together with self-checking testbenches that
replay the Spectre-v1 and AES attack patterns against it.

## Block diagram

```
            core (not included)
   loads/stores | squash, commit            responses (data, SourceLevel)
                v                                  ^
        +---------------+   observes handshakes   |
        |  sfinv_unit   |<------------------------+
        | 32 LQ entries |
        +-------+-------+
                | SFill-Inv {addr, DomainID, SourceLevel}
                v
        +-----------------------------+      random_line (LFSR)
        | news_l1  (default)          |<---- victim line number
        |   or farr_l1                |
        | 512 lines x 64 B, DomainID, |
        | SpecBit                     |
        +-------+---------------------+
                | read / write-back / forwarded SFill-Inv
                v          ^ back-invalidate (inclusion)
        +-----------------------------+
        | l2_cache 2048 sets x 16 way |
        | 12-cycle hit, SpecBit       |
        +-------+---------------------+
                | line read / write
                v
           main memory (not included; 100-cycle model in tb/)
```

`star_top` wires these together. `USE_NEWS` picks the L1 variant.

## Address and line formats

Addresses are 48 bits and lines 64 bytes, so a line address has 42 bits.

| Variant | Request fields | Per-line state |
|---|---|---|
| STAR-FARR | SpecBit 1, DomainID 6, Tag 42, byte offset 6 | DomainID 6, Tag 42, Valid, Dirty, SpecBit, 64 B data |
| STAR-NEWS, k = 4 | SpecBit 1, DomainID 6, Tag' 29, Index 13, byte offset 6 | mapping {DomainID 6, Index 13}; tag {Valid, Dirty, SpecBit, Tag' 29}; 64 B data |

In STAR-NEWS the Index is the low `log2(512) + K_EXTRA` = 13 bits of the line
address and Tag' is the other 29. The shared types are in `rtl/star_pkg.sv`.

## STAR-FARR (`rtl/farr_l1.sv`)

All 512 lines are compared in parallel against {Tag, DomainID}, with Valid
also required. On a hit the addressed 64-bit word returns after
`HIT_LATENCY` cycles. The default is 1; set 2 for the slower
fully-associative design. A non-speculative hit clears SpecBit; a speculative
hit leaves it alone.

On a miss, `random_line` names a victim among all 512 lines. If the victim is
dirty it is written back to L2 with its DomainID. The new line is then
fetched and installed with the request's DomainID and SpecBit. A speculative
load may therefore evict a non-speculative line. That is allowed, because
the choice of victim carries no information about the address.

## STAR-NEWS (`rtl/news_l1.sv`)

This is the part that needs the most care. NewCache gives each physical line
a mapping entry that names the "logical" set it currently stands for. The
index is `K_EXTRA` bits wider than a physical cache of this size would need,
so the logical cache is 2^k times larger than the physical one. A lookup
searches the mapping array for {DomainID, Index}; at most one line can match.
Only that line's Tag' is then compared. There are three outcomes:

1. **Mapping hit, tag hit.** The cache returns the word. A non-speculative
   access clears SpecBit.
2. **Mapping hit, tag miss.** Another address with the same Index, in the
   same domain, holds line C. A *non-speculative* access replaces C in place
   with the new line R, which gets SpecBit 0. This is plain NewCache
   behaviour.
   A *speculative* load must not do that. Evicting C would tell a
   same-domain receiver that the secret-dependent address had Index *i*: this
   is the prime-probe Spectre attack. Instead the cache takes the
   **ForwardNoFill** path. R is fetched and its word is returned to the core
   without being cached. Then a random line V is evicted, so the visible
   effect on the cache is the same as a mapping miss.
3. **Mapping miss.** A random line V is replaced by R. R takes the request's
   DomainID, Index and SpecBit.

In this design, the ForwardNoFill path evicts V (writing it back if dirty)
before fetching R. Either order leaves the same cache contents. A mapping
hit also requires the line to be valid.

`K_EXTRA` trades the width of the mapping compare against miss rate. Every
k gives the same protection. With k = 0, same-index conflicts are frequent,
so many speculative loads take ForwardNoFill and gain nothing from the
cache. With k = 4 or 6, such conflicts are rare. The default is 4.
Widening `K_EXTRA` only changes the Index/Tag' split; the line count stays
the same. On the synthetic 3000-load stream of `news_k_sweep_tb`, half of
them speculative, ForwardNoFill occurs as follows:

| k | 0 | 2 | 4 | 6 |
|---|---|---|---|---|
| ForwardNoFill loads | 500 | 139 | 34 | 9 |
| non-speculative tag-miss replacements | 507 | 134 | 18 | 3 |

## SFill-Inv

### Load-queue side (`rtl/sfinv_unit.sv`)

Every response carries a **SourceLevel**: 1 if the data came from the L1, 2
from the L2, 3 from memory. `sfinv_unit` keeps one entry per load-queue slot
(32). When a load is accepted, its entry records the address and DomainID.
When the response arrives, the entry records the SourceLevel.

On a squash, `squash_mask` marks squashed entries. The rules for each
squashed entry:

* SourceLevel 1: the load hit in L1 and changed nothing, so the entry is
  freed with no request.
* SourceLevel 2 or 3: the unit sends one SFill-Inv request {address,
  DomainID, SourceLevel}. Requests go one per cycle, lowest entry first.
* Response not yet back: the entry waits for it, then applies the same rule.

`sfinv_pending` stays high until every request has been handed to the L1.
That is the only point where the core has to wait; it never waits for the
invalidations themselves. A commit frees an entry without a request.

### Cache side

Each cache looks up the line, using the DomainID as well in the L1:

| Line state | Action | Passed on to the next level? |
|---|---|---|
| found, SpecBit = 1 | invalidate the line | if SourceLevel > this level |
| found, SpecBit = 0 | none: correct-path code has used it | no, the request is dropped |
| not found (already evicted) | none | if SourceLevel > this level |

An invalidation writes nothing back. A speculative line cannot be dirty,
because stores are never speculative. The L2 is the last level, so it passes
nothing on. SFill-Inv requests get no response. In the L1 they take priority
over waiting core requests.

## L2 (`rtl/l2_cache.sv`)

The L2 is 2048 sets × 16 ways × 64 B, write-back, with a SpecBit per line.
It serves one request at a time:

* **Read hit:** the line returns exactly `LATENCY` (12) cycles after the
  handshake. A non-speculative read clears the line's SpecBit.
* **Read miss:** the victim is the first invalid way, or else a per-set
  round-robin pointer. A valid victim is first back-invalidated in the L1
  (below). A dirty victim is then written to memory, and the line is fetched.
* **Write-back from L1:** it updates the line and marks it dirty. It also
  clears SpecBit, since written data is architectural.
* **SFill-Inv:** handled by the table above. An invalidation also
  back-invalidates the line in the L1.

**Inclusion.** The hierarchy is inclusive: every L1 line has a copy in the
L2. Before the L2 drops a valid line, it spends one cycle in a
back-invalidate state. It drives `l1_binv_valid` with the line address. In
the same cycle the L1 compares that address against all its lines, ignoring
DomainID. It clears every match and returns the data of a dirty match on
`l1_binv_dirty` / `l1_binv_data`. If the L1 copy was dirty, the L2 writes the
L1 data to memory in place of its own older copy. While a back-invalidation
is under way the L1 takes no core or SFill-Inv request, so the two caches
never race on the same line.

After reset the L2 clears one set per cycle, 2048 cycles in all; requests
wait until this is done. The L2 lines have no DomainID. The randomisation
described for the L1 is not applied to the L2.

## Interfaces and timing

All ports use valid/ready handshakes, with payloads as packed structs from
`star_pkg`. Responses have no ready; the receiver must take them.

| Port (star_top) | Payload |
|---|---|
| `core_req` | `is_store, spec, domain, addr[47:0], wdata[63:0], wstrb[7:0], id[4:0]` |
| `core_resp` | `data[63:0], src (SourceLevel), is_store, id` |
| `squash_valid/squash_mask[31:0]`, `commit_valid/commit_id` | load-queue events from the core |
| `mem_req` / `mem_resp_*` | `we, laddr[41:0], data[511:0]`; one read outstanding |
| L1 `binv_*` (internal) | L2 to L1: `binv_valid`, `binv_laddr[41:0]`; L1 to L2 in the same cycle: `binv_dirty`, `binv_data[511:0]` |
| `l1_ev`, `l2_ev_*`, `sfinv_ev_*` | one-cycle event pulses for counting |

Core-visible latencies at the default parameters, counted in clock edges
from the request handshake to the response:

| Case | Cycles |
|---|---|
| L1 hit | 1 (FARR with `L1_HIT_LATENCY = 2`: 2) |
| L1 miss, L2 hit, clean victim | 14 (12 in L2 + 2) |
| L1 miss, L2 miss, memory latency M | M + 5 (105 for M = 100) |
| L2 victim valid | adds 1 (back-invalidation cycle) |
| dirty victim (L1 or L2) | adds the write-back handshake |

The L1 is blocking: it handles one miss at a time. Stores are write-allocate
and are acknowledged through `core_resp`. Loads return one 64-bit word.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| star_top | `USE_NEWS` | 1 | 1: STAR-NEWS L1, 0: STAR-FARR L1 |
| star_top, *_l1 | `L1_LINES` / `LINES` | 512 | L1 lines (32 kB) |
| star_top, news_l1 | `K_EXTRA` | 4 | extra index bits (k) |
| star_top, *_l1 | `L1_HIT_LATENCY` / `HIT_LATENCY` | 1 | hit latency; FARR also supports 2 |
| star_top, l2_cache | `L2_SETS`, `L2_WAYS`, `L2_LATENCY` | 2048, 16, 12 | L2 geometry and hit latency |
| star_top, *_l1 | `SEED` | 32'h12345679 | LFSR seed of the victim generator |
| sfinv_unit | `ENTRIES` | 32 | load-queue entries |

## Verification

Each block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. The files `tb/mem_model.sv` (a 100-cycle
memory) and `tb/l2_model.sv` (a fixed-latency L2 used by the L1 tests) are
behavioural models. `tb/star_tb_pkg.sv` defines the data pattern every
memory line starts with, so checkers can predict any line's data.

| Testbench | What it shows |
|---|---|
| `random_line_tb` | LFSR period and a uniform spread over the 512 lines |
| `farr_l1_tb` | hit/miss data, SourceLevel and latency; no cross-domain hit; SpecBit set and clear; all three SFill-Inv cases; store merge and dirty write-back on random eviction; back-invalidation of copies in two domains |
| `news_l1_tb` | the three NEWS paths, ForwardNoFill leaving the mapped line in place, mapping per domain, SFill-Inv cases, write-back, back-invalidation |
| `l2_cache_tb` | exact 12-cycle hit, miss timing, dirty eviction to memory, SFill-Inv on speculative and non-speculative lines, back-invalidation on eviction and on SFill-Inv, dirty L1 data reaching memory |
| `sfinv_unit_tb` | skip rule for SourceLevel 1, request order, late responses, commit, `pending` |
| `star_top_tb` | full-size system (NEWS, k = 4, 2 MB L2, 100-cycle memory): see below |
| `star_farr_tb` | the same scenarios with STAR-FARR at 2-cycle hit latency |
| `pp_independence_tb` | prime-probe as non-interference: pairs of identical full-size caches (FARR cross-domain, NEWS cross-domain, NEWS same-domain Spectre) differ only in the victim's secret line; the attacker's 512-line probe must see the same hits, misses and time in both |
| `news_k_sweep_tb` | four full-size STAR-NEWS L1s, k = 0, 2, 4, 6, on one load stream: correct data everywhere, ForwardNoFill falling as k grows |

`star_top_tb` replays the paper's attack patterns with a small core model.

* **Spectre v1 over flush-reload, same domain, secret 30.** A wrong-path
  load touches `shared[30*4096]`, and the load is squashed. The receiver then
  times a reload of all 256 entries. Every entry comes from memory in
  exactly 105 cycles, so no entry stands out. A committed speculative load,
  by contrast, keeps its line.
* **Cross-domain flush-reload on an AES T-table.** The victim domain performs
  `T1[D ^ K]` lookups. The attacker domain then reloads all 16 table lines
  and never gets an L1 hit.
* **Spectre v1 over prime-probe, same domain.** The receiver holds a line at
  Index 30. A wrong-path load to another address with Index 30 takes
  ForwardNoFill, and the receiver's line survives.
* **Other paths:** non-speculative tag-miss replacement, stores, dirty
  write-back through the L2, dropped SFill-Inv, and the SourceLevel-1 skip.
* **Inclusion.** A store leaves a dirty line in one domain's L1. Another
  domain then fills the same L2 set until the line is evicted. The L1 copy
  must be back-invalidated, its stored data must reach memory, and a reload
  must come from memory with that data.

The testbench counts every mechanism: hits, mapping misses, tag-miss
replacements, ForwardNoFill, SpecBit clears, write-backs, SFill-Inv sent,
skipped, invalidated, dropped and forwarded, L2 invalidations, L2 hits and
misses, back-invalidations, and pending cycles. A mechanism that never happened counts as a
failure.

To run a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb --top-module star_top_tb \
    rtl/star_pkg.sv tb/star_tb_pkg.sv tb/star_top_tb.sv
./obj_dir/Vstar_top_tb
```

Replace `star_top_tb` with any other testbench name. `star_tb_pkg.sv` is only
needed by testbenches that import it. The full-size system test finishes in
well under a second of simulation time.

## Where this RTL departs from the described architecture, and its limits

* **Inclusion by back-invalidation is this design's choice.** The
  architecture assumes an inclusive hierarchy but does not say how it is
  kept. The back-invalidate port costs the L1 a second address compare over
  all lines. When SFill-Inv invalidates an L2 line, copies of that line in
  other domains' L1 lines are dropped too. This changes only timing, which
  the attacker's domain could already see in the L2. With inclusion
  kept, a write-back never misses in the L2; if one did, it would be written
  straight to memory.
* **The L2 is not protected.** The L2 has no DomainID and is not randomised.
  A line squashed out of both levels is safe. But a line that another domain
  brought into the L2 still reloads faster (14 cycles) than one from memory
  (105). Protecting the last-level cache is a separate problem; the
  architecture leaves it to keyed-remapping LLC designs.
* **Random source.** The random victim comes from a 32-bit LFSR
  (x^32 + x^22 + x^2 + x + 1). It is uniform over a period but predictable to
  anyone who knows the seed and the cycle count. A product would use a true
  random number generator.
* **Blocking L1.** The L1 handles one miss at a time. Its miss register and
  write-back path carry the DomainID, as domain tagging requires of internal
  buffers. A non-blocking L1 would need the same for every MSHR.
* **Core, instruction cache and memory are not included.** The core's load
  queue appears only as the squash/commit ports and the `sfinv_unit`
  bookkeeping.
* **Arbitration and ordering are this design's own choices:** SFill-Inv
  priority over core requests, the order of requests within a squash, and
  the ForwardNoFill eviction order.
* **Lint warnings that stand.** Verilator reports that `rst_n` is used both
  as an asynchronous reset and in assertion `disable iff` clauses, and that
  some struct fields of `sfinv_unit` inputs and of the L2 request register
  are unused. Both are intended.
