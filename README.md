# Selective copy-back of clean lines by reuse distance: an exclusive L1/L2 hierarchy in SystemVerilog

A write-back cache must send a dirty victim to the next level. A clean victim is different. An
exclusive or non-inclusive hierarchy may drop it or copy it back, and neither choice breaks the
hierarchy's rules. Copying back every clean line fills the lower level with lines that will never
be used again ("dead" lines). It also costs writes, and in an STT-MRAM last-level cache a write is
slow (40 cycles here, against 10 for a read). Dropping every clean line throws away lines that
would have been hit soon.

The design here chooses per line. Each line of the L1 data cache carries a small reuse-distance
counter, a hit counter and a "came from the prefetcher" bit. When the cache needs a victim, it
scores every line of the set from these bits. The highest score is evicted. A clean victim whose
score reaches 9 is predicted dead and dropped. Every other victim is copied back to the L2. The
predictor is called CBP (copy-back predictor) below. It uses no program counter and adds 7 bits
per line and 14 bits per set.

This RTL follows the published CBP design ("Reuse Distance-based Copy-backs of Clean Cache Lines
to Lower-level Caches", Wang, Wang and Ye). The published design was evaluated in an
architectural simulator, not as hardware. So the algorithms, sizes and latencies below are
theirs, and the cache state machines, handshakes and timing are choices made for this
implementation. The section "Departures and choices" lists those choices.

## The hierarchy

```
   core data port ─┐        ┌──────────────────────────────┐
   prefetcher ─────┼──────► │ l1d_cache  32 KB, 8-way, 64 B │
                   │        │   └ cbp_policy (CBP state +    │
                   │        │       rd_update, priority,     │
                   │        │       victim_select)           │
                   │        └──────────────┬───────────────┘
                   │              READ / COPYBACK
   I-cache port ───┴──────────► l2_arbiter (round robin)
                                           │
                            ┌──────────────▼───────────────┐
                            │ l2_cache  1 MB, 16-way, LRU,  │
                            │ exclusive; sttmram_array      │
                            │ (10-cycle read, 40-cycle write)│
                            └──────────────┬───────────────┘
                                           ▼
                                  DRAM read / write ports
```

`cbp_hierarchy` is the top. The core, the L1 instruction cache, the stride prefetcher and DRAM
are outside the design. Their connections are ports of the top. The instruction cache uses the
same request format as the data cache. The testbench models DRAM with `tb/dram_model.sv`.

Default sizes follow the evaluated system: L1 data cache 32 KB, 8-way; L2 1 MB, 16-way, LRU;
64-byte lines; 64-bit core words; 33-bit physical addresses (enough for its 8 GB of DRAM).

## Reuse distance: rd and RD

Reuse distance here counts misses, not time. Each line has a private 4-bit saturating counter
`rd`, and each set has a 4-bit shared `RD`. `cbp_rd_update` applies one event to one set:

* **Miss in the set.** Every valid line of the set increments its `rd`, saturating at 15.
  A line that sits unused while its set keeps missing grows older.
* **Hit on line h.** `rd[h]` is added to the set's running sum `RDsum` and then cleared. The
  set's hit counter `RDcounter` advances. On the eighth hit, `RD` becomes `RDsum / 8` (a shift
  by three), and `RDsum` and `RDcounter` restart.

So `RD` is the average reuse distance of the last eight hits in the set. A line whose `rd` is far
above `RD` has gone unused for much longer than lines in this set usually wait between uses.
That makes it a good candidate for being dead.

A newly filled line starts with `rd = 0`. Only demand accesses from the core update this state.
Prefetch lookups do not.

## Priority and the copy-back decision

When a full set needs a victim, `cbp_priority` scores each valid line:

| condition                                   | credit |
|---------------------------------------------|-------:|
| line was brought in by the prefetcher       | +1     |
| line has had at most 1 hit (2-bit counter)  | +1     |
| `2·RD ≤ rd ≤ 3·RD`                          | +4     |
| `rd > 3·RD`                                 | +8     |

The score ranges from 0 to 10. `cbp_victim_select` takes the highest score as the victim, with
ties going to the lowest way. The victim is **copied back** if it is dirty or its score is below
**9**. Otherwise it is clean and **dropped**.

Why 9? A clean line reaches 9 only if it is both "far" (+8) and either prefetched or rarely hit
(+1). In other words, it has gone unused for more than three times the set's typical reuse
distance, and it also has no record of being useful. A far line with more than one hit scores 8
and is still copied back.

A worked case, as exercised in the testbench. Eight cold misses fill a set. At that point
`RD = 0` and the lines have `rd = 7, 6, …, 0`. The ninth miss raises every `rd` by one, so every
line is "far" (`rd > 0 = 3·RD`) and cold: all score 9. Way 0 is dropped. After eight hits in the
set, `RD` becomes 3. The next miss leaves every line at `rd = 1`, below `2·RD`, so all score 1.
The victim is now copied back, although it is clean.

The hit counters count hits "since the last replacement in the set". So every replacement clears
the counters of the whole set, and a line needs hits after the last replacement to lose its +1.

## The L1 data cache (`l1d_cache`)

This is a blocking write-back, write-allocate cache. It handles one request at a time and moves
through these states:

1. **IDLE**: takes a core request, or a prefetch if the core is not asking.
2. **LOOKUP** (next cycle): checks the tags.
   * A demand hit answers at once. The answer is sampled 2 cycles after the request was taken.
     The hit updates `rd`, the `RD` bookkeeping and the line's hit counter, and a store marks the
     line dirty.
   * A prefetch that hits is dropped.
   * A demand miss applies the miss update to the set.
3. **VICTIM**: a free way is used if the set has one. Otherwise CBP picks the victim and the set's
   hit counters are cleared. A victim that must be copied back goes to COPYBACK. A dead clean
   victim is invalidated here and counted as a drop.
4. **COPYBACK**: sends the line, with its dirty bit, to the L2. The line is invalidated only when
   the L2 takes it, so the copy-back always comes before the eviction.
5. **FETCH / WAIT**: asks the L2 for the missing line. The arriving line is installed with
   `rd = 0`, zero hits and the prefetched bit. A demand request is then answered, merging a store.
   A line that was dirty in the L2 stays dirty.

Four 32-bit counters report hits, misses, lines sent down (`cnt_copybacks`, clean and dirty)
and clean lines dropped (`cnt_drops`).

CBP state costs 7 bits per line: `rd` (4), hit counter (2) and prefetched (1). Each set adds
`RD` (4), `RDsum` (7) and `RDcounter` (3). For the 32 KB cache that is 512 × 7 + 64 × 14 =
4480 bits, about 1.7 % of the 262 144 data bits.

## The exclusive STT-MRAM L2 (`l2_cache`, `sttmram_array`)

The L2 never holds a line that an L1 holds:

* **READ hit**: the line is read from the array (10 cycles), handed up with its dirty bit, and
  invalidated. A hit answers 12 cycles after the request is taken: lookup, array start, then the
  10-cycle read.
* **READ miss**: the line is fetched from DRAM and handed up. It is not allocated in the L2.
* **COPYBACK**: the line is allocated in a free way, or in the LRU way (4-bit age per way). If the
  LRU line is dirty, it is first read out (10 cycles) and written to DRAM. The array write then
  occupies the array for 40 cycles.

`sttmram_array` is an ordinary memory array plus a counter that enforces the two latencies. While
a write is in flight, any later access that needs the array waits. This is the congestion that
every clean copy-back causes, and the cost CBP avoids for lines predicted dead. A READ miss does
not need the array and goes straight to DRAM.

## Sharing the L2 (`l2_arbiter`)

The data cache and the instruction-cache port share one L2 request channel. When both ask,
they take turns. A request shown to the L2 but not yet taken stays chosen, so the valid/ready
rule holds downstream. The L2 serves one request at a time, so the arbiter routes each response
to the port that sent the last READ. The arbiter is a combinational switch and adds no latency.

## Interfaces and handshakes

All channels are valid/ready. A request is held unchanged until it is taken, and the L1 and L2
check this with assertions. Line-level requests use `cbp_pkg::l2_req_t`, which holds the
operation, the line address, 512 data bits and a dirty bit. Responses use
`cbp_pkg::l2_resp_t`, which holds the data and a dirty bit.

Top-level ports of `cbp_hierarchy`:

| group | signals | notes |
|---|---|---|
| core | `cpu_req_{valid,ready,we,addr,wdata,wstrb}`, `cpu_resp_{valid,rdata}` | aligned 64-bit words; one response per request, stores included |
| prefetcher | `pf_{valid,ready,addr}` | lower priority than the core; no response |
| I-cache | `ic_req_{valid,ready}`, `ic_req`, `ic_resp_valid`, `ic_resp` | READ and COPYBACK like the data side |
| DRAM | `mem_rd_{valid,ready,addr}`, `mem_rd_resp_{valid,data}`, `mem_wr_{valid,ready,addr,data}` | whole lines |
| counters | `l1_{hits,misses,copybacks,drops}`, `l2_{hits,misses,copyins,mem_writebacks}` | 32-bit |

Reset is asynchronous and active low. It clears all valid, dirty and CBP state and sets the L2
ages to a permutation. Data arrays are not reset.

## Departures and choices

Taken from the published design: the `rd`/`RD` algorithm, the counter widths, the 8-hit
interval, the four credits, the threshold 9, copy-back strictly before eviction, CBP in the L1
data cache only, and the cache sizes, associativities, line size and L2 latencies.

Choices made here, where the published description says nothing:

* The published text also says `rd` grows on a miss "to any arbitrary cache line", which reads
  as global. The algorithm itself updates only the set that missed, and that rule is used here.
* The hit counters are cleared for the whole set on each replacement (a literal reading).
* Free ways are filled without consulting CBP. Ties go to the lowest way.
* Prefetches do not update reuse distances, and the prefetched bit stays set while the line lives.
* Both caches are blocking, with one miss at a time and no MSHRs. The L1 hit takes 2 cycles and
  an L2 hit 12.
* The L2 uses true LRU by age counters. Its tags are kept in flip-flops, and a single-ported array
  holds the data.
* Lines keep their dirty bit when they move up from the exclusive L2.
* The arbiter's round-robin policy.
* The STT-MRAM array is modelled only by its timing, not as a macro.

Not built: the core, the L1 instruction cache (LRU, outside the proposal), the stride prefetcher
(named but not specified), DRAM, and the LRU-with-copy-back-all baseline that the design was
compared against.

## Size

Coarse synthesis (Yosys, before technology mapping) gives these numbers at the default sizes:

| module | flip-flop bits | memory bits | word-level cells |
|---|---:|---:|---:|
| `cbp_policy` (all CBP state of the L1) | 4 480 | 0 | 2 202 |
| `l1d_cache` (including `cbp_policy`) | 5 813 | 272 896 | 19 059 |
| `sttmram_array` | 7 | 8 388 608 | 25 |
| `l2_arbiter` | 4 | 0 | 21 |

The L2 keeps its 16 384 tags, LRU ages, valid bits and dirty bits in reset flip-flops. That is
simple to simulate, but slow to synthesise. A physical implementation would move the tags and
ages into an SRAM next to the data array.

## Simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | checks |
|---|---|
| `tb_cbp_rd_update` | random events against a reference model; `RD` after eight hits |
| `tb_cbp_priority` | random metadata against a reference model; the 2·RD / 3·RD boundaries; the maximum of 10 |
| `tb_cbp_victim_select` | highest priority, tie to lowest way, threshold at 8/9, dirty victims |
| `tb_cbp_policy` | 20 000 random misses, hits, replacements and fills against a model of all sets |
| `tb_l1d_cache` | the worked case above; dirty write-back; prefetch fill; 2-cycle hit; random loads and stores against shadow memory |
| `tb_sttmram_array` | data, 10-cycle read, 40-cycle write occupancy |
| `tb_l2_cache` | exclusivity, dirty bit travelling up, 12-cycle hit, read waiting behind a write, LRU dirty eviction to DRAM, random L1 behaviour |
| `tb_l2_arbiter` | delivery order, response steering, round robin |
| `tb_cbp_hierarchy` | whole design at full size: hot lines, streaming dead lines, prefetches, set overflow, instruction-side traffic; checks data and array timing, and that each mechanism occurred |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/cbp_pkg.sv \
    tb/tb_cbp_hierarchy.sv --top-module tb_cbp_hierarchy -o sim
./obj_dir/sim
```

The end-to-end test runs at the default sizes (no parameter overrides) in a few seconds.

To change the design, edit the parameters of `cbp_hierarchy` (cache sizes, ways, threshold,
L2 latencies) or the credits and widths in `cbp_pkg`.
