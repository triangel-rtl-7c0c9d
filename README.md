# Triangel temporal prefetcher in SystemVerilog

A temporal prefetcher remembers that a miss to line *x* was followed by a
miss to line *y*, and the next time *x* misses it fetches *y* ahead of time.
This catches pointer-chasing and other irregular code that stride and
stream prefetchers cannot follow. The cost is metadata: one stored pair per
line of the pattern, far too much for a dedicated SRAM, so the pairs (the
*Markov table*) live in a slice of the last-level cache (L3). Every way of
the L3 given to the table is a way taken from ordinary data.

Triangel's idea is to measure before it spends. For each load PC it
estimates, by random sampling, two things:

* **Does the pattern come back soon enough to fit?** (`ReuseConf`) If a
  PC's stream repeats only after more distinct lines than the table can
  hold, storing its pairs only evicts useful ones.
* **Is the recorded successor really the next access?** (`PatternConf`) If
  *x* is followed by a different line each time, prefetching *y* is waste.

Only PCs that pass both tests store pairs and prefetch. PCs that pass with
high confidence become more aggressive: they prefetch four steps down the
chain and store *x → z* instead of *x → y* (lookahead 2), so that prefetches
arrive earlier. A *Set Dueller* decides, from sampled hit counts, how many
L3 ways (0 to 8 of 16) the table may take. A *Metadata Reuse Buffer* keeps
recently used pairs close, so chained lookups and redundant updates need no
L3 access.

This repository holds synthesizable RTL for the prefetcher of one core: its
training table, both samplers, the counter rules, the Markov table in the
L3 ways, the reuse buffer and the set dueller, joined in the top module
`triangel`. The L2 and L3 data caches and DRAM are outside it; the top has
ports where they connect.

## Where the prefetcher sits

```
   L2 cache ── training access (PC, address) ──►  triangel  ── prefetch address ──► L2 / memory
   L2 cache ◄── "do you hold line z?" probe ────  triangel
                                                  triangel  ── markov_ways (0..8) ──► L3 way split
```

A *training access* is an L2 miss or the first hit on a line that was
brought in by a prefetch. The L2 decides which accesses qualify and hands
them over on `train_valid/train_ready/train_pc/train_addr`. Addresses are
37-bit physical byte addresses; everything inside works on 31-bit line
addresses (byte address >> 6).

## Per-PC state: the training table

`training_table` has 512 entries, direct-mapped by a hash of the PC (index =
PC[10:2] ^ PC[19:11], 10-bit tag = PC[29:20] ^ PC[39:30] ^ PC[47:40]). Each
entry holds 122 bits:

| field | bits | use |
|---|---|---|
| valid, PC tag | 1 + 10 | |
| LastAddr[0], LastAddr[1] | 31 + 31 | the PC's last two training lines |
| Timestamp | 32 | the PC's own access count (its local clock) |
| ReuseConf | 4 | does the pattern fit in the table? |
| BasePatternConf | 4 | is it accurate enough to store and prefetch (about 2/3)? |
| HighPatternConf | 4 | is it accurate enough for degree 4 and lookahead 2 (about 5/6)? |
| SampleRate | 4 | scales the History Sampler's sampling probability |
| Lookahead | 1 | store x → z instead of x → y |

A PC seen for the first time gets an entry with all counters at 8 and does
nothing else on that access. The table has two asynchronous read ports (the
current PC and a PC named by a sampler eviction) and one write port.

## Sampling a PC's behaviour

### History Sampler

`history_sampler` is a 512-entry, 2-way store of sampled pairs. An entry is
keyed by the PC's LastAddr[0] (the *x* of the pair) together with the PC's
table index, and holds the successor seen then, the PC's local timestamp
and an Accessed bit (96 bits of fields plus valid).

On each training access the sampler is looked up with the PC's previous
line *x* and the current line *y*:

* **Hit.** The distance on the PC's clock since the pair was sampled is
  compared with `MAX_SIZE` = 196608, the number of entries the Markov table
  holds. Shorter: ReuseConf +1. Longer and never seen before: ReuseConf −1.
  If the stored successor equals *y* the two PatternConf counters rise;
  otherwise the old successor *z* is a candidate for the Second-Chance
  Sampler, and *y* becomes the new successor.
* **Miss.** With probability `512/196608 × 2^(SampleRate−8)` (a draw from a
  32-bit LCG against a threshold) a way is replaced. The victim is judged on
  its own PC's clock: if it lived longer than `MAX_SIZE` without being hit,
  its PC loses ReuseConf and the current PC samples more often (SampleRate
  +1); if it was younger and still unused, the current PC samples less often.

The reason for the sampling rate: the sampler is 1/384 the size of the
Markov table, so it only sees as far as the table would if it samples about
one access in 384. SampleRate corrects this per PC.

### Second-Chance Sampler

A mismatch in the History Sampler is not yet a failure: programs often
access *x, y, z* one time and *x, z, y* the next. `second_chance_sampler`
gives the old successor *z* a second chance. If the L2 does not already
hold *z* (the top probes the L2 for it), *z* is placed in a 64-entry FIFO
with the PC's index and the current global training count. If the same PC
touches *z* within 512 training accesses, PatternConf rises after all; if
it touches it later, or *z* is pushed out of the FIFO unseen, PatternConf
falls. The eviction penalty goes to the PC that inserted the entry, which
may be another PC than the current one.

### Counter rules (`aggression_control`)

All counters are 4-bit and saturate at 0 and 15.

| event | BasePatternConf | HighPatternConf |
|---|---|---|
| successor confirmed | +1 | +1 |
| successor refuted | −2 | −5 |

ReuseConf and SampleRate move by ±1. The decisions are:

* **enable** (store pairs and prefetch): ReuseConf > 8 and BasePatternConf > 8;
* **degree 4** instead of 1: HighPatternConf > 8;
* **Lookahead** set when HighPatternConf reaches 15, cleared when
  BasePatternConf falls below 8.

The −2 and −5 penalties are what make the thresholds mean 2/3 and 5/6
accuracy: a counter stays high only when confirmations outnumber
refutations by 2:1 or 5:1. The same combinational block is instantiated
twice: once for the current PC, once for a PC penalised by a sampler
eviction.

## The Markov table in the L3 (`markov_partition`)

This is the part that is easiest to get wrong and the largest.

**Entry format.** An entry is 42 bits: a 10-bit hash tag of the lookup
line, the full 31-bit target line, and one confidence bit. Twelve entries
fill a 64-byte L3 line (504 of 512 bits).

**Where an entry lives.** The L3 set is the lookup line's low 11 bits, the
same set an ordinary data access to that line would use. The tag is the XOR
of the two 10-bit halves of the remaining line bits [30:11]. Within the set,
the Markov ways form sub-sets: the entry goes in way `tag % ways`, so one
lookup reads exactly one line and compares 12 tags.

**Update rule.** When a confident PC trains *x → y*: if *x* is present with
target *y*, its confidence bit is set; with a different target, the target
is replaced if the bit is clear, otherwise the bit is cleared (so a second
disagreement replaces it). An absent *x* is written with confidence 0 into
the line's SRRIP victim (2-bit RRPV per entry, inserted at 2, set to 0 on a
hit, the highest RRPV is evicted).

**Resizing.** When the dueller changes the number of ways, nothing is moved
at once. Each set remembers the way count it was last arranged for (a 4-bit
field kept beside the data, standing for spare L3 tag bits). The first
access to a set with an outdated arrangement first rearranges that set, one
entry per cycle: lines that newly became Markov lines are cleared, and
every entry is moved to line `tag % new_ways` or dropped if it no longer
fits. Then the access is served.

**Timing.** One operation at a time, accepted on `req_valid && req_ready`;
the response comes exactly `LATENCY` = 25 cycles later. Rearrangement (96
cycles for 8 ways) and the reset sweep (one set per cycle, 2048 cycles)
hold `req_ready` low.

The data of all 2048 × 8 lines is an array inside this block. In a chip it
is the L3's own data array; here it stands for it, so the table can be
simulated without an L3 model.

## Metadata Reuse Buffer

`metadata_reuse_buffer` holds 256 Markov entries, 2-way set-associative
with FIFO replacement. It is indexed by line bits [6:0] and stores the 4
further set bits [10:7] with each 42-bit entry. It is filled when an L3
lookup hits and produces a prefetch. It serves two uses:

* a chained lookup (degree 4 walks *x → y → z → …*) that hits here needs
  no 25-cycle L3 access;
* a training update that would write exactly what the buffer already holds
  is skipped.

An L3 update also refreshes a copy held in the buffer, so the two never
disagree. While the partition has 0 ways the buffer's contents are
ignored: they mirror a table that no longer exists, and using them would
keep a PC prefetching after the dueller has switched the table off.

## Sizing the partition: the Set Dueller

`set_dueller` answers: would this workload get more hits from the L3 with
*m* Markov ways and 16 − *m* data ways, for *m* = 0..8? It samples 64 of
the 2048 sets (every 32nd) and keeps for each a 16-entry LRU list of 10-bit
data-line tags and an 8-entry LRU list of Markov tags.

* A training access that hits the data list at LRU position *p* would have
  hit in any cache of *p*+1 ways or more: counters `Hits[m]` with
  16 − *m* > *p* get +1.
* Markov lookups are modelled only for one line in 12 (line bits [30:11]
  mod 12 == 0), because one L3 line holds 12 entries. A hit at position *p*
  adds 12/2 = 6 to `Hits[m]` for every *m* > *p*. The divisor 2 is a bias
  that favours data, since a prefetch is worth less than a demand hit.

Every 500000 training accesses the partition becomes the *m* with the
largest count (the smaller on a tie), the nine 32-bit counters clear, and
the new size goes to `markov_partition` and out on `markov_ways`. Until
the first window ends all 8 ways are Markov ways.

## One training access, step by step

The top (`triangel`) handles one training access at a time. `train_ready`
is high only when it is idle.

1. Read the PC's entry (and allocate it if the tag does not match; an
   allocation ends the access).
2. History Sampler lookup or replacement, one cycle.
3. If the sampler offers an old successor *z*: `l2_probe_valid` with
   *z*'s address, `l2_probe_hit` expected in the next cycle; insert *z* in
   the Second-Chance Sampler if the L2 misses.
4. Second-Chance check of the current line.
5. Write the PC's entry back: new counters, LastAddr shifted, timestamp + 1.
6. If a sampler eviction penalised another PC, read-modify-write that PC's
   entry (one cycle each).
7. If the PC is enabled: Markov update of *x → current*, where *x* is
   LastAddr[1] with lookahead and LastAddr[0] without, skipped when the
   reuse buffer shows the table already holds it (25 cycles otherwise).
8. If enabled: up to `degree` chained lookups starting from the current
   line, each answered by the reuse buffer (no wait) or the L3 (25
   cycles). Each hit leaves as a prefetch on `pf_valid/pf_ready/pf_addr`;
   `pf_addr` and `pf_valid` hold while `pf_ready` is low, which stalls the
   engine. With a 0-way partition every lookup misses, so nothing is
   prefetched.

A plain access takes a handful of cycles; a confident one that misses the
reuse buffer on its update and its four lookups waits on five 25-cycle L3
accesses. The `events` output pulses one bit per mechanism
(allocation, sampler hit and replacement, L2 probe hit, second-chance
insert, timely, late and eviction penalty, gated PC, Markov update and
skipped update, reuse-buffer hit, lookup, prefetch and prefetch stall,
degree 4, lookahead 2, dueller window end, set rearrangement), which is
what the end-to-end testbench counts.

## Departures and open points

Choices made where the published description gives no detail:

* **Schedule.** The order of steps above and their cycle counts are this
  design's. The published design gives the rules, not a pipeline.
* **Training table** is direct-mapped, and the PC hash is this design's own.
* **History Sampler**: set = LastAddr[0] bits [7:0]. The victim is an
  invalid way first, else a random one. A hit never also replaces.
* **Sampler entry size.** The field list gives 96 bits per History Sampler
  entry; the published storage total implies 95. The field list is used.
* **Second-Chance window.** It is counted in training accesses. One
  description says "fills to the L2", another "training accesses".
* **Markov tag.** It is the XOR of the address bits above the set index.
  One description says the hash covers the full address, another only the
  bits outside the index.
* **Markov confidence.** A set confidence bit is cleared on a mismatching
  update. What happens to it then is not specified.
* **Rearrangement** is serialised, one entry per cycle, before the access
  that triggered it. The published scheme rearranges in the background
  after the access, and gives no mechanism.
* **Per-set policy field** is 4 bits, not 3. The extra bit lets a set
  arranged for 0 ways be told apart from one arranged for 8.
* **Set Dueller**: which sets are sampled, the 1-in-12 rule, the tag hash,
  counting the window in training accesses, and the starting size (8 ways).
* **Reuse Buffer at 0 ways.** Its contents are ignored while the
  partition is empty.
* **Random source** is a 32-bit LCG with constants 1664525 and 1013904223.
* **Single core.** In multiprogrammed use the Markov partition and the Set
  Dueller are shared between cores. That sharing is not built; each
  instance owns its partition.

Not built at all: the L2 and L3 data caches and the DRAM. Their
connections are ports of `triangel`, and the testbenches model the L2 as a
small list of recent lines.

## Capacity against workloads

At the default sizes the Markov table holds 2048 sets × 8 ways × 12 =
196608 pairs. One pair per 64-byte line means that a pattern spanning up to
12 MiB of distinct lines fits. A 7 MiB graph-search input fits; a 700 MiB
one does not, and ReuseConf keeps such PCs from training. The irregular
SPEC CPU2006 programs the prefetcher targets mostly have patterns below
this limit; Mcf and Astar have PCs whose patterns exceed it.

`tb_triangel_graph` runs breadth-first search over random graphs through
the prefetcher, with the L3 cut to 64 sets (6144 pairs). The L2 is modelled
as 256 recent lines. On a 4096-vertex graph, lines are re-used soon but in
a different order every search. About 5% of training accesses prefetch,
and the dueller hands the ways back to data. On a 32768-vertex graph the
pattern is far beyond the table, and under 1% of accesses prefetch.
Graph search has no temporal order to exploit, so this quiet behaviour is
the intended result.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| triangel | TT_ENTRIES | 512 | training-table entries |
| | HS_ENTRIES | 512 | History Sampler entries (2-way) |
| | SCS_ENTRIES / SCS_WINDOW | 64 / 512 | Second-Chance entries / timeliness window |
| | MRB_ENTRIES | 256 | reuse-buffer entries (2-way) |
| | L3_SETS / MAX_WAYS | 2048 / 8 | L3 sets, most ways the Markov table may take |
| | MK_LATENCY | 25 | Markov access latency in cycles |
| | DUEL_WINDOW | 500000 | dueller window in training accesses |
| | MAX_DEGREE | 4 | chained lookups for confident PCs |
| | SEED | 12345 | LCG seed |

`MAX_SIZE` (the reuse threshold) is derived as `L3_SETS × MAX_WAYS × 12`.
The storage at the defaults: training table 7808 B, History Sampler
6208 B, Second-Chance Sampler 592 B, reuse buffer 1504 B (all counting
one valid bit per entry), dueller tags and counters about 2 KiB. The
Markov table itself is 1 MiB of L3.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With verilator 5:

```
verilator --binary --timing -Irtl -y rtl --top-module tb_triangel \
    rtl/triangel_pkg.sv tb/tb_triangel.sv
./obj_dir/Vtb_triangel
```

| testbench | what it shows |
|---|---|
| tb_lcg32 | the random sequence against the recurrence |
| tb_training_table | random writes and reads on both ports against a shadow array |
| tb_aggression_control | random counters and events against integer arithmetic |
| tb_history_sampler | hand-worked Access and Replace cases and the sampling threshold |
| tb_second_chance_sampler | timely, late and evicted entries |
| tb_metadata_reuse_buffer | random traffic against a reference 2-way FIFO model |
| tb_markov_partition | update/lookup, the confidence rule, the 25-cycle latency, SRRIP, rearrangement (16 sets) |
| tb_set_dueller | hit-position accounting and the window decision (64 sets, 40-access window) |
| tb_triangel | five synthetic PCs through the whole prefetcher, 64-set L3 and 5000-access dueller window: exact lookahead-2/degree-4 prefetch chains for a clean pattern, none for random accesses, every mechanism at least once |
| tb_triangel_full | the top at its default size, one PC repeating a 40-line pattern until it prefetches |
| tb_triangel_graph | breadth-first graph search at two graph sizes (64-set L3): few prefetches, partition shrinks on the small graph |

The end-to-end test runs in under a second; the full-size and graph
tests take about ten seconds each including the build. The full-size run does not reach
the end of a 500000-access dueller window; window ends and rearrangement
are exercised at the reduced size.
