# Replacement policies for a randomized L1 data cache

Contention attacks such as Prime+Probe rely on the attacker knowing which
addresses share a cache set. A *randomized* cache removes that knowledge. Each
way computes its own set index from the address with a keyed cipher, so a line
can live in one of W scattered entries, and those W entries differ from line
to line. Randomizing the index does not settle what to evict when all W
candidate entries are full, and that choice affects both security and hit
rate. Classic LRU and tree-PLRU order the lines of a fixed set. A randomized
cache has no fixed set: the candidates are a different random group of
entries on every access.

This RTL is a 4-way, 1024-set data cache with 16-byte lines, placed behind a
small 32-bit core with 22-bit byte addresses. It can be built with any of
four replacement policies that do work with such random candidate sets:

| policy  | state per line          | idea |
|---------|-------------------------|------|
| RRP     | none                    | evict a random candidate |
| DRPLRU  | 2 bits (age 0..W-1)     | evict the oldest candidate, then re-rank the W candidates 0..W-1 |
| FRPLRU  | 2 bits (age 0..W-1)     | evict the oldest candidate; ages are an LRU order among the W lines stored at the same index across the ways |
| VARP-m  | log2(m) bits (0..m-1)   | evict the oldest candidate; the accessed line gets age 0 and every other candidate ages by one |

VARP-64 is the default build. Studies of these policies find that it makes
building eviction sets far more expensive than RRP does, and that its miss
rate is close to LRU's.

## 1. Randomized indexing

An address splits into a 4-bit line offset, a 10-bit index and an 8-bit tag.
Way `w` looks the line up at entry `f_w(tag, index)`. Here `f_w` is a
10-bit tweakable block cipher with its own key per way (SCARF in the intended
system). The index is the plaintext and the tag is the tweak. For a fixed tag,
each `f_w` is a permutation of the 1024 indices, so two lines with the same
tag never collide in a way. Two lines with different tags collide in way `w`
only by chance. A line's *candidate set* is the four entries
`{(w, f_w(tag, index)) : w = 0..3}`.

The cipher is not part of this RTL. `rand_cache` drives the tweak
(`rnd_tweak_o`, the tag zero-extended to 48 bits) and the plaintext
(`rnd_index_o`). It expects the four ciphertexts back on `rnd_set_i` in the
same cycle, because it treats the cipher as a single-cycle combinational
block. Entries in different ways now hold lines with different indices, so
each entry stores the full line address (tag and index) along with a valid bit.

## 2. Choosing the victim

Every policy keeps an "age" per candidate and uses the same selection circuit,
`rp_select`:

1. Find the highest age among the four candidates and count how many have it.
2. If exactly one has it, that way is the victim.
3. Otherwise pick one of the tied ways with a binary tree steered by random
   bits. Each inner node takes the child that holds a tied way. If both
   children hold one, the node's random bit decides. The random bits come
   from a 16-bit LFSR (`lfsr16`, polynomial x^16+x^14+x^13+x^11+1).

This design adds one rule of its own: an invalid candidate is always chosen
before a valid one, so empty entries fill first. With four ways, the tree
picks uniformly among 2 or 4 tied ways. For 3 tied ways it splits 1/4, 1/4, 1/2.

The candidates of one access always sit in four different ways, but two of
them can have the same index (row). This matters only to FRPLRU.

## 3. Updating the ages

An *access* is a hit, or the fill of the victim after a read miss. The
accessed entry is `a`. The "dynamic set" is the four candidates of the access.

**RRP** stores nothing. Ties are always total, so the victim is uniformly
random (after invalid entries).

**DRPLRU** re-ranks the dynamic set. `a` gets age 0. The other three get ages
1, 2 and 3 in the order of their old ages. Candidates with equal old ages are
put in a random order. Here that order is the way number rotated by a random
amount (2 LFSR bits), which is this design's own way of drawing it. Example
from the policy's description: candidates with ages 0, 2, 2, 3, the age-3
entry replaced. Result: 1, 2 or 3 for the two age-2 entries (random which),
and 0 for the new line. After every access the four candidates hold each age
exactly once, so ages cannot pile up at the maximum.

**FRPLRU** (the RPLRU policy of the TLBCoat randomized TLB) keeps, for each
index `r`, an exact LRU order of the four lines stored at `(0,r) .. (3,r)`.
Those four ages are always a permutation of 0..3. The victim is still chosen
by age among the four random candidates. The update, however, applies to the
index `r` that holds `a`: `a` gets 0 and every line at `r` younger than `a`
ages by one. Example: index ages 2, 0, 1, 3, and the way-3 line is replaced.
The ages become 3, 1, 2, 0. The index to update is known only after the
victim is chosen, so the update reads all four ways at `r` in one cycle and
writes them back in the next. After reset, way `w` holds age `w` at every
index.

**VARP-m** gives each line its own age 0..m-1, which is ordered against
nothing. `a` gets age 0. Each other candidate of the access ages by one and
stops at m-1. With large m, VARP approaches true LRU over the candidate
sets. With small m, most choices become ties and VARP behaves like RRP. The
`AGES` parameter is m: any power of two, 64 by default, so the state is
6 bits per line.

Storage for 4 x 1024 lines: DRPLRU and FRPLRU need 8,192 bits; VARP-64 needs
24,576 bits. RRP needs only the 16 LFSR flip-flops. Each policy keeps its
ages in one single-port RAM per way (`sp_ram`), separate from tags and data.

## 4. The cache controller (`rand_cache`)

The cache handles one access at a time, through this state machine:

```
INIT --(SETS cycles)--> IDLE --req--> LOOKUP --> TAG --read hit--> UPD --> IDLE
                                                  |
                                                  +--read miss / write--> MREQ --gnt--> MWAIT --rvalid--> FILL --> UPD/IDLE
```

* **INIT.** After reset, the controller clears every valid bit and writes the
  policy's reset ages, one index per cycle (1024 cycles). `ready_o` is low
  and no request is granted during the sweep.
* **LOOKUP.** The cipher outputs address the tag, data and age RAMs of all
  four ways.
* **TAG.** Compares the four stored line addresses with the request (at most
  one may match; an assertion checks this). The victim is chosen here.
* **Read hit.** The response comes in the third cycle after the grant cycle.
  The policy is updated in the same step.
* **Read miss.** Requests the whole 16-byte line from memory and writes it
  into the victim's entry. Then it answers the core and updates the policy.
* **Write.** Write-through without write allocation. A write hit merges the
  bytes into the cached line and updates the policy. A write miss only goes
  to memory. A write is answered after memory acknowledges it.

Ports:

| group  | signals | notes |
|--------|---------|-------|
| core   | `cpu_req_i`, `cpu_gnt_o`, `cpu_addr_i[21:0]`, `cpu_we_i`, `cpu_be_i[3:0]`, `cpu_wdata_i[31:0]`, `cpu_rvalid_o`, `cpu_rdata_o[31:0]` | request/grant/response, one outstanding, in the style of the CV32E40P data port |
| cipher | `rnd_tweak_o[47:0]`, `rnd_index_o[9:0]`, `rnd_set_i[3:0][9:0]` | one cipher per way outside the cache |
| memory | `mem_req_o`, `mem_gnt_i`, `mem_we_o`, `mem_addr_o`, `mem_be_o`, `mem_wdata_o`, `mem_rvalid_i`, `mem_rdata_i[127:0]` | line reads return one full line; word writes are acknowledged with `mem_rvalid_i` |
| events | `stat_hit_o`, `stat_miss_o`, `stat_evict_o`, `stat_tie_o` | one-cycle pulses; `stat_tie_o` marks a random choice among equally old candidates on a read miss |

Parameters: `POLICY` (`rc_pkg::RP_RRP`, `RP_DRPLRU`, `RP_FRPLRU`,
`RP_VARP`), `WAYS` (power of two, at most 16), `SETS`, `LINE_BYTES`, `ADDR_W`,
`AGES`, `TWEAK_W`. The policy is fixed when the design is built, and each
build holds exactly one policy.

## 5. What follows the source design and what does not

These parts follow the source design:
* the geometry (4 ways, 1024 sets, 16-byte lines, 22-bit addresses);
* one cipher per way, with the tag as tweak and the index as plaintext;
* the victim choice (oldest candidate, count the ties, LFSR-driven tree);
* the 16-bit LFSR;
* the age update rules of the four policies;
* the state sizes (2 and 6 bits per line).

These are this design's own choices:
* the core and memory port protocols, write-through without allocation, and
  all latencies;
* the reset sweep and the reset ages;
* preferring invalid candidates;
* the LFSR polynomial and seed;
* the rotation used for DRPLRU's random tie order;
* exact LRU order per index for FRPLRU (a tree-PLRU could replace it);
* the two-cycle FRPLRU update;
* storing the full line address in each entry.

One point in the VARP description is inconsistent. Its text says the other
candidates' ages are "shifted left by one". Its worked example shows them
going up by one (0→1, 1→2), and the example's caption sets the accessed entry
to 1 rather than 0. This RTL increments by one, saturating at m-1, and resets
the accessed entry to 0.

Left out:
* the cipher itself;
* the core and main memory;
* an LRU build (true LRU over random candidate sets would have to order every
  line against every other, which is impractical in hardware);
* flushing.

## 6. Simulating

All RTL is in `rtl/`: one module or package per file, with `rc_pkg.sv` read
first. Testbenches are in `tb/`. They use only `$urandom` and need no other
files. Example with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rc_pkg.sv tb/tb_rand_cache.sv \
          -y rtl -y tb --top-module tb_rand_cache
./obj_dir/Vtb_rand_cache
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|-----------|--------|
| `tb_lfsr16` | each step against the polynomial; period 65535; never zero |
| `tb_sp_ram` | read data; holding while idle or writing; against a mirror array |
| `tb_rp_select` | random ages and valid masks; every random-bit pattern: only eligible ways, all of them reachable, even split for two tied ways |
| `tb_rp_rrp`, `tb_rp_drplru`, `tb_rp_frplru`, `tb_rp_varp` | 3000 random lookups/updates on 16 indices against an age model in the testbench: ages read, legal victim, tie flag, update latency (1 cycle, 2 for FRPLRU), DRPLRU re-ranking properties, FRPLRU permutation per index, ties resolved to more than one way |
| `tb_repl_policy` | the `POLICY` parameter builds the right policy (hand-worked ages and latencies) |
| `tb_rand_cache` | all four policies side by side at 64 indices, 3000 random accesses each: every read against a reference memory; read-hit latency; reset sweep length; read after write hit. Each mechanism must occur: hit, miss, eviction, random tie-break, write hit, write miss, memory stall, and WAYS+1 lines of one index cached at once |
| `tb_rand_cache_full` | the default build (VARP-64, 1024 indices), 100,000 random accesses, same checks |
| `tb_ppp_catch` | section 7: catch probability of a Prime+Prune+Probe attacker, all four policies at full size |
| `tb_ppp_evict` | section 7: targeted eviction of a victim line, all four policies at full size |
| `tb_miss_rate` | section 7: miss rates of the four policies under traffic with locality |

The testbench-only `scarf_model` is a keyed bijection per tag. It stands in
for the real cipher and has no cryptographic strength. `cache_harness`
wraps one cache with four cipher models, a memory model with random grant
delays and response latencies of 1 to 4 cycles, and the traffic generator.

In `tb_rand_cache`, under the same random traffic, RRP consistently shows
the most misses of the four policies and VARP-64 the fewest. This matches the
ordering reported for these policies on real workloads. It is an
observation, not a checked property.

## 7. Attacker experiments

Two testbenches measure what each policy costs a Prime+Prune+Probe attacker.
Both wrap full-size caches (4 ways, 1024 indices) in `ppp_harness`, which
computes the index mapping itself (`tb_scarf_pkg`, the same keyed function as
`scarf_model`). The harness sees a miss as a response later than the
three-cycle hit latency, just as an attacker timing its loads would.

Lines `a` and `v` are *partially congruent* when they meet in at least one
way: `f_w(a) = f_w(v)` for some `w`. Before every trial the cache is put in a
fresh random state. The harness makes thousands of random accesses, so that
most entries hold valid lines. It then writes random ages straight into the
age RAMs through hierarchical references: uniform in 0..m-1 for VARP, 0..3
for DRPLRU, and a random permutation per index for FRPLRU. Without that
second step, VARP's ages after random traffic are not random: most entries
sit near the saturated maximum, and the attacker's lines would win far too
often.

**Catching an access (`tb_ppp_catch`).** The attacker builds a set G of |G|
lines, each partially congruent with a victim line V. *Prime:* access all of
G. *Prune:* access G again and drop every line that missed, because those
lines evicted each other. Repeat until a pass has no miss. The victim then
accesses V, and *probe* accesses G once more. The access is caught if any
line of G misses. 200 trials per point:

| \|G\| | RRP | DRPLRU | FRPLRU | VARP-64 |
|-----|-----|--------|--------|---------|
| 31  | 86 % | 91 % | 36 % | 16 % |
| 131 | 100 % | 100 % | 71 % | 88 % |

The same testbench also builds VARP with other age counts, all at |G| = 31:

| ages | 4 | 16 | 64 | 256 | 1024 |
|------|---|----|----|-----|------|
| caught | 98 % | 41 % | 16 % | 14 % | 10 % |

With 4 ages, candidates tie so often that VARP behaves like RRP. More ages
mean fewer ties, so each choice depends more on the stored ages and the
policy moves towards LRU.

**Evicting a chosen line (`tb_ppp_evict`).** From a fresh state, the victim
accesses V. The attacker then accesses |G'| new lines partially congruent
with V, and V is accessed again. A miss means V was evicted. 200 trials:

| \|G'\| | RRP | DRPLRU | FRPLRU | VARP-64 |
|------|-----|--------|--------|---------|
| 11   | 55 % | 36 % | 1 % | 0 % |
| 125  | 100 % | 100 % | 16 % | 57 % |

The order of the attacker's accesses matters for the stateful policies.
With 1024 random lines added, in one order or the other:

| policy, \|G'\| | random lines first | congruent lines first |
|---------------|--------------------|-----------------------|
| RRP, 11       | 64 % | 66 % |
| VARP-64, 125  | 98 % | 72 % |

Random lines that happen to hit one of V's candidate entries age V without
evicting it. Once V is old, the congruent lines evict it easily. Congruent
lines accessed while V is still young are mostly wasted.

The exact rates vary by a few percent between runs and random seeds. These
sizes were chosen because published evaluations of the four policies
report a 90 % catch probability at |G| = 31 for random replacement and
|G| = 131 for VARP-64, and a 50 % eviction probability at |G'| = 11 for
random replacement and 125 for VARP-64. The RTL reproduces those points
within the statistical spread. FRPLRU needs several hundred lines for the
same rates. The testbenches check these figures with wide margins, and also
check that pruning removed self-evictions and then converged. Each runs for
about 15 seconds.

Why VARP helps: a newly accessed line enters at age 0 while the lines around
it are old. Under RRP, one of the four candidates is evicted at random. Under
VARP, a primed attacker line is among the youngest, so it rarely becomes the
victim. The victim's access therefore seldom evicts a line of G, and the
probe sees nothing. The attacker needs many more congruent lines, and so many
more accesses to find them. FRPLRU ties a line's age to the three other lines
at the same index, which the attacker does not control, and that protects the
victim even more.

**Miss rate (`tb_miss_rate`).** Security is only half the trade-off: a
policy should also keep the lines a program reuses. The testbench runs
40,000 accesses per policy on full-size caches. 80 % of the accesses go to a
hot set of 3072 lines (three quarters of the cache) and the rest to random
lines:

| RRP | DRPLRU | FRPLRU | VARP-64 |
|-----|--------|--------|---------|
| 44.9 % | 39.1 % | 39.5 % | 36.9 % |

The checks require RRP to have the most misses and VARP-64 the fewest, and
DRPLRU and FRPLRU to be within 3 % of each other. Published full-system
benchmark results rank the policies the same way. This synthetic traffic is
not a benchmark, so it shows only the ranking, not real miss rates.

The experiments measure a few sizes per policy and report rates only. They
do not sweep |G| over its full range, and they do not count the accesses an
attacker needs to find the congruent lines.
