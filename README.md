# A randomized set-associative last-level cache that remaps by evictions, relocates in chains and detects eviction-set searches

## The problem

A conflict-based cache side channel needs an *eviction set*: a group of
addresses that map to the same cache set as a victim's address. Randomized
caches in the CEASER family hide the mapping by computing the set index as an
encryption of the line address under a hardware key. An attacker can no longer
compute eviction sets and must search for them by trial: fill the cache with
candidate addresses, observe which ones get evicted, and repeat. Changing the
key from time to time (a *remap*) throws away whatever such a search has found.

The remap period is the crux. If it is too long, a modern search algorithm
finishes within it. If it is too short, remaps become frequent, and each
remap costs misses. This design strengthens a plain (non-skewed) randomized
set-associative LLC in three ways:

1. **Remap by evictions, not accesses.** A search makes progress only when
   something is evicted, so the remap period is counted in LLC evictions.
   The default is 10 evictions per cache block, 163,840 evictions for a
   1024-set, 16-way cache. A workload with few misses is then remapped rarely,
   while an attack, which evicts constantly, is remapped often.
2. **Multi-step relocation.** During a remap every block moves to its set
   under the new key. In the classic single-step remap, a block that lands in
   a full set evicts that set's LRU block, which loses about a third of the
   cache contents. Here the displaced block, if it has not been remapped yet,
   is relocated in its turn, and so on in a chain. The chain stops at a free
   way or at a block that has already been remapped, which is the only one
   evicted.
3. **Attack detection.** A search concentrates evictions on one set. A
   detector scores the per-set eviction counts of each sample period and
   starts a remap as soon as one set stands out.

The cache is a tag-path model of one LLC slice. It covers tags, valid bits,
remap marks, LRU state, index computation, the remap machinery and the
detector. The data array, writeback unit, coherence trackers and memory port
of a real L2 are not included. The slice reports every fill, eviction and
relocation on its ports, so those parts can follow it.

## Main configuration

| Parameter | Default | Meaning |
|---|---|---|
| `SETS` × `WAYS` | 1024 × 16 | 16,384 blocks (1 MiB of data at 64 B per block) |
| `LINE_ADDR_W` | 26 | line address: a 32-bit physical address minus the 6-bit block offset |
| `ROUNDS` | 4 | Feistel rounds of the index cipher; the key is `ROUNDS × LINE_ADDR_W/2` = 52 bits |
| `EV_PER_BLOCK` | 10 | remap period in demand evictions per block (163,840) |
| `MAX_RELOC` | 0 | relocation chain limit: 0 is unlimited, 1 is the classic single step |
| `SAMPLE` | 4096 | detector sample period, in LLC accesses |
| `EMA_SHIFT` | 5 | EMA weight α = 2⁻⁵ = 1/32 |
| `THRESHOLD` | 5 | remap when a set's moving score az ≥ 5 |
| `DETECT_EN` | 1 | include the detector |

The published design fixes the cache size, the remap period, the sample
period, α and the threshold. This implementation chose the rest: the address
width, the cipher, the number formats and the whole cycle-level
microarchitecture.

## How a block is found: two keys and a pointer

`index_encryptor` computes the set index from the full line address.
`index_select` holds two copies, one for the current key *k* and one for the
next key *k'*. Outside a remap, *k' = k*.

A remap walks a **set-relocation pointer** *p* from set 0 to the last set and
empties set *p* of unremapped blocks before moving on. For a request with old
index *i* and new index *i'*:

- **If *i* < *p*:** set *i* has already been emptied, so the block can only be
  at *i'*. Only *i'* is looked up.
- **If *i* ≥ *p*:** set *i* has not been processed yet, so *i* is looked up
  first. With single-step relocation, a miss there would be final. With chains,
  however, a block may already have been relocated ahead of *p*: its old set
  has not been walked yet, but it was displaced from somewhere else. So a miss
  at *i* is **retried at *i'***, when *i' ≠ i*. Retries only happen during a
  remap and cost one extra cycle.

A miss that remains allocates the block at the set of the last lookup, in the
invalid way or the LRU way.

### The remap mark

The tracker must tell remapped blocks from unremapped ones. Clearing a
per-block flag in 1024 sets at every remap would cost time. Instead each
entry stores an **epoch bit**, and the controller toggles a global epoch at
remap start:

- An entry whose bit equals the current epoch counts as *remapped*.
- At remap start every resident block instantly becomes unremapped.
- Every block placed during the remap is written with the new epoch. This
  covers both relocated blocks and blocks filled by misses.

A metadata entry is `{valid, epoch, tag}`. The tag is the full line address,
since an encrypted index gives back no address bits.

## The remap tracker and chained relocation

`remap_tracker` owns *p* during a remap. It is a small state machine:

| State | Action |
|---|---|
| `T_REQ` | Wait for the array, then read set *p* |
| `T_SCAN` | Find the first unremapped block E in set *p*. If there is one, invalidate it in set *p* and hold it. If not, advance *p*; after the last set, pulse `remap_done` |
| `T_DRD` | Read set *i'(E)* |
| `T_PLACE` | Write E into the invalid way, or else the LRU way, of *i'(E)* with the new epoch, as most recently used |

In `T_PLACE`, what happens next depends on the way E displaced:

- **It held an unremapped block G:** G becomes the block in flight, and the
  tracker returns to `T_DRD` for *i'(G)*. This is the chain.
- **It held a remapped block:** that block is evicted, reported on
  `evict_valid` with `evict_by_remap`, and the tracker rescans set *p*.
- **It was free:** the tracker rescans set *p*.

Every placement marks a block remapped, so no block moves twice. Each chain
therefore ends, and a remap relocates exactly one block per resident block.

Each step is one read cycle and one write cycle. The tracker keeps the
metadata array for a whole scan or a whole chain. This means a request never
observes the moment when a block is held only in the tracker's register. The
same property is what lets the transaction controller trust a miss at *i'*.

Measured on a completely full 1024 × 16 cache (`tb_remap_retention`):

- Unlimited chains keep **89.9%** of the blocks.
- Single-step relocation keeps **62.5%**.

Published averages for this configuration are about 90% and 63%.

## Remap trigger and keys

`remap_controller` counts demand evictions (misses that displace a valid
block). When the count reaches `EV_PER_BLOCK × SETS × WAYS`, or when the
detector pulses, it does the following in one cycle:

- loads *k'* from a 64-bit xorshift generator, seeded from the `key_seed` port
  at reset;
- toggles the epoch;
- restarts the count;
- starts the tracker.

When the tracker finishes, *k* takes the value of *k'*. During a remap,
further detector requests are dropped, and demand evictions already count
toward the next period. Evictions caused by relocation do not count.

The xorshift generator is a stand-in. It is not a secure random source, and a
real design needs a true random number generator here.

## The attack detector

For each sample period of 4096 LLC accesses, `attack_detector` counts the
evictions *e_i* of every set. At the end of the period it computes:

```
z_i  = e_i / sqrt( sum(e^2) / (S-1) )      non-centred Z-score
wz_i = (e_i - mean(e)) * z_i               weighted by the set's excess
az_i = az_i + (wz_i - az_i) / 32           exponential moving average
```

and pulses `detect` when some `az_i ≥ 5`.

- **An ideal prime-prune-test round** puts 16 evictions on one set and none
  elsewhere. That set gets wz ≈ 16·√1024 = 512 and az ≈ 16, so one round is
  enough.
- **A single stray eviction in a quiet period** gives wz ≈ 32 and az ≈ 1, so
  it is ignored.
- **An attacker who spreads the search thinly** still raises one set's wz
  to about 32 period after period. The average accumulates it until the
  threshold is reached.

The hardware avoids a divider and a square root per set:

1. A first pass over the sets sums *e* and *e²* (1024 cycles).
2. A sequential divider and a sequential square-root unit (`seq_udiv`,
   `seq_isqrt`, one bit per cycle) compute `1/sqrt(sum(e²)/(S-1))` once.
3. A second pass multiplies, updates az and clears the counters (1024 cycles).

An evaluation takes **2181 cycles** at the default size. A sample period lasts
at least 4096 accesses, and the controller accepts at most one access every 3
cycles, so the evaluation always ends before the next sample.

Two counter banks alternate, so evictions keep being counted during an
evaluation. Scores are signed fixed point with 8 fraction bits; az is 24 bits
and the counters 13 bits, all saturating. `tb_attack_detector` compares every
az with a real-number model and requires agreement within 5% + 0.1. After a
remap all az are cleared at the next evaluation, because set numbers mean
something else under the new key.

## The transaction controller and array sharing

`llc_controller` serves one request at a time. A request is an access (which
allocates on a miss) or a flush (which invalidates). The cycle sequence is:

1. **Cycle 0:** accept the request and read the set.
2. **Cycle 1:** compare the tags, then write the updated LRU ages, the
   flushed entry or the fill. A retry at *i'* instead reads the new set here.
3. **Response:** `resp_valid` rises 2 cycles after acceptance, or 3 with a
   retry.

The keys, the epoch and *p* are captured at acceptance. A remap that starts
in the middle of a request therefore does not mix the two mappings.

`rand_llc` connects the controller and the tracker to the single port pair of
`metadata_array` through an owner register:

- The owner keeps the port while it requests it.
- When both wait, the one that did not own it last gets it.
- A remap can start at any time once the array is initialised, because the
  controller has captured its own view of the mapping.

`metadata_array` is written as plain arrays with a synchronous whole-set read
(1 cycle) and a whole-set write. After reset it clears itself, one set per
cycle, and holds `ready` low for those 1024 cycles.

## Ports of the top (`rand_llc`)

- **Request:** `req_valid / req_ready / req_op / req_addr`.
- **Response:** `resp_valid` with `resp_hit`, `resp_retry`, `resp_set`,
  `resp_way`.
- **For a data array and writeback path:**
  - `evict_valid / evict_by_remap / evict_addr / evict_set` for every block
    that leaves;
  - `reloc_valid` with source and destination set and way for every
    relocation;
  - fills are the miss responses.
- **Status:** `remap_active`, `remap_start`, `remap_ptr`, `detect`,
  `detect_set`, `evict_count`.
- **Event counters:** `remaps_by_period`, `remaps_by_detect`, `relocations`,
  `chained_relocations`, `remap_evictions`, `retries`, `detect_evaluations`,
  `detect_overruns`.

## Where this departs from the published design

- **Cipher.** The cipher is not specified there. The 4-round Feistel network
  used here is a stand-in for a low-latency block cipher and makes no
  security claim.
- **One transaction at a time.** The reference L2 runs two acquire trackers
  and one release tracker concurrently. Here one controller serves one request
  at a time, so the race checks between parallel trackers are not needed.
- **Chains inside the tracker.** The published description recycles a
  displaced block back into the remap tracker as a prioritised writeback. Here
  the tracker keeps it in a register and continues the chain directly. The
  resulting placements are the same.
- **Choices of this design.** The following are not specified by the source:
  - the epoch-bit encoding of the remap mark;
  - MRU insertion of relocated blocks;
  - not counting relocation evictions toward the period;
  - dropping detector requests during a remap;
  - clearing the scores after a remap;
  - the cycle timing throughout.
- **Not modelled.** Data array, dirty state, writeback, coherence, the memory
  interface and a true random number generator.

## Simulating

The package `rtl/llc_pkg.sv` must come first. Testbenches that use the
reference cipher also need `tb/tb_enc_ref_pkg.sv`. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/llc_pkg.sv tb/tb_enc_ref_pkg.sv \
  -y rtl -y tb tb/tb_rand_llc_full.sv --top-module tb_rand_llc_full -o sim
./obj_dir/sim
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_index_encryptor` | the cipher against an independent integer model; spread over the sets |
| `tb_index_select` | index choice and retry rule over random *i*, *i'*, *p* |
| `tb_lru_replacer` | recency order, permutation of ages, invalid-first victim |
| `tb_metadata_array` | reset sweep timing, read latency, read-during-write |
| `tb_remap_controller` | exact period trigger, key hand-over, detector start, enable |
| `tb_remap_tracker` | a full remap, multi-step and single-step, block conservation |
| `tb_remap_retention` | the same at 1024 × 16: about 90% versus 63% retention |
| `tb_attack_detector` | az of every set against a real-number model, detection, 2181 cycles |
| `tb_llc_controller` | hit/miss/LRU/flush against a per-set model; retry at *i'*; 2- and 3-cycle latency |
| `tb_rand_llc` | end to end at 16 × 4 |
| `tb_rand_llc_full` | end to end at the default size |
| `tb_ppt_attack` | a prime-prune-test eviction-set search at the default size, with the detector on |

The two end-to-end tests keep a shadow of the cache contents built only from
the cache's own fill, flush and eviction reports. Every response must agree
with that shadow, so a block lost or duplicated by remapping, chaining or
retrying shows up at once. Each test must also see every mechanism at least
once: a period remap, a detector remap, a chained relocation, a remap
eviction, a retry and a flush.

The full-size run takes a few seconds and goes through one complete
163,840-eviction remap and two detector remaps. Over that run:

- 45,486 blocks were relocated, 36,725 of them in chains;
- 4,059 blocks were evicted by relocation;
- 7,192 requests were retried.

### A prime-prune-test attack

`tb_ppt_attack` plays the attacker against the full-size cache. Each round:

1. **Prime:** access 8192 fresh random addresses.
2. **Prune:** re-access them and drop those that miss, until a pass has no
   miss.
3. **Test:** access the target, then re-access the pruned set. Whatever
   misses now is taken as congruent with the target.

The testbench knows the true set of every response and counts how many
collected addresses really share the target's set under the current key.

Over 6 rounds, the detector started 25 remaps, several per round. Not all of
them come from the test phase: rounds whose test pass saw no miss still added
remaps. The self-evictions of priming fall on the few overfilled sets and
stand out against an otherwise quiet cache. The attacker never held even one true
congruent address under a single key, and 16 are needed. This agrees with the
published result that, with 4K-access samples and a threshold of 5, an
eviction set is almost never found. It also suggests a cost: a program that
behaves like a prime phase, streaming fresh data through half the cache, can
trigger remaps as well.

