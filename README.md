# HybCache in SystemVerilog: a cache that is side-channel-resilient only for isolated code

Cache side-channel attacks such as Prime+Probe and Flush+Reload work for two
reasons. First, mutually distrusting programs share cache lines. Second, an
address always maps to the same cache set, so an attacker can build an
eviction set for the victim's addresses ahead of time. Most defences remove
these causes for all code and so slow all code down. HybCache removes them
only for code that runs in an **isolated domain**, such as an enclave or an
isolated process. All other code, the **non-isolated domain**, still gets a
plain set-associative LRU cache with its full capacity and speed.

The mechanism is a soft partition. In every set, a few ways that are fixed
when the chip is designed (`ISO_WAYS`, 2 by default) also belong to a second
cache, the **subcache**. Isolated code may use only the subcache. It uses the
subcache *fully associatively*: any line can go into any subcache entry, in
any set. On a miss, the entry to replace is picked *uniformly at random*.
Each subcache entry records the **line-IDID**, the isolation-domain ID of the
domain that brought the line in, and a request can only hit on a line of its
own domain. Non-isolated code can still use the subcache ways as ordinary
ways of their set. Its LRU policy evicts a subcache way only when the set is
full.

This repository holds synthesizable RTL for one HybCache level, the blocks
inside it, a two-core three-level hierarchy built from these levels, and
self-checking testbenches.

## 1. Domains and the request format

Every request carries a 4-bit **IDID**, so the cache supports up to 16
domains. IDID 0 is the non-isolated domain, and 1 to 15 are isolated domains.
The cache does not decide which process gets which IDID. A trusted kernel,
firmware or the processor assigns them, and the core sends the IDID of the
running process with each access. If nothing assigns IDIDs, every request
carries 0 and the cache is an ordinary LRU cache. This makes the design
backward compatible.

`hyb_pkg::req_t` holds `op`, a 46-bit byte address, the `idid` and a 64-bit
`wdata`. `hyb_pkg::rsp_t` holds a 512-bit `rdata` line and a `hit` status
bit. Lines are 64 bytes, so the offset is 6 bits. The 40-bit rest of the
address is the *line address*. The subcache stores the whole line address as
its **extended tag**.

| op | effect at each level |
|---|---|
| `OP_READ` | Return the line. On a miss, fetch it from below and fill it here. |
| `OP_WRITE` | Write-through of one word, selected by `addr[5:3]`. A hit also updates the cached copy. A miss allocates nothing. |
| `OP_FLUSH` | Invalidate the line, but only if the requester itself could hit on it, then pass the flush down (like `clflush`). |
| `OP_FLUSH_DOM` | Invalidate, in one cycle, every subcache line whose line-IDID equals `idid`, then pass the flush down. Used at a context switch when an IDID is reused. |

## 2. How a request is served (`hybcache`)

The controller first checks the request IDID (step A). It then takes one of
two paths.

**Non-isolated path (IDID = 0).**
- Index the set with the address's set bits and compare the request tag with
  the normal tag of every way in that set (`hyb_sa_match`).
- A subcache way stores the extended tag. Only its upper, set-associative
  part is compared, exactly as for a normal way.
- A tag match in a main way is a hit.
- A tag match in a subcache way is a hit only if that line's line-IDID is 0.
  Otherwise the match is *refused* and the request misses.
- On a miss, the line goes into the set's LRU way (`hyb_lru`). An invalid way
  is used first. The LRU way may be a subcache way, so non-isolated code keeps
  every way of every set.

**Isolated path (IDID != 0).**
- Compare the 40-bit line address and the IDID with every subcache entry in
  parallel (`hyb_fa_match`). A hit needs a valid entry, an equal extended tag
  and an equal line-IDID.
- A domain therefore never hits on the non-isolated copy or on another
  domain's copy of the same memory. Each domain gets its own copy of shared
  read-only lines.
- On a miss, one of the `SETS*ISO_WAYS` entries is chosen uniformly at
  random, whoever owns it. The new line is written there with the request's
  IDID.
- Where an isolated line lands has nothing to do with its address. An
  attacker therefore cannot build an eviction set for it. The only way to
  evict a victim's line is to flush the whole subcache, which is a
  coupon-collector problem (see section 6).

**Recency.** When an isolated domain hits or fills a subcache way, that way
also becomes most-recently-used in its set. This makes the LRU policy of the
non-isolated domain unlikely to evict a line that isolated code is using.

**Timing.** Both comparator banks work in the same cycle. Only the result of
the path selected by the IDID is used. The cycle after a request is accepted
is the lookup cycle (`S_TAG`). In the cycle after that (`S_RSP`), a hit's
response is valid. So every hit takes 2 cycles, for either domain and in any
way. Every miss sends its request downstream after the same 2 cycles and
answers one cycle after the downstream response. The FSM is:

```
S_IDLE --req--> S_TAG --hit READ--> S_RSP --> S_IDLE
                  |  \--miss / WRITE / FLUSH / FLUSH_DOM--> S_MREQ --ready--> S_MWAIT --rsp--> S_RSP
```

The cache is blocking: `req_ready` is high only in `S_IDLE`. `rsp_valid` is a
one-cycle pulse and the requester must take it. Downstream requests follow the
same valid/ready protocol, and an assertion checks that a request stays
stable while it waits.

## 3. Storage layout

Subcache entry `e` is way `WAYS-ISO_WAYS + e % ISO_WAYS` of set
`e / ISO_WAYS`. The subcache ways are the highest-numbered ways of each set.

| array | entries | contents |
|---|---|---|
| `main_tag`, `main_valid` | `SETS x (WAYS-ISO_WAYS)` | set-associative tag (`40 - log2(SETS)` bits), valid |
| `sub_key`, `sub_idid`, `sub_valid` | `SETS*ISO_WAYS` | 40-bit extended tag, 4-bit line-IDID, valid |
| `data` | `SETS x WAYS` | 512-bit line |

Compared with a conventional cache, each subcache way needs `log2(SETS)`
extra tag bits and 4 IDID bits. For a 128-set L1 that is 7 + 4 = 11 bits per
subcache way.

Arrays are flip-flop arrays with combinational reads. Only the valid bits are
reset. To use SRAM macros, split `data` (and, if you like, `main_tag`) into
one-cycle-read memories; the `S_TAG` cycle is where that read fits. The
subcache tags must stay in flops, or in a CAM, because all of them are
compared at once.

## 4. Random and LRU replacement

`hyb_rng` is a 64-bit xorshift generator. It advances every cycle, and
`seed_load`/`seed` reseed it at any time. Reseeding needs no flush, because
randomness only chooses victims and is never used to find a line. The victim
index is the upper half of `rnd[31:0] * N_ISO`. This is uniform for a
power-of-two `N_ISO`. Otherwise it is biased by at most `N_ISO/2^32`.
**xorshift is not cryptographically secure.** Where an attacker could observe
enough victims to predict the stream, replace it with a CSPRNG or a true RNG
of the same interface.

`hyb_lru` keeps a true-LRU age (0 = newest) for every way of every set. The
ages of a set are always a permutation of 0 to `WAYS-1`. A touch makes the
touched way 0 and ages every way that was younger than it. The victim is the
lowest invalid way if there is one, otherwise the way of age `WAYS-1`.

## 5. The hierarchy (`hybcache_top`)

```
      core 0 (IDID per request)            core 1
      |ic[0]          |dc[0]               |ic[1]          |dc[1]
   [L1I 128x8]    [L1D 128x8]           [L1I 128x8]    [L1D 128x8]
        \__ hyb_arb2 __/                     \__ hyb_arb2 __/
          [L2 512x8]                           [L2 512x8]
               \_____________ hyb_arb2 ____________/
                           [L3 4096x16]
                                |
                          main memory port
```

All seven caches are `hybcache` instances with 64-byte lines and 2 subcache
ways per set:

| level | capacity | subcache entries |
|---|---|---|
| L1 | 64 KB | 256 |
| L2 | 256 KB | 1024 |
| L3 | 4 MB | 8192 |

The IDID travels with every request, so each level applies the same rules.
The arbiters are round-robin. Each holds its grant until the response comes
back, because every level has at most one transaction in flight. One `seed`
input reseeds all generators, and each level XORs it with its own constant.
Each cache drives an `ev_t` bundle of one-cycle event pulses: hits, misses,
refused matches, fills into subcache ways, evictions by random fills, and
flushes. These are meant for performance counters and for checking.

The cores and main memory are outside this module; their ports are its
ports. Writes are write-through at every level, so a core's write is
acknowledged only after memory has it. No coherence is maintained between the
two cores' L1/L2s.

## 6. What the testbenches establish

| testbench | block | what it checks |
|---|---|---|
| `tb_hyb_rng` | `hyb_rng` | bit-exact against an xorshift model, reseed, zero seed, bucket uniformity |
| `tb_hyb_lru` | `hyb_lru` | 2000 random touches and queries against a recency-list model |
| `tb_hyb_sa_match` | `hyb_sa_match` | random vectors: hits, refused matches on isolated lines |
| `tb_hyb_fa_match` | `hyb_fa_match` | random vectors: tag + IDID + valid, refused matches |
| `tb_hyb_arb2` | `hyb_arb2` | response routing, one transaction at a time, alternation under contention |
| `tb_hybcache` | `hybcache` | 2-cycle hits in both domains, equal miss times, per-domain copies, LRU order, spill into subcache ways, flush rules, domain flush, write-through, even random placement |
| `tb_hybcache_iso3` | `hybcache` | the same with 3 subcache ways per set |
| `tb_coupon_eviction` | `hybcache` | the eviction experiment below |
| `tb_hybcache_top` | `hybcache_top` | the whole hierarchy at full size, both cores and all four ports, every mechanism at least once |
| `tb_four_process` | `hybcache_top` | four concurrent processes (two isolated) on the full-size hierarchy, two per L1/L2 pair, with per-process hit rates and isolation checks afterwards |

The eviction experiment uses a 128-entry subcache (64 sets x 2 ways). Over 40
trials, an isolated attacker needed on average 696 fresh-line accesses to
evict every line of an isolated victim, with a sample variance of about
26,700. Coupon-collector theory predicts n·H(n) = 695 and about
(π²/6)·n² = 26,951. For comparison, probing a whole 512-line L1 from the non-isolated domain
takes 512 accesses.

In the four-process run, two non-isolated processes loop over 512 data lines
each, and two isolated processes over 128 lines each. On the repeat passes
the non-isolated processes hit in L1 every time. The isolated processes hit
about 81% of the time: random replacement in the 256-entry subcache
sometimes evicts a line that will be reused.

## 7. What is fixed by the design and what is a local choice

These follow the published design:
- the way-based soft partition;
- the fully associative, random-replacement subcache for isolated domains;
- LRU with full capacity for the non-isolated domain;
- the line-IDID rules for hits (no cross-domain hits, non-isolated code never
  hits isolated lines);
- recency refresh by isolated use;
- a constant 2-cycle lookup;
- 46-bit addresses, 64-byte lines, the 40-bit extended tag and the 4-bit
  IDID;
- the evaluated sizes of the three levels and 2 isolated ways per set (3 is
  the other evaluated option);
- domain flushing when an IDID is reused.

These are choices of this implementation:
- the valid/ready protocol and blocking operation;
- write-through without write-allocate;
- the exact flush semantics;
- the `S_TAG`/`S_RSP` pipeline;
- the placement of subcache ways at the top of each set and the entry
  numbering;
- filling invalid ways first;
- the xorshift generator and its multiply-high scaling;
- round-robin arbiters;
- per-level seed constants;
- the event outputs.

Not included:
- the cores;
- main memory (a behavioural model, `tb/tb_main_memory.sv`, stands in for
  it);
- the special I/O move instructions for the shared, IDID-0 communication
  region, and the MMU checks that block their misuse. These belong in the
  pipeline and MMU;
- IDID assignment by the operating system;
- a four-core top level. The four-core arrangement, in which two cores share
  each L1/L2 pair, is exercised by `tb_four_process`. There, one `hyb_arb2`
  per port merges two cores into each port of `hybcache_top`;
- cache coherence;
- slicing of the L3 by IDID.

Writable memory shared between domains is not supported by design: a write
updates only the writer's copy and memory. Other domains' copies of the same
line become stale. Shared data must go through the IDID-0 region.

## 8. Files and simulation

- `rtl/hyb_pkg.sv` holds the widths, `req_t`, `rsp_t`, `ev_t` and `op_e`.
- The modules are `hyb_rng`, `hyb_lru`, `hyb_sa_match`, `hyb_fa_match`,
  `hybcache`, `hyb_arb2` and `hybcache_top`.
- In `tb/`, `tb_pkg` defines the contents of never-written memory, and
  `tb_main_memory` is the memory model with a configurable latency.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/hyb_pkg.sv tb/tb_pkg.sv tb/tb_hybcache_top.sv --top-module tb_hybcache_top
./obj_dir/Vtb_hybcache_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. After
compilation, the full-size hierarchy test and the four-process run each take
about a second of wall-clock time.

Change the sizes with the parameters of `hybcache_top` (`L1_SETS`,
`L1_WAYS`, `L2_SETS`, `L2_WAYS`, `L3_SETS`, `L3_WAYS`, `ISO_WAYS`) or of
`hybcache` (`SETS`, `WAYS`, `ISO_WAYS`). `SETS` and `WAYS` must be powers of
two, and `1 <= ISO_WAYS < WAYS`. For a different address width or IDID width,
change `ADDR_W` or `IDID_W` in `hyb_pkg`. The extended tag follows from
`ADDR_W`.
