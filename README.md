# GRASP: graph-aware replacement for a shared last-level cache

Graph analytics spend most of their last-level-cache (LLC) traffic on the
*Property Array*, the per-vertex data read through the edge lists. In natural
(power-law) graphs a small set of richly connected *hot* vertices receive most of
those reads, so their blocks are the ones worth keeping. Ordinary replacement
cannot tell them apart: every vertex is read by the same load instruction, and the
stream of reads to cold vertices pushes hot blocks out before they are reused.

GRASP (from "Domain-Specialized Cache Management for Graph Analytics", Faldu,
Diamond and Grot, HPCA 2020) solves this with a division of labour:

* **Software** reorders vertices by degree (e.g. DBG or HubSort), which puts the
  hottest vertices at the start of the Property Array, then writes the array's
  start and end virtual addresses into a pair of *Address Bound Registers* (ABRs).
* **Classification hardware** next to the L1-D compares each LLC-bound address with
  the ABRs. The first LLC-sized part of the array is the *High Reuse Region*, the
  next LLC-sized part the *Moderate Reuse Region*. The result travels to the LLC as
  a 2-bit *Reuse Hint*.
* **The LLC** keeps its usual RRIP state (a 3-bit re-reference prediction value,
  RRPV, per block) and only changes which value it writes on a fill or a hit,
  depending on the hint. It evicts exactly as RRIP does and stores no hint.

This repository is synthesizable SystemVerilog for the GRASP parts (ABRs,
classifier, hint-driven RRIP) embedded in a tag-level model of the LLC of the
evaluated system: 8 cores, a 16MB 16-way LLC built from eight 2MB slices with a
10-cycle access, and a ring of 2 cycles per hop between cores and slices.

## Reuse classes and the hint

| Hint (code) | Address lies in ... |
|---|---|
| High-Reuse (`11`) | the first R bytes of a Property Array |
| Moderate-Reuse (`10`) | the next R bytes of a Property Array |
| Low-Reuse (`01`) | anywhere else, including the Vertex and Edge arrays and the cold tail of the Property Array |
| Default (`00`) | the core has no ABR pair set (not a graph program) |

R is the LLC capacity divided by the number of ABR pairs in use: 16MB with one
array, 8MB each with two. The code values are this implementation's choice; only
the 2-bit width is given by the source design.

A pair is *in use* once both its Start and End register have been written since
the last clear, and Start <= End. End holds the address of the array's last byte.
Because only comparisons are needed at access time, `abr_file` precomputes the two
region limits per pair (start + R and start + 2R) one cycle after a register write,
and `grasp_classifier` is a set of magnitude comparators. R comes from a small table
of elaboration-time constants LLC_BYTES / n, n = 1..NUM_PA, so there is no divider.

## What the LLC does with the hint

Per block, a 3-bit RRPV: 0 means "expected to be reused soon" (the MRU end), 7 means
"evict first" (the LRU end).

| Hint | value written on a fill | change on a hit |
|---|---|---|
| High | 0 | set to 0 |
| Moderate | 6 | decrement if above 0 |
| Low | 7 | decrement if above 0 |
| Default | 6 or 7, chosen by DRRIP | set to 0 |

Victim selection does not look at the hint: the first way holding 7 is evicted;
if no way holds 7, every RRPV in the set is raised until one does. `grasp_rrip_policy`
does this in a single combinational step by adding (7 - max RRPV) to every way and
taking the first way that held the maximum. Invalid ways are filled first, without
ageing.

The combination is what makes GRASP flexible rather than a pin. Consider one set
where a hot block H was filled with hint High (RRPV 0) and a stream of cold blocks
arrives with hint Low:

1. Each cold block is filled at 7. The next cold miss finds a 7 already present,
   evicts that cold block, and ages nobody. H stays at 0 indefinitely.
2. If a cold block is hit once, it moves to 6 and gets a little protection; a
   Moderate block, filled at 6, starts there. Neither reaches 0 unless it keeps
   being hit.
3. Ageing only happens when the set holds no 7, i.e. when the set is full of
   blocks that have proven reuse or are hot. Then H ages with everyone else; if
   it is not referenced again while others are, it reaches 7 and leaves. So hot
   blocks that stop being used do give way, unlike in a pinning scheme.

With Default hints the same stream behaves as plain DRRIP: fills at 6 (static
mode) repeatedly age the set and a block filled earlier is eventually evicted.
The end-to-end testbench checks exactly this pair of outcomes.

### DRRIP underneath (Default hint)

The source design runs on dynamic RRIP but does not restate its constants.
`drrip_dueling` uses the common ones: in each slice, sets with index mod 64 = 0
always use static RRIP (fill at 6) and sets with index mod 64 = 1 always use
bimodal RRIP (fill at 7, except one fill in 32 at 6); misses in those leader sets
move a 10-bit saturating selector, and all other sets follow whichever leader group
misses less. The "one in 32" is a 5-bit counter, not a random source. Only fills
with the Default hint take part: hinted fills do not use the DRRIP value.

## Structure

```
grasp_top
├── grasp_frontend  x NUM_CORES     per core, beside the L1-D
│   ├── abr_file                    ABR pairs, region limits
│   └── grasp_classifier            VA -> 2-bit Reuse Hint
├── ring_noc                        ring latency, core <-> slice, both ways
└── llc_nuca                        shared LLC
    └── per slice (x NUM_SLICES)
        ├── rr_arbiter              which core's request enters the slice
        └── llc_slice               tags, valid bits, RRPVs of 2048 sets x 16 ways
            ├── grasp_rrip_policy   fill/hit RRPV update and victim choice
            └── drrip_dueling       Default-hint fill value
```

`grasp_pkg` holds the hint type (`reuse_hint_e`), the RRPV width and constants,
and the 48-bit virtual/physical address widths.

The core, its TLB, the L1/L2 caches and the memory controllers are outside the
RTL. At the top, each core port carries an LLC-bound
request with both its virtual address (for classification) and its translated
physical address (for the cache), which is where an L1-D miss and the TLB
result meet in the source design's block diagram.

### Address layout inside the LLC

Blocks are 64 bytes. Physical address bits [5:0] are the byte offset, the next
log2(NUM_SLICES) bits choose the slice, the next log2(SETS) bits the set, and the
rest is the tag (28 bits at the default size). The interleaving and the 64-byte
block are choices of this implementation.

## Interfaces and timing

* **ABR programming** (per core): `abr_wr_en`, `abr_wr_idx` (pair), `abr_wr_is_end`
  (0 = Start, 1 = End), `abr_wr_data`; `abr_clear` unsets every pair (use it when the
  application exits or the context changes). New bounds take effect two cycles
  after the write.
* **Request** (per core): `acc_valid`/`acc_ready` handshake with `acc_va` and `acc_pa`.
  Classification is combinational; the frontend registers `{PA, hint}` and hands it
  to the ring in the next cycle. Each core has at most one request open.
* **Ring**: core c sits at ring stop c and slice s at stop s·NUM_CORES/NUM_SLICES
  (one slice per core). A request takes the shorter way round; with `hops` the
  distance, it reaches its slice `1 + 2·hops` cycles after the ring took it, and the
  answer returns `1 + 2·hops` cycles after the slice gave it. An uncontended access
  therefore takes `ACCESS_LAT + 3 + 4·hops` cycles from `acc_valid & acc_ready` to
  `resp_valid`: 13 cycles to the local slice, up to 29 across the ring.
* **Slice**: one access at a time per slice; the response comes exactly `ACCESS_LAT`
  (10) cycles after the slice accepts it, and a new request can be accepted in the
  response cycle. Requests to different slices proceed in parallel; requests to the
  same slice are served round-robin.
* **Response** (per core): a one-cycle `resp_valid` pulse with `resp_hit`,
  `resp_evict` (a valid block was replaced), `resp_aged` (the set had to be aged)
  and `resp_hint` (the hint that was applied).
* **Reset**: `rst_n` is asynchronous, active low. Afterwards every slice clears its
  valid bits one set per cycle; `init_done` rises after SETS cycles and requests are
  held off until then.

## Parameters

| Parameter (grasp_top) | Default | Origin |
|---|---|---|
| NUM_CORES | 8 | evaluated system |
| NUM_SLICES | 8 | 16MB LLC, one 2MB slice per core |
| WAYS | 16 | evaluated system |
| SETS | 2048 | 2MB / (16 ways x 64 B) |
| BLOCK_BYTES | 64 | this implementation |
| ACCESS_LAT | 10 | LLC bank access latency of the evaluated system |
| NUM_PA | 2 | the evaluated programs needed at most two Property Arrays |
| HOP_CYCLES | 2 | ring hop latency of the evaluated system |

The region size R follows from the LLC capacity (NUM_SLICES x SETS x WAYS x
BLOCK_BYTES), so changing the geometry, e.g. SETS = 128 for a 1MB LLC or 4096 for
32MB, keeps GRASP's regions consistent. Each slice holds 2048 x 512 bits of
set state (valid, RRPV and tag per way).

## Departures from the source design

* **No data path.** Slices keep tags, valid bits and RRPVs but no data. A miss
  allocates the block at once; refill, write-back and coherence are not modelled.
  GRASP changes only replacement state, which is complete here.
* **Ring latency only.** The evaluated system connects cores and slices with a
  ring of 2 cycles per hop, and gives nothing more about it. `ring_noc` adds that
  delay per hop in each direction, over a bidirectional ring with shortest-way
  routing (own choice). Messages never compete for ring links, so ring contention
  is absent.
* **No ABR read-back at the top.** The ABRs belong to an application's context,
  so an operating system switching contexts has to restore them. `abr_file` exposes
  its stored bounds, but `grasp_top` brings out only the write and clear ports: on a
  switch, software re-writes the bounds from its own copy.
* **One access per slice at a time.** The 10-cycle latency is modelled as a
  non-pipelined bank.
* **Own choices where the source design is silent:** hint codes; 48-bit
  addresses; End as an inclusive address; the ABR write port and `abr_clear`; the
  "pair is set" rule; filling invalid ways first; DRRIP's constants and its
  counter-based bimodal choice; one dueling unit per slice; a registered request
  stage and one open request per core.

## Verification

Each block has a self-checking testbench in `tb/` that compares against a
reference model written independently in the testbench, and prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_abr_file` | pair-set rule, region limits for one and two arrays, clear, Start > End, write-to-limit timing |
| `tb_grasp_classifier` | 8000 addresses drawn around every region edge, all four hints |
| `tb_grasp_rrip_policy` | 20000 random sets against a step-by-step RRIP ageing model, every hint x hit/miss |
| `tb_drrip_dueling` | leader/follower behaviour, PSEL saturation, 1-in-32 bimodal fills |
| `tb_llc_slice` | 3000 mixed-hint accesses vs a reference cache incl. DRRIP; exact 10-cycle latency; reset clearing time |
| `tb_llc_nuca` | 4 cores on 4 slices at once; per-response reference check; arbitration bound |
| `tb_ring_noc` | 8 cores x 300 requests against a stub LLC: exact delay out and back for every ring distance 0-4, address, hint and flags carried unchanged |
| `tb_grasp_top` | end to end at 4 cores / 16KB LLC: exact reference of the whole LLC for one core, hot-block protection vs plain DRRIP, a concurrent skewed graph sweep with a non-graph core; every mechanism counted |
| `tb_grasp_top_full` | the same run on the default 8-core, 16MB configuration |
| `tb_grasp_workload` | a whole pull-style graph iteration through the LLC, with and without GRASP (below) |

The two end-to-end tests share `grasp_top_harness`. Its graph sweep interleaves
streaming reads of Vertex/Edge arrays with Property Array reads whose vertex ID is
drawn as N·u⁴ (u uniform in [0,1]), which mimics a degree-sorted power-law array.

`tb_grasp_workload` generates a 32768-vertex graph with 8 in-edges per vertex and
16-byte Property Array elements (512KB, eight times a 64KB test LLC of 4 slices x
16 sets x 16 ways), splits the destination vertices over four cores and replays
the same trace twice from reset: once with the ABRs unset (all hints Default, i.e.
plain DRRIP) and once with the Property Array bounds programmed.

| Graph | DRRIP misses | GRASP misses | Reduction |
|---|---|---|---|
| sources drawn as V·u⁴ (high skew) | 152800 | 139546 | 8.7% |
| sources uniform (no skew) | 258236 | 257289 | 0.4% |

The shape matches what GRASP is meant to do: a clear gain when a small,
front-loaded set of vertices takes most reads, and no loss when it does not.
Almost all of the gain is in High-Reuse blocks (9691 misses out of 156814
accesses). The test requires GRASP to miss less on the skewed graph and no more
than 3% more on the uniform one.

Concurrent assertions cover the handshakes: an offered LLC request stays stable
until taken, a response only reaches a core with a request open and comes from
one slice, each accepted slice request is answered exactly `ACCESS_LAT` cycles
later, and arbiter grants are one-hot and only go to requesters. Run with
`--assert` to enable them.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_grasp_top \
    rtl/grasp_pkg.sv rtl/*.sv tb/grasp_top_harness.sv tb/tb_grasp_top.sv
./obj_dir/Vtb_grasp_top
```

Block testbenches need only the block's file and the files it instantiates,
e.g. `rtl/grasp_pkg.sv rtl/grasp_rrip_policy.sv tb/tb_grasp_rrip_policy.sv`.
All testbenches run in under a second, except `tb_grasp_workload`, which takes about 25 seconds.

What the tests do not show: the performance claims of the source design (miss and
speed-up figures over real graph workloads) depend on full-system simulation with
real graphs and are not reproduced here.
