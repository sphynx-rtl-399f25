# Shared L1 instruction cache for a many-core SPMD machine

When every core of a wide parallel machine runs the same program, each core's
private instruction cache ends up holding the same lines. Sixteen private
caches then store sixteen copies of one instruction stream. This design shares
one L1 instruction cache among a group of cores. The group can be two cores,
a larger subset, or the whole chip. The aim is to cut on-chip instruction
storage by the sharing factor. A line fetched for one core is then already
there for the others, so compulsory misses are shared as well. The cost is
contention: the shared cache still has one read port, so cores that fetch in
the same cycle must wait their turn.

The RTL models the instruction-fetch side of a 16-core GPU of the GTX580 /
Fermi class, where each core is a streaming multiprocessor (SM). Every
cache keeps the per-SM Fermi geometry: 4 sets, 4 ways, 128-byte lines, 2 KiB
of data. Only the number of SMs behind each cache changes. The SMs, the L2
and the memory system sit outside this RTL. They appear only as ports, and
the testbenches supply behavioural models for them.

The design follows the shared-instruction-cache proposal of the Sphynx study
(D. Park, A. Bagaria, F. Hannan, E. Storm, J. Spjut). That study evaluated the
idea in a GPU simulator; the RTL here is an independent implementation of it.

## Sharing groups

`sphynx_top` has `NUM_CORES = 16` fetch ports and builds
`NUM_CACHES = NUM_CORES / CORES_PER_CACHE` sharing groups. Core `c` belongs to
group `c / CORES_PER_CACHE`.

| `CORES_PER_CACHE` | caches | instruction data on chip | arrangement |
|---|---|---|---|
| 1  | 16 | 32 KiB | conventional: a private cache per core |
| 2  | 8  | 16 KiB | paired cores |
| 4  | 4  | 8 KiB  | |
| 8  | 2  | 4 KiB  | |
| 16 (default) | 1 | 2 KiB | fully shared |

The default is the fully shared limit. The other rows are the steps of the
sharing sweep, and each one is a single parameter change. Each group
(`icache_cluster`) has three parts: a round-robin `fetch_arbiter`, one
`shared_icache` and its `icache_perf_counters`. The group has one refill port
towards L2. Storage falls by the sharing factor, while the fetch load on each
cache rises by that same factor.

## The shared cache

### Address split (32-bit byte address, defaults)

```
 31                    9 8   7 6      3 2    0
+-----------------------+-----+--------+------+
|        tag (23)       | set | word   | byte |
|                       | (2) | (4)    | (3)  |
+-----------------------+-----+--------+------+
```

One fetch returns one aligned 64-bit instruction, so a line holds 16 words.
Tags, valid bits and LRU ages are kept in flip-flops. The data array is a
4 x 4 x 1024-bit memory that is written one whole line at a time.

### Lookup, miss and refill

The cache is a small state machine: `IDLE`, then `MISS_REQ`, then `MISS_WAIT`,
then back to `IDLE`.

* **IDLE, hit.** `ready_o` is high. A request is compared with the four tags
  of its set in the same cycle. On a hit, the word is registered, and on the
  next cycle the cache raises `rsp_valid_o` for one cycle, together with the
  requester's id. The hit way becomes the most recently used.
* **IDLE, miss.** The address and id are captured and the cache moves to
  `MISS_REQ`. In that state it holds `l2_req_valid_o` high, with the line
  address, until `l2_req_ready_i` comes.
* **MISS_WAIT.** The cache waits for `l2_rsp_valid_i`, which brings the whole
  128-byte line in one beat. The line is written into the victim way: the
  lowest invalid way, or else the least recently used one. The waiting
  request is answered from the incoming line on the next cycle, and the cache
  returns to `IDLE`.

```
cycle        0      1      2         3 ... k      k+1
request      A      B      -         -     -      -
lookup       hit    miss
state        IDLE   IDLE   MISS_REQ  MISS_WAIT    IDLE
l2_req_valid               B line    (ready seen in cycle 2)
l2_rsp_valid                               line
rsp_valid           A                             B
```

This is a blocking cache with one outstanding miss. For the whole miss
`ready_o` stays low, so every other core stalls, even a core whose line is
present. This is the situation in which the stall rate rises well above the
miss rate.

Replacement is true LRU. Each way of a set carries an age from 0 (most recent)
to `NUM_WAYS-1`. On a touch, every way younger than the touched way ages by
one, and the touched way goes to 0. Reset sets the ages to 0,1,2,3, so they
always form a permutation and exactly one way is the oldest.

## Arbitration and what counts as a stall

The cache performs one lookup per cycle, so arbitration happens in front of
it. `fetch_arbiter` grants the first requester after the core granted last,
wrapping around. A core that keeps requesting is therefore served within
`N-1` grants. When all cores request, the port completes exactly one lookup
per cycle.

The processor handshake works like this:

* A core holds `valid` and `addr` until it sees its grant.
* It then drops the request and waits for its one-cycle response. On a hit
  the response comes one cycle after the grant. On a miss it comes one cycle
  after the L2 line arrives.
* Assertions in `icache_cluster` enforce that the request stays stable until
  granted and that a core does not request again while its fetch is open.

A **stall** is one core refused in one cycle. The core may be refused because
another core won the port, or because a miss holds the cache. The counters
give the two figures of merit:

```
miss rate  = misses / accesses
stall rate = stalls / (accesses + stalls)
```

Here `accesses = hits + misses` counts lookups, one per grant. The counters
are 32 bits wide and wrap, and `perf_clear_i` zeroes them.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_CORES` | 16 | `sphynx_top` (GTX580 SM count) |
| `CORES_PER_CACHE` | 16 | `sphynx_top`; 1, 2, 4, 8 are the other steps of the sweep |
| `NUM_SETS` | 4 | `sphynx_top`, `icache_cluster`, `shared_icache` (a power of two) |
| `NUM_WAYS` | 4 | same |
| `LINE_BYTES` | 128 | `sphynx_pkg` (sets the 1024-bit refill bus) |
| `INST_W` | 64 | `sphynx_pkg` |
| `ADDR_W` | 32 | `sphynx_pkg` |

## What is given and what is chosen here

Taken from the study:

* a single instruction cache shared by groups of 1 to 16 SMs
* the 4-set, 4-way, 128-byte-line geometry, the same for every cache
* 16 SMs
* refill from a shared L2
* a cache that serves one access at a time, so that sharing creates stalls
  separate from misses
* miss rate and stall rate as the two metrics

Choices made in this RTL, because the study gives no detail on them:

* round-robin arbitration
* true LRU replacement
* a blocking cache with a single outstanding miss
* a one-cycle hit latency
* a single-beat 1024-bit refill with a valid/ready request
* the 64-bit fetch word and the 32-bit address
* contiguous assignment of cores to groups
* the counting rule for stalls, and exposing the rates as hardware counters
* synchronous active-low reset of valid bits, ages and state (the data array
  is not reset)

Not built:

* **A multi-banked cache**, in which different banks serve different cores in
  the same cycle. It is the obvious next step against stalls, but it was never
  specified in enough detail to build.
* **The SMs, the L2, the on-chip interconnect, the memory controllers and
  DRAM.** These are the host GPU's own parts.
* **Uneven groups.** All groups have the same size. A mix of private and
  shared groups on one chip would need a per-group size list.
* **A larger shared cache.** Sharing could instead keep the total capacity
  and make each shared cache bigger. Only `NUM_SETS` and `NUM_WAYS` reach
  that; the default keeps the per-core geometry.
* **Timing.** The design targets a 700 MHz core clock, but no timing work has
  been done on this RTL.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M`.

* `tb_fetch_arbiter`: compares each cycle against a reference scan, on random
  traffic and on saturated traffic. On saturated traffic, each of 16
  requesters must be served exactly once per 16 cycles.
* `tb_shared_icache`: predicts hit or miss for every fetch with a reference
  model (an MRU-ordered tag list per set). It checks:
  * the instruction returned and the id
  * one-cycle hit latency
  * that no L2 request is sent on a hit
  * the L2 line address on a miss
  * a response exactly one cycle after the refill
  * `ready` low for the whole miss
  * LRU eviction, with a directed five-lines-in-one-set case
* `tb_icache_perf_counters`: random events and a clear, compared against
  totals kept by the testbench.
* `tb_icache_cluster` (4 cores) and `tb_sphynx_top` (16 cores, one cache,
  every parameter at its default): processor models run one program and check
  every instruction. The testbench checks each cycle:
  * at most one grant per cycle
  * exactly one grant whenever the cache is idle and a core requests
  * no core refused more than `N-1` idle cycles in a row

  At the end of each phase the cache's counters must match the testbench's own
  counts. Each mechanism is counted and must occur at least once: hit, miss,
  refetch of an evicted line, contention stall, stall behind a miss, L2
  back-pressure, counter clear, and service of every core.
* `tb_sphynx_sharing`: five 16-core copies at 1, 2, 4, 8 and 16 cores per
  cache run side by side. They fetch over a 12-line footprint, which fits in
  one cache. The test checks the effect on both sides:
  * private caches never stall, and stalls grow with every doubling of the
    sharing factor
  * misses never grow with sharing: 16 x 12 = 192 compulsory misses with
    private caches, exactly 12 with one shared cache

  A second set of five copies fetches over a 64-line footprint, four times
  what one cache holds. There one cache for sixteen cores must miss more often
  than private caches do, because it cannot keep every core's current lines at
  once. This is the case of a long program fetched by many cores.

One run gave the following:

| cores per cache | miss rate, 12 lines | stall rate, 12 lines | miss rate, 64 lines | stall rate, 64 lines |
|---|---|---|---|---|
| 1  | 0.0064 | 0    | 0.095 | 0    |
| 2  | 0.0032 | 0.07 | 0.098 | 0.50 |
| 4  | 0.0020 | 0.49 | 0.096 | 0.79 |
| 8  | 0.0020 | 0.83 | 0.128 | 0.93 |
| 16 | 0.0020 | 0.93 | 0.321 | 0.98 |

The processor models try to fetch on about 90% of cycles, far more often
than an SM does. That is why the stall rates are high. Only the trend means
anything here; these are not GPU benchmark results.

The behavioural models are all in `tb/`:

* `l2_model`: fixed latency and random back-pressure
* `core_fetch_model`: an SPMD fetch stream with random jumps
* `sharing_harness`: one copy of the fetch side for the sweep

All instruction words come from a formula in `sphynx_tb_pkg`, so no memory
image is needed.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sphynx_pkg.sv tb/sphynx_tb_pkg.sv tb/tb_sphynx_top.sv \
    --top-module tb_sphynx_top -o sim
./obj_dir/sim
```

To run a different test, replace `tb_sphynx_top` with that testbench's name.
All of them finish in well under a second.

## Synthesis notes

With the defaults, one cache synthesises to the following:

* 16,800 bits of memory arrays: 16,384 bits of line data plus 416 bits of
  tags, valid bits and ages. The tag-side arrays are read asynchronously, so
  in practice they become flip-flops.
* about 240 further flip-flops, for the state machine, the miss registers,
  the response register, the counters and the arbiter pointer

The low 7 bits of `l2_req_addr_o` are constant zero because line addresses
are aligned.
