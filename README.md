# Contention-aware arbitration and throttling for an LLM-serving last-level cache

During LLM decoding, attention operators stream the KV cache from DRAM and do
very little arithmetic per byte. On a many-core accelerator with a shared,
sliced last-level cache (LLC), the limit is then how many misses the LLC can
keep in flight, not its capacity. Each slice has only a few miss status
holding registers (MSHRs). Once they are all taken, the slice pipeline stalls,
and cache hits queued behind the stalled miss stall with it.

This RTL implements an LLC subsystem that attacks that limit in two ways.

* **Cache arbitration (CAT arbiter).** Each slice reorders its request queue. It
  predicts which waiting requests will hit in the cache, and which will hit a
  miss that is already in flight (an MSHR hit). These are sent first, because
  they consume no new MSHR entry. A per-core progress counter breaks ties in
  favour of the core that is furthest behind. This policy is called *BMA*
  (balanced + MSHR-aware).
* **Throttling.** A global controller measures how often the slices stall.
  From that it sets a *gear*: how many of the fastest cores to throttle. A
  small controller in each throttled core then lowers the number of thread
  blocks that core may run, based on how often the core waits for memory.

The design is a fixed configuration:

* 16 cores and 8 LLC slices;
* 16 MB of LLC, 8-way, with 64-byte lines;
* per slice, 6 MSHR entries of 8 targets each, a 12-entry request queue and a
  64-entry response queue;
* hit latency 3 cycles, MSHR latency 5 cycles, data latency 25 cycles;
* a 2000-cycle throttling period and a 400-cycle in-core sub-period.

All of these are parameters in `rtl/llamcat_pkg.sv` and the modules.

## Block diagram

```
 cores 0..15 ──req──▶ req_xbar ──▶ llc_slice 0..7 ──dram_req──▶ memory channels 0..7
     ▲                 (line → slice)  │  ▲                        │
     │                                 │  └───────dram_resp────────┘
     └──── hit_resp / fwd_resp (broadcast per slice, core mask) ◀─┘
                                       │ stall, progress counters
                                       ▼
                            global_throttle ──throttle[16]──▶ incore_throttle ×16
                                                   core_mem_wait/idle ─┘  └─▶ core_tb_limit
```

`llamcat_top` contains everything above except the cores and the memory
channels. Cores and memory attach at its ports.

### Address map

A request names a 64-byte line (`laddr_t`, 34 bits of a 40-bit byte
address). The line address splits as follows:

* the lowest 3 bits choose the slice;
* the next 12 bits choose the set inside the slice;
* the rest is the tag.

## One slice, step by step (`llc_slice`)

```
 req ─▶ [cat_arbiter queue] ─▶ tag pipeline (HIT_LAT=3) ─┬─ hit read ─▶ data delay (DATA_LAT=25) ─▶ hit_resp
                                                         ├─ write    ─▶ storage (update / allocate)
                                                         └─ miss ─▶ MSHR stage (MSHR_LAT=5) ─▶ mshr: merge or allocate
                                                                                               └─▶ DRAM read queue
 dram_resp ─▶ mshr lookup ─▶ fwd_resp (cores in the entry's mask) and response queue ─▶ fill into storage
```

1. **Queueing.** A request waits in the arbiter's queue (12 entries). The queue
   refuses new requests when full.
2. **Tag stage.** The arbiter sends at most one request per cycle into a
   3-stage tag pipeline. At the last stage the tags are compared.
   * A read hit is pushed into the hit buffer. It comes out on `hit_resp` 25
     cycles later, through a delay line that never stalls.
   * A write always carries a full line. If the line is present it is updated
     and marked dirty; otherwise it is allocated without a fetch.
3. **MSHR stage.** A read miss passes 5 more pipeline stages and then asks the
   MSHR for a slot. It merges into an entry for the same line if that entry
   has a free target. Otherwise it opens a new entry, which also queues a DRAM
   read. If neither is possible, **the whole request pipeline stalls**: no
   stage moves and no request leaves the queue. `stall_o` is high in every
   such cycle, and that is the quantity the global throttle measures.
4. **Return.** A line from DRAM is looked up in the MSHR. It is sent at once on
   `fwd_resp`, with a mask of every core that asked for it, and the entry is
   freed in the same cycle. The line is also pushed into the 64-entry response
   queue.
5. **Fill.** The response queue is written into storage (allocate-on-fill).
   Arbitration between the two is *response-first*: in a cycle where a
   response is written into storage, no new request enters the pipeline.

Dirty victims, from fills or from write allocations, go to a write-back queue.
The DRAM request port serves reads first, unless the write-back queue is full.

Three more timing facts:

* A read miss reaches the DRAM port 9 cycles after it is accepted from the
  queue.
* A hit reaches its core 28 cycles after it is accepted from the queue.
* After reset, storage clears its per-set state one set per cycle, so for the
  first `SETS` cycles (4096 at full size) requests only queue.

The `ev_*` outputs of each slice pulse once per event. They exist so that a
testbench or a performance monitor can count hits, misses, MSHR merges and
allocations, write-backs, fills, response-first cycles, out-of-order picks and
confirmed speculative hits.

## How the arbiter predicts hits (`cat_arbiter`, `hit_buffer`, `sent_reqs`)

The arbiter has to decide before the tag lookup, and lookups take several
cycles. It therefore keeps three small records of what the slice has recently
done, and compares every queued address against all three in parallel:

| source | what it remembers | consequence for a queued request to the same line |
|---|---|---|
| `hit_buffer` (4 entries, FIFO) | the last distinct lines that *hit* at the tag stage | *speculated cache hit* |
| MSHR snapshot (6 entries, wired straight from `mshr`) | lines with a miss in flight and their target count | *speculated MSHR hit* |
| `sent_reqs` (8 entries) | lines sent into the pipeline during the last HIT_LAT+MSHR_LAT = 8 cycles, each with the speculated-hit bit it was sent with | *speculated MSHR hit* (only entries not sent as a speculated hit) |

The `sent_reqs` record covers the gap in which a miss has left the queue but
has not yet reached the MSHR. A second request to that line will merge with
it, even though neither the hit buffer nor the MSHR shows the line yet. An
entry that was itself sent as a speculated cache hit is masked out, because it
will not create an MSHR entry.

The selection is a ranking over the whole queue, one winner per cycle:

1. a speculated cache hit beats everything else;
2. then a speculated MSHR hit;
3. then the request whose core has the smallest progress counter (*balanced*);
4. then the oldest.

Each slice keeps a progress counter per core. It counts the requests sent for
that core and is cleared by `op_start` at the start of an operator. The
`POLICY` parameter also builds the simpler orders: `POL_FCFS` (oldest only),
`POL_B` (counter, then oldest) and `POL_MA` (predictions, then oldest). The
default is `POL_BMA`.

Predictions are only hints. A request predicted to hit may miss, and it is
then handled like any other miss. Correctness never depends on them.

## Throttling

### Global gear (`global_throttle`)

Over each 2000-cycle sampling period, the controller adds up the stall cycles
of all slices. It divides them by 2000 × 8 slice-cycles to get the stall
fraction t. It classifies t as follows:

| class | t |
|---|---|
| low | t < 0.1 |
| normal | 0.1 ≤ t < 0.2 |
| high | 0.2 ≤ t < 0.375 |
| extreme | t ≥ 0.375 |

The comparisons use integer products, so there are no dividers. The class
moves the gear:

* low: −1;
* normal: unchanged;
* high: +1;
* extreme: +2.

The gear stays within 0…4. Gears 0–4 throttle 0, 2, 4, 8 and 12 of the 16
cores (0, 1/8, 1/4, 1/2 and 3/4 of them).

The cores that are throttled are the *fastest* ones. Their progress counters,
summed over all slices, are the largest; ties go to the lower core index.
Gear and throttle set change only at the end of a period.

### Per-core thread-block limit (`incore_throttle`)

Each core has 4 instruction windows, so it can run up to 4 thread blocks.
Every 400 cycles the controller looks at two counts from the last sub-period:

* C_mem, the cycles in which all running blocks waited for memory;
* C_idle, the cycles in which none ran.

It then updates `max_tb`:

* if C_idle > 4, `max_tb` goes up by one;
* otherwise, if C_mem > 250, it goes down by one;
* otherwise, if C_mem < 180, it goes up by one.

`max_tb` stays within 1…4. The core only has to obey it while the global
controller throttles it; otherwise `core_tb_limit` is 4.

## Interfaces of the top (`llamcat_top`)

| port | dir | per | meaning |
|---|---|---|---|
| `op_start` | in | — | start of an operator: clears progress counters, gear, throttle state |
| `core_req_valid/core_req/core_req_ready` | in | core | valid/ready request `req_t {addr, src, write, data}`; reads leave `data` unused |
| `hit_resp_valid/hit_resp` | out | slice | `resp_t {addr, mask, data}` with one mask bit set; no back-pressure |
| `fwd_resp_valid/fwd_resp` | out | slice | line returned from DRAM, mask = every core waiting for it |
| `core_mem_wait/core_idle` | in | core | the core's thread-block state, sampled every cycle |
| `core_throttled/core_tb_limit` | out | core | throttle decision and number of thread blocks allowed |
| `dram_req_*`, `dram_resp_*` | out/in | slice | valid/ready line reads and write-backs, returned lines |
| `slice_stall`, `slice_ev` | out | slice | per-cycle stall and event pulses (hit, miss, MSHR merge/allocate, write-back, fill, response-first, out-of-order pick, confirmed speculated hit) |
| `gear`, `contention` | out | — | throttling state |

A core must accept every response addressed to it in the cycle it appears.
Responses are identified by line address. A core should therefore keep at
most one read outstanding per line; a second read of the same line would be
answered by the same response.

## Verifying and simulating

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Build and run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/llamcat_pkg.sv \
    tb/dram_model.sv tb/tb_llamcat_top.sv --top-module tb_llamcat_top
./obj_dir/Vtb_llamcat_top +verilator+rand+reset+2
```

(`tb/dram_model.sv` is needed only by `tb_llc_slice`, `tb_llamcat_top` and
`tb_llamcat_full`.)

* `tb_cat_arbiter` replays a worked example of the predictor: hit buffer,
  MSHR snapshot and sent requests against a queue of mixed addresses. It then
  checks every policy against a reference ranking on random traffic.
* `tb_llc_slice` checks the 9-cycle miss and 28-cycle hit latencies, a stall
  when the MSHR runs out, and random reads and writes, including the readback
  of every written line after eviction.
* `tb_llamcat_top` runs the whole subsystem end to end with 16-set slices
  (64 KB in total), so that evictions and write-backs come quickly.
  * **Traffic.** The testbench models a Logit (Q·Kᵀ) decode kernel with
    grouped-query sharing:
    * 4 groups of 4 cores read the same 1024 key lines per group;
    * each core works in thread blocks of 8 lines, with 4 reads in flight;
    * group members are staggered by 2 blocks;
    * each finished block writes one output line.
  * **DRAM.** A behavioural memory with a fixed 120-cycle latency
    (`tb/dram_model.sv`).
  * **Checks.** The data and destination of every response; that every read is
    answered; that all work completes.
  * **Mechanisms.** Each of these must occur at least once: stall, MSHR merge,
    MSHR allocation, write-back, fill, response-first cycle, out-of-order
    pick, confirmed speculative hit, gear up, gear down, throttled cores, and
    a reduced thread-block limit.
* `tb_llamcat_full` runs the same kernel on the top at its default size
  (16 MB, no parameter changed). It finishes in about a minute. Its output
  lines all map to one set per slice, so dirty evictions happen even though
  the key lines fit.

## Where this RTL departs from, or adds to, the published design

* **Not built.** The following stay outside the top:
  * the cores: vector units with a 64 KB write-through L1;
  * the memory controllers and DDR5 channels;
  * cache bypassing, which the design explicitly leaves out.
* **Interconnect.** The original design only names the interconnect. Here it is a
  crossbar with per-slice round-robin, choosing the slice from the low bits of
  the line address.
* **Replacement.** Round-robin per set. The original names no replacement
  policy.
* **Responses.** Responses are broadcast per slice with a core mask and carry
  only the line address, not a request id. MSHR targets are kept as a core
  bit mask plus a count.
* **Writes** carry full lines. A write miss allocates without a fetch. Writes
  are not ordered against a read miss to the same line that is still in
  flight.
* **Data latency.** The 25-cycle data latency is modelled as a fixed delay
  from the tag hit to the response. It is applied only to hits.
* **Write-back queue.** It is this design's own addition (8 entries, reads
  first unless full). A write at the tag stage has priority over a fill for
  the storage write port, and it stalls the pipeline if the write-back queue
  is full.
* **Stall measure.** The global stall fraction is summed over all slices.
  The original says only "proportion of cache stall cycles".
* **Predictor sizes.** The hit buffer holds 4 entries, as in the original's
  example. `sent_reqs` holds up to 8 entries, enough for one send per cycle
  over its 8-cycle lifetime.
* **Storage.** It is written as plain SystemVerilog memories: one array per
  way for data, and one word per set for tags and state. An SRAM macro
  library would replace these. The reset sweep is this design's own addition.
* **Interpretation of the in-core rule.** The original states a single
  threshold in its text, and its table gives two bounds (250 and 180). The
  two-bound version is built.
