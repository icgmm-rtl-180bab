# ICGMM in SystemVerilog: a DRAM cache for SSD-backed memory, steered by a Gaussian mixture

When an SSD is attached to a host as CXL memory expansion, a DRAM on the device acts
as a cache for it. That cache is awkward. The SSD works in 4 KB pages, so every
cache block is a whole page, and most of a page may never be used. A miss costs tens
to hundreds of microseconds, not nanoseconds. ICGMM addresses both problems with a
learned policy that runs in hardware. A two-dimensional Gaussian mixture model (GMM)
over *(page index, time window)* predicts how often a page will be accessed. The
cache uses that prediction twice:

* **smart caching**: a missed page is brought into the cache only if its score
  reaches a threshold; otherwise it goes straight from the SSD to the host;
* **smart eviction**: each cached block keeps the score it was filled with, and
  when a set is full the block with the lowest score is evicted, in place of the
  least recently used one.

This repository holds synthesizable RTL for the ICGMM cache system as published
(Chen, Wang et al., "ICGMM: CXL-enabled Memory Expansion with Intelligent Caching
Using Gaussian Mixture Model"). The published system was an FPGA prototype built
with high-level synthesis on an Alveo U50. It was driven by recorded memory traces
and used an emulator for the SSD's latency. The RTL keeps that structure. Its
defaults are the published configuration:

| quantity | value |
|---|---|
| cache | 64 MB, 4 KB blocks, 8-way set associative, so 2048 sets |
| GMM | 256 two-dimensional Gaussians |
| time windows | 32 requests per window, 10,000 windows per access shot |
| SSD | 75 us read, 900 us write (a TLC drive) |
| clock | 233 MHz |

Section 8 lists what is this implementation's own choice rather than the published
design's.

## 1. Structure

```
             trace FIFO                 cc_trc FIFO  (R/W, PA, timestamp)
 requests ──▶[====]──▶┌──────────────┐──▶[====]──▶┌───────────────────────────┐
 [R/W,PA,Time]        │  signal      │            │  cache_control_engine     │
                      │  controller  │◀──[====]◀──│   cache_mgmt (FSM)        │
                      │              │  cc_rsp    │   tag_score_buffer (1 set)│
                      │ timestamp_   │  (hit/miss)│   tag_store (all sets)    │
                      │ transform    │──▶[====]──▶│   ssd_latency_emulator    │
                      │ pending queue│  cc_scr    └───────────────────────────┘
                      │              │  (score)
                      │              │──▶[====]──▶┌───────────────────────────┐
                      │              │  gp_trc    │  cache_policy_engine      │
                      │              │◀──[====]◀──│   policy_control_block    │
                      │              │  gp_rsp    │   gmm_weight_buffer       │
                      │              │──enable──▶ │   gmm_pe                  │
                      └──────────────┘            └───────────────────────────┘
```

The design is a dataflow design. Three independent modules talk only through
valid/ready FIFOs (`sync_fifo`), and no central schedule exists. Each module acts as
soon as its input FIFO holds data and stalls when its output FIFO is full. The policy
engine is a "free-running kernel": it sits idle until a request appears in its FIFO.

* **`signal_controller`** takes each request from the trace FIFO and gives it the
  timestamp of its time window (section 5). It forwards the request to the cache
  control engine at once, so the next request is already waiting while the current
  one is being compared. It also keeps a copy in a pending queue. As hit/miss answers
  come back, in order, it retires the copies. The copy of each *miss* goes on to the
  policy engine, but only when a GMM policy is active. Returned scores are passed on
  to the cache control engine. The controller also opens the policy engine
  (`gmm_enable`) for every policy except plain LRU.
* **`cache_control_engine`** owns the cache. It contains the management state
  machine, the table of tags and scores, the one-set buffer used for the parallel
  compare, and the SSD latency emulator.
* **`cache_policy_engine`** computes GMM scores. It contains a control block that
  opens and closes its FIFOs and decodes requests, the weight buffer with all
  Gaussians, and the pipelined GMM processing element.

`icgmm_top` wires these together with six FIFOs. Its ports are plain signals and
structs. They cover the configuration (`policy`, `threshold`), the one-time GMM
parameter load (`ld_*`), the request stream (`trc_*`), a per-request result
(`res_valid`, `res_hit`) and counters. A further input, `ts_from_trace`, selects
where timestamps come from (section 5).

## 2. The life of a request

Cycle 0 below is the cycle in which `cache_mgmt` takes the request from its FIFO.

**Hit.** In cycle 0 the set index (the low 11 bits of the page index `PA >> 12`)
addresses the tag table. In cycle 1 the set is copied into `tag_score_buffer`, eight
ways of registers. In cycle 2 all eight tags are compared with the request's tag at
once, and the hit is pushed into the response FIFO. The way becomes most recently
used, and a write marks it dirty. In cycle 3 the set is written back, and the next
request can be taken in cycle 4. The hit path never touches the GMM.

**Miss.** In the compare cycle the miss is reported *and* the SSD emulator starts a
75 us page read. The controller sees the miss and sends the request to the policy
engine. The score takes 263 cycles, about 1.1 us, so it is normally ready long before
the read finishes: the GMM costs no time on a miss. When both the read and (under a
GMM policy) the score are in:

1. Under smart caching, a score below `threshold` means *bypass*. The page is not
   cached, and the table is left untouched. A bypassed write also costs a 900 us page
   write, since a 64 B host write updates a 4 KB SSD page.
2. Otherwise a victim is chosen in the same buffer (section 4). If the victim is
   dirty, the emulator first spends 900 us writing it back.
3. The new page fills the victim's way. It is valid, dirty if the request was a
   write, most recently used, and stores its GMM score. The set goes back to the
   table.

So a miss costs 75 us, or 975 us when a dirty block is written back, as in the
published system. `cache_mgmt` counts busy cycles per request exactly. With R and W
the read and write cycles, and a score that arrives during the read:

| case | busy cycles |
|---|---|
| hit | 3 |
| clean miss, cached | R + 5 |
| miss with dirty write-back | R + W + 6 |
| bypassed read | R + 3 |
| bypassed write | R + W + 4 |

At the defaults R = 17,475 and W = 209,700.

## 3. The GMM score in hardware

The model is the published 2D mixture. Its input is x = (P, T), where P is the page
index and T the window timestamp:

    G(x) = Σ_k π_k · N(x | μ_k, Σ_k)
    N    = exp(-½ (x-μ_k)ᵀ Σ_k⁻¹ (x-μ_k)) / (2π |Σ_k|^½)

Computing an exponential for each of 256 Gaussians is costly. This RTL removes it.
The host folds each Gaussian into a **base-2 exponent** before loading it, so that
every term of the sum is exactly

    term_k = 2^-(a·dp² + b·dp·dt + c·dt² + l),   dp = P - μ_p, dt = T - μ_t

with

    a = ½·log2(e)·(Σ_k⁻¹)_PP        b = log2(e)·(Σ_k⁻¹)_PT
    c = ½·log2(e)·(Σ_k⁻¹)_TT        l = -log2( π_k / (2π |Σ_k|^½) ) + s

Here s ≥ 0 is one shift shared by all Gaussians, chosen so that every l ≥ 0. Each
term is then at most 1, and all scores, and so the threshold, are scaled by 2^-s.
The entries of the weight buffer (`icgmm_pkg::gauss_t`) are:

| field | format |
|---|---|
| `mu_p` | 36-bit page index |
| `mu_t` | 16-bit timestamp |
| `a`, `b`, `c` | signed 64-bit, 56 fraction bits |
| `l` | unsigned Q8.8 |

`gmm_pe` streams the Gaussians through a pipeline at one Gaussian per cycle
(initiation interval 1):

| stage | work |
|---|---|
| issue | read Gaussian k from the weight buffer |
| S1 | dp, dt |
| S2 | dp², dp·dt, dt² (exact, 74 / 54 / 34 bits) |
| S3 | e = (a·dp² + b·dp·dt + c·dt²) >> 48, plus l; clamped at 0 and saturated to Q8.8 |
| S4 | 2^-e = table[frac(e)] >> int(e); the table holds 2^(-i/256), i = 0..255, in Q8.24 and is computed at elaboration; terms below 2^-24 become 0 |
| S5 | accumulate |

The sum of the terms is a dependency carried across iterations, which a deep
pipeline cannot feed one term per cycle through a single pipelined adder. As in the
published design, a **shift register** of partial sums breaks it. `ACC_DEPTH` = 4
partial sums rotate, each new term is added to the one leaving the end, and the four
are added once all terms are in. With single-cycle adders this register is not
strictly needed, but it keeps the structure ready for a pipelined adder.

The score is unsigned Q8.24 and saturates at its maximum. From accepting a request
to offering its score takes NUM_G + 7 cycles: 263 cycles, 1.13 us at 233 MHz. The
published on-board figure of 3 us includes FIFO and memory overheads that are not
modelled here.

The policy engine's control block opens the FIFOs only while `gmm_enable` is high.
It decodes each request into P = PA >> 12 and T = the request's timestamp. A score
already in flight when the engine closes is still delivered.

## 4. Caching and eviction policies

`policy` (`icgmm_pkg::policy_e`) selects one of four modes:

| policy | GMM used on a miss | missed page cached | victim when the set is full |
|---|---|---|---|
| `POL_LRU` | no (engine closed) | always | least recently used |
| `POL_GMM_CACHE` | yes | if score ≥ threshold | least recently used |
| `POL_GMM_EVICT` | yes | always | lowest stored score |
| `POL_GMM_BOTH` | yes | if score ≥ threshold | lowest stored score |

The published evaluation compares the three GMM strategies with LRU and, for each
benchmark, keeps the one with the lowest miss rate. GMM eviction alone was best for
two benchmarks, and the combination for the other five.

Rules:

* Invalid ways are always filled first. Among full sets, ties in score go to the
  lowest way.
* The victim search is a minimum search over the eight buffered scores. It picks the
  same block as sorting the set and taking the lowest.
* Every way keeps both a GMM score and an LRU age. A hit or a fill makes the way's
  age 0, and every valid way younger than that way's old age ages by one. An invalid
  way counts as oldest. Because of this the policy can be changed between runs
  without clearing the cache.
* A score is written only when a page is filled. Hits bypass the GMM and do not
  update it.
* `policy` and `threshold` must not change while requests are in flight. Drain the
  system first: the number of `res_valid` pulses equals the number of requests sent,
  and the SSD emulator is idle.

## 5. Timestamps

The time input of the GMM is not wall-clock time. It is the index of the request's
*time window*. Requests are counted from reset, every 32 consecutive requests share
a window, and the index wraps to 0 after 10,000 windows (an *access shot*). Request i
therefore gets

    T = floor(i / 32) mod 10000

The published flow assigns these timestamps offline, while preprocessing the trace.
Each trace record then carries its window index in its Time field. The controller
supports both cases, chosen by the top-level input `ts_from_trace`:

* `ts_from_trace = 1`: the low 16 bits of the record's `time_raw` field are the
  timestamp, for traces that were transformed offline;
* `ts_from_trace = 0`: `timestamp_transform` applies the rule above to the live
  request stream, counting every request, hits included. The GMM then sees the same
  time axis it was trained on without any preprocessing, and `time_raw` is ignored.

The window counter advances in both modes. Hold `ts_from_trace` constant while
requests are in flight.

## 6. SSD emulation and measurement

`ssd_latency_emulator` is a down-counter. A start with `is_write` = 0 keeps it busy
for `READ_CYC` cycles, and `is_write` = 1 for `WRITE_CYC` cycles. It accumulates its
busy time in `ssd_cycles`. The top also reports:

* `n_req`, `n_hit`, `n_miss`, which give the miss rate;
* `n_bypass`, `n_evict` (valid blocks replaced) and `n_dirty_wb`;
* `n_gmm_req` and `n_infer`, which count requests sent to the GMM and scores
  computed;
* `busy_cycles`, the sum of the per-request service times of section 2.

The average access time of a run is `busy_cycles / n_req` cycles. It corresponds to
the "average SSD access time" the published evaluation compares between LRU and GMM.
A hit here costs 3 cycles, while the prototype measured about 1 us per hit including
HBM access. Absolute averages are therefore lower than the published ones, but the
miss penalties, which dominate them, are the same.

## 7. Parameters and sizes

All sizes live in `rtl/icgmm_pkg.sv`. Module parameters default to them.

| parameter | default | meaning |
|---|---|---|
| `NUM_SETS` | 2048 | 64 MB / 4 KB / 8 ways |
| `WAYS` (package) | 8 | associativity (not a module parameter) |
| `NUM_G` | 256 | Gaussians |
| `READ_CYC`, `WRITE_CYC` | 17,475 / 209,700 | 75 us / 900 us × 233 MHz |
| `LEN_WINDOW_P`, `LEN_SHOT_P` | 32 / 10,000 | time windows |
| `FIFO_DEPTH` | 4 | depth of each inter-module FIFO |
| `ACC_DEPTH` | 4 | partial sums of the GMM accumulator |
| `PA_W` (package) | 48 | physical address bits; page index 36 bits |

The table of tags and scores holds 2048 × 8 ways × 73 bits (valid, dirty, 36-bit
tag, 32-bit score, 3-bit age), about 1.2 Mbit. The weight buffer holds 256 × 260
bits. Both are plain memory arrays, for block RAM. In the prototype the table lives
in the HBM next to the cached pages. Here it is a memory with a one-cycle read, and
after reset it is cleared one set per cycle (`init_done` rises after 2048 cycles).

## 8. Relation to the published design

Taken from the published design:

* the three modules and their FIFO connections;
* the cache geometry, 256 Gaussians and the window lengths;
* the timestamp rule and the decode PA >> 12 (the text writes `PA << 12`, an
  evident slip for a page index);
* the caching test "score ≥ threshold";
* eviction of the lowest-scored block in the set;
* LRU as the fallback while the GMM engine is closed;
* the parallel tag compare on a one-set on-chip buffer;
* the GMM pipeline at II = 1 with shift-register accumulation;
* the concurrent start of GMM inference and SSD read on a miss;
* the SSD latencies and the 75 us / 975 us miss penalties.

This implementation's own choices, where the publication gives no detail:

* all number formats, and the base-2 folding of the Gaussians (section 3);
* address and timestamp widths;
* FIFO depths, the valid/ready handshake and the synchronous reset;
* the controller's pending queue;
* the state machine of `cache_mgmt` and its cycle counts;
* invalid-way-first replacement, tie breaking and the LRU age scheme;
* clearing the tag table after reset;
* draining an in-flight score when the policy engine closes;
* the cost of a bypassed write (page read + page write);
* the option of running the timestamp rule in hardware on the live request stream;
* the threshold, which is a run-time input because the publication gives no value.

The published material disagrees with itself in two places:

* The eviction illustration numbers the blocks of a set from 0 to 8, but the
  stated associativity is 8. This design uses ways 0 to 7.
* The architecture figure labels the policy engine's input FIFO "R/W, Time", but
  the text makes the page index a GMM input. The whole request is sent here.

Not included:

* the host, the CXL link, the SSD and the HBM holding traces and page data. The
  prototype moves no page data either, and requests and GMM parameters enter through
  top-level ports;
* GMM training (expectation-maximisation) and trace preprocessing, which are offline
  software.

## 9. Files

| file | content |
|---|---|
| `rtl/icgmm_pkg.sv` | sizes, number formats, `trace_t`, `req_t`, `gauss_t`, `way_t`/`set_t`, `policy_e` |
| `rtl/icgmm_top.sv` | the system |
| `rtl/signal_controller.sv`, `rtl/timestamp_transform.sv` | controller, window timestamps |
| `rtl/cache_control_engine.sv`, `rtl/cache_mgmt.sv`, `rtl/tag_score_buffer.sv`, `rtl/tag_store.sv`, `rtl/ssd_latency_emulator.sv` | cache side |
| `rtl/cache_policy_engine.sv`, `rtl/policy_control_block.sv`, `rtl/gmm_weight_buffer.sv`, `rtl/gmm_pe.sv` | GMM side |
| `rtl/sync_fifo.sv` | FIFO |
| `tb/icgmm_ref_pkg.sv` | reference models: bit-exact GMM score, random Gaussian generator, behavioural cache and policy model |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_icgmm_top.sv` | end-to-end at reduced size, all four policies in sequence |
| `tb/tb_icgmm_full.sv` | end-to-end at the full default size |
| `tb/tb_icgmm_workload.sv` | all four policies on a generated trace, with miss rates and average access times |

## 10. Simulating

Verilator 5 is enough. From the repository root, for example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/icgmm_pkg.sv tb/icgmm_ref_pkg.sv tb/tb_icgmm_top.sv --top-module tb_icgmm_top
    ./obj_dir/Vtb_icgmm_top

Replace `tb_icgmm_top` with any other testbench name. Each testbench prints one line,
`TB_RESULT checks=N failures=M`, and has a watchdog. What they check:

* **`tb_icgmm_top`** runs 750 requests: 4 sets, 8 Gaussians, 40 / 90 cycle SSD
  latencies. All four policies run on the same warm cache. Every hit/miss, every
  counter and the total SSD time are compared with the behavioural model fed with
  reference GMM scores. The test also requires that each mechanism occurs at least
  once: hit, miss, bypass, bypassed write, LRU eviction, GMM eviction, dirty
  write-back, GMM inference, back-pressure on the request input, and a timestamp
  wrap. A fifth phase repeats the combined policy with timestamps taken from the
  trace records.
* **`tb_icgmm_full`** runs 60 requests at the full default size: real SSD latencies
  and 256 Gaussians. It takes a few seconds.
* **`tb_icgmm_workload`** generates a 12,000-request trace. Two thirds of it goes
  to hot pages drawn from Gaussian clusters in (page, window), which move halfway
  through. The other third is a one-time scan of fresh pages. The run loads the
  generator's own mixture as the GMM and uses a 64-set cache. All four policies run
  on the same trace, and each run is checked request by request against the model,
  including its exact SSD and busy cycles. The test prints the miss rate and the
  average access time each policy would have with the real SSD latencies. On this
  trace LRU misses 44.3% of requests and the GMM policies 38.9-39.8%. Smart caching
  bypasses every scan page, which cuts the average access time from about 151 us
  to 114 us. The benchmark traces of the published evaluation are not part of
  this repository.
* **`tb_gmm_pe`** and **`tb_cache_policy_engine`** compare every score bit-exactly
  with an independent wide-integer model and check the 263-cycle latency. The PE test
  also checks the score within 1% of the real-valued mixture.
* **`tb_cache_mgmt`** checks the exact busy cycles of every case in the table of
  section 2.

To run the system on a real trace, load the trained Gaussians through `ld_*` after
folding them as in section 3. Wait for `init_done`, set `policy`, `threshold` and `ts_from_trace`, and
stream the records into `trc_*`.
