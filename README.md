# HyDRA: a deadline- and reuse-aware shared cache controller

A chip that has CPU cores and a machine-learning accelerator usually puts
one last-level cache (LLC) in front of DRAM for both. The two users want
different things from it. The cores want hits, which means space. The
accelerator wants bandwidth, because each inference must finish by a
deadline (for example 10 frames per second). Giving the accelerator strict
priority at the LLC protects its deadline. But it floods the cache with
accelerator data, much of which is never used again, and the cores slow
down.

HyDRA solves this by deciding, access by access, whether an accelerator
line should enter the LLC at all. Two pieces of information drive the
decision:

* **How much reuse the line will have.** This is learned offline for each
  network layer: the block addresses are clustered by reuse count (RC) and
  reuse interval (RI). The result is loaded into a small table beside the
  cache, the L-RPT.
* **How much slack the accelerator has.** A progress monitor (the APM)
  compares the accesses still to do against the time left before the
  deadline, once per epoch of 200,000 cycles.

When the accelerator is ahead, even lines with good reuse bypass the LLC
and the space goes to the cores. When it falls behind, nothing bypasses.
In between, only the coldest clusters bypass. Core requests have their
own bypass filter, a SHIP-style PC-signature predictor. Accelerator
requests are always served first (Accelerator Request Priority, ARP).

This repository holds synthesizable SystemVerilog for the controller, a
self-checking testbench for every block, and end-to-end testbenches. The
L-RPT contents come from offline training, which is not part of the RTL.
The cores, the accelerator and DRAM are outside the design; the testbenches
drive the cores and accelerator directly and use a behavioural memory
model in place of DRAM.

## 1. The controller and its four access paths

```
 accelerator req ─► [front reg] ─► L-RPT port A ─► bypass decision ─┬─(1) bypass write ─► invalidate copy ─► bypass FIFO ─► memory
                                                                    └─(2) cached ───────┐
 core req ────────────────────────────────────────────────────────────────────────────► ARP request queue ─► LLC (8 MB, 16-way)
                                                                                                             │ miss
                                                                                                             ▼
 requester ◄─(3) bypass: data returned, no fill ◄── bypass decision ◄── L-RPT port B / SHIP ◄── memory read reply
 requester ◄─(4) fill the line, then respond ◄─────────┘
 APM ── (RI_Th, RC_Th) ──► both accelerator bypass decisions
```

Path numbers follow the original description of the controller:

| path | what happens | where it is decided |
|---|---|---|
| 1 | An accelerator write judged "no reuse" goes straight to memory. Any copy in the LLC is first invalidated. Memory acknowledges it on the separate `wack` channel. | `hydra_llc`: L-RPT port A and `u_dec_req`, one cycle after the request is taken |
| 2 | Any other accelerator write goes into the request queue and is written into the LLC. | same |
| 3 | An accelerator read that misses is bypassed if the L-RPT and the thresholds say so: the data goes to the accelerator and the line is not filled. A core read miss is bypassed in the same way when SHIP predicts no reuse. | when memory's reply arrives (`llc_cache` state `S_DECIDE`) |
| 4 | Otherwise the missed line is filled and then returned. | same |

Accelerator reads that hit are always served from the cache: the bypass
decision only matters when data would be *inserted*.

## 2. The progress monitor (APM)

This is the part with most arithmetic and most of the design's behaviour.
It lives in `apm`, which sequences three sub-blocks: `margin_est`,
`dyn_thresh` and `reuse_thresh`.

### 2.1 What it knows

At the start of an input set (one inference), the host writes the
following and pulses `set_start`:

* `cfg_m_total`, called M: the number of accelerator accesses one input
  set performs. It is found by profiling.
* `cfg_deadline`, called D: the deadline in clock cycles.

The APM counts completed accelerator accesses and cycles. At every
boundary of an ET-cycle epoch it snapshots these counters:

| counter | meaning |
|---|---|
| RA | remaining accesses, M − completed |
| RT | remaining time, D − elapsed cycles (0 once the deadline has passed) |
| MR | the cores' LLC miss rate during the last epoch |
| AMAL | the accelerator's average memory latency during the last epoch |

Completed accesses are read responses delivered to the accelerator plus
acknowledgements of its bypassed writes.

AMAL is never stored as a number. The APM adds the number of outstanding
accelerator accesses to a sum every cycle. By Little's law, that sum
divided by the completions is the mean latency. So the predicted number of
accesses the accelerator can complete next epoch is

    MA_hat = ET / AMAL = completions × ET / latency_sum

### 2.2 Step 1: how much must be done this epoch (`margin_est`)

The following are computed with one shared bit-serial divider:

    MA_global = M × ET / D                 accesses needed per epoch on average
    MA_past   = (M − RA) × ET / (D − RT)   accesses actually done per past epoch
    margin_high = 5 % of D,  margin_low = 1 % of D

The requirement for this epoch, MA(i), is then one of four cases:

1. If the cores are not missing much (MR ≤ 0.3), or the accelerator is
   not behind (MA_past ≥ 1.1 × MA_global): MA(i) = RA × ET / RT, the honest
   requirement.
2. Otherwise, if RT > margin_high: MA(i) = RA × ET / (RT − margin_high).
   The accelerator is asked to finish 5 % early.
3. Otherwise, if RT > margin_low: MA(i) = RA × ET / margin_low.
4. Otherwise (at or past the deadline): MA(i) = (1 + 2β) × MA_global.

Cases 2 and 3 inflate MA(i). This makes the later steps less willing to
bypass, leaving room to recover from DRAM contention that aggressive
bypassing can cause. The case number is visible on `apm_case`.

### 2.3 Step 2: moving the five bypass thresholds (`dyn_thresh`)

The thresholds are five ratios, T_A1 < … < T_A4 and T_B. They say how
far the prediction MA_hat must exceed the requirement MA(i) before a given
degree of bypassing is allowed.

Each epoch, MA(i) is compared with MA_global in bands of width β = 0.05:

| MA(i) / MA_global | T_A1..T_A4 | T_B |
|---|---|---|
| ≤ 1 − 6β | −6 δA (not below 1.0) | −6 δB |
| in (1 − (k+1)β, 1 − kβ], k = 5..1 | −k δA (not below 1.0) | −k δB |
| in (1 − β, 1 + β] | unchanged | unchanged |
| > 1 + β | +δA | unchanged |

Here δA = 0.2 and δB = 0.1. The logic is as follows:
* A requirement well below the average means the accelerator is ahead.
  Lowering the thresholds makes bypassing easier.
* A requirement above the average means it is behind. Raising T_A makes
  bypassing harder.

All ratios are held as integer percentages (120 means 1.2). Every band
test is an exact cross-multiplication, for example
`100·MA(i) ≤ (100 − 6·5)·MA_global`. There is no fractional arithmetic
anywhere.

The starting values are not published. This design uses T_A1..T_A4 =
1.2, 1.4, 1.6, 1.8 and T_B = 1.0, reloaded at each `set_start`. T_B is
floored at 0.

### 2.4 Step 3: choosing the reuse thresholds (`reuse_thresh`)

The first row that holds selects the pair (RI_Th, RC_Th):

| condition | RI_Th | RC_Th | effect |
|---|---|---|---|
| MA_hat > T_A4 · MA(i) | −1 | 4 | bypass every accelerator line |
| MA_hat > T_A3 · MA(i) | 0 | 3 | bypass all but the hottest RC cluster with the shortest RI |
| MA_hat > T_A2 · MA(i) | 1 | 2 | |
| MA_hat > T_A1 · MA(i) | 2 | 1 | |
| MA_hat > T_B · MA(i) | 3 | 0 | only the special case (Cold lines reused once more) |
| otherwise | 3 | −1 | no bypass |

Before the first epoch boundary of a set the pair is "no bypass". The new
pair takes effect about 400 cycles after each boundary: five 64-cycle
divisions, then one more. This is negligible against a 200,000-cycle
epoch.

### 2.5 Timing of one evaluation

```
epoch boundary ─► snapshot (1 cycle) ─► margin_est: 5 divisions (~330 cycles)
                 ─► dyn_thresh update (1 cycle) ─► reuse_thresh: 1 division (~66 cycles) ─► th updated
```

## 3. Reuse prediction and the bypass rule

### 3.1 L-RPT (`lrpt`)

The L-RPT is a tagless, direct-mapped table with 2^19 = 512K entries. Each
entry is five bits: `{valid, rc[1:0], ri[1:0]}`. It is indexed by address
bits [24:6], the block address modulo 512K.

* An invalid entry means "no reuse".
* RC clusters are numbered 0 (Cold) to 3 (hottest). RI clusters are
  numbered 0 (shortest interval) to 3 (longest).
* The table has two read ports, each answering one cycle after the address
  is presented. Port A serves the write-request path and port B the
  read-response path.
* The host loads the table through `lrpt_wr_*` between layers.
* `lrpt_clr` invalidates every entry. It does this by sweeping one entry
  per cycle, so it takes 2^19 cycles, and the same sweep runs after reset.

Because the table is tagless, two addresses 32 MB apart share an entry.
Training is expected to account for this.

### 3.2 Bypass rule (`bypass_decision`)

Combinational. With the accelerator bypass enabled (`cfg_acc_bypass_en`
and an input set in progress):

    bypass = !valid  ||  ri > RI_Th  ||  rc < RC_Th
             || (RC_Th == 0 && rc == 0 && cold_once)

The last term is the special case. When the accelerator is barely on time
(RC_Th = 0), lines of the Cold cluster are still bypassed if, for the
current layer, that cluster's lines are reused at most once more. Whether
that holds is known only from the offline clustering, so the host sets it
per layer on `cfg_cold_once`.

## 4. Core bypass: the SHIP predictor (`ship_predictor`)

The core predictor has 4K entries of 3-bit saturating counters, indexed by
a 12-bit PC signature, `pc[13:2] ^ pc[25:14]`.

* Every core line in the LLC remembers the signature that brought it in,
  and whether it has been hit since.
* The first hit on such a line increments its counter.
* Evicting a line that was never hit decrements the counter.
* A read miss whose counter is 0 is predicted dead. Its data is returned
  without a fill (path 3 for cores).
* Counters start at 4 after reset, using a 4096-cycle sweep.
* Accelerator lines never train this table, so the two kinds of traffic do
  not interfere.

## 5. Request queue and the cache

### 5.1 ARP queue (`arp_queue`)

There are two 16-entry FIFOs, one for accelerator requests and one for
core requests. The LLC always takes the accelerator's head first. This is
strict priority: cores wait as long as accelerator requests are queued.
`stats.arp_core_waits` counts the cycles in which that happens.

### 5.2 LLC (`llc_cache`)

The default LLC is 8 MB, 16 ways and 64 B lines, giving 8192 sets. Tag
latency is 3 cycles and data latency 9 cycles.

* **Organisation.** The cache is blocking: it handles one request at a
  time. It is write-allocate and write-back, and replacement is
  round-robin within each set.
* **Hit timing.** A hit answers 9 cycles after the request leaves the
  queue, because the tag and data arrays are read in parallel.
* **Miss sequence.** On a miss the cache:
  1. sends a read to memory;
  2. waits for the reply;
  3. takes the response-side bypass verdict;
  4. if the line is kept, writes back a dirty victim and then fills.
* **Invalidations.** Invalidations from path 1 take precedence over the
  queue. A dirty copy that is invalidated is dropped, not written back,
  because the bypassed write replaces the whole line.

### 5.3 Ordering rules that keep memory coherent

* A bypassed write waits in the front register until its invalidation has
  been accepted. Only then does it enter the bypass FIFO. Otherwise a
  write-back of an older dirty copy, issued by the LLC before the
  invalidation reached it, could reach memory after the new data and
  overwrite it.
* On the memory port, LLC traffic goes before the bypass FIFO. An LLC read
  miss could therefore overtake a bypassed write to the same line. The
  accelerator is expected not to touch a line again until that line's
  write has been acknowledged on `wack`, which is what a double-buffered
  accelerator does.

## 6. Top-level interface (`hydra_llc`)

| group | signals | notes |
|---|---|---|
| control | `clk`, `rst_n` (asynchronous, active low), `ready` | `ready` rises when the reset sweeps are done: 2^19 cycles at the default size |
| input set | `cfg_m_total`, `cfg_deadline`, `set_start`, `set_active`, `sets_met`, `sets_missed`, `epochs` | a set ends when its M-th access completes. It is "met" if that happens before D cycles |
| policy | `cfg_acc_bypass_en`, `cfg_core_bypass_en`, `cfg_cold_once` | with both enables off, the controller behaves as plain ARP with no bypass |
| L-RPT load | `lrpt_clr`, `lrpt_wr_en`, `lrpt_wr_idx`, `lrpt_wr_entry`, `lrpt_busy` | |
| requests | `acc_req*`, `core_req*`: valid/ready carrying `llc_req_t {write, src, id, pc, addr, data}` | src 0-7 = cores, 8 = accelerator |
| responses | `resp*`, a valid/ready `llc_resp_t` | hits, fills and bypassed reads, plus acknowledgements of cached writes |
| write acks | `wack*` | acknowledgements of bypassed writes. Its data field is always zero |
| memory | `mem_req*`, `mem_resp*` | memory replies to reads and to bypassed writes (`byp` = 1), never to write-backs |
| observation | `th`, `stats`, `apm_*` | current thresholds, event counters, APM internals |

Every request gets exactly one completion: either a `resp`, or a `wack`
for a bypassed write. The `id` and `src` of the request are returned with
it.

## 7. Parameters

| parameter | default | meaning |
|---|---|---|
| `LLC_SETS`, `LLC_WAYS` | 8192, 16 | 8 MB with 64 B lines |
| `TAG_LAT`, `DATA_LAT` | 3, 9 | cycles |
| `LRPT_IDX_W` | 19 | 512K-entry L-RPT |
| `SHIP_SIG_W`, `SHIP_CTR_W` | 12, 3 | 4K entries of 3-bit counters |
| `QUEUE_DEPTH` | 16 | each ARP FIFO and the bypass FIFO (own choice) |
| `ET` | 200,000 | epoch length in cycles |
| `ALPHA_PCT`, `BETA_PCT` | 10, 5 | α = 0.1, β = 0.05 |
| `MR_TH_PCT` | 30 | core miss-rate threshold 0.3 |
| `MARGIN_HIGH_PCT`, `MARGIN_LOW_PCT` | 5, 1 | percent of D |
| `DELTA_A_PCT`, `DELTA_B_PCT` | 20, 10 | δA = 0.2, δB = 0.1 |

All defaults except the queue depth and the initial thresholds (section
2.3) are the values of the evaluated system. Every default is used as is:
nothing was scaled down.

## 8. Where this RTL departs from, or adds to, the published design

* **Deadline in cycles.** The deadline and all times are in clock cycles.
  At 2 GHz, 10 inputs per second gives D = 2·10^8, which fits the 32-bit
  field.
* **Measuring AMAL.** The published design does not say how AMAL is
  measured. Little's law (section 2.1) is this design's choice.
* **Initial thresholds.** The initial thresholds are assumed, and the T_B
  floor of 0 is added.
* **When thresholds update.** New thresholds apply about 400 cycles after
  each epoch boundary. The published design computes them before the
  epoch starts.
* **Cache organisation.** The cache is blocking, with round-robin
  replacement and write-allocate. The simulated original is a
  non-blocking gem5 cache with an unstated replacement policy. This lowers
  throughput but does not change any HyDRA decision.
* **SHIP details.** SHIP is only cited in the published design. Its
  signature hash, initial value, training events and the "core read
  responses only" use are this design's choices.
* **Cold special case.** Cold-cluster lines "reused only once more" are
  signalled by the host per layer (`cfg_cold_once`), because that property
  comes from the offline cluster centres.
* **Bypass-write ordering.** The ordering rule of section 5.3 (invalidate
  first, then write) and the separate `wack` channel are additions.
* **Not built.** The hashed, smaller L-RPT variants (128K or 256K entries
  with a bitmask or SplitMix32 hash) were studied only as alternatives.
  Offline LERN training is software and is not built either.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.
`tb/mem_model.sv` is a behavioural memory used by the cache and top-level
tests; it replies after a fixed latency.

| testbench | what it checks |
|---|---|
| `tb_bypass_decision` | every entry × every threshold row × the special case, against the rule |
| `tb_lrpt` | clear sweep, load, one-cycle read on both ports, indexing above the 64 B offset, against a reference array (10-bit index) |
| `tb_margin_est` | all four cases against a reference model of the formulas, with random inputs |
| `tb_dyn_thresh` | Algorithm 1 against a reference model, including floors and reinitialisation |
| `tb_reuse_thresh` | MA_hat and the row choice, with every row reached |
| `tb_apm` | epochs, RA bookkeeping, MA_global, update latency, "bypass all" when ahead, "no bypass" when behind, met and missed sets |
| `tb_ship_predictor` | counter training and saturation against a model, registered prediction |
| `tb_arp_queue` | order within each class, accelerator priority, nothing lost under a randomly stalling consumer |
| `tb_llc_cache` | 9-cycle hit latency, misses, bypassed fills, invalidation, dirty write-back, SHIP pulses, random traffic against a golden memory (16 sets × 4 ways) |
| `tb_hydra_llc` | end to end, described below |
| `tb_hydra_llc_full` | the top with **no parameter changes** |
| `tb_workload` | a layer-like accelerator workload beside a core mix, with and without bypass |

`tb_hydra_llc` runs a 32-set, 4-way LLC, a 1K-entry L-RPT and 2000-cycle
epochs. It uses random accelerator traffic (up to four requests in flight)
and streaming plus hot core traffic, and checks every read against a
golden memory. It runs three input sets:
* a loose deadline, which should be met and reach "bypass all";
* an impossible deadline, which should be missed, reach "no bypass" and go
  through margin cases 2, 3 and 4;
* one in between.

It counts each mechanism and fails if any never occurred:
* paths 1-4;
* accelerator hits;
* invalidation of a cached copy;
* SHIP core bypass;
* ARP waits;
* each margin case;
* the extreme threshold rows and an intermediate row;
* a threshold update;
* a met set and a missed set.

`tb_hydra_llc_full` takes the full-size design through:
* the 2^19-cycle reset sweep;
* an L-RPT load;
* one complete input set of 300 accelerator accesses spread over two
  200,000-cycle epochs.

It checks that the thresholds rise from "no bypass" to bypassing after
the first epoch, that accelerator lines are cached early and bypassed
later, that all data is correct, and that the deadline is met. It runs in
under a minute.

`tb_workload` compares two controllers that see identical traffic. One
has both bypass policies off, that is, plain ARP with no bypass, the usual baseline. The
other runs HyDRA. Each sits in `tb/wl_harness.sv`, which drives one
network layer per input set:
* weights, each line read four times (L-RPT entry RC 3, RI 0);
* inputs, each line read twice in consecutive passes (RC 1, RI 2);
* outputs, written once (no L-RPT entry).

Beside the accelerator, the cores issue a hot set that is reused and a
stream that is not. The LLC is 64 sets × 16 ways, so the layer and the
hot set do not both fit. The testbench runs two input sets:
* With a loose deadline, both systems must meet it. HyDRA must bypass a
  large share of accelerator accesses. The cores' hit rate after the first
  epoch must be higher with HyDRA than without bypass.
* With a deadline 1.2 to 1.4 times the baseline's run time, HyDRA must
  still meet it and must bypass less than under the loose one.

In a typical run the layer takes about 275,000 cycles either way. Under
the loose deadline HyDRA bypasses about 2,200 of its 5,120 accelerator
accesses, and the cores' hit rate after the first epoch rises from 0 to
about 23%. Under the tight deadline HyDRA bypasses far fewer accesses.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/hydra_pkg.sv tb/tb_hydra_llc.sv --top-module tb_hydra_llc -o sim
./obj_dir/sim
```

All variables read by the design are reset. The testbenches pass with
random initial values (`+verilator+rand+reset+2`).

## 10. Sizes against the evaluated workloads

The accelerator configurations are Tiny-YOLO, GoogleNet, MobileNet, Deep
Speech2, Faster R-CNN and AlphaGoZero on 64×64 or 256×256 systolic
arrays. Sizes below are this design's own estimates at 8-bit data, not
published figures.

* **L-RPT capacity.** For every configuration except Faster R-CNN, the
  largest layer's whole footprint stays under about 150K lines. That is
  well inside the 512K-entry L-RPT, and only lines with reuse need an
  entry. The Faster R-CNN configuration's fc6 layer (about 103M weights,
  about 1.6M lines) exceeds the table, so whether its reused lines fit
  depends on the trace. Aliasing entries would then be shared.
* **Deadline and M.** At 10 inputs per second the deadline is 2·10^8
  cycles. This fits the 32-bit D and M fields.
* **Core mixes.** Each SPEC CPU2006 evaluation mix puts one benchmark on
  each of 8 cores. That matches the 8 core source ids.

## 11. Files

`rtl/`:

| file | contents |
|---|---|
| `hydra_pkg.sv` | shared types and constants: request and response structs, the L-RPT entry, thresholds, counters |
| `hydra_llc.sv` | top level |
| `apm.sv`, `margin_est.sv`, `dyn_thresh.sv`, `reuse_thresh.sv` | progress monitor |
| `lrpt.sv`, `bypass_decision.sv` | reuse prediction and the bypass rule |
| `ship_predictor.sv` | core bypass predictor |
| `arp_queue.sv`, `llc_cache.sv` | request queue and cache |
| `sync_fifo.sv`, `seq_div.sv` | generic FIFO and bit-serial divider |

`tb/`: one `tb_<block>.sv` per block, plus `tb_hydra_llc_full.sv`,
`tb_workload.sv` with its `wl_harness.sv`, and `mem_model.sv`.
