# LOFT in hardware: finding low-rate overuse flows with little fast memory

A network that sells each flow a guaranteed share of bandwidth also has to police it.
The contract of a flow is a token-bucket specification: in any interval of length
t the flow may send at most `gamma*t + beta` bytes. Checking that exactly needs a
leaky bucket per flow. With hundreds of thousands of flows on a 400 Gbit/s port,
that is megabytes of state that must be touched at line rate. Classic heavy-hitter
sketches are cheap, but they only find flows that are *much* larger than the rest.
A flow that sends 1.5 or 2 times its reservation disappears in their noise.

The Low-Rate Overuse Flow Tracer (LOFT) splits the job in two:

* A **cheap probabilistic stage** ranks all flows by how likely they are to be
  overusing. It uses one small counter array per short time slice and a hash
  that changes every slice. A flow that is consistently above its share keeps
  landing in counters that are heavier than their occupancy explains.
* An **exact stage** watches only the top-ranked few (64) flows with real leaky
  buckets. Only a flow that really broke `gamma*t + beta` is reported, so there
  are no false positives.

This repository is a synthesizable SystemVerilog implementation of the whole
detector: fast path, sampler, flow table, estimate engine, precise monitors and
blacklist. It runs at one packet per clock. Its defaults are the algorithm's
main configuration at 200 MHz.

## Blocks and data flow

```
 in_pkt ──► blacklist ──(drop)            ┌──────────── loft_cycle_timer ───────────┐
 (flow, size,   │                         │ minor_tick (64/s)  major_tick (4/s)      │
  gamma, beta)  ▼ fwd_pkt (1 clock later) │ reset_tick (every 15 s)  k, j, jg, now   │
        ┌───────┼──────────────┬──────────┴──────────────────────────────────────────┘
        ▼       ▼              ▼
   loft_update  loft_sampler   loft_monitor ◄── watchlist (64 IDs) ── loft_estimate
   counter x=   random instants  64 leaky buckets                       ▲   ▲
   H_jk(flow)   rate lambda      gamma*t+beta                           │   │
   += size          │                 │ det_valid/det_flow              │   │
        │           ▼                 └──────► blacklist insert         │   │
        │      loft_flow_table (IDs, A, C, |J|, 2 activity bits) ◄──────┘   │
        │ drain at every minor-cycle end                                    │
        └──────► loft_counter_store (Z arrays x 2 major cycles) ────────────┘
```

| module | role |
|---|---|
| `loft_pkg` | widths, packet struct `pkt_t`, event struct `loft_events_t`, the hash mixer `fmix32`, seed function |
| `loft_cycle_timer` | minor, major and reset cycles; free-running time stamp |
| `loft_hash` | the per-minor-cycle hash `H_{j,k}` (shared by fast path and estimate engine) |
| `loft_update` | fast-path counter array: read-add-write per packet, ping-pong banks, drain to main memory |
| `loft_counter_store` | main-memory copy of the Z counter arrays of the last and the running major cycle |
| `loft_sampler` | Poisson-process packet sampler feeding the active-flow list |
| `loft_flow_table` | hash table of flows with A, C, \|J\| and per-cycle activity bits |
| `loft_estimate` | once-per-major-cycle engine: cardinalities, sums, scores, sorted top-64 watchlist |
| `loft_monitor` | 64 leaky buckets for the watchlist flows |
| `loft_blacklist` | CAM of detected flows whose packets are dropped |
| `loft_top` | wires it all together |

The classifier that maps a packet to its flow ID and looks up `gamma`/`beta` is
outside this design, and so are the network interfaces. `loft_top` receives one
classified packet per clock on `in_valid`/`in_pkt`.

## Three time scales

All bookkeeping follows three nested cycles, all generated by `loft_cycle_timer`:

| cycle | default | meaning |
|---|---|---|
| minor cycle | 3,125,000 clocks = 1/64 s | one counter array; one hash function |
| major cycle | Z = 16 minor cycles = 0.25 s | one active-flow list; one estimate run; one watchlist |
| reset cycle | θ = 960 minor cycles = 15 s | A, C and \|J\| of all flows are forgotten |

The reset rule is "reset when Z·j ≥ θ", where j counts the major cycles since
the last reset. It is checked when a major cycle ends. With the defaults, every
60th major cycle is a reset cycle. The 15 s value is the reset time the
algorithm's analysis gives for 16384 counters. A global major-cycle number `jg`
keeps counting across resets. Together with k it seeds the hash, so no two minor
cycles ever share a hash function.

## The fast path (`loft_update`)

Every packet that is not blacklisted adds its size to counter
`x = H_{j,k}(flow)` of the current array. This is the only per-packet work
besides sampling and the watchlist check, and it costs one read and one write of
a 16384 × 32-bit memory. The path is pipelined like an SRAM with a registered
read:

1. **Stage 0:** hash the flow ID and pick the bank.
2. **Stage 1:** read the counter.
3. **Stage 2:** add with saturation and write back.

Two packets of the same flow in consecutive clocks would read a stale value. A
bypass handles this: stage 1 records that its index equals stage 2's, and stage 2
then adds to the value it has just written instead of the memory output.

There are two banks. At `minor_tick` new packets switch to the other bank. Three
clocks later the pipeline is empty, and the finished bank streams out one entry
per clock (`drain_*`). Each entry is cleared as it is read, so an empty array is
ready one minor cycle later. A minor cycle must therefore last at least
W + 4 clocks; otherwise `upd_overrun` is raised. At 3.1 M clocks per minor cycle
that leaves a very wide margin. After reset both banks are cleared, and
`in_ready` is low for those W clocks.

The stream is written into `loft_counter_store`. The store keeps 2 × Z arrays:
the running major cycle's and the previous one's, selected by the parity of
`jg`. The algorithm keeps these arrays in DRAM. Here the store is a plain array
with one write and one read port.

## The active-flow list (`loft_sampler`, `loft_flow_table`)

The estimate engine can only rank flows it knows. The sampler picks packets at
random instants that form a Poisson process of rate λ = 2.1 M/s. The first packet
at or after each instant is taken, so the time of the next sample cannot be
predicted or gamed. In clocked hardware the exponential gap between instants
becomes a geometric one. Every clock is an instant with probability
`p = λ / f_clk` (about 1.05 %), drawn from a 32-bit xorshift generator.

A credit counter remembers instants that have passed while no packet arrived or
while the table was busy. Each sample uses one credit. This is exactly the
pseudo-code rule "if current_time ≥ sample_time then sample", including several
overdue sample times.

Sampled flow IDs go into `loft_flow_table`, an open-addressing hash table of
2^18 slots with linear probing of at most 16 slots. Each slot holds:

* the flow ID;
* the volume sum A (64 bits);
* the cardinality sum C (48 bits);
* the count \|J\| of major cycles in which the flow was active (16 bits);
* two activity bits, one per major-cycle parity.

Marking a flow in the running cycle sets one activity bit. The estimate engine
meanwhile reads, and then clears, the other bit. The original algorithm uses two
cuckoo hash tables in DRAM, one for the active-flow list and one for the flow
table. Here they are merged into one table. A flow that finds no slot within 16
probes is simply not listed (`ins_miss`), which has the same effect as a missed
sample.

## The estimate engine (`loft_estimate`)

This is the most involved block. It runs once per major cycle, after the last
counter array of that cycle has reached the counter store, and works on the
previous cycle while the fast path fills the next one.

**What it computes.** For each flow f active in major cycle j:

```
A_f   += sum over k of ctr_{j,k}[H_{j,k}(f)]        (volume sum)
C_f   += sum over k of |ctr_{j,k}[H_{j,k}(f)]|      (cardinality sum)
|J_f| += 1
score  = (|J_f| / j) * (A_f / C_f)
```

`|ctr[x]|` is the number of active flows that the hash put in counter x during
that minor cycle. It is not measured on the fast path. The engine reconstructs
it from the active-flow list, because fast memory is the scarce resource and the
engine has time.

Why this works: an overuse flow sits in counters that are heavy *for their
occupancy*. Dividing by the cardinality removes the noise of how many flows
shared the counter, and re-hashing every minor cycle averages out unlucky
neighbours. The factor `|J|/j` penalises flows that were silent in some major
cycles. Without it, a flow sending every other cycle would score like one
sending all the time.

**How it runs.** For each minor cycle k = 0 … Z−1 the engine makes three
passes:

| pass | work | clocks |
|---|---|---|
| CLR | clear the cardinality array `numFlow[0..W-1]` | W |
| CNT | walk all table slots; for every flow active in j, `numFlow[H_{j,k}(f)] += 1` | T |
| ACC | walk again; for every active flow, read `ctr_{j,k}[x]` from the counter store and `numFlow[x]`, and add them to A_f and C_f in the table | T |

A final pass (FIN) then visits every active flow once. It increments \|J\|,
clears the activity bit and computes the score as the fixed-point quotient
`(|J| · A · 2^16) / (j · C)`. This uses a bit-serial restoring divider of 96
steps. The score goes into a sorted list of the 64 best, inserted in one clock by
a shift. When the engine is done, the list is published (`wl_valid`) and loaded
into the monitors for the next major cycle.

If the cycle that ended was a reset cycle, one more pass follows. It clears A, C
and \|J\| of every slot and frees every slot whose flow is not active in the
running cycle. Sampler inserts pause during this pass, so the running cycle's
list survives the reset.

Run time:

```
Z*(W + 2T) + 3T + 98*N clocks  =  9.4 M + 98*N   (W = 2^14, T = 2^18, Z = 16)
```

One major cycle is 50 M clocks, so the engine finishes in time for
N ≲ 410 K active flows. The main scenario of 130 K flows takes about 22 M
clocks. If the next cycle's arrays are complete while the engine is still busy,
that run is skipped and `est_overrun` is raised.

The algorithm as published runs this step in software. Here it is an explicit
state machine that touches the table through a read port with one clock of
latency; the FIN pass has a wait state for it. A_f and C_f are added straight
into the table, rather than through per-cycle temporary arrays as in the pseudo
code, and the result is the same.

## Precise monitoring and the blacklist (`loft_monitor`, `loft_blacklist`)

Each of the 64 watchlist flows gets a leaky bucket. Its level drains by
`gamma · Δt` (gamma in bytes per clock with 24 fractional bits, Δt in clocks since
the flow's last packet) and rises by the packet size. A packet that lifts the
level above `beta` is a violation. The flow is then reported once on
`det_valid`/`det_flow`, and its monitor entry is released. Because the bucket
checks the contract exactly, a report is never a false alarm. A new watchlist
replaces all entries and empties all buckets.

Each reported flow is written into `loft_blacklist`, a 128-entry CAM compared
against every packet in the clock it arrives. Blacklisted packets are dropped
before any other block sees them. When the list is full, the oldest entry is
replaced.

## Interface of `loft_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock (200 MHz nominal); asynchronous active-low reset |
| `in_valid`, `in_pkt` | in | one classified packet per clock: `flow_id` (32 bits), `size` (16 bits), `gamma` (32 bits, bytes/clock, 24 fractional bits), `beta` (32 bits, bytes) |
| `in_ready` | out | low only while the counter banks are cleared after reset |
| `fwd_valid`, `fwd_pkt` | out | packets that passed the blacklist, one clock later |
| `det_valid`, `det_flow` | out | a watchlist flow violated `gamma*t+beta` |
| `wl_valid`, `wl_id`, `wl_vld`, `wl_score` | out | watchlist published after each estimate run, best first |
| `watched` | out | which monitor entries are occupied |
| `major_j`, `n_active`, `bl_count` | out | major-cycle index since reset, active flows of the last estimate, blacklist fill |
| `ev` | out | one-clock event flags: minor/major/reset tick, blacklist drop, update bypass, saturation, overruns, sample, table insert new/dup/miss, estimate start/done, detection |

## Parameters (defaults)

| parameter | default | origin |
|---|---|---|
| `IDX_W` | 14 (16384 counters) | algorithm's main configuration |
| `Z` | 16 minor cycles per major cycle | 64 minor and 4 major cycles per second |
| `CLK_PER_MINOR` | 3,125,000 | 200 MHz / 64 |
| `THETA_RESET` | 960 minor cycles (15 s) | reset time given for 16384 counters |
| `SAMPLE_RATE` | 2.1e6 /s | algorithm's λ |
| `CLK_HZ` | 200e6 | the FPGA clock of the fast path |
| `WFM` | 64 monitored flows | algorithm's main configuration |
| `TAB_W` | 18 (262,144 slots) | this design (holds 130 K flows at half load) |
| `MAX_PROBE` | 16 | this design |
| `BL_N` | 128 blacklist entries | this design |
| counter / flow ID width | 32 / 32 bits | 4-byte counters and IDs as in the per-flow memory estimate |
| A / C / \|J\| / score | 64 / 48 / 16 / 64 bits, score with 16 fractional bits | this design |

## Where this design differs from the published algorithm

* **Estimate in hardware.** The published estimate runs in software on the
  router's CPU. Here it is an on-chip engine whose time depends on the table
  size, not only on the number of active flows (see the run-time formula).
* **One flow table.** There is one linear-probing table instead of two cuckoo
  tables in DRAM. Flows that cannot be placed within 16 probes are not tracked in
  that cycle.
* **Cardinality per minor cycle.** The pseudo code accumulates `numFlow` without
  clearing it between minor cycles. The prose defines cardinality per minor
  cycle, and this design follows the prose: `numFlow` is cleared for every k.
* **Hash.** Any hash that changes every minor cycle will do. This design uses
  the murmur3 finaliser on `flow ^ (seed · 0x9E3779B1)`, with `seed = {jg, k}`.
* **Geometric sampling** in clock units stands in for the exponential gap. At
  p ≈ 1 % per clock the two distributions are indistinguishable at the scale of
  a major cycle.
* **Fixed-point formats,** saturating 32-bit counters, the bucket reset at
  watchlist load, the blacklist size and its replacement rule are this design's
  own.
* **Counter store.** It is an on-chip array here (2 × 16 × 16384 words). In a
  product it would be external memory behind the same one-write/one-read
  interface.

## Capacity against the evaluated scenarios

| scenario | holds? | why |
|---|---|---|
| 130 K flows, 16384 counters, 4 × 100 Gbit/s iMix | yes | table at 50 % load; estimate 22 M of 50 M clocks; iMix is about 134 Mpps against a capacity of 200 Mpps |
| 10 M flows | no | table too small; estimate would need about 980 M clocks |
| 400 K flows (memory-budget and imprecise-list tests) | no | more flows than slots; with `TAB_W = 19` the run would take 58 M clocks, more than a major cycle |
| 1024 counters, 100 K–400 K flows | up to about 250 K | table size |
| one 100 Gbit/s port with 64-byte packets (200 Mpps) | yes | one packet per clock at 200 MHz |
| two such ports (400 Mpps) | no | needs two instances |

The fast memory at default size is 2 × 16384 × 32 bits = 128 KiB for the counter
banks, plus 64 leaky buckets. That is about the 130 kB the algorithm budgets
(the second bank is the price of streaming out without stopping the fast path).

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench, and ends with a
`TB_RESULT checks=… failures=…` line. `tb_loft_ref_pkg` holds the shared
reference hash, written with 64-bit arithmetic.

| testbench | what it checks |
|---|---|
| `tb_loft_hash` | every output against the reference hash, several seeds |
| `tb_loft_cycle_timer` | tick positions, k/j/jg sequence and reset points (small cycle lengths) |
| `tb_loft_update` | counter values against a model after random traffic; bypass on back-to-back packets; saturation; drain order and clearing |
| `tb_loft_counter_store` | write/read of all banks and minor indices, read latency |
| `tb_loft_sampler` | sample rate within statistical bounds at the default λ; p = 1; credit kept across gaps |
| `tb_loft_flow_table` | insert new/duplicate, probe-limit miss, estimate read/write/clear ports |
| `tb_loft_estimate` | A, C, \|J\|, scores and watchlist order against a software model over three major cycles, including a reset cycle |
| `tb_loft_monitor` | a compliant flow is never reported; a 1.67× flow is reported once, at the packet the model predicts |
| `tb_loft_blacklist` | hits, duplicate inserts, round-robin replacement |
| `tb_loft_top` | whole design at small sizes. 40 compliant flows, one 3× flow, short-lived flows. Every packet is forwarded or dropped correctly; the bad flow is watchlisted, detected and blacklisted; no compliant flow is ever reported; every mechanism (ticks, reset, bypass, sampling, new/dup/miss insert, estimate, detection, drop) is seen at least once |
| `tb_loft_workload` | the half-utilisation scenario at reduced size. 1024 counters, 100 full-rate and 100 light (1/25) compliant flows, one 2-fold and one 1.5-fold overuse flow, 8 monitors, a reset every 2 major cycles. Both overuse flows are found (after major cycles 1 and 2) and then dropped; no compliant packet is dropped |
| `tb_loft_full` | whole design at the default parameters. 2000 compliant flows plus one 1.5× flow through one full major cycle and its estimate (about 9.6 M clocks). All 2001 flows are found active; the 1.5× flow heads a sorted, full watchlist; it is detected about 53 K clocks into the next major cycle and its packets are then dropped. About 2 minutes of simulation |

Run any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/loft_pkg.sv tb/tb_loft_ref_pkg.sv \
    $(ls rtl/loft_*.sv | grep -v loft_pkg) tb/tb_loft_top.sv \
    --top-module tb_loft_top -Mdir obj_top
./obj_top/Vtb_loft_top
```

The package files must come first. A block testbench needs only its own module,
`loft_pkg.sv`, `tb_loft_ref_pkg.sv` and, for the update and estimate blocks,
`loft_hash.sv` (the estimate testbench also instantiates the flow table and
counter store).

**How far to trust it.** The detection statistics of the algorithm are the
published ones and are not re-established here. The testbenches show that the
hardware computes the published quantities exactly and at line rate, and that
a moderate overuse flow among thousands of compliant ones is found within two
major cycles. The sensitivity experiments over long times (tens of seconds,
hundreds of thousands of flows) were not simulated at RTL. The largest
simulated run is the one-major-cycle run of `tb_loft_full`.
