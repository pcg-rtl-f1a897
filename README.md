# PCG: a prefetching cache guard against conflict-based side channels, in SystemVerilog

Conflict-based cache attacks (Prime+Probe, Evict+Reload, Evict+Time) work by
filling one cache set with the attacker's own lines and then watching which lines the victim
evicts or installs there. PCG ("prefetching-based cache guard", from Jiang et al., *PCG:
Mitigating Conflict-based Cache Side-channel Attacks with Prefetching*) defends a
set-associative data cache without repartitioning or remapping it. It uses the
prefetch path the cache already has in two ways:

* **It shrinks the victim's footprint.** In a set that looks under attack, a line the victim
  installs gets the highest replacement priority, so it is the next line to leave. The line
  its fill pushed out is prefetched straight back.
* **It adds noise.** On every demand miss it issues a few prefetches next to the missing
  block, forward or backward at random. Each is moved to a set that has not been touched
  recently, preferring sets flagged as under attack. The noise is therefore spread evenly
  over the cache.

The attacker then sees hits and misses that prefetching could equally have caused. The
victim's own traces are partly erased, so repeating the attack and averaging does not
separate signal from noise.

The question of whether a set is under attack rests on one observation. Building and probing
an eviction set costs many **MSHR misses**: misses that need a fresh miss-handling entry,
because every line of an eviction set is a different block. Benign code has far fewer. PCG
counts MSHR misses per set and flags a set once one instruction has brought it to the
cache's associativity.

This repository holds synthesizable RTL for PCG as it sits in a 16 KB, 4-way, 64-set L1
data cache with 64-byte lines. That is the configuration of the reference evaluation on an
out-of-order RISC-V core. The cache itself is not part of the RTL. PCG connects to it
through a small set of ports, described below.

## Block structure

```
                 core requests (PC, address, hit/miss, MSHR miss, evicted line, way)
 L1 DCache  ──────────┬───────────────────────┬──────────────────────────┐
 (not in RTL)         │                       │                          │
                      v                       v                          v
                 ┌─────────┐  dangerSet  ┌─────────┐ prefetch   ┌──────────────────────┐
                 │   aam   │ ──────────> │   ocm   │ ─────────> │ prefetch_queue port 1│
                 └─────────┘             └─────────┘            │   (32 entries, FIFO) │
                                              │ mark (set, way) │                      │
                                              v                 │ port 0 <─ next_line_ │
 victim query / fills  <──────────────> ┌───────────────┐       │        prefetcher    │
 from the cache                         │ repl_priority │       └──────────┬───────────┘
                                        └───────────────┘                  │ pf_valid/pf_addr
                                                                           v   to the cache
```

| File | Role |
|---|---|
| `rtl/pcg_pkg.sv` | Shared sizes, the `access_t` request record, `ocm_events_t` event flags |
| `rtl/aam.sv` | Attack Aware Module: per-set MSHR-miss counters, `dangerSet`, periodic clear |
| `rtl/ocm.sv` | Observation Confused Module: eviction re-fetch, priority marking, random balanced noise prefetches |
| `rtl/repl_priority.sv` | Per-set override of the cache's victim choice ("highest replacement priority") |
| `rtl/prefetch_queue.sv` | 32-entry prefetch FIFO shared by the basic prefetcher and PCG |
| `rtl/next_line_prefetcher.sv` | Optional basic prefetcher (next 4 blocks), enabled at run time |
| `rtl/pcg_fifo.sv` | Generic small FIFO (the OCM's work queue) |
| `rtl/pcg_top.sv` | Top level wiring all of the above |

## Detecting sets under attack (AAM)

The AAM sees each core request the cache reports. It acts only on those with
`mshr_miss` set. The request address gives the set index (bits [11:6]). For example,
`0x8000a040` is set 1 and `0x8000b730` is set 28.

* **Counting.** Set *i* has a counter *C_i* in 0..W. Each MSHR-missing request to the set
  increments it, saturating at W (= 4).
* **Flagging on an instruction boundary.** The AAM keeps the PC of the last request it
  counted (`lastPC`). When a request arrives with a different PC, every set with
  *C_i* ≥ τ (τ = W) gets its `dangerSet` bit set. Bits are only ever set, never cleared
  here. The check uses the counter values from before the new request's own increment, so
  it judges what the previous instruction did. The threshold is W because an attacker must
  touch a set at least W times to fill it.
* **Forgetting.** A 16-bit counter `cnt` runs every cycle. When `cnt ≠ 0` and
  `cnt % T == 0`, all counters and `dangerSet` are cleared. When `dangerSet` turns from
  all-zero to non-zero, `cnt` restarts at 0. A freshly raised flag therefore lives exactly
  T+1 cycles, unless further sets are flagged in the meantime. Those do not restart `cnt`.
  T trades false positives (T too long) against missed attacks (T too short). The reference
  study swept T from 1000 to 50000 cycles without naming one value; the default here is
  10000.

Timing: one request per cycle. `dangerSet` is a register, so a set flagged by request *n*
is visible to the OCM from the next cycle on.

## Confusing the observer (OCM)

For every core request to set *i*, the OCM does three things.

1. **Footprint reduction.** If `dangerSet[i]` is set and the request's fill evicted a line,
   two things follow:
   * The entry the request was filled into (set *i*, way `acc_way_i`) is marked in
     `repl_priority`. The next victim chosen in that set will be this way.
   * The evicted line's block address is queued for prefetching, so that line returns.

   Together these make a victim access look like "nothing happened" to an Evict+Reload or
   Prime+Probe observer. The victim's line leaves early and the attacker's line comes back.
2. **refSet bookkeeping.** Bit *i* of `refSet` is set; this register records the sets
   touched recently.
3. **Noise.** On a miss, for *d* = 1..4, a random bit chooses forward or backward. The
   candidate is `tempAddr = block ± d·64`. **BalancedSet** then keeps the candidate's tag
   and replaces only its set index:
   * If `refSet` is all ones, everything has been touched. `refSet` is cleared and `danSet`
     is reloaded with `~dangerSet`, so the zeros of `danSet` are exactly the flagged sets.
   * If `danSet` still has a zero, a flagged set has not yet received noise. The nearest
     such set to the candidate's set is used and marked in `danSet`.
   * Otherwise the nearest set with `refSet = 0` is used and marked in `refSet`.

   "Nearest" means the smallest |s − t_set|, without wrap-around; on a tie the higher set
   wins.

   Worked example: no set is flagged (`danSet` all ones) and `refSet` has only sets 1 and
   2 set. A miss in set 1 with a forward *d* = 1 gives a candidate in set 2, which is
   already referenced. Of the two sets at distance 1, set 1 is referenced too, so the
   prefetch moves to set 3, and set 3 is marked in `refSet`.

All noise goes first to sets under attack until each has had one noise prefetch. After that
it goes to sets not yet touched since `refSet` was last cleared. This is what keeps the noise balanced
across the cache.

**Throughput and ordering.** Work is queued per request in a 4-entry work queue. It is
expanded into addresses one per cycle, through a one-entry output register with a
valid/ready handshake towards the prefetch queue. The eviction re-fetch of a request always
comes before its noise prefetches. The BalancedSet state and the random source (a 16-bit
LFSR) advance when an address is generated, so an address waiting on back-pressure never
changes. If the work queue is full when new work arrives, that work is dropped. The drop is
counted on `ocm_ev_o.job_drop`. The `refSet` update and the priority mark are never
dropped.

## Replacement priority

`repl_priority` holds at most one marked way per set. The cache calls it whenever it must
evict from a full set. It passes its own choice (random in the reference cache) as
`query_default_way_i` and gets back `query_way_o`: the marked way if the set has a mark,
otherwise its own choice.

The cache reports every installed line on `fill_*`. A fill into the marked way clears the
mark, because the marked line has then left. A new mark replaces an older one in the same
set.

The OCM drives the mark combinationally from the request. It is written at the clock edge
that ends the request's cycle, so every later victim choice sees it. A mark and a fill in
the same cycle and set leave the mark standing, because the request's own fill goes into
the way being marked.

## Prefetch queue and basic prefetcher

`prefetch_queue` is a 32-entry FIFO of block addresses with two push ports and one pop port:

* Port 0 is for a basic prefetcher.
* Port 1 is for PCG, which only appends to the queue. An existing prefetcher therefore
  keeps its interface unchanged.
* When only one slot is free, port 0 goes first.
* A full queue holds both producers off (ready low) instead of dropping entries.
* The cache pops the head. It should ignore an address whose line is already present and
  otherwise send a request to the next level.

`next_line_prefetcher` is the basic prefetcher used in the reference evaluation's NLP and
NLP+PCG runs. It is enabled by `nlp_en_i`. On an access it pushes the next 4 blocks. While
busy it ignores further accesses and pulses `drop_o` for each. The main configuration is
PCG on its own, with `nlp_en_i = 0`.

## What the cache must provide (`pcg_top` ports)

| Port | Direction | Meaning |
|---|---|---|
| `acc_i` (`access_t`) | in | Each cycle, the core request the cache has just looked up. Fields: `valid`, `pc`, `addr`, `miss`, `mshr_miss` (the miss allocated a new MSHR entry), `evict` / `evict_addr` (the fill for this request evicted a valid line, and that line's address) |
| `acc_way_i` | in | Way the request hit in or was filled into |
| `rq_set_i`, `rq_default_way_i` → `rq_way_o`, `rq_override_o` | in/out | Combinational victim query for a full set |
| `fill_valid_i`, `fill_set_i`, `fill_way_i` | in | Every line installed (demand or prefetch) |
| `pf_valid_o`, `pf_addr_o`, `pf_ready_i` | out/in | Prefetch requests, one per accepted cycle |
| `nlp_en_i` | in | Enables the next-line prefetcher |
| `danger_set_o`, `aam_*_o`, `ocm_ev_o`, `nlp_drop_o`, `pq_full_o`, `pq_count_o` | out | Status and event pulses for monitoring |

Each request is reported once, on `acc_i`, together with the eviction its fill caused. A
cache that picks its victim only when the refill returns can delay the report of a missing
request until then. Reset is active-low and asynchronous. Every register is cleared, except
`danSet` (set to all ones) and the LFSR (loaded with its seed).

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `S` sets | 64 | evaluated L1 DCache (16 KB, 4-way) |
| `W` ways, τ | 4, τ = W | evaluated cache; τ = W as in the scheme |
| `T` clear period | 10000 | own choice within the evaluated range 1000–50000; `cnt` is 16 bits |
| `DEGREE` | 4 | the scheme's chosen prefetch degree |
| `PQ_D` prefetch queue | 32 | evaluated configuration |
| `NLP_DEGREE` | 4 | evaluated next-line prefetcher |
| `JOBQ_DEPTH` | 4 | own choice |
| Address / PC width | 32 / 32 (`pcg_pkg`) | own choice |

To place PCG in an L2 cache, set `S` and `W` to that cache's geometry. For example, a
512 KB 16-way cache with 64 B lines needs `S=512, W=16`. `T` must stay below 65536, the
range of the 16-bit `cnt` (`CNT_W` in `pcg_pkg`).

### State at the default parameters

| Block | Flip-flop bits | What they hold |
|---|---|---|
| `aam` | 304 | 64 counters of 3 bits, 64-bit dangerSet, 16-bit `cnt`, last PC (32) |
| `repl_priority` | 192 | one mark bit and a 2-bit way per set |
| `ocm` | 187 flops + 216 queue bits | `refSet`, `danSet`, LFSR, current job, output register; 4-entry work queue |
| `prefetch_queue` | 1024 queue bits + pointers | 32 addresses of 32 bits |

A generic synthesis of `pcg_top` gives about 730 flip-flop bits outside the two queues. The
reference BOOMv3 implementation reports 253 extra flip-flops and about 1,700 extra LUTs, with
no extra block RAM. It presumably reuses state the core already has: the core's own prefetch
queue, and replacement metadata for the marks. The RTL here keeps all of PCG's state itself,
so it is larger in flops. Keeping the marks in the cache's existing replacement state would
save the 192 bits of `repl_priority`.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and a watchdog ends a hung run.

| Testbench | What it checks |
|---|---|
| `tb_aam` | A worked example with the addresses above: set 1 flagged only after a new PC; `cnt` restart; the flag clears exactly T+1 cycles later. Then 20000 random requests compared every cycle with an equation-level model. |
| `tb_ocm` | 3000 requests, each drained before the next. A model predicts the exact eviction re-fetch and, for noise prefetches, runs BalancedSet on both the forward and the backward candidate (the random source is not copied). Also checks priority marks, both directions, both BalancedSet branches, `refSet` wrap, and work dropped on overflow. |
| `tb_aam_periods` | Eight AAM instances at T = 1000, 2000, 5000, 10000, 20000, 30000, 40000, 50000, the reference sensitivity sweep. Each flag must live exactly T+1 cycles. |
| `tb_repl_priority` | Random marks, fills and queries against a model |
| `tb_prefetch_queue` | Order, no loss, exact ready rules, filling to 32, stalls |
| `tb_next_line_prefetcher` | Addresses B+1..B+4, back-pressure hold, disabled mode, drops while busy |
| `tb_pcg_l2` | `pcg_top` at the geometry of a 512 KB, 16-way L2 with 64 B lines (S = 512, W = 16), driven with directed requests. After sixteen MSHR-missing loads to set 300, a load from a new PC must flag exactly that set. An eviction there must mark the new way until it is refilled, and the victim must be fetched back. Every miss must yield four noise prefetches with the right tag. |
| `tb_pcg_top` | End to end at default parameters. A tag-only behavioural L1D drives PCG: 64×4, random replacement, 4 MSHRs with merging, 12-cycle refills, and prefetches of present lines ignored. The workload is six Evict+Reload rounds on a 256-entry probe array (secret 115); round 3 blocks the prefetch port and rounds 4–5 enable the next-line prefetcher. The same six rounds are first run with PCG held in reset, as a baseline. Every address entering or leaving the queue is checked against predictions. Every victim choice in a marked set must pick the marked way. Each mechanism must occur at least once: MSHR merge, `cnt` restart, periodic clear, priority mark and override, eviction re-fetch, both noise directions, both BalancedSet branches, `refSet` wrap, work drop, queue full, next-line mode, ignored prefetch. |

In the end-to-end run, the same model cache was tested with PCG held in reset and with
PCG active. Over six rounds without PCG, the probe hit the secret entry in 4 rounds and the
other 255 entries 3 times in total (lines that survived the eviction by chance). With PCG
active it hit the secret entry in no round and the other entries 24 times. These are the numbers of
one run of a behavioural cache, not of a timing-accurate core, so treat
it as a functional demonstration rather than a security measurement.

Simulate with plain Verilator 5 from the repository root, for example:

```
verilator --binary --timing --assert -y rtl -Irtl rtl/pcg_pkg.sv tb/tb_pcg_top.sv \
          --top-module tb_pcg_top -Mdir obj_top && obj_top/Vtb_pcg_top
```

Replace `tb_pcg_top` with any other testbench name. The package must come first; `-y rtl`
finds the rest. All testbenches finish in well under a second.

## Where this RTL goes beyond or departs from the described scheme

* **Host cache.** Cache arrays, MSHRs and refill logic are not included. PCG's needs from
  the cache are ports: the MSHR-miss flag, the evicted address, the fill way, victim
  arbitration and prefetch issue. The end-to-end testbench contains only a behavioural model
  of the cache.
* **Reset period.** No T value is given by the scheme; T = 10000 is an own pick.
* **Replacement priority.** The scheme only says "highest replacement priority". Here it is
  realised as a one-way-per-set override of a random policy, cleared on refill.
* **Random source and tie-break.** The random direction comes from an LFSR. "Closest set"
  means nearest index without wrap-around; ties go to the higher set.
* **Throughput and drops.** Generating one address per cycle, the 4-entry work queue, and
  dropping work when it is full are choices of this RTL. Under heavy miss bursts a dropped
  job also loses its eviction re-fetch. Raise `JOBQ_DEPTH` if that matters for a given
  cache.
* **Other basic prefetchers.** The stride and signature-path prefetchers the scheme can be
  combined with are not built. Neither are the comparison schemes.
