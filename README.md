# BreakHammer: throttling the threads that keep a RowHammer defence busy

RowHammer defences protect DRAM by performing *preventive actions*: refreshing
the neighbours of a heavily activated row, migrating a row, or granting the DRAM
chip time through RFM commands or a PRAC back-off. Each action blocks a bank for
a while. A program that activates rows aggressively, whether by accident or on
purpose, makes the defence act far more often. That slows every other program
sharing the memory, and the effect grows as DRAM chips become more vulnerable.

BreakHammer is a small unit next to the memory controller. It does not replace
the defence and does not change what the defence does. It watches which
hardware threads cause the preventive actions. It flags a thread whose share is
both large and far above the average. Then it cuts the number of last-level-cache
miss buffers (MSHRs) that thread may hold. With fewer outstanding misses, the
flagged thread issues fewer activations, so the defence acts less often and the
other threads get their bandwidth back.

This repository holds synthesizable SystemVerilog for the unit, self-checking
testbenches for each block, and an end-to-end testbench. The end-to-end
testbench includes a small model of the cache, the traffic and an RFM-style
defence.

## The algorithm

Time is cut into **throttling windows** of 64 ms. Inside a window, three things
happen.

1. **Score attribution.** Each thread has a *RowHammer-preventive score*. When
   the defence performs a preventive action, the blame is shared out in
   proportion to the activations (ACTs) each thread issued since the previous
   action:

       score_i += act_i / sum_j(act_j)        then act_i := 0 for every thread

   One action therefore adds exactly 1.0 to the sum of all scores. A thread that
   issued 70 % of the activations gets 0.7 of the blame.

2. **Suspect identification** ("thresholded deviation from the mean"). After
   every update, a thread is marked a *suspect* if both of these hold:

       score_i >= TH_threat                      (TH_threat = 32 actions)
       score_i >  (1 + TH_outlier) * mean(score)  (TH_outlier = 0.65)

   The first test ignores threads whose score is too small to matter. The
   second picks out outliers. A marked thread stays a suspect until the window
   ends.

3. **Throttling.** Each thread has a quota `Q_i` of miss buffers. It starts at
   the total number of miss buffers, which means no limit. When a thread becomes
   a suspect, its quota is cut:

       Q_i = max(Q_i - P_oldsuspect, 0)   if it was also a suspect last window
       Q_i = Q_i / P_newsuspect           otherwise
       (P_oldsuspect = 1, P_newsuspect = 10)

   The first cut takes a thread from 64 buffers to 6. Each further window as a
   suspect removes one more buffer. A thread that goes a whole window without
   being marked gets its full quota back at the next window boundary. Requests
   that hit a miss buffer already allocated are never blocked.

### Two interleaved score sets

If scores were never cleared, they would saturate. If they were all cleared at
every window boundary, a new window would start with no history, and an attacker
could hide in the first part of each window. So each thread has a score counter
in each of **two sets**, and every update goes into both sets. Only the *active*
set answers the suspect test. At a window boundary the active set is cleared and
the other set becomes active.

The newly active set has been counting since the previous boundary. It
therefore already holds one full window of history, and every score that is
queried covers between one and two windows. The design shows this in the
end-to-end run. After the attacker stops, it is still marked once more in the
next window, from the history carried over. One window later it is cleared, and
its quota is restored.

```
window:      |   w0    |   w1    |   w2    |   w3    |
set 0:        ACTIVE    train     ACTIVE    train       (cleared at end of w0, w2)
set 1:        train     ACTIVE    train     ACTIVE      (cleared at end of w1, w3)
```

## Hardware organisation

```
  ACT + thread, action            ACT + thread
          │                             │
          ▼                             ▼
   bh_act_tracker               bh_rega_scorer
   (ACT count per thread)       (1 point per REGA_T ACTs)
          │                             │
          ▼                             │
   bh_score_attributor                  │
   (8-stage divider)                    │
          │ REGA_MODE = 0               │ REGA_MODE = 1
          └──────────────┬──────────────┘
                         ▼
                  bh_score_sets  ◄──────────┐
                  (two sets)                │
                         │ active scores    │
                         ▼                  │
               bh_suspect_detector          │ window_end
                         │ mark             │ (swap the sets,
                         ▼                  │  settle the flags)
                  bh_quota_ctrl  ◄──────────┤
                  (Q_i, flags)              │
                         │ quota      bh_window_timer
                         ▼
                  bh_mshr_gate  ◄──── miss-buffer allocate / release (LLC)
                         │
                         ▼
                  alloc_ok per thread
```

| Module | Function | State per thread |
|---|---|---|
| `bh_pkg` | shared constants (configuration below) | – |
| `bh_window_timer` | pulses `window_end` every `WINDOW_CYCLES` cycles | one shared 27-bit counter |
| `bh_act_tracker` | counts ACTs per thread; on an action, snapshots the counts and their total, then clears them | 16-bit ACT counter |
| `bh_score_attributor` | `act_i * 2^7 / total` for all threads in parallel; restoring divider, one quotient bit per stage | pipeline registers |
| `bh_rega_scorer` | alternative attribution for REGA (below) | modulo-`REGA_T` counter |
| `bh_score_sets` | two sets of 32-bit saturating scores; active-set outputs and their sum | 2 × 32-bit score |
| `bh_suspect_detector` | the two-part outlier test | – |
| `bh_quota_ctrl` | quota equation, `suspect` / `recent_suspect` flags, restore | quota, 2 flags |
| `bh_mshr_gate` | per-thread miss-buffer occupancy; `alloc_ok[i] = occupancy_i < Q_i` | occupancy counter |
| `breakhammer` | top level: wires the above; software read port for scores | – |

### Interfaces of `breakhammer`

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset. After reset, all scores are zero, no thread is a suspect and every quota
is full.

* **From the memory controller:** `act_valid`, `act_thread`. Raise these for
  each ACT command, tagged with the hardware thread whose request caused it.
  One ACT per cycle.
* **From the defence:** `action_valid`. Raise it for one cycle per preventive
  action: a preventive refresh (PARA, Graphene, TWiCe), a counter-table miss or
  eviction or a refresh (Hydra), a row migration (AQUA), an RFM command, or a
  PRAC back-off. One action per cycle. An ACT in the same cycle counts towards
  that action.
* **From / to the last-level cache:** the cache reports each allocation
  (`mshr_alloc_valid`, `mshr_alloc_thread`) and each release (`mshr_free_*`),
  at most one of each per cycle. It may allocate for thread *i* only while
  `mshr_alloc_ok[i]` is high; an assertion checks this. `mshr_occupancy` shows
  the current counts.
* **Status:** `quota`, `suspect`, `recent_suspect`, `quota_cut` (a one-cycle
  pulse when a quota is reduced), `window_end`, `active_set`.
* **To system software:** drive `sw_thread`. One cycle later, `sw_score`
  returns that thread's active-set score. This lets an operating system collect
  scores per process or per user.

### Timing

The unit is fully pipelined and accepts an ACT and an action every cycle.

| Stage | Cycles |
|---|---|
| act_tracker snapshot | 1 |
| score_attributor (`FRAC_W + 1`) | 8 |
| score_sets update | 1 |
| suspect_detector | 1 |
| quota_ctrl | 1 |
| **action to new quota** | **12** |

A delay of a few cycles is harmless: throttling only limits *future* miss
buffers, and requests already in flight are never cancelled.

### Number format

Scores are unsigned fixed point with 7 fractional bits in a 32-bit counter, so
one whole action is 128. The divider truncates. Because of that, the shares of
one action can sum to slightly less than 1.0 (by less than N/128). TH_threat is
compared as `32 << 7`. The outlier test never divides. With
`TH_outlier = NUM/DEN = 65/100` it evaluates

    score_i * N * DEN  >  (DEN + NUM) * sum(scores)

exactly. An action with no ACTs since the previous one adds nothing.

### REGA mode

REGA refreshes in the background at a fixed rate: one refresh per `REGA_T`
activations, done through an extra row buffer. It has no individual actions to
share out. With `REGA_MODE = 1`, `bh_rega_scorer` takes over from the tracker
and the divider. It gives a thread one whole point for every `REGA_T` of its
own activations, and `action_valid` is ignored. The rest of the unit is
unchanged.

### Systems without a cache, and DMA

Throttling is meant to happen where requests are tracked, not inside the memory
controller. For a DMA engine or a cacheless core, `bh_mshr_gate` can be used
as-is as a per-thread table of outstanding requests. For a DMA engine it sits
at the DMA's request tracking. For a cacheless core it sits at the core's
load-store unit.

## Configuration

| Parameter | Default | Origin |
|---|---|---|
| `NUM_THREADS` (N) | 4 | quad-core evaluated system, one thread per core (threads per core is this design's choice) |
| `WINDOW_CYCLES` | 96,000,000 | 64 ms window at the 1.5 GHz clock the unit was timed at |
| `TH_THREAT` | 32 | evaluated configuration |
| `TH_OUTLIER_NUM / DEN` | 65 / 100 | TH_outlier = 0.65 |
| `P_OLDSUSPECT`, `P_NEWSUSPECT` | 1, 10 | evaluated configuration |
| `SCORE_W`, `ACT_W` | 32, 16 | counter widths of the original design |
| `NUM_MSHR` | 64 | **own choice**; no miss-buffer count was published |
| `FRAC_W` | 7 | **own choice**; gives an 8-stage divider |
| `REGA_MODE`, `REGA_T` | 0, 16 | **own choice** for `REGA_T`; its value was not published |

Each module takes these as typed parameters, with the package values as
defaults.

## Where this RTL departs from, or adds to, the published description

* **When the quota is cut.** The description says the quota equation is applied
  when a thread "is identified as a suspect". Taken literally, that would be at
  every positive outlier check, and the outlier check runs at every action. The
  description also says the quota depends on how long the thread has been a
  suspect, and that a marked thread stays a suspect for the rest of the window.
  This RTL follows the second reading: the cut happens once per window, at the
  first mark. Applying it at every mark would take a first-time suspect from 64
  to 6 to 0 buffers within a few actions. To get that behaviour, drop the
  `!s_cur` term in `bh_quota_ctrl`.
* **Scores are accumulated.** The published pseudo-code *assigns* the share to
  the score. The prose, the 32-bit counters and the TH_threat = 32 threshold
  all imply that the share is *added*. The RTL adds it.
* **Pipeline depth.** The original design was quoted as an 8-stage pipeline.
  Here only the divider has 8 stages; the whole path takes 12 cycles.
* **Same-cycle rules** were not published and are this design's choice:
  * An ACT in an action's cycle counts for that action.
  * A score update in the window-end cycle goes only to the set that is kept.
  * A mark in the window-end cycle counts for the new window.
* **Added state.** The per-thread quota register and the per-thread miss-buffer
  occupancy counter are needed to enforce a quota. They are not part of the
  published area count, which lists only the two scores, the ACT counter and the
  two flags.
* **Not included:** the cores, caches, memory controller, DMA engine, DRAM, and
  the RowHammer defences themselves. BreakHammer only observes and throttles
  them. The published area and timing figures come from a 65 nm synthesis and
  are not reproduced here.

## Verification

Each testbench is self-checking. Each compares against values it computes
itself and ends with a line `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_bh_window_timer` | pulse position and width over ten 10-cycle windows |
| `tb_bh_act_tracker` | 20k cycles of random ACT/action traffic against reference counts; 6-bit counters to reach saturation; one-cycle snapshot latency |
| `tb_bh_score_attributor` | a random snapshot every cycle, including empty, single-thread and saturated ones; each result against `floor(act*128/total)` at exactly 8 cycles |
| `tb_bh_rega_scorer` | one point on every `REGA_T`-th ACT of a thread |
| `tb_bh_score_sets` | random increments and boundaries against a two-set model; 12-bit scores to reach saturation |
| `tb_bh_suspect_detector` | random score vectors against a real-valued model, plus cases exactly on both thresholds |
| `tb_bh_quota_ctrl` | a hand-computed suspect life cycle (64 → 6 → 5 → 4 → 3 → 64 → 6), then random marks and boundaries against a model |
| `tb_bh_mshr_gate` | random allocations and releases under changing quotas, including quotas below the current occupancy |
| `tb_breakhammer` | end to end with a 20,000-cycle window, six windows (see below) |
| `tb_breakhammer_rega` | the same in REGA mode |
| `tb_breakhammer_benign` | an all-benign mix: two threads twice as memory-intensive as the other two, four windows; nobody may be flagged or lose quota |
| `tb_breakhammer_attribution` | an attacker makes 15 of every 16 ACTs but lets a benign thread trigger each action: the attacker gets 120/128 of each point and is flagged in exactly round 35, and the triggering thread is never flagged |
| `tb_bh_security_bound` | the multi-threaded "rigging" attack on the outlier test (below) |
| `tb_breakhammer_full` | end to end at the default configuration: three 96M-cycle windows, about 288M cycles, about 5.5 minutes |

The end-to-end runs use `bh_e2e_driver`, which models the following:

* Four threads share a cache with 40-cycle misses, one allocation per cycle.
* Thread 0 is an attacker. It wants a miss every cycle, and each miss opens a
  row.
* The other threads want a miss with probability 1/16, or a per-thread
  rate set by a parameter.
* An RFM-style defence takes a preventive action every 16 ACTs.
* A reference model of the algorithm runs alongside the design.

At the end of every window the driver compares the design's quotas, flags and
scores (read through the software port) against the reference model. It also
counts how often each mechanism occurred: actions, window swaps, first-time
cuts, repeat cuts, quota restores, denied allocations and software reads. A
mechanism that never occurs counts as a failure. In the reduced run, the
attacker gets 327 misses in the first 400 cycles of window 0. It gets 48 in the
same interval of window 1, after it has been flagged. No benign thread is ever
flagged.

`tb_bh_security_bound` runs the suspect detector against an attacker who
owns `N_atk` of the `N` threads and gives all of them the same score `R`, to
raise the mean. Every benign thread has score `B`. An attack thread stays
unmarked while `R/B < (1+T)·N_ben / (N − (1+T)·N_atk)`, where `T` is
`TH_outlier`. If `(1+T)·N_atk ≥ N`, no score can get it marked. For every
attacker fraction, the testbench binary-searches the lowest `R` the detector
marks and checks that it lies on this bound. It does this for four threads
at `T = 0.65` and for ten threads at `T = 0.05`. The two cases behind the
design's threshold choice come out as expected:
* half the threads attacking at 0.65 stay hidden up to 4.71× the benign score;
* 90 % attacking at 0.05 stay hidden up to 1.90×.

Each block's testbench was also run against a copy of the block with one
deliberate bug, and it detected each of those bugs.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -j 4 --top-module tb_breakhammer \
    -y rtl -y tb +libext+.sv rtl/bh_pkg.sv tb/tb_breakhammer.sv
./obj_dir/Vtb_breakhammer
```

Replace the top-module name and file to run any other testbench. The
testbenches use only `$urandom`, with no constraint solver, and they
initialise everything they read. To lint the design alone:

```
verilator --lint-only -Wall -y rtl +libext+.sv rtl/bh_pkg.sv rtl/breakhammer.sv
```

Verilator prints `SYNCASYNCNET` for `rst_n`. This comes from the `disable iff`
of the interface assertions and is expected. It also prints `UNUSEDPARAM` for
package constants that a given module does not use.
