# MISE: memory-interference slowdown estimation in the memory controller

When several applications share a main-memory channel, each one runs slower
than it would alone, and by a different and unpredictable factor. This RTL
lets a memory controller estimate each application's slowdown while they all
run together. It then uses the estimates in one of two ways: to give one
application a soft slowdown guarantee (MISE-QoS), or to reduce the largest
slowdown in the system (MISE-Fair).

The method is MISE (Memory Interference-induced Slowdown Estimation) by
Subramanian, Seshadri, Kim, Jaiyen and Mutlu (HPCA 2013). This RTL is an
independent implementation. It follows the published description of the
method. Everything that description leaves open (widths, step sizes, number
formats, handshakes, epoch lengths) is this implementation's own choice, and
the sections below point those choices out.

## The estimation model

Slowdown is alone performance divided by shared performance. The model rests
on two observations.

1. **Service rate stands in for performance.** A memory-bound application
   runs at a speed proportional to the rate at which its memory requests are
   served. Its slowdown is therefore
   `ARSR / SRSR`. ARSR is the *alone request service rate*, the rate it would
   see running alone. SRSR is the *shared request service rate*, the rate it
   actually sees.
2. **Highest priority approximates running alone.** SRSR is easy to measure:
   requests served divided by cycles. ARSR is measured by giving the
   application the highest priority at the controller for a while. During
   that time other applications barely interfere, so
   `ARSR = requests served at highest priority / cycles at highest priority`.

Some interference remains even at highest priority. A request issued earlier
for another application may still be occupying the channel when the
prioritised application's request arrives. An *interference counter* counts
those cycles, and they are removed from the denominator.

Applications that are not memory-bound spend part of their time computing,
and the memory system does not change that part. Let `alpha` be the fraction
of cycles in which the core is stalled on memory. The estimate then becomes

    slowdown = (1 - alpha) + alpha * ARSR / SRSR

## How the hardware measures it

### Epochs, intervals and who holds priority

Time is divided into **epochs** (`EPOCH_CYCLES`, default 10,000 cycles).
Epochs are grouped into **intervals** (`EPOCHS_PER_INTERVAL`, default 500, so
5,000,000 cycles per interval).

* In the last cycle of each epoch, `mise_lottery` draws the application that
  will hold highest priority during the next epoch. An application wins with
  probability `tickets[i] / 100`.
* The ticket allocation does two jobs at once:
  * it decides how often each application gets an alone-rate sample;
  * it is the bandwidth-partitioning policy. An application that holds
    priority more often receives more bandwidth.
* The random numbers come from a 16-bit LFSR (Galois form, taps 16, 14, 13,
  11). The drawn number is scaled into the range 0 to 99 as
  `r = lfsr * 100 >> 16`.
* If the tickets add up to less than 100, the leftover range is handed out by
  a rotating pointer. Every epoch therefore has an owner.

`mise_req_arbiter` sends one request per handshake to the channel:

* The priority holder's request always goes first.
* All other applications are treated alike and served round robin. The method
  needs exactly this much: one favoured application, with the rest treated
  equally. The round robin stands in for whatever scheduler the controller
  otherwise uses, for example FR-FCFS, which this RTL does not include.

The arbiter also produces the **interference** signal: `intf[i]` is 1 when

* application `i` holds priority,
* it has a request waiting, and
* the channel cannot take that request because it is still busy with the
  request last issued for a different application.

### Counters (`mise_app_counters`, one set per application)

Each counter covers one interval, is 24 bits wide and saturates instead of
wrapping.

| counter        | counts                                                   | used for           |
|----------------|----------------------------------------------------------|--------------------|
| `served`       | completions of this application's requests               | SRSR               |
| `hp_cycles`    | cycles in which it held highest priority                 | ARSR denominator   |
| `hp_served`    | completions while it held highest priority               | ARSR numerator     |
| `intf_cycles`  | highest-priority cycles lost to another application      | subtracted from `hp_cycles` |
| `stall_cycles` | cycles its core's memory-stall line was high             | alpha              |

At the interval end, all counters are copied to a snapshot and restart from
zero. The cycles with highest priority are those in which the lottery has
picked the application. They are counted whether or not the application
actually has requests at the time.

### Slowdown arithmetic (`mise_slowdown_est`)

The three rates are never formed separately, which would lose precision in
small fractions. Writing `T` for the interval length, the estimator computes
two integer divisions:

    ratio    = (hp_served * T << 8) / ((hp_cycles - intf_cycles) * served)      // ARSR/SRSR, Q.8
    slowdown = (((T - stall_cycles) << 8) + stall_cycles * ratio) / T           // Q8.8

Both divisions run on one restoring divider (`mise_divider`, 64 bits, one
quotient bit per cycle). One estimate takes 134 cycles. A single estimator
serves all applications in turn after each interval end, so four estimates
take about 540 cycles. That is far shorter than an interval, and an assertion
in `mise_top` checks that the round always finishes before the next interval
ends.

Slowdowns are unsigned Q8.8 numbers: `16'h0100` is 1.0 and the largest value
is 255.996. The result is clamped to at least 1.0, because an alone rate
measured below the shared rate is noise. Two cases are outside the model:

* **No request served in the interval.** The application did not use memory,
  so its slowdown is reported as exactly 1.0.
* **No priority cycle left after removing interference.** There is no
  alone-rate sample. `slowdown_ok[i]` goes low and the previous estimate is
  kept.

## Using the estimates

`mode` selects which controller supplies the ticket allocation. Both
controllers always receive the estimates, but only the selected one updates.
New tickets take effect at the next epoch draw.

### MISE-QoS (`mise_qos_ctrl`, `mode = MODE_QOS`)

System software names an application of interest (`aoi`) and a slowdown bound
(`qos_bound`, Q8.8). After each interval, the controller compares the AoI's
estimate with the bound:

* **Estimate above the bound:** the AoI's allocation grows by 10 tickets, up
  to 100. At 100 tickets the AoI always has priority.
* **Estimate below the bound:** the allocation shrinks by 10 tickets, but
  never below 10. This floor keeps the AoI's alone rate measurable.
* **Estimate exactly at the bound:** the allocation stays.

The other applications share the remaining tickets equally.

Status outputs:

* `qos_bound_met` is high when the latest estimate is at or under the bound.
* `qos_bound_unreachable` is high when the bound was missed even though the
  AoI already had every ticket. In that case prioritising the AoI cannot meet
  the bound, and software should know.

Note that at 100 tickets the other applications never get a priority epoch.
Their `slowdown_ok` bits go low and their last estimates are held.

### MISE-Fair (`mise_fair_ctrl`, `mode = MODE_FAIR`)

The controller keeps one bound `B` for all applications (`fair_bound`,
initially 2.0) and a ticket allocation (initially equal shares). It assumes,
as in observation 1, that slowdown scales inversely with the bandwidth an
application receives. For each round of estimates it:

1. computes `need[i] = tickets[i] * slowdown[i] / B`, the tickets that would
   bring application `i` down to `B`. An application without a fresh estimate
   keeps its current tickets as its need;
2. adjusts the bound:
   * if the needs add up to more than 100 tickets, `B` cannot be met, so it
     rises by 0.125 and `fair_bound_raised` pulses;
   * if every estimate is at least 0.125 below `B`, the bound is easily met,
     so it falls by 0.125, but not below 1.0;
3. sets `tickets[i] = 2 + need[i] * (100 - 2N) / sum(need)`. Bandwidth thus
   moves towards the applications that are slowed down most. The tickets
   never add up to more than 100, and every application keeps some priority
   epochs so that its own estimate stays alive.

The rule for raising and lowering `B`, and the shift of bandwidth towards
the most slowed-down applications, come from the method. The `need` formula,
the "easily met" test, the step, the floor and the initial values are choices
made here.

## Top level: `mise_top`

| port | dir | meaning |
|------|-----|---------|
| `mode`, `aoi`, `qos_bound` | in | policy, QoS application and its Q8.8 bound |
| `req_valid[N]`, `req_addr[N]`, `req_ready[N]` | in/in/out | one pending request per application; taken when `req_valid && req_ready` |
| `mem_valid`, `mem_ready`, `mem_app`, `mem_addr` | out/in/out/out | request to the DRAM command scheduler |
| `resp_valid`, `resp_app` | in | one pulse per completed request, tagged with its application |
| `core_stall[N]` | in | core is stalled on memory (oldest instruction waiting for a load) |
| `prio_app`, `epoch_start`, `interval_end` | out | current priority holder and timing |
| `slowdown[N]`, `slowdown_ok[N]`, `est_done` | out | estimates for system software; `est_done` pulses when all are fresh |
| `tickets[N]` | out | allocation in force |
| `qos_bound_met`, `qos_bound_unreachable` | out | MISE-QoS status |
| `fair_bound`, `fair_bound_raised` | out | MISE-Fair status |

Parameters: `N_APPS` (4), `ADDR_W` (32), `EPOCH_CYCLES` (10000) and
`EPOCHS_PER_INTERVAL` (500). Their product must fit the 24-bit counters. The
4-application default matches the 4-core systems the method was mainly
evaluated on. The 8- and 16-core fairness experiments need `N_APPS` set to 8
or 16. The 100-ticket split still works at those sizes, because 16
applications × 2 floor tickets = 32 < 100.

Outside the design, and reached only through ports:

* the cores, which supply `core_stall` and the requests;
* the DRAM command scheduler and the DRAM devices, reached through the
  `mem_*` and `resp_*` ports;
* the operating system, which sets bounds and reads estimates.

In synthesis the top level comes to roughly 640 word-level cells and 1,850
flip-flops. Most of the flip-flops are the five 24-bit counters and the
snapshot for each application.

## Files

| file | contents |
|------|----------|
| `rtl/mise_pkg.sv` | widths, Q8.8 constants, `app_stats_t`, `mode_e` |
| `rtl/mise_top.sv` | epoch/interval timer, estimation sequencing, policy select |
| `rtl/mise_lottery.sv` | ticket lottery for the priority holder |
| `rtl/mise_req_arbiter.sv` | priority-first arbiter and interference detection |
| `rtl/mise_app_counters.sv` | per-application interval counters |
| `rtl/mise_slowdown_est.sv` | slowdown arithmetic |
| `rtl/mise_divider.sv` | bit-serial divider used by the estimator and MISE-Fair |
| `rtl/mise_qos_ctrl.sv`, `rtl/mise_fair_ctrl.sv` | the two bandwidth policies |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/core_model.sv`, `tb/mem_channel_model.sv` | behavioural core and memory channel used by the system tests |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself through
a watchdog if it hangs.

* **`tb_mise_app_counters`** checks the counters against reference counts of
  random event streams.
* **`tb_mise_slowdown_est`** compares the estimator with the slowdown formula
  evaluated in floating point, within one LSB, over 300 random cases. It also
  covers the special cases and the 134-cycle latency.
* **`tb_mise_lottery`** checks the win frequencies for several ticket sets,
  to within ±3 % over 8,000 draws.
* **`tb_mise_req_arbiter`** checks the arbiter cycle by cycle against a
  reference model.
* **`tb_mise_qos_ctrl`** and **`tb_mise_fair_ctrl`** check each controller
  against a reference of its update rule.
* **`tb_mise_top`** is the system test. It uses 100-cycle epochs and
  4,000-cycle intervals, four behavioural cores with different memory
  intensities, and a channel that serves one request every 8 cycles.
  * It first measures each core's alone speed.
  * It then checks every estimate against the slowdown actually measured
    over the same interval, to within 20 %. The typical error was 5 to 7 %,
    and the estimates come out slightly low.
  * It drives MISE-QoS to an unreachable bound and back down to the
    allocation floor, and MISE-Fair through both raising and lowering its
    bound.
  * It counts every mechanism (priority rotation, interference cycles, QoS
    up and down steps, unreachable detection, Fair raise and lower, mode
    switch, held estimates) and fails if any of them never happened.
* **`tb_mise_top_full`** runs the default sizes (5M-cycle intervals) for
  three intervals, about 15 million cycles. This takes a few seconds in
  Verilator.
* **`tb_mise_fair_scaling`** runs the core-count scaling experiment for
  MISE-Fair. It instantiates the design with 4, 8 and 16 cores (each size
  through `tb/fair_scaling_run.sv`).
  * Setup: graded synthetic cores, a 20-cycle channel, 1,000-cycle epochs
    and 80,000-cycle intervals.
  * It checks that MISE-Fair lowers the maximum slowdown below the value
    measured with equal bandwidth shares. Observed values:

    | cores | equal shares | MISE-Fair |
    |-------|--------------|-----------|
    | 4     | 1.55         | 1.38      |
    | 8     | 2.38         | 1.86      |
    | 16    | 5.34         | 2.92      |

  * It also checks that the mean estimation error stays within 25 %. The
    observed error was 9 % at 4 cores and 15 % at 8 and 16 cores.
* **`tb_mise_qos_bounds`** sweeps the MISE-QoS bound over 10/n for
  n = 1..10. It compares each run with an always-prioritise run of the same
  mix.
  * The AoI's allocation grows as the bound tightens, until the AoI holds
    all the bandwidth.
  * Wherever always-prioritise meets a bound, MISE-QoS meets it too.
  * With loose bounds the other cores run about 13 % faster than under
    always-prioritise.
  * `qos_bound_met` agreed with the measured outcome in 36 of 40 intervals.

**How accurate the formula can be with these cores.** The scaling test shows
that the formula itself underestimates slowdown for cores that are not purely
memory-bound. Take a core that computes `t` cycles and then waits for one
request:

* with alone memory time `ma` and shared memory time `ms`, the true slowdown
  is `(t+ms)/(t+ma)`;
* the formula gives `t/(t+ms) + ms/(t+ma)`.

The estimate is therefore low by `t/(t+ma) - t/(t+ms)`. At 16 cores this
comes to about 15 to 20 %. This is a property of the alpha correction, not of
the RTL: `tb_mise_slowdown_est` shows that the arithmetic matches the formula
to within one LSB.

To run one with plain Verilator, give the package first and the include paths
for the other modules:

    verilator --binary --timing --assert -Irtl -Itb rtl/mise_pkg.sv \
        tb/tb_mise_top.sv --top-module tb_mise_top -o sim
    ./obj_dir/sim

Lint a module the same way with `--lint-only -Wall`.

## Limits and departures

* The method defines what the interference counter is for but not exactly
  what it counts. Here it counts the cycles in which the priority holder is
  blocked by a request already issued for another application. Bank
  conflicts and row-buffer effects are not modelled, because that information
  lives in the DRAM scheduler.
* Epoch and interval lengths, the 100-ticket granularity, the QoS step and
  floor, and the MISE-Fair update formula are this design's choices. They are
  all parameters or package constants.
* The result is clamped to at least 1.0, and missing samples are handled as
  described above. The model itself does not define these cases.
* The interference counter is the basic correction only. Finer accuracy
  refinements that the original publication adds to the model are not built.
* The testbenches use synthetic cores, not the SPEC CPU2006 programs of the
  original evaluation. They show that the mechanism behaves as described, not
  that it reaches the published accuracy figures.
