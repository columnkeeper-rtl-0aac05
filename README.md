# ColumnKeeper: subarray-level refresh tracking against ColumnDisturb

ColumnDisturb is a DRAM read-disturbance effect that works along bitlines
rather than wordlines: activating a row over and over disturbs every cell
that shares a bitline with it. In today's open-bitline DRAM, a sense-amplifier
stripe between two subarrays serves alternate columns of both. One
activation in subarray *k* therefore disturbs three subarrays:

* every column of subarray *k*;
* the even columns of subarray *k-1*;
* the odd columns of subarray *k+1*.

With 1024-row subarrays, that is up to 3072 victim rows per hammer.
RowHammer defences track single rows and refresh a few neighbours, so they
do not help here.

ColumnKeeper is memory-controller logic that makes sure every row of every
affected subarray is refreshed before any of its cells has received
`N_CD` disturbing activations (1M in the default configuration). It never
refreshes a whole subarray at once, which would block the bank for about
150 µs. Instead it asks the scheduler for one preventive `ACT+PRE` at a
time, to one row of one subarray, and walks through each subarray's rows
in round-robin order.

The design has two parts:

* A **trigger** decides *when* a subarray needs its next preventive refresh.
  There are two variants:
  * **CK-D** (deterministic) counts activations per subarray, keeping the
    even and odd bitlines apart.
  * **CK-P** (probabilistic) flips a biased coin on every activation.
* The **Row Pointer Table (RPT)** is shared by both triggers and decides
  *which* row gets refreshed.

This repository holds synthesizable SystemVerilog for both variants, the
shared RPT, the command front end and the request queue, with self-checking
testbenches.

## Data path

```
 DRAM commands from the controller
  (ACT, RFM / extra REF)                    preventive refresh requests
        |                                        (rank, bank, row)
        v                                               ^
  ck_event_seq ---event (k)---> trigger ---fire k-1,k,k+1---> ck_rpt ---> ck_req_fifo
  (row -> subarray,              CK-D: ckd_trigger             (row of each         (3 in,
   sweeps for bank/rank-wide)    CK-P: ckp_trigger              firing subarray)     1 out)
```

`columnkeeper` (in `rtl/columnkeeper.sv`) is the top module. Its `VARIANT`
parameter picks the trigger: `CK_D` (the default) or `CK_P`.

Subarrays are numbered globally as
`k = (rank * BANKS + bank) * SA_PER_BANK + subarray_in_bank`.
Neighbours never cross a bank boundary: subarray 0 of a bank has no *k-1*,
and the last subarray of a bank has no *k+1*.

## CK-D: even/odd activation counters

CK-D keeps two tables with one entry per subarray: Counter Table-Even
(CT-E) and Counter Table-Odd (CT-O). An ACT to subarray *k* updates them
like this:

| entry      | +1 on an ACT to k | why                                    |
|------------|-------------------|----------------------------------------|
| CT-E[k]    | yes               | all columns of k are disturbed         |
| CT-O[k]    | yes               |                                        |
| CT-E[k-1]  | yes               | k shares its even bitline SAs with k-1 |
| CT-O[k+1]  | yes               | k shares its odd bitline SAs with k+1  |

Every entry touched by an ACT is checked right away. The trigger takes
`max(CT-E, CT-O)` after the increment. If it has reached the preventive
refresh threshold `N_PR`, the trigger fires for that subarray and clears
both of its counters. Up to three subarrays can fire on one ACT.

**Why two counters instead of one.** Suppose an attacker hammers subarray
A (= *k-1*) *x* times and subarray C (= *k+1*) *y* times.

* The odd bitlines of the middle subarray B see *x* hammers and its even
  bitlines see *y* hammers.
* No cell of B has been disturbed more than `max(x, y)` times.
* A single counter would read `x + y`, up to twice the real exposure, and
  would issue up to twice as many refreshes.

The full-size testbench checks exactly this case. It sends 1020 ACTs each
to subarrays 20 and 22. Subarray 21 has then seen 2040 activations in all
but must not fire, and it does not.

**Choosing `N_PR`.** A row refreshed by the RPT comes up again only after
`S` more preventive refreshes of its subarray (`S` = rows per subarray).
Each of those refreshes comes at most `N_PR` activations per half after
the previous one. A row therefore sees at most `S * N_PR` disturbing
activations between two refreshes. Setting `N_PR = N_CD / S` keeps this
below `N_CD`.

Two more margins are subtracted from `N_CD` first:

* `2S`, for the hammers that ordinary periodic REFs in the own and
  neighbouring subarray cause within one refresh window;
* `8*Q`, for up to 8 REF commands that DDR4 may postpone into the next
  window. `Q` is the number of rows one REF refreshes per bank.

So the threshold is:

```
N_PR = floor((N_CD - 2*S - 8*Q) / S)       (ck_pkg::ckd_npr)
     = floor((1048576 - 2048 - 64) / 1024) = 1021     for the defaults
```

`Q = 65536 rows per bank / 8192 REFs per window = 8` is a DDR4 figure used
here, not one taken from the design description. A counter never passes
`N_PR`, so each entry is `clog2(N_PR+1)` = 10 bits. For 2048 subarrays, the
two tables plus the RPT take 2048 × 30 bits = 7.5 KB.

## CK-P: coin flips

CK-P keeps no counters. On every subarray event it draws a coin that comes
up with probability `P_PR`. On a hit it fires for *k-1*, *k* and *k+1* at
once. `P_PR` is chosen from a binomial bound. A successful attack needs a
subarray to get fewer than `S` refreshes during `N_CD - S` hammers to it or
its neighbours, and `P_PR` makes the chance of that, over every attack that
fits in a year, as small as required.

| N_CD | P_PR for a 1e-3 / 1e-12 chance per year | `PPR_TH` with `RAND_W` = 20 |
|------|------------------------------------------|-----------------------------|
| 1M   | 1.23e-3 / 1.32e-3                        | 1290 / 1385 (default)       |
| 128K | 1.00e-2 / 1.07e-2                        | 10486 / 11220               |
| 16K  | 8.92e-2 / 9.50e-2                        | 93534 / 99615               |

The coin is a hit when the low `RAND_W` bits of a free-running xorshift32
generator are below `PPR_TH`. `PPR_TH` is rounded up, so the real
probability is never below the target. A pseudo-random generator is
predictable to anyone who knows its seed and state. A deployment should
feed the comparator from a true random source; this is the one place where
the RTL is weaker than the scheme it implements. CK-P's state is the RPT
alone: 2048 × 10 bits = 2.5 KB.

## The Row Pointer Table

The RPT has one pointer per subarray. Probing entry *k* returns its current
value `R_k`, which is the row to refresh, and advances it, wrapping from
`S-1` to 0. The pointer moves only on preventive refreshes, so it always
names the row that ColumnKeeper refreshed least recently in that subarray.
The CK-D bound above relies on this.

`ck_rpt` has three probe ports so that the three firings of one event are
served in the same cycle. The three indices are always distinct, and an
assertion checks this.

## Activations without a known subarray

Some activations cannot be charged to one subarray:

* `RFM`s;
* extra `REF`s issued by a RowHammer defence;
* ACTs to rows whose subarray is not known to the controller.

For these, CK-D adds one to both counters of *every* subarray they may
reach, and CK-P flips a coin for every such subarray. The controller
reports them as:

* `CMD_BANK_WIDE`: one bank, 64 subarrays. Use it for a same-bank RFM or an
  unmapped row.
* `CMD_RANK_WIDE`: all banks of a rank, 1024 subarrays. Use it for an
  all-bank RFM or an extra REF.

`ck_event_seq` sweeps them one subarray per cycle as `EV_SELF` events.
`EV_SELF` touches only the swept subarray's own counters, because every
subarray gets its own +1 anyway. `cmd_ready` stays low during the sweep.

Periodic REFs are *not* reported; the `2S` margin in `N_PR` already
covers them. ColumnKeeper's own preventive `ACT+PRE`s *must* be reported
as ordinary `CMD_ACT`s, because they disturb neighbours like any other
activation.

## Interface and timing

| port group | direction | meaning |
|------------|-----------|---------|
| `cmd_valid`/`cmd_ready`, `cmd_kind`, `cmd_rank`, `cmd_bank`, `cmd_row` | in | one command per handshake; `cmd_row` is the row within the bank |
| `cmd_busy` | out | a bank- or rank-wide sweep is running |
| `pr_valid`/`pr_ready`, `pr_rank`, `pr_bank`, `pr_row` | out | next row to refresh preventively with `ACT+PRE` |

Timing:

* An ACT taken at a clock edge is fully accounted for at that edge: the
  counters and RPT are read, incremented, compared and written back in one
  cycle.
* The resulting requests enter a 16-entry queue. The first one is offered
  on `pr_*` from the next cycle. The full-size testbench checks this
  one-cycle latency.
* The rule for the controller is one command per cycle at most. A DDR4
  controller issues ACTs no faster than one per tRRD (≥ 2.5 ns), so a clock
  of 400 MHz or more keeps up.
* `cmd_ready` drops in two cases: while a sweep runs, and while fewer than
  three queue places are free. The second case stops a burst of firings
  from overflowing the queue when the scheduler is slow to take requests.
* Reset is synchronous and active low. It clears all counters and pointers
  and empties the queue.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `VARIANT` | `CK_D` | trigger: `CK_D` or `CK_P` |
| `RANKS`, `BANKS`, `SA_PER_BANK`, `ROWS_PER_SA` | 2, 16, 64, 1024 | evaluated DDR4 system (16 GB, one channel) |
| `N_CD` | 1048576 | ColumnDisturb threshold in activations |
| `N_PR` | derived, 1021 | CK-D threshold; override it directly if desired |
| `RAND_W`, `PPR_TH` | 20, 1385 | CK-P: `P_PR = PPR_TH / 2^RAND_W` |
| `SEED` | 0x2545F491 | CK-P generator seed, non-zero |
| `FIFO_DEPTH` | 16 | request queue depth, at least 3 |

The defaults are the full evaluated system. The RTL is parameterised
throughout. A power of two is convenient but not required for
`SA_PER_BANK` and `ROWS_PER_SA`. To use smaller subarrays in the same bank
(128 to 512 rows), raise `SA_PER_BANK` with them.

## Where this RTL goes beyond, or departs from, the published description

These parts are this implementation's own choices:

* the command encoding;
* the valid/ready handshakes;
* the request queue and its depth;
* the one-subarray-per-cycle sweep;
* the linear row-to-subarray mapping (`subarray = row / ROWS_PER_SA`);
* the choice of random generator.

The mechanism itself does not depend on any of them. A real controller
has to supply its own (possibly reverse-engineered) subarray map in place
of the linear mapping.

The mechanism defines `N_PR` in two ways: as `(N_CD - 2S)/S` in one place,
and with the further postponed-REF margin in another. This RTL includes the
margin: 1021 rather than 1022. Both fit the same 10-bit counters.

CK-P's handling of bank edges is not specified. Here a hit drops the
missing neighbour, as CK-D does.

The following are **not** included:

* the single-counter "CK-S" comparison point;
* the subarray-level-parallelism variants;
* the in-DRAM form of CK-D, which adds per-bank Subarray Pointer and
  Subarray Hammer Counter registers and works through `ALERT`/`RFM`. It is
  an alternative placement with different interfaces, not part of the
  controller-side design;
* the memory request scheduler and the DRAM itself, which are outside the
  design. The top exposes their interfaces as ports.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and ends with a
watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_ck_rpt` | returned rows against a reference pointer array, three random probes per cycle; wrap at a non-power-of-two `S` |
| `tb_ckd_trigger` | every fire decision against a reference model of CT-E/CT-O, 20k random ACT and sweep events; the double-counting pattern; simultaneous firing and bank edges |
| `tb_ckp_trigger` | every coin against an independent xorshift model; hit rate of a default-parameter instance within 20% of 1.32e-3 |
| `tb_columnkeeper` | both variants end to end at a reduced size, with a scheduler model that feeds refreshes back as ACTs. CK-D: the exact request sequence. CK-P: round-robin rows. It also counts that own-subarray and neighbour-only firings, bank edges, RPT wraps, both sweeps, back-pressure and fed-back ACTs all occur |
| `tb_columnkeeper_full` | the top with every parameter at its default: firing at exactly 1021 ACTs, 1-cycle request latency, RPT advance, double counting, a 1024-cycle rank-wide and a 64-cycle bank-wide sweep, bank edges |
| `tb_columnkeeper_attack` | security under ColumnDisturb attacks (see below) |

`tb_columnkeeper_attack` uses a model of the DRAM that counts, for every
row, the disturbing activations each half of its cells has received since
the row was last activated. Three attack patterns run against both
variants at 8 subarrays × 16 rows with `N_CD` = 512:

* one row hammered;
* alternating neighbours;
* random rows across three subarrays, with RFMs.

No row may reach `N_CD`. In a typical run:

* CK-D's worst row reaches 478 to 494. Its bound is `S * N_PR` = 480, plus
  the activations that arrive while a request waits in the queue.
* CK-P at `P_PR` = 1/8 stays near 300 but issues five to six times as many
  refreshes.

To simulate with plain Verilator, list the package first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/ck_pkg.sv rtl/ck_rpt.sv rtl/ckd_trigger.sv rtl/ckp_trigger.sv \
  rtl/ck_req_fifo.sv rtl/ck_event_seq.sv rtl/columnkeeper.sv \
  tb/tb_columnkeeper_full.sv --top-module tb_columnkeeper_full
./obj_dir/Vtb_columnkeeper_full
```

The attack testbench also needs `tb/ck_attack_env.sv`. Every run here takes
well under a second.
