# MOAT: Rowhammer mitigation with per-row activation counters and two thresholds

DDR5 devices may now count activations per row (PRAC, Per-Row Activation
Counting: a small counter stored with every DRAM row and updated by a
read-modify-write at precharge) and may stop the memory controller with the
ALERT pin when they need time to mitigate (ABO, ALERT-Back-Off). The standard
only provides these two mechanisms; how a device turns them into a secure
mitigation is left open. MOAT (Mitigating Rowhammer with Dual Thresholds,
Qureshi and Qazi) is such an implementation, and this repository gives
synthesizable SystemVerilog for its device-side logic.

The key ideas are:

* **One tracked row per bank.** Refresh (REF) only has time to mitigate one
  aggressor row at a time, so a queue of candidates is pointless and, as the
  MOAT authors show for an earlier queue-based design, dangerous: a row can
  keep being hammered while it waits in the queue. MOAT keeps a single
  register per bank, the *Current Tracked Address* (CTA), holding the row
  with the highest activation count seen since the last mitigation, together
  with that count.
* **Two thresholds.** A row becomes a candidate only when its count exceeds
  the *eligibility threshold* ETH (32), which saves the energy of mitigating
  rows that were barely used. If the tracked count exceeds the *ALERT
  threshold* ATH (64), the device raises ALERT and the row is mitigated
  within the following RFM (Refresh Management) command instead of waiting
  for refresh. ATH therefore bounds how many activations any row can
  receive between mitigations.
* **Safe counter reset on refresh.** Counters are cleared when their row is
  refreshed, which keeps them small. Doing that naively lets a row receive
  T activations before and T after its refresh while its counter shows T; two
  shadow counters per bank close that gap (see below).

The per-bank cost is 7 bytes of SRAM: CTA (16-bit row + 8-bit count), CMA
(16-bit row), and two 8-bit shadow counters.

## Blocks

| File | Block | What it holds |
|---|---|---|
| `rtl/moat_pkg.sv` | package | command and array-operation enums, default sizes |
| `rtl/prac_counter_array.sv` | per-row counters of one bank | 64K x 8-bit counters as 8K words of one refresh group each |
| `rtl/safe_reset_shadow.sv` | safe reset on refresh | refresh group pointer, two shadow counters |
| `rtl/moat_tracker.sv` | CTA | tracked row and count (one entry per ALERT level), ETH / ATH comparisons, ALERT request |
| `rtl/mitigation_engine.sv` | CMA and sequencer | row being mitigated, step counter, mitigation-period phase |
| `rtl/moat_bank.sv` | one bank | command sequencing of the four blocks above |
| `rtl/abo_controller.sv` | ALERT-Back-Off | device-wide ALERT state, inter-ALERT ACT minimum |
| `rtl/moat_top.sv` | the device | 32 banks, command decode, ALERT_n |

```
 cmd (ACT/PRE to one bank, REF/RFM to all) ──► moat_top
   ├─ moat_bank x32
   │    ├─ prac_counter_array   (PRE: count+1, REF: clear group, mitigation: clear row)
   │    ├─ safe_reset_shadow    (count of the 2 rows still exposed after REF)
   │    ├─ moat_tracker (CTA)   (ETH / ATH)                   ──► alert_req
   │    └─ mitigation_engine (CMA) ──► vref_valid/vref_row (victim refresh)
   └─ abo_controller ◄── alert_req x32                        ──► ALERT_n
```

Outside the RTL, reached through ports: the DRAM array itself, which
performs the row refreshes (`vref_*` for victim rows, `grp_ref_*` for the
refresh group), the ALERT_n pad, and the memory controller, which must stop
issuing commands 180 ns after ALERT_n falls and issue an RFM.

## What happens on each command

**ACT** (one bank) records the opened row.

**PRE** (one bank) increments that row's counter in the array (a
saturating read-modify-write) and passes the new count to the tracker. If
the row is one of the two shadowed rows (below), the shadow counter is
incremented instead and its value is used. The tracker then applies:

1. the row is already in the CTA: increment the CTA count;
2. otherwise, if count > ETH and (CTA empty or count > CTA count): the row
   and its count overwrite the CTA;
3. otherwise nothing.

`alert_req` is high while the CTA count exceeds ATH. Note that ALERT comes
from the precharge that pushed the count over ATH, not from the activation.

**REF** (all banks) refreshes the next refresh group: the pointer names
one of 8K groups of 8 consecutive rows, the group's counters are cleared in
one array write, and the pointer advances, wrapping after a full refresh
window. Then the bank gets one *mitigation step*.

**RFM** (all banks) runs a complete mitigation in every bank.

## Proactive and reactive mitigation

Mitigating an aggressor row means refreshing its four victims (two rows on
each side) and clearing its counter: five row operations. A REF has room for
one of them, so proactive mitigation takes a *mitigation period* of five
REFs (5 tREFI):

* At the first REF of every period, a valid CTA entry moves into the CMA
  (*Currently Mitigated Address*) and the CTA is emptied, ready to track the
  next candidate while the CMA row is being mitigated.
* Each REF of the period performs the next step of the CMA row: victim
  row-1, row+1, row-2, row+2, then the counter reset. A row with no valid
  CMA costs nothing.

Reactive mitigation starts when a bank's CTA count exceeds ATH. The
ALERT controller raises ALERT_n; the memory controller may run for up to
180 ns, then issues an RFM (350 ns, time for five row operations). In every
bank, the CTA row is moved into the CMA and all five steps are carried out;
CTA and CMA are empty afterwards. An RFM that arrives while a proactive
mitigation is half done replaces it. Because the counter reset is the
*last* step, the abandoned row keeps its high count and is picked up again
as soon as it is activated; had the counter been cleared first, its
unrefreshed victims would have been exposed.

Victim rows outside the bank (below row 0 or above the last row) are
skipped, but their step still takes its slot.

## Safe counter reset: why two shadow counters

Refresh proceeds through the bank group by group. When group *g* has just
been refreshed and its counters cleared, the victims of its last two rows
include the first rows of group *g+1*, which have not been refreshed yet.
If those two counters were simply cleared, an attacker could hammer the last
row of *g* just before and just after the REF and reach twice the threshold
on a victim that never got refreshed. So, when group *g* is cleared, the old
counts of its last two rows are copied into two shadow counters. Until the
next REF, activations of those two rows increment the shadow counters and the
shadow values are what the tracker and the ALERT logic see. At the next REF,
group *g+1* is refreshed (so all of *g* is safe) and the shadows move on to
the last two rows of *g+1*. Which rows are shadowed follows from the pointer,
so no address is stored. When a mitigation clears a shadowed row's counter,
its shadow counter is cleared too.

## The ALERT protocol

`abo_controller` holds one state for the whole device, since ALERT_n is a
shared pin and stalls the whole sub-channel:

* idle → ALERT when any bank requests and at least ABO_LEVEL ACTs have been
  issued since the previous ALERT ended (the standard's minimum number of
  activations between ALERTs; satisfied after reset);
* ALERT → idle once ABO_LEVEL RFMs have been received and every bank has
  finished the work of the last one.

At the default level 1 the hold-off cannot actually delay an ALERT in
this design: every RFM empties every CTA, and a new request needs a precharge,
which needs an activation first. It matters at levels 2 and 4.

## Other proactive mitigation rates

`MIT_PERIOD` (P) sets how many REFs one proactive mitigation may take. The
five steps are spread evenly over the period: the REF at phase k performs
floor((k+1)*5/P) - floor(k*5/P) of them. P = 5 gives one step per REF.
P = 1 performs a whole mitigation in every REF, P = 3 gives 2, 2 and 1
steps, P = 10 gives one step every second REF, and P = 0 disables proactive
mitigation, so that rows are only mitigated through ALERT. A faster rate
costs refresh time and energy but leaves fewer rows to reach ATH. In the
random end-to-end test, ALERTs fall from 25 with no proactive mitigation,
through 19 (P = 10) and 5 (P = 3), to only the 2 forced ALERTs at P = 1.
The step order and the CTA hand-over at phase 0 are the same at every rate.

## Higher ALERT levels: more than one tracked row

Level 1 goes with one tracked row per bank because each ALERT buys one RFM,
and one RFM mitigates one row. At level L the device gets L RFMs per ALERT,
so `moat_top` gives every bank L tracker entries (`ABO_LEVEL` sets both).
The tracker then keeps the L highest counts above ETH: a new row takes a
free entry, or replaces the entry with the lowest count if its own count is
higher. Every RFM, and every start of a proactive period, hands the entry
with the highest count to the CMA and frees it; ALERT is requested while that
highest count exceeds ATH. With one entry these rules reduce exactly to the
single-CTA rules above. Ties between equal counts go to the lowest entry
index. Higher levels cost L times the RFM stall per ALERT and need L
activations between ALERTs, which is why level 1 is the main configuration.

## Timing

The logic runs on one clock; the DRAM timing is the command stream's
business. A command may only be given while `ready` is high (an assertion
checks it). Measured from the cycle the command is accepted:

| Command | Cycles | DRAM budget |
|---|---|---|
| ACT | 1 | |
| PRE | count at the tracker after 3, `ready` after 4; ALERT_n falls 2 cycles later | tPRE 36 ns |
| REF | 6 with a victim step, 9 with the counter-reset step (longer when `MIT_PERIOD` puts several steps in one REF: up to a group clear plus an RFM's worth at P = 1) | tRFC 410 ns |
| RFM | at most 10 | tRFM 350 ns |
| reset | 8192 (one group per cycle) to clear all counters | |

PRE is the tightest: any clock of 125 MHz or more fits every command in its budget. The
counter array is a single-port synchronous memory, 8K x 64 bits per bank
(16 Mbit over 32 banks). In a real device these counters are extra columns of
the DRAM rows; here they are an SRAM-style array so the logic can be
simulated and synthesized.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `NUM_BANKS` | 32 | banks per sub-channel of the evaluated DDR5 system |
| `ROWS` | 65536 | rows per bank of the evaluated system |
| `ROWS_PER_GROUP` | 8 | 8K refresh groups of 8 rows |
| `CTR_W` | 8 | inferred from the 3-byte CTA (16-bit row + 1 byte count) |
| `ATH` | 64 | the main configuration (tolerates a Rowhammer threshold of 99) |
| `ETH` | 32 | ATH/2, the default |
| `BLAST_RADIUS` | 2 | two victims on each side: five steps per mitigation |
| `MIT_PERIOD` | 5 | REFs per proactive mitigation (one step per REF); 0 = ALERT only |
| `ABO_LEVEL` | 1 | RFMs per ALERT, ACTs required between ALERTs, and tracker entries per bank |

All sizes are the evaluated configuration; nothing was scaled down. With
ATH = 128 (ETH = 64) the design still fits 8-bit counters.

## Departures and choices not fixed by the MOAT description

* Counters saturate at 255; all counters are cleared after reset.
* Counter reset is the last of the five steps; the victim order is -1, +1,
  -2, +2.
* The count used for a shadowed row is the larger of shadow+1 and the array
  count (the shadow is never lower, so this is the shadow in practice).
* The CTA count of the tracked row is incremented on every activation of
  that row and kept at least equal to the reported count.
* A count equal to ETH is not eligible and a count equal to ATH does not
  alert (both comparisons are strict). The description uses both "less than
  ETH is not selected" and "exceeds ETH"; the strict form is used.
* Victim refreshes do not increment counters.
* For mitigation periods other than five REFs, only the rate is given;
  spreading the steps evenly over the period is this design's choice. So is
  choosing the lowest entry index when tracked counts are equal.
* REF and RFM are all-bank commands; per-bank REF is not supported.
* ALERT_n rises when the last RFM has finished in all banks; only ACTs
  after that count toward the minimum before the next ALERT.
* The memory controller's 180 ns window and RFM deadline are not timed
  here.
* With the RFM answered three activations after ALERT (the 180 ns window),
  a single hammered row alerts every 68 activations in this RTL (65 to cross
  ATH, plus 3 that the RFM then clears). The published analysis counts 69
  per ALERT: it also adds the activation allowed after the RFM. Both
  describe the same behaviour; the RTL counts that activation toward the
  next 65.

## Not built

* Running the default single-entry tracker at a higher ALERT level (a
  misconfiguration the analysis mentions): the entry count always follows
  `ABO_LEVEL` here.
* The earlier queue-based in-DRAM tracker that MOAT is compared against, and
  the attack on it.
* The DRAM cell array, the memory controller, the ALERT_n pin driver and the
  mode register that holds the ALERT level: this RTL only produces the
  refresh requests and the ALERT decision.

## Verification

Each block has a self-checking testbench in `tb/` ending in a
`TB_RESULT checks=N failures=M` line:

* `tb_prac_counter_array`, `tb_safe_reset_shadow`, `tb_moat_tracker`,
  `tb_mitigation_engine`, `tb_abo_controller`: random and directed stimulus
  against small models, including threshold boundaries (32/33, 64/65),
  saturation, pointer wrap, bank edges, pre-emption by RFM, ABO levels 1
  and 2, a four-entry tracker, mitigation periods 5, 1, 3, 10 and 0, and the
  3-cycle array latency.
* `tb_moat_bank` and `tb_moat_top` compare every reported count, every
  victim refresh, every refreshed group and ALERT_n after every command with a
  command-level reference model (`tb/moat_ref_model.svh`), under random
  traffic with hot rows, edge rows and shadowed rows. `tb_moat_top` (4 banks
  of 256 rows) also requires that ALERT, reactive and proactive mitigation,
  CTA insert and overwrite, ETH rejection, shadow use, skipped edge victims,
  group pointer wrap and RFM pre-emption all happen.
* `tb_moat_top_full` runs the default-size device (32 x 64K rows) through
  reset clearing, a reactive mitigation (65 activations, ALERT, RFM, victims
  999/1001/998/1002), a shadow-counter case across a REF, and a five-REF
  proactive mitigation.
* `tb_moat_variants` runs the whole device (4 banks of 256 rows) against
  the model at levels 2 and 4 and at mitigation periods 1, 3, 10 and 0.
  At levels 2 and 4 the following must all occur: L RFMs per ALERT, an ALERT
  that waits for L activations, later RFMs of one ALERT that mitigate further
  tracked rows, and replacement of the lowest entry. Proactive mitigation
  must occur exactly when the period is not 0.
* `tb_moat_attacks` runs the evaluation's attack patterns at default size:
  the single-row attack (ALERT every 68 activations, no count above 68), the
  five-row round-robin attack (one ALERT per row per round), and a Ratchet
  attack. For the first two it estimates throughput in units of one ACT
  time. An ALERT costs 11 units, 4 of which can still carry ACTs. The result
  must be about 0.9: 0.907 and 0.921 in this run, against the analytical
  0.91 and 0.90. The Ratchet attack primes 4096 rows of one bank to ATH; the 391
  that proactive mitigation resets along the way are dropped, leaving 3705.
  It then spends the activations allowed around each ALERT on the rows not
  yet mitigated. The highest count reached (85 in this run) must stay within
  the analytical bound ATH + log_{M/3}(N) + M = 96.6 for level 1 (M = 4).

Not simulated: the SPEC-2017 and GAP workloads (they need a full-system
simulator and traces), a Ratchet attack with the largest pool that fits in
one refresh window (about 7300 rows, for which the bound is 99 at ATH = 64;
at that size the refresh pointer reaches the pool during the attack), and
the staggered multi-bank performance attack, whose throughput figures need a
timing model of the memory controller.

## Running the simulations

With Verilator 5 (`--timing` is needed for the testbenches' delays):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_moat_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/moat_pkg.sv tb/tb_moat_top.sv
obj_dir/Vtb_moat_top
```

Replace `tb_moat_top` by any testbench name. Each testbench sets its own
parameters; `tb_moat_top_full` and `tb_moat_attacks` use the defaults and
take a few seconds. To change the design's size or thresholds, override the
parameters of `moat_top`; `ATH` must stay above `ETH` and below the counter
maximum.
