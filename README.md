# ABACuS: one activation counter for a row ID in every bank

RowHammer is a DRAM read-disturb effect. If a row (the *aggressor*) is activated
about NRH times before its physical neighbours (the *victims*) are refreshed, bits
in the victims can flip. Counter-based mitigations in the memory controller count
activations per row and refresh a row's neighbours before the count reaches NRH.
As NRH falls (1000 today, 125 expected) and the number of banks grows, these
mitigations need many more counters, and per-bank tables become expensive.

ABACuS (All-Bank Activation Counters) rests on one observation: both ordinary
programs and RowHammer attacks tend to activate rows with the **same row ID in many
banks at about the same time**. The rows that share a row ID across banks are
called *sibling rows*. ABACuS gives all siblings **one** shared counter that holds
the highest activation count among them. A small bit vector keeps that counter
from growing once per sibling. Compared with one counter per row per bank, this
cuts the number of counters by the number of banks (32 here).

This repository holds synthesizable SystemVerilog for the ABACuS unit, as it
would sit inside a DDR4 memory controller. It is set up for NRH = 1000 on one
channel with 2 ranks × 16 banks and 128K rows per bank. Each module has its own
self-checking testbench. Four more run the whole unit: a small random one, one at
the default size, and two attack patterns at the NRH = 500 settings.

## 1. The shared counter: RAC and SAV

Each ABACuS counter is tied to one row ID and has two parts:

* **RAC** (row activation counter). This is an upper bound on the number of times
  *any* of the row ID's siblings was activated in the current tracking period.
* **SAV** (sibling activation vector). It has one bit per bank. A set bit means
  "this bank's sibling has been activated once since the RAC last changed".

When an ACT for (bank *b*, row *r*) hits the counter of *r*:

| SAV[b] before | action                                                    |
|---------------|-----------------------------------------------------------|
| 0             | set SAV[b]; RAC unchanged                                 |
| 1             | RAC += 1; SAV becomes one-hot at *b* (all other bits cleared) |

Why this is always an upper bound: if a sibling's SAV bit is clear, that sibling
has been activated fewer times than the RAC, so one more activation cannot pass
it. If the bit is set, the sibling's count may equal the RAC, so the RAC has to
grow. Clearing the other bits at that point is safe, because every other sibling
is now strictly below the new RAC. The upshot: if 32 siblings are each activated
once, the RAC rises by one, not by 32.

The paper's four-ACT example shows this. The testbench `tb_abacus_controller`
first builds its starting state and then checks each step. The table has three
counters and 4-bit SAVs, with bank 3 leftmost:

```
start      row 13: RAC 27 SAV 0001 | row 9: RAC 12 SAV 0101 | row 1: RAC 14 SAV 1000 | spill 12
ACT(13,b1) row 13: RAC 27 SAV 0011                        (bit was 0: set it)
ACT(13,b1) row 13: RAC 28 SAV 0010                        (bit was 1: increment, one-hot)
ACT(20,b2) row 9's counter -> row 20: RAC 13 SAV 0100     (RAC 12 == spill: replace)
ACT(7,b1)  spill 13                                       (untracked, no RAC equals 12)
```

## 2. Tracking few rows: table, spillover counter, overflow bit

The table holds only `N_ENTRIES` counters (2720 for NRH = 1000), managed with the
Misra-Gries frequent-item algorithm. A single **spillover counter** is an upper
bound on the count of every row ID that has no counter. For each ACT the
controller does exactly one of three things:

1. **Update.** The row ID has a counter: apply the RAC/SAV rule above.
2. **Replace.** The row ID has no counter, but some counter's RAC equals the
   spillover value. That counter takes the row ID with RAC = spillover + 1 and a
   one-hot SAV. Its old row ID is now covered by the spillover counter, which
   was already an upper bound for it.
3. **Spill.** Otherwise, increment the spillover counter.

`N_ENTRIES` is the number of rows one bank can activate PRT times in a 64 ms
window: `64 ms × (1 − tRFC/tREFI) / tRC / PRT ≈ 2718`, rounded up to 2720.

**Overflow bit.** The RAC does not have to count all the way to the number of
ACTs in a window. It counts 0 … PRT−1 (9 bits for PRT = 500). When an increment
reaches PRT, a preventive refresh is triggered, the count restarts at 0 and an
overflow bit is set. A counter with its overflow bit set is never replaced. In
this RTL the overflow bit is the top bit of an `S_RAC`-bit field:
`{overflow, count}`. The spillover value stays below RCT < 2^(S_RAC−1), so an
overflowed counter can never equal it. The "never replace" rule therefore
follows from the CAM compare itself, with no extra logic. The table's search and
replace rules are in `abacus_counter_table.sv`; the decisions are in
`abacus_controller.sv`.

**Reset.** The counters only have to cover one refresh window, so every 64 ms all
counters and the spillover counter go back to zero (`reset_period_timer`). Each
entry has a valid bit, and an invalid entry reads as RAC = 0. Reset therefore
only clears the valid bits; the SAV memory needs no reset.

## 3. What the unit asks the memory controller to do

* **Preventive refresh.** When a RAC reaches PRT = NRH/2, the victims of that row
  ID (row ± 1 … ± blast radius) are refreshed **in every bank**, because the RAC
  stands for all siblings. DDR4 has no "refresh this row" command, so each victim
  is refreshed by an ACT followed by a PRE, issued by the memory controller.
  `preventive_refresh_engine` queues the aggressor row IDs and hands out victims
  one at a time on a valid/ready channel, bank by bank. It keeps
  `bank_block[b]` high until bank *b*'s victims are done, and the controller serves
  no demand request to a blocked bank. The victim ACTs are reported back on the
  ACT port and counted like any activation. That keeps the unit safe when a
  victim refresh itself disturbs rows further out (Half-Double).
  PRT is NRH/2 because ABACuS does not know when the DRAM's own refresh reaches a
  row. A row can gather almost PRT activations just before a reset and almost PRT
  more just after it, which still stays below NRH.
* **Refresh cycle.** A stream of ever-new row IDs raises the spillover counter.
  When it reaches the refresh cycle threshold RCT, `refresh_cycle_engine` requests
  8192 REF commands per rank (every row once), all banks are blocked, and every
  counter is reset. This is the slow path that adversarial streams can trigger.
* **Periodic reset** once per 64 ms, as above.

## 4. Configurations

All sizes are parameters of `abacus` (defaults in `abacus_pkg`):

| NRH  | PRT | RCT | N_ENTRIES | S_RAC (incl. overflow) | S_SAV | S_RID |
|------|-----|-----|-----------|-------------------------|-------|-------|
| 1000 | 500 | 498 | 2720      | 10                      | 32    | 17    |
| 500  | 250 | 248 | 5440      | 9                       | 32    | 17    |
| 250  | 125 | 123 | 10880     | 8                       | 32    | 17    |
| 125  | 62  | 60  | 21760     | 7                       | 32    | 17    |

The default is the NRH = 1000 column. `S_SAV` is the number of banks: use
`S_SAV = 64, N_RANKS = 4` for a 4-rank channel. `BLAST_RADIUS` (default 1)
widens the victim set.

Storage at the default size is 2720 × (17 + 10 + 32) bits plus a valid bit per
entry, about 20 KiB in all. The paper quotes 5.64 KB of row-ID CAM, 2.66 KB of
RAC CAM and 10.63 KB of SAV SRAM.

## 5. Modules and interface

```
abacus                        top: ABACuS inside the memory controller
├── abacus_counter_table      Row ID CAM + RAC CAM + SAV SRAM, valid bits
├── spillover_counter         S_RAC-bit register, flags the step to RCT
├── abacus_controller         per-ACT decision (update / replace / spill)
├── preventive_refresh_engine aggressor queue, victim requests, bank blocking
├── refresh_cycle_engine      REF requests for a whole refresh cycle
└── reset_period_timer        64 ms reset pulse
abacus_pkg                    default sizes, act_outcome_e
```

Top-level ports (`abacus`):

| group | signals | meaning |
|-------|---------|---------|
| ACT in | `act_valid, act_bank[4:0], act_row[16:0]`, out `act_ready` | every ACT the controller issues. One per cycle, fully accounted at the next edge. Do not issue while `act_ready` is low, which happens during a refresh cycle and in the reset cycle. |
| victim refresh | out `vr_valid, vr_bank, vr_row`, in `vr_ready` | raise `vr_ready` when issuing the victim's ACT+PRE, and report that ACT on `act_*` in the same cycle |
| refresh cycle | out `ref_valid, ref_rank`, in `ref_ready` | one REF per cycle with both high |
| blocking | `bank_block[31:0]`, `all_block` | hold demand requests to these banks |
| events | `ev_outcome, ev_prev_ref, ev_refresh_cycle, ev_prq_overflow, ev_period_reset` | one-cycle strobes for statistics |

Bank IDs are flat: `{rank, bank group, bank}`. Timing: the search is
combinational through the CAMs and the write happens at the next clock edge, so an
ACT is handled in one cycle. The paper reports 1.22 ns for one counter update,
which is well inside tRRD (2.5 ns).

## 6. Where this RTL goes beyond the paper or departs from it

The paper describes the algorithm, the three tables, the spillover counter and
what the unit must make the memory controller do. These choices are this
design's own:

* The table's insides: single-cycle CAM search, a lowest-index priority encoder
  when several counters could be replaced, valid bits in place of zeroing, and
  the `{overflow, count}` reading of `S_RAC`.
* The preventive refresh engine: queue depth 4, bank-by-bank victim order, the
  valid/ready handshake, and logical row IDs treated as physically adjacent.
* **Full queue.** If a preventive refresh is requested while the queue is full,
  a refresh cycle is started and the queue is emptied. This never lets a victim
  go unrefreshed, and it avoids a deadlock: only victim ACTs drain the queue, and
  they can themselves push new aggressors. The paper does not discuss this case.
* Refresh cycle: 8192 REF per rank (JEDEC DDR4; the paper's 64 ms / 7.9 µs
  would be 8101), both ranks, with ranks alternating.
* Reset period: 102,400,000 cycles, which is 64 ms at an assumed 1.6 GHz clock.
* A first activation of a sibling (SAV bit clear) never increments the RAC. This
  follows the operation steps and the worked example.

Not built: the memory controller itself (queues, FR-FCFS scheduler, address
mapping, DRAM timing) and the DRAM. ABACuS only observes the controller and makes
requests of it. Also not built: the "ABACuS-Big" variant, which has one counter
per row ID and no spillover counter. It can be approximated by setting
`N_ENTRIES = 2^S_RID`, although the spillover logic is then still present.

## 7. Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | size | what it checks |
|-----------|------|----------------|
| `tb_abacus_counter_table` | full (2720 entries) | both CAM searches and the SAV read against a reference copy; lowest-index candidate; overflowed entries never candidates; invalid entries are RAC 0; clear |
| `tb_spillover_counter` | full | counting, RCT flag on exactly the RCT-th increment, clear priority |
| `tb_abacus_controller` | 3 counters, 4 banks, PRT 40 | the four-ACT example value by value; then 6000 random, hammering and sweeping ACTs compared decision by decision with a behavioural model; the upper-bound invariant (RAC ≥ true count of every sibling, spillover ≥ every untracked row) |
| `tb_preventive_refresh_engine` | 4 banks, radius 2 | exact victim list and order, edge rows skipped, blocking while victims are pending, queue full/flush |
| `tb_refresh_cycle_engine` | 2 ranks × 16 REF | REF count per rank, rank alternation, 32-cycle duration with ready always high |
| `tb_reset_period_timer` | 100-cycle period | pulse position |
| `tb_abacus` | 8 counters, 4 banks, PRT 16 | end to end with a randomized controller model: every ACT's outcome against the reference model, victim requests, blocking, refresh cycles (by RCT and by a full queue), periodic reset; security: no row exceeds PRT+1 activations between neighbour refreshes within a period, or reaches NRH over two periods; every mechanism must occur |
| `tb_abacus_full` | defaults | preventive refresh exactly on the 500th ACT to one row, then the 64 victims in order; sibling sweep; a stream of new rows that reaches a refresh cycle after exactly RCT = 498 spillover increments (about 1.35 M ACTs), 2 × 8192 REFs, reset afterwards. Runs in about 75 s. |
| `tb_abacus_attack` | NRH = 500 settings (5440 counters, PRT 250, RCT 248, 9-bit RAC) | the classic many-sided attack: the same 32 row IDs hammered in all 32 banks, bank-interleaved, 300 passes. Because siblings share one counter, each row's counter rises by one per pass, so each of the 32 rows gets exactly one preventive refresh, in pass 250; 2048 victim refreshes, each with its bank blocked; no refresh cycle; no row above PRT activations between neighbour refreshes. Runs in about 35 s. |
| `tb_abacus_adversarial` | NRH = 500 settings | the pattern built to defeat this design: a new row ID on every ACT. The spillover counter climbs to RCT = 248 (about 248 × 5441 ≈ 1.35 M ACTs), then a refresh cycle of 2 × 8192 REFs with every bank blocked, and empty counters afterwards. This is the design's worst case: one refresh cycle per 1.35 M ACTs, about 27 ms of ACTs at one per 20 ns, so about two per 64 ms window. Runs in about 130 s. |

Run any of them with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl rtl/abacus_pkg.sv tb/tb_abacus.sv --top-module tb_abacus
obj_dir/Vtb_abacus
```

Notes for changing the design:

* The RTL uses immediate and concurrent assertions. The most important ones: a
  row ID is never held by two counters, no ACT arrives while `act_ready` is low,
  and the victim queue never overflows.
* The CAM search is written as a loop over all entries. At the default size it
  simulates at about 20k cycles/s, and logic synthesis of the 2720-entry table
  takes a long time. A real implementation would use CAM macros.
* Security is checked in the reduced end-to-end test, over random and
  hammering traffic, and in the attack test. That is evidence, not a proof. The paper gives the
  induction argument for the RAC bound.
