# PRACtical: subarray-level counter updates and bank-level recovery for PRAC

DDR5 defends against Rowhammer with **Per-Row Activation Counting (PRAC)**. Every DRAM row
carries a small counter, 8 bits here, stored next to its data. The counter is read when the row
is opened (ACT). It is incremented and written back when the row is closed (PRE). When some row's
count reaches an alert threshold, the DRAM raises **Alert Back-Off (ABO)**. The memory controller
then has to give the DRAM time to refresh that row's neighbours: one or more all-bank refresh
management commands (RFMs) of 350 ns each.

Two costs follow, and this design removes most of both.

* **Counter update on every precharge.** The read-modify-write of the counter stretches the
  precharge time tRP from 15 ns to 36 ns, so every row-buffer conflict becomes slower. PRACtical
  does the increment with one central increment circuit per bank. That circuit writes the new
  count back into the *local* row buffer of the closed row's subarray over a dedicated 8-wire
  counter bus. The bank's global row buffer is free after the ordinary 15 ns. An ACT to a
  different, non-adjacent subarray can go at once. Only an ACT to the same subarray, or to a
  neighbour that shares its sense amplifiers, waits the full 36 ns.
* **All-bank stall on every alert.** With plain PRAC+ABO, every bank of the channel stops for the
  whole recovery, although usually one bank needs it. PRACtical adds a **Bank Alert (BA)
  register** with one bit per bank. Each bit is set by a bank that has a row at the threshold. The
  all-bank RFM is replaced by **RFM_MASK**, which starts the mitigation and also reads (and
  clears) the BA register. The controller then stalls only the banks named in that mask and keeps
  serving the others.

Stalling only some banks lets a second bank gain activations while the first is being
mitigated. At most 350 ns / 52 ns ≈ 6 ACTs fit in one RFM. The DRAM therefore raises its alert 5
activations early (threshold − 5), so no row passes the nominal threshold.

The RTL models one channel end to end: a memory controller (`practical_mc`) and the DRAM's
PRAC logic (`prac_dram_rank`), joined by a command bus, the ABO wire and a register-read response
path. The DRAM cells and the user data are not modelled. Only the per-row counters, which
PRACtical changes, are stored.

## Design point and clock

Every timing is a count of controller cycles. The design assumes a 1 GHz clock with one
command slot per cycle, so cycles equal nanoseconds.

| quantity | default | where it lives |
|---|---|---|
| banks per channel (2 ranks × 8 bank groups × 4 banks) | 64 | `N_BANKS`, `NB` |
| rows per bank / subarrays per bank | 65536 / 256 (256 rows each) | `ROWS`, `NSA` |
| counter width | 8 bits | `CNT_W` |
| alert threshold / safety margin | 128 / 5 (alert at 123) | `TH`, `MARGIN` |
| RFMs per alert (PRAC-n) | 2 | `NRFM` |
| tRAS, tRTP, tWR | 16, 5, 10 | `prac_pkg` |
| local precharge / counter update / PRAC tRP | 15 / 21 / 36 | `T_RP_LOCAL`, `T_CNT_UPD`, `T_RP_PRAC` |
| tRCD (own choice) | 16 | `T_RCD` |
| ABO pre-recovery window | 180 | `T_PRE_RECOVERY` |
| RFM duration | 350 | `T_RFM` |
| register read (BA or mapping) | 10 | `T_BA_READ` |
| request queue / FR-FCFS hit cap | 32 / 4 | `QD`, `CAP` |

The evaluated alternatives are thresholds 64 and 256 and PRAC-1 and PRAC-4. Each is a parameter
change: `TH` − 5 must fit in 8 bits, which it does for 256 (251).

## Block structure

```
                    practical_top
 requests ──► ┌──────── practical_mc ────────┐  cmd   ┌────── prac_dram_rank ───────┐
 done     ◄── │ mc_scheduler (32-entry queue,│ ─────► │ command decode              │
              │   FR-FCFS + cap)             │        │ prac_bank × 64              │
              │ mc_bank_state × 64           │  abo   │   counter array 64K × 8     │
              │   └ sa_conflict_tracker      │ ◄───── │   increment_unit (2 slots)  │
              │     └ subarray_decoder       │  resp  │   subarray_decoder          │
              │ abo_recovery_fsm             │ ◄───── │ ba_register (64 bits)       │
              │ boot read of the mapping     │        │ abo_alert_ctrl              │
              └──────────────────────────────┘        │ mapping register (MRR)      │
                                                      └─────────────────────────────┘
```

The shared types and constants are in `prac_pkg`: the command struct `dram_cmd_t` (op, bank,
row, column), the request struct `mem_req_t`, and the conflict rule `sa_conflict(a, b)`, which is
true when `a == b` or `|a − b| == 1`, without wrap-around.

## The counter update path (DRAM side)

`prac_bank` holds one bank's counters as a `ROWS × 8` array.

* **ACT** copies the row's counter into the row buffer.
* **PRE** passes the row, its subarray and that count to the bank's `increment_unit`, which
  runs the following schedule:

| cycle after PRE | event |
|---|---|
| 0 | PRE; global row buffer released after the local precharge |
| 15 | local precharge done; counter incremented (saturating at 255) |
| 15 … 35 | counter-bus transfer to the subarray's local row buffer (`bus_active`) |
| 35 | write-back into the counter array (`wb_valid`); alert check |
| 36 | any ACT may go, including to the same or an adjacent subarray |

The next PRE to the same bank can come 31 cycles after the previous one: ACT at 15, plus tRAS.
The previous update is still running then. So the increment unit has two slots. Two slots
always suffice, because updates last 36 cycles and PREs are at least 31 apart. Only one slot can
drive the counter bus at a time; an assertion checks this.

This matches the timeline printed for the mechanism, with PRE at 16:

| | cycle |
|---|---|
| ACT | 0 |
| PRE | 16 |
| earliest non-conflicting ACT | 31 |
| earliest conflicting ACT | 52 |

`tb_mc_bank_state` and `tb_sa_conflict_tracker` check these numbers.

A write-back that reaches `TH − MARGIN` raises the bank's `alert_set`, which sets its BA bit.
The bank also remembers the row with the highest count written back since its last mitigation.
An RFM refreshes that row's two neighbours and resets its counter to 0. The bank is busy for
`T_RFM` cycles after the RFM. The next command to it may come `T_RFM` cycles after the RFM. At
reset the bank clears its counters one row per cycle (`init_done`), which takes 64K cycles at the
default size.

## The subarray-conflict rule (controller side)

The controller has to know where subarray boundaries are. The DRAM exposes a mapping register:
here it holds log2(rows per subarray), which is 8 at the default size. After reset the controller
reads it once with an MRR command and accepts requests only after that. Every `mc_bank_state`
has a `sa_conflict_tracker`, which is a copy of the DRAM's update timer. For 35 cycles after a
PRE, it reports which subarray is still updating.

The scheduler allows an ACT when:

1. the bank is closed,
2. 15 cycles have passed since its PRE, and
3. the new row's subarray (from `subarray_decoder`) does not conflict with the updating one.

In the common case of a different, distant subarray, the ACT goes 21 cycles earlier than plain
PRAC allows. The DRAM model checks the same rule with an assertion (`a_act_no_conf` in
`prac_bank`), so a controller that broke it would stop the simulation.

## Alerts, the BA register and RFM_MASK

**BA register.** `ba_register` has 64 bits, set by the banks and read-and-cleared by RFM_MASK.
A bit set in the same cycle as the read survives the clear, so an alert is never lost. Bit *i*
stands for bank *i*.

**ABO.** `abo_alert_ctrl` drives ABO while three things hold:

* the alert is armed,
* no recovery episode is open,
* some BA bit is set.

ABO stays high until the controller answers.

**Episode on the DRAM side.** The first RFM_MASK opens an episode:

* it reads and clears the BA register;
* it keeps the value as the episode mask;
* it starts a mitigation in each masked bank;
* it returns the mask on `resp_data` 10 cycles later.

Each of the next `NRFM − 1` RFM_MASKs mitigates the same banks again and returns the same mask. A
bank that alerts during an episode keeps its bit for the next episode. After the last RFM the
alert re-arms only after `NRFM` ACTs, as in the PRAC-n timeline.

**Episode on the controller side.** `abo_recovery_fsm` runs the episode:

1. **Pre-recovery.** ABO is seen in cycle *t*. Cycles *t* … *t*+179 are normal operation.
2. **Drain.** From *t*+180 no new ACT is issued and open rows are closed. The mask is not yet
   known, and a bank must be closed to be refreshed.
3. **First RFM_MASK.** Issued once every bank is closed. Nothing else is issued until its answer
   arrives 10 cycles later.
4. **Recovery.** Only the banks of the mask are stalled (`stall_mask`). The scheduler keeps
   serving every other bank, including ACTs.
5. **Further RFM_MASKs.** Each follows the previous one after 350 cycles, with no global stall.
   350 cycles after the last one the mask is cleared and the episode ends.

Plain PRAC+ABO would stall all 64 banks for steps 3 to 5. Here the all-bank part shrinks to the
drain and the 10-cycle register read.

## The scheduler

`mc_scheduler` keeps one queue of up to 32 requests in arrival order. Each request has an id, a
bank, a row, a column and a read/write flag. It issues at most one command per cycle, in this
priority order:

1. RFM_MASK requested by the recovery FSM.
2. MRR at boot.
3. Drain PREs.
4. FR-FCFS with a cap. The first choice is the oldest request that hits its bank's open row, is
   timing-ready, and whose bank has served fewer than 4 hits since its ACT. Otherwise it takes
   the oldest request whose next command is ready:
   * RD/WR on a hit, but past the cap only if no older request for that bank is waiting;
   * PRE on a row conflict, once no queued hit is left under the cap;
   * ACT on a closed bank without a subarray conflict.

All queue entries are evaluated in parallel, and a find-first picks the winner. A request is
complete when its RD or WR is issued (`done_valid`, `done_id`). No data moves.

The scheduler counts events for observation:

* ACTs, and ACTs that overlapped another subarray's counter update;
* cycles in which a queued ACT was held back by a subarray conflict;
* PREs forced by the cap;
* commands issued to other banks during a bank-level stall.

## Top-level interface (`practical_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `req_valid`, `req` (`mem_req_t`), `req_ready` | in/in/out | request handshake. `req_ready` stays low until the DRAM counters are cleared and the mapping register has been read. |
| `done_valid`, `done_id`, `done_write` | out | a request's RD/WR was issued |
| `cmd` (`dram_cmd_t`) | out | command bus, for observation |
| `abo`, `ba_q`, `stall_mask`, `recovering`, `bank_rfm_busy` | out | alert and recovery state |
| `n_act`, `n_act_overlap`, `n_conflict_wait`, `n_cap_pre`, `n_cmd_in_recov`, `n_episodes`, `n_rfm`, `n_mitigations`, `n_victim_refreshes`, `n_alerts` | out | 32-bit event counters |
| `dbg_bank`, `dbg_row` → `dbg_cnt` | in/out | read one row's activation counter |

## Simulating

Everything is plain SystemVerilog for Verilator 5; `rtl/` has one module or package per file.
For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/prac_pkg.sv \
          tb/tb_practical_top.sv --top-module tb_practical_top
./obj_dir/Vtb_practical_top
```

Every testbench ends with `TB_RESULT checks=N failures=M`. Each has a watchdog that counts a
failure if the run hangs.

| testbench | what it establishes |
|---|---|
| `tb_subarray_decoder` | subarray ID / local row for random rows and every mapping |
| `tb_increment_unit` | 15-cycle increment, write-back at 35, two overlapping updates, saturation, alert flag |
| `tb_prac_bank` | counters against a reference model, alert at the threshold, 350-cycle RFM resetting the hottest row |
| `tb_ba_register` | set/read/clear, a set in the read cycle survives |
| `tb_abo_alert_ctrl` | ABO raise, episode mask, re-arm after n ACTs |
| `tb_prac_dram_rank` | MRR after init, BA mask on RFM_MASK after exactly 10 cycles, one bank mitigated while another works, re-arm |
| `tb_sa_conflict_tracker`, `tb_mc_bank_state` | 15-cycle vs 36-cycle ACT spacing, same/adjacent/distant subarrays |
| `tb_abo_recovery_fsm` | 180-cycle pre-recovery, drain, global stall only until the mask, 350-cycle RFM spacing, two episodes |
| `tb_mc_scheduler` | priorities, FR-FCFS and the cap, conflict waits, overlapped ACTs, stall masks, full queue, random traffic all completing once |
| `tb_practical_mc` | the controller against a protocol-checking DRAM model that raises random alerts: every timing rule above is checked on every command |
| `tb_practical_top` | whole channel at 4 banks × 256 rows, threshold 16: hammering plus background traffic; every mechanism must occur |
| `tb_practical_top_full` | whole channel at the default size |
| `tb_workload_thresholds` | the evaluated grid: thresholds 64/128/256 × PRAC-1/2/4, nine channels at once |
| `tb_workload_attack` | the performance attack at one, two and three alerts per refresh interval |

The reduced end-to-end run (`tb_practical_top`) must see all of the following, or it fails:

* overlapped ACTs;
* subarray-conflict waits;
* cap PREs;
* a full queue;
* ABO episodes with two RFM_MASKs each;
* BA masks naming only some banks;
* commands to unmasked banks during recovery;
* mitigations.

It also checks two bounds:

* alerts start exactly at threshold − 5;
* no counter ever passes twice the threshold.

In one run, 2362 ACTs gave 1996 overlapped ACTs and 140 alert episodes, with 3400 commands served
during bank stalls.

The full-size run (`tb_practical_top_full`) uses every default with no overrides. It clears the
64 × 64K counters, then hammers one bank beside background traffic to the other 63 banks. It
checks that:

* ABO appears at exactly 123 activations;
* the BA mask names only that bank;
* the other banks keep working while that bank is mitigated;
* the aggressor's counter is reset.

Two more benches run the configurations the paper evaluates. Both use 4096 rows per bank in 256
subarrays, and every timing at its default.

`tb_workload_thresholds` builds nine channels with 4 banks each, one for each pair of threshold
(64, 128, 256) and RFMs per alert (1, 2, 4). An attacker alternates two rows of one bank beside
random background traffic. For every pair, the first alert must come at exactly threshold − 5.
No counter may be written back above the threshold, and each episode must carry exactly n
RFM_MASKs. With threshold 256 the 8-bit counter saturates at 255, which is still above the
alert level of 251.

`tb_workload_attack` recreates the performance attack. It uses three channels of 8 banks with
thresholds 64, 32 and 16, which the paper uses to get one, two and three alerts per 3900 ns
refresh interval. The attacker alternates two rows of bank 1 while benign traffic uses banks 2–7.
Over 40000 cycles, one run gave these results:

| threshold | alerts per tREFI | time in recovery | benign completions per 1000 cycles, in / out of recovery |
|---|---|---|---|
| 64 | 1.26 | 28 % | 141 / 140 |
| 32 | 2.04 | 46 % | 139 / 140 |
| 16 | 3.21 | 72 % | 133 / 133 |

The bench requires at least one, two and three alerts per interval. While the attacked bank
recovers, the benign rate must stay at 80 % or more of its rate outside recovery. The table shows
it does not drop at all, because only bank 1 is stalled.

## Where this departs from, or goes beyond, the published description

* **Own choices where the description is silent.**
  * The 1 GHz clock and tRCD = 16.
  * The command encoding, including the MRR used for the mapping register and its format
    (log2 rows per subarray).
  * Counter clearing at reset.
  * The two-slot increment unit.
  * The single-entry "hottest row" tracker, and resetting the aggressor's counter after its
    mitigation.
  * Saturation at 255.
  * Draining all open rows before the first RFM_MASK.
  * Using the first RFM_MASK's mask for the whole episode.
* **Re-arming.** The description gives two rules: "n ACTs between alerts" (the timeline) and
  "one additional ACT after the RFMs" (the text). The n-ACT rule is implemented.
* **BA bit order.** The worked example prints the mask inconsistently. Bit *i* = bank *i* is
  used.
* **Not modelled.**
  * Data and the DRAM arrays.
  * Refresh (REF).
  * Rank and bank-group timings (tRRD, tFAW, tCCD).
  * Separate read and write queues (one shared 32-entry queue is used).
  * The CPU, caches and address mapping that produce the evaluated four-core workloads.
  * Any energy model.
* **Conflict rule.** Subarrays 0 and 255 are not treated as neighbours.
* **Victims.** A mitigation refreshes the two rows next to the aggressor. A row at the edge of
  the bank has only one.
* **A second row at the threshold.** The tracker follows only rows written back since the last
  mitigation. Suppose a bank has two rows at the threshold. Only the hotter one is mitigated. The
  other sets the bank's BA bit again at its next activation, because the alert compares
  "count ≥ threshold", not "count = threshold".

## Using and changing it

* **Threshold and PRAC-n.** Set `TH` and `NRFM` on `practical_top`.
* **Bank count or array size.** Set `NB`, `ROWS` and `NSA`. `ROWS / NSA` must be a power of two.
  The command-bus fields stay sized for 64 banks and 64K rows.
* **Timings.** All timing parameters have the defaults listed above. The recovery timers need
  `T_PRE ≥ 2` and `T_MIT ≥ 2`.
* **Mitigation policy.** To change it, edit only `prac_bank` (tracker and RFM end).
* **Scheduling policy.** To change it, edit only the per-entry candidate logic in
  `mc_scheduler`.
