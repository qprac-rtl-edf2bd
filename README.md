# QPRAC: per-bank priority queues for PRAC Rowhammer mitigation

Rowhammer is a DRAM read-disturbance effect. When one row (the aggressor) is
activated often enough, cells in the rows next to it (the victims) flip. The
number of activations that is enough, the Rowhammer threshold T_RH, has fallen
from tens of thousands to a few thousand, and it is expected to fall below 100.
DDR5's Per Row Activation Counting (PRAC) gives every DRAM row its own
activation counter. It also gives the DRAM a way to ask the memory controller
for time: it asserts the *Alert* signal. This is the Alert Back-Off (ABO)
protocol. After an Alert the controller may still issue a few activations,
then it sends one or more *all-bank Refresh Management* commands (RFMab). The
DRAM uses each RFM to refresh the victims of one aggressor.

The JEDEC standard leaves open which rows get mitigated and when. QPRAC's
answer is a tiny **priority-based service queue (PSQ)** in each bank. Each
PSQ entry holds a row and that row's PRAC count. The queue is kept sorted by
count and is meant to be full all the time. A newly activated row replaces the
lowest entry if its count is higher. So the queue always holds the most
activated rows it has seen since their last mitigation. A FIFO queue is
different: a row that arrives while it is full is simply lost. An attacker
can exploit that with the few activations the controller may still issue after
an Alert. With a PSQ, such a row goes straight to the head.

This RTL implements the QPRAC logic of one DDR5 device:

* per-row PRAC counters;
* one PSQ and one mitigation sequencer per bank;
* the device-level ABO engine that drives Alert.

Its defaults follow the published main configuration:

* 32 banks of 128K rows;
* 7-bit counters and 17-bit row addresses;
* 5 PSQ entries per bank;
* Back-Off threshold N_BO = 32;
* one RFM per Alert;
* blast radius 2;
* energy-aware proactive mitigation on REF with N_PRO = N_BO/2.

## The PSQ

`rtl/qprac_psq.sv` holds N entries `<valid, row, count>` in registers. The
queue is always sorted: entry 0, the head, has the highest count. The last
entry, the tail, is the lowest, or empty. The queue does two operations.

**Update.** An ACT or a victim refresh offers the row and its new PRAC count.

* If the row is already held (a CAM hit), its count is overwritten in place.
* Otherwise the row is inserted only if a slot is still empty, or if its count
  is *strictly* higher than the tail's. The tail entry is then evicted.

**Pop.** The head is removed after it has been mitigated.

After either operation the N entries are re-sorted. An odd-even transposition
network of N stages does this, using strict comparisons, so entries with equal
counts keep their relative order. An update and a pop in the same cycle are
allowed; the pop is applied first. `alert_req` is high while the head's count
is at or above N_BO.

Why a 5-entry queue is enough comes from the security argument. Each Alert
mitigates N_MIT rows, and N_MIT is 1, 2 or 4. One more entry serves the
proactive mitigation on REF. A row that has been evicted cannot gain
activations without being offered to the queue again. At that point it is
again among the highest counts.

A small worked example: the queue holds X:31, Y:25 and Z:1.

* An ACT to a new row A whose count becomes 4 evicts Z.
* An ACT to X makes X's count 32 in place, and the alert request rises.

`tb/tb_qprac_psq.sv` replays these values.

## One bank: counters, PSQ, mitigation

`rtl/qprac_bank.sv` connects three parts:

* `prac_counters`: an array of ROWS 7-bit counters. In silicon these are extra
  cells in each DRAM row. Here they are an RTL memory with a one-cycle
  read-modify-write. Counts saturate at 127.
* `qprac_psq`.
* `qprac_bank_mitigator`: the mitigation sequencer.

**ACT.** The counter of the activated row is incremented. In the same cycle
the row and its new count are offered to the PSQ. The result shows up in the
PSQ outputs one cycle later.

**Mitigation.** A mitigation does the following.

1. In the cycle of the command, the PSQ head (the aggressor) is popped.
2. In the same cycle, the aggressor's counter is cleared. A real DRAM does
   this by activating the row.
3. A `mit_*` report is emitted.
4. Over the next 2·BR cycles the sequencer visits the victims row−2, row−1,
   row+1 and row+2, one per cycle.
5. For each victim it requests a refresh from the DRAM array (`vref_*`),
   increments the victim's own counter, and offers the victim to the PSQ.

Counting victim refreshes is what defends against transitive attacks such as
Half-Double. In those attacks the refreshes themselves hammer rows further
away. Victims outside the bank are skipped, but their cycle is still spent.
While a mitigation is running `ready` is low, and no command may be issued.

### What starts a mitigation

| Command | Which banks mitigate | Condition on the PSQ head |
|---|---|---|
| RFMab (after an Alert) | the bank whose head reached N_BO: the *Alert-driven* mitigation | head valid |
| RFMab (same command) | every other bank: the *opportunistic* mitigation | head valid, any count |
| REF | every bank: the *proactive* mitigation | head count ≥ N_PRO (energy-aware) |

Opportunistic mitigation takes advantage of a limit in the DDR5 interface.
Alert does not say which bank raised it, so the controller must stall every
bank with an all-bank RFM anyway. Every bank can therefore use that time to
mitigate its own head. This removes most future Alerts.

Proactive mitigation uses the periodic refresh in the same way. To save
energy, a bank uses a REF only when its head's count is at least
N_PRO = N_BO/2. Setting `N_PRO = 0` gives a mitigation on every REF, and
`PROACTIVE_EN = 0` turns proactive mitigation off.

## The Alert Back-Off engine

`rtl/qprac_abo_ctrl.sv` is a three-state machine:

* **IDLE → ALERT.** When any bank's `alert_req` is high, Alert rises one cycle
  later. `alert_n` is the active-low pin level.
* **ALERT → DELAY.** The controller may issue up to ABO_ACT = 3 more
  activations and must then send N_MIT RFMab commands. An assertion flags a
  fourth activation. Alert is released when the N_MIT-th RFM arrives.
* **DELAY → IDLE.** After ABO_Delay = N_MIT further activations, to any bank,
  the engine returns to IDLE.
* **IDLE → ALERT again.** If some PSQ head is still at or above N_BO, a new
  Alert follows at once.

An RFMab that arrives outside an Alert still makes the banks mitigate, but it
does not change the ABO state.

These limits bound how far any row can get past N_BO. Take a wave attack that
starts with a pool of R1 rows, each already activated N_BO−1 times. Each round
activates every remaining row once, and each Alert removes N_MIT rows. The
most activations any single row can collect is

    N_BO + NR + ABO_ACT + ABO_Delay + BR,

where NR is the number of rounds from the recurrence

    R(n) = R(n−1) − floor(N_MIT · (R(n−1) − BR) / (ABO_ACT + ABO_Delay)).

At N_BO = 32 and one RFM per Alert this yields a safe T_RH of 71.

## Top level and command interface

`rtl/qprac_top.sv` (module `qprac_top`) contains NUM_BANKS `qprac_bank`
instances and one `qprac_abo_ctrl`. It accepts one command per cycle on
`cmd`, `cmd_bank` and `cmd_row`, and only while `ready` is high:

* `CMD_ACT` counts an activation of `<bank, row>`;
* `CMD_REF` is an all-bank refresh, giving each bank one proactive slot;
* `CMD_RFM_AB` is an all-bank RFM;
* `CMD_PRE` and `CMD_NOP` have no effect.

For a REF or an RFM, every bank starts its mitigation in the command's cycle.
`ready` then drops for 2·BR cycles. After reset, `ready` stays low for ROWS
cycles (131072 at full size) while the counters are cleared one row per cycle.

The outputs are:

* `alert_n` and `alert`;
* `abo_delay`, which marks the ABO_Delay window;
* per bank, the victim refresh requests `vref_valid` and `vref_row`;
* per bank, the mitigation reports `mit_valid`, `mit_row`, `mit_cnt` and
  `mit_kind`;
* per bank, the PSQ head;
* a debug read port (`dbg_bank`, `dbg_row` → `dbg_cnt`) for any row's counter.

The DRAM cell array that actually refreshes the victims is not part of this
logic. Neither is the memory controller, nor the open-drain Alert_n pad. Their
signals are ports.

### Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_BANKS` | 32 | banks per device (8 groups × 4) |
| `ROWS` | 131072 | rows per bank |
| `PSQ_N` | 5 | PSQ entries per bank |
| `N_BO` | 32 | Back-Off threshold |
| `N_PRO` | N_BO/2 | proactive threshold on REF |
| `BR` | 2 | blast radius: victims on each side |
| `N_MIT` | 1 | RFMs per Alert (1, 2 or 4) |
| `ABO_ACT` | 3 | activations the controller may issue after an Alert |
| `ABO_DELAY` | N_MIT | activations before the next Alert may rise |
| `PROACTIVE_EN` | 1 | enable proactive mitigation on REF |

Elaboration stops if `N_MIT` is not 1, 2 or 4. It also prints a warning when
`PSQ_N` is smaller than `N_MIT`, or smaller than `N_MIT + 1` with proactive
mitigation on. Such a queue still works and is fine for performance studies,
but the security bound above does not cover it.

`qprac_pkg` fixes the widths: a 17-bit row address and a 7-bit counter. One
PSQ entry is therefore 24 bits of payload plus a valid bit. Five entries come
to 120 bits, about 15 bytes per bank.

## Where this RTL departs from, or goes beyond, the published design

* **Timing.** The cycle-level timing is this design's own. The published
  design states only that the PSQ operations take a few nanoseconds and hide
  under the precharge time.
  * An ACT is handled in one cycle.
  * A mitigation takes one cycle plus one cycle per victim.
  * A real RFM lasts 350 ns, far more than this.
* **Command encoding and init sweep.** Both are this design's own: the
  numeric command codes, and the counter-clearing sweep after reset.
* **Sorting.** How the queue is kept sorted is not specified. The sorting
  network, the valid bits for empty slots, and same-cycle pop and update are
  this design's choices.
* **Counters across refresh.** Counters saturate at 127 instead of being
  proven never to overflow. They are never reset by periodic refresh; only a
  mitigation clears an aggressor's count.
* **Counter width.** The published sizing gives both "min(6, log2(T_RH)+1)
  bits" and "7-bit counters for a T_RH of 66". This RTL uses 7 bits. With 7
  bits, N_BO above about 88 cannot be protected up to its full bound, and
  N_BO = 128 would never raise Alert. Widen `CNT_W` in `qprac_pkg` for such
  settings.
* **Releasing Alert.** Alert is released on the last RFM of the sequence, not
  after a pulse-width timer.
* **Counting ABO_Delay.** The ABO_Delay activations are counted over all banks
  of the device.
* **Edge rows.** Victims beyond the first or last row of a bank are skipped.
* **Not modelled.** The variants used only for comparison are not modelled:
  a design without opportunistic mitigation, an ideal oracle, FIFO queues, and
  same-bank or per-bank RFM.

## Verification

Every testbench in `tb/` is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog. Several of
them compare against `tb/qprac_ref_pkg.sv`, a transaction-level reference
model. In that model each bank is a map of counters plus an ordered list. The
list is sorted by a stable insertion sort, so it picks the same entry as the
RTL among equal counts.

| Testbench | What it shows |
|---|---|
| `tb_prac_counters` | init sweep takes exactly ROWS cycles; random increments and clears; saturation |
| `tb_qprac_psq` | the worked insertion/hit example; 5000 random updates and pops against a reference; strict-greater insertion |
| `tb_qprac_bank_mitigator` | per-cycle sequence of pop, clear and victims; the N_PRO gate; empty queue; bank edges |
| `tb_qprac_abo_ctrl` | PRAC-1 and PRAC-4 engines against a reference; the ABO_Delay hold-off |
| `tb_qprac_bank` | a bank against the reference model, comparing every PSQ entry and counter each cycle |
| `tb_qprac_top` | **full size, default parameters** (32 × 128K rows), 60 000 commands of hammering, wave-like and random traffic, checked every cycle against the reference model |
| `tb_qprac_wave_attack` | the wave/feinting attack on QPRAC-1, -2 and -4, on QPRAC-1 with proactive mitigation, and on QPRAC-1 at N_BO 16 and 64 |
| `tb_qprac_fill_escape` | the FIFO-defeating pattern |

`tb_qprac_top` runs with a REF every 67 activations and an Alert-obeying
controller. It counts each mechanism and fails if one never happens:

* PSQ insertion, eviction and rejection;
* Alert, the activations after an Alert, and the ABO_Delay hold-off;
* Alert-driven, opportunistic and proactive mitigations, and skipped
  proactive slots;
* victims entering the PSQ, and victims outside the bank.

It also checks that no row ever exceeds 70 activations. Under a deliberately
broken Alert path, the same traffic drives a row to 78.

`tb_qprac_wave_attack` uses a pool of 8000 rows, N_BO = 32 and no REF. The
measured maximum activations per row are 64, 49 and 42 for QPRAC-1, -2 and -4.
The analytical bounds for that pool are 71, 59 and 55, and the testbench checks
that the measured values stay within them. Two more QPRAC-1 devices get a REF
every 67 activations during the same attack. One mitigates on every REF and one
only at N_PRO = 16. These two reach 60 and 61, so the proactive slots take
pressure off the Alert path. This agrees with the paper, where proactive
mitigation lowers the tolerated threshold.
Two last QPRAC-1 devices without REF run at N_BO 16 and 64. They reach 48 and
96 against bounds of 55 and 103. Thresholds above about 88 would carry counts
past the 127 that a 7-bit counter holds.

`tb_qprac_fill_escape` fills the PSQ and raises an Alert. It then spends the
three post-Alert activations on a row that a full FIFO would never accept. It
checks that this row jumps to the PSQ head and is mitigated by the first RFM.

To simulate one testbench with Verilator 5 from the project root:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/qprac_pkg.sv rtl/prac_counters.sv rtl/qprac_psq.sv \
        rtl/qprac_bank_mitigator.sv rtl/qprac_bank.sv rtl/qprac_abo_ctrl.sv \
        rtl/qprac_top.sv tb/qprac_ref_pkg.sv tb/tb_qprac_top.sv \
        --top-module tb_qprac_top -o sim
    ./obj_dir/sim

The full-size run takes about 20 seconds, most of it compiling. Smaller
configurations are set through the top's parameters, as the attack
testbenches do.
