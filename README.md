# PVAC: per-victim-row hammered counting, in-DRAM logic in SystemVerilog

RowHammer flips bits in a DRAM row (the *victim*) when rows near it (the
*aggressors*) are opened and closed many times before the victim is
refreshed. DDR5's Per-Row Activation Counting (PRAC) gives every row a
counter that goes up each time *that row* is activated, and it only goes back
to zero when the row is mitigated through an RFM command. Opening a row
restores that row's own charge, yet PRAC still counts it against the row.
Mitigating a row also activates its neighbours and raises their counters.
So the counts pile up and sooner or later cause needless alerts.

PVAC keeps one counter per row too, but counts from the victim's side. When
row `A` is activated:

* `cnt[A]` is set to 0, because opening `A` has just restored its charge;
* `cnt[A-2]`, `cnt[A-1]`, `cnt[A+1]`, `cnt[A+2]` each go up by one, since
  the blast radius is 2. Only rows in `A`'s own 512-row subarray count.

A counter therefore holds the number of times the row was disturbed since it
was last restored. Normal refresh restores every row once per refresh window,
so the counters stay small under ordinary traffic. A row whose count reaches
the back-off threshold `NBO` triggers DDR5's Alert Back-Off protocol, and
the memory controller answers with RFM commands. During those RFMs the device
refreshes the rows with the highest counts.

This repository holds synthesizable RTL for the device-side logic: the
counter subarrays and their update logic, the per-bank top-K priority queue,
proactive and RFM-driven mitigation, and the ALERT_n control. It follows the
PVAC paper (Kim, Baek et al., "PVAC: A RowHammer Mitigation Architecture
Exploiting Per-victim-row Counting"). Where the paper is silent, this design
makes its own choices, and each one is marked below.

## Block structure

```
pvac_chip                        one DDR5 sub-channel: 32 banks + ALERT_n
├── abo_ctrl                     Alert Back-Off sequencing (ALERT_n, NMit RFMs, ABO_Delay)
└── pvac_bank  x32               per-bank PVAC logic
    ├── counter_update_logic x2  CSA 0 / CSA 1: update sequencer ...
    │   ├── csa_subarray         ... around a 32 x 8192-bit counter subarray
    │   └── csa_addr_map x2      counter footprint of an activation (new job, current row)
    └── priority_queue           20 most-hammered rows, sorted by count
pvac_pkg                         geometry, timings, types, reference form of the mapping
```

The data subarrays (DSAs), which hold user data, are not part of this RTL.
They are ordinary DRAM. The rows they must refresh, for normal refresh and
for mitigation, come out of `pvac_chip` on the `dsa_ref_*` ports.

## Where the counters live

This is the least obvious part of the design.

A bank has 64K rows, split into 128 DSAs of 512 rows each. A bank row address is
`{dsa[6:0], rin[8:0]}`, where `rin` is the row's index inside its DSA. At 8 bits per
counter the bank needs 64 KB of counters. They are kept in a separate **counter
subarray (CSA)** with its own row decoder and row buffer. The CSA can therefore
be activated while the DSA access is going on, and the counter work stays
hidden inside the DSA's row cycle time tRC.

The counters are split across **two 32-row CSAs**, each with an 8192-bit row
buffer:

| field      | value                 | meaning                                              |
|------------|-----------------------|------------------------------------------------------|
| chunk      | `rin[8:7]`            | which 128-row quarter of the DSA                     |
| CSA        | `chunk[0]`            | even chunks in CSA 0, odd chunks in CSA 1            |
| CSA row    | `{dsa[6:3], chunk[1]}`| one CSA row = the same chunk of 8 consecutive DSAs   |
| column     | `{dsa[2:0], rin[6:0]}`| 8-bit counter at bits `[8*col+7 : 8*col]`            |

Two properties follow from this layout, and both are checked exhaustively in
`tb_csa_addr_map`:

* **One activation never needs two rows of the same CSA.** The five counters
  `A-2 … A+2` span at most two neighbouring chunks, and neighbouring chunks
  sit in different CSAs. When they straddle a chunk boundary, both CSAs each
  open one row and work in parallel. This happens for 4 of every 128 rows
  at each of the 3 chunk boundaries of a DSA, i.e. 12 of 512 rows, or 3/128
  of all rows. The paper gives the same 3/128.
* **One REF opens a single CSA row per CSA.** A REF refreshes 8 rows per
  bank. Here these are the same `rin` in 8 consecutive DSAs, and they share
  one CSA row. The paper's simpler single-CSA layout, with one CSA row per
  pair of DSAs, would instead have to activate up to 8 CSA rows one after
  another.

The chunking and the even/odd split across two 32-row CSAs come from the paper.
So does the rest of the layout, as far as the paper's layout figure shows
it. That figure stores "counters of 8 DSAs" in one 8192-bit row. It puts
chunk 0 of DSA 0 and then of DSA 1 in row 0 of CSA 0, and chunk 2 of DSA 0
in row 1. The position of DSAs 2 to 7 inside a row is this design's own
extension of that pattern.

The paper does not say which rows a REF refreshes. Its example for the
naive layout has one row refreshed in eight even-numbered DSAs. With the
layout above, that choice would need two CSA rows of the same CSA, so this
design refreshes eight consecutive DSAs instead: REF number `k` (13 bits)
refreshes rows `{k[12:9], j, k[8:0]}` for `j = 0..7`.

## Counter update sequence and timing

Logic clock: one cycle is one counter read-modify-write, tUP = 0.83 ns, the
figure the paper reports from synthesis. The CSA timings the paper gives in
nanoseconds are rounded up to whole cycles:

| step | what                                          | paper    | cycles |
|------|-----------------------------------------------|----------|--------|
| 1    | activate the CSA row (tRCD_CSA)               | 7.6 ns   | 10     |
| 2    | update A-2, A-1, A+1, A+2 (+1), then A (=0)   | 5 x 0.83 ns | 5   |
| 3    | write recovery (tWR_CSA)                      | 19.2 ns  | 24     |
| 4    | precharge (tRP_CSA)                           | 4.1 ns   | 5      |
|      | **total**                                     | 35.1 ns  | **44** (36.5 ns) |

tRAS_CSA (16.7 ns, 21 cycles) is also enforced but never binds. The bound to
meet is the DSA tRC of 48 ns = 58 cycles. An ACT keeps a bank's logic busy
for 44 cycles, plus 1 to 2 cycles of hand-over. The longest ACT-to-ready time
seen in simulation is 46 cycles.

Both CSAs get every job and walk its candidate list in lockstep, one
candidate per tUP. A candidate stored in the other CSA, or outside `A`'s DSA,
uses up its slot without a write. The latency is therefore always the
paper's `tRCD + 5·tUP + tWR + tRP`, in the dual-CSA case too. A CSA that
holds none of a job's counters is not activated at all. A REF job walks
8 × 5 = 40 candidates and takes 79 cycles (65.6 ns) of the 295 ns tRFC.

Counters saturate at 255. After reset, each CSA spends 32 cycles clearing its
rows to zero. Both of these are this design's choices.

## Priority queue

Each bank keeps the 20 rows with the highest counts in a table sorted by
count (`priority_queue`). The size is the paper's: NMit × 4 rows for RFMs plus
4 for proactive mitigation. Every counter write is reported to the queue, up
to two per cycle, one per CSA:

* a row already in the table takes its new count and moves to its sorted
  place;
* a row not in the table is inserted if its count beats the smallest entry,
  which is then evicted;
* ties keep age order, so a newcomer that only equals the smallest count is
  not inserted. These tie rules reproduce the paper's worked example, which
  `tb_priority_queue` replays;
* an entry whose count drops to 0 is removed, because the row was just
  restored. This is this design's choice.

The table is a single-cycle shift-insert network. Its head is always the
bank's most-hammered tracked row.

## Mitigation

* **Proactive mitigation (on REF).** If the queue head is ≥ NBO/2 when a REF
  arrives, then after the normal-refresh job the bank refreshes up to 4 rows,
  each taken from the queue head at that moment. Refreshing a row means
  activating it, so its counter is reset and its neighbours' counters go up.
  This takes 45 cycles per row, and a REF with proactive mitigation fits
  easily in tRFC (79 + 4 × 45 = 259 cycles ≈ 215 ns < 295 ns).
* **Alert Back-Off (`abo_ctrl`).** When any bank's queue head is ≥ NBO,
  ALERT_n goes low. It stays low until the first RFM, which is this design's
  choice. The controller may issue up to ABO_ACT = 3 more ACTs and must then
  send NMit RFMs. After the last RFM, a new alert waits until ABO_Delay = NMit
  ACTs have been issued. The alert request is a level, so a crossing that
  happens during the hold-off raises an alert as soon as the hold-off ends.
  A controller that sends a fourth ACT under ALERT_n is flagged on
  `abo_act_violation`.
* **RFM.** Every RFM is treated as all-bank. Each bank refreshes the 4
  highest-count rows of its queue, one at a time from the head.

## Command interface (`pvac_chip`)

| port | dir | meaning |
|------|-----|---------|
| `cmd_valid`, `cmd` (`cmd_e`), `cmd_bank[4:0]`, `cmd_row[15:0]` | in | MC command. ACT/PRE/RD/WR go to `cmd_bank`; REF and RFM go to all banks |
| `cmd_ready` | out | the command is taken when valid and ready are both high; holding valid is a legal stall |
| `alert_n` | out | ALERT_n, active low |
| `abo_act_violation` | out | sticky: more than 3 ACTs under ALERT_n |
| `dsa_ref_valid[b]`, `dsa_ref_mit[b]`, `dsa_ref_rows[b]` | out | rows bank `b`'s DSAs must refresh now: 8 for a normal refresh, 1 (`rows[0]`) for a mitigative refresh |
| `over_nbo[b]`, `bank_head_cnt[b]`, `proactive_start[b]` | out | per-bank observation |

A controller that respects tRC, tRFC and the 350 ns RFM window never sees
`cmd_ready` low. PRE, RD and WR cause no counter work.

## Parameters

| where | parameter | default | source |
|-------|-----------|---------|--------|
| `pvac_chip` | `NUM_BANKS` | 32 | paper: 32 banks per sub-channel |
| `pvac_chip`, `pvac_bank` | `NBO` | 237 | paper: PVAC with NMit = 4 at a maximum hammered count of 256 |
| `pvac_chip` | `NMIT` | 4 | paper: 1, 2 or 4 |
| `pvac_bank` | `PROACT_TH` | NBO/2 | paper |
| `pvac_bank` | `MIT_ROWS` | 4 | paper |
| `pvac_bank`, `priority_queue` | `QDEPTH` / `DEPTH` | 20 | paper |
| `counter_update_logic` | `T_RCD`, `T_RAS`, `T_WR`, `T_RP`, `T_UPC` | 10, 21, 24, 5, 1 | paper's ns rounded up to 0.83 ns cycles |
| `pvac_pkg` | rows/bank 65536, DSA 512 rows, 8-bit counters, blast radius 2, 2 CSAs × 32 × 8192 b | | paper |

**Which configurations fit.** With 8-bit counters, the paper's own NBO
values work for maximum hammered counts of 32, 64, 128 and 256 (NBO = 11,
43, 85 to 108, and 237). From a maximum hammered count of 512 upward, NBO
must sit close to that count. The paper gives 2015 to 2032 at 2048, and 512
needs roughly 490. Both exceed what an 8-bit counter can hold, so those
points need `CNT_W` raised in `pvac_pkg`. The paper
quotes both the 8-bit counter and these NBO values without reconciling them.
The geometry is fixed at 64K rows per bank and a blast radius of 2. The
paper's sensitivity points (128K or 256K rows, blast radius up to 4) would
need a different package.

## What is not here

* The DSAs, their sense amplifiers and the DSA row cycle: standard DRAM.
* The two guard rows the paper places between CSA rows: unused cells with no logic.
* The memory controller. A small behavioural one lives inside `tb_pvac_chip`.
* The paper's naive single-CSA layout and its distributed-counter
  discussion. These are alternatives, not the proposed design.
* Counter decrements. The paper's sequence text mentions incrementing *or
  decrementing* victim counters, but its algorithm only increments, and only
  increments are built.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_csa_addr_map` | every one of the 65536 rows as the activated row: the five candidates, DSA-edge cuts, counter locations and the CSA rows to open, against plain integer arithmetic; every counter slot used once; dual-CSA share = 1536/65536 = 3/128 |
| `tb_csa_subarray` | full-size CSA under random ACT/read/write/PRE/clear traffic against a model of cells and row buffer |
| `tb_counter_update_logic` | both CSAs with boundary, hot-region, random and REF jobs; every written value against a 64K-counter model; exact busy time `10 + 5n + 24 + 5` and ≤ tRC; saturation at 255 |
| `tb_priority_queue` | the paper's worked example on a 3-entry queue; 20 000 random cycles with two updates and a pop per cycle against a queue model |
| `tb_abo_ctrl` | ALERT_n, RFM counting and ABO_Delay hold-off for NMit = 4 and 1; `abo_act_violation` |
| `tb_pvac_bank` | one full-size bank against the victim-counting model: CSA cells, queue contents, REF row order, proactive trigger at NBO/2, 4 rows per RFM, `over_nbo`, ACT within tRC |
| `tb_pvac_chip` | the whole sub-channel at default parameters with a behavioural controller: benign traffic plus stride-3 hammering on one bank, with REFs kept sparse (one per 450 ACTs) so that alerts do occur. Checks every touched counter, keeps the maximum hammered count below 256 (240 observed), and requires each mechanism to occur at least once: ACT update, dual-CSA update, normal refresh, proactive mitigation, alert, RFM mitigation, ABO_Delay, stall. Also checks that every RFM makes each bank that tracks a hammered row refresh one |
| `tb_pvac_adversarial` | the attack pattern PVAC is evaluated under, at full size: n rows of one bank activated round-robin at stride 3 (n = 8, 32, 128, 512), plus strides 1 and 5 (n = 32), with one REF per 81 ACTs (tREFI / tRC). 12 000 ACTs per pattern. Counters match the model, the maximum hammered count stays below 256 (48 to 199 observed), and no alert is raised, as the paper reports for this maximum hammered count |

To simulate, for example, the whole chip with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/pvac_pkg.sv rtl/pvac_chip.sv tb/tb_pvac_chip.sv --top-module tb_pvac_chip
./obj_dir/Vtb_pvac_chip
```

Other testbenches build the same way with their own top module. `-Wno-fatal` keeps
style warnings (unused parameters, open pins, missing timescale) from
stopping the build. The chip testbench runs in a few seconds after a build
of about a minute; the adversarial one runs for under a minute. The testbenches read some internal state
hierarchically: CSA cells, the queue table and the ABO state.

## How far to trust it

The counting rule, the CSA layout properties, the update timing and the
queue behaviour are checked against independent models. The end-to-end and
adversarial runs reproduce the paper's main safety claim for the patterns
tried: with NBO = 237 and a controller that obeys the protocol, no victim
passed 256. The adversarial runs are short slices (about 2 %) of a 32 ms
refresh window. Not covered: the feinting attack (it assumes an attacker who
knows which rows were mitigated), real DSA timing interaction, and power-up
initialisation other than zero-fill. PVAC's energy and performance results
are outside what RTL can show.
