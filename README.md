# DSARP: DRAM refresh that runs alongside reads and writes

A DRAM cell leaks, so every row must be rewritten (refreshed) within a
retention time of 32 or 64 ms. With all-bank refresh, a refresh command
(REFab) locks up a whole rank for tRFCab: 350 ns for an 8 Gb chip, and
890 ns for a 32 Gb one. No read or write can go to the rank during that
time. As chips get denser, refresh takes a growing share of the time.

This design lets the work of refresh overlap with the work of accesses at two
levels:

* **Between banks: DARP (dynamic access-refresh parallelization).** The memory
  controller uses per-bank refresh (REFpb). A REFpb refreshes one bank for
  tRFCpb (about tRFCab / 2.3) while the other seven banks keep working.
  Standard per-bank refresh walks the banks in a fixed round-robin order.
  Here the controller decides which bank to refresh and when:
  * it puts off the refresh of a busy bank;
  * it refreshes idle banks early;
  * it overlaps refreshes with bursts of writes, whose latency nobody is
    waiting on.
* **Inside a bank: SARP (subarray access-refresh parallelization).** A bank is
  built from subarrays (8 per bank here). Each subarray has its own row
  decoder and sense amplifiers, and all of them share the global bitlines.
  The DRAM periphery is changed so that one subarray can be refreshed while
  another subarray of the same bank is activated and read or written. A
  refreshing bank therefore blocks only the requests that hit the one
  subarray under refresh.

The two together are DSARP. The RTL contains:

* the memory controller, one per channel;
* the modified DRAM periphery, one per rank;
* a top level that wires up the evaluated system:
  * 2 channels, 2 ranks per channel, 8 banks per rank;
  * 8 subarrays per bank and 64K rows per bank;
  * DDR3-1333 timing.

The cell arrays, sense amplifiers and data path are analog or existing DRAM
circuitry. They are not modelled: their control signals (wordline enable,
local row address and column select for each subarray) are outputs of the
top level.

## Structure

```
dsarp_system                       (top: CHANNELS x controller + RANKS x DRAM periphery)
├── memory_controller              (one channel)
│   ├── request_queue   x2          read queue, write queue (64 each)
│   ├── writeback_mode_ctrl         write batching (drain) mode
│   └── per rank:
│       ├── rank_timing             bank state, tRCD/tRAS/tRP/tRRD/tFAW/tRFCpb
│       ├── darp_refresh_ctrl       the DARP refresh scheduler
│       │   ├── ref_credit_counter x8
│       │   └── warp_bank_select
│       └── sarp_subarray_tracker   shadow refresh-subarray counters
└── dram_rank_periph                (one rank's modified periphery)
    ├── dram_cmd_decoder            decodes REFpb and its bank ID
    ├── dram_refresh_unit           per-bank refresh-subarray / local-row counters
    └── sarp_bank_periph x8         per-subarray muxes, REF?/=ID?, column-select gate
```

The shared constants and types are in `mc_pkg`:

* the request struct;
* the DDR3 command-bus struct and the decoded command enum;
* the event-flag struct;
* all timing values.

The whole design runs on one clock, the DDR3-1333 command clock (1.5 ns).
All timing parameters are in cycles of that clock.

## Refresh credit

Refreshes can be moved in time without breaking retention only within
limits: at most 8 refreshes of a bank may be postponed, and at most 8 pulled
in early. Each bank has a signed *refresh credit* (`ref_credit_counter`), kept
in the range −8..+8:

| Event | Credit |
|---|---|
| Due refresh postponed | −1 |
| Refresh sent ahead of its schedule (pulled in), or a postponed one made up early | +1 |
| Due refresh sent on schedule | unchanged |

A refresh may be postponed only while the credit is above −8. A refresh may be
pulled in only while it is below +8. So a bank is never more than eight
refreshes away from its nominal schedule. The range needs 5 bits, one more
than the 4 bits per bank sometimes quoted for this scheme.

## The DARP scheduler (`darp_refresh_ctrl`)

There is one scheduler per rank. It keeps the nominal schedule exactly as
standard per-bank refresh does: every tREFIpb = tREFIab / 8 cycles (325 at
32 ms retention), the next bank in round-robin order is due. What it does with
that refresh, and with the idle time in between, is where DARP differs.

It decides every cycle, in this order:

1. **Due refresh.** When bank R becomes due:
   * if R has queued demand requests (reads or writes) and its credit is
     above −8, the refresh is postponed (credit − 1);
   * if R already has a refresh waiting, the due refresh is also postponed
     when the credit allows;
   * otherwise the refresh goes into the *refresh queue*, one slot per bank,
     and must be sent.
2. **WARP (write-refresh parallelization).** While the controller is
   draining writes, WARP adds refreshes on its own schedule:
   * when: on entering writeback mode, and then every tRFCpb cycles;
   * condition: only when the refresh queue is empty;
   * choice: among the banks whose credit is below +8, the one with the
     fewest queued demand requests (`warp_bank_select`; ties go to the
     lowest bank number);
   * effect: the chosen bank's refresh is queued and its credit rises by one
     at once.

   The idea: during a drain the reads are waiting anyway, and a write does
   not stall a core. A refresh overlapped with writes therefore costs almost
   nothing. Refreshing the bank with the fewest writes keeps the drain short.
3. **Demand first.** A queued refresh is offered to the command arbiter with
   priority over demand commands. Apart from that, demand commands always go
   first.
4. **Idle-bank refresh (out of order).** Sometimes the controller has no
   demand command that it can issue this cycle, because of timing or because
   the queues are empty. In such a cycle the scheduler may pick a bank and
   refresh it at once. The bank must:
   * have no queued demand requests;
   * have credit below +8;
   * be able to take a REFpb now.

   The choice among such banks is random: a 16-bit LFSR gives a start bank,
   and a priority scan from there takes the first bank that qualifies. The
   refresh either makes up a postponed refresh or pulls one in; both raise
   the credit by one.

The effect is that refreshes move away from banks that are busy and into
idle cycles and write drains. The credit bounds mean the retention guarantee
of the standard schedule is kept. Over any long window each bank gets the
same number of refreshes as with strict round-robin, within ±8.

Interaction with the command arbiter in `memory_controller`:

* `ref_pending` marks banks with a queued refresh. The controller opens no new
  row in such a bank, so the bank closes and the refresh can go.
* `bank_ref_ready` comes from `rank_timing`. A bank is ready when:
  * it is closed, with its precharge complete;
  * no other bank of the rank is refreshing (per-bank refreshes never
    overlap);
  * tRRD has passed since the last ACT.
* `ref_ack` is the cycle the REFpb is put on the bus. At most one credit
  change happens per bank per cycle. For this, a WARP pick waits in a cycle in
  which a scheduled refresh is queued or a refresh is issued.

## Write batching (`writeback_mode_ctrl`)

Writes are collected in the write queue and sent in batches, so the bus does
not turn around between reads and writes all the time.

Writeback mode starts when either:

* the write queue reaches the high watermark (54 of 64); or
* there are no reads and at least one write is waiting.

It ends when either:

* reads are waiting and the write queue is down to the low watermark (32); or
* the write queue is empty.

In writeback mode only writes are scheduled. The controller changes between
read and write mode only when no bank of the channel has an open row, so an
ACT is always followed by its own column command.

## SARP in the DRAM

### Refresh counters (`dram_refresh_unit`)

With DARP the banks receive different numbers of refreshes, so every bank
needs its own refresh row counter. For SARP that counter is split in two:

* a **refresh-subarray counter**: which subarray is being refreshed;
* a **local-row counter**: which row inside that subarray.

The two counters give the subarray number and the local row directly. The
bank's global row decoder is not involved, so it stays free for accesses.

A REFpb refreshes `ROWS_PER_REF` = 8 consecutive rows: 64K rows are covered
by 8192 refreshes per retention time. Rows are refreshed one after another,
each for tRFCpb / 8 cycles. `ref_active` (the bank's "REF?" signal) is high
for tRFCpb. The local-row counter counts first and carries into the
subarray counter.

### Bank periphery (`sarp_bank_periph`)

In a normal bank, the global row decoder and its latch send one (subarray,
row) pair to every subarray, so only one row can be up. SARP adds logic for
each subarray *i*:

* **Refresh select.** `ref_sel[i] = REF? and (refresh-subarray counter == i)`.
  This is the "=ID?" comparator.
* **Row-address mux and subarray-select mux.** While `ref_sel[i]` is high,
  subarray *i* takes its row address and its enable from the refresh
  counters. Otherwise it takes them from the access latch of the global
  decoder. `wl_en[i]` is the OR of the refresh select and the access select.
* **Column-select gate.** `col_sel[i] = column_select AND NOT ref_sel[i]`.
  The refreshing subarray's row buffer is never connected to the global
  bitlines, even when a read or write to the bank drives column select.

For an access, the subarray is the top log2(NSA) bits of the row address. The
access latch holds from the ACT until the precharge: the auto-precharge of
the column command, or an explicit PRE.

Two outputs are used for checking:

* `conflict`: an ACT to the refreshing subarray. This must never happen; the
  controller prevents it.
* `overlap`: a refresh and an access active in the bank at the same time.

### Command decoder (`dram_cmd_decoder`)

A DDR3 REF command with A10 = 1 is an all-bank refresh. With A10 = 0 it is
a per-bank refresh of the bank on BA[2:0]. This is how the bank ID travels
with REFpb. The decoder is registered. All-bank refresh is decoded but this
design never issues it, and the refresh unit does not act on it.

## SARP in the controller

The DRAM decides internally which subarray is being refreshed. The
controller must know it, so that it never activates a row in that subarray.
`sarp_subarray_tracker` keeps a shadow copy of each bank's refresh-subarray
and local-row counters. It advances them on every REFpb exactly as the DRAM
does.

The number of subarrays per bank is read at boot from the module's SPD
EEPROM. Here it arrives as `cfg_sa_bits` = log2(subarrays), from 0 to 6, and
must match the DRAM's `NSA_P`.

While a bank is refreshing (tRFCpb after its REFpb):

* a request to that bank whose row is in the refreshing subarray gets no ACT.
  It is *held* (event `sarp_block`) until the refresh ends;
* requests to the other subarrays of the bank are scheduled normally (event
  `sarp_act`);
* `rank_timing` stretches tFAW from 20 to 23 cycles and tRRD from 4 to 5
  cycles, for as long as any bank of the rank is refreshing. A refresh and
  activations in parallel draw more current, and the 13.8 % increase,
  rounded up, keeps the rank's power within the same budget;
* a REFpb is spaced from activations like an ACT for tRRD: it waits tRRD
  after the last ACT, and the next ACT waits the stretched tRRD after it.
  It does not take a slot in the four-activation tFAW window.

## Memory controller (`memory_controller`)

Each channel has its own controller:

* **Queues.** 64-entry read and write queues (`request_queue`). They collapse
  when an entry leaves, so index 0 is always the oldest. They keep a count of
  requests per rank and bank, which DARP uses.
* **Scheduling.** FR-FCFS under a closed-row policy. Every access is an ACT
  followed by a RD or WR with auto-precharge. A column command to a row that
  is already open is preferred; otherwise the oldest request whose ACT is
  legal is chosen.
* **Arbitration, one command per cycle.** First a queued refresh, then a
  demand command, then an idle-bank refresh.
* **Bus rules.** tCCD between column commands; read-to-write turnaround; and
  tCWL + burst + tWTR from a write to a read.
* **Responses.** `rd_resp_valid` pulses tCL + burst cycles after the RD
  leaves the controller. `wr_done_valid` pulses when the WR is sent.
* **Command bus.** `ddr_cmd` is a registered DDR3 bus: per-rank CS#, RAS#,
  CAS#, WE#, BA and A.
* **Events.** `events` gives one-cycle flags: scheduled, postponed, idle and
  WARP refreshes; parallel ACTs; held requests; and drain entries.

## Parameters and configurations

The defaults are the evaluated configuration:

| Quantity | Default | Origin |
|---|---|---|
| tREFIab / tREFIpb | 2600 / 325 cycles | 3.9 µs (32 ms retention), /8 |
| tRFCab / tRFCpb | 234 / 102 cycles | 350 ns (8 Gb), /2.3 |
| Refresh credit limit | ±8 | DARP |
| Rows per REFpb | 8 | 64K rows / 8192 refreshes |
| tFAW / tRRD | 20 / 4 cycles | DDR3-1333 |
| tFAW / tRRD during refresh | 23 / 5 cycles | +13.8 % |
| tRCD / tRP / tCL / tCWL / tRAS | 9 / 9 / 9 / 7 / 24 | DDR3-1333 9-9-9 |
| tWR / tWTR / tRTP / tCCD / burst | 10 / 5 / 5 / 4 / 4 | DDR3-1333 |
| Queues / low / high watermark | 64 / 32 / 54 | high watermark is this design's |

The top (`dsarp_system`) exposes the values that the sensitivity studies
vary:

| Parameter | Meaning | Values of interest |
|---|---|---|
| `T_RFC_PB_P` | per-bank refresh time | 102 (8 Gb), 154 (16 Gb: 530 ns / 2.3), 258 (32 Gb: 890 ns / 2.3) |
| `T_REFI_PB_P` | per-bank refresh interval | 325 (32 ms), 650 (64 ms) |
| `NSA_P` | subarrays per bank | 2 … 64 (set `cfg_sa_bits` to log2) |
| `T_FAW_P`, `T_RRD_P` | activation window and spacing | 5/1 … 30/6. The stretched values are derived as ceil(×1.138). |

One subarray per bank is supported only by the controller (`cfg_sa_bits` = 0,
every access to a refreshing bank is held). The DRAM periphery needs at least
two subarrays.

## Where this design makes its own choices

The scheme fixes the mechanisms above. The following are this design's own
decisions:

* The 5-bit credit, as explained above.
* The high watermark of 54, and starting a drain when no reads are waiting.
* The LFSR-based random choice for idle-bank refresh, and lowest-index tie
  breaking for WARP.
* An idle-bank refresh happens only when no refresh is queued. The credit
  bound for it is +8.
* Due refreshes for a bank that already has one queued are postponed when the
  credit allows.
* No new ACT to a bank with a queued refresh.
* REFpb encoding on A10 / BA.
* The refresh counter order (local row first) and the even stepping of 8 rows
  over tRFCpb.
* The DDR3 timing values other than tFAW, tRRD, tREFI and tRFC, taken from the
  DDR3-1333 9-9-9 speed bin.
* Reads wait during a write drain. Rank-to-rank bus switching time is not
  modelled.
* Addresses arrive already split into channel, rank, bank, row and column.
  Address mapping is outside the design.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one:

* compares the module's outputs with an independent model;
* ends by printing `TB_RESULT checks=… failures=…`;
* has a watchdog that ends the run with a failure.

The testbenches:

| Testbench | What it checks |
|---|---|
| `tb_mc_pkg` | Derived constants recomputed from nanoseconds, the 2.3 ratio and the 13.8 % stretch; the row-to-subarray function for every subarray count. |
| `tb_request_queue` | Reference queue model: order, collapse, full and empty, per-bank counts. |
| `tb_writeback_mode_ctrl` | Watermark entry and exit rules. |
| `tb_ref_credit_counter` | Bounds, postpone and pull-in flags. |
| `tb_warp_bank_select` | Minimum search with the credit limit, against random inputs. |
| `tb_darp_refresh_ctrl` | A cycle-accurate reference model of the scheduler (schedule, postpone, mandatory, idle, WARP, credits). Run at short tREFIpb/tRFCpb. |
| `tb_sarp_subarray_tracker` | Counter stepping and wrap for all subarray counts. |
| `tb_rank_timing` | Directed cycle counts: tRCD, tRC, tRRD, tFAW, stretched tRRD, tRFCpb. |
| `tb_dram_cmd_decoder` | Random command-pin patterns. |
| `tb_dram_refresh_unit` | Row sequence and tRFCpb length, per bank. |
| `tb_sarp_bank_periph` | Muxes, gating, latch, and the rule that at most one subarray drives the global bitlines. |
| `tb_dram_rank_periph` | Pins in, subarray controls out. |
| `tb_memory_controller` | One channel at default size with random traffic. A protocol checker watches the bus: every timing rule, no ACT into a refreshing subarray, every refresh within the credit bounds, and every request answered once. |

The whole-system test is `tb_dsarp_system`:

* it runs the unmodified top (both channels, all default parameters) for
  30 000 cycles of random traffic;
* it checks the DRAM-side subarray controls against the refreshes seen on
  each bus;
* it requires each mechanism to occur at least once: postponed, scheduled,
  idle-bank and WARP refreshes, write drains, held requests, and accesses in
  parallel with a refresh in the same bank.

`tb_dsarp_workloads` runs the whole system in seven other configurations
side by side:

* 16 Gb chips (tRFCpb 154) and 32 Gb chips (tRFCpb 258);
* 32 Gb chips with 64 ms retention (tREFIpb 650);
* tFAW/tRRD of 5/1 and 30/6 cycles;
* 2 and 64 subarrays per bank.

Each configuration is driven by `dsarp_workload_run` with 30 000 cycles of
random traffic. That harness adds bus-level checks to those of
`tb_dsarp_system`:

* tRRD and tFAW, including the stretched values during refresh;
* no overlapping REFpb in a rank;
* every bank's refresh count stays within nine of its nominal share over the
  run, which is the retention guarantee.

Most of its run time is compiling the seven systems; the simulation itself
takes seconds.

Limits of this testing:

* With 8 subarrays, the refresh-subarray counter of a bank advances only
  every 1024 refreshes of that bank (about 2.7 million cycles), and wraps
  after 8192. So the full-system runs refresh only the first subarray of each bank. Counter
  advance and wrap are covered by the unit tests of the refresh unit and of
  the shadow tracker, at small row counts.
* The cell arrays and data path are not modelled. The tests check the control
  signals that would drive them, not stored data.
* All-bank refresh is decoded but not exercised.

## Simulating

All files are SystemVerilog-2017. `rtl/mc_pkg.sv` must come first. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/mc_pkg.sv tb/tb_dsarp_system.sv --top-module tb_dsarp_system -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_dsarp_system` with any other testbench name. `tb_dsarp_system`
takes about half a minute; the unit tests take seconds.

To try another configuration, override the top's parameters, for example
`dsarp_system #(.T_RFC_PB_P(258))` for 32 Gb chips. Timing values that are
not exposed on the top are constants in `mc_pkg`.
