# DReAM: run-time re-arrangement of the DRAM address mapping (RTL)

A DRAM controller has to decide which physical-address bits select the bank, the
row and the column. That choice is normally fixed at design time. Whether it is a
good one depends on the workload. When an address bit that feeds the row index
changes often between consecutive requests, consecutive requests keep hitting
different rows of the same bank. Each such *page conflict* costs a precharge and
an activate.

DReAM (Ghasempour, Garside, Jaleel and Luján) measures, while the system runs,
how often each address bit changes from one request to the next. It then
derives a mapping that sends the rarely changing bits to the row index and the
frequently changing ones to the bank index. If that mapping is clearly better
than the predefined one for several consecutive measurement windows, the
controller switches to it. Rows then move to their new locations one by one,
the first time they are touched. The move is a row swap done inside the DRAM.
If the new mapping stops paying off, every moved row is swapped back.

This repository is a SystemVerilog implementation of that unit. It is
synthesizable, and its parameter defaults are the evaluated system: a 4 GB,
one-channel, one-rank DRAM with 8 banks of 65,536 rows and 64-byte cache lines.
The DRAM itself, with its in-DRAM row-copy support, is not part of the RTL. The
testbenches model it behaviourally.

## 1. Addresses, frames and locations

A 32-bit physical byte address is laid out as follows (most significant bits
first). Rank and channel fields are empty with one rank and one channel.

| field        | bits   | width | note                                   |
|--------------|--------|-------|----------------------------------------|
| row          | 31..16 | 16    | 65,536 rows per bank                    |
| bank         | 15..13 | 3     | 8 banks                                 |
| column       | 12..6  | 7     | 128 cache lines per row (4 GB / 8 / 65,536 / 64 B) |
| block offset | 5..0   | 6     | 64-byte line, never monitored           |

The column bits are never re-arranged, so no data ever moves at cache-line
granularity. The only bits that can move are the 19 bits above the column
field. This design calls them the **row frame**: the identity of a row's worth
of data. A **location** is the `{row, bank}` pair where a frame is stored, also
19 bits, with the bank in the low 3 bits.

A mapping is encoded as a 19-bit **mask** with exactly 3 bits set:

* the frame bits at the set positions, in ascending order, form the raw bank
  index;
* the frame bits at the clear positions, in ascending order, form the row index;
* the bank index is then XORed with the 3 lowest row bits. This is
  permutation-based page interleaving: rows that would collide in one bank
  are spread over the banks.

Mask `0x00007` is the predefined mapping: row = frame[18:3] and
bank = frame[2:0] ^ frame[5:3]. An estimated mapping reorders the same bits and
keeps the same XOR. Every mapping is a bijection. `addr_mapper` computes the
reverse direction by undoing the XOR (the row bits are unchanged, so it is its
own inverse) and scattering the bits back.

Notation used below: `P(f)` is the location of frame `f` under the predefined
mapping (PAMS). `E(f)` is its location under the estimated mapping (EAMS).

## 2. Watching the request stream (`bit_change_monitor`)

A history register holds the line address (bits 31..6, 26 bits) of the last
accepted request. Each new request is XORed with it. Every bit that differs
increments that bit's 18-bit counter. After `WINDOW` = 250,000 requests the 26
counts are copied out (`win_cnt`), `win_done` pulses for one cycle, and the
counters start again from zero. One request can add at most one to a counter,
so 18 bits cannot overflow within a window. The counters still saturate,
should `WINDOW` be raised. The 26 counters take 58.5 bytes.

With `WINDOW_IN_CYCLES = 1` the window is `WINDOW` clock cycles instead of
`WINDOW` requests. Only requests still update the history and the counters.
Choose the cycle count so that no more than 2^18 - 1 requests fit in one window.

The counts form the workload's signature. Typical signatures rise steeply
towards the low bits (sequential lines within a row). A workload is
*mapping-sensitive* when a bit that feeds the row index changes more than a bit
outside it.

## 3. Choosing and adopting a mapping

**Estimate (`mapping_estimator`).** On `win_done` the 19 frame-bit counts are
snapshotted and scanned, one per cycle. The scan keeps the three largest counts
in a small sorted list. Those three bits become the candidate's bank bits, and
on a tie the lower bit index wins, so the predefined bank bits survive ties.
The block also scores three masks. The cost of a mask is the sum of the counts
of the bits it sends to the row index: how often the row index would have
changed between consecutive requests. The three costs are `cost_base` for the
predefined mask, `cost_cand` for the candidate and `cost_act` for the mask in
use. The result is ready 20 cycles after `win_done`.

**Decide (`mapping_decision`).** The decision is a three-state controller:

```
           candidate beats base by > thr% for N consecutive windows (same mask)
  MS_BASE ───────────────────────────────────────────────────────────► MS_DREAM
     ▲                                                                    │
     │ rollback_done          active cost >= base cost for N windows      │
     └──────────────── MS_ROLLBACK ◄──────────────────────────────────────┘
```

The threshold test is `(cost_base − cost_cand)·100 > thr·cost_base`, with
`cfg_thr_pct` = 7 in the published experiments. `N` is `cfg_consistency`.
The paper calls it the consistency threshold and gives no value; the
testbenches use 2. A candidate only counts toward N if it equals the previous
window's candidate. A new mapping can be adopted only after a rollback has
completed. Until then, the rows moved under the old mapping would be
stranded.

## 4. Moving rows while the system runs (`migration_controller`, `status_table`)

This is the part that needs the most care. After a switch, data still sits
where the predefined mapping put it. Rows are moved lazily, on first access,
so the controller must always know where any frame currently is. It keeps two
bits for every one of the 2^19 locations. Each table is a `status_table`: a
single-port RAM with a registered read, which clears itself after reset.

* `MT[L]` (migration bit): the frame originally at `L`, `P⁻¹(L)`, has moved to
  its estimated location `E(P⁻¹(L))`.
* `ST[L]` (swap bit): whatever was at `L` was pushed out by a swap. It now sits
  at `P(E⁻¹(L))`, the original location of the frame that moved into `L`.

**Lookup of frame `f`.** Let `L0 = P(f)`; MT[L0] and ST[L0] are read together.

| MT[L0] | ST[L0] | frame is at |
|--------|--------|-------------|
| 1      | x      | `E(f)` |
| 0      | 0      | `L0` |
| 0      | 1      | follow `X ← P(E⁻¹(X))` from `L0` until `ST[X] = 0`; it is at that `X` |

The last row is the paper's "reverse address mapping" search. Each step costs
one table read.

**Migration.** The request is first handed to the DRAM scheduler at the
location just found. Then, if the estimated mapping is on, the row moves to
`D = E(f)`, but only when all of these hold:

1. the row still sits at `L0` (MT[L0] = ST[L0] = 0) and `D ≠ L0`;
2. `D` still holds its own original row (MT[D] = ST[D] = 0);
3. `D` is in a different bank from `L0`. A move within one bank cannot reduce
   conflicts, so it is skipped.

The destination is always treated as occupied, so a migration is a swap: `f`
goes to `D` and `D`'s row goes to `L0`. Then MT[L0] and ST[D] are set.

*Example.* Frame `f` is at `L0 = P(f)` and `E(f) = D`. Before the swap, `D`
holds `g = P⁻¹(D)`. After it, MT[L0] = 1, so `f` is looked up at `E(f) = D`. A
later request for `g` reads ST[D] = 1 and steps to `P(E⁻¹(D)) = P(f) = L0`. ST[L0]
is 0 there, so `g` is served at `L0`.

**Why rows that were swapped out are not moved again.** The paper also
migrates a row that was swapped out, on its next access. Conditions 1 and 2
forbid that here. Every migration then pairs two locations that nothing else
has touched, and the pairs never overlap. Without the restriction, swaps
would chain, and undoing them would need their order. As a result, a
swapped-out row stays at its swapped location and is found by the chain search
(one step, given the restriction) until the next rollback. The chain search
itself is general and would follow longer chains.

**Rollback.** While `rollback_req` is high, requests are held off. The
controller scans all locations. Where MT[L] = 1, it swaps `L` with
`E(P⁻¹(L))` again and clears both bits. Because the pairs are disjoint, the
order does not matter. At the default size the scan takes about 1.05 M cycles
plus 131 cycles per migrated row. `rollback_done` then pulses and the decision
logic returns to the predefined mapping.

**Cost per request.** A request takes 3 cycles of lookup, plus 2 per chain
step, plus the service handshake. A migration adds 3 cycles of destination
check and the relocation. Requests are handled one at a time.

## 5. In-DRAM relocation (`migration_sequencer`)

The paper relies on two DRAM features proposed elsewhere. One is several
activated subarrays per bank, with a global row buffer per bank. The other is
copying rows between banks over the device's internal 64-bit bus. A 4 Kbit row
therefore moves in 64 beats. A swap between location A (bank a) and B (bank b)
is issued as:

| cycles | `dcmd`          | meaning |
|--------|-----------------|---------|
| 1      | `DC_ACT_AB`     | activate both rows into their local row buffers |
| 64     | `DC_RD_A_WR_B`  | bank a reads, bank b writes: row A into b's global row buffer (`dcmd_beat` 0..63) |
| 64     | `DC_RD_B_WR_A`  | row B into a's global row buffer (swap only) |
| 1      | `DC_CONNECT`    | each global row buffer is written to its new row |

That is 130 command cycles per swap, with `mig_done` one cycle later. The paper
counts 128 memory cycles of transfer. The command names and encoding are this
design's own. A DRAM that implements them is outside this RTL.

## 6. Offline calibration (`roi_calibrator`)

For machines that run one kind of job for days, the paper also proposes an
offline variant. Over a region of interest (ROI), window counts are added into
40-bit totals. At `roi_end` a second estimator turns the totals into
`calib_mask`. Booting with that mask as the predefined mapping
(`cfg_base_mask`) applies it with no migration at all, since memory is reloaded
after a reboot.

## 7. Top level (`dream_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `cfg_base_mask` | in | 19 | predefined mapping (`'h7`, or a calibrated mask); constant while running |
| `cfg_thr_pct` | in | 7 | adoption threshold in percent (7) |
| `cfg_consistency` | in | 4 | consecutive windows needed (0 acts as 1) |
| `roi_active`, `roi_end` | in | 1 | offline calibration window and its end |
| `calib_valid`, `calib_mask` | out | 1, 19 | calibrated mapping |
| `req_valid`/`req_ready` | in/out | 1 | request handshake |
| `req_addr`, `req_we` | in | 32, 1 | physical byte address, write flag |
| `svc_valid`/`svc_ready` | out/in | 1 | translated request handshake |
| `svc_bank`, `svc_row`, `svc_col`, `svc_we` | out | 3, 16, 7, 1 | DRAM coordinates |
| `dcmd`, `dcmd_a`, `dcmd_b`, `dcmd_beat` | out | 3, 19, 19, 6 | in-DRAM relocation commands |
| `map_state`, `act_mask` | out | 2, 19 | controller state, estimated mapping |
| `win_done`, `ev_*` | out | 1 | window end and event pulses (migration, same-bank skip, taken destination, swapped-row service, rollback swap) |

`req_ready` is low for 2^19 cycles after reset while the tables clear, and
during relocations and rollback sweeps. Parameters: `ROW_W` (16), `BANK_W` (3),
`COL_W` (7), `OFFSET_W` (6), `CNT_W` (18), `WINDOW` (250000), `BEATS` (64) and
`PERMUTE` (1). The shared constants and enums are in `dream_pkg`.

## 8. What follows the paper and what does not

Taken from the paper:

* the counter-per-bit monitor, its 18-bit counters and its 250K-request window;
* the rule that the most-changing non-column bits go to the bank and the
  least-changing to the row, with columns fixed;
* the programmable threshold and the consecutive-window rule;
* rollback, and that a third mapping waits for rollback to finish;
* the migration and swap bits per row, on-demand migration, and swapping
  instead of chained moves;
* the reverse-mapping search for swapped rows;
* inter-bank-only relocation, with the six transfer steps and 64 beats per row;
* the offline ROI variant;
* the geometry: 4 GB, 8 banks, 65,536 rows, 64 B lines.

Choices made here, where the paper is silent or unclear:

* The mask encoding, and the ascending bit order within the bank and row
  fields.
* The bank XOR uses the lowest three row bits. The permutation scheme's figure
  gives no bit positions.
* The cost measure: the sum of the row-bit counts.
* The tie rule, and the demand that consecutive windows agree on one candidate.
* The rollback condition: the active mapping's cost is no better than the
  predefined one's for N windows.
* Windows are counted in requests by default. Counting cycles is a
  parameter option.
* Not re-migrating swapped-out rows, so that rollback pairs are independent.
* Rollback is a stalling sweep rather than on demand.
* One request in flight; serve first, then migrate.
* The command encoding, the one-cycle activate and connect steps, and the
  40-bit ROI totals.
* The status tables sit in the controller. The paper allows that or metadata
  in the DRAM.

Not built:

* the DRAM device with its subarray and row-copy extensions;
* the processor and the FR-FCFS command scheduler that sit behind `svc_*`;
* the firmware option that selects the boot mapping, represented by
  `cfg_base_mask`.

## 9. Verification and simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_bit_change_monitor` | per-bit counts against a reference on random traffic; window timing; the 5-request example; a second instance with a cycle-counted window |
| `tb_mapping_estimator` | top-3 selection, ties, all three costs, latency, a hot row bit moving to the bank |
| `tb_mapping_decision` | 7 % vs 8 %, consistency counting and restarts, rollback hold, re-adoption |
| `tb_addr_mapper` | the predefined formula, random masks against a reference, inverse round trip, one-to-one |
| `tb_status_table` | self-clear length and result, random read/write against a model |
| `tb_migration_sequencer` | the exact command stream, beat numbering, 130/66-cycle length |
| `tb_migration_controller` | every service lands on the right row (DRAM tag model), all migration cases occur, rollback restores everything; 8 banks × 32 rows |
| `tb_roi_calibrator` | ROI totals, mask and costs, clearing, latency |
| `tb_dream_top` | end to end at 8 banks × 32 rows with 64-request windows: streaming (no switch), hot row bit, line-address bit 14, as in a libquantum-like signature (adoption, migrations, plus one directed request for a swapped-out row and one for a row whose destination is taken), pattern change (rollback), reboot with the calibrated mapping; every mechanism must occur |
| `tb_dream_top_full` | the same scenario (without the reboot) at full default size: 2^19 rows, 250K-request windows, about 2.1 M requests; about 30 s in Verilator |

`tb_dram_model` is the behavioural DRAM used by the last three. It keeps a
frame tag per location instead of data, and executes the relocation commands.
It counts any malformed sequence as an error. `tb_dream_top` and
`tb_dream_top_full` are generated from one template and differ only in size.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dream_pkg.sv tb/tb_dream_top.sv --top-module tb_dream_top
./obj_dir/Vtb_dream_top
```

Change the sizes through the parameters of `dream_top`. The XOR needs
`ROW_W ≥ BANK_W`, and the status tables grow as 2^(ROW_W+BANK_W) bits each.
