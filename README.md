# Subarray-level parallelism (SALP-1, SALP-2, MASA) in RTL

When two memory requests go to the same DRAM bank but to different rows, a
conventional controller serves them strictly one after the other: activate
the row, read or write it, precharge, and only then start on the next row.
Yet a DRAM bank is not one monolithic array. It is built from many
*subarrays* (typically 64, of 512 rows each, in a 32k-row bank), each with its
own local row buffer. They share only a global row-address decoder and latch
and a global row buffer on the global bitlines. Activation and precharge
happen almost entirely inside one subarray. That makes it possible to overlap
the work for requests that go to different subarrays of the same bank.

This RTL implements the three mechanisms of subarray-level parallelism
published by Kim et al. (ISCA 2012). It covers both the controller side and
the small amount of digital logic they add to a DRAM bank:

| mode | DRAM change | what overlaps |
|---|---|---|
| SALP-1 | none | the PRECHARGE of one subarray with the ACTIVATE of another. tRP is only enforced within a subarray. |
| SALP-2 | a row-address latch per subarray | the ACTIVATE of one subarray with the write recovery of another ("activate before precharge"). Two subarrays may be open at once. |
| MASA | SALP-2 plus one "designated" bit per subarray and a new command, SA_SEL | any number of subarrays stay open. SA_SEL picks the one whose row buffer serves the next READ/WRITE, so several rows per bank stay cached. |

MASA is the default (`MODE = MODE_MASA`). The default geometry is 8 banks of
32768 rows each, with 8 subarrays of 4096 rows per bank; 8 exposed subarrays
is the evaluated configuration. Each bank row has 128 columns of 64 bytes.

## The bank side: latches, designation and the global bitlines

`masa_bank` is the digital part of one bank. The top `log2(SUBARRAYS)` bits of
the bank row address select the subarray, so rows 0-4095 are in subarray 0
and rows 4096-8191 in subarray 1. For each subarray, `subarray_latch` holds:

* `active`: the wordline is raised and the local row buffer holds a row;
* `row`: the latched local row address (SALP-2 and MASA);
* `designated`: MASA only. It is set by SA_SEL to this subarray and cleared
  by SA_SEL to another subarray or by PRECHARGE of this one.

On a READ or WRITE the bank connects local row buffers to the global
bitlines. The `gbl_drive` output, one bit per subarray, says which:

* SALP-1 and SALP-2: every activated subarray. A column command is therefore
  legal only with exactly one subarray open; with two, their row buffers
  would short each other on the global bitlines.
* MASA: only the subarray that is both activated and designated.

In SALP-1 the bank is an unmodified one. All subarrays see one global
row-address latch, at most one subarray is open, and PRECHARGE closes the
bank. In SALP-2 and MASA, PRECHARGE names the subarray it closes. Commands
the mode does not allow raise `act_err`, `col_err` or `sel_err`, and they
also fail assertions.

## The controller side

`salp_ctrl` contains three parts.

**`subarray_status_table`** is the controller's copy of the bank latches. Per
subarray it holds an open bit and the open row; per bank it holds the
designated subarray and a count of open subarrays. For 8 banks this is 108
bytes.

**`salp_timing`** tracks timing constraints with down-counters. The essential
point is *where* each constraint is tracked:

* per subarray: tRP (PRE to ACT), tRCD (ACT to column), tRAS (ACT to PRE),
  write recovery (tCWL + tBL + tWR, from WRITE to PRE) and tRTP. Because tRP
  is per subarray, an ACTIVATE to subarray B may follow the PRECHARGE of
  subarray A in the next cycle (SALP-1). Because write recovery is per
  subarray, B can be activated while A is still recovering (SALP-2).
* per rank: tRRD (ACT to ACT), tCCD (between column commands), and the
  read-to-write and write-to-read turnarounds of the data bus;
* per bank: tSA, from SA_SEL to the next column command.

Default values (memory clocks, a DDR3-1066-class part): tRCD = tRP = tCL = 8,
tRAS = 20, tWR = 8, tRTP = 4, tCWL = 6, tBL = 4, tCCD = 4, tRRD = 4, tWTR = 4,
bus turnaround 2, tSA = 1. All are parameters.

**`salp_scheduler`** is the hardest part to follow. Requests wait in an
8-entry queue kept in arrival order. In every cycle each entry derives the one
command it needs next. It looks at its subarray *s* in bank *b*:

1. **Row open in *s* (hit).**
   - MASA: issue SA_SEL *s* unless *s* is already designated; then
     READ/WRITE.
   - SALP-1/2: if another subarray of the bank is open, precharge it first;
     then READ/WRITE.
2. **Another row is open in *s* (conflict).** PRECHARGE *s*.
3. **Subarray *s* is closed.**
   - MASA: ACTIVATE.
   - SALP-2: ACTIVATE if fewer than two subarrays of the bank are open and no
     queued request still hits in the open one. Otherwise precharge the open
     one. (New hits to the open row can keep delaying this ACTIVATE; there is
     no age limit.)
   - SALP-1: precharge the open subarray, then ACTIVATE. The ACTIVATE does
     not wait for tRP, because it goes to a different subarray.

A command is *legal* if its timing counters allow it. Two more rules hold
commands back:

* A PRECHARGE or SA_SEL that would take a row away from an *older* request
  that hits in it is held. Younger requests never undo older ones.
* A column command waits while an older request to the same column is
  queued. Reads and writes to one address therefore complete in order.

Of all entries with a legal command, the oldest issues it, one command per
cycle. An entry leaves the queue when its READ or WRITE issues. The policy is
open-row: rows stay open until a conflict closes them. Because younger
requests can issue ACTIVATEs while older ones wait on timing, activations
overlap whenever the mode allows it.

### Worked example

Take the four requests of the mechanism's timeline figures, all in bank 0:

1. WRITE row 0 (subarray 0)
2. WRITE row 4096 (subarray 1)
3. READ row 0
4. READ row 4096

MASA at default timing issues them as follows, where *A* is the first
ACTIVATE:

| cycle | command |
|---|---|
| A | ACT subarray 0 |
| A+1 | SA_SEL subarray 0 |
| A+4 | ACT subarray 1 (tRRD) |
| A+8 | WRITE subarray 0 (tRCD) |
| A+9 | SA_SEL subarray 1 |
| A+12 | WRITE subarray 1 |
| A+13 | SA_SEL subarray 0 |
| A+26 | READ subarray 0 (write-to-read turnaround, 14) |
| A+27 | SA_SEL subarray 1 |
| A+30 | READ subarray 1 (tCCD) |
| A+38 | last data returns |

There is no second ACTIVATE, because both rows stay open. The end-to-end test
checks this count: 41 cycles from the first request, with A 3 cycles after
it. SALP-1 needs 60 cycles and SALP-2 56 on the same sequence, the same
order as in the published timelines.

## Interfaces

`salp_top` (MASA by default) joins `salp_ctrl` with `BANKS` instances of
`masa_bank`.

* **Requests**: `req_valid`/`req_ready` handshake. Each request carries
  `req_we`, `req_bank`, `req_row` (15-bit bank row), `req_col` (7 bits), an
  8-bit `req_id` and 512 bits of `req_wdata`. `req_ready` is low while the
  queue is full.
* **Responses**: `wr_done`/`wr_done_id` in the cycle a WRITE issues.
  `rd_resp`/`rd_resp_id`/`rd_resp_data` come tCL cycles after the READ.
* **DRAM core** (analog, not in this RTL):
  - outputs per subarray of every bank: `arr_active`, `arr_row`,
    `arr_designated` and, during a column command, `arr_gbl_drive`;
  - `arr_col`, `arr_we` and `arr_wdata`;
  - inputs: the global row buffer returns `arr_rvalid`/`arr_rdata` tCL cycles
    after a READ. A whole line arrives in one cycle; the burst is not
    modelled beat by beat.
* **Observation**: `bus_cmd`/`bus_bank`/`bus_sa` (the command bus),
  `q_count` and `bank_err`.

Commands are `cmd_e` in `salp_pkg`: NOP, ACT, PRE, SA_SEL, RD, WR. A command
is chosen combinationally from registered state in its cycle. It updates the
bank latches, the status table and the timers on the same clock edge. Reset
is asynchronous and active low.

## What is this design's own

The published description of the mechanisms leaves the following open. These
are choices made here:

* **Timing values.** None are given; the DDR3 values above are used. The
  extra timing constraint that SALP-1 may need is referred to but not
  described, so it is not implemented.
* **Scheduler.** The queue, the oldest-legal-first policy, the hold-back
  rules and the open-row policy are this design's own. The evaluated
  scheduler (FR-FCFS-like, "overlapping as many activations as possible") is
  not specified in detail. Because the policy is open-row, the example's
  reads can hit rows the writes left open. The published timelines instead
  show the rows activated again.
* **Designation.** ACTIVATE does not designate a subarray; SA_SEL always
  precedes a column command to a non-designated subarray. PRECHARGE clears
  the designation. This follows the MASA timeline, which draws a select step
  before each first column command.
* **Scope.** No refresh, no tFAW, no power-down, one rank on one channel, no
  multi-core or application-aware scheduling. Address mapping is outside the
  design: requests arrive with bank, row and column already decoded.
* The error flags and assertions in the bank logic.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_subarray_latch`, `tb_masa_bank`: random legal command streams,
  compared every cycle with a reference model, in all three modes.
* `tb_subarray_status_table`: random commands to a MASA table and a SALP-1
  table.
* `tb_salp_timing`: cycle counts of every constraint. This includes an ACT to
  another subarray one cycle after a PRE, and the full tRP on the same
  subarray.
* `tb_salp_scheduler`: directed cases for each command choice and each
  hold-back rule.
* `tb_salp_ctrl`: 1500 random requests. An independent bus monitor checks
  every command against the protocol and the timing, and a data model
  checks every read against a reference memory.
* `tb_salp_top`: the full design at default parameters, with the
  behavioural DRAM core `tb/dram_array_model.sv`. It runs the four-request
  example (checked to 41 cycles) and then 1500 random requests with data
  checks. It requires each mechanism to occur at least once: activating
  while another subarray is open, three or more subarrays open, SA_SEL, row
  hits, conflicts, and queue-full stalls.
* `tb_salp_modes`: the same traffic in SALP-1, SALP-2 and MASA
  (`tb/salp_tb_harness.sv`). It checks that:
  - SALP-1 activates within tRP of a precharge but never opens two
    subarrays;
  - SALP-2 activates before precharging but never opens three;
  - MASA opens three or more, issues SA_SEL and needs the fewest ACTIVATEs;
  - the example finishes in the order MASA < SALP-2 < SALP-1.

Run one with plain Verilator from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/salp_pkg.sv \
  tb/tb_salp_top.sv --top-module tb_salp_top && ./obj_dir/Vtb_salp_top
```

Every benchmark finishes in well under a second of simulation time.

## Changing it

* `MODE`, `BANKS`, `SUBARRAYS` (a power of two), `ROWS`, `COLS`, `DATA_W`,
  `QDEPTH`, `ID_W` and all timing values are parameters of `salp_top`.
* Counters are 6 bits wide. Timing values must stay below 64 cycles.
* `T_CL` must be at least 2.
