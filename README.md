# Shared-PIM rank in SystemVerilog

This is a register-transfer model of the DRAM organisation from
"Shared-PIM: Enabling Concurrent Computation and Data Flow for Faster
Processing-in-DRAM". It covers the part of the design that moves data
between subarrays. Its aim is to let a processing-in-memory bank keep
computing in its subarrays while rows travel between them on a separate
bank-level bus.

## The idea

A processing-in-DRAM bank (the paper builds on pLUTo) computes inside its
subarrays. Often a result must move to another subarray of the same bank.
Without extra hardware, that copy uses the subarrays' own bitlines and
sense amplifiers. While the copy runs, the subarrays cannot compute.
Examples are RowClone between subarrays, which goes through the bank I/O,
and LISA, which chains neighbouring row buffers.

Shared-PIM adds a second path:

* **Shared rows.** Each subarray has two rows built from augmented cells.
  Each cell has a second access transistor. It is gated by a global
  wordline (GWL) and connects the cell to a bank-wide bus bitline (Bus_BL).
  So a shared row has two addresses: a local one, through the normal
  wordline and local bitline, and a global one, through the GWL and the bus.
* **BK-bus.** The bus bitlines run through the bank. Rows of bank sense
  amplifiers (BK-SAs) sit in four segments. The segments are joined through
  the complementary bus bitlines, so they behave as one sense amplifier.
* **Bus copy.** Raise the source shared row's GWL, so the BK-SAs sense it.
  About 4 ns later, raise the destination's GWL, and the BK-SAs overwrite it.
  Then precharge the bus. The paper gives 52.75 ns for this sequence:
  4 ns + tRAS + tRP.
* **Broadcast.** Raise up to four destination GWLs together.
* **Triple activation.** Raise three shared rows on a precharged bus. All
  three then hold their bitwise majority, as in AMBIT.
* **Copying ordinary rows.** RowClone the row into the subarray's shared
  row, bus-copy it, then RowClone it out at the destination. The paper
  counts three of these steps, 158.25 ns.
* **Controller support.** The memory controller keeps an 11-bit entry per
  subarray: activated, raised row, and designated for column commands.
  This is the MASA table. It must never open one address of a shared row
  while the other address is active.

The local sense amplifiers take no part in a bus copy. The subarrays can
keep computing on their ordinary rows while the bus is busy.

## Hierarchy

```
shared_pim_rank                 top: NCHIP chips x NBANK banks
 └ per bank b
    ├ shared_pim_controller     one per bank
    │  ├ transfer_engine        timed bus/RowClone/TRA/full-copy sequences
    │  └ masa_status_table      per-subarray state and conflict checks
    └ per chip c: shared_pim_bank   (the chips run in lock-step)
       ├ gwl_decoder            targets -> GWL enables, held until precharge
       ├ bk_bus                 BK-SA segments, sense / overwrite / majority
       └ pim_subarray x NSUB    rows, local sense amplifiers, RowClone
          └ shared_row_cells    the shared rows (local and bus write ports)
shared_pim_pkg                  command and operation types, default sizes
```

Default sizes come from the paper's configuration table:

* 4 chips
* 4 banks per chip
* 16 subarrays per bank
* 4 BK-bus segments
* 512 rows per subarray, of which 2 are shared
* 8 KB rows, so each chip holds 16384 bits of every row

The geometry gives 256 MB per rank. The same table also says 8 GB, which
does not match its own geometry. This model follows the geometry.

## Commands and timing

One clock is 1.25 ns, the DDR3-1600 command clock. Each bank takes at most
one command per clock from its controller:

| command | effect in one clock |
|---|---|
| ACT sa,row | closed subarray: the local sense amplifiers load the row. Open subarray: RowClone, the row is overwritten with the sense amplifiers' contents |
| PRE sa | close the subarray |
| WR sa | write a whole row into the open row (stands in for the compute engine's result) |
| RD sa | return the open row one clock later |
| GACT targets | raise 1–4 shared-row GWLs. A precharged bus senses them (1 row, or 3 rows for the majority). A sensed bus overwrites them |
| GPRE | lower all GWLs and precharge the bus |

The analog settling time is not in the array model. The transfer engine
keeps the timing with counters:

* T_GAP = 4 clocks. This is the paper's 4 ns, rounded up to whole clocks
  (5 ns).
* T_RAS = 28 clocks (35 ns).
* T_RP = 11 clocks (13.75 ns).

These give:

| sequence | clocks | ns |
|---|---|---|
| bus copy or broadcast: GACT, +4 GACT, +28 GPRE, +11 done | 43 | 53.75 (paper: 52.75) |
| RowClone step: ACT, ACT, PRE, same spacing | 43 | 53.75 |
| triple activation: GACT(3), +28 GPRE, +11 done | 39 | 48.75 |
| full copy of an ordinary row: RowClone, bus copy, RowClone | 129 | 161.25 (paper: 158.25) |

The 1 ns difference per step comes only from the rounding of T_GAP.

## Controller rules

Each bank's controller takes two kinds of request:

* **Local commands.** ACT, PRE, WR and RD from the compute side, each with a
  valid/ready handshake.
* **Transfer requests.** Bus copy, broadcast, triple activation, RowClone
  and full copy, each with a valid/ready handshake and a `done` pulse.

Every clock the controller checks both candidates against the status
table. The transfer engine has priority, so its command spacing stays exact.
A local command waits in these cases:

* it is a second ACT to an open subarray (RowClone only comes from the
  engine);
* it opens a shared row whose GWL is raised;
* it is a column command to a closed subarray;
* it targets the subarray that a RowClone step is holding;
* the engine issues in the same clock.

A bus activation waits while one of its target rows is open locally.

The controller reports four events:

* local conflicts
* transfer conflicts
* arbitration stalls
* overlap, meaning a local command issued while a GWL is raised. This is
  the concurrency the design exists for.

## What follows the paper and what is this model's choice

These follow the paper:

* the shared rows with two addresses
* the segmented BK-bus joined through the complementary bitlines
* the sense-then-overwrite copy with the 4 ns offset
* broadcast to at most four rows
* triple activation on the bus
* the three-step copy of ordinary rows
* the 11-bit MASA entry and the shared-row activation rule
* the sizes listed above

These are this model's own choices:

* cells held as registers, with one bus activation per clock
* shared rows at the two highest row addresses
* subarray s on segment s / (NSUB / NSEG)
* the command encoding
* row-wide WR and RD in place of the pLUTo engine and the column path
* transfer priority over local commands
* the RowClone lock
* one command slot per bank
* one status table per bank, shared by the lock-stepped chips (the paper
  counts one entry per chip-subarray: 256 × 11 bits = 352 bytes)
* asynchronous reset of the control state

The paper's numbers disagree with each other in three places. This model
resolves them as follows:

* **Capacity.** 8 GB against a geometry that gives 256 MB. The geometry was
  kept.
* **Clock.** 533 MHz is quoted for DDR3-1600. The 52.75 ns copy latency
  needs the 800 MHz DDR3-1600 clock (tRP = 11 clocks = 13.75 ns), so
  1.25 ns clocks were used.
* **Row width.** Two extra transistors per bitline are said to come to
  "16K per subarray", which implies 8192 bitlines. But an 8 KB rank row
  over four chips is 16384 bits per chip. The 8 KB row was kept.

The array is modelled row by row, in registers and arrays that a simulator
handles well. At the default size one bank-chip holds 16 × 512 × 16384
bits. The design is meant as an executable model of the mechanism and its
command timing, not as a netlist of a DRAM die. Synthesis at that size is
slow and gives a register count, not a DRAM.

These are not built:

* the pLUTo lookup-table compute
* the global row buffers and bank I/O
* the analog cell and sense-amplifier behaviour
* the host memory controller

## Simulation

Every testbench checks its own results and prints
`TB_RESULT checks=<n> failures=<n>`. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/shared_pim_pkg.sv tb/tb_shared_pim_rank.sv \
    --top-module tb_shared_pim_rank -o sim
./obj_dir/sim
```

| testbench | what it exercises |
|---|---|
| tb_shared_row_cells | random local and bus writes against a reference copy |
| tb_pim_subarray | ACT, RowClone, WR, RD, PRE on a small array; bus writes while a row is open |
| tb_gwl_decoder | one-hot GWL decode, hold until precharge, random |
| tb_bk_bus | copy, broadcast and majority on random rows against a reference |
| tb_shared_pim_bank | the bank's command set and the bus path, end to end |
| tb_masa_status_table | random commands against a reference table and conflict rules |
| tb_transfer_engine | command spacing of every operation, grant back-pressure |
| tb_shared_pim_controller | arbitration, conflicts, RowClone lock |
| tb_shared_pim_rank | reduced-size rank. Bank 0 runs a matrix-multiply pipeline that streams partial products between subarrays while computing. Bank 1 runs every transfer kind and forced conflicts. Fails if any mechanism never occurred |
| tb_ntt_butterfly | reduced-size rank. The NTT butterfly on two subarrays: each computes its half, the two intermediate rows cross on the bus in opposite directions through the two shared rows, and each side finishes with a sum or difference modulo 3329 |
| tb_shared_pim_rank_full | default (paper-size) rank. An 8 KB full copy across the bank and a four-way broadcast, with latency checks |
