# RowClone: bulk copy and initialization inside DRAM — RTL model

Copying or zeroing a page normally drags every cache line across the memory
channel twice: once into the processor and once back out. No computation is
involved, so the traffic is pure overhead. RowClone removes it by using
structures a DRAM chip already has:

* **Fast Parallel Mode (FPM)** copies a whole row to another row of the *same
  subarray*. Activating the source row latches it in the subarray's row buffer
  (its sense amplifiers). Activating the destination row right afterwards, without
  a precharge in between, lets the row buffer overwrite the destination cells.
  The cost is two ACTIVATEs and one PRECHARGE, and no data leaves the subarray.
* **Pipelined Serial Mode (PSM)** copies between *different banks*. A new
  `TRANSFER` command reads one column (cache line) from an open row in the
  source bank. It puts the line on the chip's shared internal bus and writes it
  into an open row of the destination bank, all in one step. Nothing goes out on
  the memory channel.
* **Bulk initialization** uses the same two modes. One row in every subarray is
  reserved and kept at zero, so any row can be zeroed by FPM from its own
  subarray's zero row. To fill rows with any other value, the first row is written
  over the channel and then copied to the others.

This repository holds synthesizable SystemVerilog for a RowClone-capable DRAM
chip and for the memory controller that drives it. The controller picks FPM or
PSM for each row and issues the command sequences under DRAM timing.

## Organisation and addressing

```
rowclone_system
 ├─ rc_controller            request port → DRAM command stream (memory channel)
 └─ rc_dram_chip
     ├─ rc_chip_io           channel registers, read return, line counters
     ├─ rc_internal_bus      one line wide, shared by all banks and the chip I/O
     └─ rc_bank × BANKS      one open subarray at a time; bank I/O mux
         └─ rc_subarray × SUBARRAYS   ROWS_PER_SA rows of cells + row buffer
```

Default geometry (`rc_pkg`): 8 banks, 4 subarrays per bank and 16 rows per
subarray. A row is 64 columns, and each column is one 64-byte cache line, so a
row holds 4 KB. That is one OS page, and the unit the latency comparison below
uses. The whole chip holds 2 MB, which is small enough to simulate at full size.
The single chip stands for a whole rank: one column access moves a whole line.

A row address is `{bank, subarray, row-in-subarray}`. Inside a bank the row
field is `{subarray, row-in-subarray}`. Some rows are reserved, and bulk
requests must not cover them:

| Reserved row | Where | Purpose |
|---|---|---|
| zero row | row 0 of every subarray | source for FPM zeroing; written with zeros by the controller after reset |
| staging row | last row of the last subarray of every bank | intermediate row for intra-bank PSM of the *previous* bank |

## Command set and the chip

`rc_pkg::dram_cmd_e` lists the channel commands. Each command carries `bank`,
`row`, `col`, and for `TRANSFER` also `dst_bank` and `dst_col`.

| Command | Effect in the chip |
|---|---|
| `ACT bank,row` | bank closed: sense the row into the subarray's row buffer. Bank open on the same subarray: **FPM**, the row buffer is written into the new row |
| `PRE bank` | close the bank |
| `RD bank,col` | bank drives the internal bus; the chip I/O returns the line on the channel |
| `WR bank,col` | chip I/O drives the bus with channel data; the bank writes it into its row buffer and cells |
| `TRANSFER bank,col → dst_bank,dst_col` | **PSM**: source bank drives the bus and the destination bank writes it, in the same cycle |

The chip executes a command one cycle after it appears on the channel (the
chip I/O register stage). Read data returns two cycles after the `RD`. The
chip checks only structural rules, using assertions: column commands need an
open bank, `TRANSFER` needs two different open banks, and an `ACT` to another
subarray of an open bank is illegal. All analog timing (tRCD, tRAS, tRP, …) is
enforced by the controller. The chip also counts lines that crossed the channel
(`ch_lines_read`, `ch_lines_written`), FPM copies (`fpm_copies`) and TRANSFERs
(`transfers`). These counters show directly that bulk copies cost no channel
bandwidth.

How FPM is modelled: in silicon the second wordline connects the destination
cells to sense amplifiers that are already latched, and the amplifiers drive
the cells to the latched values. In `rc_subarray` this becomes a whole-row write
of the registered row buffer into the cell array. The model writes to the cells
after an FPM only for the most recently activated row. The controller always
precharges right after FPM, so this difference never shows.

## The controller: choosing a mechanism and scheduling it

`rc_controller` accepts one request at a time on a valid/ready port:

| `req_op` | Fields used | Meaning |
|---|---|---|
| `OP_COPY` | `req_src`, `req_dst`, `req_n_rows` | copy rows `src+i → dst+i` |
| `OP_INIT` | `req_dst`, `req_n_rows`, `req_data` | set every line of the rows to `req_data` |
| `OP_WRITE` | `req_src` (row), `req_col`, `req_data` | ordinary line write |
| `OP_READ` | `req_src` (row), `req_col` | ordinary line read (`resp_data`) |

`resp_valid` pulses when the request is complete. After reset the controller
first writes zeros into every zero row (`BANKS × SUBARRAYS` rows, about 8,800
cycles at the defaults). `init_done` rises when it has finished, and
`req_ready` stays low until then.

For each row of a bulk request, the controller chooses the mechanism from where
the source and destination are:

| Source vs destination | Mechanism | Command schedule (gaps in cycles) | Row time |
|---|---|---|---|
| same bank, same subarray | FPM | `ACT src` –tRAS– `ACT dst` –tRAS– `PRE` –tRP– | 2·tRAS+tRP = 47 |
| different banks | inter-bank PSM | `ACT src` –tRRD– `ACT dst` –tRCD– 64× `TRANSFER` every tCCD –tWR– `PRE src` –1– `PRE dst` –tRP– | 279 |
| same bank, other subarray | intra-bank PSM | inter-bank PSM into the staging row of the next bank, then from there to the destination | 558 |
| zeroing | FPM | source is the zero row of the destination's subarray | 47 |
| init with a value, first row | channel fill | `ACT` –tRCD– 64× `WR` every tCCD –tWR– `PRE` –tRP– | 274 |

Each row also costs two controller cycles, one to plan it and one for
bookkeeping. A bulk request of *n* rows takes `1 + Σ(row time + 2)` cycles from
acceptance to `resp_valid`. A single ordinary read or write uses a closed-page
sequence (`ACT`, `RD`/`WR`, `PRE`).

### Timing values and how they compare

The timing parameters are DDR3-1066-like values chosen for this model:
tCK = 1.875 ns, tRCD = tRP = 7, tRAS = 20, tRRD = tCCD = 4, tWR = 8, tCL = 7 and
tRTP = 4 cycles. They are module parameters of `rc_controller` with their
defaults in `rc_pkg`. With them the end-to-end test measures these latencies
for a 4 KB operation:

| 4 KB operation | This RTL | Published RowClone estimate |
|---|---|---|
| FPM copy | 50 cycles = 94 ns | 90 ns |
| inter-bank PSM copy | 282 cycles = 529 ns | 540 ns |
| intra-bank PSM copy | 561 cycles = 1052 ns | 1050 ns |
| FPM zeroing | 50 cycles = 94 ns | 90 ns |

These numbers support the schedules above, including the reading of
intra-bank PSM as two PSM copies. They say nothing about energy, which this
RTL does not model.

## What is this design's own, and what is not here

The following follow the RowClone description: the bank / subarray / row-buffer /
shared-bus / chip-I/O organisation; FPM as back-to-back ACTIVATE within a
subarray; PSM as a TRANSFER command that overlaps a read from one bank with a
write to another and does not use the channel; one zero row per subarray;
initialization by filling one row and copying it.

The following are choices made for this model:
* all sizes and timing values;
* the command encoding and the TRANSFER fields;
* one line per TRANSFER cycle;
* a single chip standing for the rank;
* which rows are reserved, and the controller zeroing them after reset;
* the staging-row method for intra-bank PSM;
* a closed-page policy with one request at a time;
* the request format;
* the two planning cycles per row.

The following are not built. Each belongs to the processor or the software
rather than the memory system, or is only named:
* the `memcopy`/`meminit` instructions and the processor logic that decides to
  offload. Their requests enter as ports of `rowclone_system`.
* in-cache copy and clean-zero-line insertion (the "ZI" optimizations).
* cache coherence with in-DRAM copies.
* subarray-aware page allocation in the OS.
* the physical memory channel.

Requests are whole rows only. Partial-row acceleration is not offered. The
controller does not check that a request avoids the reserved rows.

## Simulating

Each file in `rtl/` holds one module or package, and `rc_pkg.sv` must be read
first. Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing --assert -Irtl --top-module tb_rowclone_system \
    rtl/rc_pkg.sv rtl/*.sv tb/tb_rowclone_system.sv -o sim
./obj_dir/sim
```

(Verilator may warn that `rc_pkg.sv` was read twice. The warning is harmless.
To avoid it, list the files one by one.)

| Testbench | What it checks |
|---|---|
| `tb_rc_subarray` | row write/read through the row buffer; FPM copies leave other rows untouched |
| `tb_rc_bank` | the same across subarrays; the bank I/O returns the open subarray |
| `tb_rc_internal_bus` | the bus source selection |
| `tb_rc_chip_io` | command pipeline, read return, channel counters |
| `tb_rc_dram_chip` | WRITE/READ, FPM, TRANSFER with remapped columns; that TRANSFER and FPM use no channel line |
| `tb_rc_controller` | the exact command stream and spacing for zero-row init, FPM, both PSMs, zeroing, value init, READ and WRITE |
| `tb_rowclone_system` | the full default-size system end to end: random data, every mechanism, exact latencies, no channel traffic during bulk copies, data read back against a model |
| `tb_rowclone_cow_buz` | the two operating-system primitives RowClone targets: copy-on-write after a fork (FPM where the page was allocated in the same subarray, PSM otherwise), the child's writes, then secure deallocation by bulk zeroing. It checks all pages and that none of the 12 bulk page operations used the channel, where copying through the processor would have moved 1,152 lines |

`tb_rowclone_system` uses the default parameters. It runs in well under a
minute of simulation time, most of it spent reading rows back over the channel.
To change the geometry, override the parameters of `rowclone_system` (the
controller's timing parameters can be overridden on `rc_controller`). The
controller refuses, at elaboration, a timing set under which its PSM schedule
would precharge before tRAS. It also refuses a chip with a single bank, since
intra-bank PSM needs a second bank.
