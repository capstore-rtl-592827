# CapStore: a power-gated on-chip memory for a CapsuleNet accelerator

A CapsuleNet inference accelerator spends most of its energy moving data,
not computing. Putting every tensor on chip, as earlier accelerators did,
takes about 8 MB of SRAM, and that SRAM's leakage dominates the power budget.
CapStore makes two changes. First, the on-chip store keeps only what one
operation of the network needs at a time (the rest lives in off-chip DRAM).
Second, the part of that store an operation does not need is switched off.

Which part is idle is known ahead of time, from the network itself. The five
operations of a CapsuleNet inference use the weight, data and accumulator
stores very unevenly. PrimaryCaps fills the whole store. The routing steps
use less than half of it, and ClassCaps needs almost no data buffer but a
large weight buffer. The memory is therefore cut into independently powered
slices. A small power manager switches slices on and off at each operation
boundary, following a per-operation table.

This repository holds SystemVerilog RTL for that memory in its separated,
power-gated organisation (called PG-SEP below). It contains the three
memories, their sleep-transistor switches (as a behavioural model), the power
manager, the memory controller, and a top level with ports toward the
accelerator and the DRAM.

## Organisation

There are three separate single-port memories. Each has 16 banks, one per
row/column of the accelerator's 16x16 systolic array, so 16 words can move
per cycle. Each bank is cut into S equal sectors:

| memory      | banks | sectors per bank | bytes per bank-sector | sector row (16 banks) | total     |
|-------------|-------|------------------|-----------------------|-----------------------|-----------|
| weight      | 16    | 64               | 108                   | 1728 B                | 110592 B  |
| data        | 16    | 16               | 100                   | 1600 B                | 25600 B   |
| accumulator | 16    | 128              | 225                   | 3600 B                | 460800 B  |

The totals, bank counts and sector counts are those of the published PG-SEP
configuration. Each total is the largest amount that memory ever needs:
weights in ClassCaps, data in Conv1, partial sums in PrimaryCaps. The
per-sector byte counts follow by division.

**Sector row.** Sector *s* of every bank is wired to the same sleep
transistor, so power is switched in units of one sector row: 16 bank-sectors
at once. In total the memory has 64 + 16 + 128 = 208 sleep transistors.

Words are 8 bits (the published sizes are in bytes). Inside a bank, word
address *a* lies in sector `a / SECTOR_BYTES`. Consecutive words therefore
fill one sector before the next, and the low sectors hold the live data.

The weight and data memories are written either from the DRAM bus or by the
accelerator:
- The weight memory receives weights from DRAM.
- The data memory receives input data from DRAM, and activation results back
  from the accelerator.

The systolic array reads both. The accumulator belongs to the accelerator
alone. In front of the weight and data memories, a select from the
accelerator's control unit chooses which side owns all 16 banks in a given
cycle.

## Power gating

### The handshake

Each sleep transistor is a footer switch between a sector row's virtual
ground and ground, with two signals:

- `sleep_req` comes from the power manager. It is 1 while the row must be
  powered and 0 to put it to sleep.
- `sleep_ack` comes back from the switch. It follows `sleep_req` once the
  virtual ground has settled.

```
sleep_req  ‾‾‾‾\____________________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾
sleep_ack  ‾‾‾‾‾‾‾‾‾‾‾‾\____________________________/‾‾‾‾‾‾
sector     ON  |/ / / /|    OFF     |/ / / / / / / /| ON
R/W req    ==__________________________________________====
               <-T_SLEEP->          <----T_WAKEUP--->
```

While a row is going down or coming up, its contents are undefined, and no
read or write may be issued. The state is not kept while off: a row that
wakes up must be rewritten before it is read.

The transition times are not known from the source design. The model uses
`T_SLEEP = 2` and `T_WAKEUP = 4` clock cycles, which are parameters of
`capstore_top`.

### The power manager (PMU)

The PMU holds a table with, for each operation and each memory, the number
of sector rows to keep on. When the control unit raises `op_start` with the
next `op`:

1. For each memory, the PMU sets `sleep_req` to a thermometer code of the
   table entry. Rows 0 .. k-1 are on; all others are asleep.
2. `ready` drops in the next cycle, as soon as any request differs from its
   acknowledge.
3. `ready` rises again in the cycle after the last acknowledge arrives.

If the new operation needs the same rows as the old one, `ready` never drops.

Rows that stay on keep their data across the switch. This matters for the
accumulator: ClassCaps partial sums stay in the low 57 rows through all three
routing iterations. Transitions happen only at operation boundaries, so they
are rare and their energy cost is small.

### The per-operation table

The table is the part of the design that encodes knowledge of the network,
and the only part built from estimates. The source design gives the per-memory
need of each operation only as a log-scale bar chart. The reset values are
therefore reconstructed from the numbers it does state:

- **Largest need of each memory:** the memory sizes above.
- **Smallest need of each memory:** 1024 B of weights (Conv1, PrimaryCaps),
  1024 B of data (ClassCaps), and 204800 B of partial sums (ClassCaps and the
  routing steps).
- **Total use per operation:** 73.6 %, 100 %, 67.2 %, 47.9 % and 47.9 % of the
  471040 B peak.

From these:

| operation           | weight B | data B | accumulator B | weight rows | data rows | acc. rows |
|---------------------|----------|--------|---------------|-------------|-----------|-----------|
| Conv1 (C1)          | 1024     | 25600  | 320061 (solved) | 1         | 16        | 89        |
| PrimaryCaps (PC)    | 1024     | 9216 (solved) | 460800 | 1          | 6         | 128       |
| ClassCaps FC        | 110592   | 1024   | 204800        | 64          | 1         | 57        |
| Sum+Squash          | 11612 (est.) | 9216 (est.) | 204800 | 7       | 6         | 57        |
| Update+Softmax      | 11612 (est.) | 9216 (est.) | 204800 | 7       | 6         | 57        |

Rows = bytes / sector-row bytes, rounded up. For the two routing steps, the
totals leave 20828 B for weights and data together. That split is read from
the chart and is the least certain entry; the ClassCaps row, by contrast,
reproduces the stated 67.2 % exactly.

`capstore_pkg::bytes_needed` holds the byte values and `sectors_needed` does
the rounding. Because the table may need correcting, or must serve another
network, it can be rewritten at run time: `cfg_we` writes one entry (`cfg_op`,
`cfg_mem`, `cfg_sectors`) per cycle, and values above the sector count are
clipped.

## Using `capstore_top`

Every memory port is per bank: 16-bit enable (and write-enable) vectors and
16-entry address and data arrays. Address widths are 13 bits (weight),
11 bits (data) and 15 bits (accumulator).

| group | signals | role |
|-------|---------|------|
| control unit | `op_start`, `op` (`op_e`: `OP_C1`, `OP_PC`, `OP_CCFC`, `OP_SSQ`, `OP_USO`), `w_sel`, `d_sel` | announce the operation; pick the owner of the weight/data memory (0 = DRAM bus, 1 = accelerator) |
| DRAM bus | `ow_en/addr/wdata`, `od_en/addr/wdata`, `ow_gnt`, `od_gnt` | weight and data fills (writes only) |
| accelerator | `xw_*`, `xd_*`, `xa_*` (`en`, `we`, `addr`, `wdata`, `rdata`, `gnt`) | array reads, activation write-back, partial-sum read/write |
| PMU | `cfg_*`, `ready`, `w_on`, `d_on`, `a_on` | table programming; status and rows on |
| errors | `err[2:0]`, `err_clr` | sticky per memory (weight, data, accumulator): an access hit a row that was off, or an address past the bank |

**Timing.**
- A source's `gnt` is combinational. It is low while the PMU is switching, or
  while the other source owns the memory. A requester holds its request until
  it sees `gnt`; the controller never passes anything on while `ready` is low.
- Writes land at the clock edge. Read data appear one cycle after a granted
  read.
- An access to a row that is off (or past the end of a bank) is dropped:
  reads return 0 and the `err` bit for that memory sets.

**Throughput.** Each bank moves one word per cycle, with no dead cycles
except across an operation switch. After reset every row is off, so the
first `op_start` must come before any access.

## Files

| file | contents |
|------|----------|
| `rtl/capstore_pkg.sv` | sizes, `op_e` / `mem_e`, the per-operation need table and its rounding |
| `rtl/capstore_sram.sv` | one banked, sectored memory (instantiated three times) |
| `rtl/sleep_transistor.sv` | behavioural model of the footer switch with its acknowledge, timed in clock cycles |
| `rtl/pg_sector_group.sv` | drives the thermometer-coded requests of one memory and reports when all acknowledges agree |
| `rtl/capstore_pmu.sv` | the power manager: table, three sector groups, `ready` |
| `rtl/capstore_memctrl.sv` | write-source multiplexers, stall while switching, grants, sticky errors |
| `rtl/capstore_top.sv` | everything wired together at full size |
| `tb/*.sv` | one self-checking testbench per module, plus the end-to-end test |

`sleep_transistor` stands for an analog device. It is written so that
simulators and synthesis front ends accept it, but on silicon it would be
replaced by the real switch and its sense buffer.

## What is outside this RTL

**The accelerator.** The accelerator (16x16 systolic array, activation unit
for ReLU/sigmoid/squash, and its control unit) is an existing design that
CapStore serves, not part of it. Its memory requests, write-source selects
and operation announcements are ports of `capstore_top`.

**The DRAM.** The DRAM is a commodity part, likewise reached through ports.
The accelerator's results that go straight to DRAM do not pass through
CapStore.

**Alternative organisations.** Other ways to organise the store were weighed
against PG-SEP and are not built:
- one shared three-port memory (471040 B), with or without gating;
- a hybrid of a shared memory and small separate ones.

## Choices not fixed by the source design

- 8-bit words.
- Consecutive-address sector mapping.
- One-cycle read latency.
- Thermometer ordering of the rows that stay on.
- Transition times of 2 and 4 cycles.
- All rows off at reset.
- The programmable table.
- `op_start` / `ready` / `gnt` as the protocol.
- The error flag and the sticky error register.
- One owner per memory per cycle. Each bank is single-ported, so the DRAM
  fill and the accelerator cannot use the same memory in the same cycle.
- The array model keeps its contents through power-off rather than
  scrambling them. Correct software never depends on this, because reads of
  an off row are blocked and flagged.
- How the memory controller works. Only its existence is given: the grant,
  stall and error behaviour are this design's.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

- `tb_weight_mem`, `tb_data_mem`, `tb_acc_mem`: the memory at each of its
  three real sizes. The test fills every word of every bank, switches off a
  random set of rows and writes again, then reads everything back. Writes to
  off rows must be dropped and flagged, reads of off rows must return 0 and
  be flagged, and out-of-range addresses must be flagged.
- `tb_sleep_transistor`: exact sleep and wake-up latencies at two settings,
  `sector_on` low throughout each transition, and cancellation of a withdrawn
  request.
- `tb_capstore_pmu`: the full schedule with acknowledge responders of random
  latency. It checks the expected thermometer masks and that `ready` is low
  exactly while acknowledges are outstanding. It then reprograms the table,
  including a clipped entry.
- `tb_capstore_memctrl`: 3000 random cycles against a reference for the
  source selection, stalling, grants and sticky errors.
- `tb_capstore_top`: the whole design at its default size, through one full
  inference. The sequence is Conv1, PrimaryCaps, ClassCaps, three routing
  iterations of Sum+Squash and Update+Softmax, then Conv1 of a next image
  with a reprogrammed entry. Against a reference model of every word, it
  checks:
  - the stall length at each switch equals the wake-up or sleep time;
  - the row counts;
  - that partial sums in rows that stayed on survive the switch;
  - DRAM fills at one word per bank per cycle, with accelerator reads;
  - the accumulator traffic and activation write-back;
  - errors on accesses to off rows.

  It counts stalls, sleeps, wake-ups, retained words, fills, accelerator
  passes, off-row errors and reprogrammings, and fails if any never occurred.
  It takes a few seconds.

To run one with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_capstore_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/capstore_pkg.sv tb/tb_capstore_top.sv
./obj_dir/Vtb_capstore_top
```

Replace `tb_capstore_top` with any other testbench name. The package must be
given first because the files find one another through `-y`.
