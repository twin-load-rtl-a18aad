# Twin-load memory extension: SystemVerilog model

This is synthesizable SystemVerilog for a memory-extension system. It lets an
unmodified processor and its DDRx memory controller reach far more DRAM than one
channel can normally drive. A tree of Memory Extending Chips (MECs) sits on the
channel, and DIMMs hang from the leaves of that tree.

The difficulty is that a DDRx controller expects read data a fixed time (tRL)
after every RD command. Each layer of chips adds propagation delay, so data from
a deep tree arrive too late. The system never makes the controller wait longer.
Instead, software reads every extended-memory line with two loads, called a
"twin-load":

1. **The first load** starts a prefetch deep in the tree. It gets a placeholder
   line back on time: the byte 0x5a repeated.
2. **The second load** arrives later. By then the real line is buffered in the
   top chip, which returns it within tRL.

Software tells a correct result from a placeholder and retries when needed. When
retries fail it falls back to a slow "safe path" through memory-mapped
registers.

## Address map

The controller sees each top-level MEC (MEC1) as one logical rank, chosen by
chip select. A logical row address has three fields:

| Field | Width | Meaning |
|---|---|---|
| shadow | 1 (row MSB) | 0 = extended address, 1 = shadow address. Both name the same line. |
| rank ID | 4 | Which of the 16 physical ranks below this MEC1 holds the line. |
| physical row | 16 | The row inside that rank. |

- A twin-load reads a line once through its extended address and once through
  its shadow address. Software can therefore issue two loads that the CPU's
  caches treat as different lines.
- The two addresses usually fall in the same bank but different rows. The
  second load then needs a row miss (PRE, ACT, RD). That gap is at least
  tRTP + tRP + tRCD = 28 cycles (35 ns at DDR3-1600), and it hides the tree's
  latency.
- Inside the chips a line is identified by {rank ID, physical row, column,
  bank}. The shadow bit is dropped.
- One logical row, all ones by default (the top shadow row), is reserved for the
  safe-path registers.

## Parts (rtl/)

| File | Part |
|---|---|
| `tl_pkg.sv` | Shared widths, DDR3-1600 timing in cycles, command enum, bus structs, MEC1 event flags. |
| `bank_state_table.sv` | **Bank State Table (BST).** One entry per bank: open flag and row of the last ACT. MEC1 needs it because RD, WR and PRE carry no row, yet the row holds the rank ID. |
| `load_value_cache.sv` | **Load Value Cache (LVC).** 16 fully associative entries: tag, valid bit, one 64-byte line, LRU replacement. Prefetches carry a tag ID of {generation, entry}, so a late return for a reused entry is dropped. A consumed entry keeps its data until its burst has been sent. A write invalidates the line. |
| `mec1_safe_path.sv` | **Safe path.** Address, flag and data registers. It performs one read by putting its own ACT, RD and PRE into idle command slots. |
| `mec1.sv` | **MEC1.** DDRx slave to the controller and master of the tree. It decodes commands, tracks banks, tells first loads from second loads, and returns the placeholder or the buffered line exactly tRL after each RD. It forwards writes and reports event pulses. |
| `routing_table.sv` | **Routing table.** Maps a rank ID to the child port that leads to it. Reset gives a regular tree; a config port can rewrite any entry. |
| `mec_mid.sv` | **Middle MEC.** Forwards commands and their write data to one child (broadcasts to all). Merges returned beats upward. Each hop adds T_PD cycles. |
| `mec_leaf.sv` | **Leaf MEC.** Drives one dual-rank DIMM. It accepts only its two rank IDs, turns link commands into DRAM commands, and tags each returned beat with the ID its RD carried. |
| `twinload_system.sv` | **Top.** 2 MEC1s on the channel, each the root of a 4-layer binary tree: 2 + 4 + 8 + 16 MECs in all. 16 leaf MECs drive 16 dual-rank DIMMs, 32 ranks in all. The DIMM buses are ports. |
| `tpd_pipe.sv`, `wr_burst_track.sv` | Helpers: a typed delay line for the per-hop delay, and a write-burst window tracker. |

## How MEC1 handles each command

| Command | What MEC1 does |
|---|---|
| ACT | The BST stores the row. The ACT goes down the tree carrying the rank ID from the row's high bits. |
| PRE | The BST closes the bank. The PRE goes down with the rank ID from the BST row. PRE-all and REF are broadcast to every rank. |
| RD | The line address is rebuilt from the BST row, the column and the bank, then looked up in the LVC (see the two modes below). |
| WR | Forwarded to the rank, with its data T_WL cycles later. A buffered copy of the line is invalidated. |

### TL-OoO (`tl_lf = 0`, main mode)

The twin loads may reach MEC1 in either order.

- **LVC miss: first load.** MEC1 allocates an entry (LRU) and forwards the RD
  with the entry's tag ID. The placeholder line goes out tRL later.
- **LVC hit: second load.** The buffered line goes out tRL later, and the entry
  is freed.
- **Entry evicted before the second load arrives.** The second load looks like a
  new first load. It gets the placeholder, and software retries.
- **Line not yet back when the second load's burst must start.** This design
  sends the placeholder and keeps the entry.

### TL-LF (`tl_lf = 1`)

Software fences the two loads, so their order is known.

- The extended-address load always prefetches.
- The shadow-address load takes the buffered line, or gets the placeholder if
  there is none.

Using the shadow bit to tell the two loads apart is this design's reading. The
source only says that a late second load gets the placeholder in this mode.

## Timing

All timing is in cycles of tCK = 1.25 ns (DDR3-1600):

| Parameter | Cycles | Time |
|---|---|---|
| tRL | 11 | 13.75 ns |
| tRCD | 11 | 13.75 ns |
| tRP | 11 | 13.75 ns |
| tRTP | 6 | 7.5 ns |
| tCCD | 4 | |
| burst | 4 beats of 128 bits | |
| tWL | 8 | (design choice) |
| T_PD | 3 per hop per direction | (design choice) |

- Read data reach the controller exactly tRL after the RD, for 4 cycles.
- The round trip from MEC1 to a rank and back is 2 × 4 × 3 + 11 = 35 cycles.
- The LVC must hold an entry for that long while new RDs keep arriving every
  tCCD. The source's rule is M > (2·tPD + tRL)/tCCD, which gives M > 10. This
  design uses M = 16.

## Safe path

All three registers sit in the reserved row of each MEC1:

- A WR to column group 0 loads the address register and starts the read.
- A RD of column group 0 returns {busy, flag} in the first beat.
- A RD of column group 1 returns the 64-byte data register.

The engine then works in four steps:

1. It waits until the target bank is closed in the BST.
2. It issues ACT. At least tRCD later it issues RD. At least tRTP after that it
   issues PRE.
3. Each command uses only cycles in which no controller command is being
   forwarded.
4. It sets the flag when the line is in the data register.

**Known hazard, not solved:** the controller does not see these ACT and PRE
commands. It could reopen the same bank within tRP of the injected PRE. The
exception handler must leave that bank idle until the flag is set. For this
reason the safe path is counted as only partly implemented.

## What follows the source and what is this design's choice

**Taken from the source:**

- The twin-load scheme and both of its modes.
- The BST and LVC contents, LRU replacement, and returning data with the LVC
  entry ID.
- The placeholder value 0x5a.
- Forwarding by rank ID in the row's high bits, through a routing table.
- The four-layer, two-children-per-chip tree with two top chips on the channel.
- The DDR3 timing values, and the rule M > 10.
- The three safe-path registers.

**This design's own choices:**

- Field widths and the address map, including the shadow bit as the row MSB.
- Per-hop delay of 3 cycles, and tWL = 8.
- LVC size 16 and full associativity.
- Generation numbers, the drain state, and invalidation on write.
- The late-data fallback.
- Routing-table reset contents and the config port.
- The safe path's register layout and its command injection.
- Reset behaviour.

**Not built, because the source designs none of them:**

- The memory controller and CPU.
- The DRAM devices.
- The DDRx physical layer (PHY).
- The SPD that presents the tree as one large DIMM.
- The local-memory ranks that sit on the processor's channels beside the MEC
  tree. They are ordinary DRAM with no twin-load logic.

A behavioural dual-rank DIMM model in `tb/dram_dimm_model.sv` stands in for the
DRAM. It checks tRCD, tRP, tRTP and the open/closed bank rules.

## Capacity

- One rank is 2^16 rows × 2^10 columns × 8 banks × 8 bytes = 4 GiB.
- 32 ranks give 128 GiB of extended memory per channel.
- The benchmark footprints the source evaluates (about 4 GB and 16 GB) fit
  easily.

## Verification (tb/)

Each part has a self-checking testbench that prints
`TB_RESULT checks=N failures=M` and ends itself through a watchdog if it hangs:

| Testbench | What it checks |
|---|---|
| `tb_bank_state_table` | Random ACT/PRE/PRE-all traffic against a reference model. |
| `tb_load_value_cache` | Allocation, LRU eviction, fills, stale-fill drop, draining, invalidation. |
| `tb_mec1_safe_path` | Command order and spacing (tRCD, tRTP), use of free slots only, flag and data. |
| `tb_mec1` | Both modes, with exact tRL data timing, late data, and write invalidation. The safe-path registers are covered by `tb_twinload_system`. |
| `tb_routing_table` | Reset contents and reconfiguration. |
| `tb_mec_mid` | Per-port forwarding with exact T_PD and T_WL timing, broadcasts, returns. |
| `tb_mec_leaf` | Rank selection, tags, round trip of 2·T_PD + tRL. |
| `tb_twinload_system` | The whole default-size system with 16 DIMM models. |

`tb_twinload_system` plays both the memory controller and the software. It
compares every data-bus cycle against the expected placeholder or line and
requires each mechanism to occur. Its nine scenarios are:

1. Single twin-loads.
2. Eight concurrent twin-loads.
3. Writes, then reads back.
4. A write invalidating a buffered line.
5. Back-to-back loads.
6. LVC overflow followed by a retry.
7. TL-LF mode.
8. The safe path.
9. Broadcast PRE-all and REF.

Last run:

- All testbenches pass, the full-size one with 246 checks.
- No DRAM timing violations.
- Synthesis of the top gives about 5,100 word-level cells and 35,000 flip-flop
  bits.

To simulate one testbench with Verilator 5 (`-Wno-fatal` keeps the lint warnings
listed below from stopping the build):

    verilator -Wno-fatal --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
        rtl/tl_pkg.sv tb/tb_pkg.sv --top-module tb_twinload_system \
        -y rtl -y tb tb/tb_twinload_system.sv
    ./obj_dir/Vtb_twinload_system

## Lint notes

Verilator with `-Wall` still prints a few warnings. None is a circuit problem:

- **SYNCASYNCNET:** assertions use the asynchronous reset in `disable iff`.
- **PINCONNECTEMPTY:** unused LVC outputs are left open on purpose.
- **UNUSEDPARAM:** package constants that a module linted on its own does not
  use.
- **UNUSEDSIGNAL:** the safe-path engine ignores the tag field of returned
  beats; only one safe read can be in flight.
