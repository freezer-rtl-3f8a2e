# Freezer: a dirty-block backup controller for intermittently powered nodes

A sensor node that runs on harvested energy loses its supply many times a
second or a minute. To make progress it must copy its volatile state into a
non-volatile memory (NVM) before each outage and copy it back afterwards. The
usual on-demand scheme copies the whole data memory every time, which is slow
and costly in energy, because NVM writes are far more expensive than SRAM
accesses.

Freezer is a small hardware block placed next to the CPU and its SRAM. While
the program runs, it watches the CPU's stores and keeps one *dirty bit* per
block of the SRAM. When the supply starts to fail, it halts the CPU and copies
only the dirty blocks to the NVM, one word per clock when the memories allow
it. After the power returns it copies the whole SRAM image back from the NVM.
The NVM therefore always holds a complete snapshot, but each backup only
writes the part that changed since the last restore. This is the *Modified
Block* (MB) strategy: a block is saved if at least one store hit it during the
interval. With 8-word blocks, the published trace study puts the average
backup at about 12 % of a full-memory backup, for a tracking table of only
1024 bits on a 32 KB SRAM.

This repository holds synthesizable SystemVerilog for Freezer, for the
arbiter that shares the SRAM between the CPU and Freezer, for the SRAM written
as an array, and a behavioural model of the NVM, all wired together in one
top, `freezer_soc`. Each module has a self-checking testbench.

## The system

```
                  cpu_halt
   CPU  ---------------------------------------------+
    |  CPU rgv bus (addr, wdata, be, we, req / gnt, rvalid, rdata)
    +--> gate (no grant while cpu_halt) --+--> rgv_arbiter m0 --+
                                          |                     +--> sram_rgv
             spy: granted req, we, addr   |      rgv_arbiter m1 -+
                                          v          ^
   pwr_fail, restore ----------------> freezer ------+ SRAM port
   APB -----------------------------> (fsm, to_backup_mem, regs)
                                           |
                                           +-- NVM port ---------> nvm_model
   backup_done <---------------------------+
```

| Module | Role |
|---|---|
| `freezer_pkg` | rgv bus structs, data widths, phase encoding |
| `freezer` | Freezer itself: `freezer_fsm` + `to_backup_mem` + `freezer_regs` |
| `freezer_fsm` | phases, store tracking, the pipelined copy engine |
| `to_backup_mem` | dirty-bit table with a one-cycle next-dirty-block search |
| `freezer_regs` | APB registers |
| `rgv_arbiter` | CPU/Freezer arbiter in front of the single-port SRAM |
| `sram_rgv` | 32 KB SRAM, one-cycle latency |
| `nvm_model` | behavioural NVM, slower, keeps its content through reset |
| `freezer_soc` | top: the four parts above wired together |

The CPU, the power-failure detector and the rest of the SoC are not part of
this RTL. Their signals are ports of `freezer_soc`: the CPU's memory bus and
`cpu_halt`, `pwr_fail`, `restore` and `backup_done`, and an APB slave port.

## The memory bus (rgv)

Every memory port uses the same request / grant / valid handshake, bundled in
two packed structs (`rgv_req_t`: req, we, be, addr, wdata; `rgv_rsp_t`: gnt,
rvalid, rdata):

* a request is accepted in the cycle where `req` and `gnt` are both high; a
  master keeps its request stable until then;
* each accepted request, read or write, gets exactly one cycle of `rvalid`
  later (never in the acceptance cycle), carrying `rdata` for a read;
* responses come back in acceptance order.

Addresses are byte addresses; every access here is a full, aligned word, and
word address = `addr[2 +: log2(words)]`. Because grant and response may take
any number of cycles, Freezer works with any SRAM or NVM timing.

## Tracking: the dirty-bit table

A store is tracked when it is *granted* on the CPU bus: `freezer_soc` feeds
`req && gnt`, `we` and `addr` of the CPU bus to Freezer. The block index is
`word_address / BLOCK_SIZE`; its bit in `to_backup_mem` is set. Tracking adds
no cycle to the CPU's accesses. Loads are ignored. Storing a value equal to
the old one still marks the block, as the hardware does not compare data.

`to_backup_mem` holds `BLOCK_NUM = SRAM_WORDS / BLOCK_SIZE` bits in
flip-flops, arranged as `BLOCK_NUM / ROW_W` rows of `ROW_W` bits. An OR per row
gives a "row not empty" vector. One priority encoder over that vector picks
the lowest non-empty row; a second one picks the lowest set bit in that row.
Empty rows are skipped at no cost, so the next dirty block is always
available, combinationally, as `next_idx`/`next_valid`. The controller takes a
block by pulsing `clr_en`, which clears that bit. A set of the same block in
the same cycle wins over the clear. A counter, `dirty_cnt`, tracks the number
of set bits, which is the size of the next backup in blocks.

At the defaults (32 KB SRAM, 8-word blocks) the table has 1024 bits in 32 rows
of 32 bits.

## Phases of the controller

| Phase | Entered when | What happens | Leaves when |
|---|---|---|---|
| BOOT | reset | CPU halted, one cycle | always: to RESTORE if `restore` is high, else RUN |
| RESTORE | `restore` at boot | NVM words 0..SRAM_WORDS-1 copied to the same SRAM words | copy done: to RUN |
| RUN | | CPU runs, stores are tracked | `pwr_fail`: to DRAIN |
| DRAIN | `pwr_fail` | CPU halted; one cycle, so that a store granted in the cycle `pwr_fail` rose has set its bit | always: to BACKUP |
| BACKUP | | every dirty block copied SRAM to NVM, lowest block first, bit cleared as the block is taken | copy done: to OFF |
| OFF | | `backup_done` high, CPU halted; the supply may now go | `pwr_fail` falls: back to RUN, no restore needed |

`cpu_halt` is high in every phase except RUN. The CPU's requests are also
held off by the gate in front of the arbiter, so a core that ignores
`cpu_halt` simply stalls on its next memory access. A real power loss ends in
a reset. The dirty-bit table then starts empty, which is correct, since the
restore rebuilds the SRAM from the snapshot.

The first boot assumes that the NVM already holds the program's initial data
image: the first restore loads it, and every later backup only updates it.

## The copy engine

Restore and backup share one engine inside `freezer_fsm`. Only the direction
differs: during RESTORE the NVM is the source, otherwise the SRAM is. The
engine has:

* an **address generator** (`rd_word_q`, `gen_busy_q`). During a restore it
  counts from 0 to SRAM_WORDS-1. During a backup it walks the words of the
  current block. At the block's last word it loads the first word of
  `next_idx` and takes that block in the same cycle, so blocks follow each
  other without a dead cycle;
* a **buffer** of `FIFO_DEPTH` entries with three pointers. `alloc_p` moves
  when a read is granted and records the word address. `fill_p` moves on the
  source's `rvalid` and records the data. `drain_p` moves when the write of
  the entry is granted;
* a **read port** that requests only while `alloc_p - drain_p < FIFO_DEPTH`.
  Every read in flight thus has a buffer entry reserved, and the source never
  has to be stalled on its response;
* a **write port** that requests whenever an entry holds data. A counter of
  outstanding writes waits for the destination's `rvalid` of each write.

The copy is finished when the generator is idle, the buffer is empty and no
write response is pending. Then the phase changes.

Because reads and writes go to different memories, the write of word *n*
overlaps the read of word *n+1*. The testbenches measure:

* with single-cycle memories, a backup of *W* words from the `pwr_fail` edge
  to `backup_done` takes at most *W* + 8 cycles, and a restore of 256 words
  takes 262 cycles;
* with the default NVM model (two wait states, one access every three cycles,
  as for an 8 MHz FeRAM next to a 24 MHz system clock), the NVM sets the pace:
  a backup takes at most 3*W* + 10 cycles. A full restore of 32 KB takes
  about 3 x 8192 cycles.

## Arbitration

The SRAM has a single port. CPU and Freezer never need it at the same time,
so `rgv_arbiter` is simple:

* Freezer (master 1) has priority;
* a master can be granted only if the other has no response outstanding;
* every `rvalid` goes to the master that owns the outstanding requests.

When the power fails, Freezer's first SRAM read thus waits until the CPU's
last access has been answered. The NVM is reached only by Freezer and needs
no arbiter.

## Registers (APB, at `paddr` offsets)

| Offset | Name | Access | Content |
|---|---|---|---|
| 0x00 | CTRL | RW | bit 0 TRACK_EN, reset 1. With 0, stores are not tracked: software takes responsibility for those blocks |
| 0x04 | STATUS | RO | bits 2:0 phase (0 RUN, 1 RESTORE, 2 DRAIN, 3 BACKUP, 4 OFF), bit 8 cpu_halt, bit 9 backup_done |
| 0x08 | DIRTY | RO | dirty blocks now, i.e. next backup size / BLOCK_SIZE |
| 0x0C | SAVED | RO | words written to the NVM by the current or last backup |
| 0x10 | RESTORED | RO | words restored since power-up |

APB3, no wait states. Writes to read-only or unmapped offsets, and reads of
unmapped offsets, answer with `pslverr`.

## Parameters

| Parameter (top) | Default | Meaning |
|---|---|---|
| `SRAM_WORDS` | 8192 | SRAM size in 32-bit words (32 KB); also the size of the NVM snapshot |
| `BLOCK_SIZE` | 8 | words per tracked block, a power of two; 1 gives word-level tracking |
| `ROW_W` | 32 | dirty bits checked together in one row of the table |
| `FIFO_DEPTH` | 4 | copy-engine buffer; also the arbiter's outstanding-request limit |
| `NVM_WAIT` | 2 | NVM model wait states per access |

The table size is `SRAM_WORDS / BLOCK_SIZE` bits: 8192, 4096, 2048, 1024,
512, 256 or 128 bits for blocks of 1 to 64 words on a 32 KB SRAM. The
published trace study reports backup sizes, relative to 1-word blocks, of
1.05, 1.12, 1.24, 1.40, 1.66 and 1.95 for blocks of 2 to 64 words. Eight words
is the usual compromise.

Sizing for programs: the data footprint must fit in the SRAM. Of the
benchmark footprints published with the method, those of 1024 to 8192 words
fit the default 32 KB. The two of 16384 words (susan edge-small and dijkstra)
need `SRAM_WORDS = 16384`.

## Where this RTL follows the method and where it chooses

Taken from the method's description:

* the Modified Block algorithm: track stores per block, save the dirty blocks
  word by word on a power failure, restore the whole SRAM on resume;
* halting the CPU during the backup;
* two handshake memory ports, so any memory latency is tolerated;
* overlapping the NVM write of one word with the SRAM read of the next;
* searching for the next dirty block while the current one is copied, with
  the table organised in rows, checked a row at a time, and empty rows
  skipped;
* a register-bank table (1024 bits at 8-word blocks);
* the signal names of the buses, the spy tap (valid, addr, we), the APB
  register block and the `pwr_fail` input.

Chosen here, where the description is silent:

* the exact handshake rules, and taking a granted request as a "valid" CPU
  operation;
* byte addresses on all buses, and a snapshot stored at the same word address
  in the NVM as in the SRAM;
* the BOOT, DRAIN and OFF phases. In particular, the controller goes back to
  RUN without a restore when `pwr_fail` falls before the supply is lost;
* tracking a store granted in the very cycle `pwr_fail` rises. The
  algorithm's text tracks stores only while there is no power failure, but
  such a store has already changed the SRAM, and dropping it would corrupt
  the snapshot;
* where `restore` comes from: a pin, sampled once at boot;
* the register map, the row width, the buffer depth, and the arbiter's
  priority and drain rule;
* the SRAM and NVM timing. The NVM model's default reflects an 8 MHz FeRAM on
  a 24 MHz system.

Not built:

* the CPU, the energy harvester and its voltage detector, peripherals and
  system bus;
* an NVM that the CPU can also address, which the block diagram hints at as
  an option;
* sharing one system-bus master port between Freezer's SRAM and NVM
  accesses, the other connection option. Here the two ports are separate;
* double buffering of the snapshot, which would keep a consistent copy if a
  backup could be cut short. The method assumes there is always enough
  energy to finish a backup;
* the programmable or ISA-driven extensions mentioned as future work.

## Limits worth knowing

* The snapshot is consistent only if every backup completes. A power loss
  during BACKUP leaves a mixed snapshot.
* The restore always copies the whole SRAM, as in the method, whatever the
  program's footprint.
* The next-block search is combinational over the whole table: two priority
  encoders and a row multiplexer. This is fine at 1024 bits. At word-level
  tracking (8192 bits) it may limit the clock frequency, and a registered
  search would then be the natural change.
* `nvm_model` is a behavioural stand-in. A real NVM macro's port must be
  adapted to the rgv handshake.

## Simulating

All files use only `freezer_pkg` and each other; the testbenches are in
`tb/`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/freezer_pkg.sv tb/tb_freezer_soc.sv --top-module tb_freezer_soc
./obj_dir/Vtb_freezer_soc
```

Each testbench ends with `TB_RESULT checks=N failures=M`.

| Testbench | What it exercises |
|---|---|
| `tb_to_backup_mem` | random sets and takes against a reference table; one block per cycle when draining; set-wins-over-clear; empty-row skipping |
| `tb_freezer_fsm` | controller and table on testbench memories, single-cycle then random latency; restore image, snapshot contents, words written, cycle counts |
| `tb_freezer` | Freezer through its APB registers, 4-word blocks, TRACK_EN off |
| `tb_freezer_regs`, `tb_rgv_arbiter`, `tb_sram_rgv`, `tb_nvm_model` | the smaller blocks |
| `tb_freezer_soc` | the whole top at default sizes: six power intervals with random CPU traffic, full SRAM and NVM compared with a reference after each restore and backup |
| `tb_block_sizes` | the top with 1-word and 64-word blocks side by side: words saved per backup and snapshot contents |
| `tb_workload_matmul` | a 16x16 integer matrix product run to completion across seven power failures. Its progress survives only through the snapshot. Reports backup size per interval (48 words against 1024 for a full backup) |

`tb_rgv_mem.sv` is a testbench memory with random latency used by the block
tests. Testbenches write the memories' arrays by hierarchical reference to
preload images and to scramble the SRAM at each emulated power loss.
