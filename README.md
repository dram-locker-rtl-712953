# DRAM-Locker in SystemVerilog

RowHammer attacks on DNN inference pick a few DRAM rows: the rows next to a
critical weight (a targeted bit-flip attack), or the rows next to a page-table
entry (a page-table attack). The attacker activates such an *aggressor* row
thousands of times until a neighbouring *victim* row flips. DRAM-Locker's idea is
that the aggressor rows can be named in advance and simply **locked**. The memory
controller keeps their addresses in a small SRAM *lock-table*. Any read or write
that names a locked row is dropped before it reaches DRAM, so hammering it does
nothing. When a program really needs the data in a locked row, the controller
**swaps** that row with a free one inside the DRAM, using three RowClone row
copies. The data is then reachable at the free row's address. After a fixed
number of further accesses (1k), the lock moves to the data's new address, which
locks it again. No per-row activation counters are needed, only the table.

This repository holds RTL for the controller side of that mechanism: the
Sequence (instruction queue), the lock-table, the micro-program engine that turns
a SWAP into RowClone commands, the re-lock scheduler, and the controller that
ties them together. The DRAM device itself is not logic. A behavioural model of
it, with RowClone semantics, is used by the testbenches.

## Block diagram

```
            seq_entry (READ / WRITE / SWAP / LOCK / UNLOCK)
                 |
          +------v-------+        +-------------------+
          | sequence_    |        | lock_table        |
          | queue (16)   |        | 14336 x 22-bit    |
          +------+-------+        | SRAM, linear scan |
                 | head           +---------^---------+
                 v                          | LOOKUP/INSERT/REMOVE/REPLACE
          +--------------------------------------------------+
          | dram_locker controller FSM                       |---> resp (kind, status, rdata)
          |   R/W: lookup -> BLOCKED | ACT, RD/WR, PRE       |
          |   SWAP: lookup -> load u0,u1,u2 -> run program   |
          +----+--------------------+------------------------+
               | rw_pulse, swap rec |  start / ureg writes
        +------v--------+    +------v---------+
        | relock_unit   |    | uprog_engine   |  16-bit ISA, 32 micro-registers
        | 1000-R/W      |    | AAP = ACT src, |
        | window, 8 recs|    | ACT dst, PRE   |
        +---------------+    +------+---------+
                                    |  (muxed with the controller's own R/W commands)
                                    v
                      dram_cmd (ACT / PRE / RD / WR), dram_rd_data
                                    |
                              DRAM device (not part of the RTL)
```

## What happens to each instruction

Instructions enter through `seq_valid/seq_ready/seq_entry` into a 16-deep
queue. The controller takes them strictly in order and answers each one with a
single-cycle `resp_valid`, carrying the kind, a status and, for reads, the data.

| Kind | Lock-table operation | Outcome |
|------|---------------------|---------|
| `SEQ_READ`, `SEQ_WRITE` | LOOKUP `row` | hit: `ST_BLOCKED`, nothing is sent to DRAM. Miss: ACT, RD or WR, (read data), PRE, then `ST_OK`. |
| `SEQ_SWAP` | LOOKUP `row` (the Locked Row) | miss: `ST_NOT_LOCKED`. Hit: the three-copy SWAP with `row2` (the Unlocked Row), a re-lock record is queued, `ST_OK`. |
| `SEQ_LOCK` | INSERT `row` | `ST_OK`, or `ST_FULL` if all 14336 entries are used. |
| `SEQ_UNLOCK` | REMOVE `row` | `ST_OK`, or `ST_NOT_LOCKED`. |

Reads and writes use a closed-page order: every access opens the row, accesses
one 64-bit column and precharges. Only READ and WRITE are checked against the
table. The row copies of a SWAP touch the locked row freely, because they are the
sanctioned way in.

The controller never translates addresses. After `SWAP(L, U)`, software must
use address `U` to reach the data that was in `L`. This is the published scheme:
the data moves, the lock-table stays as it is until the re-lock, and the old
locked address now holds `U`'s former contents.

LOCK and UNLOCK are how trusted software (the OS, in the threat model) chooses
which rows to protect. The RTL does not tell trusted and untrusted requesters
apart; a system must feed these two kinds only from a privileged path.

## The SWAP: RowClone through a Buffer Row

RowClone copies a whole row inside one DRAM sub-array. It activates the source
row, and then, without precharging, activates the destination row. The sense
amplifiers still hold the source data, so they overwrite the destination. One
copy therefore costs three commands (ACT, ACT, PRE) and never crosses the memory
channel. A copy overwrites its destination, so exchanging two rows needs a third,
scratch row, the *Buffer Row*:

```
step 1   Locked Row   -> Buffer Row
step 2   Unlocked Row -> Locked Row
step 3   Buffer Row   -> Unlocked Row
```

The steps are written in DRAM-Locker's 16-bit micro-instruction set and run by
`uprog_engine`:

```
 15 14 13        9 8         4 3    0
+-----+-----------+-----------+------+
| OP  | uReg dst  | uReg src  |  --  |   OP 01  AAP   row copy  dst <- src
+-----+-----------+-----------+------+   OP 10  bnez  loop
| OP  |          unused              |   OP 11  done  end of program
+-----+------------------------------+   OP 00  (undefined, run as no-op)
```

A micro-register (32 of them, named by the 5-bit fields) holds a full row
address. An AAP emits `ACT ureg[src]`, `ACT ureg[dst]`, `PRE`. At reset the
program memory (16 words) holds the SWAP:

```
0: AAP u2, u0    1: AAP u0, u1    2: AAP u1, u2    3: done
```

For each SWAP the controller writes u0 = Locked Row, u1 = Unlocked Row and
u2 = Buffer Row, one per cycle, and then starts the program at address 0. With a
DRAM that never stalls, a SWAP is 9 DRAM commands and 10 engine cycles. Loading the
three micro-registers and starting the engine add 4 cycles. So a SWAP finishes
about 15 cycles after its lock-table lookup answers. Real DRAM timing (tRAS, tRP between the activations)
is left to whatever receives the command stream: it holds `dram_cmd_ready` low
for as long as it needs, and every command stays stable until it is taken.

**Where the Buffer Row lives.** RowClone works only inside one sub-array, so one
Buffer Row for the whole memory cannot serve every swap. Here every bank reserves
the row index `buffer_row_id` (a top-level input) as its Buffer Row, and a SWAP
uses the one in the Locked Row's bank. Software must choose the Unlocked Row in
the same sub-array as the Locked Row. The RTL does not check this, because the
sub-array geometry is not visible to it. The behavioural DRAM model copies only
within a bank, and a cross-bank SWAP gives wrong data there. That is how this
requirement was found.

**bnez.** The control format has no operand fields, so the loop count and the
loop target are registers set through the configuration port
(`cfg_loop_we/cfg_loop_cnt/cfg_loop_target`). `bnez` jumps to the target and
decrements the count while the count is non-zero; otherwise it falls through.
The count is used up and must be reloaded before every run that loops. The
program memory and micro-registers 3 to 31 can be written through
`cfg_imem_*`/`cfg_ureg_*` while `cfg_ready` is high (controller idle). So the
SWAP program can be replaced, for example by one that repeats a copy sequence.

## Re-locking, and why it can happen early

Once a SWAP is done, its data sits at an unlocked address, and an attacker could
in principle start hammering the new neighbours. The defence therefore limits
how long the data stays unlocked. `relock_unit` stamps every finished SWAP with
the value of a free-running count of R/W instructions. Once the count has moved
1000 past the stamp, the controller runs a lock-table REPLACE: the entry for the
old Locked Row address is overwritten with the Unlocked Row address. The data is
locked at its new place, and the old address is released. Re-locks that are due
go ahead of the next Sequence entry.

The exact boundary, checked by the tests: the 1000th R/W after the SWAP still
reaches the Unlocked Row; the 1001st is blocked. Every READ and WRITE taken from
the Sequence counts, including the blocked ones. Hammering a locked row thus
makes re-locks come sooner, never later.

Up to 8 swaps can wait for their re-lock. A SWAP that arrives with all 8 slots
taken does not wait. It forces the oldest pending re-lock to happen at once and
then proceeds. Waiting would deadlock: the Sequence is in order, so the R/W
instructions that would close the window sit behind the waiting SWAP. An early
re-lock only shortens an unlocked window. It is counted in
`stat_early_relocks`.

## The lock-table

The table is sized from the 56KB SRAM budget. Each entry is assumed to be a
32-bit word holding a 22-bit row address, which gives 14336 entries. The 22 bits
are 4 bank bits and 18 row bits: a 32GB, 16-bank DDR4 memory with 8KB rows. The
table is a single-port synchronous SRAM with an occupancy counter, with no CAM
and no comparator array. The paper's wording is that the controller *traverses*
the table. Here the traversal reads one entry per cycle from index 0 and stops at
the first match or at the last occupied entry. Entries are kept packed: INSERT
appends, and REMOVE moves the last entry into the hole.

Latency, counting from the accepting clock edge: a search that ends at index k
answers at edge k+3, a full miss with n entries at n+2, INSERT at 1, and a REMOVE
that must fill the hole at k+4. So the cost of a lookup grows with the number of
locked rows. With the 2300 entries of the largest evaluated case (below), a miss
costs about 2300 controller cycles. That is the price of the linear traversal;
a design that needs bounded latency would read several entries per cycle. The
traversal is built as described and not optimised beyond it.

## Sizing against the evaluated configurations

| Case | Needed | Built |
|------|--------|-------|
| ResNet-20/CIFAR-10, protect 1150 vulnerable bits (1150 is the paper's number) | at most 1150 x 2 neighbour rows = 2300 entries | 14336 |
| ResNet-20/CIFAR-10, lock around every weight row (about 0.27M 8-bit weights, from general knowledge) | about 34 rows -> at most 68 entries | 14336 |
| VGG-11/CIFAR-100, lock around every weight row (about 9.2M 8-bit weights, from general knowledge) | about 1123 rows -> at most 2246 entries | 14336 |
| 32GB, 16-bank DDR4 | 22-bit row address (8KB rows assumed) | 22 bits |
| Re-lock window at T_RH = 1k | 1000 R/W | `RELOCK_INTERVAL = 1000` |

The accuracy-under-attack and defence-duration results (attack iterations, the
10% SWAP failure rate from process variation) are properties of the analog DRAM
and of the DNN. The RTL does not model them.

## Top-level interface (`dram_locker`)

| Port | Dir | Meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; synchronous active-low reset (empties all queues and the table, reloads the SWAP program) |
| `seq_valid`, `seq_ready`, `seq_entry` | in/out/in | instruction into the Sequence (`seq_entry_t`: kind, row, row2, col, wdata) |
| `resp_valid`, `resp` | out | one-cycle completion, in order (`resp_t`: kind, status, rdata) |
| `buffer_row_id` | in | row index reserved as Buffer Row in every bank |
| `cfg_ready`, `cfg_imem_*`, `cfg_ureg_*`, `cfg_loop_*` | out/in | micro-program, micro-register and loop-register writes, taken while `cfg_ready` |
| `dram_cmd_valid`, `dram_cmd_ready`, `dram_cmd` | out/in/out | command stream (`dram_cmd_t`: op ACT/PRE/RD/WR, row, col, wdata) |
| `dram_rd_valid`, `dram_rd_data` | in | read data, any number of cycles after the RD |
| `lt_count`, `seq_level`, `relock_pending` | out | occupancy of the table, the Sequence and the re-lock queue |
| `stat_rw_done`, `stat_rw_blocked`, `stat_swaps`, `stat_relocks`, `stat_early_relocks`, `stat_row_copies` | out | event counters |

Parameters, with their defaults: `LT_ENTRIES = 14336`, `SEQ_DEPTH = 16`,
`RELOCK_INTERVAL = 1000`, `RELOCK_DEPTH = 8`, `IMEM_DEPTH = 16`. Types and
widths shared by all blocks are in `rtl/dl_pkg.sv`.

## Where this RTL follows the published design and where it fills gaps

Taken from the published design:
- the lock-table of row addresses in SRAM, with a 56KB budget;
- R/W to a locked address is skipped, and the lock-table is traversed for every
  R/W;
- the SWAP as three row copies through a Buffer Row, in the order above;
- the 16-bit instruction format, with 5-bit micro-register fields and opcodes
  01 AAP, 10 bnez, 11 done;
- RowClone copies as two back-to-back activations with no precharge between;
- re-locking the swapped address after 1k R/W instructions;
- the DRAM configuration (32GB, 16 banks) used for sizing.

Chosen here, because the description leaves them open:
- the bit positions of the instruction fields; only the widths and order are
  published;
- the meaning of `bnez` (loop-count and loop-target registers);
- opcode 00 is run as a no-op;
- the 32-bit entry and 22-bit address, and so the 14336 entries;
- the one-entry-per-cycle packed scan;
- the queue depths (16 and 8);
- the closed-page R/W, the 64-bit column and the 10-bit column address;
- the entry, status and handshake formats;
- counting blocked R/W towards the re-lock window;
- the early re-lock when the re-lock queue is full;
- a Buffer Row per bank.

Differences from the published description:
- The published figures show the three row copies as separate entries in the
  Sequence. Here a single SWAP entry stands for them, and the controller expands
  it into the micro-program. A Sequence entry that is a raw micro-instruction is
  not supported.
- "Unlocking" is only ever done by a SWAP (or by an explicit UNLOCK). No
  separate unlock command is passed with an R/W.
- Who is allowed to issue LOCK, UNLOCK and SWAP is not enforced in hardware.
- The SWAP failure rate that the circuit study reports under process variation is
  not modelled. The RTL assumes every row copy succeeds.

## Simulating

Everything is plain SystemVerilog-2017. The testbenches are self-checking and
end by printing `TB_RESULT checks=N failures=M`. With Verilator 5, for example:

```
verilator --binary --timing --assert --top-module tb_dram_locker \
    rtl/dl_pkg.sv rtl/lock_table.sv rtl/sequence_queue.sv rtl/uprog_engine.sv \
    rtl/relock_unit.sv rtl/dram_locker.sv tb/dram_model.sv tb/tb_dram_locker.sv
./obj_dir/Vtb_dram_locker
```

| Testbench | What it checks |
|-----------|----------------|
| `tb_lock_table` | Full 14336-entry table against a reference list: hit and index, occupancy, the refused insert when full, remove with hole filling, replace, and the latency of every operation. |
| `tb_sequence_queue` | Random push/pop against a reference queue: order, level, full and empty. |
| `tb_uprog_engine` | The exact 9-command SWAP stream and its 10 cycles, row contents exchanged in the DRAM model, back-pressure, and `bnez` loops (a copy run three times, a SWAP run twice). |
| `tb_relock_unit` | Due after exactly 1000 R/W, in order, held until taken, full queue, forced early re-lock. |
| `tb_dram_locker` | The whole design at default parameters against an instruction-level reference model. It covers: locking neighbours of weight rows; normal traffic; 400 hammering accesses to locked rows, all blocked, with no activation of those rows reaching DRAM; a SWAP and reading the data through the Unlocked Row; the re-lock at exactly the 1001st R/W; NOT_LOCKED cases; nine back-to-back SWAPs forcing an early re-lock; a bnez program loaded at run time; and filling the table to FULL. It counts each mechanism and fails if one never happened. |
| `tb_workload_bfa` | The bit-flip and page-table attack workloads at default parameters, described in the next section. |
| `dram_model` | Behavioural DRAM used by the above: sparse storage, open row per bank, RowClone on ACT-after-ACT in one bank, read latency 3, optional random `cmd_ready`, per-row activation counts. |

All of them run in seconds.

## The attack workloads

`tb_workload_bfa` runs the defence against the threat it is built for. The
protected network is ResNet-20 (CIFAR-10), with 1150 vulnerable weight bits.
Each bit is placed in a row of its own, so 2300 aggressor rows are locked; this
is the worst case for the table. The attacker then picks three target bits and
activates both aggressors of each 1100 times. That is above the threshold of
1000 activations taken for the DRAM, so on an unprotected memory every target
would flip. Inference reads of the weights run in between, and a few accesses
queue up behind the long table scans, which fills the Sequence.

The OS then swaps one aggressor row out to a free row to use its data. The
attacker follows the data and hammers the free row. The data remains reachable
until the 1000-access window closes, and after that the row is locked too.

Last comes a page-table attack. A page-table row is protected in the same way,
and its two neighbours are hammered 1100 times each, this time with writes. The
page-table entries must read back unchanged.

The outcome:
- 10000 attack accesses were issued, and 9060 were blocked. The 940 that got
  through went to the swapped-out row while its window was still open.
- No aggressor row of a protected bit was activated more than twice. Those two
  activations are the SWAP's own row copies.
- The swapped-out row stayed under the threshold, because its window counts
  every access, including the attacker's.
- All weight reads returned the written data.

The test takes about 15.6 million cycles, most of them in lock-table scans.
Protecting VGG-11 (CIFAR-100) changes only which rows are locked, and how many
(at most 2246).

## How far to trust it

Every block is covered by the tests above, and each testbench is known to fail
when its block is broken in a way that matters (for example, copying in the
wrong direction, or letting writes past the lock). Verilator's lint reports
only unused signals and package constants. These are fields of shared types
that a block does not read, such as the lock-table index, which the controller
ignores. The RTL elaborates and
synthesises under Yosys with no latches. The lock-table maps onto a 14336 x 22-bit
memory, and the rest is about 640 flip-flops.

What is not verified is behaviour against a real DDR4 device: the command
receiver must add the JEDEC timing, refresh and the rest of a memory controller,
which are outside this design. The RowClone behaviour is only as good as the
behavioural model.
