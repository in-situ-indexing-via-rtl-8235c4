# PATH: a memory that finds keys in place

Hash tables and B+ trees spend most of their time walking memory. A lookup fetches a
bucket or a node, compares a handful of keys in the CPU, and often has to fetch again.
PATH removes most of that traffic by making the memory arrays do the comparison
themselves. Every row of a memristive crossbar holds a key and a valid flag, and the
crossbar also works as a ternary content-addressable memory (ReCAM): one search compares
a query with all 512 rows of an array group at once and returns the first row that
matches. On top of this primitive the chip offers four composite *in-situ* commands,
insert, search, update and delete (ISUD), plus an *in-memory move* that splits an array's
contents between two other arrays by one bit of a stored hash. Host software keeps only a
small table of array addresses. It sends one ISUD command where a conventional index
would chase several cache lines.

This repository holds synthesizable SystemVerilog for the digital part of such a chip:
the ReCAM array and its data array (as logic models of the cells), the two-step one-hot
match encoder, the 512-row CAM group, the bank controller with its move control, the
bank, the chip controller and the top level. It also has self-checking testbenches,
including one that runs a complete hash index (the host side written as testbench code)
against the chip.

## 1. One row, one ternary match

A ReCAM bit is a pair of memristive cells (R1, R2). Each cell is either low-resistance
(LRS) or high-resistance (HRS):

| stored bit | (R1, R2)   | query bit | (SL, SLbar) |
|------------|------------|-----------|-------------|
| 0          | (LRS, HRS) | 0         | (0, Vs)     |
| 1          | (HRS, LRS) | 1         | (Vs, 0)     |
| X          | (HRS, HRS) | X (masked)| (0, 0)      |

SL drives R1 and SLbar drives R2. A mismatch puts the search voltage on an LRS cell.
That current pulls the row's match line above the reference, and the row is sensed as a
miss. A stored X or a masked query bit can never cause a mismatch. `recam_array`
keeps one bit per cell (1 = LRS). It computes each match line as

    match[r] = NOT OR_i ( (SL[i] AND R1_lrs[r][i]) OR (SLbar[i] AND R2_lrs[r][i]) )

which is exactly the outcome the sense amplifier decides. `key_mask_encoder` turns
the query word and mask into (SL, SLbar).

A ReCAM row has 65 ternary bits: the 64-bit key in bits 63:0 and the valid flag in
bit 64. That is 130 cells, matching the 128 x 130 array in the paper's area table. The
value does not take part in matching, so it lives in a separate normal-cell
`data_array` under the same row number. A data row is 128 bits:

| bits    | use |
|---------|-----|
| 63:0    | value |
| 79:64   | resize indicator: 16 further bits of the key's hash (section 4) |
| 127:80  | free for software |

The flag turns one search into different questions:

* **Insert** searches for flag = 0 with every key bit masked. A hit is an empty row.
* **Search, update and delete** search for (key, flag = 1). A hit is the live copy of
  the key.

## 2. From arrays to a 512-row group

The sensing margin limits one array to 128 rows. Capacity is therefore extended
vertically. `recam_group` broadcasts the same search lines to N_SUB = 4 arrays. The
one-hot encoder works in two steps:

1. `onehot_local` gives each array's lowest matching row and a hit bit.
2. `onehot_global` takes the first array that hit and forms the 9-bit group row
   `{array index, local row}`.

Ties always go to the lowest row, so an insert fills a group from row 0 upwards and
reuses deleted rows first. Splitting the encoder into two steps keeps the arrays-per-group
count a parameter.

Only the addressed group is driven. `global_decoder` turns the group address into a
one-hot select, and `recam_group` forces its search lines and write strobes to 0 unless
it is selected.

## 3. The bank controller and its commands

`bank_ctrl` (CTRL-B) runs one command at a time. It waits the array access time of
every step with a down-counter. At the assumed 1.2 GHz controller clock, the paper's
20 ns CAM/read time is `T_CAM` = `T_READ` = 24 cycles and its 100 ns write time is
`T_WRITE` = 120 cycles.

| command | steps | bank latency (cycles) |
|---------|-------|------------------------|
| READ g,row | row read of key cells and data row | T_READ |
| WRITE g,row | row write of key cells (with flag, X where `kmask`=1) and data | T_WRITE |
| COLREAD g,col | one data column of all 512 rows | T_READ |
| INSERT g,key,data | CAM (flag 0); write key, data, flag 1 at the first empty row | T_CAM + T_WRITE, or T_CAM with FULL |
| SEARCH g,key | CAM (key, flag 1); read the data row | T_CAM + T_READ, or T_CAM with NOT_FOUND |
| UPDATE g,key,data | CAM; write the data row | T_CAM + T_WRITE |
| DELETE g,key | CAM; write only the flag column, flag := 0 | T_CAM + T_WRITE |
| MOVE x,y,z,p | see section 4 | T_READ + per row |

`kmask` sets don't-care key bits. On search, update and delete it masks query bits. On
insert and write it stores X in those bits. Responses carry the command's tag, the bank
number, a status (OK, NOT_FOUND, FULL, BAD), the row used, and the read data, column or
move result. A command with an out-of-range group, or with a move bit p above 15, gets
BAD and touches no array.

The bank (`path_bank`) adds the global IO buffer `giob`, a two-entry response FIFO, so
every response arrives one cycle after the controller finishes. Through the chip
controller's queue the total comes to the bank latency + 2 cycles. The testbenches
check these figures exactly.

## 4. Resizing without moving data through the CPU

Resizing a hash table from N to 2N buckets, with N a power of two, sends every key
either back to bucket `i` or on to bucket `i + N`. Which one is decided by a single hash
bit. At insert time the software stores the 16 hash bits just above the initial index
bits as the key's *indicator*. Resize number p (counting from 0) then looks only at
indicator bit p. Sixteen bits are enough for sixteen doublings.

`MOVE x, y, z, p` performs one array's share of a resize inside the bank:

1. **Column read.** One access reads indicator bit p of every row of group x (data
   column 64 + p) and the flag column. `move_ctrl` latches them as REG_Indicator and
   the set of pending rows.
2. **Walk.** `move_ctrl` presents the lowest pending row and its bit.
3. **Per row.** The row is read (T_READ). The destination is y if the bit is 0,
   z if it is 1. If the destination is x itself, the item stays put. Otherwise a CAM step
   finds an empty row in the destination (T_CAM), the item is written there (T_WRITE),
   and the source flag is cleared (T_WRITE).
4. The response gives the number of items moved and a 512-bit map of the source rows
   that left. If a destination fills up, the move stops with FULL and the count so far.

Per visited row, the move costs one cycle of bookkeeping plus T_READ. Each item that
actually moves adds T_CAM + 2·T_WRITE, and each item kept in place adds one cycle. One
more cycle is spent at the end. Moves never cross banks. Software therefore places
bucket `i + N` in the same bank as bucket `i`.

The testbench resize uses y = x, so the old array keeps the "0" half and a fresh array
takes the "1" half. This is the split an extendible hash table does. A full-table rehash
into a fresh table would give distinct y and z.

## 5. What the host software does

Most of the gain in the paper comes from how software uses these commands.
`tb/tb_path_top.sv` contains a working model of that software:

* **Logical buckets.** A bucket is 64 bytes in host memory. It holds five slots, each
  with an array address (bank, group) and a count of the valid items in that array.
  Five slots times 512 rows gives a bucket 2560 item places.
* **Wait-free insertion.** The counts tell the host which array still has room, so an
  insert is certain to succeed. The host posts it and goes on without waiting for the
  answer. On the chip side this needs nothing beyond queuing: the chip controller keeps
  a four-entry command queue per bank.
* **Passive collision resolution.** There is no chaining or probing. When a key's bucket
  is full, the whole table is resized. In the testbench this first happened at a load
  factor of 98.9 % with uniformly spread keys.
* **Interleaved mapping.** Bucket i uses arrays of bank i mod 8, so consecutive
  buckets' commands run in parallel in different banks.
* **Search, update and delete** try the slots of the key's one bucket in turn until one
  answers OK.

## 6. Chip controller and parallelism

`chip_ctrl` (CTRL-C) looks at the bank field of every host command and pushes it into
that bank's queue. The host port stalls only when that particular queue is full.
Responses from the banks, and BAD answers for commands to a bank that does not exist,
are returned on one port in round-robin order. Each bank answers its own commands in
order. Across banks, responses can come back in any order, and the tag is how the host
matches them. `path_top` is the chip controller plus eight banks. It also brings out
`bank_busy` so a testbench can see how many banks work at once.

## 7. Sizes: the paper against this RTL

| quantity | paper | RTL default |
|----------|-------|-------------|
| rows per array | 128 | 128 (`SUB_ROWS`) |
| arrays per CAM group | 4 | 4 (`N_SUB`) |
| key / flag bits | 64 / 1 (Key/Mask width 65) | 64 / 1 |
| data columns | 128 | 128 (`DATA_W`) |
| banks | 8 | 8 (`NUM_BANKS`) |
| arrays per bank | 524288 (1 GB) | 8192 (`GROUPS` = 2048 groups) |
| tCAM, tREAD, tWR | 20, 20, 100 ns | 24, 24, 120 cycles at an assumed 1.2 GHz |

Every cell here is an explicit register, so the number of groups sets the size of the
elaborated design directly. Lint of the 8-bank top needs about 7.7 MB of memory per
group per bank. At the paper's 131072 groups that would be about 1 TB. 2048 groups
(about 16 GB) is the largest power of two that stays inside a 32 GiB build machine.
Nothing else depends on the group count except address widths, and the command format
already carries 20-bit group addresses. The testbenches use 2 to 16 groups per bank.
No full-size simulation was run: the largest simulated configuration is 8 banks x 16
groups with the default timing (`tb_path_top_timing`).

With the default 2048 groups the chip holds 8 x 2048 x 512 = 8,388,608 items. The
paper's workloads compare with that as follows:

* The 100 %-insert "Load" run (1 M warm-up + 20 M inserts) and the 100 M-item
  load-factor study need more rows than that, so they do not fit.
* The 30 % and 5 % insert mixes (about 7 M and 2 M items) and YCSB A-D (about
  1-2 M items) fit.
* The paper's full 8 GB configuration, with 536 M rows, holds all of them.

## 8. Where this design makes its own choices

The paper describes the array encoding, the search semantics of each ISUD operation, the
first-empty-row rule, the two-step one-hot, the 4 x 128 group, the move rule and its three
steps, bank-local moves, the bank count and the access times. Everything below is this
implementation's own choice:

* the opcode set, the status codes, the command and response structs, and one response
  for every command;
* the data-row layout (value, indicator, free bits) and keeping values in a separate data
  array rather than in the same row;
* reset formatting every row as empty (key 0, flag 0);
* the controller clock, and with it the cycle counts;
* during a move: skipping rows whose flag is 0, visiting rows in ascending order,
  clearing the source flag of moved items, and keeping items in place when the
  destination is the source;
* an insert does not check whether the key already exists. Search, update and delete
  act on the lowest live copy;
* the four-entry per-bank queues, round-robin response return, and BAD for a missing
  bank;
* a plain valid/ready command/response port in place of the DDR or CXL interface.

Not built as logic: the analog drivers and sensing (matchline driver with transmission
gate, searchline driver, I2V sense amplifier, reference voltages, supplies) and the
sharing of drivers between adjacent arrays. Their logic effect is inside `recam_array`.
The NVM reliability measures the paper discusses (refresh, ECC, wear levelling) are not
part of the design either.

## 9. Files

| file | contents |
|------|----------|
| `rtl/path_pkg.sv` | widths, opcodes, status codes, `cmd_t` / `rsp_t` |
| `rtl/key_mask_encoder.sv` | query to (SL, SLbar) |
| `rtl/recam_array.sv` | 128-row ReCAM array: ternary match, row/column access |
| `rtl/data_array.sv` | 128 x 128 normal-cell value array |
| `rtl/onehot_local.sv`, `rtl/onehot_global.sv` | two-step first-match encoder |
| `rtl/recam_group.sv` | 512-row CAM group of four array pairs |
| `rtl/global_decoder.sv` | group select |
| `rtl/move_ctrl.sv` | REG_Indicator and row walk of the in-memory move |
| `rtl/bank_ctrl.sv` | CTRL-B command sequencing and timing |
| `rtl/giob.sv` | global IO buffer (response FIFO) |
| `rtl/path_bank.sv` | one bank |
| `rtl/sync_fifo.sv` | command queue used by the chip controller |
| `rtl/chip_ctrl.sv` | CTRL-C: per-bank queues, response return |
| `rtl/path_top.sv` | the chip |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_path_top.sv` | the hash-index run of section 5 (8 banks x 11 groups, short timing) |
| `tb/tb_path_top_timing.sv` | every command once at the default timing, latencies checked |

Each testbench prints `TB_RESULT checks=N failures=M`. Testbenches seed a random
initial state, so run them with random reset values to check that nothing depends on
uninitialised state. For example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/path_pkg.sv \
        tb/tb_path_top.sv --top-module tb_path_top -Mdir obj_top
    obj_top/Vtb_path_top +verilator+rand+reset+2

`tb_path_top` builds in under a minute and runs in one to two minutes. It inserts about
21,700 keys, resizes once (about 10,000 items moved in memory), then searches, updates
and deletes. It counts every mechanism: posted inserts, queue stalls, cycles with
several banks busy, moves, searches that needed several slots, FULL and BAD. A
mechanism that never occurred counts as a failure. To change the array geometry, edit
`SUB_ROWS` / `N_SUB` in `path_pkg`. To change the capacity, set `GROUPS` on `path_top`.
