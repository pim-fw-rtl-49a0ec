# Blocked Floyd-Warshall inside an HBM3 stack

All-pairs shortest paths with Floyd-Warshall is a triple loop over a dense
N x N distance matrix:

    for k: for i: for j:  D[i][j] = min(D[i][j], D[i][k] + D[k][j])

On a CPU or GPU almost all of the time and energy goes into moving `D` between
memory and the cores. Each relaxation is three reads and one write for a
single add and compare. This design does the relaxation where the data already
is: inside the DRAM banks of an HBM3 stack, on the row that is currently latched
in each bank's row buffer. Only pivot data moves, and it moves only between
bank-groups inside the stack. A small controller on the logic side of the stack
sequences the whole algorithm.

The RTL is a complete, simulatable model of that stack:
- the DRAM arrays;
- the bit-serial bank processing elements (BPEs);
- the per-channel minimum trees (CPEs);
- the broadcast paths;
- a hardware sequencer that runs blocked Floyd-Warshall to completion on
  a single command.

## Organization

| level        | count (default)  | what it holds / does                                        |
|--------------|------------------|-------------------------------------------------------------|
| stack        | 1                | memory controller, FW sequencer, global minimum tree        |
| channel      | `C` = 8          | `G` bank-groups, one CPE, broadcast sequencer               |
| bank-group   | `G` = 4 per ch.  | `NB` banks, data buffer (8 x 256 b), pivot-row register     |
| bank         | `NB` = 16 per bg | `ROWS` x 8192-bit array, row buffer, `BPB` BPEs             |
| BPE          | `BPB` = 16/bank  | one 512-bit slice (16 words of 32 bits) of the row buffer   |

That is 8 x 4 x 16 x 16 = 8192 BPEs in all. Each bank-group has 256 of them,
and 256 is also the tile width `B`. The matrix is cut into M x M tiles of 256 x 256
words, and one bank-group works on one tile at a time. Its 256 BPEs own the 256 columns of
that tile, one column each.

Distances are 32-bit unsigned. The all-ones word means "no path". Any sum that
overflows 32 bits loses the compare, so infinity + x never replaces a real
distance.

## How a tile sits in DRAM

Everything else depends on this layout. Tile element `(r, c)` of a tile
whose first DRAM row is `base` is placed as follows:

    bank   = c / BPB                 (which bank of the bank-group)
    BPE    = c % BPB                 (which slice of that bank's row)
    row    = base + r / SW           (SW = 16 words per slice)
    slot   = r % SW                  (which word of the slice)
    bit offset in the 8192-bit row = (BPE * SW + slot) * 32

So a tile takes `RPT = B / SW = 16` DRAM rows in every bank of its
bank-group. One DRAM row holds 16 tile rows, interleaved word by word
across the slices. Because of this layout every BPE finds its own `D_ij` in its own slice
for any tile row `r`, and the whole tile row `r` is updated by one
command: every BPE of every bank relaxes word `slot` of its slice.

Tiles are spread over the 32 bank-groups by the interleaved rule
`g = (i*M + j) mod 32`. Consecutive `g` stay in one channel (`channel = g / 4`,
`bank-group = g % 4`). When there are more tiles than bank-groups, the extra
tiles go to higher rows: `base = ((i*M + j) / 32) * 16`. Any 32 consecutive
tiles in row-major order therefore sit on 32 different bank-groups at the same
row base, and the sequencer relies on this. The mapping is in `tile_mapper.sv`.

## The bank PE

`bpe.sv` computes `min(D_ij, D_ik + D_kj)` one bit per clock, least significant
bit first, using two one-bit full-adder cells (`bit_serial_adder.sv`):

- The first cell adds `D_ik + D_kj`.
- Each sum bit goes straight into the second cell, which is wired as a
  subtractor and forms `D_sum - D_ij`.
- After 32 clocks the subtractor's carry says whether `D_sum >= D_ij`, and the
  adder's carry says whether the sum overflowed.
- One more clock drives the multiplexer, which writes `D_sum` or `D_ij` back
  into the slice.

Start to done takes 33 clocks. The BPE is a handful of flip-flops plus two
full adders, which is what makes 8192 of them affordable next to DRAM arrays.

## Channel PE and reductions

`cpe.sv` is a pipelined binary minimum tree. Each level is a subtract stage
then a select stage, after one input register. It returns the minimum and the
index it came from:
- 5 clocks for a channel's 4 bank-groups;
- 7 clocks for the same module used again at the controller over the 8
  channels.

`OP_REDUCE` uses both trees to find the minimum of one chosen word across any
set of bank-groups, and reports the channel and bank-group it came from.

## Moving pivot data

A tile update needs two operands from other tiles. Both travel over each
bank-group's 256-bit ring:

- **Pivot row `D_kj`** (`OP_BCAST_KJ`). Tile row `p` of `A(kb, j)` is one word
  per BPE (256 words), read from the source's open row. It is written into the
  destination's pivot-row register in 32 beats of 256 bits.
- **Pivot column `D_ik`** (`OP_BCAST_IK`). For one DRAM row of `A(i, kb)`,
  column `p` holds 16 tile rows' worth of `D_ik`. That is 512 bits, sent as two
  256-bit columns into two data-buffer entries. `OP_MINPLUS` then picks one
  32-bit word of the buffer (`widx`) as the `D_ik` shared by all BPEs.

Within a channel the destinations are served one after another: 32 clocks each
for a pivot row, 1 clock each for a column. All channels work at the same
time. A broadcast to every bank-group of the stack therefore costs 4 times a
broadcast to one bank-group per channel (checked in `tb_pimfw_full`).

## The sequencer

Every tile update, in every phase of blocked Floyd-Warshall, has the same
form:

    A(i,j)[r][c] = min(A(i,j)[r][c], A(i,kb)[r][p] + A(kb,j)[p][c]),  p = 0 .. B-1

The phases differ only in which tiles take part:
- phase 1: the pivot tile `A(kb,kb)`;
- phase 2: the rest of pivot row `kb` and pivot column `kb`;
- phase 3: every other tile.

`fw_scheduler.sv` therefore runs one command pattern. It takes the destination
tiles of a phase in rounds of up to 32, tiles `32r .. 32r+31` in row-major order,
which the mapping guarantees to be on distinct bank-groups at the same row
base. For each pivot `p` of a round:

1. For each destination: `ACT` the source row of `A(kb, j)` that holds tile
   row `p`, `BCAST_KJ` it to that destination, `PRE`.
2. For each of the 16 DRAM rows `R` of a tile:
   1. For each destination: `ACT` row `R` of `A(i, kb)`, `BCAST_IK` its two
      columns holding column `p`, `PRE`.
   2. `ACT` row `R` in all destinations at once and issue 16 `MINPLUS`
      commands, one per slot. Each relaxes one tile row in every destination
      bank-group, 256 words per bank-group. Then `PRE` writes the row back.

Sources are opened and closed per destination. A bank-group that is both
source and destination, or that holds two tiles, therefore never needs two
rows open. This is exact Floyd-Warshall, not an approximation: during pivot `p`
the row and column `p` of the pivot tiles do not change, because the diagonal
is 0.

## Command interface

`pimfw_top` takes one `pim_cmd_t` (see `pimfw_pkg.sv`) at a time over a
valid/ready port. It pulses `host_done` when the stack is idle again.
Bank-group `g = channel*4 + bank-group` is bit `g` of `dst_mask`.

| op           | effect |
|--------------|--------|
| `ACT`, `PRE` | open row `row` / write back and close, in all bank-groups of `dst_mask` |
| `WR`, `RD`   | one 256-bit column `col` of bank `bank` of one bank-group |
| `BCAST_KJ`   | word `slot` of every slice of `(src_ch, src_bg)` into the pivot-row registers of `dst_mask` |
| `BCAST_IK`   | column `col` of bank `bank` of `(src_ch, src_bg)` into data-buffer entry `widx` of `dst_mask` |
| `MINPLUS`    | every BPE of `dst_mask` relaxes word `slot` with `D_ik` = buffer word `widx` |
| `REDUCE`     | minimum of word `col` of bank `bank` over `dst_mask`, on `red_min`/`red_ch`/`red_bg` |
| `FW`         | whole blocked Floyd-Warshall on an M x M tile grid, `M = slot` |

A host loads the matrix with `WR`, tile by tile, at the places given by the
mapping, then issues `FW` and reads the result back with `RD`.

DRAM timing is enforced inside each bank, at an assumed 1 GHz clock, so clock
counts equal nanoseconds:

| parameter | clocks |
|-----------|--------|
| tRCD      | 8      |
| tRAS      | 24     |
| tRP       | 6      |
| tWR       | 12     |

## Files

`rtl/`, bottom-up:
- `pimfw_pkg.sv`: word width, infinity, opcodes, command struct.
- `bit_serial_adder.sv`: one-bit adder/subtractor cell.
- `bpe.sv`: bank PE.
- `pim_bank.sv`: array, row buffer, timing, BPEs.
- `bank_group.sv`: banks, data buffer, pivot-row register.
- `cpe.sv`: minimum tree.
- `channel.sv`: bank-groups, CPE, broadcast sequencer.
- `tile_mapper.sv`: tile to bank-group and row.
- `fw_scheduler.sv`: command sequencer.
- `pimfw_top.sv`: memory controller, channels, global minimum.

`tb/` has one self-checking testbench per module, each ending with a
`TB_RESULT checks=.. failures=..` line. Two of them are end to end:
- `tb_pimfw_top` runs a reduced stack: 2 channels, 4 bank-groups per channel,
  2 banks, 2 BPEs per bank, 4-word tiles.
  - It loads random graphs with missing edges, runs `FW` for M = 3 and
    M = 2, and compares every distance with a software Floyd-Warshall.
  - It checks broadcast timing and `REDUCE`.
  - It counts that every mechanism occurred: both broadcast kinds, parallel
    multi-destination commands, sources that are also destinations,
    bank-groups holding two tiles, all three phases, updates taken and
    infinities kept.
  - M = 3 took 20,777 clocks.
- `tb_pimfw_workload` uses the same reduced stack with graph shapes like the
  evaluated ones. It takes:
  - a road lattice on an M = 4 tile grid, the grid of a 1000-node graph with
    256-wide tiles;
  - a graph padded to a whole number of tiles (M = 5, with a partial last
    round);
  - weights near 2^30, so that path sums overflow 32 bits.
- `tb_pimfw_full` runs the stack at its default size. It checks broadcasts to
  every bank-group against one per channel, `MINPLUS` on all 32 bank-groups,
  reads and `REDUCE`.

To simulate one, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_pimfw_top \
        rtl/pimfw_pkg.sv rtl/*.sv tb/tb_pimfw_top.sv
    ./obj_dir/Vtb_pimfw_top

Other sizes are parameters of `pimfw_top`:
- `C`, `G`, `NB`, `BPB`, `SW`, `COL_BITS`, `ROWS`, `DBUF_ENT`;
- the tile width is `B = NB * BPB`.

The full-size model needs about 1 GiB for its arrays.

## Where this model departs from the description it follows

- **Rows per bank.** 2048 instead of 32k, because 512 banks x 32k rows x 1 KB
  is 16 GiB, too much for simulation. 2048 rows still holds an 8192-node graph
  (512 rows per bank needed).
- **Banks per bank-group.** The organization has been stated both as 16 banks
  in 4 bank-groups per channel and as 8 banks per group with 32 per channel.
  This model uses 16 banks of 16 BPEs per bank-group, the only reading that
  gives 256 BPEs per bank-group, 1024 per channel and 8192 in all.
- **Tile width.** A tile width of 512 has also been quoted. This model uses
  256, equal to the BPEs per bank-group.
- **Larger M.** With rounds of 32 tiles the sequencer is not limited to
  M <= 16. It handles any M whose tiles fit in the rows: M up to 90 at 2048
  rows.
- **CPE compare.** The CPE compares whole words per tree level, not bit by bit.
  A bit-serial compare cannot meet the CPE's stated latency of 5-10 clocks.
- **Invented here.** The command set, the command order, the data-buffer
  usage, the overlap of add and compare in the BPE, tRP and write-back on
  precharge.
- **Not modelled:**
  - tCL, tRRD and tCCD spacing, and refresh;
  - bank-level parallelism beyond what one command does;
  - the TSV/PHY layer;
  - fewer BPEs per bank-group than tile columns, which would need multi-pass
    updates;
  - the host processor.
- **Pivot operands.** The compute step takes column `p` of `A(i,kb)` and row
  `p` of `A(kb,j)`, as the block update formula requires. A prose description
  that speaks of rows of `A(i,kb)` and columns of `A(kb,j)` was not followed
  literally.
- **Reductions.** The Floyd-Warshall command stream never needs a minimum
  across bank-groups, since every relaxation stays inside one tile. The CPE
  trees are reached only through the `REDUCE` host command.
- **Six phases become three.** The pivot-row and pivot-column tiles are
  updated in one phase, not two, since both depend only on the finished pivot
  tile.
- **Commands are serial.** The controller runs one command at a time and waits
  for the stack to go idle. Its clock counts are therefore an upper bound on
  what a pipelined controller would achieve, not a performance prediction.
