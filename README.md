# Hourglass sorter: a parallel-in, serial-out merge tree

The circuit here sorts an array that arrives all at once but is consumed one element per
cycle. The usual case is a block that computes N values in parallel and feeds a block that
reads them in ascending order. A full sorting network would be a waste there: it costs
O(N log² N) comparators to produce N sorted outputs in parallel, and the consumer only reads one
of them per cycle. The hourglass sorter uses N − 1 comparators instead, arranged as a binary
tree of merge cells. Each cell carries two output registers instead of one. The lowest key
appears at the output ceil(log2 N) cycles after the array is loaded. After that, one key leaves
every cycle, with no gaps, until the array is exhausted. The clock period is set by a single
cell, so it does not grow with N.

The design follows the algorithm and cell diagram published by D. Báscones and B. Morcillo
("Hourglass Sorting: A novel parallel sorting algorithm and its implementation"). Their
implementation sorts probabilities between the belief-propagation and ordered-statistics stages
of a quantum LDPC decoder. The SystemVerilog here is an independent implementation of that
description. Where the description is silent or inconsistent, the choices made are listed in
[Departures and choices](#departures-and-choices).

## How values fall through the tree

```
 leaves   (9) (1) (4) (2) (6) (1) (5) (3)      level 0: one register per input
            \ /     \ /     \ /     \ /
 cells      [ ]     [ ]     [ ]     [ ]        level 1: each cell merges two leaves
              \     /         \     /
               [   ]           [   ]           level 2
                    \         /
                      [     ]                  level 3 = root -> out (1, 1, 2, 3, 4, ...)
```

Each leaf register holds one input element. Each cell merges two ascending streams, the
outputs of its two parents, into one ascending stream. The leaves are trivially sorted
one-element streams, so by induction the root emits the whole array in ascending order. This is
merge sort with all merges of one level running in parallel, and with the levels pipelined into
each other.

Two rules make it work with only local, registered signals:

* **Empty means exhausted.** A cell's input with `valid = 0` is treated as a stream that has
  ended, and the cell passes the other input through without comparing. That is only correct if
  an input never goes empty temporarily while its subtree still holds values. The tree is built
  so that this cannot happen, as explained below.
* **Every cell can take and give a value in the same cycle.** With one register per node, a
  node that is being read cannot be refilled in the same cycle without a combinational path from
  the root back up to the leaves. The output then alternates between valid and empty (a
  "bubble" every other cycle), and the empty cycles would break the first rule. A second
  register removes the bubbles while every path stays inside one cell.

### Why no bubble can appear

Suppose a cell with a nonempty subtree had both registers empty in some cycle. In the previous
cycle its register 1 was also empty, so it was accepting input. It took nothing, so both of its
parents offered nothing, so by the same argument both of them were empty too. Followed up to the
leaves, this means the whole subtree was empty, which is a contradiction. The argument holds
once every cell has received its first value. All leaves are loaded in the same cycle, and every
path from a leaf to the root has the same length (see odd levels below), so that happens at the
same moment for every cell of a level: level l is filled l cycles after the load.

## The sorting cell (`hg_cell`)

```
   l_data/l_valid ──┐         ┌── r_data/r_valid
        l_ready  <──┤  D_L<D_R├──> r_ready          select stage (combinational)
                    └──┬──────┘
                 d_sel, v_sel        ready to the selected side = !V1
                       │
              ┌────────▼────────┐
              │  V1 │ D1        │  register 1 (only used while the output stalls)
              ├─────┼───────────┤
              │  V0 │ D0        │  register 0 = the output
              └────────┬────────┘
               out_data/out_valid, out_ready
```

**Select.** The cell compares the two keys offered. It takes the left input if the left key is
lower and the left input is valid, or if the left key is not lower and the right input is not
valid. Otherwise it takes the right input. Only the selected side sees `ready`, and `ready` is
simply `!V1`: the cell accepts a value whenever its second register is free. The rule is
`sel_l = (D_L < D_R) ? V_L : !V_R`.

**Registers.** The output is always register 0, so `V1 → V0` and `D1 ≥ D0` always hold.
At each clock edge:

| state            | `out_ready` | action                                                    |
|------------------|-------------|-----------------------------------------------------------|
| `!V0`            | any         | register 0 ← selected input (may be empty)                |
| `V0 & !V1`       | 1           | register 0 is read and refilled from the input in one edge |
| `V0 & !V1`       | 0           | register 1 ← selected input (output stalled)              |
| `V0 & V1`        | 1           | register 0 is read; register 1 shifts down, V1 ← 0        |
| `V0 & V1`        | 0           | hold; `ready` to both inputs is 0                         |

`out_ready` only affects which register is written. It never reaches `l_ready` or `r_ready`
combinationally. The longest path is therefore one W-bit comparator, the select multiplexer and
the register enables, at any N.

**Equal keys.** With the strict `<` of the published algorithm and diagram, a tie goes to the
right input. Across the tree, equal keys therefore leave in decreasing input position: among
equal keys, the one loaded into the highest-numbered leaf comes out first. This order is fixed
and repeatable, so the sort is stable with respect to reversed input order.

**Index field.** `IDX_W` extra bits travel below the key in every register and are not
compared. The sorter uses them to carry each element's input position (`INDEX_EN = 1`), which
a consumer needs if it must know where each sorted value came from.

## Building the tree (`hourglass_sorter`)

Level 0 holds N leaf registers (`hg_leaf`). Level l ≥ 1 holds ceil(N / 2^l) cells. Cell j of
level l merges nodes 2j and 2j+1 of level l−1. There are `LEVELS = ceil(log2 N)` levels of
cells, and the single cell of the last level is the root. All nodes sit in one flat index
space (`hourglass_pkg::level_offset`), so the tree is two nested `for` generate loops.

**Odd levels.** When a level has an odd number of nodes, its last node has no partner. That
node is *not* passed straight down to the next-but-one level. A cell with only a left parent is
inserted, its right input tied to "empty". Skipping the cell would make that subtree's values
arrive one cycle earlier than the others. A cell receiving its first value from one side only
would then treat the other side as exhausted and could emit a value too early. The example
below is N = 6: three cells, then two (the right one with one parent), then the root.

```
  leaves    0 1   2 3   4 5
            \ /   \ /   \ /
  level 1   [a]   [b]   [c]
              \   /       \
  level 2      [d]         [e]     e has only a left parent
                  \       /
  level 3           [root]
```

## Interface and timing

| port                | dir | width     | meaning                                                      |
|---------------------|-----|-----------|--------------------------------------------------------------|
| `clk`, `rst`        | in  | 1         | clock; synchronous active-high reset, empties every register |
| `load`              | in  | 1         | write `in_data`/`in_valid` into the leaves at this edge      |
| `in_data`           | in  | N × W     | the array, packed, element i in `in_data[i]`                 |
| `in_valid`          | in  | N         | 0 leaves that leaf empty (arrays shorter than N)             |
| `out_data`          | out | W         | sorted keys, lowest first                                    |
| `out_index`         | out | clog2(N)  | leaf position of `out_data` if `INDEX_EN`, else 0            |
| `out_valid`/`out_ready` | out/in | 1  | valid/ready output stream; transfer when both are 1          |

Parameters: `N` (default 1024), `W` (default 32), `INDEX_EN` (default 0). N must be at least 2.

Timing, with `out_ready` held high and n valid elements. The load is captured at clock edge
e0. The smallest key is on `out_data` with `out_valid = 1` right after edge e0 + LEVELS. Key k
(counting from 0) is taken at edge e0 + LEVELS + 1 + k, and the last one at e0 + LEVELS + n.
For the default size this is 10 + 1024 edges. Afterwards `out_valid` stays low until the next
load. If `out_ready` drops, the stream stalls without losing or reordering anything. A stalled
cell fills its second register and then stops accepting, and the stall spreads up the tree one
level per cycle.

Use: hold `load` for one cycle with the array, then read the stream. To stop early, for
example after the m lowest keys, pulse `rst` to discard the rest. Load the next array only once
the previous one has left the tree or after a reset. A load into a tree that still holds
values would merge the two arrays. Nothing detects this.

## Cost

Every cell has two registers of W + 1 bits (key and valid) and one W-bit comparator. Every
leaf has one register of W + 1 bits. For N = 1024, W = 32 that is
1023 · 2 · 33 + 1024 · 33 = 101,310 flip-flops, which is what synthesis of this RTL reports.
The same formula gives the register counts the authors published for all their configurations
(e.g. 27,630 for 1024 × 8 and 1,710 for 64 × 8). With `INDEX_EN = 1` every register grows by
clog2(N) bits, so the extra cost is O(N log N).

## Departures and choices

Taken from the published description:
* the cell's select rule, its `ready = !V1` and its four register cases;
* the output taken from register 0;
* one register per input on the first level;
* single-parent cells on odd levels;
* the optional index bits;
* the latency of log2 N + n.

This design's own choices, or readings of unclear points:
* **Tie order.** The published algorithm and cell diagram use a strict `<`, so ties go right.
  The prose elsewhere claims stability with preference for the left subtree, which would need
  `<=`. This RTL follows the algorithm and the diagram. Changing `<` to `<=` on the `lt` line
  of `hg_cell` gives left-first ties.
* **The shift case clears V1.** The published pseudo-code writes only "D0, V0 ← D1, V1".
  Without also clearing V1, the same value would be emitted twice.
* **Loading and reset.** The published description does not say how the array is written into
  the leaves. Here a single `load` strobe writes all leaves in one cycle, and `load` wins over a
  transfer in the same cycle. There is one synchronous reset. Data registers are not reset,
  only valid bits.
* **Default size.** No configuration is singled out as the main one. The default, 1024 × 32,
  is the largest published configuration, so every published size fits in it. A smaller array
  leaves leaves empty, and a narrower key is zero-extended. On the default tree the latency is
  then 10 + n rather than log2 n + n.
* **Port layout.** `out_index` reads 0 when `INDEX_EN = 0` (synthesis reports these bits as
  constant). `r_ready` of a single-parent cell is left unconnected (a lint warning notes it).

Not included: the surrounding decoder (belief propagation producing the array, ordered-statistics
decoding consuming the stream). Its connections are the sorter's input array and its output
stream.

## Files

| file                          | content                                                   |
|-------------------------------|-----------------------------------------------------------|
| `rtl/hourglass_pkg.sv`        | tree-shape functions (levels, nodes per level, offsets)   |
| `rtl/hg_leaf.sv`              | input register with load and valid/ready output           |
| `rtl/hg_cell.sv`              | the two-register merge cell, with handshake assertions    |
| `rtl/hourglass_sorter.sv`     | top: leaves plus generated tree                           |
| `tb/tb_hg_leaf.sv`            | leaf: load, hold, empty on transfer, load priority, reset |
| `tb/tb_hg_cell.sv`            | cell: merge of random sorted streams, ties, stall, no bubbles |
| `tb/tb_hourglass_sorter.sv`, `tb/sorter_check.sv` | N = 2, 6, 8, 13 with index bits; random and partial arrays, backpressure, reading only the m lowest keys then resetting; counts every mechanism |
| `tb/tb_hourglass_table.sv`, `tb/table_check.sv` | published sizes 64×8, 128×16, 256×32, 512×8: keys and exact latency |
| `tb/tb_hourglass_full.sv`     | default 1024 × 32: latency 10 + 1024, then a partial array under backpressure |

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. Each has a
cycle-count watchdog.

## Simulating

With Verilator 5 (two-state, `--timing` for the testbench delays), from the directory holding
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hourglass_pkg.sv \
          tb/tb_hourglass_sorter.sv --top-module tb_hourglass_sorter -Mdir obj
./obj/Vtb_hourglass_sorter
```

Replace the testbench name to run another one. Build times grow with N: the small-tree test
builds in seconds, while the 1024-leaf test takes about a minute to compile and well under a
second to run. The cell's assertions (`V1 → V0`, `D1 ≥ D0`, output held while stalled) are
active with `--assert`. The `D1 ≥ D0` assertion presumes sorted input streams, which the tree
always supplies.
