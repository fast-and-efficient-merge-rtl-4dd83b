# List Offset Merge Sorters in SystemVerilog

A merge sorter takes several lists that are each already sorted and produces one sorted
list of all their values. The classic hardware answer, Batcher's odd-even and bitonic
merge networks, needs one more compare-exchange stage every time the list size doubles.
A **List Offset Merge Sorter (LOMS)** needs a fixed, small number of stages whatever the
list size: two stages to merge two lists, three stages to merge three.

The trick is the placement. The input lists are laid out in a 2-D array, and the order
in which each list fills its rows is *offset* from the order of the other lists. With
that placement, sorting every column in parallel moves every value into the row where
it finally belongs; sorting every row in parallel then finishes a 2-way merge. Each of
those sorts is itself a single-stage circuit: all comparisons in parallel followed by
one level of selection.

This repository holds synthesizable, combinational RTL for:

| module       | what it is |
|--------------|------------|
| `loms_2way`  | 2-way LOMS, any list sizes, any number of columns (default UP-32/DN-32, 2 columns, 32-bit) |
| `loms_3way`  | 3-way LOMS for three lists of 7 values ("3c_7r"), with an early median output |
| `s2ms`       | single-stage 2-way merge sorter, the column sorter of `loms_2way` |
| `n_sorter`   | single-stage N-sorter, the row sorter (and the 3-way column sorter) |
| `loms_top`   | one `loms_2way` and one `loms_3way` side by side, with default parameters |
| `loms_pkg`   | shared types and the elaboration-time functions for the 2-way setup array |

Everything is combinational: no clock, no reset, no handshake. The outputs are valid one
propagation delay after the inputs settle. To run it at a clock rate, put registers around
it, or between the stages if one stage per cycle is wanted.

## Conventions

* A list of N values is an unpacked array `[N]` whose element 0 is the **smallest** value
  (`A_00` is the minimum of list A) and element N-1 the largest. The outputs use the same
  order.
* Values are unsigned, `W` bits wide (`W` = 32 by default; 8 is the other width the
  devices were characterised with).
* The two inputs of a 2-way merge are called UP (list A) and DN (list B). When an UP value
  equals a DN value, the UP value is placed above it. Since only values travel through the
  network, this makes no visible difference to the output.

## The 2-way merge (`loms_2way`)

### The setup array

With `NCOL` columns, the array is built as follows (Col `NCOL-1` is drawn on the left,
Col 0 on the right, and rows are numbered from the bottom):

1. The UP list fills the top rows, largest value first. Each UP row runs from its largest
   value in Col `NCOL-1` to its smallest in Col 0.
2. The DN list fills the rows below, largest value first, but each DN row runs the other
   way: largest in Col 0, smallest in Col `NCOL-1`. This reversal is the "offset".
3. If a list does not fill its last row, the gaps are slid to the bottom of their column
   and any row left fully empty is dropped.

For UP-8/DN-8 with two columns:

| Row | Col 1 | Col 0 |
|-----|-------|-------|
| 7   | A_07  | A_06  |
| 6   | A_05  | A_04  |
| 5   | A_03  | A_02  |
| 4   | A_01  | A_00  |
| 3   | B_06  | B_07  |
| 2   | B_04  | B_05  |
| 1   | B_02  | B_03  |
| 0   | B_00  | B_01  |

For UP-7/DN-5 the A list leaves a gap in Col 0 under `A_01` and the B list leaves a
gap in Col 1 of its bottom row. After the gaps slide down, the bottom row is empty and
is removed, which leaves six full rows.

In hardware all of this is wiring. The functions in `loms_pkg` compute, at elaboration,
how many UP and DN values fall in each column (`up_in_col`, `dn_in_col`), which input goes
where (`up_src`, `dn_src`), and which cells each row holds once the gaps have moved down
(`row_pop`, `row_col`, `rows_above`).

### Stage 1: column merge

Every column now holds a descending run of UP values stacked on a descending run of DN
values. A column is therefore a 2-way merge problem of its own, solved by one `s2ms`
instance per column (UP-`NUP/NCOL` / DN-`NDN/NCOL`; 16_16 for the default). A column that
received values from only one list is already sorted and gets no sorter. After this
stage, every value is in the row it will end in. Intuitively, the offset makes each row
straddle matching ranks of the two lists, so one column sort brings every value to its
final row.

### Stage 2: row sort

Every row is sorted by an `n_sorter` with N = `NCOL` (a 2-sorter for two columns), with
the largest value to Col `NCOL-1`. A row with a single value, as the bottom row of
UP-1/DN-8 can have, needs no sorter.

### Read-out

Reading rows from the top, each from Col `NCOL-1` to Col 0, gives the merged list in
descending order. `merged[NUP+NDN-1]` is the top-left cell.

Worked example (two columns): A = {15,14,13,10,9,6,5,1}, B = {16,12,11,8,7,4,3,2}. After
the column merge, the array reads (Col 1 / Col 0, top row first) 15/16, 13/14, 12/11, 9/10,
8/7, 5/6, 4/3, 2/1. Each row then only needs its two values put in order, which gives
16, 15, ..., 1. `tb_loms_2way` checks this array cell by cell.

### Choosing the number of columns

For a fixed output size, more columns mean smaller column mergers and larger row sorters.
The characterised grid was:

| outputs | 2 columns | 4 columns | 8 columns |
|---------|-----------|-----------|-----------|
| 8       | 2_2       |           |           |
| 16      | 4_4       | 2_2       |           |
| 32      | 8_8       | 4_4       | 2_2       |
| 64      | 16_16     | 8_8       | 4_4       |
| 128     | 32_32     | 16_16     | 8_8       |
| 256     | 64_64     | 32_32     | 16_16     |

(`a_b` is the UP/DN size of each column merger.) List sizes need not be equal, even, or
powers of two. The placement rules above work for any `NUP`, `NDN` and `NCOL >= 2`. A
reference model was checked for all sizes from 1 to 19 with 2, 3, 4 and 8 columns, and the
testbenches cover odd and unequal sizes.

## The column merger (`s2ms`)

A single-stage 2-way merge compares every UP value with every DN value at once,
`ge[i][j] = up[i] >= dn[j]`, and then selects each output directly from the inputs.
Nothing waits for anything else, so the delay is one comparator plus one multiplexer
tree.

For UP-2/DN-2 the module writes the four output equations out as nested 2-to-1 selects,
with `In_3, In_2` the UP list and `In_1, In_0` the DN list:

```
Out_3 = ge_3_1 ? In_3 : In_1
Out_2 = ge_3_1 ? (ge_2_1 ? In_2 : In_1) : (ge_3_0 ? In_3 : In_0)
Out_1 = ge_2_0 ? (ge_2_1 ? In_1 : In_2) : (ge_3_0 ? In_0 : In_3)
Out_0 = ge_2_0 ? In_0 : In_2
```

The two middle outputs each depend on four data inputs and three comparisons, too many
for one 6-input LUT. `LUT_STYLE` picks between two ways of splitting them:

* `LUT_2INS` (default): two LUTs each see two data bits and one comparison, and a
  2-to-1 mux (an FPGA MUXF7) picks between them. This is the faster form.
* `LUT_4INS`: for `Out_1`, one LUT sees all four data bits, `ge_2_0` and the combined
  signal `ge_2_1 || !ge_3_0`. That signal is enough because the lists are sorted. When
  `In_2 >= In_0`, `ge_3_0` is certainly true. When `In_2 < In_0`, `ge_2_1` is certainly
  false. This form is denser but slower.

Both styles compute the same values. The style only matters to a synthesis tool mapping
onto LUT6 + MUXF7/F8/F9 slices.

For general sizes, `s2ms` uses the thermometer property of sorted lists. For a fixed UP
value `up[i]`, the row `ge[i][*]` is all ones up to some DN index and zeros after it. So
`up[i]` lands at output `i + t`, where `t` is the position of that step. Likewise `dn[j]`
lands at `j + s`, where `s` is the number of UP values below it. Each output ORs the
inputs whose one-hot select names it. This general construction is this implementation's
own. Only its single-stage character and the UP-2/DN-2 equations are taken from the
design it implements.

## The row sorter (`n_sorter`)

This is a single-stage N-sorter. All N(N-1)/2 pairs are compared at once. Each input's
rank is the number of inputs that belong below it, with ties broken by input index so
that the ranks form a permutation. Each output then picks the input with its rank. Only
the block's role, a one-stage sorter of N unsorted values, comes from the LOMS design;
the rank-and-select circuit is the simplest one-stage construction.

## The 3-way merge (`loms_3way`, 3c_7r)

Three lists A, B, C of 7 values are merged on a 3-column, 7-row array. The placement is
the lists one after another, largest first, filling rows from the top, each row from
Col 2 to Col 0:

| Row | Col 2 | Col 1 | Col 0 |
|-----|-------|-------|-------|
| 6   | A_06  | A_05  | A_04  |
| 5   | A_03  | A_02  | A_01  |
| 4   | A_00  | B_06  | B_05  |
| 3   | B_04  | B_03  | B_02  |
| 2   | B_01  | B_00  | C_06  |
| 1   | C_05  | C_04  | C_03  |
| 0   | C_02  | C_01  | C_00  |

It comes from placing each list one column to the right of the previous one (a 5-column
array) and then sliding the overflow three columns left. So each list starts one column
further right than the one before it. The device then runs three stages:

1. **Column sort.** Each 7-value column is sorted, largest at the top (a 7-input
   `n_sorter`).
2. **Serpentine row sort.** Even rows are sorted with the largest value in Col 2, odd
   rows with the largest in Col 0. The final order of the array is this serpentine:
   Row 6 from Col 2 to Col 0, Row 5 from Col 0 to Col 2, and so on down to Row 0 Col 0,
   the minimum. After this stage the **median** (the 11th of 21 values) is already final
   at Row 3 Col 1. It is brought out on `median`, two stages deep instead of three.
3. **Turn-pair sort.** Only the cells where the serpentine turns can still be out of
   order. In Col 0 the pairs Row 6/5, 4/3 and 2/1 are sorted, and in Col 2 the pairs
   Row 5/4, 3/2 and 1/0. Col 1 is not touched.

The six stage-3 pairs are this implementation's reading of "pairs of values in the edge
columns". An exhaustive 0-1 check (512 cases, run in `tb_loms_3way`) shows that these six
pairs sort every input and that none of them can be left out. The same construction does
not sort for every row count (it fails for 3, 6 and 9 rows, for instance), which is why
the module is fixed at 3c_7r and only `W` is a parameter.

Merging more than three lists takes more alternating column and row stages. For k = 4
and 5 lists it takes four stages, for k = 6 five, and for k from 7 to 14 six. The later
stages sort only parts of rows and columns, and which parts has not been worked out
here. No k > 3 device is provided.

## Sizes and cost

| device (defaults)              | comparators                          | stages |
|--------------------------------|--------------------------------------|--------|
| `loms_2way` UP-32/DN-32, 2 col | 2 x 256 (columns) + 32 x 1 (rows) = 544 | 2 (median not applicable) |
| `loms_3way` 3c_7r              | 3 x 21 + 7 x 3 + 6 = 90              | 3 (median after 2) |

Each stage is one rank of parallel comparators followed by one AND-OR selection.

A single-stage merger of the same 64 outputs would need 32 x 32 = 1024 comparators. The
2-column LOMS needs 544, which is the resource argument for the two-stage structure.

## Testbenches

Every testbench is self-checking. It compares each output with a sort done in the
testbench, and prints `TB_RESULT checks=N failures=M`. A watchdog ends it if it hangs.

| testbench           | covers |
|---------------------|--------|
| `tb_s2ms`           | UP-2/DN-2 in both LUT styles, 16_16, and unequal odd sizes; ties, disjoint lists, full-range values |
| `tb_n_sorter`       | N = 2, 3, 7, 8 with many ties and full-range values |
| `tb_loms_2way`      | the worked example above cell by cell; UP-32/DN-32; UP-1/DN-8, UP-8/DN-1, UP-7/DN-5 (gaps and dropped rows); 3, 4, 5 and 8 columns |
| `tb_loms_3way`      | the setup array against the table above; all 512 0-1 inputs; 2000 random cases; median after stage 2 |
| `tb_loms_top`       | both devices at default parameters, end to end. It also counts how often each mechanism occurs (column interleaving, row exchange, UP/DN ties, disjoint lists, stage-3 swaps) and fails if one never does |
| `tb_loms_workloads` | the grid above up to 64 outputs for 2 and 4 columns and up to 256 outputs for 8 columns, 8-bit variants, and the 3c_7r device at 8 bits |

The 2- and 4-column devices with 128 and 256 outputs, and an 8-column UP-256/DN-256 device
(32_32 column mergers), were also simulated and passed. They are not in
`tb_loms_workloads` because Verilator takes about half an hour to build them.

To run one with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl \
  rtl/loms_pkg.sv rtl/n_sorter.sv rtl/s2ms.sv rtl/loms_2way.sv rtl/loms_3way.sv \
  rtl/loms_top.sv tb/tb_loms_top.sv --top-module tb_loms_top
./obj_dir/Vtb_loms_top
```

## How far this follows the source design

Taken from the design:

* the 2-way setup array, the sliding of gaps, the removal of empty rows, and the
  two-stage column-merge/row-sort structure;
* single-stage mergers as column sorters and single-stage N-sorters as row sorters;
* the UP-2/DN-2 equations and the 2-input-bit and 4-input-bit LUT forms;
* the 3c_7r setup array, the serpentine order, the median position, and the fact that
  stage 3 sorts only pairs in the edge columns;
* the characterised sizes and widths.

Own choices:

* the general construction inside `s2ms` and `n_sorter`;
* the exact stage-3 pairs;
* using a 7-sorter for the 3-way column sort;
* list element 0 being the smallest;
* the default column count of 2 for the 64-output device;
* combinational ports with no registers;
* the top level that holds both devices.

One inconsistency in the description was resolved:

* The prose describes the `ge_2_0`-selected structure as belonging to `Out_2`, but the
  equations give it to `Out_1`. The equations are the ones that sort, and they were
  followed, also for the 4-input-bit form.

Not reproduced:

* the FPGA-specific mapping onto LUT6 and hard MUXF7/F8/F9 cells, which is left to
  synthesis;
* the timing and LUT counts, which depend on that mapping.
