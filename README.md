# Sorting inside a memristive crossbar

Sorting normally means reading every value out of memory, comparing and
swapping in a processor, and writing the result back. This design does the whole
sort inside the memory array instead. The array is a memristive crossbar that
computes with *stateful logic* (MAGIC): a NOR of a few cells is written straight
into another cell of the same array, with no sense amplifier and no data on any bus. A
compare-and-swap (CAS) unit is a short, fixed program of such NOR/NOT
operations. A bitonic sorting network is many CAS programs running side by side
in separate slices of the array, with a few in-array copies between network steps.
Once the inputs are written, no value leaves the array until the sorted result
(or, for the median filter, the median) is read.

Numbers can live in the array in two ways, and both are built:

* **Binary**: a word of `DW` bits stands in one column, bit *i* in row *i*.
  A CAS needs a magnitude comparator and two multiplexers, all made of NORs, so
  it takes a number of cycles that grows with `DW`.
* **Unary**: a value *v* stands in one column as a thermometer bit-stream of
  `BL` bits (*v* ones, then zeros). The minimum of two such streams is their
  bitwise AND and the maximum is their bitwise OR. Every row works at once, so a
  CAS always takes five cycles, whatever the precision.

On top of the sorters sits their main application, median filtering over 3x3
and 5x5 windows. It uses reduced networks that only bring the middle value into
place.

The SystemVerilog models the array's logic function and synthesizable
controllers that drive it cycle by cycle. The controllers produce the exact
stream of array operations that a crossbar with MAGIC drivers would execute.

## Design hierarchy

```
inmem_sort_top
 ├─ imc_sorter (binary, N=8, 8-bit words)          ─┐
 ├─ imc_sorter (unary,  N=8, 256-bit streams)       │
 ├─ median_filter (3x3, binary, 8-bit pixels)       │ each: controller + crossbar
 ├─ median_filter (3x3, unary, 256-bit streams)     │
 ├─ median_filter5x5 (binary, 8-bit pixels)         │
 └─ median_filter5x5 (unary, 256-bit streams)      ─┘
imc_sorter       = bitonic_ctrl + magic_crossbar
median_filter    = median_ctrl  + magic_crossbar   (WIN = 3 or 5)
median_filter5x5 = median_filter with WIN = 5
bitonic_ctrl / median_ctrl each contain one CAS sequencer:
                   binary_cas_seq or unary_cas_seq (chosen by MODE)
imc_pkg          = micro-operation type, column map, helpers
```

The six units are independent. Each has its own start/busy/done and host port,
and all six may run at once.

## The array and its operations (`magic_crossbar`, `imc_pkg`)

A cell in the low-resistance state is logic 1 and one in the high-resistance
state is logic 0. A MAGIC gate first sets its output cell to 1. Driving the input
cells and the output cell with the right voltage then leaves the output at 1 or
switches it to 0, giving NOR (one input gives NOT). The output can only go 1→0.
Forgetting the initialisation therefore gives a wrong answer silently. The model
keeps this property: a NOR writes `out &= ~(a | b)`, so a skipped initialisation
shows up as a test failure instead of being hidden.

Each cycle the controllers send one micro-operation (`mop_t`) per *partition*,
that is, per slice of columns:

| kind         | effect                                                                    |
|--------------|---------------------------------------------------------------------------|
| `MOP_INIT`   | set a masked group of a partition's columns to 1 (all rows)               |
| `MOP_ROWNOR` | `dst[r] &= ~(a[r] \| b[r])` for rows `row_lo..row_hi` (NOT when one input) |
| `MOP_COLNOT` | inside one column: `c[r] &= ~c[src_row]` for rows `row_lo..row_hi`        |

All the operations of one cycle read the array as it was at the start of that
cycle. A copy is two NOTs through a staging column. The crossbar also has a plain host
port: writing a column loads one word or stream, and a combinational read returns
one column. `magic_crossbar` is a behavioural model. It has no resistances,
voltages, energy or device timing.

## Column map of a partition

Every partition has the same local layout (`imc_pkg`):

| local column | use                                                                    |
|--------------|------------------------------------------------------------------------|
| 0, 1         | MAX0, MIN0: CAS outputs, first set                                     |
| 2, 3         | MAX1, MIN1: CAS outputs, second set                                    |
| 4, 5         | IN0, IN1: operands loaded by the host or copied in from another partition |
| 6            | TMP: middle cell of a two-NOT copy                                     |
| 7 …          | work columns of the CAS program                                        |

The binary unit uses 17 columns per partition for any word width. The unary unit
uses 9. Two sets of output columns and two input columns are the key to running
several steps without re-reading anything. One step's CAS reads its operands from
one set and writes the other set. This means the value that stays in a partition never has
to move, and initialising the next outputs never destroys a live operand.

## The binary compare-and-swap unit (`binary_cas_seq`)

The sequencer issues one operation per cycle for `PC_B = 4*DW + 17` cycles. The
operations use symbolic columns (`COL_A`, `COL_B`, `COL_MAX`, `COL_MIN`), which
the network controller maps to real columns of each partition.

**Comparator (4·DW + 5 cycles).** All rows work in parallel where they can:

1. `NAB = NOR(A,B)`, then `LT = NOR(NAB,A) = ~A & B` and `GT = NOR(NAB,B) = A & ~B`.
   That gives, per bit, "A smaller here" and "A larger here".
2. A ripple chain runs from bit 0 upward. Let `ge_i` mean `A[i:0] >= B[i:0]`. Then
   `ge_0 = NOT LT_0` and `ge_i = NOR(LT_i, NOR(GT_i, ge_{i-1}))`.
   The previous result sits one row above. Each step therefore first moves it down
   with a column-direction NOT, then restores its polarity with a row NOT, and then
   applies the two NORs. Even and odd rows use two different chain columns, so no
   cell is ever written twice without an initialisation.
3. The final `ge` (top row) is inverted and broadcast into every row of two
   columns: `SGE = A >= B` and `SLT = A < B`. These are the select lines.

**Multiplexers (12 cycles).** `~A` and `~B` are formed, and then:

```
P = NOR(~A, SLT)   Q = NOR(~B, SGE)   T = NOR(P, Q)   MAX = NOT T
(re-initialise P, Q, T)
R = NOR(~A, SGE)   S = NOR(~B, SLT)   U = NOR(R, S)   MIN = NOT U
```

Take `MAX` when `A >= B`: `Q` is 0, `P = A`, `T = ~A`, so `MAX = A`.
`MIN` is the mirror image. The order of these ten operations and their two
initialisations, and the names P, Q, T, R, S, U, follow the published
multiplexer drawing.

**Where this departs from the source design.** The source's comparator is a
specific NOR netlist drawn only for 4-bit words. Its CAS unit takes `6n + 15`
cycles (39 for 4 bits, 63 for 8 bits) and `2n + 6` columns. The comparator here
is a regular ripple structure that works for any width. It takes `4n + 17` cycles
(33 for 4 bits, 49 for 8 bits) and 17 columns. Every cycle count of a binary
network below therefore differs from the published tables. The network-level
formula is the same.

## The unary compare-and-swap unit (`unary_cas_seq`)

Five operations, after one initialisation cycle:

```
1: W0  = NOT A
2: W1  = NOT B
3: MIN = NOR(W0, W1)        = A AND B
4: W0  = NOR(A, B)          (W0 reused without re-initialising)
5: MAX = NOT W0             = A OR B
```

Reusing `W0` in cycle 4 is safe because `~A & ~(A|B) = ~(A|B)`. The published
design also reuses the second inverse column for the maximum. That would need an
extra initialisation, so here the maximum goes to its own column. The cycle count,
one initialisation plus five operations, is the published one.

## Running a whole bitonic network (`bitonic_ctrl`, `imc_sorter`)

An N-input bitonic network has `S = log2 N · (log2 N + 1) / 2` steps of `N/2`
independent CAS operations. The array is cut into `N/2` partitions, one CAS per
partition per step, and all partitions run the same sequencer program in lockstep.
Between two steps, each partition keeps one of its two results and sends the
other to the partition where the next step needs it. That is `N/2` copies, two
cycles each, issued one after another. The run takes

```
PC_t = S · (1 + PC_B) + 2 · (S − 1) · N/2
```

cycles: one initialisation cycle per step, `PC_B` cycles of CAS program, and the
copies. For the unary unit this reproduces the published totals exactly: 26, 76
and 538 cycles for N = 4, 8 and 32. For N = 16 the published table shows 194,
while the same formula gives 204. The RTL follows the formula, and its testbench
checks 204.

**Which network.** All CAS operations sort ascending, with the smaller value on
the lower-numbered wire. Stage `k` (k = 2, 4, …, N) first pairs wire `w` with
`w ^ (k−1)` (the mirrored half-cleaner), then with `w ^ k/4`, …, `w ^ 1`. This is
the variant drawn for the 8-input example. It needs no descending comparators,
and the output is in order on wires 0..N−1.

**Which value stays.** This is the least obvious part of the controller.
Take the pairing masks `m` (current step) and `m'` (next step). They link the
wires into 4-cycles, and in each current pair exactly one wire must stay. Let
`c = lowbit(m')` if `m` contains that bit, else `c = lowbit(m') | lowbit(m)`.
Wire `x` of the next pair `{x, x ^ m'}` stays when `parity(x & c) = 0`. This
rule gives exactly one stayer per partition at every step boundary. The
controller stores only which partition holds each wire (`part_of`). It also
stores whether the staying value sits in the MAX or the MIN column of that
partition (`a_is_max`). A wire holds the maximum of its pair when its index has
the highest bit of the current mask set.

**Columns per step.** In step `s` with parity `p`, the CAS reads operand A from
last step's output set and operand B from `IN[p]`. It writes `MAX[p]` and
`MIN[p]`. The copies for step `s+1` go through `TMP` into `IN[1−p]`. The step's
initialisation cycle sets the work columns, `MAX[p]`, `MIN[p]`, `IN[1−p]` and
`TMP` to 1.

**Host view (`imc_sorter`).** Write input `w` with `wr_en`/`wr_wire`/`wr_data`
while idle. Even wires land in `IN0` and odd wires in `MAX1` of partition `w/2`,
which is where step 1 expects them. Then pulse `start`, wait for `done`, and read
output `w` (ascending) with `rd_wire` → `rd_data`. `op_cycles`, `steps_done` and
`copies_done` report the last run. The host must not write during a run, and an
assertion checks this.

## The median filters (`median_ctrl`, `median_filter`, `median_filter5x5`)

A median needs far fewer CAS operations than a full sort. The nine window values
(wires 0..8) pass through 19 CAS operations in eight steps on five partitions
A..E:

| step | CAS (partition: wires)                 |
|------|----------------------------------------|
| 1    | A:0,1  B:2,3  C:4,5  D:6,7             |
| 2    | A:0,2  B:1,3  C:4,6  D:5,7             |
| 3    | A:0,4  B:1,2  C:5,6  D:3,7             |
| 4    | B:1,5  C:2,6                           |
| 5    | A:2,4  D:3,5                           |
| 6    | A:3,4                                  |
| 7    | E:3,8                                  |
| 8    | E:4,8  → median on wire 4              |

Steps 1–3 sort wires 0–3 and 4–7 into two ordered groups of four. Steps 4–6
bring the two middle values of those eight onto wires 3 and 4. Steps 7–8 merge in
the ninth value, which was loaded straight into partition E at the start. The
network is exhaustively correct: it gives the right median for all 2^9 inputs of
zeros and ones, so by the 0-1 principle it is right for any input. It reproduces the worked
example 1,8,4,6,3,5,9,2,7 → 5 step by step.

**The 5x5 network** takes the 25 values (wires 0..24) through 104 CAS
operations in 18 steps, at most 12 per step. In its first ten steps the
wires 0..12 and 13..24 form two groups that are worked on separately; from
step 11 on, CAS operations across the groups narrow the candidates for the
middle down to wire 12. Like the 3x3 network it was checked over
all 2^25 inputs of zeros and ones. The pairs, in order, are listed in the
`net()` table of `median_ctrl`.

**Where the values live.** Median networks are irregular. Some partitions sit
idle for a few steps while still holding values that are needed later, and a CAS
may find one, both or neither of its operands in its own partition. For example,
in the 3x3 network partition A holds wire 4 from step 3 until step 5, and holds
it again from step 6 until step 8. `median_ctrl` therefore tracks a location
(partition, local column 0..5) for every wire. It plans each step in one
preparation cycle that also initialises the active partitions:

* A value is *live* until the last step that uses it; the median is always live.
  The columns 0..5 of a partition that hold live values are occupied.
* An operand that is not in the CAS's partition is copied in: two NOTs through a
  staging column, two cycles, copies one after another in partition order. Its
  target is the first free column. When both operands come from elsewhere, the
  second copy is staged through another free column instead of `TMP`.
* The CAS writes its minimum and its maximum to the next two free columns. The
  lower wire then lives in the minimum column, the upper wire in the maximum one.
* Only active partitions are initialised, so an idle partition keeps its values.
* Values are loaded where step 1 needs them (`IN0` for the lower wire, `IN1` for
  the upper one). A value that step 1 does not use goes to `IN0` of the last
  partition (E in the 3x3 filter).

The 3x3 network uses the five partitions A..E of the table. For the 5x5 network
each CAS is placed in a partition that already holds one of its operands where
possible, which needs 13 partitions (the published design uses 20). Six value
columns per partition are always enough; an assertion checks this.

A run takes `NS · (1 + PC_B) + 2 · copies` cycles:

| filter | steps | copies | binary, 8 bits | unary, 256 bits | published |
|--------|-------|--------|----------------|-----------------|-----------|
| 3x3    | 8     | 15     | 430            | 78              | 544 / 72  |
| 5x5    | 18    | 99     | 1098           | 306             | 1416 / 259 |

For the 3x3 filter, each of the 15 CAS operations of steps 2–8 needs one copy.
The published 3x3 figures, with the published CAS latencies, imply 16 copies
(binary) and 12 (unary), which do not agree with each other or with the network
above. The 5x5 differences come from the comparator, the partition count and the
copy count.

Host view: write the window values with `wr_idx` 0..8 (or 0..24), pulse `start`,
and read `med_data` after `done`. The order of the values in the window does not
matter.

## Sizes and parameters

| module             | parameter | default      | meaning                                 |
|--------------------|-----------|--------------|-----------------------------------------|
| `inmem_sort_top`   | `BIN_N`, `UN_N` | 8      | network inputs (power of two)           |
|                    | `BIN_DW`  | 8            | binary word width = array rows          |
|                    | `UN_BL`   | 256          | unary stream length (8-bit precision)   |
|                    | `MED_DW`, `MED_BL` | 8, 256 | median filter widths                 |
| `imc_sorter`, `bitonic_ctrl` | `N`, `ROWS`, `MODE` | 8, 8, binary |                |
| `median_filter`, `median_ctrl` | `WIN`, `ROWS`, `MODE` | 3, 8, binary | window size 3 or 5 |
| `median_filter5x5` | `ROWS`, `MODE` | 8, binary |                              |

Array sizes at the defaults: binary sorter 8 × 68 cells, unary sorter 256 × 36,
binary 3x3 median filter 8 × 85, unary 256 × 45; binary 5x5 median filter
8 × 221, unary 256 × 117. The published arrays
are narrower (8 × 88 would correspond to 22 columns per binary partition, 5 per
unary partition). The extra columns here are the second output set, the second
input column and the copy staging column.

Cycle counts at the defaults:

| unit                       | cycles | published |
|----------------------------|--------|-----------|
| binary CAS, 8 bits         | 49     | 63        |
| unary CAS                  | 5 (+1 init) | 5 (+1 init) |
| binary sort, N = 8, 8 bits | 340    | 424       |
| unary sort, N = 8          | 76     | 76        |
| binary 3x3 median          | 430    | 544       |
| unary 3x3 median           | 78     | 72        |
| binary 5x5 median          | 1098   | 1416      |
| unary 5x5 median           | 306    | 259       |

## What is not here

* The 64 × 64-pixel image processors are not built. They run many median filters in one large array, and
  their arrangement is not specified beyond the array size. One filter of this design would
  process the image window by window.
* The analog side is not modelled: device model, the MAGIC gate voltages, energy and
  latency in seconds. Multi-input NORs with three or four inputs are not used.
* Splitting unary streams longer than the array's rows into several columns is
  not implemented. That option is mentioned, but not specified, as a way to
  extend the unary design.
* Binary-to-unary conversion is outside the design. Unary inputs are written
  as bit-streams.

## Simulation

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line. Each has a watchdog.

| testbench              | what it covers                                                                 |
|------------------------|--------------------------------------------------------------------------------|
| `tb_magic_crossbar`    | MAGIC write rule (a NOT into an uninitialised 0 cell stays 0); random op streams against a reference model |
| `tb_binary_cas_seq`    | all 256 pairs of 4-bit words; unit latency 33 cycles                           |
| `tb_unary_cas_seq`     | all pairs of 16-bit thermometer streams, plus random streams (checks AND/OR); 5 cycles |
| `tb_bitonic_ctrl`      | unary networks N = 4, 8, 16, 32 (26/76/204/538 cycles); binary N = 4 and 16 at 4 bits |
| `tb_imc_sorter`        | binary sorter at its defaults: edge cases and random data, 340 cycles, 6 steps, 20 copies |
| `tb_median_filter`     | 3x3 and 5x5 filters, binary and unary, at full size: worked example, edge cases and random windows; cycle, step and copy counts |
| `tb_inmem_sort_top`    | the whole top at its defaults: all six units running at once, with counts of steps, copies, swaps and overlapping runs |

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal --top-module tb_inmem_sort_top \
    -Irtl rtl/imc_pkg.sv rtl/magic_crossbar.sv rtl/binary_cas_seq.sv \
    rtl/unary_cas_seq.sv rtl/bitonic_ctrl.sv rtl/imc_sorter.sv \
    rtl/median_ctrl.sv rtl/median_filter.sv rtl/median_filter5x5.sv \
    rtl/inmem_sort_top.sv \
    tb/tb_inmem_sort_top.sv
./obj_dir/Vtb_inmem_sort_top
```

For `tb_bitonic_ctrl`, also add `tb/bitonic_harness.sv`. The simulator is used
in two-state mode. The crossbar resets to all zeros, and every controller has an
asynchronous active-low reset.

## Changing the design

* **Another network size or width:** set `N` (power of two) and `ROWS`. The
  controller derives the pairings, stayers and cycle counts from these.
* **Another CAS program:** change the schedule function in the sequencer,
  keep `PC_B` in the controllers in step with it, and keep its work columns
  within the partition layout in `imc_pkg`.
* **Another median network:** replace the `net()` table in `median_ctrl`
  (window, step, partition → active, lower wire, upper wire), and set `NW`,
  `NP`, `NS` and `MED`. The location tracking handles any network, as long as no
  partition ever needs more than six value columns at once (the `a_room`
  assertion fires otherwise); placing each CAS where one of its operands already
  is keeps the copy count low.
