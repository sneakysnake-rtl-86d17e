# Snake-on-Chip: a sub-maze SneakySnake pre-alignment filter in SystemVerilog

Read mappers spend most of their time aligning reads against candidate
locations that turn out to differ by more than the allowed number of edits. A
pre-alignment filter runs before the aligner and throws out those pairs
cheaply. It must never throw out a pair that is within the threshold.
SneakySnake is such a filter. It treats the comparison of two reads as a
routing problem. Picture a chip with 2E+1 horizontal wiring tracks, one per
diagonal of the alignment band. Each position where the two reads disagree on
that diagonal is an obstacle on the track. A signal runs from the left edge to
the right edge. It may change track freely between columns, but every
obstacle it crosses costs one unit of delay. The least number of obstacles any
such route must cross can never exceed the edit distance. So a pair whose
route needs more than E obstacles differs by more than E edits, and can be
rejected without aligning it.

This repository is a synthesizable RTL version of the hardware variant of that
filter ("Snake-on-Chip"). It cuts the maze into narrow sub-mazes and solves
them all at once, giving one verdict per clock.

## 1. The chip maze

For a reference R and a query Q of length m and a threshold E, the maze Z has
2E+1 rows and m columns (rows and columns counted from 1):

| row i            | Z[i,j] = 0 (free) when | detects                  |
|------------------|------------------------|--------------------------|
| i = E+1          | Q[j] = R[j]            | matches, substitutions   |
| 1 <= i <= E      | Q[j-i] = R[j]          | deletions in the query   |
| E+1 < i <= 2E+1  | Q[j+i-E-1] = R[j]      | insertions in the query  |

Every other entry is 1, an obstacle. That includes comparisons whose query
index falls outside 1..m. So the upper tracks always start with obstacles, and
the lower tracks always end with them. Every entry is an independent 2-bit
equality test. `chip_maze_builder` therefore computes all (2E+1)·m entries in
one combinational layer.

Worked example (E = 3, m = 12): R = `GGTGCAGAGCTC`, Q = `GGTGAGAGTTGT`.
Column 6 compares R[6] = A with Q[5], Q[4], Q[3] (rows 1–3), Q[6] (row 4) and
Q[7], Q[8], Q[9] (rows 5–7). That gives 0,1,1,1,0,1,1. The main track (row 4)
is free for columns 1–4 and blocked from column 5 onwards. The testbenches
check these values.

The hardware is built for a largest threshold `E_MAX` and lays out its rows as
above with E = E_MAX. The threshold actually applied, `e_thresh`, is an input.
Rows whose diagonal offset is larger than `e_thresh` are forced to all
obstacles, so no route can use them. Because the search below treats all rows
alike, this gives the same count as a maze built for `e_thresh`.

## 2. Escaping through the maze

The search is greedy. From the current checkpoint (first column, at the
start), measure on every row the run of free entries that starts there. Take
the longest run, on whichever row it lies. That run plus the obstacle that
ends it is an *escape segment*, and costs one edit. The new checkpoint is the
column just after that obstacle. If every row starts with an obstacle, the
escape segment is that single obstacle. If the longest run reaches the right
edge, the route is complete and no obstacle is counted. Always taking the
farthest-reaching segment gives the least number of segments, and so the
least number of obstacles. Moving between tracks costs nothing, however
many rows the route jumps. This is one reason the count never exceeds the
edit distance.

`escape_stage` performs one such step in combinational logic. Each row is
shifted right by the checkpoint, with a sentinel 1 placed just past the
sub-maze edge. Its trailing zeros are counted, and a maximum is taken over the
rows. The stage outputs the next checkpoint and a `hit` bit, set when the
segment ended in an obstacle.

On the worked example, the unrestricted search runs along row 4 to column 4.
It crosses the obstacle at column 5 and continues on row 1 from column 6
through column 9. It crosses the obstacle at column 10, runs free at 11,
crosses the obstacle at 12, and arrives: 3 obstacles. The pair passes at E = 3
and is rejected at E = 2.

## 3. Sub-mazes: where the hardware differs from the algorithm

The software search is sequential: each segment starts where the previous one
ended. The hardware removes that dependency. It cuts the maze into
non-overlapping sub-mazes, each T columns wide and 2E+1 rows high, and solves
each on its own as if its first column were the left edge of a chip. Each
sub-maze gets a fixed chain of Y escape stages (`submaze_solver`). The
estimate for the pair is the sum of the sub-mazes' obstacle counts
(`filter_decision`). The pair is accepted when that sum is at most E. The
default, and the configuration the filter was evaluated in, is T = 8 and
Y = 3.

Two effects can make the sub-maze estimate lower than the unrestricted one.
Both keep the filter lossless, and both cost some false accepts:

* **Free restart at each boundary.** A sub-maze's route may begin on any
  track. So a route that had to switch tracks by crossing an obstacle may
  avoid that obstacle by starting on the better track in the next sub-maze.
* **Stage limit.** If Y stages do not reach the right edge of a sub-maze, the
  remaining columns of that sub-maze are not examined and add nothing. With
  T = 8 and Y = 3 this happens only when the first three segments are very
  short, i.e. in dense stretches of mismatches. The output `out_truncated`
  reports it.

With M = 100 and T = 8 there are 13 sub-mazes. The last one covers only four
read columns. Its four padding columns are free on every row, so it ends like
a route that has reached the chip edge.

In the end-to-end test on synthetic 100-base pairs (0–14 random edits,
thresholds 0–10), the unrestricted search rejected about 20 % more pairs than
the T = 8 / Y = 3 hardware: 660 against 552 out of 1541 in one run. That gap
is the accuracy price of solving the sub-mazes in parallel. No pair whose true
edit distance was within the threshold was ever rejected.

The threshold sweep (`tb_workload_100bp`) shows the same effect per
threshold. It uses 120 synthetic pairs per E, half of them within a few edits
of E. False accepts are pairs accepted although their true edit distance is
above E:

| E  | accepted | truly within E | false accepts, T=8/Y=3 | false accepts, unrestricted |
|----|----------|----------------|------------------------|-----------------------------|
| 0  | 32       | 32             | 0                      | 0                           |
| 2  | 41       | 26             | 15                     | 7                           |
| 5  | 66       | 37             | 29                     | 18                          |
| 8  | 68       | 18             | 50                     | 35                          |
| 10 | 81       | 34             | 47                     | 33                          |

These are random pairs, not sequencing data. Only the ordering of the
columns is meaningful, not the rates.

## 4. Pipeline and interfaces

`snake_on_chip` wraps the datapath in three register stages.

| stage | registered                        | combinational logic after it           |
|-------|-----------------------------------|----------------------------------------|
| 1     | R, Q, clamped threshold           | maze, 13 sub-maze solvers (3 stages)   |
| 2     | 13 obstacle counts, threshold     | adder and compare                      |
| 3     | verdict, edit estimate, truncated | —                                      |

* Input stream: `in_valid` / `in_ready`, with `ref_seq`, `qry_seq` (element c
  is base c+1, 2-bit codes A=0 C=1 G=2 T=3) and `e_thresh`. Values above
  `E_MAX` are clamped to `E_MAX`.
* Output stream: `out_valid` / `out_ready`, with `out_accept` (1 = send to the
  aligner), `out_edits` (the estimate) and `out_truncated`. Verdicts come out
  in input order.
* A pair taken on clock edge k is valid at the output after edge k+2 and can
  be taken on edge k+3 at the earliest: three clocks from input handshake to
  output handshake. While `out_ready` stays high, one pair is taken and one
  verdict produced per clock.
* A held verdict (`out_valid && !out_ready`) stalls the whole pipeline, and
  `in_ready` drops for that clock. Assertions in the top check that a held
  verdict does not change and that no input is taken while the output is
  blocked.
* `rst_n` is synchronous and active low, and clears only the valid bits.

The longest combinational path is stage 1 → 2. It runs through the 2-bit
comparators, then three escape stages in series, each a shifter, a
trailing-zero count and a 21-way maximum. If timing is tight, the register
between stages can be moved into the chain of escape stages without changing
any result.

## 5. Parameters and what they hold

| parameter | default | meaning                                           |
|-----------|---------|---------------------------------------------------|
| `M`       | 100     | read length; both reads must have this length     |
| `E_MAX`   | 10      | largest threshold; the maze has 2·E_MAX+1 rows    |
| `T`       | 8       | sub-maze width in columns                         |
| `Y`       | 3       | escape stages per sub-maze                        |

The defaults cover 100-base reads at thresholds of 0–10 % of the read length,
which is the setting in which the hardware filter was evaluated. Reads of 250
bases need `M = 250`, `E_MAX = 25`. Long reads (10 kbp and up) are out of
reach of this structure: it holds both reads and the whole maze in logic at
once. At the defaults, synthesis gives about 32 k word-level cells and 446
flip-flop bits.

## 6. What is this design's own

The maze equation, the greedy escape rule, the lower-bound argument, the split
into independent sub-mazes and the sizes T = 8, Y = 3 come from the published
SneakySnake work. The internal structure of the published hardware is not
described there in enough detail to copy. Everything below is therefore an
engineering choice of this implementation:

* reading each of the Y "module instances" per sub-maze as one escape step in
  a chain;
* counting nothing for the columns left over when the Y steps run out;
* padding the last sub-maze with free columns when T does not divide M;
* the run-time threshold input, with rows masked instead of a maze built per
  threshold;
* the base encoding, the streams, the three pipeline stages, the reset and the
  threshold clamp.

Not implemented:

* reads of unequal length. The published method then discounts leading and
  trailing obstacles; here both reads have length `M`.
* bases other than A/C/G/T (e.g. `N`).
* the host link (PCIe/DMA) of an FPGA board. The streams are where it would
  attach.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=F`. The reference models in `tb/ss_ref_pkg.sv`
are written independently of the RTL, as column-by-column loops. The same
package holds a dynamic-programming edit distance and a random generator of
read pairs with substitutions, insertions and deletions.

| testbench              | what it checks                                                  |
|------------------------|-----------------------------------------------------------------|
| `tb_chip_maze_builder` | every maze entry, random pairs and thresholds; the worked example |
| `tb_escape_stage`      | one step from every checkpoint; all-obstacle and free-row cases |
| `tb_submaze_solver`    | Y-step counts and the out-of-stages flag                        |
| `tb_filter_decision`   | sum and verdict, including sum = E and sum = E+1                |
| `tb_snake_on_chip`     | default size end to end: in-order verdicts against the model, never rejecting a pair within the threshold, latency 3, one pair per clock, stalls, clamp, truncation |
| `tb_workload_100bp`    | threshold sweep E = 0..10, 120 pairs each, one pair per clock, false-accept counts |
| `tb_fig2_example`      | the worked example: 3 obstacles with one 12-wide sub-maze, and the T = 8 / Y = 3 estimate |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ss_pkg.sv tb/ss_ref_pkg.sv tb/tb_snake_on_chip.sv \
    --top-module tb_snake_on_chip -o sim
./obj_dir/sim
```

Replace the testbench name to run another. The full-size end-to-end test
builds in well under a minute and runs in about a second.

## 8. Files

* `rtl/ss_pkg.sv`: base type, default sizes, helper functions
* `rtl/chip_maze_builder.sv`: the maze equation
* `rtl/escape_stage.sv`: one greedy escape step
* `rtl/submaze_solver.sv`: Y steps over one sub-maze
* `rtl/filter_decision.sv`: sum and verdict
* `rtl/snake_on_chip.sv`: top level, pipeline and streams
* `tb/`: testbenches and reference models
