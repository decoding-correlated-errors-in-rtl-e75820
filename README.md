# GARI-NMS ensemble decoder for correlated errors in quantum LDPC codes

This is synthesizable SystemVerilog for a real-time message-passing decoder. It
decodes quantum LDPC codes under circuit-level noise and takes the correlation
between X, Z and Y errors into account. The defaults are sized for the
[[144,12,12]] bivariate bicycle ("gross") code with 12 syndrome rounds. It
implements the architecture described by A. S. Maan, F. M. Garcia Herrero, A. Paler
and V. Savin in "Decoding Correlated Errors in
Quantum LDPC Codes". What comes from that work and what was chosen here is marked
throughout. This RTL is not by those authors.

## The problem: Y errors make short cycles

A Y error is an X and a Z error at the same place and time. In the correlated
detector error model it is a column that has ones in both the X-check rows (D_X)
and the Z-check rows (D_Z). These columns create millions of 4-cycles in the
decoding graph, and message passing handles 4-cycles badly.

The GARI transformation ("graph augmentation and rewiring for inference") adds two
sets of auxiliary error variables:

* `e_bar_Z = e_Z + U e_Y`, the Z part of the error, Y errors included;
* `e_bar_X = e_X + V e_Y`, the X part, Y errors included.

U and V have column weight 1. The decoding matrix becomes

```
          e_Z  e_X  e_Y  e_bar_Z  e_bar_X
 D_X rows  0    0    0     D_X      0       = s_X
 D_Z rows  0    0    0      0      D_Z      = s_Z
 U rows    I    0    U      I       0       = 0
 V rows    0    I    V      0       I       = 0
```

This matrix has no 4-cycles from Y errors. The top part (D_X and D_Z) is dense:
rows of about 33 ones, 792 and 936 rows. The bottom part is large but sparse:
16704 rows of about 8 ones. The decoder only has to output `e_bar_X`; a memory
experiment that protects logical Z observables needs nothing else.

## One iteration

Each member decoder (`gari_decoder`) runs normalized min-sum (NMS) on this matrix
with a hybrid schedule. One iteration does, in this order:

1. **Bottom part** (`bottom_unit`), as two layers. The U rows go first, all at
   once, then the V rows, all at once. Inside a layer no two rows share a column,
   because every column of U and of V holds a single 1.
2. **Top part.** The D_X unit and the D_Z unit run at the same time. Each is a
   serial decoder (`serial_unit`) that processes one row per clock in a random
   order, which is new for every pass.

The two top blocks share no variable, so they talk to each other only through the
bottom part. The D_X unit sees only the `e_bar_Z` columns and the D_Z unit only the
`e_bar_X` columns. What they exchange with the bottom unit is one message per
auxiliary column, in each direction:

* `b[i]` goes from the bottom unit up. It is what the U (or V) row sends to
  `e_bar[i]`.
* `S[i]` goes from the top unit down. It is the sum of all top-row messages
  currently sent to `e_bar[i]`.

The posterior of `e_bar[i]` is `b[i] + S[i]`. Each side's extrinsic input is the
other side's value. Decoding starts with the bottom part, because the `e_bar`
columns have no prior of their own (LLR 0).

## The serial units and their pipeline

This is the part that needs the most care. The serial unit has one check-node
processor. It starts a new row every clock, and a row takes `PIPE = 10` clocks
from issue to write-back:

| stage | work |
|---|---|
| 1 | read the row number from the shuffled order |
| 2 | read the row's column list, its old messages, and `S` and `b` of its columns; form `v2c = sat(b + S - old)` |
| 3 | min-sum check node (`nms_cnp`): min1, min2, sign; scale by alpha |
| 4 .. 9 | delay registers (room to spread the logic of a faster implementation) |
| 10 | store the new messages; `S[col] += new - old` |

A row does not wait for the rows ahead of it. If row r and a row r' issued fewer
than 9 clocks earlier share a column, row r reads an `S` that does not yet hold the
update from r'. Write-back adds the *change* (new minus old) to whatever `S` holds
at that moment. So every update lands, and only the freshness of the input suffers.
That is how a real pipelined serial decoder behaves. The testbench
`tb_serial_unit` models exactly this window and compares every message bit for
bit.

The random order comes from `row_shuffler`. It holds two buffers. While one order
is read, the other is re-shuffled in place by Fisher-Yates: one swap per clock,
with a xorshift32 generator seeded per member. A new order is ready M-1 clocks
after a swap, well before the current pass ends.

## The bottom unit

Every U row has at most `YDEG + 2` ones: `e_Z[i]`, `e_bar_Z[i]` and the `e_Y`
columns mapped to it. V rows are the same with `e_X` and `e_bar_X`. An `e_Y`
column has exactly two edges, one U row and one V row, so what it sends to one
row is its prior plus what the other row sent it.

The unit stores:

* the priors of `e_Z`, `e_X` and `e_Y`;
* `cU[j]` and `cV[j]`, the messages the U and V rows send to `e_Y[j]`;
* the outputs `b`.

It has `LANES` check-node processors. The default, 8784, equals the larger layer,
so one clock handles one layer, without pipelining. With fewer lanes, a layer takes
`ceil(rows / LANES)` clocks. That is useful for small experiments.

## Stopping, and choosing among 24 decoders

After each D_Z pass, `dz_unit` takes the hard decision `e_bar_X = (b + S < 0)` as
a snapshot. A `syndrome_checker` then tests `D_Z e_bar_X = s_Z`, one row per
clock. The checker keeps its own copy of the D_Z row structure. At the same time
it adds up the estimate's weight, `sum of LLR_i over the set bits`, using the
priors `e_bar_X` would have under the Z-only error model. A smaller weight means a
more likely error.

The test overlaps the next iteration. As a result, the verdict on iteration t
arrives while iteration t+1 runs, M_Z + 2 clocks after pass t ended.

`gari_ensemble_top` runs `E = 24` members in lock step. They get the same syndrome
and the same graph, and differ only in their seed. Because they are in lock step,
their per-iteration verdicts arrive in the same clock. The `ensemble_selector`
acts on each round of verdicts:

* **At least one member converged.** The ensemble stops. The converged member
  with the smallest weight wins; on equal weights, the lowest index wins. Its
  `e_bar_X` is the result, and `halt` stops every member at once.
* **None converged, and it was iteration `MAX_ITER = 400`.** The ensemble reports
  failure and returns member 0's estimate.

On `halt`, a member aborts its serial passes and its pending test. It lets the rows
already in flight finish writing, then drops `busy` within about `PIPE` clocks.

## Timing

All units share one clock. The following counts are in clocks at the default sizes
(M_X = 792, M_Z = 936, PIPE = 10, one clock per bottom layer), and the testbenches
check every one of them:

| event | clocks |
|---|---|
| one iteration | `GU + GV + max(M_X, M_Z) + PIPE + 5` = 2 + 936 + 15 = **953** |
| serial pass, start to done | `M + PIPE + 1` |
| D_Z test result after the pass | `M_Z + 2` |
| start to `done`, decoded in k iterations | `1 + 953 k + 938` (clear, iterations, test, selector register) |

At 357 MHz (the rate reported for the serial units), 953 clocks take 2.67 us per
iteration. An average of 1.13 iterations plus the trailing test gives about 5.6 us
per 12-round decoding, inside a 1 us-per-round budget.

The single clock is an idealisation for the bottom unit. A fully parallel layer of
8784 check nodes will not close timing at the serial units' clock. The published
implementation runs it about 20 times slower, at 272 ns for both layers. Putting
the bottom unit in its own clock domain, or setting LANES below the layer size, is
left to the integrator.

## Number formats

* Messages are 12-bit two's-complement LLRs, `log(P(0)/P(1))`; negative means
  "error". Magnitudes saturate at +/-2047.
* The sums `S` are 16-bit and are saturated to 12 bits when they leave a unit.
* The normalization factor is `alpha = 1 - 2^-ALPHA_SHIFT`, computed as
  `m - (m >> ALPHA_SHIFT)`. ALPHA_SHIFT = 5 gives 0.96875, the default.
  ALPHA_SHIFT = 7 gives 0.9921875, the factor for SI1000 noise.
* A check with syndrome bit 1 flips the signs of all its outputs.

## Loading a graph

After reset, the graph is written through a configuration port. Each write is
broadcast to all members. `cfg_sel` (enum `cfg_sel_e` in `gari_pkg`) picks the
table:

| cfg_sel | table | one write holds |
|---|---|---|
| `CFG_DX_ROW`, `CFG_DZ_ROW` | row `cfg_addr` of D_X / D_Z | `cfg_len` column indices (up to `W_MAX` = 48) |
| `CFG_U_ROW`, `CFG_V_ROW` | row `cfg_addr` of U / V | `cfg_len` `e_Y` indices (up to `YDEG` = 16) |
| `CFG_PRIOR_Z/X/Y` | priors of `e_Z`/`e_X`/`e_Y` | `cfg_len` 12-bit LLRs from index `cfg_addr` on |
| `CFG_WT_XBAR` | weights for choosing the winner | `cfg_len` LLRs of `e_bar_X` (negative values count as 0) |

Every row must be written once, and rows of a smaller code are given length 0. At
the full size, loading takes about 19,000 writes.

A decoding then needs `s_x` and `s_z` on the inputs and a one-clock `start` while
`busy` is low. `done` pulses with `success`, `iterations`, `winner`, `n_conv` (how
many members converged in the deciding iteration) and `e_x_hat`. These outputs hold
until the next start.

## Taken from the paper, and chosen here

Taken from the paper:

* the GARI matrix;
* NMS with 12-bit messages and alpha from shifts and adds;
* a randomized serial schedule for D_X and D_Z, with one check-node processor each
  and 10 pipeline stages;
* a two-layer schedule for the bottom part, U before V, with as many check-node
  processors as the larger layer and no pipelining;
* bottom part first, then D_X and D_Z in parallel;
* stopping on `D_Z e_bar_X = s_Z`, or after 400 iterations;
* 24 members with distinct seeds, stopping as soon as one converges, and choosing
  the most likely error among those that converge together;
* the [[144,12,12]] sizes.

Chosen here, where the paper gives no detail:

* how the random order is produced (Fisher-Yates, a new order every pass, two
  buffers);
* the split of the posterior into `b + S`, and the delta write-back;
* what each of the 10 stages does;
* a stopping test that runs one row per clock and overlaps the next iteration
  (this adds one test time to every decoding);
* the weight table used for the choice, and the tie rule;
* what is returned on failure;
* the seeds;
* the configuration port;
* a single clock domain;
* the maximum row weights `W_MAX` = 48 and `YDEG` = 16. The paper gives only
  averages, 34.2 and 8.1.

Not built:

* the clock-domain crossing between fast and slow units;
* links for splitting the design over several FPGAs;
* the off-line generation of the detector error model and the GARI matrix. That is
  software, and its output is what gets loaded.

Message storage is plain registers/arrays. A production design would map it to
block RAM.

## Files

`rtl/`:

* `gari_pkg.sv`: types, saturation, min-sum helper functions, configuration
  encoding.
* `nms_cnp.sv`: a combinational check-node processor for up to W inputs.
* `row_shuffler.sv`: double-buffered random row order.
* `serial_unit.sv`: the pipelined serial NMS unit; instantiated directly for D_X.
* `syndrome_checker.sv`: the `D_Z e = s_Z` test plus the weight.
* `dz_unit.sv`: `serial_unit` for D_Z, with the snapshot and the test.
* `bottom_unit.sv`: the two-layer unit for the U and V rows.
* `gari_decoder.sv`: one member, with its iteration controller.
* `ensemble_selector.sv`: stopping and choosing the winner.
* `gari_ensemble_top.sv`: the top, with E members and the selector.

`tb/`:

* `gari_tb_pkg.sv`: a class that builds a random graph with the GARI block shape
  (3 to 4 ones per column, bounded row weights, column-weight-1 U and V). It also
  produces the configuration writes, turns an injected `(e_Z, e_X, e_Y)` into
  syndromes, and tests a candidate `e_bar_X`. Real detector error models come from
  circuit simulation, which is outside this RTL.
* One self-checking testbench per module, `tb_<module>.sv`. `tb_dz_unit` covers
  `dz_unit`, and `tb_serial_unit` covers the D_X use. Each prints
  `TB_RESULT checks=.. failures=..` and has a watchdog.
* `tb_gari_ensemble_top.sv`: end to end with 4 members on a small graph. It counts
  early stops, joint convergences, non-zero winners, stops at MAX_ITER and
  mid-pass halts, and fails if any of them never happened.
* `tb_gari_full.sv`: the top with all defaults (24 members, full graph size). It
  decodes errors of weight 1 to 40 and checks the result and the exact cycle
  count. The heavier errors need up to 4 iterations and are often won by a member
  other than member 0.

## Simulating

With Verilator 5 (for example, the end-to-end test):

```
verilator --binary --timing --assert -y rtl -y tb rtl/gari_pkg.sv tb/gari_tb_pkg.sv \
    tb/tb_gari_ensemble_top.sv --top-module tb_gari_ensemble_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. The small tests finish in
seconds. The full-size test (`tb_gari_full`) builds 24 complete decoders. It takes
about six minutes to compile and then runs for a few seconds.

The reduced tests set parameters such as `M_X`, `N_Y`, `LANES`, `PIPE` and
`MAX_ITER` on the top. Every size is a parameter, so other codes are a matter of
parameters and of the graph that is loaded.
