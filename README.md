# DE-SNE near-memory sampling circuit

Training a network on an edge device is expensive mostly because of the data. The sheer
number of images has to be streamed from DRAM again in every epoch. This design shrinks the
training set before training starts, right where the images live. A small logic die in a
DRAM stack does three things:

1. It embeds the images in two dimensions with t-SNE.
2. It lays a grid over the embedding.
3. It keeps a few random images from every occupied grid cell.

Because t-SNE keeps neighbours close together, a sample drawn cell by cell covers the whole
data distribution. No neural network is needed to judge which images matter.

The expensive part of t-SNE is finding, for every sample i, the width sigma_i of the Gaussian
that gives its neighbour distribution p_{j|i} a prescribed perplexity. The usual method is
bisection, which can overshoot and stall. Here it is replaced by a small differential-evolution
(DE) search, called DE-SNE. The DE population is evaluated in parallel on the same
processing-element array that computes the affinities. Its mutation, crossover and selection
steps run on a tree of adder/comparator elements.

This repository gives synthesizable SystemVerilog for that circuit, with a self-checking
testbench for every block. It also has an end-to-end test that runs the whole pipeline at the
default sizes:

- distances
- bandwidth search
- Student-t kernel
- reduction
- gridding and sampling
- write-back

## Block map

```
              DRAM dies (not part of the RTL; tb/dram_model.sv stands in)
                  |  256-bit line port, tagged reads
               +--+--+
               | Arb |  dram_arb: round robin over 3 requesters
               +--+--+
      fill (0)    |  column stream (1)          write-back (2)
   +--------------+------------+--------------------------------+
   |                           |                                |
 RA0 16 KB  ---rows--->  +------------+  <---cols---  RA1 64 B + Rand
 (nms_sram)              | PEA array  |               (vbuf, rand_gen)
                         |   8 x 8    |---rows---> RA2 64 B ---> RB0 16 KB
                         +------------+                          |
      TE array: 8 groups x (32 leaf TEs + 31-TE tree + 1 acc TE) |
      group 0 shared by the DE unit and the controller           v
                                                 RB1 64 B ---> PEB array 8 x 8
                                                                 |
                          grid sampler <--- RB2 16 KB <----------+
      nms_ctrl (commands)    de_unit (DE-SNE)      RB2 ---> Arb (write-back)
```

Everything in this picture is instantiated in `nms_top`:

- the two 8x8 arrays of processing elements (PEA with exp/log CORDIC, PEB with a Newton reciprocal);
- the TE array;
- three large and three small buffers;
- the random number generator;
- the DRAM arbiter;
- the DE unit;
- the controller;
- the grid sampler.

The host sees a command port. The DRAM side is one 256-bit line port, described under
[DRAM port and arbiter](#dram-port-and-arbiter).

## Numbers and lines

Every datapath word is signed Q16.16 fixed point: 32 bits with 16 fraction bits (`fxp_t` in
`nms_pkg`). Additions and multiplications saturate. A buffer line holds 8 words (256 bits),
which matches the 8-wide rows and columns of the arrays. The large buffers hold 512 lines
(16 KB). The small buffers hold 2 lines (64 B).

Each processing element (`pea`, `peb`) has:

- two input-buffer words (IB0, IB1) and two output-buffer words (OB0, OB1), 8 bytes each side;
- a crossbar that picks two operands out of: the row operand, the column operand, the four
  buffer words, 0 and 1;
- one function unit result per cycle: pass, add, sub, mul, multiply-accumulate, arithmetic
  shift, divide, ln, exp (PEA only) or reciprocal (PEB only).

All 64 elements of an array run the same micro-operation (`pe_uop_t`) in a cycle. A row mask
lets single rows be loaded.

The nonlinear units are single-cycle combinational blocks:

- **`cordic_exp`** reduces x = k ln2 + r and runs 18 hyperbolic CORDIC rotations on r. It then
  shifts by k. It is accurate to about 2e-4 relative. It saturates above about 10.4 and returns
  0 below -12.
- **`cordic_log`** normalises x to [1,2) by its leading one, vectors (m+1, m-1) to get
  atanh((m-1)/(m+1)), and adds (exponent) x ln2. It is accurate to about 3e-4.
- **`newton_recip`** normalises to [0.5,1) and starts from 48/17 - 32/17 m. It then applies
  three iterations of y <- y(2 - m y). It is accurate to about 1e-5.

They sit in the element's combinational path, so these deep paths set the clock. No timing
closure has been attempted.

## Distances on the PEA array

The squared distance between samples a_n and b_m is expanded as
||a_n||^2 + ||b_m||^2 - 2 a_n.b_m. This lets an 8x8 array compute a whole 8x8 tile of
distances as accumulated outer products.

The tiles are stored feature-major:

- line k of tile A in RA0 holds feature k of the 8 row samples;
- line k of tile B, streamed from DRAM through RA1, holds feature k of the 8 column samples.

For every feature the array executes three multiply-accumulates:

| cycle | operation | meaning |
|---|---|---|
| 1 | OB0 += row * col | dot products |
| 2 | OB1 += row * row | ||a_n||^2 in every element of row n |
| 3 | IB1 += col * col | ||b_m||^2 in every element of column m |

Three finishing operations then leave the distance in OB0:

- OB1 = OB1 + IB1
- IB0 = OB0 + OB0
- OB0 = OB1 - IB0

The rows leave one per cycle through RA2 into RB0. Line n of the result holds the distances
from sample n to the 8 column samples.

A DIST command costs:

- per feature: 3 cycles plus the DRAM round trip for the column line (no prefetch);
- per command: 3 cycles for the finish and 9 to drain.

A sample can have more features than RA0 holds: a 32x32x3 image has 3072. Such a tile is
processed in chunks:

- `gens[0]` set: the command continues the previous sums instead of clearing them.
- `gens[1]` set: the command stops after accumulating.

The end-to-end test splits one tile in two this way.

## The bandwidth search (DE-SNE)

This is the part that needs the most explanation.

**What is searched.** For sample i, the unit searches the precision beta = 1/(2 sigma_i^2)
rather than sigma_i. It is the same Gaussian with one division fewer. The fitness of a
candidate beta is the entropy, in nats, of the distribution p_{j|i} ∝ exp(-beta d_ij):

    S = sum_j exp(-beta d_ij),   W = sum_j d_ij exp(-beta d_ij),   H = ln S + beta W / S

The target is ln(perplexity). That is the same condition as perplexity = 2^(entropy in bits).
The search minimises |H(beta) - target| over beta in [lb, ub].

**Population and schedule (`de_unit`).** There are 32 individuals, processed in batches of 4
lanes. The 4 lanes take their random numbers from the four xorshift lanes of `rand_gen`.

1. **Initialisation.** The population is drawn uniformly in [lb, ub), one batch per cycle
   (8 cycles).
2. **Mutation, 5 cycles per batch.** The unit draws index c, then draws b and forms b - c on a
   TE (SUB). It then forms F (b - c) with F = 0.5. Finally it draws a, adds a on a TE (ADD) and
   clips the result to [lb, ub]. An index is (r * 31) >> 16, plus one when it is at least i,
   so it never equals i.
3. **Crossover, 2 cycles per batch.** A TE compares CR = 0.7 with a random fraction. Its
   payload multiplexer passes the mutant when rand < CR, else the parent.
4. **Evaluation.** After all 8 batches the 32 trials go out for evaluation in one request.
5. **Selection, 4 cycles per batch.** Two TE cycles form |H(trial) - target| and
   |H(parent) - target|. A TE minimum with payloads then keeps the trial only when it is
   strictly better. A second group of leaves carries the fitness value along with the
   individual.
6. **Best so far, 2 cycles.** All 32 leaves form |H - target|. The tree takes the minimum with
   the individual as payload, and the accumulating TE folds it into the best seen so far.

A generation is therefore 8 x (5 + 2) + 8 x 4 + 2 = 90 cycles plus one evaluation.
`tb_de_unit` checks exactly 91 cycles from one acknowledge to the next request.

**Evaluation on the PEA array (`nms_ctrl`, states F\*).** Individual k lives in element
(k / 8, k % 8), in IB1. Only rows 0-3 are needed for 32 individuals. The sample's distances
are the 8 x len words of RA0 lines `addr_a..`. Word `addr_b` (the sample itself) is replaced
by the largest value so that its exponential is 0.

Every distance d is broadcast to all elements, which run five micro-operations:

1. IB0 = d * beta
2. IB0 = -IB0
3. IB0 = exp(IB0)
4. OB0 += IB0 (S)
5. OB1 += d * IB0 (W)

Four final operations form H = ln S + beta W / S. The four result rows go back to the DE unit.

One evaluation takes about 17 + 41 x len cycles, for all 32 candidates at once. While the search
runs, TE group 0 belongs to the DE unit; otherwise the controller drives it.

**Result.** The command returns the best beta and its |H - target|. The end-to-end test checks
that |H - target| against an entropy computed in floating point for the returned beta.

## Q, sums and sampling

- **QNUM.** 8 lines of RB0 pass through RB1 into the PEB rows. The PEB array computes
  (1 + d)^-1 in every element (IB0 = IB0 + 1, then OB0 = 1/IB0). The rows go to RB2. This is
  the Student-t kernel of the low-dimensional affinities.
- **TESUM.** Sums any number of RB2 lines on TE group 0. The leaves add word pairs, the tree
  sums, and the accumulating TE carries the total across lines. This gives the normaliser of Q.
- **GRID.** Reads 2-D points from RB2, four per line (x in even words, y in odd). It feeds them
  one per cycle to `grid_sampler`. The sampler maps a point to a cell of a 16 x 16 grid: the
  origin is an argument and cells are 2^shift LSBs wide, clamped at the edges. It keeps the
  point when a random number passes a threshold and the cell has kept fewer than `quota`
  points. For every point, the cell number and the keep flag are written to RB0. The command
  returns the number kept.

## Commands

A command is accepted when `cmd_valid` and `cmd_ready` are both high. `done` pulses once when
it ends. `result` and `result2` then hold its scalar results. Line addresses refer to the
buffer named.

| op | effect |
|---|---|
| LOAD | DRAM lines `dram_addr..` to RA0 (`dst_sel`=0) or RB0 (1) lines `addr_a..`, `len` lines |
| DIST | RA0 tile `addr_a..` (K = `len` features) against the DRAM tile `dram_addr..`; distances to RB0 `addr_b..+7`; `gens[1:0]` chunk flags |
| MOVE | RB0 lines `addr_a..` through RA2 to RA0 lines `addr_b..` |
| PERP | DE search over RA0 lines `addr_a..` (`len` lines, self word `addr_b`): `arg0` target ln(perplexity), `arg1..arg2` range of beta, `gens` generations, `seed` for Rand; result = beta, result2 = abs(H - target) |
| QNUM | RB0 `addr_a..+7` to (1+d)^-1 to RB2 `addr_b..+7` |
| TESUM | sum of RB2 lines `addr_a..` (`len` lines) |
| STORE | RB2 lines `addr_a..` to DRAM `dram_addr..` |
| GRID | RB2 points `addr_a..` (`len` lines) through the grid sampler; origin `arg0/arg1`, cell shift `arg2`, quota `gens[7:0]`, threshold `seed[15:0]`; per-point cell and keep flag to RB0 `addr_b..`; result = number kept |

The host therefore drives the algorithm:

1. Tiles of distances into RB0.
2. Each sample's rows moved into RA0 and searched.
3. Kernels and sums.
4. Sampling once an embedding is in RB2.

## DRAM port and arbiter

Three requesters share the DRAM line port through `dram_arb`:

- port 0: the fill of RA0/RB0;
- port 1: the column stream of DIST;
- port 2: the write-back from RB2.

The port works like this:

- A requester holds `req` until it sees `gnt`.
- Grants rotate round robin, starting after the last winner.
- A grant is given only while `d_ready` is high, so the DRAM can stall any request.
- A read carries the winner's number as a tag. Data comes back later with `d_rvalid` and the
  same tag, and goes to the right requester.
- Assertions check that at most one grant is given, and only to a requester that asks.

## Where this departs from the source description

- **Buffer size.** The large buffers are 16 KB, as printed in the block diagram. The prose
  elsewhere states 64 KB for the same three buffers. Change `SRAM_DEPTH` to 2048 for that.
- **Number format.** Words are Q16.16. The published system uses FP8, but only for its
  combination with a training accelerator; the sampling circuit's format is not stated.
- **Reciprocal unit.** It is placed in the PEB, as drawn. The prose puts Newton's method in the
  PEA and says the PEB has no nonlinear units.
- **Population size.** There are 32 individuals, as described for the hardware. The algorithm
  listing uses 30.
- **Mutation arithmetic.** The mutation is drawn as a 5-cycle sequence on one 4-wide row of the
  PE matrix. Here the subtraction and addition run on four TE leaves, and F (b - c) on a
  multiplier inside `de_unit`; the 5-cycle schedule is kept. The PEA array is not used because
  it holds the evaluation state during the search.
- **Search variable and stopping.** The search variable is beta, not sigma. The search runs a
  fixed number of generations instead of stopping on a tolerance. Bounds come with each
  command, because the listed lower bound (1e-20) is below Q16.16 resolution.
- **Index draws.** The indices a, b and c are drawn independently: they may repeat among
  themselves, though never equal i.
- **Grid sampler.** Its grid size, power-of-two cells, per-cell quota and random filter are
  choices made here. Only the steps themselves are described.
- **Latency of the nonlinear units.** They are single-cycle. Their latency is not stated.

## What is not here

- **Gradient descent.** The gradient of the t-SNE cost and the update of the embedding on the
  PEB array are not sequenced. The PEB array can execute the needed arithmetic, but no command
  drives it.
- **Symmetrised P.** The joint P (p_ij = (p_{j|i} + p_{i|j}) / 2N) is not formed.
- **TE groups 1-7.** Only TE group 0 is used. Groups 1-7 are instantiated and wired but receive
  zero operands, so lint reports their outputs as unused.
- **DRAM and its buses.** The DRAM dies, their peripheral logic and the through-silicon buses
  are outside the RTL. The training accelerator that consumes the samples is outside it too.

## Sizes against the evaluated data sets

Images of 32x32x3 (3072 features) fit the distance pass as 6 chunks of 512 RA0 lines. Images
of 224x224x3 (150,528 features) need 294 chunks.

The bandwidth search is the limit. At the default size it holds up to 4,096 distances per
sample (512 lines x 8). A full row of a 50,000-image training set needs 49,999. So the
evaluated data sets can only be run with a neighbour subset per sample, or with larger
buffers.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_te` | four TE operations, payload select, saturation, against a model |
| `tb_te_tree` | leaf operations, tree sum and minimum with payload, accumulation |
| `tb_te_array` | per-group sums of all 8 groups |
| `tb_cordic_exp` | exp against real arithmetic over its range, saturation and underflow |
| `tb_cordic_log` | ln against real arithmetic |
| `tb_newton_recip` | 1/x against real arithmetic, both signs |
| `tb_fxp_div` | division, exact, including divide by zero |
| `tb_pea`, `tb_peb` | random micro-operations against a model |
| `tb_pea_array` | the distance dataflow, exact, plus row mask and cycle count |
| `tb_peb_array` | (1+d)^-1 in all 64 elements |
| `tb_rand_gen` | xorshift lanes against a model |
| `tb_nms_sram` | the 16 KB buffer at full size, read latency and hold |
| `tb_vbuf` | the 64 B buffer |
| `tb_dram_arb` | grants against a round-robin model, routing, no starvation |
| `tb_de_unit` | DE search on f(x) = x^2: bounds, best tracking, convergence, cycles per generation |
| `tb_grid_sampler` | cell numbers, keep decisions and quotas against a model |
| `tb_nms_top` | the whole pipeline at default sizes; see below |

`tb_nms_top` instantiates `nms_top` without overriding any parameter and runs:

1. LOAD
2. DIST, once whole and once in two chunks
3. MOVE
4. PERP, for perplexity 5
5. QNUM
6. TESUM
7. GRID
8. STORE

Distances are checked exactly, the entropy to 0.01, Q to 1e-4, and the sum, cell numbers,
keep flags and stored lines exactly. It also counts:

- every command kind;
- grants on all three arbiter ports;
- DRAM stalls and read returns;
- DE fitness rounds and accepted trials;
- hand-overs of the TE group;
- cells reaching their quota.

A mechanism that never happened counts as a failure.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb --top-module tb_nms_top \
          rtl/nms_pkg.sv tb/tb_nms_top.sv
./obj_dir/Vtb_nms_top
```

The other testbenches run the same way. The end-to-end test takes about half a minute,
including the build.

Lint warnings that remain, and why:

- Unused outputs of TE groups 1-7 (see above).
- Unused high bits of a few intermediate products.
- One warning on the reset net: the arbiter's assertions use it synchronously in
  `disable iff`.

## Files

- `rtl/nms_pkg.sv` holds the shared types (`fxp_t`, `line_t`, micro-operations, commands) and
  the saturating arithmetic.
- Each other file in `rtl/` is one block, named as in the map above.
- `tb/dram_model.sv` is a behavioural DRAM with a fixed read latency and a regular stall, for
  the end-to-end test.
