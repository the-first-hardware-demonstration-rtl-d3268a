# An RRAM compute-in-memory probabilistic computer

This design is a probabilistic computer (p-computer) that searches for low-energy
states of a binary quadratic problem (QUBO or Ising). Its signature problem is
molecular docking posed as a maximum weighted clique problem. Each variable is a
probabilistic bit (p-bit) with two parts:

- a deterministic comparator;
- a random threshold drawn from a Gaussian of adjustable width σ.

A p-bit becomes 1 when its weighted input reaches the threshold:

    x_i  <-  1  if  s_in,i = Σ_j J_ij x_j + h_i  >=  u,   u ~ round(N(0, σ²))
             0  otherwise

Averaged over u, this gives a sigmoid-shaped probability P(x_i = 1) = Φ((s_in + ½)/σ).
Its steepness is set by σ, not by scaling the couplings. A small σ makes every
p-bit nearly deterministic, so the network descends to a (local) energy minimum.
A large σ lets it explore. Lowering σ during a run is called *dynamic slope
annealing* (DSA).

The weighted sum is computed inside a resistive memory array (compute-in-memory,
CIM). The coupling J_ij is stored as binary cells in the crossbar. The states of
the p-bits drive the wordlines. The current on the bitlines is the multiply-and-add
(MAC) result. The random threshold is also applied inside the array: each cycle a
number of extra wordlines are switched on, and their count follows the Gaussian
draw. The comparison against u then becomes a plain sign test on the difference of
two bitline currents. A current-mode sense amplifier makes that test.

The RTL models the whole digital system around the array, plus the array as a
digital memory whose reads return cell counts. It is written in
SystemVerilog-2017 and sized like the published chip:

- 1152 wordlines;
- 1024 bitlines, forming 512 bitline pairs, so up to 512 p-bits;
- 18 + 18 random-bias rows.

## Block map

```
             map / cell programming (host)
                    |            |
   state[511:0] +---v--------+   |   +----------------+
  +------------>| wordline   |wl |   | RRAM CIM array |  cnt_l, cnt_r  +-----+
  |   u ------->| switching  |------>| 1152 x 512     |--------------->| CSA |--s--+
  |   |         | matrix     |       | cell pairs     |                +-----+     |
  |   |         +------------+       +-------^--------+                            |
  | +-+-------------+  sigma  +-----------+  | rd_col                              |
  | | gaussian_rng  |<--------| dsa_sched |  |                                     |
  | +-------^-------+         +-----^-----+  |                                     |
  |         | rng_en                | iter_tick                                    |
  |   +-----+-----------------------+--------+------------+                        |
  +---| pbit_update_ctrl: state register, DRAW/READ/SENSE |<-----------------------+
      +------------------+--------------------------------+
                         | sample_valid, state
                   +-----v--------+
                   | mode_tracker |--> mode_state, mode_count
                   +--------------+
```

| Module | Role |
|---|---|
| `pcomp_pkg` | Sizes, the wordline-source enum and map entry struct, the cell-pair encoding |
| `rram_cim_array` | 1152 × 512 pairs of binary cells; one read returns the formed-cell counts on the two bitlines of one pair |
| `wl_switching_matrix` | Per-wordline source register; builds the wordline vector from p-bit states, always-on rows and the random-bias rows |
| `gaussian_rng` | Integer Gaussian threshold u with σ in Q4.8, clipped to ±18 |
| `csa` | Signed difference of the two bitline counts and its sign (`diff >= 0`) |
| `pbit_update_ctrl` | Sequential (Gibbs) update of p-bits 0…n−1, iteration after iteration; holds the state |
| `dsa_scheduler` | Constant σ, or a linear staircase from σ0 down to 0 |
| `mode_tracker` | The configuration occupied in the most iterations of a trial (a Space-Saving table) |
| `pcomputer_top` | Wires the above together; its ports are the host interface |

## Signed couplings in a binary array

Every coupling and bias value is an integer. A value of magnitude m is stored as m
*cell pairs* on the bitline pair of the receiving p-bit, one pair per wordline:

| `cell_pair_t` | Left cell | Right cell | Contributes |
|---|---|---|---|
| `CELL_POS` (2'b01) | formed | not formed | +1 |
| `CELL_NEG` (2'b10) | not formed | formed | −1 |
| `CELL_ZERO` (2'b00) | not formed | not formed | 0 |

Each cell is binary: it is either formed (conducting) or not formed. A driven
wordline adds one unit of current to the bitline of every formed cell on it. For
p-bit i, the count on its left bitline minus the count on its right bitline is
therefore the signed MAC. The sense amplifier outputs 1 when the left current is
at least the right one.

A coupling larger than one unit needs several cells from the same source. This is
done with the wordline map: several wordlines can be programmed to follow the same
p-bit. In the docking problem each p-bit owns 18 rows. A penalty coupling of −18
between p-bits a and b is written as `CELL_NEG` in all 18 rows of p-bit b, on
column a. The array has no multi-level cells. The precision of a coupling is
limited only by how many rows a source is given.

In the model, `rram_cim_array` keeps one 1152-bit word per bitline. A read ANDs the
driven wordlines with the two words of the selected pair. It then counts the ones
(population count) and registers both counts. The counts are exact: the analog
current, its noise and the cell-to-cell spread are not modelled.

## Wordline map and the in-array random bias

`wl_switching_matrix` holds one `wl_map_t {src, idx}` per wordline. The host writes
it once per problem.

| `src` | Wordline is driven during a read when |
|---|---|
| `SRC_PBIT idx` | p-bit `idx` is 1 (coupling rows) |
| `SRC_ON` | always (static bias h_i) |
| `SRC_BIAS_POS idx` | u < 0 and idx < −u |
| `SRC_BIAS_NEG idx` | u > 0 and idx < u |
| `SRC_OFF` | never |

The bias region holds 18 rows in which every column has `CELL_POS`, and 18 rows in
which every column has `CELL_NEG`. The matrix drives |u| rows of the opposite sign
to u, so the bias region adds exactly −u to every bitline pair. The sense amplifier
then evaluates s_in − u ≥ 0, which is the update rule. One draw of u serves the one
p-bit being updated. The threshold therefore costs no arithmetic outside the
array. The price is that the reach of u is bounded by the number of bias rows, so
the RNG clips u to ±18.

## Gaussian threshold generator

The published system does not say how its Gaussian numbers are made. `gaussian_rng`
uses a design choice that needs no multiplier tables:

- A xorshift128 generator is stepped three times per draw. This gives twelve
  uniform bytes.
- By the central limit theorem, z = (Σ bytes − 1530)/256 has mean 0 and a variance
  of almost exactly 1.
- z·σ, with σ in unsigned Q4.8, is rounded half up and clipped to ±18.

σ = 0 gives u = 0 at every draw. At σ = 0.5, 0.68 of the draws give u = 0; an exact
Gaussian gives 0.683. The tails beyond ±6σ are cut off. For this problem that is
irrelevant, because the clip at ±18 matters first only at σ ≈ 3.

A load of seed 0 is replaced by a fixed non-zero constant, so that xorshift cannot
lock up.

## Update sequence and timing

`pbit_update_ctrl` updates p-bits one at a time in index order 0…n−1. This is one
*iteration*. It repeats for `n_iters` iterations. Each update takes three clock
cycles:

| Cycle | Phase | What happens |
|---|---|---|
| 1 | DRAW | `rng_en`: a new u is drawn with the current σ |
| 2 | READ | `wl_drive` and `rd_en` for column i: the wordline vector is formed from the current state and u, and the array counts are registered |
| 3 | SENSE | The CSA output is written into `state[i]` |

Because every update sees the states written before it, this is sequential Gibbs
sampling, which is what a Hopfield network requires. A trial of n p-bits and I
iterations takes exactly 3·n·I cycles from `start` to `done`. For the docking
problem (n = 42, I = 1000) that is 126,000 cycles.

After the last update of each iteration, `sample_valid` pulses for one cycle with
the full configuration on `state`. `iter_cnt` then holds the number of completed
iterations. `start` clears the state to all zeros.

## Dynamic slope annealing

`dsa_scheduler` owns σ. It loads σ0 at `start`.

- With `dsa_en` low, σ stays at σ0. This is the constant-stochasticity mode used to
  sweep σ = 2.0, 1.5, 1.0, 0.5 and 0.2.
- With `dsa_en` high, σ drops by `dsa_sigma_dec` after every `dsa_step_iters`
  completed iterations and stops at 0. `anneal_step` marks each drop.

The published schedule runs from σ = 0.5 to 0 within 1000 iterations, but its shape
is not given. A linear staircase is this design's choice. In Q4.8, σ0 = 128 with a
decrement of 1 every 7 iterations reaches 0 at iteration 896.

## Reading out a trial: the mode tracker

A trial's answer is the configuration the network occupied in the most iterations,
not its last state. Counting all 2^n configurations is impossible, so
`mode_tracker` keeps 32 entries of (configuration, count, error) and applies the
Space-Saving rule to every sample:

- A configuration already in the table increments its count.
- A new configuration takes a free entry.
- If there is no free entry, it replaces the entry with the smallest count c,
  inheriting count c + 1 and recording error c.

If a trial visits no more than 32 distinct configurations, the counts are exact.
Otherwise, any configuration seen in more than 1/32 of the iterations is
guaranteed to be in the table. `mode_err` bounds how much of `mode_count` may have
been inherited. `evictions` shows whether the table overflowed. The table size and
the counting rule are this design's choices.

## Mapping a maximum weighted clique problem

The docking problem is a graph:

- Each vertex is a possible pairing of one ligand pharmacophore point with one
  protein pharmacophore point, with a weight w_i.
- An edge joins two pairings that can coexist geometrically.
- The best pose is the clique of largest total weight.

As an energy to minimise, with selection bits x_i:

    E(x) = −A Σ_i w_i x_i  +  (P/2) Σ_{i≠j} Ĵ_ij x_i x_j

Here Ĵ is the adjacency of the complement graph (pairs that must not both be
chosen). A = 10 and P = 18. In p-bit form, the bias is h_i = A·w_i and the coupling
is J_ij = −P·Ĵ_ij. A bias of at most 7 is always smaller than one penalty of 18, so
at σ = 0 no p-bit can turn on while it conflicts with a selected vertex.

The 42-node instance has 6 ligand points (hp1…hp5, ha1) and 7 protein points
(HP1…HP5, HD1, HD2). Vertex numbers are v = 7·l + p + 1 in that order, and v is
column v − 1. The array is programmed as follows:

| Rows | Map | Cells in column c |
|---|---|---|
| 0…755 | `SRC_PBIT r/18` (18 rows per p-bit) | `CELL_NEG` if p-bit r/18 ≠ c and the two vertices are not adjacent |
| 756…762 | `SRC_ON` | `CELL_POS` in the first h_c of these rows |
| 763…780 | `SRC_BIAS_POS 0…17` | `CELL_POS` |
| 781…798 | `SRC_BIAS_NEG 0…17` | `CELL_NEG` |
| 799…1151 | `SRC_OFF` | unused |

The integer biases are h_i = round(10·w_i). The four weight classes 0.1178, 0.1324,
0.1653 and 0.6686 become 1, 1, 2 and 7.

The testbench package `docking_pkg` holds the ligand and protein distance tables, in
units of 0.01 Å. Two pairings (l1,p1) and (l2,p2) are adjacent when:

- l1 ≠ l2 and p1 ≠ p2, and
- |d_lig(l1,l2) − d_prot(p1,p2)| ≤ 6.7 Å.

This gives 308 edges. The largest-weight clique is (1, 9, 17, 25, 41) with a weight
of 0.8702. With the tabulated distances, (1, 9, 17, 32, 41) has exactly the same
weight. Its edge hp3–hp5 against HP3–HP4 has a difference of 6.62 Å, which is just
inside the limit. The two tie in the integer weights as well, so either counts as
optimal here.

Capacity: with this encoding, an N-vertex problem needs 18·N + 7 + 36 rows, so at
most N = 61 fits in 1152 wordlines. The bitline pairs (512) are not the limit.

## Verification

Every block has a self-checking testbench. Each compares the block against values
computed independently in the testbench, ends with a `TB_RESULT checks=… failures=…`
line, and has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_rram_cim_array` | Random cells and wordline patterns; both counts match a reference popcount; overwrite of a pair; read latency one cycle |
| `tb_wl_switching_matrix` | Every source type, every u in −18…18 (bias rows counted), drive low gives no wordline, reset map |
| `tb_gaussian_rng` | Mean and variance at σ = 0.5, 1, 2; P(u = 0); σ = 0 gives 0; clip at ±18; the same seed gives the same sequence |
| `tb_csa` | All pairs of 6-bit counts |
| `tb_dsa_scheduler` | Staircase timing, saturation at 0, anneal pulses, constant mode, restart |
| `tb_pbit_update_ctrl` | Phase order, update order, 3·n·I cycles, sample and done pulses, iteration count |
| `tb_mode_tracker` | Exact counts without overflow; Space-Saving eviction and error bounds; tie rule; clear |
| `tb_pcomputer_top` | Full-size end to end on the 42-node problem (below) |
| `tb_pbit_sigmoid` | Full size: measured P(x = 1) against the MAC value (−8…8) for σ = 0, 0.2, 0.5, 1, 1.5, 2, compared with Φ((m + ½)/σ) |
| `tb_docking_sigma_sweep` | Full size: the docking problem at σ = 2.0, 1.5, 1.0, 0.5, 0.2, with and without DSA, 3 trials each; reports the mode clique and weight |

`tb_pcomputer_top` instantiates the top with no parameter overrides. It programs the
docking problem and runs three trials:

- constant σ = 0.5 for 1000 iterations;
- DSA from 0.5 to 0 over 1000 iterations;
- σ = 2.0 for 200 iterations.

At every read it recomputes the expected MAC, h_i − 18·(selected non-neighbours) − u,
and checks the sensed value and the bit written back. At every sample it checks that
the state is a clique. It also checks the trial length, that DSA ends at σ = 0 with
the state a fixed point, and that the reported mode is a clique. It counts each
mechanism and fails if any of them never happens:

- positive and negative bias rows in use;
- sense ties (MAC = 0);
- penalty rejections;
- flips in both directions;
- anneal steps;
- constant-σ trials;
- mode-table evictions.

It runs in about 8 s of simulation time under verilator.

Each module also has a deliberately broken copy, kept outside the distributed files.
Each such copy was shown to make its testbench fail.

## Where the model departs from the published chip

- **Ideal array.** The counts are exact integers. The real chip has cell-to-cell
  conductance variation, which the authors note leaves residual randomness at σ → 0
  and makes some trials end in a suboptimal clique. Without it, and with the greedy
  start from the all-zero state in index order, this model reaches a weight-0.8702
  clique in every docking trial it was run on, at every σ. The chip reports 35 % at
  σ = 0.5 and 72 % with DSA. The model's success rates are therefore not a
  prediction of the silicon.
- **Tie rule.** The update rule uses "≥", so s_in = u gives 1. The resulting
  P(1) at s_in = 0 is Φ(½/σ), not ½ as a symmetric sigmoid drawn around 0 would
  suggest. At σ = 2 it is 0.60, where the chip's measured p-bit at MAC = 0 is
  described as close to an even split. The rule was followed, not the drawing.
- **Integer biases.** Vertex weights are scaled by A = 10 and rounded to whole
  cells. This leaves 0.1178 and 0.1324 both at 1. The optimum is unchanged for this
  instance.
- **Random numbers.** A xorshift128 generator with a 12-byte sum, not the chip's
  (unpublished) Gaussian source.
- **DSA shape.** A linear staircase, programmable in start value, step length and
  decrement.
- **Readout.** A 32-entry Space-Saving table replaces recording every state and
  counting them off-chip.
- **Array size.** One description of the chip says 512 bitlines × 1152 wordlines,
  another 1152 × 1024 with 512 sense amplifiers. The RTL uses 1152 wordlines and
  1024 bitlines (512 pairs, 512 sense amplifiers).
- **Sensing.** One bitline pair is sensed per update, with one shared comparator.
  The chip has a sense amplifier per pair and an ADC path, but updates the p-bits
  sequentially as well.
- **Not modelled.** Cell forming/programming pulses and write circuitry, input
  buffers and wordline drivers as analog parts, the ADC, the on-chip test circuit,
  the microcontroller board, level shifters and the board DAC. The host-side
  programming interface (`cell_*`, `map_*`, trial set-up) stands in for the
  microcontroller.

## Simulating and changing it

Any testbench builds with plain verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pcomp_pkg.sv tb/tb_pcomputer_top.sv \
          --top-module tb_pcomputer_top -Mdir obj_top -o sim
obj_top/sim
```

Replace the testbench name to run another one. `tb_docking_sigma_sweep` takes
longest, about half a minute.

To map a different QUBO, program:

- the cells with the `cell_*` port, one cell pair per cycle;
- the wordline map with the `map_*` port;
- `n_pbits`, `n_iters`, σ0 and the DSA fields.

Then pulse `start`. Programming is ignored while `busy` is high.

Sizes are parameters of `pcomputer_top`:

- `N_WL` — wordlines;
- `N_BLP` — bitline pairs and p-bits;
- `N_BIAS` — rows per bias polarity, and the clip of u;
- `ITER_W` — iteration counter width;
- `MT_DEPTH` — mode-table entries.

If `N_BIAS` changes, program that many bias rows. Map indices are 10 bits wide
(`MAP_IDX_W`), which covers 512 p-bits and up to 1023 bias rows.
