# A P-bit semiprime factorizer with a table-driven update rule

A probabilistic computer is a network of stochastic binary units, P-bits,
coupled like the spins of an Ising model. Each P-bit keeps flipping
towards the sign of its *directivity* `I_i = h_i + sum_j J_ij s_j`, with just
enough noise to get out of local energy minima. If the weights `J` and `h`
are chosen so that the rows of a logic gate's truth table are the ground
states, the network behaves like that gate in both directions. Clamp the
inputs and the outputs settle to the gate's result. Clamp the outputs and
the inputs wander over every assignment that produces them. A multiplier run
the second way, with its product bits clamped to a semiprime `N`, searches for
two factors of `N`.

The usual hardware P-bit evaluates `m = sgn(tanh(beta*I) - rand)`. That takes
multipliers for the weighted sum, a tanh table and a wide comparator
against a 32-bit random number, spread over several fast clock cycles. This
design drops all of it. It rests on three observations:

* With integer weights, `I` is an integer. The sign of `I` decides the update.
  Randomness matters only when `I` is small.
* Above `|I| = 1`, the chance of an update that raises the energy is
  negligible, so the update is deterministic there. At `I = 0` the new state
  is a fair coin. At `|I| = 1` it follows the sign, except that it is
  inverted with probability `1/2^R`, where the flip is the AND of `R`
  unbiased random bits.
* A sparse network gives each P-bit at most five neighbours. The whole rule
  is then a look-up table of at most 32 entries, addressed by the neighbour
  states, plus an R-input AND.

Flipping with probability `1/2^R` at `|I| = 1` matches a tanh rule with
`tanh(beta) = 1 - 2^(1-R)`. For example, `R = 5` corresponds to `beta = 1.717`.
No annealing schedule is used: `R` stays fixed for the whole run.

## The update rule in one P-bit (`pbit`)

| neighbour pattern gives | new state |
|---|---|
| `I > 1`  | 1 |
| `I < -1` | 0 |
| `I = +1` | `~(r_1 & ... & r_R)`, so 0 with probability `1/2^R` |
| `I = -1` | `r_1 & ... & r_R`, so 1 with probability `1/2^R` |
| `I = 0`  | one unbiased random bit |

The weights and the bias are module parameters. At elaboration a constant
function goes through all `2^NIN` neighbour patterns, works out `I` for each
and stores its update class (`UPD_LO`, `UPD_HI`, `UPD_W0`, `UPD_W1`,
`UPD_RND`) in a table. In hardware, the table lookup, a 5-way select and a
flip-flop are all that sits between the neighbours and the new state. The
same enumeration finds which classes can occur at all. That sets how many
random bits the P-bit consumes:

* `R` bits if `|I| = 1` can occur;
* one more bit if `I = 0` can occur;
* at least one bit in every case, used when the network is re-randomised.

`clamp_en` and `clamp_val` pin a P-bit to a value. `init` loads a random
bit. Both are sampled on the P-bit's own clock edge.

All weights are in the binary (0/1) convention: `J_bin = 2 J`,
`h_bin = h - sum_j J_ij`. In this convention `I` is numerically the bipolar
directivity.

## Gates as energy landscapes

**AND** (`pbit_and`). The three P-bits are A, B and C. The couplings are
`J_AC = J_BC = 4` and `J_AB = -2`. The biases are `h_A = h_B = 0` and
`h_C = -6`.

* In forward mode, `|I_C| >= 2` on every row, so C is computed
  deterministically.
* In reverse mode with C = 0, A becomes a fair coin whenever B = 0 (because
  `I_A = 0`), and the same holds for B. The three states 00, 01 and 10 are
  visited equally often, and 11 is never visited.

**Full adder** (`pbit_fa`). The P-bits are A, B, Cin, S and Cout. The
couplings are:

| pair | coupling |
|---|---|
| A–B, A–Cin, B–Cin | -2 |
| each input – S | 2 |
| each input – Cout | 4 |
| S–Cout | -4 |

The biases are -1, -1, -1, -1 and -4.

All eight truth-table rows have energy 0. In reverse mode the degenerate
solutions are separate minima, for example 110, 101 and 011 for
`S = 0, Cout = 1`. The network moves from one to another only through an
energy-raising update at `|I| = 1`, via a state such as 111. This is why the
biased RNG is needed: without it the adder would stay in its first solution
forever.

## From a multiplier to a sparse network (`pmult_net`, `copy_tree`)

The factorizer is a K x K array multiplier. K*K AND gates form the partial
products `A_a B_b`, and K(K-1) full adders sum them one row at a time. Half
adders are full adders with Cin clamped to 0. Cell `(j, i)`, in row j = 1..K-1
and column i, is wired as follows:

* **A** takes `A_i B_j`.
* **B** takes, in row 1, `A_{i+1} B_0` (a clamped 0 for i = K-1). In later
  rows it takes the S of cell `(j-1, i+1)`, or the Cout of `(j-1, K-1)` when
  i = K-1.
* **Cin** takes the Cout of `(j, i-1)`, or a clamped 0 in column 0.

The product bits are clamped to `N`:

* `P_0` is the C pin of AND(0,0);
* `P_j` is the S of cell `(j, 0)`;
* `P_{K-1+i}` is the S of cell `(K-1, i)`;
* `P_{2K-1}` is the Cout of the last cell.

Sparsification keeps every P-bit at five neighbours or fewer:

* **Private P-bits.** Every gate owns its pins as its own P-bits. Two
  connected pins are joined by a COPY gate, a ferromagnetic coupling of
  binary weight 2 that adds -1 to both biases, instead of being one shared
  P-bit. A full-adder pin thus has four neighbours inside its gate and one
  COPY partner.
* **Fan-out trees.** Each factor bit drives K AND gates through a tree of
  COPY gates (`copy_tree`). The K AND pins are layer 0. Layer r has
  `l_r = ceil(l_{r-1}/4)` nodes, up to a single top node, and that top node
  is the factor bit read out. Node n of a layer is linked to children
  4n..4n+3 below it and to its parent above.

A tree node's directivity is `2*(neighbours at 1) - degree`. It follows the
majority of its neighbours, is random on a tie, and uses the biased RNG when
the margin is one.

The P-bit count is `3K^2 + 5K(K-1) + 2K * sum_r l_r`. That is 63 for K = 3
and 2128 for K = 16. Of these, 2K P-bits are product clamps and K are zero
clamps.

## Colours and phase clocks

P-bits that are not neighbours can update at the same time. The network is
split into five colours:

| P-bits | colour |
|---|---|
| full-adder pin p (A, B, Cin, S, Cout) | p |
| AND pins A, B, C | 0, 1, 2 |
| odd tree layers | 3 |
| even tree layers | 4 |

Every in-gate pair and every COPY link joins two different colours.

Colour c updates on the rising edge of `clk_col[c]`. The five colour clocks
and the readout clock `clk_rd` are six copies of one clock, 60 degrees apart.
The FPGA build ran them at 110 MHz, produced by the clock manager. One full
network update, where every unclamped P-bit updates once, plus one readout
therefore take a single clock period. The directivity LUTs only need to
settle within one sixth of a period.

The two stand-alone gate testbenches use the same scheme with three or four
clock phases for the AND and six for the full adder. This reproduces a gate
updated one P-bit per phase.

## Randomness (`lfsr46`, `rng_pool`)

Each colour has its own pool of 46-bit LFSRs, `ceil(bits needed / 46)` of
them. The polynomial is `x^46 + x^45 + x^26 + x^25 + 1`. The pool steps on
the previous colour's edge, and colour 0's pool steps on `clk_rd`. Its bits
are therefore fresh and settled before the colour that uses them updates.

A fixed stride permutation (the stride is coprime with the list length)
hands the pool's bits out to the P-bits. No LFSR bit goes to two consumers,
and the R bits that one P-bit ANDs together come from scattered registers and
positions.

With the default K = 16 and R = 4 the pools are:

| colour | random bits | LFSRs |
|---|---|---|
| 0 | 1264 | 28 |
| 1 | 1264 | 28 |
| 2 | 1264 | 28 |
| 3 | 752 | 17 |
| 4 | 272 | 6 |

Full-adder pins (whose `I` is always even here) use one bit each. AND pins
and five-neighbour tree nodes use R bits each. Top tree nodes use one bit.

## Search control (`factor_oracle`, `pfactor_top`)

Because the noise never switches off, the network does not stay in the
solution once it finds it. The oracle therefore checks every full update.
At each `clk_rd` edge it multiplies the two factor readouts and compares the
result with the product. On a match it does four things:

* pulses `solved` for one cycle;
* reports in `sweeps` the number of full updates this search took;
* latches the factors into `sol_a` and `sol_b`, and increments `n_solved`;
* raises `init` for one period, which re-randomises every unclamped P-bit.

A new search then starts, so a run gives a stream of independent
times-to-solution.

`sweeps = 1` means the first regular update after the re-randomising one
already solved the problem. `rst` reloads the seeds. `product_we` loads
`product_in` into the product register and restarts the search. A K-bit
network also factors any smaller semiprime, which is loaded with leading
zeros. `state_a` and `state_b` are the factor P-bits sampled at every
readout edge, which is what an on-chip logic analyser would record.

## Files

| file | what it is |
|---|---|
| `rtl/pbit_pkg.sv` | weights, LUT builder, random-bit budget, tree shape, colouring, pool layout |
| `rtl/pbit.sv` | one P-bit |
| `rtl/lfsr46.sv`, `rtl/rng_pool.sv` | random-bit generation |
| `rtl/pbit_and.sv`, `rtl/pbit_fa.sv` | probabilistic AND and full adder |
| `rtl/copy_tree.sv` | factor-bit fan-out tree |
| `rtl/pmult_net.sv` | sparse multiplier network with its colour pools |
| `rtl/factor_oracle.sv` | solution check, sweep counting, restart |
| `rtl/pfactor_top.sv` | the factorizer |
| `tb/phase_clk_gen.sv` | behavioural multi-phase clock source (simulation only) |
| `tb/*_tb.sv` | self-checking testbenches, one per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -j 4 \
  --top-module pfactor_top_tb -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/pbit_pkg.sv tb/pfactor_top_tb.sv
obj_dir/Vpfactor_top_tb
```

What the testbenches check:

* **`pbit_tb`** runs the update rule exhaustively, covering every class,
  clamp and init. It also measures the flip rate at `I = 1`.
* **`pbit_and_tb`** runs the AND in forward mode, then in reverse. It checks
  that 00, 01 and 10 each take about a third of 30000 samples and that 11 is
  never seen.
* **`pbit_fa_tb`** runs the reverse full adder with `S = 0, Cout = 1` and
  R = 5. Each solution should get about a third of the samples, about 4 % of
  samples should be non-solutions, and 000 should never be revisited.
* **`copy_tree_tb`** checks layer sizes and propagation.
* **`pmult_net_tb`** runs a 3 x 3 network in reverse with the product 10 and
  R = 5. It makes 300 runs of 1000 updates each. 2 x 5 and 5 x 2 must be the
  two most frequent results (one run gave 54 and 38 of 300).
* **`pfactor_top_tb`** is end to end at K = 4. It factors 143 and then 35,
  eight times each. It checks every reported factor pair and every sweep
  count, and counts restarts, reloads, `|I| = 1` energy-raising updates and
  `I = 0` updates. A typical mean is about 350 updates to solution.
A 32-bit semiprime takes on the order of 10^10 full updates (about 100 s at
110 MHz), which is far beyond event-driven simulation.

The largest size simulated end to end is K = 4 (`pfactor_top_tb`); the
network alone has been run at K = 3. The top at its default size (K = 16,
2128 P-bits) compiles and simulates at roughly 110 updates per second under
Verilator. A trial run that loaded 143 with leading zeros found no solution
in 10 minutes. Its factor state stayed at 65471 x 32701 from update 5000 to
update 20000. That is what a trapped state looks like: every P-bit sees
`|I| >= 2`, so the rule updates each one deterministically and nothing
changes. Only `init` or a product reload leaves such a state, and the oracle
raises `init` only after a solution. This was not investigated further.
No default-size testbench is included. A watchdog that forces a restart
after a fixed number of sweeps would be a natural addition, but the method
does not describe one.

The trap is probably helped by the COPY strength chosen here (below). With
a coupling of 1, full-adder pins only ever see even `I`. So they never take
the `|I| = 1` branch of the update rule, which is the branch that lets a pin
climb out of a minimum. A coupling of 2 keeps the full-adder `I` odd, but
at K = 4 it made the search much slower: no solution in two minutes of
simulation, where a coupling of 1 solves in about two seconds. The coupling
is the package constant `COPY_JB` and is the first thing to revisit.

## What is fixed by the method and what is this implementation's choice

Taken from the method:

* the update rule and its `1/2^R` biased RNG;
* the AND and full-adder weights;
* the array multiplier, with half adders replaced by clamped full adders;
* COPY sparsification with M = 5 and the tree layer formula;
* five colours on six phase-shifted clocks;
* 46-bit LFSRs, each colour's pool stepped on the previous colour's edge;
* the R-bit and 1-bit random budget;
* an oracle that reports and restarts;
* K = 16 and R = 4 as defaults.

Chosen here, because the method leaves them open:

* **COPY strength.** A bipolar coupling of 1 was chosen. It makes
  full-adder pins see only even `I` and AND pins only odd `I`.
* **Colouring.** A fixed 5-colouring is used instead of a greedy one, so
  colour sizes differ from a greedy colouring's. The largest colour here
  has 496 P-bits.
* **Random draw.** A stride permutation replaces a true random draw
  without replacement.
* **LFSR details.** The taps and seeds are this implementation's choice,
  and each LFSR shifts by one bit per update.
* **Re-randomisation bit.** Every P-bit gets at least one random bit so
  that it can be re-randomised.
* **Oracle details.** The counter width (40 bits), the reporting handshake
  and the product register are this implementation's choice.
* **Tree shape.** The layer formula is followed rather than the drawn
  8 x 8 example, whose shape differs. The formula reproduces the published
  P-bit totals (63 and 2128). The child grouping is this implementation's.

Only the logic is designed here. The clock manager, the debug cores (logic
analyser and virtual I/O), JTAG and the LVDS clock input are outside it.
Their signals are ports of `pfactor_top`.
