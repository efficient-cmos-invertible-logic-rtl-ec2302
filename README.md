# Stochastic invertible logic: a 5 x 5 invertible multiplier in RTL

An ordinary multiplier maps (A, B) to Y = A·B and cannot be run backwards. An
*invertible* multiplier treats A, B and Y as one set of wires that must satisfy
A·B = Y, and lets you fix any subset of them. Fix A and B and it multiplies.
Fix Y and it factorizes. Fix Y and A and it divides.

The circuit gets this property by being a small stochastic neural network, a
Boltzmann machine, rather than a logic network. The network is built so that
its lowest-energy states are exactly the rows of the multiplication table. Its
nodes flip randomly but are biased toward lower energy. Fixing ("clamping")
some of the nodes removes every table row that disagrees with them. With
decreasing noise, the free nodes drift into one of the rows that remain.

This RTL is a 5-bit × 5-bit invertible multiplier of that kind:
- 75 nodes;
- each node is a tiny stochastic-computing neuron: an adder, a saturating
  accumulator and a sign bit;
- one run-time knob, the noise weight, is lowered over time in an annealing
  schedule.

The same library also builds invertible AND, XOR, half-adder and full-adder
gates and n-bit ripple-carry adders. These are used by the testbenches and are
available as parameters.

## The energy function and what "valid" means

Each node i holds a bipolar state m_i ∈ {−1, +1}, which encodes logic 0 and
logic 1. It also has a bias h_i. Every pair of nodes shares a symmetric
coupling J_ij = J_ji, and most of these couplings are zero. The energy is

    E(m) = −( Σ_i h_i·m_i + ½ Σ_i Σ_j J_ij·m_i·m_j )

A circuit is correct when the states of minimum E are exactly its truth-table
rows, and every other state has a higher E.

For example, the AND gate uses h = (1, 1, −2) and
J = [[0,−1,2],[−1,0,2],[2,2,0]] over the nodes (A, B, Y). Its four valid rows
all have E = −3, and the four invalid rows have E = +1 or more.

### Gate library (`invlogic_pkg`)

| circuit | nodes, in order | notes |
|---|---|---|
| AND | A, B, Y | 3 nodes |
| XOR, OR-auxiliary | A, B, Y, aux | XOR needs one hidden node |
| XOR, NOR-auxiliary | A, B, Y, aux | same, with the opposite sign on aux |
| half adder | A, B, S, Co | 4 nodes |
| half adder, alternative | A, B, Co, S, aux | 5 nodes; used only as a library entry |
| full adder | A, B, Ci, S, Co | 5 nodes, all biases 0 |

Every table was checked exhaustively in simulation. The check enumerates all
2^n states, computes E for each, and confirms that the minimum-energy set
equals the truth table.

One coefficient of the alternative half adder is ambiguous. The published
coupling between B and the sum node is printed as +1 one way and −1 the other.
This library uses −1: with −1 the ground states are the half adder, and with
+1 they are not.

### Composing larger circuits

Larger circuits are formed by *fusing* nodes. The output node of one gate and
the input node of the next become the same node. The total Hamiltonian is the
sum of the component Hamiltonians, so biases and couplings of fused nodes add.
This works because each component's valid rows have the same energy. A state
is then minimal for the sum exactly when every component is in a valid row,
that is, when the composed circuit is consistent.

- **Ripple-carry adder (`CIRC_RCA`).** A half adder for bit 0, then a chain
  of full adders, with the carry of bit k fused with the carry-in of bit k+1.
  - Node order: A, B, S, Cout, then the internal carries.
  - Size: 4n nodes, so 128 nodes for 32 bits.
- **Array multiplier (`CIRC_MULT`).** One invertible AND per partial product
  a_i·b_j, so n² ANDs. The partial products are reduced column by column:
  - while a column holds three or more bits, a full adder takes the first three
    and returns its sum to the column;
  - the last two bits go through a half adder;
  - each carry joins the next column, half-adder carries ahead of full-adder
    carries.
  - The result uses n half adders and n(n−2) full adders.
  - Size: 3n² nodes, which gives 12, 27, 48 and 75 for n = 2…5.
  - Node order: A0…A(n−1), B0…B(n−1), Y0…Y(2n−1), then the internal nodes.

  The published design gives the node counts and, for 3 × 3, the set of node
  biases, but not the adder wiring. The reduction order above is this design's
  choice. It reproduces both the counts and the 3 × 3 bias set. For n = 2 the
  composed Hamiltonian was checked exhaustively (2^12 states): its ground
  states are exactly the 16 products.

### Connection lists instead of a matrix

The netlist is built by the `netlist()` function at elaboration time.
`node_info()` then produces, for each node:
- its bias;
- the list of its non-zero neighbours and their weights;
- a constant called the *leak* (below).

Only non-zero couplings become hardware. In the 5 × 5 multiplier a node has at
most a few neighbours out of 74.

## The node: sign of a saturating accumulator (`pbit_neuron`)

The ideal stochastic node sets

    m_i ← sgn( tanh( h_i + Σ_j J_ij·m_j + w_rnd·r ) ),   r = ±1 at random

This needs no tanh hardware:
- A saturating up/down counter driven by a stochastic stream is the classic
  stochastic-computing tanh.
- Taking the sign of that counter's state gives sgn(tanh(·)) directly.

Each node therefore does, every clock:

1. **Gated weights.** Each neighbour's state bit b ∈ {0,1} gates its weight
   through an AND (b ? J : 0). The node's random bit gates w_rnd the same way.
2. **Sum plus leak.** The gated terms are added with a one-bit left shift
   (2·J·b; wiring only), and a per-node constant leak = h_i − Σ_j J_ij is
   added. The neuron itself subtracts w_rnd. This works because
   J·m = 2·J·b − J, so the sum is exactly h + Σ J·m + w_rnd·r.
3. **Saturating accumulator.** The sum is added to a signed ACC_W-bit
   register that saturates at both ends.
4. **Sign.** The output is 1 when the accumulator is ≥ 0.

Clamping replaces the comparator output with `clamp_val` while `clamp_en` is
high. The accumulator keeps running underneath, so an unclamped node resumes
from its current state. `clear` (and reset) sets every accumulator to −1,
which is logic 0.

The accumulator is the node's memory. With a narrow accumulator a node follows
its field almost at once. With a wider one it needs a run of same-signed
fields before it flips. ACC_W = 4 was chosen by simulation; the published
design gives no width.

## Noise: xorshift+ bit per node (`xorshift128p`)

The random bits come from 64-bit xorshift128+ generators:
- state (s0, s1);
- output s0 + s1;
- shifts 23, 17 and 26.

Each of the 64 output bits feeds one node. The 5 × 5 multiplier has 75 nodes,
so `boltzmann_net` instantiates ceil(nodes/64) = 2 generators with different
seeds: node i takes bit i mod 64 of generator i div 64.

A good generator matters here. A bitstream with a DC bias pushes accumulators
toward one rail regardless of their inputs. The published work reports that
simple LFSRs gave visibly worse results than xorshift+.

## Annealing (`noise_annealer`)

A single signed noise weight w_rnd is shared by all nodes.
- A large w_rnd lets nodes leave local minima.
- A small w_rnd lets them settle.

`noise_annealer` implements a two-step schedule:
- w_rnd = `w_init` for `anneal_len` run cycles, then `w_final`;
- `start` restarts the schedule, and the cycle counter saturates.

The published simulations lower the noise (for example 5 → 3 and 11 → 5) but
do not give the schedule's shape. A single step is the simplest form that
matches the examples.

## The top: `inv_mult_top`

```
inv_mult_top #(NBITS=5, W=5, ACC_W=4, CNT_W=24)
  start, run                       restart / advance
  w_init, w_final, anneal_len      noise schedule (signed W bits; CNT_W bits)
  a_clamp/a_val, b_clamp/b_val     per-bit clamps on the operands (NBITS)
  y_clamp/y_val                    per-bit clamps on the product (2*NBITS)
  a_out, b_out, y_out              current terminal states
  annealed, cycle                  schedule state
  node_state                       all 3*NBITS^2 node states
```

Operating sequence:
1. Set the clamps and the schedule.
2. Pulse `start` for one clock. This clears the accumulators and the cycle
   counter.
3. Hold `run` high. Every clock, all free nodes update at once from the
   previous cycle's states.
4. Watch `a_out`, `b_out` and `y_out`.

The circuit has no "done" flag. Two ways of reading a result are useful,
depending on the noise level:

- **Capture on first hit (high noise).** The caller watches the terminals
  and takes the first cycle at which A·B = Y holds. This is the number the
  published chip reports as "convergence cycles", with a budget of 8192
  cycles (41 µs at 200 MHz). With the 5 × 5 default and the published
  schedule w 11 → 5, the network reaches a valid state quickly but keeps
  moving afterwards. The answer is the state at that first valid cycle, so
  the check has to be made every cycle. It is cheap in software or in an
  outside multiplier; an on-chip check would be an ordinary 5 × 5 multiplier
  and comparator, which this RTL leaves to the user.
- **Most frequent state (low noise).** With a small final noise (w 4 → 3 on
  the 3 × 3 multiplier), the network spends most of the low-noise phase in a
  valid state, and a histogram or a "same value for a while" test reads it
  out.

| mode | clamp | read |
|---|---|---|
| multiply | A, B | Y |
| factorize | Y | A, B |
| divide | Y, A | B |
| any mix | any bits | the rest |

## How well it works

The behaviour is statistical, so the testbenches measure distributions
instead of comparing exact outputs. The results below use the fixed seeds in
the testbenches.

- **AND gate, reverse (Y = 0 clamped, w = 2).** The three valid inputs appear
  7788, 6169 and 5787 times out of 20000 cycles. The invalid (1,1) appears 256
  times. With Y = 1 clamped, (1,1) appears 5000 out of 5000 times.
- **Full adder, forward.** For every input row, the correct (S, Co) appears
  in 83–93 % of cycles.
- **3 × 3 multiplier (27 nodes, w 4 → 3, 4000 cycles).**
  - Forward: 5·6, 3·7 and 6·6.
  - Factorizing: 35, 15 and 42.
  - Dividing: 30/6 and 14/7.
  - Most frequent state in the second half of the run: valid in 6 of 8
    operations. All three factorizations settle on correct factors.
- **32-bit ripple-carry adder (128 nodes, w 3 → 2 at the half of 60000
  cycles).** Eight operations: five additions, including FFFFFFFF + 1 with
  the carry running through all bits, two subtractions (sum and A clamped)
  and one free decomposition (only the sum clamped). Every operation reaches
  a valid state, between cycle 38 and cycle 23549. Six of the eight then hold
  it for 62–79 % of the low-noise half. The long-carry addition and one
  random addition leave it again.
- **4 × 4 multiplier (48 nodes).**
  - 3·6 with 4-bit weights, w 5 → 3 at the half of N = 2^20 cycles: the most
    frequent product in the second half is 18, held for 20 % of those cycles.
  - Fixed noise w = 3, eight operand pairs, read as the most frequent
    product: correct in 8 of 8. The correct product is held for 17–28 % of
    cycles.
  - Factorization of 55 with 5-bit weights, w 5 → 3: the most frequent pair
    in the second half is 5 × 11, held for 75 % of those cycles.
  - The published runs of these experiments used w = 5 (fixed) and 11 → 5.
    Its h and J include a scale factor that is not stated. With this
    design's unscaled weights those noise levels are too strong for a stable
    most-frequent state. The first-hit operation below is where the
    published noise levels fit.
- **5 × 5 multiplier, every factorisable product (defaults, w 11 → 5 at
  cycle 4096, budget 8192, capture on first hit).** There are 340 distinct
  products a·b with 0 ≤ a, b < 32. Of these, 66 are the product of two
  primes.

  | | converged | mean cycles | worst cycles |
  |---|---|---|---|
  | all 340 products, this RTL | 340 | 435 | 6529 |
  | all 340 products, published chip | 340 | 430 | 8192 (budget) |
  | 66 prime products, this RTL | 66 | 388 | 2704 |
  | 66 prime products, published chip | 66 | 219 | 2048 |

  About three quarters of the products converge within 512 cycles. The mean
  and the every-value result match the chip. Prime products do not converge
  twice as fast here, as they do on the chip.
- **5 × 5, single operations (same schedule).** The following all reach a
  valid state, between cycle 58 and cycle 1149:
  - forward 3·6;
  - the factorizations of 49, 182, 310, 598 and 55;
  - the division 55/11.

At the low noise level that suits the 3 × 3 multiplier (w 4 → 3), the 5 × 5
network usually *settles* in a wrong local minimum in reverse operation. For
example, for Y = 49 it settles on A = 1, B = 17, and only 598 settled on a
correct pair (observed with the full-size testbench's schedule set to
4 → 3). It therefore needs the high-noise, capture-on-first-hit way of
operation.

## Where this RTL follows the published design and where it does not

Follows:
- node equation;
- processing-element structure: gated weights, leak, saturating accumulator,
  ≥ 0 comparator;
- 64-bit xorshift+ with one bit per node;
- gate Hamiltonians;
- additive composition;
- node counts 3n² for multipliers and 4n for adders;
- 5-bit weights;
- a 5 × 5 multiplier as the main configuration;
- forward, reverse and mixed clamping.

This design's own choices:
- **Updates.** All nodes update synchronously. The published text does not
  state the update order.
- **Widths and initial state.** Accumulator width 4, leak width W+4, and an
  accumulator reset to −1.
- **Reduction order.** The multiplier's reduction order, which is consistent
  with the published bias values but not given.
- **Schedule shape.** A two-level noise schedule. The 5 × 5 testbenches use
  the published 11 → 5. The 3 × 3 testbench (4 → 3) and the 4 × 4
  fixed-noise and factorization runs (w = 3 and 5 → 3) use values chosen by
  simulation.
- **Weight scale.** Weights are the integer gate values (|J| ≤ 2 per gate)
  without an extra scale factor.
- **Generators.** Two xorshift generators for 75 nodes, with fixed seeds.
  Each seed is a golden-ratio constant XORed with the generator index times an
  odd multiplier.
- **Alternative half adder.** The sign chosen for the ambiguous coupling.
- **Top-level ports.** Plain clamps, schedule registers and state outputs.
  The chip's test interface is not described.

Not built:
- the chip's pads, clocking and test I/O, which are not described;
- any on-chip convergence detector. Convergence was judged from outside on the
  chip as well.

Hard-wired:
- Weights and biases are fixed at elaboration time. They are not loaded from
  registers, because the published design is a dedicated multiplier.
- Other circuits need a different `CIRCUIT`/`NBITS` parameter, not a new
  program.

## Files

| file | contents |
|---|---|
| `rtl/invlogic_pkg.sv` | gate Hamiltonians, circuit composition, per-node connection lists, generator seeds |
| `rtl/pbit_neuron.sv` | one stochastic node |
| `rtl/xorshift128p.sv` | 64-bit xorshift128+ generator |
| `rtl/boltzmann_net.sv` | all nodes and generators of one circuit |
| `rtl/noise_annealer.sv` | run-cycle counter and noise-weight schedule |
| `rtl/inv_mult_top.sv` | the invertible multiplier |
| `tb/tb_xorshift128p.sv` | reference sequence, model comparison, bit balance |
| `tb/tb_pbit_neuron.sv` | cycle-exact model, saturation, clamp, clear |
| `tb/tb_noise_annealer.sv` | random schedules, saturation of the counter |
| `tb/tb_boltzmann_net.sv` | exhaustive ground states of all circuits, cycle-exact model of a 2 × 2 multiplier and a 3-bit adder, AND and full-adder statistics |
| `tb/tb_inv_mult_top.sv` | 3 × 3 multiplier: multiply, factorize, divide, freeze |
| `tb/tb_inv_mult_full.sv` | 5 × 5 multiplier at default parameters: multiply, the published factorization examples, divide |
| `tb/tb_rca32.sv` | 32-bit ripple-carry adder: add, subtract, decompose |
| `tb/tb_inv_mult_4bit.sv` | 4 × 4 multiplier: the published 3·6, fixed-noise and factorize-55 experiments |
| `tb/tb_inv_mult_factor_sweep.sv` | 5 × 5 factorization of all 340 products, convergence statistics |

Every testbench checks itself and ends with one line:
`TB_RESULT checks=<n> failures=<n>`.

## Simulating and changing it

With Verilator 5 (the package goes first):

```
verilator --binary --timing -j 0 --top-module tb_inv_mult_top \
    rtl/invlogic_pkg.sv rtl/xorshift128p.sv rtl/pbit_neuron.sv \
    rtl/noise_annealer.sv rtl/boltzmann_net.sv rtl/inv_mult_top.sv \
    tb/tb_inv_mult_top.sv
./obj_dir/Vtb_inv_mult_top
```

Replace the top module and the testbench file for the others. The 3 × 3 run
takes well under a second. The 5 × 5 runs, including the full sweep, take about a second each.

Things to change:
- **Size.** `NBITS` on `inv_mult_top`. `MAX_NODES` (128) in the package bounds
  the node count, so 6 × 6 (108 nodes) fits.
- **Other circuits.** Instantiate `boltzmann_net` with
  `CIRCUIT = CIRC_AND / CIRC_FA / CIRC_RCA / …`. A 32-bit adder is
  `CIRC_RCA, NBITS = 32` (128 nodes).
- **A new gate.** Add its h and J tables and a `K_…` kind to the package. The
  ground-state check in `tb_boltzmann_net` shows how to verify a new table.
- **Node dynamics.** `ACC_W` sets how quickly nodes follow their field, and
  the schedule inputs set the noise. A different update order would be a
  change in `boltzmann_net`, for example an enable per node.
