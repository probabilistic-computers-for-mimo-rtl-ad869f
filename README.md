# A p-bit parallel-tempering machine for dense Ising problems

This is synthesizable SystemVerilog for a probabilistic computer. It finds
low-energy states of a dense Ising problem

    H(s) = - sum_{i<j} J_ij s_i s_j - sum_i h_i s_i,   s_i in {-1, +1}

using many copies of a network of probabilistic bits (p-bits) that run in
parallel. The target application is maximum-likelihood detection for BPSK
MIMO receivers. There the detector minimises ||y - H s||^2, which is an
Ising problem with

    J_ij = -2 (H'H)_ij,   h_i = 2 (H'y)_i.

Two ideas make this practical in hardware:

* **Sparsification.** All-to-all couplings do not map well onto a grid of
  small units. Each logical spin is therefore split into two physical p-bits
  (copies), and each dense coupling is placed between one copy of each
  spin. The two copies of a spin are tied by a ferromagnetic *copy edge* of
  strength P. If the copies agree, the sparse energy equals the dense energy
  plus a constant. Every p-bit then has only about L/2 + 1 neighbours
  instead of L - 1.
* **Two-dimensional parallel tempering (2D-PT).** Replicas of the sparse
  problem are laid out on a grid:
  * R rows of inverse temperature beta (hot to cold);
  * C columns of copy strength P (weak to strong).
  Neighbouring replicas exchange states with the Metropolis probability.
  Along a column, exchanges move good states towards low temperature.
  Along a row, they move states towards strong P, where the copies are
  forced to agree and the sparse state is a valid dense state. The answer
  is read from the strongest-P column.

The default build is the 16 x 16 MIMO configuration:

| item | value |
|---|---|
| logical spins L | 16 |
| p-bits per replica N = 2L | 32 |
| edges per replica, L(L-1)/2 + L | 136 |
| replicas | R = 9 beta rows x C = 6 P columns = 54 (1728 p-bits) |
| beta ladder | 0.5, 0.76, 1.1, 1.55, 2.22, 3.31, 5.34, 10.3, 27.9 |
| P ladder | 0.1, 0.357, 0.658, 1.02, 1.5, 2.26 |
| energy stride d | 8 |

The 64-spin 1D-PT machine uses the same RTL with a different parameter set:
L = 64, R = 11, C = 1, d = 32.

## The sparse graph

p-bit `i` (0 <= i < L) is copy 0 of logical spin i, and p-bit `i+L` is copy 1.
The edges of one replica are:

| edge | connects |
|---|---|
| dense edge (i, j), i < j, j - i odd | p-bit `i` and p-bit `j+L` |
| dense edge (i, j), i < j, j - i even | p-bit `i+L` and p-bit `j` |
| copy edge of spin i | p-bit `i` and p-bit `i+L` |

This graph has three useful properties:

* Every edge runs between the two halves. The largest degree is L/2 + 1, which is 33 for L = 64.
* It splits into three independent sets, which are the colour groups updated together:
  * all copy-1 p-bits;
  * the even copy-0 p-bits;
  * the odd copy-0 p-bits.
* The edge count, L(L-1)/2 + L, is the upper triangle the host transfers.

Weights are stored in one fixed edge order. Dense edges come first, in row-major upper-triangle order (0,1), (0,2), ..., (L-2, L-1). The L copy edges follow in spin order. Biases are stored in p-bit order 0 ... N-1.

`pt_pkg.sv` holds this description as constant functions: `nbr_node`, `nbr_edge`, `degree`, `color_of` and `num_edges`. Each p-bit's neighbour list is wired at elaboration time from these functions.

## Number formats and what the host uploads

There are no multipliers between the weights and the temperature. The host
uploads, for every replica (r, c):

* `beta_r * J_ij` for every dense edge;
* `beta_r * P_c` for every copy edge;
* `beta_r * h_i / 2` for both copies of spin i (any split whose two halves sum to h_i is allowed).

All weights and biases are 10-bit two's complement with 3 fraction bits
(Q6.3). Weights must stay within +-511 codes (+-63.875); a weight of -512
cannot be negated in 10 bits.

Memory layout:

* **J BRAM:** word `(r*C + c)*E + e` holds edge e of replica (r, c) in its low 10 bits, with E = 136.
* **h BRAM:** word `(r*C + c)*N + p` holds the bias of p-bit p.

## One p-bit

A p-bit (`pbit.sv`) holds one state bit m (1 means +1).

* **Synapse** (`synapse.sv`):
  * Each neighbour weight is passed or negated according to the neighbour's state.
  * The results are added by a binary tree (`adder_tree.sv`, one bit wider per level).
  * Two values come from the tree sum S:
    * the influence `I = clip(S + h, -63, +63)`, 7 bits with 3 fraction bits;
    * the local energy `e = -s_self (S + 2h)`, kept at full width. Summed over the replica this gives exactly 2*beta*H.
* **tanh table** (`tanh_lut.sv`):
  * The magnitude of I addresses a 32-entry ROM, `tanh_lut.hex`. Entry a holds round(2^32 (1 + tanh(a/8)) / 2).
  * Magnitudes of 4.0 and above give 2^32 - 1.
  * For negative I the entry is negated modulo 2^32, which yields 2^32 (1 - tanh|I|)/2.
* **Update:** when the p-bit's colour group is enabled, `m <= (r < prob)`. Here r is the output of the p-bit's own LFSR and the comparison is unsigned. So P(m = 1) = (1 + tanh(I)) / 2.
* **LFSR** (`lfsr32.sv`):
  * 32-bit Galois register, polynomial x^32 + x^22 + x^2 + x + 1 (shift right, mask 0x80200003).
  * It steps every cycle whether or not the p-bit updates.
  * Every instance gets its own non-zero seed from a fixed hash of its index.
* **Swap load:** a 4-bit `swap` vector loads the state of one of the four grid neighbours in one cycle. The four are the hotter and colder beta neighbours and the weaker and stronger P neighbours. This is how replicas exchange states; no weights move.

## One replica

`replica.sv` instantiates the N p-bits and three blocks that summarise the replica for the swap logic:

* **Colour rotation:** a one-hot register with 3 bits advances every sweep cycle. So a Monte Carlo sweep is 3 cycles, and the sweep phase lasts `ssr = 3 S` cycles for S sweeps.
* **Energy accumulator** (`energy_acc.sv`):
  * On the first `en_acc` cycle the N local energies are copied into a shift register.
  * Each following cycle adds d of them and shifts by d.
  * The total, 2*beta*H of the replica, is ready after ceil(N/d) + 1 cycles. The swap arithmetic reads this value as beta*H with 4 fraction bits.
* **Infeasibility counter** (`infeasibility.sv`): counts the copy pairs that disagree, g. It is latched in the one-cycle Infeas phase.
* **Best state** (`best_state.sv`): at the start of each beta-swap phase the energy is compared with the stored best. Less than *or equal* replaces both the best energy and the state vector. Reset, and the host's `rst_best`, set the best energy to the largest positive value.

## Exchanging replicas

### Beta swaps (along a column)

For neighbouring temperatures a < b, the exchange is accepted with probability min(1, e^Delta), where

    Delta = (beta_a - beta_b)(H_a - H_b) = mu0 * (beta_a H_a) + mu1 * (beta_b H_b),
    mu0 = 1 - beta_b / beta_a,   mu1 = 1 - beta_a / beta_b.

The factors mu0 and mu1 are computed at elaboration time from the beta ladder, with 3 fraction bits (`mu_beta0`, `mu_beta1` in `pt_pkg`). Each controller (`swap_beta.sv`) covers three consecutive rows:

* in even phases (`dir` = 0) it decides pair (a, b);
* in odd phases it decides pair (b, c);
* so it holds four mu constants.

### P swaps (along a row)

Within a row the temperature is the same, and only the copy-edge energy changes. A copy edge contributes -P when its copies agree and +P when they differ. So

    Delta = 2 beta (P_b - P_a)(g_b - g_a) = mu * (g_b - g_a).

`swap_constraint.sv` evaluates this with one constant per pair. Note the sign: a stronger column that already has fewer violations keeps its state.

### Acceptance without exp()

`swap_accept.sv` compares e^Delta with a 32-bit random number r, both as small floating-point numbers:

* `exp_approx.sv` computes y = (23/16) Delta with shifts and adds, because 23/16 is about log2 e.
  * The integer part of y gives the exponent (biased by 32).
  * The next 5 fraction bits give the mantissa, so e^Delta is about 2^floor(y) (1 + frac(y)).
  * Delta >= 0 always accepts. Values below 2^-32 always reject.
* `float_mplus5.sv` turns r / 2^32 into the same form:
  * the exponent is the leading-one position;
  * the mantissa is the 5 bits below it.
* The swap is accepted when the exponent of e^Delta is larger, or the exponents are equal and its mantissa is larger or equal.

The piecewise-linear mantissa makes the acceptance up to about 6 % too high at mid fractions. The testbenches measure this.

Pipeline: Delta, then the two floats, then the decision are each registered. The swap strobe goes out in the fourth cycle of the 4-cycle swap phase, and both replicas of the pair load each other's state on that edge.

## Control

`pt_fsm.sv` runs the schedule. Cycles per step:

| step | phases | cycles |
|---|---|---|
| beta step | Sweep (ssr) -> Energy (1) -> Acc (ceil(N/d)+1) -> Swap (4) | 3S + ceil(N/d) + 6 |
| P step | Sweep (ssr) -> Infeas (1) -> Swap (4) | 3S + 5 |

* With C > 1 the two step kinds alternate.
* Each kind toggles its own even/odd direction flag at the end of its swap phase.
* For S = 25 and N/d = 4 a beta step takes 85 cycles and a P step 80.
* If `en` is low at the end of a swap phase, the FSM goes idle.

The control bundle (`pt_ctrl_t`) reaches all replicas and swap controllers through `ctrl_pipe.sv`, a register chain of depth ceil(log2(R C)) + 1. The chain cuts the fan-out; the whole machine simply runs that many cycles behind the FSM. The core is idle only when the FSM is idle and the chain is empty.

`pt_core.sv` instantiates:

* the grid of replicas;
* one `swap_beta` per column and row triple, and one `swap_constraint` per row and column triple;
* the readout register.

## The system around the core

`ising_machine.sv` is the top level. It has three memories (`bram_dp.sv`, true dual port, registered read): J, h and decoded state. Its other parts are:

* **`ising_start.sv`** (control and load). A rising edge on `start` starts a run:
  1. With `load_j` set, it reads R·C·E words from the J BRAM into one daisy-chain shift register. Each word enters at the head and pushes the others along. Afterwards every position is wired to one weight of one replica.
  2. With `load_h` set, it does the same for the R·C·N biases.
  3. It holds `clk_en` high for exactly `timer` cycles.
  4. It waits until the core has finished its current step and is idle, then asks it to latch and stream its best states.
  5. It raises `done` when the readout has finished. `done` stays high until the next start.

  Loading costs one cycle per word: 9072 cycles for the default grid.
* **`pt_core` readout:** the best states of the strongest-P column are packed row 0 first, p-bit N-1 first, zero-padded to whole words. They are shifted out as ceil(R N / 32) 32-bit words, 9 by default.
* **`ising_readout.sv`:** writes those words to addresses 0, 1, ... of the state BRAM and reports `finished`.

Host protocol:

1. Write the J and h BRAMs through their A ports.
2. Set `ssr` = 3 S and `timer`.
3. Raise `start` with `load_j` / `load_h`.
4. Poll `done`.
5. Read `ceil(R N / 32)` words through `s_addr` / `s_dout`.

Word r holds the best state of row r in the strongest column. Logical spin i is bit `31 - (N-1-i)` of its replica's field, copy 0; copy 1 is L bits higher. Majority voting or picking the lowest-energy row is left to the host. `rst_best` clears the best energies without a reload, for a new run on the same problem.

In a complete system, PCIe, an AXI interconnect and AXI GPIO registers sit between the host and these ports. They are vendor parts and are not part of this RTL. Their signals are the top-level ports, and the whole design runs on one clock.

## Files

| file | contents |
|---|---|
| `rtl/pt_pkg.sv` | widths, schedules, control struct, sparse-graph and mu functions |
| `rtl/lfsr32.sv`, `tanh_lut.sv` (+ `tanh_lut.hex`), `adder_tree.sv`, `synapse.sv`, `pbit.sv` | p-bit |
| `rtl/energy_acc.sv`, `infeasibility.sv`, `best_state.sv`, `replica.sv` | replica |
| `rtl/exp_approx.sv`, `float_mplus5.sv`, `swap_accept.sv`, `swap_beta.sv`, `swap_constraint.sv` | swap logic |
| `rtl/pt_fsm.sv`, `ctrl_pipe.sv`, `pt_core.sv` | PT core |
| `rtl/bram_dp.sv`, `ising_start.sv`, `ising_readout.sv`, `ising_machine.sv` | system |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

`tanh_lut.sv` reads its table with `$readmemh("rtl/tanh_lut.hex")`, so run simulations from the directory that holds `rtl/`.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -y rtl rtl/pt_pkg.sv tb/tb_pt_core.sv --top-module tb_pt_core
    ./obj_dir/Vtb_pt_core

What the testbenches check:

* **Leaf blocks:** compared with reference models inside the testbench:
  * tanh via `$tanh`;
  * the exponential via `$exp`;
  * the float conversion by interval bounds;
  * the LFSR by a tap-by-tap register.
* **p-bit:** its measured P(m = 1) for I = 0, +-1.
* **Swap controllers:** measured acceptance rates against min(1, e^Delta).
* **FSM:** it measures the 85 / 80-cycle step lengths at the default settings.
* **`tb_pt_core`:** on a 4-spin grid of 4 x 3 replicas:
  * every swap strobe really exchanges the two replicas' states;
  * the step period is correct;
  * the ground state is found.
* **`tb_ising_machine`:** runs the whole machine through its host ports on a 4-spin problem with a unique ground state, using the same 4 x 3 grid. It counts every mechanism: J/h loading, run timer, sweeps, accumulation, infeasibility counts, beta swaps, P swaps, best-state updates and clears, readout words and `done`. Every count must be non-zero, and the decoded ground state must match brute force.

The largest configuration simulated end to end is that L = 4, R = 4, C = 3 machine. At the default size (54 replicas of 32 p-bits plus the 7344-entry load chain), the C++ build of the simulation model did not finish in 15 minutes, so no full-size simulation result exists.

## How far it follows the source design, and where it departs

The following are taken from the source design:

* the block structure;
* the bit widths: 10-bit Q6.3 weights, 7-bit influence, 32-bit tanh table of 32 entries, 32-bit LFSRs, 3-bit mu fractions, 5-bit exponent and mantissa;
* the 23/16 exponential;
* the phase lengths and step-cycle formulas;
* the control-pipeline depth;
* the daisy-chain loader;
* readout of the strongest column;
* the "less than or equal" best-state rule;
* the 16 x 16 schedules.

The following are this design's own choices, because the source leaves them open:

* **Sparse graph:** the edge placement, colouring and weight order. The source gives only the edge count, the maximum degree and three colours.
* **tanh sign:** the source calls the table output "signed" but compares `r < bias`. The table is read here as an unsigned threshold, the only reading under which negative fields lower P(m = 1).
* **LFSR taps:** "bits 31, 21, 2, 1" is taken as the XAPP052 polynomial (32, 22, 2, 1). The literal 0-based reading is not a maximal-length register.
* **Fixed point and swap formula:**
  * the fixed-point placement of Delta (7 fraction bits);
  * the saturation of the exponent;
  * the P-swap formula mu = 2 beta (P_b - P_a), which the source calls only "related to Delta P".
* **Control encoding:**
  * the alternation rule (dir_b XOR dir_p);
  * finishing the current step after `clk_en` drops;
  * best-state capture at the first cycle of the beta-swap phase.
* **Simplifications:** the accumulator's adder tree is combinational, where the source pipelines it. The readout request goes straight to the core's readout register instead of through the control pipeline; the core is idle by then, so nothing needs aligning. The synthesis attributes that duplicate control registers are omitted.
* **Host side:** the host-side word format (low 10 bits of each 32-bit word), the `rst_best` input and single-clock operation.

Not included: the PCIe endpoint, the AXI interconnect with its clock crossing, the GPIO register block and the host software (weight scaling, majority voting).
