# An RBM sampler that solves Ising problems, in SystemVerilog

Many hard optimisation problems (MAX-CUT, spin glasses, and through known reductions
the classic NP-complete problems) can be written as "find the spin vector
`s ∈ {-1,+1}^N` of lowest Ising energy `E(s) = Σ_{i<j} J_ij s_i s_j + Σ a_i s_i`". This
design does not search for that state directly. It builds a Restricted Boltzmann
Machine (RBM) whose most probable state is the Ising ground state, draws samples from
it with block Gibbs sampling at one sample per clock, and keeps in hardware the most
probable state it has seen. That last part, the **hitting time engine**, is what turns
a sampler into a solver: the host does not need to read or score millions of samples,
it just reads one state at the end of a run.

The RTL follows the architecture of an FPGA accelerator published for this purpose
(a 200 x 200-node RBM with 9-bit weights, clocked at 70 MHz, one sample per clock, a
two-unit hitting time engine with optional exclusion of "zero-cut" states). Where the
published description stops (random number generation, the sigmoid, the update
schedule, the host protocol), the choices made here are called out below and in the
header comment of each file.

## 1. From an Ising problem to RBM parameters

The RBM has two layers of binary nodes, visible `v ∈ {0,1}^NV` and hidden
`h ∈ {0,1}^NH`, with connections only between the layers. Its probability is

    p(v,h) ∝ exp( Σ_ij w_ij v_i h_j + Σ_i c_i v_i + Σ_j b_j h_j )

To embed an N-spin Ising problem, every spin gets **two** nodes, visible `i` and hidden
`i` (so `NV = NH = N`), and every Ising edge `(i,j)` becomes the two RBM edges
`v_i–h_j` and `v_j–h_i`. The diagonal weight `w_ii` ties the two copies of a spin
together. It is the **coupling** `C`: large enough and the copies agree, so the RBM's
most likely states are the Ising ground states. If it is too large the chain mixes
slowly and gets stuck.

The host does the embedding. In bipolar form, write the "log-weight" matrix
`K_ij = -J_ij` for `i ≠ j` and `K_ii = C`. The change to 0/1 variables
(`s = 2v - 1`) then gives

    w_ij = 4 K_ij          c_i = -2 Σ_j K_ij          b_j = -2 Σ_i K_ij

An inverse temperature `β` scales all of them (the published sweet spot is
`β = 0.25`).

**Number format.** Weights and biases are 9-bit two's complement with **2 fractional
bits**, so one LSB is 0.25. `β` is folded in by the host: the stored integer is
`4 β w`. With `β = 0.25` the stored integers are exactly `w = 4K`, `c = -2ΣK`. For
example:

| problem | stored off-diagonal | stored diagonal | stored bias |
|---|---|---|---|
| MAX-CUT, `J_ij = 1` per edge, `C = 12` | -4 per edge, 0 otherwise | 48 | `2 (degree_i - C)` |
| SK glass, `J_ij = ±1`, `C = 1` | `-4 J_ij` | 4 | `-2 (C - Σ_j J_ij)` |

The only tight spot is the MAX-CUT bias: it must stay within +255, which needs
`degree ≤ 139` at `C = 12`. A 200-node graph with edge density 0.5 has degrees near
100, so it fits. `β` can only change in steps of 0.25 in this format. The published
text says both "increments of 2^-2" and "tested in increments of 0.125"; this design
follows 2^-2. `FRAC_W` in `rbm_pkg` is the knob if finer steps are wanted.

## 2. The sampler: one visible sample per clock

Each neuron computes its **pre-activation**, the sum of the weights of the active
nodes in the other layer plus its bias. Because states are 0/1 there are no
multipliers, only a selective accumulation of 9-bit words (`stochastic_neuron`). The
sum goes through a sigmoid and is compared with a 16-bit uniform random number, so the
neuron fires with probability `σ(x) = 1/(1+e^-x)`.

* **Sigmoid** (`sigmoid_approx`). Pre-activations have two fractional bits, so `σ`
  is only ever needed at multiples of 0.25. A 64-entry constant table holds
  `round(65536 · σ(k/4))` for `|x| < 16`. Larger `|x|` gives exactly 1, and negative
  `x` uses `σ(-x) = 1 - σ(x)`. The table is computed at elaboration with integer
  arithmetic only (`e^{-k/4}` by repeated multiplication in 32-bit fixed point), and
  every entry is within one LSB of the true sigmoid. The tails matter more than they
  seem. At the useful operating point many pre-activations lie around `|x| = 5…10`,
  and the small flip probabilities there (0.25 % at `|x| = 6`) are what keep the chain
  exploring. A shift-and-add piecewise-linear sigmoid that saturates at `|x| = 5`
  froze a 200-node MAX-CUT run within a few thousand samples.
* **Randomness** (`rng_bank`). Each neuron has its own 32-bit xorshift generator, and
  the top 16 bits are used. Lane seeds are hashed from `SEED` and the lane number. The
  generators run on every clock, so repeated runs of the same problem take different
  paths. That matters because the published method runs each problem many times and
  counts successes.
* **Update schedule** (`gibbs_sampler`). Both layers are resampled **in the same
  clock**, each from the other's current state:

      v(t+1) = sample(c + W h(t)),     h(t+1) = sample(b + Wᵀ v(t))

  This is the subtle point of the datapath. It is *not* one chain that alternates
  layers at half rate. It is two independent, correct block-Gibbs chains interleaved
  in time: `v0 → h1 → v2 → h3 …` and `h0 → v1 → h2 → …`. Each chain alternates layers
  exactly as block Gibbs sampling requires. Together they keep both neuron arrays busy
  and present a new visible sample every clock, which is the published rate (70,000
  samples = 1 ms at 70 MHz). The published description gives the rate but not the
  schedule, so this is an interpretation.

Both layers read the same weight array (`param_memory`). The visible layer reads
rows and the hidden layer reads columns, so every weight is read twice per clock. For
that reason the parameters are registers, not a RAM with a few ports. At 200 x 200 the
360,000 weight bits are in line with the flip-flop count reported for the original
FPGA build.

## 3. The hitting time engine

For a visible state `v`, summing the hidden layer out of `p(v,h)` gives

    log p(v) = Σ_i c_i v_i + Σ_j log(1 + e^{x_j}) - log Z,     x_j = b_j + Σ_i w_ij v_i

`log Z` is the same for every state and is dropped. `log(1+e^x)` is replaced by
`max(x, 0)`, which is close wherever `|x|` is large, and that is where the probability
mass is. The key saving is that `x_j` is exactly the hidden neuron's pre-activation,
which the sampler computes anyway for the sample `v`. So the engine only has to add
`NH` clamped sums and up to `NV` visible biases per sample.

Adding 400 terms in one 70 MHz clock is too much, so the engine (`hitting_engine`) has
**two** identical `hitting_accumulator` units. Samples go to them alternately. Each
unit stores its sample and clamped sums, adds the lower halves of both term lists in
the next clock, adds the upper halves in the clock after, and registers the result:

    clock         t        t+1          t+2           t+3           t+4
    unit 0     load s0   half A(s0)   half B(s0)     s0 result     best updated
                                      load s2        half A(s2) …
    unit 1               load s1      half A(s1)     half B(s1)    s1 result …

A finished log-probability is compared with the best so far. If it is strictly
greater, that state and its value are kept (ties keep the earlier state). So a sample
offered in clock `t` is reflected in `best_state` from clock `t+4`.

**Zero-cut exclusion.** For MAX-CUT the embedding has a spurious high-probability
family of states: visible all 0 and hidden all 1, or the reverse. They cut no logical
edge. With `zero_excl_en` set, the engine ignores every candidate whose visible bits
are all 0 or all 1. The published results show that this raises the average reported
cut but not the chance of hitting the true optimum.

## 4. Using the accelerator (`rbm_top`)

The host link (PCIe in the original) is not part of this RTL. Its traffic appears as
plain ports.

| port | meaning |
|---|---|
| `wr_en, wr_sel, wr_row, wr_col, wr_data` | write one parameter per clock: `SEL_WEIGHT` (`w[row][col]`, row = visible index), `SEL_VIS_BIAS` (`[row]`), `SEL_HID_BIAS` (`[col]`). Ignored while `busy`. |
| `start, num_samples, out_mode, zero_excl_en` | start a run of `N_s = num_samples` samples. The last three are latched at `start`. |
| `busy, done` | `done` stays high from the end of a run until the next `start`. |
| `raw_valid, raw_vis` | `MODE_RAW`: one visible sample per clock while the run lasts. |
| `best_valid, best_state, best_logprob` | `MODE_HITTING`: the best state, valid with `done`. |

A run proceeds as follows. One clock after `start`, an init clock loads random states
into both layers and clears the engine. After that come `N_s` sampling clocks, then in
a drain that waits for the hitting engine (1 clock in raw mode, 4 in hitting mode),
after which `done` rises. Number the clock in which `start` is sampled as clock 0.
`done` is then first high in clock `N_s + 3` in raw mode and in clock `N_s + 6` in
hitting mode. Reset is asynchronous and active low. It clears
all parameters and states and reseeds the generators.

## 5. Files

`rtl/` (one module or package per file; every file begins with a description):

| file | role |
|---|---|
| `rbm_pkg.sv` | widths (`WEIGHT_W = 9`, `FRAC_W = 2`, `PROB_W = 16`, `DEFAULT_N = 200`), `param_sel_e`, `out_mode_e`, width functions |
| `param_memory.sv` | weight matrix and biases, write port, full parallel read |
| `rng_bank.sv` | per-neuron xorshift generators |
| `sigmoid_approx.sv` | table sigmoid, tails kept |
| `stochastic_neuron.sv` | accumulate, sigmoid, compare |
| `rbm_layer.sv` | a layer of neurons |
| `gibbs_sampler.sv` | two layers, state registers, generators, transposed weight view |
| `hitting_accumulator.sv` | two-clock log-probability unit |
| `hitting_engine.sv` | two units, best-state register, zero-cut exclusion |
| `sample_controller.sv` | start, init, `N_s` steps, drain, done |
| `rbm_top.sv` | the whole accelerator |

Top parameters: `NV`, `NH` (default 200 each) and `SEED`. Every width follows from
these: pre-activations use `9 + clog2(N+1) + 1` bits and log-probabilities a few bits
more, so nothing can overflow.

## 6. Simulation

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<m>`. They use `tb/rbm_model_pkg.sv`, an independent
reference (real-valued sigmoid, plain integer sums). To build and run one with
Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/rbm_pkg.sv tb/rbm_model_pkg.sv tb/tb_rbm_top.sv --top-module tb_rbm_top
    obj_dir/Vtb_rbm_top

| testbench | what it establishes |
|---|---|
| `tb_param_memory` | every entry is written and read back; bad addresses and idle cycles change nothing |
| `tb_sigmoid_approx` | all 1024 inputs of a 10-bit sigmoid within one LSB of `σ`, monotone, exactly symmetric, tails kept |
| `tb_rng_bank` | xorshift sequence per lane, distinct lanes, uniform mean and bits |
| `tb_stochastic_neuron`, `tb_rbm_layer` | sums, probabilities and firing decisions for random weights, including both saturated ends |
| `tb_gibbs_sampler` | every step predicted from the generators' numbers; hold, init, hidden sums |
| `tb_hitting_accumulator` | exact log-probability, three-clock latency, back-to-back loads |
| `tb_hitting_engine` | best state and value against a model, clock by clock; exclusion, clear, both units used |
| `tb_sample_controller` | exact number of sampling clocks, drain wait, restart ignored while busy |
| `tb_rbm_top` | 8-node MAX-CUT and SK problems end to end: the engine's best equals the best of all samples (recomputed from the probed states), and it is the exact ground state found by enumeration; raw stream, cycle counts, writes dropped during a run; counts every mechanism |
| `tb_rbm_top_full` | the default 200 x 200 build: a 200-node dense MAX-CUT instance (`C = 12`, `β = 0.25`), all 40,400 parameters loaded, 70,000 samples in hitting mode with exclusion; engine result checked against the recomputed best; the cut beats the random-cut average |
| `tb_workload_sk` | the largest published SK size, 150 spins, on the default build with 50 nodes pinned off (`C = 1`, `β = 0.25`, 2,000 samples): engine result against the recomputed best, unused nodes stay 0, energy within 80 % of the large-N ground-state estimate `-0.763 N^1.5` |

The 200 x 200 build takes about 1.5 minutes to compile with Verilator. The
70,000-sample run then simulates in under a minute.

## 7. How far to trust it, and where it differs from the original

* **Follows the published design:** 200 x 200 nodes, 9-bit fixed-point weights and
  biases stored on chip, binary stochastic neurons with sigmoid activation, one
  sample per clock, the hitting-time log-probability with the `max(x,0)` simplification
  built from the hidden pre-activations, two alternating accumulators that each add
  half the terms per clock, the zero-cut exclusion, and the raw and hitting output
  modes.
* **This design's own choices:** the interleaved two-chain schedule; the table sigmoid;
  xorshift random numbers with 16-bit resolution; 2 fractional bits, with `β` folded
  in by the host; the register-file parameter store and its write port; random initial
  states; the controller and its drain wait; dropping writes while busy; the
  tie-breaking rule.
* **Not included:** the PCIe link and DMA. No timing closure was attempted. Each
  neuron's sum is written as one combinational loop, and a 70 MHz FPGA build would need
  the adder trees pipelined, which adds latency to the engine's alignment.
* **Smaller problems on the 200-node build:** give unused nodes zero weights and
  bias -256 so they stay at 0 (σ(-64) is exactly 0 here). Only the first sample of a
  run, the random initial state, has them set, and its log-probability is then far
  too low to be kept. The zero-cut exclusion then no longer recognises the
  logical all-ones state, because the unused visible bits are 0. Build with
  `NV = NH = N` when that matters.
* **Verification:** every block's testbench compares it with an independent model.
  Each testbench was also shown to fail against a deliberately broken copy of its
  block. The end-to-end runs find exact ground states of 8-spin problems, and they
  reach good solutions at the published sizes: cut 5,506 of 9,888 edges for a
  200-node MAX-CUT graph after 70,000 samples, and energy -1,337 for a 150-spin SK
  glass after 2,000 samples, against a large-N ground-state estimate of -1,402.
  These are single runs, not the published success-probability statistics over
  10,000 runs per instance.
* **The coupling `C`** is problem-size dependent. Around 12 is best for 150-node
  MAX-CUT at 70,000 samples. An 8-node graph freezes at `C = 12`, so the small
  end-to-end test uses `C = 2`.
