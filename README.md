# Stochastic digital circuits for Bayesian inference

Most hardware for probabilistic reasoning computes probabilities. This design
computes *samples*. Its basic parts are digital gates that are random on
purpose. Each one outputs a random draw whose distribution depends on its
inputs, the way an AND gate's output depends on its inputs. A register fed
back through such a gate is a Markov chain in hardware. If the gate performs a
Gibbs update, the chain wanders through the values of its variable in
proportion to their posterior probability. Holding some registers fixed
("clamping" them to observed data) makes the rest sample the posterior given
that data.

Three facts make this cheap and fast:

* **Only ratios of probabilities matter, and these live on a log scale.** So a
  12-bit fixed-point log probability (8 integer, 4 fraction bits) is enough. A
  sampler is a few hundred cells rather than a floating-point unit.
* **Variables that do not interact can be updated in the same cycle.** A
  lattice model with a checkerboard structure needs only two phases per sweep,
  however large the lattice.
* **Randomness is cheap.** Each gate has its own xorshift generator.

This RTL follows the circuits described in *Building fast Bayesian computing
machines out of intentionally stochastic, digital parts* (Mansinghka and
Jonas). That paper gives the gates' functions and the system architecture in
outline. The internal datapaths, sizes and interfaces here are this design's
own. The section *Where this design departs from the paper* lists them.

## The energy code

Every block passes *energies*: unnormalised natural-log probabilities. An
energy is a 12-bit sign-magnitude fixed-point word. Bit 11 is the sign, bits
10..4 are the integer magnitude, and bits 3..0 are the fraction (`sdc_pkg::EM
= 8`, `EN = 4`). Two examples in the same code with 5.3 bits are
`01011.001 = +11.125` and `10111.100 = -7.5`. The largest magnitude is
127.9375 nats. Arithmetic inside a block is two's complement. `to_energy()` and
`from_energy()` in `sdc_pkg` convert, in units of 1/16 nat, and `to_energy()`
saturates.

Because only differences between energies matter, a "probability 0" outcome
is simply one whose energy is about 12 nats or more below the best. Its weight
then rounds to zero (see below).

## Gates

### Random source: `xorshift32`

This is Marsaglia's 32-bit xorshift with shifts (13, 17, 5), and its period is
2^32 - 1. Each stochastic gate owns an instance with its own seed, and
`advance` steps it. With the published seed 2463534242, the first outputs are
723471715, 2497366906 and 2064144800. Its testbench checks these values.

### Biased coin: `theta_gate`

`out = (rnd < theta)`, so an M-bit weight gives P(1) = theta / 2^M. The gate
is purely combinational; the random bits come in on a port. `binomial_gate`
puts NT of these side by side on disjoint random bits and adds their outputs,
which gives a Binomial(NT, theta/2^M) sample per cycle.

### The central gate: `discrete_sample`

Given K energies e_1..e_K it outputs index i with probability
exp(e_i) / sum_k exp(e_k). This one gate is a Gibbs update for a K-valued
variable. The datapath is fully parallel and combinational from `energy` to
`out`:

1. **Renormalise.** Convert each code to two's complement and find the
   maximum e_max.
2. **Exponentiate.** Form d_i = e_max - e_i >= 0 and look up
   w_i = round(2^16 * exp(-d_i)). The table is computed at elaboration with
   `$exp` (LUT[d] = round(2^WB exp(-d/2^N))). It has about 190 entries: beyond
   d = 17 ln 2 every weight rounds to zero. The best outcome always weighs
   exactly 2^16, so the total is never zero.
3. **Sample.** Form the prefix sums S_i. A 32-bit uniform word u gives the
   threshold t = floor(u * S_K / 2^32), and the output is the first i with
   S_i > t.

Timing: the output is a function of the energies and of the internal
generator's state. A high `sample` at a clock edge steps the generator, so the
next cycle shows a new, independent draw. A caller that wants one transition
per cycle holds `sample` high.

Why low precision works here: a nearly uniform distribution has nearly equal
energies, and rounding them changes the ratios only slightly. A nearly
deterministic distribution has one energy far above the rest, and rounding
cannot change which outcome dominates. Precision mainly matters in between.
The fraction bits (N) and the weight bits (WB) are parameters, for anyone who
wants to measure that.

## Transition circuits and schedules

`transition_circuit` is a state register together with a `discrete_sample`
gate. The caller supplies the conditional energies of the variable given its
neighbours. These are usually selected by multiplexers from the neighbours'
current values. On `step` the register takes the gate's draw. While `clamp` is
high it holds `clamp_value` instead.

One rule keeps an assembly of such circuits correct: **a circuit must not
transition in the same cycle as any circuit it reads from or that reads from
it.** Circuits that do not interact may step together. That is the whole
source of parallelism.

`abc_network` shows this on the model P(A,B,C) = P(A) P(B|A) P(C|A) with
binary variables:

| schedule | cycle 0 | cycle 1 | cycle 2 | cycles/sweep |
|---|---|---|---|---|
| `parallel` = 1 | A | B and C | - | 2 |
| `parallel` = 0, serial | A | B | C | 3 |
| `random_scan` = 1 | coin: A or {B, C} | coin: A or {B, C} | - | 2 |

The first two are deterministic cycles of update kernels. The third is a
stochastic schedule, a mixture of the two parallel kernels: each cycle a fair
coin from a private xorshift32 picks which group steps, and `sweep_done`
counts two such updates. `random_scan` overrides `parallel`. The mode inputs
may change at any time.

A is updated from log P(a) + log P(b|a) + log P(c|a), with B and C selecting
the table entries. B and C are updated from log P(b|a) and log P(c|a). An
assertion checks that A never steps together with B or C. Clamping C to 1
while the network runs turns it, from the next cycle, into a sampler of
P(A,B | C=1). The log-probability tables are module parameters; the default
example has P(A=1) = 0.3, P(B=1|A) = 0.2/0.9 and P(C=1|A) = 0.1/0.7.

## The MRF engine for depth and motion (`mrf_processor`)

Stereo depth and optical flow are both pixel-matching problems. Each pixel
(r, c) has a hidden label x: a disparity, or an index into a window of 2-D
displacements. Each pixel also has a vector Y[r,c][0..L-1], which says how
well each candidate match fits the images. Neighbouring labels should mostly
agree but may jump at object edges. The engine samples from

    E(l at r,c) = Y[r,c][l] + sum over 4-neighbours n of PAIR[l][x_n]

Both Y and the L x L table PAIR are loaded by the host. A truncated-linear
PAIR (-lambda * min(|l - m|, T)) is the usual "smooth but with
discontinuities" prior, but any table works. That includes a Potts prior, or
distances between 2-D displacement labels for motion.

**Schedule.** Colour the lattice like a checkerboard. Every neighbour of a
black pixel is white, so all black pixels are conditionally independent given
the white ones, and the reverse holds too. A sweep is therefore two phases.
Rather than one sampler per pixel, the engine has P Gibbs units (each a
`discrete_sample` over L labels). In each cycle they update P pixels of the
same colour and row, at columns `2(gP + j) + ((r + phase) mod 2)` for
j = 0..P-1. One sweep takes

    2 * H * W / (2P) cycles  (1536 at the default 128 x 96, P = 8)

with no stalls. In every cycle the units read only labels of the other
colour, which are not being written, so there are no hazards. An assertion
checks the colour of every update.

**Using it.**

1. While `busy` is low, write each pixel's Y vector (`cfg_y_*`, one pixel per
   cycle), the PAIR entries (`cfg_pair_*`) and, if wanted, initial labels
   (`cfg_x_*`). Writes are ignored while a run is in progress.
2. Pulse `start` with `sweeps` set (0 runs one sweep).
3. Every update cycle is reported one cycle later on the sample stream:
   `smp_valid`, the sweep number, the phase, the row, the first column
   `smp_col0` (unit j is at `smp_col0 + 2j`) and the P new labels. A consumer
   can rebuild each posterior sample, or average them, without stopping the
   engine.
4. `done` pulses once, in the cycle after the last update.
   `rd_addr`/`rd_label` read the current state combinationally.

**Saturation.** Energy sums saturate at +-127.9 nats. Keep data and pairwise
energies well inside that range, or labels far from the best may all clip to
the same (negligible) weight.

## The perceptual-learning engine (`dpmm_learner`)

This engine clusters binary images without being told how many clusters there
are. The model is a Dirichlet process mixture (Chinese restaurant process)
with a Beta(1,1) prior on each pixel's probability within a cluster. Each
cluster k keeps its size n_k and a count c_kd of members with pixel d set.
Reassigning a point x works as follows:

1. **Take it out** of its cluster (1 cycle): decrement n and the row of
   counts.
2. **Score** each of the KMAX cluster slots, one per cycle:
   `s_k = log n_k + sum_d log(x_d ? c_kd + 1 : n_k - c_kd + 1) - D log(n_k + 2)`.
   All D pixel terms come from D parallel lookups in a table of log(c + 1)
   and an adder tree. This per-pixel parallelism is where most of the speed
   comes from. The first empty slot stands for "a new cluster" and scores
   `log alpha - D log 2`. Other empty slots are excluded.
3. **Draw and put back** (1 cycle): subtract the best score, cut to the
   energy code, draw with a `discrete_sample` gate over KMAX outcomes, and
   increment the chosen cluster's counts.

Each point therefore costs KMAX + 2 cycles (34 at the default). The sampler
opens and empties clusters as it goes, and `num_clusters` reports the current
count.

Data arrive as a stream. Points are appended (`pt_we`) whenever the engine is
idle, and a new point is placed on its first visit by the same rule. A run
(`start`, `sweeps`) visits every stored point in order, and each assignment
appears on `asg_*`. `rd_cluster` reads a cluster's size and pixel counts. The
cluster's "prototype image" is (c_kd + 1) / (n_k + 2). At most NMAX points
are stored and at most KMAX clusters exist; once all slots are in use, no new
cluster can open.

One behaviour to know: a Gibbs sampler of this model can merge clusters
early, when a cluster holds a single point and its predictive probabilities
are weak. It may not split them again within a short run. Clearly different
prototypes separate reliably; overlapping ones may need a larger alpha
(`LOG_ALPHA`, in 1/256 nat) or more sweeps.

## A spiking version of the same gate (`spiking_sampler`)

The discrete-sample law can also be produced by a race. Give element i a
Poisson spike train of rate proportional to exp(e_i), and let the first
element to spike win and silence the others (lateral inhibition). The winner
is then i with probability exp(e_i) / sum exp(e_k). This module is a
clocked digital version of that race:

* In each tick, element i fires through a THETA gate with probability
  q_i = 2^-RS exp(e_i - e_max).
* A tick with exactly one spike ends the race, and that element is the
  result.
* A tick with several spikes is discarded, with all of them inhibited.

`spikes` shows the raster of each tick. `valid` pulses for one cycle with
`value` and the race length `ticks`.

Because time is discrete, the geometric waiting times are only close to
exponential: outcome i wins with probability proportional to q_i/(1 - q_i).
The strongest outcome is over-weighted by at most 1/(1 - 2^-RS), about 3 % at
RS = 5. Races take about 2^RS / sum(exp(e_i - e_max)) ticks. Use
`discrete_sample` where exactness matters.

## The top level (`bayes_machine_top`)

The top places five engines side by side on one clock and an active-low
synchronous reset, and adds no logic of its own:

| prefix | engine | default size |
|---|---|---|
| `mrf_` | `mrf_processor` | 128 x 96 pixels, 16 labels, 8 units |
| `abc_` | `abc_network` (bit 0 = A, 1 = B, 2 = C) | 3 binary variables |
| `bin_` | `binomial_gate` | 8 trials, 8-bit weight |
| `spk_` | `spiking_sampler` | 16 elements |
| `dp_`  | `dpmm_learner` | 256-pixel images, 32 clusters, 1024 points |

All generators have different fixed seeds, so runs are repeatable. Change the
`SEED` parameters for independent runs.

## Where this design departs from the paper

What follows the paper:

* the gate functions (THETA by comparison with random bits; Binomial from
  THETA gates and adders; the discrete-sample law);
* the ports of the discrete-sample gate and its m.n number code;
* the register-plus-stochastic-operator structure;
* clamping, and the rule for parallel scheduling;
* the three-variable example;
* the lattice MRF with data and pairwise terms, the two-phase sweep, the
  programmable potentials and the sample stream;
* the Dirichlet process mixture over binary images, with pixel-parallel
  scoring and an online stream;
* the first-spike race with lateral inhibition;
* the use of xorshift generators.

What is this design's own:

* **Every internal datapath:** the max-subtract/table/prefix-sum sampler, the
  MRF memory layout and unit arrangement, the DPMM's one-cluster-per-cycle
  scoring and its fixed-point formats.
* **The sizes.** The lattice is 128 x 96 with 16 labels: the paper claims
  "10,000+ latent variables" but gives no frame size. Also P = 8, KMAX = 32,
  NMAX = 1024, the Binomial width, and K = 16 for the standalone gates.
* **The host interfaces and handshakes**, reset behaviour, saturation, and
  the default probability tables of the three-variable model.
* **The DPMM model details** (Beta(1,1), alpha = 1, collapsed Gibbs over
  assignments only), and the discrete-time spiking race with its collision
  rule.
* **Combining the engines in one top.** The paper's prototypes were separate
  machines, and the paper reports them as running on FPGAs.

What is not here:

* the compiler that turns a factor graph into a circuit, and the ICU alarm
  network circuit it produced (that network's tables are not given);
* a fully space-parallel MRF (one sampler per pixel), which would be a
  different instance of the same update rule;
* fault injection;
* the 1000-outcome configuration of the accuracy study at default
  parameters. It is a parameter setting: `tb_discrete_sample_k1000` builds
  `discrete_sample` with `K = 1024` and runs it.

## Verifying and simulating

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. The
statistical checks compare histograms of thousands of draws with exact
probabilities, worked out in the testbench in floating point from the same
codes, within 5 standard deviations. Testbenches use fixed seeds and are
repeatable.

| testbench | what it establishes |
|---|---|
| `tb_xorshift32` | published output sequence; hold when idle |
| `tb_theta_gate` | exhaustive: weight theta fires for exactly theta of 2^M words |
| `tb_binomial_gate` | mean and variance for four weights |
| `tb_discrete_sample` | 4 distributions x 16 bins; the printed code examples |
| `tb_discrete_sample_k1000` | K = 1024 gate on 1000 outcomes: chi-square of 100,000 draws each for 9.9, 8.5 and 1.1 bit entropy laws; prints the precision loss against the unrounded law (about 1.6e-4 nats KL, under 1e-3 of the mass lost to zero weights) |
| `tb_transition_circuit` | stationary histogram, hold, clamp |
| `tb_abc_network` | exact marginals under all three schedules and with C clamped; sweep lengths |
| `tb_mrf_processor` | stream coverage and parity, exact cycle count, one pixel's exact conditional |
| `tb_spiking_sampler` | winner law within the bias bound, lone-spike rule, mean race length |
| `tb_dpmm_learner` | count invariants, cycle count, finds 3 then (after streaming) 4 clusters |
| `tb_bayes_machine_top` | whole chip at small sizes; every mechanism is counted and must occur |
| `tb_bayes_machine_top_full` | whole chip at default sizes: a synthetic 128 x 96 depth map with 15 % corrupted data and 10 sweeps (the error rate must at least halve; it falls from about 15 % to under 3 %), plus a 256-pixel clustering run |

Run one with plain Verilator (5.x) from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/sdc_pkg.sv \
        tb/tb_mrf_processor.sv --top-module tb_mrf_processor
    ./obj_dir/Vtb_mrf_processor

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. The
full-size test builds in about 15 s and runs in under a second.

The RTL builds without Verilator `-Wall` warnings.
