# A graph-coloured higher-order Ising machine in clause space

This is synthesizable SystemVerilog for a higher-order Ising machine in the style of a neuromorphic
autoencoder. It minimises polynomial objectives over ±1 spins, such as MAX-CUT, XORSAT and MAX-k-SAT,
without first reducing them to pairwise couplings. The design follows the published description
of an FPGA solver. It is built from a few ideas:

* **The state is the clauses, not the spins.** Each product term ("clause") k of the objective,
  J_k · s_a · s_b · s_c ..., is held as one bit, T_k = 1 when the product of its spins is +1. The
  spins are never stored. Flipping spin i flips every clause that contains it, so the machine
  updates T directly: T_k ^= (odd number of fired members of k).
* **Encoder, latent neurons, decoder.**
  * The encoder is a sparse matrix H̃ whose entries are the clause weights. It maps T to one field
    per spin.
  * A spin's "latent neuron" fires when that field lies below a noisy threshold.
  * The decoder is the membership matrix. It maps the fired neurons back to clause flips through a
    parity, as described in the first point.
* **Parallel updates through graph colouring.** Spins that share no clause are independent. The host
  colours the spins so that no two spins of one colour share a clause. The machine then updates one
  whole colour per clock and steps through the colours in turn.
* **Annealing through the thresholds.** A spin's threshold is a sample of annealed noise. The noise
  follows a Fowler–Nordheim (FN) schedule, τ(t) = A / (C·ln(1 + t/C)), and the host generates it. A
  single 16-bit sample per clock feeds a shift register, and the register provides a different
  threshold to each member of the current colour.

The FPGA has no spin array, no energy register and no random-number generator. The host streams in
the noise, and the hardware streams back the number of satisfied clauses after every iteration.

## The iteration in detail

An iteration consumes one noise sample. With T fixed, the following happens in one clock.

1. **Field.** Spin i has the neighbourhood slots {valid, J_k, k}, one for each clause that contains
   it. The latent layer computes

       q_cal_i = 2 · Σ_k J_k · T_k − Csum_i ,      Csum_i = Σ_k J_k

   This equals Σ_k J_k (2T_k − 1), the bipolar sum of the terms that contain i. That sum is half of
   the energy change that flipping s_i would cause. In hardware, each T_k is ANDed with the 5-bit
   weight (the "T replicated ×5 AND J" of the FPGA figure). The 16-bit sum is shifted left by one,
   and Csum, which the host precomputes, is subtracted.
2. **Threshold.** A neuron is *active* when q_cal_i < μ_lane(i) and, in coloured mode, its colour
   equals the colour counter. μ_lane(i) is the value at stage lane(i) of the noise shift register.
   Read as spins, a neuron fires when the bipolar field is negative enough, that is, when the flip
   gains at least −μ. Noise samples are ≤ 0 most of the time, and the occasional positive sample
   lets an uphill move through.
3. **Selection.**
   * In coloured mode, all active neurons fire together.
   * In uncoloured mode, every spin is a candidate. The global arbiter keeps exactly one of them: the
     first active neuron at or after a random start position, wrapping round. The start position
     comes from a 32-bit xorshift generator that steps once per iteration.
4. **Decoder.** For every clause, σ_k is the XOR of the fire bits of its (up to MAX_ORDER) members.
   Then T ← T ⊕ σ.
5. **On the same clock edge**, the new noise sample enters stage 0 and the other stages move up by
   one. The colour counter advances and wraps after the last colour.
6. **Readout.** This is combinational on T:

       sat = (Σ_k J_k (2T_k − 1) + offset) >>> shift

   SOLVED is sat == target. The stream returns {SOLVED, sat} for the iteration.

Because Σ J_k(2T_k − 1) is the objective itself, one formula covers all three problem families:

| problem | clauses (terms) | J | offset | shift | sat means |
|---|---|---|---|---|---|
| MAX-CUT, edge weight w | one order-2 term per edge | −w | number of edges | 1 | cut edges |
| XORSAT, parity b_k | one term per equation | (−1)^b_k | number of equations | 1 | satisfied equations |
| MAX-3SAT | 7 terms per clause (3 linear, 3 pair, 1 triple; signs from the literals, not merged) | ±1 | 7 · clauses | 3 | satisfied clauses |

The MAX-3SAT row uses 8·C_k = 7 + Σ l·s − Σ l l'·s s' + l l' l''·s s' s'', where l = ±1 is the
literal polarity. Keeping the 7 terms of each clause separate keeps every weight at ±1, which fits
the 5-bit weights. Merging equal terms would save slots but could overflow the weights.

**Sign convention.** The FPGA figure and the coloured pseudocode both fire when the computed
quantity is *below* the threshold, and the RTL follows them. One equation in the methods section
writes the same rule with the opposite sign, as −Σ H̃T > μ. The two agree once the constant Csum
term is accounted for, except for the strictness of the comparison at equality. The RTL uses a
strict `<`.

## Colours, lanes and noise reuse

The host colours the spins (greedy or DSATUR) and numbers the spins inside each colour 0, 1, 2, ...
That number is the spin's *lane*, the stage of the noise shift register it compares against. The
register needs as many stages as the largest colour class. The default of 800 stages covers the
worst case, in which all 800 spins form one class. A sample therefore serves as the threshold of
lane 0 on the iteration after it arrives, of lane 1 on the next, and so on. The different members
of a colour see different, recent samples. The 16-bit noise therefore arrives at only one sample per
clock, yet every spin still gets a fresh threshold whenever its colour comes round.

Nothing in hardware checks that a colouring is valid. If two spins of one colour share a clause and
both fire, their flips cancel in that clause's parity, which is correct for spins but breaks the
one-flip-at-a-time energy argument. The host is responsible for a proper colouring.

Uncoloured mode (REG_MODE bit 0) is the fallback for dense problems, where colouring would give
almost as many colours as spins. In that mode, the colour counter is ignored and the arbiter admits
exactly one flip per clock. This is rejection-free, sequential annealing.

## The FN annealer is host software

The annealer is not in the RTL. The host evaluates τ(t_n) with t_n = 1 + nΔ and C = 8·10⁴, draws an
exponential variate and quantises the product to a 16-bit two's-complement μ. Δ sets the annealing
speed. The testbenches contain a model of this schedule (`tb/fn_noise_pkg.sv`): μ = τ · ln(B·u),
where u is uniform in (0, 1]. B > 1 shifts a small part of the samples above zero, so that uphill
moves are possible. The parameters A, B and Δ used in the tests are this design's choices for small
instances.

## Stream interface

The IP (`hoim_top`) has one 32-bit AXI4-Stream slave (host → solver) and one 32-bit master (solver →
host), as a DMA engine would drive it. Outside a run, words come in pairs:

    header  = {op[31:28], idx_a[27:16], idx_b[15:0]}
    data    = one 32-bit word

| op | name | idx_a | idx_b | data |
|---|---|---|---|---|
| 0 | NOP | – | – | ignored |
| 1 | SET_T | – | word w | clause bits 32w..32w+31 |
| 2 | SET_J | – | clause k | J_k in bits 4:0 (two's complement) |
| 3 | SET_MEMBER | member slot m | clause k | {valid[31], variable[15:0]} |
| 4 | SET_NEIGH | slot s | variable i | {valid[31], J[20:16], clause[15:0]} |
| 5 | SET_VAR | – | variable i | {colour[23:16], Csum[15:0]} |
| 6 | SET_LANE | – | variable i | lane |
| 7 | SET_NOISE | – | stage l | μ in bits 15:0 |
| 8 | SET_REG | – | register | value: 0 colours, 1 SAT target, 2 offset, 3 shift, 4 mode, 5 arbiter seed |
| 9 | RUN | – | – | ignored; starts a run |
| 10 | READ | – | – | ignored; streams T out |

All tables are cleared at reset. A write whose index is out of range is dropped.

**During a run**, every accepted word is one noise sample in bits 15:0, and each sample produces
exactly one iteration. The iteration count is therefore the number of samples sent, and the host
counts cycles by counting samples.
* **Result words.** For each iteration, the solver returns {15'b0, SOLVED, SAT[15:0]}, which
  describes T after that iteration. The word appears one clock after the sample is accepted.
* **TLAST on a sample.** That sample is the last one. Its result word also carries TLAST, the run
  ends and T is frozen.
* **Bit 31 set.** A word with bit 31 set is READ. It halts the run without an iteration and streams
  T out.
* **T readout.** The readout comes from a run READ or from a separate READ command. It is ⌈M/32⌉
  words, with clause 32w+b in bit b of word w and TLAST on the last word.

**Back-pressure.** The solver never buffers more than one result word. If the host stops accepting
results, `s_axis_tready` falls and the solver stalls. If the host stops sending samples, the solver
simply waits. Either way, the iteration count stays exactly equal to the number of samples consumed.
`running` and `solved` are also brought out as plain status pins.

## Modules

| file | role |
|---|---|
| `hoim_pkg.sv` | widths, opcodes, register numbers, the `cfg_wr_t` write struct |
| `hoim_top.sv` | top: stream wrapper and solver core |
| `axis_wrapper.sv` | command decoder, run/read state machine, result and readout streaming |
| `solver_core.sv` | problem tables, and connects the datapath below |
| `latent_layer.sv` | encoder and latent neurons for all spins (combinational) |
| `clause_layer.sv` | decoder parity and the T register |
| `noise_vector.sv` | the L-stage 16-bit noise shift register |
| `color_counter.sv` | modulo-`num_colors` counter |
| `global_arbiter.sv` | xorshift start position and one-of-N pick for uncoloured mode |
| `sat_calc.sv` | satisfied-clause count and SOLVED |

Default parameters (`hoim_top`):

| parameter | default | where it comes from |
|---|---|---|
| N_VARS | 800 | largest FPGA instances (800-node G-set graphs) |
| M_CLAUSES | 19176 | edge count of G4, the largest of them |
| MAX_NEIGH | 128 | own choice; the sparse neighbourhood bound q has no value in the source |
| MAX_ORDER | 3 | MAX-3SAT is the highest order run on the FPGA |
| LANES | 800 | the largest colour class possible for 800 spins |
| COLOR_W | 6 | own choice; up to 63 colours |
| noise / sum / SAT width | 16 bits | as described for the FPGA |
| weight width | 5 bits | as printed in the FPGA datapath figure |
| stream width | 32 bits | AXI4-Stream, 32-bit transfers |

### Size of the default build

At the defaults, the tables alone take about 800 × 128 × (1 + 5 + 15) ≈ 2.15 Mbit of neighbourhood
slots and 19176 × 3 × 11 ≈ 0.63 Mbit of membership. All of it is held in flip-flops, because every
entry is read every clock. The latent layer has 102,400 19176-to-1 selects. That is far larger than
a mid-size FPGA. The source's FPGA was configured per problem and was much smaller. The parameters
scale freely: for a 250-variable MAX-3SAT instance, N_VARS=250, M_CLAUSES=7455 and MAX_NEIGH≈100
are enough. Logic synthesis of the default build is slow for the same reason, while elaboration
and lint are quick.

### What the default build can hold

| workload (source of sizes) | fits | why |
|---|---|---|
| G4, G11, G15 MAX-CUT, 800 nodes | yes | ≤ 19176 edges, degree < 128, ±1 weights, ≤ 63 colours (G15 needs 7) |
| uf50-218 … uf250-1065, uuf100-430 … uuf250-1065 MAX-3SAT | yes | 7 × 1065 = 7455 terms, 250 variables, about 100 neighbour slots at most |
| small 3R-3X (10 × 10) | yes | trivial |
| MAX-5SAT 250/5279, MAX-7SAT 120/10535 | no | order above 3 and 31 or 127 terms per clause; these were CPU-only experiments |

The G-set edge counts and degrees, and the SATLIB degree estimates, come from general knowledge of
those benchmarks, not from the source description.

## Departures and omissions

* **Loadable tables.** The problem is written into loadable tables at run time. The source only
  says that configuration bits are streamed. The command set and word formats are this design's
  own.
* **Per-step updates.** The noise register and colour counter move once per *iteration* (per
  accepted sample), not once per raw clock. With an uninterrupted stream, the two are the same, and
  the described behaviour is one sample per clock.
* **Arbiter randomness.** The uncoloured arbiter is described only as selecting one random active
  neuron. The xorshift generator and the scan from a random start position are this design's own.
  The scan favours a neuron that follows a long run of inactive ones, so it is not exactly uniform.
* **Arithmetic range.** The 16-bit field arithmetic wraps. The host must keep |q_cal| < 2¹⁵ and
  weights within −16…15.
* **The result word** packs SOLVED next to SAT. The source mentions a SOLVED signal and a 16-bit SAT
  value but no word layout.
* **Not included:**
  * the processing system and host program, including the FN annealer and the graph colouring
  * the DMA engine
  * the clock generation (100 MHz in the source)
  * the cycle counter that measures time-to-solution, which the source places in the host

## Simulating

Every testbench is self-checking. Each prints one line, `TB_RESULT checks=N failures=F`, and has a
watchdog. For example:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/hoim_pkg.sv rtl/*.sv tb/fn_noise_pkg.sv tb/tb_hoim_top.sv \
      --top-module tb_hoim_top -o sim && obj_dir/sim

* **Unit tests.** `tb_noise_vector`, `tb_color_counter`, `tb_latent_layer`, `tb_clause_layer`,
  `tb_sat_calc` and `tb_global_arbiter` test each block against independently computed values, at
  small sizes.
* **`tb_solver_core`.** Runs a planted 3R-3X instance (10 spins, 10 clauses). First it runs in
  coloured mode with FN noise, then in arbiter mode. A reference model predicts the fired set, T and
  SAT every cycle.
* **`tb_axis_wrapper`.** Checks the protocol against a stub core, with random gaps and back-pressure:
  command decode, one iteration per sample, result ordering, TLAST stop, READ in and out of a run.
* **`tb_hoim_top`.** Runs end to end through the streams only, on a 12 × 12 planted 3R-3X instance.
  Every result word and every readout is predicted by a model. It also counts, and requires at
  least once: configuration, runs, input stalls, output back-pressure, TLAST stop, READ inside a
  run, READ command, colour wrap, parallel flips, SOLVED, and arbiter choices.
* **`tb_hoim_top_full`.** Runs the top at its default size. It solves MAX-CUT on a 20 × 40 toroidal
  grid (800 spins, 1600 edges, 2 colours, 1000 iterations) and then reads the full 19176-bit clause
  register back, checking every word against a model. It runs in well under a minute.
* **`tb_hoim_top_max3sat`.** Runs MAX-3SAT at the size of the smallest satisfiable benchmark set
  (50 variables, 218 clauses, expanded into 1526 terms) through the streams. The instance is a
  random formula with a planted solution and about 11 colours. Every result word is checked, and
  the run must reach SOLVED. The larger MAX-3SAT sizes differ only in N_VARS and M_CLAUSES; they
  were not simulated.
