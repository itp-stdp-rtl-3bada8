# ITP-STDP learning engine

Spike-timing-dependent plasticity (STDP) changes a synaptic weight by an
amount that decays exponentially with the time between a pre-synaptic and a
post-synaptic spike. In hardware this usually costs a timer per neuron, a
subtraction per spike pair and an exponential or a lookup table. ITP-STDP
("intrinsic-timing power-of-two STDP") uses a decay of `2^-k` in place of
`e^-k/τ`. That one change removes all of those parts. If a neuron's recent
spikes are kept in a shift register, newest spike in the MSB, then the
register read as a binary fraction already *is* the STDP weight change. The
exponential, the time difference and (for all-to-all pairing) the sum over
spike pairs all fall out of the binary place value. The factor `ln 2` that
separates `2^-k` from `e^-k` acts as a rescaled time constant, so it can be
absorbed by choosing the time step, or partly compensated by a fixed scale.

This repository holds synthesizable SystemVerilog for a small learning
engine built on that idea. Four input-layer LIF neurons are fully connected
to four output-layer LIF neurons through 16 plastic synapses. The eight
neurons share one pipelined neuron datapath. The membrane decay
multiplication uses an approximate logarithmic multiplier (LLSMu). Every
block has a self-checking testbench.

## From spike history to weight change

Each neuron has a 7-bit history register `h[6:0]`. Once per time step the
neuron's new spike (1 or 0) is shifted in at `h[6]` and everything else moves
down one place. Bit `h[6-k]` therefore records whether the neuron fired `k`
steps ago. Read as a fixed-point number with one integer bit (Q1.6), bit
`h[6-k]` is worth `2^-k`.

Take one synapse with pre history `P` and post history `Q`. Only the newest
bits, `P[6]` and `Q[6]` (the *trigger bits*), decide what happens:

| `P[6]` | `Q[6]` | meaning                                   | weight change         |
|--------|--------|-------------------------------------------|-----------------------|
| 0      | 0      | nobody fired                              | 0                     |
| 1      | 1      | both fired in the same step               | 0                     |
| 0      | 1      | post fired; earlier pre spikes caused it  | `+read(P)` (LTP)      |
| 1      | 0      | pre fired after the post spikes           | `-read(Q)` (LTD)      |

In the LTP case `P[6]` is 0, so `read(P)` is a sum of `2^-k` over the pre
spikes `k` steps back. That is exactly the all-to-all pairing rule with a
base-2 decay. For example, `P = 0100100` after a post spike gives
`2^-1 + 2^-4 = 0.5625`, which is 36 LSBs in Q1.6. LTD mirrors this with the
post history.

`read()` depends on the pairing scheme (`weight_read`):

* **all-to-all**: `read(h) = h`. There is no logic at all.
* **nearest neighbour**: only the most recent earlier spike counts. This is
  the highest set bit of `h`, so `read(h)` is an *MSB mask*: a priority
  detector from the top that keeps the first 1 and clears the rest
  (`0100100` becomes `0100000`). This is the scheme the engine is meant to
  run. Both are selectable at run time through `cfg.pairing`.

The 7-step window comes from an inter-spike-interval analysis of
rate-coded image and motor-fault data. In that data, 7 steps cover about
99.5 % of all intervals. With the sign bit, a weight change fits in 8 bits.

## The synapse (`itp_stdp_synapse`)

The synapse pipeline has two stages:

1. The trigger logic (XOR of the trigger bits, ANDed with each) drives a
   three-way choice between `+read(P)`, `-read(Q)` and 0. The result is
   registered as an 8-bit two's-complement number. With `cfg.learn_en = 0`
   the change is forced to 0.
2. The change is scaled using shifts only, and then added to the weight:
   * learning rate: arithmetic right shift by `cfg.lr_shift` (0..7);
   * `cfg.comp_en`: multiply by `2^-1 + 2^-3 + 2^-4 = 0.6875 ≈ ln 2`, the
     amplitude part of the base-2 correction;
   * the sum saturates at the 8-bit signed range `[-128, 127]`.

The weight is an 8-bit signed number with the same LSB as the change
(`2^-6`). The new weight is visible two clocks after `upd`. `w_load` writes
a weight directly.

## The neuron (`lif_neuron_unit`, `llsmu`, `llmu`)

The neuron is a discrete leaky integrate-and-fire model:

    V' = E_TAU·(V − E_REST)/256 + E_REST + I
    spike = V' > V_TH;   V ← spike ? E_REST : V'

`E_TAU` is `e^(−1/τ)` in Q0.8 (default 199, τ = 4). `V` is an unsigned
8-bit value, and `V'` is clamped to `[0, 255]`. `I` is a signed 10-bit
current.

The product `E_TAU·|V − E_REST|` goes through **LLSMu**, an approximate
8×8 multiplier built in three steps:

1. *MSB alignment*. Each operand is shifted left until its leading one is
   in bit 7.
2. *Karatsuba*. The aligned operands are split into 4-bit halves
   `A = 16·HA + LA`. Three small products are formed:
   `m0 = M(LA,LB)`, `m1 = M(HA,HB)` and `m2 = M(HA+LA, HB+LB)`. They are
   combined as `256·m1 + 16·(m2 − m0 − m1) + m0`.
3. The composed product is shifted right again by the two alignment
   amounts.

`M` (**LLMu**) is Mitchell's logarithmic multiplier. Write each operand as
`2^k(1+f)`. Then the product is

* `2^(kx+ky)·(1 + fx + fy + C)` if `fx + fy < 1`;
* `2^(kx+ky+1)·(fx + fy + C/2)` if the fraction sum carries.

The compensation is `C = 0.08333`, stored as 21/256 (and 11/256 for the
halved case). Against the exact product, an LLMu result stays within 12 %
(checked exhaustively). The LLSMu mean error is within ±5 % (checked on
random operands).

One physical neuron serves all eight neurons by time multiplexing. The
neuron unit has eight pipeline stages:

| stage | work                                                    |
|-------|---------------------------------------------------------|
| 1     | read `V[idx]`, form `V − E_REST` (sign, magnitude), `E_REST + I` |
| 2     | MSB alignment, split into halves, half sums             |
| 3     | LLMu log half: leading ones, fractions, fraction sum    |
| 4     | LLMu antilog half: carry, C or C/2, shift               |
| 5     | compose, shift back                                     |
| 6     | `>> 8`, restore sign, add `E_REST + I`                  |
| 7     | clamp, threshold compare                                |
| 8     | reset multiplexer, write `V[idx]`, output spike         |

A neuron issued in clock `c` produces its spike in clock `c+8`. It can be
issued again in clock `c+8`, so eight neurons fill the pipeline exactly.

## One time step (`step_controller`, `itp_stdp_engine`)

Neurons 0–3 form the input layer and neurons 4–7 the output layer. A step
is started with `step_start` and runs strictly in this order:

| clocks after `step_start` | what happens |
|---------------------------|--------------|
| 1–8   | neurons 0..7 issued; 0–3 get `ext_current` (latched at start), 4–7 get last step's accumulated currents |
| 9–16  | spikes leave the neuron pipeline, one per clock, into the spike buffer (`neuron_spike_array`, gated by `enable`) |
| 17    | spike buffer complete |
| 18    | all 8 histories shift the step in (`spike_history`) |
| 19–21 | all 16 synapses update in parallel (`stdp_crossbar`) |
| 22    | accumulator starts: `I_post[j] = Σ_i spike_pre[i] · w[i][j]` with the *new* weights (`synaptic_accumulator`) |
| 23    | `step_done`; `spikes`, `weights`, `dws` and `post_current` hold the step's results |

The output layer therefore sees the input layer's spikes one step late,
weighted by the weights just learned from them.

## Top-level interface (`itp_stdp_engine`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `step_start` | in | 1 | run one time step (ignored while `busy`) |
| `ext_current` | in | 4 × 10 | signed input currents of neurons 0–3 |
| `cfg` | in | `stdp_cfg_t` | `learn_en`, `pairing`, `lr_shift[2:0]`, `comp_en` |
| `enable` | in | 8 | per-neuron spike enable; a disabled neuron records 0 |
| `w_load`, `w_load_idx`, `w_load_val` | in | 1, 4, 8 | write weight `pre*4+post` while idle |
| `busy`, `step_done` | out | 1 | step in progress; last clock of the step |
| `spikes` | out | 8 | spikes of the last step |
| `weights`, `dws` | out | 4×4×8 | signed weights and their last changes, `[pre][post]` |
| `post_current` | out | 4 × 10 | signed currents for the next step of neurons 4–7 |

Parameters of the top are `E_TAU`, `E_REST` and `V_TH`. The network sizes
live in `itp_pkg`. The synapse array also takes a `CONN_MASK`, which selects
which (pre, post) pairs get a synapse; the default is fully connected.

## How closely this follows the paper

These parts follow the paper's description:

* the base-2 rule and the trigger-bit LTP/LTD decision;
* the history read as a weight change, with the MSB mask for nearest
  neighbour;
* the 7-bit history and the 8-bit signed weights and changes;
* the shift-based scaling stage and one weight adder;
* the two-stage synapse and the eight-stage time-multiplexed LIF unit;
* the LLSMu/LLMu structure with MSB alignment, C and C/2;
* the order neuron → history → STDP → accumulation;
* the 4 × 4 fully connected prototype.

These are choices of this design, because the paper does not give them:

* The fixed-point formats of `E_TAU` and `V`, and the default `τ`, rest
  and threshold values.
* Clamping of `V`, saturation of the weights, and the handling of zero
  and negative operands in the multiplier.
* The learning-rate and compensation shift amounts. The paper says only
  that shifts implement them.
* The input-layer current ports, the step handshake, the load port and
  the per-neuron enable semantics.
* How the eight pipeline stages are divided between the units.

Where the paper is inconsistent, this design makes the following choices:

* In the formula for the carry case of Mitchell's product, the printed
  exponent is `kx+ky`. The block diagram has an integer-part incrementer,
  so the exponent here is `kx+ky+1`. Without that increment, the product
  would be off by a factor of 2.
* The implementation table lists a 16-stage pipeline for the engine,
  while the text says 10 stages (8 neuron + 2 STDP). This design follows
  the text.
* The implementation table's latencies are ten clock periods on both
  platforms (25.08 ns at 398.72 MHz, 4.10 ns at 2.44 GHz). This matches
  8 neuron stages plus 2 synapse stages. The text quotes 20.06 ns and
  3.28 ns, which are eight periods. Here the neuron takes 8 clocks and the
  synapse 2, and both are checked. A whole time step takes 23 clocks,
  because the step also issues the neurons one by one and waits for all
  eight spikes before the histories shift.
* The block diagram draws eight STDP units and eight weights; the text
  and the table give 16 synapses. There is one synapse unit per synapse,
  16 in all.

Not built: convolutional layers, Izhikevich neurons, and the larger
networks that the paper trains in software. The rate-coding spike encoder
used for those experiments was not built either.

## Files

`rtl/`: one module per file.

| file | content |
|------|---------|
| `itp_pkg.sv` | sizes, `pairing_e`, `stdp_cfg_t` |
| `llmu.sv` | Mitchell multiplier with compensation |
| `llsmu.sv` | aligned Karatsuba multiplier from three `llmu` |
| `lif_neuron_unit.sv` | eight-stage time-multiplexed LIF neuron |
| `neuron_spike_array.sv` | spike buffer for sequential spikes |
| `spike_history.sv` | history shift registers |
| `weight_read.sv` | all-to-all read / MSB mask |
| `itp_stdp_synapse.sv` | trigger logic, scaling, weight register |
| `stdp_crossbar.sv` | synapse array and weights |
| `synaptic_accumulator.sv` | gated adder trees |
| `step_controller.sv` | time-step sequencer |
| `itp_stdp_engine.sv` | top |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`). It also
holds `tb_ref_pkg.sv`, the stimulus model `rate_encoder.sv`, and the two
testbenches `tb_stdp_window` and `tb_rate_encoder` described below. The package holds the reference models, written from the
arithmetic definitions with real numbers rather than copied from the RTL.
`tb_itp_stdp_engine` runs the whole engine at its default sizes for 640
time steps. In the first 480 the input currents are random. In the last 160
they come from the rate coder described below: current 200 in a step where
the input's channel spikes, 0 otherwise. After every step it compares spikes, all weights and changes,
and the currents with a full behavioural model. It also checks the
23-clock step length. It fails if any of these never occurs: LTP, LTD,
both-fired, none-fired, either pairing, compensation, frozen learning,
saturation, enable gating, weight loading, output-layer spikes.

`tb_stdp_window` measures the learning window on the whole engine. It uses
the enables to put exactly one pre spike (neuron 0) and one post spike
(neuron 4) dt steps apart, for dt = 0..8, in both orders. It then reads the
change of w[0][0]:

| dt | -8 | -7 | -6 | -5 | -4 | -3 | -2 | -1 | 0 | +1 | +2 | +3 | +4 | +5 | +6 | +7 | +8 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| Δw (1/64) | 0 | 0 | -1 | -2 | -4 | -8 | -16 | -32 | 0 | 32 | 16 | 8 | 4 | 2 | 1 | 0 | 0 |

In this table, +dt means the post spike came after the pre spike (LTP). The
window halves with every step of distance, and it ends after the 7-step
history. The same run is repeated with all-to-all pairing, which gives the
same result for one pair, with the ln 2 compensation, and with a
learning-rate shift of 1. Without scaling, the table is also compared with
exponential pair STDP, `e^(−dt/τ)` with τ = 1/ln 2 ≈ 1.44 steps, and it
matches at every integer dt. The base-2 rule changes only the time scale;
the shape of the window is the same.

`tb/rate_encoder.sv` is a stimulus model, not part of the engine. It rate
codes inputs in the usual way: in each step, each channel draws a uniform
random number r and spikes if r < x, where x in [0, 1) is the normalised
intensity. `tb_rate_encoder` checks the spike rates, and that consecutive
draws are uncorrelated. It also checks the inter-spike intervals (ISI): for
spike probability p they follow the geometric law, with mean 1/p. The share
of ISIs that fit in the 7-step history is 1 − (1−p)^7, which is over 99 %
for p ≥ 1/2. That share is what sets the history depth: a spike pair further
apart than the depth is not seen by the learning rule, as the window above
shows.

## Simulating

Run from the repository root with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/itp_pkg.sv tb/tb_ref_pkg.sv tb/tb_itp_stdp_engine.sv \
        --top-module tb_itp_stdp_engine -Mdir build
    ./build/Vtb_itp_stdp_engine

Replace `tb_itp_stdp_engine` with any other testbench name. Each
testbench ends with `TB_RESULT checks=N failures=M`, and has a watchdog
that fails it if it hangs. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/itp_pkg.sv rtl/<module>.sv`.

## Changing it

* **History depth / window**: `HIST_DEPTH` in `itp_pkg`. The change is then
  `HIST_DEPTH+1` bits wide, so keep `W_WIDTH ≥ HIST_DEPTH+1`. The
  testbenches also cover depth 5, in the synapse and in the weight read,
  and depth 10, in the weight read.
* **Network size**: `N_PRE`, `N_POST` in `itp_pkg`. The step grows by one
  clock per neuron. The neuron unit's state memory and index width follow
  `N_NEURON`. With more than 8 neurons, the same neuron is issued again
  only after the pipeline has written it, which the sequential step already
  guarantees.
* **Neuron dynamics**: `E_TAU`, `E_REST`, `V_TH` on the top.
* **Sparse connectivity**: `CONN_MASK` on `stdp_crossbar`.
