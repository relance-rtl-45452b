# ReLANCE CNP: a pool of CORDIC-based Hodgkin–Huxley neurons

A Hodgkin–Huxley (HH) neuron is the most faithful of the common spiking-neuron
models, and also the most expensive one to put in hardware: every time step
needs six voltage-dependent rate functions (exponentials, three of them also
divided), fourth and third powers of gating variables, and three ionic
currents. This design computes all of it with small CORDIC cores, each
hardwired to one job (exponential, multiplication or division) instead of
one shared, mode-switching CORDIC, and hides the slow part of the step, the
divisions, behind work that does not depend on them. Sixty-four such neurons
form a Cortical Neural Pool (CNP) that advances in lock-step, one time step
per start pulse, and counts spikes for a "most spikes wins" readout.

The RTL follows the ReLANCE paper (Kumar et al., "ReLANCE: A
Resource-Efficient Low-Latency Cortical Neural Acceleration Engine") where
the paper is specific: the equations, the parameter sets, the CORDIC iteration
counts, the latency grouping and overlap of the rate functions, the
per-neuron state machine, the singularity handling and the 64-neuron pool.
Everything the paper leaves open (number format, time step, pipelining,
handshakes, scaling of operands) is a choice made here; those choices are
listed in "Where this RTL departs from, or adds to, the paper" below.

## 1. The model being computed

Each neuron integrates, with forward Euler and step dt,

    C dV/dt = I_ext − g_Na m³h (V − V_Na) − g_K n⁴ (V − V_K) − g_l (V − V_l)
    dx/dt   = α_x(V)(1 − x) − β_x(V) x            for x ∈ {m, h, n}

with the classic rate functions (V in mV, rates in 1/ms):

| x | α_x(V)                               | β_x(V)                     |
|---|--------------------------------------|----------------------------|
| m | 0.1(V+40) / (1 − e^−(V+40)/10)       | 4 e^−(V+65)/18             |
| h | 0.07 e^−(V+65)/20                    | 1 / (1 + e^−(V+35)/10)     |
| n | 0.01(V+55) / (1 − e^−(V+55)/10)      | 0.125 e^−(V+65)/80         |

Default constants (the paper's "set 1"): C = 1 µF/cm², V_Na = 57.86 mV,
V_K = −75.76 mV, V_l = −53.86 mV, g_Na = 130, g_K = 37, g_l = 0.6 mS/cm².
The paper's second set (55, −110, −95 mV; 70, 8, 0.23 mS/cm²) is reached by
overriding the parameters of `rchh_neuron`. Both sets have C = 1, so the
voltage update needs no division.

Numbers are signed Q16.16 throughout (`relance_pkg::fx_t`): one format for
voltage, current, rates and gates keeps the datapath uniform. The time step is
dt = 2⁻⁷ ms ≈ 7.8 µs, applied as an arithmetic right shift.

Rates split naturally into two groups, and the whole architecture is built
around that split:

* **low latency** (one exponential): β_m, α_h, β_n;
* **high latency** (exponential, then a division): α_m, β_h, α_n.

Constant factors are folded into the exponent (4e^a = e^(a+ln 4), and likewise
for 0.07 and 0.125), so every exponential argument is an affine function
A·V + B computed by one constant multiply and add. α_m and α_n are both of the
form K·u/(1 − e^−u) with u = (V+40)/10 and u = (V+55)/10.

## 2. The three CORDIC cores

All three are fully pipelined, one CORDIC iteration per register stage, take
one operation per cycle, and carry a 4-bit tag alongside the operands so the
result can be routed to whatever the lane was used for.

| core          | mode                         | iterations | latency | operand range                |
|---------------|------------------------------|-----------:|--------:|------------------------------|
| `cordic_exp`  | hyperbolic rotation + 2^k    | 8          | 10      | any x; saturates above e^10.4 |
| `cordic_mul`  | linear rotation              | 10         | 10      | x any, \|z\| < 2             |
| `cordic_div`  | linear vectoring             | 11         | 11      | \|y/x\| < 2, x of either sign |

**Exponential.** Hyperbolic CORDIC only converges for arguments below about
1.1, far less than the ±10 the rate functions need. The core therefore works
in base 2: t = x·log₂e is split (in two's complement) into an integer part k
and a fraction f ∈ [0,1); e^(f·ln 2) ∈ [1,2) comes from eight rotations
(shift sequence 1,2,3,4,4,5,6,7, seeded with 1/K_h so no gain correction is
needed afterwards), and a barrel shifter applies 2^k, left for k ≥ 0 and right
for k < 0. Relative error is about 0.5 %.

**Multiplier.** Ten linear iterations resolve z only to 2⁻⁹. That is fine for
z ≈ 0.5 but useless for the sodium gating product m³h, which sits near 10⁻⁴ at
rest and is later multiplied by g_Na(V − V_Na) ≈ 60 and shifted up by 2⁸. So
the core normalises z first: a leading-zero count k shifts |z| into [½, 1), the
iterations run, and the product is shifted right by k. z = 0 returns exactly
0. Error is then about 2⁻⁸ of the product, not of x.

**Divider.** Vectoring mode drives the residual y to zero; choosing the
direction from the signs of both residual and divisor lets x be negative,
which happens in 1 − e^−u for u < 0. The quotient must stay within (−2, 2), so
α_m is computed as (u/8)/(1 − e^−u) and shifted back by 3.

Large conductances do not fit the multiplier's z range either; they are used
as g_Na/2⁸ and g_K/2⁶ (both exact on the 2⁻⁹ grid) and the current is shifted
back.

## 3. One time step: the state machine and the overlap

`rchh_ctrl` is the per-neuron controller. Its top level walks
IDLE → RATE_CALC → POWER_CALC → CURRENT_CALC → UPDATE_STATE → DONE → IDLE.
RATE_CALC has its own sub-machine (PRE_EXP → EXP_CALC → DIV_CALC →
FINAL_MUL → UPDATE → COMPLETE) and POWER_CALC another (SQ_CALC →
POWER_FOUR_CALC → COMPLETE). A sub-machine runs while its top-level stage is
active, reports completion by sitting in COMPLETE, and drops back to IDLE when
the top level moves on. Every transition waits on a done flag returned by the
datapath, so the controller does not depend on any core latency.

The datapath of `rchh_neuron` has six exponential lanes, three divider lanes
and six multiplier lanes. The schedule of one step, in cycles after the clock
edge that samples `start_sim` (from a simulation trace):

| cycle | what happens                                                                       |
|------:|------------------------------------------------------------------------------------|
| 1     | PRE_EXP: six exponent arguments, the α_m/α_n numerators and singularity flags latched |
| 2     | EXP_CALC: all six exponentials launched together                                    |
| 12    | exponentials return; the three divisions launch; **at the same edge** the low-latency rates go into multiplier lanes 1, 2, 5 for β_m·m, α_h(1−h), β_n·n, and lanes 0, 3, 4, which would otherwise wait for the dividers, are **re-tasked** with g_Na(V−V_Na), g_K(V−V_K), g_l(V−V_l) |
| 22    | all six of those products are back, while the dividers are still busy              |
| 23    | quotients return (special-case value substituted if flagged); α_m(1−m), β_h h, α_n(1−n) launch |
| 33    | last gate terms back; UPDATE adds dt·(α(1−x) − βx) to m, h, n                       |
| 37–62 | POWER_CALC: m², n², then m³ = m²·m and n⁴ = n²·n²                                   |
| 63–84 | CURRENT_CALC: m³h and I_K' = g_K(V−V_K)·n⁴ together, then I_Na' = g_Na(V−V_Na)·m³h |
| 86    | UPDATE_STATE: V += dt·(I_ext − I_Na − I_K − I_l); spike if V crossed 0 mV upwards  |
| 87    | DONE (one cycle); `done` high, new V, m, h, n, spike visible                         |

So a step takes 87 cycles. The two kinds of overlap are the point of the
design: half of the gate terms, and all three conductance × driving-force
products of the current equation, are computed in the shadow of the
divisions, which would otherwise leave six multiplier lanes idle. Gates are
updated before the powers are taken, so the currents use the new m, h, n with
the old V (the order the state machine prescribes).

## 4. The singular points of α_m and α_n

u/(1 − e^−u) is 0/0 at u = 0, i.e. at V = −40 mV for α_m and V = −55 mV for
α_n. `rate_special_case` compares |u| against ε = 2⁻¹⁰; inside that window the
divider's output is replaced by the limit expanded to first order,
K·(1 + u/2) (K = 1 for α_m, 0.1 for α_n), formed by a shift and an add. The
flag is computed in PRE_EXP and applied when the quotient comes out.

Outside the window the division is done normally, and here lies the model's
weakest spot: within roughly 1 mV of the two points, 1 − e^−u is small, the
exponential's 0.5 % error is not, and α_m or α_n can be off by up to ~10 %.
The effect on trajectories is small because the membrane passes through that
region quickly, but a user who needs accuracy there should raise the
exponential's iteration count (`EXP_ITERS`) or widen ε.

## 5. The pool

`relance_cnp` instantiates `N_NEURONS` (64) neurons. Each has its own current
input `i_ext[k]` and keeps its own state and controller; the pool only starts
them together and waits for all `done` flags (an assertion checks they stay
in lock-step). After each step it presents the spike vector, adds it to
saturating 16-bit per-neuron counters, counts steps, and drives `winner`, the
index of the neuron with the most spikes since `clear_counts` (lowest index on
ties). Protocol: pulse `start` while `busy` is low, hold `i_ext` until `done`;
`done` is high for one cycle 88 cycles after `start` is sampled.

Because state and control are per neuron, area grows linearly with
`N_NEURONS`, and there is no shared controller to become a bottleneck.

## 6. How far it can be trusted

Every block has a self-checking testbench in `tb/`; the arithmetic ones
compare against real-number models, not against bit-exact copies of the RTL.

* CORDIC cores: hundreds of random operands each, streamed one per cycle;
  products within |x|·2⁻⁹, quotients within 2⁻⁹, exponentials within 2 %;
  exact latencies and tag passing.
* `rchh_ctrl`: state sequences of all three machines, one launch pulse per
  state per step, exact step length for random done-flag delays, and stray
  done flags of other stages ignored.
* `rchh_neuron`: 2 700 steps. Each step is compared with a real-arithmetic HH
  step taken from the neuron's own previous state (gates within 0.004, V
  within 0.1 mV plus 5 % of the step's change); spike counts of the free
  running neuron match a free-running reference; the special-case path is
  forced at −40 and −55 mV and checked against the exact limit.
* Parameter set 2: the same step-by-step and spike-count comparison for one
  neuron with the second constant set, at 0, 10, 30 and 60 µA/cm² (the
  first two stay subthreshold, the others spike).
* `relance_cnp`: an 8-neuron pool for 4 000 steps and the full 64-neuron pool
  for 2 000 steps, with drive currents spread from 0 to 15.75 µA/cm²; every
  neuron's spike count agrees with a free-running reference within one spike,
  counters, step count, winner and clear are checked, and the test fails unless
  the overlap, the lane re-tasking, the special case and spiking all occurred.

Not verified: timing closure at any clock frequency, and any comparison with
the paper's published resource or speed figures.

## 7. Where this RTL departs from, or adds to, the paper

* **Word width.** The paper describes 16-bit neurons but no format. With a
  single 16-bit format the per-step change of a gating variable
  (dt·rate ≈ 10⁻³) is below one LSB, so this design uses Q16.16.
* **Three dividers, not six.** The paper deploys six cores of each kind; only
  three rate functions divide, so only three dividers exist.
* **Multiplier normalisation** and the pre-scaling of conductances and of
  α_m (section 2) are additions needed for usable precision with 10
  iterations.
* **Pipelining.** One CORDIC iteration per stage. The paper mentions pipeline
  depths of 3–6 stages without saying how iterations map onto them.
* **What is re-tasked.** The paper re-tasks freed low-latency resources and
  overlaps state-update work with the divisions; here the concrete re-tasking
  is the multiplier lanes computing g(V − E) during the divisions.
* **Assumed where the paper is silent:** dt = 2⁻⁷ ms, spike threshold 0 mV,
  reset to V = −65 mV with the matching steady-state gates, gates clamped to
  [0, 1], constant factors folded into exponents, the start/done handshakes,
  and the pool's counters and winner output.
* **One arrow of the state diagram.** In the paper's drawing the
  `stage1_done` arrow between SQ_CALC and POWER_FOUR_CALC points back to
  SQ_CALC; here SQ_CALC → POWER_FOUR_CALC on `stage1_done`.
* **Individual currents.** The pool drawing shows one external-current line
  shared by all neurons; each neuron gets its own input here, since in the
  paper's network the synaptic weights produce a current per neuron.

Not included, because the paper gives no hardware for them: the "g
Normalized" block drawn beside the pool (it receives all spikes and feeds
something back to every neuron; `spikes` is the natural connection point), the
synaptic stage that turns input spikes and STDP-trained weights into
`i_ext`, the host/AXI interface, and the software tiling that maps wider
layers onto the pool.

## 8. Workload fit

* The evaluated 64-neuron pool: fits (`N_NEURONS` = 64).
* Hidden layers of 256, 512 and 1024 neurons: do not fit in one pool at the
  default size, and the pool has no port to save and restore neuron state, so
  they cannot be time-multiplexed over it either; set `N_NEURONS` to the layer
  width (state is 4 × 32 bits and 18 small pipelines per neuron).
* The 784-pixel (28×28) up to 224×224 input layers feed the synaptic stage,
  which is outside this RTL.

## 9. Files, simulation and changing the design

`rtl/`:

* `relance_pkg.sv` – number format, CORDIC constants and iteration counts, FSM
  state and operation-tag enums.
* `cordic_exp.sv`, `cordic_mul.sv`, `cordic_div.sv` – the CORDIC cores.
* `rate_special_case.sv` – singularity detector and limit value.
* `rchh_ctrl.sv` – per-neuron state machine.
* `rchh_neuron.sv` – one neuron: lanes, schedule, updates.
* `relance_cnp.sv` – the pool (top level).

`tb/`: one `tb_<module>.sv` per module, `tb_relance_cnp_full.sv` for the
full-size pool, `tb_rchh_neuron_set2.sv` for the second parameter set, and
`hh_ref_pkg.sv`, the real-arithmetic HH reference (both constant sets) used
by the neuron and pool tests.

Run a testbench from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/relance_pkg.sv tb/hh_ref_pkg.sv tb/tb_relance_cnp.sv \
        --top-module tb_relance_cnp -o sim
    ./obj_dir/sim

Each testbench ends with a line `TB_RESULT checks=N failures=M`. The full 64-neuron
test takes about ten seconds of simulation; the others a second or less.

To change the design: HH constants, dt, threshold and initial state are
parameters of `rchh_neuron`; iteration counts, ε and the number format live in
`relance_pkg` (the CORDIC angle and gain constants there are for 16 fraction
bits and the 1,2,3,4,4,5,6,7 shift sequence and must be regenerated, from
atanh(2⁻ⁱ)·2¹⁶ and 1/∏√(1−2⁻²ⁱ), if either changes). The step latency then
changes; the testbenches' `STEP_CYCLES` must follow.
