# A shift-based neural-network force engine for molecular dynamics

Molecular dynamics (MD) follows atoms through time: compute the force on
every atom, update velocities and positions, repeat. Machine-learning MD
obtains the forces from a small neural network trained on quantum-mechanical
reference data, which is far cheaper than solving the electronic structure
and, in practice, about as accurate. The network evaluation is the
expensive part of each step, so this design moves it into dedicated
hardware and arranges that hardware so that nothing has to be fetched
during a step:

* the network is a multilayer perceptron (MLP) whose weights are sums of
  three signed powers of two, so every multiply becomes three shifts and an
  add;
* its activation function is a short polynomial that needs one multiplier
  instead of a tanh evaluator;
* every weight and bias sits in flip-flops next to the neuron that uses it,
  and each layer feeds the next register to register ("near-memory" or
  non-von Neumann operation), so the network is one pipeline that accepts a
  new input every clock;
* a small sequencer runs the MD loop around two copies of this network.

The RTL describes the system published as *A Heterogeneous Parallel
Non-von Neumann Architecture System for Accurate and Efficient Machine
Learning Molecular Dynamics* (Zhao et al.), built there from one FPGA and two
MLP chips in a 180 nm process and demonstrated on a single water molecule.
The two force chips (`mlp_chip`) correspond to the ASICs; the sequencer,
oxygen-force and integration logic correspond to the FPGA side. Everything
here is written fresh from the published description; where that description
stops, the choices are this design's own and are listed below.

## The water-molecule system

```
             feature extraction (outside this RTL)
           fe_req, pos  |            ^  fe_valid, feat_h1, feat_h2
                        v            |
 host ---> +---------------------------------------------------+
 cfg_*     | md_controller --mlp_issue--> mlp_chip (H1) --+    |
 st_*      |      |                  \--> mlp_chip (H2) --+    |
 start     |      |                                       v    |
           |      +--integ_step--> md_integrator <-- forces     |
           |                         ^      newton3_oxygen      |
           +---------------------------------------------------+
```

Atom 0 is the oxygen, atoms 1 and 2 the hydrogens. One MD step:

1. `md_controller` raises `fe_req`; the current positions are on `pos`.
   Feature extraction answers with three features per hydrogen and
   `fe_valid`, in the same cycle or later.
2. In the cycle both are high, the two feature vectors enter the two chips
   together. Each chip predicts the force on its hydrogen.
3. Each chip answers 9 cycles later; the forces are captured. The force on
   the oxygen is not predicted: an isolated molecule's forces sum to zero, so
   `newton3_oxygen` forms F_O = -(F_H1 + F_H2).
4. `md_integrator` updates all velocities and positions in one clock.

With features returned at once a step takes 11 clocks: the issue cycle, nine
cycles of chip latency and the integration cycle. At the 25 MHz clock the
published system ran at, that is 0.44 us per step for three atoms.

The network has three inputs and two outputs, and the design treats the two
outputs as the in-plane force components of the molecule: a three-atom
molecule with no net force stays in its own plane, so positions and
velocities have two coordinates (`DIM = 2`). The original description writes
forces with three Cartesian components in its general discussion but gives
the chip two outputs without saying how they map to Cartesian axes; the
in-plane reading is this design's.

## Numbers

Every value that crosses a block boundary - features, activations, biases,
forces, positions, velocities and the integration gains - is a signed
13-bit fixed-point number, Q2.10: one sign bit, two integer bits, ten
fractional bits, so the range is [-4, 4) in steps of 1/1024
(`mlmd_pkg::fx_t`). Inside a neuron, products and sums are carried in
32 bits (`acc_t`, still ten fractional bits), so a neuron sum never wraps;
the activation then limits it. Results that leave the integrator and the
oxygen-force unit are saturated to the Q2.10 range. Every right shift is
arithmetic, so rounding is toward minus infinity throughout.

## Weights as shifts

A trained real weight w is replaced by

    w_q = s * (2^n1 + 2^n2 + 2^n3),      s in {-1, 0, +1}

found greedily: take the power of two Q(r) = 2^ceil(log2(r/1.5)) nearest
the remaining magnitude r, subtract it, repeat three times (the remainder is
clamped at zero, so later terms can vanish). For example w = 0.9 gives
Q(0.9) = 2^0 (since 0.9/1.5 = 0.6 and ceil(log2 0.6) = 0); the remainder is
0, so w_q = 1 and the other two terms vanish. w = -0.3 gives 2^-2,
remainder 0.05, then 2^-4 (0.05/1.5 = 0.033, ceil(log2) = -4), remainder
clamped to 0: w_q = -(0.25 + 0.0625) = -0.3125.

The chip stores not w but the 17-bit word `{s, n3, n2, n1}`
(`shift_param_t`):

| field | bits | encoding |
|---|---|---|
| s | 16:15 | `01` = +1, `11` = -1, `00` = 0 |
| n3, n2, n1 | 14:10, 9:5, 4:0 | two's complement, -15..15; n > 0 shifts left, n < 0 shifts right; -16 means "no term" |

The product with an input a is then a(2^n1) + a(2^n2) + a(2^n3), negated or
zeroed by s - three barrel shifts, one three-input adder and a sign
selector, which is exactly `shift_unit`. Positive exponents are needed for
weights of magnitude 1.5 and above; the published drawing of the unit shows
only right shifts while its shift function allows both, and this design
allows both.

The quantiser is part of training, not of the hardware; `tb/tb_ref_pkg.sv`
contains a version of it (`quantise`) that the testbenches use to produce
realistic weights.

## The activation

    phi(x) =  1                 x >= 2
              x - x|x|/4        -2 < x < 2
             -1                 x <= -2

It is close to tanh over the whole range, and the middle formula meets +-1
exactly at x = +-2. `act_unit` therefore first limits x to [-2, 2] and then
always evaluates the middle formula: a clamp, an absolute value, one
13 x 13 multiplier, a fixed right shift by 12 (divide by 4 and drop the
ten extra fractional bits) and a subtracter. The activation is applied in
every layer, the output layer included, so the chip's forces lie in
[-1, 1]; their physical scale is absorbed into the integration gain dt/m.

## Inside one layer

`mlp_layer` computes a_j = phi(sum_k w_jk a_k + b_j) for all its neurons at
once:

```
 a[0..N_IN-1] ---> matrix_unit j: SU_j1..SU_jk -> [g] -> sum + b_j -> [h] -> act_unit -> [x_j]
                   (one per neuron)                                          (per neuron)
 layer_param_mem --- w[j][k], b[j] (all in parallel) ---^
```

* `shift_unit` (SU) - one weight times one input, combinational.
* `matrix_unit` (MU) - one neuron row: N_IN shift units, a register for
  their products, an adder with the bias and a register for the sum.
* `act_unit` (AU) - phi, combinational.
* `layer_param_mem` - the layer's weights and biases in flip-flops, all
  visible at once. Word j*(N_IN+1)+k holds the weight from input k to
  neuron j; word j*(N_IN+1)+N_IN holds neuron j's bias in bits 12:0.
  Written only at initialisation.

Timing: three register stages - products (g), neuron sums (h), activations
(x). A vector entering with `in_valid` in cycle t leaves with `out_valid` in
cycle t+3, and a new vector may enter every cycle. Registers load only when
their stage holds valid data; only the valid bits are reset.

## The force chip

`mlp_chip` chains layers: layer 0 (3 -> 3), layer 1 (3 -> 3) and the output
layer 2 (3 -> 2) by default, i.e. 3 features, two hidden layers of three
neurons, 2 force components. Its latency is 3 x (hidden layers + 1) = 9
cycles and it accepts one feature vector per clock, so the two vectors of an
MD step would occupy only one of those cycles; the pipeline's capacity is
what would let a bigger molecule's atoms stream through one chip.

Parameters are written through `cfg_we`, `cfg_layer` (layer number),
`cfg_addr` (word in the layer, as above) and `cfg_wdata` (17 bits). A chip
holds 32 words for the default network (12 + 12 + 8).

## The MD loop

`md_controller` is a four-state machine (idle, wait for features, wait for
both chips, integrate, plus done). It notes each chip's answer separately,
so chips answering in different cycles are handled, and it ends after
`n_steps` steps with `done` high until the next `start`; `n_steps = 0`
finishes at once. Two assertions state its rules: a chip may only answer
while it is waited for, and features are issued once per step.

`md_integrator` holds r and v for every atom and, on `step`, computes

    v <- v + F * (dt/m_i)
    r <- r + v * dt          (with the new v)

for every component in parallel, each a Q2.10 x Q2.10 multiply, shift by
ten and saturating add. The gains dt/m_i (one per atom) and dt are
registers the host writes (`st_sel = ST_KV`, `ST_DT`), as are the initial
positions and velocities (`ST_POS`, `ST_VEL`); writes are ignored while a run
is in progress. Choosing the gains chooses the simulation's units, since
13-bit Q2.10 cannot hold femtoseconds and atomic masses directly.

## Top-level ports (`mlmd_system`)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_chip_mask`, `cfg_layer`, `cfg_addr`, `cfg_wdata` | in | 1, 2, 3, 8, 17 | write a network word into the chips whose mask bit is set |
| `st_we`, `st_sel`, `st_atom`, `st_dim`, `st_wdata` | in | 1, 2, 2, 2, 13 | write position, velocity, dt/m_i or dt |
| `start`, `n_steps` | in | 1, 16 | run `n_steps` MD steps |
| `busy`, `done`, `step_count` | out | 1, 1, 16 | run status |
| `fe_req`, `pos` | out | 1, 3x2x13 | feature request and current positions |
| `fe_valid`, `feat_h1`, `feat_h2` | in | 1, 3x13 each | features of the two hydrogens |
| `vel`, `forces` | out | 3x2x13 each | velocities; forces of the last step (O, H1, H2) |

Each row's default sizes follow from the parameters `N_FEAT = 3`,
`N_HID = 3`, `N_HID_LAYERS = 2`, `DIM = 2`, `STEP_W = 16`.

## What is not in this RTL

* **Feature extraction.** The features are only described as invariant to
  translation, rotation and permutation, three per hydrogen; their formula
  is not given, so it is left outside behind the `fe_req`/`fe_valid` port.
  The system testbench answers with stand-in features (hydrogen-oxygen
  displacement and the x distance to the other hydrogen), which exercise the
  loop but are not physically meaningful.
* **The host processor**, which loads weights and starting state and starts
  runs; it appears only as the `cfg_*`, `st_*` and run-control ports.
* **Physical parts**: pads, package, boards and the cabling between the
  FPGA and the chips, and the chip's measured area and power. The chip
  boundary here is a set of plain parallel buses.
* **Other molecules.** The network and the three-atom loop are sized for
  water. Ethanol, toluene, naphthalene, aspirin and bulk silicon, for which
  the same kind of network was also trained, need more atoms (9 to 21 for
  the molecules) and larger networks whose sizes are not given; they do not
  fit this configuration, and the original work also states that its chip
  would have to be redesigned for them.

## Choices made in this design

Taken from the published description: the 3-3-3-2 network, K = 3 power-of-two
terms and the stored {s, n1, n2, n3}, the shift unit's three shifters, adder and
sign selector, the activation formula and its parts list, one MU/AU pair per
neuron in every layer, parameters local to each layer and written once, the
pipelined register-to-register flow, 13-bit Q2.10 arithmetic, two chips in
parallel, the oxygen force from Newton's third law, the two update equations
and the repeated loop.

This design's own: the 5-bit exponent field and its "no term" code; left
shifts for positive exponents; the 32-bit neuron accumulator; the placement
of the three pipeline registers per layer (and thus the 9-cycle chip latency
and 11-cycle MD step); floor rounding; saturation in the integrator and
oxygen-force unit; the configuration and state address maps; the
request/valid handshake and the start/done protocol; the atom numbering;
in-plane coordinates; flip-flop storage for parameters; reset values.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
reference arithmetic written separately (`tb/tb_ref_pkg.sv`: 64-bit integer
multiplies and floor divisions instead of shifts, the quantiser, and a
class `RefMlp` that evaluates a whole network) and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_shift_unit` | corner cases and 4000 random inputs and weight words |
| `tb_act_unit` | every input in [-4, 4) plus extreme accumulator values; distance from tanh below 0.05 everywhere |
| `tb_matrix_unit` | 3000 random vectors with gaps, 2-cycle latency |
| `tb_layer_param_mem` | reset, address map, out-of-range writes |
| `tb_mlp_layer` | one layer, 2000 vectors, 3-cycle latency, both activation regions |
| `tb_mlp_chip` | full 3-3-3-2 chip, quantised random weights, back-to-back throughput, 9-cycle latency, reload |
| `tb_newton3_oxygen` | sums and saturation |
| `tb_md_integrator` | 500 steps of random forces against the update equations |
| `tb_md_controller` | step count, feature stalls, unequal chip latencies, 11 cycles per step, zero-step run |
| `tb_mlmd_system` | the whole system at its default size for 270 steps: every position, velocity and force after every step, step time, and a count of each mechanism (feature stalls, immediate answers, both activation regions, left-shift weights, per-chip loading, zero-step run, host writes ignored during a run) |

To run one with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mlmd_pkg.sv tb/tb_ref_pkg.sv tb/tb_mlmd_system.sv \
    --top-module tb_mlmd_system -o sim && ./obj_dir/sim
```

Replace `tb_mlmd_system` with any testbench name. All testbenches finish in
seconds. The RTL is synthesizable as written; the whole system is about
2,600 word-level cells and 3,600 flip-flop bits after generic synthesis,
most of the flip-flops being the two chips' parameter memories and
pipeline registers.

The design's trust boundary is its reference model: the testbenches prove
the RTL computes the shift-sum network, activation and update equations
exactly as specified above, bit for bit; they do not show that trained
weights give accurate forces, which depends on the training flow outside
this RTL.
