# A pruned, quantized echo-state reservoir in direct logic

An echo-state network (a form of reservoir computing) keeps a vector of `N` neuron states. The
network updates that vector once per input sample:

    s(t) = f( W_in u(t) + W_r s(t-1) )        reservoir update
    y(t) = W_out s(t)                         linear readout

`W_in` and the sparse recurrent matrix `W_r` are random and fixed. Only `W_out` is trained. Once a
model has been trained, quantized to `q` bits and pruned, every weight is known. This design
therefore stores no weights. Each weight becomes a constant inside a shift-and-add network, and
the whole network, all neurons at once, turns into one block of combinational logic. The only
register is the state vector. The accelerator takes one sample per clock and produces its result
one clock later, and it uses no memory at all.

Pruning is what makes this style pay off. The model-compression step ranks the `W_r` connections
by how much the model's output suffers when bits of the connection's quantized weight are flipped,
and it removes the least sensitive `p %`. In direct logic a removed connection costs nothing: its
multiplier and its adder input are never built. The RTL here is parameterized in the
quantization width `Q` and the pruning rate `PRUNE_PCT`, and it rebuilds the network for any
point of that design space.

The default configuration is `N = 50` neurons, 250 recurrent connections (5 per neuron),
`Q = 4` bits, `PRUNE_PCT = 15` (37 connections removed), one input and one readout output.
This matches the single-input classification and regression benchmarks the method was
evaluated on.

## Structure

```
rc_accel_top
├── reservoir_layer            N neurons in parallel + N x Q-bit state register
│   └── reservoir_neuron  x N
│       ├── const_mult    x (NU + kept connections)   W * x by shifts and adds
│       ├── sum_unit                                   pre-activation sum
│       └── multi_threshold                            HardTanh as 2^Q-1 thresholds
└── readout_layer              NY outputs
    ├── const_mult        x N per output
    └── sum_unit          per output
rc_pkg                         model constants and elaboration-time functions
```

All modules except `rc_accel_top` and `reservoir_layer` are purely combinational.

## One neuron: constant products, one sum, a threshold bank

**Products (`const_mult`).** A product `W * x` with constant `W` is built from the
canonical-signed-digit form of `W`. In that form each digit is -1, 0 or +1, and no two non-zero
digits are adjacent. The operand is shifted to each non-zero digit's position and then added or
subtracted. A 4-bit weight needs at most two add/subtract operations, and an 8-bit weight at most
four. A zero weight produces no logic. The product width is `2Q+1` bits.

**Sum (`sum_unit`).** This block adds the `NU` input products and the surviving recurrent
products into an `acc_w(Q) = 2Q+8`-bit pre-activation. The synthesis tool decides the adder shape.

**Activation (`multi_threshold`).** The activation is a quantized HardTanh. The quantizer's scale
and offset are folded ("streamlined") into integer thresholds. With `2^Q - 1` thresholds `T_j`,
the output level is

    y = -2^(Q-1) + #{ j : acc >= T_j }

Every comparison runs in parallel, and the result is a population count of a thermometer code.
A trained model supplies the thresholds. This RTL spaces them evenly:

    T_j = (j - 2^(Q-1)) * STEP - floor(STEP/2),   STEP = 2^(Q-1)

That makes `y` equal to `acc / STEP`, rounded half-up and clamped to the signed `Q`-bit range.
This is exactly the HardTanh shape. `STEP` stands for the folded scale.

**Leaking rate.** All the target models use a leaking rate of 1. The new state therefore simply
replaces the old one, and there is no interpolation between `s(t-1)` and `f(...)`.

## Pruning in hardware

Connection `c = i*5 + k` is the `k`-th incoming connection of neuron `i`. It has a source neuron,
a weight and a sensitivity score. `rc_pkg::is_pruned()` ranks the connection among all 250 by
ascending score, with ties broken by index. It removes the connection if its rank is below
`floor(250 * PRUNE_PCT / 100)`. `reservoir_neuron` evaluates this test for each connection at
elaboration and builds a `const_mult` only for the connections that survive. Only `W_r` is
pruned. `W_in` and `W_out` stay dense.

The real scores come from an offline analysis, which cannot be done in hardware. For every
quantized recurrent weight and every bit `b` of it, the analysis flips the bit and re-measures
accuracy (or RMSE) on the dataset. The score is the mean absolute change over the `q` bits. The
result of that analysis is simply the set of connections to remove, and that set is all the
hardware needs.

## The model constants are placeholders

The trained weights, thresholds and sensitivity scores of the published models are not
available. `rc_pkg` therefore derives them from a fixed 32-bit hash of their indices:

| constant | function | value |
|---|---|---|
| `W_in[i][j]` | `w_in(i,j,q)` | uniform in `[-(2^(q-1)-1), 2^(q-1)-1]` |
| source of connection `k` of neuron `i` | `r_src(i,k,n)` | `(hash(i) + 7k) mod N`, distinct for the 5 connections |
| `W_r` of that connection | `w_r(i,k,q)` | as `W_in`, with 0 replaced by 1 |
| `W_out[o][i]` | `w_out(o,i,q)` | as `W_in` |
| sensitivity score of connection `c` | `sens_score(c,q)` | 16-bit hash |

The hardware structure does not depend on these values. To build the accelerator for a trained
model, replace the bodies of these five functions with look-ups into the model's tables, and
replace the threshold formula in `multi_threshold` if the trained thresholds are not evenly
spaced. Nothing else changes. The placeholders are not scaled to any spectral radius. In a trained,
streamlined model that scale sits inside the integer weights and thresholds. A consequence is that simulation shows the arithmetic is correct,
not that the network classifies anything.

## Interface and timing (`rc_accel_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active-low reset; clears state and `out_valid` |
| `in_valid` | in | 1 | `u` holds a sample this cycle |
| `seq_start` | in | 1 | with `in_valid`: first sample of a sequence, reservoir starts from zero state |
| `u[NU]` | in | `Q` signed each | input sample, already quantized |
| `out_valid` | out | 1 | `y` is the result for the sample presented one clock earlier |
| `y[NY]` | out | `YW = 2Q+clog2(N+1)+1` signed each | readout, full precision |
| `state[N]` | out | `Q` signed each | reservoir state `s(t)` |

```
clk        _/‾\_/‾\_/‾\_/‾\_/‾\_
in_valid   _/‾‾‾‾‾‾‾\___/‾‾‾\___
u          -< u0 >< u1 >---< u2 >--
state/y    ------< s0 >< s1 >----< s2 >
out_valid  ______/‾‾‾‾‾‾‾\___/‾‾‾\_
```

A sample presented with `in_valid` at one rising edge is reflected in `state`, `y` and
`out_valid` right after that edge. Samples may come on every clock. A cycle without `in_valid`
holds the state and drops `out_valid`. The readout is combinational from the state register, so
the register-to-output path runs through the whole readout. Add a register on `y` if the
surrounding system needs one; it costs one cycle of latency.

`seq_start` belongs to this design, not to the published description. Sequence classification
needs each sequence to start from rest, and `seq_start` provides that without an extra idle cycle
for a reset.

## How it compares with the published implementation

- **Registers.** The design has exactly `N*Q` state flip-flops plus one for `out_valid`. For the
  Henon-map regression model, the published FPGA results report 196, 300 and 400 flip-flops at
  4, 6 and 8 bits with no pruning. That is close to `50*Q`, which suggests the same organization.
  The 4-bit pedestrian-count model is reported with 558, so that build must hold registers that
  are not described.
- **Pruning and registers.** The published flip-flop counts shrink at high pruning rates. A
  likely cause is that synthesis removes state bits that nothing reads any more. Here the readout
  is dense, so every state bit is read and stays. With trained weights, a zero readout weight
  would allow the same removal.
- **Latency equal to one clock period.** The published latency is the inverse of the published
  throughput. That is consistent with a single register stage, as built here.
- **Not built.** The model training, the quantization and the sensitivity analysis are offline
  software. So is any class decision after the readout, such as arg-max or a threshold, which
  was not described.

## Parameters

| parameter | default | notes |
|---|---|---|
| `N` | 50 | reservoir neurons |
| `NCRL` | 250 | recurrent connections before pruning; each neuron gets `NCRL/N` |
| `Q` | 4 | bits of weights, states and inputs (4, 6 and 8 evaluated) |
| `PRUNE_PCT` | 15 | percent of recurrent connections removed (0 to 90 evaluated) |
| `NU` | 1 | input channels (2 for the pen-digit task) |
| `NY` | 1 | readout outputs (10 for the pen-digit task) |

`NCRL/N` should be a whole number, since any remainder of connections is dropped. The fan-in
`F = NCRL/N` sources `hash(i) + 7k` are distinct mod `N` unless `N` divides `7d` for some
`1 <= d < F`. For `F = 5` this rules out `N` in {1..7, 14, 21, 28}.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block against
`rc_ref_pkg`, an integer reference model written independently of the datapath. The reference
uses plain multiplication, computes the activation by floor division and clamping, and finds the
pruned set by sorting all scores.

| testbench | what it covers |
|---|---|
| `tb_const_mult` | every operand against all 4-bit weights and eight 8-bit weights, including +-127 |
| `tb_sum_unit` | random terms and all-max / all-min terms |
| `tb_multi_threshold` | every pre-activation in [-400, 400] at 4 bits; a sweep at 8 bits; both saturation limits |
| `tb_reservoir_neuron` | all 50 neurons at (4 bit, 15 %) and at (8 bit, 90 %); pruned set against a sort |
| `tb_reservoir_layer` | 600 clocks of random samples, idle cycles, restarts, reset |
| `tb_readout_layer` | 3-output 4-bit and 1-output 8-bit readouts, random and extreme states |
| `tb_rc_accel_top` | default build end to end: 20 sequences of 24 samples, state, `y`, one-cycle `out_valid` |
| `tb_rc_workloads` | 25 builds: Q in {4,6,8} x p in {0,15,30,45,60,75,90} %, the 2-input/10-output shape, one 5000-sample sequence |

The end-to-end scoreboard (`rc_top_driver`) checks the state, the readout and `out_valid` after
every clock. It also counts idle cycles, back-to-back samples, sequence restarts, states at each
saturation limit and pruned connections. If any of these never happens, it reports a failure.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/rc_pkg.sv tb/rc_ref_pkg.sv tb/tb_rc_accel_top.sv --top-module tb_rc_accel_top
./obj_dir/Vtb_rc_accel_top
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` at the end. `tb_rc_workloads`
elaborates 25 networks, two of them at 8 bits with 255 comparators per neuron, and takes a few
minutes to build.
