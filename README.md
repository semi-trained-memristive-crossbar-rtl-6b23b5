# Semi-trained memristive crossbar: ELM output layer with in-situ training

An extreme learning machine (ELM) trains only its output layer: the hidden
layer projects each input onto random features, and the output layer learns
a linear map from those features to class scores. This design is that output
layer. The weights live in a memristor crossbar, and the crossbar is trained
in place by sign-only delta-rule updates.

A memristor can only hold a positive conductance, so a signed weight needs two
devices. Here only one of the two is trained. Each input `x_r` drives two
word-lines: `x_r` itself, which crosses a *trained* memristor `M+[r][c]` in
every column, and its analog negation `-x_r`, which crosses a *fixed*
memristor `M-[r][c]` that is never programmed. One inverting op-amp per
column sums both currents, so the weight of cell (r, c) is proportional to
`G+[r][c] - G-[r][c]`. Moving `G+` above or below the fixed `G-` gives
positive or negative weights. Only half the devices need a training circuit,
and one op-amp per column is enough.

The RTL covers the digital control of this layer completely: the global
sequencer, the row and column control units, and the error unit with its
shift register. It also gives behavioural models of the analog parts: the
crossbar, the H-bridge training circuit (called Ziksa) and the op-amp
neurons. With those models the whole layer can be simulated end to end. The
default size is the 4 x 4 layer that was laid out and measured: 4 inputs,
4 output neurons.

## Units and signal conventions

Analog quantities are carried between modules as signed integers in fixed
units (see `rtl/elm_pkg.sv`). Because the units multiply out exactly, the
models need no scaling factors:

| quantity        | type     | unit  | width |
|-----------------|----------|-------|-------|
| voltage (x, t*, t) | `volt_t` | mV | 12, signed |
| conductance     | `cond_t` | nS    | 16, unsigned |
| current         | `curr_t` | pA    | 32, signed |

Device values: LRS 100 kOhm (10 000 nS), HRS 250 kOhm (4 000 nS), tuning
current 4 uA, device current threshold 3.2 uA, inputs within +/-0.5 V, and a
feedback resistor `Rf` of 500 kOhm.

## The sign of a weight update (read this before changing anything)

The training rule is the sign-only delta rule:

    delta_beta[r][c] = alpha * S(x_r) * S(t*_c - t_c),   S(v) = +1 if v > 0, else -1

The error unit reports `err[c] = 1` when `t*_c > t_c`. The row control unit
only needs to know whether `S(x_r) * S(err)` is +1 or -1. That is one XOR:
`input_pos ^ err` is 0 for +1 and 1 for -1.

"Increment" means *raise the conductance* `G+` (lower the resistance). The
neuron is an inverting amplifier, `t* = -Rf * I`. For a positive input, a
higher `G+` therefore *lowers* `t*`. So the rule as written really is
gradient descent. If the output is too high (`err = 1`) and the input is
positive, the update increments `G+`, and that pulls `t*` down. Keep this
sign in mind before you swap a polarity anywhere. The end-to-end bench
checks that a small classification task is learned, so a sign error shows up
there.

Note that `S(0) = -1`: a row whose input is exactly 0 V counts as negative
and is still tuned.

## Operation and timing

`global_controller` runs a three-state machine:

| state     | En | Polar | TrEn | ColEn        | what happens |
|-----------|----|-------|------|--------------|--------------|
| Read      | 1  | 0     | 0    | none         | inputs applied, t* computed, errors captured when `sample_valid` |
| Train_C1  | 0  | 0     | 1    | column `cnt` | positive cycle: every row whose sign product is +1 steps its cell in column `cnt` up |
| Train_C2  | 0  | 1     | 1    | column `cnt` | negative cycle: every row whose sign product is -1 steps down; error register shifts; `cnt++` |

After Train_C2 the controller goes back to Train_C1 for the next column, or
to Read once `cnt` reaches K. A sample that is presented with `learn = 1`
therefore costs 1 Read cycle plus 2*K training cycles. For the 4 x 4 layer
that is 9 cycles, or 90 ns at 100 MHz. With `learn = 0` the controller stays
in Read and the layer only does inference, one sample per cycle.

Every cell of the trained column moves by exactly one step in each pass:
either up in C1 or down in C2. Weights thus walk around their optimum rather
than settle exactly on it, which is a property of sign-only updates.

Interface of `elm_output_layer`:

1. Wait for `ready` (the controller is in Read).
2. Drive the hidden-layer outputs `x[N]` (mV), the per-neuron targets
   `t_lbl[K]` (mV) and `learn`, and raise `sample_valid` for one cycle. `t_out`
   and `err` are valid combinationally in that cycle. The errors are latched
   at the clock edge.
3. If `learn = 1`, keep `x` unchanged until `ready` rises again, 2*K cycles
   later. The row controllers read the sign of `x` live during training.

Reset (`rst_n`, active low, synchronous) puts the controller in Read, clears
the error register and sets every `G+` equal to `G-`, which gives zero
weights.

## Local control units

The row unit drives the tri-state gate at the output of the row's half
bridge (`out_n = 0` lets training current through):

    out_n = ~TrEn | (input_pos ^ err ^ Polar)

A row conducts in C1 when its sign product is +1 and in C2 when it is -1.

The column unit drives the two transistors of the column's half bridge: T5
(p-type, on when `PT = 0`) sources current and T6 (n-type, on when `NT = 1`)
sinks it:

    PT = Polar | ~ColEn        NT = Polar & ColEn

A selected column therefore has T5 on in C1 and T6 on in C2. An unselected
column has both off. An assertion checks that T5 and T6 are never on
together.

## Analog parts and their models

Three files are behavioural models, not circuits. Each says so in its first
comment.

* `memristive_crossbar`: the N x K array of trained cells plus the fixed
  cells. While `en = 1` the column current is
  `I_c = sum_r x_r * (G+[r][c] - G-)`. While `en = 0` no read current flows.
  A clock cycle in which a cell carries more than the 3.2 uA threshold moves
  its `G+` by one fixed step (`G_STEP`, 400 nS), clipped at LRS and HRS. A
  read that would push more than the threshold through a device raises
  `read_overdrive`. The model does not change the state then, but in a real
  device that read would disturb it. Note that 0.5 V across an LRS device
  gives 5 uA, so inputs must stay below about 0.3 V (3 uA) when devices are
  near LRS. An assertion flags any input outside the +/-0.5 V range.
* `ziksa_hbridge`: for each cell, the row tri-state and the column
  transistors together decide whether a +4 uA current (increment), a -4 uA
  current (decrement) or none flows. The current mirrors of the real circuit
  are taken as ideal, so the current does not depend on the device
  resistance.
* `neuron_opamp`: `t* = -Rf * I` in mV, saturating at +/-600 mV. The
  saturation is the neuron's nonlinearity and also stands in for the supply
  limit of the op-amp.

The pass transistors on inputs and bit-lines and the analog input inverters
have no model of their own. Their effect is inside `memristive_crossbar`.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `N` | 4 | top, crossbar, Ziksa | rows = hidden neurons |
| `K` | 4 | top, controller, error unit | columns = output neurons / classes |
| `G_MAX`, `G_MIN` | 10000, 4000 nS | crossbar | LRS / HRS |
| `G_FIXED` | 7000 nS | crossbar | conductance of every fixed cell |
| `G_STEP` | 400 nS | crossbar | change per training cycle; learning rate alpha = `RF` x `G_STEP` = 0.2 |
| `RF`, `V_RAIL` | 500 kOhm, 600 mV | neuron | feedback resistor, output limit |
| `I_TUNE` | 4 uA | Ziksa | training current |

The evaluated benchmarks need larger layers: hidden-layer sizes of 65
(Diabetes), 40 (Australian Credit), 20 (Iris) and 180 (MNIST on HOG
features), with 2, 2, 3 and 10 classes. Set `N` and `K` on
`elm_output_layer` to build those. `tb/tb_elm_workloads.sv` runs all four
sizes.

## What is this design's own choice

The following are not fixed by the source description and were chosen here:

* the `G_STEP` size, the `G_FIXED` value and the zero-weight reset state;
* the +/-600 mV op-amp rail;
* the active-low polarity of the row tri-state control;
* the `sample_valid`/`learn` handshake, the one-cycle Read and staying in
  Read without `learn`;
* a digital signed comparator for the error unit;
* a shift register that loads in parallel and shifts towards bit 0;
* a one-hot `ColEn` bus.

The weight step is additive and fixed, as the sign-only rule requires. One
form of the update written for the net conductance would make the step
proportional to the old value; that form is not used. The device is reduced
to a fixed conductance step. The real device is
nonlinear: its state changes at a rate that depends on the current above
threshold and on a window function. Device-to-device variation, wire
resistance and current-mirror error are not modelled.

Not included: the ELM hidden layer, which has a similar crossbar without
training circuits but whose activation and weights are not specified, and
any feature extraction. The layer's `x` inputs are where the hidden-layer
outputs would connect. The two-crossbar variants of the scheme were only
used for comparison and are not built.

## Verification

Every module has a self-checking testbench in `tb/` that compares the module
with values computed independently in the bench:

* `tb_row_controller` and `tb_column_controller` check all input combinations
  against the sign rule and the transistor truth table.
* `tb_global_controller` follows the state sequence cycle by cycle, including
  the 2*K training-cycle count.
* `tb_error_computing`, `tb_error_shift_register`, `tb_ziksa_hbridge` and
  `tb_neuron_opamp` use random and corner stimuli.
* `tb_memristive_crossbar` keeps a reference copy of the array. It checks
  reads, sub-threshold currents, reads that must not program, and saturation
  at both LRS and HRS.
* `tb_elm_output_layer` runs the whole layer at its default size. It trains a
  four-class task for 12 epochs and then checks every output, error bit,
  cycle count and conductance against a reference model. It requires at
  least 75 % read-only accuracy, then drives all cells into saturation. It
  fails if any mechanism never occurred: read-only sample, training pass, C1
  and C2 cycles, increments, decrements, saturation at LRS and at HRS,
  op-amp clipping, and error bits of both values.
* `tb_elm_workloads` trains the 65x2, 40x2, 20x3 and 180x10 layers on
  synthetic class data, with the same reference checks.

To run one bench with Verilator (package first):

    verilator --binary --timing --assert -Wno-fatal \
      rtl/elm_pkg.sv $(ls rtl/*.sv | grep -v elm_pkg) \
      tb/tb_elm_output_layer.sv --top-module tb_elm_output_layer
    ./obj_dir/Vtb_elm_output_layer

For `tb_elm_workloads`, also add `tb/elm_workload_run.sv`. Each bench ends
with a line `TB_RESULT checks=<n> failures=<m>`.
