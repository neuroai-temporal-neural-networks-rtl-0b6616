# NeuTNN place-cell array in SystemVerilog

This is synthesizable RTL for a *NeuroAI temporal neural network* (NeuTNN): a
spiking network that computes with spike times, not spike rates. It follows
the NeuTNN microarchitecture described in "NeuroAI Temporal Neural Networks
(NeuTNNs): Microarchitecture and Design Framework for Specialized Neuromorphic
Processing Units" (Venkatachalam et al.). The authors of that paper did not
write this code.

The core idea is a neuron with *active dendrites*. In a classic point neuron,
every synapse adds into one body potential. Here a neuron has several
dendrites. Each dendrite has several *segments*, and each segment works like a
small point neuron with its own synapses and threshold. Segments come in two
kinds:

- **Proximal** segments drive the neuron. A neuron can only fire through them.
- **Distal** segments carry context. When a distal segment recognises its
  pattern, it does not fire the neuron. Instead it lets the proximal segments
  of its dendrite fire earlier.

In a temporal code, firing earlier means winning: winner-take-all (WTA)
inhibition at every level keeps the earliest responder. So a neuron whose
distal context matches the current situation wins the competition.

The top level, `neutnn_place_cells`, instantiates the largest configuration the
source describes in full: the place cells of a cortical reference frame. It has
three minicolumns and 1,232,000 synapses.

| minicolumn | neurons | dendrites/neuron | segments/dendrite | synapses/segment | synapses |
|---|---|---|---|---|---|
| 0 (type #1) | 40 | 10 | 16 | 71 | 454,400 |
| 1, 2 (type #2) | 30 | 10 | 16 | 81 | 388,800 each |

## Time, spikes and the computation window

All computation happens in windows of `T_STEPS = 8` time steps (the "gamma
cycle" of temporal networks). One step takes one clock cycle. A spike is a
one-cycle pulse on an input line, and its value is the step it arrives in. An
early spike is a strong value and no spike is the weakest. The window length
and the 3-bit weights (`WMAX = 7`) are set in `neutnn_pkg`. Both are this
design's choices: the source fixes neither. The source runs its designs at
100 kHz. Nothing in the RTL depends on the clock rate.

`neutnn_gamma_ctrl` sequences a window:

```
cycle    0      1      2 .. 9          10
        start  clear  run, t = 0..7   learn (only if learn_mode)
                                      done pulses in the last cycle
```

A window therefore takes `T_STEPS + 1` cycles after `start` without learning
and `T_STEPS + 2` with learning. A `start` that arrives while busy is ignored.
Apply input pulses in the cycle where `t` shows their step. Inside a step the
whole hierarchy, from synapse to minicolumn WTA, is combinational. A spike can
therefore decide a winner in the same step it arrives, and the results are
registered at the end of that step.

## The hierarchy, bottom up

### Synapse (`neutnn_synapse_array`)

This module holds the synapses of one segment. Each synapse has a weight `w`.
It also stores whether its input spiked in this window, and in which step
(`t_in`). The first pulse of the window counts. From step `t_in` on, its
response is one of:

- ramp-no-leak (RNL): `min(t - t_in + 1, w)`, which climbs by one per step up
  to the weight;
- step-no-leak (SNL): `w` straight away.

Before the spike, the response is 0. Each synapse stores 7 bits: 3 for the
weight, 3 for the arrival step and 1 for the spike flag.

### Segment (`neutnn_segment`)

A segment is a point neuron. Its potential in step `t` is the sum of its
synapses' responses plus a bias input. It fires once per window, in the first
step where the potential reaches `THETA`. Its potential in that step is its
*activation*. As a check, take the source's point-neuron example: weights
3,4,1,2, inputs 1,1,0,1 and threshold 6. With SNL it fires in step 0 with
potential 9. With RNL it fires in step 1 with potential 6.

### Active dendrite (`neutnn_dendrite`)

This is the part that needs the most explanation. A dendrite has `N_DIST`
distal and `N_PROX` proximal segments. Each kind sees its own input vector,
and each segment learns its own pattern with its own weights.

1. **Distal context.** The distal segments fire on their own thresholds. The
   first one that fires sets `depolarized`.
2. **Depolarisation.** From the next step on, every proximal segment of the
   dendrite gets `BOOST` added to its potential. So when the context matches,
   proximal segments cross threshold earlier, or cross it at all.
3. **Proximal WTA.** The dendrite fires in the first step where any proximal
   segment fires. Among the segments firing in that step, the one with the
   largest potential wins (lowest index on a tie). Its potential becomes the
   dendrite's output `value`. This is "the contribution of the most activated
   segment".

The distal segments run a WTA of their own, by the same rule. It only decides
which distal segment learns.

### Neuron (`neutnn_neuron`)

All dendrites of a neuron share its distal and proximal inputs. The source's
neuron diagram shows a *WTA inhibition* block followed by a *Max* block. The
RTL reads them as follows:

- **WTA:** only dendrites that fire in the earliest step survive.
- **Max:** the largest `value` among the survivors becomes the neuron's value
  (lowest index on a tie).

The neuron spikes in that step.

### Minicolumn (`neutnn_minicolumn`)

All neurons of a minicolumn get the same inputs. WTA inhibition votes across
the neurons. The first step in which any neuron spikes decides the winner:
among the neurons spiking in that step, the largest value wins, then the
lowest index. Only the winner's line pulses on `out_spike`. Then
`win_valid`/`win_id`/`win_time` hold the result until the next window. A
window in which no neuron reaches threshold has no winner. Assertions check
that `out_spike` is one-hot or zero and that it pulses at most once per window.

### Layer (`neutnn_layer`)

A layer is `N_MC` identical minicolumns side by side. A kernel picks each
minicolumn's inputs: minicolumn `m` sees inputs `[m*STRIDE, m*STRIDE+KERNEL)`,
for both distal and proximal inputs. `STRIDE = KERNEL` gives disjoint windows
and `STRIDE = 0` gives every minicolumn the full input. The layer's output is
the concatenation of the minicolumns' one-hot pulses, so it is the input of a
possible next layer. If the kernels do not fit in `IN_W`, elaboration stops
with an error. In the place-cell top, the two type-#2 minicolumns form one
layer with disjoint 81-input kernels.

## Learning

Learning uses spike-timing-dependent plasticity (STDP) and is local. It happens
only in the `learn` cycle that ends a window run with `learn_mode` set, and
only along the winning path:

- the winning neuron of each minicolumn;
- that neuron's winning dendrite;
- that dendrite's winning proximal segment, and its winning distal segment if
  one fired.

In each learning segment, every synapse compares its input spike with that
segment's own output spike:

| input spike | output spike | change |
|---|---|---|
| at or before the output | yes | +1 (capture) |
| after the output | yes | -1 (backoff) |
| none | yes | -1 (backoff) |
| yes | no | +1 (search) |
| none | no | 0 |

Weights saturate at 0 and `WMAX`. A window without a winner changes nothing.
The source names STDP but gives no rule. This table, and its deterministic
±1 steps, are this design's choice. Temporal networks often use random
(Bernoulli) step sizes instead.

## The top level: `neutnn_place_cells`

| port | dir | meaning |
|---|---|---|
| `start`, `learn_mode` | in | run one window, with STDP if `learn_mode` |
| `busy`, `done`, `t` | out | window in progress, last cycle, current step |
| `mc1_distal_in`, `mc1_prox_in` [71] | in | spikes of minicolumn 0 |
| `mc2a_*_in`, `mc2b_*_in` [81] | in | spikes of minicolumns 1 and 2 |
| `mc1_out_spike` [40], `mc2a/b_out_spike` [30] | out | one-hot winner pulse |
| `win_valid[3]`, `win_id[3]`, `win_time[3]` | out | held winner of each minicolumn |
| `wt` (`wt_req_t`), `wt_rdata` | in/out | weight write/read port |

The weight port addresses one synapse by minicolumn, neuron, dendrite,
segment and synapse. Segments `0..N_DIST-1` are distal and the rest are
proximal. A write takes effect at the clock edge; reads are combinational. An
assertion requires writes to happen only between windows. Reset clears all
weights to zero, so a network is either loaded with trained weights or trained
on chip from zero.

How the place cells turn feature/location observations into spikes, and which
observations go to distal and which to proximal inputs, is not given at this
level of detail. Each minicolumn's two input vectors are therefore top-level
ports.

Parameters of the top: `MC1_NEURON` (40), `MC1_SYN` (71), `MC2_NEURON` (30),
`MC2_SYN` (81), `N_DEND` (10), `N_DIST` (8), `N_PROX` (8), `RESP`
(`RESP_RNL`), `THETA_DIST` (24), `THETA_PROX` (24), `BOOST` (8).

## Where this RTL fills in or departs from the source

The source describes the hierarchy, what each level does, and the sizes of the
place-cell design. It does not give a circuit for any block. Everything below
is this design's choice:

- **Windows and weights:** 8 time steps per window and 3-bit weights.
- **Segment split and thresholds:** 16 segments per dendrite split as 8 distal
  + 8 proximal. Thresholds are 24 and the boost is 8. The source gives the
  total of 16 but not the split, and gives no threshold values.
- **Distal mechanism:** distal context acts as an additive boost on proximal
  potentials. The source says only that proximal input is required to fire
  and that distal input makes the neuron fire earlier.
- **Input sharing:** all segments of one kind in a neuron share one input
  vector. The source's diagrams draw separate input bundles per segment but
  give no mapping.
- **WTA order:** earliest step, then largest potential or value, then lowest
  index.
- **STDP:** the rule above, with deterministic unit steps.
- **Window controller and weight port:** both are this design's own.
- **Not built:**
  - clustering-voter units (a neuron whose proximal segment is a 1-bit enable,
    such as a class label), used by the source's MNIST network;
  - cascading of several layers into a multilayer network;
  - supervised and reward-modulated STDP.
- **Pruning:** synaptic pruning is an offline weight transformation. Pruned
  synapses are simply weights loaded as 0, which STDP can later raise.
  Removing pruned synapses from the hardware is a generator-time decision that
  this fixed RTL does not make.
- **Not modelled:** the other parts of a cortical column (grid cells, agent,
  output stage, the CAM-based storage some place-cell designs use) and the
  custom standard cells the source uses for layout. They are outside this RTL.

## Capacity

At the default parameters the array holds exactly the 1,232,000 synapses of
the place-cell configuration. The source's single-layer MNIST network needs
2,488,320 synapses (576 clustering-voter groups of 10 units) and a
clustering-voter organisation this RTL does not have, so it does not fit. The
source's UCR time-series designs are single TNN columns of 130 to 6,750
synapses. One minicolumn could host a column of up to 71 inputs and 40
neurons, but the column shapes are not given.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The testbenches for
the dendrite, neuron, minicolumn, layer and top compare against
`neutnn_ref_pkg`. That package is a behavioural reference written from spike
times: potential = bias + Σ min(t − t_in + 1, w), or Σ w for SNL. It
recomputes each level's firing step, winner, value and STDP result without
looking at the RTL's state. The testbenches use random weights and spike times
and read back every weight after each learning window.

| testbench | size | what it checks |
|---|---|---|
| `tb_neutnn_synapse_array` | 4 synapses, RNL and SNL | every response in every step, the point-neuron example, each STDP case, saturation |
| `tb_neutnn_segment` | 4 synapses | example fire steps (SNL step 0 / 9, RNL step 1 / 6), bias, random windows against the reference |
| `tb_neutnn_dendrite` | 3+3 segments × 6 | step, value, winning segment, depolarisation timing, learning of winners only; requires a window whose step the boost changed |
| `tb_neutnn_neuron` | 3 dendrites, SNL | WTA + Max, including windows where several dendrites fire together |
| `tb_neutnn_minicolumn` | 3 neurons × 2 dendrites × 4 segments × 6 | winner, one-hot pulse, STDP on the winning path only; requires winner, no-winner, boost-decided and learning windows |
| `tb_neutnn_layer` | 3 minicolumns, kernel 4, stride 2 | overlapping kernels, per-minicolumn winners, learning |
| `tb_neutnn_place_cells` | 3/2/2 neurons × 2 dendrites × 4 segments × 6/5 synapses | end to end through the controller: window length (9 or 10 cycles), ignored start, all three winners, weights after learning |

The top-level test counts each mechanism: inference windows, learning windows,
winners, windows without a winner, windows where the distal boost decided the
step, weights changed by STDP, and starts ignored while busy. It fails if any
count is zero.

All modules pass verilator's lint and the slang front end at their full
default sizes. At full size the top takes about three minutes to lint. The
full 1.23-million-synapse top was not simulated: verilator turns it into over
500 C++ files of about 1.5 MB each, which would take well over an hour to
compile on a 4-core machine. The largest
simulated configuration is the one in `tb_neutnn_place_cells`: 3 minicolumns
with 7 neurons and 304 synapses in total. The sizes do not change the logic
of the design; they only set how many times each generate loop repeats.

## Simulating

Simulate with verilator 5. Give it the package first and let it find the
modules:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/neutnn_pkg.sv tb/neutnn_ref_pkg.sv tb/tb_neutnn_place_cells.sv \
    --top-module tb_neutnn_place_cells -Mdir obj_pc
./obj_pc/Vtb_neutnn_place_cells
```

The other testbenches build the same way; `tb_neutnn_synapse_array` and
`tb_neutnn_segment` do not need `neutnn_ref_pkg`. To change the network size,
override the top's parameters. To change the window length or weight width,
edit `T_STEPS` or `WMAX` in `neutnn_pkg`. The reference package bounds its
arrays at 8 synapses, 8 segments, 4 dendrites and 4 neurons; enlarge `MS`,
`MG`, `MD` and `MN` there to test larger configurations.
