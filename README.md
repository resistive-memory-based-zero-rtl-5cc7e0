# Zero-shot event learning with a random resistive liquid state machine

Event sensors (dynamic vision sensors, silicon cochleas, neural recording
arrays) produce sparse, asynchronous streams of spikes. This design learns
from such streams almost without training its encoder. The encoder is a
*liquid state machine* (LSM): a recurrent spiking network whose synaptic
weights are fixed and random, and never trained. Those weights cost nothing
to program. They are the conductances that a uniform forming pulse leaves in
a fresh resistive-memory crossbar. The same crossbar also does the
multiply-accumulate work of the network in place, as analogue current
summation.

The spiking activity of the LSM's 200 neurons is counted over a time window,
and the counts form a feature vector. Only one small fully connected layer
after the counters is trained. It is either

* a **classification head**: the arg-max of its outputs is the label; or
* a **projection** into an embedding space shared by two modalities (for
  example event images of digits and event recordings of spoken digits).
  Trained with a contrastive, CLIP-style loss, matching pairs point in the
  same direction. A query in one modality then retrieves the stored
  embedding of the other modality with the highest cosine similarity. This
  also works for classes that were never in training: *zero-shot* retrieval.

The RTL here covers the whole datapath from event vectors to retrieved
labels:

* a behavioural model of the crossbar and its read chain;
* the sequencer that drives the crossbar and collects currents;
* the leaky integrate-and-fire (LIF) neurons and their spike counters;
* the trainable layer;
* the cosine-similarity search.

Both encoders share one crossbar. The training itself (gradient descent on
the contrastive loss) runs off-chip. The trained weights are loaded through
a write port.

## Data flow

```
 ev_vec (256 b/step) ──► lsm_encoder ─────────────────────────────────────┐
                           │  place rows: inputs + previous spikes (512 b)│
                           ▼                                              │
                      xbar_interface ──64-row slice──► rram_macro         │
                           ▲ ◄───────── 14-bit differential code ─┘       │
                           ▼                                              │
                      lif_neuron (one neuron at a time, buffers)         │
                           ▼                                              │
                      spike_counter_bank (200 x 8 b) ── cnt_rdata ────────┘
                                                          │
                                                          ▼
                               projection_layer (per modality W, b)
                                    │ z stream (16 b)
                      ┌─────────────┴───────────────┐
                      ▼                             ▼
                 argmax_unit                zero_shot_retrieval
               (CLASSIFY label)      (ENROLL to gallery / QUERY search,
                                       similarity_unit accumulators)
```

`lsm_zeroshot_top` sequences the units for three commands:

| command       | what runs                                   | result                                 |
|---------------|---------------------------------------------|----------------------------------------|
| `OP_CLASSIFY` | encode T steps, readout with `cfg_n_class` outputs | `res_idx` = label, `res_score`   |
| `OP_ENROLL`   | encode, project to 64 dimensions            | embedding stored in slot `cmd_slot`    |
| `OP_QUERY`    | encode, project, search `cfg_n_gal` slots   | best slot, `res_dot`, `res_nq`, `res_ng` |

A command is accepted on `cmd_valid && cmd_ready`. During the command the
design pulls one 256-bit event vector per time step through
`ev_valid`/`ev_ready`. `res_valid` pulses once when the command ends.
`cmd_mod` selects the modality, which sets:

* the rows of the crossbar in use;
* the LIF constants `cfg_lif[m]`;
* the window length `cfg_t_steps[m]`;
* the weight set of the trainable layer.

## The shared random crossbar

### Signed synapses from random conductances

Each synapse is a pair of adjacent columns, `w = G(2c) − G(2c+1)`. Neuron
`c` (0..199) therefore owns columns 400 of the 512. Because both conductances
are random and positive with the same distribution, the difference is
symmetric about zero. That gives the LSM a mix of excitatory and inhibitory
connections without any programming. The differential pair is this design's
choice. The published system gets the signed, near-normal weight
distribution from the forming statistics, but it does not state how signs
are formed.

### Row map

| rows      | vision encoder            | audio encoder             |
|-----------|---------------------------|---------------------------|
| 0..191    | inputs 0..191             | –                         |
| 192..255  | inputs 192..255           | inputs 0..63              |
| 256..455  | recurrent spikes 0..199   | recurrent spikes 0..199   |
| 456..511  | unused                    | unused                    |

The vision encoder occupies a 456 × 200-pair block. The audio encoder uses
the contiguous 264-row part of the same block. This matches the published
sizes of the two encoders, 456 and 264 rows sharing one subarray. The exact
row placement is this design's own. In particular, the audio encoder shares
its input synapses with the last 64 vision inputs, and the recurrent
synapses are common to both encoders.

### Reading the array

The board drives 64 rows at once. The array is therefore read in *row
groups* of 64 rows (groups 0..7):

* the vision encoder uses groups 0..7;
* the audio encoder uses groups 3..7.

For one neuron, `xbar_interface` walks the groups of the active partition:

1. It takes the 64-bit slice of the row vector.
2. If the slice is all zero, it skips the group, because the group carries
   no current (`skip_pulse`).
3. Otherwise it starts a conversion on the macro and adds the signed 14-bit
   code to an 18-bit partial sum.

Event data are sparse, so skipping is the main source of speed. It is this
design's choice.

### The behavioural macro

`rram_macro` is a model, not logic. Cell (r, c) holds a conductance code

    g(r,c) = 74 + Σ_{k=0..3} field_k( mix32(SEED·0x9e3779b9 ⊕ (r<<16 | c)) )

where `field_k` are four 5-bit fields of a 32-bit integer hash. The code is
in units of 0.25 µS, so it spans 18.5–49.5 µS, close to normal with a mean
near 34 µS. This imitates the measured spread of formed cells (about 20 to
50 µS).

One conversion returns `Σ_{driven rows} (g(r,2c) − g(r,2c+1))`, which is at
most 64·124 = 7936 in magnitude and always fits the 14-bit ADC. The read
voltage and the amplifier gain are folded into the unit. The model has no
read noise, no device drift and no ADC quantisation beyond integer codes.

The ADC latency is a parameter, `ADC_LAT` (default 2 cycles). The real
board's DAC, multiplexer, shift register, amplifier and ADC timing are not
modelled.

## Liquid state machine

Each time step `t` of the `lsm_encoder` does the following:

1. It accepts an event vector and forms the 512-bit row vector: the events,
   masked to the modality's width, at `in_base`, and the 200 spikes of step
   `t−1` at row 256.
2. For neurons 0..199 in turn, it gets the synaptic current
   `I_i = Σ w·x + Σ w·s(t−1)` from the crossbar and applies one LIF update:

       v      = u + ((u_rest − u) >>> leak_shift) + (I >>> in_shift)
       spike  = sat16(v) ≥ u_th
       u_next = spike ? u_rest : sat16(v)

3. It increments the neuron's 8-bit saturating counter when the neuron
   fires.

This is a forward-Euler step of `du/dt = (u_rest − u)/τ + I/c`. τ and c are
powers of two, set per modality through `cfg_lif`. The firing condition
`u ≥ u_th` is the published one. The reset to `u_rest` after a spike, the
shift form of the constants and the saturation are this design's choices.

The recurrent input of step `t` is the spikes of step `t−1`. All neurons see
the same, consistent previous state, because new spikes are written to a
second buffer and swapped at the end of the step.

After `cfg_t_steps` steps the counters hold `o_i = Σ_t spike_i(t)`, the
feature vector.

**Timing.** One step takes:

* 1 cycle to accept the event vector;
* per neuron, about 2 cycles plus `ADC_LAT + 1` cycles for each non-empty
  row group and 1 cycle for each skipped one;
* 1 cycle at the end.

A step with every row group active takes about 200 × 26 cycles at the
defaults. Sparse
steps are much faster.

## Trainable layer

`projection_layer` computes

    z_j = sat16( (b_j + Σ_i W_ij · o_i) >>> cfg_z_shift ),   j < n_out

The layer uses one multiply-accumulate per cycle:

* each output takes H + 1 = 201 cycles;
* the 64 outputs of a projection take 12,864 cycles;
* a 10-class readout takes 2,010 cycles.

There is a weight set of 64 × 200 signed 8-bit weights and 64 signed 24-bit
biases for each modality. A classifier uses rows 0..n_out−1 of the set.

`sat_pulse` marks outputs clipped to 16 bits. Weights and biases are written
through `w_*` and `b_*` while the layer is idle. The word widths and the
single-MAC structure are this design's choices. The published system runs
this layer in software on its digital host.

## Zero-shot retrieval

`OP_ENROLL` stores a 64-dimensional embedding in one of 32 gallery slots.
`OP_QUERY` streams the query embedding into a buffer. Then, for each of the
`cfg_n_gal` slots, `similarity_unit` accumulates over 64 cycles (plus one):

* the dot product `d = q·g`;
* the squared norms `‖q‖²` and `‖g‖²`.

Each is a 40-bit exact integer.

Cosine similarity is `d/(‖q‖‖g‖)`. The slot search needs only comparisons,
so no division or square root is computed. `‖q‖` is common to all slots and
drops out. Slot k beats the current best slot b when

    d_k · |d_k| · ‖g_b‖²  >  d_b · |d_b| · ‖g_k‖²

This compares `sign(d)·d²/‖g‖²`, a monotone function of the cosine, exactly,
with 120-bit products. A slot with a zero norm scores 0. Ties keep the
lower slot.

The result reports:

* the winning slot;
* its `d`, `‖g‖²` and `‖q‖²`, so that a host can form the cosine value
  itself.

A search over n slots takes `n·65 + 1` cycles.

`argmax_unit` does the same job for classification: the largest output
wins, and ties go to the lower index.

## What the published system has that this RTL does not

* **Analogue read chain and host.** The DAC, multiplexer, shift register,
  trans-impedance amplifier and ADC parts, and the SoC with its host
  software, are replaced by the macro model and the command sequencer.
  Their port-level behaviour is not modelled.
* **Training.** Contrastive (and cross-entropy) training of the last layer
  happens off-chip. Weights enter through the write port.
* **Sensor pre-processing.** Centre-cropping of 34 × 34 event frames to
  16 × 16 and binning into time steps happen upstream. The published vision
  data have positive and negative events. Here a step is a 256-bit vector,
  one bit per pixel, so the two polarities must be merged or one chosen
  before the design.
* **Floating-point constants.** LIF constants are powers of two and
  integers. The published model uses real-valued hyper-parameters.
* **Large configuration.** The simulated neural-to-visual experiment (784 and
  192 inputs, 2048 neurons, 256-dimensional projection) does not fit the
  512 × 512 array or these defaults.
* **Device non-idealities.** Read noise and conductance drift are absent
  from the model. Deterministic hashing replaces the forming process.

## Workload sizes

| workload                               | needs                                          | fits the defaults |
|----------------------------------------|------------------------------------------------|------|
| event digits, 16×16, 10 classes, ~50 steps | 456 rows, 400 columns, 10 readout rows, counts ≤ 50 | yes |
| spoken digits, 64 channels, 11 classes, 129 steps | 264 rows, 400 columns, counts ≤ 129   | yes |
| vision↔audio zero-shot, 64-dim, 9 classes | 2 × 64 × 200 weights, 9 gallery slots        | yes |
| neural↔visual zero-shot, 2048 neurons, 256-dim | 2832 rows, 2048 neurons                   | no  |

The window of about 50 steps for the event digits is read from the
published spike raster. The other sizes are stated in the published
experiments.

## Files

| file | contents |
|------|----------|
| `rtl/lsm_pkg.sv` | sizes, widths, row map, `lif_cfg_t`, `op_e`, `modality_e` |
| `rtl/rram_macro.sv` | behavioural crossbar + read-chain model |
| `rtl/xbar_interface.sv` | row-group sequencer, zero-group skip, partial sums |
| `rtl/lif_neuron.sv` | combinational LIF update |
| `rtl/spike_counter_bank.sv` | 200 saturating spike counters |
| `rtl/lsm_encoder.sv` | time-step control, membrane and spike buffers |
| `rtl/projection_layer.sv` | per-modality fully connected layer |
| `rtl/argmax_unit.sv` | streaming arg-max |
| `rtl/similarity_unit.sv` | dot product and norm accumulators |
| `rtl/zero_shot_retrieval.sv` | gallery and exact cosine arg-max |
| `rtl/lsm_zeroshot_top.sv` | command sequencer and top level |
| `tb/tb_ref_pkg.sv` | independent reference model (hash, weights, LIF, LSM) |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_lsm_zeroshot_top.sv` | end-to-end test at default sizes, short windows |
| `tb/tb_workload_paper_sizes.sv` | end-to-end test at the published window lengths and class counts |

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

The reference model in `tb/tb_ref_pkg.sv` recomputes the crossbar weights
from the hash formula. It then runs the LSM, the readout and a
floating-point cosine search independently of the RTL.

The end-to-end tests check:

* the spike vector after every time step;
* every label, every retrieved slot and the exact similarity sums.

They also count each mechanism and fail if any never occurs:

* vision and audio encodes and modality switches;
* each command;
* spikes, skipped row groups, clipped outputs and event stalls.

Run any test with plain verilator, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb --top-module tb_lsm_zeroshot_top \
        rtl/lsm_pkg.sv tb/tb_ref_pkg.sv tb/tb_lsm_zeroshot_top.sv -o sim
    ./obj_dir/sim

`tb_lsm_zeroshot_top` uses the top with no parameter overrides. It runs 12
vision and 16 audio steps per sample and takes well under a minute.
`tb_workload_paper_sizes` runs 50-step vision and 129-step audio samples,
about 4 million cycles.

### Notes on tool warnings

* The registers use an asynchronous active-low reset. The assertions also
  read `rst_n` in their clocked `disable iff (!rst_n)`, so lint reports the
  reset as used both asynchronously and synchronously. The second use is
  only in the assertions.
* Unused bits of the hash in `rram_macro` and unused outputs of some
  instances are intentional.
