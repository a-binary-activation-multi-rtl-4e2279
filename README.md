# A trigger-word detector with binary activations, computed inside eNVM arrays

Processing-in-memory (PIM) accelerators do a matrix-vector product in one
step. Activations drive the wordlines, and each memory cell adds a current
proportional to its stored weight onto a bitline. The usual price is a DAC on
every wordline and an ADC on every bitline, because activations are
multi-bit. These converters often cost more area and energy than the array.

This design drops both converters by making **every activation a single bit**:

* A wordline is simply on or off, so a digital driver replaces the DAC.
* A neuron's output is only the *sign* of its bitline current, so a clocked
  sense-amp comparator replaces the ADC.

Weights keep several levels. Each one is stored as the current difference of
a *pair* of multi-level cells (MLCs). Everything outside the arrays is plain
single-bit logic.

The application is keyword spotting over 12 classes: 10 keywords, silence and
unknown. The network is an input fully-connected (FC) layer, two 128-wide GRU
layers with binary activations and 7-level weights, and an output FC layer.
The network must be trained for binary activations with injected noise,
which is not part of the hardware. This RTL takes the trained 7-level weight
codes as input.

## Network and dataflow

One frame holds 40 MFCC coefficients and arrives every 8 ms. For each frame
(timestep t):

```
MFCC x<t> (40 x 8-bit) --input_fc--> H0<t> (128 bits)
[H1<t-1>, H0<t>]       --gru_layer 1--> H1<t>
[H2<t-1>, H1<t>]       --gru_layer 2--> H2<t>
```

After the last frame of an utterance:

```
H2<t_max> --output_fc--> 12 scores + argmax class --softmax_unit--> 12 probabilities
```

The GRU has no reset gate. With the activation f(x) = (x > 0), a layer
computes:

```
G = f(Wg . [H<t-1>, X])        C = f(Wc . [H<t-1>, X])
H<t> = G ? H<t-1> : C           (G*H + (1-G)*C for single bits)
```

With single bits, the GRU update is a 2:1 multiplexer per neuron. The gate
selects between the stored bit and the new candidate bit.

## How a GRU layer maps onto an array

Each layer has one array with 256 rows and 256 column pairs (`mlc_array`).

| rows     | driven by              |
|----------|------------------------|
| 0..127   | the layer's own H<t-1> |
| 128..255 | its input H^{l-1}<t>   |

| column pair | holds                          |
|-------------|--------------------------------|
| 2i          | gate weights Wg of neuron i    |
| 2i+1        | candidate weights Wc of neuron i |

So one array evaluation produces all 128 gate and 128 candidate
pre-activations at once. `sense_amp_bank` holds 256 comparators and turns
them into bits. `gru_logic` applies the multiplexer and stores H.

### Weight to cell-pair mapping (`mlc_weight_encoder`)

A weight code w in -3..+3 stands for w x alpha/3, where alpha is the clipping
range of that matrix. The code is programmed as two cell levels, in units of
I_fs/3:

| w          | -3 | -2 | -1 | 0 | +1 | +2 | +3 |
|------------|----|----|----|---|----|----|----|
| negative cell | 3 | 2 | 1 | 0 | 0 | 0 | 0 |
| positive cell | 0 | 0 | 0 | 0 | 1 | 2 | 3 |

The pair's current difference is proportional to w. Other weight formats
follow the same rule:

* 5-level, ternary and binary weights are subsets of these codes, run on
  the same hardware (`tb_twd_levels` exercises all four).
* 15-level weights would need `CELL_BITS = 3`, `W_BITS = 4`.

The encoder is parameterised for these formats, but the top level is fixed
at 3-bit codes.

### Timestep schedule inside a layer

Edges are counted from the clock edge where `step` is high:

| edge | action |
|------|--------|
| 0 | the array samples the wordlines `{x, h}` and latches every pair's differential signal |
| 1 | all sense-amps fire, each with its polarity bit |
| 2 | the hidden-state registers take H<t>; `done` is high in the following cycle |

`step` must not be raised again before `done`; an assertion checks this. The
real array settles and discharges its bitlines within one sensing operation.
The three clock edges are the digital model's staging.

## Sense-amp offset and random polarity flipping

This part is easy to miss, and it matters most for accuracy.

A comparator has an input offset N_OS. Transistor mismatch fixes it at
fabrication, and it differs from one sense-amp to the next. A fixed offset is
a bias the network never saw in training, and it lowers accuracy. A network
trained with injected noise tolerates *zero-mean, time-varying* noise well,
whatever its shape. The design uses that.

Switches in front of each comparator can reverse the sign with which its
offset adds to the signal:

* polarity 0 (switch setting P0): the comparator sees `signal + N_OS`
* polarity 1 (switch setting P1): it sees `signal - N_OS`

A pseudo-random generator (`prng`) gives every sense-amp a new polarity bit
every timestep. The fixed offset then becomes a ±N_OS random variable with
zero mean. This needs no per-chip calibration or retraining.

In this RTL, one `prng` produces 512 bits per frame, one per sense-amp of
both layers. It is a 32-bit xorshift generator (shifts 13/17/5), stepped 16
times within one clock:

* bits [255:0] go to layer 1
* bits [511:256] go to layer 2
* within a layer, bit p goes to the sense-amp of column pair p

The generator advances when a frame is accepted, so a frame's polarities are
fixed before its layers run.

### Scale of the analog model

Currents are signed integers, with 16 units per cell level. Three sources of
error are modelled:

* **N_OS**, the sense-amp offset (`OS_MAX`, default 8). Each offset is a
  fixed pseudo-random value in [-OS_MAX, OS_MAX], taken from a hash of the
  sense-amp index and a per-layer seed. With the default, every offset is
  below half a level. An offset therefore changes a decision only when the
  ideal pre-activation is exactly zero, which happens often with sparse
  weights. The polarity bit then decides the outcome, as it would in silicon.
* **N_MLC**, the cell programming error (`DW_MAX`, default 0). This is a
  fixed pseudo-random error in [-DW_MAX, DW_MAX] per cell, applied to cells
  on active rows.
* **N_white**, thermal and shot noise (`WHITE_SIGMA`, default 0). This is a
  new sample for every comparison: the sum of 12 uniform draws, with the
  given standard deviation.

The magnitudes and distributions are placeholders. Real values come from
measured devices and Monte-Carlo simulation of the sense-amp. Set all three
to 0 for an ideal array.

## The digital layers around the arrays

These blocks are not computed in memory: the input FC receives multi-bit
MFCCs, and the output needs scores, not bits. They are simple sequential
datapaths with register-file weights:

* **`input_fc`** holds Win (40 x 128 codes). It runs 128 accumulators for 40
  clocks, one MFCC coefficient per clock, and outputs `sum > 0` per neuron.
  MFCCs are 8-bit signed.
* **`output_fc`** holds Wout (128 x 12 codes). It runs 12 accumulators for
  128 clocks, adding row k when H2[k] = 1. It reports the 12 scores and their
  argmax, with ties going to the lower class.
* **`softmax_unit`** turns the scores into probabilities with 16 fractional
  bits. It subtracts the largest score and looks up exp(-d / S) in a
  64-entry table, which is computed at elaboration with `$exp` and holds
  values with 16 fractional bits. It then sums the table values and divides
  once per class (12 clocks).
  * S (`SCORE_PER_NAT`, default 2) is the number of score units per
    natural-log unit. It depends on the output layer's clipping range, which
    comes from training, so it is a parameter.
  * The argmax does not depend on S.

Neither layer has a bias term.

## Control and interfaces (`twd_sequencer`, `twd_pim_top`)

**Frame handshake.** MFCC frames arrive on a valid/ready handshake:

* `mfcc_first` marks the first frame of an utterance. It clears H1 and H2,
  since the initial state is zero.
* `mfcc_last` marks the last frame. After it, the output FC and the
  softmax run, and `result_valid` pulses together with `logits`,
  `class_idx` and `probs`.
* Frames are processed one at a time. `mfcc_ready` is high only while the
  sequencer is idle.
* The input FC captures the MFCC vector on the accepting edge, so the source
  can present the next frame immediately. It must then hold that frame until
  it is accepted; an assertion checks this.

**Latency**, counted from the accepting edge:

| what | clocks |
|------|--------|
| one frame | 49 = 1 + 40 (input FC) + 2 x 4 (two layers) |
| after a `last` frame | 130 more until `mfcc_ready` (output FC) |
| result after that | 13 more (softmax) |

The softmax runs in the background, so the next utterance can start while it
finishes.

At any clock rate above about 10 kHz, one frame fits easily into the 8 ms
frame period.

**Weight programming.** Weights are written one row per clock, while no
frame is in flight:

| `prog_sel` | rows | codes used |
|------------|------|-----------|
| `PROG_WIN`  | 0..39  | `prog_w[127:0]` (input unit k, all 128 outputs) |
| `PROG_L1`, `PROG_L2` | 0..255 | `prog_w[255:0]` (row as above; pair 2i = Wg, 2i+1 = Wc of neuron i) |
| `PROG_WOUT` | 0..127 | `prog_w[11:0]` |

Real eNVM programming is slow and iterative (program and verify), and is not
modelled. The array cells have no reset, so every row must be programmed
before use.

## What follows the published design and what does not

**Taken from the design:**

* the network shape (40 → 128 → GRU 128 → GRU 128 → 12)
* the GRU without a reset gate, and the multiplexer form of the update
* binary step activations
* 7-level weights as pairs of 4-level cells, with the mapping table above
* one array per layer holding Wg and Wc, with rows ordered
  [H<t-1>, H^{l-1}<t>]
* one sense-amp per column pair
* random offset-polarity flipping, driven by a PRNG per sense-amp and
  timestep, with P0 = +N_OS and P1 = -N_OS
* the three noise sources

**This implementation's choices:**

* the clocking and three-cycle layer schedule
* the sequencer, the frame handshake and first/last marking
* zero initial hidden state
* the xorshift PRNG and its bit assignment
* 8-bit MFCCs
* 7-level codes for Win and Wout
* register-file FC layers that run one row per clock, with no bias
* the fixed-point softmax (exponential table, serial divider, score scale)
* the 16-units-per-level current scale and all noise magnitudes and
  distributions

**Not built:**

* The FFT/MFCC front end. The design gives only its framing: 16 ms window,
  8 ms stride, 40 coefficients. MFCC vectors enter through a port.
* The wordline drivers, which are buffers and appear only as the wordline
  concatenation.
* Analog behaviour beyond the comparator decision: bitline discharge timing,
  and the StrongArm circuit itself.

`mlc_array` and `sense_amp_bank` are behavioural models of analog macros.
They simulate and lint, but they are not meant for synthesis. In particular,
`mlc_array`'s 256 x 256 evaluation loop is far beyond what a synthesis tool
will unroll.

## Files

| file | contents |
|------|----------|
| `rtl/pim_pkg.sv` | sizes, number formats, programming-target enum, mismatch hash |
| `rtl/mlc_weight_encoder.sv` | weight code to cell-pair levels |
| `rtl/mlc_array.sv` | behavioural eNVM array, differential bitline signals |
| `rtl/sense_amp_bank.sv` | behavioural sense-amps with offset, polarity switches, white noise |
| `rtl/prng.sv` | polarity bit generator |
| `rtl/gru_logic.sv` | per-neuron multiplexer and hidden-state register |
| `rtl/gru_layer.sv` | one GRU layer: encoders, array, sense-amps, GRU logic, schedule |
| `rtl/input_fc.sv`, `rtl/output_fc.sv` | digital FC layers |
| `rtl/softmax_unit.sv` | 12-way fixed-point softmax |
| `rtl/twd_sequencer.sv` | frame-level FSM |
| `rtl/twd_pim_top.sv` | the accelerator |
| `tb/tb_ref_pkg.sv` | independent reference functions for the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_twd_noise.sv` | whole accelerator with cell errors, larger offsets and ternary weights |
| `tb/tb_twd_levels.sv` | whole accelerator with 7-level, 5-level, ternary and binary weights |
| `tb/tb_twd_white.sv` | whole accelerator with white sense noise, checked statistically |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pim_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_twd_pim_top.sv \
  --top-module tb_twd_pim_top -Mdir obj -o sim && obj/sim
```

Replace the testbench and top-module names to run another test. Verilator
lint warnings about unused package constants are expected.

`tb_twd_pim_top` runs the accelerator at its default size. It does the
following:

1. Programs all four weight memories with sparse random codes.
2. Streams four utterances (3, 6, 9 and 125 frames).
3. After every frame, compares H0, H1 and H2 with a reference model of the
   whole network. The model includes each sense-amp's offset and the PRNG
   polarity bits.
4. After every utterance, compares the scores and the class, and checks each
   probability against a real-valued softmax to within 3 LSB.
5. Checks the frame latency.
6. Confirms that every mechanism occurred: handshake stalls, state clears,
   gate-keeps and candidate-loads, and zero pre-activations resolved both
   ways by the polarity bit.

It runs in under a second after compilation.

`tb_twd_noise` runs the same flow with different settings:

* ternary weights
* a fixed error of up to ±4 units (a quarter level) on every cell
* sense-amp offsets of up to ±24 units

With these offsets the polarity bit also changes decisions on pre-activations
one level away from zero. The reference model includes every frozen error, so
it still predicts the hidden states exactly.

`tb_twd_levels` runs the default-size accelerator once for each weight
alphabet: 7-level (-3..3), 5-level (-2..2), ternary (-1..1) and binary
(±1, with no zero code). The hardware is the same for all four. Before each
12-frame utterance all memories are reprogrammed, and the test checks that
exactly the codes of that alphabet were written. Hidden states, scores,
probabilities and latencies are checked as in `tb_twd_pim_top`.

`tb_twd_white` switches on white sense noise of one cell level (16 units)
and turns the offsets off. Fresh noise on every comparison makes the hidden
states unpredictable, so this test works on each decision instead:

* At every sense edge it recomputes each column's noiseless pre-activation
  from the programmed codes and the wordlines actually driven.
* It checks the bitline sum exactly.
* It bins the decisions by their distance from zero.

The flip rate in each bin must match the Gaussian tail: about 0.5 at zero,
0.18 at one level, 0.03 at two, under 1% at three and none beyond. The
output layer and softmax are still checked exactly against the final
hidden state.

The module testbenches cover:

* the mapping table, exhaustively
* array sums including cell errors
* offset and polarity decisions, plus white-noise statistics
* the PRNG sequence
* the GRU update rule
* a reduced 8-neuron layer over 300 timesteps
* both FC layers at full size, with latency checks
* the softmax against real arithmetic
* the sequencer's operation order

**Limits of this verification:** random weights exercise the datapath. They
do not demonstrate recognition accuracy, which needs trained weights and
real speech features.
