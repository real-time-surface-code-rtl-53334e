# Real-time surface-code decoding and feedback with an LSTM decoder

A superconducting surface-code logical qubit has to be corrected while the
experiment runs. Each error-correction cycle measures the stabilizers, and the
errors those results reveal must be decoded fast enough to fix them with
physical feedback pulses in the same cycle. This matters most before
non-Clifford gates: a Pauli frame kept in software cannot follow an error
through such a gate. This repository holds SystemVerilog for the decoding and
feedback logic of a *central feedback module* (CFM). The CFM sits between the
readout instruments (DAQs) and the pulse generators (AWGs) of a distance-3
rotated surface code with 9 data qubits and 8 ancillas. Each stabilizer type
has its own small recurrent neural network, an LSTM, run as a fixed-latency
pipeline at 250 MHz:

| step | cycles | time |
|---|---|---|
| syndrome calculation | 5 | 20 ns |
| LSTM stage 1, `W_x x + b` | 8 | 32 ns |
| LSTM stage 2, sum with `W_h h` and activations | 4 | 16 ns |
| LSTM stage 3, cell and hidden state | 6 | 24 ns |
| stage 4, dense output layer | 13 | 52 ns |
| Pauli-frame update and branch control | 1 | 4 ns |
| **measurement event to branch control** | **37** | **148 ns** |

Each decoder takes a new round at most every 46 cycles (184 ns). A QEC cycle
is about 1.25 µs. The structure, the arithmetic rules and the latencies
follow a published FPGA implementation. Everything that publication leaves
open was chosen here; those choices are listed under *Choices made in this
design* below.

## Code layout and conventions

Data qubits D1..D9 sit in a 3×3 grid, row by row. The ancillas and the data
qubits each one checks:

| ancilla | type | data qubits |
|---|---|---|
| A1 | X | D1 D2 (top edge) |
| A2 | Z | D1 D2 D4 D5 |
| A3 | X | D2 D3 D5 D6 |
| A4 | Z | D3 D6 (right edge) |
| A5 | Z | D4 D7 (left edge) |
| A6 | X | D4 D5 D7 D8 |
| A7 | Z | D5 D6 D8 D9 |
| A8 | X | D8 D9 (bottom edge) |

`Z_L = Z1 Z2 Z3` and `X_L = X3 X6 X9`. The Z-type decoder receives the
syndromes of A2, A4, A5 and A7, in that order, as `input_data[0..3]`. It
decides whether `Z_L` has flipped, and its correction is an X gate on D1. The
X-type decoder receives A1, A3, A6 and A8, decides on `X_L`, and corrects
with a Z gate on D9. These constants live in `rtl/qec_pkg.sv`.

## From ancilla outcomes to syndromes (`syndrome_calc`)

The ancillas are not reset after they are measured. A raw outcome `a_n` is
therefore the stabilizer value XOR the ancilla's previous state. The module
computes

    s_n = a_n XOR a_(n-1)        (a_0 = 0)
    x_n = s_n XOR s_(n-1)

In round 1, the stabilizers of the prepared basis start from `s_0 = 0`. The
complementary stabilizers have a random first value, so their first syndrome
is forced to 0 (`s_0 = s_1`). At the final logical measurement the data-qubit
readouts give every stabilizer of the measured basis as a parity,
`s_m`. The final syndrome is `s_m XOR s_n`, taken against the last ancilla
round. Only the decoder of the measured type runs on the final event.

Feedback leaves a trace in later syndromes. An X on D1 flips the A2
stabilizer for all later rounds, so the next A2 syndrome fires once.
Likewise, a Z on D9 makes the next A8 syndrome fire once. When it issues a
correction, the Pauli-frame unit raises a cancel request. The next event
takes that request, and stage 4 of the pipeline XORs the flipped syndrome
back, so the decoder never sees its own corrections as errors.

The five register stages are: capture, stabilizer values, syndromes,
cancellation, and split into the two decoder vectors.

## The decoder (`nn_decoder` = `weight_store` + `lstm_layer` + `dense_layer`)

The network has one LSTM layer (4 inputs, 32 hidden units) and one dense
output neuron. For each of the 128 gate columns (gate order i, f, c~, o) it
computes

    z    = W_x x_n + b + W_h h_(n-1)
    i,f,o = clip(z/2 + 1/2, 0, 1)            piecewise-linear sigmoid
    c~    = clip(z, 0, 1)                    clipped ReLU
    c_n  = f·c_(n-1) + i·c~
    h_n  = o·clip(c_n, 0, 1)
    y_n  = sigmoid(W_d h_n + b_d),   flip = y_n > 1/2

The output `y_n` estimates whether the logical observable has flipped since
the shot began. It is not a per-round increment.

**Numbers.** All 4,769 weights are 6-bit signed values with 4 fractional
bits, so they span -2 to +1.9375. Gate outputs and `h` are unsigned with 7
fractional bits, so 1.0 = 128. Pre-activations are 20-bit signed with 11
fractional bits. The cell state is never negative, because all its terms are
non-negative; it is a 12-bit unsigned value that saturates. Shifts truncate
toward minus infinity.

**Timing.** Each stage computes its result at its first clock edge. A valid
token then walks out the rest of the stage, so the cycle counts in the table
above hold exactly. The signals `stage2_valid`, `stage3_valid` and
`stage4_valid` pulse when a round enters each stage. `output_valid` pulses
31 cycles after `input_valid`, together with `output_logic_flip`.

**Why 46 cycles per round.** The recurrent product `W_h h_n` is needed
before the next round can finish stage 2. It is computed while the dense
layer runs, by a time-multiplexed array that handles 4 gate columns per cycle
(128 multipliers, 32 cycles), followed by 3 pipeline registers. `W_h h_n` is
therefore complete 36 cycles after `h_n` appears at cycle 18.
`input_ready` rises when a round accepted now would find it ready at the end
of its stage 1: 18 + 36 − 8 = 46 cycles. A round offered while
`input_ready` is low is not taken. The top level records this in its sticky
`overrun` flag. To trade multipliers for period, change `REC_COLS` and
`REC_PIPE` in `lstm_layer`.

**Weights** are held in registers, not block RAM, because every weight feeds
a multiplier each round. They are written one word per cycle through
`w_we/w_addr/w_data`, and a write takes effect at once, even during a shot.
The address map, in words:

| words | content | index |
|---|---|---|
| 0–511 | `W_x` | input·128 + column |
| 512–4607 | `W_h` | unit·128 + column |
| 4608–4735 | `b` | column |
| 4736–4767 | `W_d` | unit |
| 4768 | `b_d` | – |

Column = gate·32 + unit, with gates in the order i, f, c~, o (the Keras
layout). A network trained with QKeras `quantized_bits(6, 1)`, that is 4
fractional bits, loads directly. For any other scale, change `WF` in
`qec_pkg`.

## Pauli frame, feedback and the logical result

`pauli_frame_unit` keeps, for each observable, the latest decoder verdict and
the parity of the corrections already applied to it. Their XOR is the frame
bit: the sign that is still wrong. The frame is updated one cycle after
`output_valid`. On a round the schedule marks for feedback, the same edge
emits `branch_valid` with `branch.x_on_d1` / `branch.z_on_d9` set for every
observable whose frame bit is 1. Each correction issued is counted as
applied, and its cancel request goes to `syndrome_calc`.

`logical_meas_result` forms the raw logical outcome, the parity of the data
readout over `Z_L` or `X_L`. The raw outcome already contains every physical
correction. With `final_pfu_en` set, the frame bit, updated by the decoder's
verdict on the final syndromes, is XORed in. This is the *final PFU*, which
also catches errors that only the final measurement reveals.

`round_controller` holds the schedule of a shot: `n_rounds` stabilizer rounds,
then the final measurement. Feedback follows every `fb_period`-th round when
`fb_period` is not 0, and follows the last round when `fb_final_en` is set.
Pulse `shot_start` to begin a shot.

## Top level (`cfm_top`)

Inputs: 12 DAQ links (`link_valid`, `link_data`, `link_mask`). Each link word
carries qubit states at their own positions: bits [7:0] are A1..A8 and bits
[16:8] are D1..D9. `link_mask` says which qubits a link carries. The
aggregator completes an event in the cycle when the last link in use reports.
`branch_valid` follows exactly 37 cycles later, and the logical result 38
cycles later.

Outputs:

- branch control, for the backplanes;
- the logical result;
- detection events, the 8 syndromes of every event;
- both decoders' outputs;
- the `overrun` and `dup_error` status flags.

The link and backplane protocols, the DAQs and the AWGs are not part of this
RTL.

## Choices made in this design

The published description does not cover any of the following:

- the fixed-point scales and widths;
- the Keras gate order;
- the stage-internal pipelining;
- how the 184 ns period arises; the recurrent-array schedule here reproduces it;
- the weight-port format;
- the link word format and the aggregation rule;
- the event tags and the schedule registers;
- treating the decoder output as cumulative, and the applied-correction bookkeeping;
- cancelling the A8 syndrome after a Z on D9; only the A2 case is described.

The stabilizer supports come from the device layout and agree with every
relation the text states. One sentence of the description gives A2 as
`Z1 Z3 Z4 Z5`. Its equation and the layout give `Z1 Z2 Z4 Z5`, and the
equation is followed here.

The RTL is sized for distance 3 only. Larger codes need wider inputs, more
hidden units and a new stabilizer map.

## Verification

Every module has a self-checking testbench in `tb/`. The neural-network tests
compare each round, bit for bit, with an integer reference model,
`tb/nn_ref_pkg.sv`, written separately from the RTL. They use random weights
and random syndromes, and they check the paper's cycle counts: stage entries
at 8, 12 and 18 cycles, the output at 31, the next `input_ready` at 46, and
the dense stage at 13. `tb_cfm_top` runs the whole module at its default
parameters through about 170 measurement events over all 12 links:

- both bases;
- final-round and periodic feedback;
- final PFU on and off;
- a weight reload between shots;
- a forced overrun.

It predicts every decoder output, branch word and logical result. It also
checks the 148 ns event-to-branch latency, and it counts corrections and
cancellations so that each mechanism has to occur.

Run a testbench with Verilator 5, listing the packages first:

    verilator --binary --timing --assert --top-module tb_cfm_top \
        rtl/qec_pkg.sv tb/nn_ref_pkg.sv rtl/*.sv tb/tb_cfm_top.sv -o sim
    obj_dir/sim

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

How far this can be trusted: the arithmetic and the control logic are checked
against models, but never against a trained network or recorded data. The
weights are random. Decoding accuracy therefore depends on training with the
same fixed-point rules. No synthesis timing at 250 MHz has been done. The
fully parallel stage-1 and dense computations, and the 128-multiplier
recurrent array, are written for clarity, not tuned for any FPGA.
