# A 20-cycle neural-network discriminator for five-qubit multiplexed readout

Superconducting qubits are read out by sending a microwave tone through a
resonator coupled to each qubit. The tone comes back with a small,
state-dependent phase shift. Five resonators at different frequencies share
one feedline, so one digitised I/Q trace carries all five qubits' information
and all their crosstalk. A matched filter per qubit handles each tone on its
own. A neural network that sees the whole trace can also learn the crosstalk.
The cost is computation, and for error-correction feedback the decision has to
arrive within tens of nanoseconds.

This RTL implements such a network as a fixed-function, fully pipelined
datapath. One readout trace of 1 µs goes in: 512 I samples and 512 Q samples.
Five state bits come out 20 clock cycles after the trace's last sample. Every
multiply of the network happens in the same clock cycle, and a new trace can
follow right behind the previous one.

The network, quantisation and segmentation follow a published FPGA design
(the "Arch-7" network of Gautam et al., *Low-latency machine learning FPGA
accelerator for multi-qubit-state discrimination*). That design was generated
by a dataflow compiler for quantised networks. The RTL here is a hand-written equivalent. The section
"What is this design's own" lists every point where the publication says
nothing and a choice had to be made.

## The network

```
 I/Q samples ──► boxcar ──► 512 x 4-bit features
 (2+2 per beat)              │
       ┌─────────┬───────────┼───── ... ─────┐
       ▼         ▼           ▼               ▼
   segment 0  segment 1  segment 2  ...  segment 7     8 MVTUs, each 512 -> 8
   (8 nodes)  (8 nodes)                  (8 nodes)     2-bit weights, 2-bit out
       └─────────┴─────── concat ────────────┘
                             ▼
                     64 x 2-bit hidden
                             ▼
                      output MVTU 64 -> 5               2-bit weights, 1 threshold
                             ▼
                     qubit_state[4:0]
```

| quantity | value |
|---|---|
| input features | 512 = 256 boxcar-averaged I + 256 boxcar-averaged Q |
| input precision | 4-bit signed |
| weights | 2-bit signed (−2, −1, 0, 1) |
| hidden layer | 64 nodes = 8 segments × 8 nodes, 2-bit unsigned activations |
| output | 5 nodes, one per qubit, 1 bit each |
| weights stored | 8 × 8 × 512 + 5 × 64 = 33,088 |
| thresholds stored | 64 × 3 + 5 × 1 |
| latency | 1 (boxcar) + 11 (segment layer) + 8 (output layer) = 20 clocks |
| throughput | one trace per 256 input beats; no dead cycles between traces |

The output layer has one node per qubit, not one per basis state. Five
sigmoid-style outputs replace the 2⁵ = 32 outputs of a softmax classifier. The
network therefore grows linearly with the number of qubits.

## Why the hidden layer is split into segments

A 512 × 64 layer has 32,768 weights. The original compiler builds one
matrix-vector unit per layer and folds it in time when the layer is too wide.
For this layer, folding meant 33 cycles. Cutting the layer into eight
independent 512 × 8 sub-layers ("segments") lets each one be built as its own
fully parallel unit. The eight units run side by side, and their outputs are
simply placed next to each other.

Mathematically nothing changes: every hidden node still sees all 512 inputs.
A trained, unsplit 512 × 64 layer can be loaded unchanged. Segment *s*, node
*n* is hidden node 8*s* + *n*. Only the structure and the latency differ. The
concatenation is wiring (`hidden = seg_act` in `qnn_arch7_top`).

## Matrix-vector-threshold units (`mvtu`, `mvtu_pe`)

Each layer is one MVTU: MH processing elements (PEs), one per output node,
sharing SIMD input lanes. Inside a PE:

```
in_data[SIMD] ─► × weight (mvtu_weight_mem) ─► adder_tree ─► + accumulator ─► ≥ thresholds ─► act
                  combinational               log2(SIMD)     1 register      (mvtu_threshold)
                                              registers                       1 register
```

* **Multipliers** are combinational. A 4-bit × 2-bit product is a few LUTs.
  Second-layer inputs are unsigned activations (`IN_SIGNED = 0`), extended by
  one zero bit before the signed multiply.
* **Adder tree** (`adder_tree`): a binary tree with one register per level. For
  512 lanes that is 9 levels, for 64 lanes 6. The sum width is
  `input bits + weight bits + log2(MW)`, so it cannot overflow.
* **Accumulator**: with `SIMD < MW` a vector arrives as `MW/SIMD` beats
  ("folds"). The PE counts them, clears the accumulator on the first fold and
  forwards the sum after the last one. In the discriminator `SIMD = MW`: one
  fold, one vector per clock. Folding is kept because it is the natural way to
  trade area for latency, and it is tested.
* **Thresholds** (`mvtu_threshold`): the activation is the number of stored
  thresholds the accumulator reaches, `act = Σ_t [acc ≥ T_t]`. For 2-bit
  activations there are 3 thresholds; the output layer has 1. There is no
  separate bias, batch normalisation or ReLU in hardware. All three are
  monotone functions of the accumulator, so together with quantisation they
  reduce to "which interval is the sum in".

Latency of a PE at one fold is `log2(SIMD) + 2`. That is 11 for a segment and
8 for the output layer, 19 in total. This matches the 19 cycles published for
the network. The boxcar adds one more.

### Turning a trained layer into thresholds

Suppose a trained node computes `y = s·acc + b`. Here `acc` is the integer dot
product of the integer inputs and weights, `s` the product of their scales and
`b` the bias. Batch normalisation follows with (γ, β, μ, σ), then ReLU, then
uniform quantisation with step Δ to levels 0..3. The node outputs at least
level *k* when

    γ·(s·acc + b − μ)/σ + β ≥ (k − ½)·Δ

For γ > 0 this is `acc ≥ T_k` with

    T_k = ceil( ( μ + σ·((k − ½)·Δ − β)/γ − b ) / s ),   k = 1, 2, 3

For γ < 0 the inequality flips. Negate the node's weights and use
`T_k = ceil(−(…)/s)` from the mirrored inequality. Thresholds must be
ascending. For the output layer, one threshold at the logit's decision point
(logit ≥ 0) gives the state bit. If the trained network requantises the
segment outputs to one common scale before concatenation, fold that rescaling
into the same thresholds. It then needs no hardware.

## Boxcar front end (`boxcar_filter`)

The fabric clock is slower than the ADC sample rate, so each input beat
carries two consecutive I samples and two Q samples (8-bit signed). The boxcar
adds each pair. It keeps the 4 most significant bits of the 9-bit sum, which
is the average truncated toward −∞. The I result of beat *k* becomes feature
*k* and the Q result becomes feature 256 + *k*. After 256 beats the 512-feature
vector is complete and `m_valid` pulses one clock after the last beat. The
vector is held in registers. The next trace may start in the very next beat,
because the network samples the vector on the same edge that overwrites its
first element.

A trace is simply the next 256 valid beats after reset or after the previous
trace. There is no start marker. Upstream logic must keep `adc_valid` aligned
to readout windows, or reset the block to re-align. A 1 µs window at 500 MS/s
holds about 500 samples per channel, but the network takes exactly 512 per
channel. How the remainder is filled (a longer window or zero padding) has to
match whatever was done with the training data.

## Loading weights and thresholds

All parameters are held in registers so that a whole layer is read in one
cycle. They are written through `cfg` (type `qnn_pkg::cfg_wr_t`), one 32-bit
write per clock:

| field | meaning |
|---|---|
| `we` | write strobe |
| `kind` | `CFG_WEIGHT` or `CFG_THRESH` |
| `unit` | 0..7 = segment MVTUs, 8 = output MVTU |
| `addr` | weights: `node * (MW/16) + word`; thresholds: `node * 2^OBITS + index` |
| `data` | weights: 16 two-bit weights, weight *j* in bits `[2j+1:2j]`, weight index `word*16 + j`; thresholds: two's complement, low `ACC_BITS` bits used (15 for segments, 11 for the output layer) |

A segment node has 32 weight words and 3 thresholds. An output node has 4
weight words and 1 threshold. A complete load is 2,085 writes. Registers are
not reset. Load everything before the first trace; results before that are
meaningless.

## Interface and timing of the top (`qnn_arch7_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset of control state |
| `cfg` | in | `cfg_wr_t` | parameter writes (above) |
| `adc_valid` | in | 1 | one beat of samples present |
| `adc_i`, `adc_q` | in | 2 × 8 signed | two consecutive I (Q) samples |
| `state_valid` | out | 1 | one-clock pulse per trace |
| `qubit_state` | out | 5 | bit *q* = 1: qubit *q* measured in its excited state |

If the trace's last beat is presented on the rising edge *n*, `state_valid` is
high after edge *n* + 20. There is no back-pressure anywhere. The datapath
accepts one beat per clock and never stalls, as a readout path should.

## What follows the publication and what is this design's own

Taken from the publication: the network shape ((512 × 8) × 8) × 5, the 4/2/2
bit quantisation, the 2-point boxcar producing 512 features from 1024 samples,
the eight parallel segment units followed by concatenation and one output
unit, the PE's chain of weight memory → multiplier → adder tree → accumulator
→ threshold comparator, the 8-bit I/Q input width, five outputs for five
qubits, and the 19 + 1 cycle latency.

Chosen here, where the publication is silent:

* two samples per channel per beat, truncating 4-bit quantisation of the
  boxcar sum, I-then-Q feature order, trace framing by beat count;
* two's-complement 2-bit weights (−2..1) and unsigned 2-bit activations;
* thresholds as the only per-node parameters (bias, batch norm, ReLU and the
  requantisation before concatenation are folded in);
* one threshold per output node to make the state decision;
* a register per adder-tree level, chosen so that the total is 19 cycles;
* run-time parameter loading through a 32-bit write port. The published flow
  fixes trained weights at build time, and no trained weights are published;
* a valid-only stream with no handshake;
* synchronous active-low reset of control state only.

Outside this RTL: the RF-ADC, the digital down-converter that produces I/Q,
the clocking, pulse generation and any feedback logic. The same publication
also describes a deeper "piecewise" network (256 × 128 × 128 × 128 × 128 × 5)
as an alternative with a different structure, and a demodulation-plus-SVM
discriminator for comparison. Neither is implemented here.

## Which networks fit

At its default parameters the design holds the segmented 512 × 64 × 5 network
with 2-bit weights and activations. It also holds the unsplit 512 × 64 × 5
network with the same quantisation, since the function is identical. With
thresholds set to give 1-bit activations, it holds the binarised variant.
Deeper or wider networks (more layers, 1024 inputs, 4-bit activations) need
different top-level wiring. `mvtu` itself is parameterised in `MW`, `MH`,
`SIMD`, `IN_BITS`, `W_BITS` and `OBITS` and can be reused for them.

## Files

| file | content |
|---|---|
| `rtl/qnn_pkg.sv` | sizes, bit widths, configuration record |
| `rtl/boxcar_filter.sv` | front end: pairwise averaging, 4-bit quantisation, vector assembly |
| `rtl/adder_tree.sv` | pipelined binary adder tree |
| `rtl/mvtu_weight_mem.sv` | per-PE weight registers, fold selection |
| `rtl/mvtu_threshold.sv` | per-PE threshold registers and comparators |
| `rtl/mvtu_pe.sv` | processing element (one neuron) |
| `rtl/mvtu.sv` | one layer: PE array and configuration decode |
| `rtl/qnn_arch7_top.sv` | the discriminator |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and finishes; a
watchdog ends it if it hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_qnn_arch7_top \
    -Irtl rtl/qnn_pkg.sv rtl/*.sv tb/tb_qnn_arch7_top.sv -o sim
./obj_dir/sim
```

Replace the top-module and testbench file for the unit tests (`tb_boxcar_filter`,
`tb_adder_tree`, `tb_mvtu_weight_mem`, `tb_mvtu_threshold`, `tb_mvtu_pe`,
`tb_mvtu`). The end-to-end test runs the design at its full default size. It
loads random weights, sends 24 traces (back to back and with idle beats), and
checks every state bit and the 20-cycle latency against a reference model
written in the testbench. It also checks that rectified (0) and saturated (3)
hidden activations and both states of every qubit occurred. Building it takes
about two minutes, and running it a few seconds.

Testbenches drive inputs on the falling clock edge with blocking assignments.
That keeps them free of races with the design's rising-edge registers.

## How far to trust it

Every module is checked against an independent model in its testbench,
including the cycle counts. The end-to-end test uses random weights,
thresholds and traces, not a trained network or measured readout data. It
shows that the datapath computes the specified quantised network exactly. It
says nothing about readout fidelity. That depends on the trained parameters,
which must be produced by quantisation-aware training and converted as
described above.

The design has not been placed and routed. All 33,088 weights live in
flip-flops, and the 64 first-layer adder trees each reduce 512 products per
clock. Expect a large register and LUT count. The published implementation
reports about 107k LUTs and 61k flip-flops for the same network on an RFSoC,
at 403 MHz.
