# DPD-NeuralEngine in SystemVerilog: a GRU pre-distorter at one sample per eight clocks

A power amplifier (PA) in a wideband transmitter is nonlinear. It compresses large
signals, and its output depends on recent inputs as well as the current one. Digital
pre-distortion (DPD) corrects this. The baseband I/Q stream goes through the PA's
approximate inverse before it reaches the PA, so that the cascade is close to linear.
The design here computes that inverse with a small recurrent neural network, a gated
recurrent unit (GRU). The GRU's hidden state carries the PA's memory from one sample to
the next.

The accelerator is described in *DPD-NeuralEngine: A 22-nm 6.6-TOPS/W/mm² Recurrent
Neural Network Accelerator for Wideband Power Amplifier Digital Pre-Distortion* (Li, Wu
et al., ISCAS 2025). The authors report a 22 nm chip running at 2 GHz. It takes 12-bit
I/Q samples at 250 MSps, which is one sample every 8 clock cycles, and its latency is
7.5 ns (15 cycles). This RTL rebuilds that accelerator from the published description.
The network, number format, activation functions, block structure, PE count, sample rate
and latency come from that description. The authors published no RTL, so the rest had to
be filled in: the split of the PEs between the arrays, the cycle schedule, the rounding
rule and the configuration ports are this implementation's own choices. They are listed
in the section on departures below.

## The network being computed

Each input sample `(I, Q)` is turned into four features:

    x_t = [ I,  Q,  I²+Q²,  (I²+Q²)² ]

These feed a single GRU layer with 10 hidden units. The GRU has three gates, reset `r`,
update `z` and candidate `n`, so it has 30 gate rows:

    r   = hardsigmoid( W_ir x + b_ir + W_hr h + b_hr )
    z   = hardsigmoid( W_iz x + b_iz + W_hz h + b_hz )
    n   = hardtanh   ( W_in x + b_in + r ⊙ (W_hn h + b_hn) )
    h_t = (1 − z) ⊙ n + z ⊙ h_{t−1}

A linear layer then maps the 10 hidden values to the two outputs:

    [I_y, Q_y] = W_fc h_t + b_fc

The parameter count is 30×4 + 30×10 + 30 + 30 + 2×10 + 2 = **502**. The logistic and tanh
functions are replaced by piecewise-linear "hard" versions. These need only comparators,
a shift and an add:

    hardsigmoid(x) = 0 for x < −2,  x/4 + 1/2 on [−2, 2],  1 for x > 2
    hardtanh(x)    = −1 for x < −1, x on [−1, 1],           1 for x > 1

## Number format and where precision is lost

Everything the chip stores or passes between blocks is **12-bit Q2.10**: a sign bit, one
integer bit and 10 fractional bits. The range is [−2, 2) and one LSB is 1/1024. This
covers weights, biases, features, gate values, the hidden state and the I/Q samples at
both ports. Inside that scheme, the design makes these choices:

| Point | Operation | Result |
|---|---|---|
| PE product | 12×12 → 24 bits, 20 fractional bits, kept in full | 32-bit accumulator |
| PE / array output | arithmetic shift right by 10 (floor), saturate to [−2048, 2047] | Q2.10 |
| `I²+Q²`, `(I²+Q²)²` | same as above; `I²+Q²` saturates once \|x\| > √2 | Q2.10 |
| gate pre-activation | sum of two Q2.10 values, kept at 14 bits before the hard function | 14 bits |
| `r·(W_hn h + b_hn)`, `z·(h−n)` | product floored to 10 fractional bits | — |
| `h_t = n + z·(h_{t−1} − n)` | saturated to Q2.10 | Q2.10 |

The gate pre-activations are kept wider than Q2.10, so `hardsigmoid` really reaches 0 and
1 and `hardtanh` really clips. If the sum were saturated to Q2.10 first, an input of
exactly 2 could never be represented. All rounding is floor. The published description
gives the format but not the rounding rule, so a model trained for the original chip may
differ from this RTL by an LSB here and there.

## Datapath

The design has these blocks (module names in brackets):

- **Preprocessor** (`dpd_preprocessor`, 2 PEs). It computes the four features.
- **Input PE array** (`dpd_input_pe_array`, 30 PEs). It computes `W_ih x + b_ih`, one PE
  per gate row. It reads one feature per cycle, so it takes 4 cycles.
- **Hidden PE array** (`dpd_hidden_pe_array`, 30 × 4 = 120 PEs). It computes
  `W_hh h_{t−1} + b_hh`. Each row has 4 lanes, so the 10 columns take 3 cycles. A lane
  adder then sums the partial results and adds the bias.
- **FC PE array** (`dpd_fc_pe_array`, 2 × 3 = 6 PEs). It computes `W_fc h_t + b_fc` in
  4 cycles, plus a lane-sum cycle and a requantise cycle.
- **Sigmoid/Tanh unit** (`dpd_sigmoid_tanh_unit`). It has 10 parallel lanes, one per
  hidden unit. Each lane has 2 hard sigmoids, 1 hard tanh and the two element-wise
  multipliers of the GRU. It produces `h_t`.
- **Weight buffer** (`dpd_weight_buffer`). It holds the 502 parameters and gives each
  array the weights of the current cycle.
- **Hidden-state buffer** (`dpd_hidden_state_buffer`). It holds `h_{t−1}` and gives each
  array the hidden-state values of the current cycle.
- **Control FSM** (`dpd_control_fsm`). It steps every block through the schedule below.

The arrays hold 30 + 120 + 6 = 156 PEs, and the preprocessor adds 2. Every PE (`dpd_pe`)
has one multiplier, one adder and one accumulator register. On its first cycle the
accumulator can be preloaded with a bias.

The connections follow the published block diagram. The weight buffer feeds all three
arrays. The preprocessor broadcasts into the input array. The hidden-state buffer feeds
the hidden and FC arrays. The input and hidden arrays feed the Sigmoid/Tanh unit, which
writes the hidden-state buffer. The FC array drives the outputs.

The input and hidden array results are kept apart, and are not summed before the
nonlinearity. This is because the reset gate multiplies only the hidden part of the
candidate row: `r ⊙ (W_hn h + b_hn)`.

## The sample schedule: meeting 8 cycles per sample with a recurrent loop

This is the part that needs the most care. A GRU cannot be pipelined across samples in
the usual way, because `h_t` is needed before `h_{t+1}` can start. The loop that limits
the rate is:

    hidden-array MAC → lane sum → gates r,z → candidate n → h_t → (next sample's hidden-array MAC)

It must close in 8 cycles. Everything outside the loop can overlap with the next sample.
This covers feature extraction, the input array, and the whole output layer. The
controller is a token shift register. A sample accepted in cycle 0 puts a token in
`tok[1]`, and the token moves on one place per cycle. Every enable and step index is
decoded from the token positions:

| Cycle after acceptance | Preprocessor | Input array | Hidden array | Sigmoid/Tanh | FC array | Output |
|---|---|---|---|---|---|---|
| 0 | — I/Q captured in the input register | | | | | |
| 1 | PE0: I·I | MAC I (+bias) | MAC h[0..3] (+first) | | | |
| 2 | PE0: +Q·Q | MAC Q | MAC h[4..7] | | | |
| 3 | PE1: \|x\|²·\|x\|² | MAC \|x\|² | MAC h[8..9] | | | |
| 4 | | MAC \|x\|⁴ | lane sum + b_hh, register | | | |
| 5 | | | | r, z registered | | |
| 6 | | | | n registered | | |
| 7 | | | | h_t written to buffer | | |
| 8–11 | | | | | MAC h_t[0..2], [3..5], [6..8], [9] | |
| 12 | | | | | lane sum + b_fc | |
| 13 | | | | | floor + saturate | |
| 14 | | | | | | output register load |
| 15 | | | | | | **out_valid** |

Feature extraction overlaps the input matrix product. I and Q are used straight away.
`|x|²` is ready one cycle after the preprocessor finishes it, just in time for the third
MAC, and `|x|⁴` is ready for the fourth.

The next sample can be accepted at cycle 8 at the earliest. Its hidden-array pass runs in
cycles 9–11 of the first sample's count, after `h_t` was written at cycle 7. Meanwhile
the first sample's FC pass uses cycles 8–13. Each unit is busy for at most 8 consecutive
cycles, so two samples in flight never claim the same unit in the same cycle. An
assertion in the controller checks the spacing.

The controller enforces the rate itself: `in_ready` is low for 7 cycles after each
acceptance. The result is:

- **Rate:** one sample per 8 cycles. That is 250 MSps at 2 GHz.
- **Latency:** `out_valid` rises exactly 15 cycles after acceptance. That is 7.5 ns at
  2 GHz.

The FC tail is split into a lane-sum cycle and a requantise cycle, and the outputs are
registered at the boundary. This gives the 15-cycle figure and keeps each cycle to one
adder or one saturation.

## Interface

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears control, hidden state and output registers) |
| `in_valid`, `in_ready` | in / out | 1 | sample handshake: accepted in a cycle where both are high |
| `in_i`, `in_q` | in | 12 | input sample, Q2.10 |
| `out_valid` | out | 1 | one-cycle strobe; `out_i`/`out_q` hold until the next result |
| `out_i`, `out_q` | out | 12 | pre-distorted sample, Q2.10 |
| `state_clr` | in | 1 | zero the hidden state (start of a new signal) |
| `w_we`, `w_addr`, `w_data` | in | 1, 9, 12 | write one parameter |
| `busy` | out | 1 | a sample is in flight |

**Parameter map** (row-major; the gate rows are ordered r 0–9, z 10–19, n 20–29, as in
PyTorch's `nn.GRU`):

| Addresses | Contents |
|---|---|
| 0–119 | `W_ih[30][4]`, address = row·4 + feature |
| 120–419 | `W_hh[30][10]` |
| 420–449 | `b_ih[30]` |
| 450–479 | `b_hh[30]` |
| 480–499 | `W_fc[2][10]` |
| 500–501 | `b_fc[2]` |

The weight buffer is not reset, so load all 502 words before sending samples. Write
weights and pulse `state_clr` only while `busy` is low. A write during a sample changes
the weights that sample is using.

## Files

`rtl/`:

- `dpd_pkg.sv`: types, sizes, the address map, the control word and the fixed-point
  helpers.
- `dpd_neural_engine.sv`: the top level.
- One file for each block above, plus `dpd_pe.sv`, `dpd_hardsigmoid.sv` and
  `dpd_hardtanh.sv`.

`tb/`:

- `dpd_ref_pkg.sv`: the reference arithmetic and a bit-exact GRU model (class
  `gru_ref`). It is written with real-valued floor division rather than shifts, so it is
  independent of the RTL.
- One self-checking testbench per block, for example `tb_dpd_pe.sv` and
  `tb_dpd_hidden_pe_array.sv`.
- `tb_dpd_neural_engine.sv`: the end-to-end test at the default size. It uses random
  parameters and a multi-tone signal. It runs bursts at the maximum rate and sparse
  traffic, two parameter loads and two state clears. Every output is compared bit-exactly
  with the model, and the 15-cycle latency and 8-cycle period are checked. It also counts
  and requires each of these to occur: refused requests, hard-sigmoid clipping at both
  ends, hard-tanh clipping, `|x|²` saturation and output saturation.
- `tb_dpd_ofdm_workload.sv`: the kind of signal the pre-distorter is meant for. The
  signal is 64-QAM OFDM, built with a 256-point IDFT at 250 MSps with 82 occupied
  subcarriers, which is about 80 MHz wide. It is clipped to 8.2 dB PAPR. It is streamed
  at full rate: 1024 samples take exactly 8 × 1023 cycles. At 2 GHz that is 250 MSps, or
  256.5 GOPS counted at the 1026 operations per sample the authors use.

Every testbench prints `TB_RESULT checks=N failures=M` and ends with a watchdog.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/dpd_pkg.sv tb/dpd_ref_pkg.sv tb/tb_dpd_neural_engine.sv \
        --top-module tb_dpd_neural_engine
    ./obj_dir/Vtb_dpd_neural_engine

The other testbenches run the same way. Every run takes well under a second of
simulation time.

## What can be trusted, and where this departs from the published design

The following are **taken from the published description**:

- the network: 4 features, 10 hidden units, 2 outputs, 502 parameters;
- the feature formula;
- the hard sigmoid and tanh;
- Q2.10 for everything;
- the block set, and which block feeds which;
- 2 preprocessor PEs and 156 array PEs;
- 8 cycles per sample and 15 cycles of latency.

The testbenches check all of this.

The following are **this implementation's own**. The published description does not give
them:

- **How the 156 PEs are divided**: 30 input / 120 hidden / 6 FC. This split adds up to
  156 and closes the recurrent loop in 8 cycles, but the chip's split is not published.
  The lane adders in the hidden and FC arrays follow from this choice.
- **The cycle schedule** in the table above. The only requirements it was built to meet
  are the rate and the latency.
- **Rounding**: floor at every requantisation, saturation at the points listed above,
  and 32-bit accumulators. Gate pre-activations are 14 bits wide.
- **Where the GRU's element-wise products sit.** The block diagram shows only
  "Sigmoid/Tanh" between the arrays and the hidden-state buffer. Here the two multiplies
  per unit are inside that block.
- **What the hidden-state buffer holds.** It is described as temporary storage for GRU
  computations. Here it holds only `h`. The gate values in flight sit in the Sigmoid/Tanh
  unit's pipeline registers.
- **Configuration**: the weight write port, the address map, the gate order, `state_clr`
  with a zero initial state, and the `in_valid`/`in_ready` handshake.
- **Weight buffer storage**: flip-flops, so that all arrays can read every cycle. The
  published description does not say whether the chip uses registers or SRAM.
- **Registers at the I/O boundary.** The block diagram draws unlabelled boxes on the
  I/Q lines at the chip edge. Pad cells are a library matter and are not modelled.

One figure in the publication also draws a "hidden FC" layer between the GRU and the
output layer. The text describes a single FC layer, and the 502-parameter count leaves no
room for a second one. This design follows the text.

The following are **not reproduced**:

- the trained parameters, so the linearisation figures (ACPR, EVM) cannot be reproduced
  here;
- the physical results: area 0.2 mm², 195 mW at 0.9 V, and the 2 GHz timing closure;
- the FPGA emulation and the LUT-based activation baseline. The published work compares
  against these, but they are not part of the chip.

This RTL has not been synthesised to a 22 nm library. Whether its critical path closes at
2 GHz is untested.
