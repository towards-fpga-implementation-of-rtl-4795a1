# biLSTM equalizer for fiber nonlinearity: RTL

In a long coherent optical link, the Kerr effect distorts each received symbol in a way that depends on its neighbours. Standard receiver processing removes chromatic dispersion and recovers the carrier, but it leaves this nonlinear distortion in place. The equalizer in this repository is a small neural network that sits after that processing. It looks at a window of 81 consecutive received symbols and returns corrected values for the 61 symbols in the middle.

The network is the one proposed for this purpose in published work on FPGA neural-network equalizers: a 34 GBd dual-polarization 16QAM signal over 17 × 70 km of LEAF fiber. That work compares it with a convolutional network, with digital backpropagation and with a plain dispersion-compensation filter. Those comparison designs are not part of this RTL. The layer sizes follow the publication. The hardware organisation, the number format details, the activation circuits and the interfaces are this design's own, because the publication produced its circuit with a high-level synthesis tool and does not describe it.

## The network

| stage | shape | what it does |
|---|---|---|
| input window | 81 × 4 | per symbol: X and Y polarization, in-phase and quadrature (XI, XQ, YI, YQ) |
| forward LSTM | 81 × 35 | 35 LSTM units, run from the first symbol to the last |
| backward LSTM | 81 × 35 | 35 further units with their own weights, run from the last symbol to the first |
| concatenation | 81 × 70 | forward states in channels 0–34, backward states in 35–69 |
| output convolution | 61 × 2 | 2 filters, kernel 21, no padding, linear output: XI and XQ |

Each LSTM unit follows the standard equations with gate order i, f, g, o:

    i = σ(W_i·[x_t, h_{t-1}] + b_i)    f = σ(W_f·[…] + b_f)
    g = tanh(W_g·[…] + b_g)            o = σ(W_o·[…] + b_o)
    c_t = f·c_{t-1} + i·g              h_t = o·tanh(c_t)

Here `[x_t, h_{t-1}]` is the 4 features of symbol t followed by the 35 outputs of the same direction at the previous step. `h` and `c` start at zero in every window. Because there is no padding, output symbol n (0…60) is centred on input symbol n+10: output 0 uses inputs 0…20, and output 60 uses inputs 60…80. Consecutive windows must therefore overlap by 20 symbols, 10 on each side, to cover a continuous stream. Forming the windows is up to whatever feeds the equalizer.

## Number format

Every value (weights, biases, activations, states) is a 32-bit two's complement number with 16 fraction bits (Q16.16). The publication stores its weights as 32-bit integers; the 16/16 split is this design's choice. One rule covers all arithmetic:

* A product `a·b` is formed at full width and floored to the data scale: `floor(a·b / 2^16)`.
* Such terms are added in a 64-bit accumulator, which cannot overflow at these sizes.
* A finished sum is saturated to the 32-bit range.

The two activations are built from shifts and adds, not from tables:

* σ(x) uses four straight segments on |x|. The breakpoints are 1, 2.375 and 5, and the slopes are 1/4, 1/8 and 1/32, starting at 0.5, 0.625 and 0.84375. Beyond |x| = 5 the value is 1, and σ(−x) = 1 − σ(x). The error is below 0.02.
* tanh(x) = 2σ(2x) − 1, with x clamped to ±8 first. The error is below 0.045.

These approximations change the network's numbers slightly compared with a floating-point model. Weights trained in floating point should be checked against them before use; the testbenches' reference package shows the exact arithmetic.

## Hardware organisation

```
in_* ──> input_buffer (81 x 4) ──┬──> lstm_direction fwd (35 x lstm_unit) ──> hidden_buffer fwd (81 x 35) ──┐
                                 └──> lstm_direction bwd (35 x lstm_unit) ──> hidden_buffer bwd (81 x 35) ──┴─> conv1d_output ──> out_*
```

* **lstm_unit**: one hidden unit. It has four 64-bit gate accumulators and its own weight store of 4 gates × (4 + 35 inputs + bias) = 160 words. The store is organised as 40 words of 128 bits, one per input and each holding all four gates' weights, so one read per cycle feeds all four gates. The unit also holds its c and h registers and instantiates three sigmoid circuits and two tanh circuits.
* **lstm_direction**: 35 units side by side and a small controller. In each time step the controller loads the biases (1 cycle), then broadcasts one input per cycle to all units: the 4 features, then the 35 previous outputs (39 cycles). It then updates c (1 cycle), computes h (1 cycle) and writes the 35 new h values as one row of the hidden buffer (1 cycle). That is 43 cycles per step and 81 × 43 + 1 = 3484 cycles per window. The forward and backward directions run at the same time, so each cycle uses 2 × 35 × 4 = 280 multipliers.
* **hidden_buffer**: the stored recurrent states of one direction, one 35-word row per time step. The publication also keeps these states in block RAM.
* **conv1d_output**: for each output symbol it loads the two biases (1 cycle), then takes one kernel tap per cycle (21 cycles). Each tap reads one 70-channel hidden row and one 70-word weight row per filter, and multiplies them, which takes 140 multipliers and two 70-input adder trees. The symbol is then offered on the output (1 cycle, or longer under back-pressure). That is 23 cycles per symbol.
* **bilstm_equalizer**: the top. It steps through load → LSTM → convolution for each window.

The schedule trades speed for size. The publication reports 61 symbols per clock at 270 MHz, which is 66 Gb/s. This design delivers 61 symbols per window of about 4 970 cycles. Reaching the published rate would need the whole network unrolled and pipelined, which the publication does not describe.

## Interfaces and timing (top level)

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `w_en`, `w_addr`, `w_data` | in | 1, 16, 32 | weight write; only while `busy` is low |
| `in_valid`, `in_ready`, `in_data` | in/out/in | 1, 1, 4×32 | one symbol (index 0 = XI, 1 = XQ, 2 = YI, 3 = YQ) per accepted cycle |
| `out_valid`, `out_ready`, `out_data` | out/in/out | 1, 1, 2×32 | one equalized symbol (0 = XI, 1 = XQ) per accepted cycle |
| `out_idx`, `out_last` | out | 6, 1 | position 0…60 within the window; high on position 60 |
| `busy` | out | 1 | a window is being loaded or processed |

Both streams use a valid/ready handshake: a transfer happens on a clock edge where both signals are high. `in_ready` is high only while a window is being loaded, so symbols offered while the previous window is being processed are held off. When `out_ready` is low, the convolution engine stalls and keeps its output stable. An assertion checks this.

Cycle counts, with a ready sink:
* LSTM stage: T·(4 + 35 + 4) + 1 = 3484 cycles.
* From the clock edge that accepts the last input symbol to the edge that delivers the first output: T·43 + N_K + 5 = 3509 cycles.
* Each further output: 23 cycles.
* A whole window: about 81 + 3486 + 1404 ≈ 4 970 cycles.

### Weight address map

`w_addr[15:14]` selects the region:

| region | `w_addr` fields |
|---|---|
| 0 forward LSTM, 1 backward LSTM | `[13:8]` unit 0…34, `[7:6]` gate (0 i, 1 f, 2 g, 3 o), `[5:0]` input: 0…3 features, 4…38 recurrent h_0…h_34, 39 bias |
| 2 output convolution | `[13]` filter (0 XI, 1 XQ), `[12:8]` tap 0…20, `[7:0]` channel 0…69; tap 21 with channel 0 is the filter's bias |

A Keras model maps onto this as follows. The LSTM `kernel` [4, 4·35] and `recurrent_kernel` [35, 4·35] are split column-wise into gate blocks in the order i, f, c, o, where c is g above. The Conv1D kernel [21, 70, 2] is indexed [tap, channel, filter]. Each value is multiplied by 2^16 and rounded.

## Files

`rtl/` holds one module or package per file:

| file | contents |
|---|---|
| `nneq_pkg.sv` | sizes, number format, `fx_sat`/`fx_term`/`fx_mul`, gate and region enums |
| `sigmoid_pla.sv`, `tanh_pla.sv` | activation circuits (combinational) |
| `lstm_unit.sv`, `lstm_direction.sv` | the recurrent layer |
| `input_buffer.sv`, `hidden_buffer.sv` | window and state memories |
| `conv1d_output.sv` | output layer |
| `bilstm_equalizer.sv` | top level |

Every module's parameters default to the published sizes: T_IN = 81, N_FEAT = 4, N_H = 35, N_F = 2, N_K = 21. They can be made smaller for experiments. The address map limits N_H to 64 and N_FEAT + N_H to 63.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches compare the module against an independent integer model in `tb/nneq_ref_pkg.sv`, which uses divisions where the RTL uses shifts:

* `tb_nneq_pkg`: the multiply, floor and saturate helpers, including products that must saturate.
* `tb_sigmoid_pla`, `tb_tanh_pla`: a dense sweep, random values and the extremes. Each result is checked bit for bit against the model, and its error is checked against the exact functions.
* `tb_lstm_unit`: 12 time steps with random weights and inputs, with a state clear in the middle.
* `tb_lstm_direction`: forward and backward instances at reduced size (5 units, 7 steps), two windows. It checks every hidden row and the exact busy time.
* `tb_input_buffer`, `tb_hidden_buffer`: writes, and reads in both time orders.
* `tb_conv1d_output`: reduced size. It checks every output, the exact cycle count with a ready sink, and that the output holds under random back-pressure.
* `tb_bilstm_equalizer`: the complete design at the published sizes. It loads all 14 142 weights and runs three windows with input gaps, held-off input and random output back-pressure. It compares all 3 × 61 × 2 outputs with a reference model of the whole network, checks the 3509-cycle latency, and counts each of these events. It runs in well under a minute.

To simulate with Verilator, for example:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        --top-module tb_bilstm_equalizer \
        rtl/nneq_pkg.sv tb/nneq_ref_pkg.sv tb/tb_bilstm_equalizer.sv
    ./obj_dir/Vtb_bilstm_equalizer

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## How far it follows the published design

Taken from the publication:
* the network structure and every size: 81 × 4 input, biLSTM with 35 units per direction, tanh, concatenation to 70 channels, Conv1D with 2 filters, kernel 21, no padding, linear output, 61 × 2 output;
* 32-bit fixed-point weights;
* keeping the recurrent states in a memory.

This design's own choices:
* the Q16.16 split and the floor/saturate rules;
* the sigmoid gates (standard for an LSTM, but not stated in the publication) and both activation approximations;
* the one-input-per-cycle schedule, with the two directions running concurrently;
* the window-at-a-time sequencing and the streaming interfaces;
* the weight address map;
* the zero initial state for each window.

Not reproduced:
* the published throughput (66 Gb/s) and latency (33.4 µs). If this design were clocked at 270 MHz, a window would take about 18 µs, and the time from the last input symbol to the first output would be 13 µs. Its throughput would be 61 × 4 bits per 4 970 cycles, about 13 Mb/s, a factor of about 5 000 below the published figure.
* the published resource figures (1260 DSP slices, 164 block RAMs) and the 270 MHz clock, which belong to the published high-level-synthesis result.
* the trained weights and the transmission data. No bit-error-rate or Q-factor figure can be reproduced from this RTL alone.
