# A multiplier-free inference engine for Stochastic Configuration Machines

A Stochastic Configuration Machine (SCM) is a randomised neural network built for
industrial regression. Its output is a simple linear "mechanism" model plus a sum of
hidden-node contributions:

    Y = P(X) + sum_j beta_j * phi( lambda_j * (w_j . h) + b_j )

What makes it attractive in hardware is what it leaves out. Every hidden weight is
`-1` or `+1`, so one bit stores it. Each node has one scale `lambda`, a power of two
from 1 to 128, so a left shift applies it. If the model inputs are also made binary,
no product in the network needs a multiplier. This RTL implements that idea as a
synchronous pipeline:

- **Encoding.** Each real input in [0,1] is turned into a short vector of bits
  (`input_encoder`).
- **Dot products.** Each node's dot product with its binary weights is a bit count
  (`xnor_count`, `zero_one_dot`).
- **Node.** The count is shifted by lambda, the bias is added, and a threshold
  decides the node's output bit. That bit selects `+beta`, `-beta` or `0` as the
  node's contribution (`scm_node`).
- **Output.** The contributions and the mechanism model are added in Q7.25 fixed
  point (`output_summation`, `mechanism_model`).

A one-layer model with 25 binary inputs and 60 nodes produces a result 9 clock cycles
after its input is loaded. That is 90 ns at 100 MHz, and a new input can enter every
cycle.

The design follows the published description of an FPGA implementation of SCMs
(single-layer and deep). This document says where the RTL follows that description and
where it fills gaps with its own choices.

## Number formats

| quantity | format |
|---|---|
| model inputs after encoding | bits, `0` = -1, `1` = +1 |
| hidden weights | bits, `0` = -1, `1` = +1 |
| lambda | 3-bit shift `s`, lambda = 2^s, s = 0..7 |
| mechanism weights `p_k`, intercept `u`, bias `b`, output weights `beta`, result | 32-bit two's complement Q7.25 (sign, 7 integer bits, 25 fraction bits) |

All Q7.25 additions wrap at 32 bits. Overflow is left for model training to avoid,
because the source gives no rule for it. The node's pre-activation
`(dot << s) + bias` is the one exception. It is formed at a width large enough that
it can never overflow, because only its sign is used. Using Q7.25 for the bias is a
choice of this design: the source names the format only for the outputs, the
mechanism weights and the output weights.

## Turning inputs into bits (`input_encoder`)

Each feature, normalised to [0,1], is written as decimal digits. Each digit becomes
a right-aligned unary code:

| place | scheme 1 (`ENC_S1`, `PLACES`=u) | scheme 2 V1 (`ENC_S2V1`) | scheme 2 V2 (`ENC_S2V2`) |
|---|---|---|---|
| ones (0 or 1) | 1 bit | 1 bit | 1 bit |
| 1st decimal | 9 bits | 9 bits | 9 bits |
| 2nd decimal | 9 bits | 4 bits | 9 bits |
| 3rd decimal | 9 bits | 2 bits | 4 bits |
| 4th decimal | (9 bits for each further place) | - | 2 bits |
| bits per feature | 1 + 9u | 16 | 25 |

The field widths code a digit `d` as follows:

- **9-bit field:** `d` ones.
- **4-bit field:** `floor(d/2)` ones.
- **2-bit field:** `00` for 0-3, `01` for 4-6 and `11` for 7-9.

For example, 0.867 under scheme 1 with u = 3 gives `0 011111111 000111111 001111111`.
Under scheme 2 V2, 0.8674 gives `0 011111111 000111111 0111 01`. Within a feature,
the ones bit is the most significant bit, so the bits read like these printed
strings. Feature `f` occupies bits `[f*NB +: NB]`.

The original flow encodes on the host PC and keeps only the encoded bits on the
FPGA. In this design the encoder sits on the write port of the input buffer.
The host writes decimal digits, and the buffer still stores only encoded bits
(25 bits per DB1 sample instead of a 64-bit double). The density-based (thermometer)
encoding the source compares against is not implemented.

## Binary dot products

**{-1,1} inputs (`xnor_count`).** These are the encoded model inputs and the outputs
of a sign-activated layer. XNOR of input and weight marks each product that is +1.
The unit counts the ones `n1` and the zeros `n0`, and the dot product is `n1 - n0`.
For example, inputs `-1,1,1,-1` and weights `-1,1,-1,-1` give XNOR `1,1,1,0` and
3 - 1 = 2.

**{0,1} inputs (`zero_one_dot`).** These are the outputs of a step-activated layer.
Only inputs that are 1 contribute. The unit builds a "+1" flag vector (`x & w`) and
a "-1" flag vector (`x & ~w`), counts both, and subtracts. For example, inputs
`1,0,1,1` and weights `-1,1,-1,1` give flags `0001` and `1010`, and 1 - 2 = -1.

Both units have three stages: a register for the XNOR result (or the flag vectors),
a register for the two counts, and a register for the difference. With
`ADD_STAGES = 2`, each count is formed over two cycles: first two half-vector counts,
then their sum. This is the "addition hierarchy" that wide-input models need. It is
also applied to the mechanism-model sum.

## The node and its activation (`scm_node`)

| cycle | operation |
|---|---|
| 1 | XNOR / flag vectors |
| 2 | counts (2-3 with `ADD_STAGES = 2`) |
| 3 | difference |
| 4 | left shift by `s` |
| 5 | add bias (Q7.25, full width) |
| 6 | threshold: `bit = (pre >= 0)`; select the real output |

| activation | bit for the next layer | real output, bit = 1 | real output, bit = 0 |
|---|---|---|---|
| sign (`ACT_SIGN`) | 1/0 meaning +1/-1 | `beta` | `-beta` (two's complement) |
| step (`ACT_STEP`) | 1/0 meaning 1/0 | `beta` | `0` |

The source text is inconsistent on this point. Its paragraphs headed "sign" and
"step" describe the two behaviours the other way round. Its definition of the
activations and its node figure ("{-1,1} inputs with sign activation", "if 0 then
beta's two's complement") match the table above, and this design follows them.
The source's threshold is also written both as "less than 0 gives 0" and as
"greater than 0 gives 1". The RTL uses `pre >= 0 -> 1`. The two readings differ
only when the pre-activation is exactly zero.

The activation type of a layer also sets how the next layer computes its dot
product. A layer after a sign layer uses `xnor_count`; a layer after a step layer
uses `zero_one_dot`. `scm_core` derives this from the `ACT` parameter.

## Mechanism model (`mechanism_model`)

The mechanism model is linear: `P = u + sum_k x_k p_k` with `x_k = +-1`. In the first
cycle each term is `p_k` or its two's complement, chosen by the input bit. In the
second cycle the terms and `u` are added. With `ADD_STAGES = 2` the addition takes
two cycles instead of one. The weights come from LASSO regression offline. One
dataset in the source uses a machine-output mechanism model instead. The source
does not describe it, and it is not built here.

## Pipeline and timing (`scm_core`)

    in_bits -> [x_q] --+--> mechanism model --> delay ----------------------+
                       |                                                    v
                       +--> layer 1 (6 cyc) --> y1 --> group sums --> (+) --> acc1 --> delay --+
                                   | bits                                                      v
                                   +--> layer 2 (6 cyc) --> y2 --> group sums --> (+) --> acc2 ...

- **Cycle 1** (the clock edge that loads `x_q`): the sample enters the pipeline.
- **Cycles 2-7:** the mechanism model and layer 1 work in parallel.
- **Cycles 8-9:** layer 1's contributions are summed in groups of `GROUP` = 20.
  Then the group sums are added to the mechanism output.

In a deep model, layer k+1 starts on layer k's bits while layer k's summation runs.
The summations form a chain, mechanism -> layer 1 -> layer 2 -> layer 3. Delay lines
(`pipe_delay`) keep every running sum aligned with the sample it belongs to.

    LATENCY = 3 + N_LAYERS * (5 + ADD_STAGES)     (out_valid rises LATENCY edges after the loading edge)

| model | source (cycles) | this RTL |
|---|---|---|
| 1 layer, few inputs (DB1) | 9 | 9 |
| 1 layer, many inputs (DB2-4) | 10 | 10 (`ADD_STAGES=2`) |
| 2 layers | 18-19 | 15 / 17 |
| 3 layers | 23-24 | 21 / 24 |

For one layer the stage-by-stage schedule is the source's. For deep models the
source gives only totals, so those rows differ. The result is the same whatever
the pipeline depth.

The core accepts a new sample every cycle. `out_valid` marks each result.

## Parameter storage and configuration

Each layer keeps its parameters in registers (`layer_param_mem`): `N_IN` weight
bits, a 3-bit shift, a bias and a beta per node. Every node reads its parameters in
every cycle, so the store cannot be a block RAM. The trained model is written before
use through a 32-bit word port:

| `cfg_addr[19:16]` | meaning of `cfg_addr[15:0]` |
|---|---|
| 0 (mechanism) | `k < N_IN`: `p[k]`; `k == N_IN`: intercept `u` |
| 1..3 (layer) | `[15:14]` field (0 weights, 1 shift, 2 bias, 3 beta); `[13:0]` index |

For weights, the index is `{node, word}`. The word field is `max(1, clog2(ceil(N_IN/32)))`
bits wide, and weight `j` is bit `j % 32` of word `j / 32`. For the other fields,
the index is the node. The source does not say how a trained model reaches the
device, so this port and its address map are choices of this design.

## System wrapper (`scm_top`)

`scm_top` connects these blocks:

- **`input_encoder`** on the sample write port.
- **`input_buffer`**: `DEPTH` encoded samples, with synchronous read.
- **`scm_core`**: the model pipeline.
- **`sample_sequencer`**: issues the samples one at a time and returns the results.
- **`uart_tx`**: 8N1, `CLKS_PER_BIT` = 868, which gives 115200 baud at 100 MHz.

After `start`, samples `0 .. n_samples-1` run through the core one at a time. Each
32-bit result appears on `res_valid`/`res_y` and is sent least-significant byte
first. `done` pulses after the last byte. `stall_cycles` counts the cycles in which a
byte waited for the UART. The serial link limits the rate, not the model.

The source says only that inputs are held on the FPGA and outputs go to a PC over a
UART. The sequencing, byte order, framing and baud rate are choices of this design.

Defaults are the worked example: one feature, scheme 2 V2 (25 bits), one layer of 60
sign nodes, 300-sample buffer. Other published configurations are parameter sets:

| model | parameters |
|---|---|
| DB1 step | `ACT='{ACT_STEP,..}` |
| DB1 40-40-40 | `N_LAYERS=3, NODES='{40,40,40}` |
| DB2 (2 features, scheme 1, u=3, 56 bits) | `N_FEAT=2, SCHEME=ENC_S1, PLACES=3, ADD_STAGES=2` |
| DB3 (36 features, scheme 2 V1, 576 bits) | `N_FEAT=36, SCHEME=ENC_S2V1, NODES='{20,..}, ADD_STAGES=2` |
| DB4 (14 features, scheme 2 V1, 224 bits) | `N_FEAT=14, SCHEME=ENC_S2V1, NODES='{25,..}, ADD_STAGES=2` |

DB2's 4489-sample test set also needs `DEPTH` of at least 4489.

## Files

| file | content |
|---|---|
| `rtl/scm_pkg.sv` | Q7.25 type, activation and encoding enums, address map |
| `rtl/input_encoder.sv`, `rtl/input_buffer.sv` | input path |
| `rtl/xnor_count.sv`, `rtl/zero_one_dot.sv`, `rtl/scm_node.sv` | node arithmetic |
| `rtl/layer_param_mem.sv`, `rtl/scm_layer.sv` | a hidden layer |
| `rtl/mechanism_model.sv`, `rtl/output_summation.sv`, `rtl/pipe_delay.sv` | mechanism model and output chain |
| `rtl/scm_core.sv` | the model pipeline |
| `rtl/sample_sequencer.sv`, `rtl/uart_tx.sv`, `rtl/scm_top.sv` | system wrapper |
| `tb/scm_ref_pkg.sv` | reference model: encoding strings, integer SCM evaluation, config words |
| `tb/uart_rx_model.sv` | behavioural UART receiver |
| `tb/scm_core_check.sv` | drives and checks one core configuration; used by `scm_core_tb` and `scm_workloads_tb` |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `scm_workloads_tb` and `scm_top_full_tb` |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M`. Each compares against values
computed independently: the printed encoding examples, ±1 products summed one at a
time, and integer model evaluation.

- **`scm_core_tb`** runs five configurations taken from the published experiments,
  with random models. For each it checks every output and the latency (9, 10, 15, 24
  and 17 cycles).
- **`scm_workloads_tb`** runs the other nine network shapes from the published
  experiments through the core in the same way. These are DB1 60 step, 18 sign and
  40-40-40 sign; DB2 40-40-40 step; DB3 20 and 20-20-20 sign; and DB4 25 step,
  20-8 sign-sign and 20-18 step-step. Each run uses the encoded input width of its
  dataset.
- **`scm_top_tb`** runs the whole engine as a three-layer sign/step/sign model on 56
  encoded bits. It requires several events to occur: a value of 1.0, -beta outputs,
  zero step outputs, {0,1}-input layers and UART back-pressure.
- **`scm_top_full_tb`** runs the default build unchanged on 300 samples at the real
  baud rate. That is about 10.4 million cycles and takes roughly 25 s in Verilator.

To run one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/scm_pkg.sv tb/scm_ref_pkg.sv tb/scm_core_tb.sv --top-module scm_core_tb
    ./obj_dir/Vscm_core_tb

## Limits and departures

- Latency of deep models differs from the published totals; see the timing table.
- Encoding happens on the device, not on the host.
- The host interfaces are this design's own: parameter port, digit port, sequencer
  and UART framing.
- Density-based encoding and the machine-output mechanism model are not implemented.
- Numbers are taken on trust from training: no saturation; Q7.25 sums wrap.
- Power and FPGA resource figures from the source were not reproduced. No FPGA
  build was made.
