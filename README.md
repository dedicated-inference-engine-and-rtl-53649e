# A multiplier-free inference engine for binary-weight networks

This is synthesizable SystemVerilog for an inference engine for binary-weight
neural networks (BNNs). In these networks the weights are 1 bit and the
activations are J-bit unsigned integers (J = 8 here, "A8W1"). The design
follows the engine in "Dedicated Inference Engine and Binary-Weight Neural
Networks for Lightweight Instance Segmentation" (Chen et al.). That paper
uses the engine to run compact instance-segmentation networks: SegNeXt or
ConvNeXtV2 backbones with a SparseInst decoder. The paper's authors did not
write this RTL. The paper describes the arithmetic and the block structure.
The sizes, memory organisation, control and handshakes here are one
reasonable way to complete it, and each is marked as such below.

## The idea: move every weight-only term out of the datapath

A layer computes, for each output channel,

    o = sum_{i<I} a_i * w_i + beta

Each activation `a_i` has J bits `a_{i,j}`. The weight is one bit, and the
engine supports two meanings for that bit. The operation mode `m` picks one
per layer.

| mode | weight values | bit `w'` stored | per-bit operation | bit result |
|------|---------------|-----------------|-------------------|------------|
| m = 0 | w in {-1,+1} | w' = (w+1)/2 | XNOR(a_{i,j}, w') | a bit if w=+1, inverted bit if w=-1 |
| m = 1 | w' in {0,1} | w' | AND(a_{i,j}, w') | a bit if w'=1, 0 if w'=0 |

In mode 1 the J result bits, read as a number, are exactly `a_i * w'_i`.
In mode 0 they form `a_i` when w = +1 and `2^J - 1 - a_i` when w = -1.
That is, `a_i * w_i + (2^J - 1)` whenever the weight is -1. Summed over i:

    sum_i XNORword(a_i, w'_i) = sum_i a_i w_i - gamma,
    gamma = ((sum_i w_i - I) / 2) * (2^J - 1)

`gamma` depends only on the weights. So it is computed once, off the engine,
and folded into the bias. The engine stores `beta + gamma` per output
channel and never handles the correction. A small example with J = 8 and
I = 2, activations (10, 3), weights (+1, -1):

* the true result is 10 - 3 = 7;
* the XNOR words are 10 and 252, so the accumulator holds 262;
* gamma = ((0 - 2) / 2) * 255 = -255, and 262 + (-255) = 7.

Mode 1 lets the same hardware multiply by {0,1} masks. The paper uses this
for the binarized instance activation maps of the SparseInst decoder. It
reports that supporting both {0,1} and +-1 operands raises "Person" mask AP
from 14.35 % to 32.97 %, compared with +-1 alone.

The paper's gate-count comparison (Table 6) covers only this MAC array.
Against re-implemented baselines at 8-bit activations and 2 GHz, it reports
211K gates for the array, against 356K for a selector-based design and 404K
for an XNOR design with correction logic. This RTL does not reproduce those
numbers.

## Block structure

```
 img_* ──► feature_memory_bus ◄──► feature_memory (4096 x 16 x 8 bit, 1W 2R)
              │ port A: 1 activation, or a whole word    │ port A/B: words (element-wise)
              │         (depthwise)                      │
              ▼                                          ▼
   bitwise_accumulation_array ──MAC results──► adder_array ──sums──► quant_act_unit ──► out_*
   (16 x bitwise_mac_unit =                      ▲   (MAC + (beta+gamma)               │
    bitwise_operation_unit                       │    or map A + map B)                │
    (J x logical_operation_unit)                 │                                     │
    + adder + buffer)                            │                      write-back ◄───┘
              ▲ weight bits (16 per cycle)       │ beta+gamma word
              └──────────── param_memory_bus ◄──► param_memory (weights 8192 x 16 bit,
 wt_*, bg_* ──►                                                 beta+gamma 256 x 16 x 32 bit)
                control_unit: sequences one layer from a layer_cfg_t descriptor
```

The paper names all of these blocks. It describes the insides of the
logical operation unit, the bitwise operation unit and the bitwise MAC unit
(adder plus "buffer", i.e. the accumulator). It gives the function of the
array, the adder array and the quantization and activation unit. It only
names the memories, the two memory buses and the control unit.

### Datapath

* `logical_operation_unit` computes `o = (a & w) | (~m & ~a & ~w)`. That is
  XNOR when m = 0 and AND when m = 1.
* `bitwise_operation_unit` holds J of these units sharing one weight bit,
  and produces the J-bit word.
* `bitwise_mac_unit` adds that word into a 24-bit accumulator each cycle.
  `clear` starts a new sum and `last` ends it. `acc_valid` follows `last` by
  one cycle. Sums can follow each other with no gap.
* `bitwise_accumulation_array` has LANES = 16 MAC units. For a convolution
  or matrix product, one activation per cycle is broadcast to all of them.
  Each lane gets the weight bit of a different output channel, so 16 output
  channels of one pixel build up in parallel. For a depthwise convolution,
  lane l instead takes the activation of its own channel l from the word
  read, so 16 channels are filtered in parallel.
* `adder_array` adds the 32-bit signed `beta+gamma` of each channel to its
  MAC result. In element-wise layers it instead adds two feature-map words,
  lane by lane. The paper states that the adder array also does element-wise
  adds (residual connections).
* `quant_act_unit` does `q = clip(sum >>> shift, 0, 2^J - 1)`. The lower
  clip is the ReLU-type activation. It then takes a running maximum across a
  pooling window of consecutive inputs.

### Quantization: a simplification

The paper says the unit "quantizes" and "computes pooling" and refers to
IFQ-Net's threshold-based quantization. The quantizer is not specified.
This design uses a per-layer power-of-two shift and saturation. A network
trained for IFQ-Net thresholds would need its scales rounded to powers of
two, or a threshold quantizer in place of `quant_act_unit`.

## Running a layer

The host loads data and parameters, then starts one layer at a time with a
`bnn_pkg::layer_cfg_t` descriptor.

| field | meaning |
|-------|---------|
| `op` | `OP_MAC` (binary-weight product), `OP_DWCONV` (depthwise binary conv) or `OP_ELTWISE` (element-wise add) |
| `mode` | m: `MODE_XNOR` (+-1 weights) or `MODE_AND` ({0,1} weights) |
| `n_in` | I, the activations (OP_MAC) or taps (OP_DWCONV) summed per output |
| `n_rows` | P, the input rows (pixels) |
| `n_groups` | G, the output channel groups of 16 |
| `in_base`, `in2_base`, `out_base` | feature memory word addresses |
| `w_base`, `b_base` | weight and beta+gamma word addresses |
| `shift`, `pool` | quantizer shift; rows per max-pooling window (0 or 1 = none) |

### Memory layout

* **Feature rows.** A row of C channels takes `ceil(C/16)` consecutive
  words. Channel c sits in word `c/16`, lane `c%16`.
* **OP_MAC inputs.** Row p starts at `in_base + p*ceil(I/16)`.
* **OP_MAC outputs.** Output group g of row p goes to
  `out_base + (p/pool)*G + g`. The output of one layer can therefore be the
  input of the next, with I = 16*G.
* **Weights.** Weight word `w_base + g*I + i` holds bit w'_i of the 16
  channels of group g. Bit l belongs to channel 16g + l.
* **beta+gamma.** Word `b_base + g` holds the 16 signed 32-bit values of
  group g.
* **OP_DWCONV.** Tap t of output row p for channel group g is read from
  `in_base + (p*I + t)*G + g`. Weight word `w_base + g*I + t` holds tap t of
  the 16 channels of group g. Outputs, beta+gamma and pooling are as for
  OP_MAC.
* **OP_ELTWISE.** Element (p, g) is read from `in_base + p*G + g` and
  `in2_base + p*G + g`.

A 1x1 convolution or a matrix product maps directly onto rows. A k x k
convolution needs the host to lay out the k*k*C inputs of each output pixel
as one row (im2col). A k x k depthwise convolution likewise needs the k*k
taps of each output pixel laid out one after another. The paper says nothing about address generation for
convolution windows, and none is built. Up-sampling, sigmoid, bilinear
interpolation and the binarization steps of the networks are not engine
operations in the paper, and are not built either.

### Timing

The control unit issues one request per cycle. Loop order is group, then
row, then input.

* An OP_MAC or OP_DWCONV layer has N = G*P*I requests. An OP_ELTWISE layer
  has N = G*P.
* The pipeline is: memory read, accumulate, add, quantize, write.
* Jobs overlap. The next output's first term is read in the cycle after the
  previous output's last term.
* With `start` sampled in cycle S, requests go out in cycles S+1 .. S+N.
  `done` pulses in cycle S+N+6.

Throughput is 16 binary MACs per cycle. For the paper's networks (about
6 GMAC per VGA frame) that is about 375 M cycles per frame, before any data
loading. LANES sets this rate. The paper gives no lane count.

### Top-level ports (`bnn_inference_engine`)

| port | direction | meaning |
|------|-----------|---------|
| `start`, `cfg` | in | start a layer (only when `busy` is low) |
| `busy`, `done` | out | layer running; one-cycle pulse at the end |
| `img_valid/img_ready/img_addr/img_data` | in/out | write a 16 x 8-bit word into the feature memory |
| `wt_valid/wt_addr/wt_data` | in | write 16 weight bits (no handshake) |
| `bg_valid/bg_addr/bg_data` | in | write 16 beta+gamma values (no handshake) |
| `out_valid/out_addr/out_data` | out | every output word, as it is written back |

`img_ready` is low in cycles where the engine writes back. A stalled image
write must hold its request; an assertion checks this. Image words can be
loaded while a layer runs, as long as they do not overwrite that layer's
operands.

### Preparing parameters off the engine

For each output channel k of a mode-0 layer:
`beta_gamma[k] = beta[k] + ((sum_i w[k][i] - I) / 2) * (2^J - 1)`.
`sum_i w - I` is always even, so the division is exact. For mode-1 layers,
`beta_gamma[k] = beta[k]`. The weight bit stored is 1 for +1 (or for 1) and
0 for -1 (or for 0).

## Parameters

| parameter | default | source |
|-----------|---------|--------|
| J (`J_BITS`) activation bits | 8 | paper |
| LANES (`N_LANES`) MAC units | 16 | own choice (paper: "multiple") |
| ACC_W accumulator bits | 24 | own choice (holds I up to 65793 at J = 8) |
| BIAS_W beta+gamma / sum bits | 32 | own choice |
| FM_DEPTH feature words | 4096 (64 KiB) | own choice |
| W_DEPTH weight words | 8192 (128 Kbit) | own choice (largest layer of the MSCAN network, 256x512, fits exactly) |
| B_DEPTH beta+gamma words | 256 | own choice |

LANES must be a power of two. J can be 1..16; the paper studies 1, 2, 4, 8
and 16 bits. With J = 16, widen ACC_W for I above 256.

## What the networks need

The paper's networks do not fit on-chip as a whole. MSCAN-SparseInst BNN
has 0.49 MB of 1-bit weights and 153 layers. A VGA input alone is
640*480*3 bytes, about 900 KiB. Both far exceed the 128 Kbit of weights and
64 KiB of features held here.

Each layer's weights do fit, so a host must run the network layer by layer
and tile feature maps through the feature memory. The paper gives no
on-chip memory sizes to compare with. `tb_workload_layers` runs five layers
with the network's real channel counts on small spatial tiles:

* the FPN 1x1 convolution, 256 to 128 channels;
* the IAM 3x3 convolution, 128 to 32 channels, with I = 1152;
* the {0,1} x features matrix product for 32 instances;
* the +-1 x mask-features matrix product for 32 instances;
* a 7x7 depthwise convolution (BDWConv) of a stage-2 building block, on 64
  channels.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference values are
computed independently with signed integer arithmetic on the real +-1 or
{0,1} weights, so the XNOR/correction identity itself is under test.

* `tb_logical_operation_unit`, `tb_bitwise_operation_unit` check the truth
  tables and the word meaning, at J = 8 and J = 4.
* `tb_bitwise_mac_unit`, `tb_bitwise_accumulation_array` run back-to-back
  random sums in both modes. For m = 0 they check that the result plus
  gamma equals the true dot product.
* `tb_adder_array`, `tb_quant_act_unit` cover bias and element-wise adds,
  shifts, clipping at both ends, and pooling windows of 1 to 4.
* `tb_feature_memory`, `tb_param_memory`, `tb_feature_memory_bus`,
  `tb_param_memory_bus` cover read latency and hold, read-first on
  collisions, write-back priority, stalled image writes and beta+gamma
  alignment.
* `tb_control_unit` checks every request address, MAC flag, pooling flag and
  write address against the loop nest, and checks N + 6 cycles per layer.
* `tb_bnn_inference_engine` runs at the default parameters. Three chained
  layers (XNOR conv, AND conv with 2-row max pooling, element-wise add) run
  while image writes collide with write-backs, then a 3x3 depthwise layer. It counts every mechanism and
  checks every output word and the cycle count of each layer.
* `tb_workload_layers` runs the network layers listed above at the default
  parameters.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert --top-module tb_bnn_inference_engine \
  -y rtl -y tb +libext+.sv -Irtl rtl/bnn_pkg.sv tb/tb_bnn_inference_engine.sv
./obj_dir/Vtb_bnn_inference_engine
```

All testbenches finish in well under a second of simulation time.

## Where this design departs from or adds to the paper

* **Own choices.** Lane count, accumulator and bias widths, memory sizes and
  organisation, the two-read-port feature memory, bus arbitration, the
  descriptor-driven control unit and its schedule, the per-lane
  activation path for depthwise layers, and reset behaviour
  (asynchronous, active low; memory arrays are not reset).
* **Quantizer.** Shift-and-saturate rather than the threshold quantizer of
  IFQ-Net, which the paper cites but does not specify.
* **Pooling.** Max pooling over consecutive rows only. The host orders rows
  so that a window's pixels are adjacent.
* **Element-wise add.** Sums two stored 8-bit maps. The paper says only that
  the adder array can do element-wise adds.
* **Logical operation unit.** Written from the stated XNOR/AND behaviour, as
  a sum of products. The paper's figure draws the gates but prints no gate
  types.
* **Not built.** The processor that computes beta+gamma and the external
  parameter storage lie outside the engine in the paper; the testbenches
  play their part. Network layers the paper does not assign to the engine
  (sigmoid, up-sampling, interpolation, binarization) are not built either.
