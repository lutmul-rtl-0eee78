# LUT-multiplier dataflow accelerator

## Design idea

A quantised network with 4-bit weights and 4-bit activations does not need
DSP multipliers. Because every weight is a constant once the network is
trained, the product `w * a` of a weight and an activation is just a
16-entry table indexed by the activation. A 6-input dual-output FPGA LUT
(LUT6_2) stores 64 bits. With its top input tied high it behaves as two
5-input tables. Each 5-input table holds one output bit of the product for
all 16 activations and for **two** weights, chosen by a fifth input called
weight select (WS). An 8-bit signed product therefore costs four LUT6_2 for
two weights, or two LUTs per multiplication.

The accelerator is a dataflow chain in which every layer has its own
hardware and all weights sit inside LUT contents:

```
image stream -> [pointwise 1x1 conv] -> FIFO -> [depthwise 3x3 conv] -> FIFO
            -> [pointwise 1x1 conv] -> FIFO -> [sliding window + max] -> FIFO
            -> [fully connected, 8-bit weights, bias] -> result stream
```

Each convolution layer has four parts:

- a window generator that does im2col on the fly;
- an array of LUT multipliers, one per weight;
- one adder tree per output channel;
- a multi-threshold unit that replaces scaling, batch normalisation and the
  activation function.

The layers pass pixels through valid/ready streams with FIFOs between them.
A layer therefore stops exactly when the next one cannot take data.

## Blocks (rtl/)

| File | Function |
|---|---|
| `lutmul_pkg.sv` | Shared constants. Constant functions for the LUT contents of a weight pair (`lut_init`), sign extension, and deterministic default weights, thresholds and biases. |
| `lut6_2.sv` | Dual-output 6-input LUT: `o6 = INIT[i]`, `o5 = INIT[{0,i[4:0]}]`. |
| `lut_const_mult.sv` | Constant multiplier for two weights `W0`/`W1`. `(WBITS+4)/2` LUT6_2 with inputs `{1, ws, act[3:0]}`. LUT p gives product bits 2p+1 (O6) and 2p (O5). For the pair (1, -3) this reproduces the published LUT contents `64'hfffe_0000_fffe_0000`, `64'h07fe_0000_f83e_0000`, `64'h39c6_ff00_5a5a_f0f0` and `64'hcccc_cccc_aaaa_aaaa`. |
| `lut_mul_array.sv` | All products of one layer: dense (`IN_N` inputs times `COUT` outputs) or depthwise (each channel sees only its own K*K window values). With `FOLD=2`, channels p and p+COUT/2 share one multiplier group and WS picks between them. |
| `adder_tree.sv` | Binary adder tree with a register after every level: one sum per cycle, latency ceil(log2 N). |
| `threshold_unit.sv` | Optional per-channel bias, then a count of how many of the 2^OBITS-1 ascending thresholds the sum reaches (`>=`). The result is the unsigned output activation. |
| `mvau.sv` | Matrix-vector unit: input register, LUT products (registered), adder trees, threshold unit. Accepts one vector per cycle (`FOLD=1`) or one per two cycles (`FOLD=2`). Latency is 3 + ceil(log2 NPROD) + FOLD-1 cycles. The whole pipeline stalls when the output is not taken. |
| `conv_generator.sv` | Streaming window generator. Keeps a ring of min(K+S, H) image rows. Emits K*K*C windows in raster order with zero padding. Takes in a new row while it emits windows from the old ones. |
| `conv_layer.sv` | `conv_generator` + `mvau`: pointwise, depthwise or standard convolution. |
| `max_operator.sv` | Per-channel maximum over a window, one register stage. |
| `pool_layer.sv` | `conv_generator` without padding + `max_operator`. |
| `stream_fifo.sv` | First-word-fall-through FIFO between layers. |
| `lutmul_top.sv` | The five-layer chain above with FIFOs. The default size is a 14x14x32 image, 32 -> 32 -> 32(dw) -> 16 channels, global max pooling and a 16 -> 10 fully connected layer with 8-bit weights, bias and 8-bit outputs. |

Weights, thresholds and biases are packed parameters. They are constants,
because the design idea is that they become LUT contents. Their defaults
come from a hash, so the design elaborates and simulates without a
trained model. A real network supplies its own values through the
`WEIGHTS`, `THRESHOLDS` and `BIAS` parameters.

## Interface and timing of the top

| Port | Meaning |
|---|---|
| `in_valid/in_ready/in_data[C0*4]` | One pixel per handshake, raster order, C0 unsigned 4-bit channels. |
| `out_valid/out_ready/out_data[NCLASS*8]` | One result vector per image: the unsigned 8-bit thresholded classifier outputs. |
| `dw_padded_mon`, `fc_ws_mon`, `fifo_count_mon` | Observation outputs: a padded depthwise window, the WS phase of the folded layer, and FIFO occupancies. |

Every layer except the classifier takes one pixel per cycle. The classifier
is folded by two. With the output always ready, images can follow each
other back to back, at about H*W cycles apart.

## Where this follows the source design and where it does not

Follows:

- LUT6_2 multiplication with weight select, including the exact LUT
  contents;
- 4-bit weights and activations;
- 8-bit weights in the last layer;
- one engine per layer with II=1;
- adder trees, and thresholds in place of batch normalisation;
- FIFOs between layers;
- pointwise, depthwise and pooling stages in the order drawn;
- bias only in the last layer;
- folding of later layers.

Own choices:

- valid/ready handshakes;
- asynchronous active-low reset of control state only;
- FIFO depth 32;
- `>=` threshold rule;
- line-buffer organisation of the window generator;
- how WS sequences a folded layer;
- all image and channel sizes of the top.

Not built:

- the full MobileNetV2 (its layer sizes and weights are not available);
- residual additions;
- an 8-bit input layer (an 8-bit activation does not fit a LUT address
  next to WS);
- host data movers and memories;
- placement across dies.

The classifier has 10 outputs instead of ImageNet's 1000 so that it stays
small. Pooling follows the drawn "max operator"; MobileNetV2 itself
averages.

## Testbenches (tb/)

Each testbench checks itself with `$urandom` stimulus and a watchdog. It
ends by printing `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_lut6_2` | Both outputs of the LUT for every input value. |
| `tb_lut_const_mult` | The published LUT contents, and every product for sixteen 4-bit weight pairs and six 8-bit pairs, including the extreme values. |
| `tb_adder_tree` | Sums, latency and stalls for N = 9 and N = 32. |
| `tb_threshold_unit` | Values at, just below and just above each threshold; folded channel selection; bias. |
| `tb_mvau` | Dense 32x32, depthwise, and the folded 8-bit classifier with bias, against an integer model. Also checks latency, throughput, random back-pressure and random input gaps. |
| `tb_conv_generator` | Five window shapes (3x3 s1/s2 padded, 1x1, pooling, global) against windows cut from a stored frame. Also checks the rate. |
| `tb_conv_layer` | A 3x3 convolution against a direct convolution. |
| `tb_max_operator`, `tb_pool_layer`, `tb_stream_fifo` | Maxima, pooling windows, and FIFO order and occupancy. |
| `tb_lutmul_top` | The whole chain at its default size against a layer-by-layer model, over several images. It requires padding, WS folding, output stalls, input back-pressure and FIFO filling to occur. It also checks the image rate. |
