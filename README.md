# Threshold-based non-uniform quantization for an integer-only residual block

A quantized network with integer weights and activations usually turns each
wide MAC result into a few-bit activation with a shift, which amounts to uniform
bins. When the MAC results are roughly Gaussian, uniform bins waste most codes on
values that rarely occur. This design bins them non-uniformly instead. Each
layer has a small set of integer thresholds, computed offline from that layer's
running mean and standard deviation so that every bin is equally likely. The
quantizer compares the MAC result with every threshold and a priority
multiplexer picks the code. Apart from loading the thresholds, the hardware
cost is a row of comparators.

The RTL builds the quantizer into a modified ResNet basic block that stays
integer-only end to end. Weights are B_w-bit signed, activations B_a-bit
unsigned, and MAC results and the residual path are 24-bit signed. The default
precision is (w,a) = (4,4). The (3,3) configuration is a parameter change.

## The quantizer

For a signed MAC result `x` and thresholds `0 = t_0 < t_1 < ... < t_{2^Ba-2}`:

| input range                   | code        |
|-------------------------------|-------------|
| `x <= 0`                      | 0 (ReLU part) |
| `t_{i-1} < x <= t_i`          | i           |
| `x > t_{2^Ba-2}`              | 2^Ba - 1    |

The zero threshold is fixed. The other `2^Ba - 2` thresholds are written through
a load port: 14 at 4 bits, 6 at 3 bits. The offline procedure produces one
threshold more than this. The interval it opens gets the same top code as the
interval below it, so it can never change the output and is not stored. In
hardware, `threshold_quantizer` evaluates all `x <= t_i` comparisons in
parallel. A priority MUX chain then takes the lowest interval that matches,
and the code is registered (one clock latency, one sample per clock). Thresholds
must be loaded in increasing order; if they are not, the lowest matching
interval still wins.

How the thresholds are obtained, offline: take the layer's running statistics
`mu, sigma`; let `Z = Phi(0; mu, sigma)`; place the thresholds at the normal
quantiles that split the positive mass `1 - Z` into `2^Ba` equal parts. The
hardware receives only the resulting integers. Weights are quantized offline in
a similar way, `W_q = round((Phi(W; mu_w, sigma_w) - 0.5) * 2^Bw)`, clipped to
the signed B_w-bit range.

## The modified residual block

In a standard basic block the last activation follows the residual sum. If that
activation became a B_a-bit quantizer, the residual carried to the next block
would be at most `2^Ba - 1`. The MAC result it is added to can reach
`(2^Ba-1)(2^(Bw-1)-1) * I * 9` for I input channels, so the residual would be
negligible. The block therefore quantizes its *input* and adds the
*un-quantized* input to the second convolution's MAC result:

```
x ──► Q1 ──► conv3x3 (W1) ──► Q2 ──► conv3x3 (W2) ──► (+) ──► y   (y feeds the next block's Q1)
│                                                      ▲
└──────────────────────────────────────────────────────┘
```

The two quantizers hold separate threshold sets, one per layer. The output `y`
stays at MAC scale and is never quantized inside this block.

## How `resblock_top` schedules the block

The quantizer, the MAC unit, the adder and the block structure follow the
method. The scheduling below is this implementation's own choice. One
`CH x H x W` feature map (default 64 x 32 x 32, the first stage of a CIFAR
ResNet-18) lives on chip. A sequencer makes three passes over it:

| pass  | work                                              | clocks       |
|-------|---------------------------------------------------|--------------|
| QIN   | `act1[a] = Q1(x[a])` for every word               | CH·H·W       |
| CONV1 | `act2 = Q2(conv(act1, W1))`                        | CH·CH·H·W    |
| CONV2 | `y = sat(conv(act2, W2) + x)`, streamed out        | CH·CH·H·W    |

Each pass is followed by 4 drain clocks, and one more clock carries the `done`
pulse. At the defaults a run takes 8,454,158 clocks. A convolution pass loops
over output channel, row and column, with the input channel innermost. Every
clock, one 3x3 window of one input channel goes into `conv3x3_mac`: 9
multipliers, an adder tree and an accumulator. After CH clocks the pixel's MAC
result is ready.

The pipeline has three stages:

1. Issue. The window addresses and padding flags are computed from the loop
   counters. Nine read ports of the activation buffer and one read of the
   weight memory are issued.
2. MAC. The data arrive. Taps outside the map are forced to zero (zero
   padding, stride 1), and the window is accumulated. In CONV2 the residual
   word of the same pixel is read from the input buffer at this point.
3. Result. The MAC result goes either to Q2 (CONV1), whose code is written to
   `act2`, or to the saturating residual adder (CONV2), which drives
   `out_valid / out_addr / out_data / out_sat`.

Outputs appear in address order, `c*H*W + y*W + x`.

Memories: `fmap_buf` instances for the input (24-bit words), `act1` and `act2`
(B_a-bit words, 9 synchronous read ports each), and two `weight_mem` instances.
Each `weight_mem` holds one kernel per word, word `oc*CH + ic`, tap
`k = 3*dy + dx`.

Interface of `resblock_top`:

- Loading, allowed only while idle (an assertion checks this):
  - `in_we/in_addr/in_data` loads the block input.
  - `w_we/w_sel/w_addr/w_data` loads a kernel into W1 (`w_sel=0`) or W2 (`w_sel=1`).
  - `thr_we/thr_sel/thr_idx/thr_data` loads threshold `t_{idx+1}` of Q1 (`thr_sel=0`) or Q2 (`thr_sel=1`).
- Running: `start` is taken when idle. `busy` is high during a run, and `done`
  pulses for one clock at its end.

## Files

| file | contents |
|------|----------|
| `rtl/qnn_pkg.sv` | default widths, tap count, sequencer state type |
| `rtl/threshold_quantizer.sv` | comparators + priority MUX chain, threshold load port |
| `rtl/conv3x3_mac.sv` | 9-multiplier window MAC with accumulator |
| `rtl/residual_add.sv` | saturating residual adder |
| `rtl/weight_mem.sv` | kernel memory, one 3x3 kernel per word |
| `rtl/fmap_buf.sv` | feature-map buffer with N synchronous read ports |
| `rtl/resblock_top.sv` | the basic block: buffers, sequencer, datapath |
| `tb/tb_*.sv` | self-checking testbenches, one per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert rtl/qnn_pkg.sv rtl/fmap_buf.sv rtl/weight_mem.sv \
  rtl/threshold_quantizer.sv rtl/conv3x3_mac.sv rtl/residual_add.sv rtl/resblock_top.sv \
  tb/tb_resblock_top.sv --top-module tb_resblock_top -o sim && obj_dir/sim
```

What each testbench covers:

- `tb_resblock_top` runs two chained blocks: the second run takes the first
  run's output as its input and loads new kernels. It uses CH=4, a 5x6 map and
  precision (3,3).
  - Reference: a model written in the testbench.
  - Thresholds: derived as equiprobable bins over the positive values the
    reference model produces.
  - Checks: every output word and its saturation flag, output order and count,
    and the run length (one window per clock plus overhead).
  - Mechanisms counted, each required at least once: clamping to code 0, the
    top code, border windows, residual saturation, and the chained second run.
- `tb_resblock_full` is the same test at the default parameters (64 channels,
  32x32, precision 4,4). Verilator takes about 100 s to build it and it runs in
  about 6 s.
- The unit testbenches check the corner cases of their modules:
  - quantizer: values equal to a threshold, or one above or below it;
  - MAC: back-to-back pixels, and gaps between windows;
  - adder: saturation in both directions;
  - memory: full fill and read-back, and overwrites.
  - feature-map buffer (`tb_fmap_buf`): all 9 read ports at once, with
    writes to other words in the same clock.

## What is not here, and where this departs from the method

- Threshold and weight quantization are offline steps. The device only
  receives their integer results.
- There is no complete network. The default block is one stride-1 64-channel
  basic block, which covers the two basic blocks of the first ResNet-18 stage
  when run one after the other with new weights. Not covered:
  - the wider stages and the stride-2 blocks with 1x1 shortcuts;
  - the stem convolution and the FC layer;
  - the VGG-like network's maxpool and FC layers.
- The uniform shift quantizer and the log2 (priority-encoder) quantizer are
  the alternatives the method is compared against. They are not built.
- Choices made here that the method does not specify:
  - the feature-map buffering and the pass schedule;
  - one shared MAC unit, zero padding, and no bias or batch-norm;
  - the 24-bit accumulator, and saturation in the residual adder;
  - the load ports and the start/busy/done handshake.
- The offline threshold procedure yields `2^Ba - 1` thresholds and the
  comparator bank stores `2^Ba - 2`. The top one does not affect the code (see
  above).
- Lint reports one SYNCASYNCNET warning on `resblock_top`. It comes from using
  the asynchronous reset as the `disable iff` condition of the assertions, and
  has no hardware effect.
