# A streaming CNN accelerator for covert-channel detection in a WiFi receiver

A hardware Trojan in a radio transmitter can leak secrets, such as key bits,
by making tiny changes to otherwise legal frames. It might scale a few
preamble subcarriers, rotate the preamble phase, nudge payload constellation
points, or modulate the transmit power. The receiver on the other end decodes
such frames normally and never notices. This design puts a small
convolutional neural network right behind the receiver's ADCs. It looks at
every raw 640-sample I/Q frame and labels it as one of five classes:

| class | meaning |
|---|---|
| 0 | CC-free (no covert channel) |
| 1 | HT1-CC: amplitude modulation of preamble (STS) subcarriers |
| 2 | HT2-CC: phase rotation of the whole STS |
| 3 | HT3-CC: "dirty constellation" displacement of payload symbols |
| 4 | HT4-CC: transmit-power (envelope) modulation |

`cc_detected` is raised for classes 1 to 4. The receiver can then stop the
link. The accelerator only taps the sample stream, so normal reception is
unaffected.

The RTL implements the inference datapath, with 12-bit activations and 8-bit
weights. It does not contain trained weights. All 36,851 parameters are
loaded through a write bus after reset.

## The network

The key idea is a cheap front end called **LLDS** (learnable linear
down-sample). It shrinks the 2 × 640 frame by CF = 5 to 2 × 128 before the
real CNN runs. As a result the CNN, and above all its dense layer, is about
five times smaller than it would be on the raw frame.

```
 I,Q  2 x 640 (12-bit)
  |
  |  LLDS stage 1: per branch, 1x5 conv (pad 2) and 1x3 conv (pad 1), ReLU
  v  -> 4 maps x 640
  |  LLDS stage 2: per branch, 1x5 conv, stride 5, linear, over that branch's 2 maps
  v  -> 2 x 128      (compressed frame)
  |  conv1: 45 filters 2x8, stride 1, no padding, ReLU
  v  -> 45 x 121
  |  conv2: 9 filters 1x6 across 45 channels, no padding, ReLU
  v  -> 9 x 116 = 1044
  |  dense: 1044 -> 32, ReLU
  |  output: 32 -> 5, argmax
  v  class
```

Parameters: LLDS 20 + 22, conv1 765, conv2 2,439, dense 33,440, output 165.
The total is 36,851. Work per frame is 415,368 multiply-accumulates (MACs),
about 649 per input sample. conv2 accounts for two thirds of it.

## How the hardware schedules it

The LLDS and the CNN run at different rates, and the design rests on that
split.

**LLDS: weight-stationary, one sample per clock.** The four input filters
hold their weights. Samples slide through a 5-deep window, and each clock
produces one position of all four maps (16 MACs). The down-sampler keeps
four positions in a 4 × 5 buffer. When the fifth position arrives, it runs
all 20 MACs in that cycle and emits one compressed column. So one column
comes out every five samples. No stage stores the raw frame.

**Frame edges in the LLDS.** Both input filters need zero padding at each
end of the 640-sample frame. Each window slot carries a one-bit frame tag,
and only samples from the centre sample's frame take part. So the next
frame can follow the last sample of the previous one directly, with no
gap. If the stream goes idle after a frame's last sample, zero "bubbles"
are shifted in to flush the last two positions. The frame start is marked
by `s_sof` on the first sample. Frames are counted in blocks of 640
samples.

**The FIFO between the two halves.** The compressed columns go into a
2 × 128 circular buffer, which can hold one whole compressed frame. It
shows its 8 oldest columns in parallel, which is exactly one 2×8 window.
Each column is tagged with a frame-end flag.

**CNN: input-stationary, one third of the work per clock.** When the FIFO
holds 8 columns, conv1 copies the window into its input buffer and pops one
column. After the frame's last window it pops all 8 instead, so each frame
starts aligned. Then the window stays still while the 45 filters pass over
it in three cycles, 15 filters (240 MACs) per cycle. conv2 keeps the last
six conv1 columns in a 45 × 6 buffer. It handles one output position in
three cycles: each cycle covers 15 input channels for all 9 filters (810
MACs). The dense layer never holds the flattened 1044-vector. Each conv2
column of 9 values goes straight into 32 running accumulators, 3 inputs ×
32 neurons per cycle, also over three cycles. The output layer does 32
serial steps with 5 MACs, then an argmax.

Every CNN layer uses the same control unit (`layer_ctrl`). It counts three
phases per output position and counts positions within the frame. The
layer uses the phase and the position to address its weights and to pick
its input data.

**Rates and latency.** The CNN needs 121 × 3 = 363 cycles per frame for
conv1, and 116 × 3 = 348 for conv2 and the dense layer. A frame lasts 640
cycles even at one sample per clock, so the CNN keeps up with a
back-to-back stream and no frame is dropped. The sticky `fifo_overflow`
flag is a guard; it cannot fire at one sample per clock. The result of a
frame comes out a fixed 52 cycles after its last sample. That time
covers:

- the LLDS flush,
- conv1's last window,
- one conv2 position,
- one dense position,
- the 34-cycle output layer.

## Number formats

| quantity | format |
|---|---|
| ADC samples and all activations | signed 12 bits (integers in −2048…2047) |
| weights and biases | signed 8 bits; weights are read as Q0.7 (value/128) |
| accumulators | signed 32 bits, no overflow for these layer sizes |
| bias in an accumulator | `bias << 11`, so one bias step is 16 activation LSBs |
| back to 12 bits (`act_unit`) | `acc >>> 7`, then ReLU (except LLDS stage 2 and the output layer), then saturate |

The class decision uses the full 32-bit scores, and ties go to the lower
class. `res_logits` are the scores cut to 12 bits.

## Weight map

Each layer owns its weight array. Together the arrays form the 37 KB
weight memory. The load bus `wload_t {valid, layer, addr, data}` writes one
8-bit word per cycle.

| layer id | words | address of weight | bias at |
|---|---|---|---|
| 0 LLDS1 | 20 | branch·10 + {1x5 taps 0–4, bias, 1x3 taps 0–2, bias} | in the group |
| 1 LLDS2 | 22 | branch·11 + {taps on 1x5 map 0–4, taps on 1x3 map 0–4} | branch·11+10 |
| 2 CONV1 | 765 | f·17 + row·8 + tap (row 0 = I) | f·17+16 |
| 3 CONV2 | 2,439 | f·271 + ch·6 + tap | f·271+270 |
| 4 DENSE | 33,440 | n·1045 + pos·9 + f (conv2 position-major flatten) | n·1045+1044 |
| 5 OUT | 165 | k·33 + j | k·33+32 |

Tap t of a kernel multiplies the input at (first position of the window +
t). This is the cross-correlation convention that common training
frameworks use. To use a trained model, export its weights in this order
and quantise them to Q0.7. The biases must be re-scaled to the bias format
above.

## Top-level interface (`ccd_accelerator`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset (control state only, not the weights) |
| `wload` | in | weight load bus (`ccd_pkg::wload_t`) |
| `s_valid`, `s_sof`, `s_i`, `s_q` | in | ADC sample, at most one per clock, gaps allowed; `s_sof` on sample 0 of a frame |
| `res_valid` | out | one-cycle pulse per frame |
| `res_cls`, `res_onehot`, `cc_detected` | out | class, one flag per class, alarm |
| `res_logits[5]` | out | the five scores, 12-bit |
| `fifo_overflow` | out | sticky; a compressed column was lost |

## Files

- `rtl/ccd_pkg.sv`: sizes, formats, load-bus and class types.
- `rtl/llds_inconv.sv`, `rtl/llds_downsample.sv`: the two LLDS stages.
- `rtl/feature_fifo.sv`: the compressed-frame FIFO.
- `rtl/conv1_layer.sv`, `rtl/conv2_layer.sv`, `rtl/dense_layer.sv`,
  `rtl/output_layer.sv`: the CNN layers.
- `rtl/layer_ctrl.sv`, `rtl/weight_mem.sv`, `rtl/act_unit.sv`: the per-layer
  control unit, weight storage and activation/truncation stage.
- `rtl/ccd_accelerator.sv`: top.
- `tb/ccd_ref_pkg.sv`: the golden model. It runs the whole network with
  plain loops over full arrays, in the same fixed-point arithmetic. It
  also holds the random weight images and test-frame generators the
  testbenches use.
- `tb/tb_<module>.sv`: one self-checking testbench per module. Each ends
  with a `TB_RESULT checks=N failures=M` line.

## Simulating

Any testbench builds the same way. For example, the full-size end-to-end
test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ccd_pkg.sv tb/ccd_ref_pkg.sv rtl/*.sv tb/tb_ccd_accelerator.sv \
    --top-module tb_ccd_accelerator
./obj_dir/Vtb_ccd_accelerator
```

`tb_ccd_accelerator` runs at the default sizes:

1. It loads all 36,851 weights.
2. It streams six frames: three back to back at one sample per clock, one
   at one sample per three clocks (the 67 MS/s rate), one with random
   gaps, and one more back to back.
3. It compares every class, flag and score with the golden model.

It also counts how often these happen and fails if one never does:

- back-to-back frames,
- the bubble flush,
- conv1 waiting on the FIFO,
- the 8-column frame-end pop,
- an alarm,
- a CC-free result.

It runs in under a second.

Random weights give a network whose decision hardly changes from frame to
frame. So the end-to-end test programs the output layer to compare one
hidden unit with a threshold. This makes both the alarm and the CC-free
outcomes occur. The weights of all other layers stay random.

## What follows the source and what does not

Taken from the published description:

- the five-class task and the 640-sample frames;
- the LLDS structure: kernel sizes, padding, stride 5, linear down-sampler,
  ReLU elsewhere;
- the CNN layer shapes: 45 × 2×8, 9 × 1×6, flatten 1044, 5 outputs;
- 12-bit data and 8-bit weights;
- the 2 × 128 FIFO and the 4 × 5, 2 × 5, 2 × 3 and 45 × 6 buffers;
- weight-stationary LLDS and input-stationary CNN;
- 15 filters or channels per cycle, an execution rate of 1/3;
- the per-layer control unit, weight memory, MACs and activation stage.

Inferred, not printed:

- **32 dense neurons.** This is the only width for which both published
  parameter totals hold: 184,265 for the uncompressed baseline and 36,851
  for this model.
- **How the down-sampler's two filters read the four maps.** Each filter
  reads its own branch's two maps. This grouping gives the LLDS exactly
  the 42 parameters those totals leave for it.

This design's own choices:

- the fixed-point scaling (Q0.7 weights, the bias shift, saturation);
- the frame-start flag and the bubble flush;
- the flatten order;
- the dense and output layers' MAC arrangement;
- argmax in place of softmax (same decision);
- weights split per layer with wide read ports;
- the load bus and its address map;
- the I/Q row order of the conv1 kernel.

Known differences:

- **Latency.** The source quotes a processing latency of three frame
  durations. Here a result follows a frame's last sample by 52 cycles,
  because the CNN works through the frame as its columns arrive instead of
  after the whole frame is buffered.
- **Multiplier count.** The dense and output layers use 96 and 5
  multipliers. The source gives no figure for them.
- **Verification scope.** The design has been checked only against its own
  golden model with random weights. The classification accuracy of a
  trained model, and the FPGA resource and power figures, have not been
  reproduced.
- **Receiver context.** The analog front end, the ADCs and the WiFi PHY
  that surround the accelerator are not part of the RTL.
