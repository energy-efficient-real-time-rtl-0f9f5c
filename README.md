# SleepLiteCNN: an 8-bit accelerator for 4-stage sleep staging from ECG

This design is a small convolutional neural network in hardware. It classifies
sleep into four stages (WAKE, REM, LIGHT and DEEP) from a single-lead ECG.

- It takes one 16-bit ECG sample at a time, at 128 Hz.
- Every 10 s of new signal (1280 samples), it classifies the most recent 30 s (3840 samples).
- So it gives a sleep stage every 10 seconds, not one per 30-second epoch as usual.

The network is small, about 47 thousand parameters, and all of it is 8-bit integer:

- the weights, biases and batch-normalisation constants are signed bytes;
- the activations are signed bytes;
- the products add up in 32-bit accumulators.

That makes it cheap enough to run continuously on a small FPGA or ASIC next to a wearable sensor.

The RTL below is a straightforward, area-lean implementation. It has:

- one multiply-accumulate (MAC) unit per layer;
- layers that run one after another over the whole window;
- on-chip RAMs for the feature maps and the parameters.

At the default shapes, one classification takes 17.26 million clock cycles. Any clock above
about 1.73 MHz keeps up with the 10 s update rate.

## 1. The network

The shapes use valid padding, no zero padding. Lengths are in samples; "C" is the number of channels.

| # | Layer | Settings | Output (length x C) | Parameters |
|---|-------|----------|---------------------|-----------:|
| 0 | input | 30 s at 128 Hz | 3840 x 1 | |
| 1 | batch norm | per channel | 3840 x 1 | 4 (2 stored) |
| 2 | conv1 + ReLU | 5 filters, kernel 10, stride 2 | 1916 x 5 | 55 |
| 3 | max pool | size 2, stride 2 | 958 x 5 | |
| 4 | conv2 + ReLU | 45 filters, kernel 10, stride 1 | 949 x 45 | 2,295 |
| 5 | max pool | size 2, stride 2 | 474 x 45 | |
| 6 | conv3 + ReLU | 25 filters, kernel 30, stride 1 | 445 x 25 | 33,775 |
| 7 | max pool | size 4, stride 4 (`POOL3_S`) | 111 x 25 | |
| 8 | batch norm | per channel | 111 x 25 | 100 (50 stored) |
| 9 | flatten | | 2775 | |
| 10 | dropout | identity at inference | 2775 | |
| 11 | dense | 4 outputs | 4 | 11,104 |
| 12 | argmax / softmax | | stage, 4 probabilities | |

In total there are 47,333 parameters, of which 47,281 bytes are stored.

### Stride of the last pooling layer

This is the one point where the sources disagree.

- The published architecture drawing gives stride 1 for the last pool.
- The accompanying description gives a parameter count of about 47 K.

The two sources cannot both hold:

| Stride of the last pool | Pool output | Dense input | Parameters |
|---|---|---|---:|
| 4 | 111 | 2775 | 47,333 |
| 1 | 442 | 11,050 | 80,108 |

This design follows the parameter count, so the default is `POOL3_S = 4`. The pooling block
accepts any stride from 1 to its pool size. To build the other reading, set
`sleeplite_cnn_top #(.POOL3_S(1))`: the address map and the dense layer resize themselves.

### Flatten and dropout

Neither needs hardware.

- Flatten: the feature maps are stored channel-last (`addr = position*C + channel`). So the
  flattened vector is simply the last feature map read in address order.
- Dropout: it only acts during training.

## 2. Sliding window: `ecg_window_buffer` and `sleeplite_ctrl`

Samples go into a ring buffer of `WIN_LEN + STEP_LEN` = 5120 entries.

**When a window is ready.** The buffer pulses `win_ready` for one cycle at two moments:

- when the first 3840 samples have arrived;
- after every further 1280 samples.

At that moment it also presents the start address of the newest window.

**Taking a window.** If the accelerator is idle, the controller answers with `take` in the same
cycle. `take` latches the start address and starts an inference. The first phase (LOAD) then
copies the window through the input batch norm into feature map 0.

**Why the ring is larger than a window.** The ring holds one extra step beyond the window. New
samples can therefore keep arriving during LOAD without overwriting the window being copied.

**Overrun.** If `win_ready` comes while an inference is still running, that window is dropped.
The controller pulses `overrun` and `overrun_count` increments. The next window is taken
normally. An overrun never happens at a clock fast enough for real time. The port still exists
so that a slow clock shows as a counted event rather than as silently stale results.

## 3. Number formats and how to load a trained model

All tensors between layers are int8. By default they are read as Q0.7, i.e. value = byte / 128.

**Convolution and dense layers.** Each layer computes its result in four steps:

1. `acc = sum(x * w) + (bias << BSHIFT)`, in 32 bits;
2. for the conv layers, `relu_requant` clamps the sum to `0 .. 127` after an arithmetic right shift by `SHIFT`;
3. the dense layer keeps its full 32-bit sums as the class scores (`logits`);
4. for those scores, the fraction point sits at bit `LOGIT_FRAC` = 14.

**Batch norm.** Each batch-norm layer is a per-channel affine map:

```
y = sat8(((x * scale) + (bias << BSHIFT)) >>> SHIFT)
```

To fold a trained batch norm with (gamma, beta, mean, var, eps) into these two numbers:

```
scale = gamma / sqrt(var + eps)
bias  = beta - mean * scale
```

Then quantise both to the layer's fixed-point scale.

**ECG input.** The input sample is 16-bit signed and is read with 7 fraction bits. The input
batch norm is what brings it into the int8 range.

**Choosing shifts.** Every `*_SHIFT` and `*_BSHIFT` is a top-level parameter, 7 by default:

| Parameter pair | Layer |
|---|---|
| `BNI_*` | input batch norm |
| `C1_*`, `C2_*`, `C3_*` | the three convolutions |
| `BNO_*` | output batch norm |
| `FC_BSHIFT` | dense layer |

A model quantised with power-of-two scales per layer, for example by quantisation-aware
training, maps onto these directly. The shift for a layer is

```
shift = frac(input) + frac(weight) - frac(output)
```

**Saturation.** Every activation clipped at +127 increments `sat_count`. This is a cheap way to
see whether the chosen scales are too tight.

### Softmax (`softmax_q`)

The stage is the argmax of the four scores. The first maximum wins a tie. The softmax adds
confidence values on top of that; it does not change the decision. It works in four steps:

1. **Difference to the maximum.** For each class, `d = (max - score) >> (LOGIT_FRAC - 3)`. This
   is the distance below the maximum in units of 1/8, capped at 127.
2. **Exponential.** A 128-entry table gives `e = 65535 * exp(-d/8)`. The table is computed at
   elaboration as `E[0] = 65535` and `E[k] = round(E[k-1] * 57835 / 65536)`, where
   57835/65536 ≈ exp(-1/8).
3. **Normalise.** `p = round(e * 255 / sum(e))`.
4. **Output.** Each `prob` is 8 bits wide; 255 means certainty.

The result is registered and appears together with `result_valid`. The reference test allows an
error of ±1 LSB against a real-valued softmax.

## 4. Parameter memory map

Parameters are written one signed byte per cycle through `prm_we`, `prm_addr` (16 bits) and
`prm_wdata`. Writes are only allowed while no inference is running, and an assertion checks
this. Each layer keeps its own RAM, decoded from this flat map:

| Start | Count | Contents | Order |
|------:|------:|----------|-------|
| 0 | 2 | input BN | scale, bias |
| 2 | 55 | conv1 | 50 weights `w[f][k][c]` at `(f*K+k)*C+c`, then 5 biases |
| 57 | 2,295 | conv2 | 2,250 weights, then 45 biases |
| 2,352 | 33,775 | conv3 | 33,750 weights, then 25 biases |
| 36,127 | 50 | output BN | 25 scales, then 25 biases |
| 36,177 | 11,104 | dense | 11,100 weights `w[o][i]` at `o*2775+i`, then 4 biases |
| | 47,281 | total | |

The dense input index `i` is the flattened index `position*25 + channel`. So a model trained
with a channels-last flatten, such as a Keras model, can be loaded as is. A model flattened
channel-first must have its dense weights permuted.

## 5. Schedule and latency

`sleeplite_ctrl` steps through these phases:

```
LOAD -> DRAIN -> C1 -> DRAIN -> C2 -> DRAIN -> C3 -> DRAIN -> FC -> RESULT
```

Each DRAIN phase lasts 4 cycles. It lets the last results of a layer pass the pipeline
(RAM read, multiply, ReLU, pool, batch norm) before the next layer reads them.

Each engine does one multiply-accumulate per cycle, plus 2 cycles of pipeline latency:

| Phase | Work | Cycles |
|-------|------|-------:|
| LOAD | 3840 samples through input BN | 3,840 |
| conv1 | 1916 x 5 x 10 x 1 | 95,800 |
| conv2 | 949 x 45 x 10 x 5 | 2,135,250 |
| conv3 | 445 x 25 x 30 x 45 | 15,018,750 |
| dense | 4 x 2775 | 11,100 |
| drains, starts, result | | 35 |
| **total** | | **17,264,775** |

Conv3 accounts for 87 % of the time. The budget is one window per 10 s, which gives a minimum
clock of 1.73 MHz. Each conv engine is self-contained, so a faster variant would put several
MACs in the conv3 engine, one per filter for instance.

The memories are:

| Memory | Size |
|---|---|
| ECG ring | 5120 x 16 bit |
| fm0 | 3840 bytes |
| fm1 | 4790 bytes |
| fm2 | 21,330 bytes |
| fm3 | 2775 bytes |
| parameters | 47,281 bytes |

In all that is about 723 kbit of RAM and 6 multipliers.

## 6. Modules

`sleeplite_pkg` holds the constants, the `sleep_stage_e` enum, shape functions (`conv_len`,
`pool_len`) and the int8 saturation used throughout.

| Module | Role | Interface and timing |
|--------|------|----------------------|
| `sleeplite_cnn_top` | whole accelerator | see below |
| `ecg_window_buffer` | ring buffer, window detection | `sample_valid`/`sample`; `win_ready` pulse, `take`; `rd_idx` -> `rd_data` one cycle later |
| `sleeplite_ctrl` | phase sequencer, overrun detection | `start_*` pulses to the engines; `done_*` pulses back; `busy`, `result_valid` |
| `batchnorm_q` | per-channel scale and bias | stream in (`in_valid`, `in_data`, `in_ch`); result one cycle later |
| `conv1d_engine` | 1-D convolution, one MAC per cycle | `start` -> `done` after `L_OUT*F*K*C_IN + 2` cycles; reads its input RAM with 1-cycle latency; streams `y_valid`, `y_acc`, `y_pos`, `y_ch` |
| `relu_requant` | ReLU, shift, clip to int8 | combinational; `sat` flags a clipped value |
| `maxpool1d` | streaming max pool over channel-last input | any pool size P ≥ 2, stride 1 ≤ S ≤ P; output one cycle after the last input of a window |
| `dense_layer` | fully connected, one MAC per cycle | `N_OUT*N_IN + 2` cycles; holds `logits` |
| `stage_argmax` | index of the largest score | combinational |
| `softmax_q` | fixed-point softmax | one cycle |
| `sdp_ram` | simple dual-port RAM | one write port; registered read-first read port |

The top-level ports are:

- inputs: `clk`, `rst_n` (active low, asynchronous), `sample_valid`, `sample[15:0]`, and the parameter port;
- outputs: `result_valid`, `stage[1:0]` (0 WAKE, 1 REM, 2 LIGHT, 3 DEEP), `logits[4]` (32-bit),
  `prob[4]` (8-bit), `busy`, `inference_count`, `overrun_count`, `sat_count`.

The results are held until the next inference ends.

## 7. Where this RTL departs from, or goes beyond, the original design

The original accelerator was generated from a trained Keras/QKeras model by a high-level
synthesis flow. This RTL is a hand-written equivalent of the same network. It does not
reproduce that tool's pipelining or its resource usage. Specifically:

- **Last pool stride:** 4, not 1 (section 1).
- **Batch norm:** folded to scale and bias. Nothing is lost at inference.
- **Number formats:** the int8 Q0.7 default, the power-of-two requantisation, the 16-bit ECG
  input and the 32-bit accumulators are this design's choices. The source says only that the
  model was quantised to 8 bits.
- **Layer order in time:** the layers run one after another rather than in a pipeline across
  layers. There is one MAC per layer.
- **Softmax:** the fixed-point softmax in section 3 is this design's own.
- **Window handling:** the ring buffer, the window handshake, the overrun rule and the
  statistics counters are additions needed to run the network on a live stream.
- **Weights:** the trained weights are not published. The tests use random parameters, so the
  hardware is checked against a bit-exact model of the arithmetic, not against classification
  accuracy.
- **Not built:** the ECG analog front end and the FPGA device itself.

## 8. Verification and simulation

Each module has a self-checking testbench in `tb/`. Each one:

- compares the module against values computed independently in the testbench;
- counts checks and failures;
- ends with a line `TB_RESULT checks=N failures=M`;
- has a watchdog.

Highlights:

- `tb_conv1d_engine` and `tb_dense_layer` check results against a direct model, and check the
  exact cycle count from `start` to `done`.
- `tb_maxpool1d` checks pool 4 with stride 4 and with stride 1.
- `tb_ecg_window_buffer` uses a short window (12/4) so that it can check many ring wrap-arounds.
- `tb_softmax_q` compares 18,000 random score vectors with a real-valued softmax.
- `tb_sleeplite_cnn_top` runs the full-size design at its default parameters. It loads all
  47,281 random parameters and streams a synthetic ECG. It then checks two complete inferences
  against a behavioural model of the network: scores, stage, probabilities, latency and
  counters. Between them, one window arrives during an inference and must be counted as an
  overrun. It takes about 35 s of simulation.
- `tb_sleeplite_stream` runs a continuous recording with the window and step shortened ten
  times (384 and 128 samples). Samples arrive at a fixed pace, just fast enough for the
  inference. It checks 12 consecutive windows in order, bit-exact against the same model.
  It also checks that no window is dropped. It takes about 7 s.

With Verilator 5, any testbench runs as:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/sleeplite_pkg.sv tb/tb_sleeplite_cnn_top.sv --top-module tb_sleeplite_cnn_top
./obj_dir/Vtb_sleeplite_cnn_top
```

`-Irtl` lets Verilator find the modules by name. To run another testbench, replace the
testbench file and top-module name.

The RTL also parses and synthesises with Yosys through its slang front end. Synthesis gives
about 700 cells and 1,060 flip-flops, with the memories inferred as RAM.
