# StrikeWatch: an FPGA footstrike classifier for a wrist-worn running monitor

A runner who lands heel-first often wants to learn to land on the forefoot.
StrikeWatch is a wristband that watches the runner's arm swing and buzzes or
flashes when it sees a run of heel strikes. A microcontroller samples a
triaxial accelerometer at 100 Hz. A small FPGA (Lattice iCE40UP5K at 20 MHz,
or AMD XC7S15 at 100 MHz) classifies every half-second slice of motion as
*forefoot* or *heel* strike.

This RTL is the FPGA side. It has three parts:

- a sliding-window front end that cuts the sample stream into overlapping
  windows;
- a tiny integer neural network, a 3-block 1D depthwise-separable CNN with
  6-bit weights and activations and 137 trained parameters;
- a debouncing trigger that raises the feedback output only after several
  consecutive heel-strike decisions.

Both the samples and the network's parameters arrive over one SPI link from
the microcontroller. The status comes back over the same link.

The network's shape, its bit width, the window/stride/downsampling numbers
and the trigger threshold follow the published StrikeWatch system. The rest
is this design's own, and is listed in the section on departures:

- how the layers are scheduled;
- the number formats and rounding;
- the padding;
- the SPI command set;
- the split of work between MCU and FPGA.

## 1. From a sample to a buzz

```
 MCU --SPI--> spi_slave --bytes--> host_if --+--> param_mem (152 x 16 bit) --------+
                                             |                                     v
                                             +--> window_sampler --25x3--> sepcnn_accel --class--> feedback_trigger --> feedback
                                                   (50 raw samples)        (723 clocks)            (5 in a row)
```

The system numbers and what they give:

| Symbol | Value | Meaning |
|---|---|---|
| f | 100 Hz | accelerometer sample rate |
| w | 50 samples | window length (0.5 s of motion) |
| s | 0.25 | stride ratio: a new window every w·s = 12.5 samples, i.e. 8 windows per second, 75 % overlap |
| d | 2 | temporal downsampling: the network sees n = w/d = 25 time steps |
| N_consec | 5 | consecutive heel-strike windows needed for feedback |

The real-time rule is that one inference must finish before the next window
is complete, so T_infer < w·s/f = 125 ms.

- The accelerator needs 723 clocks, which is 36 µs at 20 MHz or 7.2 µs at
  100 MHz. That leaves a margin of more than three orders of magnitude.
- The first window appears after a cold start of w/f = 0.5 s.
- Once heel strikes begin, the earliest feedback comes (N_consec − 1)·w·s/f
  = 0.5 s after the first positive window.

## 2. The windowing front end (`window_sampler`)

**Shift register.** A 50-deep shift register holds the newest raw samples.
Each sample is three signed 16-bit axes.

**Fractional stride.** The stride of 12.5 samples is not an integer. A phase
accumulator handles this:

- it counts in quarter samples, adding STRIDE_DEN = 4 per sample;
- it opens a window whenever it reaches W·STRIDE_NUM = 50, and subtracts 50;
- so windows are alternately 13 and 12 samples apart, 12.5 on average.

**Cold start.** The first window is emitted when the 50th sample arrives.
Nothing is emitted before that.

**Decimation.** Every second sample is kept, aligned so that the newest
sample is always kept. This turns 50 samples into 25.

**Input quantization.** Each kept 16-bit value is scaled to 6 bits with the
common requantizer (section 4), using the parameters INQ_M and INQ_S.

**Timing.** `win`/`win_valid` are registered one clock after the sample that
completes the window. `win` then holds still until the next window. That is
far longer than the 723 clocks an inference needs.

## 3. The network (`sepcnn_accel`)

Tensors are time × channels. Convolutions are "valid" (unpadded) and pooling
rounds down.

| # | Layer | Output | Parameters | MACs = cycles |
|---|---|---|---|---|
| 1 | depthwise conv k=3 | 23×3 | 9 w + 3 b | 207 |
| 2 | pointwise 3→3 + BN + ReLU | 23×3 | 9 w + 3 b + 3 γ + 3 β | 207 |
| 3 | max-pool 2 | 11×3 | – | 33 |
| 4 | depthwise conv k=3 | 9×3 | 9 + 3 | 81 |
| 5 | pointwise 3→3 + BN + ReLU | 9×3 | 9 + 3 + 3 + 3 | 81 |
| 6 | max-pool 2 | 4×3 | – | 12 |
| 7 | depthwise conv k=3 | 2×3 | 9 + 3 | 18 |
| 8 | pointwise 3→6 + BN + ReLU | 2×6 | 18 + 6 + 6 + 6 | 36 |
| 9 | global average pool | 6 | – | 12 |
| 10 | dense 6→3 + ReLU | 3 | 18 + 3 | 18 |
| 11 | dense 3→2 (logits) | 2 | 6 + 2 | 6 |

**Parameter count.** The trained parameters total 30 + 30 + 48 + 21 + 8 =
**137**, the count published for this model. The published text gives the
channel plan: 3, 3, then doubling to 6 in block 3. It does not give the width
of the hidden dense layer. A width of 3 is the only one that lands exactly on
137. The same counting rule (conv weights + biases + BN scale/shift + dense)
also reproduces the 173 parameters published for the plain-convolution
sibling model. That makes the inference fairly safe.

**Schedule.** Each layer owns one multiply-accumulate unit and a register
buffer for its output. It walks its outputs one MAC per clock, writes each
finished output (bias added and requantized) as it goes, then pulses `done`.
That pulse starts the next layer.

The layers run strictly one after another:

| Part | Clocks |
|---|---|
| work (table above) | 711 |
| one hand-over per layer | 11 |
| registered arg-max | 1 |
| **total** | **723** |

The published implementation took 2800 clocks, so this schedule is about 4×
faster. A pipelined or more parallel schedule is possible but unnecessary at
8 inferences per second.

**Overrun.** A `start` that arrives while the accelerator is busy is dropped
and sets a sticky `overrun` flag. In the full system this cannot happen
unless the clock is below about 6 kHz. An assertion in the RTL flags a layer
being started while still busy.

**Class decision.** Class 1 is heel strike. The arg-max resolves a tie to
class 0.

## 4. Integer arithmetic

All activations and weights are signed 6-bit numbers (−32 … 31). Products
accumulate in 32 bits, which cannot overflow at these sizes.

**Requantizer.** Every layer that passes 6-bit values on uses the same
requantizer:

```
y = saturate( (acc · m + 2^(s−1)) >>> s )      (no rounding term when s = 0)
```

- m is a signed 16-bit multiplier and s a 5-bit shift. Both are stored
  per layer.
- To realize a real scale factor M, choose s large enough and set
  m = round(M · 2^s).
- ReLU layers saturate to 0 … 31; others saturate to −32 … 31.

**Depthwise layers.** `y = requant(Σ x·w + b, m, s)`.

**Pointwise + BN + ReLU.** This is folded into one integer affine step per
output channel, with the batch-norm scale γ and shift β stored per channel:

```
y = clamp( ((Σ x·w + b) · γ + (β << s) + 2^(s−1)) >>> s , 0, 31 )
```

The pointwise conv scale and the BN scale both fold into γ. β is the BN
offset in output units.

**Global average pooling.** GAP sums over time and requantizes. The 1/length
factor folds into its m.

**Dense layers.** The first dense layer requantizes with ReLU. The logit
layer keeps its sums, saturated to signed 16 bits, and compares them.

## 5. Parameter store (`param_mem`)

The store holds 152 words of 16 bits and is written over SPI. It resets to
all zeros, so the network outputs class 0 until parameters are loaded.

- Weights use the low 6 bits of a word.
- Shifts use the low 5 bits.
- Biases, γ, β and multipliers use all 16 bits.

Layout (word addresses; `[c][k]` means channel-major):

| Field | Address | Field | Address |
|---|---|---|---|
| INQ_M, INQ_S | 0, 1 | DW3 taps [c][k] | 68–76 |
| DW1 taps [c][k] | 2–10 | DW3 bias, m, s | 77–79, 80, 81 |
| DW1 bias | 11–13 | PW3 weights [co][ci] | 82–99 |
| DW1 m, s | 14, 15 | PW3 bias | 100–105 |
| PW1 weights [co][ci] | 16–24 | BN3 γ, β, s | 106–111, 112–117, 118 |
| PW1 bias | 25–27 | GAP m, s | 119, 120 |
| BN1 γ, β, s | 28–30, 31–33, 34 | FC1 weights [o][i] | 121–138 |
| DW2 taps, bias, m, s | 35–43, 44–46, 47, 48 | FC1 bias, m, s | 139–141, 142, 143 |
| PW2 weights, bias | 49–57, 58–60 | FC2 weights [o][i] | 144–149 |
| BN2 γ, β, s | 61–63, 64–66, 67 | FC2 bias | 150–151 |

The `PRM_*` constants in `sw_pkg` are the authoritative form of this table.
Of the 152 words, 137 are trained parameters. The other 15 are
requantization multipliers and shifts.

## 6. SPI link (`spi_slave`, `host_if`)

**Electrical.** SPI mode 0: data is sampled on the rising SCLK edge and
shifted out on the falling edge, MSB first. SCLK, CS_n and MOSI pass through
two-flop synchronizers. SCLK must therefore be at most the system clock / 8;
the testbenches use /10.

**Transactions.** A transaction is one CS_n-low period. Its first byte is the
command:

| Cmd | Name | Bytes that follow |
|---|---|---|
| 0x01 | WRITE_PARAM | start address, then 16-bit words MSB first; the address increments per word; any length, so one transaction can load all 152 words |
| 0x02 | PUSH_SAMPLE | 6 bytes per sample: a_x, a_y, a_z, each signed 16-bit MSB first; several samples per transaction allowed |
| 0x03 | READ_STATUS | MISO returns 7 status bytes, one per byte clocked (later bytes read 0) |

Unknown commands are ignored until CS_n rises.

Status bytes:

| Byte | Contents |
|---|---|
| 0 | `{5'b0, overrun, result_valid, class}` |
| 1–2 | logit 0 (MSB first) |
| 3–4 | logit 1 |
| 5 | inferences completed, mod 256 |
| 6 | feedback events, mod 256 |

The top also brings out `pred_valid`/`pred_class` (one pulse per inference)
and `feedback`.

## 7. Feedback rule (`feedback_trigger`)

A run counter counts consecutive heel-strike decisions, and any forefoot
decision clears it. When a decision brings the run to N_consec = 5, the
`feedback` output pulses for one clock and the run restarts at 1.

- A continuing heel-strike run therefore re-fires every 4 further windows:
  every 0.5 s, i.e. 2 events per second. This matches the published "minimum
  feedback latency of 0.5 s, up to 2 events per second".
- Restarting the count at 1 rather than 0 is this design's reading of that
  phrase.
- The pulse is meant to drive the buzzer/LED driver, which lives outside the
  FPGA.

## 8. Size and speed

| Item | Value |
|---|---|
| Inference latency | 723 clocks (published implementation: 2800 clocks, i.e. 0.140 ms at 20 MHz and 0.028 ms at 100 MHz) |
| Generic yosys synthesis of the top | about 2,800 cells and 5,200 flip-flop bits |
| Parameter store | 2,432 bits |

Most of the flip-flops are the window register (50 × 3 × 16 bits) and the
per-layer activation buffers. Moving these to block RAM, and time-sharing
one multiplier across layers, would be the first steps to fit the
iCE40UP5K's 5,280 LUTs comfortably. This design does not claim to match the
published LUT, DSP or energy figures.

## 9. Departures from the published design

The published accelerator was generated automatically from a quantized
PyTorch model. Its internals are not described. The following points are
therefore this design's own:

- **Padding.** Convolutions are valid (unpadded), giving lengths
  25→23→11→9→4→2. The published text gives kernel 3, stride 1, pool 2, but
  not the padding.
- **Number formats.** These are the formats described in section 4: rounding
  shift, saturation, 32-bit accumulators, 16-bit logits, BN folded to an
  integer affine step. Trained weights are not published. Any weights must be
  quantized to this scheme, and the 6-bit accuracy reported for the original
  model will only be reached with weights trained for it.
- **Schedule.** Layer-sequential, one MAC per layer per clock: 723 clocks
  instead of 2800.
- **Front end and trigger in the FPGA.** In the published system the
  microcontroller samples the IMU and controls the system. Here the
  windowing, downsampling and feedback trigger are placed in the FPGA, and
  the MCU only streams raw samples.
  - The downsampling method is plain decimation; the method was not stated.
  - The way a fractional stride is realized was not stated.
- **SPI command set and status layout.** Only "SPI carries the model I/O" is
  given.
- **Not built.** The rest of the wearable is off-chip parts with no logic to
  write: MCU, IMU, GPS, LoRa, microSD, battery, energy meter, buzzer/LED. The
  alternative models compared against this one (plain 1D-CNN, LSTM,
  Transformer) are not built either.

## 10. Verification

Every block has a self-checking testbench in `tb/`. Each compares against
reference arithmetic written separately in `tb/tb_ref_pkg.sv`, which
includes a complete integer model of the network. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_bn_relu` | affine BN + ReLU against the reference for random and corner inputs |
| `tb_dw_conv1d`, `tb_pw_conv1d` | every output of random layers, and the cycle count |
| `tb_maxpool1d`, `tb_gap1d`, `tb_dense` | every output, and the cycle count |
| `tb_sepcnn_accel` | logits and class of random networks and windows against the full reference model, both classes seen, latency exactly 723 clocks (≤ 2800), overrun on an early start |
| `tb_window_sampler` | cold start at sample 50, 13/12 gaps, decimation alignment, quantized contents of every window |
| `tb_feedback_trigger` | random and directed prediction streams against a reference counter: fire after 5, re-fire after 4 more, broken runs |
| `tb_param_mem` | random writes compared word by word with a shadow copy, writes past the end ignored, reset to zero |
| `tb_spi_slave` | random-length transactions with every byte checked both ways, one start pulse per transaction, MISO quiet when idle |
| `tb_host_if` | all three commands, including parameter loads longer than 255 bytes |
| `tb_strikewatch_top` | end to end through the SPI pins only (below) |

`tb_strikewatch_top` runs the top with all parameters at their defaults:

- it loads a random network over SPI;
- it streams 738 samples as PUSH_SAMPLE transactions;
- it reads status back;
- it compares every class and both logits with the reference model on the
  window the reference itself cut from the sample stream;
- it then reloads the parameters and continues.

It counts, and requires at least once, each mechanism:

- cold start;
- 12- and 13-sample gaps;
- both classes;
- a feedback event and a re-fire;
- a broken heel-strike run;
- a parameter reload.

It covers 56 windows and runs in well under a minute.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sw_pkg.sv tb/tb_ref_pkg.sv tb/tb_strikewatch_top.sv \
    --top-module tb_strikewatch_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. `sw_pkg.sv` holds all sizes and
the parameter layout. Changing `QBITS` there changes the bit width
throughout. The network's depth is fixed by the layer chain in
`sepcnn_accel.sv`.
