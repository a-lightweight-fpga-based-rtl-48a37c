# A CAN intrusion detection accelerator with two quantised MLPs

A CAN bus does not authenticate anything. Any node that has been compromised
can flood the bus (denial of service), send random frames (fuzzing) or pose as
another ECU (spoofing, for example fake RPM or gear-position messages). The
IDS-ECU architecture proposed by Khandelwal and Shreejith ("A Lightweight
FPGA-based IDS-ECU Architecture for Automotive CAN") folds intrusion detection
into an ordinary ECU built on a hybrid FPGA. The ARM cores run the ECU software
and receive frames through their own CAN controller. A small accelerator in the
programmable logic judges every received frame, in isolation from that software.

The detector is a small feed-forward network, not a rule set. Each frame's
identifier and payload become 10 INT8 values. The last four frames form a
40-value input, and a quantised multi-layer perceptron (QMLP) maps it to an
attack probability. Two such networks run side by side on the same input.
QMLP-1 is trained for DoS and fuzzing, QMLP-2 for RPM and gear spoofing. The
processor starts both with one register write and gets a single interrupt when
both are done.

This repository holds synthesizable SystemVerilog for that logic-side
accelerator. The original work runs the two networks on a vendor
deep-learning processor, a closed IP core. Here a small fixed-function engine
takes its place. It computes the same network, and its internals are described
below.

## The split between processor and logic

```
   CAN bus ──> CAN controller ──> ARM cores (ECU software + IDS task)
                                      │  AXI4-Lite (memory mapped)    ▲ irq
   ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─│─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ ─ │─ ─ ─
   ids_ecu_pl                     ids_regs ───────────────────────────┘
                                   │    │ start, load
                      push         ▼    ▼
                  feature_buffer ──┬──> qmlp_core #1  (DoS, fuzzing)
                  (4 msgs x 10 B)  └──> qmlp_core #2  (RPM, gear spoofing)
```

Everything above the dashed line is the processor system: hard CPU cores, the
CAN controller, the interconnect and DRAM. It is not part of this RTL. The
top module `ids_ecu_pl` has only an AXI4-Lite slave port and an interrupt
line. Software does four things over that port:

1. At start-up, it loads both models (weights, biases, per-layer shifts).
2. For each received CAN frame, it writes the identifier, payload and DLC, then
   pushes them into the feature window.
3. It starts both detectors with one write (non-blocking: the CPU goes on
   with other work).
4. On the interrupt, it reads the two results and clears the interrupt.

## From a CAN frame to the feature window (`feature_buffer`)

Each frame is packed into 10 INT8 values:

| value | content |
|-------|---------|
| 0 | identifier bits 15..8 |
| 1 | identifier bits 7..0 |
| 2..9 | payload bytes 0..7; bytes at or past the DLC are zero (a DLC above 8 counts as 8) |

Each byte is read as a two's-complement INT8 with no scaling. Ten values per
frame, four frames per window and 40 network inputs are the model's numbers.
The byte order, the zero padding and the two identifier bytes are this
design's reading of them. The 4-hex-digit identifiers of the Car Hacking
dataset fit in two bytes. The upper 13 bits of a 29-bit extended identifier
are accepted by the register but dropped.

The window is a shift register of four slots. A push drops the oldest slot
and writes the new frame into the newest. `features[m*10 + b]` is value `b` of
slot `m`, and slot 0 is the oldest. Until four frames have arrived the older
slots hold zeros, so a detector can run on a partial window. A clear returns
the window to zeros.

## The network and its integer arithmetic

```
40 inputs ─> dense 256 ─> dense 128 ─> dense 64 ─> dense 32 ─> dense 1 ─> sigmoid
             BN+ReLU      BN+ReLU      BN+ReLU     BN+ReLU
```

All weights, biases and activations are INT8. Batch normalisation is a fixed
affine map per channel at inference time. It is assumed folded into the dense
weights and biases when the model is quantised, and dropout does nothing at
inference. What remains per neuron is done by `qmlp_requant`:

```
sum = Σ w[n][i]·x[i]  +  (bias[n] <<< bias_shift)          (32-bit accumulator)
q   = (sum + 2^(out_shift-1)) >>> out_shift                 (no rounding term if out_shift = 0)
q   = saturate(q, -128, 127);  hidden layers: q = max(q, 0)
```

`bias_shift` and `out_shift` are loaded per layer and shared by all neurons
of that layer. Quantisation flows that use power-of-two scales
produce exactly such shifts. The rounding (half up) and saturation are choices
of this design.

The single output neuron gives an INT8 logit. `qmlp_sigmoid` reads it as
x = logit / 16 and applies a four-segment piecewise-linear sigmoid (PLAN):

| \|x\| | sigmoid(\|x\|) |
|-----|----------------|
| ≥ 5 | 1 |
| 2.375 … 5 | \|x\|/32 + 0.84375 |
| 1 … 2.375 | \|x\|/8 + 0.625 |
| < 1 | \|x\|/4 + 0.5 |

For negative x it uses 1 − sigmoid(\|x\|). The probability is an 8-bit value
in units of 1/256, saturated at 255, and it is within about 0.02 of the true
sigmoid. The attack flag is probability ≥ 0.5, which is the same as
logit ≥ 0. Software that wants another operating point on the ROC curve can
compare the probability with its own threshold.

## Inside a detector core (`qmlp_core`)

This is the part most worth reading before changing anything.

**Lanes and groups.** A core computes `LANES` = 8 output neurons of a layer at
once. Those eight neurons are a *group*. For a group, the core walks through
the layer's inputs, one per cycle. In each cycle it reads a single 64-bit
weight word holding `W[g*8+p][i]` for lanes p = 0..7. It multiplies the eight
weights by activation `i` and adds the products into eight 32-bit
accumulators. After the last input, eight `qmlp_requant` units turn the
accumulators into INT8 activations in one cycle. Layer sizes are not always a
multiple of 8 (the last layer has 1 unit). Lanes past the end of a layer are
computed but never written back.

**Activation banks.** Activations live in two 256-entry INT8 register banks.
Odd layers read bank 0 and write bank 1, and even layers do the reverse.
Start copies the 40 features into bank 0.

**Memory layout = visiting order.** The weight memory holds the words in the
exact order the core visits them: layer by layer, group by group, input by
input. So the read address is a counter that advances by one every MAC cycle
for the whole inference. It needs no address arithmetic. For layer l (1..5)
with `U` = {40, 256, 128, 64, 32, 1}:

```
weight word address = Σ_{k<l} ceil(U[k]/8)·U[k-1]  +  g·U[l-1]  +  i
                      byte p of the word = W_l[g*8+p][i]
bias word address   = Σ_{k<l} ceil(U[k]/8)  +  g
                      byte p of the word = b_l[g*8+p]
```

That gives 6,688 weight words and 61 bias words per core. Unused lanes of
layer 5 are zero. `qmlp_pkg` computes these sizes with `weight_base`,
`bias_base`, `weight_words` and `bias_words`.

**Schedule.** A group of layer l takes `U[l-1]` MAC cycles, one drain cycle
(the weight read is registered) and one write-back cycle. Add one cycle to
take `start` and one cycle to form the result:

```
cycles = 2 + Σ_l ceil(U[l]/8)·(U[l-1] + 2)
       = 2 + 32·42 + 16·258 + 8·130 + 4·66 + 1·34 = 6812
```

`done` pulses 6,812 cycles after the cycle that took `start`, with `result`
valid. The two cores always start together, so they finish on the same cycle.
A `start` while busy is ignored by the core, and refused and flagged by the
register file.

## Software interface (`ids_regs`)

AXI4-Lite slave, 8-bit byte addresses, 32-bit registers. Byte strobes are
ignored and every response is OKAY. One write and one read can be
outstanding. AW and W may arrive in either order.

| offset | name | access | content |
|--------|------|--------|---------|
| 0x00 | CTRL | RW | [0] IRQ_EN; write pulses: [1] START both cores, [2] CLEAR window |
| 0x04 | STATUS | RO | [1:0] core busy, [6:4] messages in window, [7] window full |
| 0x08 | IRQ_STATUS | RW1C | [0] core 1 done, [1] core 2 done, [2] START refused (busy) |
| 0x0C | MSG_ID | RW | [28:0] CAN identifier |
| 0x10 | MSG_DATA_LO | RW | payload bytes 0..3 (byte 0 in bits 7..0) |
| 0x14 | MSG_DATA_HI | RW | payload bytes 4..7 |
| 0x18 | MSG_PUSH | WO | [3:0] DLC; pushes the message into the window |
| 0x1C | RESULT1 | RO | core 1: [7:0] logit, [15:8] probability/256, [16] attack |
| 0x20 | RESULT2 | RO | core 2, same layout |
| 0x24 | LD_ADDR | RW | [15:0] word address, [16] core (0 → 1, 1 → 2), [17] 0 weights / 1 biases |
| 0x28 | LD_DATA_LO | RW | lanes 0..3 of the next word |
| 0x2C | LD_DATA_HI | WO | lanes 4..7; stores {HI, LO} at LD_ADDR, then LD_ADDR[15:0] += 1 |
| 0x30 | LAYER_CFG | WO | [2:0] layer 1..5, [8] core, [20:16] bias shift, [28:24] output shift |
| 0x34 | LATENCY1 | RO | cycles from START to core 1 done (last run) |
| 0x38 | LATENCY2 | RO | same for core 2 |

`irq = IRQ_EN && (IRQ_STATUS != 0)` is a level signal.

To load a model, write LD_ADDR once. Then write LD_DATA_LO and LD_DATA_HI for
every word in order; the address advances by itself. Do this once for the
weights and once for the biases, then make five LAYER_CFG writes. Per frame,
software writes MSG_ID, the two data words and MSG_PUSH, then CTRL = 3. It
waits for the interrupt, reads RESULT1/RESULT2 and writes 3 to IRQ_STATUS.
Loading while a core is running corrupts that run; the hardware does not block
it.

## Throughput against the bus

Both models take 6,812 cycles together. The original system reports
0.24 ms per message end to end, including software, which is 4,166 messages
per second. Matching that needs only a 28.4 MHz clock. The fastest 8-byte
frame stream on a 1 Mbit/s bus is one frame per 111 µs, which needs
61.4 MHz to keep up. At 600 MHz, the clock the original runs its
accelerator at, one inference takes 11.4 µs. The RTL counts in cycles and
has no clock of its own.

Each core stores 53,280 INT8 weights (6,688 × 64 bits) and 481 biases
(61 × 64 bits) in on-chip RAM. The original paper gives about 53,300
parameters per model.

## How this differs from the original system

- **Engine.** The original runs the models on two instances of Xilinx's DPU
  (B512 configuration), with compiled instruction streams. `qmlp_core` is a
  fixed-function engine of this design's own. Its speed, area and numerical
  details (requantisation, sigmoid approximation) are not the DPU's, so a model
  compiled for the DPU cannot be loaded as it is. Its weights must be
  re-exported in the layout above, with power-of-two scales.
- **Model storage.** The DPU fetches weights from DRAM through three AXI master
  ports. Here both models are held on chip and loaded once through the slave
  port. There are no master ports.
- **Feature window.** In the original, software keeps the 4-message FIFO. Here
  it is a hardware shift register that software feeds message by message.
- **Packing details.** The identifier/payload byte order, zero padding, logit
  scale (1/16), sigmoid approximation, 0.5 threshold, register map, interrupt
  scheme and refused-start flag are all choices of this design.
- **Not here.** The processor, its CAN controller, the interconnect and the
  DRAM are outside this RTL. So is anything about training: the trained
  weights are not public, and the testbenches use random models.

## Files

| file | contents |
|------|----------|
| `rtl/qmlp_pkg.sv` | sizes, types, layout and cycle-count functions |
| `rtl/feature_buffer.sv` | frame packing and the 4-message window |
| `rtl/qmlp_weight_mem.sv` | simple dual-port parameter RAM |
| `rtl/qmlp_requant.sv` | bias, rescale, saturation, ReLU |
| `rtl/qmlp_sigmoid.sv` | piecewise-linear sigmoid and attack flag |
| `rtl/qmlp_core.sv` | one detector: sequencer, 8 MAC lanes, activation banks |
| `rtl/ids_regs.sv` | AXI4-Lite register file and interrupt |
| `rtl/ids_ecu_pl.sv` | top: register file, window, two cores |
| `tb/qmlp_ref_pkg.sv` | integer reference model of the network (random weights) |
| `tb/axil_bfm.sv` | AXI4-Lite master with random response back-pressure |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench checks against values it works out on its own and ends with
`TB_RESULT checks=N failures=M`. Each also has a watchdog.
The RTL also has assertions that run in every simulation built with
`--assert`. They cover three things. AXI responses stay valid and stable until
accepted. `done` is a one-cycle pulse that ends `busy`. The two cores stay in
step.

- `tb_qmlp_requant`: hand-worked cases, then 20,000 random ones against a
  64-bit reference with true floor division.
- `tb_qmlp_sigmoid`: all 256 logits. Each is checked exactly against the PLAN
  segments, within 6/256 of the real sigmoid, and for the flag.
- `tb_qmlp_weight_mem`: fills and reads back all 6,688 words, and checks hold
  and read-during-write.
- `tb_feature_buffer`: 300 random frames against a reference window, plus
  reset, clear, and clear together with a push.
- `tb_qmlp_core`: two random models and 12 windows. Checks bit-exact logit,
  probability and flag, the 6,812-cycle latency, and that a start while busy
  is ignored.
- `tb_ids_regs`: every register, all AW/W orders, load pulses and address
  increment, interrupt set and clear, refused start, and latency registers.
  A stand-in models the cores.
- `tb_ids_ecu_pl`: runs at the default parameters. It loads two models over
  AXI and streams 17 frames; the first three come from a real vehicle
  capture. Results and latency are checked after every frame. It counts, and
  requires at least once, each of these: concurrent completion, interrupt,
  partial window, window slide, clear, refused start, ReLU clipping, INT8
  saturation, and both verdicts.
- `tb_can_workloads`: four traffic mixes shaped like the four attack types
  (DoS frames with identifier 0x000, fuzzing with random frames, forged RPM
  frames 0x316, forged gear frames 0x43F), each interleaved with normal frames.
  40 frames per mix are handled the way the IDS software would handle them.
  Every result is checked bit-exact. The whole per-message exchange (register
  writes, run, interrupt, reads) takes at most 6,841 cycles. The test requires
  this to be within the 0.24 ms budget and within one 1 Mbit/s frame time, both
  at 600 MHz. Detection quality cannot be tested without the trained weights.

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert rtl/qmlp_pkg.sv rtl/qmlp_weight_mem.sv \
    rtl/qmlp_requant.sv rtl/qmlp_sigmoid.sv rtl/qmlp_core.sv rtl/feature_buffer.sv \
    rtl/ids_regs.sv rtl/ids_ecu_pl.sv tb/qmlp_ref_pkg.sv tb/axil_bfm.sv \
    tb/tb_ids_ecu_pl.sv --top-module tb_ids_ecu_pl -Mdir obj_top
./obj_top/Vtb_ids_ecu_pl
```

The other testbenches build the same way with their own `--top-module`. Each
runs in well under a second.

## Changing it

- `qmlp_pkg::UNITS` defines the network. The core, the memory sizes and the
  cycle count all follow from it. `MAX_UNITS` must stay at least the widest
  layer.
- `qmlp_core` takes any `LANES`. The top fixes it at 8 because its load word is
  64 bits.
- `feature_buffer` takes any `DEPTH`. The network input size must then be
  `10 × DEPTH`.
- `FRAC` sets the logit scale the sigmoid assumes (0..8).
