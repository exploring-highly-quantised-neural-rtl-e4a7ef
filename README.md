# CQMLP-IDS: a 2-bit quantised MLP intrusion detector for automotive CAN

CAN, the bus that connects a car's ECUs, has no authentication. A
compromised ECU can flood it with high-priority frames (denial of service),
send random identifiers and payloads (fuzzing), or forge the value of a
signal such as engine RPM (spoofing). This design detects all three with
a single small neural network, run in programmable logic beside the ECU's
processor. The network looks at the last four CAN messages (identifier
and payload) and labels the window as **benign**, **DoS**, **fuzzing** or
**RPM-spoof**.

The network is a multi-layer perceptron whose weights and activations are
quantised to **2 bits**. That makes a neuron's arithmetic a handful of
small adds. Batch normalisation and ReLU shrink to three threshold
comparisons per neuron. The hardware is a *dataflow* pipeline: one
hardware unit per layer, all connected by ready/valid streams, so every
layer works on a different window at the same time. The host processor
reaches it as an AXI4-Lite slave. It writes each received message, gets
an interrupt when a window has been classified, and reads four class
scores.

The network's shape and precision, the chain of a FIFO followed by five
matrix-vector units, and the AXI slave with a completion interrupt follow
the published CQMLP-IDS design (Khandelwal and Shreejith, "Exploring Highly
Quantised Neural Networks for Intrusion Detection in Automotive CAN"). That
design was generated with the FINN compiler, and its RTL was never
published. Everything below the block level is therefore this design's own
realisation. [Departures and open points](#departures-and-open-points)
lists what was chosen here rather than taken from the publication.

## The network

| layer | unit | inputs (MW) | neurons (MH) | input type | output | SIMD | PE | cycles / window |
|---|---|---|---|---|---|---|---|---|
| 0 | MatrixVectorActivation_0 | 40 | 256 | signed INT8 | 2-bit act. | 8 | 1 | 1280 |
| 1 | MatrixVectorActivation_1 | 256 | 128 | unsigned 2-bit | 2-bit act. | 32 | 1 | 1024 |
| 2 | MatrixVectorActivation_2 | 128 | 64 | unsigned 2-bit | 2-bit act. | 8 | 1 | 1024 |
| 3 | MatrixVectorActivation_3 | 64 | 32 | unsigned 2-bit | 2-bit act. | 2 | 1 | 1024 |
| 4 | MatrixVectorActivation_4 | 32 | 4 | unsigned 2-bit | signed 10-bit score | 1 | 1 | 128 |

The input is the *feature window*: four consecutive messages of ten INT8
values each, 40 values in all. Weights are signed 2-bit numbers
(-2, -1, 0, 1), 53,376 of them in total. Hidden activations are unsigned
2-bit numbers (0 to 3). The output layer has no activation. Its four raw
accumulators are the class scores. The host adds the output layer's scale
and bias if it needs probabilities, and applies softmax. The argmax of the
raw scores is the predicted class if the output bias is zero.

The folding (SIMD and PE) is this design's own. It follows the rule a FINN
build would apply to the published settings: a target of 100,000 windows/s
at 200 MHz (at most 2,000 cycles per layer) and weight streams no wider
than 80 bits (PE x SIMD x 2 bits <= 80). For each layer, SIMD is the
smallest divisor of MW that brings MW/SIMD x MH under 2,000 cycles.

## How a window moves through the pipeline

```
 AXI4-Lite ──► axil_ids_regs ──msg (80 b)──► feature_buffer ──8 x INT8──► stream_fifo ──►
   (host)        │   ▲                      (last 4 messages)            (Streaming FIFO_0)
                 │   │                                                          │
                 │   └──── 4 class scores ◄── MVA_4 ◄── MVA_3 ◄── MVA_2 ◄── MVA_1 ◄── MVA_0
                 └── cfg bus (weights, thresholds) to every MVA_i
```

1. **Message in.** The host writes a message as three words: MSG0, MSG1,
   then MSG2. The write to MSG2 hands the ten bytes to the feature buffer.
2. **Window.** `feature_buffer` shifts the message into a 40-byte window
   (oldest message first). Once four messages have been seen, it sends
   the whole window as five 8-byte beats. The first three messages after
   reset or a clear only fill the window and give no result.
3. **Streaming FIFO_0** (`stream_fifo`, 32 beats deep) decouples the
   window stream from layer 0. It can hold six windows while layer 0 is
   busy.
4. **Layers.** Each `mvau` takes a whole input vector into one of two
   buffers, then computes from it. Meanwhile the other buffer can take
   the next vector. Every output it produces (one neuron per beat, since
   PE = 1) streams straight on to the next layer.
5. **Scores out.** `axil_ids_regs` collects the four scores from layer 4.
   It sets STATUS[0] and, if enabled, raises `irq`. It takes no further
   scores until the host acknowledges. Layer 4 then stalls, and the stall
   backs up the pipeline as far as needed.

**Throughput.** Layer 0 is the slowest unit, at 1,280 cycles per window.
With the double buffers the pipeline accepts a window every 1,280 cycles:
156,250 windows/s at 200 MHz, above the 100,000/s target. The end-to-end
test measures exactly 1,280 cycles between results while streaming.

**Latency.** From the write that submits the fourth message to the
interrupt takes 4,491 cycles (22.5 us at 200 MHz). That is the sum of the
stages: five window beats, layer 0's full vector of 1,280 cycles, then
each later layer's 1,024 or 128 cycles of compute after its input is
complete. The published figure of 0.11 ms per frame also includes the
software path on the ECU. CAN at its highest payload delivers a frame
roughly every 110 us, so the accelerator answers well before the next
frame arrives.

## Inside a matrix-vector activation unit (`mvau`)

This is the heart of the design. One instance is one fully connected
layer.

**Folding.** An MH x MW weight matrix is processed PE rows at a time
(a *neuron fold*) and SIMD columns at a time (a *synapse fold*). In each
cycle, every one of the PE lanes forms SIMD products, adds them, and adds
that sum to its accumulator. After SF = MW/SIMD cycles a neuron fold is
complete. Its PE results go to the output register, and the next fold
starts in the following cycle. A window costs SF x NF = (MW/SIMD) x
(MH/PE) cycles. The only stall is when the output register still holds
an unaccepted result at the end of a fold.

**Weight and threshold memories.** The weight memory has NF x SF words
of PE x SIMD x 2 bits. Word `nf*SF + sf`, bit field
`(pe*SIMD + simd)*2 +: 2` holds the weight of neuron `nf*PE + pe` for
input `sf*SIMD + simd`. The threshold memory has NF words, each holding
the three thresholds of PE neurons.

Each memory has a single registered read port, as a block RAM has. The
unit keeps a linear weight address `waddr = nf*SF + sf` and computes, one
cycle ahead, the address of the step it will execute next. That is
`waddr + 1` (wrapping at the end of a vector) when it advances, and the
same address when it stalls. So the weight word and the threshold word a
step needs are already in their read registers when the step executes,
and the registered read costs no cycles. The read registers reload every
cycle. A configuration write is therefore visible from the following
cycle, as long as no inference is in flight.

**Input double buffer.** Two banks of MW elements. The load side fills
bank `wr_bank`, taking IN_PAR elements per beat, where IN_PAR is the
previous layer's PE or the window beat width. The compute side reads bank
`rd_bank`. A bank is marked full when its last beat arrives and freed when
its last fold has been issued. Because the unit takes the previous layer's
beat width directly, no separate data-width converter is needed.

**Arithmetic.** Products are formed at the full accumulator width,
`ACC_W = IN_W + 2 + clog2(MW) + 1` (17, 13, 12, 11 and 10 bits for the
five layers), so no sum can overflow. Layer 0 treats its input as signed
INT8. The others treat theirs as unsigned 2-bit activations.

**Activation as thresholds (`multithreshold`).** For a hidden neuron,
batch normalisation, the layer bias and the quantised ReLU together form
a rising staircase of the integer accumulator. So the 2-bit output is

    act = [acc >= T1] + [acc >= T2] + [acc >= T3],   T1 <= T2 <= T3.

Suppose the trained model gives, per neuron, the affine map
`y = a*acc + c` with a > 0. Here `a = gamma*s_in*s_w/sigma` and
`c = beta - gamma*(mu - bias)/sigma`, from the batch-norm parameters and
the quantisation scales of the input and weights. Suppose also the
activation quantiser rounds `y/s` to the nearest integer and clamps it to
0..3. Then the thresholds are

    T_k = ceil(((k - 0.5)*s - c) / a),   k = 1, 2, 3.

Exact ties follow the quantiser's rounding rule. A neuron with a < 0
would need a falling staircase, which this design does not build.

## Host interface

AXI4-Lite, 32-bit data, 8-bit byte addresses. Byte strobes are ignored.
Every register is read one cycle after the address handshake and written
one cycle after the address and data handshake.

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | R/W | [0] interrupt enable; [1] write 1 to clear the message window (self-clearing) |
| 0x04 | STATUS | R, W1C | [0] result valid (write 1 to acknowledge); [1] feature buffer can take a message; [6:4] messages in the window (0 to 4) |
| 0x08 | COUNT | R | windows classified since reset |
| 0x10 | MSG0 | R/W | message bytes 0 to 3 (byte 0 in bits 7:0) |
| 0x14 | MSG1 | R/W | message bytes 4 to 7 |
| 0x18 | MSG2 | W | bytes 8 and 9 in bits 15:0; writing it submits the message |
| 0x20 to 0x2C | RES0 to RES3 | R | sign-extended scores: benign, DoS, fuzzing, RPM-spoof |
| 0x40 | CFG_ADDR | R/W | [27:24] layer 0 to 4, [20] 0 = weight / 1 = threshold, [17:9] neuron, [8:0] input index or threshold index 0 to 2 |
| 0x44 | CFG_DATA | W | writing it stores the value at CFG_ADDR (weight in bits 1:0, threshold in the low ACC_W bits) |

`irq` is a level output, equal to CTRL[0] AND STATUS[0].

A write to MSG2 that arrives while the feature buffer is still sending a
window is held (AWREADY/WREADY stay low) until the buffer is free. So that
a processor never stalls on the bus, a driver checks STATUS[1] before it
writes MSG2. STATUS[1] is low only while a window is leaving the buffer,
or when the whole pipeline is full because results have not been
acknowledged.

**Bring-up sequence.**
1. Write every weight: CFG_ADDR = {layer, 0, neuron, input}, then
   CFG_DATA = the weight.
2. Write every hidden-layer threshold: CFG_ADDR = {layer, 1, neuron, k},
   then CFG_DATA = T_(k+1).
3. Write CTRL = 1 to enable the interrupt.
4. For each received frame, write MSG0, MSG1 and MSG2. On each interrupt,
   read RES0 to RES3, then write STATUS = 1.

That is 53,376 weights and 1,440 thresholds, two bus writes each. Do not
write the configuration while windows are in flight.

**Message encoding.** The network expects each message as ten INT8
values, covering the CAN identifier and the eight payload bytes. How the
identifier is split into INT8 values is fixed by whatever training
pre-processing produced the weights. The driver applies the same encoding
before writing MSG0 to MSG2. The hardware takes the ten bytes as given.

## Departures and open points

Taken from the published design:
- The network: 40 inputs (4 messages x 10 INT8), hidden layers of 256,
  128, 64 and 32 units with batch-norm + ReLU, 4 outputs.
- 2-bit weights and activations.
- The FIFO-then-five-matrix-vector-units structure.
- The AXI slave with a completion interrupt.
- The throughput target (100,000 messages/s) and the 80-bit unit width.
- The 200 MHz clock.

This design's own choices:
- **Folding** (SIMD per layer, PE = 1). It is derived from the two
  published settings above; the published folding is not known.
- **Register I/O instead of DMA.** The FINN accelerator moves data with
  DMA engines. Here the host writes messages and reads scores through
  AXI4-Lite registers, which is enough at one 10-byte message per CAN
  frame.
- **Runtime-loaded parameters.** The trained weights are not available.
  The weight and threshold memories are written through the register
  interface instead of being fixed at build time.
- **Hardware sliding window.** The window is formed in hardware, oldest
  message first, with a three-message warm-up after reset or a clear.
- **Number formats.** Weights are two's complement in {-2..1}.
  Activations are unsigned. The threshold rule is `acc >= T`.
- **Output layer.** Layer 4 emits raw accumulators. Its bias, scale and
  the softmax stay in software.
- **Memory style.** The weight and threshold memories use synchronous
  reads with a prefetched address, so a synthesis tool can map them to
  block RAM. How many block RAMs that takes depends on the tool. The
  published build reports 4 BRAMs and no DSPs.

Not part of this RTL: the ARM processor, the AXI interconnect, DRAM, the
processor-side CAN controller and its switch. The accelerator connects to
them only through its AXI4-Lite port and `irq`.

## Files

| file | content |
|---|---|
| `rtl/cqmlp_pkg.sv` | layer sizes, precisions, folding, register map, configuration struct |
| `rtl/cqmlp_ids_top.sv` | the accelerator: front end, feature buffer, FIFO, five layers |
| `rtl/axil_ids_regs.sv` | AXI4-Lite slave, message hand-off, score collection, interrupt, configuration bus |
| `rtl/feature_buffer.sv` | four-message sliding window |
| `rtl/stream_fifo.sv` | Streaming FIFO_0 |
| `rtl/mvau.sv` | folded matrix-vector activation unit |
| `rtl/multithreshold.sv` | threshold activation |
| `tb/tb_*.sv` | one self-checking testbench per module (`tb_mvau` uses `tb/mvau_harness.sv`) |

## Verification

Every testbench checks its block against values it computes
independently. It prints `TB_RESULT checks=N failures=M` and has a
watchdog.

- `tb_cqmlp_ids_top` runs the whole accelerator at its default (full)
  size. It draws random weights and messages and computes the expected
  scores with a plain software MLP. Hidden thresholds are set per neuron
  at the quartiles of that neuron's accumulators, so all four activation
  levels occur. The run:
  - loads all parameters over AXI;
  - times the first result;
  - streams a segment as fast as the accelerator accepts it;
  - leaves a result unacknowledged for 3,000 cycles;
  - clears the window and sends a second segment;
  - sends a third segment at CAN line rate (one frame per 22,000 cycles).

  It checks all 25 windows' scores, an initiation interval of at most
  2,000 cycles (1,280 measured) and a latency under 22,000 cycles. It also
  checks that each mechanism occurred: warm-up, input back-pressure, both
  buffers of a layer full, score stall, interrupts, window clear, and
  line-rate answers.
- `tb_mvau` runs two configurations, one with PE = 2 and signed INT8
  input and thresholds, one with PE = 3 and raw output. Both use random
  stalls. It checks every output, the first-result latency (SF + 1
  cycles) and the back-to-back interval.
- `tb_feature_buffer`, `tb_stream_fifo`, `tb_multithreshold` and
  `tb_axil_ids_regs` cover each remaining block, including back-pressure,
  warm-up, clear and interrupt acknowledge.

Running a testbench with Verilator 5 (from the directory that holds `rtl/`
and `tb/`):

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/cqmlp_pkg.sv \
          tb/tb_cqmlp_ids_top.sv --top-module tb_cqmlp_ids_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The full-size end-to-end
test builds in about 15 s and runs in under a second.

What these tests cannot show is classification accuracy. The published
accuracy comes from trained weights that are not available. With
weights converted as described above, this RTL computes the same integer
function as a threshold-folded 2-bit model.
