# SecCAN: a CAN controller that checks every frame for intrusions while receiving it

A CAN bus has no authentication, so any node can inject frames. Intrusion detection usually runs in
software on the host ECU: the frame is received, handed over, and classified afterwards, which costs
CPU time and adds latency. SecCAN moves the detector into the CAN controller itself. A small
4-bit quantised multilayer perceptron (the Q-IDS) sits on the receive datapath. It starts as soon as
the last data byte of a frame has been shifted in. The controller still needs the CRC field, the
acknowledge slot and seven end-of-frame bits before the frame is valid, and the inference finishes
inside that window. Each frame therefore reaches the host's receive buffer with a benign/attack flag
already attached, at no extra latency and with no host software involved.

This repository holds a synthesizable SystemVerilog model of that controller. It is built after the
SecCAN paper (an extended CAN controller with embedded intrusion detection, evaluated at 1 Mbit/s on
a 16 MHz controller clock). The module structure and signal names follow the paper. Everything the
paper leaves open was filled in here and is marked below.

## Structure

```
seccan_top
 ├─ config_registers     AXI4-Lite registers, TX buffer, RX queue with IDS flags, irq
 ├─ can_bit_timing       prescaler, time quanta, sample point, hard/soft sync
 └─ can_bit_processor    protocol engine + IDS datapath extension
     ├─ can_rx           de-stuffing, field decoding, CRC/ACK/EOF checks, error flags
     ├─ can_tx           stuffing, CRC, arbitration, ACK check, retransmission, TEC
     ├─ ids_control      REG (ids_en) + byte counter (data_en)
     ├─ feature_collector FIFO, zero padding, current+previous message, AXI-Stream out
     └─ q_ids            {64,32,1} 4-bit MLP
         ├─ qmlp_layer x3
         └─ vec_serializer x2
```

`seccan_pkg` holds the shared constants and types: frame struct, bit-timing struct and the weight
write bundle. The host and the bus transceiver are outside the design. Their signals are top-level
ports: the AXI4-Lite slave, `irq`, `can_rx` (1 = recessive) and `can_tx` (0 = drive dominant).

## How a received frame is tagged

The order of events for one frame:

1. `can_rx` samples a dominant start-of-frame bit on an idle bus and pulses `header_detector`.
   `ids_control` registers it into `ids_en`, which opens the feature path for this frame.
2. As the identifier arrives, `can_rx` writes two bytes into the feature FIFO (`byte_we`/`byte_val`):
   `{5'b0, id[10:8]}` and `id[7:0]`.
3. Each data byte goes to the receive data registers and the FIFO together. `write_flag` marks each
   one, and the counter in `ids_control` counts them.
4. When the count equals the length given by the DLC (0 for remote frames), `data_en` pulses once.
   This is the start of the IDS window.
5. `feature_collector` streams 20 bytes over AXI-Stream (`tvalid/tready/tdata/tlast`):
   - 10 bytes for the current message: the two ID bytes, then the data bytes, zero-padded to eight;
   - 10 bytes for the previous message on the bus, in the same layout.
6. `q_ids` runs the three layers and pulses `ids_output_ready` with `attack`. `can_bit_processor`
   holds the verdict until the next start of frame.
7. The CRC check, ACK slot and EOF run meanwhile. At the last EOF bit, `can_rx` pulses `frame_done`.
   If this node did not send the frame, the top's multiplexer stores `{frame, ids_valid, attack}`
   into the receive queue. The stored `attack` bit is `ids_done & ids_attack`, so a frame whose
   inference was not ready (or IDS off) is stored with `ids_valid = 0`.

The "previous message" is the last frame that completed without error on the bus. That includes
frames this node sent itself and frames the acceptance filter drops, because the detector watches
traffic, not just what the host keeps. A frame that ends in an error never becomes the previous
message.

### Timing budget

At 1 Mbit/s and 16 MHz one bit is 16 clocks. After the last data bit, a base frame still carries
about 15 CRC bits plus stuff bits, the CRC delimiter, ACK slot, ACK delimiter and 7 EOF bits. The
paper bounds the IDS latency by the reception window, T_IDS = T_frame_done − T_data_en < 37.376 µs
(598 clocks).

| Measurement (default parameters, 16 clocks per bit) | Clocks | µs |
|---|---|---|
| `data_en` → `ids_output_ready`, full controller at line rate | 123 | 7.7 |
| same, stand-alone Q-IDS fed with gaps in its input stream | up to 139 | 8.7 |
| `data_en` → `frame_done`, 8-byte frame | 414 | 25.9 |
| Margin, worst case seen in the tests | ≥275 | ≥17 |

The 123 clocks break down as follows:
- 20 input beats for layer 1;
- 64 serialised activations into layer 2;
- 32 serialised activations into layer 3;
- pipeline and handshake stages.

The paper reports 36.5 µs for its FINN-generated accelerator. This design is faster because each
layer here computes all of its neurons in parallel.

## The Q-IDS datapath

`qmlp_layer` is one fully connected layer. Its interface and arithmetic:
- It holds `N_IN × N_OUT` signed 4-bit weights and `N_OUT` 16-bit biases.
- It accepts one input value per clock on a valid/ready stream. On each beat, all `N_OUT`
  accumulators add `w[i][j] * x[i]`.
- After the beat marked last, it outputs, for every neuron:
  - the sum `acc + bias`;
  - the 4-bit activation `clamp((acc + bias) >>> SHIFT, 0, 15)`. This is a ReLU followed by 4-bit
    unsigned quantisation.

`vec_serializer` turns a layer's activation vector back into a stream for the next layer.

| Layer | Inputs | Neurons | Output | Shift |
|---|---|---|---|---|
| 1 | 20 raw feature bytes (unsigned 8-bit) | 64 | ReLU | `L1_SHIFT` = 8 |
| 2 | 64 four-bit activations | 32 | ReLU | `L2_SHIFT` = 4 |
| 3 | 32 four-bit activations | 1 | attack flag | — |

The attack flag is set when layer 3's sum is > 0, the same decision as sigmoid > 0.5. `IDS_SCORE`
exposes the raw sum.

The trained model is not published, so the weights are not fixed in hardware. The host writes them
before enabling the IDS:
- Set `IDS_ADDR` to `{layer, row, column}`.
- Write `IDS_WDATA` with eight 4-bit weights for neurons `col*8 … col*8+7` of input `row`. Nibble
  k goes to neuron `col*8+k`.
- Write `IDS_BDATA` with the bias of neuron `col`.

Batch normalisation from training folds into the biases and the shift. This is also how a trained
brevitas/FINN model would be mapped onto this datapath: fold each batch-norm threshold into
`bias` and choose the shift from the activation scale.

## Protocol engine

- **Bit timing** (`can_bit_timing`):
  - A bit is 1 + (TSEG1+1) + (TSEG2+1) quanta of (BRP+1) clocks.
  - The reset value (BRP=0, TSEG1=12, TSEG2=1) gives 16 clocks per bit, i.e. 1 Mbit/s at 16 MHz.
  - The bus input passes a two-flop synchroniser.
  - Hard sync happens on the start-of-frame edge. A recessive-to-dominant edge later in the frame
    resynchronises by at most SJW+1 quanta.
  - Resynchronisation is suppressed while this node itself drives dominant.
- **Receive** (`can_rx`):
  - Decodes CAN 2.0A base frames: de-stuffs after five equal bits and checks the CRC-15 (0x4599).
  - Drives the ACK slot on a correct frame.
  - Detects stuff, CRC and form errors and sends a 6-bit error flag. The flag is dominant while the
    node is error-active. Once either error counter reaches 128 the node is error-passive, and the
    flag is left recessive.
  - A dominant bit in the last EOF bit or the first two intermission bits is an overload condition.
    The receiver then sends a 6-bit dominant overload flag and counts no error.
  - After an error or overload flag, it waits for eleven recessive bits. This covers the eight-bit
    delimiter plus the intermission.
  - Frames with IDE=1 (29-bit identifiers) are skipped to bus idle.
- **Transmit** (`can_tx`):
  - Serialises the TX buffer with stuffing and a CRC computed on the fly.
  - Arbitrates on ID+RTR. On a lost arbitration it falls back to receiving and retries when the bus
    is idle.
  - Checks each bit it sends and the ACK slot. On an error it has `can_rx` send the error flag and
    retries.
  - The transmit error counter rises by 8 per error and falls by 1 per success. The node goes
    bus-off at 256. An error-passive node waits eight extra idle bit times after each frame it
    sent (suspend transmission). Unlike full CAN, its ACK errors still count while error-passive.
- The receive error counter (in the register file) rises by 1 per receive error and falls by 1 per
  good frame.

## Register map (AXI4-Lite, 32-bit, byte offsets)

| Offset | Name | Bits |
|---|---|---|
| 0x00 | CTRL | [0] enable (0 = reset mode), [1] IDS on; write-1 actions: [8] send, [9] release oldest RX frame, [10] cancel send |
| 0x04 | STATUS | [0] frame available, [1] send pending, [2] sending, [3] bus off, [4] RX overrun, [5] bus idle, [6] error passive, [10:8] last error {crc, stuff, form}, [15:12] frames held |
| 0x08 | ERRCNT | [8:0] TEC, [23:16] REC |
| 0x0C | INT_EN | [4:0] enables for the INT_STATUS bits |
| 0x10 | INT_STATUS (W1C) | [0] received, [1] sent, [2] attack flagged, [3] bus error, [4] arbitration lost |
| 0x14 | BTR | [7:0] BRP, [11:8] TSEG1, [14:12] TSEG2, [17:16] SJW; reset 0x00001C00 |
| 0x18 / 0x1C | ACC_CODE / ACC_MASK | [10:0]; a frame is kept when `((id ^ code) & ~mask) == 0` |
| 0x20 | TX_ID | [10:0] ID, [16] RTR |
| 0x24 | TX_DLC | [3:0] |
| 0x28 / 0x2C | TX_DATA0 / TX_DATA1 | bytes 0–3 / 4–7, byte 0 in [7:0] |
| 0x30 | RX_ID | [10:0] ID, [16] RTR, [24] IDS valid, [25] attack |
| 0x34 | RX_DLC | [3:0] |
| 0x38 / 0x3C | RX_DATA0 / RX_DATA1 | as for TX |
| 0x40 | IDS_ADDR | [1:0] layer (0..2), [14:8] row, [22:16] column |
| 0x44 | IDS_WDATA | eight 4-bit weights |
| 0x48 | IDS_BDATA | [15:0] bias |
| 0x4C | IDS_SCORE | last layer-3 sum |

The receive queue holds `RX_DEPTH` = 4 frames. When it is full, new frames are dropped and the
overrun bit is set. `irq` is high while any enabled INT_STATUS bit is set.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `RX_DEPTH` | 4 | receive queue depth (`seccan_top`, `config_registers`) |
| `FIFO_DEPTH` | 16 | feature FIFO depth, at least 10 |
| `L1_SHIFT`, `L2_SHIFT` | 8, 4 | requantisation shifts of layers 1 and 2 |
| `L1_N`, `L2_N`, `L3_N`, `W_W`, `A_W` | 64, 32, 1, 4, 4 | package constants, from the paper |

## What follows the paper and what does not

Taken from the paper:
- the split into config registers, bit timing logic and bit processor;
- the IDS extension inside the bit processor;
- the signals `header_detector`, `ids_en`, `write_flag`, `data_en`, `ids_output_ready` and
  `frame_done`;
- the REG and counter that produce `ids_en` and `data_en`;
- a FIFO with zero padding to eight bytes;
- a feature vector made of ID and payload of the current and previous message;
- an AXI-Stream link into the accelerator;
- a 4-bit MLP with {64, 32, 1} neurons and ReLU, with a sigmoid output;
- a multiplexer in the top that appends the verdict to the received frame;
- 1 Mbit/s at 16 MHz.

Chosen here, where the paper is silent:
- the byte layout of the feature vector and the ID encoding;
- the requantisation by shift-and-clamp in place of folded batch-norm thresholds;
- 8-bit raw inputs to layer 1;
- loadable weights;
- the whole register map, the filter form and the queue depth;
- the bit-timing register layout;
- holding the verdict until the next frame;
- all protocol-engine internals.

Departures and gaps:
- **Accuracy is not reproduced.** The paper's detection accuracy (Car Hacking DoS/fuzzing and
  Survival Analysis datasets) depends on trained weights that are not available. The testbenches
  check the datapath against a bit-exact reference model with random weights.
- **Latency is shorter than reported.** The paper reports 36.5 µs (FINN IP with selective
  unrolling); this design needs 7.7 µs. The paper speaks of both "fully unrolled" and
  "selective unrolling". Here each layer is unrolled across its neurons and fed one input per
  clock.
- **The paper's Q-IDS is generated by AMD's FINN toolchain.** This design instead uses a
  hand-written equivalent with the same interface role.
- **Protocol subset.** Only base (11-bit) frames are supported. Fault confinement is simplified:
  it has error-active and error-passive flags, suspend transmission and bus-off, and overload
  frames are answered. Not built: extended frames, the rule that leaves TEC unchanged on an
  error-passive ACK error, and CAN FD.
- **Area balance differs.** The paper's IDS adds about 30% LUTs but under 1% flip-flops to the
  controller, which suggests weights folded into logic. Here the weights are loadable, so they
  live in registers and memories. In generic synthesis the Q-IDS has about 3.2k of the 4.0k
  flip-flop bits and nearly all of the 15k memory bits. With a fixed trained model, the weight
  arrays could be replaced by constants.
- **Not in the RTL.** FPGA resource figures and the 73.7 µJ per-message energy figure cannot be
  reproduced in RTL.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The bus-level testbenches use `tb/can_node_model.sv`, a
behavioural CAN node that sends frames bit by bit, checks transmitted frames and acknowledges them.
`tb/can_tb_pkg.sv` holds the reference models:
- frame bits with stuffing and CRC;
- the feature vector;
- the quantised MLP.

With Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/seccan_pkg.sv tb/can_tb_pkg.sv tb/tb_seccan_top.sv --top-module tb_seccan_top
./obj_dir/Vtb_seccan_top
```

`tb_seccan_top` drives the whole controller at its default parameters with a 16 MHz clock and
16 clocks per bit. It:
1. loads a random model through the registers;
2. receives 24 tagged frames and checks each stored verdict against the reference MLP;
3. checks that the verdict was ready before the frame was stored;
4. exercises the acceptance filter;
5. transmits a frame, including one that loses arbitration and is retransmitted;
6. receives a frame with a bad CRC;
7. overflows the receive queue;
8. runs with the IDS switched off;
9. leaves the controller alone on the bus until repeated ACK errors make it error-passive, and
   checks that its error flags are then recessive.

It counts each of these mechanisms and fails if one never happened. A full run takes well under a
second of wall time.

`tb_seccan_traffic` replays attack-style traffic through the whole controller, again at the default
parameters. It has two segments:
- a DoS segment, where floods of identifier 0x000 with eight zero bytes are interleaved with
  periodic normal identifiers;
- a fuzzing segment, where frames with random identifier, length and payload are mixed in.

Frames follow each other with only the three-bit intermission. A host process drains the receive
queue at the same time. The testbench checks that:
- every frame and its verdict match the reference model;
- every inference finishes inside the 598-clock window and before its frame is stored;
- the queue never overflows at line rate.

The model weights are random, so this checks bit-exactness and timing, not detection accuracy.
