# A six-lane systolic 1-D CNN accelerator for seismocardiogram windows

This RTL classifies one window of a seismocardiogram (SCG) into one of three
classes: background, systolic event or diastolic event. An SCG is the chest
vibration recorded by an accelerometer. The network is a small integer-only
1-D CNN: three convolution + max-pool blocks, a fourth convolution followed by
global average pooling, and a fully connected layer. The whole network runs
on one array of six multiply-accumulate lanes. The design is sized for a
Lattice iCE40UP5K-class FPGA:

- four 16K x 16 single-port RAMs (SPRAMs): two hold the weights, two hold
  the feature maps between layers;
- a few 4-kbit block RAMs hold the input window and the biases;
- seven 16 x 16 multipliers: six for the array, one for requantisation.

At 24 MHz one inference takes 2,277,808 clock cycles, which is 94.9 ms.

The main idea is to keep the datapath fixed and move all layer variety into
a table and a loop controller. Each convolution output is computed for six
neighbouring positions at once. Weights and bias are broadcast to all six
lanes, and the input samples slide through a shift chain. Everything after
the array works on one value at a time:

- pooling,
- requantisation through a multiplier that takes four cycles,
- ReLU,
- packing two bytes into one RAM word.

## The network

Layer table (`cnn_pkg::layer_cfg`):

| Layer | Operation | Cin -> Cout | K | pad | W in | W out | after the array | weight base (byte) | bias base |
|---|---|---|---|---|---|---|---|---|---|
| L0 | conv | 1 -> 16 | 9 | 4 | 512 | 256 | max pool 2 | 0 | 0 |
| L1 | conv | 16 -> 32 | 9 | 4 | 256 | 128 | max pool 2 | 144 | 16 |
| L2 | conv | 32 -> 64 | 9 | 4 | 128 | 64 | max pool 2 | 4,752 | 48 |
| L3 | conv | 64 -> 128 | 5 | 2 | 64 | 1 | global average (>>> 6) | 23,184 | 112 |
| L4 | fully connected | 128 -> 3 | 1 | 0 | 1 | 1 | none | 64,144 | 240 |

With `L3_COUT = 96` the width of the last convolution is 96 instead of 128,
and L4 becomes 96 -> 3 with weight base 53,904 and bias base 208. The width
is discussed under the departures from the published design below.

Number formats:

- Weights are signed INT8. Biases and accumulators are signed 32-bit.
- The input window holds signed INT8 samples.
- Every convolution output is requantised to an unsigned byte. ReLU is folded
  into that step by clamping to [0, 255].
- The fully connected layer skips the clamp and delivers three signed 32-bit
  logits.
- Batch normalisation is assumed folded into the weights and biases before
  they are loaded.

## How one layer is computed

`mc_controller` runs four nested loops in hardware:

```
for co in 0..Cout-1                 output channel
  for b in 0..ceil(Win/6)-1         batch of six output positions
    for ci in 0..Cin-1              input channel
      PRIME    7 cycles   fetch six samples into the X chain
                          (at ci = 0 the accumulators are loaded with bias[co])
      COMPUTE  K cycles   tap k: broadcast w[co][ci][k], every lane does one
                          MAC, the chain shifts in the next sample
    POOL / REQUANT / PACK the six lane results of the batch
```

### The lanes

Lane i holds sample X[i] of the chain and accumulates output position
6b + 5 - i. Samples enter at lane 0 and move one lane per shift. So after the
prime, lane i already holds the first sample its window needs. Each compute
cycle then shifts the next sample in and multiplies every lane by the same
weight. Positions outside [0, Win) are the zero padding. The controller feeds
0 for them and does not read the buffer.

### Weight reads

Two weights share one 16-bit word. A word is read only when the next weight
lies in a different word from the previous one, so on average one read feeds
two MAC cycles.

### After the array

What happens next depends on the layer:

- **Max pool (L0-L2):** pairs (y[5], y[4]), (y[3], y[2]) and (y[1], y[0])
  give three outputs per batch. The maximum is taken on the 32-bit
  accumulators, before requantisation. Rounding is monotonic and ReLU is a
  clamp, so this gives the same result as pooling after requantisation. In
  the last batch of a row, positions past the row end are marked invalid
  and dropped.
- **Global average (L3):** each lane value is shifted right arithmetically
  by 6 (the 64-wide input row) and added to a running sum. The sum goes to
  requantisation after the last batch of the channel. Only positions inside
  the row are summed.
- **Bypass (L4):** the single valid lane value is passed on as is.

### Requantisation

The serializer hands the pooled values one at a time to `requant_engine`.
It computes

    r = (v * M + 2^31) >>> 32      (M = the layer's 32-bit multiplier)
    out = clamp(r + 0, 0, 255)     (convolution layers)
    out = r                        (fully connected layer, 32-bit logit)

The 32 x 32 product comes from `mul64signed`. It splits each operand into a
signed upper half and an unsigned lower half. The four 16 x 16 partial
products are added into a 64-bit accumulator, one per cycle, on a single
multiplier. With one cycle to accept the value and one for the clamp, the
engine produces one result every 6 cycles. `result_packer` pairs consecutive
bytes into 16-bit words. The first byte goes in bits 7:0. A last odd byte is
flushed with a zero upper half.

### Cycle count

With `Nb = ceil(Win/6)` and `n` = values requantised per batch, a layer takes

    Cout*Nb*Cin*7  +  Cout*Nb*Cin*K  +  Cout*Nb*(6n + 4)  +  Cout + 2

cycles:

- The first two terms are the prime and compute cost.
- The third is requantisation plus 4 cycles of batch bookkeeping.
- n is 3 for max pooling, 1 for the fully connected layer, and for global
  average 1 on the last batch and 0 on the others.
- The sequencer adds 4 cycles per layer and 1 at the start.

| Layer | prime | compute | requant (6/value) | layer total | compute share |
|---|---|---|---|---|---|
| L0 | 9,632 | 12,384 | 24,768 | 52,306 | 23.7 % |
| L1 | 154,112 | 198,144 | 24,768 | 382,562 | 51.8 % |
| L2 | 315,392 | 405,504 | 25,344 | 751,938 | 53.9 % |
| L3 | 630,784 | 450,560 | 768 | 1,087,874 | 41.4 % |
| L4 | 2,688 | 384 | 18 | 3,107 | 12.4 % |
| all | 1,112,608 | 1,066,976 | 75,666 | 2,277,808 | |

The prime, compute and requantisation columns are the ones the published
cycle breakdown of this architecture gives. The remaining ~23k cycles
(1 %) are this implementation's loop bookkeeping.

## Memories and data layout

| Store | Size | Contents and layout |
|---|---|---|
| `weight_mem` | 2 x 16K x 16 SPRAM | Byte address = layer base + (co*Cin + ci)*K + k. Word = byte>>1; even byte in bits 7:0. The address MSB selects the SPRAM. 64,528 of 65,536 bytes are used. |
| `bias_rom` | 512 x 32 | Entry = layer bias base + co. Loaded at elaboration from `rtl/bias_rom.hex`. |
| `scale_rom` | 5 x 32 flip-flops | One requantisation multiplier per layer. |
| `input_buffer` | 2 x 256 x 16 | Two banks of one 512-sample window each, two samples per word. The outside world writes one bank while an inference reads the other (`in_rd_bank`). |
| `pingpong_buffer` | 2 x 16K x 16 SPRAM | Feature maps, channel-major: byte index = c*W + x. |

Between layers, a toggle swaps the roles of the two ping-pong SPRAMs. L0
writes Ping. L1 reads Ping and writes Pong. L2 writes Ping again, L3 writes
Pong, and L4's logits leave on ports. After an inference, Ping holds the L2
feature map and Pong holds the L3 vector. The end-to-end testbench checks
both.

The bias and scale contents in `rtl/` are placeholders:

- Bias i = ((i*37) mod 201) - 100.
- Multipliers are 2^27, 2^25, 2^25, 2^27 and 2^30 for L0..L4. These keep
  random test weights inside the byte range.

For a trained network, replace `rtl/bias_rom.hex` and the `SCALE_L*`
constants in `cnn_pkg`.

## Control

- **`layer_sequencer`** takes a start pulse, then for each layer: presents
  the layer record, pulses `layer_start`, waits for `layer_done`, flips the
  ping-pong toggle and moves on. After L4 it pulses `done`.
- **`arbitration_ctrl`** is the command FSM behind the UART (8N1, 208 clocks
  per bit, which is 115,200 baud at 24 MHz). It understands three commands:

| Byte | Command | Follows |
|---|---|---|
| `'L'` 0x4C | load weights | addr_hi, addr_lo, count_hi, count_lo, then count words, high byte first |
| `'V'` 0x56 | read weights back | same 4-byte header; the FPGA sends count words, high byte first |
| `'G'` 0x47 | run one inference | nothing; returns to idle when the sequencer is done |

While loading or reading back, the UART side owns the weight memory
exclusively. Only `'G'` hands it to the datapath, and an assertion in the
top checks that the datapath never reads it otherwise. The `mode` output
shows the state: 0 idle, 1 load, 2 verify, 3 run.

An inference can also start without a host. A one-cycle pulse on
`infer_trigger`, for example from the acquisition logic when a window is
complete, acts like a `'G'`. It is taken only while the command FSM is idle.
A pulse that arrives during a load, readback or run is dropped, so the
weight memory always has a single owner. The source should watch `mode`
or `busy`.

## Top-level interface (`cnn_accel_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | 24 MHz clock, asynchronous active-low reset |
| uart_rxd, uart_txd | in/out | 1 | host link |
| in_wr_en, in_wr_bank, in_wr_addr, in_wr_data | in | 1/1/8/16 | write port of the input buffer, for the acquisition side |
| in_rd_bank | in | 1 | bank the next inference reads |
| infer_trigger | in | 1 | pulse: start an inference without a host command (taken only when mode is 0) |
| busy, done | out | 1 | inference running / one-cycle completion pulse |
| mode | out | 2 | command FSM mode |
| logits_valid, logits[3] | out | 1, 3 x 32 | class scores of the last inference |

## Where this RTL departs from, or adds to, the published design

- **Width of the last convolution.** The network description gives the last
  convolution 96 channels. The per-layer cycle table gives 64 -> 128, and
  its numbers only work out for 128. The published FP32 model size
  (226.5 KB) is too small for the 128-channel network's 64,771 parameters
  and fits 96 channels better. The width is therefore a parameter,
  `L3_COUT` on `cnn_accel_top` and `layer_sequencer`. The default is 128,
  matching the cycle table. With 96, the L4 weights and biases move down,
  the weights take 54,192 bytes, and an inference takes 2,005,072 cycles
  (83.5 ms).
- **Requantisation cost.** The published cycle model charges 9 cycles per
  output: 6 in the serial multiplier plus 3 of overhead. The published
  per-layer numbers correspond to 6 per value. This engine takes 6 per value:
  - 1 cycle to accept the value,
  - 4 partial-product cycles, as the multiplier is described,
  - 1 cycle for the clamp.

  Loop overhead is counted separately. The result is 2.28 M cycles per
  inference, against about 2.26 M cycles (94 ms) estimated and 95.5 ms
  measured for the original.
- **Loop order.** The description names the output channel as the outer
  loop, with primes when switching input channels. This RTL's order (output
  channel, batch, input channel) reproduces the published prime and compute
  counts exactly.
- **Own choices.** The following are not specified by the published design:
  - the UART packet layout, baud rate and byte order;
  - the `infer_trigger` port, this design's form of the automatic
    inference triggering that the published controller allows;
  - the rounding and shift of the requantisation;
  - the byte order in memory;
  - the bias insertion (the accumulator is loaded with the bias at the first
    input channel);
  - reset behaviour;
  - the handshakes between the blocks.
- **Generic memories and multipliers.** Memories and multipliers are
  written as plain arrays and `*`, not vendor primitives. A synthesis tool
  for the iCE40 maps them to SPRAM, block RAM and DSP blocks.
- **Not included.** The sensor front end (SPI IMUs, framing) and the
  debug bus/LEDs are not included. The input buffer's write port and the
  logits are top-level ports instead.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. It
prints `TB_RESULT checks=N failures=M` and has a watchdog. `tb/cnn_ref_pkg.sv`
is an independent software model of a layer (convolution, pooling,
requantisation), and the controller and top testbenches compare against it.

`tb_cnn_accel_top` runs the top at its default parameters:

- It loads random weights, some of them over the UART across the SPRAM bank
  boundary, and reads them back.
- It runs a full 512-sample inference.
- It checks the logits, the L2 feature map and the L3 vector bit-exactly
  against the model.
- It checks the prime, compute and requant cycle totals above.
- While that inference runs, it writes a second window into the other input
  bank and sends a stray UART load packet. It checks that the packet never
  reaches the weight memory. It then starts a second inference with
  `infer_trigger`, classifies the second window and checks its logits too.
- It counts that each mechanism occurred: load, readback, run, max pool,
  global average, bypass, padding, weight-word reuse, clamping at 0 and
  at 255, and the ping-pong toggle.

Concurrent assertions in the RTL add checks while any testbench runs:

- the weight memory is read by the datapath only while it owns it;
- the requantiser answers only while the controller waits for it, and at
  most once every six cycles;
- the serializer holds an offered value until it is taken.

Run the simulator with `--assert` so that these are active.

It simulates in a few seconds with Verilator. `tb_cnn_l3w96` runs the
same end-to-end check on the 96-channel variant (`L3_COUT = 96`). It starts
the run with `infer_trigger`.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv tb/tb_cnn_accel_top.sv -y rtl -y tb \
  --top-module tb_cnn_accel_top -o sim && ./obj_dir/sim
```

Run it from the directory that holds `rtl/`, because `bias_rom` reads
`rtl/bias_rom.hex` by that relative path. Testbenches that do not use the
reference model can leave out `tb/cnn_ref_pkg.sv`.

How far to trust it:

- Arithmetic, data layout, pooling and the cycle schedule are checked
  bit-exactly at full size.
- Not checked against the original: the trained weights, the scales and
  the original implementation's bit-level rounding. Those are not
  available, so agreement of classification results has not been shown.
- Not checked: timing closure at 24 MHz on the real device.
