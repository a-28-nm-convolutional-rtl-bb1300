# SPOON in SystemVerilog: an event-driven CNN with on-chip learning for spiking retinas

Neuromorphic vision sensors do not send frames. Each pixel sends an address
event when its brightness changes: an ON event for an increase, an OFF event
for a decrease. The pixels that change most fire first. SPOON is a small
convolutional network processor built around that property.

- **Input coding.** The input is coded by *time to first spike*: an event's
  weight in the convolution is larger the earlier it arrives in the sample.
- **Convolution.** The convolution runs one event at a time, so the work is
  proportional to the number of events, not to the number of pixels.
- **Dense layers.** The fully-connected layers are evaluated frame by frame,
  once all inputs of a sample are known, because that gives the most weight
  reuse.
- **Learning.** The processor can also train its fully-connected weights on
  chip, using direct random target projection (DRTP). DRTP is a learning rule
  that needs neither a backward pass through the network nor the forward
  weights' transpose.

This repository holds a synthesizable register-transfer model of that
processor at its published size:

- a 32x32 retina;
- 10 kernels of 5x5 with 8-bit weights;
- a stride-4 max-pool giving 490 six-bit activations;
- a 490-128-10 fully-connected network with 8-bit weights;
- a 4-bit label sent out on an AER bus.

The model also includes self-checking testbenches for every block and for
the whole chip.

## 1. Pins and a sample's life

| Pin | Dir | Meaning |
|---|---|---|
| `clk`, `rst` | in | core clock, synchronous active-high reset |
| `aerin_addr[10:0]`, `aerin_req`, `aerin_ack` | in/in/out | four-phase AER input: `addr[10]` polarity (1 = ON), `addr[9:5]` y, `addr[4:0]` x |
| `aerout_addr[3:0]`, `aerout_req`, `aerout_ack` | out/out/in | four-phase AER output carrying the inferred label |
| `data_sync` | in | one-cycle pulse: a new sample starts |
| `tick_ext` | in | external time reference, rising edges count |
| `infer_req` | in | one-cycle pulse: stop accepting events and infer now |
| `label[3:0]` | in | training label, held from the end of convolution until the output label is sent |
| `sck`, `mosi`, `miso` | in/in/out | SPI access to every weight and parameter |

A sample goes through these steps:

1. `data_sync` loads the 8-bit timestamp counter with 255. It also clears the
   first-spike flags.
2. Every tick decrements the counter. A tick comes from `tick_ext` or from
   the local divider.
3. Each accepted event is stored in a 32-entry FIFO with the current
   timestamp.
4. The convolution core takes the events out of the FIFO one at a time.
5. The sample closes when the timestamp reaches 0, or earlier on `infer_req`.
   Once the FIFO is empty, the convolution core max-pools, quantises and
   pulses an internal `conv_done`.
6. The FC core then evaluates the 128 hidden and 10 output neurons,
   optionally updates the weights, and sends the arg-max class on the output
   AER bus.

Events that arrive while no sample is open are acknowledged and discarded.
When the FIFO is full, ACK is held back, so the sensor is stalled rather than
losing events.

## 2. Event-driven convolution

**Weighting by arrival time.** An event with timestamp `ts` and polarity `p`
contributes `s = p ? +ts : -ts` times the kernel to the feature maps.

- `s` is a 9-bit signed value.
- The timestamp counts *down* from 255, so early events weigh most.
- Output `(oy, ox)` of kernel `k` receives `s * K[k][y-oy][x-ox]` whenever the
  offset lies in 0..4.
- The maps are 28x28 (valid correlation). Rows and columns 28..31 of the
  input only feed the borders.

**Psum memory layout.** The partial sums are 16 bits wide and live in one
512 x 256-bit SRAM, 16 kB in total, of which 490 words are used.

- Each word holds a 4x4 tile of one map: word = `k*49 + ty*7 + tx`, and
  lane = `(oy%4)*4 + (ox%4)`.
- The outputs touched by one event, `oy` in `y-4..y` and `ox` in `x-4..x`,
  always lie in the 2x2 tiles `tx` in `{x/4-1, x/4}` and `ty` in
  `{y/4-1, y/4}`.
- So an event needs exactly four read-modify-write accesses per kernel.
  Tiles outside 0..6 are skipped. `conv_addr_decoder` computes each access's
  word address, the lanes it touches and the kernel tap for each lane.

**Per-event schedule.** Each kernel gets 10 cycles, so an event takes 100
cycles. The next event starts in the cycle after the last one ends.

| cycle | action |
|---|---|
| 0-1 | 25 products `s * K[k][t]` computed and registered |
| 2,3 / 4,5 / 6,7 / 8,9 | read and write of tile access 0..3 |
| 9 | the next kernel is loaded into the multiplier array's weight register |

**Overflow protection.** Every addition saturates at +32767 / -32768. This is
how the psums are bounded, and it acts as a hardtanh on the convolution
output. The saturation is applied per addition, so the final value can
depend on the order in which events arrive.

**Max-pooling and quantisation.** For each of the 490 words this takes two
cycles, 980 in all:

- read the word;
- take the maximum of its 16 lanes;
- shift it right arithmetically by `CSHIFT`, the configurable rescaling, 8
  by default;
- clip it to a signed 6-bit value in [-32, 31];
- write it to the activation register file.

The same pass writes zero back to the word, so the next sample starts from
empty psums. After reset, a 512-cycle sweep clears the SRAM.

**First-spike gating.** A 1024-bit flag array remembers which pixels have
already fired in this sample. When gating is on, later events from the same
pixel, of either polarity, are dropped.

## 3. Fully-connected core and its schedule

**Weight SRAM layout.** The weight SRAM has 1024 words of 512 bits (64
bytes).

- Word `{i, j}` (7-bit neuron index `i`, 3-bit batch `j`) holds the hidden
  weights `W_hid[i][64j .. 64j+63]`.
- Batch 7 only has inputs 448..489, in bytes 0..41. Bytes 42..51 of word
  `{i,7}` hold the ten output weights `W_out[0..9][i]`.
- So the eight words read for hidden neuron `i` carry all 500 weights that
  neuron needs.

**Per-neuron schedule.** Each hidden neuron takes 8 cycles:

- Cycles 1 to 8 multiply batch `c-1` of the activations with the word read
  in the previous cycle. This uses a 64-multiplier array with a 23-bit
  accumulator.
- In cycle 8 the sum is quantised:
  - `y = clip(sum >>> HSHIFT, -3, 3)` (hardtanh, 3 bits);
  - `f' = 1` if the shifted value lies inside [-3, 3], else 0.
- The output layer is updated event-style from the same word: the ten 16-bit
  output psums, which saturate, each get `W_out[k][i] * y`.
- One prefetch cycle precedes neuron 0.

After neuron 127:

- the output psums are quantised with a hardsigmoid: `clip((psum >>> OSHIFT) + 4, 0, 7)`;
- the winner is the largest psum, with ties going to the lower index;
- the label is sent on the output bus.

Inference in the FC core takes 1 + 128 x 8 + 1 = 1026 cycles.

**Extra cycles when learning.** When learning is enabled, update cycles
follow a neuron's 8 cycles:

- If `f' = 1`, all 8 words of that neuron are written back through the DRTP
  module: 8 extra cycles. Word 7 also carries the output-layer update.
- If `f' = 0`, the hidden update is skipped. Only word 7 is rewritten (1
  extra cycle), and only if an output update is due.

The 8 words are held in a weight buffer between reading and writing back.

## 4. Learning: DRTP for the hidden layer, delayed update for the output layer

**Hidden layer.** DRTP replaces the back-propagated error of hidden neuron
`i` by a fixed random sign, `B_hid[i][label]`. `B_hid` is a 128 x 10-bit
register file, filled with pseudo-random bits at reset and writable over
SPI. The update of the 64 weights in one word is then
`dW = -eta * B * f' * x`, so the only arithmetic is a sign inversion of the
inputs:

- bit 1 gives the update value `-x`;
- bit 0 gives `+x`.

`f'` enables the update.

**Output layer.** The output update is the ordinary delta rule,
`dW_out = -eta * (e * f'_out) * y_hid`. The error is only known after all
128 hidden neurons, so the update of `W_out[.][i]` made while neuron `i` is
processed uses the *previous* training sample:

- its output activations and derivatives, and its label, captured at the
  end of that sample;
- a 128 x 3-bit file of its hidden activations.

The terms are computed as follows:

- The target is 7 for the labelled class and 0 for the others, so
  `e = act - target`.
- `e` is gated by the output derivative and multiplied by the previous
  `y_hid[i]`.
- The product is clipped to +-15 and negated.
- A zero previous activation skips the update.

**Stochastic weight steps.** Both layers apply weights in the same way.

- A signed update value `v` moves its 8-bit weight by one step toward
  `sign(v)` when `|v| << LR > r`. `LR` is the learning rate; `r` is a 12-bit
  random number.
- Weights saturate at -128 and 127.
- The random numbers come from LFSRs unfolded so that one clock produces all
  the bits at once:
  - a 20-bit LFSR gives 768 bits, i.e. 64 numbers, for the hidden layer;
  - a 17-bit LFSR gives 120 bits, i.e. 10 numbers, for the output layer.

Larger values and larger `LR` thus give proportionally more steps.

## 5. SPI register map

A frame is 40 bits, MSB first: an 8-bit command (`0x01` write, `0x02` read),
a 16-bit address and 16 data bits.

- MOSI is sampled on rising SCK.
- On a read, the 16 result bits come out on MISO during the last 16 clocks,
  changing on falling SCK.
- There is no chip select. Frames are counted from reset, so keep SCK
  at or below `clk/8`.

| Address | Content |
|---|---|
| `1 iiiiiii jjj sssss` (bit 15 = 1) | 16-bit slice `s` of weight word `{i, j}` (only while the FC core is idle) |
| `0x0000` CTRL | bit0 first-spike gating, bit1 learning, bit2 local tick (reset 0) |
| `0x0001` TICK | local tick period minus 1 |
| `0x0002` CSHIFT | convolution rescaling shift (reset 8) |
| `0x0003` HSHIFT | hidden quantiser shift (reset 8) |
| `0x0004` OSHIFT | output quantiser shift (reset 4) |
| `0x0005` LRH | hidden learning-rate shift (reset 4) |
| `0x0006` LRO | output learning-rate shift (reset 6) |
| `0x0007` STATUS | read only: {conv busy, fc busy, 10'b0, last label} |
| `0x1000 + n` | kernel byte n = `k*25 + ky*5 + kx` |
| `0x2000 + i` | `B_hid` row i (10 bits) |
| `0x3000 + n` | activation n = `k*49 + ty*7 + tx` (read only) |
| `0x4000 + i` | stored previous hidden activation i (read only) |

After reset:

- The kernels hold fixed pseudo-random bytes, from a 16-bit LFSR with seed
  0xACE1, 8 steps per byte.
- `B_hid` holds pseudo-random bits (LFSR seed 0x1D2B).
- The FC weights are swept to zero in 1024 cycles, the starting point for
  online learning.

## 6. Source files

| File | Block |
|---|---|
| `spoon_pkg.sv` | sizes, widths, register map, `cfg_t` and `spi_bus_t`, saturation helpers |
| `spoon_top.sv` | chip top |
| `aer_rx.sv`, `aer_tx.sv` | four-phase AER receiver and transmitter |
| `spi_slave.sv`, `param_bank.sv` | SPI frames to an internal bus; configuration registers and read-data merge |
| `tick_gen.sv`, `timestamp_counter.sv` | tick source; 8-bit down-counter |
| `first_spike_gating.sv`, `event_fifo.sv` | per-pixel first-spike filter; 32 x 19-bit FIFO |
| `conv_core.sv` | convolution controller with its datapath blocks |
| `conv_kernel_rf.sv`, `conv_mult_array.sv`, `conv_addr_decoder.sv`, `conv_accum.sv`, `conv_psum_sram.sv`, `maxpool_quant.sv`, `act_regfile.sv` | kernel store, 5x5 multipliers, tile address decoder, saturating lane adders, psum SRAM, pool and quantiser, 490 x 6-bit activations |
| `fc_core.sv` | FC controller with its datapath blocks |
| `fc_weight_sram.sv`, `fc_mac64.sv`, `hid_quant.sv`, `out_layer.sv`, `out_quant.sv`, `winner_select.sv` | weight SRAM with 16-bit write mask, 64-MAC, hardtanh, output psums, hardsigmoid, arg-max |
| `drtp_update.sv` | learning block seen by the FC core |
| `drtp_hid_update.sv`, `drtp_out_update.sv`, `stoch_update.sv`, `lfsr_unfolded.sv` | hidden and output rules, stochastic step, unfolded LFSR |

Each file starts with a comment giving its function, timing and interface.

## 7. Simulation

Every block has a testbench `tb/tb_<module>.sv` that compares the block with
a model written independently in the testbench. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/spoon_pkg.sv tb/tb_spoon_top.sv --top-module tb_spoon_top --Mdir obj -o sim
obj/sim
```

Substitute any other testbench name for `tb_spoon_top`. The testbenches only
use `$urandom`, and they reset or initialise everything they read, so they
run on two-state simulators.

`tb_spoon_top` runs the chip at its full default size, using only the pins:

- SPI configuration and read-back of all kernels;
- five samples with bursts that overrun the FIFO;
- external and local ticks;
- samples ended both by expiry and by `infer_req`;
- first-spike gating on and off;
- four training samples and one inference-only sample.

A reference model predicts all 490 activations and the output label. The
testbench counts every mechanism and fails if any of these never happened:
back-pressure, gating, psum saturation, each tick source, expiry,
`infer_req`, hidden update applied, hidden update skipped, and output
update. It runs in a few seconds.

`tb_conv_core` and `tb_fc_core` check all outputs of the two cores and their
cycle counts against reference models:

- 100 cycles per event;
- 1026 cycles per inference, plus 8 or 1 per updated neuron.

In `tb_fc_core`, with learning rates large enough that every non-zero update
value moves its weight by exactly one step, every weight in the SRAM is
compared with its expected value after each training sample.

`tb_learn_patterns` checks that learning converges, at full size with the
reset configuration.

- **Data.** Four classes of synthetic event patterns: vertical bar,
  horizontal bar, diagonal and square outline. Each sample is shifted by up
  to two pixels and has 20 % of its pixels dropped.
- **Input.** Events are sent in random order with external ticks in
  between. First-spike gating and learning are on.
- **Training.** It starts from zero FC weights, with the labels on the
  `label` pin, for 12 epochs of 12 samples.
- **Result.** Accuracy starts at chance (about 3 of 12). Depending on the
  random seed, it typically ends between 8 and 12 of 12 in the last epochs.
  The test fails unless the last three epochs are at least 50 % correct.
- **Run time.** About 2 million clock cycles, or 15 s of Verilator time.

It stands in for the handwritten-digit workloads, whose data is not
included here.

## 8. Where this model departs from the published chip, and what it assumes

The published description gives the architecture, sizes, dataflow and
timing diagrams. It leaves the following points open. This model's choices:

- **Clock generation and clock gating.** The on-chip clock generator is not
  modelled; `clk` is the core clock. The FC core is not clock-gated; it is
  simply idle between samples.
- **Address bit order and handshakes.** The order of polarity, x and y in
  the 11-bit address, the AER synchronisers and the back-pressure policy are
  this design's choices.
- **SPI.** The frame format, the lack of a chip select and the whole
  register map are this design's.
- **Random initial values.** The kernels are "randomly initialised upon
  reset" in the published design. Here they come from a fixed LFSR sequence,
  as do `B_hid` and the LFSR seeds. The LFSR feedback taps
  (x^20 + x^17 + 1, x^17 + x^14 + 1) are chosen here; only the register
  lengths and unfolding factors are published.
- **Fixed-point details.** The quantisation formulas (arithmetic shift, then
  clip), the shift defaults, the 23-bit accumulator, the one-hot target of 7
  and the clipping of the output update value to +-15 are this design's.
- **Psum clearing and early inference.** Clearing the psums during pooling
  and flushing the FIFO on `infer_req` are this design's. When `infer_req`
  arrives, the event being processed is finished.
- **Weight buffer.** The FC core keeps an 8-word weight buffer so it can
  write updated words back. The published diagram shows a single buffer
  register.
- **Output-only updates.** When the hidden update is skipped but an output
  update is due, one extra write cycle is spent on word 7. The published
  timing diagram only shows the optional 8-cycle update block.
- **Saturation order.** Psums saturate per addition, so the result depends
  on event order; the published text only says that an overflow protection
  emulates a hardtanh.
- **Workloads.** The chip was evaluated on MNIST (28x28) and on N-MNIST
  (34x34). The 32x32 input accepts MNIST directly. N-MNIST recordings must be
  cropped or shifted to 32x32 before they reach the AER input, since the
  address has only 5 bits per axis.

The trained accuracies and energy figures of the silicon chip (for example,
95.3 % on MNIST after on-chip training) are not reproduced here: that would
need the datasets and many hours of simulation.
