# An event-driven convolutional spiking network for radioisotope identification

A gamma-ray detector reports one photon at a time, each tagged with its
energy. Conventional isotope identification bins these photons into a
1024-channel energy histogram over a fixed integration time, then
classifies the histogram. This design skips the histogram. Every detected
photon is an input spike on the channel of its energy. The spike is pushed
through a small convolutional spiking neural network (CSNN). Each of eight
output neurons stands for one isotope (Am-241, Ba-133, Co-57, Co-60,
Cs-137, Eu-152, Ra-226, Th-232). Over a measurement, the neuron of the
isotope present fires most often. Work is done only when a photon arrives,
and all arithmetic is an 8-bit addition and a comparison.

The RTL follows the architecture in *An FPGA Implementation of
Convolutional Spiking Neural Networks for Radioisotope Identification*
(Huang et al.). That paper describes:

- the network shape;
- the neuron model;
- the convolutional layer's microarchitecture and cycle schedule;
- a UART test set-up around the network.

The paper gives no widths, thresholds, protocols or trained weights, and
says little about the pooling and output layers. Those are this design's
own choices. Each one is marked below, and the last section lists them.

## 1. The network

```
 photon energy channel i (0..1023)
        |
        v
 conv layer   4 filters x 5 taps, stride 1   -> 4 x 1020 neurons
        |  spike address {filter f, position p}
        v
 pool layer   average pooling 16, stride 16  -> 4 x 64 = 256 neurons
        |  spike address {filter f, window q}
        v
 output layer fully connected                -> 8 neurons (one per isotope)
        |  spike = class number
        v
 per-class spike counters
```

| quantity | value |
|---|---|
| input channels | 1024 (10-bit AER address) |
| conv neurons | 4 x 1020 = 4080 |
| pool neurons | 4 x 64 = 256 (the 64th window of each filter covers only 12 positions) |
| output neurons | 8 |
| weights | 20 conv + 4 x 63 x 8 = 2016 output = 2036, all 8-bit signed |
| neurons in total | 1024 + 4080 + 256 + 8 = 5368 |

The two totals in the last two rows match the published counts. They also
pin down a detail the paper leaves open. There are 256 pool neurons, but
only the 252 with a full 16-wide window have output weights. Spikes from
the four partial windows (conv positions 1008..1019) are therefore
discarded at the output layer (`fc_layer`, `discard` pulse).

Layers pass spikes as address events (AER): a one-cycle request with the
address of the neuron that fired.

## 2. Neuron model

All neurons (conv, pool and output) use the same integrate-and-fire rule
without leak. Only one input spike arrives per update, so an update is one
addition:

1. `V <- V + w`, where w is the weight of the synapse that spiked.
2. If `V >= V_thr`, the neuron fires and `V <- V - V_thr`. This is reset by
   subtraction, which keeps the excess charge. It suits rate-coded networks
   converted from conventional ones better than resetting to zero.
3. Otherwise, if `V < V_min`, then `V <- V_min`. This floor stops a
   neuron that keeps receiving negative weights from wrapping around.

`neuron_alu` computes both candidate results in one combinational step,
one bit wider than the stored voltage:

- `integration_result` is V+w, floored at V_min;
- `post_fire_result` is V+w-V_thr;
- `fire` selects which of the two is written back.

The result always fits the stored width under two conditions: every weight
is below V_thr, and `V_thr <= 2^(VW-1) - 2^(WW-1)`.

The average-pooling neuron is the same rule with weight 1 and threshold 16.
It fires once per 16 input spikes, the rate-coded form of an average over
16 inputs. It is built as a 4-bit counter per neuron (`pool_layer`).

## 3. The convolutional layer: one ALU, twenty neurons per photon

This is the part that needs the closest reading. A photon on channel `i`
touches positions `i-4 .. i` in each of the 4 filters, so 20 neurons need
an update. The layer has a single adder/comparator (`neuron_alu`). Its 4080
membrane voltages sit in one single-port block RAM (`neuron_ram`). The 20
updates therefore run one after another, time-division multiplexed, under
the state machine in `conv_control`:

| cycle | state | what happens |
|---|---|---|
| 0 | IDLE | FIFO not empty and output room available: `fifo_rd_en` |
| 1 | LOAD | FIFO output now valid; channel `i` latched; weight 0 addressed |
| 2 | READ | RAM address {f, i-4+n}, `chip_en` high, read; weight f*5+n on the ROM output (addressed a cycle earlier) |
| 3 | PROCESS | RAM output (V) and ROM output (w) valid; ALU result written back to the same address; spike if it fired; next weight addressed |
| ... | READ/PROCESS | repeated for n = 0..4, then f = 0..3 |
| 41 | PROCESS | last neuron (f=3, n=4) |
| 42 | IDLE | ready for the next event |

One event costs 42 cycles, so the core sustains 2.38 million photons per
second at 100 MHz.

The pairing of position and tap comes from the published timing diagram:
channel 10 updates positions 6, 7, 8, 9, 10 with weights 0, 1, 2, 3, 4 in
that order. The tap index is therefore `n = p - i + 4`. The trained weights
must be stored in that orientation.

A write-back multiplexer, controlled by `fire`, chooses between the ALU's
two results. The RAM reads before it writes (read-first). A word's READ and
PROCESS cycles use the same address, and the next neuron has a different
address, so no forwarding is needed.

Three points are this design's own:

- **RAM layout.** The address is `{filter[1:0], position[9:0]}`: 4096 words
  of 9 bits, of which 4080 are used. The published utilisation reports a
  single block RAM. 4096 x 9 = 36,864 bits is exactly one Artix-7 RAMB36
  in 4K x 9 mode, and this is why the membrane voltage is 9 bits wide.
- **Spectrum edges.** For channels 0..3 and 1020..1023 some of the 20
  positions do not exist. Those slots keep their two cycles with
  `chip_en` low, so they neither change memory nor fire, and every event
  takes exactly 42 cycles.
- **RAM clear.** A block RAM keeps its contents through a reset. After
  reset the controller spends 4096 cycles (state CLEAR) writing 0 to every
  word. Events that arrive meanwhile wait in the input FIFO.

A neuron that fires sends `{f, position}` on `aer_out` with a one-cycle
`req_out` in the cycle after its PROCESS state.

## 4. Pool and output layers

**Pool layer.** `pool_layer` handles each conv spike in the cycle it
arrives. It increments counter `{f, p/16}` and, on the 16th spike, emits
`{f, q}` one cycle later. It needs no buffer and never refuses a spike.

**Output layer.** `fc_layer` is the same time-multiplexed scheme again,
with 8 neurons held in 16-bit registers. The paper says only that this
layer is time-multiplexed. Each pool spike is queued in a FIFO and then
costs 18 cycles:

- IDLE and LOAD, one cycle each;
- READ/PROCESS for each of the 8 output neurons.

The weight ROM word for pool row `r = f*63 + q` and class `o` is
`r*8 + o`. A partial-window spike (`q = 63`) takes two cycles and does
nothing. An output spike carries the class number (3 bits).

## 5. Flow control

- **Input.** `req_in`/`aer_in` and `ack` form a valid/ready pair: a word
  moves on a clock edge where both are high. `ack` is "input FIFO not
  full" (16 entries). The published diagram has an ACK output but does not
  say how it behaves; this handshake is this design's choice.
- **Conv to pool to output.** These links have no acknowledge. The pool
  layer always accepts. The output layer can fall behind: one pool spike
  costs it 18 cycles, against 42 cycles for a whole input event.

  One photon can cause at most 8 pool spikes. Per filter, its 5 positions
  touch at most two windows, and each window fires at most once since
  5 < 16. The conv controller therefore starts an event only while the
  output FIFO has room for 8 + 2 more spikes. The extra 2 cover spikes
  still in the conv and pool output registers. This `ds_ready` gate is not
  in the published diagram. Without it, the output layer's FIFO could
  overflow and drop spikes.

  With a 16-deep output FIFO, real traffic almost never triggers the gate:
  the average is at most 20/16 pool spikes per event. The testbenches
  provoke it with a smaller FIFO.
- `idle` (from `csnn_core`) is high when nothing is queued or in progress
  in any layer. The result counts are final only while `idle` is high.

## 6. The serial test interface

On the FPGA the network sits behind a UART (`uart_interface`). This
mirrors the published validation set-up: a host PC streams test vectors,
and a test-vector driver and a result monitor sit next to the network. The
link is 8N1 at 115200 baud (`CLKS_PER_BIT = 868` at 100 MHz).

Each test vector is 16 bits, sent high byte first:

| bits 15:14 | meaning |
|---|---|
| `00` | photon event, bits 9:0 = energy channel |
| `01` | collect: once the network is idle, send the counts |
| `10` | reset the network and clear the counts |
| `11` | ignored |

The driver (`test_vector_driver`) does three things:

- queues up to 16 decoded vectors;
- holds each event's request until it is acknowledged;
- waits for `idle` before it passes on a collect.

The monitor (`result_monitor`) keeps one 16-bit saturating counter per
class. When asked, it sends a snapshot of all eight counters as 16 bytes,
class 0 first, high byte first. The host takes the class with the largest
count.

A reset vector pulses the network's reset for one cycle, which starts the
4096-cycle RAM clear. At 115200 baud a vector takes 17,360 cycles, so the
queue cannot overrun. A much faster link must leave time for the clear
after a reset; an assertion catches an overrun.

The two control vectors (collect, reset) are the ones the paper's set-up
describes. Their encoding, the byte order and the counter width are this
design's own.

## 7. Weights

The paper does not publish its trained weights. The ROMs (`weight_rom`)
therefore default to a stand-in set computed in `csnn_pkg`:

- conv filter f, tap n: `24 + 8f - 6|n-2|`. These are positive smoothing
  kernels with values 12..48.
- output weight from pool row (f, q) to class o: `+40` if `q/8 == o`,
  else `-4`.

With these weights, class c responds to photons around channels
`128c .. 128c+127`. A synthetic "isotope" with a peak in that band is
identified correctly. This makes the network testable end to end; it is
not the trained classifier.

To load real weights, pass `CONV_WEIGHT_FILE` and `FC_WEIGHT_FILE` to
`csnn_fpga_top` (or `csnn_core`). Each file has one two-digit hex word per
line, two's complement:

- conv file: 20 words at `f*5 + n`, in the tap orientation of section 3;
- output file: 2016 words at `(f*63 + q)*8 + o`.

Set `CONV_V_THR`, `CONV_V_MIN`, `FC_V_THR` and `FC_V_MIN` to the values
that come out of the conversion from the conventional network. The defaults
are 64 and -64; the paper gives no values.

## 8. Parameters

| parameter (module) | default | source |
|---|---|---|
| input channels, filters, taps, pool size, outputs (`csnn_pkg`) | 1024, 4, 5, 16, 8 | published network |
| weight width | 8-bit signed | published |
| clock | 100 MHz | published |
| conv membrane width `VW` (`conv_layer`) | 9 | this design (fits one block RAM) |
| output membrane width (`fc_layer`) | 16 | this design |
| `CONV_V_THR` / `CONV_V_MIN`, `FC_V_THR` / `FC_V_MIN` | 64 / -64 | this design |
| `CONV_FIFO_DEPTH`, `FC_FIFO_DEPTH` | 16, 16 | this design |
| `CLKS_PER_BIT` | 868 (115200 baud) | this design |
| result counter width (`result_monitor`) | 16 | this design |

Only the top's own parameters are meant to be changed. The network shape
lives in `csnn_pkg`. The layer modules take the shape as parameters, but
`csnn_core` and the address formats assume the package values.

## 9. Departures from the published design, and open points

- **Taken from the paper:** the network shape and sizes, the 8-bit
  weights, and the neuron equations with zero leak, reset by subtraction
  and a V_min floor. Also the conv layer's blocks and their connections:
  Control Logic, Weight ROM, Neuron RAM (address, chip_en, read_write),
  Neuron ALU (adder, comparator), and the write-back mux selected by Fire.
  Also its idle/load/read/process schedule, the FIFO in front of it, and
  the serial test set-up with driver, monitor and the two control vectors.
- **Inferred:** the 9-bit membrane (from the one block RAM) and the
  discarded partial pool windows (from the published weight and neuron
  counts).
- **Added:** the `ds_ready` output back-pressure, the post-reset RAM clear,
  the `idle` signal, and every width, threshold, depth and encoding in the
  table above.
- **Operation count.** The paper quotes a worst case of 160 operations
  per event; how that figure is counted is not stated. In this design the
  worst case is 20 conv updates plus 8 pool spikes x 8 output updates =
  84 updates.
- **Output layer.** The paper bases it on an earlier fully connected
  design that it does not describe. The scheme here reuses the conv layer's
  read/process pattern, which is a plausible reading, not a copy.
- **Not built:** the host PC software, and the FPGA's clock buffer (the
  clock is a plain input).

## 10. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The shared reference is `csnn_ref_pkg`.
It is an event-level model written from the equations in section 2, not
from the RTL. The layer, core and top testbenches compare the hardware
with it spike by spike.

| testbench | what it shows |
|---|---|
| `tb_neuron_alu` | update rule, threshold equality, floor, 5000 random cases |
| `tb_neuron_ram`, `tb_weight_rom`, `tb_aer_fifo` | one-cycle read latency, read-first, contents, FIFO order/full/empty |
| `tb_conv_control` | 4096-cycle clear; channel 10 addresses 6..10 with weights 0..4; edge slots suppressed; 42 cycles per event; hold while `ds_ready` low |
| `tb_conv_layer` | 3000+ random events with mixed-sign weights (`conv_w_mixed.hex`): every conv spike matches the model; the V_min floor, ACK back-pressure and the 42-cycle period are exercised |
| `tb_pool_layer`, `tb_fc_layer` | pool firing on every 16th spike; output spikes, 18 cycles per pool spike, partial-window discard, `ready` |
| `tb_csnn_core` | 8 synthetic isotopes x 600+ photons: all output spikes match the model and each isotope is identified. A second instance (11-deep output FIFO, all conv weights 63) provokes the output-room stall |
| `tb_uart_rx`, `tb_uart_tx`, `tb_test_vector_driver`, `tb_result_monitor`, `tb_uart_interface` | serial framing, vector decoding, collect waits for idle, reset, count snapshot and saturation |
| `tb_csnn_fpga_top` | the whole FPGA through its serial pins, 8 isotopes. Counts match the model, and each mechanism is counted and must occur: RAM clear, ACK low, output-room stall, discard, edge slots, collect wait, reset |
| `tb_csnn_sample_batch` | test-set style run: 64 samples of 25 photons and 64 of 250, reset between samples; every count matches the model. With the stand-in weights the short samples identify 17 of 64, the long ones 64 of 64: more photons per measurement, better identification |
| `tb_csnn_fpga_top_full` | the same at default parameters (115200 baud, stand-in weights): two measurements of 300 photons each, about 11 M cycles |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/csnn_pkg.sv tb/csnn_ref_pkg.sv tb/tb_csnn_core.sv \
  --top-module tb_csnn_core -o sim
./obj_dir/sim
```

Verilator finds the other modules in `rtl/` through `-Irtl`. Run from the
directory that holds `rtl/` and `tb/`: the testbenches that load weight
files name them as `tb/...`.

## Files

- `rtl/csnn_pkg.sv`: network constants, state and opcode enums, stand-in
  weight formulas.
- `rtl/csnn_fpga_top.sv`: the FPGA top (serial pins in and out).
- `rtl/uart_interface.sv`, `uart_rx.sv`, `uart_tx.sv`,
  `test_vector_driver.sv`, `result_monitor.sv`: the test interface.
- `rtl/csnn_core.sv`: the network (conv, pool and output layers).
- `rtl/conv_layer.sv`, `conv_control.sv`, `neuron_ram.sv`, `weight_rom.sv`,
  `neuron_alu.sv`, `aer_fifo.sv`: the convolutional layer and its parts.
- `rtl/pool_layer.sv`, `fc_layer.sv`: pooling and output layers.
- `tb/`: the testbenches, the reference model `csnn_ref_pkg.sv`, and two
  small conv weight files used by the tests.
