# Event-driven temporal-coding SNN SoC with binarized weights

This is synthesizable SystemVerilog for a small system-on-chip that classifies
images with a two-layer spiking neural network (SNN) in which every neuron
spikes at most once and information is carried by *when* it spikes. A bright
pixel spikes early, a dark one late, a black one never. The hidden and output
neurons are non-leaky integrate-and-fire neurons whose weights are single bits
(+1 or -1), scaled per layer by a factor alpha. Because weights are ±1, a
synapse adds or subtracts alpha; there is no multiplier in the datapath. The
output class is the output neuron that spikes first.

The design follows the architecture of Sekonji, Mahani, Mirsadeghi and Taheri,
"An FPGA-Based SoC Architecture with a RISC-V Controller for Energy-Efficient
Temporal-Coding Spiking Neural Networks". That work describes the block
structure and the arithmetic, and reports results for an Artix-7 FPGA. Its
figures give the blocks and their connections. The cycle-level behaviour,
register map, memory layout and bus protocol in this RTL are this
implementation's own; the section "What is taken from the architecture and
what is not" lists them.

The default parameters give the MNIST configuration, 784-600-10: 28×28 input
pixels, 600 hidden neurons and 10 output classes.

## The main idea: process spikes in time order, once each

A time-stepped simulator of this network would visit every input at each of
the 256 time steps. This core does not. It sorts the spikes of a layer by
time once, drops the inputs that never spike, and then handles each remaining
spike (an *event*) exactly once, in time order. Each event updates every neuron
of the next layer, one neuron per clock cycle, using a single shared neuron
datapath. The cost of a layer is therefore about *(active spikes) × (neurons)*
cycles, not *256 × inputs × neurons*.

```
 pixels ─► Input ─► Encoding ─► Spike ──┐                       ┌─► Spike memory 2 ─┐
 (bus)     memory   unit (NOT)  memory 1 │                       │   (hidden times)  │
                                         ▼                       │                   ▼
                                      Sorter ──index──► Address ─┼─► Weight memory 1/2
                                         │               generator          │ 1-bit weight
                                         └──time───────────────┐            ▼
                                                               ▼   Synaptic current calc.
                                                    time-multiplexed IF neuron ─► ILU ─┤
                                                                                       └─► Decoding unit ─► label
```

The sorter, address generator, current calculator and neuron are shared by
the two layers. Only the spike memories and weight memories exist once per
layer. The ILU (inter-layer unit) is a two-way router. While the hidden layer
runs, it writes the new spike times into spike memory 2, where the sorter
picks them up for the next layer. While the output layer runs, it sends spike
times and membrane potentials to the decoding unit instead.

## Time steps, events and the threshold test

The subtle part of the core is deciding *when* a neuron fires. The rest of the
design depends on that.

The reference semantics are those of a time-stepped simulation. At time step
t = 0…254, every input that spikes at t adds its current to every neuron. After
all spikes of step t have been added, each neuron that has not fired yet and
whose potential *exceeds* the threshold (v > θ) fires, with spike time t.
Spike code 255 means "no spike". A neuron fires at most once.

The core reproduces this exactly without a separate scan at the end of each
step. Two properties make that possible:

* The sorter delivers events in ascending time order, and every event visits
  every neuron of the layer.
* A neuron's potential therefore cannot change between the last event of step
  t and the first event of the next step that has spikes.

So the test "did neuron j cross the threshold at the end of step t" is made
when neuron j is next visited. That visit is by the first event of a new time
step, flagged `upd_check`. The test reads the old potential, may fire the
neuron with the *previous* step's time, and only then adds the new current.
After the last event, one final pass (`fin_*`) makes the last test for every
neuron. The final pass also reports every potential, which the decoder needs
when no output neuron fires. Steps without any spike need no test, because
nothing changed.

In the output layer the core can stop early (the `early exit`, CFG bit 8, on
after reset). At the end of an event, if some output neuron has fired, every
later event belongs to a later time step and can only produce later spikes.
The earliest spike, and so the class, is already fixed. The core then skips
the remaining events and the final pass. Spike times reported for other output
neurons may then be incomplete. Potentials are not needed, because a spike
decided the class. The accelerator test checks that early exit never changes
a label.

## Numbers and widths

| Quantity | Width / value | Note |
|---|---|---|
| Pixel, spike time | 8 bit | time = 255 − pixel; 255 = no spike |
| Binary weight | 1 bit | 1 → +1, 0 → −1 |
| Multi-bit weight | 2, 4, 8 or 16 bit, two's complement | weight mode `m` = log2 of width |
| Weight word | 16 bit | 2^(4−m) weights per word |
| alpha (per layer) | 16 bit unsigned | binary mode only |
| Membrane potential | 32 bit signed | cannot overflow for 784 × 16-bit weights |
| Threshold (per layer) | 32 bit signed | test is v > θ |

In binary mode the current of a synapse is `+alpha` or `−alpha`. In a
multi-bit mode the weight itself is added and alpha is not applied. This lets
a real-valued network such as S4NN run on the same datapath, provided the
weight memories are made deep enough.

### Weight layout

Weights of a layer with `n_post` neurons are stored row by row: weight (input
i → neuron j) is element `k = i·n_post + j`. In weight mode m it sits in word
`k >> (4−m)`, in slot `k mod 2^(4−m)`. Slot s occupies bits `[s·2^m +: 2^m]`
of the word. For binary weights that means bit `k mod 16` of word `k / 16`. All
weights leaving one input are contiguous, so one event reads consecutive words.

`n_post` is the run-time hidden size for layer 1 (register NHID) and N_OUT for
layer 2. A host that changes NHID must repack the weights with the new row
length.

## Sequence of one inference and its cycle budget

After a start command the sequencer in `snn_accelerator` runs these steps:

| Step | What happens | Cycles |
|---|---|---|
| ENC | Pixels are read, buffered and written as `~pixel` to spike memory 1 | N_IN + 3 |
| SORT (per layer) | Counting sort of the layer's spike times: clear 256 bins, histogram, prefix sum, scatter. The layer's neurons are cleared at the same time | 2·n + 518 |
| CALC (per layer) | Per event: fetch it (2), one neuron per cycle (n_post), drain (4) | events × (n_post + 6) |
| FINAL (per layer) | Last threshold test of every neuron, plus 3 drain cycles | n_post + 3 |
| DECODE | Earliest spike, else largest potential, one neuron per cycle | N_OUT + 2 |

The calculation pipeline has three stages:

1. The address generator computes the word address and slot.
2. The weight memory read returns the field.
3. The neuron reads its potential from the state memory, the current
   calculator adds the current, and the result is written back.

Tags (neuron index) travel alongside. Because consecutive updates always
target different neurons, there is no read-after-write hazard.

The full-size testbench used random images with about 20 % lit pixels and
random binary weights. One inference took about 100,000 cycles: ~156 input
events × 606 cycles in layer 1, plus about 4,000 cycles for everything else.
That is 0.61 ms at 163 MHz. The published implementation reports 0.718 ms for
real MNIST data.

The per-stage split differs from the published one:

| Stage | This design | Published |
|---|---|---|
| Encoding | 787 cycles (4.8 µs) | 5 µs |
| Layer-1 sort | 2,086 cycles (12.8 µs) | 71 µs |
| Layer-2 sort | 1,718 cycles (10.5 µs) | 197 µs |

The published sorter is evidently a different algorithm. Its algorithm is not
described, and this design uses a counting sort.

## Programming model

The accelerator is a Wishbone slave with single-cycle acknowledge. Byte
address bits [27:26] select a region, and bits [25:2] are the word index
within it. That is enough for the 313,600-word weight memory of a 16-bit
784-400-10 build:

| Region | Content | Access |
|---|---|---|
| 0 | registers | read/write |
| 1 | input memory, one pixel in bits [7:0] per word | write |
| 2 | weight memory 1, one 16-bit word in bits [15:0] per bus word | write |
| 3 | weight memory 2, same format | write |

Registers (word offset):

| Off. | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | write: b0 start, b1 clear interrupt. read: b0 busy, b1 done |
| 0x01 | CFG | b2:0 weight mode (0 = binary … 4 = 16-bit), b8 early exit enable (reset: binary, enabled) |
| 0x02 | NHID | hidden neurons used, 1…N_HID (0 or too large selects N_HID) |
| 0x03/0x04 | ALPHA1/ALPHA2 | per-layer alpha (reset 1) |
| 0x05/0x06 | THR1/THR2 | per-layer threshold (reset 0) |
| 0x07 | RESULT | b3:0 class, b8 decided by a spike (else by potential), b9 early exit taken |
| 0x08 | CYCLES | clock cycles of the last inference |
| 0x09/0x0A | EV1/EV2 | active (non-silent) spikes that entered layer 1 / layer 2 |

The interrupt output is high from the end of an inference until it is cleared
or a new inference starts.

In the SoC, the controller is an RV32I processor on the Wishbone master port.
Its program for each sample is:

1. Select the Flash and stream the image through the SPI master into region 1.
   The weights go into regions 2 and 3 once.
2. Set CFG, NHID, ALPHA and THR.
3. Write CTRL = 1 and wait for the interrupt.
4. Read RESULT, clear the interrupt with CTRL = 2, and write the class to the
   UART.

The testbenches `tb_snn_soc` and `tb_snn_soc_full` contain exactly this program.

### SoC address map and peripherals

| adr[31:28] | Slave |
|---|---|
| 0x1 | SPI master |
| 0x2 | UART transmitter |
| 0x3 | accelerator |
| other | default slave: returns 0 and acknowledges, so a stray access cannot hang the bus |

* **SPI master** (`wb_spi_master`). Registers, at word offsets:
  * 0 DATA: a write starts one byte, MSB first; a read returns the byte received.
  * 1 STATUS: b0 busy.
  * 2 CS: b0 drives `spi_cs_n`.
  * 3 DIV: SCLK half-period in clock cycles.

  It uses SPI mode 0, and one byte takes 16·DIV cycles. Flash commands (for
  example READ 0x03 followed by a 24-bit address) are framed by software
  through CS.
* **UART transmitter** (`wb_uart_tx`). Registers, at word offsets:
  * 0 DATA: send a byte.
  * 1 STATUS: b0 busy.
  * 2 DIV: clock cycles per bit.

  Frames are 8N1. The reset divider, 1415, gives 115200 baud at 163 MHz. A
  write while busy is dropped.

## What is taken from the architecture and what is not

The following follow the published architecture:

* The block structure and connections: input memory, encoding unit, two spike
  memories, sorter, address generator, two weight memories, synaptic current
  calculator and accumulator, neuron, ILU, decoding unit, Wishbone, SPI
  master and UART transmitter.
* 8-bit spike times, and TTFS encoding as a bitwise NOT.
* Binary weights packed 16 per 16-bit word, with a 1-bit weight per synapse
  into the calculator.
* The current ±alpha with no multiplier.
* A non-leaky integrate-and-fire neuron that fires when v surpasses θ.
* One time-multiplexed neuron.
* Decoding by earliest spike, else by maximum potential.
* Support for multi-bit fixed-point weights through a mode switch.
* The 784-600-10 default size (600-10 is the published MNIST network; 784
  inputs is the MNIST image size).

The following are this design's own choices, made where the published
description is silent:

* The counting-sort sorter and its timing.
* "No spike" encoded as time 255, and silent inputs dropped by the sorter.
* The threshold test folded into the next time step's first visit.
* The early exit in the output layer. This is one reading of "skipping
  non-informative events"; it never changes the class.
* Multi-bit weights added without alpha.
* Run-time NHID and weight mode, so smaller networks run without
  re-synthesis.
* All widths other than 8-bit times and 16-bit weight words.
* Register map, address map, bus timing, and the SPI and UART formats.
* Tie rules (the lower index wins).
* Starting an inference by a register write. In the published system the
  controller starts inference through an interrupt and is itself interrupted
  on completion. Here only the completion is an interrupt line.

Not included:

* **The RV32I processor.** It is an existing core running compiled software,
  so its Wishbone master port and the interrupt input are ports of `snn_soc`.
* **The SPI Flash chip.** It is external; `tb/spi_flash_model.sv` is a
  behavioural model for simulation.

## Configurations

| Network | Fits the default build? | Why |
|---|---|---|
| 784-600-10 binary (MNIST) | yes | 29,400 + 375 weight words |
| 784-128-10 binary | yes | NHID = 128; 6,272 + 80 words |
| 784-1000-10 binary (Fashion-MNIST) | no | needs N_HID = 1000, which sets the weight memories to 49,000 + 625 words |
| 784-400-10, 16-bit weights (S4NN) | no | needs WM1_DEPTH ≥ 313,600 and WM2_DEPTH ≥ 4,000 |

All of these are parameter changes on `snn_soc` (`N_HID`, `WM1_DEPTH`,
`WM2_DEPTH`); the datapath is the same. Each configuration has a testbench
that streams all of its weights from the Flash model and checks the labels
against the reference model:

| Testbench | Build | Network run |
|---|---|---|
| `tb_snn_soc_full` | default | 784-600-10 binary |
| `tb_wl_bs4nn_128` | default | 784-128-10 binary, NHID = 128 |
| `tb_wl_fashion_1000` | `N_HID = 1000` | 784-1000-10 binary |
| `tb_wl_s4nn` | `N_HID = 400`, `WM1_DEPTH = 313600`, `WM2_DEPTH = 4000` | 784-400-10 and 784-128-10, 16-bit weights |

On the random test images (about 20 % lit pixels), one inference took
164,000–198,000 cycles for 784-1000-10, 68,462 cycles for 784-400-10 with
16-bit weights, and 18,685–37,152 cycles for 784-128-10 binary. The 784-1000-10
figure is 1.0–1.2 ms at 167 MHz; the published implementation reports 2.64 ms
on real Fashion-MNIST data, whose images have more lit pixels than the test
images.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed in the testbench, checks latencies where the design defines
them, has a watchdog, and ends with a `TB_RESULT checks=N failures=M` line.
The network-level tests use `tb/snn_ref_pkg.sv`, a separate time-stepped model
of the network (step-by-step, not event-by-event).

* `tb_snn_accelerator` runs 11 inferences on a 64-24-10 core. It covers both
  early-exit settings, a silent output layer, NHID reduced by register, and
  4-bit weights.
* `tb_snn_soc` does the same through the whole SoC: images and weights come
  out of the Flash model over SPI, and labels go out over the UART. It checks
  that every mechanism occurred at least once: silent inputs and hidden
  neurons skipped, early exit, decisions by spike and by potential, multi-bit
  mode, default slave, interrupt.
* `tb_snn_soc_full` runs the unmodified default 784-600-10 SoC. It streams
  all 29,775 weight words from the Flash model, runs two inferences and
  checks both labels. It takes a few seconds.
* `tb_wl_bs4nn_128`, `tb_wl_fashion_1000` and `tb_wl_s4nn` run the other
  published network sizes end to end through the SoC (see Configurations).
  The S4NN test switches the weight mode to 16 bits and runs two hidden sizes
  on one build.

The data are random (random images, random weights), not trained MNIST
networks. Classification accuracy is therefore not reproduced, only agreement
with the reference model.

Simulating with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```sh
verilator --binary --timing --assert --top-module tb_snn_soc_full \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_soc_full.sv
./obj_dir/Vtb_snn_soc_full
```

Any other testbench builds the same way with its name substituted. Lint
a module with `verilator --lint-only -Wall -y rtl rtl/snn_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are unused bits (unused address bits of the
Wishbone struct, status outputs left unconnected). There is also one
SYNCASYNCNET note, because the reset appears both in the asynchronous flops
and in the Wishbone assertion's `disable iff`.

## Files

| File | Content |
|---|---|
| `rtl/snn_pkg.sv` | shared types (spike time, potential, weight mode, Wishbone structs), address map, register offsets |
| `rtl/snn_soc.sv` | SoC top |
| `rtl/wb_interconnect.sv`, `rtl/wb_spi_master.sv`, `rtl/wb_uart_tx.sv` | bus and peripherals |
| `rtl/snn_accelerator.sv` | SNN core: registers, sequencer, wiring of the blocks below |
| `rtl/byte_memory.sv` | input memory and both spike memories |
| `rtl/encoding_unit.sv` | TTFS encoder |
| `rtl/spike_sorter.sv` | counting sort of spike times, event buffer |
| `rtl/address_generator.sv` | synapse → weight word and slot |
| `rtl/weight_memory.sv` | packed weights, field read-out |
| `rtl/scc.sv` | synaptic current calculator and accumulator |
| `rtl/if_neuron_array.sv` | time-multiplexed IF neurons |
| `rtl/ilu.sv` | inter-layer router |
| `rtl/decoding_unit.sv` | class decision |
| `tb/tb_*.sv` | one testbench per module, `tb_snn_soc_full`, and the `tb_wl_*` configuration tests |
| `tb/snn_ref_pkg.sv`, `tb/soc_tb_body.svh`, `tb/spi_flash_model.sv` | reference model, controller program, Flash model |
