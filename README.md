# An event-driven spiking neural network for radioisotope identification

Handheld gamma spectrometers usually identify isotopes frame by frame. They
collect a histogram of photon energies over a few seconds, then run a
classifier on it, and the processing hardware stays powered whether photons
arrive or not. The processor described here works the other way round. Every
detected gamma photon becomes a single spike. A small spiking neural network
(SNN) does work only when such a spike arrives. At the sub-kilohertz event
rates of a gamma detector the logic is idle almost all of the time, so the
power is close to the static floor of the device.

The SystemVerilog in `rtl/` covers the digital part of that chain:

```
 scintillator -> photodetector -> analogue-to-event converter    (not in RTL)
                                      | raw_ch, raw_req
                                      v
                      snn_rebin      1000 channels -> 100 input bins
                                      | AER, one-cycle REQ
                                      v
                      snn_npu        hidden layer, 100 -> 40 IF neurons
                                      | AER, one-cycle REQ (no wait for ACK)
                                      v
                      snn_npu        output layer, 40 -> 8 IF neurons
                                      | out_aer = isotope class, out_req
```

The eight output neurons stand for eight isotopes: Am-241, Ba-133, Co-57,
Co-60, Cs-137, Eu-152, Ra-226 and Th-232. The class is the output neuron that
spikes most over the integration time, typically 3 s. Counting those spikes is
left to whatever reads `out_aer`/`out_req`.

## The network and its neuron

The network is fully connected: 100 inputs, 40 hidden neurons and 8 output
neurons, with 40·100 + 8·40 = 4,320 synaptic weights. The weights are 8-bit
signed integers, from quantisation-aware training of an ordinary ANN that was
then converted to an SNN. The RTL does not include trained weights. They are
loaded through a write port.

Each neuron is a bare integrate-and-fire unit, with no leak, no refractory
period and no synaptic current shape. When a spike arrives from presynaptic
neuron *i*:

```
V   <- V + w_i
if V >= V_thr:  emit a spike, V <- 0
```

This per-spike form is exact only if the spikes of one layer are handled one
at a time. That holds here because gamma events are sparse, so a layer never
sees two input spikes in the same time step. The hardware does not rely on
that assumption, though. It processes every spike to completion before taking
the next one.

The adder saturates at the limits of the signed 16-bit voltage rather than
wrapping. A neuron with mostly inhibitory weights would otherwise wrap to a
large positive voltage after a few hundred events and fire at random.

## One layer: the Neuron Processing Unit

Both layers use the same unit, `snn_npu`, with different parameters. Its
neurons are not built as parallel hardware. One adder and one comparator
visit them in turn: this is time-division multiplexing (TDM). The unit's parts:

| part | module | role |
| --- | --- | --- |
| weight memory | `snn_weight_mem` | `N_PRE·N` signed bytes, address `source·N + neuron`, combinational read |
| weight register | in `snn_npu` | registers the memory word; the ALU uses it one cycle later |
| TDM counter | `snn_tdm_counter` | index of the neuron being integrated |
| timer | `snn_timer` | counts the stall after a spike |
| control logic | `snn_control` | state machine: forms the address, sequences the pass, emits spikes and ACK |
| register file | `snn_reg_file` | the `N` membrane voltages, read and written at the Neuron ID |
| neuron ALU | `snn_neuron_alu` | saturating `V + w` and the `>= V_thr` comparison |

The memory has no read latency. The register behind it splits each neuron's
work into two stages, fetch and integrate, and successive neurons overlap in
them.

## The TDM pass, cycle by cycle

This timing is the least obvious part of the design. A pass starts when
`req_in` is high while the unit is idle:

```
cycle        0         1          2          3 ..        N         N+1
state      IDLE      PROC n0    PROC n1    PROC n2 ..  PROC nN-1   IDLE
fetch      w[s][0]   w[s][1]    w[s][2]    ..          -
integrate  -         n0         n1         ..          nN-1
ack                                                                 1
```

* In **cycle 0** (idle, `req_in` high) the unit latches the source address *s*
  and loads weight `w[s][0]` into the weight register.
* In each **PROC** cycle ("neuron *k* process") the unit adds the registered
  weight to neuron *k*'s voltage and writes back the sum, or 0 if the neuron
  fired. In the same cycle it fetches `w[s][k+1]`.
* A pass over *N* neurons therefore takes *N*+1 cycles: 41 for the hidden
  layer and 9 for the output layer.

**A spike stalls the pass.** Suppose hidden neuron *k* fires in cycle *T*.
Then:

* In cycle *T*+1 the unit drives `aer_out = k` and pulses `req_out`.
* It then stays in `ST_DELAY` for `FIRE_DELAY` = 9 cycles (*T*+1 … *T*+9). The
  weight already fetched for neuron *k*+1 is held.
* Neuron *k*+1 is processed in cycle *T*+10.

The stall exists because the hidden layer sends its spike to the output layer
without any handshake. The output layer sees the request in its idle cycle
*T*+1 and integrates its 8 neurons in cycles *T*+2 … *T*+9. It is idle again
in *T*+10, before the hidden layer can send another spike (at *T*+11 at the
earliest). Back-to-back spikes from neighbouring hidden neurons, the worst
case, therefore never reach a busy output layer.

The output layer stalls for 0 cycles (`FIRE_DELAY = 0`), because nothing
follows it. If the last neuron of a pass fires, the stall still happens
first, and the pass ends with ACK afterwards.

**ACK** is a one-cycle pulse in the first idle cycle after the pass. So the
hidden layer's time per input event, counted from `raw_req` to `ev_ack`, is

```
1 (rebin register) + 41 + 9 · (number of hidden spikes) cycles
```

That is at most 402 cycles, or 4 µs at the 100 MHz clock the design was
targeted at. At 500 Hz to 1 kHz input rates, this is well under 1% of the
time between events.

## Handshakes

* **Event source → `snn_rebin`.** A one-cycle `raw_req` with `raw_ch`. The
  source must wait for `ev_ack` before it sends the next event. No input FIFO
  is built. An event that arrives during a pass violates the rule, and
  `snn_control` asserts that `req_in` only comes while the unit is idle.
* **`snn_rebin` → hidden layer.** Registered, so `req` comes one cycle after
  `raw_req`. The bin is `raw_ch · 100 / 1000` (10 adjacent channels per bin).
  Channels 1000 … 1023 are clamped into bin 99.
* **Hidden layer → output layer.** `req_out`/`aer_out` drive the output
  layer's `req_in`/`aer_in` directly. The output layer's ACK comes out as
  `out_ack` but nothing needs it.

## Loading weights

Write through `w_we`, `w_layer` (0 = hidden, 1 = output), `w_addr` and
`w_data`. The hidden-layer weight from input bin *i* to hidden neuron *j* is
at address `i·40 + j`. The output-layer weight from hidden neuron *j* to
output neuron *c* is at `j·8 + c`. The memories are not reset. Membrane
voltages are cleared only by `n_rst` (active low, asynchronous), so hold reset
between two inferences.

## Parameters

| parameter | default | origin |
| --- | --- | --- |
| `N_IN`, `N_HID`, `N_OUT` | 100, 40, 8 | the original design |
| weight width | 8 bits, signed | the original design |
| `HID_FIRE_DELAY` | 9 cycles | the original design |
| output-layer stall | 0 cycles | this implementation |
| membrane width `VW` | 16 bits, saturating | this implementation |
| `HID_V_THR`, `OUT_V_THR` | 128 | this implementation; scale to the trained weights |
| `RAW_BINS` | 1000 converter channels | this implementation |

Shared constants and the state type are in `snn_pkg`.

## Where this RTL departs from, or goes beyond, the original design

* **Weight storage.** The original design speaks of one memory shared for all
  synaptic weights, yet draws a weight memory inside each layer's unit. This
  RTL has one memory per layer, shared by all neurons of that layer. Together
  the two memories hold all 4,320 weights. A single memory for both layers
  would also work with this schedule, because the hidden layer is stalled
  while the output layer reads. That variant is not built.
* **Voltage width.** The reported FPGA build used about 480 registers. This
  RTL has about 820 flip-flop bits, 768 of them for 48 16-bit voltages. That
  suggests the original used narrower voltages, perhaps 8 bits. The width
  here is a package constant.
* **Threshold, raw channel count, reset style, pulse lengths.** None of these
  are specified in the original and all are chosen here. So are the weight
  write port, the clamping of high channels and the saturating adder.
* **Stall slack.** In this pipeline a stall of 8 cycles would already be
  enough. The original's 9 is kept, which leaves one cycle of margin.
* **Not covered by the RTL.** The scintillator, photodetector and
  analogue-to-event converter are outside it. So is the on-FPGA stimulus
  generator and logic analyser used for lab validation, and so is the
  spike-count classification over the integration time.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | checks |
| --- | --- |
| `tb_snn_rebin` | all 1024 channels and random ones against `floor(ch/10)` with clamp; one-cycle latency |
| `tb_snn_weight_mem` | fill and read back all 4000 words; random rewrites |
| `tb_snn_tdm_counter` | random clear/increment against a software counter, wrap at 39 |
| `tb_snn_timer` | exactly 9 busy cycles and one `done` per start |
| `tb_snn_neuron_alu` | saturating sum and compare, corner cases and 25,000 random operands |
| `tb_snn_reg_file` | random read/write against an array, reset to zero |
| `tb_snn_control` | write-back order, fetch addresses, spike timing, 9-cycle stall gaps, ACK at 41 + 9·spikes cycles |
| `tb_snn_npu` (with `tb_npu_harness`) | hidden and output configurations against a layer model; every voltage after every pass |
| `tb_snn_top` | full-size end-to-end run of 1,500 events (one 3 s inference at 500 Hz) |

`tb_snn_top` works like a per-neuron monitor and scoreboard. It models
re-binning and both layers in software. After every event it compares all 48
membrane voltages, both spike streams and the ACK cycle count. At the end it
compares the spike counts per class and the winning class. It also counts
each mechanism and fails if one never occurs: stalls after hidden spikes,
back-to-back hidden spikes, a spike of the last hidden neuron, output spikes,
clamped channels and saturating adds. Events are sent back to back, so the
idle time between real detector events is not simulated. The weights are
random, not trained, so the test checks that the hardware matches the
arithmetic, not classification accuracy.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_snn_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/snn_pkg.sv tb/tb_snn_top.sv \
    --Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_snn_top` with any other testbench name. The full-size top test
builds in about 20 s and runs in under a second.
