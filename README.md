# 32-channel event-driven brain-machine interface: digital RTL

An intracortical brain-machine interface has to turn tens of electrode signals
into a movement command. It must also spend only a few microwatts per channel,
and it cannot send raw samples off the implant. This design does every step on
chip and keeps as little data as possible at each step:

1. **Delta modulation.** Each channel's amplified signal goes to a delta
   modulator with two threshold windows. It produces an ON or OFF event only
   when the signal has moved by more than the current window. It does not
   sample at a fixed rate.
2. **Spike detection in the pixel.** A small bit memory in each channel
   counts that channel's events over the last 1 ms. When the count reaches a
   programmable threshold, the channel reports one spike detection. Noise
   gives isolated events and rarely reaches the count. Action potentials give
   bursts of events and do.
3. **AER link.** Detections travel over an address-event (AER) link into a
   32-bit frame. A frame has one bit per channel and covers 4 ms (250 Hz).
4. **Spiking neural network.** Every frame is decoded by a small spiking
   network with ternary (+1/0/-1) activations and 4-bit weights. Its output is
   two 16-bit velocity values, for example the x and y velocity of an intended
   reach.
5. **Idle mode.** Between frames the network sits in a low-power idle mode.

This RTL covers the digital part of that chain:

- the controller of each delta modulator;
- the spike detector;
- the AER arbiter and decoder;
- the network with its memories, configuration and weight loading;
- mode control.

The analog front end and the comparators of the delta modulator are outside
the RTL. Their digital signals are ports of the top level, `bmi_soc`.

```
 cmp_hi/cmp_lo[31:0] --> pixel_array (32 x pixel = dtdm_ctrl + imc_spd)
 amp_rst/thr_fine    <--      | req[31:0] / ack[31:0]
                          aer_arbiter --(aer_req, ADDR[5:0], aer_ack)--> snn_decoder
                                                                          aer_decoder_fb -> frame[31:0]
                          timebase: slot_tick (125 us), frame_tick (4 ms)  mode_ctrl (idle/inference)
                                                                          snn_core 32-48-2
                                                                          output_buffer -> vel[2][15:0]
                                                                          snn_config, weight_updater
```

All logic runs from a single clock, `clk`, with an asynchronous active-low
reset, `rst_n`. The clock is taken to be 128 kHz. At that rate every time
constant of the system is a whole number of cycles:

| Constant | Time | Cycles |
|---|---|---|
| Detector slot | 125 µs | 16 |
| Fine-window hold | 1.5 ms | 192 |
| Frame | 4 ms | 512 |

For another clock, change the cycle parameters: `TS_CYCLES`, `FRAME_CYCLES`
and `WIN_CYCLES` in `bmi_pkg`.

## Dual-threshold delta modulator controller (`dtdm_ctrl`)

The analog delta stage compares the change of the amplifier output against a
window, `[V_L, V_H]`:

- It raises `cmp_hi` when the change rises above `V_H`.
- It raises `cmp_lo` when the change falls below `V_L`.

`thr_fine` selects which window the comparators use:

- **Coarse window (`thr_fine = 0`):** wide, so background noise rarely
  triggers it.
- **Fine window (`thr_fine = 1`):** narrow, so a fast action potential is
  followed closely once it has started.

When the controller samples a crossing, it does three things:

- It emits a one-cycle `spikep` (upward crossing) or `spiken` (downward
  crossing).
- It holds `amp_rst` high for `RST_CYCLES` (2) cycles. The delta stage
  restarts from the new level, and crossings are ignored during the reset.
- It switches to the fine window.

Every event restarts a 1.5 ms timer. If the timer expires with no further
event, the controller returns to the coarse window.

The testbenches drive this controller from a behavioural integer model,
`tb/dtdm_analog_model.sv`. The model stores the input level while `amp_rst` is
high. It then compares the difference against ±40 (coarse window) or ±10
(fine window).

## In-memory spike detector (`imc_spd`)

This is the most unusual block of the design. It keeps a 1 ms sliding history
of the channel's events in 8 ON and 8 OFF bitcells. Each bitcell covers one
125 µs slot.

**Write.** During a slot, any ON event sets the ON capture bit and any OFF
event sets the OFF capture bit. On the silicon, a capture bit is a small
dynamic storage node. At `slot_tick`, both capture bits are copied into the
cells that the round-robin pointer selects. The pointer then advances, so the
cells always hold the last eight slots.

**Read.** A serial read phase follows. On each of the next 8 cycles, one ON
cell and one OFF cell are read. Each set cell increments its counter, ON or
OFF.

**Compare.** On the cycle after the read:

- The detector compares ON + OFF with the threshold `thr` (0 to 16). A sum
  `>= thr` is a detection.
- The one exception: while the refractory counter is non-zero, no detection is
  made and the counter counts down instead.
- A detection loads the refractory counter with `refr`. The next `refr` slot
  reads therefore cannot fire. This stops one long spike from being reported
  in several consecutive slots.

**Handshake.** A detection raises `req` towards the AER arbiter, using a
four-phase handshake:

1. `req` rises.
2. `ack` rises.
3. `req` falls.
4. `ack` falls.

A detection made while a request is still outstanding is dropped.

**Timing:**

- A detection (`spike` strobe and `req`) appears 10 cycles after `slot_tick`.
- `slot_tick` must be at least 10 cycles apart. An assertion checks this.

Why the threshold matters: it trades compression against fidelity. At the
default threshold of 5, the test signal used by the end-to-end testbench
yields about 20 times fewer detections than events. Channels that carry only
noise produce events but no detections.

## Pixel array and AER link (`pixel`, `pixel_array`, `aer_arbiter`, `aer_decoder_fb`)

A `pixel` is one `dtdm_ctrl` feeding one `imc_spd`. The `pixel_array` holds
32 pixels, P0 to P31, arranged as 4 rows of 8. They share the slot strobe and
the detector settings.

**Arbiter.** The `aer_arbiter` serves the pixel requests round robin, starting
after the channel it served last. It sends the winner as a 6-bit address:
bit 5 is a valid flag and bits 4:0 are the channel. The arbiter runs two
four-phase handshakes in sequence:

1. It raises `aer_req` with the address.
2. When `aer_ack` arrives, it acknowledges the pixel.
3. It waits until both sides have released.

An assertion checks that at most one pixel is acknowledged at a time. When
several channels detect in the same slot, their requests queue. The arbiter
serves one address per handshake of a few cycles. If all 32 channels
detect in the same slot, the last one waits several slots. A further detection
from a channel whose request is still waiting is dropped. The refractory period
usually covers that wait.

**Decoder and frame buffer.** The `aer_decoder_fb` acknowledges every address
and sets that channel's bit in the frame being collected. At `frame_tick` it:

- copies the frame to `frame`;
- pulses `frame_valid`;
- starts a new, empty frame.

A channel that fires several times within 4 ms still shows a single 1. An
address accepted in the same cycle as `frame_tick` belongs to the closing
frame.

## Bi-SNN core (`snn_core`, `snn_layer`, `synapse_ctrl`, `syn_mem`, neurons)

### Structure

The network has three layers of neurons:

| Layer | Neurons | Type | Inputs | Weights |
|---|---|---|---|---|
| L1 | 32 | bipolar LIF | the 32 frame bits | 32 × 32 |
| L2 | 48 | bipolar LIF | the 32 ternary L1 outputs | 32 × 48 |
| L3 | 2 | leaky-integrate, no firing | the 48 L2 outputs | 48 × 2 |

In total the network has 2,656 signed 4-bit weights. The membrane potentials
of the two L3 neurons are the velocity outputs.

### Layer

An `snn_layer` consists of:

- a `synapse_ctrl` sequencer;
- a `syn_mem` weight memory, with one row per input and one 4-bit weight per
  neuron;
- an array of neurons that all update in parallel.

A layer processes one frame (one time step) as follows:

1. **LEAK.** Every neuron computes `v <= v - (v >>> L)`. `L` is a
   per-layer shift from the configuration. This exponential decay needs no
   multiplier. It is skipped when `leak_en = 0`.
2. **SCAN / DELIV.** A priority search finds the next non-zero input, and the
   sequencer reads its weight row. Next cycle the row is on the memory output,
   and every neuron adds its weight (input +1) or subtracts it (input -1).
   Inputs that are 0 cost no cycles. This is where the event-driven saving
   comes from.
3. **ACT.** Each bipolar neuron fires and resets to 0:
   - +1 if `v >= vth`;
   - -1 if `v <= -vth`.

   Otherwise it outputs 0 and keeps `v`.
4. **DONE.** A one-cycle strobe starts the next layer.

For `A` active inputs, a layer takes `2A + 4` cycles. The worst-case frame
therefore takes 236 cycles in all:

| Layer | Worst case | Cycles |
|---|---|---|
| L1 | all 32 inputs active | 68 |
| L2 | all 32 inputs active | 68 |
| L3 | all 48 inputs active | 100 |

This is well inside the 512 cycles of a frame.

### Membrane arithmetic

Membrane potentials are 16-bit signed. Accumulation saturates at ±32767
instead of wrapping. The output neurons never reset, so they keep integrating
across frames and decay only through the leak.

## Idle and inference modes (`mode_ctrl`)

In **idle** mode:

- `hi_supply` is low (request for the low supply);
- the core's clock enable, `core_en`, is low;
- only the AER decoder and frame buffer run.

**Entering inference.** When `frame_valid` arrives and `infer_en` is set, the
controller:

1. raises `hi_supply` and `core_en`;
2. waits 4 cycles for the supply to settle;
3. starts the core.

**Leaving inference.** When the L3 output is valid, the controller returns to
idle.

**Rejected frames:**

- A frame that arrives during an inference is counted in `frames_dropped`.
  This cannot happen at the default rates.
- With `infer_en = 0`, frames are buffered but never decoded.

`core_en` is written as a clock enable on every flip-flop of the core. A
netlist would put an integrated clock-gating cell on it.

The `output_buffer` captures both velocities when the output is valid:

- `vel_ready` stays set until the host pulses `vel_rd`.
- `vel_overrun` records that a result was overwritten before it was read.

## Configuration and weight loading (`snn_config`, `weight_updater`)

The configuration is a 4-word register file, written through
`cfg_we`/`cfg_addr`/`cfg_wdata` and read back through `cfg_rdata`. Reset
values are from `CFG_DEFAULT` in `bmi_pkg`.

| addr | bits | field | reset |
|---|---|---|---|
| 0 | 15:0 | `vth_l1`, L1 firing threshold | 8 |
| 1 | 15:0 | `vth_l2`, L2 firing threshold | 8 |
| 2 | 3:0 / 7:4 / 11:8 | leak shift L of L1 / L2 / L3 | 3 / 3 / 3 |
| 3 | 0 | `leak_en` | 1 |
| 3 | 1 | `infer_en` | 1 |
| 3 | 6:2 | `spd_thr`, detector threshold | 5 |
| 3 | 10:7 | `spd_refr`, detector refractory (slot reads) | 8 |

Weights are loaded through the weight updater:

1. `wu_set` loads a write pointer (layer, row, column).
2. Each `wu_valid` writes `wu_data` at the pointer and advances it. The column
   advances first, then the row, then the layer: L1, L2, L3, back to L1.

So one `wu_set` followed by 2,656 writes loads the whole network, row by row.
Row `i` of a layer holds the weights from input `i` to every neuron of the
layer.

Weights are 4-bit two's complement, -8 to +7. Memories are not cleared by
reset, so load the weights before enabling inference.

## Top-level ports (`bmi_soc`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `cmp_hi`, `cmp_lo` | in | 32 | comparator outputs of the analog delta stages |
| `amp_rst`, `thr_fine` | out | 32 | delta-stage reset and window select |
| `cfg_we`, `cfg_addr`, `cfg_wdata`, `cfg_rdata` | in/out | 1/2/16/16 | configuration bus |
| `wu_set`, `wu_layer`, `wu_row`, `wu_col`, `wu_valid`, `wu_data` | in | | weight loading |
| `vel`, `vel_ready`, `vel_overrun`, `vel_rd` | out/in | 2×16 | decoded velocities |
| `hi_supply`, `frames_dropped` | out | 1/8 | mode and dropped-frame count |
| `on_ev`, `off_ev`, `spike`, `frame_q`, `frame_valid` | out | 32 | observation of events, detections and frames |

## Where this design departs from the source description

**Not in the RTL.** The analog parts are not here:

- the chopper-stabilised neural amplifier;
- the switched-capacitor delta stage;
- the comparators.

Their digital interface is exposed instead.

**Design choices.** The published description gives the structure and
function of most blocks but not their cycle-level behaviour. The following
are choices made in this design:

- **Clock.** The 128 kHz clock and the single clock domain.
- **Delta modulator controller.** The 2-cycle reset, and that every event
  restarts the fine window.
- **Spike detector:**
  - synchronous counters in place of ripple counters, with one read cycle
    per cell;
  - the `>=` comparison;
  - the refractory rule;
  - dropping detections while a request is pending.
- **AER.** The round-robin arbitration, the clocked four-phase handshakes and
  the use of address bit 5 as a valid flag.
- **Network:**
  - the per-frame order: leak, then accumulate, then fire;
  - saturating arithmetic;
  - reset to zero after firing;
  - 16-bit membranes in all layers;
  - the output neurons as non-firing integrators.
- **Registers and loading.** The register map, every default except the
  detector threshold, and the weight-loading protocol.
- **Modes.** The supply settle time, and `hi_supply` as a plain request
  signal.
- **Layer 1.** The network is read as three neuron layers (32, 48, 2) behind
  the 32-bit frame, so layer 1 is a 32 × 32 fully connected layer.

**Not included:**

- **Trained weights.** No trained weights are included, so the decoding
  accuracy of the original chip cannot be reproduced. The testbenches use
  random weights and compare against a bit-exact reference model.
- **Power and supply.** Power numbers and voltage switching are not modelled.

## Verification and simulation

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
compares the module against an independent model in the testbench and prints
`TB_RESULT checks=N failures=M` at the end. `tb/snn_ref_pkg.sv` is the
bit-exact reference for a network layer.

`tb_bmi_soc` runs the whole chip at its default parameters:

1. **Input.** It drives 32 synthetic channels through the analog model. Each
   channel carries noise, rare transients and action potentials at
   channel-dependent rates; every fourth channel carries noise only.
2. **Load and decode.** It loads random weights and decodes about 120 frames.
   Each velocity is checked against the reference model, fed with the frames
   the chip produced.
3. **Saturation.** A final phase uses all weights at +7, no leak and zero
   thresholds. This drives the membranes into saturation.
4. **Mechanism counts.** It counts, and requires at least once:
   - fine- and coarse-window switches;
   - refractory blocks;
   - AER contention;
   - detections merged within a frame;
   - mode switches and idle frames;
   - result overruns;
   - positive and negative firing in L1 and L2;
   - leak cycles.

It also reports how many synaptic updates the event-driven synapse controllers
performed, compared with a dense network. It runs for a few seconds of wall
time in verilator.

`tb_spd_threshold_sweep` replays one synthetic 32-channel recording through the
frontend once for each detection threshold from 1 to 8. It checks every
channel's detection count against a model of the detector and reports the
event-rate reduction. On that stimulus the reduction grows from about 13× at
threshold 1 to about 36× at threshold 8. Noise-only channels stop producing
detections from threshold 3 upward. These figures depend on the synthetic
signal; they are not a measurement on recorded neural data.

To run one testbench with plain verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_bmi_soc \
    rtl/bmi_pkg.sv tb/snn_ref_pkg.sv tb/dtdm_analog_model.sv \
    $(ls rtl/*.sv | grep -v bmi_pkg) tb/tb_bmi_soc.sv
./obj_dir/Vtb_bmi_soc
```

Package files must come before the modules that import them. All test data
is generated inside the testbenches; no data files are read.
