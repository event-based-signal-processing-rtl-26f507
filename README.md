# A spiking-network classifier for radioisotope identification

A handheld gamma detector usually digitises every pulse from its scintillator
and photodetector with an ADC. It adds the pulses into an energy histogram frame
by frame and runs a classifier on each frame. The ADC, the integrator and the
histogram logic consume power all the time, even when no photon arrives. The
design here works on events instead. Each detector pulse becomes an event
on an energy channel. The events drive a spiking neural network (SNN), and the
class of the source is read from how often each output neuron fires. The
classes are Am-241, Ba-133, Co-60, Cs-137, Eu-152 and background.

The network is a converted convolutional network with 3238 energy channels in
and six class neurons out. It was trained as a conventional network on
histograms, and the histogram values became spike rates. This RTL implements
the spiking form of that network as a time-multiplexed datapath. Around it are
a multiple-threshold pulse-to-event front end, a histogram-to-spike encoder, a
timestep sequencer and a rate-based class read-out. All of it is synthesizable SystemVerilog. The
network topology, the neuron type and the synapse datapath follow the
published design. Number formats, scheduling, buffering, interfaces and
reset behaviour are choices made for this RTL and are marked as such below.

## The network

| layer | neurons | connectivity | weights |
|---|---|---|---|
| input | 3238 energy channels | spike per channel and timestep | - |
| conv1 | 16 maps x 3231 positions = 51696 | 1-D, kernel 8 x 1, stride 1, no padding | 16 x 8 = 128 |
| conv2 | 4 maps x 3224 positions = 12896 | 1-D, kernel 8 x 16 (8 taps over all 16 maps) | 4 x 128 = 512 |
| output | 6 | fully connected to all 12896 | 12896 x 6 = 77376 |

The weights add up to 78016, which leaves no room for biases, so the layers have
none. Every neuron is a leaky integrate-and-fire (LIF) neuron. Network
activations are carried as firing rates. The input is a spike train per
channel, and the answer is the output neuron that fires most often while a
sample is presented.

The sizes are the package constants in `rtl/snn_pkg.sv` and the default
parameters of every module. The default build is the full network.

## Neuron arithmetic

**Synapses (`synapse_unit`).** A synapse needs no multiplier. For each input, a
2-to-1 multiplexer passes the synapse's weight if the input spiked in this
timestep and 0 otherwise, and an adder chain sums the multiplexer outputs. The
sum is the neuron's input current for the timestep. There is no synaptic
current shape (exponential or alpha): a spike acts only in the timestep in which it
arrives. Weights are 8-bit signed. The sum is wide enough that it cannot
overflow: `8 + clog2(N) + 1` bits.

**Membrane (`lif_neuron`).** With 16-bit signed membrane `v`, current `i` and threshold `th`:

```
v'    = sat16( v - (v >>> LEAK_SHIFT) + i )     LEAK_SHIFT = 4: decay of 1/16 per timestep
spike = (v' >= th)
v     = spike ? 0 : v'
```

There is no refractory period. The leak is the digital form of the first-order
membrane decay. A shift of 4 is about a 20 ms time constant at 1 ms timesteps.
That value, reset to zero, and saturation are this design's choices; the
source design only says that the neuron is a standard current-based LIF
neuron. Each layer has its own threshold, set at run time (`v_th1..3`).
Appropriate thresholds depend on the trained weights.

## How a timestep is evaluated

A timestep has two phases.

1. **Collect.** Events are ORed into the 3238-bit input spike buffer until
   the `ts_tick` input pulses. The timestep length is therefore set from outside,
   for example by a millisecond timer. With the on-chip encoder, the phase
   instead ends when the encoder finishes its scan.
2. **Process.** conv1, conv2 and the output layer run one after another. Each
   layer reads the spike buffer of the layer before it and writes its own. A
   spike therefore crosses the whole network within the timestep in which it
   was produced.

This layer-by-layer schedule is this design's choice. So are the spike
buffers (`spike_buffer`: one word of C bits per position, combinational read,
single-cycle clear for the input buffer).

**Convolution layers (`conv1d_layer`)** evaluate one neuron per clock cycle.
A window register holds the spike words of K = 8 consecutive input positions.
It is loaded in K cycles. Then the layer issues, for each position `p`, the
neurons `(p, 0) .. (p, C_OUT-1)`. In the cycle of the last map the window
slides by one position, which costs one buffer read. All positions share the
weights of map `c`, one row of `K*C_IN` weights. The synapse unit produces the
current in the issue cycle, while the neuron's membrane is read from a
synchronous memory. In the next cycle the LIF unit computes the new membrane
and writes it back. The spike bits of a position are gathered and written
downstream as one word. The layer takes `K + L_OUT*C_OUT + 3` cycles per
timestep: 51707 for conv1 and 12907 for conv2.

**Output layer (`dense_layer`)** walks the 3224 positions of conv2's buffer,
one per cycle. Six 4-input synapse units, one per class, add their partial
sums into six accumulators. The matching weight row (6 x 4 weights) comes from
a synchronous weight memory. After the last position, the accumulators are
saturated to 16 bits and the six LIF units fire in parallel. The layer takes
`L_IN + 2` cycles: 3226.

From the edge that samples `ts_tick` to `step_done`, a timestep takes
`L1*C1 + L2*C2 + L2 + 2*KERNEL + 10` cycles, which is 67842 at full size.
This count includes one hand-over cycle between layers. At 100 MHz that is
0.68 ms per timestep.

**Starting a sample.** Membranes are not cleared by a separate pass. During
the first timestep of a sample (`first_ts`), every layer reads its stored
membranes as zero. The 51696 + 12896 membranes are therefore effectively reset
for free, and the memories need no reset.

## Where the events come from

`src_sel` (`src_e`) selects the event source for a sample.

* **External event port** (`SRC_EXT`): `ev_valid/ev_chan/ev_ready`, a
  valid/ready handshake carrying one channel number per event. This is how a
  histogram dataset encoded as Poisson spike trains is replayed, which is
  useful long before a real front end exists. `ev_ready` is low while the
  layers run, so an offered event waits for the next collect phase.
* **Analogue-to-event converter** (`a2e_converter`, `SRC_A2E`): it
  compares each amplitude sample of the detector pulse with N_THR = 3
  ascending thresholds. While the pulse is above the first threshold, it
  tracks the highest threshold reached. When the pulse falls back below the
  first threshold, it emits one event on the channel of that highest
  threshold, so each threshold is the signature of an energy band. Threshold
  k drives network input channel k. A pulse cannot be held back, so an event
  that arrives while the layers run is dropped and counted in `drop_count`.
* **Histogram-to-spike encoder** (`poisson_encoder`, `SRC_POISSON`): each
  channel holds a firing probability per timestep, `rate/256`, loaded from a
  histogram. In every timestep the encoder scans all channels in order, one per
  cycle. For each channel it draws an 8-bit number from a 16-bit LFSR (taps
  16, 14, 13 and 11, seed `0xACE1`, one step per channel), and it emits an event
  if the draw is below the rate. Over many timesteps each channel then behaves
  like a Poisson source at the rate of its bin. This is the spike coding the
  network was converted for. The encoder waits on the same valid/ready
  handshake, and the timestep's collect phase ends when its scan is done.
  The scan takes 3238 cycles; the top never holds the encoder back while
  collecting.

The converter is a digital model of what would be an analogue comparator bank;
it works on 12-bit samples. The published design shows three thresholds, but
its network has 3238 inputs. This RTL keeps both numbers: `N_THR` may be
raised up to `N_IN`, and the thresholds then become energy-bin boundaries.

## Using the top level (`radiso_snn_top`)

1. Hold `rst_n` low for a few clock cycles. Reset is asynchronous, but the
   flops also reset on a clock edge while it is low.
2. Load the weights while idle, one per cycle: `w_we`, `w_sel`
   (`WSEL_CONV1/2/DENSE`), `w_addr`, `w_data`. The addresses are:
   * conv1: `c*8 + k`
   * conv2: `(c*8 + k)*16 + ci`
   * output: `(p*6 + o)*4 + ci`, for conv2 position `p`, map `ci` and class `o`.

   `WSEL_RATE` writes the encoder rate of channel `w_addr`; `w_data` is read
   as unsigned.
3. Set `v_th1..3`, `thr`, `src_sel` and `n_steps`, the number of timesteps a
   sample is presented. Then pulse `start`. Starting a sample clears the
   spike counts.
4. For each timestep, deliver its events, then pulse `ts_tick`, then wait for
   `step_done`. With `SRC_POISSON`, just wait for `step_done`.
5. After the last timestep, `result_valid` pulses, and `result_class`
   (`iso_class_e`) and `spike_counts` hold the answer. Ties go to the lower
   class index.

Concurrent assertions check three rules:
* no two layers are busy at once;
* the encoder has finished before the layers start;
* an accepted event is never lost to a buffer clear.

The encoder also asserts that an offered event stays offered, on the same
channel, until it is accepted.

## Departures from the published design, and gaps

* The published design gives no numeric precision. It notes only that high
  precision is unnecessary. 8-bit weights and 16-bit membranes are assumed.
* Its neuron uses the default parameters of its conversion toolbox, which it
  does not list. The leak shift, reset-to-zero, saturation and the per-layer
  thresholds are assumed.
* The presentation duration is not given. It is the run-time input `n_steps`.
* The published design implements the network on an FPGA, but describes no
  hardware organisation. The time-multiplexed schedule, the buffers, the
  memories and the sequencing are this design's own.
* The order of the output neurons, and hence the class encoding, is assumed
  to follow the order in which the isotopes are listed.
* The converter's behaviour, one event per pulse on its highest threshold, is
  assumed. So are its sampled-digital form and the mapping of its thresholds
  to network inputs.
* The published design encodes histograms into spike trains off-line, to make
  a test dataset. Building that encoder on chip is this design's choice. So
  are the 8-bit probability, the LFSR and the scan order.
* Event-driven operation is limited to the input. Once a timestep is
  collected, every neuron is evaluated, because leak and accumulated membrane
  change even without input spikes.
* The following are not part of this RTL:
  * the sensor (scintillator and SiPM);
  * the optional smoothing and dimension-reduction stage, for which no
    algorithm is fixed;
  * training and conversion of the network.
* No trained weights are provided, so the classification accuracy is not
  reproduced. The testbenches use random weights and check exact agreement
  with a reference model.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a
reference model written independently in the testbench, and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_synapse_unit` | random and corner spike/weight vectors for 8 and 128 synapses |
| `tb_lif_neuron` | leak of both signs, firing at equality, saturation, 2000 random cases |
| `tb_conv1d_layer` | a 20-position, 3-to-3-map layer over 8 timesteps with a restart; every output word and the cycle count |
| `tb_dense_layer` | a 100-input, 6-output layer over 8 timesteps; output spikes and cycle count |
| `tb_rate_decoder` | counts, argmax, tie rule, clear, one-cycle result pulse |
| `tb_poisson_encoder` | 40 scans with random backpressure: exact event sequence against the LFSR polynomial, rate 0 never fires, scan time |
| `tb_a2e_converter` | 300 synthetic pulses: event channel = highest threshold reached, no event below the first threshold |
| `tb_radiso_snn_top` | reduced network (40 inputs, 3 and 2 maps): all three event sources, stalls, drops, restarts, per-timestep output spikes, class and latency |
| `tb_radiso_snn_top_full` | the same at full size with default parameters: 78016 weights loaded, 16 timesteps, about 1.2 M cycles |

The end-to-end tests count each mechanism and fail if one never occurred:
stalled events, dropped converter events, encoder events, switches of event
source, sample restarts, and spikes in every layer. Every variable that is read is reset or
written before use, and the tests pass with random initial values.

Running a test with Verilator 5 from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/snn_pkg.sv \
          tb/tb_radiso_snn_top_full.sv --top-module tb_radiso_snn_top_full
./obj_dir/Vtb_radiso_snn_top_full
```

The full-size test builds in about 10 s and runs in about 2 s. To change the
network, edit the constants in `snn_pkg.sv` or override the top's parameters;
the layer modules derive all their widths from those parameters.
