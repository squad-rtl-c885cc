# Smart single-photon detection: photon recognition and dark-count elimination in logic

A superconducting nanowire single-photon detector (SNSPD) gives a short
voltage pulse for each photon it absorbs. It also gives a few pulses when no
photon arrived. These *dark counts* look almost like photons. A conventional
readout puts a threshold on the pulse and counts it, so it passes dark counts
along with photons. It also discards everything else the pulse shape could
say about the photon, such as its wavelength or polarisation.

This design keeps the whole pulse. The detector output is sampled by a fast
ADC (4 GS/s). Each pulse is reduced to a few shape features, and a small
fully connected neural network classifies it. The two classes can be:

- photon against dark count;
- one wavelength against another;
- vertical against horizontal polarisation.

In the dark-count case, detections classified as dark counts are removed
from the output stream in real time. The same logic also fires the laser
that produces the photons, and it time-tags every detection against that
laser pulse. Photon arrival-time statistics, such as a photoluminescence
decay, can therefore be built without the dark-count background.

The SystemVerilog here covers the programmable-logic part of such a system. The
following stay outside, connected by ports:

- the detector and its bias and amplifier electronics;
- the RF ADC and DAC;
- the processor that loads the network and reads the results.

## Pipeline

One clock cycle is one ADC sample period. Samples enter one per clock on
`adc_valid`/`adc_data` (signed 16-bit).

```
 adc ─► noise_filter ──► event_buffer ──► feature_extract ─┬─► max_histogram ─┐ (mode = reference)
          ▲  │ capture WIN samples         max, FWHM,      │                  ▼
          │  └ event info (max, peak,      rise, fall      └──────────► calibrator (factor)
          │     crossings, time tag)                                         │
 trigger_gen: laser trigger, detection window, time tag                   nn_input_prep (6 inputs, Q7.8)
                                                                              │
 squad_csr: host registers, weights ──────────────────────────────────────► fcnn 6-128-64-32-2
                                                                              │
                                                            softmax_decide (class, probability)
                                                                              │
                                                 dark_count_filter (remove / pass, counters) ─► det_*
```

| Stage | What it does |
|---|---|
| `trigger_gen` | A counter of sample periods restarts every `period` cycles (default 400 000, which is 10 kHz at 4 GS/s). It drives the laser trigger (`dac_trig`) for the first `pulse_w` cycles of each period. Its value is the time tag of a detection. It also opens the detection window from `win_delay` to `win_delay + win_len`. |
| `noise_filter` | Separates pulses from background with a fixed threshold (default 1500 ADC codes). A detection starts when a sample inside the window reaches the threshold while the previous sample was below it. The block then writes `WIN` samples (512) into `event_buffer`, starting `PRE` (16) samples before the crossing. While it writes, it records the maximum, the index of the maximum, and the last index above the threshold. |
| `feature_extract` | Reads the buffer a second time and finds the half-maximum width. It reports four features: maximum, FWHM, rise time (threshold crossing to peak) and fall time (peak to the last sample above the threshold). |
| `max_histogram` | Histogram of detection maxima: 256 bins, each 32 codes wide. It tracks its most probable bin exactly, and the centre of that bin can serve as the calibration reference. |
| `calibrator` | Computes `factor = sat16(((vmax - ref) * gain) >>> 8)`. The reference is either a register (default 3400, the most probable photon maximum of the original measurements) or the live histogram mode. |
| `nn_input_prep` | Builds the network input `[max, FWHM, rise, fall, factor, bias setting]`. It scales each entry as `sat16((x - off) * gain)`, with offsets and gains from training. |
| `fcnn` | Six inputs, hidden layers of 128, 64 and 32 sigmoid neurons, and two linear outputs. |
| `softmax_decide` | Class = arg-max of the two outputs. Probability of class 1 = `sigmoid(z1 - z0)`, which is exactly the two-way softmax. |
| `dark_count_filter` | Removes or passes each detection according to the mode, and counts detections. |
| `squad_csr` | Register bank through which the processor configures the pipeline, loads the network and reads results. |

### One detection in flight

The filter does not capture a new detection until the class of the current
one is known. `release_buf` is the `out_valid` of `softmax_decide`. A threshold
crossing that arrives in the meantime is counted as *missed*, and it is lost.

At the default sizes one detection occupies the pipeline for about
512 + 514 + 11 081 + 4 ≈ 12 100 cycles:

- the capture (512);
- the feature pass (514);
- the network (11 081);
- four single-cycle stages (4).

That is about 3 µs at 4 GS/s, against 100 µs between laser pulses at 10 kHz.
At the detector's photon rate and its 2–3 Hz dark-count rate, pile-up is
therefore negligible.

This serial organisation is this design's choice. It needs one multiplier
and a few small RAMs.

## Number formats

- **Samples.** ADC samples and features are signed 16-bit integers. Time
  quantities (FWHM, rise, fall, time tag) are counted in samples.
- **Activations.** Network activations, weights and biases are signed Q7.8
  (256 = 1.0) and saturate at ±127.996.
- **Input scaling.** A gain of `g` in `nn_input_prep` scales by `g/256` per
  input unit. For example, an offset of 3600 with a gain of 1 maps a maximum
  of 3856 to 1.0.
- **Sigmoid.** Uses the PLAN piecewise-linear approximation, which needs only
  shifts and adds. Its maximum error is about 0.019 and its output is
  0 … 256.

  | \|x\| (real value) | y |
  |---|---|
  | ≥ 5 | 1 |
  | 2.375 … 5 | \|x\|/32 + 0.84375 |
  | 1 … 2.375 | \|x\|/8 + 0.625 |
  | < 1 | \|x\|/4 + 0.5 |

  For negative x, y(−x) = 1 − y(x). In Q7.8 the region limits are 1280, 608
  and 256.

A network trained in floating point must be quantised to Q7.8 before loading.
Its inputs must be normalised the same way the offsets and gains do in
hardware.

## The network engine (`fcnn`)

This is the part that takes the longest to follow.

**One multiplier.** It walks through every weight of the network once per
inference, in storage order: layer after layer, neuron after neuron, input
after input. The weight address is therefore a plain counter, and the bias
address counts neurons.

**Three-stage pipeline.**

| Stage | Work |
|---|---|
| 0 | Reads weight *w*, bias and input activation *a* from their RAMs. |
| 1 | Multiplies and accumulates. The accumulator is 2·16 + log2(128) + 1 bits wide, so no sum of a layer can overflow. The first weight of a neuron restarts the accumulator. |
| 2 | For the last weight of a neuron: shifts the sum right by 8, adds the bias, saturates to 16 bits, applies the sigmoid (hidden layers only), and writes the result into the output activation buffer. |

**Buffers.** Two activation buffers take turns as the input and output of
each layer.

**Timing.**
- Neurons follow one another without gaps.
- Between layers the engine waits two cycles, so that the last result of a
  layer is written before the next layer reads it.
- The latency from `start` to `out_valid` is `NW + 2·3 + 3` cycles. NW is the
  total number of weights: 6·128 + 128·64 + 64·32 + 32·2 = 11 072. The
  latency is therefore 11 081 cycles.

**Memory layout** (as seen through the register map):

- Weight (o, i) of layer l is at `WEIGHT0 + base(l) + o·n_in(l) + i`.
  `base(l)` is the number of weights in earlier layers: 0, 768, 8960 and
  11 008.
- Bias o of layer l is at `BIAS0 + o + (neurons in earlier layers)`. Those
  layer offsets are 0, 128, 192 and 224, for 226 biases in total.

The two output neurons are linear. Their values (logits) go to
`softmax_decide`.

## Modes

| `mode` | `elim_en` | Behaviour |
|---|---|---|
| 0, dark-count | 1 | Class 0 (dark count) is removed. Class 1 (photon) leaves on `det_*` with its probability and time tag. |
| 0, dark-count | 0 | Everything passes, labelled. Use this to compare a measurement with and without elimination. |
| 1, feature | – | Everything passes, labelled with the recognised class, for example wavelength A/B or polarisation V/H. |

The counters PHOTONS (class 1), DARKS (class 0), REMOVED and MISSED run in
every mode.

Only one binary classifier is loaded at a time. Distinguishing one wavelength
from several others means loading one weight set per pair.

## Register map

The bus is word-addressed:

- a write strobe and a read strobe;
- 16-bit address;
- 32-bit data.

Writes take effect in the next cycle. Read data is valid one cycle after the
read strobe, marked by `host_rvalid`. This is the kind of bus an AXI-Lite
bridge from the processor would drive.

| Address | Name | Reset | Meaning |
|---|---|---|---|
| 0x0000 | CTRL | 0x02 | Control bits, listed below this table. |
| 0x0001 | PERIOD | 0 | Laser period in samples. 0 = 400 000. |
| 0x0002 | PULSE_W | 0 | Trigger width. 0 = 16. |
| 0x0003 | WIN_DELAY | 0 | Detection window start after the trigger. |
| 0x0004 | WIN_LEN | all ones | Detection window length. |
| 0x0005 | THRESH | 1500 | Threshold of the background filter. |
| 0x0006 | CAL_REF | 3400 | Calibration reference. |
| 0x0007 | CAL_GAIN | 256 | Calibration slope, Q8. |
| 0x0008 | BIAS | 70 | Detector bias current setting (µA), a network input. |
| 0x0010+i | NORM_OFF i | 0 | Input offset, i = 0..5. |
| 0x0020+i | NORM_GAIN i | 1 | Input gain, g/256. |
| 0x0040 | PHOTONS | | Class-1 detections. Read only. |
| 0x0041 | DARKS | | Class-0 detections. Read only. |
| 0x0042 | MISSED | | Crossings lost while busy. Read only. |
| 0x0043 | HIST_MODE | | {count[15:0], bin}. Read only. |
| 0x0044 | HIST_TOTAL | | Values put into the histogram. Read only. |
| 0x0045 | STATUS | | bit 0: pipeline busy; bit 1: histogram clearing. Read only. |
| 0x0046 | REMOVED | | Detections removed. Read only. |
| 0x0800+k | EVBUF | | Sample k of the last captured detection. |
| 0x1000+n | HIST | | Count of histogram bin n. |
| 0x4000+a | WEIGHT | | Network weight a. Write only. |
| 0x8000+a | BIAS | | Network bias a. Write only. |

CTRL bits:

| Bit | Name | Meaning |
|---|---|---|
| 0 | trig_en | Enables the laser trigger. |
| 1 | elim_en | Enables dark-count elimination. |
| 2 | mode | Selects the mode (0 dark-count, 1 feature). |
| 3 | hist_en | Enables the histogram. |
| 4 | hist_clr | Clears the histogram. Self-clearing. |
| 5 | use_hist_ref | Takes the calibration reference from the histogram mode. |
| 6 | cnt_clr | Clears the counters. Self-clearing. |

A histogram clear takes 256 cycles, and one runs after reset. The event
buffer may be read while the pipeline holds a detection, or after it. While a
new capture is being written, reads return a mix of the old and new
detection.

## Top-level ports (`squad_top`)

| Port | Dir | Meaning |
|---|---|---|
| `adc_valid`, `adc_data[15:0]` | in | ADC sample stream. |
| `dac_trig` | out | Laser trigger towards the DAC. |
| `det_window` | out | Detection window, for monitoring. |
| `host_wr`, `host_rd`, `host_addr[15:0]`, `host_wdata[31:0]` | in | Register bus. |
| `host_rdata[31:0]`, `host_rvalid` | out | Register bus read data. |
| `det_valid`, `det_cls`, `det_score[15:0]`, `det_tstamp[31:0]` | out | One pulse per detection that passed the filter: class, probability of class 1 (Q7.8), and samples since the trigger at the threshold crossing. |

The main parameters are:

- `WIN` (512) and `PRE` (16);
- `NBINS` (256) and `BIN_SHIFT` (5);
- `PERIOD` (400 000) and `PULSE_W` (16);
- `H1`, `H2`, `H3` (128, 64, 32).

## What follows the source design and what does not

**Taken from the published system:**
- the chain: threshold background filter, then features (maximum, FWHM,
  rise, fall), then calibration against the most probable maximum of a
  histogram, then the network, then softmax/arg-max, then dark-count
  elimination;
- the layer sizes 128, 64 and 32 with sigmoid activations;
- two-class outputs with photon = 1 and dark count = 0;
- the bias current as a network input;
- the laser trigger and detection-time control;
- the 4 GS/s sample rate;
- the 10 kHz photon rate;
- the threshold of 1500 and the reference of 3400 (photons; 3800 for dark
  counts).

**Choices of this design**, where the source says only what a part does:
- one sample per clock;
- 16-bit Q7.8 arithmetic and the PLAN sigmoid;
- the exact feature definitions: rise from the threshold crossing, fall to
  the last sample above the threshold, and FWHM as the count of samples at
  or above half maximum;
- the linear form of the calibration factor, since the source gives only
  "a linear function of the maximum and the most probable value";
- the input scaling;
- the serial MAC engine and the single detection in flight;
- the histogram bin width;
- the register map and bus.

**Departures and open points:**
- **Where the network runs.** The source describes the network both as
  software on the board's ARM processor and as uploaded to the FPGA. Here it
  is in logic, which is what real-time elimination needs.
- **Network inputs.** The source names the pulse features as network inputs
  in one place and "the voltage values" of the pulse in another. This design
  uses the features plus the calibration factor and the bias setting. A
  network that takes the raw 512-sample waveform is not built.
- **Bias current.** The source gives 0.07 mA in one place and "milliampere
  level" in another. The reset value of the bias register follows 0.07 mA.
- **ADC interface.** Real RF data converters deliver several samples per
  fabric clock, for example 8 at 500 MHz. This design takes one sample per
  clock. A wide front end would need a parallel threshold detector and is
  not built.
- **Weights.** No trained weights come with the design. The testbenches use
  hand-made networks whose hidden neuron 0 follows the pulse height.
- **Photoluminescence decay.** The decay histogram itself is left to the
  processor, which builds it from `det_tstamp`.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. `tb/squad_ref_pkg.sv` holds bit-true
reference models of:

- the saturation, the sigmoid and the network;
- the feature definitions;
- a pulse generator, with an exponential decay after a linear rise.

Example with plain Verilator 5:

```
verilator --binary --timing -Irtl -Itb --top-module tb_fcnn \
    rtl/squad_pkg.sv tb/squad_ref_pkg.sv rtl/sigmoid_unit.sv \
    rtl/nn_weight_ram.sv rtl/fcnn.sv tb/tb_fcnn.sv
./obj_dir/Vtb_fcnn
```

For the whole design, list all of `rtl/*.sv` with `rtl/squad_pkg.sv` first,
then `tb/squad_ref_pkg.sv` and the testbench.

There are two end-to-end testbenches, and both share `tb/squad_e2e_body.svh`:

- **`tb_squad_top`** runs a reduced pipeline: 64-sample window, 64
  histogram bins, an 8-6-4 network and a 3000-sample laser period. It
  streams 24 laser periods.
- **`tb_squad_full`** runs the design with every parameter at its default
  and streams fifteen 400 000-sample periods (6 million samples).

Both testbenches work the same way:
- They load the network over the register bus.
- They generate noisy pulse trains with photon-like (about 3400) and
  dark-like (about 3800) heights.
- They predict every output detection from the reference models before
  streaming, and compare class, probability and time tag.
- They go through three phases:
  - elimination on;
  - elimination off;
  - feature mode with the live histogram reference.
- They provoke a missed detection and a pulse outside the detection window.
  Every in-window threshold crossing that is not a detection must be counted
  as missed. That includes the occasional re-crossing of a noisy pulse tail.
- They read the counters, histogram bins and event buffer back over the bus.
- They count how often each mechanism occurred.

`tb_squad_pl_decay` repeats the emitter experiment at reduced size over
400 laser periods:

- photons are emitted with an exponential delay after each trigger;
- dark counts arrive at random times;
- time tags are collected into a decay histogram, once with elimination on
  and once with it off.

With elimination on, the histogram must equal that of the emitted photons
exactly. Without it, the flat dark-count background appears in the tail.
The testbench prints both histograms and their RMS deviations from the
ideal exponential decay. The dark-count rate is exaggerated here. The
deviation is usually three to five times larger without elimination, though
a single short run is dominated by counting noise. The pass criterion is
exact instead: beyond four emitter decay times, no dark count may remain
with elimination on.

`tb_squad_feature_recog` runs two recognition measurements in feature mode.
The processor reloads the network between them:

- "wavelength" classes differ in pulse decay time;
- "polarisation" classes differ in rise time.

Pulse heights overlap between the classes. Every output must carry its true
class.

`tb_fcnn` checks the full 6-128-64-32-2 network against the reference model,
including the 11 081-cycle latency.
