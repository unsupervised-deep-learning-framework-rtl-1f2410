# A guided-wave damage detector for one FPGA

This is RTL for a small structural-health-monitoring node. It detects damage in a composite panel
with ultrasonic guided waves, and it keeps working when the temperature changes.

A PZT patch bonded to the panel is driven with a short tone burst. A second patch records the wave
that arrives. Damage changes that wave, but so does temperature: both its amplitude and its speed
shift. A fixed comparison with a reference record cannot tell the two causes apart.

The method this design implements handles that with a small autoencoder:

- **Features.** Each record is reduced to 16 cheap time-domain statistics. Some describe the record
  alone. Others compare it with a baseline record of the healthy panel.
- **Training.** A small fully connected autoencoder learns to reconstruct these 16 numbers. It is
  trained on healthy records taken over the whole temperature range, so temperature effects are
  part of what it has learnt.
- **Decision.** When the reconstruction error of a new record is larger than the usual error of
  healthy records, the record is flagged as damaged. "Usual" is the mean plus one standard deviation.

The reference system is the paper "Unsupervised deep learning framework for temperature-compensated
damage assessment using ultrasonic guided waves on edge device". In that system an FPGA board
drives the DAC, reads the ADC and stores the record. The model runs in TensorFlow Lite on a soft
processor.

This RTL puts the whole chain into dedicated logic, with no processor in the loop:

- burst generation;
- recording;
- storage of the baseline record;
- feature extraction;
- the autoencoder;
- the error and the decision.

A host only loads the trained model and the threshold, selects the sensor pair, and reads results.

All logic runs on one 100 MHz clock. One measurement takes about 0.6 ms. Two thirds of that
time is the recording itself.

## Signal chain and one measurement

```
 host bus ──► shm_ctrl ──► tx_sel/rx_sel (two 8-way analog multiplexers)
                │
                ├─ SETTLE  10 us after the multiplexers were set
                ├─ ACQ     hanning_pulse_gen ──► dac_code/dac_wr_n ──► DAC ─► amplifier ─► PZT
                │          adc_capture ◄── adc_data ◄── ADC ◄── amplifier ◄── PZT
                │             └─► record buffer (4096 x 10 bit)  or  baseline buffer
                ├─ FEAT    feature_extractor (reads record + baseline, first 2000 samples)
                ├─ AE      ae_engine (9696 parameters, 16 -> ... -> 16)
                └─ DET     anomaly_detector (MSE, compare with threshold) ──► irq, STATUS
```

The DAC and the ADC run at 10 Msps. `tick_gen` divides the system clock by ten. It produces the
sample strobe and `adc_clk`, a square wave that rises one system clock after each strobe.

The burst generator and the capture start on the same strobe. Sample 0 of a record is therefore
the ADC word for the first DAC sample. The ADC's own pipeline delay then shows up as a constant
offset, the same in every record and in the baseline.

A record is 4096 samples, which is 409.6 us. Only the first 2000 samples (200 us) go into the
features; the rest of the record can be read back by the host.

There are three ways to start a run:

| CTRL written | Steps run                     | Result                                                                    |
|--------------|-------------------------------|---------------------------------------------------------------------------|
| `0x3`        | SETTLE, ACQ                   | The record goes to the baseline buffer; the run stops there.              |
| `0x1`        | SETTLE, ACQ, FEAT, AE, DET    | The record goes to the record buffer and is evaluated.                    |
| `0x5`        | FEAT, AE, DET                 | Evaluates a record the host has already written into the record buffer.   |

The third mode evaluates stored data, such as a recorded and noise-augmented test set. That is how
the published edge evaluation was done.

## The actuation burst (`hanning_pulse_gen`)

The burst is five cycles of a 75 kHz sine under one period of a Hanning window:

    s[k] = 0.5 (1 - cos(2 pi k / K)) sin(2 pi 5 k / K),  k = 0 .. K-1

Two 32-bit phase accumulators share the sample strobe:

- The window phase advances by `STEP_W = round((75 kHz / 5) * 2^32 / 10 MHz)`.
- The carrier phase advances by exactly `5 * STEP_W`.

This keeps exactly five carrier periods inside the window. The burst ends when the window phase
wraps, after 667 samples (66.7 us).

Each phase is rounded to 12 bits. It then indexes a quarter-wave table `rtl/sine_lut.hex` with 1024
entries:

    entry(i) = round(2047 * sin(pi/2 * (i + 0.5) / 1024))

The table is mirrored and negated for the other three quadrants. The window is built as
`2047 - cos`, which spans 0 to 4094. The output is:

    (carrier * window + 2048) >>> 12

The output is offset binary, as a unipolar DAC wants, and sits at midscale (2048) between bursts.
The generator pulses `dac_wr` once per code. The top turns that into the active-low `dac_wr_n`.

The testbench compares every sample with the formula and allows 4 LSB of error.

## Recording and the baseline (`adc_capture`, `sample_buffer`)

The ADC delivers offset binary. The capture inverts the MSB, which gives a two's-complement sample
`s` in -512..511. The design reads that sample as the normalised value `x = s / 512`, which lies in
[-1, 1). The paper normalises all data to [-1, 1] before it extracts features. Here the ADC full
scale is taken as that range.

Each buffer is a simple dual-port RAM (4096 × 10 bit, synchronous read), so it maps onto block RAM.

There are two buffers:

- the **record** of the current measurement;
- the **baseline** `f_b`.

The host bus can read both buffers, and can also write them while the node is idle. Writing the
baseline buffer marks the baseline as valid, just as a baseline capture does.

The buffers have a single write port. The capture owns it during ACQ and the host while idle. An
assertion in `shm_top` checks that the two never write in the same cycle.

## The 16 features (`feature_extractor`)

This is the most involved block. The features are computed over n = 2000 samples `x_i` of the
record and `b_i` of the baseline, in this order:

| # | Feature                   | Definition used                                          |
|---|---------------------------|----------------------------------------------------------|
| 0 | mean μ                    | Σx / n                                                   |
| 1 | median                    | middle value, or the mean of the two middle values (n even) |
| 2 | mean absolute deviation   | Σ\|x − μ\| / n                                           |
| 3 | variance σ²               | Σ(x − μ)² / n                                            |
| 4 | standard deviation σ      | √σ²                                                      |
| 5 | RMS                       | √(Σx² / n)                                               |
| 6 | RMSD                      | √(Σ(x − b)² / Σb²)                                       |
| 7 | kurtosis                  | (Σ(x − μ)⁴ / n) / σ⁴                                     |
| 8 | skew (Pearson)            | 3 (μ − median) / σ                                       |
| 9 | crest factor              | max\|x\| / RMS                                           |
|10 | impulse factor            | max\|x\| / (Σ\|x\| / n)                                  |
|11 | shape factor              | RMS / (Σ\|x\| / n)                                       |
|12 | peak-to-peak difference   | (max x − min x) − (max b − min b)                        |
|13 | ratio of signal energy    | Σx² / Σb²                                                |
|14 | damage index              | Σ(x − b)² / Σb²                                          |
|15 | normalised energy change  | (Σx² − Σb²) / Σb²                                        |

The integrals in the paper's definitions become sums over the same window, so the sample period
cancels in every ratio.

The block never works in fractions until the last step. Everything before it is exact integer
arithmetic on the raw samples `s`. It runs in phases:

1. **Clear** (1024 cycles). Zero a 1024-bin histogram of sample values, one bin per ADC code.
2. **Pass A** (n + 1 cycles). Stream both buffers once and accumulate:
   - Σs, Σs² and Σ|s|, and max|s|;
   - max and min of the record, and max and min of the baseline;
   - Σb² and Σ(s − b)²;
   - the histogram.
3. **Mean.** One division gives `mu8 = floor(256 Σs / n)`. This is the mean in units of 1/256 LSB.
4. **Pass B** (n + 1 cycles). Stream the record again with `d = 256 s − mu8` and accumulate Σ|d|,
   Σd² and Σd⁴. The sums are 40, 64 and 96 bits wide. Because the mean keeps 8 fraction bits, the
   central moments are exact up to that rounding of μ.
5. **Median** (1024 cycles). Walk the histogram in value order, adding up the counts. Record the
   bin where the running count first reaches rank (n+1)/2, and the bin where it reaches n/2+1.
   This gives the two middle order statistics without sorting, in a fixed time.
6. **Finish** (17 steps). One shared 128-bit restoring divider (`udiv_seq`) and one 64-bit
   digit-by-digit square root (`usqrt_seq`) turn the sums into the features:
   - Each ratio is scaled so that the quotient is already Q16.16.
   - Roots are taken of values scaled to Q32.32, so the root is Q16.16.
   - σ, the RMS and the shape-factor intermediate are kept at higher precision than Q16.16 for the
     later steps that divide by them.

All quotients are truncated. A division by zero, for example with an all-zero baseline, saturates
the feature to the largest Q16.16 value. A full run takes about 8,600 cycles (86 us).

The testbench computes the same features in floating point, straight from the definitions, and
finds the median by sorting. It accepts a relative error of 0.2 % plus 2·10⁻⁴. The error comes from
the truncated quotients and the 8-bit fraction of μ.

## The autoencoder (`ae_engine`)

The layer widths are those of the published model:

    16 → 16 → 32 → 64 → 64 → 64 → 32 → 16

The published model has one 64-wide layer with no parameters, after the third dense layer. It
passes values through unchanged, so the engine runs six dense layers:

    y_j = ReLU(b_j + Σ_i x_i w_ij)

The last layer has no ReLU, so the output can take any sign, as the features can.

The six layers together have 9696 weights and biases. That matches the published parameter count.

**Memory layout.** All parameters sit in one 9696-word RAM, signed Q16.16. They are stored the way
a Keras `Dense` layer stores its weights: per layer the kernel `[in][out]` row-major, then the bias
`[out]`. The layer offsets are 0, 272, 816, 2928, 7088 and 9168. To load a trained model, the host:

1. takes the kernel and bias of each layer in order;
2. flattens them;
3. multiplies each value by 65536 and rounds;
4. writes word `k` to address `0x4000 + k`.

**Schedule.** For each output neuron the issue stage reads the bias, then the `in` weights of that
neuron. The weight address steps by `out` through the kernel. The execute stage, one cycle later,
does one of two things:

- it loads the bias (shifted to Q32.32) into a 72-bit accumulator; or
- it adds weight × activation, a 32 × 32 bit product.

After the last weight of a neuron, the sum is shifted back to Q16.16, truncated, saturated and
passed through the ReLU. The result is written to the other of two 64-entry activation arrays,
which swap roles each layer.

Every parameter is read exactly once, so an inference takes 9696 + 3 cycles (97 us). The
published software ran the same model in about 900 us at the same clock.

## Reconstruction error and decision (`anomaly_detector`)

The error is the mean squared error over the 16 features:

    MSE = (1/16) Σ_j (a_j − â_j)²

Each difference is squared exactly and summed in 72 bits. The sum is divided by 16 with a shift,
returned as Q16.16, and saturated. One element is processed per cycle, so the latency is 17 cycles.

Damage is flagged when MSE > threshold, a strict comparison.

The threshold is μ + σ of the MSE over the healthy training records. It comes from training and is
written by the host into `THRESH`. The node does not compute it.

## Host interface (`shm_ctrl`)

The bus is a single-cycle request bus with `h_req`, `h_we`, a 16-bit word address `h_addr` and
32-bit `h_wdata`. For a read, `h_rvalid` and `h_rdata` follow one cycle after the request.

The controller ignores the following while a run is in progress:

- starts;
- changes to the multiplexers;
- writes to the buffers;
- writes to the model.

The threshold can be changed at any time.

| Address         | Access | Contents                                                                  |
|-----------------|--------|---------------------------------------------------------------------------|
| `0x0000` CTRL   | W      | bit 0 start; bit 1 baseline capture; bit 2 process only                   |
| `0x0001` STATUS | R      | bit 0 busy; bit 1 done; bit 2 damage; bit 3 baseline valid; bits 6:4 step (0 idle, 1 settle, 2 acq, 3 feat, 4 ae, 5 det) |
| `0x0002` MUX    | RW     | bits 2:0 transmitting PZT; bits 5:3 receiving PZT                         |
| `0x0003` THRESH | RW     | damage threshold, Q16.16                                                  |
| `0x0004` MSE    | R      | MSE of the last record, Q16.16                                            |
| `0x0005` COUNT  | R      | records evaluated since reset                                             |
| `0x0010`+j      | R      | feature j, Q16.16                                                         |
| `0x0020`+j      | R      | reconstruction of feature j, Q16.16                                       |
| `0x1000`+i      | RW     | record sample i (10-bit two's complement in bits 9:0)                    |
| `0x2000`+i      | RW     | baseline sample i                                                         |
| `0x4000`+k      | W      | model parameter k, Q16.16                                                 |

`irq` pulses for one cycle when a run ends. STATUS.done then stays set until the next start.

During FEAT the feature extractor owns the buffer read address. Host reads of the buffers in that
step return zero.

## Timing at the defaults (100 MHz)

| Step            | Cycles   | Time     |
|-----------------|----------|----------|
| settle          | 1,000    | 10 us    |
| acquisition     | 40,960   | 409.6 us |
| features        | ~8,600   | ~86 us   |
| autoencoder     | 9,699    | 97 us    |
| decision        | 18       | 0.2 us   |
| whole measurement | ~60,300 | ~0.6 ms |

A stored record (process-only mode) takes about 18,400 cycles, which is 184 us. Loading it takes
4096 bus writes in addition.

On-chip memory comes to 404,480 bits:

- parameters: 310,272 bits;
- two record buffers: 81,920 bits;
- histogram: 12,288 bits.

That is about a quarter of the block RAM of the XC7A15T the reference board carries. No mapping
to that device has been done.

## Where this design departs from the paper

- **Hardware inference.** The paper runs feature extraction and the model in software on a
  MicroBlaze with TensorFlow Lite. Here both are dedicated logic, so numbers agree with a
  floating-point model only within Q16.16 rounding. The processor and the PC GUI are replaced by
  the host bus.
- **Fixed point.** Signed Q16.16 is used for features, parameters, activations and the MSE. The
  paper gives no number format, and its model is floating point.
- **Normalisation.** The paper normalises data to [-1, 1] and does not say how. Here the ADC full
  scale is that range. If the model was trained on records scaled by their own peak, or on
  features that were standardised afterwards, that scaling has to be applied before training in a
  way that matches this fixed scale. The node does not rescale features.
- **Output layer.** The activation of the last layer is not stated. It is linear here, because the
  features take both signs.
- **Parameter-free layer.** It is taken as an identity.
- **Features.** The paper lists these 16 features as time-domain features. One of its summary
  tables and its overview figure also speak of frequency-domain features. Those are not described,
  and none is built.
- **Timing and coding.** The settle time after switching, the offset-binary coding of both
  converters, the idle midscale of the DAC, the clocking of the ADC, and the register map are this
  design's own choices.
- **What stays on the host.** The threshold, the training, and the noise augmentation of test data
  are not done by the node. They stay offline, as in the paper.
- **Board naming.** The paper names the board both Cmod A7-15T and A7-35T. Nothing in the logic
  depends on which.

## How far it has been checked

Each block has a self-checking testbench in `tb/`, and each was also run against a deliberately
broken copy to show that it can fail.

| Testbench               | What it checks |
|-------------------------|----------------|
| `tb_hanning_pulse_gen`  | Every burst sample against the formula; the burst length. |
| `tb_sample_buffer`      | Write and read over the full depth, the read latency, and read during write. |
| `tb_adc_capture`        | Sample alignment to the strobe, code conversion and the record length; also covers `tick_gen`. |
| `tb_feature_extractor`  | Three synthetic record pairs against the floating-point reference (one with record = baseline), and the run time. |
| `tb_ae_engine`          | Random models and inputs, bit-exact against an integer model of the same arithmetic, and the cycle count. |
| `tb_anomaly_detector`   | MSE and decision against a reference, and the latency. |
| `tb_shm_ctrl`           | Registers, parameter and buffer writes, the order of steps in all three modes, the settle time, ignored commands while busy, and the interrupt. |
| `tb_shm_top`            | The whole node at its default sizes, end to end. |

`tb_shm_top` puts a behavioural model of the transducer path between the DAC and ADC pins: a
delayed, scaled copy of the burst plus noise. It then runs this sequence:

1. Load a random model.
2. Capture a baseline.
3. Run a measurement, and check its features, its bit-exact reconstruction and its MSE against the
   reference models.
4. Load a template model whose output is the healthy feature vector.
5. Measure three healthy records, set the threshold to μ + σ of their errors, and check that a
   further healthy record and a damaged one (larger, earlier arrival) are classified correctly.
6. Write two stored records over the bus and evaluate them in process-only mode.

The run takes about 15 s.

What is not covered:

- No real transducer, converter timing or trained model has been used.
- The results have not been compared with the published accuracy figures, which need the
  published data set and weights.
- Nothing has been placed and routed on an FPGA.

## Simulating and changing it

Run everything from the directory that holds `rtl/` and `tb/`. The burst table is read as
`rtl/sine_lut.hex`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_shm_top \
    -Irtl -Itb -y rtl -y tb rtl/shm_pkg.sv tb/tb_ref_pkg.sv tb/tb_shm_top.sv -o sim
./obj_dir/sim
```

Replace `tb_shm_top` with any other testbench name. Each testbench prints one
`TB_RESULT checks=N failures=M` line at the end.

Everything shared lives in `rtl/shm_pkg.sv`:

- sample rate, burst frequency and cycle count;
- record length and feature window;
- layer widths, layer offsets and parameter count;
- the register map.

To change the network, edit `layer_in`, `layer_out` and `layer_off` and their `N_LAYERS`,
`MAX_WIDTH` and `N_PARAMS` together. Then update the matching tables in `tb/tb_ref_pkg.sv`. The
feature window `N_WIN` may be anything up to the record length. The histogram median requires
n < 4096, because the bins count in 12 bits.
