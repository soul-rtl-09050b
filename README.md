# SOUL: a seizure detector that retrains itself on its own confident outputs

An implanted seizure detector is trained offline on one patient's recordings. Then it runs for months while the patient's EEG slowly changes: electrodes move, impedances drift, daily rhythms shift. A fixed classifier gets less accurate over that time. SOUL (Stochastic-gradient-descent-based Online Unsupervised Logistic regression) handles the drift in hardware. The classifier is a small logistic regression over 32 EEG features. Whenever it has been confidently sure of the same answer for a run of consecutive samples, it treats its own answer as the true label. It then applies one SGD step to its weights. No labels from outside are needed, and the update takes the same eight cycles as one classification.

This repository holds synthesizable SystemVerilog for the digital part of the design:

- the eight-channel feature extractor (line length and three IIR band powers over a sliding 100-sample window);
- the logistic-regression classifier with its lookup-table sigmoid;
- the confidence-gated retraining controller;
- the SGD weight update;
- a scan chain and a configuration port.

Every block comes with a self-checking testbench. A bit-accurate reference model checks the whole chip end to end.

The analog recording front end (amplifiers and ADC) is not included. Its digital output is a port of the top: eight 16-bit samples per frame at 1 kS/s.

## 1. The algorithm in numbers

For every sample time t, the chip forms a feature vector x of 32 values: 4 features for each of 8 channels. From it, it computes

    z = w · x                      (no bias term)
    p = σ(z)                       seizure probability, via a 10-row table
    y = (p ≥ 0.5)                  the chip's own label = the seizure output

Retraining ("bootstrap" learning) is triggered in two cases:

- the last HC results all had p > CT (confidently seizure);
- the last 10·HC results all had p < 1 − CT (confidently not seizure).

In either case, the weights are updated once with the SGD step for the logistic loss:

    w ← w + η (y − p) x,    η = 1/64

Here x is the feature vector of the sample that completed the run. The update uses the label the chip gave itself, so it always pushes p further towards the side it was already on. That is why the confidence gate matters: updates happen only after long, consistent runs, so one glitch cannot drag the model.

The non-seizure run is ten times longer because non-seizure time is far more common. With the longer run, the two kinds of update happen at roughly balanced rates. CT (the confidence threshold) and HC (the count) are programmable per patient. CT resets to 0.7 and HC to 7.

## 2. Data flow and the 8-cycle schedule

```
 adc_samples[8] ─┐                                             ┌─ res_valid, probability,
 (or scan frame) ├─► channel_mux ─► feature_extraction ─► soul_classifier ─┤  seizure_detected
                 │   1 ch/cycle     LL, α, β, γ per ch     32-term MAC, LUT,  └─ retraining, retrain_sz/ns,
 scan_in ────────┘                  (4 x 16-bit)           gate, SGD update       dropped
```

The system clock is 8× the sample rate (8 kHz for 1 kS/s). One frame holds one sample of each of the eight channels. The channel multiplexer sends the channels out one per cycle, in order 0..7. All the per-channel hardware (filters, window sums) is therefore built once and shared. Its state sits in small register files indexed by the channel number.

Cycle by cycle, for a frame that arrives with `adc_valid` at cycle 0:

| cycle | what happens |
|---|---|
| 0 | frame latched by the multiplexer |
| 1..8 | channel 0..7 leaves the multiplexer |
| 2..9 | line-length difference / filter output of each channel is registered |
| 3..10 | window sums registered: the 4 features of each channel reach the classifier |
| 3..10 | classifier multiplies 4 features × 4 weights and accumulates; the features are stored in a 32-word buffer |
| 11 | `res_valid` with `probability` and `seizure_detected` |
| 11..18 | *only if a confident run just completed*: retraining, 4 weights per cycle |

Retraining takes the same eight cycles as a classification and uses the same four multipliers. So when frames arrive back to back (one every 8 cycles), the frame whose channel 0 arrives during retraining is ignored as a whole. `dropped` pulses for it. Exactly one sample is lost per retraining. After the update, both confidence runs start again from zero.

Frames must be at least 8 cycles apart. A frame that arrives while the multiplexer is still sending out the previous one is ignored, and `overrun` pulses.

## 3. Feature extraction

Four features are computed for each channel over a sliding window of the last 100 samples (0.1 s). A new value comes out every sample, so consecutive windows overlap by 99 %.

- **Line length**: Σ |x[n] − x[n−1]| over the window. It captures large, fast activity.
- **Band power, α 8–16 Hz, β 16–32 Hz, γ 32–96 Hz**: Σ y[n]² over the window, where y is the sample after a bandpass filter. This is a sum-of-squares estimate of the power in each band.

Each feature is a delay line plus a running sum (`window_accumulator`). The new value is written over the oldest one, and the sum is updated as `sum + new − oldest`. Each of the 4 × 8 delay lines is 100 words long. They are kept in one flat memory, addressed `channel·100 + pointer`. The pointer moves on once per frame, after channel 7. The memory is not reset, so it can map to a RAM. Instead, a "filled" flag makes the oldest value read as zero until the pointer first wraps. As a result, the first 99 outputs after reset are sums of fewer than 100 samples. The sum is kept at full width and saturated to 16 bits only when it is output.

### The bandpass filters

The filters have to be sharp: at least 20 dB stopband rejection. An FIR filter that sharp for the 16–32 Hz band would need about 140 taps. An elliptic IIR filter needs only three second-order sections (biquads) per band. Each biquad is Direct Form I:

    y[n] = b0·x[n] + b1·x[n−1] + b2·x[n−2] − a1·y[n−1] − a2·y[n−2]

Each biquad keeps four state words per channel. Each sum is formed at full precision, rounded to nearest, shifted back to Q6.10 and saturated. The three sections are cascaded within one cycle. That is cheap at an 8 kHz clock.

The coefficients are not published. The ones here define a 6th-order elliptic bandpass (1 dB passband ripple, 20 dB stopband, 1 kS/s). The overall gain is spread equally over the three sections. The values are quantized to Q2.14 (value × 16384). Rows are {b0, b1, b2, a1, a2}:

| band | section 1 | section 2 | section 3 |
|---|---|---|---|
| α 8–16 Hz | 3259, 0, −3259, −32165, 15862 | 3259, −6475, 3259, −32427, 16208 | 3259, −6512, 3259, −32639, 16296 |
| β 16–32 Hz | 4077, 0, −4077, −31420, 15356 | 4077, −7937, 4077, −31763, 16034 | 4077, −8124, 4077, −32428, 16208 |
| γ 32–96 Hz | 6290, 0, −6290, −27206, 12584 | 6290, −9342, 6290, −25744, 14919 | 6290, −12413, 6290, −31595, 15856 |

To fit a patient's own filters, change `COEF_*` in `soul_pkg.sv`. `tb_iir_bandpass` checks the filter sample by sample against a reference model. It also checks that a 250 Hz tone is attenuated by at least 20 dB.

## 4. Number formats

| quantity | format | notes |
|---|---|---|
| input samples, filter data, features | 16-bit signed Q6.10 | 6 integer, 10 fraction bits |
| filter coefficients | 16-bit signed Q2.14 | |
| squared filter output | 21-bit, `y² >>> 10` | before the window sum |
| weights | 16-bit signed Q6.10 | reset to 0, loaded after offline training |
| products and dot product z | 38-bit signed Q12.20 | 32 Q6.10·Q6.10 products, no overflow |
| probability p, CT | 8-bit unsigned Q0.8 | p = 255 would be 0.996 |
| error (y − p) | 10-bit signed, scaled by 256 | `label·256 − p` |

## 5. The sigmoid table

σ(z) is replaced by a 10-row table. The row is `clamp(floor(z) + 5, 0, 9)`, so each row covers one unit of z from below −4 to ≥ 4. Each row holds `round(256·σ(c))`, where c is the midpoint of the row's interval (row r → c = r − 4.5):

| row | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|---|
| z range | < −4 | [−4,−3) | [−3,−2) | [−2,−1) | [−1,0) | [0,1) | [1,2) | [2,3) | [3,4) | ≥ 4 |
| p (/256) | 3 | 8 | 19 | 47 | 97 | 159 | 209 | 237 | 248 | 253 |

The floor of a Q12.20 number is its integer bits, so finding the row needs only a compare on the top bits of z. Ten rows is the size the paper settled on: its own sweep over 5 to 12 rows shows accuracy leveling off at 10. The row boundaries and midpoint values are this design's choice. Only the row count is given.

The table matters more than it seems. The seizure decision only needs the sign of z. But p also enters the weight update through (y − p), so a coarse table changes how much learning is done.

## 6. Confidence gating (`retrain_logic`)

Each result p is compared with CT and with 1 − CT (`p > CT`, `p < 256 − CT` in Q0.8). Each comparison result is shifted into its own register:

- 16 stages for seizure (HC up to 16);
- 160 stages for non-seizure (10·HC up to 160).

Retraining is requested when the newest HC bits of the seizure register are all ones. It is also requested when the newest 10·HC bits of the non-seizure register are all ones. A result that is not confident shifts in a zero and breaks the run. HC = 0 disables retraining. The shift-register form of the counters, the two thresholds and the ×10 ratio follow the original design. The all-ones window test is how "a run of HC" is read here.

When retraining starts, both registers are cleared. A new run must then build up from scratch before the next update.

## 7. Classification and retraining datapath (`soul_classifier`, `mac_array`, `weight_memory`)

The datapath has four multipliers. In classification mode, each cycle they multiply one channel's 4 features by that channel's 4 weights. The adder tree's partial sum is added into a 38-bit accumulator. After channel 7, z is complete and goes through the table to give p. The label y = (p ≥ 128) is both the seizure output and the bootstrap label.

In retraining mode, the same multipliers compute `err · (x >>> 6)`, where err = y·256 − p. The `>>> 6` applies η = 1/64. The shift by 8 then removes the ×256 scale of err. The result is added to the old weight, truncated to Q6.10 and saturated. Four weights (one channel group) are written per cycle. The x used is the feature vector of the sample just classified. It is kept in a 32-word feature buffer, because the features are not otherwise stored.

Retraining starts in the cycle after the result. If a frame is already coming in, the start waits until that frame is finished, so a frame is never cut in half. The frame whose channel 0 then meets the retraining cycles is the one that is dropped.

The weights live in 32 flip-flop words with a group read/write port (4 words, for the MAC) and a word port (for configuration). If both write to the same word in one cycle, the word port wins.

## 8. Configuration and test access (`soul_top`, `scan_chain`)

Configuration word port (`cfg_we`, `cfg_addr[5:0]`, `cfg_wdata`, `cfg_rdata`):

| address | contents |
|---|---|
| 0..31 | weight of feature k of channel c at address 4c + k; k = 0 line length, 1 α, 2 β, 3 γ; Q6.10 |
| 32 | CT, Q0.8 in bits 7:0 (reset 179 ≈ 0.7) |
| 33 | HC, bits 4:0 (reset 7) |

The scan chain replaces the ADC as the sample source when `scan_mode` = 1. The frame path works as follows:

- While `scan_en` is high, `scan_in` shifts a 128-bit frame in, MSB first, channel 0 first.
- A `scan_load` pulse then presents the frame to the multiplexer.

The result path works as follows:

- Each classification result is captured as `{seizure, retrain_sz, retrain_ns, dropped, 4'b0, probability[7:0]}`.
- It shifts out on `scan_out`, MSB first, with the same `scan_en`.
- So one result leaves while the next frame arrives.

The retrain and drop flags in that word remember any event since the last capture.

## 9. Where this RTL departs from, or adds to, the original design

- **Filter coefficients** are designed here, as given above. Only the filter type (elliptic), the structure (3 DF-I biquads) and the 20 dB requirement are from the original.
- **Table contents and row boundaries** (section 5) are this design's choice; only the size of 10 rows is given.
- **Formats**: Q6.10 data is from the original. Q2.14 coefficients, 38-bit accumulation, 8-bit probability, truncation and saturation points are this design's.
- **Channel FIFO**: the original describes an eight-address register file per feature. Here it is one flat memory per feature, indexed by channel and pointer, with the same behaviour.
- **Feature buffer, when retraining starts, the drop rule** are this design's way of meeting "retraining takes eight cycles and one input sample is ignored".
- **No bias term** in the logistic regression. None is described.
- **Configuration port, scan frame layout, reset values** (weights 0, CT 0.7, HC 7) are this design's. CT 0.7 / HC 7 is a typical setting, not a requirement.
- **Not included**: the analog front end; any power gating or clocking specific to the fabricated chip; the offline training flow (weights must be loaded by the host).

## 10. Files

| file | contents |
|---|---|
| `rtl/soul_pkg.sv` | sizes, formats, filter coefficients, sigmoid table, helpers |
| `rtl/soul_top.sv` | top level: source mux, config registers, instances |
| `rtl/channel_mux.sv` | frame latch and channel serializer |
| `rtl/feature_extraction.sv` | line length + three band powers in lock step |
| `rtl/line_length.sv`, `rtl/band_power.sv`, `rtl/iir_bandpass.sv`, `rtl/window_accumulator.sv` | feature units |
| `rtl/soul_classifier.sv` | mode control, accumulation, feature buffer, drop logic |
| `rtl/mac_array.sv`, `rtl/weight_memory.sv`, `rtl/sigmoid_lut.sv`, `rtl/bootstrap_logic.sv`, `rtl/retrain_logic.sv` | classifier parts |
| `rtl/scan_chain.sv` | serial frame input and result output |
| `tb/tb_ref_pkg.sv` | bit-accurate reference model (filters, windows, classifier with gating and SGD) |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_hc_ct_sweep.sv` | whole chip over a grid of CT and HC settings |

## 11. Verification and simulation

Every testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog, and each compares against values worked out independently of the RTL. Most use the reference model in `tb/tb_ref_pkg.sv`, which is written as plain integer arithmetic with queues rather than hardware structures.

`tb_soul_top` runs the whole chip at its default sizes. It generates synthetic EEG: background noise, plus episodes of a strong 20 Hz rhythm as the "seizure" activity. It loads weights through the configuration port and sends about 1000 back-to-back frames. It checks every probability and label and the final weights against the reference. Then it repeats part of the run through the scan chain.

It counts each mechanism and fails if one never occurs. In a typical run there are about 345 seizure detections, 82 seizure-side updates, 14 non-seizure-side updates, 96 dropped frames, 1 overrun and 11 scan frames, with 0 mismatches. It also checks the 11-cycle result latency and the 8-cycle length of every retraining burst. It completes in well under a second.

`tb_hc_ct_sweep` runs the whole chip over a grid of the two learning settings: HC = 1, 8, 15 and CT = 0.6, 0.8, 0.9. Those are the corners and middle of the range a per-patient tuning would explore. For each setting it resets the chip and feeds the same synthetic recording. It checks every result, the retraining and drop counts, and the final weights against the reference. With this input, the number of updates falls from 152 at HC 1 / CT 0.6 to 15 at HC 15 / CT 0.9.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/soul_pkg.sv tb/tb_ref_pkg.sv tb/tb_soul_top.sv \
    --top-module tb_soul_top -o sim
./obj_dir/sim
```

The two packages are listed first; `-y` lets Verilator find every module file by name. For a single block, replace `tb_soul_top` in both places with `tb_<block>`. Some block testbenches may need `-Wno-fatal` for width warnings in test code. Filter changes can be checked with `tb_iir_bandpass` and `tb_feature_extraction`. Classifier changes can be checked with `tb_soul_classifier`, which runs 800 frames through changing regimes.

Coarse synthesis with Yosys gives the following for the top:

- about 1,600 word-level cells;
- about 7,400 flip-flop bits;
- 64,128 memory bits, almost all of them the 32 window delay lines of 100 words.
