# SPIRIT: an eight-channel seizure detector and predictor with on-chip learning

SPIRIT watches eight EEG electrodes and makes two decisions every millisecond.
A **detector** says whether a seizure is happening now. A **predictor** says
whether one is coming. Both are logistic-regression classifiers. Both keep
learning after deployment without any labelled data:

- The detector trains itself on the samples it is very sure about.
- The predictor is corrected by the detector. If a predicted seizure never
  arrives within 30 minutes, or a seizure arrives that was not predicted, the
  predictor is retrained on the features it saw during the preceding half hour.

The front end digitises the electrodes with "Zoom" ADCs. A Zoom ADC is a coarse
SAR step followed by a fine incremental step, around a reference that tracks the
input. This RTL follows the SPIRIT architecture as published (Zoom-ADC analog
front ends, band-power and ratio features, shared-multiplier logistic
regression with SGD). Every width, format, schedule and register map that the
architecture leaves open is filled in here; these choices are listed below.

## Signal chain and clocks

```
 vin[8] (V) ─► zoom_afe_analog ─► zoom_adc_ctrl ─► cic_decimator ─┐   clk_afe 1.024 MHz
                (model)            SAR+incremental   ÷4, 1 kHz     │
                                                                   ▼
                                                             sample_cdc
                                                                   ▼          clk_cls 24 kHz
 feature_extractor (LL + 4 IIR band powers, 100-sample window, 24 cycles/sample)
        ▼ snapshot
 feature_selector (ratios, 24 slots x 5 lanes) ─► spirit_classifier ─► det_smoother ─► onset
                                                  (detector + predictor,   pred_accumulator ─► prediction
                                                   SGD, 30-min history)    pred_check ─► TP/FP/FN, retrain
 spirit_regs (bus) ─ configuration, weights, status
```

| Quantity | Value | Origin |
|---|---|---|
| Channels | 8 | paper |
| ADC DAC resolution, full scale | 7 bit, 350 mV (LSB 2.73 mV) | paper |
| Conversion | 1 sample + 7 SAR + 248 incremental cycles = 256 | own |
| CIC | 3rd order, ratio 2^k (k = 0..4, default 2) | own |
| Sample rate | 1 kHz | own (consistent with the paper's features) |
| Bands | θ 4–8, α 8–16, β 16–32, γ 32–96 Hz, 6th-order IIR | paper; the Butterworth response is own |
| Feature window | 100 samples, sliding | paper |
| Prediction history | 30 snapshots, one per minute | paper |
| Detector smoothing | 5 consecutive positives | paper |

With clk_afe at 1.024 MHz, one conversion takes 250 µs and four conversions make
one sample. The classifier clock of 24 kHz gives exactly 24 cycles per sample.
The feature extractor and the classifier are each built to use exactly 24 cycles,
so they run as a two-stage pipeline with no idle cycles.

## The Zoom ADC

`zoom_afe_analog` is a behavioural model written with `real` values. It
models the capacitor DAC, an ideal integrator, the main comparator and two
auxiliary comparators. The comparators are evaluated on the falling edge.
`zoom_adc_ctrl` is the synthesizable controller. A conversion runs as follows:

1. **Sample** (1 cycle): the input is held and the integrator is cleared.
2. **SAR** (7 cycles): binary search for `ref`, the largest code whose DAC
   level is not above the input.
3. **Incremental** (248 cycles): each cycle the DAC is set to `ref+1` if the
   integrator is positive, else `ref−1`. This keeps the integrator bounded and
   averages the live input over two LSBs.
   - If the input drifts, the integrator leaves the ±3 LSB band and an
     auxiliary comparator fires. On its rising edge `ref` moves one LSB in that
     direction. This is the tracking loop; `track_evt` pulses for every step.

The result is the sum of `(code − 64)` over the incremental cycles. Because only
the applied codes are integrated, a wrong SAR decision or a tracking step does
not corrupt it. The estimate is `vin ≈ dout · LSB / 248`, so 1 mV is about 91
counts.

`cic_decimator` averages 2^k conversions. Its gain R³ is removed by a shift, so the
output keeps the scale of a single conversion.

Not modelled: chopping, capacitor reset, the split-steering current-reuse
integrator, the bias and reference resistor DACs, and noise. These are transistor-
or switch-level circuits with no digital behaviour to describe.

## Features

`feature_extractor` processes one channel in three cycles. `iir_bandpass` is
instantiated four times, once per band. Each instance evaluates one biquad section
per cycle, in direct form I with Q2.22 coefficients. It keeps 24-bit internal
words, with 6 extra fraction bits. Each section is scaled to unit gain at the
band centre, and the coefficients are computed with the usual bilinear Butterworth
design at fs = 1 kHz.

Per channel it keeps two sliding sums over the last 100 samples:

- **Line length**: Σ|x[n] − x[n−1]|.
- **Band power**: Σ y_b² for each band, shifted right by 6.

Both sums are saturated to 16 bits. The sums use running add/subtract. The
values that leave the window come from history memories. These memories have no
reset: a `filled` flag masks them until 100 samples have passed. If a start
arrives while the extractor is busy, it is remembered and served as soon as the
current sample finishes.

`feature_selector` forms the six band-power ratios as unsigned Q8.8. A zero
denominator saturates the ratio. It presents five features per *slot*, where
slot = 8·phase + channel:

| Phase | Lanes 0..4 | Used by |
|---|---|---|
| 0 | LL, θ, α, β, γ | detector |
| 1 | θ, α, β, γ, γ/β | predictor features 0–4 |
| 2 | γ/α, γ/θ, β/α, β/θ, α/θ | predictor features 5–9 |

## The shared classifier and its learning

`spirit_classifier` owns the five lane multipliers, `w_det[8][5]` and
`w_pred[8][10]` (16-bit Q4.12), and the 64-entry logistic table
(`logistic_lut`). The table has entries at z = −8 … 7.75 in steps of 0.25, with
p = round(255 / (1 + e^−z_mid)).

A **pass** is the 24 slots of one sample. The detector sums slots 0–7 and the
predictor sums slots 8–23. Each adds its programmed bias and looks up p, and
the label is `p ≥ threshold`. Each phase of a pass runs in one of two modes:

- **Classify**: lane products w·x are accumulated (40 bits, Q.12).
- **SGD**: the same multipliers form (p − 255·y)·x. Each weight becomes
  `w − ((p − 255·y)·x >>> lr_shift)`, saturated.

A training pass replaces that classifier's output for that sample. This is why
`det_valid` and `pred_valid` skip a sample now and then.

**Detector, unsupervised.** `hc_labeler` watches the detector probabilities.
- `hc_cnt` consecutive values at or above `hc_hi` request training with label 1.
- `hc_cnt` consecutive values at or below `hc_lo` request label 0.

The next pass trains phase 0 on the features and probability of the sample that
completed the run.

**Predictor, corrected by the detector.** Once a minute, the classifier writes
the 80 predictor features of one sample and its probability into
`feature_history`, a 30-entry circular memory. `pred_check` decides whether
retraining is needed:

| Event | Meaning | Action |
|---|---|---|
| prediction, onset within 30 min | true positive | report minutes to onset |
| prediction, no onset in 30 min | false positive | retrain on all snapshots, y = 0 |
| onset with no open window | false negative | retrain on all snapshots, y = 1 |

During retraining, each following pass trains on one stored snapshot, using the
probability recorded with it. A snapshot that falls due during retraining is
taken once the retraining has finished.

**Decisions.**
- `det_smoother` raises `seizure` after 5 consecutive positive detections; its
  rising edge is the onset.
- `pred_accumulator` adds +1 or −1 per predictor label, with a floor at 0. It
  issues a prediction when the sum exceeds `PRED_ACC_THR`, then restarts.

## Register map (`spirit_regs`, 8-bit address, 16-bit data)

| Addr | Name | Contents (reset) |
|---|---|---|
| 0x00 | CTRL | [0] detector learning, [1] predictor learning, [4:2] CIC log2 ratio (0, 0, 2) |
| 0x01/0x02 | DET_BIAS / PRED_BIAS | Q4.12 (0) |
| 0x03/0x04 | DET_THR / PRED_THR | probability threshold, 255 = 1 (128) |
| 0x05/0x06/0x07 | HC_HI / HC_LO / HC_CNT | self-labelling levels and run length (230, 25, 5) |
| 0x08 | LR | [3:0] detector, [7:4] predictor SGD shift (8, 8) |
| 0x09 | PRED_ACC_THR | accumulator threshold (1000) |
| 0x0A | PRED_TIME | minutes from the last true prediction to its onset (ro) |
| 0x0B–0x0D | TP / FP / FN | saturating event counters (ro) |
| 0x0E | PROB | [7:0] last detector, [15:8] last predictor probability (ro) |
| 0x0F | PRED_ACC | prediction accumulator (ro) |
| 0x10 | FLAGS | [0] prediction window open, [1] seizure, [2] extractor busy, [3] classifier busy (ro) |
| 0x40–0x67 | detector weights | index ch·5 + f |
| 0x80–0xCF | predictor weights | index ch·10 + f |

Weights and biases are meant to be loaded from an offline-trained model.
The biases are not trained on chip.

## Departures from the paper, and what to trust

- The AFE is a behavioural model. Its `real` input ports make `spirit_top`
  unsuitable for synthesis as a whole; every block after the ADC controller is
  synthesizable.
- Filter type, fixed-point formats, feature scaling, the slot order, the learning
  rate as a shift, the self-labelling counter rule, clocks and the register map
  are this design's own choices. Reasonable alternatives will change the
  classification numbers but not the structure.
- No patient model is included. The weights used in the testbenches are chosen
  by hand to exercise the mechanisms, not to detect real seizures.

## Simulating

Every block has a self-checking testbench in `tb/`, which ends by printing
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --top-module tb_spirit_top -y rtl -y tb rtl/spirit_pkg.sv tb/tb_spirit_top.sv
./obj_dir/Vtb_spirit_top
```

- `tb_spirit_top` runs the whole chip with a compressed time scale: 56
  incremental cycles per conversion and a 10-sample "minute".
  - It plays quiet EEG, a 40 Hz ictal tone, and step artifacts, and drives the
    classifiers through the bus.
  - It goes through self-training, a false negative with retraining, a true
    positive with its prediction time, and a false positive with retraining.
  - It counts every mechanism (tracking, both SGD kinds, history stores,
    predictions, onsets, TP, FP, FN) and fails if any never occurs.
- `tb_spirit_top_full` runs the design at its real sizes and clock ratio, with no
  parameter overrides, for about 0.3 s of EEG. Minute-scale events are left to
  the compressed test.
