# Seizure predictor: an artificial-immune-system EEG processor

An epileptic seizure is usually preceded by a pre-ictal phase. In that phase
the EEG already shows short patterns that the same patient has produced before
earlier seizures. This design is the digital core of a small wearable chip
that looks for those patterns. It does not classify EEG with a fixed model.
It keeps a population of short EEG "signatures" and treats it like an immune
system keeps antibodies:

* every new stretch of EEG is compressed into a 165-bit signature, the antigen;
* the antigen is matched against all stored signatures;
* signatures that were seen shortly before a detected seizure get a higher
  priority;
* a later match with a high-priority signature is a **prediction**, so a
  warning is sent;
* a classic synchronisation detector runs alongside and raises the **alarm**
  for a seizure that is already in progress. Its onsets are also what teaches
  the population which signatures matter;
* the population keeps changing. New patterns are appended. Well-matching
  signatures are cloned with random mutations. A clone is discarded when a
  reference set of known patterns recognises it (negative selection).

The chip sits behind the ear on an EEG band. Its inputs come from four
analog channels through a 16-bit ADC. Its output is a message stream to a
doctor's phone over Bluetooth. That phone also sets the detection and
prediction sensitivities. The analog front end and the radio are not part of
this RTL. The top module brings out their digital signals as ports.

```
 ADC 4x16 ─► artifact ─► Haar ─► spike ─► signature ─► AIS prediction ◄─► SLT 512x165
  ▲          removal     DWT     detector  generator      │   ▲              ▲   ▲
  └──── baseline feedback ◄───────┘             │         │   │ population   │   │
                          │                     │         │   └ manager ─────┘   │
                          └──► seizure detection (td) ─┐  │     │ trigger        │
                                                       ▼  ▼     ▼                │
                                               decision controller   signature mutation
                                               (alarm / warning /      │  ▲
                                                data, td tp rem regs)  ▼  │
                                                     │              NRS 128x165
                                                     ▼
                                              messages to the radio
```

All modules share the types in `rtl/sig_pkg.sv`. The module
`rtl/seizure_predictor_top.sv` wires them together.

## Signal conditioning

**Artifact removal** (`artifact_removal`). Eye blinks and muscle bursts make
the EEG noise heavy-tailed, not Gaussian. Each channel keeps a running
location `x0` and a running mean absolute deviation `m`. The Cauchy scale is
`g = 4 m`. A sample `x` with deviation `d = x - x0` is replaced by

    y = x0 + d * g^2 / (g^2 + d^2)

This is `d` weighted by a Cauchy density normalised to 1 at its peak. Small
deviations pass almost unchanged. A deviation much larger than `g` is pulled
towards `x0`, with a correction that shrinks like `g^2/d`. With `g = 4 m`,
ordinary EEG keeps more than 90 % of its deviation. A deviation of 100 m
keeps less than 0.2 %. Both running averages are exponential, and they carry
4 and 5 fraction bits. A plain right shift rounds every update down. The
location would then settle below the true mean and put a DC offset on the
output. A DC offset is harmful further down the chain, as the section on
distance explains. The weight comes
from a bit-serial restoring divider with 17 quotient bits (Q0.16, so 1.0 is
representable). The four channels share one divider and are processed one
after another. A vector takes 72 cycles, and `in_ready` is low while the unit
is busy. This is the only unit that can stall the front end.

**Wavelet stage** (`dwt_haar`). One Haar level per channel. From each pair of
vectors it produces the approximation `(x0+x1)>>>1` and the detail
`(x0-x1)>>>1`, which halves the rate. The approximation stream (4 x 16 bits)
is what the rest of the chip sees.

**Spike detector** (`spike_detector`). Each channel has a running baseline
and a running mean absolute deviation `m`. A channel spikes when
`|x - baseline| > 4 m` and the deviation is at least 64 LSB. The unit sends
8 bits to the signature generator:

* the spike mask;
* the dominant channel (largest deviation);
* an any-spike flag;
* the sign.

The mean of the four baselines goes back to the front end as the 16-bit
*adaptive baseline feedback*. Exponential averages that shift right with
flooring settle about one LSB times 2^shift below the true mean, which is
about -32 LSB for the baseline. This does not matter for spike decisions. A
user of `baseline_fb` should know about it.

## Neural signatures

A signature summarises W = 8 consecutive wavelet vectors (16 ADC samples,
32 ms at 500 Hz). Windows do not overlap. The 165-bit word (`signature_t`) is:

| field        | bits     | content |
|--------------|----------|---------|
| `local_sig`  | 8 x 16   | the 8 coefficients of the dominant channel, oldest first |
| `global_sig` | 4 x 8    | per channel, `min(255, peak |coefficient| >> 4)` |
| `prio`       | 2        | priority, 0 when made; raised by the population manager |
| `order`      | 2        | the dominant channel |
| `valid`      | 1        | row in use |

The dominant channel of a window is the one with the most spikes, with ties
going to the lower index. With no spike it is the channel with the largest
peak. The local genes describe the waveform where the activity is. The global
genes describe how strongly each channel takes part.

**Distance.** Two signatures are compared by the squared Euclidean distance
over the 12 genes (`sig_distance` in the package, 40 bits). The distance is
*relative*: a match means `distance <= thr * energy`, where `energy` is the
squared norm of the signature being tested and `thr` is a Q0.8 fraction. This
makes one threshold work for quiet and loud EEG alike. The EEG must be free of
DC for it to work, which the analog band-pass ensures. A constant offset
inflates every energy and makes everything match.

## The immune system

### Signatures Lookup Table (SLT)

The SLT has 512 rows of 165 bits (`signature_table`). It is used as a stack:

* row 0 is the top, holding the most recently confirmed pattern;
* rows towards the bottom are the least recently useful ones.

It is an array with one synchronous write port and an asynchronous read.
After reset it clears its valid bits by walking all rows, so `busy` is high
for 512 cycles. For a chip it would be an SRAM macro. Three units use the
table. `slt_arbiter` grants it with fixed priority: prediction first, then
the population manager, then mutation. A grant stays with its holder as long
as it requests. Assertions check that at most one unit holds a grant and that
no unit writes without one.

### AIS prediction (`ais_prediction`)

For each signature the unit does the following:

1. It scans all 512 rows, one per cycle. During the scan it tracks the
   closest valid row, the first empty row, and the candidates for
   replacement.
2. **Match** (`distance <= tp * energy`, tp = 0.09): the winning row is moved
   to the top of the stack by swapping it with row 0.
3. **No match**: the signature is appended. It goes into the first empty
   row. When the table is full, it replaces a row of lowest priority, but
   never row 0. The row chosen is the first such row at or after a
   replacement pointer, and the pointer then moves past it. Without the
   pointer, a run of new signatures would keep overwriting one row, and
   each new signature would wipe out the one before it.
4. A match with a row of priority > 0 is a **prediction**.

One signature can wait while another is scanned. A third one is dropped and
counted in `sig_overflow`. At any practical clock this cannot happen, because
a scan takes about 520 cycles and signatures arrive every 16 x 73 cycles at
the fastest.

### Population manager (`population_manager`)

The manager remembers the SLT rows of the last 64 signatures. It updates that
history when the prediction unit swaps rows, so each entry keeps pointing at
the same signature. An entry is dropped when its row is overwritten by a later
append or by a clone, because the signature it pointed at is then gone.

When the detector reports a seizure **onset**, the manager raises the
priority of each remembered row by one, saturating at 3. It reads and writes
each row through the arbiter. These are the signatures that preceded the
seizure. A later match with any of them is a prediction.

The manager also fires the mutation unit in two cases:

* when the row already on top wins 4 times in a row (sustained detection);
* every 83 signatures.

### Signature mutation and the NRS (`signature_mutation`)

The Neural Reference Signature table (NRS) has 128 rows and is loaded from
the phone through `nrs_we / nrs_addr / nrs_wdata`. It holds patterns that
must *not* be learnt, for example the patient's normal background. It is the
"self" set of negative selection.

A mutation run proceeds as follows:

1. It takes the signature on top of the SLT as the parent. If that row is
   empty, the run stops.
2. It makes 25 clones. Each clone comes from two steps of a 64-bit xorshift
   generator:
   * each local gene gets a signed 8-bit offset, shifted left by 2;
   * each global gene gets a signed 3-bit offset;
   * both additions saturate.
3. Each clone is compared with every valid NRS row. It is rejected if any row
   is within `rem * energy` of it (rem = 0.3).
4. A surviving clone is written into the SLT from the bottom up (clone k goes
   to row 511-k) with the parent's priority. It replaces the rows that have
   gone longest without a match.

A run takes about 25 x (2 + 128 + 2) cycles. The counters `clones_accepted`
and `clones_rejected` show the outcome.

## Seizure detection (`seizure_detection`)

The detector works on the wavelet stream. For each channel it keeps a running
mean and a running mean absolute deviation `m`. A sample is an *event* when
it lies more than 2 m from the mean. `m` learns from the deviation clipped at
2 m, so a seizure does not inflate the yardstick it is measured with. `m` has
8 fraction bits, so its update does not drift.

Over a window of L = 64 vectors (128 ADC samples) the unit counts, for each
of the six channel pairs, the samples on which both channels had an event.
The largest count divided by L is the synchronisation likelihood. The window
is *over threshold* when that likelihood is greater than td (0.23).

The seizure flag rises after 2 consecutive windows over threshold. It falls
at the first window that is not. The first 4 windows after reset only train
the estimates and never raise the flag. The result is 5 bits: the flag and
the channel mask of the strongest pair. The unit also outputs the likelihood
in Q0.8.

A burst on one channel alone gives no pair count. Noise that is independent
between channels rarely coincides. A generalised seizure, which is
synchronous, drives all six counts up together.

## Decision controller and link (`decision_controller`)

| register (`cfg_addr`) | meaning | reset |
|---|---|---|
| 0 | td, detection threshold, Q0.8 | 59 (0.23) |
| 1 | tp, prediction threshold, Q0.8 | 23 (0.09) |
| 2 | rem, negative-selection threshold, Q0.8 | 77 (0.30) |
| 3 | bit 0: stream wavelet coefficients | 0 |

The controller sends three kinds of message:

* an **alarm** on every seizure onset;
* a **warning** for every prediction made while no seizure is in progress. A
  prediction during a seizure is only counted in `warnings_suppressed`;
* **data** messages, which carry each wavelet vector while streaming is
  enabled.

A message (`out_msg_t`, 114 bits) carries:

* its kind;
* a 32-bit time stamp, which is the signature window count;
* a 16-bit id: the SLT row of the winning signature, or the channel mask of
  the detecting pair;
* 64 bits of data.

The link takes messages with `out_valid / out_ready`, and an assertion checks
that a waiting message stays stable. Each kind has one waiting slot. Waiting
messages go out in the order alarm, warning, data. A newer message replaces a
waiting one of the same kind. For alarms and warnings the replaced message is
counted in `msgs_lost`.

`alarm` and `warning` are also level outputs. `alarm` is high while the
seizure lasts. `warning` is high from a prediction until the next window
without one.

## Timing and clock

| step | cycles |
|---|---|
| artifact removal, per ADC vector | 72 (+1 for the handshake) |
| one signature (16 ADC vectors) | at least 16 x 73 |
| SLT scan and update | about 520 |
| priority update | 2 per history entry |
| mutation run | about 3,300 |

The clock frequency is free. It must be at least about 80 times the sample
rate, which is 40 kHz at 500 Hz. At any higher clock every unit is idle most
of the time.

## Where this design departs from the source architecture

The architecture this RTL follows describes most units by their role and bus
widths only. Everything below is this design's choice or a known difference.

* The 165-bit layout (8 x 16 local, 4 x 8 global, 5 control bits) follows
  the source. The 2 + 2 + 1 split of the control bits and the content of the
  global genes are choices.
* The source's parameter table lists 255 genes per antibody. That cannot fit
  a 165-bit word. This design has 12 genes.
* The parameter table also lists 50 initial antibodies, a selection threshold
  of 0.01 and a diversity of 0.64. They are not used. The SLT starts empty
  and fills itself, and the source gives no hardware role for the other two.
* Mutation is triggered every 83 signatures (the table's "mutation cycles").
  The text instead speaks of a window count W. Both readings are plausible,
  and the table's number is used.
* The synchronisation-likelihood formula is not given by the source. The
  event-coincidence count above is the simplest form. Its duration is counted
  in windows, not clock cycles.
* The priority history holds 64 signatures. That is 4 s at 250 Hz or 2 s at
  500 Hz, and the detector's delay of about 1 s uses up part of it. The
  source reports warnings 10 to 18 s before onset. Reaching that far back
  needs a history of about 570 signatures, more than the SLT's 512 rows.
  `HIST` is a parameter, but the table size bounds it.
* The source's block diagram shows an 80-bit SLT bus and a 16-bit path from
  the population manager to the NRS without saying what they carry. Here the
  SLT port is 165 bits wide, and the NRS is loaded only from the link.
* The source's figures for accuracy and sensitivity come from recorded
  patient EEG. This RTL has been run only on synthetic EEG, described below.
  Its thresholds and time constants have not been tuned on real recordings.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_artifact_removal` | every output against a 64-bit integer model; the 72-cycle latency; spike attenuation |
| `tb_dwt_haar` | every coefficient; output rate |
| `tb_spike_detector` | masks, dominant channel, baselines against a model |
| `tb_signature_generator` | full signature against a model, including ties |
| `tb_seizure_detection` | every window's result and likelihood against a model; onset, duration, release, single-channel burst |
| `tb_signature_table` | random writes and reads at 512 and 128 rows; reset clearing |
| `tb_slt_arbiter` | priority, lock, busy, muxing, against a model |
| `tb_ais_prediction` | match, swap, append, victim choice, prediction, overflow, against a model (16 rows) |
| `tb_population_manager` | history tracking through swaps, priority saturation, both mutation triggers (16 rows) |
| `tb_signature_mutation` | clone values against a model of the generator; NRS rejection; row placement (16/8 rows, 6 clones) |
| `tb_decision_controller` | registers, alarm, warning, suppression, priority and replacement, back-pressure |
| `tb_seizure_predictor_top` | the whole chip at its default sizes, every mechanism |
| `tb_patient_run` | five minutes of one synthetic patient at 250 Hz, whole chip at default sizes |

`tb_seizure_predictor_top` drives synthetic four-channel EEG into the top
with no parameter overrides:

* background noise with artifacts;
* a pre-ictal pattern that repeats before each seizure;
* two synchronous seizures.

In the first seizure the chip learns: the onset raises the priority of the
preceding signatures. Before the second seizure the same pre-ictal pattern
matches them and a warning is sent ahead of the alarm. The testbench counts
14 mechanisms and fails if any of them never happens:

* front-end stall;
* artifact attenuation;
* match, append and swap;
* priority update;
* both mutation triggers;
* accepted and rejected clones;
* suppressed warning;
* alarm, warning and data upload.

Signature overflow cannot be provoked at the top, so it is checked in the
unit test.

`tb_patient_run` plays 75,000 vectors: five minutes at 250 Hz. The record
holds four seizures of 6 s each. Before every seizure comes 2 s of the same
pre-ictal rhythm on one channel. The rhythm's period is 17 vectors, so it
does not line up with the 16-vector signature windows. The chip starts from
an empty table. In the current configuration the results are:

* all four seizures are detected, 0.6 to 1.0 s after onset;
* no alarm comes outside a seizure;
* the second, third and fourth seizures are each warned about 1.8 s before
  onset, inside their pre-ictal stretch;
* there are 12 warnings in the background, more than 20 s from any onset.

Those background warnings come from background signatures that happened to
fall inside the history at an onset and so received priority. The warning
lead time is bounded by the length of the pre-ictal pattern and by the
history length.

To run a testbench with Verilator (version 5), put the package first and
the testbench last:

    verilator --binary --timing --assert -Wno-fatal -j 0 rtl/sig_pkg.sv \
        $(ls rtl/*.sv | grep -v sig_pkg) tb/tb_seizure_predictor_top.sv \
        --top-module tb_seizure_predictor_top
    ./obj_dir/Vtb_seizure_predictor_top

`-Wno-fatal` keeps the width warnings of the testbenches' integer
arithmetic from stopping the build. The design files themselves build
without width warnings. The full-chip run takes a few seconds.
