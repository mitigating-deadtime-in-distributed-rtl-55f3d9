# Liveness-aware trigger for distributed optical arrays — RTL

A large optical neutrino detector is a grid of light sensors. Each sensor is a
photomultiplier tube followed by a digitizer. Now and then a channel cannot
deliver a valid sample:

- its ADC clips on a large pulse and must recover;
- its waveform buffer is full;
- a local veto or reset holds it.

A conventional multiplicity trigger cannot tell such a *non-live* channel from
a quiet one. It asks "did at least M channels cross threshold in the same
sample?", so every dead channel simply drops out of the count. Once deadtime
is frequent, real events break into fragments that never reach M.

This design treats liveness as a known, explicit state. Each channel keeps one
number, the *effective observable* Ψeff, which follows the channel's
normalized signal while the channel is live. While the channel is dead, Ψeff
keeps its value and decays exponentially instead of dropping to zero. The
network adds up the energies of these observables into a coherence score,
G = Σ wᵢ Ψeffᵢ², and triggers when G reaches a threshold Γ at least once in a
1.5 µs decision window. A channel lost for a few samples in the middle of an
event therefore still contributes the evidence it had just collected.

The RTL implements this trigger in its reference configuration:

| Quantity | Value |
|---|---|
| Channels | 16 |
| Sampling rate | 60 MSPS, 12-bit ADC |
| Persistence k | 0.90 |
| Threshold Γ | 2.659 |
| Decision window | 90 samples |

It also contains a digital PMT/digitizer emulator and a deadtime injector, so
that the whole chain can be exercised with controlled electronics stress.

## 1. The signal path

```
                 node i (x16)                                   network
 hit/npe -> pulse_synth --+
                          +-src_sel-> psi_normalize --Psi--> iir_observable --Psi_eff--> channel_align --+
 adc_in  -> input reg. ---+        \-> liveness_monitor --L--/                                          |
 ext_live-> input reg. -------------/                                                                   v
                                                   trigger_decision <--G-- coherence_score <-- (16 aligned Psi_eff)
```

| Module | Role |
|---|---|
| `lat_pkg` | Word formats, reference constants, the configuration struct, the xorshift32 step |
| `pulse_synth` | Emulated PMT and 12-bit digitizer for one channel: hit strobes in, ADC samples out |
| `psi_normalize` | Ψ = (adc − pedestal) · gnorm, in units of the channel's noise σ |
| `liveness_monitor` | L[n] from three causes: ADC saturation plus recovery, front-end busy, and injected random deadtime |
| `iir_observable` | Ψeff[n] = k·Ψeff[n−1] + (1−k)·Ψ[n]·L[n] |
| `channel_align` | Per-channel whole-sample delay, 0–15 samples |
| `coherence_score` | G[n] = Σ wᵢ·Ψeffᵢ[n]², with three pipeline registers |
| `trigger_decision` | Windowed maximum of G against Γ, plus a per-sample and a sliding-window flag |
| `lat_trigger_top` | Sixteen nodes and the network stage, with valid-gated streaming |

## 2. The effective observable (`iir_observable`)

This is the heart of the design, and the part that most needs care in fixed
point.

The recursion has a single pole at z = k. With 0 ≤ k < 1 it is stable, and
|Ψeff| can never exceed the largest |Ψ| that entered it. That bound lets the
state run without an overflow guard.

**One multiplier.** The update is written as

```
x     = L ? Psi : 0
s[n]  = x + floor( k * (s[n-1] - x) )
```

This is algebraically k·s + (1−k)·x, but it needs only one multiply per
sample, and no (1−k) constant has to be stored. When L = 0 it reduces to
s[n] = floor(k·s[n−1]): pure decay. Nothing else in the datapath changes
between live and dead operation.

**Formats:**

- k is an unsigned Q0.16 input: 0.90 = 58982/65536.
- Ψ is signed 18 bits with 8 fractional bits. That gives a resolution of σ/256
  and a range of ±512 σ.
- The state s carries 8 further fractional bits. Without them, a small value
  multiplied by 0.9 and floored would soon stall in its last few LSBs. With
  them, a 1-σ value keeps decaying geometrically for about 100 samples before
  it reaches the last state LSB.
- Ψeff is s with the extra bits floored away.

**What L = 0 does.** After a dead interval of d samples the state is k^d times
its last live value. At k = 0.9 that is 0.35 after 10 samples and 0.12 after
20. The value is not frozen: memory fades at the same rate whether the channel
is live or dead. What changes is only that no new evidence is added. Naive
gating would instead set Ψeff to 0 the moment L drops.

**Cost of the smoothing.** The (1−k) input gain is also the price of the
smoothing. Noise on a live channel with unit σ gives
var(Ψeff) = (1−k)/(1+k), which is 0.053 at k = 0.9. A pulse lasting a few
samples reaches only a fraction of its raw height. The threshold Γ is
calibrated to this: the mean noise G of 16 live channels is
16·(1−k)/(1+k) = 0.842, and Γ = 2.659 puts about 10⁻³ noise windows over it.

## 3. Liveness (`liveness_monitor`)

L is registered and aligned with Ψ: both appear one clock after the sample
they describe. A channel is non-live when any of the following holds.

1. **Saturation.** The ADC sample is at or above `sat_level`, the hard
   ceiling. The channel then stays non-live for `sat_recovery` further
   samples. A new saturated sample re-arms the counter.
2. **Busy.** `ext_live = 0`. This is the front end's own "cannot deliver"
   flag: buffer full, veto or reset. It is registered together with its ADC
   sample, so the two stay paired.
3. **Injected deadtime.** This cause is used for stress tests.
   - In each sample where the channel is otherwise live, an episode starts
     with probability `p_dead`/65536. The draw comes from a per-channel
     xorshift32 generator.
   - In `DEAD_FIXED` mode the episode lasts `dead_len` samples.
   - In `DEAD_DISTRIBUTED` mode the length is uniform in
     `dead_len ± dead_spread/2`, with a minimum of one sample.
   - `p_dead = 0` switches injection off.

Saturation and injection share one down-counter, so a second cause can only
lengthen the current dead interval. The flags `sat_dead` and `inj_dead` report
which cause applies.

Deadtime is specified per sample here. If a deadtime probability P is meant
per channel and per decision window, the matching register value is
p = 65536·(1 − (1 − P)^(1/90)). For example, P = 0.5 gives 503.

## 4. The network stage

**Alignment (`channel_align`).** Light from one event reaches different nodes
at different times. Each channel's Ψeff passes a tapped shift register with a
programmable delay `dly` of 0–15 samples, so that correlated activity lines up
before it is combined. The resolution is one sample, 16.7 ns. Finer alignment,
such as sub-sample interpolation or timing distribution, is outside this RTL.

**Coherence score (`coherence_score`).** The score is computed in three
pipeline stages:

1. square each channel (36 bits);
2. multiply by the weight wᵢ, unsigned with 8 fractional bits, where
   1.0 = 256;
3. add all 16 products and rescale to G, which is 32 bits with 8 fractional
   bits.

The weight is registered alongside its square, so a weight change applies to
the samples that follow it. G saturates at its top value. With 16 channels at
full scale it does not reach that value.

**Decision (`trigger_decision`).** Valid samples of G are cut into consecutive
90-sample windows. The first window starts at the first valid sample after
reset. At the last sample of each window, the module pulses `win_done` for one
clock and reports two values:

- `win_max`, the largest G in the window;
- `win_trig` = (win_max ≥ Γ), which is the trigger.

Two streaming outputs accompany it. `over` is G ≥ Γ for each sample.
`trig_sliding` says whether any of the last 90 samples, this one included,
reached Γ. It gives the same rule over a sliding rather than a fixed window.

## 5. Streaming, valid and latency (`lat_trigger_top`)

The pipeline accepts one sample per clock. `in_valid` marks a real sample and
travels down the pipeline with it. Each stage advances only when a valid
sample reaches it. A gap in the stream therefore changes nothing:

- the IIR does not decay;
- deadtime counters do not age;
- delay lines do not shift.

`en = 0` freezes everything.

| Stage | Clocks after the sample is presented |
|---|---|
| input register / emulator output | 1 |
| Ψ and L | 2 |
| Ψeff | 3 |
| aligned Ψeff (`dly` = 0) | 4 |
| G (`g_valid`) | 7 |
| `over`, `trig_sliding`, `win_done`/`win_trig` | 8 |

Channel i's contribution to G is delayed by a further `dly`ᵢ samples.
Configuration inputs are quasi-static: change them while the pipeline is
drained. The exception is `p_dead`, which may change at any time. Reset is
asynchronous and active low. It clears all state; the only state that matters
is one IIR value per channel, plus the delay lines.

`src_sel` picks the sample source for every channel:

- 0 selects the on-chip emulator, driven by `hit`/`npe`;
- 1 selects external samples on `adc_in`.

## 6. The emulated front end (`pulse_synth`)

The single-photoelectron response is a difference of two exponentials. Each
sampled exponential is a geometric sequence, so the shape is produced by two
first-order recursions that receive the same charge q = npe·amp_pe at a hit:

```
A_d[n] = KD·A_d[n−1] + q,   A_r[n] = KR·A_r[n−1] + q,   V = A_d − A_r
```

The output is zero at the hit sample, rises, and then decays. KD and KR are
Q0.16 parameters. Their defaults are τd = 30 ns and τr = 5 ns at 60 MSPS. The
per-channel `amp_pe` carries gain differences between channels.

The ADC sample is

```
clip(pedestal + V + noise, 0, 4095)
```

The noise is triangular in ±15 counts (σ ≈ 6.5). It is scaled down by the
per-channel `noise_shift` and switched by `noise_en`. The clipping is the hard ceiling
that the liveness monitor detects.

## 7. Setting it up

| Register | Meaning | Reference value |
|---|---|---|
| `pedestal`ᵢ | baseline in counts | ~300 |
| `gnorm`ᵢ | 256 / (noise σ in counts), Q8.8 | σ = 8 counts → 32 |
| `weight`ᵢ | calibration/geometry weight, 1.0 = 256 | 256 |
| `dly`ᵢ | alignment delay, samples | per geometry |
| `k` | Q0.16 | 58982 (0.90) |
| `gamma` | 8 fractional bits | 681 (2.660) |
| `live_cfg.sat_level` | ADC ceiling for saturation | 4095 |
| `live_cfg.sat_recovery` | samples non-live after saturation | 12 (200 ns) |

Γ depends on k, on N and on the window length. Calibrate it again whenever any
of them changes. The procedure is to feed noise-only windows and choose the
value that G's window maximum exceeds at the wanted rate.

## 8. How it behaves

The testbenches below run the full design at its defaults. The numbers come
from those runs.

- **False-trigger rate.** Over 12 000 noise-only windows with Gaussian noise,
  σ = 8 counts and all channels live, 14 windows triggered. That is
  1.2·10⁻³ per window against the 10⁻³ calibration target. The mean of G was
  0.842, as predicted. (`tb_workload_calibration`)
- **Deadtime probability.** Events with a 9-σ pulse on 6 of 16 channels were
  sent with deadtime probability P = 0 … 0.5 per channel and window, using
  12-sample episodes. Efficiency stayed between 1.00 and 0.98. A multiplicity
  trigger (θ = 3.428, M = 2) computed by the testbench from the same Ψ and L
  stayed at 1.00 for these events. With such short episodes and strong pulses,
  it too is hardly disturbed. (`tb_workload_deadtime_sweep`)
- **Decay factor.** Γ was held at 2.659 while k was swept (section 9):

  | k | Mean noise G | Noise windows triggering | Event efficiency |
  |---|---|---|---|
  | 0.70 | 2.69 | 100 % | 1.00 |
  | 0.80 | 1.71 | 98 % | 1.00 |
  | 0.90 | 0.81 | 0.2 % | 0.99 |
  | 0.95 | 0.39 | 0 % | 0.03 |
  | 0.99 | 0.08 | 0 % | 0.00 |

  These runs had injected deadtime at P = 0.3, which lowers the mean noise G
  a few per cent below the all-live value.
  (`tb_workload_k_sweep`)
- **Signal fidelity.** With the same events as the deadtime sweep, the
  testbench compares the design's Ψeff with naive gating (Ψ·L).
  - Error: during non-live samples of a pulse, Ψeff stays close to the
    all-live response of the recursion. Its mean squared error was
    0.05–0.09 σ² for P = 0.1 … 0.5. Gating, held against the raw pulse, had
    0.55–0.78 σ².
  - SNR: mean square over pulses divided by noise variance was about 3.9 for
    Ψeff and 1.9 for Ψ·L, at every P.

  (`tb_workload_snr_mse`)
- **Saturation.** Sixty events each had 8 channels at 20–60 σ, with the
  ceiling at 0.2 … 1.0 of the event's largest pulse and 12-sample recovery.
  An event counts as recovered when G in the 12 samples after the last
  saturation-induced dead sample reaches at least half its earlier peak. The
  recovery fraction went from 0.93 at scale 0.2 to 0 at scale 0.7 and above.
  With the ceiling high, the pulse is over when the channel comes back.
  (`tb_workload_saturation_sweep`)

## 9. Where this design departs from the published description, or fills a gap

- **Word formats and rounding.** All word widths, fixed-point formats and the
  floor rounding are this design's own. The reference description works in
  real numbers.
- **Γ quantization.** The stored threshold is 681/256 = 2.6602, against the
  published 2.659.
- **Meaning of the deadtime probability.** The published deadtime probability
  is not tied to a time unit. Here the register is a per-sample onset
  probability, and the testbenches convert a per-window probability as shown
  in section 3. The fixed or distributed episode length follows the published
  description. The uniform distribution is this design's choice.
- **Episode length.** The efficiency-versus-deadtime curve published for this
  trigger (0.78 at P = 0.5, with the baseline falling to 0.08) could not be
  reproduced without the original event topologies and episode lengths. With
  12-sample episodes, both triggers stay near full efficiency here.
- **k with a fixed Γ.** The published k-sensitivity shows a wide plateau of
  high efficiency for k in [0.70, 0.95], with false triggers negligible until k
  nears 1. In this implementation the (1−k) input gain makes both the noise
  level and the signal level of G depend on k. With Γ fixed at its k = 0.9
  value, small k triggers on noise and large k misses short pulses. The
  plateau would need Γ recalibrated for each k, or an input gain that does
  not depend on k. Neither is specified, so the update law is kept exactly as
  published.
- **Saturation-recovery metric.** The published recovery curve rises as the
  ceiling is lowered. The metric reimplemented here falls instead. Its "post"
  and "pre-peak" windows are this design's reading of the published
  criterion, and the curves should not be compared value for value.
- **Pipeline order.** The published block diagram draws liveness and the IIR
  stage in series after pulse synthesis. Here normalization and liveness run
  in parallel on the same sample and meet in the IIR stage. That is the data
  flow of the update equation.
- **Alignment.** Alignment is in whole samples, 0–15.
- **Emulator choices.** The time constants of the emulator are illustrative
  values of the right order, as is its triangular noise generator. Gain
  (`amp_pe`), pedestal and noise level (`noise_shift`, in steps of a factor
  of two) are set per channel, so channel-to-channel variations are
  configured rather than drawn at random.
- **Outside the RTL:**
  - the analog PMT and ADC (represented by the emulator or by `adc_in`);
  - timing distribution;
  - threshold calibration, which is an offline procedure whose result is the
    `gamma` input;
  - the coherence-matrix and eigenvalue diagnostics;
  - the statistical evaluation (efficiency, SNR, MSE), which is analysis
    software.

  The baseline multiplicity trigger is a comparison, not part of the design.
  It appears only inside a testbench.

## 10. Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and stops. A watchdog ends a hung run as a
failure. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/lat_pkg.sv tb/<tb>.sv --top-module <tb>
./obj_dir/V<tb>
```

| Testbench | What it checks |
|---|---|
| `tb_iir_observable` | Bit-exact integer model and real-number model, decay by k while dead, boundedness |
| `tb_psi_normalize` | Bit-exact model including saturation |
| `tb_liveness_monitor` | Busy, saturation recovery, fixed and distributed injection statistics |
| `tb_pulse_synth` | Pulse shape against the exponential model, linearity in npe, clipping, noise level |
| `tb_channel_align` | Every delay, changed on the fly |
| `tb_coherence_score` | Bit-exact sum, weights, full scale |
| `tb_trigger_decision` | Window maxima, threshold edge (≥), sliding flag |
| `tb_lat_trigger_top` | End to end at full size; see below |
| `tb_workload_*` | The five behaviour studies of section 8 |

`tb_lat_trigger_top` runs the full design at full size: 16 channels, 90-sample
windows and default k and Γ. It compares every Ψ, L, Ψeff, G and window
decision with a reference model. It runs 21 000 samples in four phases:

- external waveforms;
- emulated hits;
- fixed-length injected deadtime;
- distributed injected deadtime.

It counts each mechanism it drives and fails if any count stays at zero:

- saturation, busy, fixed and distributed injection;
- decay steps;
- triggers with dead channels present;
- triggers in hit mode;
- stream gaps;
- input switches;
- delayed channels.

A run takes well under a second. The workload benches take a few seconds
each.
