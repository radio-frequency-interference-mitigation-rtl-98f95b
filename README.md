# Real-time RFI mitigation processor for a linear synthesis array

Man-made radio frequency interference (RFI) corrupts the signals of a radio
interferometer before they are correlated. Fringe stopping and delay tracking
in the correlator smear the interference, so it is hard to remove afterwards.
This design cleans every antenna's baseband signal in real time, between the
IF-to-video converter and the correlator. Each signal is digitised, cleaned in
the frequency domain and converted back to analogue. The correlator then sees
the signal as if no extra stage were there.

Two cleaning algorithms are built:

* **Time-frequency excision.** Short-time spectra of one antenna are compared,
  bin by bin, with a reference noise spectrum. Points that stand out are
  replaced, either by zero or by noise-like numbers.
* **Adaptive noise cancellation (ANC).** Antenna *i* is cleaned with a reference
  built from its two neighbours in the linear array. Differences of
  delay-compensated neighbour spectra contain the interference but not the
  astronomical signal. An LMS filter per frequency bin subtracts what is
  correlated with that reference.

The RTL follows the system of the Westerbork Synthesis Radio Telescope (WSRT)
RFI mitigation subsystem (Baan, Fridman & Millenaar, "Radio Frequency
Interference Mitigation at the Westerbork Synthesis Radio Telescope"). That
system has 14 antennas with two polarisations each, so 28 processors. Each
processor is an ADC, an FPGA and a DAC. A cross-point switch can bypass the
whole subsystem. The publication gives the algorithms, the system structure
and the converter and FPGA figures. It gives no FFT length, word lengths,
filter responses, CUSUM formulation or control interface, so those are this
design's own choices. They are listed below, and the RTL file headers say
which parts follow the publication.

## System structure

```
 IVC baseband, 28 channels (antenna a, polarisation p; channel c = 2a+p)
   |                                             |
   | ADC words (12 bit, shared sample strobe)    | untouched channels
   v                                             |
 +---------------- rfims_top -----------------+  |
 |  rfims_node c   <- samples of channel c,   |  |
 |                   and of c-2, c+2          |  |
 |                   (same polarisation,      |  |
 |                    neighbouring antennas)  |  |
 |       | DAC words (14 bit)                 |  |
 |       v                                    |  |
 |  crosspoint_switch  <----------------------+--+
 +-------|------------------------------------+
         v  28 correlator inputs
```

The links between adjacent processors carry the raw neighbour samples. Each
processor therefore filters and transforms three streams itself. At the ends
of the array the missing neighbour is switched off in hardware, whatever the
configuration says. The cross-point switch lets each correlator input take
either a processed channel or the untouched input (bypass). The real switch is
analogue and is modelled here on sample words. The bypass path has no
processing delay. Matching that delay is left to the correlator.

ADCs, DACs, the telescope electronics, the FPGA device and the host computer
are not part of the RTL. Their signals are plain ports of `rfims_top`.

## One processor (`rfims_node`)

```
adc_prev ─┐                ┌ delay_line ─ (blank: off) ─ fir_lpf ─ fft_core ──────────────┐ X(i-1)
adc_own  ─┼─ sample_fifo ──┼ delay_line ─ time_blanker ─ fir_lpf ─ fft_core ─┬────────────┤ X(i)
adc_next ─┘  (N per frame) └ delay_line ─ (blank: off) ─ fir_lpf ─ fft_core ─┼────────────┤ X(i+1)
                                                                             │            v
                          power_spectrum ─ rfi_detector ─ rfi_excision ◄──────┘        anc_lms
                                 │            ▲                │                          │
                                 └ median_filter (reference)   └──── mode select ◄────────┘
                                                                          │
                                                      fft_core (inverse) ─ real part ─ DAC
```

All three streams leave one input buffer together, so the three forward
transforms run in lock step and their bins arrive aligned. Each spectrum is
offered to both chains at once. The mode setting picks which chain's output
reaches the inverse transform, and the other chain is drained. The mode
changes only after the inverse transform has taken the last bin of a frame, so
one spectrum never mixes the two algorithms. The publication loads one
algorithm per FPGA configuration. Carrying both and switching per frame stands
in for that reconfiguration.

Past the transforms, every stage is a one-deep valid/ready register
(`in_ready = !out_valid || out_ready`). Back-pressure from the inverse
transform therefore stalls the whole spectral pipeline without losing data.
The median filter and the reference memory are written on the side and never
stall.

### Frame timing and the real-time limit

`fft_core` is a frame-based radix-2 decimation-in-time core. It does one
butterfly per clock in a register array and works in three phases:

| phase   | clocks          | handshake                                  |
|---------|-----------------|--------------------------------------------|
| load    | N (at best)     | `in_ready` high, sample n stored at bitrev(n) |
| compute | N/2 · log2 N    | neither side                               |
| unload  | N               | `out_valid`, bins in natural order         |

The ADC cannot be stalled. The input buffer (`sample_fifo`, N words of
3 × 12 bits) holds the samples that arrive during compute and unload. It
releases exactly N samples per frame. The next frame is released only once
the forward transforms have unloaded, so no sample in the short
delay, blanking and filter pipeline can meet a transform that is not loading. An
assertion checks this.

A frame keeps a transform busy for about 2N + N/2 · log2 N clocks. The input
is therefore loss-free when a sample arrives at most once every
2 + log2(N)/2 clocks on average: 6 clocks for N = 256. A sample that finds the
buffer full is dropped and counted in `overrun_count`. For scale, at the
FPGA's quoted 200 MHz this allows 33 Msample/s. That is enough for a 10 MHz
band, but not for a full 20 MHz band sampled at 40 Msample/s (see
*Limitations*).

## Thresholding in the time domain

Impulsive interference, such as radar pulses or sparks, lasts a few samples
and spreads over every bin of the frame it falls in. It is easier to catch on
the samples themselves. `time_blanker` sits on the own antenna's stream,
after the delay compensation and before the low-pass filter. It replaces any
sample with `|x| > blank_thr` by zero and counts it. A level of zero switches
it off. The neighbour streams pass identical stages with blanking always off,
so that all three stay sample-aligned. The level is an absolute ADC value
written by the host. The rule is the simplest one that fits: the design does
not derive the level from a running noise estimate.

## Time-frequency excision

For every bin f of frame n:

1. **Power**: `p = re² + im²` (`power_spectrum`, 49 bits).
2. **Reference** (`median_filter`): a running median across frequency over
   K = 7 bins, with the window clamped at the band edges. A narrow RFI line is
   rejected by the median, while the smooth passband shape of the analogue
   filters is kept. The median of frame n is swept out during frame n+1 into
   the reference memory of the detector. A frame is therefore judged against
   the reference of the previous frame, which is harmless because the noise
   floor changes slowly. The median is found by ranking: the window element
   with at most H = 3 smaller values and at least 4 values not larger.
3. **Detection** (`rfi_detector`), with `ref` = max(reference, REF_MIN):
   * spectral threshold: flag if `p > thr_h · ref`;
   * CUSUM along time, per bin: `S ← min(2·cusum_h·ref, max(0, S + p − cusum_k·ref))`,
     flag if `S > cusum_h · ref`.

   The spectral threshold catches strong bursts at once. The CUSUM catches
   weak RFI that stays in a bin over several frames. It ignores noise as long
   as `cusum_k · ref` is above the mean noise power: the median of an
   exponentially distributed power is 0.69 of its mean, so `cusum_k` ≥ 1.5
   is needed, and 2.0 is a good start. The clip at twice the level lets S
   recover within a few frames once the RFI stops. `REF_MIN` (256) keeps the
   stopband of the low-pass filter, where the median is almost zero, from
   alarming on rounding noise. The factors are Q4.4 numbers. Nothing is
   flagged until the first full reference exists.
4. **Replacement** (`rfi_excision`): a flagged bin becomes zero
   (`SUBST_ZERO`) or noise (`SUBST_NOISE`). Zeros bias the correlator output
   towards zero correlation, so noise of about the system-noise variance is
   the better substitute. The noise is uniform, from a 32-bit Galois LFSR
   (x³² + x²² + x² + x + 1), and scaled by `noise_amp/128`. The host sets
   `noise_amp`. The design does not derive it from the reference.

The false-alarm rate follows from the statistics. A bin's power is
exponentially distributed, so with an exact reference the probability of
`p > h · median` is `2^(−h)`. The median of 7 noisy bins is itself noisy,
which raises the rate a lot. With N = 16 and K = 5 in the processor
testbench, even `thr_h` = 15.9 flags some frames. In the system testbench
(N = 256, `thr_h` = 8, `cusum_k` = 2, `cusum_h` = 5), about 7 % of the noise
points are flagged by the threshold and 11 % by the CUSUM. Averaging the
reference over frames would lower these rates, but is not built.

## Adaptive noise cancellation

Per bin f, with spectra `sp` of antennas i−1, i, i+1 after delay
compensation:

```
r  = [ sp(i) − sp(i−1) ,  sp(i+1) − sp(i) ]        reference vector
e  = sp(i) − (w0·r0 + w1·r1)                       output ("clean" spectrum)
w ← w + 2^(−mu_shift) · e · conj(r)                LMS update, once per frame
```

The astronomical signal is coherent in the three delay-compensated streams,
so it cancels in `r`. Interference that reaches the antennas with different
strengths stays in `r` and is removed from `e`. The update uses the usual LMS
indexing: the output of frame n uses the weights of frame n and updates them
for frame n+1. The equations this follows mix steps n and n−1, and the usual
form was preferred.

Number formats: weights are 32 bits with 20 fraction bits (±2048), saturated,
and reset to zero, so the output equals the input until adaptation starts. The
product `e·conj(r)` is shifted right by `mu_shift`, in weight LSBs. The real
gain is therefore μ = 2^(−mu_shift−20). For stability and quick convergence
choose μ · E|r|² ≈ 0.05–0.1. E|r|² grows with N and with the input level:
for 12-bit inputs around ±400 and N = 256, `mu_shift` = 3 works. A missing
neighbour (`nbr_en` bit low) makes its component of `r` zero.

Delay compensation (`delay_line`) shifts each of the three time streams by a
whole number of samples (0–63), as set by the host for the current
source–array geometry. Applying it in the time domain before the transform is
this design's choice.

## Configuration (`node_cfg_t`, one per processor)

| field      | bits | meaning |
|------------|------|---------|
| `mode`     | 1    | `MODE_EXCISE` or `MODE_ANC`, applied at the next frame boundary |
| `subst`    | 1    | `SUBST_ZERO` or `SUBST_NOISE` |
| `noise_amp`| 16   | amplitude of the substituted noise |
| `thr_h`    | 8    | spectral threshold, Q4.4 multiple of the reference |
| `cusum_k`  | 8    | CUSUM drift allowance, Q4.4 multiple of the reference |
| `cusum_h`  | 8    | CUSUM decision level, Q4.4 multiple of the reference |
| `mu_shift` | 6    | LMS gain, see above |
| `nbr_en`   | 2    | neighbour i−1 / i+1 present (forced low at the array ends) |
| `dly_prev`, `dly_own`, `dly_next` | 6 each | delay compensation in samples |
| `blank_thr` | 11   | time-domain blanking level on \|x\|, ADC units, 0 = off |

The `rfims_top` status outputs are per-processor counters: frames, overruns,
mode switches, blanked samples, flagged bins (total, by threshold, by CUSUM) and substituted
bins. The `mode_anc` and `ref_ok` bits show whether each processor is in ANC
mode and whether it has a reference yet.

## Sizes

| quantity | value | origin |
|---|---|---|
| antennas × polarisations = processors | 14 × 2 = 28 | publication |
| ADC / DAC resolution | 12 / 14 bits | publication |
| FFT length N | 256 | own choice |
| spectral word | 2 × 24 bits, twiddles Q2.14 | own choice |
| low-pass filter | 15-tap Hamming-windowed sinc, cutoff 0.25 fs | own choice |
| median window K | 7 bins | own choice |
| delay compensation | 0–63 samples | own choice |
| LMS weights | 32 bits, 20 fraction bits | own choice |
| input buffer | N samples × 3 channels | own choice |

Memory per processor is about 146 kbit of register arrays (four transform
buffers of 12 kbit each, 25 kbit median buffers, 28 kbit detector state,
33 kbit LMS weights, 9 kbit input buffer). That is a small part of the 7.4 Mbit
of RAM in the FPGA the publication names. The multipliers are another matter.
The design uses several hundred 9×9-equivalent multipliers: four complex
butterflies, 45 filter taps, the power stage and the ANC arithmetic. The
device has 176, so part of the arithmetic would fall to logic elements, or
one algorithm would be left out per configuration, as the publication does.

## Limitations and departures

* **Real time at 20 MHz bandwidth.** A real 20 MHz baseband needs at least
  40 Msample/s. With one butterfly per clock that needs a 240 MHz clock, above
  the FPGA's quoted 200 MHz. A radix-4 or pipelined FFT would fix this. Up to
  ~33 Msample/s at 200 MHz, for example a 10 MHz band, the design keeps up.
  Timing closure of the combinational butterfly and median paths has not been
  studied.
* **Rectangular, non-overlapping frames.** Excising a bin leaves frame-edge
  discontinuities in the time signal. The output is the real part of the
  inverse transform, which implicitly makes the spectrum Hermitian.
* **Reference not averaged over time.** The median reference of each frame is
  used as-is, so single-frame fluctuations raise the false-alarm rate.
* **One ANC geometry.** The reference uses the two nearest neighbours only.
  More antennas could add more difference terms; that is not built.
* **Both algorithms always present**, selected per frame, instead of one
  algorithm per FPGA load.
* **The expansion to all eight 20 MHz bands (224 channels) is not built**,
  only the 28-channel system with one band per channel.
* The substituted noise level is set by the host. The design does not match
  it per bin to the reference.

## Verification

Every RTL module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_fft_core` | forward and inverse 16-point transforms against a double-precision DFT; compute latency N/2·log2 N; ready only while loading |
| `tb_delay_line` | every delayed sample against the testbench's history, delay changing |
| `tb_time_blanker` | every output and the blank count against the rule \|x\| > level, level changing and off |
| `tb_fir_lpf` | exact match with an independently designed FIR; unity DC gain; ≥ 20 dB rejection at 0.45 fs |
| `tb_power_spectrum` | power and pass-through under random gaps and back-pressure |
| `tb_median_filter` | medians against sorting, including ties and band edges; sweep timing |
| `tb_rfi_detector` | both tests against a model; CUSUM catches a line the threshold misses |
| `tb_rfi_excision` | zero and noise substitution (LFSR regenerated); pass-through; back-pressure |
| `tb_anc_lms` | 33 dB interference suppression with the signal kept; transparency with no neighbours |
| `tb_crosspoint_switch` | every output against its selected source |
| `tb_rfims_node` | one 16-point processor end to end: transparency, tone excision, blanking of exactly the injected spikes, CUSUM, noise substitution, mode switch, ANC with delay compensation (18 dB), overrun |
| `tb_rfims_top` | the full 28-processor, N = 256 system for 48 frames: frame counts, tone removed, spikes blanked on antenna 1, ANC suppression of 18 dB on antenna 7, bypass, each mechanism at least once |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/rfims_pkg.sv tb/tb_rfims_top.sv \
          --top-module tb_rfims_top -Mdir obj_top -o sim
./obj_top/sim
```

The package file goes first; `-Irtl` lets Verilator find the other modules by
name. `tb_rfims_top` runs at the default sizes. It builds in about half a
minute and simulates in a few seconds.

## Files

* `rtl/rfims_pkg.sv`: widths, complex type, mode and substitution enums,
  configuration record.
* `rtl/rfims_top.sv`, `rtl/rfims_node.sv`: the system and one processor.
* `rtl/fft_core.sv`, `rtl/fir_lpf.sv`, `rtl/delay_line.sv`, `rtl/time_blanker.sv`,
  `rtl/sample_fifo.sv`: signal path.
* `rtl/power_spectrum.sv`, `rtl/median_filter.sv`, `rtl/rfi_detector.sv`,
  `rtl/rfi_excision.sv`: excision chain.
* `rtl/anc_lms.sv`: cancellation chain.
* `rtl/crosspoint_switch.sv`: bypass switch.
* `tb/tb_*.sv`: the testbenches above.
