# Digital comb manager for MKID frequency-multiplexed readout

Microwave kinetic inductance detectors (MKIDs) are superconducting resonators.
Hundreds of them share one transmission line, each tuned to its own resonance
frequency. To read them out, the readout electronics play one sinusoid ("tone")
per resonator into the line and measure what comes back. The readout also tracks
how amplitude and phase change for each tone. This RTL is the digital part of that
readout, which runs on the FPGA:

* a **comb generator** synthesizes 400 tones, as 10 subbands of 100 MHz with 40
  tones each. It produces one complex 2 GS/s waveform spanning 0 to 1 GHz.
* a **comb analyzer** splits the returning real 2 GS/s signal into the same 10
  subbands. It then demodulates every tone to 0 Hz against the generator's own
  copy of that tone. This gives 400 I/Q streams at about 3.8 kHz.

The design's central idea is one number, the **period of the tone phase
accumulators, 65520**. The same number is the length of the averaging window in
every tone analyzer. A plain 16-bit accumulator (period 65536) makes every I/Q
stream fluctuate with a 5-sample cycle. This shows up as spurs at f_out/5 and
2·f_out/5, which is 763 Hz and 1526 Hz at the 3.8 kHz output rate. A period of
65520 removes them. The section "Why 65520" explains the mechanism. Both
variants are one parameter apart (`MODULUS`), and the testbenches show both.

## Signal chain

Everything runs on one 250 MHz clock. The 2 GS/s part of the chain is carried
as **8 lanes per clock**: lane k of clock m holds sample 8m+k. All samples are
16-bit signed.

Excitation path (`comb_generator`), per subband b = 0..9:

| stage | module | rate | operation |
|---|---|---|---|
| tone | `tone_generator` (`phase_accumulator` + `cordic`) | 250 MS/s | phase ← (phase + FCW) mod 65520; the 10 MSBs (phase >> 6) drive a CORDIC giving I = A·cos, Q = A·sin, A ≈ 32112 |
| tone sum | `subband_generator` | 250 MS/s | sum of 40 tones, divided by 64 |
| centring | `down_shifter` | 250 MS/s | × e^(−jπn/2): shift by −62.5 MHz, from [12.5, 112.5] to [−50, 50] MHz |
| interpolation | `upsampler` | 2 GS/s, 8 lanes | ×8 linear interpolation |
| band placement | `band_shifter` | 2 GS/s, 8 lanes | × e^(jαn), α = 2π(2b+1)/40: shift by (2b+1)·50 MHz, to [100b, 100b+100] MHz |
| band sum | `comb_generator` | 2 GS/s, 8 lanes | sum of 10 bands, divided by 16 → DAC interface |

Analysis path (`comb_analyzer`):

| stage | module | rate | operation |
|---|---|---|---|
| subband split | `pfb_channel`, one per band | 2 GS/s in, 250 MS/s out | × e^(−jαn) (real × complex), 128-tap low-pass, keep every 8th sample, × e^(+jπm/2), real part |
| tone analysis | `ddc`, 40 per band | 250 MS/s in, 250 MHz/65520 out | × the tone's reference I/Q, sum over 65520 samples, one result per window |

The top, `comb_manager`, joins the two paths. Its `loopback` input selects the
analyzer's input:

* `loopback = 1`: the Q part of the generator output, a digital loop-back that
  bypasses the analog chain.
* `loopback = 0`: the `adc_x` port, which is the ADC interface.

The generator output is on `dac_i`/`dac_q`, for the DAC interface. The per-tone
reference I/Q pairs go from the generator straight to the analyzers. They are
the same CORDIC outputs that built the excitation.

A tone with control word FCW appears at FCW · 250 MHz / 65520. That is a grid
step of about 3815.6 Hz, and FCW must lie in 3277…29491 to fall inside its
subband.

## Why 65520

Follow one tone through the loop and ask when the signal repeats.

* The accumulator repeats after at most M clocks (M = `MODULUS`). The down-shift
  phasor has period 4, which divides M, so nothing changes there.
* After ×8 interpolation the signal repeats after 8M samples at 2 GS/s.
* The band-shift phasor e^(j2π(2b+1)n/40) has period 40 samples. The excitation
  therefore repeats after LCM(8M, 40) samples.
  * For M = 65536 this is 5·8M: the excitation now repeats only every **5**
    accumulator periods.
  * For M = 65520 = 40·1638 it stays at 8M.
* The analyzer demodulates a real signal by a complex phasor. The tone's
  negative-frequency image, at −(f + 2·f_shift), therefore survives. The filter
  bank attenuates it but does not remove it, and it keeps the 5·8M period.
* The tone analyzer averages over M samples. Its nulls fall on multiples of
  250 MHz/M, so a residue that repeats every M clocks is cancelled exactly.
  * With M = 65520 every residue has that period, and the output is constant.
  * With M = 65536 the residue repeats every 5 windows. Each window sees a
    different part of it, so the output cycles with period 5 windows.

`tb_comb_manager` shows this bit for bit on the band-6, FCW = 4000 case.
`tb_concerto_spurs` (65536) and `tb_comb_manager_full` (65520) show it on all
400 streams:

* MODULUS = 65536: outputs differ from window to window and repeat exactly after 5.
* MODULUS = 65520: every output is identical from window to window.

The price is a compare and a subtract in every accumulator, instead of a free
wrap. The frequency grid moves from 3814.7 Hz to 3815.6 Hz, and the output rate
moves from 3.8147 kHz to 3.8156 kHz. The CORDIC only sees phase >> 6. The phase
values 65520 to 65535, which the accumulator now skips, would all have given the
CORDIC input 1023 anyway, so the CORDIC is unaffected.

## Blocks

* `kid_pkg`: sample types, lane count and the small constant tables, each with
  its formula:
  * `COS_QUARTER[p] = round(32767·cos(2πp/40))`, p = 0..10;
  * `CORDIC_ATAN[i] = round(atan(2^−i)/2π · 2^24)`;
  * the 128 taps of the filter-bank low-pass.

  It also holds helper functions: the 40-point phasor, mod-40 addition and
  16-bit saturation.
* `phase_accumulator`: phase ← (phase + fcw) mod MODULUS, with a `wrap` flag.
  An assertion requires fcw < MODULUS.
* `cordic`: a pipelined rotation-mode CORDIC with 16 iterations and a
  10-bit phase input. The vector is folded by 180° into ±90° before the
  iterations. It carries 4 extra fraction bits and rounds them off at the output.
  Error ≤ 3 LSB. Latency 17 clocks.
* `tone_generator`: a `phase_accumulator` followed by the CORDIC on phase[15:6].
* `subband_generator`: N_TONES tone generators and their scaled sum. It also
  outputs the per-tone references.
* `down_shifter`: the ×e^(−jπn/2) rotation, done as a swap and a negation.
* `upsampler`: ×8 linear interpolation, y[8m+k] = x[m−1] + (x[m]−x[m−1])·k/8.
* `band_shifter`: a complex multiply by the 40-entry phasor. The phasor index is
  (2b+1)·n mod 40, computed per lane.
* `comb_generator`: N_BANDS subband chains and the band sum.
* `pfb_channel`: one analysis subband, as described above.
* `ddc`: multiply and integrate-and-dump over WINDOW samples.
* `comb_analyzer`: N_BANDS filter-bank channels × N_TONES analyzers.
* `comb_manager`: the top.

## Numbers, scaling and timing

* CORDIC tones have amplitude ≈ 32112. The subband sum is divided by
  2^ceil(log2 N_TONES), which is 64. The band sum is divided by
  2^ceil(log2 N_BANDS), which is 16. With this scaling nothing can overflow:
  all 400 tones start in phase at reset, and even then no saturation occurs.
  The price is that each tone in the full comb is only about 28–31 LSB in the
  output waveform. Products are shifted right by 15 (truncation) and saturated
  to 16 bits.
* Band-shift and filter-bank phasors are Q1.15 with a peak of 32767.
* The filter-bank low-pass has unity DC gain and is flat to 50 MHz. It is at
  −77 dB at 150 MHz and below −85 dB from 175 MHz on, so nothing aliases into
  ±50 MHz after the decimation by 8.
* A tone analyzer outputs the **sum**, not the mean, of x·ref over its window.
  The accumulator is 48 bits wide. For a tone of real amplitude a at its input
  and a reference of amplitude R, |I + jQ| = WINDOW · a · R / 4. Divide by
  WINDOW if a mean is wanted.
* The analyzer's reference is the tone's CORDIC output as it comes. It is not
  delayed to match the loop latency, so each stream carries a constant phase
  offset.
* Latency:

  | path | clocks |
  |---|---|
  | accumulator to CORDIC output | 17 |
  | tone sum | 1 |
  | down-shift | 1 |
  | interpolation | 1 |
  | band shift | 1 |
  | band sum | 1 |
  | filter bank | 3 |

  Each analyzer window starts at reset. `ddc_valid` pulses every MODULUS clocks,
  with the window's sums on `i_ddc`/`q_ddc`.
* All sample-index counters (the down-shift, band-shift, filter-bank and
  up-conversion phases) start at zero at reset. A synchronous active-low reset
  clears every register.

## How this RTL relates to the published readout

The following come from the published description of the firmware:

* the chain of operations and their order, with rates, shift frequencies and
  phasor formulas;
* the 10 × 40 tone plan;
* the 16-bit accumulator and the 6-bit shift in front of a 10-bit CORDIC;
* the 40-entry band-shift table;
* the five steps of the filter bank;
* the boxcar analyzer;
* the digital loop-back through the Q output;
* the modulo-65520 change, applied to both the accumulator and the analyzer
  window.

The following are not published and were chosen here:

* **CORDIC insides** (iterations, widths, amplitude).
* **Interpolation filter**: linear interpolation. It is about −1 dB at the
  band edges, and its images are not strongly suppressed.
* **Filter bank**: a direct-form decimating FIR per band, not an FFT-based
  polyphase structure. It computes the same function, but it costs 256
  multipliers per band every clock. The 10 bands alone need 2560 multipliers,
  which is more than the 1953 DSP blocks the original firmware uses for
  everything. A polyphase/FFT implementation, or coefficient symmetry, would be
  needed to fit a comparable device.
* **All word widths, scaling shifts, rounding by truncation and saturation.**
* **The 8-lane sample layout and the single clock domain.**
* **Per-analyzer window counters.** A shared counter would serve equally well.
* **Interfaces.** The host interface (frequency control words, readout of the
  I/Q streams) is left as plain ports, and so are the DAC and ADC interfaces.
  Tone amplitudes are not programmable.

## Verification

Each module has a self-checking testbench in `tb/`. The expected values are
computed independently, with real arithmetic or integer models.

* `tb_phase_accumulator`: phase, wrap flags, and repetition periods (819 clocks
  for 65520, 2048 for 65536 with FCW 4000).
* `tb_cordic`: all 1024 phases against cos/sin within 3 LSB, the magnitude, and
  the 17-clock latency.
* `tb_tone_generator`: samples against an accumulator model, and I[n] = I[n+65520].
* `tb_subband_generator`: the 40-tone sum against a real-valued model.
* `tb_down_shifter`, `tb_upsampler`, `tb_band_shifter`: operation against the
  formulas, per sample and per lane.
* `tb_pfb_channel`: checked bit-exact against an independent model, for random
  input. Also the amplitude of an in-band tone, and > 66 dB rejection of a tone
  from another band.
* `tb_ddc`: sums and valid spacing with a short window. With the default
  window it checks the matched-tone magnitude and the rejection of a tone 3 grid
  steps away.
* `tb_comb_generator`, `tb_comb_analyzer`: reduced to 2 bands × 2 tones. They
  check tone amplitudes at the expected frequencies and the absence of energy
  where no tone is.
* `tb_comb_manager`: end to end, 7 bands × 1 tone, run as two copies with
  MODULUS 65520 and 65536. It checks:
  * constant outputs for 65520;
  * the band-6 magnitude within 3%;
  * the 5-window cycle for 65536;
  * silent outputs after switching the loop-back off.
* `tb_comb_manager_full`: the top with all defaults (10 × 40 tones, 65520) for
  three windows. All 400 streams are bit-identical from window to window, and
  each magnitude is within 10% of its prediction. The worst seen was 0.16%.
  It takes about 1 minute of simulation after about 2 minutes of compilation.
* `tb_concerto_spurs`: the 400-tone comb with MODULUS = 65536, over seven
  windows. All 400 streams cycle with period 5 windows. The largest excursion
  from window 1 is 16% of the tone magnitude. It is this large because each
  tone is only about 30 LSB in the full comb. In the single-tone run of
  `tb_comb_manager` the excursion is about 1·10^-5 of the magnitude. The run
  takes about 2.5 minutes of simulation.

What is not verified: spectra over long records. The published measurements use
655,360 output samples per tone. Such a run is 4.3·10^10 clocks and is out of
reach of RTL simulation. The periodicity checks above are the exact,
cycle-level equivalent of the spur/no-spur result.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/kid_pkg.sv tb/tb_comb_manager.sv \
    --top-module tb_comb_manager -Mdir obj_tb_comb_manager
./obj_tb_comb_manager/Vtb_comb_manager
```

Each testbench ends with a line `TB_RESULT checks=N failures=F`. Modules are
found through `-Irtl` by their file names. `kid_pkg.sv` must come first.

Parameters worth changing:

| parameter | default | meaning |
|---|---|---|
| `N_BANDS` | 10 | subbands |
| `N_TONES` | 40 | tones per subband |
| `MODULUS` | 65520 | accumulator period and analyzer window; 65536 gives the original behaviour |
| `ACC_W` | 48 | analyzer accumulator width |

The filter taps and phasor tables live in `kid_pkg`. The band-shift scheme
assumes N_BANDS ≤ 10, because the 40-point phasor only has 10 odd-multiple
positions in its positive half.
