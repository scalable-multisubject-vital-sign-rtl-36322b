# Vital-sign processor for an FMCW radar: RTL

A person sitting in front of a 77 GHz FMCW radar moves the radar's echo by a
fraction of a millimetre with every breath and every heartbeat. This design is
an FPGA signal chain that turns the raw IF samples of such a radar into two
numbers per frame: a breathing rate and a heart rate, both per minute. It also
reports the subject's distance for every chirp.

There are five steps:

1. A range FFT over each chirp finds the subject's distance.
2. The phase of the echo at that distance is taken once per chirp.
3. That phase sequence is unwrapped into a continuous chest-displacement signal.
4. A second FFT over the frame's chirps gives the signal's spectrum.
5. The strongest line in the breathing band gives the breathing rate, and the
   strongest line in the heartbeat band gives the heart rate.

There is no FIR or IIR filtering. Splitting the spectrum into the two bands
replaces it.

The design handles a single subject on a single receive channel. The FFT and
CORDIC engines are vendor IP cores. They are not part of this RTL. The top
level brings out their stream ports, and the testbenches connect behavioural
models to them.

## Why the phase carries the vital signs

An FMCW chirp mixed with its own echo gives an IF tone. The tone's frequency
is proportional to the target distance, and its phase is
4·π·R/λ (λ ≈ 3.9 mm at 77 GHz). A chest displacement x(t) therefore shows up
as a phase change of 4·π·x(t)/λ:

- 1 mm of breathing motion is already about 3 rad.
- A heartbeat of 0.1 mm is about 0.3 rad.

Two consequences shape the design:

- The phase has to be read at the right range bin. That bin is the peak of
  the range spectrum.
- The phase returned by an arctangent is wrapped into (−π, π]. Breathing
  moves it across that boundary many times per frame, so it must be unwrapped
  before its spectrum means anything.

## Configuration and derived constants

All defaults live in `rtl/vs_pkg.sv`.

| Quantity | Value | Where it is used |
|---|---|---|
| Samples per chirp, N | 512 | range FFT length, chirp buffer depth |
| Chirps per frame, M | 128 | phase memory depth, phase FFT length |
| ADC rate | 6 Msps | range scale |
| Chirp duration Tm | 100 µs | range scale |
| Sweep bandwidth BW | 2998.2 MHz | range scale |
| Chirp period Tc | 50 ms (20 Hz slow-time rate) | rate scale |
| Metres per range bin, c·Tm/(2·BW)·fadc/N | 0.0586 m (Q16.16: 3842) | `range_scaler` |
| Rate per phase-FFT bin, 60/(Tc·M) | 9.375 /min (Q8.8: 2400) | `pfft_hrbr` |
| Breathing band 3–36 /min | bins 1..3 | `pfft_hrbr` |
| Heartbeat band 48–120 /min | bins 6..12 | `pfft_hrbr` |
| Range search window | bins 1..N/2−1 | top-level peak detector |

The elaboration-time functions `range_step_q16`, `rate_per_bin_q8`,
`band_lo_bin` and `band_hi_bin` compute the scale factors and band edges from
the radar numbers. Changing M or the chirp timing therefore moves them
automatically:

- A band's lower edge is rounded up to the next bin.
- Its upper edge is rounded down.
- The breathing band never starts at bin 0, which is the frame's mean.

A frame of 128 chirps spans 6.4 s. The bin width of 9.375 /min is coarse, so
a reported rate is the nearest bin centre, never anything finer.

## Number formats

| Signal | Format |
|---|---|
| ADC samples | 16-bit signed I and Q |
| IF words into the range FFT | 32-bit signed Q16.16. The scaled 16-bit sample is the upper half; the lower 16 bits are zero. |
| Complex words (`vs_pkg::cplx_t`) | packed `{re, im}`, 2 × 32 bits |
| PSD | 64-bit unsigned, Re² + Im² |
| Wrapped phase from the CORDIC | 16-bit signed radians, Q3.13 (π = 25736) |
| Unwrapped phase | 32-bit signed radians, 13 fraction bits |
| Phase-FFT input | the unwrapped phase shifted left by 3 into Q16.16. Imaginary part zero. |
| Distance | unsigned Q16.16 metres |
| Rates | unsigned Q8.8 per minute |

Several outputs have bits that are constant by construction:

- the zero lower halves of the Q16.16 IF words;
- the zero imaginary part of the phase-FFT input;
- the low bits of products with a constant.

## Data path

```
adc_i/adc_q ─► if_preproc ─► rfft_module ═► [range FFT core] ═╦═► psd_unit ─► peak_detector ─► range_scaler ─► range_*
                 (÷A, Q16.16)  (chirp RAM)                     ║                 │ k̂ (per chirp)
                                                               ╚═► phase_extract ◄┘
                                                                     (spectrum RAM) ═► [CORDIC core]
                                                                          │ phase RAM writes
                                                                    phase_unwrap
                                                                          │ unwrapped phase stream
                                                                     pfft_hrbr ═► [phase FFT core] ─► PSD ─► BR / HR band peaks ─► result_*
```

`if_preproc` divides each I/Q sample by A = 2^A_SHIFT, with a default of 4,
using an arithmetic shift. It then places the result in the upper half of a
32-bit word. Throughput is one sample per clock with a registered
valid/ready output.

`rfft_module` writes the N samples of a chirp into a block RAM (`bram_sdp`).
It then reads them out in order to the range-FFT core, with `last` on sample
N−1.

- The buffer reopens for the next chirp as soon as it has been read out.
  Loading therefore overlaps the FFT latency.
- Streaming waits on `hold` while the phase extractor still works on the
  previous spectrum.
- The spectrum coming back from the core is numbered bin by bin (`spec_idx`)
  and fanned out.

`psd_unit` computes Γ[k] = Re² + Im² in two register stages.

`peak_detector` has three parts:

- an input register, called the accumulator;
- a strict-greater comparator limited to a bin window;
- a max-value / index register.

Two cycles after the last bin it pulses `peak_valid` with k̂. Ties keep the
lower bin. Bin 0 (DC, which includes any ADC offset) and the upper half of
the spectrum are outside the range window. The same module, with other
windows, finds the two vital-sign peaks.

`range_scaler` multiplies k̂ by the constant metres-per-bin, giving Q16.16
metres one cycle later.

`phase_extract` works in four steps:

1. It writes every bin of the current spectrum into its own buffer as the
   bins stream past.
2. When k̂ arrives, it reads X[k̂] back and hands it to the CORDIC core, which
   computes atan2(Im, Re).
3. It writes the returned angle into the phase RAM at the chirp's slow-time
   address 0..M−1.
4. After the M-th chirp it pulses `frame_done`.

`phase_unwrap` is described in the next section.

`pfft_hrbr` runs the phase spectrum search:

- It streams the M unwrapped phases to the phase-FFT core as a real signal.
- It forms the PSD of the returned spectrum and runs two peak detectors, one
  per band.
- It converts each peak bin to a rate with one constant multiply.
- `result_valid` pulses 5 cycles after the last bin.
- Besides the rates, it outputs the peak PSDs and a `bands_ok` flag. A
  downstream stage can use these to judge whether anything was present.

## Phase unwrapping

This is the least obvious block and the one most worth reading in the RTL.

The CORDIC returns each chirp's phase modulo 2π. Suppose the true phase moves
by less than π between consecutive chirps. Then the jump between two
consecutive *unwrapped* values must also be less than π. Any larger apparent
jump is an artefact of wrapping, and adding or subtracting 2π removes it.

The hardware does exactly this, one sample at a time:

```
            ┌────────────────────── ±2π / pass mux ◄── comparator ◄── diff = acc − prev
            ▼                                                           ▲
 phase RAM ─► accumulator ────────────────────────────────────────────────┤
 (address        │                                                      │
  generator)     └─────────► output register ══► out_data ──► previous-value register
```

Per sample, the state machine goes through these states:

| State | Cycles | Action |
|---|---|---|
| READ | 1 | The address generator presents the next slow-time index to the phase RAM. |
| LOAD | 1 | The RAM word, sign-extended, enters the accumulator. |
| CMP | 1 + k | Compute diff = acc − prev. If diff > π: acc −= 2π and stay. If diff < −π: acc += 2π and stay. Otherwise copy acc to the output register and to prev. |
| OUT | ≥ 1 | Present the sample on `out_valid`/`out_data` and wait for `out_ready`. |

Corrections run one per clock through the accumulator feedback loop. The
accumulator is loaded with the raw, wrapped sample every time, not with the
raw sample plus the previous offset. If the stored phase is k turns away
from the previous output, the sample therefore needs k correction cycles, and
k is the number of whole turns the unwrapped signal has drifted out of
(−π, π]. It grows with the breathing swing: a swing of ±6.5 rad gives k up to
2.

A frame costs Σ(4 + k_i) + 1 cycles when the consumer never stalls. That is
roughly 500 to 1,000 cycles for M = 128 and ordinary breathing, which is
negligible against the 65,536 cycles of sample input. The first sample of a frame passes through unchanged and
becomes the reference.

Every correction pulses `wrap_add` or `wrap_sub`.

- The comparison is strict on both sides, so a difference of exactly ±π is
  left alone.
- The accumulator is 32 bits wide. It can wander about 2^18 rad from zero
  before overflowing, which is far beyond any realistic drift within a frame.

The method works only if the chest moves less than λ/4 (about 1 mm) between
chirps. Above that, no unwrapper can tell a jump from motion.

## Frame sequencing and flow control

The top level (`vital_sign_top`) runs one frame at a time:

1. **CAPTURE.** `adc_ready` accepts M chirps. It falls after the M-th chirp.
   While capturing, each chirp flows through the range FFT, peak search,
   range output and phase extraction.
2. **ESTIMATE.** Once the M-th phase is in the phase RAM, the unwrapper is
   started. Its stream feeds the phase FFT and the band search.
3. **Next frame.** `result_valid` ends the frame, and capture of the next
   frame begins.

Back-pressure propagates as follows:

- A stalled range-FFT core (`rfft_in_ready` low) holds the chirp read-out.
- If the read-out is still busy, the next chirp cannot load, so `adc_ready`
  drops.
- The phase extractor's `busy` raises the read-out's `hold`. The buffered
  spectrum is therefore never overwritten before X[k̂] has been read.
- A stalled CORDIC core waits in the extractor.
- A stalled phase-FFT core back-pressures the unwrapper through its output
  handshake.

The output streams of both FFT cores have no back-pressure. The design always
accepts a bin per clock.

The range bin is determined independently for every chirp. The phase of each
chirp is taken at that chirp's own peak.

**Timing.** With samples fed back to back, a full frame takes about 143,500
clocks in simulation (0.48 ms at 300 MHz). This figure uses the behavioural
cores, with 12-cycle FFT latency, 6-cycle CORDIC latency and random stalls.
The published figure is 0.815 ms (244,500 clocks at 300 MHz); the full-size
testbench fails a frame that takes longer.

In a real radar the chirps arrive 50 ms apart. The pipeline then idles
between chirps, and only the estimate phase follows the last chirp directly.

## The vendor cores

Three external cores are needed. Any FFT or CORDIC core with an equivalent
stream interface can be wrapped to these ports.

| Ports | Core | Contract expected by the RTL |
|---|---|---|
| `rfft_in_*`, `rfft_out_*` | N-point complex FFT | Input: valid/ready/last, one `cplx_t` per beat. Output: valid/last, natural bin order, no back-pressure. |
| `cordic_in_*`, `cordic_out_*` | CORDIC in arctangent (vector) mode | Input: valid/ready carrying X[k̂] as `cplx_t`. Output: valid with atan2(Im, Re) in Q3.13 radians. |
| `pfft_in_*`, `pfft_out_*` | M-point complex FFT | Same as the range FFT. The input imaginary part is zero. |

The FFT's scaling does not matter to the logic: both peak searches and the
phase are scale-invariant. It only needs to keep the peak bin from
saturating.

`tb/fft_model.sv` and `tb/cordic_model.sv` are the behavioural models the
testbenches use. They are not synthesizable.

- `fft_model` computes a direct DFT scaled by 1/N, with configurable latency
  and random input stalls.
- `cordic_model` computes `$atan2`, with configurable latency and stalls.

## Where this design departs from the published design or fills gaps

- **Unwrapping threshold.** The published block diagram of the unwrapper
  labels its comparator limits 2π. Its prose says the difference is kept
  within −π..π. The RTL uses ±π, which is the rule that unwraps correctly.
  With ±2π, jumps between π and 2π would pass uncorrected.
- **Rate scale.** The published logic-analyser capture of the hardware reads
  28 breaths per minute at bin 14 and 78 beats per minute at bin 39, i.e.
  2 per minute per bin.
  The stated chirp period (50 ms) and FPGA frame length (128 chirps) give
  9.375 per minute per bin, and the RTL uses the latter. `RATE_Q8` and the
  band parameters of `pfft_hrbr` can be overridden to reproduce the other
  scale.
- **Reported rates in the published hardware table.** These were 82/101/98/73
  beats and 14/23/14/13 breaths per minute, obtained from measured radar
  data. That data is not available. The workload testbench synthesises
  subjects with the same true rates instead.
- **Choices made in the RTL where no detail was published:**
  - the scale factor A (a power of two, default 4);
  - the number formats;
  - the stream handshakes;
  - the single chirp buffer;
  - the per-chirp range peak;
  - the DC exclusion from the range search;
  - the tie rule of the peak detectors;
  - the frame sequencing;
  - the `bands_ok`/PSD status outputs.
- **Not in this RTL:** the radar front end and capture board, the
  multi-subject processing (beamforming over TX-RX pairs, range-azimuth
  selection, DC-offset correction, mode decomposition, comb filtering,
  feature extraction, regression). Those steps exist only in the software
  flow that this FPGA chain simplifies. The FPGA chain is single-subject.

## Verification

Each module has a self-checking testbench in `tb/`. Each one:

- compares against values computed independently in the testbench;
- uses `$urandom` stimulus and a watchdog;
- ends by printing `TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it checks |
|---|---|
| `tb_if_preproc` | shift and packing for random samples, back-pressure, one sample per cycle |
| `tb_bram_sdp` | random writes and reads against a model; read-hold when `re`=0; read-during-write |
| `tb_psd_unit` | Re² + Im² at full width, two-cycle latency, index and last passed along |
| `tb_peak_detector` | arg-max inside random windows, ties, empty windows, result latency |
| `tb_range_scaler` | k·0.0586 m to within one LSB for all bins |
| `tb_rfft_module` | sample order, `last`, bin numbering, hold and stall behaviour (N = 64) |
| `tb_phase_extract` | the right bin reaches the CORDIC, phase written at the chirp index, `frame_done` (N = 64, M = 8) |
| `tb_phase_unwrap` | exact unwrapping of random walks with wraps of several turns, cycle count Σ(4 + k) + 1 |
| `tb_pfft_hrbr` | word conversion into the FFT, band peaks and rates for synthetic phase signals over 12 frames, with core stalls |
| `tb_vital_sign_top` | full size (N = 512, M = 128, no overrides), two frames end to end; see below |
| `tb_workload_fpga_results` | four subjects with the true rates of the published hardware results, at 1, 3, 5 and 7 m |
| `tb_workload_512_chirps` | the same four subjects with the frame raised to 512 chirps (25.6 s), the length used by the software flow |

`tb_vital_sign_top` sends two frames of synthetic IF data. Each frame has a
subject at bin 30 or 100, breathing and heartbeat tones on exact bins, a large
DC offset, and a breathing swing of 6.5 rad that forces many wraps.

The testbench checks:

- every chirp's range bin and distance;
- every unwrapped phase against the true phase, up to a constant multiple
  of 2π;
- both rates;
- the frame time against 244,500 cycles.

It also counts each flow-control and unwrapping mechanism, and fails if any
count stays at zero. A run gives 793 checks, 0 failures, with these counts:

| Mechanism | Count |
|---|---|
| ADC back-pressure | 145,612 |
| range-FFT stalls | 14,548 |
| read-out holds | 671 |
| CORDIC stalls | 122 |
| DC bins rejected | 256 |
| +2π / −2π corrections | 17 / 150 |
| double corrections | 24 |
| unwrapper stalls | 62 |
| frame switches | 1 |

`tb_workload_fpga_results` uses off-bin rates and distances plus ADC noise.
All four subjects land on the nearest range bin (17, 51, 85, 119). The
breathing and heart rates come out at the nearest phase-FFT bins:

| True BR | Reported BR | True HR | Reported HR |
|---|---|---|---|
| 18 | 18.75 | 87 | 84.38 |
| 21 | 18.75 | 105 | 103.12 |
| 12 | 9.38 | 104 | 103.12 |
| 10 | 9.38 | 77 | 75.00 |

The mean absolute errors are 1.6 breaths and 1.8 beats per minute.

`tb_workload_512_chirps` overrides M to 512 on the top. The bin width then
drops to 2.34 /min, the bands become bins 2..15 and 21..51, and the mean
absolute errors fall to 0.44 breaths and 0.49 beats per minute. This is the
resolution-versus-latency trade of the frame length: 25.6 s of data instead
of 6.4 s.

To build and run any testbench with Verilator 5:

```
verilator --binary --timing -y rtl -y tb rtl/vs_pkg.sv tb/tb_vital_sign_top.sv \
          --top-module tb_vital_sign_top -Mdir obj_top
./obj_top/Vtb_vital_sign_top
```

Replace the testbench name for the others. The full-size run takes well
under a second once built.

## Changing the design

- **Sizes.** `N` and `M` on `vital_sign_top` set the chirp length and frame
  length. Buffers, counters, band bins and scale factors follow. The
  external FFT cores must match.
- **Radar configuration.** Change the real constants in `vs_pkg` (ADC rate,
  chirp duration, bandwidth, chirp period). The range and rate scale factors
  are recomputed at elaboration.
- **Input scaling.** `A_SHIFT` on the top (default 2, i.e. ÷4) trades
  headroom for resolution ahead of the range FFT.
- **Bands.** `BR_LO`/`BR_HI`/`HR_LO`/`HR_HI` and `RATE_Q8` on `pfft_hrbr`.
