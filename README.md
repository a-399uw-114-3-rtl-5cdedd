# Companding VCO-ADC readout for MEMS microphones

A digital MEMS microphone must cover everything from a whisper to a rock
concert: more than 110 dB of dynamic range at audio bandwidth. The output is
a single-bit PDM stream at a standard clock of a few MHz. A single converter
that reaches that range costs a lot of power. This design instead **compands**:

- Two open-loop VCO-based ADC channels digitise the same signal in parallel.
- The **HSNR** channel has four times the analog gain. It is quiet but clips
  early.
- The **HDR** channel has unity gain. It is four times noisier but stays
  linear up to the acoustic overload point.
- A selector passes the HSNR result while the signal is small and switches to
  HDR as soon as the signal grows.
- A 5th-order digital noise shaper turns the selected word into the 1-bit
  output. Its feedback level depends on which channel is selected, and that
  trims away the small gain mismatch between the channels.

Two ideas make the channels cheap:

- **Oscillators as quantisers.** Each channel is a pair of current-controlled
  ring oscillators, one per branch of a pseudo-differential input. Counting
  ring-oscillator phases is a first-order noise-shaping quantiser for free:
  no feedback DAC and no op-amps.
- **A multirate front end.** The phases are sampled at f_ss = 8·f_s, which
  pushes the oscillator quantisation noise down. f_ss comes from the
  microphone clock f_s through a delay line, an XOR tree and a small dead-zone
  DLL, not a PLL. A second-order CIC brings each channel back to f_s.

This repository holds synthesizable SystemVerilog for all the digital
parts. It also holds behavioural models of the two analog parts that the
digital logic depends on: the oscillators and the delay line.

## Signal path

```
            +-- HSNR channel (gain 4) ------------------------------+
 mic  --+-->| GM+RO p --> phase->Gray --> 13b counter --+           |
        |   | GM+RO n --> phase->Gray --> 13b counter --+-(p-n)-> CIC --> 9b --> sign-ext 11b --> HPF --> 23b --+
        |   +-------------------------------------------------------+                                         |
        |   +-- HDR channel (gain 1), same structure ---------------+                                          MUX --> noise shaper --> PDM
        +-->|                                                  CIC --> 9b --> <<2 11b ------> HPF --> 23b --+   ^          ^
            +-------------------------------------------------------+    |                                    |          |
                                                                          +--> channel selection --> sel -----+----------+
 f_s --> delay line (8 buffers) --XOR--> f_ss (8 pulses per f_s period)            (feedback level g_hdr / g_hsnr)
          ^   |
          |   +--> dead-zone phase detector --> up/down counter --> 5-bit IDAC code
          +------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `companding_adc` | top level: both channels, clock multiplier, scaling, filters, selector, noise shaper |
| `gm_dffro_model` | behavioural: GM + 16-phase ring oscillator of one branch |
| `channel_datapath` | digital part of one channel: two encoders, two counters, p − n, CIC |
| `phase_to_gray` | 16 phases → 6-bit Gray code sampled on f_ss, with extensor and start-up |
| `sync_counter_ext` | Gray → binary, extended to a wrapping 13-bit counter |
| `gray_to_bin` | combinational Gray decoder |
| `cic_decimator` | f_ss integrator, truncation 13 → 9 bits, two f_s differences |
| `ccdl_model` | behavioural: current-starved delay line, XOR tree, extra delay |
| `dll_phase_detector` | two flip-flops sampling the last tap and the extra-delayed tap |
| `dll_control` | saturating up/down counter driving the delay-line IDAC |
| `offset_hpf` | first-order high-pass (7.46 Hz) per channel, 11 → 23 bits |
| `channel_select` | threshold/timeout logic producing `sel` (1 = HDR) |
| `noise_shaper` | 5th-order 1-bit noise shaper with selectable feedback level |
| `cadc_pkg` | widths, the channel-select enum and the Gray-decode function |

## The oscillator channels (behavioural)

Each branch is a source-degenerated transconductor feeding a 16-stage
differential feed-forward ring oscillator. `gm_dffro_model` folds both into
one frequency law, clipped to the range 0 … FMAX:

f = F0 + K_VCO · v_branch

- F0 = 6 MHz and FMAX = 12 MHz.
- The model does not distinguish the two clipping mechanisms. In the HSNR
  branch the GM's fixed bias limits the current. In the HDR branch the
  current runs out at zero frequency.
- K_VCO is 6·10⁷ Hz/V for HDR and 2.4·10⁸ Hz/V for HSNR. The 4× gain
  difference lives here, so the testbenches apply the same voltage to both
  channels.
- The input network (bias resistors, the HDR capacitive attenuator, ripple
  capacitors) and the trim DACs of the real chip have no digital function.
  They appear only through these constants.
- Noise and the real nonlinearity are not modelled. Quantities set by analog
  noise (SNR, dynamic range) therefore cannot be reproduced in simulation.

One oscillation walks through 32 ring states. Phase k is high in the 16
states with (s − k − 1) mod 32 < 16. That ordering is the one for which the
encoder below produces a Gray code.

With these constants one f_ss period sees 7.8 ring states at rest and at
most 15.6. The differential channel word therefore spans about ±62 of its
±255 range at the clipping points. **0 dBFS in the testbenches is this
point, a differential amplitude of 0.2 V.**

## Reading the ring: phase-to-Gray encoding

The 16 phases are never counted directly: no flip-flop toggles at the
oscillator rate except two.

- **Gray bits from the phases.** An XOR network of 11 gates turns the phases
  into the low Gray bits of the ring state:
  - gr0 is the XOR of the 8 even phases;
  - gr1 = φ1⊕φ5⊕φ9⊕φ13;
  - gr2 = φ3⊕φ11;
  - gr3 = φ7.
- **The Gray extensor.** φ15 would be the fifth Gray bit. Instead it clocks a
  2-flip-flop Johnson counter: gr4 takes ¬gr5 on the rising edge of φ15, and
  gr5 takes gr4 on the falling edge. Their XOR equals φ15, and each of them
  toggles once per oscillation. {gr5, gr4, gr3…gr0} is then a 6-bit Gray
  count of the ring state modulo 64. Up to 63 states, almost two
  oscillations, may pass between samples without ambiguity.
- **Start-up.** Until the ring has passed a known state (gr[3:0] = 0), the
  extensor is held at zero. A flag `rr` then releases it. This avoids an
  extensor that starts out of step with φ15.
- **Sampling.** All six bits are sampled on the rising edge of f_ss. A Gray
  code changes one bit at a time, so a sample taken mid-transition is off by
  at most one state.

`sync_counter_ext` decodes the sample to binary b and extends it to a
wrapping 13-bit counter:

cnt ← cnt + ((b − cnt[5:0]) mod 64)

The two branches' counters are subtracted (p − n) before the CIC.
Everything wraps modulo 2¹³, which is harmless: the CIC differences undo the
wrap.

## The multirate CIC

The counter is already the first integrator of a Hogenauer CIC: it
integrates frequency into phase. `cic_decimator` then works in three steps:

1. It adds the counter value into a 13-bit accumulator on every f_ss edge.
2. At each f_s edge it samples the top 9 bits of the accumulator (dropping 4
   LSBs).
3. It takes two first differences at f_s.

The result is a second-order sinc² decimator with gain 4·r, where r is the
count per f_ss period.

There is no decimation counter. **M is simply the number of f_ss edges
between two f_s edges**, and that has two consequences:

- The XOR clock multiplier only needs to deliver exactly 8 rising edges per
  f_s period. The edges do not have to be evenly spaced, which is why a
  coarse, open-loop-capable delay line is enough.
- If an f_ss edge drifts across an f_s sampling edge, one sample integrates
  the whole counter value once too often, and the next once too few. The
  word glitches by up to full scale. The timing margin of the clock
  multiplier (next section) is therefore the real limit on clock frequency
  and jitter.

The 4 dropped LSBs are a truncation error that the two differences shape
like the oscillator quantisation noise. They add roughly ±2 LSB of
out-of-band noise to each f_s word.

## Making f_ss: delay line, XOR tree and dead-zone DLL

`ccdl_model` is a chain of 8 buffers, each two current-starved inverters,
whose starving current comes from a 5-bit IDAC.

- Every edge of f_s ripples down the chain. Each tap it passes toggles the
  XOR of the 8 taps.
- One f_s period therefore gives 16 toggles, which is 8 f_ss pulses.
- The pulses are uniform when the taps are T/16 apart, that is when the whole
  line is **T/2** long.

The lock point is T/2, not T, because both edges of f_s travel the line. At
lock the rising edge reaches the last tap just as f_s falls.

The model's buffer delay is pvt_scale · 814 ns / (code + 24). The line
therefore spans 118–271 ns over codes 0…31, and locks at code 17 for f_s =
3.072 MHz. This law is an assumption: only the structure, the 8 buffers and
the 5-bit code are known.

The loop that holds the line near T/2 has a dead zone so that it does not
dither the clock:

- An extra delay of a quarter buffer (half an inverter) follows the last tap.
- `dll_phase_detector` samples the last tap (`th_d`) and the extra-delayed
  tap (`th_u`) on the falling edge of f_s.
- `dll_control` acts on the result:

| th_d | th_u | meaning | action |
|---|---|---|---|
| 0 | x | edge not yet at the last tap: line too slow | code + 1 |
| 1 | 0 | edge between last and extra tap: dead zone | hold |
| 1 | 1 | edge already past the extra tap: line too fast | code − 1 |

A higher code means more current and a shorter delay. The counter
saturates at 0 and 31, starts from 0 after reset, and has two controls:

- `dll_en = 0` freezes the code. This is the "calibrate once, then run open
  loop" mode.
- `dll_load` loads `dll_fb_init`.

The new code takes effect on the next f_s edge. Acquisition from code 0 takes
about 17 cycles.

Timing margin: the last *rising* edge of f_ss in each half-period comes 7/16
of T after the f_s edge that launched it. That leaves about T/16, or 7 % of
T, before the next f_s sampling edge. Two things can break that margin:

- Slow PVT drift is tracked, one code step per cycle. A sudden large step,
  however, can move edges across the sampling instant before the loop
  reacts.
- With the code frozen, f_s can be raised until T/2 reaches 7/8 of the line
  delay: about 3.57 MHz at the 3.072 MHz calibration. f_s can be lowered
  freely.

## From two channels to one word

**Scaling.** The 9-bit HDR word is shifted left by 2 and the 9-bit HSNR word
sign-extended, both to 11 bits. After this, equal input voltages give equal
words in the linear range, up to the analog gain mismatch.

**Offset filter** (`offset_hpf`, one per channel). The two channels have
different offsets, which would step at every channel switch. The filter
works in three steps:

1. It takes the first difference of the 11-bit word and shifts it left by 21
   into a 32-bit accumulator.
2. The accumulator leaks 2⁻¹⁶ of itself every cycle.
3. The output is the top 23 bits of the accumulator.

That gives H(z) = (1 − z⁻¹)/(1 − (1 − 2⁻¹⁶)z⁻¹). The cut-off is 7.46 Hz at
3.072 MHz, the pass-band gain is 2¹², the latency is 2 cycles, and no
multiplier is needed.

**Channel selection** (`channel_select`) looks at |HDR word|:

- Above `th_high`, it selects HDR on the next f_s edge and clears an 18-bit
  timeout counter.
- Below `th_low`, the counter counts; between the two thresholds it holds.
- When the counter reaches `prog_timeout` (at most 262 143 cycles, 85 ms),
  HSNR is selected.

Switching up is immediate, so HSNR clipping is never passed on. The
threshold compares with HDR, which is linear at that level, one cycle before
HSNR would clip. Switching down waits until the signal has been quiet for a
while, which avoids chattering. `en_hdr`/`en_hsnr` low forces the selection
to the other channel (single-channel modes).

The thresholds compare with the raw f_s-rate HDR word, including its
out-of-band quantisation noise of about ±3 LSB. With the oscillator scaling
above, a threshold near −30 dBFS (2 LSB) lies inside that noise. The
switching test therefore programs 4/3 (about −24 dBFS).

## Noise shaper and gain trim

`noise_shaper` re-quantises the selected 23-bit word to 1 bit:

- **Structure.** Five cascaded delaying integrators with feed-forward
  coefficients (CIFF) feed a sign comparator.
- **Feedback.** The fed-back value is ±G.
- **Coefficients.** c = 846954, 332045, 77672, 10736, 698 in Q20. They
  place all five NTF zeros at DC, with a 5th-order Butterworth high-pass
  denominator and a peak |NTF| of 1.5.
- **Stability.** The loop is stable up to about 0.6·G. The offset filters
  deliver at most 0.5·2²³.
- **State width.** Integrator states are 40 bits.

**Gain trim without a multiplier.** G is the full scale of the 1-bit output.

- With HDR selected, G = `g_hdr` (nominally 2²³).
- With HSNR selected, G = `g_hsnr` = 2²³·G_HDR/G_HSNR, where the G's are the
  measured digital gains of the two channels.

The word reaching the shaper is divided by G, so changing G rescales one
channel relative to the other. A small transient at each switch remains. It
is inaudible in practice and much cheaper than a multiplier in the signal
path.

## Programming inputs

The chip's serial interface, reference and regulators are not part of this
RTL. Every programmable value is a plain input of `companding_adc`:

| Input | Width | Meaning |
|---|---|---|
| `en_hsnr`, `en_hdr` | 1 | channel enables (oscillators run only when enabled; one low forces the other channel) |
| `dll_en`, `dll_load`, `dll_fb_init` | 1,1,5 | DLL loop enable, code load, code to load |
| `th_high`, `th_low` | 9 | switch-to-HDR and switch-to-HSNR thresholds on \|HDR word\| |
| `prog_timeout` | 18 | f_s cycles below `th_low` before returning to HSNR |
| `g_hdr`, `g_hsnr` | 25 | noise-shaper feedback level per channel |
| `pvt_scale` | real | model-only: scales all delay-line delays |

Outputs: `pdm_out` (registered at f_s), and for test `sel_hdr`, `dll_fb`,
both 9-bit channel words, the selected 23-bit word, f_ss and `enc_ready`
(all four encoders out of start-up).

## Where this design departs from, or goes beyond, the source description

- **Loop filter of the noise shaper.** Its order, output width, the two
  feedback levels and their meaning are given; the topology, coefficients
  and integrator widths are this design's.
- **Noise-shaper input width.** The datapath diagram shows 23 bits while the
  text mentions 22; 23 is used.
- **Offset-filter output.** The diagram labels the output stage with a shift
  of 9. It is read as dropping 9 LSBs (32 − 9 = 23 bits). Its output is
  taken from the accumulator register.
- **DLL phase detector.** Its sampling edge (falling f_s), the counter's
  saturation, its reset code and the load port are this design's choices.
- **Gray extensor.** Its clock edges and the start-up pattern
  (gr[3:0] = 0) are this design's choices.
- **p − n subtraction.** The sign of the branch subtraction is this design's
  choice.
- **Selector timing.** Only `sel` is registered, so handover takes one f_s
  cycle, within the required five.
- **Delay-line lock point.** The description speaks of the line's total
  delay approaching the clock period T. With 8 taps of a 50 %-duty clock, a
  line of length T would make taps k and k+4 toggle together and cancel in
  the XOR. This design therefore locks the line at T/2.
- **Analog constants.** All oscillator and delay-line constants are
  assumptions chosen to match the stated 6 MHz rest frequency, 8× clock
  multiplication and 3.072 MHz nominal clock.

## Verification and simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_gray_to_bin` | all 64 codes |
| `tb_phase_to_gray` | encoder against the ideal Gray code of the ring state over thousands of random samples, start-up hold |
| `tb_sync_counter_ext` | counter against an exact model for random step sizes < 64 |
| `tb_cic_decimator` | output against the sinc² closed form for constant and varying rates |
| `tb_channel_datapath` | a channel driven by ideal phase generators: output = 4·(r_p − r_n) |
| `tb_gm_dffro_model`, `tb_ccdl_model` | frequency law and clipping; tap spacing, 8 f_ss pulses, IDAC law |
| `tb_dll_phase_detector`, `tb_dll_control` | the three detector cases; the full control table, saturation, hold and load |
| `tb_offset_hpf` | bit-exact against the difference equation, DC removal, pass-band gain |
| `tb_channel_select` | switching instant, timeout length, hold between thresholds |
| `tb_noise_shaper` | 1-bit mean equals input / G for both feedback levels, bounded states |
| `tb_companding_adc` | whole chip at default parameters (below) |
| `tb_fs_sweep` | clock sweep 1.87–3.57 MHz with the DLL code held, 1 % edge jitter |
| `tb_tone_sweep` | tones at 20 Hz–20 kHz: HSNR/HDR ratio flat to 0.001 dB, end-to-end offset-filter response as designed |
| `tb_dual_tone` | 2 Hz (−20 dBFS) + 1 kHz (−40 dBFS) for one 2 Hz period: repeated switching; the 1-bit output, averaged over 10 ms, stays within 2 % of an ideal reference, handover windows included |

`tb_companding_adc` covers the following, and fails any mechanism it never
sees:

- DLL acquisition from code 0 and dead-zone lock;
- re-tracking during a 20 % delay drift;
- open-loop hold and code load;
- encoder start-up;
- the HSNR/HDR gain ratio of 4;
- HDR ×4 and HSNR ×1 scaling into the 23-bit word;
- handover within five cycles, and return after the timeout;
- HSNR clipping;
- single-channel modes;
- offset removal;
- 1-bit output tracking of the selected word with the selected feedback
  level.

Run any testbench with plain Verilator (5.x, timing support needed for the
behavioural models):

```
verilator --binary --timing -Wno-fatal --timescale 1ns/1ps -y rtl -y tb \
          rtl/cadc_pkg.sv tb/tb_companding_adc.sv --top-module tb_companding_adc
./obj_dir/Vtb_companding_adc
```

Run times on one core are about 15 s for `tb_companding_adc` (45 ms of chip
time), 1.5 min for `tb_tone_sweep` and 2.5 min for `tb_dual_tone` (0.5 s); all others take seconds.

## Known limits

- SNR, dynamic range, distortion and PSRR depend on analog noise and
  nonlinearity, which the models do not contain.
- The clock multiplier's margin is about 7 % of T per half-period in this
  model. Gaussian edge jitter of 1 % (σ) of T runs clean. At 2 % some
  half-periods already shrink by more than the margin, and the words show
  full-scale glitches (see the CIC section). A sudden large delay change has
  the same effect. In silicon the margin depends on timing that is not
  modelled here.
- In this model's scaling the HDR word uses about a quarter of its 9 bits.
  Switching thresholds much below −25 dBFS therefore fall into its
  quantisation noise.
