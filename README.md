# A random pulse generator that imitates a NaI(Tl)/CsI(Na) phoswich detector

A phoswich detector stacks a thin NaI(Tl) crystal in front of a thick CsI(Na)
crystal on one photomultiplier. Its preamplifier output is a train of pulses.
Each pulse has a fast rise and an exponential decay: about 230 ns for NaI and
630 ns for CsI. Pulse heights follow the energy spectrum of the incoming X-rays,
and the pulses arrive at random times, so the gaps between them are
exponentially distributed. Testing the readout electronics of such a detector
(in vacuum, thermal, vibration or EMC tests) is easier with a source that
produces the same signal without crystals, a photomultiplier or a radioactive
source.

This RTL describes such a generator. A small digital core decides three things
for every pulse: when it occurs, how large it is and which crystal it imitates.
It writes the amplitude to a DAC as a square wave. An analog shaping channel per
crystal turns the square wave's rising edge into a double-exponential pulse, and
a switch removes the opposite-polarity pulse that the falling edge produces.
The structure, the time constants, the 16-bit random words, the 12-fold
Gaussian sum, the NaI/CsI shares of the three X-ray lines and the interval
threshold Y = 2000 follow the published generator (Zhou et al., "Design and
implementation of the NaI(Tl)/CsI(Na) detectors output signal generator",
HXMT project). Everything the publication leaves open is this design's own
choice. Such choices are marked below as **chosen here**.

## Signal path

```
              +------------------------- fpga_core ---------------------------+
              |  M sequences --+--> gauss_random --+                          |
              |  (uniform)     |                   v                          |
              |                +--> line_select -> output_dist --amp,xtal-->  |
              |                +--> rejection_sampler (spectrum_ram) --^      |
              |                +--> interval_gen --z--> pulse_ctrl --------+  |
              +------------------------------------------------------------|--+
                                           dac_data/dac_wr   sw1[1:0] sw2[1:0]
                                                 |               |
                                             dac_model           |
                                                 | U0 (square)   |
                         +-----------------------+------------------+
                         v                                          v
        sw1[0] -> CR + R0C0 (NaI, 230 ns) -> sw2[0]   sw1[1] -> CR + R0C0 (CsI, 630 ns) -> sw2[1]
                         |                                          |
                         +------------------> output_adder <--------+----> vout
```

`fpga_core` and everything below it is synthesizable. `dac_model`,
`shaping_channel` and `output_adder` are real-valued behavioural models of the
analog board. `signal_generator` joins the two parts and is meant for
simulation.

## The random sources: M sequences and why they have different lengths

Every random word in the design comes from an M sequence (module `mseq`). This
is a Galois LFSR with a primitive feedback polynomial, so it passes through all
2^W − 1 nonzero states before repeating. Each state is used as a uniformly
distributed word. One shift changes only one new bit, so `mseq` applies STEPS
shifts per clock (16 by default) in an unrolled loop, and consecutive words
share no bits.

Three traps shape how the core uses these generators. The testbenches found
all three, and all three are avoided by construction.

* **Sampling stride.** A word taken every k clocks advances the register by
  16·k shifts. If 16·k shares a factor with 2^16 − 1 = 3·5·17·257, the samples
  cycle through only part of the sequence. The interval test runs every 5
  clocks, so it would see only 13 107 of the 65 535 states, and its event
  probability came out as 0.0286 instead of 0.0305. The interval generator is
  therefore clocked once per test (`en = tick`).
* **Words used in pairs.** Two registers of equal length, stepped together,
  repeat their joint pattern after 2^16 − 1 clocks. Each value of one word then
  only ever meets a fixed set of 2^16/2^n values of the other. For the
  rejection sampler this means each channel is tested against the same 64
  count values forever. The accepted shares become quantized and biased: a
  1 : 3 spectrum came out as 1 : 5.6. Words that are combined therefore come
  from registers of different lengths: channel A from a 16-bit register, count
  B from a 17-bit one, and the line choice and crystal choice from 19-bit and
  23-bit ones. Only the low 16 bits are used. The joint period is then far
  longer than any run.
* **Phase-locked reads.** Pulses always start on the same phase of the
  5-clock test period. The amplitude words are therefore read only every 5k
  clocks, and a 16-bit register read that way reaches only a fifth of its
  states. A flat histogram showed one bin 30 % low. The uniform-amplitude word
  therefore comes from an 18-bit register, whose period 2^18 − 1 is coprime
  with 5, as are the 17-, 19- and 23-bit periods. The 12 Gaussian registers
  stay at 16 bits as published. Their sum therefore takes about 13 000
  distinct values at pulse times, which is still a smooth Gaussian at 12-bit
  resolution.

| use | register | polynomial (Galois mask) | advance |
|---|---|---|---|
| interval test | 16 bit | x^16+x^14+x^13+x^11+1 (0xB400) | once per test |
| channel A | 16 bit | 0xB400 | every clock |
| uniform amplitude | 18 bit | x^18+x^11+1 (0x20400) | every clock |
| count B | 17 bit | x^17+x^14+1 (0x12000) | every clock |
| line choice | 19 bit | x^19+x^18+x^17+x^14+1 (0x72000) | every clock |
| crystal choice | 23 bit | x^23+x^18+1 (0x420000) | every clock |
| Gaussian sum | 12 × 16 bit | 0xB400, 12 seeds | every clock |

The polynomials and seeds are chosen here. The publication specifies only
16-bit M sequences.

## Amplitude laws

`cfg.mode` (`mode_e` in `siggen_pkg`) selects one of four sources in
`output_dist`. All amplitudes are 12-bit DAC codes.

**Uniform (`MODE_UNIFORM`).** The top 12 bits of an M-sequence word. This is
the flat distribution that the other methods build on.

**Gaussian (`MODE_GAUSS`).** By the central limit theorem, the sum of 12
uniform words is close to a normal distribution. `gauss_random` adds the
16-bit words of 12 generators that start from different seeds. For 12
summands the centred sum `S − 12·2^15` has mean 0 and standard deviation
exactly 2^16, because each word has variance 2^32/12. The amplitude is

    amp = clamp(mean + ((S − 12·2^15) · sigma) >>> 16, 0, 4095)

so `sigma` is the standard deviation in DAC codes (function `gauss_amp`). The
scaling and clamping are chosen here.

**Photoelectric lines (`MODE_LINES`).** Several X-ray lines are simulated at
once. The default set is three lines: 60, 122 and 250 keV. `line_select`
first picks a line with equal probability: `line = (rnd · 3) >> 16`. It then
compares a second uniform word with that line's threshold. Below the threshold
the photon counts as absorbed in NaI, otherwise in CsI. The amplitude is a
Gaussian around that crystal's peak for the line. The thresholds are the NaI
shares of the published absorption table, scaled by 2^16:

| line | NaI share | threshold `nai_thr` (17 bit) |
|---|---|---|
| 60 keV | 100 % | 65536 (`THR_60KEV`) |
| 122 keV | 75 % | 49152 (`THR_122KEV`) |
| 250 keV | 20 % | 13107 (`THR_250KEV`) |

The thresholds are 17 bits wide so that 100 % can be written. The equal line
probabilities and the per-line peak positions and widths are chosen here. The
peak positions depend on the detector gain and are run-time inputs.

**Loaded spectrum (`MODE_SPECTRUM`).** This mode reproduces a measured
spectrum, including its Compton continuum, by rejection sampling.
`spectrum_ram` holds 1024 channels of 16-bit counts. Each clock,
`rejection_sampler` draws a channel A (top 10 bits of one word) and a count B
uniform over 0 … `cfg.b_range` − 1. B is another word multiplied by
`b_range` and divided by 2^16. One clock later the sampler reads
C = spectrum[A] and accepts A if B < C. The chance of accepting a channel is
proportional to its count, so the accepted channels follow the spectrum. This
holds as long as `b_range` is at least the largest count. Set `b_range` to the
peak count: the acceptance rate is the mean count divided by `b_range`. An accepted channel waits in a one-entry
register (valid/ready). Acceptances that arrive while it is full are
discarded; this does not bias the result because the tries are independent.
The channel, shifted left by 2, becomes the DAC code. The RAM size, the load
port, the scaling of B and the buffering are chosen here.

Outside `MODE_LINES` the crystal is chosen by the same threshold rule, using
one global threshold `cfg.nai_thr` (chosen here).

## When pulses occur

`interval_gen` makes a test strobe every `TEST_DIV` = 5 clocks. At 50 MHz that
is one test per 0.1 µs. At each test it compares a uniform 16-bit word with
`cfg.y_thr` (Y). If the word is below Y, the event strobe `z` is high for one
clock. Each test succeeds independently with p = Y/2^16. The number of tests
from one event to the next is therefore geometric, P(x) = (1 − p)^(x−1)·p,
which is the discrete form of a negative exponential. For Y = 2000,
p = 0.0305 per 0.1 µs, so the mean gap is 3.3 µs. This agrees with the decay
constant of about 0.03 per 0.1 µs in the publication's measured interval
histogram. Y = 2000 and the rule are from the publication; the 50 MHz clock
and TEST_DIV are chosen here.

## Making one pulse: `pulse_ctrl` and the shaping channel

`pulse_ctrl` is a four-state machine:

| state | duration | DAC | switch1 / switch2 of chosen crystal |
|---|---|---|---|
| IDLE | until `z` | 0 | open |
| WAIT | until an amplitude is valid (1 clock, longer only in spectrum mode) | 0 | open |
| SQUARE | `SQ_CYCLES` = 250 (5 µs) | amplitude | closed |
| BLANK | `BLANK_CYCLES` = 250 (5 µs) | 0 | open |

`dac_wr` pulses on the first clock of SQUARE and of BLANK. Events that arrive
outside IDLE are dropped and reported on `missed`; this is the generator's dead
time. `stalled` is high while WAIT waits for the rejection sampler. The widths
and the handling of dead time are chosen here. The publication gives neither.
The 5 µs square lets the slower CsI pulse decay to below 0.1 % before the
falling edge, and the 5 µs blank covers the falling edge's negative pulse.

In each shaping channel, a square wave of height U0 passes through a CR
differentiator (time constant RC) and a unity buffer into an R0C0 integrator.
The output is

    V(t) = U0 · RC/(RC − R0C0) · (exp(−t/RC) − exp(−t/R0C0))

RC plays the role of the scintillator decay constant (230 ns NaI, 630 ns CsI).
R0C0 = 300 ns sets the rise. The pulse peaks at t = ln(RC/R0C0)·RC·R0C0/(RC −
R0C0), which is 262 ns for NaI and 425 ns for CsI. The peak height is 0.320·U0
for NaI and 0.509·U0 for CsI. `shaping_channel` advances this circuit on every
clock edge with the exact exponential solution, so the sampled waveform equals
the formula above. An open switch1 grounds the input, and an open switch2
grounds the output. The adder sums the two channels. Because only one channel
is switched at a time, the output is the NaI term or the CsI term of the
phoswich formula.

## Configuration (`cfg_t`)

| field | meaning | typical value |
|---|---|---|
| `mode` | amplitude law | `MODE_LINES` |
| `y_thr` | interval threshold Y | `Y_DEFAULT` = 2000 |
| `nai_thr` | NaI share outside line mode (of 65536) | 32768 |
| `g_mean`, `g_sigma` | Gaussian mode peak and deviation (DAC codes) | — |
| `b_range` | range of B in spectrum mode (17 bit, up to 65536) | peak count of the loaded spectrum |
| `lines[i]` | `nai_thr`, `nai_mean`, `csi_mean`, `sigma` per line | thresholds as in the table above |

`cfg` is static: change it only between pulses. The spectrum is loaded through
`ram_we`/`ram_waddr`/`ram_wdata`, one channel per clock. The RAM starts
cleared, so spectrum mode produces no pulses until a spectrum is loaded.

## Parameters

| parameter | default | origin |
|---|---|---|
| `RND_W` (random word width) | 16 | publication |
| `N_GAUSS` (summed sequences) | 12 | publication |
| `N_LINES` | 3 | publication (60/122/250 keV) |
| Y | 2000 | publication |
| NaI / CsI decay, forming time | 230 / 630 / 300 ns | publication |
| `DAC_W` | 12 | chosen here |
| `CH_W`, `CNT_W` (spectrum RAM) | 10, 16 (1024 × 16 bit) | chosen here |
| clock, `TEST_DIV` | 50 MHz, 5 | chosen here (one test per 0.1 µs) |
| `SQ_CYCLES`, `BLANK_CYCLES` | 250, 250 | chosen here |
| DAC reference | 3.3 V | chosen here |
| output limit | 3.2 V | publication's maximum output |

## How far to trust it, and where it departs

* The digital core implements the published method: M sequences, a 12-fold
  sum, threshold comparison, rejection sampling and the Y comparison. It is
  checked statistically against the expected distributions. Register sizes,
  the clock, widths and the configuration interface are chosen here.
* M-sequence words are not a perfect random source. Shares measured over
  thousands of pulses can differ from the ideal by a few percent: a 1 : 3
  two-channel spectrum gave 1 : 3.19 over 6000 samples.
* The publication implies one shared random source and "equal-length" series A
  and B. This design deliberately uses registers of different lengths. Without
  them, the rejection sampler and the line split were measurably biased (see
  above).
* Dead time is 10 µs per pulse. The maximum rate is therefore about 99 000
  pulses/s. With Y = 2000 the mean rate is about 75 000/s. The publication
  quotes a measured maximum of about 10 000/s, which Y ≈ 73 reproduces with
  these widths.
* The analog models are ideal: no amplifier gain, offset, noise, bandwidth or
  output impedance. With a 3.3 V DAC and unity adder gain, the largest pulse is
  1.06 V (NaI) or 1.68 V (CsI), short of the 3.2 V the real board reaches. Add
  gain in `output_adder` if absolute levels matter.
* For a periodic test signal of fixed height, use `MODE_GAUSS` with
  `g_sigma = 0` and `y_thr = 65535`. A pulse then starts at the first test
  after each dead time, so the period is 505 clocks.
* The crystal oscillator is not modelled; `clk` is an input.
* How the real board was configured is not published. Here every setting is a
  static input.

## Simulating

Every testbench in `tb/` checks its results, ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/siggen_pkg.sv tb/tb_signal_generator.sv --top-module tb_signal_generator
./obj_dir/Vtb_signal_generator
```

Replace the testbench name to run another one.

| testbench | what it shows |
|---|---|
| `tb_mseq` | maximal period, every nonzero word exactly once, 16-step advance against a reference |
| `tb_gauss_random` | sum against 12 reference LFSRs; mean 0, deviation 2^16, 68 % within 1 σ |
| `tb_line_select` | exact outputs against a model; NaI shares 100/75/20 %, equal lines, clamping |
| `tb_spectrum_ram` | load and read back all channels, read latency |
| `tb_rejection_sampler` | accept = B < C every clock; 1 : 3 : 0 : 2 spectrum reproduced; back-pressure |
| `tb_output_dist` | each mode's output against a model |
| `tb_interval_gen` | test every 5 clocks; p = 0.0305; geometric gaps |
| `tb_pulse_ctrl` | cycle-exact comparison with a reference state machine; stalls and drops |
| `tb_fpga_core` | all four modes through the core, square timing, idle time 5/p clocks |
| `tb_dac_model`, `tb_shaping_channel`, `tb_output_adder` | analog models against closed-form values |
| `tb_workloads` | the published measurements repeated on the analog output with a pulse-height analyser: flat histogram, Gaussian mean and width, interval slope p = Y/2^16 per 0.1 µs after the dead time, and a cyclical signal (Y = 65535, zero width) whose pulses all fall in one channel at a constant period |
| `tb_signal_generator` | whole generator at default parameters: every pulse's analog peak against DAC voltage × shaper gain, zero output between pulses, the line split, a formula spectrum reproduced, stalls, rejections, dropped events and exponential spacing all observed |

The end-to-end test runs about a million clocks in a few seconds; `tb_workloads` takes about ten seconds.
