# Intermodulation lockin analyzer: SystemVerilog RTL

A weakly nonlinear system driven by two pure tones at f1 and f2 answers not
only at f1 and f2 but at every mixing product k1·f1 + k2·f2. Those
intermodulation products carry the information about the nonlinearity. The
intermodulation lockin analyzer (ImLA) measures them. A classic lockin cannot,
because a mixing product has no reference signal of its own, so its phase is
not defined.

The trick is to put every frequency on one grid. Choose a base frequency Δf and
make both drive tones integer multiples of it. Then every mixing product is an
integer multiple of Δf too. A measurement window of T = 1/Δf holds a whole
number of periods of every one of them. Synthesise drive and references from
the same sample clock, and one shared time origin gives every product a
well-defined phase.

The RTL here is the FPGA logic of such an instrument. It was written after the
published description of the ImLA (Tholén et al., "The Intermodulation Lockin
Analyzer"), and it follows that description's structure and numbers:
- a 12-bit ADC at 61.4 MSa/s and a two-channel 16-bit DAC,
- 32 reference frequencies, each with an in-phase and a quadrature reference,
  giving 64 Fourier sums computed in parallel,
- a CORDIC that gives amplitude and phase of one frequency for real-time
  feedback, updated up to 1024 times per window,
- a time-domain mode that streams the response downsampled by 16,
- an external trigger, a counter input and a 10 MHz sync output.

Everything the description leaves open was decided here. The sections below
say what: internal widths, the register map, the decimation filter, buffering,
how the sync output is made, and how feedback is scaled.

## Signal path

```
                    host register port (CPU / ethernet side, not included)
                                   |
                              host_regs ---- cfg, tuning words --------------+
                                   ^  sums, CORDIC result, counter, stream    |
 ext_trig_in --trig_sync--+        |                                          |
                          v        |                                          v
                     window_ctrl --+-- first/last, fb_first/fb_last flags  32 x nco
                          |                                                   | cos, sin
 adc_data --reg-----------+--------------------> 32 x mixer <-----------------+
                          |                                  |                |
                          |                       32 x fourier_acc (64 sums)  |
                          |                                  |                |
                          |        products of tone fb_sel -> fourier_acc     |
                          |                                   (short windows) |
                          |                                  -> cordic -> A, phi
                          |                                  -> feedback_out -> dac_feedback
                          |                                                   |
                          +--> td_decimator (/16) -> stream_fifo -> host   drive_synth
                                                                              -> dac_drive
 counter_trig_in -> trig_sync -> event_counter -> host
 clk -> sync_clk_gen -> sync_out (10 MHz)
```

Every clock is one sample. The sample clock is the master clock. Drive,
references, windows and the sync output all derive from it, and that is the
synchronisation the method relies on.

## Frequencies, phases and the base-frequency grid

Each of the 32 oscillators (`nco`) is a 32-bit phase accumulator. The host
writes its tuning word `ftw`, and the frequency is f = ftw / 2^32 · fs. The top
10 bits of the phase address a 1024-entry sine table of 16-bit values (peak
32767). The oscillator reads the table once for sin (Q) and again a quarter
table ahead for cos (I). The next 12 phase bits refine both values by a
first-order Taylor step: sin(a + d) ≈ sin(a) + d·cos(a) and cos(a + d) ≈
cos(a) − d·sin(a). A bare 10-bit phase would leave spurs near −60 dBc. With
the correction, the output stays within about 2 LSB of the ideal 16-bit value
(spurs below about −85 dBc). This keeps the references and the drive below
the paper's −75 dB distortion figure.

The table has no data file. It is computed at elaboration time by an integer
CORDIC rotation in `imla_pkg` (`make_sin_lut`). Entry k is
round(32767 · sin(2π k / 1024)).

The RTL does not force frequencies onto a grid; the host does that. Write
`ftw_i = m_i · ftw_base` with integer m_i. With a window of N samples and
`ftw_base = 2^32 / N`, every tone has exactly m_i periods per window. That
division is exact only when N is a power of two. For other N, the rounding of
`ftw_base` leaves a tiny frequency error, which shows up as leakage. Example
for the atomic-force-microscopy case (the paper's application):
- a resonance near 350 kHz and tones about 500 Hz apart,
- N = 2^17 gives Δf = 468.4 Hz.

While `run` is low, all phases are held at zero. The first sample after `run`
rises is therefore sample 0 of every oscillator and of the first window. The
drive, which is built from oscillators 0 and 1, starts at the same instant. The
phases then run freely. An external trigger restarts the windows but not the
phases, so the measured phases stay referenced to the continuous drive.

## Windows and Fourier sums

`window_ctrl` counts samples. It marks the first and last sample of each lockin
window (N = `win_len` samples, T = N/fs). It also marks the first and last
sample of the shorter feedback windows, which are N >> `fb_div` samples long
(`fb_div` 0..10). Feedback windows are aligned to each lockin-window start. A
rising edge on `ext_trig_in`, or the host's soft trigger, makes the next sample
the first of a new window. The partial sums are then dropped.

The flags travel with the sample through the pipeline:

| clock | stage |
|---|---|
| c | `window_ctrl` flags the slot; `adc_data` is sampled into a register; the oscillator phase is n·ftw |
| c+1 | registered references and registered sample meet at the mixers |
| c+2 | products registered; `fourier_acc` adds them (a `first` flag restarts the sum) |
| c+3 | after a `last` flag: the sums are updated, and `sums_irq` and the frame counter pulse |

Each accumulator is an integrate-and-dump. It is the "low-pass filter" of the
block diagram, made exact for the integer-period windows. The sums are raw:

    sum_I(k) = Σ_{n=0}^{N-1} x[n] · round(32767 · cos(2π · phase_k[n]))

Here x is the 12-bit ADC code. Dividing by 32767·N gives the paper's
V_x = (1/T)∫V cos. A tone a·cos(2π m n / N) at bin m gives sum_I ≈ a·32767·N/2.
Sums are 52 bits wide, and no window of up to 2^24−1 samples can overflow them.
The results hold until the next window closes. The host has N clocks to read
them and uses the frame counter to notice when a window closed during the
read-out.

## Feedback: CORDIC, gain and bias

The products of one selected frequency (`fb_sel`, oscillator 0 by default) go
to one more accumulator, which uses the short feedback windows. At the end of
each feedback window, `cordic` converts the sums to amplitude and phase:
- vectoring mode, one micro-rotation per clock, 30 rotations,
- the input is first folded into the right half plane by adding π,
- the gain is compensated by 1/K in 0.16 fixed point.

The amplitude is accurate to about 1e-4 relative, the phase to better than 2e-6 turn.
A result is ready 31 clocks after the window closes. A window shorter than 32
samples therefore skips updates: the maximum rate of 1024/T needs N ≥ 32768.

`feedback_out` drives the second DAC channel:

    dac_feedback = sat16( V_b + ((P · A) >>> p_shift) )

P is a signed 16-bit gain. `p_shift` (0..63) scales the raw amplitude, which
grows with the window length, into DAC codes. The output holds between updates
and follows changes of V_b within one clock. The block diagram shows only a
proportional path, so there is no integrator. Set-point control would be done
with V_b and the sign of P.

## Drive

`drive_synth` drives the first DAC channel:

    dac_drive = sat16( (A1 · cos_f1 + A2 · cos_f2) >>> 15 )

A1 and A2 are Q1.15. The output is zero while `run` is low, and it does not
clip when |A1| + |A2| ≤ 1. The drive uses the cosine outputs of oscillators 0
and 1. The drive is part of the same synchronous system as the analysis, so a
loop-back measures the analyzer's own distortion.

## Time-domain mode

With `mode` = 1 (and `run` = 1), `td_decimator` sums blocks of 16 consecutive
samples at full 16-bit precision. It delivers 3.84 MSa/s, the integer factor
nearest to the 3.9 MSa/s of the original instrument. The blocks go into
`stream_fifo`, a 1024-word buffer that the host empties by reading
`REG_STREAM`. If the host falls behind, the newest sample is dropped and a
sticky overflow bit is set, so a gap in the stream is always visible. The
lockin sums keep running in this mode.

## Digital I/O

- `trig_sync`: two-flip-flop synchroniser and rising-edge detector, used for
  both trigger inputs. Latency is 3 clocks.
- `event_counter`: counts rising edges of `counter_trig_in` (32 bits). The host
  reads it and clears it by writing the register.
- `sync_clk_gen`: a 10 MHz square wave from a 32-bit phase accumulator. Its mean
  frequency is exact to 0.015 Hz at 61.4 MHz. Its edges fall on sample-clock
  edges, so it has up to one sample period of jitter. A board would clean it
  with a PLL, which is outside this logic.

## Host register map

The port has 32-bit words and a 9-bit word address. A write takes effect at the
clock edge. Read data is registered and valid one clock after `host_re`.
Addresses are in `imla_pkg`.

| addr | name | contents |
|---|---|---|
| 0x000 | CTRL | [0] run, [1] mode (0 lockin, 1 time-domain), [2] soft trigger (pulse) |
| 0x001 | WIN_LEN | N, samples per lockin window (24 bits; 0 reads as 1) |
| 0x002 | FB | [3:0] fb_div (feedback window N >> fb_div, capped at 10), [12:8] fb_sel |
| 0x003 | DRIVE | [15:0] A1, [31:16] A2 (Q1.15) |
| 0x004 | FB_GAIN | [15:0] P, [21:16] p_shift |
| 0x005 | BIAS | [15:0] V_b |
| 0x006 | STATUS | [15:0] frame count, [16] stream overflow (write 1 to clear), [31:17] stream level |
| 0x007 | COUNTER | event count (write clears) |
| 0x008 | STREAM | read pops one sample: [15:0] sample, [31] buffer was empty |
| 0x009/0x00A | FB_AMP | CORDIC amplitude, low and high word |
| 0x00B | FB_PHASE | CORDIC phase, 2^32 = one turn |
| 0x040 + k | FREQ k | tuning word of oscillator k (k = 0, 1 are the drive tones) |
| 0x100 + 4k + 2q + h | SUM | sum of oscillator k; q = 0 for I, q = 1 for Q; h = 0 for the low word, h = 1 for the sign-extended high word |

## Parameters and sizes

| item | value | origin |
|---|---|---|
| ADC / DAC width | 12 / 16 bits | original instrument |
| frequencies | 32 (`N_TONES`, `imla_top.NT`) | original instrument |
| sample rate | 61.4 MHz (`F_CLK_HZ`) | original instrument |
| sync output | 10 MHz (`F_SYNC_HZ`) | original instrument |
| feedback divider | up to 1024 | original instrument |
| phase / table | 32-bit phase, 1024 × 16-bit table, 12-bit Taylor correction | this design |
| window | up to 2^24−1 samples (3.66 Hz minimum bandwidth) | this design |
| sums | 52 bits | this design |
| CORDIC | 30 iterations | this design |
| decimation | 16 | this design (nearest integer to 61.4/3.9) |
| stream buffer | 1024 words | this design |

## Departures from the original description

- The time-domain rate is 3.84 MSa/s, not 3.9 MSa/s (61.4/3.9 is not an
  integer).
- The feedback rate can be set only to 2^k/T, not to any value up to 1024/T.
- Every block's insides are this design's own, built as the simplest logic that
  does the described job: oscillators, filters (integrate-and-dump), CORDIC
  form, feedback scaling, counter and sync output. The original gives their
  function, not their construction.
- The embedded CPU, the ethernet link and the converters are not part of this
  RTL. The register port and the converter buses are the top-level ports where
  they connect.
- Proposed extensions of the instrument, such as arbitrary multi-tone drive
  waveforms, are not built. The 32 oscillators could be summed into the drive
  in the same way as the two drive tones are.

## Files

`rtl/` holds one module or package per file:
- `imla_pkg`: widths, sine table, CORDIC constants, configuration struct,
  register map,
- `nco`, `mixer`, `fourier_acc`, `window_ctrl`, `cordic`, `feedback_out`,
  `drive_synth`, `td_decimator`, `stream_fifo`, `trig_sync`, `event_counter`,
  `sync_clk_gen`, `host_regs`,
- `imla_top`, which wires them together.

`tb/` has one self-checking testbench per module (`tb_<module>`). Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

`tb_imla_top` runs the whole design at its default parameters. It closes the
loop with a cubic-nonlinearity model of a device, y = u − u³/2^24, so the
response carries intermodulation products. It sets 32 tones on a 1024-sample
grid (drive at bins 40 and 44) and checks all 64 sums of six windows against
sums it computes itself from the samples it applied. One of those windows is
restarted by the external trigger, and in another the device is linear. The
test also checks:
- that the product at 2f1−f2 appears only with the nonlinearity,
- every CORDIC update and the feedback DAC value,
- the counter and the sync frequency,
- the time-domain stream and its overflow.

It counts each of these mechanisms and fails if one never occurred.

`tb_lockin_workloads` runs the two lockin set-ups that matter in practice,
also at default parameters and with full-length windows:
- intermodulation AFM: N = 2^17 samples, drive tones at 747 and 748 times
  fs/2^17 (about 350 kHz, 468 Hz apart), references around them, and feedback
  at 1024 updates per window. Every feedback update is checked. The products at
  2f1−f2 and 2f2−f1 must stand out of the empty bins. The drive DAC words must
  carry no spur within 75 dB of one tone (measured: 79.9 dB).
- 1 kHz measurement bandwidth: N = 61,400 samples. This is not a power of two,
  so the tuning words are rounded, round(m · 2^32 / N). The model follows the
  exact 32-bit phase. Two windows are checked back to back.
- time-domain stream: the AFM drive with the stream on for one whole beat of
  the two tones (2^17 samples, 8192 stream words). The host reads the words
  as they arrive. Every word must match the sum of its 16 samples, with none
  missing and no overflow.

Its model uses ideal cos/sin of the full phase, independent of the sine table.
It takes about ten seconds.

To simulate with Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_imla_top \
        -y rtl -y tb +libext+.sv rtl/imla_pkg.sv tb/tb_imla_top.sv -o sim
    ./obj_dir/sim

Replace `tb_imla_top` with any other testbench name. The whole-design test
takes a few seconds. To change the number of frequencies, the widths or the
table size, edit `imla_pkg`. `imla_top.NT` can use fewer oscillators than
`N_TONES`; unused sum registers then read as zero.
