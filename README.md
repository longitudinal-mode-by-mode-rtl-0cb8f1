# Mode-by-mode longitudinal feedback processor (SystemVerilog)

A proton synchrotron with many bunches can develop coupled-bunch oscillations: the
bunches swing in energy/phase at the synchrotron frequency fs, and in the beam
spectrum each coupled-bunch mode shows up as a pair of sidebands, at h·f_rev ± m·fs,
around each revolution harmonic h. This processor damps the modes one by one. For
each of six chosen harmonics it picks the beam signal apart into that harmonic's
upper sideband (USB) and lower sideband (LSB), decides which of them to act on,
and sends back an RF correction at exactly that sideband, so that each mode
gets its own feedback loop. Because f_rev and fs both change during acceleration,
every frequency in the chain follows a programmed frequency pattern, and the
filters that separate the sidebands follow fs.

Everything runs from one 144 MHz clock. The chain for one harmonic is

    ADC ─► DDC (mix down by h·φrev, 5-stage CIC) ─► SSBF (split USB/LSB, track fs,
           remix, select) ─► feedback (reference − filtered, PI) ─► DUC (mix up by
           h·φrev, gain) ─► sum of 6 harmonics ─► DAC

with a shared DDS that produces the revolution, synchrotron and modulation phases.

## Number formats

| quantity | format |
|---|---|
| phase | unsigned 34-bit fraction of a turn |
| frequency word | 32 bits, f = word · 144 MHz / 2^34 |
| cos/sin | signed 16 bit, full scale 32767 |
| I/Q samples | signed 18 bit |
| PI gains Kp, Ki | signed 18 bit, 12 fraction bits (1.0 = 4096) |
| phase offsets (LUT) | unsigned 16-bit fraction of a turn |
| amplitude gains (LUT, pattern) | unsigned 16 bit, 1.0 = 16384 |

A beam component a·cos(h·φrev + θ) appears after the DDC as an I/Q phasor of
magnitude 2a (the 16-bit ADC is widened to 18 bits, which undoes the ½ of the
mixer). With Kp = 1, reference 0 and gain 1.0, the DUC returns the same phasor as
an RF signal of amplitude 2a; the final sum halves it to fit six channels into the
DAC, so the processor has unity gain from ADC to DAC for a single channel.

All shared constants and the pattern/configuration structs are in `mmfb_pkg`.

## Frequencies and phases: `dds`

The revolution frequency pattern is a header word (the starting frequency) followed
by offset words. At every pattern tick (5 kHz) the next words are latched; at every
control tick (250 kHz) the current offset is added to the revolution frequency, so
f_rev follows a piecewise-linear ramp. The synchrotron and modulation frequencies
are taken directly from the pattern. Three 34-bit phase accumulators turn the
frequencies into φrev, φs and φmod. Both ticks are inputs; the pattern memory
itself is outside this RTL.

## Sine and cosine: `cordic`

Every mixer gets its cos/sin from a pipelined rotation-mode CORDIC on the top 20
phase bits: quadrant fold, 16 micro-rotations, gain pre-compensation, 4 guard bits,
latency 18 clocks, error about 1 LSB.

## Down-conversion: `ddc`

The harmonic phase h·φrev plus a phase offset from a LUT (addressed by the
harmonic frequency h·f_rev, to cancel the cable and cavity delay at that
frequency) drives a CORDIC; the ADC sample is multiplied by cos and sin and both
products go through a CIC low-pass filter with 5 stages, decimation 2 and
differential delay 256 (`cic_filter`). The result is the slow complex envelope of
harmonic h: a DC value for the carrier and phasors turning at ±m·fs for the
sidebands. The CIC response at offset f is (sin(π·f·512/fclk)/(512·sin(π·f/fclk)))^5;
its first null is at 281 kHz, so neighbouring harmonics (≈190 kHz away) are
attenuated by ~40 dB, and sidebands at a few hundred Hz pass unchanged.

## Sideband separation: `ssbf`, `x32_clock`, `ssb_modulator`

This is the heart of the design. With c = cos(m·φs + offset) and s = sin(...),
the baseband I/Q is demodulated four ways:

    D_U = I c − Q s     S_U = Q c + I s      (USB moved to DC)
    S_L = I c + Q s     D_L = Q c − I s      (LSB moved to DC)

After this, the chosen sideband sits at DC and everything else (the carrier, the
other sideband) sits at multiples of m·fs. A narrow low-pass removes them: a CIC
with 2 stages and differential delay 32, clocked not by the system clock but by an
enable that fires 32 times per synchrotron period (`x32_clock`, derived from the
top 5 bits of the m·φs phase). Its notches are therefore at exact multiples of
m·fs and move with the fs pattern — a "frequency tracking" filter.

The filtered USB and LSB phasors are then put back at their sideband frequencies
(`ssb_modulator`):

    I'_U = I_U c + Q_U s   Q'_U = Q_U c − I_U s
    I'_L = I_L c − Q_L s   Q'_L = Q_L c + I_L s

each with its own ON/OFF switch, and summed. Each sideband has its own phase-offset
LUT addressed by m·fs. The USB and LSB phasors are also brought out as monitors.

## Feedback and excitation: `fb_block`, `pi_controller`, `ref_modulator`

The reference I/Q comes from the pattern at each pattern tick. It can be used as
is, or modulated (`ref_modulator`: the reference fed into the same SSB modulator,
driven by φmod, as USB and/or LSB) to excite a chosen sideband on purpose. The
error reference − filter output goes through one PI controller per channel: the
proportional term every clock, the integral updated at each control tick.

## Up-conversion and sum: `duc`, `rf_sum`

The feedback phasor is turned back into RF at harmonic h: I·cos + Q·sin of h·φrev,
scaled by a gain LUT addressed by h·f_rev (to flatten the cavity response) and by
a gain pattern. `rf_sum` adds the six channels, halves and saturates to 16 bits.

## Structure

- `harmonic_fb_block`: one channel (DDC → SSBF → feedback → DUC), settings in a
  `harm_cfg_t` (h, m, sideband and modulation switches, Kp, Ki), pattern words in
  a `harm_pattern_t`; its four LUTs share one write port selected by `lut_sel`.
- `mmfb_top`: DDS, six channels, sum. Patterns, ticks, settings, LUT writes, ADC
  samples and DAC word are ports; per-stage I/Q monitors are outputs.

## Latencies

CORDIC 18 clocks; the DDC's local oscillator lags its phase input by 20 clocks;
CIC output 2N clocks after the input that completes a decimation group; the
clearing sweep after reset takes M clocks, during which `ready` is low (the top's
`ready` is the AND of all).

## Where this departs from, or fills in, the published description

- All word widths other than the 34-bit phase, 16-bit ADC/DAC and 32-bit pattern
  words; LUT depth (256) and addressing (a bit slice of the frequency word); the
  gain and offset formats; reset behaviour; the halving in the sum.
- The second modulator equation for the LSB is printed with I_U; this design uses
  I_L, which is what a lower-sideband modulator needs.
- The SSBF uses one CORDIC for the remodulation phase of both sidebands.
- The "two-stage tracking CIC" is read as a CIC with two stages.
- Waveform recording at each stage is not built; the stage I/Q are brought out as
  monitor ports instead. The ADC, DAC, PLL, DDR3 pattern memory and control
  processor are outside this RTL.

## Testbenches

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=… failures=…`. `tb_mmfb_top` runs the full design at its default
parameters (six channels, h = 5..10, real tick rates) with a beam containing a
carrier and two sidebands, checks the sideband monitors, the reference modulation,
the integral path, the LUT port and the frequency ramp, and counts that each of
these happened. fs in the tests is raised to about 17.6 kHz so that a tracking
filter settles in a few tens of thousands of clocks; the expected sideband
amplitudes include the DDC CIC response at that frequency.

To simulate one, e.g.:

    verilator --binary --timing --top-module tb_mmfb_top -Irtl -y rtl \
        +libext+.sv rtl/mmfb_pkg.sv tb/tb_mmfb_top.sv -o sim && obj_dir/sim
