// dds: direct digital synthesis of the frequency and phase signals.
//
// Every mixer of the processor is driven from three phases made here: the
// revolution phase (multiplied by the harmonic number in the DDC and DUC), the
// synchrotron phase (multiplied by the motion type m in the SSBF, and driving the
// x32 clock of the tracking filters) and the modulation phase (reference
// modulation). Each is a 34-bit phase accumulator that adds its 32-bit frequency
// word every 144 MHz clock: f = word * 144 MHz / 2^34.
//
// The frequency words come from the pattern memory, one set per pattern clock
// (5 kHz). The synchrotron and modulation words are used as they are. The
// revolution pattern starts with a header holding the initial frequency; the words
// after it are frequency offsets, and a frequency accumulator adds the current
// offset to the revolution frequency at every control clock (250 kHz), so the
// frequency ramps smoothly between pattern words.
//
// Interface: pattern_tick and ctrl_tick are one-clock strobes in the 144 MHz
// domain; pat is sampled on pattern_tick. A header load sets f_rev and clears the
// offset; when a control tick coincides with a pattern tick the accumulation uses
// the offset held before the load. Phases update every clock, one clock after a
// frequency word changes.
//
// The 34-bit phase accumulators, 32-bit pattern words, header/offset format and
// the two strobe rates are the paper's; strobe priority and the offset's two's
// complement format are choices of this design.
module dds
  import mmfb_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            pattern_tick,
  input  logic            ctrl_tick,
  input  freq_pattern_t   pat,
  output freq_t           f_rev,
  output freq_t           f_s,
  output freq_t           f_mod,
  output phase_t          ph_rev,
  output phase_t          ph_s,
  output phase_t          ph_mod
);

  logic signed [FREQ_W-1:0] rev_ofs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_rev   <= '0;
      rev_ofs <= '0;
      f_s     <= '0;
      f_mod   <= '0;
    end else begin
      if (pattern_tick) begin
        f_s   <= pat.fs_word;
        f_mod <= pat.fmod_word;
      end
      if (pattern_tick && pat.rev_is_header) begin
        f_rev   <= pat.rev_word;
        rev_ofs <= '0;
      end else begin
        if (pattern_tick) rev_ofs <= $signed(pat.rev_word);
        if (ctrl_tick)    f_rev   <= f_rev + freq_t'(rev_ofs);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_rev <= '0;
      ph_s   <= '0;
      ph_mod <= '0;
    end else begin
      ph_rev <= ph_rev + phase_t'(f_rev);
      ph_s   <= ph_s   + phase_t'(f_s);
      ph_mod <= ph_mod + phase_t'(f_mod);
    end
  end

endmodule
