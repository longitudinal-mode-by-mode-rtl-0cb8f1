// mmfb_top: FPGA logic of the longitudinal mode-by-mode feedback processor.
//
// The beam signal from a wall current monitor, digitised at 144 MHz, is split
// into N_HARM = 6 harmonic feedback blocks. Each isolates the synchrotron
// sidebands of one harmonic of the revolution frequency, i.e. one or two
// coupled-bunch modes, and drives a correction at that harmonic; the six RF
// signals are summed into the DAC word. A DDS makes the revolution, synchrotron
// and modulation phases from frequency patterns, so every filter follows the
// frequencies through the acceleration.
//
// Outside this module (ports): the ADC and DAC, the 144 MHz clock from the PLL,
// the pattern memory (its words arrive on fpat/hpat with pattern_tick, 5 kHz), the
// control clock strobe (ctrl_tick, 250 kHz), and the control system, which sets
// cfg and writes the LUTs through lut_*.
//
// Timing: all logic on clk; DAC word registered. The end-to-end latency is set
// mostly by the tracking filters (two stages of 32 taps at 32*fs).
module mmfb_top
  import mmfb_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc,
  input  logic                    pattern_tick,
  input  logic                    ctrl_tick,
  input  freq_pattern_t           fpat,
  input  harm_pattern_t           hpat [N_HARM],
  input  harm_cfg_t               cfg  [N_HARM],
  input  logic                    pi_clear,
  input  logic                    lut_we,
  input  logic [2:0]              lut_harm,
  input  lut_sel_e                lut_sel,
  input  logic [LUT_AW-1:0]       lut_addr,
  input  logic [15:0]             lut_data,
  output logic signed [DAC_W-1:0] dac,
  output iq_pair_t                mon_bb  [N_HARM],
  output iq_pair_t                mon_usb [N_HARM],
  output iq_pair_t                mon_lsb [N_HARM],
  output iq_pair_t                mon_fb  [N_HARM],
  output freq_t                   mon_f_rev,
  output freq_t                   mon_f_s,
  output logic                    ready
);

  freq_t  f_rev, f_s, f_mod;
  phase_t ph_rev, ph_s, ph_mod;
  iq_t    rf [N_HARM];
  logic [N_HARM-1:0] rdy;

  dds u_dds (
    .clk, .rst_n, .pattern_tick, .ctrl_tick, .pat(fpat),
    .f_rev, .f_s, .f_mod, .ph_rev, .ph_s, .ph_mod);

  for (genvar k = 0; k < N_HARM; k++) begin : g_harm
    harmonic_fb_block u_hb (
      .clk, .rst_n, .pattern_tick, .ctrl_tick, .adc,
      .ph_rev, .f_rev, .ph_s, .f_s, .ph_mod,
      .cfg(cfg[k]), .hpat(hpat[k]), .pi_clear,
      .lut_we(lut_we && lut_harm == 3'(k)), .lut_sel, .lut_addr, .lut_data,
      .rf(rf[k]), .mon_bb(mon_bb[k]), .mon_usb(mon_usb[k]), .mon_lsb(mon_lsb[k]),
      .mon_fb(mon_fb[k]), .ready(rdy[k]));
  end

  rf_sum #(.N_IN(N_HARM), .SHIFT(1)) u_sum (.clk, .rst_n, .rf, .dac);

  assign mon_f_rev = f_rev;
  assign mon_f_s   = f_s;
  assign ready     = &rdy;

endmodule
