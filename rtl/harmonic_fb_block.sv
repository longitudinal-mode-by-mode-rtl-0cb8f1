// harmonic_fb_block: the complete feedback path for one harmonic of the
// revolution frequency, DDC -> SSBF -> feedback control -> DUC.
//
// The DDC brings harmonic h of the beam signal to baseband, the SSBF keeps only
// its synchrotron sidebands (m*fs above and below), the feedback block compares
// them with the (optionally modulated) I/Q reference through PI controllers, and
// the DUC turns the result back into an RF signal at h*f_rev, scaled by the gain
// LUT and the gain pattern. The processor holds N_HARM = 6 of these blocks, all
// driven by the same DDS phases and beam samples; their RF outputs are summed
// for the DAC.
//
// Interface: cfg holds the static settings (h, m, sideband and modulation
// switches, PI gains); hpat the pattern words (I/Q reference, gain), taken on
// pattern_tick; the LUT write port selects one of the four LUTs with lut_sel.
// Monitor outputs give the DDC baseband and the USB/LSB amplitudes at the tracking
// CIC outputs (what the processor records for the sideband amplitude plots).
//
// Timing: see the sub-blocks; every stage runs on the 144 MHz clock with enables.
// The chain follows the paper's processor block diagram; the interface bundling
// is this design's.
module harmonic_fb_block
  import mmfb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pattern_tick,
  input  logic              ctrl_tick,
  input  logic signed [ADC_W-1:0] adc,
  input  phase_t            ph_rev,
  input  freq_t             f_rev,
  input  phase_t            ph_s,
  input  freq_t             f_s,
  input  phase_t            ph_mod,
  input  harm_cfg_t         cfg,
  input  harm_pattern_t     hpat,
  input  logic              pi_clear,
  input  logic              lut_we,
  input  lut_sel_e          lut_sel,
  input  logic [LUT_AW-1:0] lut_addr,
  input  logic [15:0]       lut_data,
  output iq_t               rf,
  output iq_pair_t          mon_bb,
  output iq_pair_t          mon_usb,
  output iq_pair_t          mon_lsb,
  output iq_pair_t          mon_fb,
  output logic              ready
);

  iq_pair_t bb, filt, ref_used, fb;
  logic     bb_valid, sb_valid, rdy_ddc, rdy_ssbf, rdy_duc;
  freq_t    f_harm;
  phase_t   ph_harm;

  ddc u_ddc (
    .clk, .rst_n, .adc, .ph_rev, .f_rev, .h(cfg.h), .f_harm, .ph_harm,
    .iq(bb), .iq_valid(bb_valid),
    .lut_we(lut_we && lut_sel == LUT_DDC_PHASE), .lut_addr, .lut_data, .ready(rdy_ddc));

  ssbf u_ssbf (
    .clk, .rst_n, .bb, .bb_valid, .ph_s, .f_s, .m(cfg.m), .usb_on(cfg.usb_on), .lsb_on(cfg.lsb_on),
    .usb_lut_we(lut_we && lut_sel == LUT_USB_PHASE),
    .lsb_lut_we(lut_we && lut_sel == LUT_LSB_PHASE),
    .lut_addr, .lut_data, .usb_iq(mon_usb), .lsb_iq(mon_lsb), .sb_valid, .out(filt),
    .ready(rdy_ssbf));

  fb_block u_fb (
    .clk, .rst_n, .pattern_tick, .ctrl_tick,
    .ref_pat('{i: hpat.ref_i, q: hpat.ref_q}), .filt, .ph_mod,
    .mod_on(cfg.mod_on), .usb_mod_on(cfg.usb_mod_on), .lsb_mod_on(cfg.lsb_mod_on),
    .pi_clear, .kp(cfg.kp), .ki(cfg.ki), .ref_used, .fb);

  duc u_duc (
    .clk, .rst_n, .pattern_tick, .fb, .ph_rev, .f_rev, .h(cfg.h), .gain_pat(hpat.gain),
    .lut_we(lut_we && lut_sel == LUT_DUC_GAIN), .lut_addr, .lut_data, .rf, .ready(rdy_duc));

  assign mon_bb = bb;
  assign mon_fb = fb;
  assign ready  = rdy_ddc && rdy_ssbf && rdy_duc;

endmodule
