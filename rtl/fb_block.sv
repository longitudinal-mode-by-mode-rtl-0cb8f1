// fb_block: feedback control block of one harmonic.
//
// The I/Q reference is loaded from the pattern memory at every pattern clock and
// optionally modulated (ref_modulator). The error reference - filter output is
// formed separately for I and Q and each goes through a PI controller whose P
// path runs at 144 MHz and whose integrator steps at the control clock (250 kHz).
// The controller outputs are the feedback I/Q sent to the DUC.
//
// Timing: error register (1) and PI output register (1): the feedback output
// follows the filter output by two clocks. The reference register loads on
// pattern_tick; the integrators clear while pi_clear is high.
//
// Follows the paper's feedback block diagram (reference with "+", filter output
// with "-", one PI controller per channel) and rates; number formats are this
// design's.
module fb_block
  import mmfb_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pattern_tick,
  input  logic                     ctrl_tick,
  input  iq_pair_t                 ref_pat,      // pattern words, taken on pattern_tick
  input  iq_pair_t                 filt,         // SSBF output
  input  phase_t                   ph_mod,
  input  logic                     mod_on,
  input  logic                     usb_mod_on,
  input  logic                     lsb_mod_on,
  input  logic                     pi_clear,
  input  logic signed [GAIN_W-1:0] kp,
  input  logic signed [GAIN_W-1:0] ki,
  output iq_pair_t                 ref_used,     // reference after modulation
  output iq_pair_t                 fb
);

  iq_pair_t ref_q, err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            ref_q <= '0;
    else if (pattern_tick) ref_q <= ref_pat;
  end

  ref_modulator u_refmod (
    .clk, .rst_n, .ref_iq(ref_q), .ph_mod, .mod_on, .usb_mod_on, .lsb_mod_on, .out(ref_used));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err <= '0;
    end else begin
      err.i <= iq_t'(sat(64'(ref_used.i) - 64'(filt.i), IQ_W));
      err.q <= iq_t'(sat(64'(ref_used.q) - 64'(filt.q), IQ_W));
    end
  end

  pi_controller u_pi_i (.clk, .rst_n, .ctrl_tick, .clear(pi_clear), .err(err.i), .kp, .ki, .out(fb.i));
  pi_controller u_pi_q (.clk, .rst_n, .ctrl_tick, .clear(pi_clear), .err(err.q), .kp, .ki, .out(fb.q));

endmodule
