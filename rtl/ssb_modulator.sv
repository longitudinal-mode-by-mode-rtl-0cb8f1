// ssb_modulator: single sideband modulator with per-sideband ON/OFF and summation.
//
// Shifts the baseband I/Q of the upper sideband up by the rotation angle theta
// and that of the lower sideband down by it, then adds the enabled ones:
//   I'_U = I_U cos + Q_U sin      Q'_U = Q_U cos - I_U sin
//   I'_L = I_L cos - Q_L sin      Q'_L = Q_L cos + I_L sin
//   I' = usb_on*I'_U + lsb_on*I'_L,  Q' = usb_on*Q'_U + lsb_on*Q'_L
// With I = A sin(phi), Q = A cos(phi) this gives A sin(theta + phi) and
// A cos(theta + phi) for the USB, A sin(phi - theta), A cos(phi - theta) for the LSB.
// It is the output half of the single sideband filter, where it restores the
// sideband signals to the baseband of the harmonic, and the core of the
// reference modulation block, which excites a chosen sideband.
//
// Timing: one register, results one clock after the inputs. cos/sin are signed
// 16-bit with full scale 2^15 - 1; products are scaled back by 2^15 and the sums
// saturate to the 18-bit I/Q range.
//
// The four equations and the ON/OFF switches are the paper's (its printed
// equation for I'_L uses I_U, a typo for I_L; its SSBF diagram shows I_L with the
// minus sign used here). The rounding and saturation are this design's choices.
module ssb_modulator
  import mmfb_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  iq_pair_t usb,
  input  iq_pair_t lsb,
  input  trig_t    cos_i,
  input  trig_t    sin_i,
  input  logic     usb_on,
  input  logic     lsb_on,
  output iq_pair_t out
);

  localparam int unsigned SH = TRIG_W - 1;

  logic signed [IQ_W+TRIG_W+1:0] iu, qu, il, ql, si, sq;

  always_comb begin
    iu = (36'(usb.i) * 36'(cos_i) + 36'(usb.q) * 36'(sin_i)) >>> SH;
    qu = (36'(usb.q) * 36'(cos_i) - 36'(usb.i) * 36'(sin_i)) >>> SH;
    il = (36'(lsb.i) * 36'(cos_i) - 36'(lsb.q) * 36'(sin_i)) >>> SH;
    ql = (36'(lsb.q) * 36'(cos_i) + 36'(lsb.i) * 36'(sin_i)) >>> SH;
    si = (usb_on ? iu : '0) + (lsb_on ? il : '0);
    sq = (usb_on ? qu : '0) + (lsb_on ? ql : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.i <= iq_t'(sat(64'(si), IQ_W));
      out.q <= iq_t'(sat(64'(sq), IQ_W));
    end
  end

endmodule
