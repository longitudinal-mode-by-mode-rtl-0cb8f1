// pi_controller: proportional-integral controller for one of the I/Q channels of
// the feedback block.
//
// The proportional term kp*err is computed every 144 MHz clock; the integral term
// accumulates ki*err only on the control clock strobe (250 kHz). Gains are signed
// 18-bit with 12 fraction bits (1.0 = 4096). The integrator is INT_W bits wide and
// saturates; the output kp*err + integral saturates to the 18-bit I/Q range.
// clear empties the integrator (used when the loop is opened or reconfigured).
//
// Timing: out is registered, one clock after err. The paper gives the P and I
// rates and the 144 MHz/250 kHz split; the gain format, the integrator width and
// saturation and the clear input are this design's choices.
module pi_controller
  import mmfb_pkg::*;
#(
  parameter int unsigned INT_W = 26   // integrator width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ctrl_tick,
  input  logic                     clear,
  input  iq_t                      err,
  input  logic signed [GAIN_W-1:0] kp,
  input  logic signed [GAIN_W-1:0] ki,
  output iq_t                      out
);

  logic signed [INT_W-1:0]         integ;
  logic signed [IQ_W+GAIN_W-1:0]   p_term, i_step;

  always_comb begin
    p_term = (36'(err) * 36'(kp)) >>> GAIN_FRAC;
    i_step = (36'(err) * 36'(ki)) >>> GAIN_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      out   <= '0;
    end else begin
      if (clear)          integ <= '0;
      else if (ctrl_tick) integ <= INT_W'(sat(64'(integ) + 64'(i_step), INT_W));
      out <= iq_t'(sat(64'(p_term) + 64'(integ), IQ_W));
    end
  end

endmodule
