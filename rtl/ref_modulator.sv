// ref_modulator: reference pattern modulation for beam excitation measurements.
//
// The I/Q reference of the feedback block can be modulated at the modulation
// frequency so that the loop excites a chosen synchrotron sideband. A CORDIC turns
// the modulation phase from the DDS into cos/sin; the reference is applied to both
// inputs of a single sideband modulator (the same structure as in the SSBF), the
// USB and LSB results are enabled by usb_mod_on / lsb_mod_on and added, and
// mod_on selects between this modulated reference and the plain reference.
//
// Timing: the modulated path has the CORDIC (18 clocks) then the modulator (1)
// behind the modulation phase; the reference itself changes only at the pattern
// clock. The output register adds one clock in both paths.
//
// The structure and switches follow the paper's modulation block diagram and its
// statement that the mixing is the one of the SSBF modulator. (The diagram's sign
// at the I(LSB) adder could not be read unambiguously; the SSBF equation is used.)
module ref_modulator
  import mmfb_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  iq_pair_t ref_iq,
  input  phase_t   ph_mod,
  input  logic     mod_on,
  input  logic     usb_mod_on,
  input  logic     lsb_mod_on,
  output iq_pair_t out
);

  localparam int unsigned CPW = 20;
  trig_t    c, s;
  iq_pair_t modulated;

  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic (
    .clk, .rst_n, .phase(ph_mod[PHASE_W-1 -: CPW]), .cos_o(c), .sin_o(s));

  ssb_modulator u_mod (
    .clk, .rst_n, .usb(ref_iq), .lsb(ref_iq), .cos_i(c), .sin_i(s),
    .usb_on(usb_mod_on), .lsb_on(lsb_mod_on), .out(modulated));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= mod_on ? modulated : ref_iq;
  end

endmodule
