// ssbf: single sideband filter - isolates the upper and lower synchrotron sidebands
// of one harmonic and returns them, without the carrier, at the harmonic baseband.
//
// Input is the baseband I/Q of a harmonic from the DDC. Its synchrotron sidebands
// sit at +m*fs (USB) and -m*fs (LSB), next to a large carrier at 0 Hz.
//  1. Demodulator. Rotation angles are m times the synchrotron phase plus a phase
//     offset, from a USB LUT and an LSB LUT both addressed by m*fs. With cosU/sinU
//     and cosL/sinL from two CORDICs:
//       D_U = I cosU - Q sinU   S_U = Q cosU + I sinU
//       S_L = I cosL + Q sinL   D_L = Q cosL - I sinL
//     which moves the selected sideband to 0 Hz and everything else to multiples
//     of fs.
//  2. Frequency tracking CIC: four two-stage CIC filters (differential delay 32)
//     sampled by the x32 clock, 32 ticks per synchrotron period, so that their
//     notches sit on every multiple of fs whatever fs is. Their outputs are the
//     sideband amplitudes I_U = CIC(D_U), Q_U = CIC(S_U), I_L = CIC(S_L),
//     Q_L = CIC(D_L).
//  3. Modulator: ssb_modulator with a CORDIC of m times the synchrotron phase (no
//     offset) moves the two sidebands back to +-m*fs and adds those enabled by
//     usb_on/lsb_on.
//
// Timing: the demodulator takes one DDC output every other clock (iq_valid), the
// tracking filters update at 32*fs, the modulator runs every clock. Phase path:
// m multiply (1), LUT (1), offset add (1), CORDIC (18). The constant latency is a
// phase shift absorbed by the LUTs.
//
// Interface: LUT writes for the USB (usb_lut_we) and LSB (lsb_lut_we) tables;
// entries are 16-bit fractions of a turn. usb_iq/lsb_iq are the sideband
// amplitudes (tracking CIC outputs, for monitoring); out is the SSBF output.
//
// Follows the paper's SSBF diagram and equations, including the use of m, the
// separate LUTs and the x32 clock; it uses one modulator CORDIC where the diagram
// draws two fed with the same phase. Widths and LUT addressing are this design's.
module ssbf
  import mmfb_pkg::*;
#(
  parameter int unsigned LUT_ALSB = 9   // m*fs bit used as LUT address bit 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  iq_pair_t          bb,
  input  logic              bb_valid,
  input  phase_t            ph_s,
  input  freq_t             f_s,
  input  logic [MNUM_W-1:0] m,
  input  logic              usb_on,
  input  logic              lsb_on,
  input  logic              usb_lut_we,
  input  logic              lsb_lut_we,
  input  logic [LUT_AW-1:0] lut_addr,
  input  logic [POFS_W-1:0] lut_data,
  output iq_pair_t          usb_iq,
  output iq_pair_t          lsb_iq,
  output logic              sb_valid,
  output iq_pair_t          out,
  output logic              ready
);

  localparam int unsigned CPW = 20;
  localparam int unsigned SH  = TRIG_W - 1;

  phase_t            ph_m, ph_m_d, ph_u, ph_l;
  freq_t             f_m;
  logic [POFS_W-1:0] ofs_u, ofs_l;
  trig_t             cu, su, cl, sl, cm, sm;
  logic              tick, rdy_u, rdy_l;
  logic [3:0]        rdy_c, v_c;
  iq_t               d_u, s_u, s_l, d_l;
  iq_t               c_out [4];

  // m times the synchrotron phase and frequency, then the offsets.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_m   <= '0;
      f_m    <= '0;
      ph_m_d <= '0;
      ph_u   <= '0;
      ph_l   <= '0;
    end else begin
      ph_m   <= phase_t'(ph_s * PHASE_W'(m));
      f_m    <= freq_t'(f_s * FREQ_W'(m));
      ph_m_d <= ph_m;
      ph_u   <= ph_m_d + {ofs_u, {(PHASE_W - POFS_W){1'b0}}};
      ph_l   <= ph_m_d + {ofs_l, {(PHASE_W - POFS_W){1'b0}}};
    end
  end

  offset_lut #(.FW(FREQ_W), .AW(LUT_AW), .DW(POFS_W), .ALSB(LUT_ALSB), .INIT('0)) u_lut_usb (
    .clk, .rst_n, .freq(f_m), .data(ofs_u),
    .we(usb_lut_we), .waddr(lut_addr), .wdata(lut_data), .ready(rdy_u));
  offset_lut #(.FW(FREQ_W), .AW(LUT_AW), .DW(POFS_W), .ALSB(LUT_ALSB), .INIT('0)) u_lut_lsb (
    .clk, .rst_n, .freq(f_m), .data(ofs_l),
    .we(lsb_lut_we), .waddr(lut_addr), .wdata(lut_data), .ready(rdy_l));

  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic_usb (
    .clk, .rst_n, .phase(ph_u[PHASE_W-1 -: CPW]), .cos_o(cu), .sin_o(su));
  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic_lsb (
    .clk, .rst_n, .phase(ph_l[PHASE_W-1 -: CPW]), .cos_o(cl), .sin_o(sl));
  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic_mod (
    .clk, .rst_n, .phase(ph_m[PHASE_W-1 -: CPW]), .cos_o(cm), .sin_o(sm));

  // Single sideband demodulator, one result per baseband sample.
  function automatic iq_t mix2(input iq_t a, input trig_t ca, input iq_t b, input trig_t cb,
                               input logic sub);
    logic signed [IQ_W+TRIG_W+1:0] p;
    p = sub ? (36'(a) * 36'(ca) - 36'(b) * 36'(cb)) : (36'(a) * 36'(ca) + 36'(b) * 36'(cb));
    return iq_t'(sat(64'(p >>> SH), IQ_W));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_u <= '0;
      s_u <= '0;
      s_l <= '0;
      d_l <= '0;
    end else if (bb_valid) begin
      d_u <= mix2(bb.i, cu, bb.q, su, 1'b1);
      s_u <= mix2(bb.q, cu, bb.i, su, 1'b0);
      s_l <= mix2(bb.i, cl, bb.q, sl, 1'b0);
      d_l <= mix2(bb.q, cl, bb.i, sl, 1'b1);
    end
  end

  // Frequency tracking CIC filters, sampled 32 times per synchrotron period.
  x32_clock #(.PHASE_W(PHASE_W), .DIV_BITS(5)) u_x32 (.clk, .rst_n, .phase(ph_s), .tick);

  iq_t c_in [4];
  assign c_in[0] = d_u;
  assign c_in[1] = s_u;
  assign c_in[2] = s_l;
  assign c_in[3] = d_l;

  for (genvar k = 0; k < 4; k++) begin : g_cic
    cic_filter #(.N(2), .R(1), .M(32), .IW(IQ_W)) u_cic (
      .clk, .rst_n, .in_valid(tick), .din(c_in[k]), .out_valid(v_c[k]), .dout(c_out[k]),
      .ready(rdy_c[k]));
  end

  assign usb_iq.i = c_out[0];
  assign usb_iq.q = c_out[1];
  assign lsb_iq.i = c_out[2];
  assign lsb_iq.q = c_out[3];
  assign sb_valid = v_c[0];

  // Single sideband modulator.
  ssb_modulator u_mod (
    .clk, .rst_n, .usb(usb_iq), .lsb(lsb_iq), .cos_i(cm), .sin_i(sm),
    .usb_on, .lsb_on, .out);

  assign ready = rdy_u && rdy_l && (&rdy_c);

endmodule
