// ddc: digital down converter, beam signal to the baseband I/Q of harmonic h.
//
// The harmonic phase is the revolution phase times the selected harmonic number h;
// a phase offset, read from a LUT addressed by the harmonic frequency h*f_rev, is
// added to it to compensate the phase response of the system. A CORDIC turns the
// sum into cos and sin; the beam signal is multiplied by cos to give I and by sin
// to give Q, and each product is low pass filtered by a 5-stage CIC filter with
// decimation 2 and differential delay 256 running at the 144 MHz sample clock.
// A beam component a*cos(h*phi) + b*sin(h*phi) therefore yields I = a/2 and
// Q = b/2 (in the 18-bit I/Q scale, where the 16-bit ADC full scale maps to 2^17).
//
// Pipeline: h*phase and h*f_rev registered (1), LUT read (1), offset addition (1),
// CORDIC (18), mixer (1), CIC (10 clocks per output, one output every 2 clocks).
// The fixed latency of the phase path is a constant phase shift that the offset
// LUT absorbs together with the rest of the system's phase response.
//
// Interface: adc is the signed 16-bit sample of every clock; iq/iq_valid is the
// decimated baseband output (72 MS/s). The LUT entries are 16-bit fractions of a
// turn, written through lut_we/lut_addr/lut_data.
//
// The structure (harmonic multipliers, offset LUT, CORDIC, two mixers, CIC with
// N=5, R=2, M=256) is the paper's; the widths, the LUT addressing and the scaling
// are choices of this design.
module ddc
  import mmfb_pkg::*;
#(
  parameter int unsigned LUT_ALSB = 20    // h*f_rev bit used as LUT address bit 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [ADC_W-1:0]  adc,
  input  phase_t                   ph_rev,
  input  freq_t                    f_rev,
  input  logic [HNUM_W-1:0]        h,
  output freq_t                    f_harm,     // h * f_rev, registered
  output phase_t                   ph_harm,    // h * revolution phase, registered
  output iq_pair_t                 iq,
  output logic                     iq_valid,
  input  logic                     lut_we,
  input  logic [LUT_AW-1:0]        lut_addr,
  input  logic [POFS_W-1:0]        lut_data,
  output logic                     ready
);

  localparam int unsigned CPW = 20;   // CORDIC phase width

  phase_t              ph_harm_d, ph_sum;
  logic [POFS_W-1:0]   ofs;
  trig_t               c, s;
  logic signed [ADC_W-1:0] adc_q;
  iq_t                 mix_i, mix_q;
  logic                rdy_lut, rdy_i, rdy_q, v_q;
  iq_t                 cic_i, cic_q;

  // Harmonic phase and frequency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_harm   <= '0;
      f_harm    <= '0;
      ph_harm_d <= '0;
      ph_sum    <= '0;
    end else begin
      ph_harm   <= phase_t'(ph_rev * PHASE_W'(h));
      f_harm    <= freq_t'(f_rev * FREQ_W'(h));
      ph_harm_d <= ph_harm;
      ph_sum    <= ph_harm_d + {ofs, {(PHASE_W - POFS_W){1'b0}}};
    end
  end

  offset_lut #(.FW(FREQ_W), .AW(LUT_AW), .DW(POFS_W), .ALSB(LUT_ALSB), .INIT('0)) u_lut (
    .clk, .rst_n, .freq(f_harm), .data(ofs),
    .we(lut_we), .waddr(lut_addr), .wdata(lut_data), .ready(rdy_lut));

  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic (
    .clk, .rst_n, .phase(ph_sum[PHASE_W-1 -: CPW]), .cos_o(c), .sin_o(s));

  // Mixers: 16 x 16 bit products, scaled to the 18-bit I/Q format.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_q <= '0;
      mix_i <= '0;
      mix_q <= '0;
    end else begin
      adc_q <= adc;
      mix_i <= iq_t'((32'(adc_q) * 32'(c)) >>> (TRIG_W - 1 - (IQ_W - ADC_W)));
      mix_q <= iq_t'((32'(adc_q) * 32'(s)) >>> (TRIG_W - 1 - (IQ_W - ADC_W)));
    end
  end

  cic_filter #(.N(5), .R(2), .M(256), .IW(IQ_W)) u_cic_i (
    .clk, .rst_n, .in_valid(1'b1), .din(mix_i), .out_valid(iq_valid), .dout(cic_i), .ready(rdy_i));
  cic_filter #(.N(5), .R(2), .M(256), .IW(IQ_W)) u_cic_q (
    .clk, .rst_n, .in_valid(1'b1), .din(mix_q), .out_valid(v_q), .dout(cic_q), .ready(rdy_q));

  assign iq.i  = cic_i;
  assign iq.q  = cic_q;
  assign ready = rdy_lut && rdy_i && rdy_q;

endmodule
