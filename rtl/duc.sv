// duc: digital up converter of one harmonic block.
//
// Rebuilds an RF signal at h*f_rev from the feedback I/Q: a CORDIC of h times the
// revolution phase gives cos/sin and rf = I cos + Q sin (the inverse of the DDC
// mixing). The result is then scaled twice: by the gain offset LUT, addressed by
// the harmonic frequency h*f_rev, which flattens the amplitude response of the RF
// cavity, and by the gain pattern, loaded from the pattern memory at every pattern
// clock. Both gains are unsigned 16-bit with 1.0 = 2^14 (range 0 to 4).
//
// Timing: h multiply (1), CORDIC (18), mix (1), LUT gain (1), pattern gain (1).
// The gain LUT read (1) runs in parallel with the CORDIC. Output is signed 18-bit,
// saturating.
//
// The structure follows the paper's DUC diagram; the gain formats and the LUT
// addressing are this design's.
module duc
  import mmfb_pkg::*;
#(
  parameter int unsigned LUT_ALSB = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pattern_tick,
  input  iq_pair_t                fb,
  input  phase_t                  ph_rev,
  input  freq_t                   f_rev,
  input  logic [HNUM_W-1:0]       h,
  input  logic [AMP_W-1:0]        gain_pat,     // taken on pattern_tick
  input  logic                    lut_we,
  input  logic [LUT_AW-1:0]       lut_addr,
  input  logic [AMP_W-1:0]        lut_data,
  output iq_t                     rf,
  output logic                    ready
);

  localparam int unsigned CPW = 20;
  localparam int unsigned SH  = TRIG_W - 1;

  phase_t           ph_h;
  freq_t            f_h;
  trig_t            c, s;
  logic [AMP_W-1:0] g_lut, g_pat;
  iq_t              rf0, rf1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_h  <= '0;
      f_h   <= '0;
      g_pat <= AMP_W'(1 << AMP_FRAC);
    end else begin
      ph_h <= phase_t'(ph_rev * PHASE_W'(h));
      f_h  <= freq_t'(f_rev * FREQ_W'(h));
      if (pattern_tick) g_pat <= gain_pat;
    end
  end

  offset_lut #(.FW(FREQ_W), .AW(LUT_AW), .DW(AMP_W), .ALSB(LUT_ALSB),
               .INIT(AMP_W'(1 << AMP_FRAC))) u_gain_lut (
    .clk, .rst_n, .freq(f_h), .data(g_lut),
    .we(lut_we), .waddr(lut_addr), .wdata(lut_data), .ready);

  cordic #(.PW(CPW), .TW(TRIG_W), .ITER(16)) u_cordic (
    .clk, .rst_n, .phase(ph_h[PHASE_W-1 -: CPW]), .cos_o(c), .sin_o(s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rf0 <= '0;
      rf1 <= '0;
      rf  <= '0;
    end else begin
      rf0 <= iq_t'(sat((64'(fb.i) * 64'(c) + 64'(fb.q) * 64'(s)) >>> SH, IQ_W));
      rf1 <= iq_t'(sat((64'(rf0) * $signed({1'b0, g_lut})) >>> AMP_FRAC, IQ_W));
      rf  <= iq_t'(sat((64'(rf1) * $signed({1'b0, g_pat})) >>> AMP_FRAC, IQ_W));
    end
  end

endmodule
