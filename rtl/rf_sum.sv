// rf_sum: adds the RF signals of all harmonic blocks into the DAC word.
//
// The N_IN signed 18-bit RF signals are summed at full precision, scaled by
// 2^-SHIFT and saturated to the signed 16-bit DAC range. With SHIFT = 1 a
// sideband entering at the ADC leaves at the DAC with the same amplitude when the
// loop gain is 1 (the DDC delivers a/2 in a scale four times the ADC's, the DUC
// restores the carrier at that scale).
//
// Timing: one register, dac is valid one clock after the inputs.
// The paper gives the summation of the harmonic blocks into the DAC; the scaling
// and saturation are this design's.
module rf_sum
  import mmfb_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned SHIFT = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  iq_t                     rf [N_IN],
  output logic signed [DAC_W-1:0] dac
);

  logic signed [IQ_W+7:0] acc;

  always_comb begin
    acc = '0;
    for (int k = 0; k < N_IN; k++) acc = acc + (IQ_W+8)'(rf[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac <= '0;
    else        dac <= DAC_W'(sat(64'(acc >>> SHIFT), DAC_W));
  end

endmodule
