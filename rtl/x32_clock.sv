// x32_clock: sample-enable generator for the frequency tracking CIC filters.
//
// The tracking CIC must be sampled at 32 times its first notch frequency, which is
// the synchrotron frequency from the pattern. This block watches the synchrotron
// phase word from the DDS and emits a one-clock tick every time the phase crosses
// a 1/2^DIV_BITS turn boundary, i.e. whenever the top DIV_BITS bits of the phase
// change. With DIV_BITS = 5 that is 32 ticks per synchrotron period, so the tick
// rate follows the synchrotron frequency pattern during the whole cycle.
//
// Interface: phase is the free-running synchrotron phase (advancing by far less
// than 1/32 turn per clock); tick is registered, high for one clock per boundary.
//
// The factor 32 and the use of the synchrotron phase pattern are the paper's
// ("x32 clock" in its SSBF diagram); deriving the tick from the phase bits is this
// design's choice.
module x32_clock #(
  parameter int unsigned PHASE_W  = 34,
  parameter int unsigned DIV_BITS = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHASE_W-1:0] phase,
  output logic               tick
);

  logic [DIV_BITS-1:0] seg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg_q <= '0;
      tick  <= 1'b0;
    end else begin
      seg_q <= phase[PHASE_W-1 -: DIV_BITS];
      tick  <= (phase[PHASE_W-1 -: DIV_BITS] != seg_q);
    end
  end

endmodule
