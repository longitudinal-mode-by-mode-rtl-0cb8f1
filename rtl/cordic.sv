// cordic: pipelined CORDIC in rotation mode, turning a phase word into cos and sin.
//
// Every mixer of the feedback processor (DDC, single sideband filter, reference
// modulation, DUC) takes its sine and cosine from a CORDIC fed with a phase; this
// is that generator. The phase is an unsigned fraction of a turn, PW bits wide.
// The top two bits fold the angle into [-90, +90) degrees (a half-turn rotation
// whose sign is applied to the result), then ITER micro-rotations by atan(2^-i)
// drive the residual angle to zero. The start vector (X0, 0) is pre-scaled by
// 1/K (K = 1.64676, the CORDIC gain), so cos and sin come out with full scale
// 2^(TW-1) - 1; G = 4 guard bits below the output LSB keep the rounding error
// of the shifts to about one LSB. The angle arithmetic is done in 32-bit fractions of a turn;
// ATAN[i] = round(atan(2^-i) / (2*pi) * 2^32).
//
// Timing: fully pipelined, one phase per clock, latency ITER + 2 clocks from phase
// to cos/sin. No handshake: the pipeline runs every clock.
//
// The paper names the CORDIC and its cos/sin outputs; the iteration count, the
// widths and the pipelining are this design's own choices.
module cordic #(
  parameter int unsigned PW   = 20,   // phase input width (fraction of a turn)
  parameter int unsigned TW   = 16,   // cos/sin output width
  parameter int unsigned ITER = 16    // number of micro-rotations (<= 20)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PW-1:0]        phase,
  output logic signed [TW-1:0] cos_o,
  output logic signed [TW-1:0] sin_o
);

  localparam int unsigned G  = 4;           // guard bits below the output LSB
  localparam int unsigned XW = TW + 2 + G;
  // round((2^(TW-1)-1) * 2^G / 1.6467602581)
  localparam logic signed [XW-1:0] X0 =
    XW'($rtoi(((2.0 ** (TW - 1)) - 1.0) * (2.0 ** G) / 1.6467602581 + 0.5));

  localparam logic [31:0] ATAN [20] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304
  };

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic signed [31:0]   z [ITER+1];
  logic                 neg [ITER+1];

  // Stage 0: fold the angle into [-90, 90) degrees.
  logic [31:0] ph32;
  assign ph32 = {phase, {(32 - PW){1'b0}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0]   <= '0;
      y[0]   <= '0;
      z[0]   <= '0;
      neg[0] <= 1'b0;
    end else begin
      x[0] <= X0;
      y[0] <= '0;
      if (ph32[31] ^ ph32[30]) begin
        // second or third quadrant: rotate by half a turn, negate the result
        z[0]   <= $signed(ph32 - 32'h8000_0000);
        neg[0] <= 1'b1;
      end else begin
        z[0]   <= $signed(ph32);
        neg[0] <= 1'b0;
      end
    end
  end

  // Micro-rotation stages.
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1]   <= '0;
        y[i+1]   <= '0;
        z[i+1]   <= '0;
        neg[i+1] <= 1'b0;
      end else begin
        neg[i+1] <= neg[i];
        if (!z[i][31]) begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - $signed(ATAN[i]);
        end else begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + $signed(ATAN[i]);
        end
      end
    end
  end

  // Output stage: apply the half-turn sign and saturate to TW bits.
  function automatic logic signed [TW-1:0] clip(input logic signed [XW-1:0] v, input logic n);
    logic signed [XW:0] s;
    s = ((XW+1)'(v) + (XW+1)'(2 ** (G - 1))) >>> G;   // round away the guard bits
    if (n) s = -s;
    if (s > (XW+1)'((2 ** (TW - 1)) - 1))   return TW'((2 ** (TW - 1)) - 1);
    else if (s < -(XW+1)'((2 ** (TW - 1)) - 1)) return -TW'((2 ** (TW - 1)) - 1);
    else                                     return TW'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_o <= '0;
      sin_o <= '0;
    end else begin
      cos_o <= clip(x[ITER], neg[ITER]);
      sin_o <= clip(y[ITER], neg[ITER]);
    end
  end

endmodule
