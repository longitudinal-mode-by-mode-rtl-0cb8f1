// cic_filter: cascaded integrator-comb (CIC) low pass filter with a sample enable.
//
// The feedback processor uses this filter twice. In the DDC it is the baseband low
// pass filter: N = 5 stages, decimation R = 2, differential delay M = 256, fed every
// 144 MHz clock. In the single sideband filter it is the two-stage frequency
// tracking filter: N = 2, R = 1, M = 32, fed only on the ticks of the "x32 clock"
// (32 times the synchrotron frequency), so that its notches, at multiples of
// tick_rate / M, follow the synchrotron frequency pattern.
//
// Structure (Hogenauer): N integrators run on every accepted input sample, every
// R-th integrator output enters N comb stages y[n] = x[n] - x[n-M], each with a
// delay line of M words held in a memory. Internal arithmetic is W = IW + N*ceil(log2(R*M))
// bits wide and wraps modulo 2^W, which is exact for a CIC. The DC gain (R*M)^N is
// removed by an arithmetic right shift of N*log2(R*M) bits (exact when R*M is a
// power of two), so the output has the input's width and unity DC gain.
//
// After reset the delay lines are swept to zero for M clocks; inputs are ignored
// and ready is low during the sweep. Interface: in_valid qualifies din; out_valid
// pulses with each new output, once per R accepted inputs. Latency: out_valid and
// dout change 2N clocks after the clock edge that accepts the input completing a
// decimation group (integrators and combs are each one register deep, the last
// comb and the output register share a clock), whatever the gaps in in_valid.
//
// The stage counts, decimation ratios and delays are the paper's; widths, the
// clearing sweep and the output scaling are choices of this design.
module cic_filter #(
  parameter int unsigned N  = 5,     // stages
  parameter int unsigned R  = 2,     // decimation ratio
  parameter int unsigned M  = 256,   // differential delay (in decimated samples)
  parameter int unsigned IW = 18     // input and output width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] din,
  output logic                 out_valid,
  output logic signed [IW-1:0] dout,
  output logic                 ready
);

  localparam int unsigned GB = N * $clog2(R * M);   // bit growth
  localparam int unsigned W  = IW + GB;
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;

  logic signed [W-1:0] integ [N];
  logic signed [W-1:0] comb  [N];
  logic                comb_v [N];
  logic signed [W-1:0] dl [N][M];
  logic [PW-1:0]       ptr [N];
  logic [RW-1:0]       dec_cnt;
  logic                integ_v [N];
  logic                clr;
  logic [PW-1:0]       clr_ptr;

  assign ready = !clr;

  // Integrator chain, each stage one register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin
        integ[k]   <= '0;
        integ_v[k] <= 1'b0;
      end
    end else begin
      integ_v[0] <= in_valid && !clr;
      if (in_valid && !clr) integ[0] <= integ[0] + W'(din);
      for (int k = 1; k < N; k++) begin
        integ_v[k] <= integ_v[k-1];
        if (integ_v[k-1]) integ[k] <= integ[k] + integ[k-1];
      end
    end
  end

  // Decimation: pass every R-th integrator output to the combs.
  logic dec_v;
  always_comb dec_v = integ_v[N-1] && (dec_cnt == RW'(R - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dec_cnt <= '0;
    else if (integ_v[N-1]) dec_cnt <= (dec_cnt == RW'(R - 1)) ? '0 : dec_cnt + 1'b1;
  end

  // Clearing sweep of the delay lines after reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr     <= 1'b1;
      clr_ptr <= '0;
    end else if (clr) begin
      clr_ptr <= clr_ptr + 1'b1;
      if (clr_ptr == PW'(M - 1)) clr <= 1'b0;
    end
  end

  // Comb chain. Stage k reads its delay line at ptr[k] (the sample M steps ago)
  // and writes the new sample in the same place.
  for (genvar k = 0; k < N; k++) begin : g_comb
    logic signed [W-1:0] cin;
    logic                cv;
    if (k == 0) begin : g_first
      assign cin = integ[N-1];
      assign cv  = dec_v;
    end else begin : g_next
      assign cin = comb[k-1];
      assign cv  = comb_v[k-1];
    end

    always_ff @(posedge clk) begin
      if (clr) dl[k][clr_ptr] <= '0;
      else if (cv) dl[k][ptr[k]] <= cin;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        comb[k]   <= '0;
        comb_v[k] <= 1'b0;
        ptr[k]    <= '0;
      end else begin
        comb_v[k] <= cv;
        if (cv) begin
          comb[k] <= cin - dl[k][ptr[k]];
          ptr[k]  <= (ptr[k] == PW'(M - 1)) ? '0 : ptr[k] + 1'b1;
        end
      end
    end
  end

  // Output: remove the DC gain.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= comb_v[N-1];
      if (comb_v[N-1]) dout <= IW'(comb[N-1] >>> GB);
    end
  end

endmodule
