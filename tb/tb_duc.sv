// tb_duc: constant feedback I/Q, harmonic h = 8 of a revolution phase ramp. The RF
// output is compared with (I cos + Q sin)(h*phase 22 clocks earlier) times the gain
// LUT entry and the gain pattern, tolerance 6 LSB. Three gain settings are used:
// the reset values (1.0, 1.0), a written LUT entry of 0.5 and a pattern gain of 1.5.
`timescale 1ns/1ps
module tb_duc;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam logic [31:0] FREV = 32'd23_000_000;
  logic clk = 0, rst_n = 0;
  logic pattern_tick, lut_we, ready;
  iq_pair_t fb;
  phase_t ph_rev;
  freq_t f_rev;
  logic [4:0] h;
  logic [15:0] gain_pat, lut_data;
  logic [7:0] lut_addr;
  iq_t rf;
  int checks = 0, failures = 0;
  phase_t hist [$];
  real g;
  always #5 clk = ~clk;

  duc dut (.clk, .rst_n, .pattern_tick, .fb, .ph_rev, .f_rev, .h, .gain_pat,
           .lut_we, .lut_addr, .lut_data, .rf, .ready);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fb = '{i: 18'sd20000, q: 18'sd9000};
    ph_rev = '0; f_rev = FREV; h = 5'd8; gain_pat = 16'h4000; pattern_tick = 0;
    lut_we = 0; lut_addr = '0; lut_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    for (int n = 0; n < 9000; n++) begin
      real a, e;
      @(negedge clk);
      pattern_tick = 0; lut_we = 0;
      if (n == 3000) begin        // LUT entry for h*f_rev = 0.5
        lut_we = 1; lut_addr = 8'((FREV * 8) >> 20); lut_data = 16'h2000;
      end
      if (n == 6000) begin        // gain pattern 1.5
        pattern_tick = 1; gain_pat = 16'h6000;
      end
      g = (n < 3000) ? 1.0 : (n < 6000) ? 0.5 : 0.75;
      ph_rev = ph_rev + phase_t'(FREV);
      hist.push_back(ph_rev);
      @(posedge clk);
      #1;
      if (hist.size() > 22) void'(hist.pop_front());
      if ((n % 3000) < 30) continue;
      a = 2.0 * PI * real'(phase_t'(hist[0] * 8)) / (2.0 ** 34);
      e = (real'(fb.i) * $cos(a) + real'(fb.q) * $sin(a)) * g;
      checks++;
      if ((real'(rf) - e > 6.0) || (e - real'(rf) > 6.0)) begin
        failures++;
        if (failures < 10) $display("n=%0d rf %0d exp %f", n, rf, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
