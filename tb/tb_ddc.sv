// tb_ddc: a beam signal A*cos(h*theta + psi) with h = 8 (theta from the revolution
// phase the testbench drives) must give I = 2A*cos(d), Q = -2A*sin(d) at the CIC
// output, with d = psi - offset + h*20*f_rev/2^34 turns: the cos/sin path lags
// the beam sample by 20 clocks. Checked with the LUT offset at its reset value 0
// and after writing a quarter turn into the entry addressed by h*f_rev. Also
// checks the output rate (one output per 2 clocks).
`timescale 1ns/1ps
module tb_ddc;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam logic [31:0] FREV = 32'd23_000_000;
  localparam real A = 12000.0, PSI = 0.7;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] adc;
  phase_t ph_rev, ph_harm;
  freq_t f_rev, f_harm;
  logic [4:0] h;
  iq_pair_t iq;
  logic iq_valid, lut_we, ready;
  logic [7:0] lut_addr;
  logic [15:0] lut_data;
  int checks = 0, failures = 0, nval = 0;
  real ofs_turns;
  always #5 clk = ~clk;

  ddc dut (.clk, .rst_n, .adc, .ph_rev, .f_rev, .h, .f_harm, .ph_harm, .iq, .iq_valid,
           .lut_we, .lut_addr, .lut_data, .ready);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (iq_valid) nval++;

  task automatic check_iq(input string what);
    real d, ei, eq;
    d = 2.0 * PI * (8.0 * 20.0 * real'(FREV) / (2.0 ** 34) - ofs_turns) + PSI;
    ei = 2.0 * A * $cos(d);
    eq = -2.0 * A * $sin(d);
    checks++;
    if ((real'(iq.i) - ei > 40.0) || (ei - real'(iq.i) > 40.0) ||
        (real'(iq.q) - eq > 40.0) || (eq - real'(iq.q) > 40.0)) begin
      failures++;
      $display("%s: I,Q = %0d,%0d expected %f,%f", what, iq.i, iq.q, ei, eq);
    end
  endtask

  initial begin
    int n0;
    adc = '0; ph_rev = '0; f_rev = FREV; h = 5'd8; lut_we = 0; lut_addr = '0; lut_data = '0;
    ofs_turns = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16000; n++) begin
      @(negedge clk);
      lut_we = 0;
      if (n == 8000) begin
        lut_we = 1; lut_addr = 8'((FREV * 8) >> 20); lut_data = 16'h4000;
        ofs_turns = 0.25;
      end
      ph_rev = ph_rev + phase_t'(FREV);
      adc = 16'($rtoi(A * $cos(2.0 * PI * real'(phase_t'(ph_rev * 8)) / (2.0 ** 34) + PSI)));
      if (n == 5000) n0 = nval;
      if (n == 6000) begin
        checks++;
        if (nval - n0 != 500) begin
          failures++;
          $display("output rate: %0d outputs in 1000 clocks", nval - n0);
        end
      end
      if (n > 5000 && n < 8000 && n % 100 == 0) check_iq("offset 0");
      if (n > 13000 && n % 100 == 0) check_iq("offset 1/4 turn");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
