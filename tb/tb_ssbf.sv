// tb_ssbf: a synthetic harmonic baseband with a large carrier B and one upper and
// one lower synchrotron sideband (U, L), m = 1, fs = 2^23 (2048 clocks per period,
// so the x32 clock ticks every 64 clocks). Checks:
//  * the tracking CIC outputs: I_U = U sin(phiU + D), Q_U = U cos(phiU + D),
//    I_L = L sin(phiL - D), Q_L = L cos(phiL - D), where D = 21/2048 turn is the
//    phase lag of the demodulation CORDIC path; the carrier must be rejected;
//  * the modulator output amplitude with only the USB, only the LSB and no
//    sideband enabled (U, L and 0);
//  * that the filter output rate is 32 outputs per synchrotron period.
`timescale 1ns/1ps
module tb_ssbf;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real B = 60000.0, U = 20000.0, L = 8000.0;
  localparam real PB = 1.1, PU = 0.3, PL = -2.0;
  localparam logic [31:0] FS = 32'h0080_0000;
  logic clk = 0, rst_n = 0;
  iq_pair_t bb, usb_iq, lsb_iq, out;
  logic bb_valid, usb_on, lsb_on, sb_valid, ready;
  phase_t ph_s;
  int checks = 0, failures = 0, nsb = 0;
  always #5 clk = ~clk;

  ssbf dut (.clk, .rst_n, .bb, .bb_valid, .ph_s, .f_s(FS), .m(2'd1), .usb_on, .lsb_on,
            .usb_lut_we(1'b0), .lsb_lut_we(1'b0), .lut_addr(8'd0), .lut_data(16'd0),
            .usb_iq, .lsb_iq, .sb_valid, .out, .ready);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (sb_valid) nsb++;

  function automatic bit near(real a, real b, real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  initial begin
    real th, d;
    int n0;
    bb = '0; bb_valid = 0; ph_s = '0; usb_on = 1; lsb_on = 0;
    d = 2.0 * PI * 21.0 / 2048.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30000; n++) begin
      @(negedge clk);
      ph_s = ph_s + phase_t'(FS);
      th = 2.0 * PI * real'(ph_s) / (2.0 ** 34);
      bb_valid = n[0];
      bb.i = iq_t'($rtoi(B * $sin(PB) + U * $sin(th + PU) + L * $sin(-th + PL)));
      bb.q = iq_t'($rtoi(B * $cos(PB) + U * $cos(th + PU) + L * $cos(-th + PL)));
      usb_on = (n < 20000) || (n >= 25000);
      lsb_on = (n >= 20000);
      if (n == 10000) n0 = nsb;
      if (n == 12048) begin
        checks++;
        if (nsb - n0 != 32) begin
          failures++;
          $display("filter rate: %0d outputs per synchrotron period", nsb - n0);
        end
      end
      if (n > 8000 && n % 200 == 0) begin
        checks++;
        if (!near(real'(usb_iq.i), U * $sin(PU + d), 40.0) || !near(real'(usb_iq.q), U * $cos(PU + d), 40.0) ||
            !near(real'(lsb_iq.i), L * $sin(PL - d), 40.0) || !near(real'(lsb_iq.q), L * $cos(PL - d), 40.0)) begin
          failures++;
          if (failures < 10)
            $display("n=%0d USB %0d,%0d exp %f,%f  LSB %0d,%0d exp %f,%f", n, usb_iq.i, usb_iq.q,
                     U * $sin(PU + d), U * $cos(PU + d), lsb_iq.i, lsb_iq.q, L * $sin(PL - d), L * $cos(PL - d));
        end
      end
      if (n > 8000 && (n % 5000) > 100 && n % 50 == 0) begin
        real mag, e;
        mag = $sqrt(real'(out.i) ** 2 + real'(out.q) ** 2);
        e = (usb_on && !lsb_on) ? U : (!usb_on && lsb_on) ? L : -1.0;
        if (e >= 0.0) begin
          checks++;
          if (!near(mag, e, 60.0)) begin
            failures++;
            if (failures < 10) $display("n=%0d output magnitude %f expected %f", n, mag, e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
