// tb_ssb_modulator: random sideband I/Q, angles and ON/OFF settings; the output one
// clock later is compared with the modulation equations evaluated in real
// arithmetic (tolerance 2 LSB, saturation modelled).
`timescale 1ns/1ps
module tb_ssb_modulator;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  iq_pair_t usb, lsb, out;
  trig_t c, s;
  logic usb_on, lsb_on;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ssb_modulator dut (.clk, .rst_n, .usb, .lsb, .cos_i(c), .sin_i(s), .usb_on, .lsb_on, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real clampr(real v);
    if (v > 131071.0) return 131071.0;
    if (v < -131072.0) return -131072.0;
    return v;
  endfunction

  initial begin
    usb = '0; lsb = '0; c = '0; s = '0; usb_on = 0; lsb_on = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      real a, cr, sr, ei, eq;
      a = 2.0 * PI * real'($urandom_range(0, 65535)) / 65536.0;
      usb.i <= iq_t'($signed(18'($urandom)) >>> 1);
      usb.q <= iq_t'($signed(18'($urandom)) >>> 1);
      lsb.i <= iq_t'($signed(18'($urandom)) >>> 1);
      lsb.q <= iq_t'($signed(18'($urandom)) >>> 1);
      c <= trig_t'($rtoi(32767.0 * $cos(a)));
      s <= trig_t'($rtoi(32767.0 * $sin(a)));
      usb_on <= (n % 4) inside {1, 3};
      lsb_on <= (n % 4) inside {2, 3};
      @(posedge clk);
      #1;
      cr = real'(c) / 32768.0;
      sr = real'(s) / 32768.0;
      ei = 0.0; eq = 0.0;
      if (usb_on) begin
        ei += real'(usb.i) * cr + real'(usb.q) * sr;
        eq += real'(usb.q) * cr - real'(usb.i) * sr;
      end
      if (lsb_on) begin
        ei += real'(lsb.i) * cr - real'(lsb.q) * sr;
        eq += real'(lsb.q) * cr + real'(lsb.i) * sr;
      end
      ei = clampr(ei); eq = clampr(eq);
      @(negedge clk);
      checks++;
      if ((real'(out.i) - ei > 2.0) || (ei - real'(out.i) > 2.0) ||
          (real'(out.q) - eq > 2.0) || (eq - real'(out.q) > 2.0)) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d,%0d exp %f,%f", n, out.i, out.q, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
