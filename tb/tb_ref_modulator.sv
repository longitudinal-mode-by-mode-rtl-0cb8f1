// tb_ref_modulator: a constant I/Q reference and a modulation phase ramp. With
// modulation off the reference must pass unchanged (one clock); with the USB, the
// LSB or both enabled the output is compared with the rotated reference computed
// from the phase applied 20 clocks earlier (CORDIC 18, modulator 1, output 1),
// tolerance 6 LSB.
`timescale 1ns/1ps
module tb_ref_modulator;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  iq_pair_t ref_iq, out;
  phase_t ph_mod;
  logic mod_on, usb_mod_on, lsb_mod_on;
  int checks = 0, failures = 0;
  phase_t hist [$];
  always #5 clk = ~clk;

  ref_modulator dut (.clk, .rst_n, .ref_iq, .ph_mod, .mod_on, .usb_mod_on, .lsb_mod_on, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_iq = '{i: 18'sd30000, q: -18'sd12000};
    ph_mod = '0; mod_on = 0; usb_mod_on = 0; lsb_mod_on = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      real a, c, s, ei, eq;
      @(negedge clk);
      ph_mod = ph_mod + phase_t'(34'd3_000_000 + 34'(n) * 34'd400);   // chirped phase
      mod_on     = (n / 2000) != 0;
      usb_mod_on = (n / 2000) inside {1, 3};
      lsb_mod_on = (n / 2000) inside {2, 3};
      hist.push_back(ph_mod);
      @(posedge clk);
      #1;
      if (hist.size() > 20) void'(hist.pop_front());
      if ((n % 2000) < 30) continue;     // settle after a switch
      a = 2.0 * PI * real'(hist[0]) / (2.0 ** 34);
      c = $cos(a); s = $sin(a);
      ei = 0.0; eq = 0.0;
      if (!mod_on) begin
        ei = real'(ref_iq.i); eq = real'(ref_iq.q);
      end else begin
        if (usb_mod_on) begin
          ei += real'(ref_iq.i) * c + real'(ref_iq.q) * s;
          eq += real'(ref_iq.q) * c - real'(ref_iq.i) * s;
        end
        if (lsb_mod_on) begin
          ei += real'(ref_iq.i) * c - real'(ref_iq.q) * s;
          eq += real'(ref_iq.q) * c + real'(ref_iq.i) * s;
        end
      end
      checks++;
      if ((real'(out.i) - ei > 6.0) || (ei - real'(out.i) > 6.0) ||
          (real'(out.q) - eq > 6.0) || (eq - real'(out.q) > 6.0)) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d,%0d exp %f,%f", n, out.i, out.q, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
