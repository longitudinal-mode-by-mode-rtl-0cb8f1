// tb_harmonic_fb_block: one harmonic block (h = 8, m = 1) fed with a beam signal
// holding a large carrier at harmonic 8 and one upper synchrotron sideband of
// amplitude AU. Proportional gain 1, reference 0. Checks, each after settling:
//  1. USB enabled: the USB monitor reads 2*AU (DDC scale) and the RF output swings
//     with amplitude 2*AU (the carrier is rejected);
//  2. only the LSB enabled: the RF output stays below 3 % of that;
//  3. both sidebands off, reference (R, 0) modulated onto the USB: RF amplitude R.
// fs is set to 2^21 (8192 clocks per period, about 17.6 kHz) to keep the run short;
// the expected sideband amplitude includes the DDC CIC response G at fs,
// G = |sin(pi*fs*512/fclk) / (512*sin(pi*fs/fclk))|^5.
`timescale 1ns/1ps
module tb_harmonic_fb_block;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam logic [31:0] FREV = 32'd23_000_000, FS = 32'h0020_0000;
  localparam real AC = 16000.0, AU = 3000.0, R = 9000.0;
  logic clk = 0, rst_n = 0;
  logic pattern_tick, ctrl_tick, pi_clear, lut_we, ready;
  logic signed [15:0] adc;
  phase_t ph_rev, ph_s, ph_mod;
  harm_cfg_t cfg;
  harm_pattern_t hpat;
  iq_t rf;
  iq_pair_t mon_bb, mon_usb, mon_lsb, mon_fb;
  int checks = 0, failures = 0;
  real peak, G, x;
  always #5 clk = ~clk;

  harmonic_fb_block dut (
    .clk, .rst_n, .pattern_tick, .ctrl_tick, .adc, .ph_rev, .f_rev(FREV), .ph_s, .f_s(FS),
    .ph_mod, .cfg, .hpat, .pi_clear, .lut_we, .lut_sel(LUT_DDC_PHASE), .lut_addr(8'd0),
    .lut_data(16'd0), .rf, .mon_bb, .mon_usb, .mon_lsb, .mon_fb, .ready);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_peak(input real e, input real tol, input string what);
    checks++;
    if (peak > e + tol || peak < e - tol) begin
      failures++;
      $display("%s: RF peak %f, expected %f", what, peak, e);
    end else $display("%s: RF peak %f", what, peak);
  endtask

  initial begin
    cfg = '0;
    cfg.h = 5'd8; cfg.m = 2'd1; cfg.usb_on = 1; cfg.kp = 18'sd4096;
    hpat = '{ref_i: '0, ref_q: '0, gain: 16'h4000};
    pattern_tick = 0; ctrl_tick = 0; pi_clear = 0; lut_we = 0;
    ph_rev = '0; ph_s = '0; ph_mod = '0; adc = '0; peak = 0.0;
    x = PI * real'(FS) / (2.0 ** 34);
    G = ($sin(512.0 * x) / (512.0 * $sin(x))) ** 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 72000; n++) begin
      real th, ts;
      @(negedge clk);
      pattern_tick = (n == 10) || (n == 48000);
      if (n == 24000) begin cfg.usb_on = 0; cfg.lsb_on = 1; end
      if (n == 47990) begin
        cfg.lsb_on = 0; cfg.mod_on = 1; cfg.usb_mod_on = 1;
        hpat.ref_i = 18'sd9000;
      end
      ph_rev = ph_rev + phase_t'(FREV);
      ph_s   = ph_s + phase_t'(FS);
      ph_mod = ph_mod + phase_t'(FS);
      th = 2.0 * PI * real'(phase_t'(ph_rev * 8)) / (2.0 ** 34);
      ts = 2.0 * PI * real'(ph_s) / (2.0 ** 34);
      adc = 16'($rtoi(AC * $cos(th + 0.4) + AU * $cos(th + ts + 1.0)));
      if (n % 24000 == 16000) peak = 0.0;
      if (n % 24000 >= 16000) begin
        if (rf > 0 && real'(rf) > peak) peak = real'(rf);
        if (rf < 0 && -real'(rf) > peak) peak = -real'(rf);
      end
      if (n == 23999) begin
        real m;
        m = $sqrt(real'(mon_usb.i) ** 2 + real'(mon_usb.q) ** 2);
        checks++;
        if (m < 2.0 * AU * G * 0.98 || m > 2.0 * AU * G * 1.02) begin
          failures++;
          $display("USB monitor %f, expected %f", m, 2.0 * AU * G);
        end
        expect_peak(2.0 * AU * G, 0.03 * 2.0 * AU, "USB on");
      end
      if (n == 47989) expect_peak(0.0, 0.03 * 2.0 * AU, "LSB only");
      if (n == 71999) expect_peak(R, 0.02 * R, "USB modulation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
