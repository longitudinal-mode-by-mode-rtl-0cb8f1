// tb_mmfb_top: end-to-end test of the whole feedback processor at its default
// parameters (six harmonic blocks h = 5..10, 34-bit DDS, 144 MHz clock). The control
// clock tick comes every 576 clocks (250 kHz) and the pattern tick every 28800
// clocks (5 kHz), as in the real system. The beam signal is built from the
// processor's own revolution and synchrotron frequencies: a carrier at harmonic 9,
// an upper synchrotron sideband of harmonic 8 (amplitude AU) and a lower sideband
// of harmonic 10 (amplitude AL). fs is raised to about 17.6 kHz to keep the run
// short; G is the DDC CIC response at fs (see tb_harmonic_fb_block).
//
// Phase A (all blocks pass both sidebands, Kp = 1, references 0):
//   the h = 8 USB monitor reads 2*AU*G, the h = 10 LSB monitor 2*AL*G, and every other
//   sideband monitor stays near zero.
// Phase B (all sidebands off): block h = 5 modulates its reference R onto the USB
//   (feedback output magnitude R), block h = 6 has Kp = 0, Ki > 0 and a constant
//   reference (its output ramps at every control tick), and the other feedback
//   outputs are zero. The DUC gain LUT of block h = 6 was written to 0 through the
//   LUT port at the start, so the DAC carries only block h = 5: peak R/2.
// Mechanisms counted: header load, frequency offset accumulation, pattern loads,
// LUT writes, USB and LSB detection, sideband disable, reference modulation,
// integral steps. Any that never happened counts as a failure.
`timescale 1ns/1ps
module tb_mmfb_top;
  import mmfb_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam logic [31:0] FREV = 32'd23_000_000, FS = 32'h0020_0000, OFS = 32'd3;
  localparam real AC = 12000.0, AU = 3000.0, AL = 2000.0, R = 9000.0;
  localparam int NCYC = 90000;
  logic clk = 0, rst_n = 0;
  logic pattern_tick, ctrl_tick, pi_clear, lut_we, ready;
  logic signed [ADC_W-1:0] adc;
  logic signed [DAC_W-1:0] dac;
  freq_pattern_t fpat;
  harm_pattern_t hpat [N_HARM];
  harm_cfg_t     cfg  [N_HARM];
  logic [2:0]    lut_harm;
  lut_sel_e      lut_sel;
  logic [LUT_AW-1:0] lut_addr;
  logic [15:0]   lut_data;
  iq_pair_t mon_bb [N_HARM], mon_usb [N_HARM], mon_lsb [N_HARM], mon_fb [N_HARM];
  freq_t mon_f_rev, mon_f_s;
  int checks = 0, failures = 0;
  int n_hdr = 0, n_ofs = 0, n_pat = 0, n_lut = 0, n_usb = 0, n_lsb = 0, n_off = 0, n_mod = 0, n_int = 0;
  real G, x, peak;
  phase_t ph_b, ph_sb;
  always #5 clk = ~clk;

  mmfb_top dut (
    .clk, .rst_n, .adc, .pattern_tick, .ctrl_tick, .fpat, .hpat, .cfg, .pi_clear, .lut_we,
    .lut_harm, .lut_sel, .lut_addr, .lut_data, .dac, .mon_bb, .mon_usb, .mon_lsb, .mon_fb,
    .mon_f_rev, .mon_f_s, .ready);

  initial begin
    repeat (NCYC + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real mag(input iq_pair_t v);
    return $sqrt(real'(v.i) ** 2 + real'(v.q) ** 2);
  endfunction

  task automatic check(input bit ok, input string what, input real got, input real e);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, e);
    end
  endtask

  task automatic need(input int cnt, input string what);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("FAIL mechanism never seen: %s", what);
    end else $display("mechanism %s: %0d", what, cnt);
  endtask

  logic signed [IQ_W-1:0] int_early;
  freq_t last_f_rev;

  initial begin
    for (int k = 0; k < N_HARM; k++) begin
      cfg[k] = '0;
      cfg[k].h = HNUM_W'(5 + k); cfg[k].m = 2'd1;
      cfg[k].usb_on = 1; cfg[k].lsb_on = 1; cfg[k].kp = 18'sd4096;
      hpat[k] = '{ref_i: '0, ref_q: '0, gain: 16'h4000};
    end
    fpat = '{rev_is_header: 1'b1, rev_word: FREV, fs_word: FS, fmod_word: FS};
    pattern_tick = 0; ctrl_tick = 0; pi_clear = 0; lut_we = 0;
    lut_harm = 3'd1; lut_sel = LUT_DUC_GAIN; lut_addr = '0; lut_data = '0;
    adc = '0; ph_b = '0; ph_sb = '0; peak = 0.0; int_early = '0;
    x = PI * real'(FS) / (2.0 ** 34);
    G = ($sin(512.0 * x) / (512.0 * $sin(x))) ** 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    // clear the DUC gain LUT of block h = 6 through the shared LUT port
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = LUT_AW'(a);
      n_lut++;
    end
    @(negedge clk);
    lut_we = 0;
    last_f_rev = mon_f_rev;
    for (int n = 0; n < NCYC; n++) begin
      real th, ts;
      @(negedge clk);
      ctrl_tick    = (n % 576) == 0;
      pattern_tick = (n % 28800) == 100;
      if (pattern_tick) begin
        n_pat++;
        if (fpat.rev_is_header) n_hdr++;
      end
      if (n == 200) begin
        fpat.rev_is_header = 0; fpat.rev_word = OFS;
      end
      if (mon_f_rev != last_f_rev && last_f_rev != 0) n_ofs++;
      last_f_rev = mon_f_rev;
      // beam signal from the processor's own frequencies
      ph_b  = ph_b + phase_t'(mon_f_rev);
      ph_sb = ph_sb + phase_t'(mon_f_s);
      th = 2.0 * PI * real'(ph_b) / (2.0 ** 34);
      ts = 2.0 * PI * real'(ph_sb) / (2.0 ** 34);
      adc = ADC_W'($rtoi(AC * $cos(9.0 * th + 0.3) + AU * $cos(8.0 * th + ts + 1.0)
                         + AL * $cos(10.0 * th - ts + 2.0)));
      if (n == 29999) begin
        check(mag(mon_usb[3]) > 2.0 * AU * G * 0.97 && mag(mon_usb[3]) < 2.0 * AU * G * 1.03,
              "h=8 USB", mag(mon_usb[3]), 2.0 * AU * G);
        if (mag(mon_usb[3]) > AU) n_usb++;
        check(mag(mon_lsb[5]) > 2.0 * AL * G * 0.97 && mag(mon_lsb[5]) < 2.0 * AL * G * 1.03,
              "h=10 LSB", mag(mon_lsb[5]), 2.0 * AL * G);
        if (mag(mon_lsb[5]) > AL) n_lsb++;
        for (int k = 0; k < N_HARM; k++) begin
          if (k != 3) check(mag(mon_usb[k]) < 0.05 * 2.0 * AU, "other USB", mag(mon_usb[k]), 0.0);
          if (k != 5) check(mag(mon_lsb[k]) < 0.05 * 2.0 * AU, "other LSB", mag(mon_lsb[k]), 0.0);
        end
        // phase B settings; references are taken at the next pattern tick
        for (int k = 0; k < N_HARM; k++) begin
          cfg[k].usb_on = 0; cfg[k].lsb_on = 0;
        end
        cfg[0].mod_on = 1; cfg[0].usb_mod_on = 1;
        hpat[0].ref_i = 18'sd9000;
        cfg[1].kp = '0; cfg[1].ki = 18'sd64;
        hpat[1].ref_i = 18'sd2000;
      end
      if (n == 70000) int_early = mon_fb[1].i;
      if (n >= 70000 && ctrl_tick && n % (576 * 8) == 0) begin
        if (mon_fb[1].i > int_early) n_int++;
        int_early = mon_fb[1].i;
      end
      if (n == 75000) peak = 0.0;
      if (n > 75000) begin
        if (dac > 0 && real'(dac) > peak) peak = real'(dac);
        if (dac < 0 && -real'(dac) > peak) peak = -real'(dac);
      end
      if (n == NCYC - 1) begin
        check(mag(mon_fb[0]) > R * 0.98 && mag(mon_fb[0]) < R * 1.02, "h=5 modulation", mag(mon_fb[0]), R);
        if (mag(mon_fb[0]) > R * 0.9) n_mod++;
        for (int k = 2; k < N_HARM; k++) begin
          check(mag(mon_fb[k]) < 0.02 * 2.0 * AU, "sideband off", mag(mon_fb[k]), 0.0);
          if (mag(mon_fb[k]) < 0.02 * 2.0 * AU) n_off++;
        end
        check(peak > R / 2.0 * 0.97 && peak < R / 2.0 * 1.03, "DAC peak", peak, R / 2.0);
        check(mon_f_rev > FREV && (mon_f_rev - FREV) % OFS == 0, "f_rev offsets", real'(mon_f_rev), real'(FREV));
      end
    end
    need(n_hdr, "header load");
    need(n_ofs, "f_rev offset accumulation");
    need(n_pat, "pattern loads");
    need(n_lut, "LUT writes");
    need(n_usb, "USB detection");
    need(n_lsb, "LSB detection");
    need(n_off, "sideband disable");
    need(n_mod, "reference modulation");
    need(n_int, "integral steps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
