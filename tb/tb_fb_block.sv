// tb_fb_block: checks the feedback block with a constant filter output.
// Phase 1: kp = 1, ki = 0, no modulation: fb = reference - filter output.
// Phase 2: ki = 1/8 with control strobes every 16 clocks: after K strobes
//          fb = e * (1 + K/8) (e = reference - filter output).
// Phase 3: pi_clear, kp = 1, modulation of the USB on: |fb + filt| follows
//          |reference| while its phase turns with the modulation phase.
// Also counts pattern loads of the reference.
`timescale 1ns/1ps
module tb_fb_block;
  import mmfb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pattern_tick, ctrl_tick, mod_on, usb_mod_on, lsb_mod_on, pi_clear;
  iq_pair_t ref_pat, filt, ref_used, fb;
  phase_t ph_mod;
  logic signed [GAIN_W-1:0] kp, ki;
  int checks = 0, failures = 0, k_ticks = 0;
  always #5 clk = ~clk;

  fb_block dut (.clk, .rst_n, .pattern_tick, .ctrl_tick, .ref_pat, .filt, .ph_mod,
                .mod_on, .usb_mod_on, .lsb_mod_on, .pi_clear, .kp, .ki, .ref_used, .fb);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint ei, input longint eq, input int tol, input string what);
    checks++;
    if (longint'(fb.i) - ei > tol || ei - longint'(fb.i) > tol ||
        longint'(fb.q) - eq > tol || eq - longint'(fb.q) > tol) begin
      failures++;
      if (failures < 10) $display("%s: fb %0d,%0d exp %0d,%0d", what, fb.i, fb.q, ei, eq);
    end
  endtask

  initial begin
    pattern_tick = 0; ctrl_tick = 0; mod_on = 0; usb_mod_on = 0; lsb_mod_on = 0; pi_clear = 0;
    ref_pat = '{i: 18'sd5000, q: -18'sd3000};
    filt = '{i: 18'sd1000, q: 18'sd1000};
    ph_mod = '0; kp = 18'sd4096; ki = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) pattern_tick = 1;
    @(negedge clk) pattern_tick = 0;
    repeat (10) @(negedge clk);
    chk(4000, -4000, 0, "P only");
    // integral action
    ki = 18'sd512;
    for (int n = 0; n < 16 * 40; n++) begin
      @(negedge clk);
      ctrl_tick = (n % 16) == 0;
      if (ctrl_tick) k_ticks++;
    end
    ctrl_tick = 0;
    repeat (3) @(negedge clk);
    chk(4000 + k_ticks * 500, -4000 - k_ticks * 500, 0, "PI");
    // new reference from the pattern, then clear and modulation
    ref_pat = '{i: 18'sd8000, q: 18'sd0};
    @(negedge clk) pattern_tick = 1; pi_clear = 1; ki = '0;
    @(negedge clk) pattern_tick = 0; pi_clear = 0;
    repeat (5) @(negedge clk);
    chk(7000, -1000, 0, "new reference");
    mod_on = 1; usb_mod_on = 1;
    for (int n = 0; n < 4000; n++) begin
      real mag;
      @(negedge clk);
      ph_mod = ph_mod + phase_t'(34'd20_000_000);
      if (n > 40) begin
        mag = $sqrt((real'(fb.i) + 1000.0) ** 2 + (real'(fb.q) + 1000.0) ** 2);
        checks++;
        if (mag < 7990.0 || mag > 8010.0) begin
          failures++;
          if (failures < 10) $display("modulated magnitude %f", mag);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
