// tb_dds: loads a revolution pattern (header then offsets) plus synchrotron and
// modulation words with shortened strobe periods, and checks the frequency words
// against an independent model at every clock and that each phase accumulator
// advances by its frequency word every clock.
`timescale 1ns/1ps
module tb_dds;
  import mmfb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pattern_tick, ctrl_tick;
  freq_pattern_t pat;
  freq_t f_rev, f_s, f_mod;
  phase_t ph_rev, ph_s, ph_mod, p_rev0, p_s0, p_mod0;
  freq_t  m_rev, m_s, m_mod, f_rev0, f_s0, f_mod0;
  logic signed [31:0] m_ofs;
  int checks = 0, failures = 0, hdr = 0, acc = 0;
  always #5 clk = ~clk;

  dds dut (.clk, .rst_n, .pattern_tick, .ctrl_tick, .pat, .f_rev, .f_s, .f_mod,
           .ph_rev, .ph_s, .ph_mod);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pattern_tick = 0; ctrl_tick = 0; pat = '0;
    m_rev = 0; m_s = 0; m_mod = 0; m_ofs = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      logic pt, ct;
      freq_pattern_t p;
      pt = (t % 100) == 7;
      ct = (t % 4) == 1 || (t % 100) == 7;
      p.rev_is_header = (t % 5000) == 7;
      p.rev_word  = p.rev_is_header ? 32'd22_600_000 + $urandom_range(0, 100000)
                                    : 32'($signed($urandom_range(0, 200)) - 100);
      p.fs_word   = $urandom_range(3000, 42000);
      p.fmod_word = $urandom_range(3000, 42000);
      pattern_tick <= pt; ctrl_tick <= ct; pat <= p;
      f_rev0 = f_rev; f_s0 = f_s; f_mod0 = f_mod;
      p_rev0 = ph_rev; p_s0 = ph_s; p_mod0 = ph_mod;
      @(posedge clk);
      #1;
      // phases advanced by the frequency held before this edge
      checks++;
      if (ph_rev != p_rev0 + phase_t'(f_rev0) || ph_s != p_s0 + phase_t'(f_s0) ||
          ph_mod != p_mod0 + phase_t'(f_mod0)) begin
        failures++;
        if (failures < 10) $display("phase step wrong at t=%0d", t);
      end
      // frequency model
      if (pt) begin m_s = p.fs_word; m_mod = p.fmod_word; end
      if (pt && p.rev_is_header) begin
        m_rev = p.rev_word; m_ofs = 0; hdr++;
      end else begin
        if (ct) begin m_rev = m_rev + freq_t'(m_ofs); acc++; end
        if (pt) m_ofs = $signed(p.rev_word);
      end
      checks++;
      if (f_rev != m_rev || f_s != m_s || f_mod != m_mod) begin
        failures++;
        if (failures < 10) $display("freq mismatch t=%0d: %0d/%0d", t, f_rev, m_rev);
      end
    end
    checks++;
    if (hdr < 3 || acc < 1000) begin failures++; $display("pattern not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
