// tb_rf_sum: random RF words from six harmonic blocks, including values that drive
// the sum out of the DAC range; the DAC word one clock later must be the
// saturated sum divided by 2.
`timescale 1ns/1ps
module tb_rf_sum;
  import mmfb_pkg::*;
  logic clk = 0, rst_n = 0;
  iq_t rf [6];
  logic signed [15:0] dac;
  int checks = 0, failures = 0, sat_hits = 0;
  always #5 clk = ~clk;

  rf_sum #(.N_IN(6), .SHIFT(1)) dut (.clk, .rst_n, .rf, .dac);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (rf[k]) rf[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      longint sum, e;
      @(negedge clk);
      sum = 0;
      foreach (rf[k]) begin
        rf[k] = (n % 3 == 0) ? iq_t'($urandom) : iq_t'($signed(18'($urandom)) >>> 4);
        sum += longint'(rf[k]);
      end
      e = sum >>> 1;
      if (e > 32767) begin e = 32767; sat_hits++; end
      if (e < -32768) begin e = -32768; sat_hits++; end
      @(posedge clk);
      #1;
      checks++;
      if (longint'(dac) != e) begin
        failures++;
        if (failures < 10) $display("dac %0d exp %0d", dac, e);
      end
    end
    checks++;
    if (sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
