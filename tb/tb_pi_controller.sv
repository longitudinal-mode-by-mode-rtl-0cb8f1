// tb_pi_controller: random errors and gains with control strobes every 8 clocks;
// the output is compared each clock with a model of P (every clock) plus a
// saturating integrator that steps only on the strobe. Also checks clear and the
// one-clock latency.
`timescale 1ns/1ps
module tb_pi_controller;
  import mmfb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ctrl_tick, clear;
  iq_t err, out;
  logic signed [GAIN_W-1:0] kp, ki;
  longint integ;
  int checks = 0, failures = 0, ticks = 0, sats = 0;
  always #5 clk = ~clk;

  pi_controller #(.INT_W(26)) dut (.clk, .rst_n, .ctrl_tick, .clear, .err, .kp, .ki, .out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fl(longint a, int sh);   // floor division by 2^sh
    return a >>> sh;
  endfunction

  initial begin
    ctrl_tick = 0; clear = 0; err = '0; kp = '0; ki = '0; integ = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40000; n++) begin
      longint p, e, exp_v;
      @(negedge clk);
      if (n % 2000 == 0) begin
        kp = GAIN_W'($urandom_range(0, 8192)) - GAIN_W'(2048);
        ki = GAIN_W'($urandom_range(0, 400));
      end
      err = iq_t'($urandom_range(0, 4000)) - iq_t'(1800);
      ctrl_tick = (n % 8) == 3;
      clear = (n % 5000) == 4999;
      e = longint'(err);
      p = fl(e * longint'(kp), 12);
      exp_v = p + integ;            // registered from the integrator before this edge
      if (exp_v > 131071) exp_v = 131071;
      if (exp_v < -131072) exp_v = -131072;
      if (clear) integ = 0;
      else if (ctrl_tick) begin
        integ = integ + fl(e * longint'(ki), 12);
        ticks++;
        if (integ > 33554431) begin integ = 33554431; sats++; end
        if (integ < -33554432) begin integ = -33554432; sats++; end
      end
      @(posedge clk);
      #1;
      checks++;
      if (longint'(out) != exp_v) begin
        failures++;
        if (failures < 10) $display("n=%0d out %0d exp %0d", n, out, exp_v);
      end
    end
    checks++;
    if (ticks < 1000) begin failures++; $display("too few control ticks"); end
    $display("integrator steps %0d, saturations %0d", ticks, sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
