// tb_cordic: drives random and corner phases into the CORDIC and compares cos and
// sin, ITER + 2 clocks later, with real-valued cos/sin (tolerance 4 LSB). Also checks
// the latency by timing a step from phase 0 to a quarter turn.
`timescale 1ns/1ps
module tb_cordic;
  localparam int unsigned PW = 20, TW = 16, ITER = 16, LAT = ITER + 2;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  logic [PW-1:0] phase;
  logic signed [TW-1:0] c, s;
  int checks = 0, failures = 0;

  cordic #(.PW(PW), .TW(TW), .ITER(ITER)) dut (.clk, .rst_n, .phase, .cos_o(c), .sin_o(s));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [PW-1:0] hist [$];
  real a, ec, es;
  initial begin
    phase = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: hold phase 0 then step to a quarter turn
    repeat (LAT + 2) @(posedge clk);
    phase <= PW'(1) << (PW - 2);
    @(posedge clk);
    for (int k = 1; k <= LAT + 2; k++) begin
      @(negedge clk);
      if (k == LAT) begin
        checks++;
        if (!(s > 32000 && c < 100 && c > -100)) begin
          failures++;
          $display("latency: after %0d clocks sin=%0d cos=%0d", k, s, c);
        end
      end
      if (k == LAT - 1) begin
        checks++;
        if (s > 100) begin
          failures++;
          $display("latency: output changed early (sin=%0d)", s);
        end
      end
    end
    // random and corner phases
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      if (n < 8) phase <= PW'(n) << (PW - 3);
      else phase <= PW'($urandom);
      #1 hist.push_back(phase);
      if (hist.size() > LAT) begin
        a  = 2.0 * PI * real'(hist.pop_front()) / (2.0 ** PW);
        ec = 32767.0 * $cos(a);
        es = 32767.0 * $sin(a);
        // the values of the phase entered LAT clocks ago are visible now
        checks++;
        if ((real'(c) - ec > 4.0) || (ec - real'(c) > 4.0) ||
            (real'(s) - es > 4.0) || (es - real'(s) > 4.0)) begin
          failures++;
          if (failures < 10) $display("mismatch: cos=%0d exp=%f sin=%0d exp=%f", c, ec, s, es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
