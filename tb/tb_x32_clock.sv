// tb_x32_clock: runs a phase accumulator at two frequencies and checks that the
// tick count equals the number of 1/32-turn boundaries crossed (computed from an
// unwrapped phase), and that each tick is raised by the clock edge that samples the crossing phase.
`timescale 1ns/1ps
module tb_x32_clock;
  logic clk = 0, rst_n = 0;
  logic [33:0] phase;
  logic tick;
  int checks = 0, failures = 0;
  longint unsigned total;     // unwrapped phase
  longint unsigned f;
  int ticks;
  always #5 clk = ~clk;

  x32_clock #(.PHASE_W(34), .DIV_BITS(5)) dut (.clk, .rst_n, .phase, .tick);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = '0; total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (f_list[j]) begin
      longint unsigned start;
      f = f_list[j];
      start = total;
      ticks = 0;
      for (int t = 0; t < 40000; t++) begin
        longint unsigned prev;
        prev = total;
        total = total + f;
        phase <= total[33:0];
        // the edge that samples the new phase raises tick for a crossing
        @(posedge clk);
        #1;
        if (tick) ticks++;
        checks++;
        if (tick != ((total >> 29) != (prev >> 29))) begin
          failures++;
          if (failures < 10) $display("tick mismatch at t=%0d", t);
        end
      end
      checks++;
      if (ticks != int'((total >> 29) - (start >> 29))) begin
        failures++;
        $display("tick count %0d expected %0d", ticks, (total >> 29) - (start >> 29));
      end
      $display("f=%0d ticks=%0d", f, ticks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned f_list [2] = '{64'd41750 * 1000, 64'd3579 * 7000};
endmodule
