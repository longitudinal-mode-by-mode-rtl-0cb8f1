// tb_cic_filter: checks both CIC configurations of the design (N=5, R=2, M=256 as in
// the DDC, N=2, R=1, M=32 as in the tracking filter) against a reference model made
// of N cascaded boxcar sums of length R*M, decimated by R and divided by
// 2^(N*log2(R*M)). Inputs are random 18-bit values with random gaps in in_valid.
// Every output value is compared exactly, and the latency from the input that
// completes a decimation group (the clock edge that samples it) to out_valid is
// checked to be 2N clocks.
`timescale 1ns/1ps
module tb_cic_filter;
  localparam int unsigned IW = 18;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- one checker per configuration -------------------------------------
  logic                 v_a, v_b, ov_a, ov_b, rdy_a, rdy_b;
  logic signed [IW-1:0] x_a, x_b, y_a, y_b;

  cic_filter #(.N(5), .R(2), .M(256), .IW(IW)) dut_a (
    .clk, .rst_n, .in_valid(v_a), .din(x_a), .out_valid(ov_a), .dout(y_a), .ready(rdy_a));
  cic_filter #(.N(2), .R(1), .M(32), .IW(IW)) dut_b (
    .clk, .rst_n, .in_valid(v_b), .din(x_b), .out_valid(ov_b), .dout(y_b), .ready(rdy_b));

  // reference model state
  longint hist_a [6][$];   // stage outputs, stage 0 = input
  longint hist_b [3][$];
  longint acc_a [6], acc_b [3];
  longint exp_a [$], exp_b [$];
  longint tin_a [$], tin_b [$];
  int     n_a = 0, n_b = 0, outs_a = 0, outs_b = 0;

  // full-precision boxcar cascade: one new input sample through N stages
  function automatic longint box(int unsigned N, int unsigned L, longint x, bit which);
    longint v, old;
    v = x;
    for (int k = 1; k <= int'(N); k++) begin
      if (which == 0) begin
        hist_a[k-1].push_back(v);
        old = (hist_a[k-1].size() > L) ? hist_a[k-1].pop_front() : 0;
        acc_a[k] = acc_a[k] + v - old;
        v = acc_a[k];
      end else begin
        hist_b[k-1].push_back(v);
        old = (hist_b[k-1].size() > L) ? hist_b[k-1].pop_front() : 0;
        acc_b[k] = acc_b[k] + v - old;
        v = acc_b[k];
      end
    end
    return v;
  endfunction

  initial begin
    for (int k = 0; k < 6; k++) acc_a[k] = 0;
    for (int k = 0; k < 3; k++) acc_b[k] = 0;
    v_a = 0; v_b = 0; x_a = '0; x_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rdy_a && rdy_b);
    @(posedge clk);
    for (int t = 0; t < 12000; t++) begin
      // configuration A: mostly continuous input
      v_a <= (t < 6000) ? 1'b1 : ($urandom_range(0, 3) != 0);
      x_a <= IW'($urandom);
      v_b <= ($urandom_range(0, 3) == 0);
      x_b <= IW'($urandom);
      @(posedge clk);
      #1;
      if (v_a) begin
        longint y;
        y = box(5, 512, longint'(x_a), 0);
        if ((n_a % 2) == 1) begin
          exp_a.push_back(y >>> 45);
          tin_a.push_back(cyc);
        end
        n_a++;
      end
      if (v_b) begin
        longint y;
        y = box(2, 32, longint'(x_b), 1);
        exp_b.push_back(y >>> 10);
        tin_b.push_back(cyc);
        n_b++;
      end
    end
    v_a <= 0; v_b <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0 || outs_a < 5000 || outs_b < 2000) begin
      failures++;
      $display("output count: %0d/%0d left, %0d/%0d seen", exp_a.size(), exp_b.size(), outs_a, outs_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output comparison
  always @(posedge clk) begin
    #2;
    if (ov_a) begin
      longint e, t0;
      checks++;
      outs_a++;
      e  = (exp_a.size() > 0) ? exp_a.pop_front() : 64'h7fff_ffff;
      t0 = (tin_a.size() > 0) ? tin_a.pop_front() : 0;
      if (longint'(y_a) != e || (cyc - t0) != 10) begin
        failures++;
        if (failures < 10) $display("A: got %0d exp %0d latency %0d", y_a, e, cyc - t0);
      end
    end
    if (ov_b) begin
      longint e, t0;
      checks++;
      outs_b++;
      e  = (exp_b.size() > 0) ? exp_b.pop_front() : 64'h7fff_ffff;
      t0 = (tin_b.size() > 0) ? tin_b.pop_front() : 0;
      if (longint'(y_b) != e || (cyc - t0) != 4) begin
        failures++;
        if (failures < 10) $display("B: got %0d exp %0d latency %0d", y_b, e, cyc - t0);
      end
    end
  end
endmodule
