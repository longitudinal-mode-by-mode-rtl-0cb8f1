// tb_offset_lut: checks the clearing sweep (every entry reads INIT), random writes
// read back through frequency words after one clock, and the clamping of
// frequencies above the table's range to the last entry.
`timescale 1ns/1ps
module tb_offset_lut;
  localparam int unsigned AW = 8, DW = 16, ALSB = 20;
  localparam logic [DW-1:0] INIT = 16'h4000;
  logic clk = 0, rst_n = 0;
  logic [31:0] freq;
  logic [DW-1:0] data, wdata;
  logic we, ready;
  logic [AW-1:0] waddr;
  logic [DW-1:0] model [2**AW];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  offset_lut #(.FW(32), .AW(AW), .DW(DW), .ALSB(ALSB), .INIT(INIT)) dut (
    .clk, .rst_n, .freq, .data, .we, .waddr, .wdata, .ready);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input logic [31:0] fw);
    logic [31:0] a;
    freq <= fw;
    @(posedge clk);
    #1;
    a = fw >> ALSB;
    if (a > 255) a = 255;
    checks++;
    if (data !== model[a[AW-1:0]]) begin
      failures++;
      if (failures < 10) $display("read %h: got %h exp %h", fw, data, model[a[AW-1:0]]);
    end
  endtask

  initial begin
    we = 0; waddr = '0; wdata = '0; freq = '0;
    for (int k = 0; k < 2**AW; k++) model[k] = INIT;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (ready) begin failures++; $display("ready too early"); end
    wait (ready);
    @(posedge clk);
    for (int k = 0; k < 2**AW; k++) read_check(32'(k) << ALSB);
    for (int n = 0; n < 600; n++) begin
      logic [AW-1:0] a;
      logic [DW-1:0] d;
      a = AW'($urandom); d = DW'($urandom);
      we <= 1; waddr <= a; wdata <= d;
      @(posedge clk);
      #1;
      model[a] = d;
      we <= 0;
      read_check({4'h0, a, 20'(($urandom))});
    end
    for (int n = 0; n < 200; n++) read_check($urandom);
    read_check(32'hffff_ffff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
