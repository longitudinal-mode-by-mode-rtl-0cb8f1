// offset_lut: writable look-up table addressed by a frequency word.
//
// The feedback processor compensates the frequency response of the system with
// tables indexed by frequency: the phase offset LUT of the DDC (addressed by the
// harmonic frequency h*f_rev), the USB and LSB phase offset LUTs of the single
// sideband filter (addressed by m*f_s), and the gain offset LUT of the DUC
// (addressed by h*f_rev). This module is that table. The read address is the
// frequency word shifted right by ALSB; a frequency above the table's range reads
// the last entry. After reset every entry is swept to INIT (one entry per clock,
// 2^AW clocks, ready low meanwhile); entries are then written through a simple
// write port by the control system.
//
// Timing: one clock from freq to data (registered read). Writes take effect on the
// next read of the same entry.
//
// The paper gives what each LUT is addressed by and what it compensates; its depth,
// word width and address mapping are this design's choices.
module offset_lut #(
  parameter int unsigned FW   = 32,    // frequency word width
  parameter int unsigned AW   = 8,     // address width (2^AW entries)
  parameter int unsigned DW   = 16,    // entry width
  parameter int unsigned ALSB = 20,    // frequency bit that is address bit 0
  parameter logic [DW-1:0] INIT = '0   // value of every entry after reset
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [FW-1:0] freq,
  output logic [DW-1:0] data,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  output logic          ready
);

  logic [DW-1:0] mem [2**AW];
  logic [AW-1:0] raddr;
  logic          clr;
  logic [AW-1:0] clr_ptr;
  logic [FW-1:0] fsh;

  assign ready = !clr;

  always_comb begin
    fsh = freq >> ALSB;
    if (fsh > FW'((2 ** AW) - 1)) raddr = '1;
    else                          raddr = fsh[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr     <= 1'b1;
      clr_ptr <= '0;
    end else if (clr) begin
      clr_ptr <= clr_ptr + 1'b1;
      if (clr_ptr == '1) clr <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clr)     mem[clr_ptr] <= INIT;
    else if (we) mem[waddr]   <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) data <= INIT;
    else        data <= mem[raddr];
  end

endmodule
