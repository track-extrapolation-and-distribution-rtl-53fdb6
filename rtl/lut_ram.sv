// lut_ram -- synchronous lookup RAM with a configuration write port.
//
// The XTRP does all of its per-track arithmetic by table lookup. On a Data Board
// each of the 24 segment RAMs is 32K x 36: 15 address bits (13 bits of track data
// plus 2 phase bits) and two 18-bit output sides. On the Track Trigger each of the
// 30 pair RAMs is 512K x 8: two 9-bit track fields plus one phase bit. This module
// is that RAM; AW and DW select the organisation, the defaults are the Data Board's.
//
// Read: raddr is sampled on a rising edge with ce high; rdata holds the word one
// cycle later and keeps it while ce is low (a pipeline register, as in the
// synchronous RAMs the paper describes). Write: the table is loaded through the
// configuration port (we, waddr, wdata), which works on every clock regardless
// of ce, as the VME download does on the boards. The contents are not reset;
// they must be written before use.
module lut_ram #(
  parameter int unsigned AW = 15,
  parameter int unsigned DW = 36
) (
  input  logic          clk,
  input  logic          ce,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (ce) rdata <= mem[raddr];
  end
endmodule
