// cmd_array -- command (CMD) array.
//
// A small SRAM holding the command sets of all in-SRAM functions, one 16-bit
// ISC command per entry, each function's set stored contiguously from its
// base address. ISC-CTRL reads it: 're' with 'raddr' returns the command on
// 'rdata' one cycle later, and 'rdata' holds while 're' is low (the
// controller relies on this to hold a stalled command). The write port loads
// the command sets (from the host). The default depth, 2240 entries
// (4.48 KB), is just above the 2233 commands / 4.47 KB that the AES-128,
// GHASH and SHA3 functions of the design need together. Contents are not
// reset.
module cmd_array
  import isc_pkg::*;
#(
  parameter int unsigned DEPTH = 2240,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  isc_cmd_t      wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output isc_cmd_t      rdata
);
  isc_cmd_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
