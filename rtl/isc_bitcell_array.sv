// isc_bitcell_array -- 6T bitcell array with multi-row activation.
//
// ROWS x COLS cells. Every row whose wordline is high in 'wl_a' or 'wl_b'
// takes part in a read: after precharge each BL stays high only if every
// active cell on it holds 1, and each BLB only if every active cell holds 0,
// so the sensed values are bl = AND and blb = NOR of the active cells. With
// no row active both stay precharged (all ones). This is the digital
// equivalent of the bitline computing the design relies on; the analog
// sensing itself is not modelled.
// A write stores 'wdata' into the columns selected by 'wmask' of every row
// whose 'wl_a' wordline is high, at the rising clock edge. Reads are
// combinational (the sense amplifiers latch them).
// Contents are not reset; they start at whatever the memory holds.
module isc_bitcell_array #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl_a,
  input  logic [ROWS-1:0] wl_b,
  input  logic            we,
  input  logic [COLS-1:0] wmask,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] bl,
  output logic [COLS-1:0] blb
);
  logic [COLS-1:0] cells [ROWS];

  always_comb begin
    bl  = '1;
    blb = '1;
    for (int unsigned r = 0; r < ROWS; r++)
      if (wl_a[r] || wl_b[r]) begin
        bl  = bl  &  cells[r];
        blb = blb & ~cells[r];
      end
  end

  always_ff @(posedge clk)
    for (int unsigned r = 0; r < ROWS; r++)
      if (we && wl_a[r]) cells[r] <= (cells[r] & ~wmask) | (wdata & wmask);
endmodule
