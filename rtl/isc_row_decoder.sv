// isc_row_decoder -- row decoder of an ISC-enabled subarray.
//
// Turns a row index into a one-hot wordline vector while 'en' is high and
// raises no wordline otherwise. An ISC-enabled subarray carries two of these:
// the first is loaded by act_row (or rd_row / wr_row / ext_bit), the second
// by logic_op, and when both are enabled in the same cycle two wordlines rise
// together, which is what turns the bitlines into AND / NOR gates.
// Purely combinational. An index at or above ROWS raises no wordline.
module isc_row_decoder #(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned IDX_W = 8
) (
  input  logic             en,
  input  logic [IDX_W-1:0] idx,
  output logic [ROWS-1:0]  wl
);
  always_comb begin
    wl = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (en && idx == IDX_W'(r)) wl[r] = 1'b1;
  end
endmodule
