// subarray_select -- bus address decoder of the computing SRAM.
//
// Splits a byte address of the SRAM into subarray, row and word with
// non-interleaved addressing: consecutive words fill one row, consecutive
// rows one subarray, so a block of data placed by DMA at consecutive
// addresses lands in a single subarray, row after row, where bitline
// computing can reach it. Address bits, from the top:
//   [subarray | row (log2 ROWS) | word (log2 COLS/WORD_W) | byte (2)]
// 'sel' is the one-hot subarray select; 'hit' is low for an address beyond
// the last subarray; with a power-of-two N_SUB (the default 64) every
// address hits and 'hit' is constant 1. 'sub', 'row' and 'word' are plain
// slices of the address, and the two byte-offset bits are not used: the
// arrays are accessed a whole word at a time. Combinational.
// The field order is this design's choice; the design only requires that
// addressing be non-interleaved.
module subarray_select #(
  parameter int unsigned N_SUB  = 64,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 256,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned WORDS = COLS / WORD_W,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned BW    = $clog2(WORD_W / 8),
  localparam int unsigned SUBW  = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned AW    = SUBW + RW + WW + BW
) (
  input  logic [AW-1:0]   addr,
  input  logic            en,
  output logic [SUBW-1:0] sub,
  output logic [RW-1:0]   row,
  output logic [WW-1:0]   word,
  output logic            hit,
  output logic [N_SUB-1:0] sel
);
  always_comb begin
    {sub, row, word} = addr[AW-1:BW];
    hit = (32'(sub) < N_SUB);
    sel = '0;
    for (int unsigned s = 0; s < N_SUB; s++)
      if (en && 32'(sub) == s) sel[s] = 1'b1;
  end
endmodule
