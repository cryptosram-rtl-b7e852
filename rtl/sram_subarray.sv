// sram_subarray -- standard (non-computing) SRAM subarray.
//
// The unmodified subarrays of the memory: ROWS x COLS cells accessed one
// WORD_W-bit word at a time through the system bus. 'en' with 'we' writes
// 'wdata' into word 'word' of row 'row' at the clock edge; 'en' without 'we'
// returns that word on 'rdata' one cycle later. Written as a plain
// synchronous memory array; contents are not reset.
module sram_subarray #(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 256,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned WORDS  = COLS / WORD_W,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned WW     = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [RW-1:0]     row,
  input  logic [WW-1:0]     word,
  input  logic [WORD_W-1:0] wdata,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [ROWS*WORDS];
  logic [RW+WW-1:0]  a;

  assign a = {row, word};

  always_ff @(posedge clk)
    if (en) begin
      if (we) mem[a] <= wdata;
      else    rdata  <= mem[a];
    end
endmodule
