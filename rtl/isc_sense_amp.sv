// isc_sense_amp -- modified sense amplifier of one bitline pair.
//
// The pair of sense amplifiers on BL and BLB resolves, with the wordlines of
// the active rows raised, to 'bl' = AND of the active cells and 'blb' = NOR
// of them (AND of their complements). From these the column forms
//   AND = bl, OR = ~blb, XOR = NOR(bl, blb), NOT = blb
// (XOR as the NOR of the two sense outputs, as the bitline-logic figure of
// the design prints it). A first multiplexer, steered by 'op', picks one of
// the four; a second one, steered by 'sel', picks that result, the
// neighbour latch D(n-1) or D(n+1) (1-bit shift) or the bit-extension value;
// a flip-flop stores the choice when 'en' is high and drives 'dout'.
// With a single active row, AND gives the cell value (plain read) and NOT
// its complement.
// Feeding 'ext_in' through the second multiplexer is this design's own
// choice; the rest follows the modified-SA figure. Reset clears the latch.
module isc_sense_amp
  import isc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    bl,       // sensed BL: AND of active cells
  input  logic    blb,      // sensed BLB: NOR of active cells
  input  logic [1:0] op,    // logic_op_e
  input  logic [1:0] sel,   // sa_sel_e
  input  logic    d_prev,   // D(n-1), latch of the lower column
  input  logic    d_next,   // D(n+1), latch of the higher column
  input  logic    ext_in,
  input  logic    en,
  output logic    dout
);
  logic lres, nxt;

  always_comb begin
    unique case (logic_op_e'(op))
      LOP_AND: lres = bl;
      LOP_OR:  lres = ~blb;
      LOP_XOR: lres = ~(bl | blb);
      default: lres = blb;
    endcase
    unique case (sa_sel_e'(sel))
      SH_LOGIC: nxt = lres;
      SH_LEFT:  nxt = d_prev;
      SH_RIGHT: nxt = d_next;
      default:  nxt = ext_in;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  dout <= 1'b0;
    else if (en) dout <= nxt;
endmodule
