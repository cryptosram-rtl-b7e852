// isc_pkg -- types and constants shared by the in-SRAM computing (ISC) blocks.
//
// An ISC command is 16 bits: a 4-bit opcode, an 8-bit index (a row, a column
// or a shift count) and a 4-bit option field, in that order from the MSB.
// The opcodes and the fixed option bits follow the command table of the
// design; which option bits select what (logic operation, shift direction,
// write source, block width) is this implementation's own assignment of the
// bits the table leaves open ("x").
package isc_pkg;

  typedef enum logic [3:0] {
    OPC_RD_ROW   = 4'b0001,  // read row into the sense amplifiers
    OPC_WR_ROW   = 4'b0010,  // write the sense amplifiers (or bus data) to a row
    OPC_SHIFT    = 4'b0011,  // shift the sense-amplifier latches by 'num' bits
    OPC_ACT_ROW  = 4'b1011,  // give the first row decoder its row (src1)
    OPC_LOGIC_OP = 4'b1001,  // give the second decoder src2, raise both, compute
    OPC_EXT_BIT  = 4'b1111   // extend one bit of the extension row over a block
  } opcode_e;

  typedef struct packed {
    logic [3:0] opcode;
    logic [7:0] index;
    logic [3:0] option;
  } isc_cmd_t;

  // Logic operation selected by option[2:1] of logic_op.
  typedef enum logic [1:0] {
    LOP_AND = 2'd0,
    LOP_OR  = 2'd1,
    LOP_XOR = 2'd2,
    LOP_NOT = 2'd3   // NOR of the active rows: NOT when src1 == src2
  } logic_op_e;

  // Input selected by the second (shift) multiplexer in front of the
  // sense-amplifier flip-flop.
  typedef enum logic [1:0] {
    SH_LOGIC = 2'd0,  // result of the logic multiplexer
    SH_LEFT  = 2'd1,  // take D(n-1): the row moves toward higher columns
    SH_RIGHT = 2'd2,  // take D(n+1): the row moves toward lower columns
    SH_EXT   = 2'd3   // bit-extension value
  } sa_sel_e;

  // Decoded control word produced by the command decoder (CD).
  typedef struct packed {
    logic            rd_row;
    logic            wr_row;
    logic            wr_from_bus;  // wr_row option[3]: 1 = data bus, 0 = SA
    logic            shift;
    logic            shift_right;  // shift option[1]
    logic            act_row;
    logic            logic_op;
    logic            ext_bit;
    logic            illegal;
    logic [7:0]      index;        // row / column / shift count
    logic [1:0]      lop;          // logic_op_e
    logic [2:0]      ext_width;    // block width code: 16 << code
  } isc_ctrl_t;

  // Mnemonic constructors, used by testbenches and command-set generators.
  function automatic isc_cmd_t cmd_rd_row(input logic [7:0] src);
    return '{opcode: OPC_RD_ROW, index: src, option: 4'b1000};
  endfunction
  function automatic isc_cmd_t cmd_wr_row(input logic [7:0] dst, input logic from_bus = 1'b0);
    return '{opcode: OPC_WR_ROW, index: dst, option: {from_bus, 3'b000}};
  endfunction
  function automatic isc_cmd_t cmd_shift(input logic [7:0] num, input logic right);
    return '{opcode: OPC_SHIFT, index: num, option: {2'b10, right, 1'b0}};
  endfunction
  function automatic isc_cmd_t cmd_act_row(input logic [7:0] src1);
    return '{opcode: OPC_ACT_ROW, index: src1, option: 4'b0001};
  endfunction
  function automatic isc_cmd_t cmd_logic_op(input logic [7:0] src2, input logic_op_e op);
    return '{opcode: OPC_LOGIC_OP, index: src2, option: {1'b0, op, 1'b0}};
  endfunction
  function automatic isc_cmd_t cmd_ext_bit(input logic [7:0] col, input logic [2:0] width_code);
    return '{opcode: OPC_EXT_BIT, index: col, option: {width_code, 1'b0}};
  endfunction

endpackage
