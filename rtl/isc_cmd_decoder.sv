// isc_cmd_decoder -- command decoder (CD) of an ISC-enabled subarray.
//
// Splits a 16-bit ISC command (opcode[15:12], index[11:4], option[3:0]) into
// the control word of the subarray: which of the six commands it is, the
// row/column/count index, the 2-bit logic operation (from the low option
// bits of logic_op), the shift direction, the write source and the
// bit-extension block width. The fixed option bits of the command table
// (rd_row 1000, wr_row x000, shift 1xx0, act_row 0001, logic_op 0xx0,
// ext_bit xxx0) are checked; a command whose opcode is unknown or whose
// fixed bits differ, or an ext_bit width code above 5, is flagged 'illegal'
// and selects no operation. Combinational; 'valid' gates every output flag.
// The index and option fields are passed on as they are (each unit uses only
// the ones that belong to the decoded command), so those output bits are
// wires from the input.
//
// Own choices for the "x" option bits: logic_op option[2:1] = operation
// (AND, OR, XOR, NOT), shift option[1] = direction (1 = right),
// wr_row option[3] = source (1 = data bus), ext_bit option[3:1] = width
// code, width = 16 << code (16 ... 512).
module isc_cmd_decoder
  import isc_pkg::*;
(
  input  logic      valid,
  input  isc_cmd_t  cmd,
  output isc_ctrl_t ctrl
);
  always_comb begin
    ctrl           = '0;
    ctrl.index     = cmd.index;
    ctrl.lop       = cmd.option[2:1];
    ctrl.ext_width = cmd.option[3:1];
    ctrl.shift_right = cmd.option[1];
    ctrl.wr_from_bus = cmd.option[3];
    if (valid) begin
      unique case (cmd.opcode)
        OPC_RD_ROW:   if (cmd.option == 4'b1000)                  ctrl.rd_row   = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        OPC_WR_ROW:   if (cmd.option[2:0] == 3'b000)              ctrl.wr_row   = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        OPC_SHIFT:    if (cmd.option[3] && !cmd.option[0])        ctrl.shift    = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        OPC_ACT_ROW:  if (cmd.option == 4'b0001)                  ctrl.act_row  = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        OPC_LOGIC_OP: if (!cmd.option[3] && !cmd.option[0])       ctrl.logic_op = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        OPC_EXT_BIT:  if (!cmd.option[0] && cmd.option[3:1] <= 3'd5) ctrl.ext_bit = 1'b1;
                      else                                        ctrl.illegal  = 1'b1;
        default:                                                  ctrl.illegal  = 1'b1;
      endcase
    end
  end
endmodule
