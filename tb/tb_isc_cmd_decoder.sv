// tb_isc_cmd_decoder -- checks the command decoder on every one of the
// 65536 command words, valid and not valid, against a reference written
// from the command table (opcode, fixed option bits) independently of the
// decoder's own case statement.
module tb_isc_cmd_decoder;
  import isc_pkg::*;
  logic      valid;
  isc_cmd_t  cmd;
  isc_ctrl_t ctrl;
  int checks = 0, failures = 0;

  isc_cmd_decoder dut (.valid, .cmd, .ctrl);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: returns a 7-bit vector {rd, wr, sh, act, lop, ext, illegal}.
  function automatic logic [6:0] ref_kind(input logic [15:0] w);
    logic [3:0] o, op;
    op = w[15:12]; o = w[3:0];
    if (op == 4'b0001 && o == 4'b1000)              return 7'b1000000;
    if (op == 4'b0010 && o[2:0] == 3'b000)          return 7'b0100000;
    if (op == 4'b0011 && o[3] == 1'b1 && !o[0])     return 7'b0010000;
    if (op == 4'b1011 && o == 4'b0001)              return 7'b0001000;
    if (op == 4'b1001 && o[3] == 1'b0 && !o[0])     return 7'b0000100;
    if (op == 4'b1111 && !o[0] && o[3:1] < 3'd6)    return 7'b0000010;
    return 7'b0000001;
  endfunction

  initial begin
    logic [6:0] exp_k, got_k;
    for (int v = 0; v < 2; v++)
      for (int w = 0; w < 65536; w++) begin
        valid = 1'(v); cmd = isc_cmd_t'(16'(w));
        #1;
        exp_k = v ? ref_kind(16'(w)) : 7'b0;
        got_k = {ctrl.rd_row, ctrl.wr_row, ctrl.shift, ctrl.act_row, ctrl.logic_op, ctrl.ext_bit, ctrl.illegal};
        checks++;
        if (got_k !== exp_k || ctrl.index !== 8'(w >> 4)) begin
          failures++;
          if (failures < 10) $display("FAIL w=%h v=%0d kind=%b exp=%b", w, v, got_k, exp_k);
        end
        if (v && exp_k == 7'b0000100) begin
          checks++;
          if (ctrl.lop !== 2'((w >> 1) & 3)) failures++;
        end
        if (v && exp_k == 7'b0010000) begin
          checks++;
          if (ctrl.shift_right !== 1'((w >> 1) & 1)) failures++;
        end
        if (v && exp_k == 7'b0100000) begin
          checks++;
          if (ctrl.wr_from_bus !== 1'((w >> 3) & 1)) failures++;
        end
        if (v && exp_k == 7'b0000010) begin
          checks++;
          if (ctrl.ext_width !== 3'((w >> 1) & 7)) failures++;
        end
      end
    // The mnemonic constructors produce legal commands of the right kind.
    valid = 1'b1;
    cmd = cmd_rd_row(8'd5);                #1; checks++; if (!ctrl.rd_row)   failures++;
    cmd = cmd_wr_row(8'd5);                #1; checks++; if (!ctrl.wr_row)   failures++;
    cmd = cmd_shift(8'd3, 1'b1);           #1; checks++; if (!ctrl.shift || !ctrl.shift_right) failures++;
    cmd = cmd_act_row(8'd7);               #1; checks++; if (!ctrl.act_row)  failures++;
    cmd = cmd_logic_op(8'd9, LOP_XOR);     #1; checks++; if (!ctrl.logic_op || ctrl.lop != 2'(LOP_XOR)) failures++;
    cmd = cmd_ext_bit(8'd3, 3'd2);         #1; checks++; if (!ctrl.ext_bit || ctrl.ext_width != 3'd2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
