// tb_isc_sense_amp -- drives one modified sense amplifier with the bitline
// values produced by every pair of cell values (a, b) and checks the four
// logic results, the two shift inputs, the extension input and the hold
// when 'en' is low, one clock per case.
module tb_isc_sense_amp;
  import isc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic bl, blb, d_prev, d_next, ext_in, en, dout;
  logic [1:0] op, sel;
  int checks = 0, failures = 0;

  isc_sense_amp dut (.clk, .rst_n, .bl, .blb, .op, .sel, .d_prev, .d_next, .ext_in, .en, .dout);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step_check(input logic exp, input string what);
    @(posedge clk); #1;
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL %s: dout=%0d exp=%0d", what, dout, exp);
    end
  endtask

  initial begin
    logic a, b, prev;
    {bl, blb, d_prev, d_next, ext_in, en, op, sel} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      a = 1'(k >> 1); b = 1'(k);
      bl = a & b; blb = ~a & ~b;      // two active cells on BL / BLB
      en = 1; sel = 2'(SH_LOGIC);
      op = 2'(LOP_AND); step_check(a & b,    "AND");
      op = 2'(LOP_OR);  step_check(a | b,    "OR");
      op = 2'(LOP_XOR); step_check(a ^ b,    "XOR");
      op = 2'(LOP_NOT); step_check(~(a | b), "NOR/NOT");
    end
    for (int k = 0; k < 8; k++) begin
      {d_prev, d_next, ext_in} = 3'(k);
      sel = 2'(SH_LEFT);  step_check(d_prev, "shift from D(n-1)");
      sel = 2'(SH_RIGHT); step_check(d_next, "shift from D(n+1)");
      sel = 2'(SH_EXT);   step_check(ext_in, "extension");
      prev = dout;
      en = 0; {d_prev, d_next, ext_in} = ~3'(k);
      step_check(prev, "hold");
      en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
