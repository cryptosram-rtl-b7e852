// tb_subarray_select -- random byte addresses through the address decoder
// of the 64-subarray default: checks the subarray / row / word fields of the
// non-interleaved map and the one-hot select, and that consecutive word
// addresses stay inside one subarray for 4 KB.
module tb_subarray_select;
  logic [17:0] addr;
  logic en;
  logic [5:0] sub;
  logic [6:0] row;
  logic [2:0] word;
  logic hit;
  logic [63:0] sel;
  int checks = 0, failures = 0;

  subarray_select #(.N_SUB(64), .ROWS(128), .COLS(256), .WORD_W(32)) dut (.addr, .en, .sub, .row, .word, .hit, .sel);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    for (int n = 0; n < 5000; n++) begin
      a = $urandom_range(262143);
      addr = 18'(a); en = 1'($urandom_range(1));
      #1;
      checks++;
      if (sub !== 6'(a / 4096) || row !== 7'((a % 4096) / 32) || word !== 3'((a % 32) / 4) || !hit ||
          sel !== (en ? (64'(1) << (a / 4096)) : 64'(0))) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h sub=%0d row=%0d word=%0d", a, sub, row, word);
      end
    end
    // 4 KB of consecutive words: one subarray, rows in order
    for (int a2 = 8192; a2 < 8192 + 4096; a2 += 4) begin
      addr = 18'(a2); en = 1; #1;
      checks++;
      if (sub !== 6'd2 || row !== 7'((a2 - 8192) / 32)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
