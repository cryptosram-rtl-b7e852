// tb_isc_row_decoder -- exhaustive check of the row decoder: every 8-bit
// index with the decoder enabled and disabled, against the expected one-hot
// wordline vector (none for an index beyond the last row).
module tb_isc_row_decoder;
  localparam int unsigned ROWS = 128;
  logic            en;
  logic [7:0]      idx;
  logic [ROWS-1:0] wl, exp_wl;
  int checks = 0, failures = 0;

  isc_row_decoder #(.ROWS(ROWS), .IDX_W(8)) dut (.en, .idx, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int i = 0; i < 256; i++) begin
        en = 1'(e); idx = 8'(i);
        #1;
        exp_wl = (e == 1 && i < ROWS) ? (ROWS'(1) << i) : '0;
        checks++;
        if (wl !== exp_wl) begin
          failures++;
          $display("FAIL en=%0d idx=%0d wl=%h", e, i, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
