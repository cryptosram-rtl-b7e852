// tb_sram_subarray -- random word writes and reads on a standard subarray
// against a model array; checks one-cycle read latency and that a write
// does not disturb the read-data register.
module tb_sram_subarray;
  localparam int unsigned ROWS = 128, COLS = 256, WORDS = COLS / 32;
  logic clk = 0;
  logic en, we;
  logic [6:0] row;
  logic [2:0] word;
  logic [31:0] wdata, rdata, last;
  logic [31:0] model [ROWS*WORDS];
  logic        known [ROWS*WORDS];
  int checks = 0, failures = 0;

  sram_subarray #(.ROWS(ROWS), .COLS(COLS), .WORD_W(32)) dut (.clk, .en, .we, .row, .word, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    en = 0; we = 0; row = 0; word = 0; wdata = 0;
    for (int i = 0; i < ROWS * WORDS; i++) known[i] = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      a = $urandom_range(ROWS * WORDS - 1);
      {row, word} = 10'(a);
      en = 1;
      we = ($urandom_range(2) != 0) || !known[a];
      wdata = $urandom;
      if (we) begin model[a] = wdata; known[a] = 1; last = rdata; end
      @(negedge clk);
      en = 0;
      checks++;
      if (we ? (rdata !== last) : (rdata !== model[a])) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d we=%0d rdata=%h", a, we, rdata);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
