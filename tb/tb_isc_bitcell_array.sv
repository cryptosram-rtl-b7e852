// tb_isc_bitcell_array -- fills the 128 x 256 array with random rows through
// full and masked writes, then checks single-row reads (bl = row,
// blb = ~row), two-row activation (bl = AND, blb = NOR), the precharged
// value with no row active, and that writes go only to the wl_a row.
module tb_isc_bitcell_array;
  localparam int unsigned ROWS = 128, COLS = 256;
  logic clk = 0;
  logic [ROWS-1:0] wl_a, wl_b;
  logic we;
  logic [COLS-1:0] wmask, wdata, bl, blb;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  isc_bitcell_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .wl_a, .wl_b, .we, .wmask, .wdata, .bl, .blb);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(input logic [COLS-1:0] e_bl, input logic [COLS-1:0] e_blb, input string what);
    #1;
    checks++;
    if (bl !== e_bl || blb !== e_blb) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int r1, r2;
    wl_a = '0; wl_b = '0; we = 0; wmask = '1; wdata = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wl_a = ROWS'(1) << r; we = 1; wdata = rnd(); wmask = '1;
      model[r] = wdata;
    end
    // masked writes
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      r1 = $urandom_range(ROWS - 1);
      wl_a = ROWS'(1) << r1; we = 1; wdata = rnd(); wmask = rnd();
      model[r1] = (model[r1] & ~wmask) | (wdata & wmask);
    end
    @(negedge clk); we = 0; wl_a = '0;
    check('1, '1, "precharged");
    for (int r = 0; r < ROWS; r++) begin
      wl_a = ROWS'(1) << r; wl_b = '0;
      check(model[r], ~model[r], "single row");
    end
    for (int n = 0; n < 200; n++) begin
      r1 = $urandom_range(ROWS - 1); r2 = $urandom_range(ROWS - 1);
      wl_a = ROWS'(1) << r1; wl_b = ROWS'(1) << r2;
      check(model[r1] & model[r2], ~(model[r1] | model[r2]), "two rows");
    end
    // a write with wl_b raised must only touch the wl_a row
    @(negedge clk);
    wl_a = ROWS'(1) << 3; wl_b = ROWS'(1) << 4; we = 1; wmask = '1; wdata = rnd();
    model[3] = wdata;
    @(negedge clk); we = 0;
    wl_a = ROWS'(1) << 3; wl_b = '0; check(model[3], ~model[3], "write row");
    wl_a = ROWS'(1) << 4;            check(model[4], ~model[4], "untouched row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
