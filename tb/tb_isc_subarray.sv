// tb_isc_subarray -- runs random ISC command streams on one 128 x 256
// ISC-enabled subarray against a behavioural reference of the command set
// (array contents, SA latches, stored src1), checking the SA latches after
// every command, the cycle count of every shift (num cycles, cmd_ready low
// for num-1 of them), illegal-command dropping, and finally every word of
// the array through the bus port.
module tb_isc_subarray;
  import isc_pkg::*;
  localparam int unsigned ROWS = 128, COLS = 256, WORD_W = 32, WORDS = COLS / WORD_W;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, illegal;
  isc_cmd_t cmd;
  logic [COLS-1:0] din, sa_q;
  logic bus_en, bus_we, bus_gnt;
  logic [6:0] bus_row;
  logic [2:0] bus_word;
  logic [WORD_W-1:0] bus_wdata, bus_rdata;

  logic [COLS-1:0] m [ROWS];
  logic [COLS-1:0] sa;
  logic [7:0] src1;
  int checks = 0, failures = 0;
  int n_shift = 0, n_logic = 0, n_ext = 0, n_illegal = 0;

  isc_subarray #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .illegal, .din, .sa_q,
    .bus_en, .bus_we, .bus_row, .bus_word, .bus_wdata, .bus_gnt, .bus_rdata
  );

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic bus_write(input int r, input int w, input logic [31:0] d);
    @(negedge clk);
    bus_en = 1; bus_we = 1; bus_row = 7'(r); bus_word = 3'(w); bus_wdata = d;
    @(negedge clk);
    bus_en = 0; bus_we = 0;
  endtask

  task automatic bus_read_check(input int r, input int w);
    @(negedge clk);
    bus_en = 1; bus_we = 0; bus_row = 7'(r); bus_word = 3'(w);
    @(negedge clk);
    bus_en = 0;
    checks++;
    if (bus_rdata !== m[r][w*32 +: 32]) begin
      failures++;
      if (failures < 10) $display("FAIL bus read r=%0d w=%0d got=%h exp=%h", r, w, bus_rdata, m[r][w*32 +: 32]);
    end
  endtask

  // Issue one command, apply it to the reference, check SA and timing.
  task automatic run_cmd(input isc_cmd_t c);
    int cyc, wdt, exp_cyc;
    logic [COLS-1:0] r1, r2;
    logic exp_ill;
    exp_cyc = 1; exp_ill = 0;
    unique case (c.opcode)
      OPC_RD_ROW:   if (c.option == 4'b1000) sa = m[c.index[6:0]]; else exp_ill = 1;
      OPC_WR_ROW:   if (c.option[2:0] == 0) m[c.index[6:0]] = c.option[3] ? din : sa; else exp_ill = 1;
      OPC_ACT_ROW:  if (c.option == 4'b0001) src1 = c.index; else exp_ill = 1;
      OPC_LOGIC_OP: if (!c.option[3] && !c.option[0]) begin
                      r1 = m[src1[6:0]]; r2 = m[c.index[6:0]];
                      case (c.option[2:1])
                        2'd0: sa = r1 & r2;
                        2'd1: sa = r1 | r2;
                        2'd2: sa = r1 ^ r2;
                        default: sa = ~(r1 | r2);
                      endcase
                      n_logic++;
                    end else exp_ill = 1;
      OPC_SHIFT:    if (c.option[3] && !c.option[0]) begin
                      sa = c.option[1] ? (sa >> c.index) : (sa << c.index);
                      exp_cyc = (c.index == 0) ? 1 : int'(c.index);
                      n_shift++;
                    end else exp_ill = 1;
      OPC_EXT_BIT:  if (!c.option[0] && c.option[3:1] <= 5) begin
                      int w;
                      w = 16 << c.option[3:1];
                      if (w > COLS) w = COLS;
                      r1 = m[ROWS-1];
                      for (int k = 0; k < COLS; k++) sa[k] = r1[(k / w) * w + (int'(c.index) % w)];
                      n_ext++;
                    end else exp_ill = 1;
      default: exp_ill = 1;
    endcase
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    #1;
    checks++;
    if (illegal !== exp_ill) begin failures++; $display("FAIL illegal flag %h", c); end
    if (exp_ill) n_illegal++;
    cyc = 1;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    wdt = 0;
    while (!cmd_ready && wdt < 1000) begin @(negedge clk); cyc++; wdt++; end
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d for %h", cyc, exp_cyc, c); end
    checks++;
    if (sa_q !== sa) begin
      failures++;
      if (failures < 10) $display("FAIL SA after %h", c);
    end
  endtask

  function automatic isc_cmd_t rand_cmd();
    int k;
    k = $urandom_range(0, 9);
    case (k)
      0: return cmd_rd_row(8'($urandom_range(ROWS - 1)));
      1: return cmd_wr_row(8'($urandom_range(ROWS - 2)), 1'($urandom_range(1)));
      2: return cmd_shift(8'($urandom_range(0, 70)), 1'($urandom_range(1)));
      3, 4: return cmd_act_row(8'($urandom_range(ROWS - 1)));
      5, 6: return cmd_logic_op(8'($urandom_range(ROWS - 1)), logic_op_e'($urandom_range(3)));
      7: return cmd_ext_bit(8'($urandom_range(255)), 3'($urandom_range(5)));
      8: return isc_cmd_t'(16'($urandom));          // mostly illegal
      default: return cmd_rd_row(8'(ROWS - 1));
    endcase
  endfunction

  initial begin
    cmd_valid = 0; cmd = '0; din = rnd(); bus_en = 0; bus_we = 0;
    bus_row = 0; bus_word = 0; bus_wdata = 0;
    sa = '0; src1 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      m[r] = rnd();
      for (int w = 0; w < WORDS; w++) bus_write(r, w, m[r][w*32 +: 32]);
    end
    for (int n = 0; n < 40; n++) bus_read_check($urandom_range(ROWS - 1), $urandom_range(WORDS - 1));
    // bus request in the same cycle as a command is not granted
    @(negedge clk);
    cmd = cmd_act_row(8'd1); cmd_valid = 1; bus_en = 1; bus_we = 1;
    #1; checks++; if (bus_gnt) begin failures++; $display("FAIL bus granted over a command"); end
    @(negedge clk); cmd_valid = 0; bus_en = 0; bus_we = 0; src1 = 8'd1;
    for (int n = 0; n < 600; n++) begin
      run_cmd(rand_cmd());
      if (n % 50 == 0) din = rnd();
    end
    // Directed: a two-step XOR of rows 10 and 11 into row 12, and a 64-bit shift
    run_cmd(cmd_act_row(8'd10)); run_cmd(cmd_logic_op(8'd11, LOP_XOR)); run_cmd(cmd_wr_row(8'd12));
    run_cmd(cmd_rd_row(8'd12)); run_cmd(cmd_shift(8'd64, 1'b0)); run_cmd(cmd_shift(8'd64, 1'b1));
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < WORDS; w++) bus_read_check(r, w);
    checks++;
    if (n_shift == 0 || n_logic == 0 || n_ext == 0 || n_illegal == 0) begin
      failures++; $display("FAIL coverage shift=%0d logic=%0d ext=%0d illegal=%0d", n_shift, n_logic, n_ext, n_illegal);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
