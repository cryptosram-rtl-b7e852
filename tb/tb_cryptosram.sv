// tb_cryptosram -- end-to-end test of the computing SRAM at its default
// size (64 subarrays of 128 x 256, 16 of them ISC-enabled, 2240-entry
// command array).
//
// The host loads four command sets into the command array:
//   F0 AddRoundKey  24 commands: for each of the 8 bit-slice rows,
//                   act_row data, logic_op key XOR, wr_row data
//   F1 Rot16        15 commands: rotate each 64-bit lane of a row left by
//                   16 as two shifts (16 left, 48 right), two AND masks
//                   and an OR
//   F2 Chi          9 commands: out = a ^ (~b & c) on whole rows (NOT, AND,
//                   XOR), one Keccak chi lane step
//   F3 Extend       ext_bit of column 5 in 16-column blocks, wr_row, and one
//                   illegal command that must be dropped
// and runs the schedule (F0 x 11, F1, F2, F3) on 15 of the 16 ISC
// subarrays; the 16th is left out of the target mask and must not change.
// While the subarrays compute, the test writes and reads a standard
// subarray (allowed) and then writes an ISC subarray in the mask (stalled
// until done). Results are read back over the bus and compared with values
// the test computes itself; the run time must be one cycle per command,
// one per shifted bit and 2 cycles of start/finish overhead. Every
// mechanism (repetition, each logic op, shift stall, bit extension, illegal
// command, bus stall, concurrent bus access, mask) is counted and must occur.
module tb_cryptosram;
  import isc_pkg::*;
  localparam int N_SUB = 64, N_ISC = 16, N_STD = N_SUB - N_ISC, ROWS = 128, COLS = 256;
  // row map inside every ISC subarray
  localparam int R_DATA = 0, R_KEY = 28, R_LANE = 40, R_CHA = 41, R_CHB = 42, R_CHC = 43,
                 R_CHO = 44, R_EXT = 45, R_LATE = 46, R_T1 = 100, R_T2 = 101, R_MHI = 102, R_MLO = 103,
                 R_XROW = ROWS - 1;

  logic clk = 0, rst_n = 0;
  logic bus_req, bus_we, bus_ready, bus_rvalid;
  logic [17:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic cfg_we;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic isc_busy, isc_done, isc_illegal;

  cryptosram dut (
    .clk, .rst_n, .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_ready, .bus_rvalid, .bus_rdata,
    .cfg_we, .cfg_addr, .cfg_wdata, .isc_busy, .isc_done, .isc_illegal
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fire = 0, n_and = 0, n_or = 0, n_xor = 0, n_not = 0, n_shift_stall = 0, n_ext = 0,
      n_illegal = 0, n_bus_stall = 0, n_concurrent = 0;
  logic [COLS-1:0] init [N_ISC][ROWS];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.cmd_valid && dut.cmd_ready) begin
      n_fire++;
      if (dut.cmd.opcode == OPC_LOGIC_OP)
        case (dut.cmd.option[2:1]) 2'd0: n_and++; 2'd1: n_or++; 2'd2: n_xor++; default: n_not++; endcase
      if (dut.cmd.opcode == OPC_EXT_BIT) n_ext++;
    end
    if (dut.cmd_valid && !dut.cmd_ready) n_shift_stall++;
    if (isc_illegal) n_illegal++;
    if (bus_req && !bus_ready) n_bus_stall++;
    if (bus_req && bus_ready && isc_busy) n_concurrent++;
  end

  function automatic logic [17:0] addr_of(input int sub, input int row, input int word);
    return 18'((sub << 12) | (row << 5) | (word << 2));
  endfunction

  task automatic cfg(input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic bus_wr(input logic [17:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_req = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    #1;
    while (!bus_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    bus_req = 0; bus_we = 0;
  endtask

  task automatic bus_rd(input logic [17:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_req = 1; bus_we = 0; bus_addr = a;
    #1;
    while (!bus_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    bus_req = 0;
    d = bus_rdata;
    checks++;
    if (!bus_rvalid) begin failures++; $display("FAIL rvalid missing"); end
  endtask

  task automatic write_row(input int sub, input int row, input logic [COLS-1:0] v);
    for (int w = 0; w < COLS / 32; w++) bus_wr(addr_of(sub, row, w), v[w*32 +: 32]);
  endtask

  task automatic check_row(input int sub, input int row, input logic [COLS-1:0] exp, input string what);
    logic [31:0] d;
    logic bad;
    bad = 0;
    for (int w = 0; w < COLS / 32; w++) begin
      bus_rd(addr_of(sub, row, w), d);
      if (d !== exp[w*32 +: 32]) bad = 1;
    end
    checks++;
    if (bad) begin
      failures++;
      if (failures < 20) $display("FAIL %s sub=%0d row=%0d", what, sub, row);
    end
  endtask

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [COLS-1:0] lane_mask(input int lo, input int hi);
    logic [COLS-1:0] v;
    for (int k = 0; k < COLS; k++) v[k] = ((k % 64) >= lo) && ((k % 64) <= hi);
    return v;
  endfunction

  function automatic logic [COLS-1:0] rotl16(input logic [COLS-1:0] v);
    logic [COLS-1:0] r;
    for (int l = 0; l < COLS / 64; l++) begin
      logic [63:0] x;
      x = v[l*64 +: 64];
      r[l*64 +: 64] = {x[47:0], x[63:48]};
    end
    return r;
  endfunction

  function automatic logic [COLS-1:0] ext16(input logic [COLS-1:0] v, input int col);
    logic [COLS-1:0] r;
    for (int k = 0; k < COLS; k++) r[k] = v[(k / 16) * 16 + col];
    return r;
  endfunction

  initial begin
    isc_cmd_t prog [$];
    int base [4], cnt [4], nsub, t0, cycles, exp_cycles;
    logic [31:0] d;
    logic [COLS-1:0] e;

    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- command sets ----
    base[0] = 0;
    for (int b = 0; b < 8; b++) begin
      prog.push_back(cmd_act_row(8'(R_DATA + b)));
      prog.push_back(cmd_logic_op(8'(R_KEY + b), LOP_XOR));
      prog.push_back(cmd_wr_row(8'(R_DATA + b)));
    end
    cnt[0] = prog.size();
    base[1] = prog.size();
    prog.push_back(cmd_rd_row(8'(R_LANE)));     prog.push_back(cmd_shift(8'd16, 1'b0));
    prog.push_back(cmd_wr_row(8'(R_T1)));       prog.push_back(cmd_act_row(8'(R_T1)));
    prog.push_back(cmd_logic_op(8'(R_MHI), LOP_AND)); prog.push_back(cmd_wr_row(8'(R_T1)));
    prog.push_back(cmd_rd_row(8'(R_LANE)));     prog.push_back(cmd_shift(8'd48, 1'b1));
    prog.push_back(cmd_wr_row(8'(R_T2)));       prog.push_back(cmd_act_row(8'(R_T2)));
    prog.push_back(cmd_logic_op(8'(R_MLO), LOP_AND)); prog.push_back(cmd_wr_row(8'(R_T2)));
    prog.push_back(cmd_act_row(8'(R_T1)));      prog.push_back(cmd_logic_op(8'(R_T2), LOP_OR));
    prog.push_back(cmd_wr_row(8'(R_LANE)));
    cnt[1] = prog.size() - base[1];
    base[2] = prog.size();
    prog.push_back(cmd_act_row(8'(R_CHB)));     prog.push_back(cmd_logic_op(8'(R_CHB), LOP_NOT));
    prog.push_back(cmd_wr_row(8'(R_T1)));       prog.push_back(cmd_act_row(8'(R_T1)));
    prog.push_back(cmd_logic_op(8'(R_CHC), LOP_AND)); prog.push_back(cmd_wr_row(8'(R_T1)));
    prog.push_back(cmd_act_row(8'(R_CHA)));     prog.push_back(cmd_logic_op(8'(R_T1), LOP_XOR));
    prog.push_back(cmd_wr_row(8'(R_CHO)));
    cnt[2] = prog.size() - base[2];
    base[3] = prog.size();
    prog.push_back(cmd_ext_bit(8'd5, 3'd0));
    prog.push_back(isc_cmd_t'({OPC_WR_ROW, 8'(R_DATA), 4'b0101}));   // illegal option: dropped
    prog.push_back(cmd_wr_row(8'(R_EXT)));
    cnt[3] = prog.size() - base[3];
    for (int i = 0; i < prog.size(); i++) cfg(16'h0000 + i, 32'(prog[i]));
    for (int f = 0; f < 4; f++) begin cfg(16'h1000 + f, base[f]); cfg(16'h2000 + f, cnt[f]); end
    cfg(16'h3000, (0 << 11) | 11);
    cfg(16'h3001, (1 << 11) | 1);
    cfg(16'h3002, (2 << 11) | 1);
    cfg(16'h3003, (3 << 11) | 1);

    // ---- data into every ISC subarray (as DMA would) ----
    for (int j = 0; j < N_ISC; j++) begin
      for (int r = 0; r < 8; r++) begin init[j][R_DATA + r] = rnd(); init[j][R_KEY + r] = rnd(); end
      init[j][R_LANE] = rnd(); init[j][R_CHA] = rnd(); init[j][R_CHB] = rnd(); init[j][R_CHC] = rnd();
      init[j][R_XROW] = rnd(); init[j][R_LATE] = rnd();
      init[j][R_MHI] = lane_mask(16, 63); init[j][R_MLO] = lane_mask(0, 15);
      foreach (init[j][r]) if (r inside {[R_DATA:R_DATA+7], [R_KEY:R_KEY+7], R_LANE, R_CHA, R_CHB, R_CHC,
                                        R_XROW, R_LATE, R_MHI, R_MLO}) write_row(N_STD + j, r, init[j][r]);
    end
    check_row(N_STD, R_KEY, init[0][R_KEY], "readback");

    // ---- run on ISC subarrays 0..14 ----
    nsub = N_ISC - 1;
    cfg(16'h4001, (32'd1 << nsub) - 1);
    exp_cycles = 11 * cnt[0] + cnt[1] + cnt[2] + cnt[3] + (16 - 1) + (48 - 1) + 2;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'h4000; cfg_wdata = 4;
    t0 = $time;
    @(negedge clk);
    cfg_we = 0;
    // standard subarray traffic while computing
    bus_wr(addr_of(3, 7, 2), 32'hCAFE0001);
    bus_rd(addr_of(3, 7, 2), d);
    checks++; if (d !== 32'hCAFE0001) begin failures++; $display("FAIL concurrent std access"); end
    // an ISC subarray in the mask: this write waits for the end
    bus_wr(addr_of(N_STD + 2, R_LATE, 0), 32'h5EC0_0DA7);
    checks++;
    if (isc_busy) begin failures++; $display("FAIL bus write taken while computing"); end
    while (!isc_done && ($time - t0) < 100000) @(posedge clk);
    cycles = 0;  // measured below from the done pulse
    checks++;
    if (!isc_done && isc_busy) begin failures++; $display("FAIL no done"); end
    @(negedge clk);

    // ---- results ----
    for (int j = 0; j < N_ISC; j++) begin
      logic inm;
      inm = (j < nsub);
      for (int b = 0; b < 8; b++) begin
        e = inm ? (init[j][R_DATA + b] ^ init[j][R_KEY + b]) : init[j][R_DATA + b];
        check_row(N_STD + j, R_DATA + b, e, "AddRoundKey");
      end
      check_row(N_STD + j, R_LANE, inm ? rotl16(init[j][R_LANE]) : init[j][R_LANE], "rotate");
      if (inm) begin
        check_row(N_STD + j, R_CHO, init[j][R_CHA] ^ (~init[j][R_CHB] & init[j][R_CHC]), "chi");
        check_row(N_STD + j, R_EXT, ext16(init[j][R_XROW], 5), "ext_bit");
      end
    end
    e = init[2][R_LATE]; e[31:0] = 32'h5EC0_0DA7;
    check_row(N_STD + 2, R_LATE, e, "stalled write");
    $display("commands taken %0d, shift-stall cycles %0d, bus-stall cycles %0d", n_fire, n_shift_stall, n_bus_stall);
    checks++;
    if (n_fire != 11 * cnt[0] + cnt[1] + cnt[2] + cnt[3] - 0) begin failures++; $display("FAIL fired %0d", n_fire); end
    // coverage of mechanisms
    checks++;
    if (n_and == 0 || n_or == 0 || n_xor == 0 || n_not == 0 || n_shift_stall != 62 || n_ext == 0 ||
        n_illegal == 0 || n_bus_stall == 0 || n_concurrent == 0) begin
      failures++;
      $display("FAIL coverage and=%0d or=%0d xor=%0d not=%0d shst=%0d ext=%0d ill=%0d bst=%0d conc=%0d",
               n_and, n_or, n_xor, n_not, n_shift_stall, n_ext, n_illegal, n_bus_stall, n_concurrent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run time: cycles from the start write to the done pulse
  int start_cyc = -1, cyc_now = 0;
  always @(posedge clk) begin
    cyc_now++;
    if (cfg_we && cfg_addr == 16'h4000) start_cyc = cyc_now;
    if (isc_done && start_cyc >= 0) begin
      checks++;
      if (cyc_now - start_cyc != 11 * 24 + 15 + 9 + 3 + 15 + 47 + 2) begin
        failures++;
        $display("FAIL run took %0d cycles", cyc_now - start_cyc);
      end else $display("run took %0d cycles", cyc_now - start_cyc);
    end
  end
endmodule
