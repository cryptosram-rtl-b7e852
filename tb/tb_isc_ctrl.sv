// tb_isc_ctrl -- programs the controller with the command-set sizes of the
// nine AES-128 / GHASH / SHA3 functions (288, 24, 357, 456, 258, 63, 138,
// 16 and 633 commands, stored back to back) and runs three schedules:
// AES-128 (42 calls), GHASH (ByteArrange x1, ByteAligning x8,
// GaloisMult x1024) and SHA3 (StatePermute x24). A stand-in command array
// returns each command's own address, so the stream of taken commands is
// compared one by one with the stream the schedule implies. With cmd_ready
// always high the run must take one cycle per command plus 2; a second pass
// drops cmd_ready at random and must give the same stream. A schedule with
// a zero-iteration entry checks that the entry is skipped.
module tb_isc_ctrl;
  localparam int unsigned N_FUNC = 16, SCHED_DEPTH = 64, CMD_AW = 12;
  logic clk = 0, rst_n = 0;
  logic cfg_we, start, busy, done, cmd_re, cmd_valid, cmd_ready;
  logic [1:0] cfg_sel;
  logic [5:0] cfg_idx;
  logic [31:0] cfg_wdata;
  logic [6:0] sched_len;
  logic [CMD_AW-1:0] cmd_addr, rd;
  int checks = 0, failures = 0;

  int cnt  [9] = '{288, 24, 357, 456, 258, 63, 138, 16, 633};
  int base [9];
  int exp_q [$];
  int got_n;

  isc_ctrl #(.N_FUNC(N_FUNC), .SCHED_DEPTH(SCHED_DEPTH), .CMD_AW(CMD_AW), .ITER_W(11)) dut (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_idx, .cfg_wdata, .start, .sched_len, .busy, .done,
    .cmd_re, .cmd_addr, .cmd_valid, .cmd_ready
  );

  // stand-in CMD array: each entry holds its own address
  always_ff @(posedge clk) if (cmd_re) rd <= cmd_addr;

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare every taken command with the expected stream
  always @(posedge clk)
    if (rst_n && cmd_valid && cmd_ready) begin
      checks++;
      if (exp_q.size() == 0 || int'(rd) != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL cmd %0d: got %0d exp %0d", got_n, rd, exp_q.size() ? exp_q[0] : -1);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      got_n++;
    end

  task automatic cfg(input int sel, input int idx, input int val);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 2'(sel); cfg_idx = 6'(idx); cfg_wdata = val;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // run a schedule of (func, iter) pairs; returns cycles from start to done
  task automatic run(input int f[$], input int it[$], input bit stalls, output int cycles);
    exp_q.delete(); got_n = 0;
    for (int e = 0; e < f.size(); e++) begin
      cfg(2, e, (f[e] << 11) | it[e]);
      for (int i = 0; i < it[e]; i++)
        for (int c = 0; c < cnt[f[e]]; c++) exp_q.push_back(base[f[e]] + c);
    end
    @(negedge clk);
    start = 1; sched_len = 7'(f.size());
    cycles = 0;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done && cycles < 2000000) begin
      if (stalls) cmd_ready = ($urandom_range(3) != 0);
      @(negedge clk);
      cycles++;
    end
    cmd_ready = 1;
    checks++;
    if (exp_q.size() != 0 || busy) begin failures++; $display("FAIL %0d commands missing", exp_q.size()); end
  endtask

  initial begin
    int f[$], it[$], cyc, total;
    cfg_we = 0; start = 0; cfg_sel = 0; cfg_idx = 0; cfg_wdata = 0; sched_len = 0; cmd_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    base[0] = 0;
    for (int i = 1; i < 9; i++) base[i] = base[i-1] + cnt[i-1];
    checks++;
    if (base[8] + cnt[8] != 2233) failures++;   // total of the command sets
    for (int i = 0; i < 9; i++) begin cfg(0, i, base[i]); cfg(1, i, cnt[i]); end
    // AES-128: BitSlicing, ARK, 9 x (SB, SR, MC, ARK), SB, SR, ARK, BitSlicing
    f = '{0, 1}; it = '{1, 1};
    for (int r = 0; r < 9; r++) begin f.push_back(2); f.push_back(3); f.push_back(4); f.push_back(1); it.push_back(1); it.push_back(1); it.push_back(1); it.push_back(1); end
    f.push_back(2); f.push_back(3); f.push_back(1); f.push_back(0);
    it.push_back(1); it.push_back(1); it.push_back(1); it.push_back(1);
    total = 2*288 + 11*24 + 10*357 + 10*456 + 9*258;
    run(f, it, 0, cyc);
    checks++;
    if (got_n != total || cyc != total + 2) begin failures++; $display("FAIL AES: %0d cmds in %0d cycles, exp %0d", got_n, cyc, total); end
    $display("AES-128 schedule: %0d commands in %0d cycles", got_n, cyc);
    run(f, it, 1, cyc);
    checks++; if (got_n != total) failures++;
    // GHASH
    f = '{5, 6, 7}; it = '{1, 8, 1024};
    run(f, it, 0, cyc);
    checks++; if (got_n != 63 + 8*138 + 1024*16 || cyc != got_n + 2) begin failures++; $display("FAIL GHASH %0d %0d", got_n, cyc); end
    // SHA3
    f = '{8}; it = '{24};
    run(f, it, 1, cyc);
    checks++; if (got_n != 24*633) failures++;
    // zero-iteration entry is skipped
    f = '{1, 3, 1}; it = '{1, 0, 2};
    run(f, it, 0, cyc);
    checks++; if (got_n != 3*24) begin failures++; $display("FAIL skip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
