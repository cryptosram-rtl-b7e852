// tb_sha3_keccak -- SHA3-256 on the computing SRAM, lane-per-row mapping.
//
// Each ISC subarray holds four Keccak-f[1600] states side by side, one per
// 64-column tile; lane (x, y) of every state sits in row x + 5y, so a row
// command works on the same lane of all four states at once. The test
// generates three command sets and loads them into the command array:
//   Absorb   A[i] ^= M[i] for the 17 lanes of a SHA3-256 block (51 commands)
//   RoundAO  one Keccak round reading bank A (rows 0-24), writing bank O
//   RoundOA  the same round from bank O back to bank A
// A round is theta (column parities, 1-bit lane rotation, XOR into the
// lanes), rho (each lane rotated in place: shift left r, shift right 64-r,
// two lane masks, OR), pi (no data movement: chi simply reads the rows the
// permutation names), chi (NOT, AND, XOR into the other bank) and iota (XOR
// with the round-constant row). Between rounds the host writes the next
// round constant into its row over the bus, as firmware would.
// All 16 ISC subarrays (64 states) run at once at the default size. State
// 0 hashes "abc" and must give the published SHA3-256 digest; the other 63
// absorb random blocks and are compared lane by lane with a plain Keccak
// reference computed here. The run time of a round is checked against one
// cycle per command plus one per shifted bit.
module tb_sha3_keccak;
  import isc_pkg::*;
  localparam int N_SUB = 64, N_ISC = 16, N_STD = N_SUB - N_ISC, COLS = 256, TILES = COLS / 64;
  localparam int R_A = 0, R_O = 25, R_M = 50, R_C = 67, R_D = 72, R_T1 = 73, R_T2 = 74, R_RC = 75, R_MASK = 76;

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
  int n_fire = 0, n_shift_cyc = 0, n_xor = 0, n_and = 0, n_or = 0, n_not = 0;

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.cmd_valid && dut.cmd_ready) begin
      n_fire++;
      if (dut.cmd.opcode == OPC_LOGIC_OP)
        case (dut.cmd.option[2:1]) 2'd0: n_and++; 2'd1: n_or++; 2'd2: n_xor++; default: n_not++; endcase
    end
    if (dut.cmd_valid && !dut.cmd_ready) n_shift_cyc++;
  end

  // ---------------- plain Keccak reference ----------------
  int rho_r [5][5];
  logic [63:0] rc [24];

  function automatic logic [63:0] rotl64(input logic [63:0] v, input int r);
    return (r == 0) ? v : ((v << r) | (v >> (64 - r)));
  endfunction

  task automatic init_constants();
    int x, y, t, nx;
    logic [7:0] lfsr;
    rho_r[0][0] = 0;
    x = 1; y = 0;
    for (t = 0; t < 24; t++) begin
      rho_r[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y; y = (2 * x + 3 * y) % 5; x = nx;
    end
    lfsr = 8'h01;
    for (int i = 0; i < 24; i++) begin
      rc[i] = '0;
      for (int j = 0; j < 7; j++) begin
        if (lfsr[0]) rc[i][(1 << j) - 1] = 1'b1;
        lfsr = lfsr[7] ? ((lfsr << 1) ^ 8'h71) : (lfsr << 1);
      end
    end
  endtask

  task automatic keccak_f(input logic [63:0] a_in [25], output logic [63:0] a [25]);
    logic [63:0] c [5], d [5], b [25];
    a = a_in;
    for (int i = 0; i < 24; i++) begin
      for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
      for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl64(c[(x+1)%5], 1);
      for (int k = 0; k < 25; k++) a[k] ^= d[k%5];
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++) b[y + 5*((2*x + 3*y) % 5)] = rotl64(a[x + 5*y], rho_r[x][y]);
      for (int x = 0; x < 5; x++)
        for (int y = 0; y < 5; y++) a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
      a[0] ^= rc[i];
    end
  endtask

  // ---------------- command-set generation ----------------
  isc_cmd_t prog [$];
  int mask_lo [64], mask_hi [64];   // rows of the lane masks for each offset

  task automatic op3(input int a, input int b, input logic_op_e op, input int dst);
    prog.push_back(cmd_act_row(8'(a)));
    prog.push_back(cmd_logic_op(8'(b), op));
    prog.push_back(cmd_wr_row(8'(dst)));
  endtask

  // dst = each 64-bit lane of src rotated left by r (1..63)
  task automatic rotl_rows(input int src, input int r, input int dst);
    prog.push_back(cmd_rd_row(8'(src)));
    prog.push_back(cmd_shift(8'(r), 1'b0));
    prog.push_back(cmd_wr_row(8'(R_T1)));
    op3(R_T1, mask_hi[r], LOP_AND, R_T1);
    prog.push_back(cmd_rd_row(8'(src)));
    prog.push_back(cmd_shift(8'(64 - r), 1'b1));
    prog.push_back(cmd_wr_row(8'(R_T2)));
    op3(R_T2, mask_lo[r], LOP_AND, R_T2);
    op3(R_T1, R_T2, LOP_OR, dst);
  endtask

  task automatic gen_round(input int src, input int dst);
    int brow [5][5];
    for (int x = 0; x < 5; x++) begin                     // theta: C
      op3(src + x, src + x + 5, LOP_XOR, R_C + x);
      for (int y = 2; y < 5; y++) op3(R_C + x, src + x + 5*y, LOP_XOR, R_C + x);
    end
    for (int x = 0; x < 5; x++) begin                     // theta: D, A ^= D
      rotl_rows(R_C + (x + 1) % 5, 1, R_D);
      op3(R_D, R_C + (x + 4) % 5, LOP_XOR, R_D);
      for (int y = 0; y < 5; y++) op3(src + x + 5*y, R_D, LOP_XOR, src + x + 5*y);
    end
    for (int x = 0; x < 5; x++)                           // rho, in place
      for (int y = 0; y < 5; y++)
        if (rho_r[x][y] != 0) rotl_rows(src + x + 5*y, rho_r[x][y], src + x + 5*y);
    for (int x = 0; x < 5; x++)                           // pi: row renaming only
      for (int y = 0; y < 5; y++) brow[y][(2*x + 3*y) % 5] = src + x + 5*y;
    for (int x = 0; x < 5; x++)                           // chi
      for (int y = 0; y < 5; y++) begin
        op3(brow[(x+1)%5][y], brow[(x+1)%5][y], LOP_NOT, R_T1);
        op3(R_T1, brow[(x+2)%5][y], LOP_AND, R_T1);
        op3(brow[x][y], R_T1, LOP_XOR, dst + x + 5*y);
      end
    op3(dst, R_RC, LOP_XOR, dst);                         // iota
  endtask

  // ---------------- bus helpers ----------------
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
  endtask

  task automatic write_row(input int sub, input int row, input logic [COLS-1:0] v);
    for (int w = 0; w < COLS / 32; w++) bus_wr(addr_of(sub, row, w), v[w*32 +: 32]);
  endtask

  task automatic read_row(input int sub, input int row, output logic [COLS-1:0] v);
    logic [31:0] d;
    for (int w = 0; w < COLS / 32; w++) begin bus_rd(addr_of(sub, row, w), d); v[w*32 +: 32] = d; end
  endtask

  function automatic logic [COLS-1:0] lanes_of(input logic [63:0] l);
    return {TILES{l}};
  endfunction

  task automatic run_sched(input int func, output int cycles);
    cfg(16'h3000, (func << 11) | 1);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'h4000; cfg_wdata = 1;
    @(negedge clk);
    cfg_we = 0;
    cycles = 1;
    while (!isc_done) begin @(negedge clk); cycles++; end
  endtask

  // ---------------- test ----------------
  logic [63:0] st  [N_ISC*TILES][25];
  logic [63:0] msg [N_ISC*TILES][17];

  initial begin
    int base [3], cnt [3], k, cyc, exp_cyc, shifts_before;
    logic [COLS-1:0] v;
    logic [63:0] digest [4];

    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    init_constants();
    checks++;
    if (rc[0] != 64'h1 || rc[1] != 64'h8082 || rc[23] != 64'h8000000080008008) begin
      failures++; $display("FAIL round constants");
    end
    k = 0;
    for (int r = 1; r < 64; r++) begin mask_lo[r] = 0; mask_hi[r] = 0; end
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        if (rho_r[x][y] != 0) begin
          mask_lo[rho_r[x][y]] = R_MASK + 2*k; mask_hi[rho_r[x][y]] = R_MASK + 2*k + 1; k++;
        end
    checks++;
    if (k != 24 || R_MASK + 2*k > 127 || mask_lo[1] == 0) begin failures++; $display("FAIL mask rows"); end

    base[0] = 0;
    for (int i = 0; i < 17; i++) op3(R_A + i, R_M + i, LOP_XOR, R_A + i);
    cnt[0] = prog.size();
    base[1] = prog.size(); gen_round(R_A, R_O); cnt[1] = prog.size() - base[1];
    base[2] = prog.size(); gen_round(R_O, R_A); cnt[2] = prog.size() - base[2];
    $display("command sets: absorb %0d, round %0d + %0d, total %0d", cnt[0], cnt[1], cnt[2], prog.size());
    checks++;
    if (prog.size() > 2240) begin failures++; $display("FAIL command sets do not fit"); end

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < prog.size(); i++) cfg(16'h0000 + i, 32'(prog[i]));
    for (int f = 0; f < 3; f++) begin cfg(16'h1000 + f, base[f]); cfg(16'h2000 + f, cnt[f]); end
    cfg(16'h4001, 32'hFFFF);

    // messages: state 0 is "abc" with SHA3 padding, the rest random blocks
    for (int s = 0; s < N_ISC*TILES; s++)
      for (int i = 0; i < 17; i++) msg[s][i] = {$urandom, $urandom};
    for (int i = 0; i < 17; i++) msg[0][i] = '0;
    msg[0][0]  = 64'h0000_0000_0663_6261;
    msg[0][16] = 64'h8000_0000_0000_0000;

    for (int j = 0; j < N_ISC; j++) begin
      for (int i = 0; i < 25; i++) write_row(N_STD + j, R_A + i, '0);
      for (int i = 0; i < 17; i++) begin
        for (int t = 0; t < TILES; t++) v[t*64 +: 64] = msg[j*TILES + t][i];
        write_row(N_STD + j, R_M + i, v);
      end
      for (int r = 1; r < 64; r++)
        if (mask_lo[r] != 0) begin
          write_row(N_STD + j, mask_lo[r], lanes_of((64'h1 << r) - 1));
          write_row(N_STD + j, mask_hi[r], lanes_of(~((64'h1 << r) - 1)));
        end
    end

    run_sched(0, cyc);
    for (int rnd = 0; rnd < 24; rnd++) begin
      for (int j = 0; j < N_ISC; j++) write_row(N_STD + j, R_RC, lanes_of(rc[rnd]));
      shifts_before = n_shift_cyc;
      run_sched(1 + (rnd % 2), cyc);
      // one cycle per command, one per shifted bit beyond the first of each shift, 2 overhead
      exp_cyc = cnt[1 + rnd % 2] + (n_shift_cyc - shifts_before) + 2;
      if (rnd == 0) begin
        checks++;
        if (cyc != exp_cyc || n_shift_cyc - shifts_before != 29 * 62) begin
          failures++; $display("FAIL round took %0d cycles, exp %0d", cyc, exp_cyc);
        end
        $display("one round: %0d commands, %0d cycles", cnt[1], cyc);
      end
    end

    // reference and comparison
    for (int s = 0; s < N_ISC*TILES; s++) begin
      logic [63:0] a0 [25], a1 [25];
      for (int i = 0; i < 25; i++) a0[i] = (i < 17) ? msg[s][i] : '0;
      keccak_f(a0, a1);
      st[s] = a1;
    end
    for (int j = 0; j < N_ISC; j++)
      for (int i = 0; i < 25; i++) begin
        read_row(N_STD + j, R_A + i, v);
        for (int t = 0; t < TILES; t++) begin
          checks++;
          if (v[t*64 +: 64] !== st[j*TILES + t][i]) begin
            failures++;
            if (failures < 10) $display("FAIL state %0d lane %0d: %h exp %h", j*TILES + t, i, v[t*64 +: 64], st[j*TILES + t][i]);
          end
          if (j == 0 && t == 0 && i < 4) digest[i] = v[63:0];
        end
      end
    checks++;
    if (digest[0] !== 64'hb225e24fa75d983a || digest[1] !== 64'hbd90d36b2d175c04 ||
        digest[2] !== 64'h5b529d3e6e085f85 || digest[3] !== 64'h3215431145e2bf46) begin
      failures++;
      $display("FAIL SHA3-256(abc) = %h %h %h %h", digest[0], digest[1], digest[2], digest[3]);
    end
    checks++;
    if (n_xor == 0 || n_and == 0 || n_or == 0 || n_not == 0 || isc_illegal) begin failures++; $display("FAIL coverage"); end
    $display("commands taken %0d, shift cycles %0d", n_fire, n_shift_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
