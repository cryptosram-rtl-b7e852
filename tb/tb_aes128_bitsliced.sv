// tb_aes128_bitsliced -- AES-128 encryption on the computing SRAM with the
// bit-sliced computing-block layout (8 rows x 16 columns per block).
//
// Each ISC subarray holds 16 blocks side by side, one per 16-column tile.
// Row b of the block holds bit b of its 16 state bytes; state byte s[r][c]
// sits in column 4r + c of the tile, so ShiftRows only moves bits by 1 to
// 3 columns. Shared rows below hold the 11 bit-sliced round keys, 11
// column masks and temporaries. The testbench generates the command sets
//   ARK_i       8 x (act_row, logic_op XOR, wr_row) = 24 commands, i = 0..10
//   ShiftRows   per slice: 1 mask + 6 (shift, mask, OR) terms = 57 commands,
//               456 in all
//   MixColumns  t = s ^ rot1(s), u = t ^ rot2(t), s' = s ^ u ^ xtime(t),
//               where rotk moves the state rows by k (4k columns, with wrap)
//               and xtime is a re-indexing of the t slices plus XORs
//   BitSlicing  an in-place transpose of each 8 x 8 bit matrix (8 rows x 8
//               columns) by three rounds of masked shift-and-XOR swaps,
//               4 x 18 commands per round = 216; it is its own inverse
// The host writes plaintext bytes as they come; a first schedule bit-slices
// them (checked against the bit-sliced layout), then round 0 (ARK_0),
// rounds 1-9 (ShiftRows, MixColumns, ARK_i) and round 10 (ShiftRows,
// ARK_10) run as controller schedules, each framed by BitSlicing so that
// the host sees bytes between schedules. SubBytes is done by the host over
// the bus between schedules: no S-box command set is modelled here. The
// round keys are stored already bit-sliced.
// All 16 ISC subarrays (256 blocks) run at once at the default size; block
// 0 is the FIPS-197 example (key 000102..0f, plaintext 0011..ff) and must
// give 69c4e0d86a7b0430d8cdb78070b4c55a; the rest use random keys and
// plaintexts and are compared with a byte-level AES reference computed
// here. Each schedule must take one cycle per command, one per extra shift
// bit and 2 cycles of overhead.
module tb_aes128_bitsliced;
  import isc_pkg::*;
  localparam int N_SUB = 64, N_ISC = 16, N_STD = N_SUB - N_ISC, COLS = 256, TILES = COLS / 16;
  localparam int R_D = 0, R_TT = 8, R_KEY = 16, R_MASK = 104, R_T = 115, R_T2 = 116, R_T3 = 117, R_U = 118,
                 R_TM = 119;  // three transpose masks, rows 119..121
  // mask rows
  localparam int M0 = R_MASK, MA1 = R_MASK + 1, MB1 = R_MASK + 2, MA2 = R_MASK + 3, MB2 = R_MASK + 4,
                 MA3 = R_MASK + 5, MB3 = R_MASK + 6, ML1 = R_MASK + 7, MH1 = R_MASK + 8,
                 ML2 = R_MASK + 9, MH2 = R_MASK + 10;

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
  int n_illegal = 0;

  always @(posedge clk) if (isc_illegal) n_illegal <= n_illegal + 1;

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- byte-level AES reference ----------------
  logic [7:0] sbox [256];

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p;
    p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
      b = b >> 1;
    end
    return p;
  endfunction

  task automatic init_sbox();
    logic [7:0] inv, x;
    for (int v = 0; v < 256; v++) begin
      inv = 0;
      for (int w = 1; w < 256; w++) if (gmul(8'(v), 8'(w)) == 8'h01) inv = 8'(w);
      x = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      sbox[v] = x;
    end
  endtask

  // round keys rk[i][byte], byte index = r + 4c
  task automatic expand_key(input logic [7:0] key [16], output logic [7:0] rk [11][16]);
    logic [7:0] w [44][4], t [4], rcon;
    rcon = 8'h01;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) w[i][j] = key[4*i + j];
    for (int i = 4; i < 44; i++) begin
      t = w[i-1];
      if (i % 4 == 0) begin
        t = '{sbox[w[i-1][1]] ^ rcon, sbox[w[i-1][2]], sbox[w[i-1][3]], sbox[w[i-1][0]]};
        rcon = gmul(rcon, 8'h02);
      end
      for (int j = 0; j < 4; j++) w[i][j] = w[i-4][j] ^ t[j];
    end
    for (int r = 0; r < 11; r++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) rk[r][4*i + j] = w[4*r + i][j];
  endtask

  task automatic aes_ref(input logic [7:0] pt [16], input logic [7:0] rk [11][16], output logic [7:0] ct [16]);
    logic [7:0] s [16], t [16];
    for (int i = 0; i < 16; i++) s[i] = pt[i] ^ rk[0][i];
    for (int rnd = 1; rnd <= 10; rnd++) begin
      for (int i = 0; i < 16; i++) s[i] = sbox[s[i]];
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r + 4*c] = s[r + 4*((c + r) % 4)];
      s = t;
      if (rnd != 10)
        for (int c = 0; c < 4; c++)
          for (int r = 0; r < 4; r++)
            t[r + 4*c] = gmul(s[r + 4*c], 8'h02) ^ gmul(s[(r+1)%4 + 4*c], 8'h03) ^ s[(r+2)%4 + 4*c] ^ s[(r+3)%4 + 4*c];
      if (rnd != 10) s = t;
      for (int i = 0; i < 16; i++) s[i] ^= rk[rnd][i];
    end
    ct = s;
  endtask

  // ---------------- command-set generation ----------------
  isc_cmd_t prog [$];
  int extra_shift;   // shift cycles beyond one per shift command

  task automatic op3(input int a, input int b, input logic_op_e op, input int dst);
    prog.push_back(cmd_act_row(8'(a)));
    prog.push_back(cmd_logic_op(8'(b), op));
    prog.push_back(cmd_wr_row(8'(dst)));
  endtask

  // dst = (src shifted by amt) AND mask; right = toward lower columns
  task automatic shmask(input int src, input int amt, input bit right, input int mask, input int dst);
    prog.push_back(cmd_rd_row(8'(src)));
    prog.push_back(cmd_shift(8'(amt), right));
    prog.push_back(cmd_wr_row(8'(dst)));
    op3(dst, mask, LOP_AND, dst);
    extra_shift += amt - 1;
  endtask

  // dst = state rows rotated by k: byte s[r][c] <- s[r+k][c]
  task automatic rot(input int src, input int k, input int dst);
    shmask(src, 4*k, 1'b1, (k == 1) ? ML1 : ML2, R_T);
    shmask(src, 16 - 4*k, 1'b0, (k == 1) ? MH1 : MH2, R_T2);
    op3(R_T, R_T2, LOP_OR, dst);
  endtask

  task automatic gen_shiftrows();
    int ma [4], mb [4];
    ma = '{0, MA1, MA2, MA3}; mb = '{0, MB1, MB2, MB3};
    for (int b = 0; b < 8; b++) begin
      op3(R_D + b, M0, LOP_AND, R_U);
      for (int r = 1; r < 4; r++) begin
        shmask(R_D + b, r, 1'b1, ma[r], R_T);
        op3(R_U, R_T, LOP_OR, R_U);
        shmask(R_D + b, 4 - r, 1'b0, mb[r], R_T);
        op3(R_U, R_T, LOP_OR, (r == 3) ? R_D + b : R_U);
      end
    end
  endtask

  // BitSlicing: in-place transpose of the 8 x 8 bit matrices formed by rows
  // D0..D7 and each group of 8 columns. Three rounds of delta swaps: for
  // d = 1, 2, 4 and rows a < b = a + d, swap bit (a, c + d) with (b, c) for
  // every column c with c & d == 0: t = ((a >> d) ^ b) & m; b ^= t;
  // a ^= t << d. The transpose is its own inverse.
  task automatic gen_transpose();
    for (int k = 0; k < 3; k++) begin
      int d;
      d = 1 << k;
      for (int a = 0; a < 8; a++) begin
        if ((a & d) != 0) continue;
        prog.push_back(cmd_rd_row(8'(R_D + a)));
        prog.push_back(cmd_shift(8'(d), 1'b1));
        prog.push_back(cmd_wr_row(8'(R_T)));
        op3(R_T, R_D + a + d, LOP_XOR, R_T);
        op3(R_T, R_TM + k, LOP_AND, R_T);
        op3(R_D + a + d, R_T, LOP_XOR, R_D + a + d);
        prog.push_back(cmd_rd_row(8'(R_T)));
        prog.push_back(cmd_shift(8'(d), 1'b0));
        prog.push_back(cmd_wr_row(8'(R_T)));
        op3(R_D + a, R_T, LOP_XOR, R_D + a);
        extra_shift += 2 * (d - 1);
      end
    end
  endtask

  task automatic gen_mixcolumns();
    for (int b = 0; b < 8; b++) begin
      rot(R_D + b, 1, R_T3);
      op3(R_D + b, R_T3, LOP_XOR, R_TT + b);
    end
    for (int b = 0; b < 8; b++) begin
      rot(R_TT + b, 2, R_U);
      op3(R_U, R_TT + b, LOP_XOR, R_U);
      op3(R_D + b, R_U, LOP_XOR, R_D + b);
      op3(R_D + b, R_TT + (b + 7) % 8, LOP_XOR, R_D + b);
      if (b == 1 || b == 3 || b == 4) op3(R_D + b, R_TT + 7, LOP_XOR, R_D + b);
    end
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

  // column of byte i (= r + 4c) inside a tile
  function automatic int col_of(input int i);
    return 4 * (i % 4) + i / 4;
  endfunction

  // bit-sliced state of one subarray <-> bytes of its 16 blocks
  task automatic write_state(input int sub, input int base_row, input logic [7:0] st [TILES][16]);
    logic [COLS-1:0] v;
    for (int b = 0; b < 8; b++) begin
      for (int t = 0; t < TILES; t++) for (int i = 0; i < 16; i++) v[16*t + col_of(i)] = st[t][i][b];
      write_row(sub, base_row + b, v);
    end
  endtask

  task automatic read_state(input int sub, output logic [7:0] st [TILES][16]);
    logic [COLS-1:0] v;
    for (int b = 0; b < 8; b++) begin
      read_row(sub, R_D + b, v);
      for (int t = 0; t < TILES; t++) for (int i = 0; i < 16; i++) st[t][i][b] = v[16*t + col_of(i)];
    end
  endtask

  // Byte form, as the host writes and reads it: before bit slicing, row q of
  // a tile holds, LSB first in columns 8g..8g+7, the byte that bit slicing
  // moves to column 8g + q.
  task automatic write_bytes(input int sub, input logic [7:0] st [TILES][16]);
    logic [COLS-1:0] v;
    for (int q = 0; q < 8; q++) begin
      for (int t = 0; t < TILES; t++)
        for (int i = 0; i < 16; i++)
          if (col_of(i) % 8 == q) v[16*t + 8*(col_of(i) / 8) +: 8] = st[t][i];
      write_row(sub, R_D + q, v);
    end
  endtask

  task automatic read_bytes(input int sub, output logic [7:0] st [TILES][16]);
    logic [COLS-1:0] v;
    for (int q = 0; q < 8; q++) begin
      read_row(sub, R_D + q, v);
      for (int t = 0; t < TILES; t++)
        for (int i = 0; i < 16; i++)
          if (col_of(i) % 8 == q) st[t][i] = v[16*t + 8*(col_of(i) / 8) +: 8];
    end
  endtask

  function automatic logic [COLS-1:0] tile_mask(input logic [15:0] m);
    return {TILES{m}};
  endfunction

  task automatic run_sched(input int f [$], output int cycles);
    for (int e = 0; e < f.size(); e++) cfg(16'h3000 + e, (f[e] << 11) | 1);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'h4000; cfg_wdata = f.size();
    @(negedge clk);
    cfg_we = 0;
    cycles = 1;
    while (!isc_done) begin @(negedge clk); cycles++; end
  endtask

  // ---------------- test ----------------
  logic [7:0] key [N_ISC][16];
  logic [7:0] rk  [N_ISC][11][16];
  logic [7:0] pt  [N_ISC][TILES][16];

  initial begin
    int base [14], cnt [14], xs [14], cyc, exp_cyc, f_sr, f_mc, f_tr;
    logic [7:0] st [TILES][16], rks [TILES][16], ct [16], k1 [16], rk1 [11][16], p1 [16];
    logic [7:0] fips_ct [16];

    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    init_sbox();
    checks++;
    if (sbox[8'h00] != 8'h63 || sbox[8'h53] != 8'hed) begin failures++; $display("FAIL S-box"); end

    // command sets: functions 0..10 = ARK_i, 11 = ShiftRows, 12 = MixColumns
    for (int i = 0; i < 11; i++) begin
      base[i] = prog.size(); extra_shift = 0;
      for (int b = 0; b < 8; b++) op3(R_D + b, R_KEY + 8*i + b, LOP_XOR, R_D + b);
      cnt[i] = prog.size() - base[i]; xs[i] = extra_shift;
    end
    f_sr = 11; f_mc = 12; f_tr = 13;
    base[f_sr] = prog.size(); extra_shift = 0; gen_shiftrows();  cnt[f_sr] = prog.size() - base[f_sr]; xs[f_sr] = extra_shift;
    base[f_mc] = prog.size(); extra_shift = 0; gen_mixcolumns(); cnt[f_mc] = prog.size() - base[f_mc]; xs[f_mc] = extra_shift;
    base[f_tr] = prog.size(); extra_shift = 0; gen_transpose();  cnt[f_tr] = prog.size() - base[f_tr]; xs[f_tr] = extra_shift;
    $display("command sets: BitSlicing %0d, AddRoundKey %0d, ShiftRows %0d, MixColumns %0d, total %0d",
             cnt[f_tr], cnt[0], cnt[f_sr], cnt[f_mc], prog.size());
    checks++;
    if (cnt[0] != 24 || cnt[f_sr] != 456 || prog.size() > 2240) begin failures++; $display("FAIL command-set sizes"); end

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < prog.size(); i++) cfg(16'h0000 + i, 32'(prog[i]));
    for (int f = 0; f < 14; f++) begin cfg(16'h1000 + f, base[f]); cfg(16'h2000 + f, cnt[f]); end
    cfg(16'h4001, 32'hFFFF);

    // keys and plaintexts; block 0 is the FIPS-197 example
    for (int j = 0; j < N_ISC; j++) begin
      for (int i = 0; i < 16; i++) key[j][i] = (j == 0) ? 8'(i) : 8'($urandom);
      for (int t = 0; t < TILES; t++) for (int i = 0; i < 16; i++) pt[j][t][i] = 8'($urandom);
    end
    for (int i = 0; i < 16; i++) pt[0][0][i] = 8'(i * 8'h11);
    fips_ct = '{8'h69, 8'hc4, 8'he0, 8'hd8, 8'h6a, 8'h7b, 8'h04, 8'h30,
                8'hd8, 8'hcd, 8'hb7, 8'h80, 8'h70, 8'hb4, 8'hc5, 8'h5a};

    for (int j = 0; j < N_ISC; j++) begin
      k1 = key[j];
      expand_key(k1, rk1);
      rk[j] = rk1;
      for (int r = 0; r < 11; r++) begin
        for (int t = 0; t < TILES; t++) rks[t] = rk1[r];
        write_state(N_STD + j, R_KEY + 8*r, rks);
      end
      for (int t = 0; t < TILES; t++) st[t] = pt[j][t];
      write_bytes(N_STD + j, st);
      write_row(N_STD + j, R_TM,     tile_mask(16'h5555));
      write_row(N_STD + j, R_TM + 1, tile_mask(16'h3333));
      write_row(N_STD + j, R_TM + 2, tile_mask(16'h0F0F));
      write_row(N_STD + j, M0,  tile_mask(16'h000F));
      write_row(N_STD + j, MA1, tile_mask(16'h0070)); write_row(N_STD + j, MB1, tile_mask(16'h0080));
      write_row(N_STD + j, MA2, tile_mask(16'h0300)); write_row(N_STD + j, MB2, tile_mask(16'h0C00));
      write_row(N_STD + j, MA3, tile_mask(16'h1000)); write_row(N_STD + j, MB3, tile_mask(16'hE000));
      write_row(N_STD + j, ML1, tile_mask(16'h0FFF)); write_row(N_STD + j, MH1, tile_mask(16'hF000));
      write_row(N_STD + j, ML2, tile_mask(16'h00FF)); write_row(N_STD + j, MH2, tile_mask(16'hFF00));
    end

    // bit slicing alone, checked against the bit-sliced layout
    run_sched('{f_tr}, cyc);
    checks++;
    if (cyc != cnt[f_tr] + xs[f_tr] + 2) begin failures++; $display("FAIL BitSlicing run %0d cycles", cyc); end
    for (int j = 0; j < N_ISC; j++) begin
      read_state(N_STD + j, st);
      checks++;
      if (st != pt[j]) begin failures++; $display("FAIL BitSlicing sub %0d", j); end
    end
    run_sched('{0, f_tr}, cyc);
    checks++;
    if (cyc != cnt[0] + cnt[f_tr] + xs[f_tr] + 2) begin failures++; $display("FAIL ARK run %0d cycles", cyc); end
    for (int rnd = 1; rnd <= 10; rnd++) begin
      // SubBytes by the host, on bytes
      for (int j = 0; j < N_ISC; j++) begin
        read_bytes(N_STD + j, st);
        for (int t = 0; t < TILES; t++) for (int i = 0; i < 16; i++) st[t][i] = sbox[st[t][i]];
        write_bytes(N_STD + j, st);
      end
      if (rnd < 10) begin
        run_sched('{f_tr, f_sr, f_mc, rnd, f_tr}, cyc);
        exp_cyc = 2 * (cnt[f_tr] + xs[f_tr]) + cnt[f_sr] + cnt[f_mc] + cnt[rnd] + xs[f_sr] + xs[f_mc] + 2;
      end else begin
        run_sched('{f_tr, f_sr, rnd, f_tr}, cyc);
        exp_cyc = 2 * (cnt[f_tr] + xs[f_tr]) + cnt[f_sr] + cnt[rnd] + xs[f_sr] + 2;
      end
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL round %0d took %0d cycles, exp %0d", rnd, cyc, exp_cyc); end
      if (rnd == 1) $display("round 1 in SRAM: %0d cycles", cyc);
    end

    for (int j = 0; j < N_ISC; j++) begin
      read_bytes(N_STD + j, st);
      rk1 = rk[j];
      for (int t = 0; t < TILES; t++) begin
        p1 = pt[j][t];
        aes_ref(p1, rk1, ct);
        checks++;
        if (st[t] != ct) begin
          failures++;
          if (failures < 10) $display("FAIL block sub %0d tile %0d", j, t);
        end
        if (j == 0 && t == 0) begin
          checks++;
          if (st[0] != fips_ct || ct != fips_ct) begin failures++; $display("FAIL FIPS-197 vector"); end
        end
      end
    end
    checks++;
    if (n_illegal != 0) begin failures++; $display("FAIL %0d illegal commands flagged", n_illegal); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
