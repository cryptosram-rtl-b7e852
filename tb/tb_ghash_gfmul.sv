// tb_ghash_gfmul -- the GHASH multiplication Z = X * H in GF(2^128) on the
// computing SRAM, run as one command set that the controller iterates 128
// times.
//
// Layout: 128-column computing blocks, two per ISC subarray, 32 products at
// once at the default size. Bit i of a field element in GCM order (bit 0 =
// most significant bit of the first byte) sits in column i of its block.
// Rows: X in the extension row (ROWS-1), V (starts as H), Z, a mask row M,
// a temporary T, a saved copy XS of X, the reduction constant C (GCM bits
// 0, 1, 2 and 7, the polynomial 0xE1 << 120) and K0 (every column except
// column 0 of each block). One iteration is the textbook shift-and-add step:
//   M  = ext_bit(X, bit 0)        ; broadcast of the current bit of X
//   Z ^= V & M
//   XS = X shifted by one column toward column 0 (next bit into place)
//   M  = ext_bit(V, bit 127)      ; V is first copied into the extension row
//   V  = ((V shifted one column up) & K0) ^ (C & M)
//   X  = XS
// which takes 29 commands with two 1-bit shifts, so 128 iterations must take
// 29 x 128 + 2 cycles. The command set is this design's own; the published
// one has 16 commands. Products are compared with a reference multiply, and
// one product is the known GCM example H = 66e94bd4..., C = 0388dace...,
// X1 = 5e2ec746... .
module tb_ghash_gfmul;
  import isc_pkg::*;
  localparam int N_SUB = 64, N_ISC = 16, N_STD = N_SUB - N_ISC, ROWS = 128, COLS = 256, NB = COLS / 128;
  localparam int R_X = ROWS - 1, R_V = 0, R_Z = 1, R_M = 2, R_T = 3, R_XS = 4, R_C = 5, R_K0 = 6;

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
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: GCM multiply, values written big-endian (GCM bit i = v[127-i])
  function automatic logic [127:0] gf_mul(input logic [127:0] x, input logic [127:0] h);
    logic [127:0] z, v;
    z = '0; v = h;
    for (int i = 0; i < 128; i++) begin
      if (x[127 - i]) z ^= v;
      v = v[0] ? ((v >> 1) ^ {8'hE1, 120'h0}) : (v >> 1);
    end
    return z;
  endfunction

  // field element -> 128 columns of a block
  function automatic logic [127:0] to_cols(input logic [127:0] v);
    logic [127:0] c;
    for (int i = 0; i < 128; i++) c[i] = v[127 - i];
    return c;
  endfunction

  isc_cmd_t prog [$];

  task automatic op3(input int a, input int b, input logic_op_e op, input int dst);
    prog.push_back(cmd_act_row(8'(a)));
    prog.push_back(cmd_logic_op(8'(b), op));
    prog.push_back(cmd_wr_row(8'(dst)));
  endtask

  task automatic gen_iteration();
    prog.push_back(cmd_ext_bit(8'd0, 3'd3));
    prog.push_back(cmd_wr_row(8'(R_M)));
    op3(R_V, R_M, LOP_AND, R_T);
    op3(R_Z, R_T, LOP_XOR, R_Z);
    prog.push_back(cmd_rd_row(8'(R_X)));
    prog.push_back(cmd_shift(8'd1, 1'b1));
    prog.push_back(cmd_wr_row(8'(R_XS)));
    prog.push_back(cmd_rd_row(8'(R_V)));
    prog.push_back(cmd_wr_row(8'(R_X)));
    prog.push_back(cmd_ext_bit(8'd127, 3'd3));
    prog.push_back(cmd_wr_row(8'(R_M)));
    op3(R_M, R_C, LOP_AND, R_T);
    prog.push_back(cmd_rd_row(8'(R_V)));
    prog.push_back(cmd_shift(8'd1, 1'b0));
    prog.push_back(cmd_wr_row(8'(R_V)));
    op3(R_V, R_K0, LOP_AND, R_V);
    op3(R_V, R_T, LOP_XOR, R_V);
    prog.push_back(cmd_rd_row(8'(R_XS)));
    prog.push_back(cmd_wr_row(8'(R_X)));
  endtask

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

  logic [127:0] xv [N_ISC][NB], hv [N_ISC][NB];

  initial begin
    int cyc, n;
    logic [COLS-1:0] rx, rv, rz, rc, rk;
    logic [127:0] one, x1;

    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;

    // the reference itself: the unit element and the known GCM example
    one = {1'b1, 127'h0};
    x1 = {$urandom, $urandom, $urandom, $urandom};
    checks++;
    if (gf_mul(x1, one) != x1 || gf_mul(one, x1) != x1) begin failures++; $display("FAIL reference unit"); end
    checks++;
    if (gf_mul(128'h0388dace60b6a392f328c2b971b2fe78, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e)
        != 128'h5e2ec746917062882c85b0685353deb7) begin
      failures++; $display("FAIL reference example");
    end

    gen_iteration();
    n = prog.size();
    $display("GaloisMult iteration: %0d commands", n);

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < n; i++) cfg(16'h0000 + i, 32'(prog[i]));
    cfg(16'h1000, 0); cfg(16'h2000, n);
    cfg(16'h3000, (0 << 11) | 128);
    cfg(16'h4001, 32'hFFFF);

    rc = '0; rk = '1;
    for (int b = 0; b < NB; b++) begin
      rc[128*b + 0] = 1; rc[128*b + 1] = 1; rc[128*b + 2] = 1; rc[128*b + 7] = 1;
      rk[128*b] = 0;
    end
    for (int j = 0; j < N_ISC; j++) begin
      for (int b = 0; b < NB; b++) begin
        xv[j][b] = {$urandom, $urandom, $urandom, $urandom};
        hv[j][b] = {$urandom, $urandom, $urandom, $urandom};
      end
      if (j == 0) begin
        xv[0][0] = 128'h0388dace60b6a392f328c2b971b2fe78;
        hv[0][0] = 128'h66e94bd4ef8a2c3b884cfa59ca342b2e;
        xv[0][1] = one;
      end
      for (int b = 0; b < NB; b++) begin
        rx[128*b +: 128] = to_cols(xv[j][b]);
        rv[128*b +: 128] = to_cols(hv[j][b]);
      end
      write_row(N_STD + j, R_X, rx);
      write_row(N_STD + j, R_V, rv);
      write_row(N_STD + j, R_Z, '0);
      write_row(N_STD + j, R_C, rc);
      write_row(N_STD + j, R_K0, rk);
    end

    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'h4000; cfg_wdata = 1;
    @(negedge clk);
    cfg_we = 0;
    cyc = 1;
    while (!isc_done) begin @(negedge clk); cyc++; end
    $display("128 iterations: %0d cycles", cyc);
    checks++;
    if (cyc != 128 * n + 2) begin failures++; $display("FAIL took %0d cycles, exp %0d", cyc, 128 * n + 2); end

    for (int j = 0; j < N_ISC; j++) begin
      read_row(N_STD + j, R_Z, rz);
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rz[128*b +: 128] != to_cols(gf_mul(xv[j][b], hv[j][b]))) begin
          failures++;
          $display("FAIL product sub %0d block %0d", j, b);
        end
      end
    end
    checks++;
    read_row(N_STD, R_Z, rz);
    if (rz[127:0] != to_cols(128'h5e2ec746917062882c85b0685353deb7)) begin failures++; $display("FAIL GCM example"); end
    checks++;
    if (n_illegal != 0) begin failures++; $display("FAIL %0d illegal commands flagged", n_illegal); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
