// cryptosram -- MCU SRAM with in-SRAM computing.
//
// The data SRAM of the microcontroller, N_SUB subarrays of ROWS x COLS
// cells on one data/address bus, of which the last N_ISC are ISC-enabled
// (isc_subarray) and the rest standard (sram_subarray). An ISC controller
// (isc_ctrl) walks the command sets held in the command array (cmd_array)
// and broadcasts each command to the ISC subarrays chosen by a target mask,
// which all execute it in lock-step on their own rows, so every computing
// block of every selected subarray advances at once. The defaults give the
// 256 KB SRAM of an STM32L562-class part built from 4 KB (128 x 256)
// subarrays, with 25 % of them ISC-enabled; N_ISC = 32 or 64 gives the 50 %
// and 100 % variants.
//
// Ports
//   bus_*   system-bus slave (CPU / DMA): byte address, 32-bit words.
//           An access is taken in the cycle bus_req && bus_ready; read data
//           follows on bus_rdata with bus_rvalid one cycle later. Accesses
//           to an ISC subarray that is computing (in the mask while
//           isc_busy) wait with bus_ready low; every other subarray stays
//           accessible, so DMA can fill one subarray while others compute.
//           Addresses are non-interleaved (see subarray_select).
//   cfg_*   configuration writes (host):
//             0x0nnn  CMD array entry nnn (cfg_wdata[15:0] = command)
//             0x1nnn  base address of function nnn
//             0x2nnn  command count of function nnn
//             0x3nnn  schedule entry nnn = {function, iterations}
//             0x4000  start; cfg_wdata = schedule length
//             0x4001  ISC target mask, bit j = ISC subarray j (ignored while busy)
//   isc_busy / isc_done / isc_illegal   controller status; isc_illegal
//           pulses when a subarray drops an illegal command.
// From the design: the split into standard and ISC-enabled subarrays, the
// shared bus with subarray select, and ISC-CTRL + CMD feeding the ISC
// subarrays. The configuration map, the target mask, the bus stall and the
// rest of the bus protocol are this design's own.
module cryptosram
  import isc_pkg::*;
#(
  parameter int unsigned N_SUB       = 64,
  parameter int unsigned N_ISC       = 16,
  parameter int unsigned ROWS        = 128,
  parameter int unsigned COLS        = 256,
  parameter int unsigned CMD_DEPTH   = 2240,
  parameter int unsigned N_FUNC      = 16,
  parameter int unsigned SCHED_DEPTH = 64,
  localparam int unsigned WORD_W = 32,          // MCU system-bus word
  localparam int unsigned WORDS  = COLS / WORD_W,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned WW     = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned SUBW   = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned AW     = SUBW + RW + WW + 2,
  localparam int unsigned CMD_AW = $clog2(CMD_DEPTH),
  localparam int unsigned SW     = $clog2(SCHED_DEPTH),
  localparam int unsigned N_STD  = N_SUB - N_ISC
) (
  input  logic              clk,
  input  logic              rst_n,
  // system bus
  input  logic              bus_req,
  input  logic              bus_we,
  input  logic [AW-1:0]     bus_addr,
  input  logic [WORD_W-1:0] bus_wdata,
  output logic              bus_ready,
  output logic              bus_rvalid,
  output logic [WORD_W-1:0] bus_rdata,
  // configuration
  input  logic              cfg_we,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_wdata,
  // status
  output logic              isc_busy,
  output logic              isc_done,
  output logic              isc_illegal
);
  // ---------------- subarray select ----------------
  logic [SUBW-1:0]  sub;
  logic [RW-1:0]    row;
  logic [WW-1:0]    word;
  logic             hit;
  logic [N_SUB-1:0] sel;
  logic [N_ISC-1:0] mask_q;
  logic             stall;

  subarray_select #(.N_SUB(N_SUB), .ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W)) u_sel (
    .addr(bus_addr), .en(bus_req), .sub, .row, .word, .hit, .sel
  );

  always_comb begin
    stall = 1'b0;
    for (int unsigned j = 0; j < N_ISC; j++)
      if (sel[N_STD + j] && mask_q[j] && isc_busy) stall = 1'b1;
  end
  assign bus_ready = bus_req && !stall;

  // ---------------- ISC-CTRL and CMD array ----------------
  logic              ctl_re, cmd_valid, cmd_ready;
  logic [CMD_AW-1:0] ctl_addr;
  isc_cmd_t          cmd;
  logic [3:0]        region;

  assign region = cfg_addr[15:12];

  isc_ctrl #(.N_FUNC(N_FUNC), .SCHED_DEPTH(SCHED_DEPTH), .CMD_AW(CMD_AW)) u_ctrl (
    .clk, .rst_n,
    .cfg_we(cfg_we && region inside {4'h1, 4'h2, 4'h3}),
    .cfg_sel(2'(region - 4'h1)),
    .cfg_idx(cfg_addr[SW-1:0]),
    .cfg_wdata,
    .start(cfg_we && cfg_addr == 16'h4000),
    .sched_len(cfg_wdata[SW:0]),
    .busy(isc_busy), .done(isc_done),
    .cmd_re(ctl_re), .cmd_addr(ctl_addr), .cmd_valid, .cmd_ready
  );

  cmd_array #(.DEPTH(CMD_DEPTH)) u_cmd (
    .clk,
    .we(cfg_we && region == 4'h0), .waddr(cfg_addr[CMD_AW-1:0]), .wdata(isc_cmd_t'(cfg_wdata[15:0])),
    .re(ctl_re), .raddr(ctl_addr), .rdata(cmd)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mask_q <= '0;
    else if (cfg_we && cfg_addr == 16'h4001 && !isc_busy) mask_q <= cfg_wdata[N_ISC-1:0];

  // ---------------- subarrays ----------------
  logic [WORD_W-1:0] rdata_s [N_SUB];
  logic [N_ISC-1:0]  ready_j, illegal_j;

  for (genvar s = 0; s < N_STD; s++) begin : g_std
    sram_subarray #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W)) u_sub (
      .clk, .en(bus_ready && sel[s]), .we(bus_we), .row, .word,
      .wdata(bus_wdata), .rdata(rdata_s[s])
    );
  end

  // The latch row (sa_q) and the grant (bus_gnt) of each ISC subarray are
  // left open: results leave through rows and the bus, and the stall is
  // decided here from the target mask.
  for (genvar j = 0; j < N_ISC; j++) begin : g_isc
    isc_subarray #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W)) u_sub (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && mask_q[j]), .cmd, .cmd_ready(ready_j[j]), .illegal(illegal_j[j]),
      .din({WORDS{bus_wdata}}), .sa_q(),
      .bus_en(bus_ready && sel[N_STD + j]), .bus_we, .bus_row(row), .bus_word(word),
      .bus_wdata, .bus_gnt(), .bus_rdata(rdata_s[N_STD + j])
    );
  end

  always_comb begin
    cmd_ready = 1'b1;
    for (int unsigned j = 0; j < N_ISC; j++)
      if (mask_q[j] && !ready_j[j]) cmd_ready = 1'b0;
  end
  assign isc_illegal = |illegal_j;

  // ---------------- read return ----------------
  logic [SUBW-1:0] rsub_q;
  logic            rhit_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bus_rvalid <= 1'b0;
      rsub_q     <= '0;
      rhit_q     <= 1'b0;
    end else begin
      bus_rvalid <= bus_ready && !bus_we;
      rsub_q     <= sub;
      rhit_q     <= hit;
    end

  assign bus_rdata = rhit_q ? rdata_s[rsub_q] : '0;

  // A command is never broadcast in a cycle in which the bus is granted to
  // one of the subarrays that receive it.
  logic bus_on_target;
  always_comb begin
    bus_on_target = 1'b0;
    for (int unsigned j = 0; j < N_ISC; j++)
      if (bus_ready && sel[N_STD + j] && mask_q[j]) bus_on_target = 1'b1;
  end
  // The assertions' 'disable iff' reads rst_n synchronously, next to its
  // use as an asynchronous reset; lint notes this, and it is intended.
  a_no_bus_while_computing: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> !bus_on_target);
endmodule
