// isc_ctrl -- in-SRAM computing controller (ISC-CTRL).
//
// Holds two small buffers indexed by function number: the base address of
// the function's command set in the CMD array and the number of commands in
// it. A counter (CTR) steps through the set and an adder forms the command
// address base + CTR; when CTR reaches the instruction count it wraps and
// the function is run again, until it has run its iteration count. The
// order of the calls comes from a schedule buffer of (function, iterations)
// entries, so AES-128 is the 42 entries BitSlicing, AddRoundKey,
// 9 x (SubBytes, ShiftRows, MixColumns, AddRoundKey), SubBytes, ShiftRows,
// AddRoundKey, BitSlicing, and GHASH's 1024 GaloisMult() calls one entry.
//
// Interface: the host writes the buffers through the cfg port (cfg_sel
// picks base / count / schedule) and pulses 'start' with the schedule
// length; 'busy' is high until the last command has been taken, then 'done'
// pulses for one cycle. Towards the CMD array the controller drives
// cmd_re / cmd_addr; the command appears at the array output one cycle
// later, flagged by cmd_valid, and stays there until cmd_ready takes it
// (the subarrays drop cmd_ready during a multi-cycle shift). With cmd_ready
// high throughout, one command issues per cycle.
//
// From the design: the base-address and count buffers, CTR, the adder and
// the count-limited repetition. The schedule buffer, the cfg port, the
// handshake and the skipping of entries with zero commands or zero
// iterations are this design's own. The cfg data word is 32 bits wide;
// only its low bits (the widest entry, a schedule entry, is FW + ITER_W
// bits) are stored.
module isc_ctrl #(
  parameter int unsigned N_FUNC      = 16,    // function slots (9 used by AES, GHASH, SHA3)
  parameter int unsigned SCHED_DEPTH = 64,    // schedule entries
  parameter int unsigned CMD_AW      = 12,    // CMD array address width
  parameter int unsigned ITER_W      = 11,    // iteration count width (up to 1024)
  localparam int unsigned FW         = $clog2(N_FUNC),
  localparam int unsigned SW         = $clog2(SCHED_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [1:0]        cfg_sel,     // 0: base, 1: count, 2: schedule
  input  logic [SW-1:0]     cfg_idx,
  input  logic [31:0]       cfg_wdata,   // schedule entry: {func[FW+ITER_W-1:ITER_W], iter[ITER_W-1:0]}
  input  logic              start,
  input  logic [SW:0]       sched_len,
  output logic              busy,
  output logic              done,
  // to the CMD array and the subarrays
  output logic              cmd_re,
  output logic [CMD_AW-1:0] cmd_addr,
  output logic              cmd_valid,
  input  logic              cmd_ready
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  typedef struct packed {
    logic [FW-1:0]     func;
    logic [ITER_W-1:0] iter;
  } sched_t;

  logic [CMD_AW-1:0] base_buf  [N_FUNC];
  logic [CMD_AW:0]   count_buf [N_FUNC];
  sched_t            sched_buf [SCHED_DEPTH];

  state_e            state_q;
  logic [SW:0]       ptr_q, len_q;
  logic [ITER_W-1:0] iter_q;
  logic [CMD_AW:0]   ctr_q;
  logic              vld_q;
  logic [CMD_AW-1:0] addr_q;

  sched_t            ent;
  logic [CMD_AW:0]   cnt;
  logic              skip, issue, last_cmd, last_iter, last_ent;

  always_comb begin
    ent       = sched_buf[ptr_q[SW-1:0]];
    cnt       = count_buf[ent.func];
    skip      = (cnt == '0) || (ent.iter == '0);
    issue     = (state_q == S_RUN) && !skip && (!vld_q || cmd_ready);
    last_cmd  = (ctr_q == cnt - 1'b1);
    last_iter = (iter_q == ent.iter - 1'b1);
    last_ent  = (ptr_q == len_q - 1'b1);
    cmd_re    = issue;
    cmd_addr  = base_buf[ent.func] + CMD_AW'(ctr_q);   // the ADD of the controller
  end

  assign cmd_valid = vld_q;
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk)
    if (cfg_we)
      unique case (cfg_sel)
        2'd0:    base_buf[cfg_idx[FW-1:0]]  <= cfg_wdata[CMD_AW-1:0];
        2'd1:    count_buf[cfg_idx[FW-1:0]] <= cfg_wdata[CMD_AW:0];
        default: sched_buf[cfg_idx]         <= sched_t'(cfg_wdata[FW+ITER_W-1:0]);
      endcase

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state_q <= S_IDLE;
      ptr_q   <= '0;
      len_q   <= '0;
      iter_q  <= '0;
      ctr_q   <= '0;
      vld_q   <= 1'b0;
      addr_q  <= '0;
      done    <= 1'b0;
    end else begin
      done  <= 1'b0;
      vld_q <= issue || (vld_q && !cmd_ready);
      if (issue) addr_q <= cmd_addr;
      unique case (state_q)
        S_IDLE:
          if (start) begin
            ptr_q  <= '0;
            iter_q <= '0;
            ctr_q  <= '0;
            len_q  <= sched_len;
            if (sched_len == '0) done <= 1'b1;
            else                 state_q <= S_RUN;
          end
        S_RUN:
          if (skip || (issue && last_cmd)) begin
            ctr_q <= '0;
            if (skip || last_iter) begin
              iter_q <= '0;
              ptr_q  <= ptr_q + 1'b1;
              if (last_ent) state_q <= S_DRAIN;
            end else begin
              iter_q <= iter_q + 1'b1;
            end
          end else if (issue) begin
            ctr_q <= ctr_q + 1'b1;
          end
        default:  // S_DRAIN: wait for the last command to be taken
          if (!vld_q || cmd_ready) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
      endcase
    end

  // The assertions' 'disable iff' reads rst_n synchronously, next to its
  // use as an asynchronous reset; lint notes this, and it is intended.
  // A command waiting for cmd_ready stays valid and keeps its address.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    vld_q && !cmd_ready |=> vld_q && $stable(addr_q));
  // No new command address while a stalled command is pending.
  a_no_issue_on_stall: assert property (@(posedge clk) disable iff (!rst_n)
    vld_q && !cmd_ready |-> !cmd_re);
endmodule
