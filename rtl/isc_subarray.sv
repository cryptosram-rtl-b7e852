// isc_subarray -- ISC-enabled SRAM subarray.
//
// A ROWS x COLS bitcell array with two row decoders, a command decoder (CD)
// and a row of modified sense amplifiers, one per column. It runs the six ISC
// commands broadcast by the controller and, when no command is running,
// serves ordinary word reads and writes from the system bus.
//
// Command timing (one command accepted per cycle while cmd_ready is high):
//   rd_row  src      1 cycle: raise row src, SA latches <= row (AND, one row)
//   wr_row  dst      1 cycle: row dst <= SA latches (option[3]=1: <= din)
//   act_row src1     1 cycle: first decoder stores src1, nothing is raised
//   logic_op src2    1 cycle: raise src1 and src2 together, SA <= op(row1,row2)
//   shift   num      num cycles (1 bit per cycle, cmd_ready low meanwhile);
//                    option[1]=0 moves bits toward higher columns ("left"),
//                    =1 toward lower; zeros enter at the row ends; num=0 is
//                    a 1-cycle no-op
//   ext_bit col      1 cycle: read the fixed extension row (the last row); in
//                    every block of W = 16 << option[3:1] columns, every SA
//                    latch of the block <= bit (col mod W) of that block
// An illegal command is dropped and pulses 'illegal'.
// Bus port: word 'bus_word' (WORD_W bits) of row 'bus_row'; a read returns
// its data on bus_rdata one cycle later. A command has priority over the
// bus in the same cycle; 'bus_gnt' says whether the bus access was taken.
//
// From the design: the two decoders, the CD, the modified SA with its shift
// path and the command set and timing of act_row + logic_op. Own choices:
// the option bits left open, the number of cycles of each command, the
// ext_bit semantics in detail and the word-wide bus port.
module isc_subarray
  import isc_pkg::*;
#(
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 256,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned WORDS  = COLS / WORD_W,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned WW     = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // command port (from ISC-CTRL / CMD array)
  input  logic              cmd_valid,
  input  isc_cmd_t          cmd,
  output logic              cmd_ready,
  output logic              illegal,
  input  logic [COLS-1:0]   din,       // data-bus row for wr_row option[3]=1
  output logic [COLS-1:0]   sa_q,      // SA latches (Dout of every column)
  // word port (from the system bus)
  input  logic              bus_en,
  input  logic              bus_we,
  input  logic [RW-1:0]     bus_row,
  input  logic [WW-1:0]     bus_word,
  input  logic [WORD_W-1:0] bus_wdata,
  output logic              bus_gnt,
  output logic [WORD_W-1:0] bus_rdata
);
  isc_ctrl_t       c;
  logic [7:0]      src1_q;
  logic [7:0]      shift_rem_q;
  logic            shift_dir_q;
  logic            shifting;
  logic            en_a, en_b;
  logic [7:0]      idx_a;
  logic [ROWS-1:0] wl_a, wl_b;
  logic            we;
  logic [COLS-1:0] wmask, wdata, bl, blb, ext_val;
  logic [1:0]      sa_op, sa_sel;
  logic            sa_en;
  logic            bus_go;

  assign shifting  = (shift_rem_q != '0);
  assign cmd_ready = !shifting;
  assign bus_gnt   = bus_en && !cmd_valid && !shifting;
  assign bus_go    = bus_gnt;
  assign illegal   = c.illegal;

  isc_cmd_decoder u_cd (.valid(cmd_valid && !shifting), .cmd(cmd), .ctrl(c));

  // Row decoder 1 serves rd_row, wr_row, logic_op (src1), ext_bit and the bus.
  always_comb begin
    en_a  = c.rd_row || c.wr_row || c.logic_op || c.ext_bit || bus_go;
    idx_a = c.index;
    if (c.logic_op)      idx_a = src1_q;
    else if (c.ext_bit)  idx_a = 8'(ROWS - 1);
    else if (!(c.rd_row || c.wr_row)) idx_a = 8'(bus_row);
    en_b  = c.logic_op;
  end

  isc_row_decoder #(.ROWS(ROWS), .IDX_W(8)) u_dec_a (.en(en_a), .idx(idx_a), .wl(wl_a));
  isc_row_decoder #(.ROWS(ROWS), .IDX_W(8)) u_dec_b (.en(en_b), .idx(c.index), .wl(wl_b));

  // Write path: whole row from the SA latches / din, or one bus word.
  always_comb begin
    we    = c.wr_row || (bus_go && bus_we);
    wmask = '1;
    wdata = c.wr_from_bus ? din : sa_q;
    if (!c.wr_row) begin
      wmask = '0;
      wmask[bus_word*WORD_W +: WORD_W] = '1;
      wdata = {WORDS{bus_wdata}};
    end
  end

  isc_bitcell_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl_a, .wl_b, .we, .wmask, .wdata, .bl, .blb
  );

  // Bit extension: within each W-column block, broadcast column (col mod W).
  always_comb begin
    int unsigned w;
    w = 16 << c.ext_width;
    if (w > COLS) w = COLS;
    for (int unsigned k = 0; k < COLS; k++)
      ext_val[k] = bl[(k & ~(w - 1)) | (int'(c.index) & (w - 1))];
  end

  always_comb begin
    sa_op  = c.logic_op ? c.lop : 2'(LOP_AND);
    sa_sel = 2'(SH_LOGIC);
    if (shifting)        sa_sel = shift_dir_q   ? 2'(SH_RIGHT) : 2'(SH_LEFT);
    else if (c.shift)    sa_sel = c.shift_right ? 2'(SH_RIGHT) : 2'(SH_LEFT);
    else if (c.ext_bit)  sa_sel = 2'(SH_EXT);
    sa_en = c.rd_row || c.logic_op || c.ext_bit || shifting || (c.shift && c.index != '0);
  end

  for (genvar k = 0; k < COLS; k++) begin : g_sa
    isc_sense_amp u_sa (
      .clk, .rst_n,
      .bl(bl[k]), .blb(blb[k]), .op(sa_op), .sel(sa_sel),
      .d_prev((k == 0)        ? 1'b0 : sa_q[(k == 0) ? 0 : k - 1]),
      .d_next((k == COLS - 1) ? 1'b0 : sa_q[(k == COLS - 1) ? k : k + 1]),
      .ext_in(ext_val[k]), .en(sa_en), .dout(sa_q[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      src1_q      <= '0;
      shift_rem_q <= '0;
      shift_dir_q <= 1'b0;
      bus_rdata   <= '0;
    end else begin
      if (c.act_row) src1_q <= c.index;
      if (shifting) shift_rem_q <= shift_rem_q - 8'd1;
      else if (c.shift && c.index != '0) begin
        shift_rem_q <= c.index - 8'd1;
        shift_dir_q <= c.shift_right;
      end
      if (bus_go && !bus_we) bus_rdata <= bl[bus_word*WORD_W +: WORD_W];
    end
endmodule
