// tb_cmd_array -- loads all 2240 entries of the command array with random
// commands, reads them back in random order (one-cycle latency) and checks
// that the output holds while 're' is low.
module tb_cmd_array;
  import isc_pkg::*;
  localparam int unsigned DEPTH = 2240;
  logic clk = 0;
  logic we, re;
  logic [11:0] waddr, raddr;
  isc_cmd_t wdata, rdata, held;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  cmd_array #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 12'(i); wdata = isc_cmd_t'(16'($urandom)); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a = $urandom_range(DEPTH - 1);
      re = 1; raddr = 12'(a);
      @(negedge clk);
      re = 0; raddr = 12'($urandom_range(DEPTH - 1));
      checks++;
      if (rdata !== model[a]) begin failures++; if (failures < 10) $display("FAIL a=%0d", a); end
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
