// tb_pe_buffer: writes random words and reads them back on both ports; checks
// that out-of-range addresses read zero and are not written.
`include "tb_common.svh"
module tb_pe_buffer;
  localparam int DEPTH = 24;
  logic clk = 0, we = 0;
  logic [15:0] waddr = 0, wdata = 0, raddr_a = 0, raddr_b = 0, rdata_a, rdata_b;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  pe_buffer #(.DEPTH(DEPTH), .W(16), .AW(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 16'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = $urandom_range(1);
      waddr = 16'($urandom_range(DEPTH + 3));
      wdata = 16'($urandom);
      raddr_a = 16'($urandom_range(DEPTH + 3));
      raddr_b = (i % 7 == 0) ? 16'hffff : 16'($urandom_range(DEPTH - 1));
      #1;
      `CHECK_EQ(rdata_a, (raddr_a < DEPTH) ? model[raddr_a] : 16'd0, "port A")
      `CHECK_EQ(rdata_b, (raddr_b < DEPTH) ? model[raddr_b] : 16'd0, "port B")
      @(posedge clk);
      if (we && waddr < DEPTH) model[waddr] = wdata;
    end
    `TB_FINISH
  end
endmodule
