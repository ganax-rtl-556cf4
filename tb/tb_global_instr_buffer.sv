// tb_global_instr_buffer: writes a pseudo-random pattern over the whole
// 3456-word buffer and reads it back.
`include "tb_common.svh"
module tb_global_instr_buffer;
  import ganax_pkg::*;
  localparam int DEPTH = 3456;
  logic clk = 0, we = 0;
  logic [11:0] waddr = 0, raddr = 0;
  logic [GUOP_W-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;

  global_instr_buffer #(.DEPTH(DEPTH), .W(GUOP_W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [GUOP_W-1:0] pat(int i);
    return {1'(i), 32'(i * 32'h9e3779b1), 32'(i ^ 32'h5a5a1234)};
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = pat(i);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i += 7) begin
      raddr = 12'(i); #1;
      `CHECK_EQ(rdata, pat(i), "instruction word")
    end
    raddr = 12'(DEPTH - 1); #1;
    `CHECK_EQ(rdata, pat(DEPTH - 1), "last word")
    `TB_FINISH
  end
endmodule
