// tb_local_uop_buffer: reset clears every entry (a no-op); entries written are
// read back at their index.
`include "tb_common.svh"
module tb_local_uop_buffer;
  logic clk = 0, rst_n = 0, we = 0;
  logic [3:0] waddr = 0, idx = 0;
  logic [15:0] wdata = 0, uop;
  logic [15:0] model [16];
  int checks = 0, failures = 0;

  local_uop_buffer #(.ENTRIES(16), .W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      idx = 4'(i); #1; `CHECK_EQ(uop, 16'd0, "reset entry")
      model[i] = 0;
    end
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = 4'($urandom); wdata = 16'($urandom);
      idx = 4'($urandom);
      #1;
      `CHECK_EQ(uop, model[idx], "read")
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    `TB_FINISH
  end
endmodule
