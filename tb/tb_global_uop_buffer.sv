// tb_global_uop_buffer: fills both banks with different 65-bit words, reads
// them back; checks that writing one bank leaves the other intact (the double
// buffering).
`include "tb_common.svh"
module tb_global_uop_buffer;
  import ganax_pkg::*;
  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [GUOP_W-1:0] wdata = 0, rdata;
  logic [GUOP_W-1:0] model [2][32];
  int checks = 0, failures = 0;

  global_uop_buffer #(.ENTRIES(32), .W(GUOP_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  function automatic logic [GUOP_W-1:0] rnd();
    return {1'($urandom), $urandom, $urandom};
  endfunction

  initial begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 32; i++) begin
        @(negedge clk); we = 1; wbank = 1'(b); waddr = 5'(i); wdata = rnd(); model[b][i] = wdata;
        rbank = !wbank;
      end
    @(negedge clk); we = 0;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 32; i++) begin
        rbank = 1'(b); raddr = 5'(i); #1;
        `CHECK_EQ(rdata, model[b][i], "bank read")
      end
    // refill bank 1 while reading bank 0
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      we = 1; wbank = 1; waddr = 5'(i); wdata = rnd();
      rbank = 0; raddr = 5'(31 - i); #1;
      `CHECK_EQ(rdata, model[0][31 - i], "read during refill of other bank")
      @(posedge clk); model[1][i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 32; i++) begin
      rbank = 1; raddr = 5'(i); #1;
      `CHECK_EQ(rdata, model[1][i], "refilled bank")
    end
    `TB_FINISH
  end
endmodule
