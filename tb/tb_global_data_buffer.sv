// tb_global_data_buffer: writes through both ports at scattered addresses over
// the full 108 KB range and reads them back on both ports; checks that the
// network port wins a same-address write.
`include "tb_common.svh"
module tb_global_data_buffer;
  localparam int DEPTH = 55296;
  logic clk = 0, h_we = 0, n_we = 0;
  logic [15:0] h_addr = 0, n_addr = 0;
  logic [15:0] h_wdata = 0, n_wdata = 0, h_rdata, n_rdata;
  logic [15:0] model [int];
  int checks = 0, failures = 0;

  global_data_buffer #(.DEPTH(DEPTH), .W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = 16'($urandom_range(DEPTH - 1)); h_wdata = 16'($urandom);
      n_we = 1; n_addr = (i % 10 == 0) ? h_addr : 16'($urandom_range(DEPTH - 1)); n_wdata = 16'($urandom);
      @(posedge clk);
      model[h_addr] = h_wdata;
      model[n_addr] = n_wdata;
    end
    @(negedge clk); h_we = 0; n_we = 0;
    foreach (model[a]) begin
      h_addr = 16'(a); n_addr = 16'(a); #1;
      `CHECK_EQ(h_rdata, model[a], "host port read")
      `CHECK_EQ(n_rdata, model[a], "network port read")
    end
    `TB_FINISH
  end
endmodule
