// tb_nonlinear_unit: checks the reset table (quantised ReLU) and table writes.
`include "tb_common.svh"
module tb_nonlinear_unit;
  logic clk = 0, rst_n = 0, lut_we = 0;
  logic [3:0] lut_idx = 0;
  logic [15:0] lut_data = 0, x = 0, y;
  logic [15:0] model [16];
  int checks = 0, failures = 0;

  nonlinear_unit #(.W(16), .ENTRIES(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) model[i] = (i < 8) ? 16'(i * 4096) : 16'd0;
    // reset contents: ReLU on the top nibble
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      x = 16'($urandom);
      #1;
      `CHECK_EQ(y, ($signed(x) < 0) ? 16'd0 : (x & 16'hf000), "reset table ReLU")
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); lut_we = 1; lut_idx = 4'(i); lut_data = 16'($urandom); model[i] = lut_data;
    end
    @(negedge clk); lut_we = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      x = 16'($urandom);
      #1;
      `CHECK_EQ(y, model[x[15:12]], "loaded table")
    end
    `TB_FINISH
  end
endmodule
