// tb_global_controller: queues three layers (5, 32 and 7 u-ops) from a model
// instruction buffer, with a real double-buffered global u-op buffer and a PE
// array that is randomly not ready. Checks that u-ops issue in program order,
// only while the array is ready, that loading overlaps issuing, the layer count,
// and that busy falls when all is done.
`include "tb_common.svh"
module tb_global_controller;
  import ganax_pkg::*;
  localparam int IDEPTH = 3456;
  logic clk = 0, rst_n = 0;
  logic layer_valid = 0, layer_ready;
  logic [11:0] layer_base = 0;
  logic [5:0] layer_len = 0;
  logic [11:0] ib_raddr;
  logic [GUOP_W-1:0] ib_rdata, gb_wdata, gb_rdata, guop;
  logic gb_we, gb_wbank, gb_rbank, issue, array_ready = 1, array_idle = 1, busy, stall;
  logic [4:0] gb_waddr, gb_raddr;
  logic [15:0] layers_done, overlap;
  logic [GUOP_W-1:0] ib [IDEPTH];
  logic [GUOP_W-1:0] expq [$];
  int checks = 0, failures = 0, stalls = 0;

  global_controller #(.ENTRIES(32), .IDEPTH(IDEPTH)) dut (.*);
  global_uop_buffer #(.ENTRIES(32), .W(GUOP_W)) u_gub (
    .clk, .we(gb_we), .wbank(gb_wbank), .waddr(gb_waddr), .wdata(gb_wdata),
    .rbank(gb_rbank), .raddr(gb_raddr), .rdata(gb_rdata));
  assign ib_rdata = ib[ib_raddr];
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (stall) stalls++;
    if (issue) begin
      `CHECK(array_ready, "issue only when the array is ready")
      if (expq.size() == 0) begin failures++; $display("FAIL extra issue"); end
      else begin
        `CHECK_EQ(guop, expq[0], "issued u-op in program order")
        void'(expq.pop_front());
      end
    end
    array_ready <= ($urandom_range(99) < 70);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic queue_layer(int base, int len);
    for (int i = 0; i < len; i++) expq.push_back(ib[base + i]);
    @(negedge clk);
    layer_valid = 1; layer_base = 12'(base); layer_len = 6'(len);
    @(posedge clk);
    while (!layer_ready) @(posedge clk);
    @(negedge clk); layer_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < IDEPTH; i++) ib[i] = {1'(i), 32'($urandom), 32'(i)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    queue_layer(100, 5);
    queue_layer(2000, 32);
    queue_layer(3400, 7);
    for (int n = 0; n < 2000 && (busy || expq.size() != 0); n++) @(negedge clk);
    `CHECK_EQ(expq.size(), 0, "all u-ops issued")
    `CHECK_EQ(layers_done, 16'd3, "three layers done")
    `CHECK(overlap > 0, "next layer loaded while the current one issues")
    `CHECK(stalls > 0, "array back-pressure seen")
    `CHECK_EQ(busy, 1'b0, "idle at the end")
    `TB_FINISH
  end
endmodule
