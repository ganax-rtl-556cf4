// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// full/empty/count flags and simultaneous push+pop at full.
`include "tb_common.svh"
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din = 0, dout;
  logic full, empty;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      `CHECK_EQ(empty, q.size() == 0, "empty flag")
      `CHECK_EQ(full, q.size() == DEPTH, "full flag")
      `CHECK_EQ(count, 4'(q.size()), "count")
      if (q.size() != 0) `CHECK_EQ(dout, q[0], "head")
      pop  = (q.size() != 0) && ($urandom_range(99) < ((i / 500) % 2 ? 70 : 30));
      push = ($urandom_range(99) < 50) && (q.size() < DEPTH || pop);
      din  = W'($urandom);
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      #1 push = 0; pop = 0;
    end
    `TB_FINISH
  end
endmodule
