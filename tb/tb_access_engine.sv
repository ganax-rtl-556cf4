// tb_access_engine: configures the three generators with different patterns,
// starts them, pops their address FIFOs at random rates and compares each
// stream with a software model; back-pressure from a full FIFO must not lose
// or duplicate an address.
`include "tb_common.svh"
module tb_access_engine;
  import ganax_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, start = 0, stop = 0;
  logic [1:0] gen_sel = 0;
  cfg_reg_e cfg_sel = CFG_ADDR;
  logic [15:0] cfg_data = 0;
  logic [2:0] pop = 0, empty, running;
  logic [15:0] head [3];
  int checks = 0, failures = 0;
  int exp_q [3][$];
  int got [3];

  access_engine #(.FIFO_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic cfg(int g, cfg_reg_e r, int v);
    @(negedge clk); cfg_we = 1; gen_sel = 2'(g); cfg_sel = r; cfg_data = 16'(v);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic setup(int g, int a0, int off, int st, int en, int rep);
    int a = a0, r = rep;
    cfg(g, CFG_ADDR, a0); cfg(g, CFG_OFFSET, off); cfg(g, CFG_STEP, st);
    cfg(g, CFG_END, en); cfg(g, CFG_REPEAT, rep);
    exp_q[g] = {};
    while (r > 0) begin
      int s;
      exp_q[g].push_back((a + off) & 32'hffff);
      s = a + st;
      if (s < en) a = s; else begin a = s - en; r--; end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      setup(0, 0, 2 * round, 1, 3, 4);         // input: sliding rows
      setup(1, 0, 0, 2, 5, 6);                 // weight: stride-2 taps
      setup(2, round, 40, 1, 12, 2);           // output
      for (int g = 0; g < 3; g++) begin
        @(negedge clk); start = 1; gen_sel = 2'(g);
      end
      @(negedge clk); start = 0;
      got = '{0, 0, 0};
      for (int c = 0; c < 400; c++) begin
        @(negedge clk);
        for (int g = 0; g < 3; g++) pop[g] = !empty[g] && ($urandom_range(99) < (c < 30 ? 5 : 60));
        #1;
        for (int g = 0; g < 3; g++)
          if (pop[g]) begin
            if (got[g] < exp_q[g].size()) `CHECK_EQ(head[g], 16'(exp_q[g][got[g]]), "address stream")
            got[g]++;
          end
        @(posedge clk); #1 pop = 0;
      end
      for (int g = 0; g < 3; g++) begin
        `CHECK_EQ(got[g], exp_q[g].size(), "stream length")
        `CHECK_EQ(running[g], 1'b0, "generator finished")
      end
    end
    // access.stop on one generator leaves the others running
    setup(0, 0, 0, 1, 1000, 1);
    setup(1, 0, 0, 1, 1000, 1);
    @(negedge clk); start = 1; gen_sel = 0; @(negedge clk); gen_sel = 1; @(negedge clk); start = 0;
    stop = 1; gen_sel = 0; @(negedge clk); stop = 0;
    `CHECK_EQ(running[0], 1'b0, "stopped generator")
    `CHECK_EQ(running[1], 1'b1, "other generator still running (FIFO full)")
    `TB_FINISH
  end
endmodule
