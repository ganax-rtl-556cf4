// tb_strided_index_gen: checks the strided u-index generator against a software
// model of the paper's modulo-adder rule (next = sum < End ? sum : sum - End,
// one round per wrap, stop after Repeat rounds). Runs several random
// configurations with random FIFO back-pressure, checks one address per cycle
// when never stalled, access.stop, and restart from the primary address.
`include "tb_common.svh"
module tb_strided_index_gen;
  import ganax_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, start = 0, stop = 0, addr_ready = 1;
  cfg_reg_e cfg_sel = CFG_ADDR;
  logic [15:0] cfg_data = 0;
  logic addr_valid, running, round_done;
  logic [15:0] addr;
  int checks = 0, failures = 0;

  strided_index_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end

  task automatic cfg(cfg_reg_e r, logic [15:0] v);
    @(negedge clk); cfg_we = 1; cfg_sel = r; cfg_data = v;
    @(negedge clk); cfg_we = 0;
  endtask

  // model of the address sequence
  function automatic void model(int a0, int off, int st, int en, int rep, ref int q[$]);
    int a = a0, r = rep;
    q = {};
    while (r > 0 && q.size() < 200) begin
      int s;
      q.push_back((a + off) & 16'hffff);
      s = a + st;
      if (s < en) a = s; else begin a = s - en; r--; end
    end
  endfunction

  task automatic run(int a0, int off, int st, int en, int rep, int stall_pct);
    int exp_q[$];
    int got, cyc;
    model(a0, off, st, en, rep, exp_q);
    cfg(CFG_ADDR, 16'(a0)); cfg(CFG_OFFSET, 16'(off)); cfg(CFG_STEP, 16'(st));
    cfg(CFG_END, 16'(en)); cfg(CFG_REPEAT, 16'(rep));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0; cyc = 0;
    while (cyc < 400) begin
      addr_ready = ($urandom_range(99) >= stall_pct);
      #1;
      if (addr_valid && addr_ready) begin
        if (got < exp_q.size()) `CHECK_EQ(addr, 16'(exp_q[got]), "address")
        got++;
      end
      @(negedge clk);
      cyc++;
      if (!addr_valid) break;
    end
    addr_ready = 1;
    `CHECK_EQ(got, exp_q.size(), "address count")
    if (stall_pct == 0) `CHECK_EQ(cyc, exp_q.size(), "one address per cycle")
    `CHECK_EQ(running, 1'b0, "stopped after Repeat rounds")
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // paper example pattern: filter taps of a stride-2 transposed convolution
    run(0, 0, 2, 5, 4, 0);     // 0,2,4,1,3,0,2,4,1,3
    run(0, 100, 1, 3, 1, 0);   // 100,101,102
    run(1, 65535, 1, 3, 1, 0); // offset -1
    for (int t = 0; t < 30; t++) begin
      int en = $urandom_range(12, 1);
      run($urandom_range(en - 1), $urandom_range(300), $urandom_range(en, 1), en,
          $urandom_range(5, 1), (t % 2) ? 40 : 0);
    end
    // access.stop halts, access.start restarts from the primary address
    cfg(CFG_ADDR, 3); cfg(CFG_OFFSET, 0); cfg(CFG_STEP, 1); cfg(CFG_END, 100); cfg(CFG_REPEAT, 1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    `CHECK_EQ(addr, 16'd3, "running address")
    @(negedge clk);
    `CHECK_EQ(addr, 16'd4, "advanced by Step")
    stop = 1; @(negedge clk); stop = 0;
    `CHECK_EQ(addr_valid, 1'b0, "stop halts")
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    `CHECK_EQ(addr_valid, 1'b1, "restart")
    `CHECK_EQ(addr, 16'd3, "restart from primary")
    // repeat = 0 produces nothing
    cfg(CFG_REPEAT, 0);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    `CHECK_EQ(addr_valid, 1'b0, "repeat zero: stop")
    `TB_FINISH
  end
endmodule
