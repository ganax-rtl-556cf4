// tb_execute_engine: drives the execute u-engine with address queues and buffer
// models held in the testbench. Scenarios: mul + repeated mac + add (one u-op
// per cycle), add waiting for the left partial sum, pool, act through the reset
// lookup table, saturation, a zero-count u-op, and halting on empty FIFOs.
`include "tb_common.svh"
module tb_execute_engine;
  import ganax_pkg::*;
  logic clk = 0, rst_n = 0;
  logic uop_push = 0, uop_full, idle;
  exe_uop_t uop_in;
  logic [15:0] addr_head [3];
  logic [2:0] addr_empty, addr_pop;
  logic [15:0] in_raddr, in_rdata, w_raddr, w_rdata, out_waddr, out_wdata;
  logic out_we, out_busy = 0;
  logic recv_en = 0, send_en = 0, link_in_valid = 0, link_in_pop, link_out_push, link_out_full = 0;
  logic [31:0] link_in = 0, link_out;
  logic lut_we = 0;
  logic [3:0] lut_idx = 0;
  logic [15:0] lut_data = 0;
  logic fire;
  opcode_e fire_op;
  int checks = 0, failures = 0;

  int aq [3][$];
  logic signed [15:0] in_mem [16], w_mem [16];
  int out_log_a [$], out_log_d [$];
  logic [31:0] link_log [$];
  int fires;

  execute_engine #(.FRAC(8), .UOP_FIFO_DEPTH(4), .LUT_ENTRIES(16)) dut (.*);
  always #5 clk = ~clk;

  // address FIFO model: heads refreshed every time unit from the queues
  initial forever begin
    for (int g = 0; g < 3; g++) begin
      addr_empty[g] = (aq[g].size() == 0);
      addr_head[g]  = addr_empty[g] ? 16'd0 : 16'(aq[g][0]);
    end
    #1;
  end
  assign in_rdata = in_mem[in_raddr[3:0]];
  assign w_rdata  = w_mem[w_raddr[3:0]];

  always @(posedge clk) begin
    if (out_we) begin out_log_a.push_back(int'(out_waddr)); out_log_d.push_back(int'(out_wdata)); end
    if (link_out_push) link_log.push_back(link_out);
    if (fire) fires++;
    for (int g = 0; g < 3; g++) if (addr_pop[g]) void'(aq[g].pop_front());
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic push_uop(opcode_e op, int count);
    @(negedge clk);
    while (uop_full) @(negedge clk);
    uop_push = 1; uop_in.op = op; uop_in.count = 16'(count);
    @(negedge clk); uop_push = 0;
  endtask

  task automatic wait_idle();
    int n = 0;
    while (!idle && n < 200) begin @(negedge clk); n++; end
    repeat (2) @(negedge clk);
  endtask

  function automatic logic [15:0] sat(longint v);
    longint s = v >>> 8;
    if (s > 32767) return 16'h7fff;
    if (s < -32768) return 16'h8000;
    return 16'(s);
  endfunction

  initial begin
    longint exp_sum;
    int t0;
    for (int i = 0; i < 16; i++) begin
      in_mem[i] = 16'($urandom_range(1000)) - 16'sd500;
      w_mem[i]  = 16'($urandom_range(1000)) - 16'sd500;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1) mul, mac x3 (repeat), add -> OUT[7], send right
    aq[0] = {1, 2, 3, 4}; aq[1] = {5, 6, 7, 8}; aq[2] = {7};
    send_en = 1;
    fires = 0;
    push_uop(OP_MUL, 1); push_uop(OP_MAC, 3); push_uop(OP_ADD, 1);
    wait_idle();
    exp_sum = 0;
    for (int k = 0; k < 4; k++) exp_sum += longint'(in_mem[1 + k]) * longint'(w_mem[5 + k]);
    `CHECK_EQ(out_log_a.size(), 1, "one output write")
    `CHECK_EQ(out_log_a[0], 7, "output address")
    `CHECK_EQ(out_log_d[0], int'(sat(exp_sum)), "mac result")
    `CHECK_EQ(link_log.size(), 1, "partial sum forwarded")
    `CHECK_EQ(link_log[0], 32'(exp_sum), "forwarded partial sum")
    `CHECK_EQ(fires, 5, "five firings")
    // 2) rate: 6 macs with all addresses ready fire on 6 consecutive cycles
    aq[0] = {0, 1, 2, 3, 4, 5}; aq[1] = {0, 1, 2, 3, 4, 5};
    @(negedge clk);
    uop_push = 1; uop_in.op = OP_MAC; uop_in.count = 6;
    @(negedge clk); uop_push = 0;
    t0 = fires;
    repeat (6) @(negedge clk);
    `CHECK_EQ(fires - t0, 6, "one mac per cycle")
    // drain acc
    aq[2] = {3}; send_en = 0;
    push_uop(OP_ADD, 1); wait_idle();
    // 3) add with receive: waits for the left partial sum
    out_log_a = {}; out_log_d = {}; link_log = {};
    recv_en = 1; send_en = 1;
    aq[0] = {9}; aq[1] = {10}; aq[2] = {2};
    push_uop(OP_MUL, 1); push_uop(OP_ADD, 1);
    repeat (8) @(negedge clk);
    `CHECK_EQ(out_log_a.size(), 0, "add stalls without left partial sum")
    link_in = 32'(-70000); link_in_valid = 1;
    #1;
    `CHECK_EQ(link_in_pop, 1'b1, "left partial sum taken as soon as it arrives")
    @(negedge clk); link_in_valid = 0;
    wait_idle();
    exp_sum = longint'(in_mem[9]) * longint'(w_mem[10]) - 70000;
    `CHECK_EQ(out_log_d.size(), 1, "add after receive")
    `CHECK_EQ(out_log_d[0], int'(sat(exp_sum)), "add includes left partial sum")
    `CHECK_EQ(link_log[0], 32'(exp_sum), "accumulated sum forwarded")
    recv_en = 0; send_en = 0;
    // 4) pool over 4 inputs
    out_log_a = {}; out_log_d = {};
    aq[0] = {11, 12, 13, 14}; aq[2] = {1};
    push_uop(OP_MUL, 0);       // count 0: dropped, pops nothing
    aq[1] = {};
    // start pool from the smallest value: acc is 0 after add, so compare with 0 too
    push_uop(OP_POOL, 4); push_uop(OP_ADD, 1); wait_idle();
    begin
      int mx = 0;
      for (int k = 11; k <= 14; k++) if (in_mem[k] > mx) mx = in_mem[k];
      `CHECK_EQ(out_log_d[0], mx & 32'hffff, "pool maximum")
    end
    `CHECK_EQ(aq[0].size(), 0, "pool consumed four input addresses")
    // 5) act through the reset lookup table (quantised ReLU)
    out_log_a = {}; out_log_d = {};
    in_mem[15] = 16'sh3456; in_mem[0] = -16'sd5;
    aq[0] = {15, 0}; aq[2] = {4, 5};
    push_uop(OP_ACT, 2); wait_idle();
    `CHECK_EQ(out_log_d[0], 32'h3000, "act positive")
    `CHECK_EQ(out_log_d[1], 0, "act negative")
    `CHECK_EQ(out_log_a[1], 5, "act address")
    // 6) saturation
    out_log_a = {}; out_log_d = {};
    in_mem[1] = 16'sh7fff; w_mem[1] = 16'sh7fff;
    aq[0] = {1, 1}; aq[1] = {1, 1}; aq[2] = {6};
    push_uop(OP_MUL, 1); push_uop(OP_MAC, 1); push_uop(OP_ADD, 1); wait_idle();
    `CHECK_EQ(out_log_d[0], 32'h7fff, "positive saturation")
    // 7) out_busy holds an output write
    out_log_a = {};
    aq[0] = {2}; aq[2] = {9};
    out_busy = 1;
    push_uop(OP_ACT, 1);
    repeat (4) @(negedge clk);
    `CHECK_EQ(out_log_a.size(), 0, "held while network uses output buffer")
    out_busy = 0; wait_idle();
    `CHECK_EQ(out_log_a.size(), 1, "written after network frees output buffer")
    `TB_FINISH
  end
endmodule
