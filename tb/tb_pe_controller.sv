// tb_pe_controller: presents u-ops and checks the decoded controls: access.cfg
// fields, start/stop, execute u-ops with count 1 or the repeat register after
// repeat, link-mask receive/send enables, LUT writes, readiness interlocks and
// that nothing happens without issue or when not addressed.
`include "tb_common.svh"
module tb_pe_controller;
  import ganax_pkg::*;
  logic clk = 0, rst_n = 0, issue = 0, uop_fifo_full = 0, uop_ready;
  logic [2:0] gen_running = 0;
  pe_uop_t uop;
  logic acc_cfg_we, acc_start, acc_stop, exe_push, recv_en, send_en, lut_we;
  logic [1:0] acc_gen;
  cfg_reg_e acc_cfg_sel;
  logic [15:0] acc_cfg_data, lut_data;
  exe_uop_t exe_uop;
  logic [3:0] lut_idx;
  int checks = 0, failures = 0;

  pe_controller #(.PE_IDX(2), .PE_PER_PV(4), .LUT_ENTRIES(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic give(opcode_e op, int gen, int dst, int sub, int imm, bit iss = 1);
    @(negedge clk);
    uop = '0; uop.valid = 1; uop.op = op; uop.gen = 2'(gen); uop.dst = 3'(dst);
    uop.sub = 4'(sub); uop.imm = 16'(imm); issue = iss;
    #1;
  endtask

  task automatic idle_in();
    @(negedge clk); uop = '0; issue = 0;
  endtask

  initial begin
    uop = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    give(OP_ACFG, 1, CFG_STEP, 0, 16'h1234);
    `CHECK_EQ(acc_cfg_we, 1'b1, "cfg write")
    `CHECK_EQ(acc_gen, 2'd1, "cfg generator")
    `CHECK_EQ(acc_cfg_sel, CFG_STEP, "cfg register")
    `CHECK_EQ(acc_cfg_data, 16'h1234, "cfg data")
    `CHECK_EQ(exe_push, 1'b0, "cfg is not executed")
    give(OP_ASTART, 2, 0, 0, 0);
    `CHECK_EQ(acc_start, 1'b1, "start")
    `CHECK_EQ(acc_gen, 2'd2, "start generator")
    give(OP_ASTOP, 0, 0, 0, 0);
    `CHECK_EQ(acc_stop, 1'b1, "stop")
    give(OP_MAC, 0, 0, 0, 0);
    `CHECK_EQ(exe_push, 1'b1, "mac pushed")
    `CHECK_EQ(exe_uop.count, 16'd1, "count 1 without repeat")
    give(OP_MLD, 0, MLD_REPEAT, 0, 5);
    `CHECK_EQ(exe_push, 1'b0, "mimd.ld not pushed")
    give(OP_REPEAT, 0, 0, 0, 0);
    `CHECK_EQ(exe_push, 1'b0, "repeat not pushed")
    give(OP_MUL, 0, 0, 0, 0);
    `CHECK_EQ(exe_push, 1'b1, "mul pushed")
    `CHECK_EQ(exe_uop.op, OP_MUL, "op")
    `CHECK_EQ(exe_uop.count, 16'd5, "repeat count applied")
    give(OP_ADD, 0, 0, 0, 0);
    `CHECK_EQ(exe_uop.count, 16'd1, "repeat applies to one u-op only")
    // link mask: bits 2 and 3 set -> PE 2 receives and sends
    give(OP_MLD, 0, MLD_LINK, 0, 16'b1100);
    idle_in(); #1;
    `CHECK_EQ(recv_en, 1'b1, "receive enable")
    `CHECK_EQ(send_en, 1'b1, "send enable")
    give(OP_MLD, 0, MLD_LINK, 0, 16'b0100);
    idle_in(); #1;
    `CHECK_EQ(recv_en, 1'b1, "receive only")
    `CHECK_EQ(send_en, 1'b0, "no send")
    give(OP_MLD, 0, MLD_LUT, 9, 16'hbeef);
    `CHECK_EQ(lut_we, 1'b1, "lut write")
    `CHECK_EQ(lut_idx, 4'd9, "lut index")
    `CHECK_EQ(lut_data, 16'hbeef, "lut data")
    // not issued: nothing happens
    give(OP_MAC, 0, 0, 0, 0, 0);
    `CHECK_EQ(exe_push, 1'b0, "no push without issue")
    // interlocks
    uop_fifo_full = 1;
    give(OP_MAC, 0, 0, 0, 0, 0);
    `CHECK_EQ(uop_ready, 1'b0, "not ready: u-op FIFO full")
    give(OP_ACFG, 0, 0, 0, 0, 0);
    `CHECK_EQ(uop_ready, 1'b1, "cfg ready with full u-op FIFO")
    uop_fifo_full = 0; gen_running = 3'b001;
    give(OP_ACFG, 0, 0, 0, 0, 0);
    `CHECK_EQ(uop_ready, 1'b0, "cfg waits for running generator")
    give(OP_ASTART, 1, 0, 0, 0, 0);
    `CHECK_EQ(uop_ready, 1'b1, "other generator free")
    give(OP_ASTOP, 0, 0, 0, 0, 0);
    `CHECK_EQ(uop_ready, 1'b1, "stop never waits")
    gen_running = 0;
    @(negedge clk); uop = '0; uop.op = OP_MAC; issue = 1; #1;
    `CHECK_EQ(exe_push, 1'b0, "not addressed to this PE")
    `TB_FINISH
  end
endmodule
