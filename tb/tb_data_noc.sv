// tb_data_noc: transfers from a model global data buffer into model PE buffers
// (unicast and multicast to a PE column) and back, one word per cycle; checks
// the data moved, the addresses touched and the transfer time.
`include "tb_common.svh"
module tb_data_noc;
  import ganax_pkg::*;
  localparam int NPV = 4;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done;
  noc_cmd_t cmd;
  logic g_we, net_we, net_mcast;
  logic [15:0] g_addr, g_wdata, g_rdata, net_addr, net_wdata, net_rdata;
  logic [3:0] net_pv, net_pe;
  logic [1:0] net_buf;
  logic [15:0] gdb [4096];
  logic [15:0] peb [NPV][4][3][32];
  int checks = 0, failures = 0;

  data_noc #(.GDB_AW(16)) dut (.*);
  always #5 clk = ~clk;
  assign g_rdata   = gdb[g_addr[11:0]];
  assign net_rdata = peb[net_pv[1:0]][net_pe[1:0]][net_buf][net_addr[4:0]];
  always @(posedge clk) begin
    if (g_we) gdb[g_addr[11:0]] <= g_wdata;
    if (net_we)
      for (int p = 0; p < NPV; p++)
        if (net_mcast || net_pv == 4'(p)) peb[p][net_pe[1:0]][net_buf][net_addr[4:0]] <= net_wdata;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic xfer(bit to_gdb, bit mc, int pv, int pe, int b, int ga, int pa, int len, output int cyc);
    @(negedge clk);
    cmd = '0; cmd.to_gdb = to_gdb; cmd.mcast = mc; cmd.pv = 4'(pv); cmd.pe = 4'(pe);
    cmd.buf_sel = 2'(b); cmd.gdb_addr = 16'(ga); cmd.pe_addr = 16'(pa); cmd.len = 16'(len);
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    cyc = 1;
    while (!cmd_ready) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 4096; i++) gdb[i] = 16'($urandom);
    for (int p = 0; p < NPV; p++) for (int e = 0; e < 4; e++) for (int b = 0; b < 3; b++)
      for (int a = 0; a < 32; a++) peb[p][e][b][a] = 16'hdead;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // unicast: 12 words to PV 2, PE 1, input buffer at 3
    xfer(0, 0, 2, 1, 0, 100, 3, 12, cyc);
    `CHECK_EQ(cyc, 13, "one word per cycle")
    for (int i = 0; i < 12; i++) `CHECK_EQ(peb[2][1][0][3 + i], gdb[100 + i], "unicast data")
    `CHECK_EQ(peb[1][1][0][3], 16'hdead, "other PV untouched")
    `CHECK_EQ(peb[2][1][0][2], 16'hdead, "word before block untouched")
    `CHECK_EQ(peb[2][1][0][15], 16'hdead, "word after block untouched")
    // multicast: 5 words to PE 3 weight buffer of every PV
    xfer(0, 1, 0, 3, 1, 500, 0, 5, cyc);
    for (int p = 0; p < NPV; p++) for (int i = 0; i < 5; i++)
      `CHECK_EQ(peb[p][3][1][i], gdb[500 + i], "multicast data")
    // read back: PV 2 PE 1 input buffer -> global data buffer 3000
    xfer(1, 0, 2, 1, 0, 3000, 3, 12, cyc);
    for (int i = 0; i < 12; i++) `CHECK_EQ(gdb[3000 + i], gdb[100 + i], "read-back data")
    `TB_FINISH
  end
endmodule
