// tb_pe: one PE (index 1 of a 4-PE vector) runs a row of a stride-2 transposed
// convolution: 4 inputs and 5 filter taps loaded through the network port, the
// u-op program of ganax_prog.svh decoded as its PV would, and a left partial sum
// per output column fed into its I/O FIFO. Checks the 7 output words read back
// through the network port, the 7 partial sums sent right, and the cycle count.
`include "tb_common.svh"
module tb_pe;
  import ganax_pkg::*;
  `include "ganax_prog.svh"
  logic clk = 0, rst_n = 0;
  pe_uop_t uop;
  logic uop_issue = 0, uop_ready, idle;
  logic net_we = 0;
  logic [1:0] net_buf = 0;
  logic [15:0] net_addr = 0, net_wdata = 0, net_rdata;
  logic link_in_push = 0, link_in_full, link_out_push, link_out_full = 0, fire;
  logic [31:0] link_in_data = 0, link_out_data;
  int checks = 0, failures = 0;
  logic signed [15:0] in_row [TC_IN];
  logic signed [15:0] w_row [TC_K];
  logic [31:0] sent [$];
  int fires = 0;

  pe #(.PE_IDX(1), .PE_PER_PV(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (link_out_push) sent.push_back(link_out_data);
    if (fire) fires++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  function automatic pe_uop_t decode(logic [GUOP_W-1:0] g);
    pe_uop_t u = '0;
    u.valid = 1; u.op = opcode_e'(g[63:60]); u.gen = g[55:54]; u.dst = g[53:51];
    u.sub = g[50:47]; u.imm = g[15:0];
    return u;
  endfunction

  task automatic net_write(int b, int a, logic [15:0] d);
    @(negedge clk); net_we = 1; net_buf = 2'(b); net_addr = 16'(a); net_wdata = d;
    @(negedge clk); net_we = 0;
  endtask

  function automatic longint row_sum(int x);
    longint s = 0;
    for (int kc = 0; kc < TC_K; kc++) begin
      int j = x + kc - 2;
      if (j >= 0 && j % 2 == 0 && j / 2 < TC_IN) s += longint'(w_row[kc]) * longint'(in_row[j / 2]);
    end
    return s;
  endfunction

  initial begin
    logic [GUOP_W-1:0] prog [$];
    longint left [TC_OUT];
    int t0, issued;
    uop = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < TC_IN; i++) begin in_row[i] = 16'($urandom_range(1023)) - 16'sd512; net_write(0, i, in_row[i]); end
    net_write(0, TC_IN, 16'd0);     // right-hand zero padding
    for (int i = 0; i < TC_K; i++)  begin w_row[i]  = 16'($urandom_range(1023)) - 16'sd512; net_write(1, i, w_row[i]); end
    for (int x = 0; x < TC_OUT; x++) left[x] = longint'($urandom_range(200000)) - 100000;
    // left partial sums arrive up front (the I/O FIFO holds 8)
    for (int x = 0; x < TC_OUT; x++) begin
      @(negedge clk); link_in_push = 1; link_in_data = 32'(left[x]);
    end
    @(negedge clk); link_in_push = 0;
    tc_setup(0, 0, prog);           // even row: mask 0b110, PE 1 receives and sends
    for (int x = 0; x < TC_OUT; x++) begin
      tc_window_access(0, x, prog);
      tc_window_compute(x, 0, 16'h0, prog);
    end
    t0 = fires; issued = 0;
    foreach (prog[i]) begin
      @(negedge clk);
      uop = decode(prog[i]);
      #1;
      while (!uop_ready) begin @(negedge clk); #1; end
      uop_issue = 1;
      @(posedge clk); #1; uop_issue = 0; uop = '0;
      issued++;
    end
    begin
      int n = 0;
      while (!idle && n < 500) begin @(negedge clk); n++; end
    end
    `CHECK_EQ(idle, 1'b1, "PE drains")
    // 18 mul/mac + 7 add firings
    `CHECK_EQ(fires - t0, 25, "consequential operations only")
    `CHECK_EQ(sent.size(), TC_OUT, "partial sums sent right")
    for (int x = 0; x < TC_OUT; x++) begin
      longint s;
      s = row_sum(x) + left[x];
      @(negedge clk); net_addr = 16'(x); #1;
      `CHECK_EQ(net_rdata, tc_sat(s), "output column")
      if (x < sent.size()) `CHECK_EQ(sent[x], 32'(s), "partial sum to the right")
    end
    `TB_FINISH
  end
endmodule
