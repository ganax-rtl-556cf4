// tb_pv: a 4-PE processing vector (index 3) computes two output rows of the
// transposed convolution of ganax_prog.svh: an even row with a 3-PE partial-sum
// chain in SIMD mode, then an odd row with a 2-PE chain in MIMD-SIMD mode
// (mimd.exe indices into the local u-op buffer). Access u-ops aimed at another
// PV are mixed in and must be ignored; a mimd.exe whose field for this PV is 0
// must do nothing. Results are read from the last PE of each chain.
`include "tb_common.svh"
module tb_pv;
  import ganax_pkg::*;
  `include "ganax_prog.svh"
  localparam int NPE = 4, MYPV = 3;
  logic clk = 0, rst_n = 0;
  logic [GUOP_W-1:0] guop = '0;
  logic issue = 0, uop_ready, idle, luop_we = 0, mimd_issue;
  logic [3:0] luop_waddr = 0;
  logic [15:0] luop_wdata = 0;
  logic net_we = 0;
  logic [1:0] net_pe = 0, net_buf = 0;
  logic [15:0] net_addr = 0, net_wdata = 0, net_rdata;
  logic [NPE-1:0] pe_fire;
  int checks = 0, failures = 0, fires = 0, mimd_seen = 0;
  logic signed [15:0] in [TC_IN][TC_IN];
  logic signed [15:0] w [TC_K][TC_K];

  pv #(.PV_IDX(MYPV), .PE_PER_PV(NPE)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    fires += $countones(pe_fire);
    if (mimd_issue) mimd_seen++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    `TB_FINISH
  end

  task automatic net_write(int pe, int b, int a, logic [15:0] d);
    @(negedge clk); net_we = 1; net_pe = 2'(pe); net_buf = 2'(b); net_addr = 16'(a); net_wdata = d;
    @(negedge clk); net_we = 0;
  endtask

  task automatic load_row(int r);
    for (int j = 0; j < NPE; j++) begin
      int kr, ir;
      kr = tc_krow(r, j); ir = tc_irow(r, j);
      for (int c = 0; c <= TC_IN; c++)
        net_write(j, 0, c, (ir >= 0 && c < TC_IN) ? in[ir][c] : 16'd0);
      for (int c = 0; c < TC_K; c++)
        net_write(j, 1, c, (kr >= 0) ? w[kr][c] : 16'd0);
    end
  endtask

  task automatic run(ref logic [GUOP_W-1:0] prog [$]);
    foreach (prog[i]) begin
      @(negedge clk); guop = prog[i]; #1;
      while (!uop_ready) begin @(negedge clk); #1; end
      issue = 1;
      @(posedge clk); #1 issue = 0;
    end
    @(negedge clk); guop = '0;
    for (int n = 0; n < 500 && !idle; n++) @(negedge clk);
  endtask

  task automatic check_row(int r);
    int last;
    last = tc_chain(r) - 1;
    for (int x = 0; x < TC_OUT; x++) begin
      @(negedge clk); net_pe = 2'(last); net_addr = 16'(x); #1;
      `CHECK_EQ(net_rdata, tc_sat(tc_ref_sum(r, x, in, w)), "output row element")
    end
  endtask

  initial begin
    logic [GUOP_W-1:0] prog [$];
    int f0;
    for (int i = 0; i < TC_IN; i++) for (int j = 0; j < TC_IN; j++) in[i][j] = 16'($urandom_range(1023)) - 16'sd512;
    for (int i = 0; i < TC_K; i++)  for (int j = 0; j < TC_K; j++)  w[i][j]  = 16'($urandom_range(1023)) - 16'sd512;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); luop_we = 1; luop_waddr = 4'(i); luop_wdata = tc_local_uop(i);
    end
    @(negedge clk); luop_we = 0;
    // even row 2, SIMD mode
    load_row(2);
    prog = {};
    tc_setup(MYPV, 2, prog);
    prog.push_back(simd_guop(OP_ACFG, 4'(5), GEN_W, CFG_STEP, 0, 1));   // other PV
    prog.push_back(simd_guop(OP_MLD, 4'(5), 0, MLD_REPEAT, 0, 9));      // other PV
    for (int x = 0; x < TC_OUT; x++) begin
      tc_window_access(MYPV, x, prog);
      tc_window_compute(x, 0, 16'h0, prog);
    end
    run(prog);
    `CHECK_EQ(idle, 1'b1, "PV drained (SIMD)")
    check_row(2);
    `CHECK_EQ(mimd_seen, 0, "no MIMD-SIMD u-ops in SIMD run")
    // odd row 3, MIMD-SIMD mode
    load_row(3);
    prog = {};
    tc_setup(MYPV, 3, prog);
    for (int x = 0; x < TC_OUT; x++) begin
      tc_window_access(MYPV, x, prog);
      tc_window_compute(x, 1, 16'(1 << MYPV), prog);
    end
    run(prog);
    `CHECK_EQ(idle, 1'b1, "PV drained (MIMD-SIMD)")
    check_row(3);
    `CHECK(mimd_seen == 4 * 4 + 3 * 3, "mimd.exe u-ops taken")
    // mimd.exe with this PV's field 0 (nop) but other fields set: nothing runs
    f0 = fires;
    prog = {};
    prog.push_back({1'b1, {16{4'(LU_MUL)}}} & ~(65'hf << (4 * MYPV)));
    run(prog);
    repeat (5) @(negedge clk);
    `CHECK_EQ(fires, f0, "nop field: no PE fires")
    `TB_FINISH
  end
endmodule
