// tb_ganax_top: end-to-end run of the full-size accelerator (16 PVs x 16 PEs,
// default parameters) on the 2-D transposed convolution of ganax_prog.svh.
//
// The host writes the input and filter into the global data buffer, loads the
// local u-op buffers, moves rows into the PEs through the network (filters by
// multicast to a PE column, then unicast corrections for the odd rows), writes
// the global u-op program into the instruction buffer and queues it as layers
// of at most 32 u-ops. Seven PVs compute the seven output rows: set-up and
// address u-ops in SIMD mode, arithmetic by mimd.exe with the other nine PVs
// given nop. Results are drained through the network into the global data
// buffer and read by the host. A long multicast network write into the
// output buffers is made to overlap the computation so that the array stalls. Besides the 49 outputs it checks that each
// mechanism happened: SIMD issue, MIMD-SIMD issue, array stall, overlapped
// loading of the next u-op bank, repeat, horizontal partial-sum transfer,
// generator wrap-around, network multicast and read-back.
`include "tb_common.svh"
module tb_ganax_top;
  import ganax_pkg::*;
  `include "ganax_prog.svh"
  localparam int NPV = 16, NPE = 16;
  localparam int GIN = 0, GZERO = 200, GW = 100, GOUT = 1000;
  logic clk = 0, rst_n = 0;
  logic ib_we = 0, lu_we = 0, lu_all = 0, gdb_we = 0, layer_valid = 0, noc_valid = 0;
  logic [11:0] ib_waddr = 0, layer_base = 0;
  logic [GUOP_W-1:0] ib_wdata = 0;
  logic [3:0] lu_pv = 0, lu_addr = 0;
  logic [15:0] lu_wdata = 0, gdb_addr = 0, gdb_wdata = 0, gdb_rdata;
  logic [5:0] layer_len = 0;
  logic layer_ready, noc_ready, noc_done, busy, stall, simd_issue, mimd_issue;
  noc_cmd_t noc_cmd = '0;
  logic [15:0] layers_done, overlap;
  logic [NPV*NPE-1:0] pe_fire;
  int checks = 0, failures = 0;
  logic signed [15:0] in [TC_IN][TC_IN];
  logic signed [15:0] w [TC_K][TC_K];
  int n_simd = 0, n_mimd = 0, n_stall = 0, n_fire = 0, n_rep = 0, n_link = 0, n_wrap = 0;
  int n_mcast = 0, n_readback = 0;

  ganax_top dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (simd_issue) n_simd++;
    if (mimd_issue) n_mimd++;
    if (stall) n_stall++;
    n_fire += $countones(pe_fire);
    if (dut.g_pv[0].u_pv.g_pe[0].u_pe.fire && dut.g_pv[0].u_pv.g_pe[0].u_pe.u_exec.head.count > 1) n_rep++;
    if (dut.g_pv[0].u_pv.lpush[0]) n_link++;
    if (dut.g_pv[0].u_pv.g_pe[0].u_pe.u_access.g_gen[1].round_done) n_wrap++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    `TB_FINISH
  end

  task automatic gdb_write(int a, logic [15:0] d);
    @(negedge clk); gdb_we = 1; gdb_addr = 16'(a); gdb_wdata = d;
    @(negedge clk); gdb_we = 0;
  endtask

  task automatic noc(bit to_gdb, bit mc, int pv, int pe, int b, int ga, int pa, int len);
    @(negedge clk);
    while (!noc_ready) @(negedge clk);
    noc_cmd = '0; noc_cmd.to_gdb = to_gdb; noc_cmd.mcast = mc; noc_cmd.pv = 4'(pv);
    noc_cmd.pe = 4'(pe); noc_cmd.buf_sel = 2'(b); noc_cmd.gdb_addr = 16'(ga);
    noc_cmd.pe_addr = 16'(pa); noc_cmd.len = 16'(len);
    noc_valid = 1;
    @(negedge clk); noc_valid = 0;
    while (!noc_ready) @(negedge clk);
    if (mc) n_mcast++;
    if (to_gdb) n_readback++;
  endtask

  initial begin
    logic [GUOP_W-1:0] prog [$];
    int nlayers, base;
    for (int i = 0; i < TC_IN; i++) for (int j = 0; j < TC_IN; j++) in[i][j] = 16'($urandom_range(1023)) - 16'sd512;
    for (int i = 0; i < TC_K; i++)  for (int j = 0; j < TC_K; j++)  w[i][j]  = 16'($urandom_range(1023)) - 16'sd512;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // global data buffer: input rows (with a zero pad word), a zero row, filter rows
    for (int i = 0; i < TC_IN; i++) begin
      for (int j = 0; j < TC_IN; j++) gdb_write(GIN + 8 * i + j, in[i][j]);
      gdb_write(GIN + 8 * i + TC_IN, 16'd0);
    end
    for (int j = 0; j <= TC_IN; j++) gdb_write(GZERO + j, 16'd0);
    for (int i = 0; i < TC_K; i++) for (int j = 0; j < TC_K; j++) gdb_write(GW + 8 * i + j, w[i][j]);
    // local u-op buffers, all PVs at once
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); lu_we = 1; lu_all = 1; lu_addr = 4'(i); lu_wdata = tc_local_uop(i);
    end
    @(negedge clk); lu_we = 0; lu_all = 0;
    // filters: even-row pattern multicast to every PV, odd rows corrected
    for (int j = 0; j < 3; j++) noc(0, 1, 0, j, 1, GW + 8 * (2 * j), 0, TC_K);
    for (int r = 1; r < TC_OUT; r += 2)
      for (int j = 0; j < 2; j++) noc(0, 0, r, j, 1, GW + 8 * (2 * j + 1), 0, TC_K);
    // input rows
    for (int r = 0; r < TC_OUT; r++)
      for (int j = 0; j < tc_chain(r); j++) begin
        int ir;
        ir = tc_irow(r, j);
        noc(0, 0, r, j, 0, (ir < 0) ? GZERO : GIN + 8 * ir, 0, TC_IN + 1);
      end
    // program
    for (int r = 0; r < TC_OUT; r++) tc_setup(r, r, prog);
    for (int x = 0; x < TC_OUT; x++) begin
      for (int r = 0; r < TC_OUT; r++) tc_window_access(r, x, prog);
      tc_window_compute(x, 1, 16'h007f, prog);
    end
    foreach (prog[i]) begin
      @(negedge clk); ib_we = 1; ib_waddr = 12'(i); ib_wdata = prog[i];
    end
    @(negedge clk); ib_we = 0;
    nlayers = (prog.size() + 31) / 32;
    base = 0;
    // a long network write into the (unused) upper output-buffer addresses
    // occupies the output write port while the array computes: the execute
    // engines must hold their results and the global controller must stall
    fork
      begin
        repeat (150) @(negedge clk);
        noc(0, 1, 0, 0, 2, 4000, 100, 400);
      end
    join_none
    for (int l = 0; l < nlayers; l++) begin
      int len;
      len = (prog.size() - base > 32) ? 32 : prog.size() - base;
      @(negedge clk); layer_valid = 1; layer_base = 12'(base); layer_len = 6'(len);
      @(posedge clk);
      while (!layer_ready) @(posedge clk);
      @(negedge clk); layer_valid = 0;
      base += len;
    end
    for (int n = 0; n < 20000 && (busy || layers_done != 16'(nlayers)); n++) @(negedge clk);
    `CHECK_EQ(layers_done, 16'(nlayers), "all layers issued")
    `CHECK_EQ(busy, 1'b0, "array idle")
    // drain results
    for (int r = 0; r < TC_OUT; r++) noc(1, 0, r, tc_chain(r) - 1, 2, GOUT + 8 * r, 0, TC_OUT);
    for (int r = 0; r < TC_OUT; r++)
      for (int x = 0; x < TC_OUT; x++) begin
        @(negedge clk); gdb_addr = 16'(GOUT + 8 * r + x); #1;
        `CHECK_EQ(gdb_rdata, tc_sat(tc_ref_sum(r, x, in, w)), "output element")
      end
    // every PE of the seven active PVs does 18 mul/mac and 7 add
    `CHECK_EQ(n_fire, TC_OUT * NPE * 25, "operations executed")
    $display("mechanisms: simd=%0d mimd=%0d stall=%0d overlap=%0d repeat=%0d link=%0d wrap=%0d mcast=%0d readback=%0d layers=%0d",
             n_simd, n_mimd, n_stall, overlap, n_rep, n_link, n_wrap, n_mcast, n_readback, nlayers);
    `CHECK(n_simd > 0, "SIMD issue happened")
    `CHECK_EQ(n_mimd, 4 * 4 + 3 * 3, "MIMD-SIMD issue happened")
    `CHECK(n_stall > 0, "array stall happened")
    `CHECK(overlap > 0, "double-buffered load overlapped issue")
    `CHECK_EQ(n_rep, 8, "repeat: 4 repeated macs of 2")
    `CHECK_EQ(n_link, TC_OUT, "horizontal partial sums")
    `CHECK_EQ(n_wrap, TC_OUT, "weight generator wrap-arounds")
    `CHECK(n_mcast > 0, "network multicast happened")
    `CHECK(n_readback > 0, "network read-back happened")
    `TB_FINISH
  end
endmodule
