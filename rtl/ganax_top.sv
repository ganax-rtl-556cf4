// ganax_top: the GANAX accelerator, an array of NUM_PV processing vectors of
// PE_PER_PV processing engines (16 x 16 by default) with its global memories.
//
// Off-chip memory is outside this block: the host side of the global
// instruction buffer, the local u-op buffers, the global data buffer, the layer
// queue and the network command port are top-level ports.
//   * The global controller copies a layer's global u-ops from the instruction
//     buffer into the free bank of the double-buffered global u-op buffer and
//     issues them, one per cycle, to every PV. Issue stalls the whole array
//     while any PE is not ready.
//   * Each PV turns a global u-op into the u-op its PEs execute: the payload
//     itself in SIMD mode, or the local u-op at its 4-bit index in MIMD-SIMD mode.
//   * The network moves blocks between the global data buffer and PE buffers.
// Host ports are synchronous to clk and take effect at the rising edge;
// gdb_rdata is combinational. Status: busy, stall (a u-op waits for the array), completed layers, cycles of
// overlapped loading and issuing, per-PE fire strobes, SIMD and MIMD-SIMD issue
// strobes. The organisation follows the paper's top-level diagram; the host
// interface is this design's.
module ganax_top
  import ganax_pkg::*;
#(
  parameter int unsigned NUM_PV     = 16,
  parameter int unsigned PE_PER_PV  = 16,
  parameter int unsigned IN_DEPTH   = 12,
  parameter int unsigned W_DEPTH    = 224,
  parameter int unsigned PSUM_DEPTH = 24,
  parameter int unsigned FRAC       = 8,
  parameter int unsigned GUOP_ENTRIES = 32,
  parameter int unsigned IB_DEPTH   = 3456,
  parameter int unsigned GDB_DEPTH  = 55296
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // instruction buffer load
  input  logic                          ib_we,
  input  logic [$clog2(IB_DEPTH)-1:0]   ib_waddr,
  input  logic [GUOP_W-1:0]             ib_wdata,
  // local u-op buffer load (lu_all: every PV)
  input  logic                          lu_we,
  input  logic                          lu_all,
  input  logic [3:0]                    lu_pv,
  input  logic [LIDX_W-1:0]             lu_addr,
  input  logic [LUOP_W-1:0]             lu_wdata,
  // global data buffer host port
  input  logic                          gdb_we,
  input  logic [$clog2(GDB_DEPTH)-1:0]  gdb_addr,
  input  logic [DATA_W-1:0]             gdb_wdata,
  output logic [DATA_W-1:0]             gdb_rdata,
  // layer queue
  input  logic                          layer_valid,
  input  logic [$clog2(IB_DEPTH)-1:0]   layer_base,
  input  logic [$clog2(GUOP_ENTRIES):0] layer_len,
  output logic                          layer_ready,
  // network command
  input  logic                          noc_valid,
  input  noc_cmd_t                      noc_cmd,
  output logic                          noc_ready,
  output logic                          noc_done,
  // status
  output logic                          busy,
  output logic                          stall,
  output logic [15:0]                   layers_done,
  output logic [15:0]                   overlap,
  output logic                          simd_issue,
  output logic                          mimd_issue,
  output logic [NUM_PV*PE_PER_PV-1:0]   pe_fire
);

  // instruction buffer and global u-op buffer
  logic [$clog2(IB_DEPTH)-1:0]     ib_raddr;
  logic [GUOP_W-1:0]               ib_rdata, gb_wdata, gb_rdata, guop;
  logic                            gb_we, gb_wbank, gb_rbank, issue, array_ready, array_idle;
  logic [$clog2(GUOP_ENTRIES)-1:0] gb_waddr, gb_raddr;

  global_instr_buffer #(.DEPTH(IB_DEPTH), .W(GUOP_W)) u_ib (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  global_uop_buffer #(.ENTRIES(GUOP_ENTRIES), .W(GUOP_W)) u_gub (
    .clk, .we(gb_we), .wbank(gb_wbank), .waddr(gb_waddr), .wdata(gb_wdata),
    .rbank(gb_rbank), .raddr(gb_raddr), .rdata(gb_rdata)
  );

  global_controller #(.ENTRIES(GUOP_ENTRIES), .IDEPTH(IB_DEPTH)) u_ctrl (
    .clk, .rst_n, .layer_valid, .layer_base, .layer_len, .layer_ready,
    .ib_raddr, .ib_rdata, .gb_we, .gb_wbank, .gb_waddr, .gb_wdata,
    .gb_rbank, .gb_raddr, .gb_rdata, .guop, .issue, .array_ready, .array_idle,
    .busy, .stall, .layers_done, .overlap
  );

  // global data buffer and network
  logic                           n_we;
  logic [15:0]                    n_addr16;
  logic [DATA_W-1:0]              n_wdata, n_rdata;
  logic                           net_we, net_mcast;
  logic [3:0]                     net_pv, net_pe;
  logic [1:0]                     net_buf;
  logic [ADDR_W-1:0]              net_addr;
  logic [DATA_W-1:0]              net_wdata, net_rdata;

  global_data_buffer #(.DEPTH(GDB_DEPTH), .W(DATA_W)) u_gdb (
    .clk, .h_we(gdb_we), .h_addr(gdb_addr), .h_wdata(gdb_wdata), .h_rdata(gdb_rdata),
    .n_we, .n_addr(n_addr16[$clog2(GDB_DEPTH)-1:0]), .n_wdata, .n_rdata
  );

  data_noc #(.GDB_AW(16)) u_noc (
    .clk, .rst_n, .cmd_valid(noc_valid), .cmd(noc_cmd), .cmd_ready(noc_ready), .done(noc_done),
    .g_we(n_we), .g_addr(n_addr16), .g_wdata(n_wdata), .g_rdata(n_rdata),
    .net_we, .net_mcast, .net_pv, .net_pe, .net_buf, .net_addr, .net_wdata, .net_rdata
  );

  // PV array
  logic [NUM_PV-1:0]  pv_ready, pv_idle, pv_mimd;
  logic [DATA_W-1:0]  pv_rdata [NUM_PV];

  for (genvar i = 0; i < NUM_PV; i++) begin : g_pv
    pv #(.PV_IDX(i), .PE_PER_PV(PE_PER_PV), .IN_DEPTH(IN_DEPTH), .W_DEPTH(W_DEPTH),
         .PSUM_DEPTH(PSUM_DEPTH), .FRAC(FRAC)) u_pv (
      .clk, .rst_n, .guop, .issue, .uop_ready(pv_ready[i]), .idle(pv_idle[i]),
      .luop_we(lu_we && (lu_all || lu_pv == 4'(i))), .luop_waddr(lu_addr), .luop_wdata(lu_wdata),
      .net_we(net_we && (net_mcast || net_pv == 4'(i))),
      .net_pe(net_pe[$clog2(PE_PER_PV)-1:0]), .net_buf, .net_addr, .net_wdata,
      .net_rdata(pv_rdata[i]),
      .pe_fire(pe_fire[i*PE_PER_PV +: PE_PER_PV]),
      .mimd_issue(pv_mimd[i])
    );
  end

  assign array_ready = &pv_ready;
  assign array_idle  = &pv_idle;
  assign net_rdata   = pv_rdata[net_pv[$clog2(NUM_PV)-1:0]];
  assign simd_issue  = issue && !guop[GUOP_W-1];
  assign mimd_issue  = issue && guop[GUOP_W-1];

endmodule
