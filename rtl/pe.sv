// pe: processing engine of the GANAX array.
//
// A PE couples an access u-engine (three strided index generators with address
// FIFOs) to an execute u-engine (u-op FIFO, ALU with accumulator, lookup-table
// non-linear unit) through three local buffers: input register file (12 x 16),
// weight SRAM (224 x 16) and partial-sum/output register file (24 x 16). The PE
// controller decodes the u-op broadcast by the PV. Partial sums travel to the
// right neighbour through an 8 x 32-bit I/O FIFO that lives in the receiving PE
// (link_in side). The network port (net_*) writes any of the three buffers and
// reads the output buffer combinationally; a network write to the output buffer
// holds back an execute write in the same cycle.
// Structure and sizes are the paper's; port naming and the link FIFO placement
// are this design's.
module pe
  import ganax_pkg::*;
#(
  parameter int unsigned PE_IDX         = 0,
  parameter int unsigned PE_PER_PV      = 16,
  parameter int unsigned IN_DEPTH       = 12,
  parameter int unsigned W_DEPTH        = 224,
  parameter int unsigned PSUM_DEPTH     = 24,
  parameter int unsigned FIFO_DEPTH     = 8,
  parameter int unsigned UOP_FIFO_DEPTH = 4,
  parameter int unsigned FRAC           = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_uop_t           uop,
  input  logic              uop_issue,
  output logic              uop_ready,
  output logic              idle,
  // network port: 0 = input, 1 = weight, 2 = output buffer
  input  logic              net_we,
  input  logic [1:0]        net_buf,
  input  logic [ADDR_W-1:0] net_addr,
  input  logic [DATA_W-1:0] net_wdata,
  output logic [DATA_W-1:0] net_rdata,
  // partial sum from the left neighbour
  input  logic              link_in_push,
  input  logic [ACC_W-1:0]  link_in_data,
  output logic              link_in_full,
  // partial sum to the right neighbour
  output logic              link_out_push,
  output logic [ACC_W-1:0]  link_out_data,
  input  logic              link_out_full,
  output logic              fire
);

  // controller <-> engines
  logic              acc_cfg_we, acc_start, acc_stop;
  logic [1:0]        acc_gen;
  cfg_reg_e          acc_cfg_sel;
  logic [ADDR_W-1:0] acc_cfg_data;
  logic              exe_push, uop_full, recv_en, send_en, lut_we;
  exe_uop_t          exe_uop;
  logic [3:0]        lut_idx;
  logic [DATA_W-1:0] lut_data;
  logic [ADDR_W-1:0] addr_head [NGEN];
  logic [NGEN-1:0]   addr_empty, addr_pop, gen_running;

  pe_controller #(.PE_IDX(PE_IDX), .PE_PER_PV(PE_PER_PV), .LUT_ENTRIES(16)) u_ctrl (
    .clk, .rst_n, .uop, .issue(uop_issue), .uop_fifo_full(uop_full),
    .gen_running, .uop_ready,
    .acc_cfg_we, .acc_start, .acc_stop, .acc_gen, .acc_cfg_sel, .acc_cfg_data,
    .exe_push, .exe_uop, .recv_en, .send_en, .lut_we, .lut_idx, .lut_data
  );

  access_engine #(.FIFO_DEPTH(FIFO_DEPTH)) u_access (
    .clk, .rst_n, .cfg_we(acc_cfg_we), .start(acc_start), .stop(acc_stop),
    .gen_sel(acc_gen), .cfg_sel(acc_cfg_sel), .cfg_data(acc_cfg_data),
    .pop(addr_pop), .head(addr_head), .empty(addr_empty), .running(gen_running)
  );

  // buffers
  logic [ADDR_W-1:0] in_raddr, w_raddr, out_waddr;
  logic [DATA_W-1:0] in_rdata, w_rdata, out_wdata, in_rb_unused, w_rb_unused;
  logic              out_we, net_out_we;

  assign net_out_we = net_we && net_buf == 2'd2;

  pe_buffer #(.DEPTH(IN_DEPTH), .W(DATA_W), .AW(ADDR_W)) u_inbuf (
    .clk, .we(net_we && net_buf == 2'd0), .waddr(net_addr), .wdata(net_wdata),
    .raddr_a(in_raddr), .rdata_a(in_rdata), .raddr_b(net_addr), .rdata_b(in_rb_unused)
  );
  pe_buffer #(.DEPTH(W_DEPTH), .W(DATA_W), .AW(ADDR_W)) u_wbuf (
    .clk, .we(net_we && net_buf == 2'd1), .waddr(net_addr), .wdata(net_wdata),
    .raddr_a(w_raddr), .rdata_a(w_rdata), .raddr_b(net_addr), .rdata_b(w_rb_unused)
  );
  pe_buffer #(.DEPTH(PSUM_DEPTH), .W(DATA_W), .AW(ADDR_W)) u_outbuf (
    .clk, .we(net_out_we || out_we),
    .waddr(net_out_we ? net_addr : out_waddr),
    .wdata(net_out_we ? net_wdata : out_wdata),
    .raddr_a(net_addr), .rdata_a(net_rdata), .raddr_b(out_waddr), .rdata_b()
  );

  // incoming partial-sum I/O FIFO
  logic [ACC_W-1:0] link_head;
  logic             link_empty, link_pop;
  logic [3:0]       link_cnt;

  sync_fifo #(.W(ACC_W), .DEPTH(8)) u_link_fifo (
    .clk, .rst_n, .push(link_in_push), .din(link_in_data), .pop(link_pop),
    .dout(link_head), .full(link_in_full), .empty(link_empty), .count(link_cnt)
  );

  logic    exe_idle;
  opcode_e fire_op;

  execute_engine #(.FRAC(FRAC), .UOP_FIFO_DEPTH(UOP_FIFO_DEPTH), .LUT_ENTRIES(16)) u_exec (
    .clk, .rst_n,
    .uop_push(exe_push), .uop_in(exe_uop), .uop_full, .idle(exe_idle),
    .addr_head, .addr_empty, .addr_pop,
    .in_raddr, .in_rdata, .w_raddr, .w_rdata,
    .out_we, .out_waddr, .out_wdata, .out_busy(net_out_we),
    .recv_en, .send_en,
    .link_in(link_head), .link_in_valid(!link_empty), .link_in_pop(link_pop),
    .link_out_push, .link_out(link_out_data), .link_out_full,
    .lut_we, .lut_idx, .lut_data,
    .fire, .fire_op
  );

  // idle: nothing left to execute and no generator still running
  assign idle = exe_idle && !(|gen_running);

endmodule
