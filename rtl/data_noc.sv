// data_noc: network that moves data between the global data buffer and the PEs.
//
// The host issues a transfer command (noc_cmd_t): len words between global data
// buffer address gdb_addr.. and buffer buf_sel of PE (pv, pe) at pe_addr.., in
// either direction. Towards the PEs a command may multicast to the same PE
// column of every PV, which is how a filter row shared by the PEs of a column is
// delivered once. One word moves per cycle: both the global data buffer and the
// PE buffers read combinationally, so word i is read and written in the same
// cycle. cmd_ready is high when no transfer is running; done pulses in the
// cycle of the last word. The paper only names the network; this block mover is
// this design's. The data words are wires: g_wdata is net_rdata and net_wdata
// is g_rdata, since the mover only generates addresses and write strobes.
module data_noc
  import ganax_pkg::*;
#(
  parameter int unsigned GDB_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  noc_cmd_t          cmd,
  output logic              cmd_ready,
  output logic              done,
  // global data buffer port
  output logic              g_we,
  output logic [GDB_AW-1:0] g_addr,
  output logic [DATA_W-1:0] g_wdata,
  input  logic [DATA_W-1:0] g_rdata,
  // PE array port
  output logic              net_we,
  output logic              net_mcast,
  output logic [3:0]        net_pv,
  output logic [3:0]        net_pe,
  output logic [1:0]        net_buf,
  output logic [ADDR_W-1:0] net_addr,
  output logic [DATA_W-1:0] net_wdata,
  input  logic [DATA_W-1:0] net_rdata
);

  noc_cmd_t    cmd_q;
  logic        active_q;
  logic [15:0] i_q;

  assign cmd_ready = !active_q;
  assign g_addr    = GDB_AW'(cmd_q.gdb_addr + i_q);
  assign g_we      = active_q && cmd_q.to_gdb;
  assign g_wdata   = net_rdata;
  assign net_we    = active_q && !cmd_q.to_gdb;
  assign net_mcast = cmd_q.mcast;
  assign net_pv    = cmd_q.pv;
  assign net_pe    = cmd_q.pe;
  assign net_buf   = cmd_q.buf_sel;
  assign net_addr  = cmd_q.pe_addr + i_q;
  assign net_wdata = g_rdata;
  assign done      = active_q && (i_q + 1'b1 == cmd_q.len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q    <= '0;
      active_q <= 1'b0;
      i_q      <= '0;
    end else if (!active_q) begin
      if (cmd_valid && cmd.len != 0) begin
        cmd_q    <= cmd;
        active_q <= 1'b1;
        i_q      <= '0;
      end
    end else begin
      i_q <= i_q + 1'b1;
      if (done) active_q <= 1'b0;
    end
  end

endmodule
