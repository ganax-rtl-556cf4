// pv: processing vector, a horizontal row of PE_PER_PV PEs sharing one local
// u-op buffer.
//
// The global u-op's mode bit drives the PV's mux. In SIMD mode the local buffer
// is bypassed: the payload is decoded as one u-op; execute u-ops and repeat go
// to every PV, while access u-ops and mimd.ld go only to the PV named by their
// pv_idx field. In MIMD-SIMD mode (mimd.exe) this PV takes its own 4-bit field
// of the payload, reads the local u-op at that index and broadcasts it to all
// its PEs, so different PVs run different u-ops in the same cycle. A zero local
// u-op is a no-op. PE j passes its partial sums to PE j+1 through the I/O FIFO
// inside PE j+1. uop_ready is the AND of the PEs' ready flags; the u-op takes
// effect in the cycle issue is high. The network port writes one PE's buffer,
// or the same PE column in every PV when the top multicasts, and reads a PE's
// output buffer combinationally.
// Mux, bypass and index semantics are the paper's; encodings are this design's.
module pv
  import ganax_pkg::*;
#(
  parameter int unsigned PV_IDX     = 0,
  parameter int unsigned PE_PER_PV  = 16,
  parameter int unsigned IN_DEPTH   = 12,
  parameter int unsigned W_DEPTH    = 224,
  parameter int unsigned PSUM_DEPTH = 24,
  parameter int unsigned FRAC       = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [GUOP_W-1:0]    guop,
  input  logic                 issue,
  output logic                 uop_ready,
  output logic                 idle,
  // local u-op buffer load
  input  logic                 luop_we,
  input  logic [LIDX_W-1:0]    luop_waddr,
  input  logic [LUOP_W-1:0]    luop_wdata,
  // network port
  input  logic                 net_we,
  input  logic [$clog2(PE_PER_PV)-1:0] net_pe,
  input  logic [1:0]           net_buf,
  input  logic [ADDR_W-1:0]    net_addr,
  input  logic [DATA_W-1:0]    net_wdata,
  output logic [DATA_W-1:0]    net_rdata,
  // activity
  output logic [PE_PER_PV-1:0] pe_fire,
  output logic                 mimd_issue   // a mimd.exe u-op took effect here
);

  logic [LIDX_W-1:0] lidx;
  logic [LUOP_W-1:0] luop;
  pe_uop_t           bcast;
  logic              mode;
  opcode_e           gop;

  assign mode = guop[GUOP_W-1];
  assign lidx = guop[LIDX_W*PV_IDX +: LIDX_W];
  assign gop  = opcode_e'(guop[63:60]);

  local_uop_buffer #(.ENTRIES(1 << LIDX_W), .W(LUOP_W)) u_lbuf (
    .clk, .rst_n, .we(luop_we), .waddr(luop_waddr), .wdata(luop_wdata), .idx(lidx), .uop(luop)
  );

  always_comb begin
    bcast = '0;
    if (mode) begin
      bcast.op    = opcode_e'(luop[15:12]);
      bcast.gen   = luop[11:10];
      bcast.valid = (bcast.op != OP_NOP);
    end else begin
      bcast.op    = gop;
      bcast.gen   = guop[55:54];
      bcast.dst   = guop[53:51];
      bcast.sub   = guop[50:47];
      bcast.imm   = guop[15:0];
      bcast.valid = (gop != OP_NOP) &&
                    (is_broadcast_op(gop) || guop[59:56] == 4'(PV_IDX));
    end
  end

  assign mimd_issue = issue && mode && bcast.valid;

  logic [PE_PER_PV-1:0] ready, pe_idle, lfull, lpush;
  logic [ACC_W-1:0]     ldata [PE_PER_PV];
  logic [DATA_W-1:0]    rdata [PE_PER_PV];

  for (genvar j = 0; j < PE_PER_PV; j++) begin : g_pe
    logic in_push, out_full_unused;
    logic [ACC_W-1:0] in_data;
    if (j == 0) begin : g_first
      assign in_push = 1'b0;
      assign in_data = '0;
    end else begin : g_rest
      assign in_push = lpush[j-1];
      assign in_data = ldata[j-1];
    end

    pe #(.PE_IDX(j), .PE_PER_PV(PE_PER_PV), .IN_DEPTH(IN_DEPTH), .W_DEPTH(W_DEPTH),
         .PSUM_DEPTH(PSUM_DEPTH), .FRAC(FRAC)) u_pe (
      .clk, .rst_n,
      .uop(bcast), .uop_issue(issue), .uop_ready(ready[j]), .idle(pe_idle[j]),
      .net_we(net_we && net_pe == $clog2(PE_PER_PV)'(j)), .net_buf, .net_addr, .net_wdata,
      .net_rdata(rdata[j]),
      .link_in_push(in_push), .link_in_data(in_data), .link_in_full(lfull[j]),
      .link_out_push(lpush[j]), .link_out_data(ldata[j]),
      .link_out_full(j + 1 < PE_PER_PV ? lfull[(j + 1) % PE_PER_PV] : 1'b1),
      .fire(pe_fire[j])
    );
  end

  assign uop_ready = &ready;
  assign idle      = &pe_idle;
  assign net_rdata = rdata[net_pe];

endmodule
