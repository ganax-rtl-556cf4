// local_uop_buffer: per-PV table of execute u-ops.
//
// ENTRIES words of W bits (16 x 16 in the paper). It is loaded once, before a
// network starts, through the write port, and read combinationally at the
// 4-bit index that the PV's field of a MIMD-SIMD global u-op (mimd.exe)
// supplies. Size and role are the paper's; the write port is this design's.
module local_uop_buffer #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned W       = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [W-1:0]               wdata,
  input  logic [$clog2(ENTRIES)-1:0] idx,
  output logic [W-1:0]               uop
);

  logic [W-1:0] mem_q [ENTRIES];

  assign uop = mem_q[idx];

  // cleared at reset so that an unloaded entry decodes as a no-op
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem_q[i] <= '0;
    end else if (we) begin
      mem_q[waddr] <= wdata;
    end
  end

endmodule
