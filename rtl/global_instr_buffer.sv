// global_instr_buffer: on-chip store of the u-op program of all layers.
//
// DEPTH words of W bits, written by the host (from off-chip memory) and read
// combinationally by the global controller, which copies a layer's slice into
// the idle bank of the global u-op buffer. The paper gives only its name and
// size (27 KB); 27 KB / 8 bytes = 3456 words, each holding one global u-op of
// 64 payload bits plus the mode bit.
module global_instr_buffer
  import ganax_pkg::*;
#(
  parameter int unsigned DEPTH = 3456,
  parameter int unsigned W     = GUOP_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  assign rdata = mem[raddr];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

endmodule
