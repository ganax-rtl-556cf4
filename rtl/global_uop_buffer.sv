// global_uop_buffer: double-buffered global u-op store.
//
// Two banks of ENTRIES global u-ops (32 in the paper), each GUOP_W bits: a
// 64-bit payload (4 index bits per PV in MIMD-SIMD mode) plus the mode bit.
// While the global controller executes one bank, it loads the next layer's
// u-ops into the other through the write port. Read is combinational; write is
// synchronous. Sizes and double buffering are the paper's.
module global_uop_buffer
  import ganax_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned W       = GUOP_W
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic                       wbank,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [W-1:0]               wdata,
  input  logic                       rbank,
  input  logic [$clog2(ENTRIES)-1:0] raddr,
  output logic [W-1:0]               rdata
);

  logic [W-1:0] mem [2][ENTRIES];

  assign rdata = mem[rbank][raddr];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][waddr] <= wdata;
  end

endmodule
