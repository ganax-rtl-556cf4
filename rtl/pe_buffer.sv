// pe_buffer: one of a PE's local data buffers (input register file, weight SRAM
// or partial-sum/output register file).
//
// DEPTH words of W bits with one synchronous write port and two combinational
// read ports: port A for the execute u-engine, port B for the network that
// fills and drains the PE. An address at or beyond DEPTH reads as zero and is
// never written, which gives the zero padding of a convolution for free. The
// sizes (12, 224 and 24 words of 16 bits) are the paper's; the register-file
// style read, the second port and the out-of-range rule are this design's.
module pe_buffer #(
  parameter int unsigned DEPTH = 12,
  parameter int unsigned W     = 16,
  parameter int unsigned AW    = 16
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr_a,
  output logic [W-1:0]  rdata_a,
  input  logic [AW-1:0] raddr_b,
  output logic [W-1:0]  rdata_b
);

  logic [W-1:0] mem [DEPTH];

  assign rdata_a = (raddr_a < AW'(DEPTH)) ? mem[raddr_a[$clog2(DEPTH)-1:0]] : '0;
  assign rdata_b = (raddr_b < AW'(DEPTH)) ? mem[raddr_b[$clog2(DEPTH)-1:0]] : '0;

  always_ff @(posedge clk) begin
    if (we && (waddr < AW'(DEPTH))) mem[waddr[$clog2(DEPTH)-1:0]] <= wdata;
  end

endmodule
