// global_data_buffer: shared on-chip data memory (108 KB as in the paper, held
// as DEPTH 16-bit words).
//
// Two ports: the host port (towards off-chip memory) and the network port
// that moves words between this buffer and the PEs. Each port writes
// synchronously and reads combinationally. If both write the same word in one
// cycle the network port wins. Size is the paper's; ports are this design's.
module global_data_buffer
  import ganax_pkg::*;
#(
  parameter int unsigned DEPTH = 55296,
  parameter int unsigned W     = DATA_W
) (
  input  logic                     clk,
  input  logic                     h_we,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  logic [W-1:0]             h_wdata,
  output logic [W-1:0]             h_rdata,
  input  logic                     n_we,
  input  logic [$clog2(DEPTH)-1:0] n_addr,
  input  logic [W-1:0]             n_wdata,
  output logic [W-1:0]             n_rdata
);

  logic [W-1:0] mem [DEPTH];

  assign h_rdata = mem[h_addr];
  assign n_rdata = mem[n_addr];

  always_ff @(posedge clk) begin
    if (n_we)
      mem[n_addr] <= n_wdata;
    if (h_we && !(n_we && n_addr == h_addr))
      mem[h_addr] <= h_wdata;
  end

endmodule
