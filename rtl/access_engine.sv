// access_engine: access u-engine of a PE.
//
// Three strided index generators (input, weight, output), each pushing into its
// own address FIFO. The PE controller writes generator configuration registers
// (access.cfg) and starts or stops a generator (access.start / access.stop),
// selected by gen_sel. A generator stalls while its FIFO is full. The execute
// u-engine pops addresses through in_pop/w_pop/o_pop; the heads are presented
// with empty flags. Timing: an address generated in cycle t can be popped in
// cycle t+1. The three-generator/three-FIFO structure is the paper's; the FIFO
// depth (8) is taken from the PE's I/O FIFO size.
module access_engine
  import ganax_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic              start,
  input  logic              stop,
  input  logic [1:0]        gen_sel,
  input  cfg_reg_e          cfg_sel,
  input  logic [ADDR_W-1:0] cfg_data,
  input  logic [NGEN-1:0]   pop,
  output logic [ADDR_W-1:0] head [NGEN],
  output logic [NGEN-1:0]   empty,
  output logic [NGEN-1:0]   running    // generator still producing addresses
);

  for (genvar g = 0; g < NGEN; g++) begin : g_gen
    logic              sel, valid, full, gen_running, round_done;
    logic [ADDR_W-1:0] addr;
    logic [$clog2(FIFO_DEPTH+1)-1:0] cnt;

    assign sel = (gen_sel == 2'(g));

    strided_index_gen #(.AW(ADDR_W)) u_gen (
      .clk, .rst_n,
      .cfg_we    (cfg_we && sel),
      .cfg_sel,
      .cfg_data,
      .start     (start && sel),
      .stop      (stop && sel),
      .addr_ready(!full),
      .addr_valid(valid),
      .addr,
      .running   (gen_running),
      .round_done
    );

    sync_fifo #(.W(ADDR_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (valid && !full),
      .din  (addr),
      .pop  (pop[g]),
      .dout (head[g]),
      .full,
      .empty(empty[g]),
      .count(cnt)
    );

    assign running[g] = gen_running;
  end

endmodule
