// global_controller: sequences layers of global u-ops.
//
// The host queues a layer as (base, len): len global u-ops starting at word
// base of the global instruction buffer. A loader copies them, one per cycle,
// into whichever bank of the double-buffered global u-op buffer is free; an
// issuer executes the other bank from entry 0 to len-1, presenting one global
// u-op per cycle and raising issue only when every PE reports ready (the array
// stalls as a whole). When a bank has been issued it is freed and the issuer
// moves to the other bank as soon as that one is loaded, so the next layer's
// u-ops load while the current layer runs. busy is high while anything is
// loaded, loading, executing or the PE array is not idle. overlap counts cycles
// in which loading and issuing happened together; stall is high while a u-op
// is ready to issue but the array is not.
// Double buffering is the paper's; the queue interface and the loader/issuer
// split are this design's. gb_wdata is ib_rdata and guop is gb_rdata, wired
// straight through: the controller only steers addresses and strobes, the u-op
// words pass from buffer to buffer and out to the PVs unchanged.
module global_controller
  import ganax_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned IDEPTH  = 3456
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // layer queue
  input  logic                       layer_valid,
  input  logic [$clog2(IDEPTH)-1:0]  layer_base,
  input  logic [$clog2(ENTRIES):0]   layer_len,
  output logic                       layer_ready,
  // instruction buffer read
  output logic [$clog2(IDEPTH)-1:0]  ib_raddr,
  input  logic [GUOP_W-1:0]          ib_rdata,
  // global u-op buffer
  output logic                       gb_we,
  output logic                       gb_wbank,
  output logic [$clog2(ENTRIES)-1:0] gb_waddr,
  output logic [GUOP_W-1:0]          gb_wdata,
  output logic                       gb_rbank,
  output logic [$clog2(ENTRIES)-1:0] gb_raddr,
  input  logic [GUOP_W-1:0]          gb_rdata,
  // PE array
  output logic [GUOP_W-1:0]          guop,
  output logic                       issue,
  input  logic                       array_ready,
  input  logic                       array_idle,
  // status
  output logic                       busy,
  output logic                       stall,        // a u-op waits for the PE array
  output logic [15:0]                layers_done,
  output logic [15:0]                overlap
);

  localparam int unsigned EW = $clog2(ENTRIES);
  localparam int unsigned LW = $clog2(ENTRIES) + 1;

  logic [1:0]  loaded_q;
  logic [LW-1:0] len_q [2];
  // loader
  logic        loading_q, fill_q;
  logic [$clog2(IDEPTH)-1:0] base_q;
  logic [LW-1:0] lcnt_q, llen_q;
  // issuer
  logic        exec_q;
  logic [EW-1:0] pc_q;

  assign layer_ready = !loading_q && !loaded_q[fill_q];
  assign ib_raddr    = base_q + $clog2(IDEPTH)'(lcnt_q);
  assign gb_we       = loading_q;
  assign gb_wbank    = fill_q;
  assign gb_waddr    = lcnt_q[EW-1:0];
  assign gb_wdata    = ib_rdata;

  assign gb_rbank = exec_q;
  assign gb_raddr = pc_q;
  assign guop     = gb_rdata;
  assign issue    = loaded_q[exec_q] && array_ready;
  assign stall    = loaded_q[exec_q] && !array_ready;
  assign busy     = loading_q || (|loaded_q) || !array_idle;

  logic load_last, issue_last;
  assign load_last  = loading_q && (lcnt_q + 1'b1 == llen_q);
  assign issue_last = issue && (LW'(pc_q) + 1'b1 == len_q[exec_q]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loaded_q    <= '0;
      len_q[0]    <= '0;
      len_q[1]    <= '0;
      loading_q   <= 1'b0;
      fill_q      <= 1'b0;
      base_q      <= '0;
      lcnt_q      <= '0;
      llen_q      <= '0;
      exec_q      <= 1'b0;
      pc_q        <= '0;
      layers_done <= '0;
      overlap     <= '0;
    end else begin
      // loader
      if (layer_valid && layer_ready && layer_len != 0) begin
        loading_q <= 1'b1;
        base_q    <= layer_base;
        llen_q    <= layer_len;
        lcnt_q    <= '0;
      end else if (loading_q) begin
        lcnt_q <= lcnt_q + 1'b1;
        if (load_last) begin
          loading_q        <= 1'b0;
          loaded_q[fill_q] <= 1'b1;
          len_q[fill_q]    <= llen_q;
          fill_q           <= !fill_q;
        end
      end
      // issuer
      if (issue) begin
        pc_q <= pc_q + 1'b1;
        if (issue_last) begin
          loaded_q[exec_q] <= 1'b0;
          exec_q           <= !exec_q;
          pc_q             <= '0;
          layers_done      <= layers_done + 1'b1;
        end
      end
      if (loading_q && issue) overlap <= overlap + 1'b1;
    end
  end

  // the loader never overwrites a bank that still holds u-ops to issue
  assert property (@(posedge clk) disable iff (!rst_n) gb_we |-> !loaded_q[gb_wbank])
    else $error("global_controller: load into a bank that is still in use");

endmodule
