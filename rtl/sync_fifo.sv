// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the three address FIFOs that decouple the access u-engine from the
// execute u-engine, for the execute u-engine's u-op FIFO and for the partial-sum
// I/O FIFOs between neighbouring PEs. dout shows the oldest word whenever empty
// is low; pop removes it at the clock edge, push stores din. A push and a pop in
// the same cycle are allowed when the FIFO is neither empty nor full (and a push
// into a full FIFO is allowed if it is popped in the same cycle). The paper gives
// the role of these FIFOs and the 8-entry depth of the I/O FIFOs; the circular
// buffer itself is this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic do_push, do_pop;

  assign empty   = (cnt_q == 0);
  assign full    = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count   = cnt_q;
  assign dout    = mem[rd_q];
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= incr(wr_q);
      if (do_pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + $bits(cnt_q)'(do_push) - $bits(cnt_q)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_q] <= din;
  end

  // handshake rules: no pop from an empty FIFO, no push into a full one
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop while empty");
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo: push while full");

endmodule
