// execute_engine: execute u-engine of a PE.
//
// Execute u-ops carry no operand fields; operands come from the address FIFOs
// filled by the access u-engine. The u-op at the head of the u-op FIFO fires in
// a cycle when every address it needs is present (and, for add, the partial-sum
// links allow it); then it pops those addresses, reads the buffers
// combinationally and updates the accumulator or writes the output buffer at the
// clock edge. One u-op executes per cycle; a u-op tagged by repeat with count N
// stays at the head for N firings; a count of zero is dropped unexecuted. An
// empty u-op FIFO halts the engine and no buffer is read or written.
//
//   mul  acc = IN[i] * W[w]                          pops i, w
//   mac  acc = acc + IN[i] * W[w]                    pops i, w
//   pool acc = max(acc, IN[i] << FRAC)               pops i
//   add  r = acc + (recv_en ? left partial sum : 0)  pops o (and the left link)
//        OUT[o] = sat16(r >>> FRAC); r pushed to the right link if send_en; acc = 0
//   act  OUT[o] = LUT(IN[i])                         pops i, o
//
// Operands are signed fixed point with FRAC fraction bits; the accumulator and
// the links are ACC_W bits (the paper's 16-bit fixed-point MAC and 32-bit I/O
// FIFOs). The u-op FIFO, the Acc Reg., the ALU and the non-linear unit are the
// paper's blocks; the operand routing of each u-op above, FRAC and the
// saturation are this design's. The buffer addresses are the heads of the
// address FIFOs, wired straight through; the engine only decides when to pop.
module execute_engine
  import ganax_pkg::*;
#(
  parameter int unsigned FRAC           = 8,
  parameter int unsigned UOP_FIFO_DEPTH = 4,
  parameter int unsigned LUT_ENTRIES    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // u-op FIFO input
  input  logic              uop_push,
  input  exe_uop_t          uop_in,
  output logic              uop_full,
  output logic              idle,
  // address FIFO heads from the access u-engine
  input  logic [ADDR_W-1:0] addr_head [NGEN],
  input  logic [NGEN-1:0]   addr_empty,
  output logic [NGEN-1:0]   addr_pop,
  // buffer ports
  output logic [ADDR_W-1:0] in_raddr,
  input  logic [DATA_W-1:0] in_rdata,
  output logic [ADDR_W-1:0] w_raddr,
  input  logic [DATA_W-1:0] w_rdata,
  output logic              out_we,
  output logic [ADDR_W-1:0] out_waddr,
  output logic [DATA_W-1:0] out_wdata,
  input  logic              out_busy,     // output buffer port taken by the network
  // horizontal partial-sum links
  input  logic              recv_en,
  input  logic              send_en,
  input  logic [ACC_W-1:0]  link_in,
  input  logic              link_in_valid,
  output logic              link_in_pop,
  output logic              link_out_push,
  output logic [ACC_W-1:0]  link_out,
  input  logic              link_out_full,
  // lookup-table load
  input  logic              lut_we,
  input  logic [$clog2(LUT_ENTRIES)-1:0] lut_idx,
  input  logic [DATA_W-1:0] lut_data,
  // activity (for utilisation counting)
  output logic              fire,
  output opcode_e           fire_op
);

  exe_uop_t         head;
  logic             fifo_empty, fifo_pop;
  logic [$clog2(UOP_FIFO_DEPTH+1)-1:0] fifo_cnt;
  logic [REP_W-1:0] done_q;
  logic signed [ACC_W-1:0] acc_q;

  sync_fifo #(.W(EXE_UOP_W), .DEPTH(UOP_FIFO_DEPTH)) u_uop_fifo (
    .clk, .rst_n,
    .push (uop_push),
    .din  (uop_in),
    .pop  (fifo_pop),
    .dout (head),
    .full (uop_full),
    .empty(fifo_empty),
    .count(fifo_cnt)
  );

  // operand needs of the head u-op
  logic need_i, need_w, need_o, ok, skip, last;
  always_comb begin
    need_i = head.op inside {OP_MUL, OP_MAC, OP_POOL, OP_ACT};
    need_w = head.op inside {OP_MUL, OP_MAC};
    need_o = head.op inside {OP_ADD, OP_ACT};
    ok = (!need_i || !addr_empty[GEN_IN]) && (!need_w || !addr_empty[GEN_W]) &&
         (!need_o || (!addr_empty[GEN_OUT] && !out_busy));
    if (head.op == OP_ADD)
      ok = ok && (!recv_en || link_in_valid) && (!send_en || !link_out_full);
    skip = !fifo_empty && ((head.count == '0) || !is_exec_op(head.op));
    fire = !fifo_empty && !skip && ok;
    last = (done_q + 1'b1 == head.count);
    fifo_pop = skip || (fire && last);
  end

  assign fire_op  = head.op;
  assign idle     = fifo_empty;
  assign addr_pop = {fire && need_o, fire && need_w, fire && need_i};
  assign in_raddr = addr_head[GEN_IN];
  assign w_raddr  = addr_head[GEN_W];

  // datapath
  logic signed [DATA_W-1:0] in_s, w_s;
  logic signed [ACC_W-1:0]  prod, in_ext, sum_r, shifted;
  logic [DATA_W-1:0]        nl_y, sat_r;

  assign in_s    = in_rdata;
  assign w_s     = w_rdata;
  assign prod    = ACC_W'(in_s) * ACC_W'(w_s);
  assign in_ext  = ACC_W'(in_s) <<< FRAC;
  assign sum_r   = acc_q + ((recv_en && head.op == OP_ADD) ? signed'(link_in) : '0);
  assign shifted = sum_r >>> FRAC;

  always_comb begin
    if (shifted > ACC_W'(signed'({1'b0, {(DATA_W-1){1'b1}}})))
      sat_r = {1'b0, {(DATA_W-1){1'b1}}};
    else if (shifted < ACC_W'(signed'({1'b1, {(DATA_W-1){1'b0}}})))
      sat_r = {1'b1, {(DATA_W-1){1'b0}}};
    else
      sat_r = shifted[DATA_W-1:0];
  end

  nonlinear_unit #(.W(DATA_W), .ENTRIES(LUT_ENTRIES)) u_nlu (
    .clk, .rst_n, .lut_we, .lut_idx, .lut_data, .x(in_rdata), .y(nl_y)
  );

  assign out_we        = fire && need_o;
  assign out_waddr     = addr_head[GEN_OUT];
  assign out_wdata     = (head.op == OP_ACT) ? nl_y : sat_r;
  assign link_in_pop   = fire && head.op == OP_ADD && recv_en;
  assign link_out_push = fire && head.op == OP_ADD && send_en;
  assign link_out      = sum_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      done_q <= '0;
    end else begin
      if (fifo_pop)  done_q <= '0;
      else if (fire) done_q <= done_q + 1'b1;
      if (fire) begin
        unique case (head.op)
          OP_MUL:  acc_q <= prod;
          OP_MAC:  acc_q <= acc_q + prod;
          OP_POOL: acc_q <= (in_ext > acc_q) ? in_ext : acc_q;
          OP_ADD:  acc_q <= '0;
          default: ;
        endcase
      end
    end
  end

endmodule
