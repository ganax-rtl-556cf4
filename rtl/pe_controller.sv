// pe_controller: decodes the u-op that the PV broadcasts to a PE.
//
//   access.cfg   -> write configuration register dst of generator gen (imm)
//   access.start -> start generator gen;  access.stop -> stop generator gen
//   mimd.ld      -> load imm into the repeat register, the partial-sum link mask
//                   or lookup-table entry sub, as selected by dst
//   repeat       -> the next execute u-op enters the u-op FIFO with the repeat
//                   register as its count
//   add/mul/mac/pool/act -> pushed into the execute u-engine's u-op FIFO with
//                   count 1 (or the repeat count)
// uop.valid says the u-op presented is addressed to this PE; it takes effect in
// the cycle issue is high. uop_ready is low while the presented u-op cannot be
// taken: an execute u-op facing a full u-op FIFO, or an access.cfg/access.start
// aimed at a generator that is still producing addresses (so that a new pattern
// never overwrites one whose addresses are still being generated; access.stop
// is never held). The global controller issues only while every PE is ready;
// uop_ready does not depend on issue, so there is no combinational loop. Repeat-register semantics
// follow the paper; the link mask (bit j: PE j adds the partial sum of PE j-1)
// is this design's way of configuring the horizontal accumulation. The u-op
// fields (generator, register select, immediate, opcode, LUT index) are wired
// straight from the u-op to the engines; only the strobes are decoded here.
module pe_controller
  import ganax_pkg::*;
#(
  parameter int unsigned PE_IDX      = 0,
  parameter int unsigned PE_PER_PV   = 16,
  parameter int unsigned LUT_ENTRIES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_uop_t           uop,
  input  logic              issue,
  input  logic              uop_fifo_full,
  input  logic [NGEN-1:0]   gen_running,
  output logic              uop_ready,
  // access u-engine control
  output logic              acc_cfg_we,
  output logic              acc_start,
  output logic              acc_stop,
  output logic [1:0]        acc_gen,
  output cfg_reg_e          acc_cfg_sel,
  output logic [ADDR_W-1:0] acc_cfg_data,
  // execute u-engine
  output logic              exe_push,
  output exe_uop_t          exe_uop,
  output logic              recv_en,
  output logic              send_en,
  output logic              lut_we,
  output logic [$clog2(LUT_ENTRIES)-1:0] lut_idx,
  output logic [DATA_W-1:0] lut_data
);

  logic [REP_W-1:0] rep_q;
  logic             rep_pending_q;
  logic [IMM_W-1:0] link_mask_q;

  logic take;
  assign take = uop.valid && issue;

  assign uop_ready = !(uop.valid &&
                       ((is_exec_op(uop.op) && uop_fifo_full) ||
                        ((uop.op == OP_ACFG || uop.op == OP_ASTART) && gen_running[uop.gen])));
  assign acc_cfg_we   = take && uop.op == OP_ACFG;
  assign acc_start    = take && uop.op == OP_ASTART;
  assign acc_stop     = take && uop.op == OP_ASTOP;
  assign acc_gen      = uop.gen;
  assign acc_cfg_sel  = cfg_reg_e'(uop.dst);
  assign acc_cfg_data = uop.imm;

  assign exe_push     = take && is_exec_op(uop.op);
  assign exe_uop.op   = uop.op;
  assign exe_uop.count = rep_pending_q ? rep_q : REP_W'(1);

  assign lut_we   = take && uop.op == OP_MLD && uop.dst == MLD_LUT;
  assign lut_idx  = uop.sub[$clog2(LUT_ENTRIES)-1:0];
  assign lut_data = uop.imm;

  assign recv_en = link_mask_q[PE_IDX];
  assign send_en = (PE_IDX + 1 < PE_PER_PV) ? link_mask_q[(PE_IDX + 1) % PE_PER_PV] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_q         <= REP_W'(1);
      rep_pending_q <= 1'b0;
      link_mask_q   <= '0;
    end else if (take) begin
      if (uop.op == OP_MLD && uop.dst == MLD_REPEAT) rep_q <= uop.imm;
      if (uop.op == OP_MLD && uop.dst == MLD_LINK)   link_mask_q <= uop.imm;
      if (uop.op == OP_REPEAT)                       rep_pending_q <= 1'b1;
      else if (is_exec_op(uop.op))                   rep_pending_q <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) exe_push |-> !uop_fifo_full)
    else $error("pe_controller: execute u-op issued into a full u-op FIFO");

endmodule
