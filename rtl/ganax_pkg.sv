// ganax_pkg: shared constants and types of the GANAX MIMD-SIMD accelerator.
//
// The u-op set follows the paper's ISA (access.cfg/start/stop, add, mul, mac,
// pool, act, repeat, mimd.ld, mimd.exe). The binary encodings, field positions
// and the partial-sum link configuration are this design's own choices; the
// paper fixes only the sizes used here: 16-bit immediates, 16-entry local u-op
// buffers of 16-bit u-ops, 32-entry global u-op buffer with 4 index bits per PV
// plus one mode bit, three strided index generators per PE, 16x16 PEs.
//
// Global u-op word (GUOP_W = 65 bits):
//   [64]    mode: 0 = SIMD (payload is one u-op for every PE), 1 = MIMD-SIMD
//   [63:0]  payload
// MIMD-SIMD payload: PV i uses bits [4*i+3 : 4*i] as index into its local buffer.
// SIMD payload:
//   [63:60] opcode   [59:56] pv_idx   [55:54] addrgen_idx   [53:51] dst
//   [50:47] sub-index (LUT entry for mimd.ld)   [15:0] imm
// Local u-op (16 bits): [15:12] opcode  [11:10] addrgen_idx  [9:0] zero.
package ganax_pkg;

  localparam int unsigned DATA_W   = 16;   // fixed-point operand width
  localparam int unsigned ACC_W    = 32;   // accumulator / partial-sum link width
  localparam int unsigned IMM_W    = 16;   // immediate width of access.cfg / mimd.ld
  localparam int unsigned ADDR_W   = 16;   // generated address width
  localparam int unsigned NGEN     = 3;    // strided index generators per PE
  localparam int unsigned LUOP_W   = 16;   // local u-op width
  localparam int unsigned LIDX_W   = 4;    // local u-op index bits per PV
  localparam int unsigned PAYLOAD_W = 64;  // global u-op payload
  localparam int unsigned GUOP_W   = PAYLOAD_W + 1;
  localparam int unsigned REP_W    = 16;   // repeat count width

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_ADD    = 4'd1,   // OUT[o] = acc + left psum; forward right; acc = 0
    OP_MUL    = 4'd2,   // acc = IN[i] * W[w]
    OP_MAC    = 4'd3,   // acc += IN[i] * W[w]
    OP_POOL   = 4'd4,   // acc = max(acc, IN[i])
    OP_ACT    = 4'd5,   // OUT[o] = LUT(IN[i])
    OP_REPEAT = 4'd6,   // next execute u-op runs rep_reg times
    OP_ACFG   = 4'd7,   // access.cfg
    OP_ASTART = 4'd8,   // access.start
    OP_ASTOP  = 4'd9,   // access.stop
    OP_MLD    = 4'd10   // mimd.ld
  } opcode_e;

  // access.cfg destination registers of a strided index generator
  typedef enum logic [2:0] {
    CFG_ADDR   = 3'd0,
    CFG_OFFSET = 3'd1,
    CFG_STEP   = 3'd2,
    CFG_END    = 3'd3,
    CFG_REPEAT = 3'd4
  } cfg_reg_e;

  // mimd.ld destination registers in each PE
  typedef enum logic [2:0] {
    MLD_REPEAT = 3'd0,  // repeat register
    MLD_LINK   = 3'd1,  // partial-sum link mask, bit j = PE j adds its left neighbour
    MLD_LUT    = 3'd2   // non-linear lookup table entry (sub-index selects it)
  } mld_dst_e;

  // generator index
  localparam logic [1:0] GEN_IN  = 2'd0;
  localparam logic [1:0] GEN_W   = 2'd1;
  localparam logic [1:0] GEN_OUT = 2'd2;

  // u-op as broadcast by a PV to its PEs
  typedef struct packed {
    logic             valid;
    opcode_e          op;
    logic [1:0]       gen;
    logic [2:0]       dst;
    logic [3:0]       sub;
    logic [IMM_W-1:0] imm;
  } pe_uop_t;

  // execute u-op as held in a PE's u-op FIFO
  typedef struct packed {
    opcode_e          op;
    logic [REP_W-1:0] count;
  } exe_uop_t;

  localparam int unsigned EXE_UOP_W = $bits(exe_uop_t);

  // network transfer between the global data buffer and one PE buffer
  typedef struct packed {
    logic        to_gdb;    // 1: PE buffer -> global data buffer, 0: the reverse
    logic        mcast;     // write the same PE column in every PV
    logic [3:0]  pv;
    logic [3:0]  pe;
    logic [1:0]  buf_sel;   // 0 input, 1 weight, 2 output buffer
    logic [15:0] gdb_addr;
    logic [15:0] pe_addr;
    logic [15:0] len;
  } noc_cmd_t;

  function automatic logic is_exec_op(opcode_e op);
    return op inside {OP_ADD, OP_MUL, OP_MAC, OP_POOL, OP_ACT};
  endfunction

  // opcodes that go to every PV in SIMD mode (the others name a pv_idx)
  function automatic logic is_broadcast_op(opcode_e op);
    return op inside {OP_ADD, OP_MUL, OP_MAC, OP_POOL, OP_ACT, OP_REPEAT};
  endfunction

  // build a SIMD-mode global u-op
  function automatic logic [GUOP_W-1:0] simd_guop(opcode_e op, logic [3:0] pv, logic [1:0] gen,
                                                  logic [2:0] dst, logic [3:0] sub,
                                                  logic [IMM_W-1:0] imm);
    logic [GUOP_W-1:0] g;
    g = '0;
    g[63:60] = op;
    g[59:56] = pv;
    g[55:54] = gen;
    g[53:51] = dst;
    g[50:47] = sub;
    g[15:0]  = imm;
    return g;
  endfunction

  function automatic logic [LUOP_W-1:0] local_uop(opcode_e op, logic [1:0] gen);
    return {op, gen, 10'd0};
  endfunction

endpackage
