// ganax_prog.svh: testbench helpers that build the global u-op program for a
// 2-D transposed convolution (4x4 input, 5x5 filter, one zero inserted between
// rows and columns, padding 2, 7x7 output) and compute its reference result.
//
// Mapping: output row r is computed by one PV. Its PEs form a partial-sum chain,
// PE j holding filter row kr = 2j (r even: 3 PEs) or 2j+1 (r odd: 2 PEs) and
// input row (r+kr-2)/2 (zeros if outside the input). Each PE walks the output
// columns x = 0..6 of its row: x even uses taps 0,2,4 on input columns
// x/2-1..x/2+1, x odd taps 1,3 on (x-1)/2..(x+1)/2. The weight generator
// (Step 2, End 5) produces 0,2,4,1,3,0,... by itself; the input generator is
// re-pointed with Addr/Offset per window; the output generator counts 0..6.
// The input row sits at input-buffer words 0..3 with a zero at word 4 (right
// padding); the left padding is address -1, which reads as zero.
// Per window: mul, [repeat, mac x2 | mac], add. Local u-op buffer layout used
// with mimd.exe: 0 nop, 1 mul, 2 mac, 3 add, 4 repeat, 5 act, 6 pool.
// Requires ganax_pkg imported in the including scope.
`ifndef GANAX_PROG_SVH
`define GANAX_PROG_SVH

localparam int TC_IN = 4, TC_K = 5, TC_OUT = 7;
localparam int LU_NOP = 0, LU_MUL = 1, LU_MAC = 2, LU_ADD = 3, LU_REP = 4, LU_ACT = 5, LU_POOL = 6;

function automatic logic [15:0] tc_local_uop(int i);
  case (i)
    LU_MUL:  return local_uop(OP_MUL, 2'd0);
    LU_MAC:  return local_uop(OP_MAC, 2'd0);
    LU_ADD:  return local_uop(OP_ADD, 2'd0);
    LU_REP:  return local_uop(OP_REPEAT, 2'd0);
    LU_ACT:  return local_uop(OP_ACT, 2'd0);
    LU_POOL: return local_uop(OP_POOL, 2'd0);
    default: return 16'd0;
  endcase
endfunction

// filter row held by PE j of the PV computing output row r (-1: not in chain)
function automatic int tc_krow(int r, int j);
  if (r % 2 == 0) return (j < 3) ? 2 * j : -1;
  return (j < 2) ? 2 * j + 1 : -1;
endfunction

function automatic int tc_chain(int r);
  return (r % 2 == 0) ? 3 : 2;
endfunction

// input row for PE j of output row r (-1: zero row)
function automatic int tc_irow(int r, int j);
  int kr = tc_krow(r, j);
  int t;
  if (kr < 0) return -1;
  t = r + kr - 2;
  if (t < 0 || t / 2 >= TC_IN) return -1;
  return t / 2;
endfunction

// reference: sum over consequential taps, exactly as the hardware forms it
function automatic longint tc_ref_sum(int r, int x, logic signed [15:0] in [TC_IN][TC_IN],
                                      logic signed [15:0] w [TC_K][TC_K]);
  longint s = 0;
  for (int kr = 0; kr < TC_K; kr++)
    for (int kc = 0; kc < TC_K; kc++) begin
      int i = r + kr - 2, j = x + kc - 2;
      if (i >= 0 && j >= 0 && i % 2 == 0 && j % 2 == 0 && i / 2 < TC_IN && j / 2 < TC_IN)
        s += longint'(w[kr][kc]) * longint'(in[i / 2][j / 2]);
    end
  return s;
endfunction

function automatic logic [15:0] tc_sat(longint v);
  longint s = v >>> 8;
  if (s > 32767) return 16'h7fff;
  if (s < -32768) return 16'h8000;
  return 16'(s);
endfunction

// per-PV set-up: link mask, repeat register, weight/output/input generators
function automatic void tc_setup(int pv, int r, ref logic [GUOP_W-1:0] q[$]);
  logic [15:0] mask = (r % 2 == 0) ? 16'b110 : 16'b10;
  q.push_back(simd_guop(OP_MLD, 4'(pv), 0, MLD_LINK, 0, mask));
  q.push_back(simd_guop(OP_MLD, 4'(pv), 0, MLD_REPEAT, 0, 16'd2));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_W, CFG_ADDR, 0, 0));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_W, CFG_OFFSET, 0, 0));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_W, CFG_STEP, 0, 2));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_W, CFG_END, 0, TC_K));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_W, CFG_REPEAT, 0, TC_OUT));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_OUT, CFG_ADDR, 0, 0));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_OUT, CFG_OFFSET, 0, 0));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_OUT, CFG_STEP, 0, 1));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_OUT, CFG_END, 0, TC_OUT));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_OUT, CFG_REPEAT, 0, 1));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_IN, CFG_STEP, 0, 1));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_IN, CFG_END, 0, 3));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_IN, CFG_REPEAT, 0, 1));
  q.push_back(simd_guop(OP_ASTART, 4'(pv), GEN_W, 0, 0, 0));
  q.push_back(simd_guop(OP_ASTART, 4'(pv), GEN_OUT, 0, 0, 0));
endfunction

// per-PV input generator for window x
function automatic void tc_window_access(int pv, int x, ref logic [GUOP_W-1:0] q[$]);
  int a0  = (x % 2 == 0) ? 0 : 1;
  int off = (x % 2 == 0) ? x / 2 - 1 : (x - 1) / 2 - 1;
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_IN, CFG_ADDR, 0, 16'(a0)));
  q.push_back(simd_guop(OP_ACFG, 4'(pv), GEN_IN, CFG_OFFSET, 0, 16'(off)));
  q.push_back(simd_guop(OP_ASTART, 4'(pv), GEN_IN, 0, 0, 0));
endfunction

// compute u-ops of window x, either SIMD (every PV) or mimd.exe with the local
// index given to the PVs whose bit is set in pv_mask (others get nop)
function automatic void tc_window_compute(int x, bit mimd, logic [15:0] pv_mask,
                                          ref logic [GUOP_W-1:0] q[$]);
  int seq [$];
  if (x % 2 == 0) seq = {LU_MUL, LU_REP, LU_MAC, LU_ADD};
  else            seq = {LU_MUL, LU_MAC, LU_ADD};
  foreach (seq[i]) begin
    if (mimd) begin
      logic [GUOP_W-1:0] g = '0;
      g[GUOP_W-1] = 1'b1;
      for (int p = 0; p < 16; p++) if (pv_mask[p]) g[4*p +: 4] = 4'(seq[i]);
      q.push_back(g);
    end else begin
      q.push_back(simd_guop(opcode_e'(tc_local_uop(seq[i])[15:12]), 0, 0, 0, 0, 0));
    end
  end
endfunction

`endif
