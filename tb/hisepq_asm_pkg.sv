// hisepq_asm_pkg: instruction encoders for the testbenches.
//
// One function per instruction returns its machine word(s) in the encoding
// of hisepq_pkg. Long instructions (SMSOL, SITOL) return 128 bits; they are
// stored in program memory as four words, bits 127:96 first.
package hisepq_asm_pkg;
  import hisepq_pkg::*;

  function automatic logic [31:0] op_w(opcode_e o); return {1'b0, o, 25'd0}; endfunction

  function automatic logic [31:0] a_nop();  return op_w(OPC_NOP); endfunction
  function automatic logic [31:0] a_end();  return op_w(OPC_END); endfunction
  function automatic logic [31:0] a_sra();  return op_w(OPC_SRA); endfunction
  function automatic logic [31:0] a_fhr(int rt); return op_w(OPC_FHR) | (32'(rt) << 15); endfunction
  function automatic logic [31:0] a_ldi(int rd, int imm);
    return op_w(OPC_LDI) | (32'(rd) << 20) | (32'(imm) & 32'hFFFFF);
  endfunction
  function automatic logic [31:0] a_ldui(int rd, int imm12);
    return op_w(OPC_LDUI) | (32'(rd) << 20) | (32'(imm12) & 32'hFFF);
  endfunction
  function automatic logic [31:0] a_alu(opcode_e o, int rd, int rs, int rt);
    return op_w(o) | (32'(rd) << 20) | (32'(rs) << 15) | (32'(rt) << 10);
  endfunction
  function automatic logic [31:0] a_cmp(int rs, int rt);
    return op_w(OPC_CMP) | (32'(rs) << 15) | (32'(rt) << 10);
  endfunction
  function automatic logic [31:0] a_br(flag_e f, int off);
    return op_w(OPC_BR) | (32'(f) << 21) | (32'(off) & 32'h1FFFFF);
  endfunction
  function automatic logic [31:0] a_fbr(flag_e f, int rd);
    return op_w(OPC_FBR) | (32'(rd) << 20) | (32'(f) << 16);
  endfunction
  function automatic logic [31:0] a_j(int off); return op_w(OPC_J) | (32'(off) & 32'h1FFFFFF); endfunction
  function automatic logic [31:0] a_lw(int rd, int rt, int imm);
    return op_w(OPC_LW) | (32'(rd) << 20) | (32'(rt) << 15) | (32'(imm) & 32'h7FFF);
  endfunction
  function automatic logic [31:0] a_sw(int rs, int rt, int imm);
    return op_w(OPC_SW) | (32'(rs) << 20) | (32'(rt) << 15) | (32'(imm) & 32'h7FFF);
  endfunction
  function automatic logic [31:0] a_fmr(int rd, int q);
    return op_w(OPC_FMR) | (32'(rd) << 20) | (32'(q) & 32'h7FF);
  endfunction
  function automatic logic [31:0] a_qwait(int imm); return op_w(OPC_QWAIT) | (32'(imm) & 32'hFFFFF); endfunction
  function automatic logic [31:0] a_qwaitr(int rs); return op_w(OPC_QWAITR) | (32'(rs) << 15); endfunction
  function automatic logic [31:0] a_smso(int sd, int ofs, logic [7:0] mask);
    return op_w(OPC_SMSO) | (32'(sd) << 20) | (32'(ofs) << 8) | 32'(mask);
  endfunction
  function automatic logic [31:0] a_sito(int td, int ofs, int src, int tgt);
    return op_w(OPC_SITO) | (32'(td) << 20) | (32'(ofs) << 14) | (32'(src) << 7) | 32'(tgt);
  endfunction
  function automatic logic [31:0] a_qset(qkind_e k, int r, int b, bit v);
    return op_w(OPC_QSET) | (32'(k) << 23) | (32'(r) << 18) | (32'(b) << 11) | (32'(v) << 10);
  endfunction
  function automatic logic [127:0] a_smsol(int sd, int ofs, logic [99:0] mask);
    logic [127:0] b;
    b = '0;
    b[126:121] = OPC_SMSOL; b[120:116] = 5'(sd); b[103:100] = 4'(ofs); b[99:0] = mask;
    return b;
  endfunction
  function automatic logic [127:0] a_sitol(int td, int ofs, logic [6:0] valid, logic [97:0] index);
    logic [127:0] b;
    b = '0;
    b[126:121] = OPC_SITOL; b[120:116] = 5'(td); b[108:105] = 4'(ofs);
    b[104:98] = valid; b[97:0] = index;
    return b;
  endfunction
  // Q.Bundle: two lanes (op, kind, reg) and pre-interval PI
  function automatic logic [31:0] a_bundle(int op0, qkind_e k0, int r0, int op1, qkind_e k1, int r1, int pi);
    return {1'b1, 7'(op0), k0, 5'(r0), 7'(op1), k1, 5'(r1), 3'(pi)};
  endfunction

  // ------------------------------------------------------------ programs
  typedef logic [31:0] prog_t [$];

  function automatic void emit(ref prog_t p, input logic [31:0] w); p.push_back(w); endfunction
  function automatic void emit_l(ref prog_t p, input logic [127:0] b);
    for (int k = 0; k < 4; k++) p.push_back(b[127 - 32*k -: 32]);
  endfunction

  // Gate operations used by the test programs (default LUT: micro = op).
  localparam int G_H = 1, G_X = 2, G_Y = 3, G_CZ = 4, G_B = 5, G_MEAS = 127;
  localparam int BURST = 14, BURST_PI = 7, SHOT_WAIT = 60, RES_ADDR = 64, FB_ADDR = 32;

  // Shot program for nq (16..100) qubits:
  //   setup: S0 = qubits 1..7 (SMSO 0xFF, then QSet clears bit 0),
  //          S1 = qubits 8..15 (SMSO, offset 1), L0 = all nq qubits (SMSOL),
  //          T0 = pair (0,1) (SITO), TL0 = pairs (2,3), (4,5) (SITOL, 2 of 7 valid)
  //   burst: BURST bundles of G_B on qubit 0, PI = 7 (fills its timed FIFO)
  //   loop (shots times):
  //     QWAIT 60; H on L0 (PI 1); X on S0 | Y on S1 (PI 2);
  //     CZ on T0 | CZ on TL0 (PI 2); QWAIT 5; MEAS on L0 (PI 0);
  //     FMR r5, Q0 (waits for qubit 0 only); SRA (waits for all);
  //     if r5 == 1 then r6++ (measurement feedback)
  //   FHR to RES_ADDR; SW r6 to FB_ADDR; END
  function automatic prog_t prog_shots(int nq, int shots);
    prog_t p;
    int loop_pc, br_pc;
    logic [99:0] all_q;
    all_q = '0;
    for (int q = 0; q < nq; q++) all_q[q] = 1'b1;
    emit(p, a_ldi(1, 0));
    emit(p, a_ldi(2, shots));
    emit(p, a_ldi(3, 1));
    emit(p, a_ldi(6, 0));
    emit(p, a_smso(0, 0, 8'hFF));
    emit(p, a_qset(QK_SMASK, 0, 0, 1'b0));
    emit(p, a_smso(1, 1, 8'hFF));
    emit_l(p, a_smsol(0, 0, all_q));
    emit(p, a_sito(0, 0, 0, 1));
    emit_l(p, a_sitol(0, 0, 7'b0000011, {70'd0, 7'd4, 7'd5, 7'd2, 7'd3}));
    emit(p, a_smso(3, 0, 8'h01));
    for (int b = 0; b < BURST; b++) emit(p, a_bundle(G_B, QK_SMASK, 3, 0, QK_SMASK, 0, BURST_PI));
    loop_pc = p.size();
    emit(p, a_qwait(SHOT_WAIT));
    emit(p, a_bundle(G_H, QK_LMASK, 0, 0, QK_SMASK, 0, 1));
    emit(p, a_bundle(G_X, QK_SMASK, 0, G_Y, QK_SMASK, 1, 2));
    emit(p, a_bundle(G_CZ, QK_SPAIR, 0, G_CZ, QK_LPAIR, 0, 2));
    emit(p, a_qwait(5));
    emit(p, a_bundle(G_MEAS, QK_LMASK, 0, 0, QK_SMASK, 0, 0));
    emit(p, a_fmr(5, 0));
    emit(p, a_sra());
    emit(p, a_cmp(5, 3));
    emit(p, a_br(FL_NE, 2));
    emit(p, a_alu(OPC_ADD, 6, 6, 3));
    emit(p, a_alu(OPC_ADD, 1, 1, 3));
    emit(p, a_cmp(1, 2));
    br_pc = p.size();
    emit(p, a_br(FL_LT, loop_pc - br_pc));
    emit(p, a_ldi(4, RES_ADDR));
    emit(p, a_fhr(4));
    emit(p, a_sw(6, 0, FB_ADDR));
    emit(p, a_end());
    return p;
  endfunction

  // Program whose single bundle puts two operations on qubit 1 at once.
  function automatic prog_t prog_conflict();
    prog_t p;
    emit(p, a_smso(2, 0, 8'h03));
    emit(p, a_sito(1, 0, 1, 2));
    emit(p, a_bundle(G_X, QK_SMASK, 2, G_CZ, QK_SPAIR, 1, 1));
    emit(p, a_end());
    return p;
  endfunction
endpackage
