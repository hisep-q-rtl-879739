// tb_quantum_decoder: random instances of every quantum instruction are
// encoded here and offered to the decoder; its register-file write (kind,
// index, offset, payload or QSet bit), time-manager interval, lane selects
// and op-buffer push are compared with the fields that were encoded,
// including a Q.Bundle that must wait while an op buffer is full.
module tb_quantum_decoder;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;
  int checks = 0, failures = 0;
  instr_t instr;
  logic valid, ready, ob_full, tm_adv, ob_push;
  logic [4:0] qrs_idx;
  logic [31:0] qrs_val;
  logic [TIME_W-1:0] tm_interval;
  qreg_wr_t qreg_wr;
  qkind_e rd_kind [2];
  logic [4:0] rd_idx [2];
  logic [OP_W-1:0] lut_op [2];
  logic [1:0] lane_used;

  quantum_decoder dut (.instr, .valid, .ready, .ob_full, .qrs_idx, .qrs_val, .tm_adv, .tm_interval,
    .qreg_wr, .rd_kind, .rd_idx, .lut_op, .ob_push, .lane_used);

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic offer_s(logic [31:0] w);
    instr = '{bits: {96'd0, w}, is_long: 1'b0, pc: '0}; valid = 1; #1;
  endtask
  task automatic offer_l(logic [127:0] b);
    instr = '{bits: b, is_long: 1'b1, pc: '0}; valid = 1; #1;
  endtask

  initial begin
    ob_full = 0; qrs_val = '0;
    for (int it = 0; it < 300; it++) begin
      int r, o, s, t, pi, imm;
      logic [99:0] m;
      logic [6:0] v;
      logic [97:0] ix;
      r = $urandom_range(0, 31); o = $urandom_range(0, 15); s = $urandom_range(0, 127); t = $urandom_range(0, 127);
      imm = $urandom_range(0, 20'hFFFFF);
      // QWAIT / QWAITR
      offer_s(a_qwait(imm));
      chk(ready && tm_adv && tm_interval == imm && !qreg_wr.valid && !ob_push, "QWAIT");
      qrs_val = $urandom;
      offer_s(a_qwaitr(r));
      chk(ready && tm_adv && qrs_idx == r && tm_interval == qrs_val, "QWAITR");
      // SMSO
      m = {$urandom, $urandom, $urandom, 4'($urandom)};
      offer_s(a_smso(r, o, m[7:0]));
      chk(qreg_wr.valid && !qreg_wr.bitwr && qreg_wr.kind == QK_SMASK && qreg_wr.idx == r &&
          qreg_wr.data.offset == o && qreg_wr.data.pay == QPAY_W'(m[7:0]) && !tm_adv, "SMSO");
      // SMSOL
      offer_l(a_smsol(r, o, m));
      chk(qreg_wr.valid && qreg_wr.kind == QK_LMASK && qreg_wr.idx == r && qreg_wr.data.offset == o &&
          qreg_wr.data.pay == QPAY_W'(m), "SMSOL");
      // SITO
      offer_s(a_sito(r, o, s, t));
      chk(qreg_wr.valid && qreg_wr.kind == QK_SPAIR && qreg_wr.idx == r && qreg_wr.data.offset == o &&
          qreg_wr.data.pay == QPAY_W'({7'(s), 7'(t)}), "SITO");
      // SITOL
      v = 7'($urandom); ix = {$urandom, $urandom, $urandom, 2'($urandom)};
      offer_l(a_sitol(r, o, v, ix));
      chk(qreg_wr.valid && qreg_wr.kind == QK_LPAIR && qreg_wr.idx == r && qreg_wr.data.offset == o &&
          qreg_wr.data.pay == {v, ix}, "SITOL");
      // QSet
      begin
        qkind_e k; int b; bit bv;
        k = qkind_e'($urandom_range(0, 3)); b = $urandom_range(0, 104); bv = 1'($urandom);
        offer_s(a_qset(k, r, b, bv));
        chk(qreg_wr.valid && qreg_wr.bitwr && qreg_wr.kind == k && qreg_wr.idx == r &&
            qreg_wr.bit_idx == b && qreg_wr.bit_val == bv, "QSet");
      end
      // Q.Bundle
      begin
        int op0, op1, r0, r1;
        qkind_e k0, k1;
        op0 = $urandom_range(0, 127); op1 = $urandom_range(0, 127);
        r0 = $urandom_range(0, 31); r1 = $urandom_range(0, 31);
        k0 = qkind_e'($urandom_range(0, 3)); k1 = qkind_e'($urandom_range(0, 3));
        pi = $urandom_range(0, 7);
        ob_full = ($urandom_range(0, 3) == 0);
        offer_s(a_bundle(op0, k0, r0, op1, k1, r1, pi));
        chk(ready == !ob_full && ob_push == !ob_full && tm_adv == !ob_full && tm_interval == pi &&
            lut_op[0] == op0 && lut_op[1] == op1 && rd_kind[0] == k0 && rd_kind[1] == k1 &&
            rd_idx[0] == r0 && rd_idx[1] == r1 && lane_used == {op1 != 0, op0 != 0} && !qreg_wr.valid, "Q.Bundle");
        ob_full = 0;
      end
      valid = 0; #1;
      chk(!ready && !ob_push && !tm_adv && !qreg_wr.valid, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
