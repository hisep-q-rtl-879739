// quantum_decoder: decoder of the quantum instructions.
//
// Accepts the quantum instructions offered by the instruction dispatcher
// and drives the blocks of the quantum pipeline:
//   QWAIT imm / QWAITR Rs  -> interval to the time manager
//   SMSO, SMSOL, SITO,
//   SITOL                  -> whole-register write into the Q-register file
//   QSet                   -> single-bit write into the Q-register file
//   Q.Bundle               -> PI to the time manager, the two lanes' register
//                             selections to the register file, their gate
//                             operations to the gate-op LUT, and a push of
//                             one operation word per lane into op buffers 1
//                             and 2 (both always pushed; an empty lane,
//                             operation 0, carries no target)
// Every instruction completes in the cycle it is offered except a Q.Bundle
// while an op buffer is full, which waits. Combinational.
//
// Field positions of SMSO/SMSOL/SITO/SITOL follow the published formats;
// the other encodings (see hisepq_pkg) are this design's choice:
//   QWAIT  imm[19:0]          QWAITR rs[19:15]
//   QSet   kind[24:23] reg[22:18] bit[17:11] value[10]
//   Q.Bundle: 1 | op0[30:24] kind0[23:22] reg0[21:17]
//               | op1[16:10] kind1[9:8]  reg1[7:3]  | PI[2:0]
module quantum_decoder
  import hisepq_pkg::*;
(
  input  instr_t            instr,
  input  logic              valid,
  output logic              ready,
  input  logic              ob_full,       // either op buffer full
  // QWAITR register read
  output logic [4:0]        qrs_idx,
  input  logic [31:0]       qrs_val,
  // time manager
  output logic              tm_adv,
  output logic [TIME_W-1:0] tm_interval,
  // Q-register file
  output qreg_wr_t          qreg_wr,
  output qkind_e            rd_kind [2],
  output logic [4:0]        rd_idx  [2],
  // gate-op LUT
  output logic [OP_W-1:0]   lut_op  [2],
  // op buffers
  output logic              ob_push,
  output logic [1:0]        lane_used
);
  logic [31:0]  w;
  logic [127:0] b;
  opcode_e      opc;
  logic         bundle;

  assign w       = instr.bits[31:0];
  assign b       = instr.bits;
  assign bundle  = instr.is_long ? 1'b0 : w[31];
  assign opc     = instr.is_long ? opcode_e'(b[126:121]) : opcode_e'(w[30:25]);
  assign qrs_idx = w[19:15];

  assign lut_op[0]  = w[30:24];
  assign rd_kind[0] = qkind_e'(w[23:22]);
  assign rd_idx[0]  = w[21:17];
  assign lut_op[1]  = w[16:10];
  assign rd_kind[1] = qkind_e'(w[9:8]);
  assign rd_idx[1]  = w[7:3];
  assign lane_used  = {w[16:10] != '0, w[30:24] != '0};

  always_comb begin
    ready       = 1'b0;
    tm_adv      = 1'b0;
    tm_interval = '0;
    qreg_wr     = '0;
    ob_push     = 1'b0;
    if (valid) begin
      if (bundle) begin
        ready       = !ob_full;
        ob_push     = !ob_full;
        tm_adv      = !ob_full;
        tm_interval = TIME_W'(w[2:0]);
      end else begin
        ready = 1'b1;
        unique case (opc)
          OPC_QWAIT:  begin tm_adv = 1'b1; tm_interval = TIME_W'(w[19:0]); end
          OPC_QWAITR: begin tm_adv = 1'b1; tm_interval = TIME_W'(qrs_val); end
          OPC_SMSO: begin
            qreg_wr.valid       = 1'b1;
            qreg_wr.kind        = QK_SMASK;
            qreg_wr.idx         = w[24:20];
            qreg_wr.data.offset = w[11:8];
            qreg_wr.data.pay    = QPAY_W'(w[7:0]);
          end
          OPC_SMSOL: begin
            qreg_wr.valid       = 1'b1;
            qreg_wr.kind        = QK_LMASK;
            qreg_wr.idx         = b[120:116];
            qreg_wr.data.offset = b[103:100];
            qreg_wr.data.pay    = QPAY_W'(b[99:0]);
          end
          OPC_SITO: begin
            qreg_wr.valid       = 1'b1;
            qreg_wr.kind        = QK_SPAIR;
            qreg_wr.idx         = w[24:20];
            qreg_wr.data.offset = w[17:14];
            qreg_wr.data.pay    = QPAY_W'(w[13:0]);
          end
          OPC_SITOL: begin
            qreg_wr.valid       = 1'b1;
            qreg_wr.kind        = QK_LPAIR;
            qreg_wr.idx         = b[120:116];
            qreg_wr.data.offset = b[108:105];
            qreg_wr.data.pay    = b[104:0];
          end
          OPC_QSET: begin
            qreg_wr.valid   = 1'b1;
            qreg_wr.bitwr   = 1'b1;
            qreg_wr.kind    = qkind_e'(w[24:23]);
            qreg_wr.idx     = w[22:18];
            qreg_wr.bit_idx = w[17:11];
            qreg_wr.bit_val = w[10];
          end
          default: ;                                 // unknown: no operation
        endcase
      end
    end
  end
endmodule
