// qreg_decoder: four-to-one target-register decoder.
//
// Translates any of the four register kinds into one uniform vector of
// NUM_QUBITS 2-bit indicators: 00 no operation, 01 source qubit, 10 target
// qubit, 11 single-qubit operation. Mask registers set 11 for every mask bit
// that is 1, at qubit base + bit position. Pair registers set 01 at
// base + source and 10 at base + target; in a long pair register only pairs
// whose valid bit is set count. Pair p of a long register occupies index
// bits [14p+13:14p], source in the upper seven bits (the bit layout inside
// the index field is this design's choice). Qubits at or beyond NUM_QUBITS
// are dropped. Purely combinational.
module qreg_decoder
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100
) (
  input  qkind_e                    kind,
  input  logic [QPAY_W-1:0]         pay,
  input  logic [QIDX_W-1:0]         base,
  output logic [2*NUM_QUBITS-1:0]   ind
);
  int unsigned      loc;
  logic             use_p;
  logic [IMM_W-1:0] src, tgt;

  always_comb begin
    ind   = '0;
    loc   = 0;
    use_p = 1'b0;
    src   = '0;
    tgt   = '0;
    if (kind == QK_SMASK || kind == QK_LMASK) begin
      for (int q = 0; q < NUM_QUBITS; q++) begin
        loc = q - 32'(base);
        if (q >= 32'(base) && loc < ((kind == QK_SMASK) ? SMASK_W : LMASK_W))
          if (pay[loc[6:0]]) ind[2*q +: 2] = IND_SQ;
      end
    end else begin
      for (int p = 0; p < NPAIR; p++) begin
        if (kind == QK_SPAIR) begin
          use_p = (p == 0);
          src   = pay[2*IMM_W-1:IMM_W];
          tgt   = pay[IMM_W-1:0];
        end else begin
          use_p = pay[NPAIR*2*IMM_W + p];
          src   = pay[p*2*IMM_W + IMM_W +: IMM_W];
          tgt   = pay[p*2*IMM_W +: IMM_W];
        end
        for (int q = 0; q < NUM_QUBITS; q++) begin
          if (use_p && 32'(q) == 32'(base) + 32'(src)) ind[2*q +: 2] = ind[2*q +: 2] | IND_SRC;
          if (use_p && 32'(q) == 32'(base) + 32'(tgt)) ind[2*q +: 2] = ind[2*q +: 2] | IND_TGT;
        end
      end
    end
  end
endmodule
