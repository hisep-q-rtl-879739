// qreg_file: quantum target-register file.
//
// Four banks of NUM_QREG registers, one per register kind: short masks Sd
// (SMSO, 8 bits), long masks Sd(l) (SMSOL, 100 bits), single pairs Td
// (SITO, 14 bits) and long pair lists Td(l) (SITOL, 7 valid bits + 98 index
// bits). Every register keeps the 4-bit offset given by the instruction that
// wrote it. A whole-register write replaces payload and offset; a bit write
// (QSet) changes one payload bit and keeps the rest. Two combinational read
// ports feed the two VLIW lanes. All registers clear at reset.
//
// Payloads are right aligned in a common 105-bit field; bits above a kind's
// width are kept at zero on whole writes. The bank size follows the 5-bit
// register field of the instruction formats.
module qreg_file
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QREG = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  qreg_wr_t  wr,
  input  qkind_e    rd_kind [2],
  input  logic [4:0] rd_idx [2],
  output qreg_t     rd_data [2]
);
  qreg_t regs [4][NUM_QREG];

  function automatic logic [QPAY_W-1:0] kind_mask(input qkind_e k);
    unique case (k)
      QK_SMASK: return QPAY_W'({SMASK_W{1'b1}});
      QK_LMASK: return QPAY_W'({LMASK_W{1'b1}});
      QK_SPAIR: return QPAY_W'({2*IMM_W{1'b1}});
      default:  return {QPAY_W{1'b1}};
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++)
        for (int r = 0; r < NUM_QREG; r++)
          regs[k][r] <= '0;
    end else if (wr.valid && 32'(wr.idx) < NUM_QREG) begin
      if (wr.bitwr) begin
        if (32'(wr.bit_idx) < QPAY_W && kind_mask(wr.kind)[wr.bit_idx])
          regs[wr.kind][wr.idx].pay[wr.bit_idx] <= wr.bit_val;
      end else begin
        regs[wr.kind][wr.idx].offset <= wr.data.offset;
        regs[wr.kind][wr.idx].pay    <= wr.data.pay & kind_mask(wr.kind);
      end
    end
  end

  always_comb begin
    for (int l = 0; l < 2; l++)
      rd_data[l] = (32'(rd_idx[l]) < NUM_QREG) ? regs[rd_kind[l]][rd_idx[l]] : '0;
  end
endmodule
