// offset_control: base qubit of a target register's addressing window.
//
// A target register's 4-bit offset selects which window of qubits its local
// indexes refer to. For long masks the window is 100 qubits wide (offset 0
// covers qubits 0-99, offset 1 covers 100-199), giving 16 x 100 = 1600
// addressable qubits. This design uses the same 100-qubit stride for the
// immediate pair registers and a stride equal to the mask width (8) for
// short masks. Purely combinational.
module offset_control
  import hisepq_pkg::*;
#(
  parameter int unsigned LONG_STRIDE       = 100,
  parameter int unsigned SHORT_MASK_STRIDE = 8
) (
  input  qkind_e            kind,
  input  logic [OFS_W-1:0]  offset,
  output logic [QIDX_W-1:0] base
);
  always_comb begin
    if (kind == QK_SMASK) base = QIDX_W'(32'(offset) * SHORT_MASK_STRIDE);
    else                  base = QIDX_W'(32'(offset) * LONG_STRIDE);
  end
endmodule
