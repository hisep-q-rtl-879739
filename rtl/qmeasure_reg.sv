// qmeasure_reg: Q-measure register.
//
// Stores the latest read-out result of every qubit. A result arriving with
// ro_valid[q] overwrites bit q. The register also tracks, per qubit, whether
// a measurement operation has been issued to the signal side and its result
// has not come back yet (this tracking is this design's addition). The
// classical unit reads single bits for FMR, waiting until that qubit's
// flag in `pending_q` is low, and the histogram takes the whole vector on
// SRA, which waits until `pending` (any qubit) is low. start clears results and
// pending flags. A result arriving in the same cycle as a new measurement
// issue on the same qubit leaves the qubit pending.
module qmeasure_reg #(
  parameter int unsigned NUM_QUBITS = 100
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NUM_QUBITS-1:0] meas_issue,
  input  logic [NUM_QUBITS-1:0] ro_valid,
  input  logic [NUM_QUBITS-1:0] ro_bit,
  output logic [NUM_QUBITS-1:0] state,
  output logic                  pending,
  output logic [NUM_QUBITS-1:0] pending_q
);
  logic [NUM_QUBITS-1:0] pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      pend  <= '0;
    end else if (start) begin
      state <= '0;
      pend  <= '0;
    end else begin
      state <= (state & ~ro_valid) | (ro_bit & ro_valid);
      pend  <= (pend & ~ro_valid) | meas_issue;
    end
  end

  assign pending   = |pend;
  assign pending_q = pend;
endmodule
