// qop_dispatcher: Q-operation dispatcher.
//
// Takes the head words of the two op buffers (both lanes of one Q.Bundle,
// always pushed together) and writes, for every qubit addressed by either
// lane, one entry {time point, measurement flag, role, micro-code} into that
// qubit's timed FIFO. Both heads are popped in the same cycle.
//
// It also detects two operations on one qubit at one time point: either both
// lanes address the same qubit, or the qubit's last queued entry already has
// this time point (a second bundle scheduled at the same time). Then nothing
// is written, `conflict` is raised and stays high until start, and the core
// stops. If any addressed FIFO is full the dispatcher waits. Combinational
// decision, one word pair per cycle.
module qop_dispatcher
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  // heads of op buffer 1 and 2
  input  logic                    ob_empty [2],
  input  logic [TIME_W-1:0]       ob_t     [2],
  input  lut_ent_t                ob_ent   [2],
  input  logic [2*NUM_QUBITS-1:0] ob_ind   [2],
  output logic                    ob_pop,
  // per-qubit timed FIFOs
  output logic [NUM_QUBITS-1:0]   fifo_push,
  output tq_ent_t                 fifo_din [NUM_QUBITS],
  input  logic [NUM_QUBITS-1:0]   fifo_full,
  output logic                    conflict
);
  logic [TIME_W-1:0]     last_t [NUM_QUBITS];
  logic [NUM_QUBITS-1:0] has_last;
  logic [NUM_QUBITS-1:0] hit, clash;
  logic                  avail, stall, clash_any;

  assign avail = !ob_empty[0] && !ob_empty[1] && !conflict;

  always_comb begin
    for (int q = 0; q < NUM_QUBITS; q++) begin
      logic [1:0] r0, r1;
      r0       = ob_ind[0][2*q +: 2];
      r1       = ob_ind[1][2*q +: 2];
      hit[q]   = (r0 != IND_NONE) || (r1 != IND_NONE);
      clash[q] = ((r0 != IND_NONE) && (r1 != IND_NONE))
               || (hit[q] && has_last[q] && last_t[q] == ob_t[0]);
      fifo_din[q].t     = ob_t[0];
      if (r0 != IND_NONE) begin
        fifo_din[q].meas  = ob_ent[0].meas;
        fifo_din[q].role  = r0;
        fifo_din[q].micro = ob_ent[0].micro;
      end else begin
        fifo_din[q].meas  = ob_ent[1].meas;
        fifo_din[q].role  = r1;
        fifo_din[q].micro = ob_ent[1].micro;
      end
    end
  end

  assign clash_any = avail && |clash;
  assign stall     = |(hit & fifo_full);
  assign ob_pop    = avail && !clash_any && !stall;
  assign fifo_push = ob_pop ? hit : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conflict <= 1'b0;
      has_last <= '0;
      for (int q = 0; q < NUM_QUBITS; q++) last_t[q] <= '0;
    end else if (start) begin
      conflict <= 1'b0;
      has_last <= '0;
    end else begin
      if (clash_any) conflict <= 1'b1;
      for (int q = 0; q < NUM_QUBITS; q++)
        if (fifo_push[q]) begin
          last_t[q]   <= ob_t[0];
          has_last[q] <= 1'b1;
        end
    end
  end

  // Both lanes of a bundle carry the same time point.
  a_same_time: assert property (@(posedge clk) disable iff (!rst_n) avail |-> ob_t[0] == ob_t[1]);
endmodule
