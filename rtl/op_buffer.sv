// op_buffer: operation buffer of one VLIW lane.
//
// A small first-word-fall-through FIFO of operation words. Each word joins
// the three parts assembled for a Q.Bundle lane: the absolute time point,
// the gate-op LUT entry (micro-code and measurement flag) and the decoded
// 2-bit-per-qubit target indicators. Push and pop may happen in the same
// cycle. Depth is this design's choice.
module op_buffer
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100,
  parameter int unsigned DEPTH      = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    push,
  input  logic [TIME_W-1:0]       din_t,
  input  lut_ent_t                din_ent,
  input  logic [2*NUM_QUBITS-1:0] din_ind,
  input  logic                    pop,
  output logic [TIME_W-1:0]       dout_t,
  output lut_ent_t                dout_ent,
  output logic [2*NUM_QUBITS-1:0] dout_ind,
  output logic                    empty,
  output logic                    full
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned W  = TIME_W + $bits(lut_ent_t) + 2*NUM_QUBITS;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign empty = (cnt == 0);
  assign full  = (32'(cnt) == DEPTH);
  assign {dout_t, dout_ent, dout_ind} = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= {din_t, din_ent, din_ind};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else if (clr) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push && !full) wp <= (32'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      if (pop && !empty) rp <= (32'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
