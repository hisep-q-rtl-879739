// timed_fifo: per-qubit FIFO with its time control.
//
// Operations for one qubit arrive in time order from the dispatcher. The
// time control watches the head entry every cycle and compares its time
// point with the central clock: in the cycle they are equal the entry is
// issued (issue = 1 with its micro-code and role) and popped, so the next
// entry is examined in the following cycle. An entry whose time point has
// already passed when it reaches the head cannot be issued on time; it is
// dropped and `miss` pulses (the paper does not say what happens then).
// First-word-fall-through storage; depth is this design's choice.
module timed_fifo
  import hisepq_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               push,
  input  tq_ent_t            din,
  output logic               full,
  output logic               empty,
  input  logic [TIME_W-1:0]  now,
  output logic               issue,
  output logic               issue_meas,
  output logic [1:0]         issue_role,
  output logic [MICRO_W-1:0] issue_micro,
  output logic               miss
);
  localparam int unsigned AW = $clog2(DEPTH);

  tq_ent_t       mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;
  tq_ent_t       head;
  logic          pop, late;

  assign head  = mem[rp];
  assign empty = (cnt == 0);
  assign full  = (32'(cnt) == DEPTH);

  // time control
  assign issue       = !empty && head.t == now;
  // time points are compared modulo 2^TIME_W as a signed difference
  assign late        = !empty && $signed(head.t - now) < 0;
  assign miss        = late;
  assign pop         = issue || late;
  assign issue_meas  = issue && head.meas;
  assign issue_role  = issue ? head.role  : 2'b00;
  assign issue_micro = issue ? head.micro : '0;

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else if (clr) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push && !full) wp <= (32'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      if (pop)           rp <= (32'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push && !full) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
