// time_manager: central clock and time points of quantum operations.
//
// The central clock counts cycles from the start of a program. The time
// manager keeps the absolute time point `tp` of the most recent quantum
// operation. Each QWAIT / QWAITR interval and each Q.Bundle pre-interval
// (PI) moves it forward: the new point is the old point plus the interval,
// but never earlier than LEAD cycles after the current clock, so that an
// operation always reaches its timed FIFO before its time point comes. For
// a Q.Bundle, `tp_next` (combinational) is the time point its operations
// get; the register takes it on adv_valid. start clears the clock and sets
// tp to LEAD. The LEAD rule is this design's choice.
module time_manager
  import hisepq_pkg::*;
#(
  parameter int unsigned LEAD = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              adv_valid,
  input  logic [TIME_W-1:0] adv_interval,
  output logic [TIME_W-1:0] now,
  output logic [TIME_W-1:0] tp,
  output logic [TIME_W-1:0] tp_next
);
  logic [TIME_W-1:0] cand, floor_t;

  assign cand    = tp + adv_interval;
  assign floor_t = now + TIME_W'(LEAD);
  assign tp_next = ($signed(cand - floor_t) < 0) ? floor_t : cand;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0;
      tp  <= '0;
    end else if (start) begin
      now <= '0;
      tp  <= TIME_W'(LEAD);
    end else begin
      now <= now + 1'b1;
      if (adv_valid) tp <= tp_next;
    end
  end
endmodule
