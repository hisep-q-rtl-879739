// tb_time_manager: after start the clock counts from 0 and the time point
// is LEAD. Random intervals at random moments are checked against
// max(previous point + interval, clock + LEAD), including intervals of 0
// and long idle gaps where the floor applies.
module tb_time_manager;
  import hisepq_pkg::*;
  localparam int LEAD = 8;
  int checks = 0, failures = 0, floors = 0;
  logic clk = 0, rst_n = 0, start = 0, adv_valid = 0;
  logic [TIME_W-1:0] adv_interval, now, tp, tp_next, m_tp, m_now;
  always #5 clk = ~clk;

  time_manager #(.LEAD(LEAD)) dut (.clk, .rst_n, .start, .adv_valid, .adv_interval, .now, .tp, .tp_next);

  initial begin
    adv_interval = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    m_tp = LEAD; m_now = 0;
    checks += 2;
    if (now !== 0 || tp !== LEAD) begin failures++; $display("FAIL after start now=%0d tp=%0d", now, tp); end
    for (int it = 0; it < 2000; it++) begin
      logic [TIME_W-1:0] cand, fl, e;
      adv_valid = (it < 100) ? 1'($urandom_range(0, 1)) : ($urandom_range(0, 9) == 0);
      adv_interval = (it % 7 == 0) ? 0 : $urandom_range(0, 12);
      #1;
      cand = m_tp + adv_interval; fl = m_now + LEAD;
      e = (cand < fl) ? fl : cand;
      checks++;
      if (tp_next !== e) begin failures++; $display("FAIL tp_next %0d expected %0d", tp_next, e); end
      if (adv_valid) begin m_tp = e; if (cand < fl) floors++; end
      @(negedge clk);
      m_now++;
      checks += 2;
      if (now !== m_now) begin failures++; $display("FAIL now"); end
      if (tp !== m_tp)   begin failures++; $display("FAIL tp %0d expected %0d", tp, m_tp); end
    end
    checks++;
    if (floors == 0) begin failures++; $display("FAIL floor rule never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
