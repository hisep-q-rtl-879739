// tb_timed_fifo: queues operations with increasing time points (gaps of
// 1 to 6 cycles, several at once) and checks that each is issued exactly in
// the cycle the clock equals its time point, with its micro-code and role,
// and in order. Then queues an entry whose time point has passed and checks
// that it is dropped with `miss` and never issued.
module tb_timed_fifo;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, full, empty, issue, issue_meas, miss;
  logic [TIME_W-1:0] now;
  tq_ent_t din;
  logic [1:0] issue_role;
  logic [MICRO_W-1:0] issue_micro;
  tq_ent_t exp_q [$];
  int issued = 0, misses = 0;
  always #5 clk = ~clk;

  timed_fifo #(.DEPTH(8)) dut (.clk, .rst_n, .clr, .push, .din, .full, .empty, .now,
    .issue, .issue_meas, .issue_role, .issue_micro, .miss);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0; else now <= now + 1;

  // checker: every issue must match the oldest expected entry at its time
  always @(negedge clk) if (rst_n) begin
    if (issue) begin
      checks++;
      issued++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected issue"); end
      else begin
        tq_ent_t e;
        e = exp_q.pop_front();
        if (e.t !== now || e.micro !== issue_micro || e.role !== issue_role || e.meas !== issue_meas) begin
          failures++; $display("FAIL issue at %0d: expected t=%0d micro=%0d", now, e.t, e.micro);
        end
      end
    end
    if (miss) misses++;
  end

  initial begin
    logic [TIME_W-1:0] t;
    din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    t = now + 20;
    for (int it = 0; it < 200; it++) begin
      // push up to 3 entries while there is room
      for (int k = 0; k < 3; k++) begin
        if (!full) begin
          t = t + TIME_W'($urandom_range(1, 6));
          if (t < now + 3) t = now + 3;
          din = '{t: t, meas: 1'($urandom), role: 2'($urandom_range(1, 3)), micro: 8'($urandom)};
          push = 1;
          exp_q.push_back(din);
          @(negedge clk);
          push = 0;
        end
      end
      repeat ($urandom_range(0, 8)) @(negedge clk);
    end
    while (!empty) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || misses != 0) begin failures++; $display("FAIL left %0d misses %0d", exp_q.size(), misses); end
    // an entry already late is dropped and flagged
    din = '{t: now - 5, meas: 1'b0, role: 2'b11, micro: 8'hAA};
    push = 1; @(negedge clk); push = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (misses != 1 || !empty) begin failures++; $display("FAIL late entry: misses %0d", misses); end
    $display("issued %0d operations", issued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
