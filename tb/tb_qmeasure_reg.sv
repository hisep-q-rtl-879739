// tb_qmeasure_reg: random read-out results and measurement issues on 100
// qubits; the stored results and the pending flag are compared each cycle
// with a reference model; start clears both.
module tb_qmeasure_reg;
  localparam int N = 100;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] meas_issue, ro_valid, ro_bit, state, m_state, m_pend;
  logic pending;
  logic [N-1:0] pending_q;
  always #5 clk = ~clk;

  qmeasure_reg #(.NUM_QUBITS(N)) dut (.clk, .rst_n, .start, .meas_issue, .ro_valid, .ro_bit, .state, .pending, .pending_q);

  initial begin
    meas_issue = '0; ro_valid = '0; ro_bit = '0; m_state = '0; m_pend = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      start      = (it == 1000);
      meas_issue = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      ro_valid   = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      ro_bit     = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (start) begin m_state = '0; m_pend = '0; end
      else begin
        for (int q = 0; q < N; q++) begin
          if (ro_valid[q]) m_state[q] = ro_bit[q];
          if (ro_valid[q]) m_pend[q] = 1'b0;
          if (meas_issue[q]) m_pend[q] = 1'b1;
        end
      end
      #1;
      checks += 2;
      if (state !== m_state) begin failures++; $display("FAIL state at %0d", it); end
      if (pending !== (|m_pend)) begin failures++; $display("FAIL pending at %0d", it); end
      checks++;
      if (pending_q !== m_pend) begin failures++; $display("FAIL per-qubit pending at %0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
