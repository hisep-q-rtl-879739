// tb_op_buffer: random pushes and pops (never past full or empty) compared
// with a queue model; checks empty/full flags, first-word-fall-through
// order and that clr empties the buffer. Runs at 100 qubits, depth 4.
module tb_op_buffer;
  import hisepq_pkg::*;
  localparam int N = 100;
  typedef struct packed { logic [TIME_W-1:0] t; lut_ent_t e; logic [2*N-1:0] i; } w_t;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0, empty, full;
  logic [TIME_W-1:0] din_t, dout_t;
  lut_ent_t din_ent, dout_ent;
  logic [2*N-1:0] din_ind, dout_ind;
  w_t q [$];
  always #5 clk = ~clk;

  op_buffer #(.NUM_QUBITS(N), .DEPTH(4)) dut (.clk, .rst_n, .clr, .push, .din_t, .din_ent, .din_ind,
    .pop, .dout_t, .dout_ent, .dout_ind, .empty, .full);

  initial begin
    din_t = '0; din_ent = '0; din_ind = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      checks += 2;
      if (empty !== (q.size() == 0)) begin failures++; $display("FAIL empty at %0d", it); end
      if (full  !== (q.size() == 4)) begin failures++; $display("FAIL full at %0d", it); end
      if (q.size() > 0) begin
        checks++;
        if ({dout_t, dout_ent, dout_ind} !== q[0]) begin failures++; $display("FAIL head at %0d", it); end
      end
      clr  = (it % 500 == 499);
      push = $urandom_range(0, 1) && q.size() < 4;
      pop  = $urandom_range(0, 1) && q.size() > 0;
      din_t = $urandom; din_ent = lut_ent_t'($urandom);
      din_ind = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (clr) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back({din_t, din_ent, din_ind});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
