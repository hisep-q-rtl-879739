// tb_qop_dispatcher: 8 qubits. Feeds random pairs of lane words (disjoint
// targets) with increasing time points through two queue models of the op
// buffers and checks the per-qubit FIFO writes (time, micro-code, role,
// measurement flag from the lane that addresses the qubit), the stall while
// an addressed FIFO is full, and both conflict cases: overlapping lanes and
// a second bundle at the same time point on the same qubit. A conflict
// blocks all further dispatch until start.
module tb_qop_dispatcher;
  import hisepq_pkg::*;
  localparam int N = 8;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic ob_empty [2];
  logic [TIME_W-1:0] ob_t [2];
  lut_ent_t ob_ent [2];
  logic [2*N-1:0] ob_ind [2];
  logic ob_pop, conflict;
  logic [N-1:0] fifo_push, fifo_full;
  tq_ent_t fifo_din [N];
  always #5 clk = ~clk;

  qop_dispatcher #(.NUM_QUBITS(N)) dut (.clk, .rst_n, .start, .ob_empty, .ob_t, .ob_ent, .ob_ind,
    .ob_pop, .fifo_push, .fifo_din, .fifo_full, .conflict);

  task automatic present(input logic [TIME_W-1:0] t, input logic [2*N-1:0] i0, input logic [2*N-1:0] i1);
    ob_empty = '{1'b0, 1'b0};
    ob_t = '{t, t};
    ob_ent[0] = lut_ent_t'($urandom); ob_ent[1] = lut_ent_t'($urandom);
    ob_ind = '{i0, i1};
  endtask

  initial begin
    logic [TIME_W-1:0] t;
    ob_empty = '{1'b1, 1'b1}; ob_t = '{0, 0}; ob_ent = '{0, 0}; ob_ind = '{0, 0}; fifo_full = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    t = 100;
    for (int it = 0; it < 500; it++) begin
      logic [2*N-1:0] i0, i1;
      @(negedge clk);
      i0 = '0; i1 = '0;
      for (int q = 0; q < N; q++) begin
        int r;
        r = $urandom_range(0, 5);
        if (r < 3) i0[2*q +: 2] = 2'($urandom_range(1, 3));
        else if (r < 5) i1[2*q +: 2] = 2'($urandom_range(1, 3));
      end
      t = t + TIME_W'($urandom_range(1, 3));
      present(t, i0, i1);
      fifo_full = ($urandom_range(0, 3) == 0) ? N'($urandom) : '0;
      #1;
      // stall if an addressed FIFO is full
      begin
        logic [N-1:0] hit;
        for (int q = 0; q < N; q++) hit[q] = (i0[2*q +: 2] != 0) || (i1[2*q +: 2] != 0);
        checks++;
        if (ob_pop !== !(|(hit & fifo_full))) begin failures++; $display("FAIL pop/stall at %0d", it); end
        if (!ob_pop) begin
          stalls++;
          fifo_full = '0; #1;
        end
        checks++;
        if (!ob_pop || fifo_push !== hit) begin failures++; $display("FAIL push mask at %0d", it); end
        for (int q = 0; q < N; q++) if (hit[q]) begin
          int l;
          l = (i0[2*q +: 2] != 0) ? 0 : 1;
          checks++;
          if (fifo_din[q].t !== t || fifo_din[q].micro !== ob_ent[l].micro ||
              fifo_din[q].meas !== ob_ent[l].meas || fifo_din[q].role !== ob_ind[l][2*q +: 2]) begin
            failures++; $display("FAIL entry qubit %0d at %0d", q, it);
          end
        end
      end
    end
    // conflict 1: both lanes address qubit 2
    @(negedge clk);
    t = t + 5;
    present(t, 16'h0030, 16'h0030); fifo_full = '0; #1;
    checks++; if (ob_pop || fifo_push != 0) begin failures++; $display("FAIL lane conflict dispatched"); end
    @(negedge clk);
    checks++; if (!conflict) begin failures++; $display("FAIL lane conflict not flagged"); end
    // blocked until start
    present(t + 10, 16'h0003, 16'h0000); #1;
    checks++; if (ob_pop) begin failures++; $display("FAIL dispatch after conflict"); end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++; if (conflict) begin failures++; $display("FAIL conflict not cleared"); end
    // conflict 2: same qubit, same time point, two bundles
    present(t + 20, 16'h0003, 16'h0000); #1;
    checks++; if (!ob_pop) begin failures++; $display("FAIL first bundle"); end
    @(negedge clk);
    present(t + 20, 16'h000C, 16'h0003); #1;
    checks++; if (ob_pop) begin failures++; $display("FAIL time conflict dispatched"); end
    @(negedge clk);
    checks++; if (!conflict) begin failures++; $display("FAIL time conflict not flagged"); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("stalls %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
