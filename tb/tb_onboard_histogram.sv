// tb_onboard_histogram: feeds shots drawn from a skewed (roughly Gaussian)
// distribution over a handful of states, like the validation in the
// literature, and after every shot compares the sorter with a reference
// count table: the reported counts must be the M largest reference counts
// in descending order and each reported state must have that count. Checks
// that `busy` lasts exactly M+1 cycles after each SRA, and that a new
// state beyond T distinct ones raises overflow. Uses 100 qubits, T = 100,
// M = 4 (the published configuration), then a second small run for
// overflow with T = 8.
module tb_onboard_histogram;
  localparam int N = 100, T = 100, M = 4, CW = $clog2(T + 1);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, sra = 0, busy, overflow;
  logic [N-1:0] state;
  logic [N-1:0] top_state [M];
  logic [CW-1:0] top_cnt [M];
  logic [M-1:0] top_valid;
  // small instance for overflow
  logic sra2 = 0, busy2, ovf2;
  logic [N-1:0] ts2 [2];
  logic [3:0] tc2 [2];
  logic [1:0] tv2;
  always #5 clk = ~clk;

  onboard_histogram #(.NUM_QUBITS(N), .T(T), .M(M)) dut (.clk, .rst_n, .clear, .sra, .state,
    .busy, .overflow, .top_state, .top_cnt, .top_valid);
  onboard_histogram #(.NUM_QUBITS(N), .T(8), .M(2)) dut2 (.clk, .rst_n, .clear, .sra (sra2), .state,
    .busy (busy2), .overflow (ovf2), .top_state (ts2), .top_cnt (tc2), .top_valid (tv2));

  logic [N-1:0] pool [12];
  int ref_cnt [12];

  function automatic int gauss_idx();
    int s;
    s = 0;
    for (int k = 0; k < 11; k++) s += $urandom_range(0, 1);
    return s;   // binomial(11, 1/2): 0..11
  endfunction

  initial begin
    for (int i = 0; i < 12; i++) begin
      pool[i] = {$urandom, $urandom, $urandom, $urandom};
      ref_cnt[i] = 0;
    end
    state = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int shot = 0; shot < T; shot++) begin
      int k, cyc;
      k = gauss_idx();
      state = pool[k];
      sra = 1;
      @(negedge clk);
      sra = 0;
      ref_cnt[k]++;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != M + 1) begin failures++; $display("FAIL sort took %0d cycles", cyc); end
      begin
        int sorted [12];
        int nz;
        sorted = ref_cnt;
        sorted.rsort();
        nz = 0;
        for (int i = 0; i < 12; i++) if (ref_cnt[i] > 0) nz++;
        for (int i = 0; i < M; i++) begin
          checks++;
          if (i < nz) begin
            int sc;
            sc = -1;
            for (int j = 0; j < 12; j++) if (pool[j] == top_state[i]) sc = ref_cnt[j];
            if (!top_valid[i] || int'(top_cnt[i]) != sorted[i] || sc != sorted[i]) begin
              failures++;
              $display("FAIL shot %0d rank %0d: cnt %0d state-count %0d expected %0d", shot, i, top_cnt[i], sc, sorted[i]);
            end
          end else if (top_valid[i]) begin
            failures++; $display("FAIL rank %0d valid too early", i);
          end
        end
      end
    end
    checks++;
    if (overflow) begin failures++; $display("FAIL overflow with few states"); end
    // overflow on the small instance: 9 distinct states into T = 8
    for (int i = 0; i < 9; i++) begin
      state = {$urandom, $urandom, $urandom, 4'(i)};
      sra2 = 1; @(negedge clk); sra2 = 0;
      while (busy2) @(negedge clk);
      checks++;
      if (ovf2 !== (i == 8)) begin failures++; $display("FAIL overflow flag after %0d states", i + 1); end
    end
    // clear empties everything
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (top_valid != 0 || overflow || ovf2) begin failures++; $display("FAIL clear"); end
    $display("top-1 count %0d of %0d shots", top_cnt[0], T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
