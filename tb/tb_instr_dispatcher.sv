// tb_instr_dispatcher: a program of random short and long (SMSOL, SITOL)
// instructions sits in a model PRAM with one-cycle read latency. The
// execute side accepts each offered instruction after a random delay. The
// testbench checks every instruction's bits, length flag, PC and
// quantum/classical routing against the listing, that an instruction stays
// offered until accepted, the fetch latency (3 cycles from acceptance to the
// next short instruction, 6 to a long one), one backward redirect, and that
// halt stops fetching.
module tb_instr_dispatcher;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [PC_W-1:0] start_pc, fetch_addr, redirect_pc;
  logic [31:0] fetch_data;
  instr_t instr;
  logic instr_valid, is_quantum, instr_ready, redirect, halt, running;
  logic [31:0] pmem [256];
  always #5 clk = ~clk;
  always_ff @(posedge clk) fetch_data <= pmem[fetch_addr[7:0]];

  instr_dispatcher dut (.clk, .rst_n, .start, .start_pc, .fetch_addr, .fetch_data, .instr, .instr_valid,
    .is_quantum, .instr_ready, .redirect, .redirect_pc, .halt, .err_stop (1'b0), .running);

  localparam int NI = 40, BASE = 16, RD_AT = 20, RD_TO = 5;
  logic [127:0] lst_bits [NI];
  logic lst_long [NI];
  int lst_pc [NI];

  initial begin
    int pc, idx, seen, last_accept, gap_fail;
    logic redirected;
    for (int i = 0; i < 256; i++) pmem[i] = '0;
    pc = BASE;
    for (int i = 0; i < NI; i++) begin
      lst_pc[i] = pc;
      if (i % 3 == 1) begin
        lst_long[i] = 1'b1;
        lst_bits[i] = (i % 2) ? a_smsol(i, 1, {$urandom, $urandom, $urandom, 4'($urandom)})
                              : a_sitol(i, 2, 7'($urandom), {$urandom, $urandom, $urandom, 2'($urandom)});
        for (int k = 0; k < 4; k++) pmem[pc + k] = lst_bits[i][127 - 32*k -: 32];
        pc += 4;
      end else begin
        logic [31:0] w;
        lst_long[i] = 1'b0;
        do w = $urandom; while (is_long_word(w));
        if (i == NI - 1) w = a_end();
        lst_bits[i] = {96'd0, w};
        pmem[pc] = w;
        pc += 1;
      end
    end
    start_pc = PC_W'(BASE); instr_ready = 0; redirect = 0; redirect_pc = '0; halt = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    idx = 0; seen = 0; redirected = 0; last_accept = -1; gap_fail = 0;
    for (int cyc = 0; cyc < 2000 && idx < NI; cyc++) begin
      #1;
      if (instr_valid) begin
        // latency after the previous acceptance
        if (last_accept >= 0) begin
          checks++;
          if (cyc - last_accept != (lst_long[idx] ? 6 : 3)) begin
            failures++; $display("FAIL latency %0d before instr %0d", cyc - last_accept, idx);
          end
          last_accept = -1;
        end
        if ($urandom_range(0, 2) == 0) begin
          // hold: must stay the same next cycle
          logic [127:0] b;
          b = instr.bits;
          @(negedge clk); #1;
          checks++;
          if (!instr_valid || instr.bits !== b) begin failures++; $display("FAIL not held"); end
        end
        checks++;
        if (instr.bits !== lst_bits[idx] || instr.is_long !== lst_long[idx] || int'(instr.pc) != lst_pc[idx] ||
            is_quantum !== (lst_long[idx] || is_quantum_word(lst_bits[idx][31:0]))) begin
          failures++; $display("FAIL instr %0d: pc %0d bits %h", idx, instr.pc, instr.bits);
        end
        instr_ready = 1;
        redirect = (idx == RD_AT && !redirected);
        redirect_pc = PC_W'(lst_pc[RD_TO]);
        halt = (idx == NI - 1);
        @(negedge clk);
        instr_ready = 0; halt = 0;
        if (redirect) begin redirected = 1; idx = RD_TO; end
        else idx++;
        redirect = 0;
        seen++;
        last_accept = cyc;
      end else @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks += 2;
    if (seen != NI + (RD_AT - RD_TO) + 1) begin failures++; $display("FAIL saw %0d instructions", seen); end
    if (running || instr_valid) begin failures++; $display("FAIL did not halt"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
