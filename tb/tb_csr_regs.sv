// tb_csr_regs: checks that writing bit 0 of word 0 gives exactly one start
// pulse (and writing 0 or to another slave gives none), and that word 0 and
// word 1 read back the status flags and the clock.
module tb_csr_regs;
  import hisepq_pkg::*;
  int checks = 0, failures = 0, pulses = 0;
  logic clk = 0, rst_n = 0, start;
  bus_req_t bus_req;
  logic [31:0] bus_rdata;
  core_status_t status;
  logic [TIME_W-1:0] now;
  always #5 clk = ~clk;
  always @(posedge clk) if (start) pulses++;

  csr_regs dut (.clk, .rst_n, .bus_req, .bus_rdata, .start, .status, .now);

  initial begin
    bus_req = '0; status = '0; now = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      int p0;
      logic [31:0] d;
      slave_e s;
      p0 = pulses;
      d = $urandom_range(0, 3);
      s = ($urandom_range(0, 3) == 0) ? SL_CFG : SL_CSR;
      @(negedge clk);
      bus_req = '{valid: 1'b1, we: 1'b1, sel: s, addr: 12'd0, wdata: d};
      @(negedge clk);
      bus_req = '0;
      repeat (3) @(negedge clk);
      checks++;
      if (pulses - p0 != ((s == SL_CSR && d[0]) ? 1 : 0)) begin failures++; $display("FAIL pulses %0d", pulses - p0); end
      status = core_status_t'($urandom); now = $urandom;
      bus_req = '{valid: 1'b1, we: 1'b0, sel: SL_CSR, addr: 12'd0, wdata: 32'd0};
      @(negedge clk);
      checks++;
      if (bus_rdata !== {27'd0, status.hist_overflow, status.err_miss, status.err_conflict, status.done, status.busy}) begin
        failures++; $display("FAIL status read");
      end
      bus_req = '{valid: 1'b1, we: 1'b0, sel: SL_CSR, addr: 12'd1, wdata: 32'd0};
      @(negedge clk);
      bus_req = '0;
      checks++;
      if (bus_rdata !== now) begin failures++; $display("FAIL clock read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
