// tb_cfg_regs: writes the start address and random LUT entries through the
// register bus; checks the start_pc output, the one-cycle LUT write pulse
// with its address and entry, read-back of both words, and that requests
// for other slaves are ignored.
module tb_cfg_regs;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  bus_req_t bus_req;
  logic [31:0] bus_rdata;
  logic [PC_W-1:0] start_pc;
  logic lut_we;
  logic [OP_W-1:0] lut_addr;
  lut_ent_t lut_data;
  always #5 clk = ~clk;

  cfg_regs dut (.clk, .rst_n, .bus_req, .bus_rdata, .start_pc, .lut_we, .lut_addr, .lut_data);

  initial begin
    bus_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      logic [31:0] d;
      logic [PC_W-1:0] pc0;
      slave_e s;
      pc0 = start_pc;
      d = $urandom;
      s = ($urandom_range(0, 4) == 0) ? SL_DRAM : SL_CFG;
      @(negedge clk);
      bus_req = '{valid: 1'b1, we: 1'b1, sel: s, addr: 12'(it % 2), wdata: d};
      #1;
      checks++;
      if (lut_we !== (s == SL_CFG && it % 2 == 1)) begin failures++; $display("FAIL lut_we at %0d", it); end
      if (lut_we) begin
        checks++;
        if (lut_addr !== d[22:16] || lut_data !== lut_ent_t'(d[8:0])) begin failures++; $display("FAIL lut fields"); end
      end
      @(negedge clk);
      bus_req = '{valid: 1'b1, we: 1'b0, sel: SL_CFG, addr: 12'(it % 2), wdata: 32'd0};
      @(negedge clk);
      bus_req = '0;
      checks += 2;
      if (it % 2 == 0) begin
        logic [PC_W-1:0] e;
        e = (s == SL_CFG) ? d[PC_W-1:0] : pc0;
        if (start_pc !== e) begin failures++; $display("FAIL start_pc"); end
        if (bus_rdata !== 32'(e)) begin failures++; $display("FAIL readback 0"); end
      end else begin
        checks -= 2;
        if (s == SL_CFG) begin
          checks++;
          if (bus_rdata !== d) begin failures++; $display("FAIL readback 1"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
