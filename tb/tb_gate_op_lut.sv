// tb_gate_op_lut: checks the reset contents (micro-code = operation, only
// operation 127 flagged as measurement), then reprograms random entries and
// reads them back on both lane ports against a shadow table.
module tb_gate_op_lut;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [OP_W-1:0] waddr, op0, op1;
  lut_ent_t wdata, ent0, ent1;
  lut_ent_t shadow [128];
  always #5 clk = ~clk;

  gate_op_lut dut (.clk, .rst_n, .we, .waddr, .wdata, .op0, .op1, .ent0, .ent1);

  initial begin
    waddr = '0; wdata = '0; op0 = '0; op1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      shadow[i] = '{meas: (i == 127), micro: 8'(i)};
      op0 = 7'(i); op1 = 7'(127 - i); #1;
      checks += 2;
      if (ent0 !== shadow[i]) begin failures++; $display("FAIL reset entry %0d", i); end
      if (ent1.micro !== 8'(127 - i) || ent1.meas !== (i == 0)) begin failures++; $display("FAIL reset port1 %0d", i); end
    end
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      we = 1; waddr = 7'($urandom); wdata = lut_ent_t'($urandom);
      shadow[waddr] = wdata;
      @(negedge clk); we = 0;
      op0 = 7'($urandom); op1 = 7'($urandom); #1;
      checks += 2;
      if (ent0 !== shadow[op0]) begin failures++; $display("FAIL read0 op %0d", op0); end
      if (ent1 !== shadow[op1]) begin failures++; $display("FAIL read1 op %0d", op1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
