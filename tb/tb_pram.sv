// tb_pram: host writes random words through the register bus, then reads
// them back on the bus port and on the fetch port (one-cycle latency);
// requests for other slaves must not write.
module tb_pram;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  bus_req_t bus_req;
  logic [31:0] bus_rdata, fetch_data;
  logic [PC_W-1:0] fetch_addr;
  logic [31:0] shadow [256];
  always #5 clk = ~clk;

  pram dut (.clk, .bus_req, .bus_rdata, .fetch_addr, .fetch_data);

  initial begin
    bus_req = '0; fetch_addr = '0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      shadow[i] = $urandom;
      bus_req = '{valid: 1'b1, we: 1'b1, sel: SL_PRAM, addr: 12'(i), wdata: shadow[i]};
    end
    // a write to another slave at the same address must not land here
    @(negedge clk); bus_req = '{valid: 1'b1, we: 1'b1, sel: SL_DRAM, addr: 12'd5, wdata: 32'hFFFF_FFFF};
    @(negedge clk); bus_req = '0;
    for (int it = 0; it < 500; it++) begin
      int a, b;
      a = $urandom_range(0, 255); b = $urandom_range(0, 255);
      @(negedge clk);
      fetch_addr = PC_W'(a);
      bus_req = '{valid: 1'b1, we: 1'b0, sel: SL_PRAM, addr: 12'(b), wdata: 32'd0};
      @(negedge clk);
      bus_req = '0;
      checks += 2;
      if (fetch_data !== shadow[a]) begin failures++; $display("FAIL fetch %0d", a); end
      if (bus_rdata !== shadow[b])  begin failures++; $display("FAIL bus read %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
