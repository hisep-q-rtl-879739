// tb_dram: random mixed writes and reads from the host port and the core
// port (never the same word in the same cycle), compared with a shadow
// memory; both ports have one-cycle read latency.
module tb_dram;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  bus_req_t bus_req;
  logic [31:0] bus_rdata, core_rdata, core_wdata;
  logic core_we;
  logic [DADDR_W-1:0] core_addr;
  logic [31:0] shadow [1024];
  always #5 clk = ~clk;

  dram dut (.clk, .bus_req, .bus_rdata, .core_we, .core_addr, .core_wdata, .core_rdata);

  initial begin
    bus_req = '0; core_we = 0; core_addr = '0; core_wdata = '0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      shadow[i] = $urandom;
      core_we = 1; core_addr = DADDR_W'(i); core_wdata = shadow[i];
    end
    @(negedge clk); core_we = 0;
    for (int it = 0; it < 2000; it++) begin
      int a, b;
      logic bw, cw;
      logic [31:0] bd, cd;
      a = $urandom_range(0, 1023);
      do b = $urandom_range(0, 1023); while (b == a);
      bw = 1'($urandom); cw = 1'($urandom); bd = $urandom; cd = $urandom;
      @(negedge clk);
      bus_req = '{valid: 1'b1, we: bw, sel: SL_DRAM, addr: 12'(a), wdata: bd};
      core_we = cw; core_addr = DADDR_W'(b); core_wdata = cd;
      @(negedge clk);
      bus_req = '0; core_we = 0;
      checks += 2;
      if (bus_rdata !== shadow[a])  begin failures++; $display("FAIL host read %0d", a); end
      if (core_rdata !== shadow[b]) begin failures++; $display("FAIL core read %0d", b); end
      if (bw) shadow[a] = bd;
      if (cw) shadow[b] = cd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
