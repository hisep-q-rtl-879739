// tb_bus_interface: drives random AXI4-Lite writes and reads (AW and W
// offered in either order, random ready delays) against four model slaves
// with one-cycle read latency. Checks that every transfer appears once on
// the register bus with the right slave, word address and data, and that
// read data from the selected slave comes back on the R channel.
module tb_bus_interface;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [15:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata_o;
  logic [1:0] bresp, rresp;
  bus_req_t req;
  logic [31:0] rdata [4];
  logic [31:0] mem [4][64];
  int nreq = 0;
  always #5 clk = ~clk;

  bus_interface dut (.clk, .rst_n,
    .s_axil_awvalid (awvalid), .s_axil_awready (awready), .s_axil_awaddr (awaddr),
    .s_axil_wvalid (wvalid), .s_axil_wready (wready), .s_axil_wdata (wdata),
    .s_axil_bvalid (bvalid), .s_axil_bready (bready), .s_axil_bresp (bresp),
    .s_axil_arvalid (arvalid), .s_axil_arready (arready), .s_axil_araddr (araddr),
    .s_axil_rvalid (rvalid), .s_axil_rready (rready), .s_axil_rdata (rdata_o), .s_axil_rresp (rresp),
    .req, .rdata);

  // model slaves
  always_ff @(posedge clk) begin
    if (req.valid) begin
      nreq <= nreq + 1;
      if (req.we) mem[req.sel][req.addr[5:0]] <= req.wdata;
      for (int s = 0; s < 4; s++) rdata[s] <= (s == int'(req.sel)) ? mem[s][req.addr[5:0]] : 32'hDEAD0000 | 32'(s);
    end
  end

  logic [31:0] shadow [4][64];

  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    int n0;
    n0 = nreq;
    @(negedge clk);
    if ($urandom_range(0, 1)) begin awvalid = 1; awaddr = a; repeat ($urandom_range(0, 2)) @(negedge clk); wvalid = 1; wdata = d; end
    else begin wvalid = 1; wdata = d; repeat ($urandom_range(0, 2)) @(negedge clk); awvalid = 1; awaddr = a; end
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    bready = 1;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
    checks++;
    if (nreq != n0 + 1) begin failures++; $display("FAIL write produced %0d requests", nreq - n0); end
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata_o;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    for (int s = 0; s < 4; s++) for (int i = 0; i < 64; i++) begin mem[s][i] = 0; shadow[s][i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int s, i;
      logic [31:0] d;
      s = $urandom_range(0, 3); i = $urandom_range(0, 63);
      if ($urandom_range(0, 1)) begin
        d = $urandom;
        axi_write(16'((s << 14) | (i << 2)), d);
        shadow[s][i] = d;
        checks++;
        if (mem[s][i] !== d) begin failures++; $display("FAIL write slave %0d word %0d", s, i); end
      end else begin
        axi_read(16'((s << 14) | (i << 2)), d);
        checks++;
        if (d !== shadow[s][i]) begin failures++; $display("FAIL read slave %0d word %0d: %h vs %h", s, i, d, shadow[s][i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
