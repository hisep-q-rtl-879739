// dram: data RAM shared by the host and the core.
//
// A true dual-port memory of 32-bit words. The core uses port B for LW/SW
// and for FHR, which writes the top-M histogram results here; the host reads
// them (and can preload data) through the register bus on port A. Reads on
// both ports are synchronous (one cycle). Depth (1024 words) is this
// design's choice.
module dram
  import hisepq_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic               clk,
  input  bus_req_t           bus_req,
  output logic [31:0]        bus_rdata,
  input  logic               core_we,
  input  logic [DADDR_W-1:0] core_addr,
  input  logic [31:0]        core_wdata,
  output logic [31:0]        core_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (bus_req.valid && bus_req.sel == SL_DRAM) begin
      if (bus_req.we) mem[bus_req.addr[AW-1:0]] <= bus_req.wdata;
      bus_rdata <= mem[bus_req.addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk) begin
    if (core_we) mem[core_addr[AW-1:0]] <= core_wdata;
    core_rdata <= mem[core_addr[AW-1:0]];
  end
endmodule
