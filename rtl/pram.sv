// pram: program RAM.
//
// The host writes compiled instruction words through the register bus; the
// instruction dispatcher reads one 32-bit word per cycle on its own port.
// Both ports have synchronous reads: data appears the cycle after the
// address. The host can read back what it wrote. Depth is this design's
// choice (4096 words); the memory is a plain array so that it maps onto
// block RAM.
module pram
  import hisepq_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic            clk,
  input  bus_req_t        bus_req,
  output logic [31:0]     bus_rdata,
  input  logic [PC_W-1:0] fetch_addr,
  output logic [31:0]     fetch_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (bus_req.valid && bus_req.sel == SL_PRAM) begin
      if (bus_req.we) mem[bus_req.addr[AW-1:0]] <= bus_req.wdata;
      bus_rdata <= mem[bus_req.addr[AW-1:0]];
    end
    fetch_data <= mem[fetch_addr[AW-1:0]];
  end
endmodule
