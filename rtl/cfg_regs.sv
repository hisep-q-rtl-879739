// cfg_regs: configuration registers written by the host before a run.
//
// Word 0 holds the program start address. A write to word 1 programs one
// entry of the gate-operation lookup table: bits [22:16] are the gate
// operation, bit 8 marks it as a measurement and bits [7:0] are its
// micro-code; the table write pulse is issued in the same cycle. Word 1
// reads back the last table write. Reads return data one cycle after the
// request. The register layout is this design's choice.
module cfg_regs
  import hisepq_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  bus_req_t        bus_req,
  output logic [31:0]     bus_rdata,
  output logic [PC_W-1:0] start_pc,
  output logic            lut_we,
  output logic [OP_W-1:0] lut_addr,
  output lut_ent_t        lut_data
);
  logic [31:0] last_lut;
  logic        sel;
  assign sel = bus_req.valid && bus_req.sel == SL_CFG;

  assign lut_we   = sel && bus_req.we && bus_req.addr == 12'd1;
  assign lut_addr = bus_req.wdata[22:16];
  assign lut_data = lut_ent_t'(bus_req.wdata[8:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_pc  <= '0;
      last_lut  <= '0;
      bus_rdata <= '0;
    end else if (sel) begin
      if (bus_req.we) begin
        if (bus_req.addr == 12'd0) start_pc <= bus_req.wdata[PC_W-1:0];
        if (bus_req.addr == 12'd1) last_lut <= bus_req.wdata;
      end
      unique case (bus_req.addr)
        12'd0:   bus_rdata <= 32'(start_pc);
        12'd1:   bus_rdata <= last_lut;
        default: bus_rdata <= '0;
      endcase
    end
  end
endmodule
