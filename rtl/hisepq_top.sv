// hisepq_top: programmable-logic top of the quantum control processor.
//
// The host processor reaches the design through one AXI4-Lite slave port.
// Behind it sit four memory-mapped slaves: the control/status register
// (start, busy/done/error flags, central clock), the configuration registers
// (start address, gate-op LUT programming), the program RAM and the data
// RAM. The hybrid core runs the program from PRAM, sends one micro-code
// channel per qubit towards the signal-generation side (q_valid/q_micro/
// q_role, valid in the cycle the operation's time point is reached) and takes
// read-out results back (ro_valid/ro_bit). end_irq is high while the
// program has finished and all its operations have been issued; results of
// FHR are then in data RAM for the host.
//
// Host address map (byte addresses): 0x0000 CSR, 0x4000 CFG, 0x8000 PRAM,
// 0xC000 DRAM. The analog converters and the host processor are outside
// this module.
module hisepq_top
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100,
  parameter int unsigned T          = 100,
  parameter int unsigned M          = 4,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned PRAM_DEPTH = 4096,
  parameter int unsigned DRAM_DEPTH = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [15:0]           s_axil_awaddr,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  input  logic [31:0]           s_axil_wdata,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  output logic [1:0]            s_axil_bresp,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  input  logic [15:0]           s_axil_araddr,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  output logic [NUM_QUBITS-1:0] q_valid,
  output logic [MICRO_W-1:0]    q_micro [NUM_QUBITS],
  output logic [1:0]            q_role  [NUM_QUBITS],
  input  logic [NUM_QUBITS-1:0] ro_valid,
  input  logic [NUM_QUBITS-1:0] ro_bit,
  output logic                  end_irq
);
  bus_req_t          req;
  logic [31:0]       rdata [4];
  logic              start, lut_we;
  logic [PC_W-1:0]   start_pc, pram_addr;
  logic [OP_W-1:0]   lut_addr;
  lut_ent_t          lut_data;
  logic [31:0]       pram_data, dram_rdata, dram_wdata;
  logic              dram_we;
  logic [DADDR_W-1:0] dram_addr;
  core_status_t      status;
  logic [TIME_W-1:0] now;

  bus_interface #(.ADDR_W(16)) u_bus (
    .clk, .rst_n,
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready,
    .s_axil_wdata, .s_axil_bvalid, .s_axil_bready, .s_axil_bresp,
    .s_axil_arvalid, .s_axil_arready, .s_axil_araddr, .s_axil_rvalid, .s_axil_rready,
    .s_axil_rdata, .s_axil_rresp, .req, .rdata
  );

  csr_regs u_csr (.clk, .rst_n, .bus_req (req), .bus_rdata (rdata[SL_CSR]), .start, .status, .now);

  cfg_regs u_cfg (.clk, .rst_n, .bus_req (req), .bus_rdata (rdata[SL_CFG]),
                  .start_pc, .lut_we, .lut_addr, .lut_data);

  pram #(.DEPTH(PRAM_DEPTH)) u_pram (.clk, .bus_req (req), .bus_rdata (rdata[SL_PRAM]),
                                     .fetch_addr (pram_addr), .fetch_data (pram_data));

  dram #(.DEPTH(DRAM_DEPTH)) u_dram (.clk, .bus_req (req), .bus_rdata (rdata[SL_DRAM]),
                                     .core_we (dram_we), .core_addr (dram_addr),
                                     .core_wdata (dram_wdata), .core_rdata (dram_rdata));

  hybrid_core #(.NUM_QUBITS(NUM_QUBITS), .T(T), .M(M), .FIFO_DEPTH(FIFO_DEPTH)) u_core (
    .clk, .rst_n, .start, .start_pc, .lut_we, .lut_addr, .lut_data,
    .pram_addr, .pram_data, .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .q_valid, .q_micro, .q_role, .ro_valid, .ro_bit, .status, .now
  );

  assign end_irq = status.done;
endmodule
