// bus_interface: AXI4-Lite slave in front of the four memory-mapped slaves.
//
// The host (processing system) reaches the program RAM, data RAM, the
// configuration registers and the control/status register through this
// port. A write is accepted once both its address and data have arrived; a
// read is accepted when no write is in progress. Each accepted transfer
// becomes a one-cycle request on the internal register bus (bus_req_t);
// the selected slave returns read data one cycle later, which is then held
// on the R channel until the host takes it. One transfer is in flight at a
// time.
//
// Address map (this design's choice): byte address bits [15:14] select
// CSR (0), CFG (1), PRAM (2) or DRAM (3); bits [13:2] are the word address.
// Responses are always OKAY.
module bus_interface
  import hisepq_pkg::*;
#(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite write address / data / response
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [31:0]       s_axil_wdata,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  // AXI4-Lite read address / data
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  // register bus
  output bus_req_t          req,
  input  logic [31:0]       rdata [4]
);

  typedef enum logic [1:0] {S_IDLE, S_RDWAIT, S_RESP_R, S_RESP_B} state_e;
  state_e      state;
  slave_e      rd_sel;

  logic do_wr, do_rd;
  assign do_wr = (state == S_IDLE) && s_axil_awvalid && s_axil_wvalid;
  assign do_rd = (state == S_IDLE) && !do_wr && s_axil_arvalid;

  assign s_axil_awready = do_wr;
  assign s_axil_wready  = do_wr;
  assign s_axil_arready = do_rd;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_bvalid  = (state == S_RESP_B);
  assign s_axil_rvalid  = (state == S_RESP_R);

  always_comb begin
    req = '0;
    if (do_wr) begin
      req.valid = 1'b1;
      req.we    = 1'b1;
      req.sel   = slave_e'(s_axil_awaddr[15:14]);
      req.addr  = s_axil_awaddr[13:2];
      req.wdata = s_axil_wdata;
    end else if (do_rd) begin
      req.valid = 1'b1;
      req.sel   = slave_e'(s_axil_araddr[15:14]);
      req.addr  = s_axil_araddr[13:2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rd_sel       <= SL_CSR;
      s_axil_rdata <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (do_wr) state <= S_RESP_B;
          else if (do_rd) begin
            state  <= S_RDWAIT;
            rd_sel <= slave_e'(s_axil_araddr[15:14]);
          end
        end
        S_RDWAIT: begin
          s_axil_rdata <= rdata[rd_sel];
          state        <= S_RESP_R;
        end
        S_RESP_R: if (s_axil_rready) state <= S_IDLE;
        S_RESP_B: if (s_axil_bready) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // A response stays valid until it is taken.
  property p_hold_r;
    @(posedge clk) disable iff (!rst_n) s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid;
  endproperty
  a_hold_r: assert property (p_hold_r);

endmodule
