// csr_regs: control and status register of the core.
//
// Writing 1 to bit 0 of word 0 sends a one-cycle start pulse to the core.
// Reading word 0 returns the core status: bit 0 busy, bit 1 done (END
// reached and every queued operation issued), bit 2 operation conflict,
// bit 3 missed time point, bit 4 histogram overflow. Word 1 reads the
// central clock. Reads return data one cycle after the request. The layout
// is this design's choice.
module csr_regs
  import hisepq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          bus_req,
  output logic [31:0]       bus_rdata,
  output logic              start,
  input  core_status_t      status,
  input  logic [TIME_W-1:0] now
);
  logic sel;
  assign sel = bus_req.valid && bus_req.sel == SL_CSR;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start     <= 1'b0;
      bus_rdata <= '0;
    end else begin
      start <= sel && bus_req.we && bus_req.addr == 12'd0 && bus_req.wdata[0];
      if (sel) begin
        unique case (bus_req.addr)
          12'd0:   bus_rdata <= {27'd0, status.hist_overflow, status.err_miss,
                                 status.err_conflict, status.done, status.busy};
          12'd1:   bus_rdata <= 32'(now);
          default: bus_rdata <= '0;
        endcase
      end
    end
  end
endmodule
