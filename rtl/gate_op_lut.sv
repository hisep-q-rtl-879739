// gate_op_lut: gate-operation lookup table.
//
// Maps the 7-bit gate operation of each Q.Bundle lane to the micro-code that
// is sent to the signal-generation side, plus a flag that marks measurement
// operations (used to track outstanding read-outs). Two combinational read
// ports serve the two VLIW lanes; one write port, driven by the
// configuration registers, reprograms an entry. After reset entry i holds
// micro-code i, and entry 127 is flagged as a measurement. Table size,
// micro-code width and reset contents are this design's choices.
module gate_op_lut
  import hisepq_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [OP_W-1:0] waddr,
  input  lut_ent_t        wdata,
  input  logic [OP_W-1:0] op0,
  input  logic [OP_W-1:0] op1,
  output lut_ent_t        ent0,
  output lut_ent_t        ent1
);
  localparam int unsigned N = 2**OP_W;
  lut_ent_t tbl [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        tbl[i].micro <= MICRO_W'(i);
        tbl[i].meas  <= (i == N-1);
      end
    end else if (we) begin
      tbl[waddr] <= wdata;
    end
  end

  assign ent0 = tbl[op0];
  assign ent1 = tbl[op1];
endmodule
