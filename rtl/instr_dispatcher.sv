// instr_dispatcher: instruction fetch and hand-off.
//
// Fetches the program from PRAM starting at start_pc when `start` pulses.
// Short instructions are one 32-bit word. SMSOL and SITOL are 128-bit long
// instructions stored as four consecutive words, the first holding bits
// 127:96 (the word order is this design's choice); the dispatcher recognises
// them from the opcode of the first word and gathers the other three.
// The assembled instruction is held on `instr` with instr_valid until the
// execute side (classical unit or quantum decoder, chosen by the
// `is_quantum` output) accepts it with instr_ready. It then continues at
// redirect_pc if `redirect` is high in that cycle, else at the next
// instruction. `halt` (END accepted) or `err_stop` (error) stop fetching.
//
// Timing: the PRAM read is synchronous. After an instruction is accepted
// the next one is requested, captured and then offered, so a short
// instruction is offered 3 cycles after its predecessor was accepted and a
// long one 6 cycles after. There is no overlap between fetch and execute.
module instr_dispatcher
  import hisepq_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [PC_W-1:0] start_pc,
  output logic [PC_W-1:0] fetch_addr,
  input  logic [31:0]     fetch_data,
  output instr_t          instr,
  output logic            instr_valid,
  output logic            is_quantum,
  input  logic            instr_ready,
  input  logic            redirect,
  input  logic [PC_W-1:0] redirect_pc,
  input  logic            halt,
  input  logic            err_stop,
  output logic            running
);
  typedef enum logic [1:0] {S_HALT, S_REQ, S_CAP, S_PRESENT} state_e;
  state_e          state;
  logic [PC_W-1:0] pc;
  logic [1:0]      k;            // words of a long instruction captured
  logic            first_long;

  assign first_long = is_long_word(fetch_data);
  assign running    = (state != S_HALT);
  assign instr_valid = (state == S_PRESENT);
  assign is_quantum  = instr.is_long || is_quantum_word(instr.bits[31:0]);

  always_comb begin
    fetch_addr = pc;
    if (state == S_CAP) begin
      if (k == 2'd0) fetch_addr = pc + PC_W'(1);
      else           fetch_addr = pc + PC_W'(k) + PC_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HALT;
      pc    <= '0;
      k     <= '0;
      instr <= '0;
    end else if (start) begin
      state <= S_REQ;
      pc    <= start_pc;
    end else if (err_stop) begin
      state <= S_HALT;
    end else begin
      unique case (state)
        S_HALT: ;
        S_REQ: begin
          state <= S_CAP;
          k     <= '0;
        end
        S_CAP: begin
          if (k == 2'd0) begin
            instr.pc <= pc;
            if (first_long) begin
              instr.is_long       <= 1'b1;
              instr.bits[127:96]  <= fetch_data;
              k                   <= 2'd1;
            end else begin
              instr.is_long <= 1'b0;
              instr.bits    <= {96'd0, fetch_data};
              state         <= S_PRESENT;
            end
          end else begin
            instr.bits[127 - 32*int'(k) -: 32] <= fetch_data;
            k <= k + 1'b1;
            if (k == 2'd3) state <= S_PRESENT;
          end
        end
        S_PRESENT: begin
          if (instr_ready) begin
            if (halt) state <= S_HALT;
            else begin
              state <= S_REQ;
              if (redirect)          pc <= redirect_pc;
              else if (instr.is_long) pc <= pc + PC_W'(4);
              else                   pc <= pc + PC_W'(1);
            end
          end
        end
        default: state <= S_HALT;
      endcase
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n || start || err_stop)
                             instr_valid && !instr_ready |=> instr_valid && $stable(instr));
endmodule
