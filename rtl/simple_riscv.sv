// simple_riscv: classical execution unit of the hybrid core.
//
// A small RISC-style unit that executes the auxiliary classical
// instructions handed over by the instruction dispatcher: AND/OR/XOR/ADD/SUB
// on 32 general-purpose 32-bit registers, CMP (sets the comparison flags),
// BR on a flag and J (PC-relative, in words, from the branch itself), FBR
// (flag to register), LDI/LDUI/LW/SW, FMR (one qubit's latest measurement
// result into a register), SRA (accumulate the measurement vector in the
// histogram), FHR (write the top-M histogram entries to data RAM from
// address Rt) and END.
//
// Timing: most instructions complete in the cycle they are offered. LW
// takes two cycles (synchronous data RAM). FMR Rd, Qi waits only while
// qubit i still has a measurement outstanding (`meas_busy[i]`: queued, or
// issued with its result not back yet), so a branch on a result can follow
// in the next cycle. SRA waits until the whole quantum side is idle
// (`q_idle`) so that it sees the complete shot; SRA and FHR also wait for
// the histogram's sorter. FHR then writes
// one word per cycle: for each of the M entries, ceil(NUM_QUBITS/32) state
// words, least significant first, and one count word (zeros for an empty entry). These waits, the
// instruction encodings and the register count are this design's choices.
// A second read port (qrs_idx/qrs_val) lets the quantum decoder read a
// register for QWAITR.
module simple_riscv
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100,
  parameter int unsigned M          = 4,
  parameter int unsigned CW         = 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  instr_t                instr,
  input  logic                  valid,       // a classical instruction is offered
  output logic                  ready,
  output logic                  redirect,
  output logic [PC_W-1:0]       redirect_pc,
  output logic                  halt,
  // data RAM port
  output logic                  dram_we,
  output logic [DADDR_W-1:0]    dram_addr,
  output logic [31:0]           dram_wdata,
  input  logic [31:0]           dram_rdata,
  // measurement results and quantum-side state
  input  logic [NUM_QUBITS-1:0] meas_state,
  input  logic                  q_idle,
  input  logic [NUM_QUBITS-1:0] meas_busy,
  // histogram
  output logic                  hist_sra,
  input  logic                  hist_busy,
  input  logic [NUM_QUBITS-1:0] top_state [M],
  input  logic [CW-1:0]         top_cnt   [M],
  input  logic [M-1:0]          top_valid,
  // register read port for QWAITR
  input  logic [4:0]            qrs_idx,
  output logic [31:0]           qrs_val
);
  localparam int unsigned SW  = (NUM_QUBITS + 31) / 32;   // state words per entry
  localparam int unsigned EW  = SW + 1;                   // words per entry
  localparam int unsigned FHW = M * EW;                   // words written by FHR

  logic [31:0] gpr [32];
  logic [15:0] flags;
  logic [31:0] w;
  opcode_e     opc;
  logic [4:0]  f_rd, f_rs, f_rt, f_rs_alu, f_rt_alu;
  logic [31:0] rs_v, rt_v, rt_m;      // rt_m: base register of LW/SW

  typedef enum logic [1:0] {X_IDLE, X_LW, X_FHR} xstate_e;
  xstate_e     xs;
  logic [15:0] fhr_k;
  logic [DADDR_W-1:0] fhr_base;

  assign w        = instr.bits[31:0];
  assign opc      = opcode_e'(w[30:25]);
  assign f_rd     = w[24:20];
  assign f_rs     = w[19:15];
  assign f_rt     = w[14:10];
  assign f_rs_alu = w[19:15];
  assign f_rt_alu = w[14:10];
  assign rs_v     = gpr[f_rs_alu];
  assign rt_v     = gpr[f_rt_alu];
  assign rt_m     = gpr[w[19:15]];
  assign qrs_val  = gpr[qrs_idx];

  // comparison flags of rs against rt
  function automatic logic [15:0] cmp_flags(input logic [31:0] a, input logic [31:0] b);
    logic [15:0] f;
    f = '0;
    f[FL_ALWAYS] = 1'b1;
    f[FL_NEVER]  = 1'b0;
    f[FL_EQ]     = (a == b);
    f[FL_NE]     = (a != b);
    f[FL_LT]     = ($signed(a) <  $signed(b));
    f[FL_GE]     = ($signed(a) >= $signed(b));
    f[FL_LTU]    = (a <  b);
    f[FL_GEU]    = (a >= b);
    return f;
  endfunction

  // FHR word k: entry k / EW, word k % EW
  logic [32*SW-1:0] fhr_state;
  logic [31:0]      fhr_word;
  int unsigned      fhr_e, fhr_j;
  always_comb begin
    fhr_e     = 32'(fhr_k) / EW;
    fhr_j     = 32'(fhr_k) % EW;
    fhr_state = '0;
    fhr_word  = '0;
    if (fhr_e < M && top_valid[fhr_e]) begin
      fhr_state = (32*SW)'(top_state[fhr_e]);
      if (fhr_j < SW) fhr_word = fhr_state[32*fhr_j +: 32];
      else            fhr_word = 32'(top_cnt[fhr_e]);
    end
  end

  logic        wb_en;
  logic [31:0] wb_val;
  logic        flag_we;

  always_comb begin
    ready       = 1'b0;
    redirect    = 1'b0;
    redirect_pc = instr.pc;
    halt        = 1'b0;
    dram_we     = 1'b0;
    dram_addr   = DADDR_W'(rt_m + {{17{w[14]}}, w[14:0]});
    dram_wdata  = gpr[f_rd];
    hist_sra    = 1'b0;
    wb_en       = 1'b0;
    wb_val      = '0;
    flag_we     = 1'b0;
    if (xs == X_LW) begin
      ready  = 1'b1;
      wb_en  = 1'b1;
      wb_val = dram_rdata;
    end else if (xs == X_FHR) begin
      dram_we    = 1'b1;
      dram_addr  = fhr_base + DADDR_W'(fhr_k);
      dram_wdata = fhr_word;
      ready      = (32'(fhr_k) == FHW - 1);
    end else if (valid) begin
      unique case (opc)
        OPC_NOP: ready = 1'b1;
        OPC_CMP: begin ready = 1'b1; flag_we = 1'b1; end
        OPC_BR: begin
          ready       = 1'b1;
          redirect    = flags[w[24:21]];
          redirect_pc = instr.pc + PC_W'(w[20:0]);
        end
        OPC_FBR: begin
          ready = 1'b1; wb_en = 1'b1; wb_val = 32'(flags[w[19:16]]);
        end
        OPC_LDI:  begin ready = 1'b1; wb_en = 1'b1; wb_val = {{12{w[19]}}, w[19:0]}; end
        OPC_LDUI: begin ready = 1'b1; wb_en = 1'b1; wb_val = {w[11:0], gpr[f_rd][19:0]}; end
        OPC_LW:   ready = 1'b0;                      // address this cycle, data next
        OPC_SW:   begin ready = 1'b1; dram_we = 1'b1; end
        OPC_FMR: begin
          // qubit selection by shift: an index beyond NUM_QUBITS reads 0, never waits
          ready  = !(|(meas_busy & (NUM_QUBITS'(1) << w[10:0])));
          wb_en  = ready;
          wb_val = 32'(|(meas_state & (NUM_QUBITS'(1) << w[10:0])));
        end
        OPC_AND: begin ready = 1'b1; wb_en = 1'b1; wb_val = rs_v & rt_v; end
        OPC_OR:  begin ready = 1'b1; wb_en = 1'b1; wb_val = rs_v | rt_v; end
        OPC_XOR: begin ready = 1'b1; wb_en = 1'b1; wb_val = rs_v ^ rt_v; end
        OPC_ADD: begin ready = 1'b1; wb_en = 1'b1; wb_val = rs_v + rt_v; end
        OPC_SUB: begin ready = 1'b1; wb_en = 1'b1; wb_val = rs_v - rt_v; end
        OPC_J: begin
          ready       = 1'b1;
          redirect    = 1'b1;
          redirect_pc = instr.pc + PC_W'(w[24:0]);
        end
        OPC_END: begin ready = 1'b1; halt = 1'b1; end
        OPC_SRA: begin
          ready    = q_idle && !hist_busy;
          hist_sra = q_idle && !hist_busy;
        end
        OPC_FHR: ready = 1'b0;                       // starts the write sequence
        default: ready = 1'b1;                       // unknown opcode: no operation
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs       <= X_IDLE;
      fhr_k    <= '0;
      fhr_base <= '0;
      flags    <= 16'h0001;
      for (int i = 0; i < 32; i++) gpr[i] <= '0;
    end else if (start) begin
      xs    <= X_IDLE;
      flags <= 16'h0001;
    end else begin
      if (wb_en)   gpr[f_rd] <= wb_val;
      if (flag_we) flags <= cmp_flags(gpr[f_rs], gpr[f_rt]);
      unique case (xs)
        X_IDLE: begin
          if (valid && opc == OPC_LW) xs <= X_LW;
          if (valid && opc == OPC_FHR && !hist_busy) begin
            xs       <= X_FHR;
            fhr_k    <= '0;
            fhr_base <= DADDR_W'(gpr[w[19:15]]);
          end
        end
        X_LW:  xs <= X_IDLE;
        X_FHR: begin
          if (32'(fhr_k) == FHW - 1) xs <= X_IDLE;
          else fhr_k <= fhr_k + 1'b1;
        end
        default: xs <= X_IDLE;
      endcase
    end
  end
endmodule
