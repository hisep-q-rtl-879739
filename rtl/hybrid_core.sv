// hybrid_core: the hybrid classical/quantum processing core.
//
// Classical control: the instruction dispatcher fetches from PRAM and hands
// each instruction either to the classical unit (simple_riscv) or to the
// quantum decoder.
//
// Quantum control, two VLIW lanes wide: the quantum decoder writes target
// registers and, for each Q.Bundle, gets the time point from the time
// manager, the lanes' micro-codes from the gate-op LUT and the lanes'
// registers from the Q-register file. Offset control and the register
// decoder turn each register into per-qubit 2-bit indicators. One operation
// word per lane enters op buffers 1 and 2; the Q-operation dispatcher moves
// them into the per-qubit timed FIFOs, whose time controls issue each
// micro-code to the signal side in the cycle its time point comes up.
// Read-out results land in the Q-measure register, which FMR reads and whose
// vector SRA accumulates in the onboard histogram; FHR writes the top-M
// list to data RAM.
//
// `start` clears the quantum state (clock, queues, measurement register,
// histogram, error flags) and starts fetching at start_pc. `status.done`
// rises once END has been executed and every queued operation has been
// issued; a conflict (two operations on one qubit at one time point) stops
// the core with status.err_conflict. Micro-code outputs are combinational
// from the FIFO heads in the cycle of issue.
//
// Feedback: FMR on qubit i waits only while meas_busy[i] is set, that is
// while a measurement of that qubit is counted in its timed FIFO, has been
// issued without its result back, or may still sit in an op buffer; SRA
// waits for the whole quantum side (q_idle). The structure follows the
// published block diagram; the status flags, these wait rules and the
// per-qubit measurement counters are this design's own. The time manager's
// current time point `tp` is left unconnected here; only tp_next is used.
module hybrid_core
  import hisepq_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 100,
  parameter int unsigned T          = 100,
  parameter int unsigned M          = 4,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned OB_DEPTH   = 4,
  parameter int unsigned LEAD       = 8,
  localparam int unsigned CW        = $clog2(T + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [PC_W-1:0]       start_pc,
  // gate-op LUT programming
  input  logic                  lut_we,
  input  logic [OP_W-1:0]       lut_addr,
  input  lut_ent_t              lut_data,
  // program RAM fetch port
  output logic [PC_W-1:0]       pram_addr,
  input  logic [31:0]           pram_data,
  // data RAM port
  output logic                  dram_we,
  output logic [DADDR_W-1:0]    dram_addr,
  output logic [31:0]           dram_wdata,
  input  logic [31:0]           dram_rdata,
  // micro-codes to the signal-generation side, one channel per qubit
  output logic [NUM_QUBITS-1:0] q_valid,
  output logic [MICRO_W-1:0]    q_micro [NUM_QUBITS],
  output logic [1:0]            q_role  [NUM_QUBITS],
  // read-out
  input  logic [NUM_QUBITS-1:0] ro_valid,
  input  logic [NUM_QUBITS-1:0] ro_bit,
  // status
  output core_status_t          status,
  output logic [TIME_W-1:0]     now
);
  // ---------------------------------------------------------- classical
  instr_t          instr;
  logic            instr_valid, is_q, instr_ready;
  logic            c_ready, q_ready, redirect, halt, running;
  logic [PC_W-1:0] redirect_pc;
  logic            conflict;
  logic            q_idle, meas_pending;
  logic [NUM_QUBITS-1:0] meas_state, meas_pend_q, meas_busy;
  logic            hist_sra, hist_busy, hist_ovf;
  logic [NUM_QUBITS-1:0] top_state [M];
  logic [CW-1:0]   top_cnt [M];
  logic [M-1:0]    top_valid;
  logic [4:0]      qrs_idx;
  logic [31:0]     qrs_val;
  logic            ended;

  assign instr_ready = is_q ? q_ready : c_ready;

  instr_dispatcher u_disp (
    .clk, .rst_n, .start, .start_pc,
    .fetch_addr (pram_addr), .fetch_data (pram_data),
    .instr, .instr_valid, .is_quantum (is_q), .instr_ready,
    .redirect, .redirect_pc, .halt, .err_stop (conflict), .running
  );

  simple_riscv #(.NUM_QUBITS(NUM_QUBITS), .M(M), .CW(CW)) u_cpu (
    .clk, .rst_n, .start, .instr, .valid (instr_valid && !is_q), .ready (c_ready),
    .redirect, .redirect_pc, .halt,
    .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .meas_state, .q_idle, .meas_busy,
    .hist_sra, .hist_busy, .top_state, .top_cnt, .top_valid,
    .qrs_idx, .qrs_val
  );

  // ---------------------------------------------------------- quantum
  logic              tm_adv;
  logic [TIME_W-1:0] tm_interval, tp, tp_next;
  qreg_wr_t          qreg_wr;
  qkind_e            rd_kind [2];
  logic [4:0]        rd_idx  [2];
  qreg_t             rd_data [2];
  logic [OP_W-1:0]   lut_op  [2];
  lut_ent_t          lut_ent [2];
  logic              ob_push;
  logic [1:0]        lane_used;
  logic              ob_full [2], ob_empty [2];
  logic [TIME_W-1:0] ob_t [2];
  lut_ent_t          ob_ent [2];
  logic [2*NUM_QUBITS-1:0] ob_ind [2];
  logic [2*NUM_QUBITS-1:0] lane_ind [2];
  logic [QIDX_W-1:0] base [2];
  logic              ob_pop;

  quantum_decoder u_qdec (
    .instr, .valid (instr_valid && is_q), .ready (q_ready),
    .ob_full (ob_full[0] || ob_full[1]),
    .qrs_idx, .qrs_val,
    .tm_adv, .tm_interval, .qreg_wr, .rd_kind, .rd_idx, .lut_op,
    .ob_push, .lane_used
  );

  time_manager #(.LEAD(LEAD)) u_tm (
    .clk, .rst_n, .start, .adv_valid (tm_adv), .adv_interval (tm_interval),
    .now, .tp, .tp_next
  );

  gate_op_lut u_lut (
    .clk, .rst_n, .we (lut_we), .waddr (lut_addr), .wdata (lut_data),
    .op0 (lut_op[0]), .op1 (lut_op[1]), .ent0 (lut_ent[0]), .ent1 (lut_ent[1])
  );

  qreg_file u_qrf (.clk, .rst_n, .wr (qreg_wr), .rd_kind, .rd_idx, .rd_data);

  for (genvar l = 0; l < 2; l++) begin : g_lane
    offset_control u_ofs (.kind (rd_kind[l]), .offset (rd_data[l].offset), .base (base[l]));

    qreg_decoder #(.NUM_QUBITS(NUM_QUBITS)) u_qrd (
      .kind (rd_kind[l]), .pay (rd_data[l].pay), .base (base[l]), .ind (lane_ind[l])
    );

    op_buffer #(.NUM_QUBITS(NUM_QUBITS), .DEPTH(OB_DEPTH)) u_ob (
      .clk, .rst_n, .clr (start), .push (ob_push),
      .din_t (tp_next), .din_ent (lut_ent[l]),
      .din_ind (lane_used[l] ? lane_ind[l] : '0),
      .pop (ob_pop), .dout_t (ob_t[l]), .dout_ent (ob_ent[l]), .dout_ind (ob_ind[l]),
      .empty (ob_empty[l]), .full (ob_full[l])
    );
  end

  logic [NUM_QUBITS-1:0] f_push, f_full, f_empty, f_miss, f_meas;
  tq_ent_t               f_din [NUM_QUBITS];

  qop_dispatcher #(.NUM_QUBITS(NUM_QUBITS)) u_qdisp (
    .clk, .rst_n, .start, .ob_empty, .ob_t, .ob_ent, .ob_ind, .ob_pop,
    .fifo_push (f_push), .fifo_din (f_din), .fifo_full (f_full), .conflict
  );

  for (genvar q = 0; q < NUM_QUBITS; q++) begin : g_qubit
    timed_fifo #(.DEPTH(FIFO_DEPTH)) u_tf (
      .clk, .rst_n, .clr (start), .push (f_push[q]), .din (f_din[q]),
      .full (f_full[q]), .empty (f_empty[q]), .now,
      .issue (q_valid[q]), .issue_meas (f_meas[q]), .issue_role (q_role[q]),
      .issue_micro (q_micro[q]), .miss (f_miss[q])
    );
  end

  qmeasure_reg #(.NUM_QUBITS(NUM_QUBITS)) u_qmr (
    .clk, .rst_n, .start, .meas_issue (f_meas), .ro_valid, .ro_bit,
    .state (meas_state), .pending (meas_pending), .pending_q (meas_pend_q)
  );

  // Per-qubit count of measurement entries waiting in the timed FIFO. An
  // empty FIFO holds none, which also clears a count left by a dropped
  // (late) entry.
  localparam int unsigned MCW = $clog2(FIFO_DEPTH + 2);
  logic [MCW-1:0]        mq_cnt [NUM_QUBITS];
  for (genvar q = 0; q < NUM_QUBITS; q++) begin : g_mcnt
    logic push_m;
    assign push_m = f_push[q] && f_din[q].meas;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                        mq_cnt[q] <= '0;
      else if (start)                    mq_cnt[q] <= '0;
      else if (f_empty[q] && !push_m)    mq_cnt[q] <= '0;
      else                               mq_cnt[q] <= mq_cnt[q] + MCW'(push_m) - MCW'(f_meas[q]);
    end
    // a measurement may also still sit in an op buffer
    assign meas_busy[q] = (mq_cnt[q] != '0) || meas_pend_q[q] || !ob_empty[0] || !ob_empty[1];
  end

  onboard_histogram #(.NUM_QUBITS(NUM_QUBITS), .T(T), .M(M)) u_hist (
    .clk, .rst_n, .clear (start), .sra (hist_sra), .state (meas_state),
    .busy (hist_busy), .overflow (hist_ovf), .top_state, .top_cnt, .top_valid
  );

  assign q_idle = ob_empty[0] && ob_empty[1] && (&f_empty) && !meas_pending;

  // ---------------------------------------------------------- status
  logic miss_flag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ended     <= 1'b0;
      miss_flag <= 1'b0;
    end else if (start) begin
      ended     <= 1'b0;
      miss_flag <= 1'b0;
    end else begin
      if (instr_valid && !is_q && c_ready && halt) ended <= 1'b1;
      if (|f_miss) miss_flag <= 1'b1;
    end
  end

  assign status.busy          = running;
  assign status.done          = ended && q_idle;
  assign status.err_conflict  = conflict;
  assign status.err_miss      = miss_flag;
  assign status.hist_overflow = hist_ovf;
endmodule
