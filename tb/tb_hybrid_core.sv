// tb_hybrid_core: end-to-end test of the hybrid processing core at 16 qubits.
//
// The core runs the shot program of hisepq_asm_pkg::prog_shots from a
// program-RAM model; a data-RAM model takes its loads and stores, and
// shot_checker answers every measurement and checks each issued operation
// (qubit, time, micro-code, role). After END the test compares the
// histogram written by FHR with the reference counts of the read-out
// states that were actually sent, and the feedback counter written by SW
// with the number of shots whose qubit 0 read 1. A second program puts two
// operations on one qubit in one bundle and must raise the conflict error
// and stop the core. Every mechanism the core relies on is counted from its
// internal signals and must occur at least once: long instructions, QSet
// bit writes, a non-zero register offset, dual-lane bundles, the
// time-point floor, FIFO-full back-pressure, FMR waiting for its own qubit only, SRA waiting for the
// quantum side, taken branches, histogram sorting and FHR writes.
// Parameters (16 qubits, T = 16, M = 4) are reduced for run time; the
// full-size run is tb_hisepq_top.
`timescale 1ns/1ps
module tb_hybrid_core;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;

  localparam int N = 16, TT = 16, MM = 4, SHOTS = 20;
  localparam int SW = (N + 31) / 32;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [PC_W-1:0]    pram_addr;
  logic [31:0]        pram_data;
  logic               dram_we;
  logic [DADDR_W-1:0] dram_addr;
  logic [31:0]        dram_wdata, dram_rdata;
  logic [N-1:0]       q_valid, ro_valid, ro_bit;
  logic [MICRO_W-1:0] q_micro [N];
  logic [1:0]         q_role  [N];
  core_status_t       status;
  logic [TIME_W-1:0]  now;

  hybrid_core #(.NUM_QUBITS(N), .T(TT), .M(MM)) dut (
    .clk, .rst_n, .start, .start_pc ('0),
    .lut_we (1'b0), .lut_addr ('0), .lut_data ('0),
    .pram_addr, .pram_data, .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .q_valid, .q_micro, .q_role, .ro_valid, .ro_bit, .status, .now
  );

  shot_checker #(.N(N)) chk (.clk, .rst_n (rst_n && !start), .q_valid, .q_micro, .q_role, .ro_valid, .ro_bit);

  logic [31:0] pmem [4096];
  logic [31:0] dmem [1024];
  always @(posedge clk) pram_data <= pmem[pram_addr];
  always @(posedge clk) begin
    if (dram_we) dmem[dram_addr] <= dram_wdata;
    dram_rdata <= dmem[dram_addr];
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ mechanism counters
  int n_long, n_qset, n_offset, n_dual, n_floor, n_fifo_stall, n_qwait_cpu,
      n_branch, n_sort, n_fmr_early, n_fhr_wr, n_ro;
  initial begin
    n_long = 0; n_qset = 0; n_offset = 0; n_dual = 0; n_floor = 0; n_fifo_stall = 0;
    n_qwait_cpu = 0; n_branch = 0; n_sort = 0; n_fmr_early = 0; n_fhr_wr = 0; n_ro = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.instr_valid && dut.instr_ready && dut.instr.is_long) n_long++;
    if (dut.qreg_wr.valid && dut.qreg_wr.bitwr) n_qset++;
    if (dut.ob_push && ((dut.lane_used[0] && dut.base[0] != 0) || (dut.lane_used[1] && dut.base[1] != 0))) n_offset++;
    if (dut.ob_push && dut.lane_used == 2'b11) n_dual++;
    if (dut.tm_adv && $signed(dut.tp + dut.tm_interval - dut.now - 8) < 0) n_floor++;
    if (!dut.ob_empty[0] && !dut.ob_pop && |dut.f_full) n_fifo_stall++;
    if (dut.instr_valid && !dut.is_q && !dut.c_ready &&
        (dut.u_cpu.opc == OPC_FMR || dut.u_cpu.opc == OPC_SRA)) n_qwait_cpu++;
    if (dut.redirect) n_branch++;
    if (dut.instr_valid && !dut.is_q && dut.c_ready && dut.u_cpu.opc == OPC_FMR && !dut.q_idle) n_fmr_early++;
    if (dut.hist_busy) n_sort++;
    if (dram_we && int'(dram_addr) >= RES_ADDR && int'(dram_addr) < RES_ADDR + MM*(SW+1)) n_fhr_wr++;
    n_ro += $countones(ro_valid);
  end

  task automatic load(prog_t p);
    for (int i = 0; i < 4096; i++) pmem[i] = '0;
    foreach (p[i]) pmem[i] = p[i];
  endtask

  task automatic pulse_start();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
  endtask

  int ref_sorted [$];
  int fb_ref;

  initial begin
    prog_t p;
    for (int i = 0; i < 1024; i++) dmem[i] = 32'hDEAD_0000 + i;
    p = prog_shots(N, SHOTS);
    load(p);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    pulse_start();
    wait (status.done);
    repeat (5) @(negedge clk);
    chk.finish_check(SHOTS);
    check(!status.err_conflict && !status.err_miss && !status.hist_overflow, "error flags after shot program");

    // histogram: top-M counts in descending order, states with those counts
    for (int k = 0; k < chk.NPAT; k++) if (chk.ref_cnt[k] > 0) ref_sorted.push_back(chk.ref_cnt[k]);
    ref_sorted.rsort();
    for (int e = 0; e < MM; e++) begin
      logic [31:0] cnt;
      logic [SW*32-1:0] st;
      for (int w = 0; w < SW; w++) st[32*w +: 32] = dmem[RES_ADDR + e*(SW+1) + w];
      cnt = dmem[RES_ADDR + e*(SW+1) + SW];
      if (e < ref_sorted.size()) begin
        bit found;
        found = 0;
        check(int'(cnt) == ref_sorted[e], $sformatf("histogram entry %0d count %0d, expected %0d", e, cnt, ref_sorted[e]));
        for (int k = 0; k < chk.NPAT; k++)
          if (chk.ref_cnt[k] == int'(cnt) && st == (SW*32)'(chk.pat[k])) found = 1;
        check(found, $sformatf("histogram entry %0d state %h not a state read %0d times", e, st, cnt));
      end else begin
        check(cnt == 0 && st == 0, $sformatf("histogram entry %0d should be empty", e));
      end
    end
    fb_ref = 0;
    for (int k = 1; k < chk.NPAT; k += 2) fb_ref += chk.ref_cnt[k];
    check(int'(dmem[FB_ADDR]) == fb_ref, $sformatf("feedback count %0d, expected %0d", dmem[FB_ADDR], fb_ref));
    check(n_ro == SHOTS * N, $sformatf("read-outs %0d", n_ro));

    // mechanisms
    check(n_long == 2 + 0, $sformatf("long instructions %0d", n_long));
    check(n_qset > 0, "QSet bit write never happened");
    check(n_offset > 0, "non-zero offset never used");
    check(n_dual > 0, "dual-lane bundle never happened");
    check(n_floor > 0, "time-point floor never applied");
    check(n_fifo_stall > 0, "timed-FIFO back-pressure never happened");
    check(n_qwait_cpu > 0, "FMR/SRA never waited for the quantum side");
    check(n_branch > 0, "no branch taken");
    check(n_fmr_early > 0, "FMR never completed while other measurements were outstanding");
    check(n_sort > 0, "histogram sorter never ran");
    check(n_fhr_wr == MM * (SW + 1), $sformatf("FHR writes %0d", n_fhr_wr));
    $display("mechanisms: long=%0d qset=%0d offset=%0d dual=%0d floor=%0d fifo_stall=%0d cpu_wait=%0d branch=%0d fmr_early=%0d sort=%0d fhr=%0d ro=%0d",
             n_long, n_qset, n_offset, n_dual, n_floor, n_fifo_stall, n_qwait_cpu, n_branch, n_fmr_early, n_sort, n_fhr_wr, n_ro);

    // second program: same-time operations on one qubit
    load(prog_conflict());
    pulse_start();
    check(!status.err_conflict, "conflict flag cleared by start");
    repeat (100) @(negedge clk);
    check(status.err_conflict, "conflict not detected");
    check(!status.busy, "core still running after conflict");
    check(!status.done, "conflicting program must not complete");

    checks += chk.checks;
    failures += chk.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
