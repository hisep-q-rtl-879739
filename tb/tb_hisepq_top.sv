// tb_hisepq_top: full-size system test of hisepq_top through its AXI4-Lite
// port, with every parameter at its default (100 qubits, T = 100 histogram
// entries, top M = 4).
//
// Acting as the host, the test writes the shot program (100 shots over all
// 100 qubits, built by hisepq_asm_pkg::prog_shots) into program RAM at
// 0x8000, sets the start address and reprograms one gate-op LUT entry
// through the configuration registers at 0x4000, starts the core through
// the control/status register at 0x0000 and polls its status word until
// done. shot_checker answers every measurement with a state from a skewed
// distribution and checks every issued operation. The host then reads the
// FHR histogram and the feedback counter back from data RAM at 0xC000 and
// compares them with the reference. A second program must raise the
// conflict flag. Mechanisms are counted and each must occur: AXI writes
// and reads to all four slaves, LUT reprogramming, long instructions, QSet,
// offsets, dual-lane bundles, the time-point floor, FIFO back-pressure,
// FMR/SRA waits, taken branches, histogram sorting, FHR, conflict detection
// and the end interrupt.
`timescale 1ns/1ps
module tb_hisepq_top;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;

  localparam int N = 100, MM = 4, SHOTS = 100;
  localparam int SW = (N + 31) / 32;
  localparam logic [15:0] A_CSR = 16'h0000, A_CFG = 16'h4000, A_PRAM = 16'h8000, A_DRAM = 16'hC000;
  localparam int MICRO_B = 8'h55;

  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;     // 50 MHz

  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [15:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 0;
  logic [N-1:0]       q_valid, ro_valid, ro_bit;
  logic [MICRO_W-1:0] q_micro [N];
  logic [1:0]         q_role  [N];
  logic               end_irq;

  hisepq_top dut (
    .clk, .rst_n,
    .s_axil_awvalid (awvalid), .s_axil_awready (awready), .s_axil_awaddr (awaddr),
    .s_axil_wvalid (wvalid), .s_axil_wready (wready), .s_axil_wdata (wdata),
    .s_axil_bvalid (bvalid), .s_axil_bready (bready), .s_axil_bresp (bresp),
    .s_axil_arvalid (arvalid), .s_axil_arready (arready), .s_axil_araddr (araddr),
    .s_axil_rvalid (rvalid), .s_axil_rready (rready), .s_axil_rdata (rdata), .s_axil_rresp (rresp),
    .q_valid, .q_micro, .q_role, .ro_valid, .ro_bit, .end_irq
  );

  logic chk_run = 0;
  shot_checker #(.N(N), .MICRO_B(MICRO_B)) chk (.clk, .rst_n (chk_run), .q_valid, .q_micro, .q_role, .ro_valid, .ro_bit);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ host bus tasks
  int n_wr [4], n_rd [4];
  task automatic axi_write(logic [15:0] a, logic [31:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk) awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    check(bresp == 2'b00, "write response OKAY");
    @(posedge clk); #1 bready = 0;
    n_wr[a[15:14]]++;
  endtask
  task automatic axi_read(logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk); #1 rready = 0;
    n_rd[a[15:14]]++;
  endtask

  // ------------------------------------------------ mechanism counters
  int n_long, n_qset, n_offset, n_dual, n_floor, n_fifo_stall, n_qwait_cpu,
      n_branch, n_sort, n_fmr_early, n_ro, n_lut, n_irq;
  initial begin
    n_long = 0; n_qset = 0; n_offset = 0; n_dual = 0; n_floor = 0; n_fifo_stall = 0;
    n_qwait_cpu = 0; n_branch = 0; n_sort = 0; n_fmr_early = 0; n_ro = 0; n_lut = 0; n_irq = 0;
    for (int i = 0; i < 4; i++) begin n_wr[i] = 0; n_rd[i] = 0; end
  end
  logic irq_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.instr_valid && dut.u_core.instr_ready && dut.u_core.instr.is_long) n_long++;
    if (dut.u_core.qreg_wr.valid && dut.u_core.qreg_wr.bitwr) n_qset++;
    if (dut.u_core.ob_push && ((dut.u_core.lane_used[0] && dut.u_core.base[0] != 0) ||
                               (dut.u_core.lane_used[1] && dut.u_core.base[1] != 0))) n_offset++;
    if (dut.u_core.ob_push && dut.u_core.lane_used == 2'b11) n_dual++;
    if (dut.u_core.tm_adv && $signed(dut.u_core.tp + dut.u_core.tm_interval - dut.u_core.now - 8) < 0) n_floor++;
    if (!dut.u_core.ob_empty[0] && !dut.u_core.ob_pop && |dut.u_core.f_full) n_fifo_stall++;
    if (dut.u_core.instr_valid && !dut.u_core.is_q && !dut.u_core.c_ready &&
        (dut.u_core.u_cpu.opc == OPC_FMR || dut.u_core.u_cpu.opc == OPC_SRA)) n_qwait_cpu++;
    if (dut.u_core.redirect) n_branch++;
    if (dut.u_core.instr_valid && !dut.u_core.is_q && dut.u_core.c_ready && dut.u_core.u_cpu.opc == OPC_FMR && !dut.u_core.q_idle) n_fmr_early++;
    if (dut.u_core.hist_busy) n_sort++;
    if (dut.lut_we) n_lut++;
    if (end_irq && !irq_q) n_irq++;
    irq_q <= end_irq;
    n_ro += $countones(ro_valid);
  end

  int ref_sorted [$];
  int fb_ref;
  logic [31:0] d, t0, t1;
  prog_t p;

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // host: program, configuration, start
    p = prog_shots(N, SHOTS);
    foreach (p[i]) axi_write(A_PRAM + 16'(4 * i), p[i]);
    for (int i = 0; i < 8; i++) begin
      axi_read(A_PRAM + 16'(4 * i), d);
      check(d == p[i], $sformatf("PRAM read-back word %0d", i));
    end
    axi_write(A_CFG + 16'h0, 32'd0);                                 // start address
    axi_write(A_CFG + 16'h4, {9'd0, 7'(G_B), 7'd0, 1'b0, 8'(MICRO_B)});  // LUT: op G_B -> MICRO_B
    axi_read(A_CFG + 16'h0, d);
    check(d == 0, "start address read-back");
    axi_write(A_DRAM + 16'(4 * FB_ADDR), 32'hFFFF_FFFF);
    axi_read(A_CSR + 16'h4, t0);
    @(negedge clk) chk_run = 1;
    axi_write(A_CSR, 32'd1);
    axi_read(A_CSR, d);
    check(d[0] == 1'b1, "busy after start");
    do begin
      repeat (200) @(negedge clk);
      axi_read(A_CSR, d);
    end while (!d[1]);
    axi_read(A_CSR + 16'h4, t1);
    check(t1 > t0, "central clock advances");
    check(d[4:2] == 3'b000, $sformatf("error flags %b after shot program", d[4:2]));
    check(end_irq, "end interrupt");
    repeat (5) @(negedge clk);
    chk.finish_check(SHOTS);

    // host: read the histogram and the feedback counter
    for (int k = 0; k < chk.NPAT; k++) if (chk.ref_cnt[k] > 0) ref_sorted.push_back(chk.ref_cnt[k]);
    ref_sorted.rsort();
    for (int e = 0; e < MM; e++) begin
      logic [SW*32-1:0] st;
      logic [31:0] cnt;
      for (int w = 0; w < SW; w++) begin
        axi_read(A_DRAM + 16'(4 * (RES_ADDR + e*(SW+1) + w)), d);
        st[32*w +: 32] = d;
      end
      axi_read(A_DRAM + 16'(4 * (RES_ADDR + e*(SW+1) + SW)), cnt);
      if (e < ref_sorted.size()) begin
        bit found;
        found = 0;
        check(int'(cnt) == ref_sorted[e], $sformatf("histogram entry %0d count %0d, expected %0d", e, cnt, ref_sorted[e]));
        for (int k = 0; k < chk.NPAT; k++)
          if (chk.ref_cnt[k] == int'(cnt) && st == (SW*32)'(chk.pat[k])) found = 1;
        check(found, $sformatf("histogram entry %0d state is not a state read %0d times", e, cnt));
      end else
        check(cnt == 0 && st == 0, $sformatf("histogram entry %0d should be empty", e));
    end
    fb_ref = 0;
    for (int k = 1; k < chk.NPAT; k += 2) fb_ref += chk.ref_cnt[k];
    axi_read(A_DRAM + 16'(4 * FB_ADDR), d);
    check(int'(d) == fb_ref, $sformatf("feedback count %0d, expected %0d", d, fb_ref));
    check(n_ro == SHOTS * N, $sformatf("read-outs %0d", n_ro));

    // second program: conflict
    chk_run = 0;
    p = prog_conflict();
    foreach (p[i]) axi_write(A_PRAM + 16'(4 * i), p[i]);
    axi_write(A_CSR, 32'd1);
    repeat (100) @(negedge clk);
    axi_read(A_CSR, d);
    check(d[2] == 1'b1, "conflict flag");
    check(d[1:0] == 2'b00, "core stopped, not done, after conflict");

    check(n_long == 2, $sformatf("long instructions %0d", n_long));
    check(n_qset > 0, "QSet bit write never happened");
    check(n_offset > 0, "non-zero offset never used");
    check(n_dual > 0, "dual-lane bundle never happened");
    check(n_floor > 0, "time-point floor never applied");
    check(n_fifo_stall > 0, "timed-FIFO back-pressure never happened");
    check(n_qwait_cpu > 0, "FMR/SRA never waited for the quantum side");
    check(n_branch > 0, "no branch taken");
    check(n_fmr_early > 0, "FMR never completed while other measurements were outstanding");
    check(n_sort > 0, "histogram sorter never ran");
    check(n_lut == 1, "LUT programming");
    check(n_irq == 1, "end interrupt edges");
    for (int s = 0; s < 4; s++) check(n_wr[s] > 0 && n_rd[s] > 0, $sformatf("bus traffic to slave %0d", s));
    $display("mechanisms: long=%0d qset=%0d offset=%0d dual=%0d floor=%0d fifo_stall=%0d cpu_wait=%0d branch=%0d fmr_early=%0d sort=%0d lut=%0d irq=%0d ro=%0d wr=%0d/%0d/%0d/%0d rd=%0d/%0d/%0d/%0d",
             n_long, n_qset, n_offset, n_dual, n_floor, n_fifo_stall, n_qwait_cpu, n_branch, n_fmr_early, n_sort, n_lut, n_irq, n_ro,
             n_wr[0], n_wr[1], n_wr[2], n_wr[3], n_rd[0], n_rd[1], n_rd[2], n_rd[3]);

    checks += chk.checks;
    failures += chk.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
