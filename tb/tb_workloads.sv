// tb_workloads: runs the benchmark circuits of the evaluation on the
// hybrid core at its default size (100 qubit channels).
//
// Circuits, built here as lists of layers (one time step each):
//   GO(n)       Grover's operator on n qubits: H on all, X on all, H on
//               qubit 0, CNOTs from every other qubit (control) onto qubit 0
//               one after another, H on qubit 0, X on all, H on all.
//   SYN(n, d)   synthetic circuit: H on all, then 10 random layers in which
//               d percent of the qubits are busy; a quarter of the busy
//               qubits form CNOT pairs, the rest get X, Y or Z at random.
// The gate mix and layer count of SYN are this testbench's reading of the
// benchmark; the densities (10, 50, 100 %) and the qubit counts (8 to 100)
// are those of the evaluation.
//
// Each layer is compiled the way the instruction set intends: one mask
// register per single-qubit gate type (SMSO when the qubits fit one 8-qubit
// window, SMSOL otherwise), SITO for a single pair or SITOL for up to 7
// pairs per register, then Q.Bundles with two operations each, all at the
// layer's time point. The interval to the next layer is set just above the
// layer's decode time (PI when it fits in 3 bits, QWAIT otherwise), so the
// program keeps ahead of the central clock and every layer's time is
// known exactly. The test compares every issued operation (qubit, order,
// micro-code, role and time relative to the first layer) with the circuit,
// requires that none is missing and no error flag is raised, and prints the
// program size in bytes.
`timescale 1ns/1ps
module tb_workloads;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;

  localparam int N = 100;
  localparam int G_Z = 6, G_CNOT = 8;

  logic clk = 0, rst_n = 0, start = 0;
  always #10 clk = ~clk;

  logic [PC_W-1:0]    pram_addr;
  logic [31:0]        pram_data;
  logic               dram_we;
  logic [DADDR_W-1:0] dram_addr;
  logic [31:0]        dram_wdata, dram_rdata;
  logic [N-1:0]       q_valid;
  logic [MICRO_W-1:0] q_micro [N];
  logic [1:0]         q_role  [N];
  core_status_t       status;
  logic [TIME_W-1:0]  now;

  hybrid_core dut (
    .clk, .rst_n, .start, .start_pc ('0),
    .lut_we (1'b0), .lut_addr ('0), .lut_data ('0),
    .pram_addr, .pram_data, .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .q_valid, .q_micro, .q_role, .ro_valid ('0), .ro_bit ('0), .status, .now
  );

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
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ expected events
  typedef struct { int t; int micro; logic [1:0] role; } ev_t;
  ev_t expq [N][$];
  int  t_base;

  always @(posedge clk) if (rst_n && !start) begin
    for (int q = 0; q < N; q++) if (q_valid[q]) begin
      ev_t e;
      if (t_base < 0) t_base = int'(now);
      checks++;
      if (expq[q].size() == 0) begin
        failures++;
        if (failures < 20) $display("FAIL unexpected operation on qubit %0d at %0d", q, now);
      end else begin
        e = expq[q].pop_front();
        if (int'(now) - t_base != e.t || int'(q_micro[q]) != e.micro || q_role[q] != e.role) begin
          failures++;
          if (failures < 20)
            $display("FAIL qubit %0d: got t=%0d micro=%0d role=%b, expected t=%0d micro=%0d role=%b",
                     q, int'(now) - t_base, q_micro[q], q_role[q], e.t, e.micro, e.role);
        end
      end
    end
  end

  // ------------------------------------------------ circuit compiler
  int lay_op [N];          // 0: idle; else gate (G_CNOT on both ends)
  int lay_partner [N];     // CNOT: the other qubit
  logic [1:0] lay_role [N];
  prog_t prog;
  int t_rel, n_layers;

  function automatic void clear_layer();
    for (int q = 0; q < N; q++) begin lay_op[q] = 0; lay_partner[q] = -1; lay_role[q] = 2'b00; end
  endfunction
  function automatic void set1(int q, int g); lay_op[q] = g; lay_role[q] = 2'b11; endfunction
  function automatic void set2(int c, int t);
    lay_op[c] = G_CNOT; lay_role[c] = 2'b01; lay_partner[c] = t;
    lay_op[t] = G_CNOT; lay_role[t] = 2'b10; lay_partner[t] = c;
  endfunction

  function automatic void begin_prog();
    prog.delete();
    for (int q = 0; q < N; q++) expq[q].delete();
    t_rel = 0; n_layers = 0;
    emit(prog, a_qwait(40));     // initial margin ahead of the clock
  endfunction

  function automatic void compile_layer();
    prog_t body;
    int ops_op [$], ops_kind [$], ops_reg [$];
    int n_short, n_long, d, w, nb, np;
    int src [$], tgt [$];
    int gates [4] = '{G_H, G_X, G_Y, G_Z};
    n_short = 0; n_long = 0;
    foreach (gates[gi]) begin
      logic [99:0] m;
      int lo, hi;
      m = '0; lo = N; hi = -1;
      for (int q = 0; q < N; q++) if (lay_op[q] == gates[gi]) begin
        m[q] = 1'b1;
        if (q < lo) lo = q;
        hi = q;
      end
      if (hi >= 0) begin
        if (lo / 8 == hi / 8 && lo / 8 < 16) begin
          emit(body, a_smso(gi, lo / 8, 8'(m >> (8 * (lo / 8)))));
          n_short++;
          ops_op.push_back(gates[gi]); ops_kind.push_back(QK_SMASK); ops_reg.push_back(gi);
        end else begin
          emit_l(body, a_smsol(gi, 0, m));
          n_long++;
          ops_op.push_back(gates[gi]); ops_kind.push_back(QK_LMASK); ops_reg.push_back(gi);
        end
      end
    end
    for (int q = 0; q < N; q++) if (lay_op[q] == G_CNOT && lay_role[q] == 2'b01) begin
      src.push_back(q); tgt.push_back(lay_partner[q]);
    end
    np = src.size();
    if (np == 1) begin
      emit(body, a_sito(0, 0, src[0], tgt[0]));
      n_short++;
      ops_op.push_back(G_CNOT); ops_kind.push_back(QK_SPAIR); ops_reg.push_back(0);
    end else begin
      for (int g = 0; g * 7 < np; g++) begin
        logic [6:0]  valid;
        logic [97:0] idx;
        valid = '0; idx = '0;
        for (int k = 0; k < 7 && g * 7 + k < np; k++) begin
          valid[k] = 1'b1;
          idx[14*k +: 14] = {7'(src[g*7+k]), 7'(tgt[g*7+k])};
        end
        emit_l(body, a_sitol(g, 0, valid, idx));
        n_long++;
        ops_op.push_back(G_CNOT); ops_kind.push_back(QK_LPAIR); ops_reg.push_back(g);
      end
    end
    nb = (ops_op.size() + 1) / 2;
    d = 3 * (n_short + nb) + 6 * n_long;
    if (n_layers == 0) w = 0;
    else if (d + 1 <= 7) w = d + 1;
    else begin w = d + 3 + 1; emit(prog, a_qwait(w)); end
    foreach (body[i]) emit(prog, body[i]);
    for (int b = 0; b < nb; b++) begin
      int o1, k1, r1;
      o1 = 0; k1 = 0; r1 = 0;
      if (2 * b + 1 < ops_op.size()) begin o1 = ops_op[2*b+1]; k1 = ops_kind[2*b+1]; r1 = ops_reg[2*b+1]; end
      emit(prog, a_bundle(ops_op[2*b], qkind_e'(ops_kind[2*b]), ops_reg[2*b], o1, qkind_e'(k1), r1,
                          (b == 0 && w <= 7) ? w : 0));
    end
    t_rel += w;
    n_layers++;
    for (int q = 0; q < N; q++) if (lay_op[q] != 0) begin
      ev_t e;
      e.t = t_rel; e.micro = lay_op[q]; e.role = lay_role[q];
      expq[q].push_back(e);
    end
    clear_layer();
  endfunction

  function automatic void build_go(int nq);
    begin_prog();
    clear_layer();
    for (int q = 0; q < nq; q++) set1(q, G_H);
    compile_layer();
    for (int q = 0; q < nq; q++) set1(q, G_X);
    compile_layer();
    set1(0, G_H);
    compile_layer();
    for (int c = 1; c < nq; c++) begin set2(c, 0); compile_layer(); end
    set1(0, G_H);
    compile_layer();
    for (int q = 0; q < nq; q++) set1(q, G_X);
    compile_layer();
    for (int q = 0; q < nq; q++) set1(q, G_H);
    compile_layer();
    emit(prog, a_end());
  endfunction

  function automatic void build_syn(int nq, int dens);
    int perm [$];
    int act, np;
    int g3 [3] = '{G_X, G_Y, G_Z};
    begin_prog();
    clear_layer();
    for (int q = 0; q < nq; q++) set1(q, G_H);
    compile_layer();
    for (int l = 0; l < 10; l++) begin
      perm.delete();
      for (int q = 0; q < nq; q++) perm.push_back(q);
      perm.shuffle();
      act = (dens * nq + 50) / 100;
      if (act < 1) act = 1;
      np = act / 4;
      for (int p = 0; p < np; p++) set2(perm[2*p], perm[2*p+1]);
      for (int i = 2 * np; i < act; i++) set1(perm[i], g3[$urandom_range(0, 2)]);
      compile_layer();
    end
    emit(prog, a_end());
  endfunction

  task automatic run(string name);
    int cyc;
    check(prog.size() <= 4096, {name, ": program fits program RAM"});
    for (int i = 0; i < 4096; i++) pmem[i] = '0;
    foreach (prog[i]) pmem[i] = prog[i];
    t_base = -1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!status.done && cyc < 200000) begin @(negedge clk); cyc++; end
    check(status.done, {name, ": program completed"});
    check(!status.err_conflict && !status.err_miss, {name, ": no conflict or missed time point"});
    for (int q = 0; q < N; q++) check(expq[q].size() == 0, $sformatf("%s: qubit %0d has %0d operations missing", name, q, expq[q].size()));
    $display("workload %-8s program %5d bytes, %3d layers, %6d cycles", name, 4 * prog.size(), n_layers, cyc);
  endtask

  initial begin
    int sizes [6] = '{8, 16, 32, 64, 96, 100};
    int dens [3] = '{10, 50, 100};
    for (int i = 0; i < 1024; i++) dmem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    foreach (sizes[i]) begin
      build_go(sizes[i]);
      run($sformatf("GO/%0d", sizes[i]));
    end
    foreach (dens[i]) begin
      build_syn(N, dens[i]);
      run($sformatf("Syn_%0d", dens[i]));
    end
    for (int i = 0; i < 5; i++) begin
      build_syn(sizes[i], 50);
      run($sformatf("Syn_50/%0d", sizes[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
