// tb_simple_riscv: offers classical instructions one at a time, as the
// dispatcher would, with a model data RAM (one-cycle read) and a model
// histogram. Register results are read through the QWAITR read port and
// compared with values computed here: LDI/LDUI, random AND/OR/XOR/ADD/SUB,
// CMP followed by BR on every flag (taken or not, target PC), FBR, J,
// SW then LW, FMR waiting for its qubit's outstanding measurement, SRA waiting for q_idle and the
// histogram, END, and the FHR word sequence in data RAM (12 qubits, M = 2).
module tb_simple_riscv;
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;
  localparam int N = 12, M = 2, CW = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  instr_t instr;
  logic valid = 0, ready, redirect, halt, dram_we, q_idle, hist_sra, hist_busy;
  logic [11:0] meas_busy;
  logic [PC_W-1:0] redirect_pc;
  logic [DADDR_W-1:0] dram_addr;
  logic [31:0] dram_wdata, dram_rdata, qrs_val;
  logic [N-1:0] meas_state;
  logic [N-1:0] top_state [M];
  logic [CW-1:0] top_cnt [M];
  logic [M-1:0] top_valid;
  logic [4:0] qrs_idx;
  logic [31:0] dmem [1024];
  int sra_pulses = 0;
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (dram_we) dmem[dram_addr] <= dram_wdata;
    dram_rdata <= dmem[dram_addr];
    if (hist_sra) sra_pulses <= sra_pulses + 1;
  end

  simple_riscv #(.NUM_QUBITS(N), .M(M), .CW(CW)) dut (.clk, .rst_n, .start, .instr, .valid, .ready,
    .redirect, .redirect_pc, .halt, .dram_we, .dram_addr, .dram_wdata, .dram_rdata,
    .meas_state, .q_idle, .meas_busy, .hist_sra, .hist_busy, .top_state, .top_cnt, .top_valid, .qrs_idx, .qrs_val);

  logic got_redirect, got_halt;
  logic [PC_W-1:0] got_pc;
  int cycles;

  task automatic exec(input logic [31:0] w, input int pc = 100);
    @(negedge clk);
    instr = '{bits: {96'd0, w}, is_long: 1'b0, pc: PC_W'(pc)};
    valid = 1; cycles = 1;
    #1;
    while (!ready) begin @(negedge clk); #1; cycles++; end
    got_redirect = redirect; got_pc = redirect_pc; got_halt = halt;
    @(negedge clk);
    valid = 0;
  endtask


  task automatic expect_reg(int r, logic [31:0] v, string what);
    logic [31:0] g;
    qrs_idx = 5'(r); #1; g = qrs_val;
    checks++;
    if (g !== v) begin failures++; $display("FAIL %s: r%0d = %h expected %h", what, r, g, v); end
  endtask

  task automatic set_reg(int r, logic [31:0] v);
    exec(a_ldi(r, int'(v[19:0])));
    exec(a_ldui(r, int'(v[31:20])));
  endtask

  initial begin
    logic [31:0] vals [8];
    instr = '0; q_idle = 1; meas_busy = '0; hist_busy = 0; meas_state = '0; qrs_idx = '0;
    top_state = '{12'hABC, 12'h123}; top_cnt = '{7'd40, 7'd17}; top_valid = 2'b11;
    for (int i = 0; i < 1024; i++) dmem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // LDI / LDUI
    exec(a_ldi(1, -5)); expect_reg(1, 32'hFFFF_FFFB, "LDI negative");
    for (int r = 2; r < 8; r++) begin vals[r] = $urandom; set_reg(r, vals[r]); expect_reg(r, vals[r], "LDI+LDUI"); end
    // ALU
    for (int it = 0; it < 200; it++) begin
      int a, b, d;
      opcode_e o;
      logic [31:0] e;
      a = $urandom_range(2, 7); b = $urandom_range(2, 7); d = $urandom_range(8, 15);
      o = opcode_e'($urandom_range(OPC_AND, OPC_SUB));
      case (o)
        OPC_AND: e = vals[a] & vals[b];
        OPC_OR:  e = vals[a] | vals[b];
        OPC_XOR: e = vals[a] ^ vals[b];
        OPC_ADD: e = vals[a] + vals[b];
        default: e = vals[a] - vals[b];
      endcase
      exec(a_alu(o, d, a, b));
      expect_reg(d, e, "ALU");
    end
    // CMP + BR on every flag, FBR
    for (int it = 0; it < 60; it++) begin
      logic [31:0] x, y;
      logic [7:0] f;
      x = (it % 4 == 0) ? vals[2] : vals[$urandom_range(2, 7)];
      y = vals[2];
      set_reg(20, x); set_reg(21, y);
      exec(a_cmp(20, 21));
      f = {x >= y, x < y, $signed(x) >= $signed(y), $signed(x) < $signed(y), x != y, x == y, 1'b0, 1'b1};
      for (int fl = 0; fl < 8; fl++) begin
        int off;
        off = $urandom_range(1, 50) * (($urandom_range(0, 1) == 0) ? -1 : 1);
        exec(a_br(flag_e'(fl), off), 200);
        checks++;
        if (got_redirect !== f[fl] || (f[fl] && int'(got_pc) != 200 + off)) begin
          failures++; $display("FAIL BR flag %0d", fl);
        end
        exec(a_fbr(flag_e'(fl), 22));
        expect_reg(22, 32'(f[fl]), "FBR");
      end
    end
    // J
    exec(a_j(-7), 50);
    checks++; if (!got_redirect || got_pc != 43) begin failures++; $display("FAIL J"); end
    // SW / LW
    set_reg(3, 32'd100);
    exec(a_sw(2, 3, 5));
    checks++; if (dmem[105] !== vals[2]) begin failures++; $display("FAIL SW"); end
    dmem[96] = 32'hCAFE_F00D;
    exec(a_lw(9, 3, -4));
    expect_reg(9, 32'hCAFE_F00D, "LW");
    checks++; if (cycles != 2) begin failures++; $display("FAIL LW took %0d cycles", cycles); end
    // FMR waits only for its own qubit's outstanding measurement
    meas_state = 12'b0000_0010_0000;
    meas_busy  = 12'b0000_0010_1000;
    q_idle = 0;
    exec(a_fmr(11, 4));
    expect_reg(11, 32'd0, "FMR on a free qubit");
    checks++; if (cycles != 1) begin failures++; $display("FAIL FMR on a free qubit waited (%0d)", cycles); end
    fork
      exec(a_fmr(10, 5));
      begin repeat (6) @(negedge clk); meas_busy[5] = 1'b0; end
    join
    expect_reg(10, 32'd1, "FMR");
    checks++; if (cycles < 6) begin failures++; $display("FAIL FMR did not wait (%0d)", cycles); end
    meas_busy = '0; q_idle = 1;
    // SRA waits for the histogram
    hist_busy = 1;
    fork
      exec(a_sra());
      begin repeat (4) @(negedge clk); hist_busy = 0; end
    join
    checks++; if (sra_pulses != 1 || cycles < 4) begin failures++; $display("FAIL SRA pulses %0d cycles %0d", sra_pulses, cycles); end
    // FHR: entry 0 at Rt: state word, count word; entry 1 next
    set_reg(4, 32'd200);
    exec(a_fhr(4));
    checks += 4;
    if (dmem[200] !== 32'hABC) begin failures++; $display("FAIL FHR state0 %h", dmem[200]); end
    if (dmem[201] !== 32'd40)  begin failures++; $display("FAIL FHR count0"); end
    if (dmem[202] !== 32'h123) begin failures++; $display("FAIL FHR state1"); end
    if (dmem[203] !== 32'd17)  begin failures++; $display("FAIL FHR count1"); end
    // END
    exec(a_end());
    checks++; if (!got_halt) begin failures++; $display("FAIL END"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
