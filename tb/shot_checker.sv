// shot_checker: signal-side model and scoreboard for the shot program of
// hisepq_asm_pkg::prog_shots.
//
// Watches the per-qubit micro-code channels. Every issued measurement is
// answered RO_DELAY + (q mod 4) cycles later with the bit of this shot's outcome, drawn
// from NPAT fixed, distinct states with a skewed distribution (bit 0 of
// state k is k mod 2, so the program's feedback counter can be predicted). Each shot's
// operations are compared with the program: H on all qubits at time a,
// X on qubits 1-7 and Y on 8-15 at a+2, CZ source/target roles on pairs
// (0,1), (2,3), (4,5) at a+4, measurement on all qubits at a+9, and the
// next shot's H exactly 70 cycles after this one. The burst operations on
// qubit 0 (micro-code MICRO_B) must come exactly BURST_PI cycles apart. The parent reads
// `checks`, `failures`, the reference counts and the pattern table.
module shot_checker
  import hisepq_pkg::*;
  import hisepq_asm_pkg::*;
#(
  parameter int N        = 16,
  parameter int RO_DELAY = 10,
  parameter int NPAT     = 6,
  parameter int MICRO_B  = G_B     // micro-code the LUT gives the burst gate
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       q_valid,
  input  logic [MICRO_W-1:0] q_micro [N],
  input  logic [1:0]         q_role  [N],
  output logic [N-1:0]       ro_valid,
  output logic [N-1:0]       ro_bit
);
  int checks = 0, failures = 0;
  int cyc = 0;
  int shots = 0, a_t = -1, burst_n = 0, burst_last = -1;
  int n_h, n_x, n_y, n_cz, n_m;
  int pat_of_shot = 0;
  logic [N-1:0] pat [NPAT];
  int ref_cnt [NPAT];
  int ro_cd [N];
  logic [N-1:0] ro_val_q;

  initial begin
    for (int k = 0; k < NPAT; k++) begin
      for (int q = 0; q < N; q++) pat[k][q] = 1'($urandom);
      pat[k][0] = 1'(k % 2);
      pat[k][3:1] = 3'(k);       // keeps the states distinct
      ref_cnt[k] = 0;
    end
    for (int q = 0; q < N; q++) ro_cd[q] = 0;
    ro_val_q = '0;
  end

  function automatic int pick_pattern();
    int s;
    s = 0;
    for (int k = 0; k < NPAT - 1; k++) s += $urandom_range(0, 1);
    return s;     // binomial: middle states most frequent
  endfunction

  task automatic bad(string what, int q);
    failures++;
    if (failures < 10) $display("FAIL %s: qubit %0d at cycle %0d (shot %0d)", what, q, cyc, shots);
  endtask

  function automatic void close_shot();
    checks++;
    if (n_h != N || n_x != 7 || n_y != 8 || n_cz != 6 || n_m != N) begin
      failures++;
      $display("FAIL shot %0d op counts H%0d X%0d Y%0d CZ%0d M%0d", shots, n_h, n_x, n_y, n_cz, n_m);
    end
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      // read-out responses
      for (int q = 0; q < N; q++) begin
        ro_valid[q] = 1'b0;
        if (ro_cd[q] > 0) begin
          ro_cd[q]--;
          if (ro_cd[q] == 0) begin ro_valid[q] = 1'b1; ro_bit[q] = ro_val_q[q]; end
        end
      end
      // a new shot starts with H on qubit 0
      if (q_valid[0] && int'(q_micro[0]) == G_H) begin
        if (a_t >= 0) begin
          close_shot();
          checks++;
          if (cyc - a_t != SHOT_WAIT + 9 + 1) bad($sformatf("shot spacing %0d", cyc - a_t), 0);
        end
        shots++;
        a_t = cyc;
        n_h = 0; n_x = 0; n_y = 0; n_cz = 0; n_m = 0;
        pat_of_shot = pick_pattern();
        ref_cnt[pat_of_shot]++;
      end
      for (int q = 0; q < N; q++) if (q_valid[q]) begin
        int m, dt;
        m  = int'(q_micro[q]);
        dt = cyc - a_t;
        checks++;
        case (m)
          MICRO_B: begin
            burst_n++;
            if (q != 0 || q_role[q] != 2'b11) bad("burst target", q);
            if (burst_last >= 0 && cyc - burst_last != BURST_PI) bad("burst spacing", q);
            burst_last = cyc;
          end
          G_H: begin n_h++; if (dt != 0 || q_role[q] != 2'b11) bad("H", q); end
          G_X: begin n_x++; if (dt != 2 || q < 1 || q > 7 || q_role[q] != 2'b11) bad("X", q); end
          G_Y: begin n_y++; if (dt != 2 || q < 8 || q > 15 || q_role[q] != 2'b11) bad("Y", q); end
          G_CZ: begin
            n_cz++;
            if (dt != 4 || q > 5 || q_role[q] != ((q % 2 == 0) ? 2'b01 : 2'b10)) bad("CZ", q);
          end
          G_MEAS: begin
            n_m++;
            if (dt != 9 || q_role[q] != 2'b11) bad("MEAS", q);
            ro_cd[q] = RO_DELAY + q % 4;
            ro_val_q[q] = pat[pat_of_shot][q];
          end
          default: bad($sformatf("unexpected micro-code %0d", m), q);
        endcase
      end
    end
  end

  initial begin ro_valid = '0; ro_bit = '0; end

  // called by the parent at the end of the program
  function automatic void finish_check(int exp_shots);
    close_shot();
    checks += 2;
    if (shots != exp_shots) begin failures++; $display("FAIL saw %0d shots, expected %0d", shots, exp_shots); end
    if (burst_n != BURST) begin failures++; $display("FAIL burst operations %0d", burst_n); end
  endfunction
endmodule
