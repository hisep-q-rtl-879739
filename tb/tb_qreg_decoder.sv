// tb_qreg_decoder: random registers of all four kinds and random window
// bases, compared with a reference that walks the register's bits (mask
// bits, SITO pair, valid SITOL pairs) and sets each addressed qubit's
// indicator; qubits beyond NUM_QUBITS are dropped. Runs at the default 100
// qubits.
module tb_qreg_decoder;
  import hisepq_pkg::*;
  localparam int N = 100;
  int checks = 0, failures = 0;
  qkind_e kind;
  logic [QPAY_W-1:0] pay;
  logic [QIDX_W-1:0] base;
  logic [2*N-1:0] ind, exp;

  qreg_decoder #(.NUM_QUBITS(N)) dut (.kind, .pay, .base, .ind);

  function automatic logic [2*N-1:0] ref_ind(qkind_e k, logic [QPAY_W-1:0] p, int b);
    logic [2*N-1:0] r;
    r = '0;
    case (k)
      QK_SMASK: for (int j = 0; j < 8; j++)   if (p[j] && b + j < N) r[2*(b+j) +: 2] = 2'b11;
      QK_LMASK: for (int j = 0; j < 100; j++) if (p[j] && b + j < N) r[2*(b+j) +: 2] = 2'b11;
      QK_SPAIR: begin
        int s, t;
        s = b + int'(p[13:7]); t = b + int'(p[6:0]);
        if (s < N) r[2*s +: 2] |= 2'b01;
        if (t < N) r[2*t +: 2] |= 2'b10;
      end
      default: for (int q = 0; q < 7; q++) if (p[98+q]) begin
        int s, t;
        s = b + int'(p[14*q+7 +: 7]); t = b + int'(p[14*q +: 7]);
        if (s < N) r[2*s +: 2] |= 2'b01;
        if (t < N) r[2*t +: 2] |= 2'b10;
      end
    endcase
    return r;
  endfunction

  initial begin
    // directed: SMSO mask 0b1000_0001 at base 8 -> qubits 8 and 15 single-qubit
    kind = QK_SMASK; pay = '0; pay[7:0] = 8'h81; base = 8; #1;
    exp = '0; exp[2*8 +: 2] = 2'b11; exp[2*15 +: 2] = 2'b11;
    checks++; if (ind !== exp) begin failures++; $display("FAIL directed SMSO"); end
    // directed: SITO source 3 target 70 -> 01 at qubit 3, 10 at qubit 70
    kind = QK_SPAIR; pay = '0; pay[13:7] = 7'd3; pay[6:0] = 7'd70; base = 0; #1;
    checks++; if (ind[2*3 +: 2] !== 2'b01 || ind[2*70 +: 2] !== 2'b10) begin failures++; $display("FAIL directed SITO"); end
    // directed: SITOL pair 1 invalid is ignored
    kind = QK_LPAIR; pay = '0; pay[98] = 1'b1; pay[13:7] = 7'd1; pay[6:0] = 7'd2;
    pay[14+7 +: 7] = 7'd5; pay[14 +: 7] = 7'd6; base = 0; #1;
    checks++; if (ind[2*5 +: 2] !== 2'b00 || ind[2*1 +: 2] !== 2'b01 || ind[2*2 +: 2] !== 2'b10) begin failures++; $display("FAIL directed SITOL"); end
    for (int it = 0; it < 2000; it++) begin
      kind = qkind_e'($urandom_range(0, 3));
      pay  = {$urandom, $urandom, $urandom, $urandom};
      base = QIDX_W'((it % 3 == 0) ? 0 : $urandom_range(0, 120));
      #1;
      exp = ref_ind(kind, pay, int'(base));
      checks++;
      if (ind !== exp) begin
        failures++;
        if (failures < 5) $display("FAIL kind %0d base %0d", kind, base);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
