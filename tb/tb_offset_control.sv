// tb_offset_control: checks the window base of every register kind and
// offset against stride * offset (100 for long masks and pairs, 8 for short
// masks).
module tb_offset_control;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  qkind_e kind;
  logic [3:0] offset;
  logic [QIDX_W-1:0] base;

  offset_control dut (.kind, .offset, .base);

  initial begin
    for (int k = 0; k < 4; k++)
      for (int o = 0; o < 16; o++) begin
        int exp;
        kind = qkind_e'(k); offset = 4'(o);
        #1;
        exp = (k == 0) ? o * 8 : o * 100;
        checks++;
        if (int'(base) != exp) begin
          failures++; $display("FAIL kind %0d offset %0d: base %0d expected %0d", k, o, base, exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
