// tb_qreg_file: random whole-register writes (payload masked to the kind's
// width) and QSet bit writes on all four banks, read back on both ports and
// compared with a shadow copy.
module tb_qreg_file;
  import hisepq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  qreg_wr_t wr;
  qkind_e rd_kind [2];
  logic [4:0] rd_idx [2];
  qreg_t rd_data [2];
  qreg_t shadow [4][32];
  always #5 clk = ~clk;

  qreg_file dut (.clk, .rst_n, .wr, .rd_kind, .rd_idx, .rd_data);

  function automatic int kw(int k);
    return (k == 0) ? 8 : (k == 1) ? 100 : (k == 2) ? 14 : 105;
  endfunction

  initial begin
    wr = '0; rd_kind = '{QK_SMASK, QK_SMASK}; rd_idx = '{5'd0, 5'd0};
    for (int k = 0; k < 4; k++) for (int r = 0; r < 32; r++) shadow[k][r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      wr = '0;
      wr.valid = 1'b1;
      wr.kind  = qkind_e'($urandom_range(0, 3));
      wr.idx   = 5'($urandom);
      if ($urandom_range(0, 2) == 0) begin
        wr.bitwr = 1'b1;
        wr.bit_idx = 7'($urandom_range(0, kw(wr.kind) - 1));
        wr.bit_val = 1'($urandom);
        shadow[wr.kind][wr.idx].pay[wr.bit_idx] = wr.bit_val;
      end else begin
        wr.data = {4'($urandom), $urandom, $urandom, $urandom, $urandom};
        shadow[wr.kind][wr.idx].offset = wr.data.offset;
        shadow[wr.kind][wr.idx].pay    = '0;
        for (int b = 0; b < kw(wr.kind); b++) shadow[wr.kind][wr.idx].pay[b] = wr.data.pay[b];
      end
      @(negedge clk);
      wr = '0;
      for (int l = 0; l < 2; l++) begin
        rd_kind[l] = qkind_e'($urandom_range(0, 3));
        rd_idx[l]  = 5'($urandom);
      end
      #1;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (rd_data[l] !== shadow[rd_kind[l]][rd_idx[l]]) begin
          failures++;
          if (failures < 5) $display("FAIL read kind %0d reg %0d", rd_kind[l], rd_idx[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
