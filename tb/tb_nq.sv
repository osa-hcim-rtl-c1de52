// tb_nq -- checks normalization-and-quantization over every DMAC value 0..144
// and every shift: RS = min(7, DMAC >> shift).
module tb_nq;
  import osa_pkg::*;
  dmac_t dmac; logic [2:0] nq_shift; rs_t rs;
  int checks = 0, failures = 0;
  nq dut (.*);
  initial begin
    for (int s = 0; s < 8; s++) for (int d = 0; d <= N_COL; d++) begin
      int e;
      dmac = dmac_t'(d); nq_shift = 3'(s); #1;
      e = d >> s; if (e > 7) e = 7;
      checks++;
      if (rs != rs_t'(e)) begin failures++; $display("FAIL: d=%0d s=%0d rs=%0d exp=%0d", d, s, rs, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
