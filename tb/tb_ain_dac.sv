// tb_ain_dac -- checks that each GBL level equals the n-bit activation field
// starting at bit lo (n = 1..4, every lo) when enabled, and 0 when disabled.
module tb_ain_dac;
  import osa_pkg::*;
  logic [7:0] act [N_COL];
  logic en; logic [2:0] lo, n; alvl_t gbl [N_COL];
  int checks = 0, failures = 0;
  ain_dac dut (.*);
  initial begin
    for (int t = 0; t < 80; t++) begin
      for (int c = 0; c < N_COL; c++) act[c] = 8'($urandom);
      en = (t % 5 != 0); n = 3'(1 + t % 4); lo = 3'((t / 4) % (9 - n)); #1;
      for (int c = 0; c < N_COL; c++) begin
        int e;
        e = en ? (int'(act[c]) >> lo) & ((1 << n) - 1) : 0;
        checks++;
        if (gbl[c] != alvl_t'(e)) begin failures++; $display("FAIL: col %0d lvl %0d exp %0d", c, gbl[c], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
