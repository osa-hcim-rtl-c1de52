// tb_din_driver -- checks that each GBLB carries the inverse of the selected
// activation bit when enabled and is high when disabled.
module tb_din_driver;
  import osa_pkg::*;
  logic [7:0] act [N_COL];
  logic en; logic [2:0] j; logic [N_COL-1:0] gblb;
  int checks = 0, failures = 0;
  din_driver dut (.*);
  initial begin
    for (int t = 0; t < 64; t++) begin
      for (int c = 0; c < N_COL; c++) act[c] = 8'($urandom);
      en = (t % 4 != 0); j = 3'(t % 8); #1;
      for (int c = 0; c < N_COL; c++) begin
        checks++;
        if (gblb[c] != (en ? ~act[c][j] : 1'b1)) begin failures++; $display("FAIL: col %0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
