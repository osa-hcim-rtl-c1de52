// tb_hcima -- checks one hybrid CIM array column: RW writes/reads of each of the
// eight bits, the digital product W[r] & A (through the inverted GBLB input), the
// analog product (GBL level passed when W[r] = 1, 0 otherwise) on a different row
// in the same cycle, and that both products are suppressed in the RW state.
module tb_hcima;
  import osa_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rwen, we, wbit, gblb, dout, rbit;
  logic [N_ROW-1:0] dwl, awl;
  alvl_t gbl, aout;
  int checks = 0, failures = 0;
  logic [N_ROW-1:0] ref_w;

  hcima dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rwen = 0; we = 0; wbit = 0; gblb = 1; dwl = 0; awl = 0; gbl = 0;
    for (int t = 0; t < 20; t++) begin
      ref_w = 8'($urandom);
      for (int r = 0; r < N_ROW; r++) begin
        @(negedge clk); rwen = 1; we = 1; dwl = 8'(1 << r); awl = 8'(1 << r); wbit = ref_w[r];
      end
      @(negedge clk); we = 0;
      for (int r = 0; r < N_ROW; r++) begin
        dwl = 8'(1 << r); awl = 8'(1 << r); #1;
        check(rbit == ref_w[r], $sformatf("read bit %0d", r));
        check(dout == 0 && aout == 0, "no products in RW");
      end
      rwen = 0;
      for (int k = 0; k < 16; k++) begin
        int dr, ar, a, lvl;
        dr = $urandom % 8; ar = $urandom % 8; a = $urandom % 2; lvl = $urandom % 16;
        dwl = 8'(1 << dr); awl = 8'(1 << ar); gblb = ~1'(a); gbl = alvl_t'(lvl); #1;
        check(dout == (ref_w[dr] & 1'(a)), "digital product");
        check(aout == (ref_w[ar] ? alvl_t'(lvl) : 0), "analog product");
        check(rbit == 0, "no read outside RW");
      end
      dwl = 0; awl = 0; gblb = 0; gbl = 4'hf; #1;
      check(dout == 0, "no digital row selected gives 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
