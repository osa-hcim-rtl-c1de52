// tb_hmu -- checks one hybrid MAC unit (reduced to 24 columns): RW write and
// read of its eight rows, DMAC of random digital 1-bit MACs with the one-cycle
// latency, RS = min(7, DMAC >> shift), an analog MAC on a different row in the
// same cycle with its ADC code three cycles later, and that a row write with
// we low leaves the array unchanged.
module tb_hmu;
  import osa_pkg::*;
  localparam int N = 24;
  localparam int DW = $clog2(N + 1);
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, rwen, we, d_valid, dmac_valid, adc_start, adc_busy, amac_valid;
  logic [N_ROW-1:0] dwl, awl;
  logic [N-1:0] wdata, rdata, gblb;
  logic [2:0] nq_shift, adc_prec;
  logic [DW-1:0] dmac;
  rs_t rs;
  alvl_t gbl [N];
  amac_t amac;
  int checks = 0, failures = 0;
  logic [N-1:0] wm [N_ROW];
  logic [7:0] act [N];

  hmu #(.N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rwen = 0; we = 0; dwl = 0; awl = 0; wdata = 0; gblb = '1; d_valid = 0;
    nq_shift = 0; adc_start = 0; adc_prec = 1;
    for (int c = 0; c < N; c++) gbl[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < N_ROW; r++) begin
      for (int c = 0; c < N; c++) wm[r][c] = 1'($urandom);
      rwen = 1; we = 1; dwl = 8'(1 << r); awl = 8'(1 << r); wdata = wm[r];
      @(negedge clk);
    end
    we = 0; wdata = '1;          // not written: we low
    dwl = 8'h01; awl = 8'h01; @(negedge clk);
    for (int r = 0; r < N_ROW; r++) begin
      dwl = 8'(1 << r); awl = 8'(1 << r); #1;
      check(rdata == wm[r], $sformatf("read row %0d", r));
    end
    rwen = 0; dwl = 0; awl = 0;
    @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      int i, j, ia, lo, n, d, x, q, e;
      for (int c = 0; c < N; c++) act[c] = 8'($urandom);
      i = $urandom % 8; j = $urandom % 8; ia = (i + 1 + $urandom % 7) % 8;
      n = 1 + $urandom % 4; lo = $urandom % (9 - n);
      d = 0; x = 0;
      for (int c = 0; c < N; c++) begin
        d += wm[i][c] & act[c][j];
        x += wm[ia][c] * ((act[c] >> lo) & ((1 << n) - 1));
        gblb[c] = ~act[c][j];
        gbl[c] = alvl_t'((act[c] >> lo) & ((1 << n) - 1));
      end
      q = (9 * x) / (N << n); if (q > 7) q = 7;
      nq_shift = 3'($urandom % 4);
      dwl = 8'(1 << i); awl = 8'(1 << ia); d_valid = 1; adc_start = 1; adc_prec = 3'(n);
      @(negedge clk);
      d_valid = 0; adc_start = 0; dwl = 0; awl = 0;
      check(dmac_valid && dmac == DW'(d), $sformatf("dmac %0d expected %0d", dmac, d));
      e = d >> nq_shift; if (e > 7) e = 7;
      check(rs == rs_t'(e), "rs");
      check(adc_busy, "adc busy");
      repeat (2) @(negedge clk);
      check(amac_valid && amac == amac_t'(q), $sformatf("amac %0d expected %0d", amac, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
