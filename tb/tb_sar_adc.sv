// tb_sar_adc -- checks the charge-sharing line and 3-bit SAR ADC model at 144
// columns: for random column levels and each precision n = 1..4 the code must be
// min(7, floor(9 X / (144 * 2^n))) with X the sum of the levels, valid exactly
// three cycles after start, with busy high in between; back-to-back starts in
// the valid cycle must work. A second instance with CLK_DIV = 2 (ADC clocked at
// half the rate) must give the same codes with valid six cycles after start.
module tb_sar_adc;
  import osa_pkg::*;
  localparam int N = 144;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start, busy, valid;
  logic [2:0] prec;
  alvl_t aout [N];
  amac_t amac;
  int checks = 0, failures = 0;

  sar_adc #(.N(N)) dut (.*);

  logic  busy2, valid2;
  amac_t amac2;
  sar_adc #(.N(N), .CLK_DIV(2)) dut2 (
    .clk, .rst_n, .start, .prec, .aout, .busy(busy2), .valid(valid2), .amac(amac2)
  );

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int codes [8];
    for (int e = 0; e < 8; e++) codes[e] = 0;
    start = 0; prec = 1;
    for (int c = 0; c < N; c++) aout[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int n, x, e, dens;
      n = 1 + t % 4; dens = $urandom % 100;
      x = 0;
      for (int c = 0; c < N; c++) begin
        aout[c] = ($urandom % 100 < dens) ? alvl_t'((t % 3 == 2) ? (1 << n) - 1 - ($urandom % 2) : $urandom % (1 << n)) : 0;
        x += aout[c];
      end
      e = (9 * x) / (N << n); if (e > 7) e = 7;
      prec = 3'(n); start = 1;
      @(negedge clk); start = 0;
      for (int c = 0; c < N; c++) aout[c] = 4'hf;   // line may change after sampling
      check(busy && !valid, "busy after start");
      @(negedge clk); check(busy && !valid, "busy in second cycle, not yet valid");
      @(negedge clk);
      check(valid && !busy, "valid three cycles after start");
      check(amac == amac_t'(e), $sformatf("code %0d expected %0d (x=%0d n=%0d)", amac, e, x, n));
      codes[e]++;
    end
    for (int e = 0; e < 8; e++) check(codes[e] > 0, $sformatf("code %0d seen", e));
    // half-rate ADC: back-to-back conversions of six cycles each
    for (int t = 0; t < 200; t++) begin
      int n, x, e;
      n = 1 + t % 4;
      x = 0;
      for (int c = 0; c < N; c++) begin
        aout[c] = alvl_t'($urandom % (1 << n));
        if ($urandom % 3 == 0) aout[c] = 0;
        x += aout[c];
      end
      e = (9 * x) / (N << n); if (e > 7) e = 7;
      prec = 3'(n); start = 1;
      @(negedge clk); start = 0;
      for (int c = 0; c < N; c++) aout[c] = 4'hf;
      for (int w = 1; w < 6; w++) begin
        check(busy2 && !valid2, $sformatf("half-rate busy in cycle %0d", w));
        @(negedge clk);
      end
      check(valid2 && !busy2, "half-rate valid six cycles after start");
      check(amac2 == amac_t'(e), $sformatf("half-rate code %0d expected %0d (x=%0d n=%0d)", amac2, e, x, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
