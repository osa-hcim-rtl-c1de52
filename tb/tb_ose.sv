// tb_ose -- checks the saliency evaluator: S accumulates the sum of the eight
// RS inputs shifted by the order over the valid cycles, clear restarts it, and
// B_D/A is the candidate chosen by how many of the ascending thresholds S has
// reached, including values exactly on a threshold.
module tb_ose;
  import osa_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, clear, in_valid;
  logic [1:0] order;
  rs_t rs [N_HMU];
  sal_t thr [NB-1];
  bda_t bcand [NB];
  sal_t s;
  bda_t bda;
  int checks = 0, failures = 0;
  int seen [NB];

  ose dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; in_valid = 0; order = 0;
    for (int h = 0; h < N_HMU; h++) rs[h] = 0;
    for (int b = 0; b < NB; b++) begin bcand[b] = bda_t'(10 - b); seen[b] = 0; end
    for (int t = 0; t < NB - 1; t++) thr[t] = sal_t'(60 * (t + 1));
    repeat (2) @(negedge clk); rst_n = 1;
    for (int op = 0; op < 200; op++) begin
      int S, sel;
      clear = 1; @(negedge clk); clear = 0;
      check(s == 0, "clear");
      S = 0;
      for (int cyc = 0; cyc < 6; cyc++) begin
        int sum;
        sum = 0;
        for (int h = 0; h < N_HMU; h++) begin rs[h] = rs_t'($urandom % (1 + op % 8)); sum += rs[h]; end
        order = (cyc == 0) ? 2 : (cyc < 3) ? 1 : 0;
        in_valid = ($urandom % 5 != 0);
        if (in_valid) S += sum << order;
        @(negedge clk);
      end
      in_valid = 0;
      if (op % 10 == 3) thr[op % 5] = sal_t'(S);          // exactly on a threshold
      for (int t = 0; t < NB - 1; t++) if (t > 0 && thr[t] < thr[t-1]) thr[t] = thr[t-1];
      #1;
      sel = 0; for (int t = 0; t < NB - 1; t++) if (S >= thr[t]) sel++;
      check(s == sal_t'(S), $sformatf("S %0d expected %0d", s, S));
      check(bda == bcand[sel], $sformatf("bda %0d expected %0d", bda, bcand[sel]));
      seen[sel]++;
      for (int t = 0; t < NB - 1; t++) thr[t] = sal_t'(60 * (t + 1));
    end
    for (int b = 0; b < NB; b++) check(seen[b] > 0, $sformatf("candidate %0d selected", b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
