// tb_accumulator -- checks the shift-and-add accumulator: random digital
// partial sums added as DMAC << k, analog codes added as AMAC << shift with the
// shift captured at a_start and used when a_valid arrives three cycles later
// (while the next a_start may already change it), both in the same cycle, and
// clear.
module tb_accumulator;
  import osa_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, clear, d_valid, a_start, a_valid;
  logic [SH_W-1:0] d_k, a_shift;
  dmac_t dmac [N_HMU];
  amac_t amac [N_HMU];
  acc_t acc [N_HMU];
  int checks = 0, failures = 0;
  longint ref_acc [N_HMU];

  accumulator dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int pend_shift, next_shift, cnt;
    clear = 0; d_valid = 0; a_start = 0; a_valid = 0; d_k = 0; a_shift = 0;
    for (int h = 0; h < N_HMU; h++) begin dmac[h] = 0; amac[h] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int op = 0; op < 20; op++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int h = 0; h < N_HMU; h++) begin ref_acc[h] = 0; check(acc[h] == 0, "cleared"); end
      pend_shift = 0; cnt = 0;
      for (int cyc = 0; cyc < 40; cyc++) begin
        d_valid = 1'($urandom);
        d_k = SH_W'($urandom % 15);
        a_valid = (cnt == 3);
        a_start = (cnt == 0) || (cnt == 3);
        next_shift = 4 + $urandom % 13;
        a_shift = SH_W'(next_shift);
        for (int h = 0; h < N_HMU; h++) begin
          dmac[h] = dmac_t'($urandom % 145);
          amac[h] = amac_t'($urandom);
          if (d_valid) ref_acc[h] += longint'(dmac[h]) << d_k;
          if (a_valid) ref_acc[h] += longint'(amac[h]) << pend_shift;
        end
        if (a_start) begin pend_shift = next_shift; cnt = 1; end else if (cnt > 0) cnt++;
        @(negedge clk);
      end
      d_valid = 0; a_valid = 0; a_start = 0;
      for (int h = 0; h < N_HMU; h++)
        check(acc[h] == acc_t'(ref_acc[h]), $sformatf("lane %0d %0d expected %0d", h, acc[h], ref_acc[h]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
