// tb_controller -- checks the sequencer against the allocation rule.
//
// For many precisions, OSE order counts, weight halves and boundaries B, the
// bench records every digital issue (row, activation bit, tag) and every analog
// issue (row, lowest bit, width, shift) and compares them with lists built here:
// saliency-mode pairs k >= w+a-1-s and digital pairs B <= k < w+a-1-s, weight
// bit descending then activation bit descending; one analog issue per weight bit
// covering B-4 <= k < B. A small model of the 3-cycle ADC answers busy/valid.
// It also checks that B is latched, the latency from start to done, and that a
// RW request is only accepted in IDLE.
module tb_controller;
  import osa_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start, rw_req, adc_busy, amac_valid;
  op_cfg_t cfg;
  bda_t ose_bda;
  state_e state;
  logic busy, done, rw_go, d_en, a_start, op_clear;
  logic [2:0] d_row, d_bit, a_row, a_lo, a_n;
  logic [SH_W-1:0] a_shift;
  dtag_t d_tag_q;
  bda_t bda_q;
  logic [2:0] nq_shift_q;
  int checks = 0, failures = 0;

  controller dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ADC model: busy for two cycles after start, valid on the third
  int adc_cnt = 0;
  always_ff @(posedge clk) begin
    if (a_start) adc_cnt <= 1;
    else if (adc_cnt > 0 && adc_cnt < 3) adc_cnt <= adc_cnt + 1;
    else adc_cnt <= 0;
  end
  assign adc_busy   = (adc_cnt == 1) || (adc_cnt == 2);
  assign amac_valid = (adc_cnt == 3);

  // recorders
  int got_d [$];
  int got_a [$];
  always @(posedge clk) if (rst_n) begin
    if (d_en)    got_d.push_back({state == ST_SAL, 5'(d_row), 5'(d_bit)});
    if (a_start) got_a.push_back({5'(a_row), 5'(a_lo), 5'(a_n), 5'(a_shift)});
  end

  initial begin
    int ops = 0;
    start = 0; rw_req = 0; cfg = '0; ose_bda = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int wb = 4; wb <= 8; wb += 4) for (int ab = 4; ab <= 8; ab += 4)
    for (int s = 1; s <= 3; s++) for (int B = 1; B <= 12; B++) for (int hf = 0; hf < 2; hf++) begin
      int exp_d [$];
      int exp_a [$];
      int ksl, lat, nd, na, ns, base, td, ta, elat, prow;
      if (wb == 8 && hf == 1) continue;
      ksl = wb + ab - 1 - s;
      exp_d.delete(); exp_a.delete(); got_d.delete(); got_a.delete();
      ns = 0; nd = 0; na = 0;
      for (int i = wb - 1; i >= 0; i--) for (int j = ab - 1; j >= 0; j--) begin
        prow = (wb == 4 && hf) ? i + 4 : i;
        if (i + j >= ksl) begin exp_d.push_back({1'b1, 5'(prow), 5'(j)}); ns++; end
      end
      for (int i = wb - 1; i >= 0; i--) for (int j = ab - 1; j >= 0; j--) begin
        prow = (wb == 4 && hf) ? i + 4 : i;
        if (i + j >= B && i + j < ksl) begin exp_d.push_back({1'b0, 5'(prow), 5'(j)}); nd++; end
      end
      for (int i = wb - 1; i >= 0; i--) begin
        int lo, hi;
        prow = (wb == 4 && hf) ? i + 4 : i;
        lo = -1; hi = -1;
        for (int j = 0; j < ab; j++) if (i + j >= B - 4 && i + j < B && i + j < ksl) begin
          if (lo < 0) lo = j;
          hi = j;
        end
        if (lo >= 0) begin
          exp_a.push_back({5'(prow), 5'(lo), 5'(hi - lo + 1), 5'(i + lo + (hi - lo + 1) + 4)});
          na++;
        end
      end
      base = ns + 3; td = base + nd - 1; ta = base + 3 * (na - 1);
      elat = base + 2;
      if (nd > 0 && td + 3 > elat) elat = td + 3;
      if (na > 0 && ta + 5 > elat) elat = ta + 5;

      @(negedge clk);
      cfg = '0; cfg.w_bits = 4'(wb); cfg.a_bits = 4'(ab); cfg.s_orders = 2'(s); cfg.w_half = 1'(hf);
      ose_bda = bda_t'(B); start = 1;
      #1 check(op_clear, "clear with start");
      @(negedge clk); start = 0; lat = 1;
      rw_req = 1; #1 check(!rw_go, "no RW while busy"); 
      while (!done) begin @(negedge clk); lat++; end
      rw_req = 0;
      check(bda_q == bda_t'(B), "B latched");
      check(lat == elat, $sformatf("w%0d a%0d s%0d B%0d latency %0d expected %0d", wb, ab, s, B, lat, elat));
      check(got_d.size() == exp_d.size(), $sformatf("w%0d a%0d s%0d B%0d digital issues %0d expected %0d", wb, ab, s, B, got_d.size(), exp_d.size()));
      for (int k = 0; k < exp_d.size() && k < got_d.size(); k++)
        check(got_d[k] == exp_d[k], $sformatf("digital issue %0d: %h expected %h", k, got_d[k], exp_d[k]));
      check(got_a.size() == exp_a.size(), $sformatf("w%0d a%0d s%0d B%0d analog issues %0d expected %0d", wb, ab, s, B, got_a.size(), exp_a.size()));
      for (int k = 0; k < exp_a.size() && k < got_a.size(); k++)
        check(got_a[k] == exp_a[k], $sformatf("analog issue %0d: %h expected %h", k, got_a[k], exp_a[k]));
      @(negedge clk);
      check(state == ST_IDLE, "back to idle");
      rw_req = 1; #1 check(rw_go, "RW accepted in idle");
      @(negedge clk); rw_req = 0; check(state == ST_RW, "RW state");
      @(negedge clk);
      ops++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
