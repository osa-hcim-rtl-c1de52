// tb_osa_hcim -- end-to-end test of the hybrid saliency-aware CIM macro at its
// default size (8 HMUs x 144 columns).
//
// The bench writes random 8-bit weights into all 64 rows through the SRAM port,
// reads rows back, then runs a series of multi-bit MAC operations with random
// activations and several precision settings. For each operation a reference
// model written here from the allocation rule recomputes the saliency S, the
// boundary B_D/A, the exact digital part and the ideal 3-bit ADC codes of the
// analog part, and the expected latency in cycles. Thresholds are placed around
// the reference S so that every one of the six candidates is selected in turn.
// It counts the mechanisms of the design (SRAM write/read, saliency mode, each
// candidate boundary, each analog precision 1..4, discarded orders, concurrent
// digital and analog issue, ADC saturation, 4-bit weights from either half) and
// counts a failure for any that never happened.
module tb_osa_hcim;
  import osa_pkg::*;

  localparam int NH = N_HMU;
  localparam int N  = N_COL;
  localparam int NOPS = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start, act_load, rw_req, rw_we;
  op_cfg_t           cfg;
  bda_t              bcand [NB];
  sal_t              thr   [NB-1];
  logic [MAX_AB-1:0] act_in [N];
  logic              busy, done, rw_rvalid;
  acc_t              result [NH];
  bda_t              bda;
  sal_t              saliency;
  logic [5:0]        rw_row;
  logic [N-1:0]      rw_wdata, rw_rdata;

  osa_hcim dut (.*);

  int checks = 0, failures = 0;
  logic [N-1:0] wmem [NH*N_ROW];

  // mechanism counters
  int n_wr = 0, n_rd = 0, n_sal = 0, n_conc = 0, n_disc = 0, n_sat = 0, n_half = 0, n_a4 = 0;
  int n_b [16];
  int n_prec [5];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // concurrency monitor
  always @(posedge clk) if (rst_n && dut.d_en && dut.a_start) n_conc++;
  always @(posedge clk) if (rst_n && dut.u_ctrl.state == ST_SAL) n_sal++;
  always @(posedge clk) if (rst_n && dut.amac_valid[0])
    for (int h = 0; h < NH; h++) if (dut.amac[h] == 3'd7) n_sat++;
  always @(posedge clk) if (rst_n && dut.a_start) n_prec[dut.a_n]++;

  // reference helpers
  function automatic int wbit(int h, int i, int c, op_cfg_t cf);
    int row;
    row = h * N_ROW + ((cf.w_bits == 4 && cf.w_half) ? i + 4 : i);
    return int'(wmem[row][c]);
  endfunction

  function automatic int dmac_ref(int h, int i, int j, op_cfg_t cf);
    int s = 0;
    for (int c = 0; c < N; c++) s += wbit(h, i, c, cf) & int'(act_in[c][j]);
    return s;
  endfunction

  function automatic int xsum_ref(int h, int i, int lo, int n, op_cfg_t cf);
    int s = 0;
    for (int c = 0; c < N; c++) s += wbit(h, i, c, cf) * ((int'(act_in[c]) >> lo) & ((1 << n) - 1));
    return s;
  endfunction

  task automatic rw_write(int row, logic [N-1:0] data);
    @(negedge clk);
    rw_req = 1; rw_we = 1; rw_row = 6'(row); rw_wdata = data;
    @(negedge clk);
    rw_req = 0; rw_we = 0;
    @(negedge clk);
    wmem[row] = data;
    n_wr++;
  endtask

  task automatic rw_read(int row);
    @(negedge clk);
    rw_req = 1; rw_we = 0; rw_row = 6'(row);
    @(negedge clk);
    rw_req = 0;
    check(rw_rvalid == 1'b1, "read valid");
    check(rw_rdata == wmem[row], $sformatf("read row %0d", row));
    n_rd++;
    @(negedge clk);
  endtask

  task automatic run_op(int op, op_cfg_t cf, int dense);
    int wb, ab, kmax, ksl, S, bin, B, lat, exp_lat, nsal, nd, na, base, td, ta;
    longint exp_res [NH];
    // activations
    for (int c = 0; c < N; c++) begin
      act_in[c] = dense ? 8'hff : 8'($urandom);
      if (cf.a_bits == 4) act_in[c] = act_in[c] & 8'h0f;
    end
    @(negedge clk); act_load = 1; @(negedge clk); act_load = 0;

    wb = cf.w_bits; ab = cf.a_bits;
    kmax = wb + ab - 2; ksl = wb + ab - 1 - cf.s_orders;
    // saliency and the digital high-order part
    S = 0; nsal = 0;
    for (int h = 0; h < NH; h++) exp_res[h] = 0;
    for (int i = 0; i < wb; i++) for (int j = 0; j < ab; j++) if (i + j >= ksl) begin
      int rsum = 0;
      nsal++;
      for (int h = 0; h < NH; h++) begin
        int d = dmac_ref(h, i, j, cf);
        int r = d >> cf.nq_shift;
        rsum += (r > 7) ? 7 : r;
        exp_res[h] += longint'(d) << (i + j);
      end
      S += rsum << (i + j - ksl);
    end
    // place thresholds so that candidate (op % 6) is chosen
    bin = op % NB;
    for (int t = 0; t < NB - 1; t++) thr[t] = (t < bin) ? sal_t'((S * (t + 1)) / (bin + 1)) : sal_t'(S + 1 + t);
    if (bin > 0 && S == 0) bin = NB - 1; // all thresholds 0 -> last candidate
    if (bin > 0 && S == 0) for (int t = 0; t < NB - 1; t++) thr[t] = 0;
    if (wb == 8 && ab == 8) begin
      bcand[0] = 10; bcand[1] = 9; bcand[2] = 8; bcand[3] = 7; bcand[4] = 6; bcand[5] = 5;
    end else begin
      for (int b = 0; b < NB; b++) bcand[b] = bda_t'((ksl - b > 1) ? ksl - b : 1);
    end
    B = bcand[bin];
    // computing mode reference
    nd = 0; na = 0;
    for (int i = 0; i < wb; i++) for (int j = 0; j < ab; j++)
      if (i + j >= B && i + j < ksl) begin
        nd++;
        for (int h = 0; h < NH; h++) exp_res[h] += longint'(dmac_ref(h, i, j, cf)) << (i + j);
      end
    for (int i = 0; i < wb; i++) begin
      int lo, hi, khi;
      khi = (B - 1 < ksl - 1) ? B - 1 : ksl - 1;
      lo = (B - 4 - i > 0) ? B - 4 - i : 0;
      hi = (khi - i < ab - 1) ? khi - i : ab - 1;
      if (hi >= lo) begin
        int n = hi - lo + 1;
        na++;
        for (int h = 0; h < NH; h++) begin
          int x = xsum_ref(h, i, lo, n, cf);
          int q = (9 * x) / (N << n);
          if (q > 7) q = 7;
          exp_res[h] += longint'(q) << (i + lo + n + 4);
        end
      end
    end
    if (B - 4 > 0) n_disc++;
    // expected latency from start to done
    base = nsal + 3;
    td = base + nd - 1;
    ta = base + 3 * (na - 1);
    exp_lat = base + 2;
    if (nd > 0 && td + 3 > exp_lat) exp_lat = td + 3;
    if (na > 0 && ta + 5 > exp_lat) exp_lat = ta + 5;

    // run
    @(negedge clk);
    cfg = cf; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    check(bda == bda_t'(B), $sformatf("op %0d B_D/A %0d expected %0d (S=%0d)", op, bda, B, S));
    check(saliency == sal_t'(S), $sformatf("op %0d saliency %0d expected %0d", op, saliency, S));
    check(lat == exp_lat, $sformatf("op %0d latency %0d expected %0d (nsal %0d nd %0d na %0d)",
                                    op, lat, exp_lat, nsal, nd, na));
    for (int h = 0; h < NH; h++)
      check(result[h] == acc_t'(exp_res[h]),
            $sformatf("op %0d hmu %0d result %0d expected %0d", op, h, result[h], exp_res[h]));
    n_b[B]++;
    if (cf.w_bits == 4 && cf.w_half) n_half++;
    if (cf.a_bits == 4) n_a4++;
  endtask

  initial begin
    op_cfg_t cf;
    start = 0; act_load = 0; rw_req = 0; rw_we = 0; rw_row = '0; rw_wdata = '0;
    cfg = '0;
    for (int c = 0; c < N; c++) act_in[c] = '0;
    for (int b = 0; b < NB; b++) bcand[b] = '0;
    for (int t = 0; t < NB - 1; t++) thr[t] = '0;
    for (int b = 0; b < 16; b++) n_b[b] = 0;
    for (int b = 0; b < 5; b++) n_prec[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // fill the array
    for (int r = 0; r < NH * N_ROW; r++) begin
      logic [N-1:0] d;
      for (int c = 0; c < N; c++) d[c] = 1'($urandom);
      rw_write(r, d);
    end
    for (int r = 0; r < NH * N_ROW; r += 5) rw_read(r);

    for (int op = 0; op < NOPS; op++) begin
      cf = '0;
      cf.s_orders = 2'd3;
      cf.nq_shift = 3'(3 + op % 3);
      if (op < 18) begin
        cf.w_bits = 4'd8; cf.a_bits = 4'd8;
      end else begin
        cf.w_bits = 4'd4; cf.a_bits = (op % 2) ? 4'd4 : 4'd8; cf.w_half = 1'(op % 3 == 0);
        cf.s_orders = 2'(1 + op % 3);
      end
      run_op(op, cf, (op == 5 || op == 11) ? 1 : 0);
    end

    // an all-ones row set makes the ADC clip; rewrite HMU 0 bit 0..7 to ones
    for (int r = 0; r < N_ROW; r++) rw_write(r, '1);
    cf = '0; cf.w_bits = 4'd8; cf.a_bits = 4'd8; cf.s_orders = 2'd3; cf.nq_shift = 3'd5;
    run_op(NB - 1, cf, 1);
    rw_read(3);

    $display("mechanisms: wr=%0d rd=%0d salcycles=%0d concurrent=%0d discard=%0d adc_sat=%0d half=%0d a4=%0d",
             n_wr, n_rd, n_sal, n_conc, n_disc, n_sat, n_half, n_a4);
    $display("B use: 10:%0d 9:%0d 8:%0d 7:%0d 6:%0d 5:%0d  prec 1:%0d 2:%0d 3:%0d 4:%0d",
             n_b[10], n_b[9], n_b[8], n_b[7], n_b[6], n_b[5], n_prec[1], n_prec[2], n_prec[3], n_prec[4]);
    check(n_wr > 0 && n_rd > 0, "SRAM write and read happened");
    check(n_sal > 0, "saliency evaluation mode happened");
    check(n_conc > 0, "concurrent DCIM/ACIM issue happened");
    check(n_disc > 0, "discarded orders happened");
    check(n_sat > 0, "ADC saturation happened");
    check(n_half > 0, "4-bit weights from the upper half happened");
    check(n_a4 > 0, "4-bit activations happened");
    for (int b = 5; b <= 10; b++) check(n_b[b] > 0, $sformatf("boundary %0d used", b));
    for (int p = 1; p <= 4; p++) check(n_prec[p] > 0, $sformatf("analog precision %0d used", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
