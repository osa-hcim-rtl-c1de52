// tb_osa_hcim_workloads -- two workloads on the full-size macro.
//
// 1. Boundary sweep (8b x 8b MAC, B_D/A = 10..5). The same 24 random activation
//    vectors are run with every candidate set to one boundary, so that boundary
//    is forced. The bench measures the signal-to-error ratio of the eight results
//    against the exact dot products and the latency, and checks that
//      * the error never grows as B falls,
//      * B = 5 is within 1% of exact,
//      * the latency is ns + 5 + max(nd, 3 na) cycles (35 35 35 41 48 54).
//    A second macro with ADC_DIV = 2 (digital path clocked twice as fast as the
//    ADC) runs alongside. It must give the same results, with latency
//    ns + 5 + max(nd, 6 na) digital cycles (59 59 59 53 48 54).
// 2. Saliency map. A 6 x 6 "image" has an object in the middle (large
//    activations), a ring of medium pixels and a background of small ones. Each
//    pixel is one 144-input vector. With fixed thresholds the evaluator must give
//    every object pixel a lower (more precise) boundary than every background
//    pixel. The bench prints the B_D/A map.
module tb_osa_hcim_workloads;
  import osa_pkg::*;

  localparam int NH = N_HMU;
  localparam int N  = N_COL;

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

  // the same macro with the ADC at half the digital clock
  logic busy2, done2, rw_rvalid2;
  acc_t result2 [NH];
  bda_t bda2;
  sal_t saliency2;
  logic [N-1:0] rw_rdata2;
  osa_hcim #(.ADC_DIV(2)) dut2 (
    .clk, .rst_n, .start, .cfg, .bcand, .thr, .act_load, .act_in,
    .busy(busy2), .done(done2), .result(result2), .bda(bda2), .saliency(saliency2),
    .rw_req, .rw_we, .rw_row, .rw_wdata, .rw_rdata(rw_rdata2), .rw_rvalid(rw_rvalid2)
  );

  int checks = 0, failures = 0;
  logic [7:0] wt [NH][N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_act(logic [7:0] v [N]);
    @(negedge clk);
    act_in = v; act_load = 1;
    @(negedge clk);
    act_load = 0;
  endtask

  // runs one operation on both macros; lat and lat2 are their latencies
  task automatic run(output int lat, output int lat2);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0; lat = 0; lat2 = 0;
    for (int t = 1; lat == 0 || lat2 == 0; t++) begin
      if (done  && lat  == 0) lat  = t;
      if (done2 && lat2 == 0) lat2 = t;
      @(negedge clk);
    end
    check(!busy && !busy2, "both macros idle after done");
  endtask

  initial begin
    logic [7:0] vecs [24][N];
    real err_db [16];
    int  lat_of [16];
    int  lat2_of [16];
    start = 0; act_load = 0; rw_req = 0; rw_we = 0; rw_row = '0; rw_wdata = '0;
    for (int c = 0; c < N; c++) act_in[c] = '0;
    cfg = '0; cfg.w_bits = 4'd8; cfg.a_bits = 4'd8; cfg.s_orders = 2'd3; cfg.nq_shift = 3'd4;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // random 8-bit weights, written bit-plane by bit-plane
    for (int h = 0; h < NH; h++) for (int c = 0; c < N; c++) wt[h][c] = 8'($urandom);
    for (int r = 0; r < NH * N_ROW; r++) begin
      @(negedge clk);
      rw_req = 1; rw_we = 1; rw_row = 6'(r);
      for (int c = 0; c < N; c++) rw_wdata[c] = wt[r / 8][c][r % 8];
      @(negedge clk);
      rw_req = 0; rw_we = 0;
    end

    // ---- 1. boundary sweep ----
    for (int v = 0; v < 24; v++) for (int c = 0; c < N; c++) vecs[v][c] = 8'($urandom);
    for (int t = 0; t < NB - 1; t++) thr[t] = '0;
    for (int B = 10; B >= 5; B--) begin
      real sig, err;
      sig = 0.0; err = 0.0;
      for (int b = 0; b < NB; b++) bcand[b] = bda_t'(B);
      for (int v = 0; v < 24; v++) begin
        int lat, lat2;
        load_act(vecs[v]);
        run(lat, lat2);
        lat_of[B] = lat;
        lat2_of[B] = lat2;
        check(bda == bda_t'(B), "forced boundary");
        check(bda2 == bda && saliency2 == saliency && result2 == result,
              "half-rate ADC gives the same results");
        for (int h = 0; h < NH; h++) begin
          longint ex;
          ex = 0;
          for (int c = 0; c < N; c++) ex += longint'(wt[h][c]) * longint'(vecs[v][c]);
          sig += real'(ex) * real'(ex);
          err += (real'(ex) - real'(result[h])) * (real'(ex) - real'(result[h]));
          check(longint'(result[h]) <= ex + (ex >> 4), "result not far above exact");
        end
      end
      err_db[B] = 10.0 * $log10(sig / (err + 1.0));
      $display("B_D/A %0d: signal-to-error %0.1f dB, latency %0d cycles (%0d with the half-rate ADC)",
               B, err_db[B], lat_of[B], lat2_of[B]);
    end
    for (int B = 9; B >= 5; B--)
      check(err_db[B] >= err_db[B + 1], $sformatf("error does not grow from B=%0d to B=%0d", B + 1, B));
    check(err_db[5] > 40.0, "B=5 within 1% of exact");
    check(lat_of[10] == 35 && lat_of[9] == 35 && lat_of[8] == 35, "latency B=10..8");
    check(lat_of[7] == 41 && lat_of[6] == 48 && lat_of[5] == 54, "latency B=7..5");
    // half-rate ADC: ns + 5 + max(nd, 6 na)
    check(lat2_of[10] == 59 && lat2_of[9] == 59 && lat2_of[8] == 59, "half-rate latency B=10..8");
    check(lat2_of[7] == 53 && lat2_of[6] == 48 && lat2_of[5] == 54, "half-rate latency B=7..5");

    // ---- 2. saliency map ----
    bcand[0] = 10; bcand[1] = 9; bcand[2] = 8; bcand[3] = 7; bcand[4] = 6; bcand[5] = 5;
    thr[0] = 40; thr[1] = 100; thr[2] = 160; thr[3] = 220; thr[4] = 280;
    begin
      int map [6][6];
      int max_obj, min_bg;
      max_obj = 0; min_bg = 15;
      for (int y = 0; y < 6; y++) for (int x = 0; x < 6; x++) begin
        logic [7:0] px [N];
        int ring, lat, lat2;
        ring = (x >= 2 && x <= 3 && y >= 2 && y <= 3) ? 2 : (x >= 1 && x <= 4 && y >= 1 && y <= 4) ? 1 : 0;
        for (int c = 0; c < N; c++)
          px[c] = (ring == 2) ? 8'(128 + $urandom % 128) : (ring == 1) ? 8'(32 + $urandom % 96) : 8'($urandom % 32);
        load_act(px);
        run(lat, lat2);
        map[y][x] = int'(bda);
        if (ring == 2 && map[y][x] > max_obj) max_obj = map[y][x];
        if (ring == 0 && map[y][x] < min_bg)  min_bg  = map[y][x];
      end
      $display("B_D/A map (object in the middle):");
      for (int y = 0; y < 6; y++)
        $display("  %2d %2d %2d %2d %2d %2d", map[y][0], map[y][1], map[y][2], map[y][3], map[y][4], map[y][5]);
      check(max_obj < min_bg, "object pixels get a lower boundary than background pixels");
      check(min_bg == 10, "background at the least precise candidate");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
