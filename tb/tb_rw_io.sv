// tb_rw_io -- checks the read/write IO: a write raises the strobe of the HMU
// owning the row only and passes the data to the columns; a read ORs the
// columns' read lines of all HMUs and returns them one cycle later with rvalid.
module tb_rw_io;
  import osa_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, go, we, rvalid;
  logic [5:0] row;
  logic [N_COL-1:0] wdata, wbits, rdata;
  logic [N_HMU-1:0] hmu_we;
  logic [N_COL-1:0] col_rdata [N_HMU];
  int checks = 0, failures = 0;

  rw_io dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    go = 0; we = 0; row = 0; wdata = 0;
    for (int h = 0; h < N_HMU; h++) col_rdata[h] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [N_COL-1:0] d;
      int r;
      r = $urandom % 64;
      for (int c = 0; c < N_COL; c++) d[c] = 1'($urandom);
      go = 1; row = 6'(r);
      if (t % 2 == 0) begin
        we = 1; wdata = d; #1;
        check(hmu_we == 8'(1 << (r / 8)), "write strobe");
        check(wbits == d, "write data");
        @(negedge clk);
        check(!rvalid, "no rvalid after write");
      end else begin
        we = 0;
        for (int h = 0; h < N_HMU; h++) col_rdata[h] = (h == r / 8) ? d : '0;
        #1; check(hmu_we == 0, "no strobe on read");
        @(negedge clk);
        go = 0;
        for (int h = 0; h < N_HMU; h++) col_rdata[h] = '0;
        check(rvalid && rdata == d, "read data");
      end
      go = 0; we = 0;
      @(negedge clk);
      check(!rvalid, "rvalid one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
