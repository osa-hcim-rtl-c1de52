// tb_wl_driver -- checks the word-line drivers exhaustively: in RW every one of
// the 64 rows raises exactly its own DWL and AWL and RWen, whatever the CIM
// requests; in CIM the digital and analog rows are raised in every HMU.
module tb_wl_driver;
  import osa_pkg::*;
  logic rw_go, d_en, a_en, rwen;
  logic [5:0] rw_row;
  logic [2:0] d_row, a_row;
  logic [N_ROW-1:0] dwl [N_HMU];
  logic [N_ROW-1:0] awl [N_HMU];
  int checks = 0, failures = 0;

  wl_driver dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int r = 0; r < 64; r++) begin
      rw_go = 1; rw_row = 6'(r); d_en = 1'($urandom); a_en = 1'($urandom);
      d_row = 3'($urandom); a_row = 3'($urandom); #1;
      check(rwen == 1, "rwen");
      for (int h = 0; h < N_HMU; h++) begin
        logic [7:0] e;
        e = (h == r / 8) ? 8'(1 << (r % 8)) : 8'h00;
        check(dwl[h] == e && awl[h] == e, $sformatf("RW row %0d hmu %0d", r, h));
      end
    end
    for (int t = 0; t < 256; t++) begin
      rw_go = 0; d_en = 1'(t); a_en = 1'(t >> 1); d_row = 3'(t >> 2); a_row = 3'(t >> 5); rw_row = 6'($urandom); #1;
      check(rwen == 0, "rwen low");
      for (int h = 0; h < N_HMU; h++) begin
        check(dwl[h] == (d_en ? 8'(1 << d_row) : 8'h00), "dwl");
        check(awl[h] == (a_en ? 8'(1 << a_row) : 8'h00), "awl");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
