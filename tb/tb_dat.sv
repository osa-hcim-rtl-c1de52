// tb_dat -- checks the digital adder tree at 144 inputs: random and corner
// vectors (all zero, all one, single bits), the one-cycle latency and that the
// output holds when in_valid is low.
module tb_dat;
  localparam int N = 144, W = $clog2(N + 1);
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, in_valid, out_valid;
  logic [N-1:0] dout;
  logic [W-1:0] dmac;
  int checks = 0, failures = 0;

  dat #(.N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; dout = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int cnt;
      case (t)
        0: dout = '0;
        1: dout = '1;
        2: dout = N'(1);
        3: dout = {1'b1, {(N-1){1'b0}}};
        default: for (int c = 0; c < N; c++) dout[c] = (t % 7 == 0) ? 1'b1 : 1'($urandom);
      endcase
      cnt = 0; for (int c = 0; c < N; c++) cnt += dout[c];
      in_valid = 1;
      @(negedge clk);
      check(out_valid == 1, "valid one cycle later");
      check(dmac == W'(cnt), $sformatf("sum %0d expected %0d", dmac, cnt));
      in_valid = 0; dout = ~dout;
      @(negedge clk);
      check(out_valid == 0 && dmac == W'(cnt), "hold without valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
