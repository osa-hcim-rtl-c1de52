// rw_io -- read/write IO of the macro for normal SRAM access.
//
// A request (req, we, row, wdata) is served in one cycle in the RW state, when
// the controller raises go. A write drives the row's data onto the columns' GBL
// (and its inverse on GBLB) and raises the write strobe of the HMU that owns the
// row; the cells take the data at the rising edge. A read senses the columns'
// GBL lines, which carry the addressed row (every other HMU drives 0), and
// returns the word on rdata with rvalid one cycle later. The paper only names
// this unit; the one-cycle single-row protocol is this design's choice.
module rw_io
  import osa_pkg::*;
#(
  parameter int unsigned NH = N_HMU,
  parameter int unsigned N  = N_COL
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        go,
  input  logic                        we,
  input  logic [$clog2(NH*N_ROW)-1:0] row,
  input  logic [N-1:0]                wdata,
  output logic [N-1:0]                wbits,
  output logic [NH-1:0]               hmu_we,
  input  logic [N-1:0]                col_rdata [NH],
  output logic [N-1:0]                rdata,
  output logic                        rvalid
);

  logic [N-1:0] sensed;

  always_comb begin
    wbits  = wdata;
    hmu_we = '0;
    if (go && we) hmu_we[int'(row) / N_ROW] = 1'b1;
    sensed = '0;
    for (int h = 0; h < NH; h++) sensed |= col_rdata[h];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      rvalid <= go && !we;
      if (go && !we) rdata <= sensed;
    end
  end

endmodule
