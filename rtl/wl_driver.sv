// wl_driver -- digital and analog word-line drivers (DWL/AWL) and RWen.
//
// The macro has 64 rows: row r belongs to HMU r/8 and is bit r%8 of that HMU's
// HCIMAs. In the RW state the row addressed by rw_row gets both its DWL and its
// AWL, as a normal 6T read or write, and RWen is high. In CIM operation every HMU
// computes at once on its own weights, so d_en raises DWL of bit d_row in all
// HMUs and a_en raises AWL of bit a_row in all HMUs; RWen is low. Combinational.
// Both word lines on the target row in RW and the shared DWL/AWL selection in CIM
// follow the paper; the row numbering is this design's choice.
module wl_driver
  import osa_pkg::*;
#(
  parameter int unsigned NH = N_HMU
) (
  input  logic                      rw_go,
  input  logic [$clog2(NH*N_ROW)-1:0] rw_row,
  input  logic                      d_en,
  input  logic [2:0]                d_row,
  input  logic                      a_en,
  input  logic [2:0]                a_row,
  output logic                      rwen,
  output logic [N_ROW-1:0]          dwl [NH],
  output logic [N_ROW-1:0]          awl [NH]
);

  always_comb begin
    rwen = rw_go;
    for (int h = 0; h < NH; h++) begin
      dwl[h] = '0;
      awl[h] = '0;
      if (rw_go) begin
        if (int'(rw_row) / N_ROW == h) begin
          dwl[h][rw_row[2:0]] = 1'b1;
          awl[h][rw_row[2:0]] = 1'b1;
        end
      end else begin
        if (d_en) dwl[h][d_row] = 1'b1;
        if (a_en) awl[h][a_row] = 1'b1;
      end
    end
  end

endmodule
