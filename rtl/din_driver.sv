// din_driver -- digital input drivers (DIN).
//
// Sends the activations to the columns bit-serially: when en is high, column c's
// GBLB carries the inverse of bit j of its activation, so the HCIMA's NOR gate
// yields W & A[j]. When en is low every GBLB is high (no activation), so DOUT is
// 0. Combinational. The inverted bit-serial input follows the paper.
module din_driver
  import osa_pkg::*;
#(
  parameter int unsigned N = N_COL
) (
  input  logic [MAX_AB-1:0] act [N],
  input  logic              en,
  input  logic [2:0]        j,
  output logic [N-1:0]      gblb
);

  always_comb
    for (int c = 0; c < N; c++) gblb[c] = ~(en & act[c][j]);

endmodule
