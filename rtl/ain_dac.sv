// ain_dac -- analog input drivers (AIN) with the variable-precision DAC.
//
// Sends the activations to the columns bit-parallel: when en is high, column c's
// GBL is driven to the level of the n-bit field act[c][lo +: n], n = 1..4. The
// DAC is a switch matrix that connects GBL to one of the reference taps, so its
// output is represented here by the selected tap index (0..15); with n bits the
// taps used are 0..2^n-1, scaled by 2^-n of the reference (see sar_adc). When en
// is low every GBL is at level 0. Combinational. Bit-parallel 1-4-bit analog
// inputs through a switch-matrix DAC follow the paper; the tap encoding is this
// design's choice.
module ain_dac
  import osa_pkg::*;
#(
  parameter int unsigned N = N_COL
) (
  input  logic [MAX_AB-1:0] act [N],
  input  logic              en,
  input  logic [2:0]        lo,
  input  logic [2:0]        n,
  output alvl_t             gbl [N]
);

  always_comb begin
    logic [MAX_AB-1:0] mask;
    mask = MAX_AB'((1 << n) - 1);
    for (int c = 0; c < N; c++)
      gbl[c] = en ? alvl_t'((act[c] >> lo) & mask) : '0;
  end

endmodule
