// accumulator -- shift-and-add of the digital and analog partial sums.
//
// One lane per HMU. A digital 1-bit MAC of output order k arrives as DMAC with
// d_valid and is added as DMAC << k. An analog MAC is announced by a_start
// together with its shift (weight-bit index + lowest activation bit + n + 4, so
// that AMAC << shift rebuilds the charge-shared sum in MAC units); the shift is
// held until the ADC returns AMAC with a_valid, and AMAC << shift is added then.
// Both may be added in the same cycle. clear zeroes all lanes at a rising edge.
// Saturation is not needed: ACC_W covers 8b x 8b x 144 plus analog over-range.
// The combining by shifting and adding follows the paper; the shift convention
// for AMAC is this design's choice, tied to the ADC full scale of sar_adc.
module accumulator
  import osa_pkg::*;
#(
  parameter int unsigned NH = N_HMU,
  parameter int unsigned DW = DMAC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              d_valid,
  input  logic [SH_W-1:0]   d_k,
  input  logic [DW-1:0]     dmac [NH],
  input  logic              a_start,
  input  logic [SH_W-1:0]   a_shift,
  input  logic              a_valid,
  input  amac_t             amac [NH],
  output acc_t              acc  [NH]
);

  logic [SH_W-1:0] a_shift_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       a_shift_q <= '0;
    else if (a_start) a_shift_q <= a_shift;
  end

  for (genvar h = 0; h < NH; h++) begin : g_lane
    acc_t d_term, a_term;
    assign d_term = d_valid ? (acc_t'(dmac[h]) << d_k)       : '0;
    assign a_term = a_valid ? (acc_t'(amac[h]) << a_shift_q) : '0;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     acc[h] <= '0;
      else if (clear) acc[h] <= '0;
      else            acc[h] <= acc[h] + d_term + a_term;
    end
  end

endmodule
