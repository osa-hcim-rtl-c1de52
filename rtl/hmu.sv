// hmu -- hybrid MAC unit: one output channel of the macro.
//
// N columns of hcima share this HMU's eight digital and eight analog word lines.
// Each column gets its own activation on GBLB (one inverted bit, digital) and GBL
// (a 1..4-bit DAC level, analog); these lines are common to all HMUs of the macro.
// In one cycle the HMU produces
//   * DMAC: the digital adder tree sum of the N DOUT bits (registered, valid the
//     cycle after d_valid), and RS, DMAC normalized and quantized to 3 bits for
//     the saliency evaluator;
//   * AOUT on every column, charge-shared and converted by the 3-bit SAR ADC into
//     AMAC (valid 3 * ADC_DIV cycles after adc_start).
// In the RW state the HMU writes wdata into the row selected by DWL and AWL when
// we is high, and returns the selected row on rdata (all zero if none of its rows
// is selected). The composition (HCIMAs, DAT, N/Q, SAR ADC) follows the paper.
module hmu
  import osa_pkg::*;
#(
  parameter int unsigned N         = N_COL,
  parameter int unsigned ADC_DIV   = 1      // ADC clock divider, see sar_adc
) (
  input  logic                clk,
  input  logic                rst_n,
  // word lines and RW access
  input  logic                rwen,
  input  logic                we,
  input  logic [N_ROW-1:0]    dwl,
  input  logic [N_ROW-1:0]    awl,
  input  logic [N-1:0]        wdata,
  output logic [N-1:0]        rdata,
  // digital path
  input  logic                d_valid,
  input  logic [N-1:0]        gblb,
  input  logic [2:0]          nq_shift,
  output logic                dmac_valid,
  output logic [$clog2(N+1)-1:0] dmac,
  output rs_t                 rs,
  // analog path
  input  alvl_t               gbl [N],
  input  logic                adc_start,
  input  logic [2:0]          adc_prec,
  output logic                adc_busy,
  output logic                amac_valid,
  output amac_t               amac
);

  localparam int unsigned DW = $clog2(N + 1);

  logic [N-1:0] dout;
  alvl_t        aout [N];

  for (genvar c = 0; c < N; c++) begin : g_col
    hcima u_hcima (
      .clk  (clk),
      .rwen (rwen),
      .we   (we),
      .wbit (wdata[c]),
      .dwl  (dwl),
      .awl  (awl),
      .gblb (gblb[c]),
      .gbl  (gbl[c]),
      .dout (dout[c]),
      .aout (aout[c]),
      .rbit (rdata[c])
    );
  end

  dat #(.N(N), .W(DW)) u_dat (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (d_valid),
    .dout      (dout),
    .out_valid (dmac_valid),
    .dmac      (dmac)
  );

  // N/Q sees the DMAC zero-extended or clipped to the package width
  dmac_t dmac_nq;
  assign dmac_nq = (DW > DMAC_W && (dmac >> DMAC_W) != 0) ? '1 : dmac_t'(dmac);

  nq u_nq (.dmac(dmac_nq), .nq_shift(nq_shift), .rs(rs));

  sar_adc #(.N(N), .CLK_DIV(ADC_DIV)) u_adc (
    .clk   (clk),
    .rst_n (rst_n),
    .start (adc_start),
    .prec  (adc_prec),
    .aout  (aout),
    .busy  (adc_busy),
    .valid (amac_valid),
    .amac  (amac)
  );

endmodule
