// osa_hcim -- on-the-fly saliency-aware hybrid SRAM CIM macro with its peripherals.
//
// NH hybrid MAC units (HMUs) of N columns each hold NH x 8 rows of 6T SRAM
// (64 x 144 by default). Each HMU stores the weights of one output channel, one
// 8-bit weight (or two 4-bit weights) per column, and all HMUs see the same N
// activations. An operation computes the NH dot products of the activation
// register with the HMUs' weights:
//
//   1. start with the configuration (precisions, OSE orders, N/Q shift), the six
//      B_D/A candidates and the five saliency thresholds;
//   2. saliency evaluation: the highest-order 1-bit MACs run on the digital path,
//      the evaluator (OSE) sums their 3-bit normalized DMACs into S and picks B_D/A;
//   3. computing: 1-bit MACs of order k >= B_D/A run on the digital path, those of
//      B_D/A-4 <= k < B_D/A on the analog path (bit-parallel, 3-bit SAR ADC), the
//      rest are dropped; both paths run at the same time;
//   4. done pulses for one cycle; result[h] holds HMU h's MAC, bda the boundary
//      used and saliency the value S.
//
// Between operations the array is an SRAM: rw_req with rw_we writes rw_wdata
// into row rw_row (HMU rw_row/8, weight bit rw_row%8) in one cycle; a read returns
// the row on rw_rdata with rw_rvalid one cycle later. act_load copies act_in into
// the activation register while the macro is idle. Everything runs on one clock.
// ADC_DIV = 2 slows each ADC bit decision to two cycles; this models the paper's
// option of clocking the digital path twice as fast as the ADC, with clk taken
// as the digital clock. The default, 1, clocks both paths alike.
// The block structure (HMUs of HCIMAs, DAT, N/Q and ADC; OSE; accumulator; DWL/AWL,
// DIN, AIN/DAC, R/W IO; controller) follows the paper; the interface, the
// configuration registers as ports and the cycle timing are this design's own.
module osa_hcim
  import osa_pkg::*;
#(
  parameter int unsigned NH        = N_HMU,
  parameter int unsigned N         = N_COL,
  parameter int unsigned ADC_DIV   = 1      // ADC clock = clk / ADC_DIV
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // operation
  input  logic                        start,
  input  op_cfg_t                     cfg,
  input  bda_t                        bcand [NB],
  input  sal_t                        thr   [NB-1],
  input  logic                        act_load,
  input  logic [MAX_AB-1:0]           act_in [N],
  output logic                        busy,
  output logic                        done,
  output acc_t                        result [NH],
  output bda_t                        bda,
  output sal_t                        saliency,
  // SRAM access
  input  logic                        rw_req,
  input  logic                        rw_we,
  input  logic [$clog2(NH*N_ROW)-1:0] rw_row,
  input  logic [N-1:0]                rw_wdata,
  output logic [N-1:0]                rw_rdata,
  output logic                        rw_rvalid
);

  localparam int unsigned DW = $clog2(N + 1);

  // Activation register
  logic [MAX_AB-1:0] act_q [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) act_q[c] <= '0;
    end else if (act_load && !busy) begin
      act_q <= act_in;
    end
  end

  // Controller
  state_e          state;
  logic [2:0]      nq_shift_q;
  logic            rw_go, d_en, a_start, op_clear;
  logic [2:0]      d_row, d_bit, a_row, a_lo, a_n;
  logic [SH_W-1:0] a_shift;
  dtag_t           d_tag_q;
  bda_t            ose_bda;
  logic            adc_busy  [NH];
  logic            amac_valid[NH];

  controller u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .cfg        (cfg),
    .rw_req     (rw_req),
    .ose_bda    (ose_bda),
    .adc_busy   (adc_busy[0]),
    .amac_valid (amac_valid[0]),
    .state      (state),
    .busy       (busy),
    .done       (done),
    .rw_go      (rw_go),
    .d_en       (d_en),
    .d_row      (d_row),
    .d_bit      (d_bit),
    .d_tag_q    (d_tag_q),
    .a_start    (a_start),
    .a_row      (a_row),
    .a_lo       (a_lo),
    .a_n        (a_n),
    .a_shift    (a_shift),
    .op_clear   (op_clear),
    .bda_q      (bda),
    .nq_shift_q (nq_shift_q)
  );

  // Word lines
  logic             rwen;
  logic [N_ROW-1:0] dwl [NH];
  logic [N_ROW-1:0] awl [NH];

  wl_driver #(.NH(NH)) u_wl (
    .rw_go  (rw_go),
    .rw_row (rw_row),
    .d_en   (d_en),
    .d_row  (d_row),
    .a_en   (a_start),
    .a_row  (a_row),
    .rwen   (rwen),
    .dwl    (dwl),
    .awl    (awl)
  );

  // Input drivers
  logic [N-1:0] gblb;
  alvl_t        gbl [N];

  din_driver #(.N(N)) u_din (.act(act_q), .en(d_en), .j(d_bit), .gblb(gblb));

  ain_dac #(.N(N)) u_ain (.act(act_q), .en(a_start), .lo(a_lo), .n(a_n), .gbl(gbl));

  // R/W IO
  logic [N-1:0]  wbits;
  logic [NH-1:0] hmu_we;
  logic [N-1:0]  col_rdata [NH];

  rw_io #(.NH(NH), .N(N)) u_rwio (
    .clk       (clk),
    .rst_n     (rst_n),
    .go        (rw_go),
    .we        (rw_we),
    .row       (rw_row),
    .wdata     (rw_wdata),
    .wbits     (wbits),
    .hmu_we    (hmu_we),
    .col_rdata (col_rdata),
    .rdata     (rw_rdata),
    .rvalid    (rw_rvalid)
  );

  // Hybrid MAC units
  logic [DW-1:0] dmac [NH];
  rs_t           rs   [NH];
  amac_t         amac [NH];
  logic          dmac_valid [NH];

  for (genvar h = 0; h < NH; h++) begin : g_hmu
    hmu #(.N(N), .ADC_DIV(ADC_DIV)) u_hmu (
      .clk        (clk),
      .rst_n      (rst_n),
      .rwen       (rwen),
      .we         (hmu_we[h]),
      .dwl        (dwl[h]),
      .awl        (awl[h]),
      .wdata      (wbits),
      .rdata      (col_rdata[h]),
      .d_valid    (d_en),
      .gblb       (gblb),
      .nq_shift   (nq_shift_q),
      .dmac_valid (dmac_valid[h]),
      .dmac       (dmac[h]),
      .rs         (rs[h]),
      .gbl        (gbl),
      .adc_start  (a_start),
      .adc_prec   (a_n),
      .adc_busy   (adc_busy[h]),
      .amac_valid (amac_valid[h]),
      .amac       (amac[h])
    );
  end

  // Saliency evaluator
  ose #(.NH(NH), .NC(NB)) u_ose (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (op_clear),
    .in_valid (d_tag_q.valid && d_tag_q.sal),
    .order    (d_tag_q.order),
    .rs       (rs),
    .thr      (thr),
    .bcand    (bcand),
    .s        (saliency),
    .bda      (ose_bda)
  );

  // Accumulator
  accumulator #(.NH(NH), .DW(DW)) u_acc (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (op_clear),
    .d_valid (d_tag_q.valid),
    .d_k     (d_tag_q.k),
    .dmac    (dmac),
    .a_start (a_start),
    .a_shift (a_shift),
    .a_valid (amac_valid[0]),
    .amac    (amac),
    .acc     (result)
  );

  // The tag pipeline and the adder-tree register move together
  assert property (@(posedge clk) disable iff (!rst_n) d_tag_q.valid == dmac_valid[0]);
  // Word lines are only driven for computation in the two CIM modes
  assert property (@(posedge clk) disable iff (!rst_n) (d_en || a_start) |-> (state == ST_SAL || state == ST_COMP));
  // A RW access never overlaps CIM word-line activity
  assert property (@(posedge clk) disable iff (!rst_n) rw_go |-> !(d_en || a_start));

endmodule
