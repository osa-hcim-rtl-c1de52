// hcima -- hybrid CIM array: one column of one HMU.
//
// Eight split-port 6T SRAM bits W[7:0] share two local bit lines. The digital
// port reads the inverted bit Wb[r] of the row whose DWL is high onto LBLB; the
// analog port reads the true bit W[r] of the row whose AWL is high onto LBL.
// Because the ports are separate, a digital and an analog 1-bit multiplication
// on two different weight bits happen in the same cycle.
//
//   digital multiplier  DOUT = NOR(LBLB, GBLB) = W[dr] & A[j]   (GBLB carries ~A[j])
//   analog multiplier   AOUT = LBL ? GBL : 0                     (T0 passes GBL, N2 pulls low)
//
// Both local bit lines are precharged high (P0/P1) at the start of every cycle
// and discharged by any selected cell holding the opposite value, so a line is the
// AND of the selected cells, and 1 when no row is selected. The analog activation
// on GBL is represented by the 4-bit DAC level it was driven with, so AOUT is the
// ideal level the column contributes to the charge-sharing line. In the RW state
// (RWen high) N0/N1 connect the local bit lines to GBLB/GBL: a write stores wbit
// into every row whose DWL and AWL are both high, at the rising clock edge; a read
// returns LBL on rbit in the same cycle. The cell structure, the NOR multiplier,
// the transmission-gate multiplier and the RW access follow the paper; the
// single-cycle precharge/evaluate timing and the level-code view of the analog
// voltage are this model's choices.
module hcima
  import osa_pkg::*;
(
  input  logic              clk,
  input  logic              rwen,       // RW state: N0/N1 on
  input  logic              we,         // write strobe from R/W IO (RW state only)
  input  logic              wbit,       // write data on GBL (GBLB carries its inverse)
  input  logic [N_ROW-1:0]  dwl,        // digital word lines
  input  logic [N_ROW-1:0]  awl,        // analog word lines
  input  logic              gblb,       // inverted digital activation bit
  input  alvl_t             gbl,        // analog activation (DAC level)
  output logic              dout,       // digital product
  output alvl_t             aout,       // analog product (level)
  output logic              rbit        // read data in RW state
);

  logic [N_ROW-1:0] w;      // stored bits (W); Wb is ~w
  logic             lblb;   // digital local bit line (reads Wb)
  logic             lbl;    // analog local bit line (reads W)

  always_ff @(posedge clk) begin
    if (rwen && we) begin
      for (int r = 0; r < N_ROW; r++)
        if (dwl[r] && awl[r]) w[r] <= wbit;
    end
  end

  // Precharged-high local bit lines, discharged by a selected cell storing 0
  always_comb begin
    lblb = 1'b1;
    lbl  = 1'b1;
    for (int r = 0; r < N_ROW; r++) begin
      if (dwl[r] && w[r])  lblb = 1'b0;   // Wb[r] = 0 discharges LBLB
      if (awl[r] && !w[r]) lbl  = 1'b0;   // W[r]  = 0 discharges LBL
    end
  end

  assign dout = ~(lblb | gblb) & ~rwen;
  assign aout = (lbl && !rwen) ? gbl : '0;
  assign rbit = rwen & (|awl) & lbl;

endmodule
