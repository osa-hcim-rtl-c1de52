// ose -- on-the-fly saliency evaluator.
//
// During saliency evaluation mode every HMU delivers RS, its 3-bit normalized
// DMAC of one of the highest-order 1-bit MACs. The evaluator adds the RS values of
// all HMUs, shifts the sum left by the MAC's order (its output order k minus the
// lowest order used for evaluation), and accumulates the result over the cycles
// of the mode into the saliency S. The digital-to-analog boundary is then chosen
// from the candidate list B[0..NB-1] by comparing S with the thresholds
// T[0..NB-2]: S < T[0] selects B[0], T[i-1] <= S < T[i] selects B[i], and
// S >= T[NB-2] selects B[NB-1]. The thresholds must be ascending; they and the
// candidates are configuration inputs (the thresholds are found offline).
//
// Timing: clear resets S at a rising edge; each in_valid cycle updates S at the
// edge; s and bda follow S combinationally. The adder, shifter, accumulator
// register and the threshold-selected multiplexer follow the paper; the exact
// shift encoding and the widths are this design's choices.
module ose
  import osa_pkg::*;
#(
  parameter int unsigned NH = N_HMU,
  parameter int unsigned NC = NB     // number of B_D/A candidates
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  logic [1:0]  order,
  input  rs_t         rs  [NH],
  input  sal_t        thr [NC-1],
  input  bda_t        bcand [NC],
  output sal_t        s,
  output bda_t        bda
);

  sal_t sum;
  sal_t sal_q;

  always_comb begin
    sum = '0;
    for (int h = 0; h < NH; h++) sum += sal_t'(rs[h]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sal_q <= '0;
    else if (clear)    sal_q <= '0;
    else if (in_valid) sal_q <= sal_q + (sum << order);
  end

  // Number of thresholds S has reached selects the candidate
  always_comb begin
    int unsigned sel;
    sel = 0;
    for (int t = 0; t < NC - 1; t++)
      if (sal_q >= thr[t]) sel++;
    bda = bcand[sel];
  end

  assign s = sal_q;

endmodule
