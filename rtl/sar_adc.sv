// sar_adc -- behavioural model of an analog part: one HMU's charge-sharing
// accumulation line and its 3-bit SAR ADC, written as exact integer arithmetic.
//
// The AOUT nodes of the N columns are shorted together (charge sharing), so the
// line settles to the mean of the column voltages. With the DAC of this design an
// n-bit activation value v is driven as v/2^n of the reference, so the shared
// voltage is Vref * X / (N * 2^n), where X is the sum of the column levels. The ADC
// full scale is taken as 8/9 of the DAC reference; for N = 144 this makes one ADC
// LSB equal to 2^(n+4) units of X, which lets the accumulator rebuild the analog
// partial sum as AMAC << (n+4) with a plain shift. The model keeps the line
// voltage as the exact integer 9 X (in units of Vref / (N 2^n)) and resolves it by
// successive approximation, one bit per cycle, MSB first, clipping at code 7.
// Analog noise, offset and mismatch are not modelled: the conversion is ideal.
//
// Timing: start is sampled at a rising edge, which also decides the MSB; the
// next two edges decide the other bits, and amac is valid (valid = 1 for one
// cycle) three cycles after start. busy is high in between; start may be given
// again in the cycle valid is high. The 3-bit resolution and the 3-cycle
// conversion follow the paper; the reference ratio and the DAC scaling are this
// design's choices.
//
// CLK_DIV models an ADC clocked CLK_DIV times slower than clk, the clock of the
// digital path: each of the three decisions then takes CLK_DIV cycles of clk,
// the MSB included, and valid comes 3 * CLK_DIV cycles after start. The paper
// suggests running the digital path faster than the ADC to balance the two
// paths; CLK_DIV = 2 is that option. With CLK_DIV = 1 (default) both run on one
// clock and the timing is as described above.
module sar_adc
  import osa_pkg::*;
#(
  parameter int unsigned N       = 144,
  parameter int unsigned CLK_DIV = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  prec,            // analog activation precision n, 1..4
  input  alvl_t       aout [N],        // AOUT level of every column
  output logic        busy,
  output logic        valid,
  output amac_t       amac
);

  // Line voltage in ADC LSBs is 9 X / (N 2^n); comparing it with a trial code c
  // is done exactly as 9 X >= c N 2^n.
  localparam int unsigned XW = $clog2(N * 15 + 1) + 4;   // holds 9 X

  logic [XW-1:0] x9;        // 9 X of the line now
  logic [XW-1:0] x9_held;   // sampled
  logic [2:0]    n_held;
  logic [1:0]    step;     // next decision: 0 MSB, 1 middle, 2 LSB
  logic [3:0]    div_cnt;  // clk cycles spent on the current decision
  amac_t         code;

  always_comb begin
    x9 = '0;
    for (int c = 0; c < N; c++) x9 += XW'(aout[c]);
    x9 = x9 * XW'(9);
  end

  function automatic logic reaches(logic [XW-1:0] v9, amac_t trial, logic [2:0] n);
    return v9 >= (XW'(trial) * XW'(N) << n);
  endfunction

  localparam logic [3:0] DIV_LAST = 4'(CLK_DIV - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      valid   <= 1'b0;
      step    <= '0;
      div_cnt <= '0;
      code    <= '0;
      x9_held <= '0;
      n_held  <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        x9_held <= x9;
        n_held  <= prec;
        busy    <= 1'b1;
        if (CLK_DIV == 1) begin
          // the start edge is also the MSB decision
          code    <= reaches(x9, 3'b100, prec) ? 3'b100 : 3'b000;
          step    <= 2'd1;
          div_cnt <= '0;
        end else begin
          code    <= '0;
          step    <= 2'd0;
          div_cnt <= 4'd1;
        end
      end else if (busy) begin
        if (div_cnt != DIV_LAST) begin
          div_cnt <= div_cnt + 4'd1;
        end else begin
          div_cnt <= '0;
          unique case (step)
            2'd0: begin
              code <= reaches(x9_held, 3'b100, n_held) ? 3'b100 : 3'b000;
              step <= 2'd1;
            end
            2'd1: begin
              code <= reaches(x9_held, code | 3'b010, n_held) ? (code | 3'b010) : code;
              step <= 2'd2;
            end
            default: begin
              code  <= reaches(x9_held, code | 3'b001, n_held) ? (code | 3'b001) : code;
              step  <= 2'd0;
              busy  <= 1'b0;
              valid <= 1'b1;
            end
          endcase
        end
      end
    end
  end

  initial assert (CLK_DIV >= 1 && CLK_DIV <= 16) else $error("CLK_DIV must be 1..16");

  assign amac = code;

endmodule
