// nq -- normalization-and-quantization unit of one HMU.
//
// In saliency evaluation mode the HMU's DMAC is reduced to a 3-bit value RS for
// the saliency evaluator, which keeps the evaluator's input bandwidth small. The
// paper names the unit and its 3-bit output but not its arithmetic. Here the
// normalization is a programmable right shift (nq_shift, the same for all HMUs)
// and the quantization saturates the shifted value to 7. Combinational.
module nq
  import osa_pkg::*;
(
  input  dmac_t       dmac,
  input  logic [2:0]  nq_shift,
  output rs_t         rs
);

  dmac_t shifted;

  always_comb begin
    shifted = dmac >> nq_shift;
    rs      = (shifted > dmac_t'((1 << RS_W) - 1)) ? rs_t'((1 << RS_W) - 1) : rs_t'(shifted);
  end

endmodule
