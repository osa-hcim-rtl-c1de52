// dat -- digital adder tree of one HMU.
//
// Adds the N one-bit DOUT products of the HMU's columns into DMAC, the exact
// (loss-free) result of one 1-bit MAC. The tree is a balanced binary tree
// stored heap-style: leaf L+c holds DOUT[c] (leaves past N hold 0) and node i
// adds nodes 2i and 2i+1, so node 1 is the sum after log2(N) adder levels. The result is registered once (DMAC appears the cycle after the
// word line and input bit were applied); in_valid is carried along as out_valid.
// The paper prints a 7-bit DMAC, but 144 columns can sum to 144, which needs 8
// bits; this design keeps the exact 8-bit sum so the digital path stays loss-free.
module dat #(
  parameter int unsigned N = 144,
  parameter int unsigned W = $clog2(N + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] dout,
  output logic         out_valid,
  output logic [W-1:0] dmac
);

  localparam int unsigned L = 1 << $clog2(N);   // number of leaves

  logic [W-1:0] node [1:2*L-1];
  logic [W-1:0] sum;

  for (genvar c = 0; c < L; c++) begin : g_leaf
    if (c < N) begin : g_bit
      assign node[L + c] = W'(dout[c]);
    end else begin : g_pad
      assign node[L + c] = '0;
    end
  end

  for (genvar i = 1; i < L; i++) begin : g_add
    assign node[i] = node[2 * i] + node[2 * i + 1];
  end

  assign sum = node[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dmac      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) dmac <= sum;
    end
  end

endmodule
