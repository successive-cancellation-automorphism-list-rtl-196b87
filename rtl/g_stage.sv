// g_stage -- g-function of a factor-tree node for all L paths.
//
// With the node input [a | b] and the left child's partial sums beta, the
// right child gets g_i = b_i + a_i if beta_i = 0 and b_i - a_i otherwise,
// saturated to the LLR range.  The inputs must already be reordered to the
// list order of the left child's output (path_reorder).  At the root this
// stage works on L different permuted channel vectors, which is what makes
// the root g-function and its delay line L times larger than in a plain list
// decoder.  One register stage, one input per cycle.
module g_stage
  import scal_pkg::*;
#(
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 1
) (
  input  logic                    clk,
  input  llr_t [L-1:0][2*NV-1:0]  alpha_i,
  input  logic [L-1:0][NV-1:0]    beta_i,
  output llr_t [L-1:0][NV-1:0]    alpha_o
);

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < L; l++)
      for (int unsigned i = 0; i < NV; i++)
        alpha_o[l][i] <= g_func(llr_t'(alpha_i[l][i]), llr_t'(alpha_i[l][i+NV]), beta_i[l][i]);
  end

endmodule
