// f_stage -- min-sum f-function of a factor-tree node for all L paths.
//
// A node of size 2*NV receives per path the LLR vector [a | b] (a = first
// half).  Its left child gets f(a_i, b_i) = sign(a_i) sign(b_i)
// min(|a_i|, |b_i|).  One register stage, one input per cycle.
module f_stage
  import scal_pkg::*;
#(
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 1
) (
  input  logic                    clk,
  input  llr_t [L-1:0][2*NV-1:0]  alpha_i,
  output llr_t [L-1:0][NV-1:0]    alpha_o
);

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < L; l++)
      for (int unsigned i = 0; i < NV; i++)
        alpha_o[l][i] <= f_minsum(llr_t'(alpha_i[l][i]), llr_t'(alpha_i[l][i+NV]));
  end

endmodule
