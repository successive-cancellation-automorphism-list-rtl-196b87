// perm_in -- input permutation stage of the SCAL decoder.
//
// The channel LLR vector is copied L times, and copy l is reordered by the
// automorphism pi_l: alpha_o[l][i] = llr_i[sigma_l(i)] with
// sigma_l(i) = A_l z + b_l over GF(2), z the n-bit binary index of i (z0 =
// LSB).  Because the maps are parameters, the permutation is pure wiring;
// the only logic is a clamp of the input to the symmetric range
// [-31, +31] so that later |LLR| computations never see -32 (a choice of this
// design).  One register stage, one frame per cycle.
module perm_in
  import scal_pkg::*;
#(
  parameter int unsigned L      = 8,
  parameter int unsigned NB     = 7,
  parameter perm_a_t     PERM_A = DEFAULT_PERM_A,
  parameter perm_b_t     PERM_B = DEFAULT_PERM_B,
  localparam int unsigned N     = 1 << NB
) (
  input  logic                  clk,
  input  llr_t [N-1:0]          llr_i,
  output llr_t [L-1:0][N-1:0]   alpha_o
);

  llr_t [L-1:0][N-1:0] mapped;

  for (genvar l = 0; l < L; l++) begin : g_path
    for (genvar i = 0; i < N; i++) begin : g_idx
      localparam int unsigned SRC = sigma(PERM_A[l], PERM_B[l], i, NB);
      assign mapped[l][i] = llr_i[SRC];
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < L; l++)
      for (int unsigned i = 0; i < N; i++)
        alpha_o[l][i] <= (mapped[l][i] < llr_t'(-LLR_MAX)) ? llr_t'(-LLR_MAX) : mapped[l][i];
  end

endmodule
