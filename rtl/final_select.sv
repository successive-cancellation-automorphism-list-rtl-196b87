// final_select -- final Sort & Select and inverse permutation.
//
// After the last leaf, the path with the smallest PM (lowest list index on
// a tie) is the decoder's choice.  Its partial sums at the root are the code
// word estimate in the permuted domain of the input permutation it
// descends from (its origin o); the decoded code word is obtained by undoing
// that permutation: x_o[sigma_o(i)] = beta[i].  Each inverse permutation is
// wiring; an L-to-1 multiplexer picks the one of the winning origin.
// One register stage.
module final_select
  import scal_pkg::*;
#(
  parameter int unsigned L      = 8,
  parameter int unsigned NB     = 7,
  parameter perm_a_t     PERM_A = DEFAULT_PERM_A,
  parameter perm_b_t     PERM_B = DEFAULT_PERM_B,
  localparam int unsigned N     = 1 << NB,
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic                  clk,
  input  logic [L-1:0][N-1:0]   beta_i,
  input  pm_t  [L-1:0]          pm_i,
  input  logic [L-1:0][LW-1:0]  origin_i,
  output logic [N-1:0]          x_o,
  output pm_t                   pm_o,
  output logic [LW-1:0]         origin_o,
  output logic [LW-1:0]         path_o
);

  logic [LW-1:0]       best;
  logic [L-1:0][N-1:0] unperm;   // beta of the best path under each inverse map

  always_comb begin
    best = '0;
    for (int unsigned l = 1; l < L; l++)
      if (pm_i[l] < pm_i[best]) best = LW'(l);
  end

  logic [N-1:0] beta_best;
  assign beta_best = beta_i[best];

  for (genvar o = 0; o < L; o++) begin : g_orig
    for (genvar i = 0; i < N; i++) begin : g_idx
      localparam int unsigned DST = sigma(PERM_A[o], PERM_B[o], i, NB);
      assign unperm[o][DST] = beta_best[i];
    end
  end

  always_ff @(posedge clk) begin
    x_o      <= unperm[origin_i[best]];
    pm_o     <= pm_i[best];
    origin_o <= origin_i[best];
    path_o   <= best;
  end

endmodule
