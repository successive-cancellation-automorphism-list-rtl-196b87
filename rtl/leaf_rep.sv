// leaf_rep -- repetition node of the unrolled list decoder, including the
// single information bit (NV = 1).
//
// Only the last of the NV bits below this node is an information bit, so the
// node's code word is all-0 or all-1.  Each of the L paths is split into
// both candidates: candidate 2l+0 (all zeros) adds the magnitudes of the
// negative LLRs to the PM, candidate 2l+1 (all ones) adds the magnitudes of
// the non-negative LLRs (the HDD of an LLR of 0 is bit 0).  sort_select then
// keeps the L best of the 2L candidates.  For NV = 1 this is the path split
// and PM update of an SCL information-bit decision.
//
// Interface: alpha_i / pm_i as for leaf_rate0.  perm_o[k] is the input path
// that output path k continues, beta_o[k] its partial sums, pm_o sorted
// ascending.  One register stage, one input per cycle.
module leaf_rep
  import scal_pkg::*;
#(
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 1,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned CW = $clog2(2 * L)
) (
  input  logic                    clk,
  input  llr_t [L-1:0][NV-1:0]    alpha_i,
  input  pm_t  [L-1:0]            pm_i,
  output logic [L-1:0][NV-1:0]    beta_o,
  output pm_t  [L-1:0]            pm_o,
  output logic [L-1:0][LW-1:0]    perm_o
);

  pm_t  [2*L-1:0]         cand_pm;
  logic [L-1:0][CW-1:0]   sel;
  pm_t  [L-1:0]           sel_pm;

  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      int acc0, acc1;
      acc0 = int'(pm_i[l]);
      acc1 = int'(pm_i[l]);
      for (int unsigned i = 0; i < NV; i++) begin
        if (alpha_i[l][i] < 0) acc0 += abs_llr(llr_t'(alpha_i[l][i]));
        else                   acc1 += abs_llr(llr_t'(alpha_i[l][i]));
      end
      cand_pm[2*l]   = sat_pm(acc0);
      cand_pm[2*l+1] = sat_pm(acc1);
    end
  end

  sort_select #(.L(L)) u_sort (
    .pm_i  (cand_pm),
    .sel_o (sel),
    .pm_o  (sel_pm)
  );

  always_ff @(posedge clk) begin
    pm_o <= sel_pm;
    for (int unsigned k = 0; k < L; k++) begin
      perm_o[k] <= LW'(sel[k] >> 1);
      beta_o[k] <= {NV{sel[k][0]}};
    end
  end

endmodule
