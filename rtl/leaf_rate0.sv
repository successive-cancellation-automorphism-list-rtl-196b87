// leaf_rate0 -- frozen (rate-0) node of the unrolled list decoder.
//
// All 2^S bits below this node are frozen to 0, so no path splits: every path
// returns an all-zero partial-sum vector and its PM grows by the magnitude of
// every LLR that disagrees with the zero decision (every negative LLR),
// which is the PM rule of LLR-based SCL applied to each bit.  The sum
// saturates at the PM width.  Because the list is not reordered, the path
// index output is the identity.
//
// Interface: alpha_i holds the NV LLRs of each of the L paths, pm_i their
// PMs.  One register stage: beta_o, pm_o and perm_o belong to the input of the
// previous clock cycle.  A new input may be applied every cycle.  beta_o is
// constant zero by definition of a frozen node (kept as a port so that all
// leaf types share one interface).
module leaf_rate0
  import scal_pkg::*;
#(
  parameter int unsigned L  = 8,
  parameter int unsigned NV = 1,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                    clk,
  input  llr_t [L-1:0][NV-1:0]    alpha_i,
  input  pm_t  [L-1:0]            pm_i,
  output logic [L-1:0][NV-1:0]    beta_o,
  output pm_t  [L-1:0]            pm_o,
  output logic [L-1:0][LW-1:0]    perm_o
);

  pm_t [L-1:0] pm_next;

  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      int acc;
      acc = int'(pm_i[l]);
      for (int unsigned i = 0; i < NV; i++)
        if (alpha_i[l][i] < 0) acc += abs_llr(llr_t'(alpha_i[l][i]));
      pm_next[l] = sat_pm(acc);
    end
  end

  always_ff @(posedge clk) begin
    pm_o   <= pm_next;
    beta_o <= '0;
    for (int unsigned l = 0; l < L; l++) perm_o[l] <= LW'(l);
  end

endmodule
