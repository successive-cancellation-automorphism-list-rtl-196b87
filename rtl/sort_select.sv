// sort_select -- Sort & Select of the list decoder: out of 2L candidate
// paths, keep the L with the smallest path metric, in ascending order.
//
// Every candidate gets a rank equal to the number of candidates that beat
// it: a smaller PM, or an equal PM at a lower candidate index (so ties keep
// the lower index, i.e. the path with the lower list position and, for equal
// parents, the bit value 0).  Ranks are unique, so output slot k is the
// candidate whose rank is k.  This all-pairs comparison (2L x 2L comparators)
// is this design's choice of sorter; only the function, "keep the L most
// reliable paths", is specified for the decoder.
//
// Interface: pm_i[c] is the PM of candidate c, c in [0, 2L).  sel_o[k] is the
// index of the candidate placed in slot k, pm_o[k] its PM; slot 0 holds the
// smallest PM.  Purely combinational.
module sort_select
  import scal_pkg::*;
#(
  parameter int unsigned L  = 8,
  localparam int unsigned C  = 2 * L,
  localparam int unsigned CW = $clog2(C)
) (
  input  pm_t [C-1:0]          pm_i,
  output logic [L-1:0][CW-1:0] sel_o,
  output pm_t [L-1:0]          pm_o
);

  logic [C-1:0][CW-1:0] rank;

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      rank[i] = '0;
      for (int unsigned j = 0; j < C; j++) begin
        if ((pm_i[j] < pm_i[i]) || ((pm_i[j] == pm_i[i]) && (j < i)))
          rank[i] = rank[i] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int unsigned k = 0; k < L; k++) begin
      sel_o[k] = '0;
      for (int unsigned i = 0; i < C; i++)
        if (rank[i] == CW'(k)) sel_o[k] = sel_o[k] | CW'(i);
      pm_o[k] = pm_i[sel_o[k]];
    end
  end

endmodule
