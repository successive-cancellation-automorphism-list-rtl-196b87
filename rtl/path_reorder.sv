// path_reorder -- message exchange after a Sort & Select step.
//
// When a leaf sorts the list, surviving path k may continue any input path.
// Everything a node keeps per path while waiting for a child (delayed LLRs,
// left partial sums, path-origin indices) must then be copied along:
// output slot k receives the word of path perm_i[k].  Paths that were
// pruned are simply not read; a path that survived twice is read twice.
// Purely combinational (an L-to-1 multiplexer per path).
module path_reorder #(
  parameter int unsigned L     = 8,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0][WIDTH-1:0] d_i,
  input  logic [L-1:0][LW-1:0]    perm_i,
  output logic [L-1:0][WIDTH-1:0] d_o
);

  always_comb begin
    for (int unsigned k = 0; k < L; k++) d_o[k] = d_i[perm_i[k]];
  end

endmodule
