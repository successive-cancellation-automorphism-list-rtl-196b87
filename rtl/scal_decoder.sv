// scal_decoder -- unrolled, fully pipelined successive-cancellation
// automorphism list (SCAL) decoder for a decreasing polar code, by default
// P(128,60) (I_min = {27}) with list size L = 8.
//
// Data flow (one frame per clock cycle):
//   llr_i -> perm_in: L automorphism-permuted copies, one per list path, all
//            paths start with PM 0
//         -> scal_node tree: unrolled SC list decoding; rate-0 leaves update
//            PMs, repetition / information leaves split every path and keep
//            the best L (Sort & Select), delay lines + path reordering carry
//            the per-path state (message exchange)
//         -> final_select: best path, inverse of its input permutation
//         -> x_o (decoded code word), pm_o, origin_o (which permutation won)
// valid_i is carried through a shift register of LATENCY stages to valid_o;
// LATENCY = 2 + scal_pkg::node_latency(INFO, 0, NB).  rst_n (active low,
// asynchronous) clears the valid pipeline and the delay-line pointers.
// list_origin_o gives, for every surviving path at the end, the permutation
// it descends from (useful to observe how permutations compete); path_o is
// the list position of the winning path.  list_origin_o is registered with
// the final stage, so it belongs to the same frame as x_o.
//
// Follows the decoder structure of SCAL decoding (input permutations,
// list decoding with path splitting, final selection and un-permutation),
// with 6-bit LLRs and 8-bit PMs.  Own choices: the chosen automorphisms,
// the node set (rate-0 and repetition only), one register per f, g and
// leaf stage, rank-based sorters and saturating arithmetic.
module scal_decoder
  import scal_pkg::*;
#(
  parameter int unsigned L      = 8,
  parameter int unsigned NB     = 7,
  parameter int unsigned IMIN   = 27,
  parameter perm_a_t     PERM_A = DEFAULT_PERM_A,
  parameter perm_b_t     PERM_B = DEFAULT_PERM_B,
  localparam int unsigned N       = 1 << NB,
  localparam int unsigned LW      = (L > 1) ? $clog2(L) : 1,
  localparam mask_t       INFO    = info_mask(NB, IMIN),
  localparam int unsigned LATENCY = 2 + node_latency(INFO, 0, NB)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  llr_t [N-1:0]          llr_i,
  output logic                  valid_o,
  output logic [N-1:0]          x_o,
  output pm_t                   pm_o,
  output logic [LW-1:0]         origin_o,
  output logic [LW-1:0]         path_o,
  output logic [L-1:0][LW-1:0]  list_origin_o
);

  if (L < 2 || L > LMAX || NB < 1 || NB > NBITS_MAX) begin : g_bad_config
    $error("scal_decoder: need 2 <= L <= %0d and 1 <= NB <= %0d", LMAX, NBITS_MAX);
  end

  llr_t [L-1:0][N-1:0]  alpha0;
  logic [L-1:0][N-1:0]  beta_root;
  pm_t  [L-1:0]         pm_root;
  logic [L-1:0][LW-1:0] perm_root;

  perm_in #(.L(L), .NB(NB), .PERM_A(PERM_A), .PERM_B(PERM_B)) u_perm_in (
    .clk, .llr_i, .alpha_o(alpha0)
  );

  scal_node #(.L(L), .S(NB), .OFF(0), .INFO(INFO)) u_root (
    .clk, .rst_n,
    .alpha_i (alpha0),
    .pm_i    ('0),
    .beta_o  (beta_root),
    .pm_o    (pm_root),
    .perm_o  (perm_root)
  );

  final_select #(.L(L), .NB(NB), .PERM_A(PERM_A), .PERM_B(PERM_B)) u_final (
    .clk,
    .beta_i   (beta_root),
    .pm_i     (pm_root),
    .origin_i (perm_root),
    .x_o,
    .pm_o,
    .origin_o,
    .path_o
  );

  always_ff @(posedge clk) list_origin_o <= perm_root;

  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], valid_i};
  end
  assign valid_o = vpipe[LATENCY-1];

endmodule
