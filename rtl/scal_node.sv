// scal_node -- one node of the unrolled, fully pipelined polar factor tree
// (PFT) of the list decoder; instantiates its own subtree recursively.
//
// The node covers the 2^S leaves OFF .. OFF+2^S-1 of the code.  From the
// information mask INFO it decides at elaboration time what it is:
//  * all leaves frozen            -> leaf_rate0 (PM update only)
//  * only the last leaf unfrozen  -> leaf_rep   (path split + Sort & Select;
//                                    S = 0 is an information bit)
//  * otherwise                    -> split node:
//      f_stage -> left child (latency LL)
//      input LLRs wait LL+1 cycles in a delay line, are reordered to the left
//      child's list order and enter g_stage -> right child (latency LR)
//      the left child's partial sums and path indices wait LR+1 cycles, are
//      reordered to the right child's list order and combined:
//      beta = [beta_l ^ beta_r, beta_r].
// Path index outputs are composed on the way up, so perm_o[k] always names
// the input path that output path k descends from.  Delay lines make the
// node accept a new list of LLR vectors every clock cycle (full pipelining);
// its latency is scal_pkg::node_latency(INFO, OFF, S) cycles: one per
// leaf and two per split node.  The split node's output is combinational
// from registers (the h-combination adds no stage).
//
// The f/g/h recursion and the leaf rules are those of SC/SCL decoding.  The
// node types beyond rate-0 and repetition (SPC, rate-1) are not used; such
// subtrees are decoded bit by bit, which is exact SCL but longer.
// rst_n only resets delay-line pointers, so leaf nodes leave it unused.
// Lint note: when this module is linted on its own as the top, Verilator
// does not elaborate instances of the top module inside itself and reports
// the child outputs as undriven; elaborated under scal_decoder (or any
// other parent) the recursion is complete and no such warning appears.
module scal_node
  import scal_pkg::*;
#(
  parameter int unsigned L    = 8,
  parameter int unsigned S    = 7,
  parameter int unsigned OFF  = 0,
  parameter mask_t       INFO = info_mask(7, 27),
  localparam int unsigned NV  = 1 << S,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  llr_t [L-1:0][NV-1:0]    alpha_i,
  input  pm_t  [L-1:0]            pm_i,
  output logic [L-1:0][NV-1:0]    beta_o,
  output pm_t  [L-1:0]            pm_o,
  output logic [L-1:0][LW-1:0]    perm_o
);

  localparam node_kind_e KIND = node_kind(INFO, OFF, S);

  if (KIND == NODE_RATE0) begin : g_rate0
    leaf_rate0 #(.L(L), .NV(NV)) u_leaf (
      .clk, .alpha_i, .pm_i, .beta_o, .pm_o, .perm_o
    );
  end else if (KIND == NODE_REP) begin : g_rep
    leaf_rep #(.L(L), .NV(NV)) u_leaf (
      .clk, .alpha_i, .pm_i, .beta_o, .pm_o, .perm_o
    );
  end else begin : g_split
    localparam int unsigned H    = NV / 2;
    localparam int unsigned OFFR = OFF + H;
    localparam int unsigned LL   = node_latency(INFO, OFF, S - 1);
    localparam int unsigned LR   = node_latency(INFO, OFFR, S - 1);

    // ---- left branch
    llr_t [L-1:0][H-1:0]  a_left;
    pm_t  [L-1:0]         pm_d1;
    logic [L-1:0][H-1:0]  beta_l;
    pm_t  [L-1:0]         pm_l;
    logic [L-1:0][LW-1:0] perm_l;

    f_stage #(.L(L), .NV(H)) u_f (.clk, .alpha_i, .alpha_o(a_left));

    always_ff @(posedge clk) pm_d1 <= pm_i;

    scal_node #(.L(L), .S(S - 1), .OFF(OFF), .INFO(INFO)) u_left (
      .clk, .rst_n, .alpha_i(a_left), .pm_i(pm_d1),
      .beta_o(beta_l), .pm_o(pm_l), .perm_o(perm_l)
    );

    // ---- LLR delay line and message exchange before g
    llr_t [L-1:0][NV-1:0] alpha_dly, alpha_ex;

    delay_line #(.WIDTH(L * NV * Q), .DEPTH(LL + 1)) u_alpha_dl (
      .clk, .rst_n, .d_i(alpha_i), .d_o(alpha_dly)
    );

    path_reorder #(.L(L), .WIDTH(NV * Q)) u_alpha_ex (
      .d_i(alpha_dly), .perm_i(perm_l), .d_o(alpha_ex)
    );

    // ---- right branch
    llr_t [L-1:0][H-1:0]  a_right;
    pm_t  [L-1:0]         pm_l_d1;
    logic [L-1:0][H-1:0]  beta_r;
    logic [L-1:0][LW-1:0] perm_r;

    g_stage #(.L(L), .NV(H)) u_g (
      .clk, .alpha_i(alpha_ex), .beta_i(beta_l), .alpha_o(a_right)
    );

    always_ff @(posedge clk) pm_l_d1 <= pm_l;

    scal_node #(.L(L), .S(S - 1), .OFF(OFFR), .INFO(INFO)) u_right (
      .clk, .rst_n, .alpha_i(a_right), .pm_i(pm_l_d1),
      .beta_o(beta_r), .pm_o(pm_o), .perm_o(perm_r)
    );

    // ---- partial-sum / path-index delay line, exchange and h-combination
    typedef struct packed {
      logic [H-1:0]  beta;
      logic [LW-1:0] perm;
    } held_t;

    held_t [L-1:0] held_in, held_dly, held_ex;

    always_comb begin
      for (int unsigned l = 0; l < L; l++) begin
        held_in[l].beta = beta_l[l];
        held_in[l].perm = perm_l[l];
      end
    end

    delay_line #(.WIDTH(L * $bits(held_t)), .DEPTH(LR + 1)) u_beta_dl (
      .clk, .rst_n, .d_i(held_in), .d_o(held_dly)
    );

    path_reorder #(.L(L), .WIDTH($bits(held_t))) u_beta_ex (
      .d_i(held_dly), .perm_i(perm_r), .d_o(held_ex)
    );

    always_comb begin
      for (int unsigned l = 0; l < L; l++) begin
        beta_o[l] = {beta_r[l], held_ex[l].beta ^ beta_r[l]};
        perm_o[l] = held_ex[l].perm;
      end
    end
  end

endmodule
