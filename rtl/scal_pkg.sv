// scal_pkg -- constants, types and elaboration-time helpers shared by the
// successive-cancellation automorphism list (SCAL) decoder.
//
// What is here:
//  * The fixed-point formats: 6-bit two's-complement LLRs and 8-bit unsigned
//    path metrics (PMs), both as given for the decoder this RTL follows.
//  * The code: a decreasing polar code of length N = 2^n whose information set
//    is every index that dominates the minimal information set {27} in the
//    partial order of decreasing monomial codes.  For N = 128 this gives the
//    P(128,60) code (K = 60).  The partial order is evaluated here as a
//    constant function, so no table has to be stored.
//  * The default input permutations: eight affine automorphisms z' = A z + b
//    of that code, taken from its block-lower-triangular affine (BLTA) group
//    with block profile (3,4).  Permutation 0 is the identity.  The other seven
//    are this design's own picks (random matrices with a 3x3 block on bits
//    z0..z2 and a 4x4 block on z3..z6, checked offline to map code words onto
//    code words); the selection method used by the original designers is not
//    reproduced.
//  * Node classification of the polar factor tree (PFT): a subtree whose bits
//    are all frozen is a rate-0 node, one whose only information bit is its
//    last bit is a repetition node (a single information bit is the size-1
//    case), any other subtree is split into its two children.  The pipeline
//    latency of a subtree follows from that split: every split node adds two
//    register stages (f and g), every leaf adds one.
package scal_pkg;

  // ---- formats -------------------------------------------------------------
  localparam int unsigned Q    = 6;     // LLR width (bits)
  localparam int unsigned PMW  = 8;     // path-metric width (bits)
  localparam int unsigned NBITS_MAX = 7;          // index bits, n <= 7
  localparam int unsigned NMAX = 1 << NBITS_MAX;  // longest code supported

  localparam int LLR_MAX = (1 << (Q - 1)) - 1;   // +31, symmetric saturation
  localparam int PM_MAX  = (1 << PMW) - 1;       // 255

  typedef logic signed [Q-1:0] llr_t;
  typedef logic [PMW-1:0]      pm_t;
  typedef logic [NMAX-1:0]     mask_t;            // bit i set: u_i is information
  typedef logic [NBITS_MAX-1:0][NBITS_MAX-1:0] bmat_t;  // [row][col] of A
  typedef logic [NBITS_MAX-1:0] bvec_t;

  typedef enum logic [1:0] {NODE_RATE0, NODE_REP, NODE_SPLIT} node_kind_e;

  // ---- arithmetic helpers ----------------------------------------------------
  function automatic llr_t sat_llr(int v);
    if (v > LLR_MAX)  return llr_t'(LLR_MAX);
    if (v < -LLR_MAX) return llr_t'(-LLR_MAX);
    return llr_t'(v);
  endfunction

  function automatic int abs_llr(llr_t a);
    int v;
    v = int'(a);
    return (v < 0) ? -v : v;
  endfunction

  function automatic pm_t sat_pm(int v);
    return (v > PM_MAX) ? pm_t'(PM_MAX) : pm_t'(v);
  endfunction

  // min-sum f-function
  function automatic llr_t f_minsum(llr_t a, llr_t b);
    int ma, mb, m;
    ma = abs_llr(a);
    mb = abs_llr(b);
    m  = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? sat_llr(-m) : sat_llr(m);
  endfunction

  // g-function: b + (1 - 2 beta) a, saturated
  function automatic llr_t g_func(llr_t a, llr_t b, logic beta);
    return beta ? sat_llr(int'(b) - int'(a)) : sat_llr(int'(b) + int'(a));
  endfunction

  // ---- code construction -----------------------------------------------------
  // j dominates i (j is at least as reliable): j has at least as many ones as
  // i, and its k-th most significant one lies at or above i's k-th one.
  function automatic bit dominates(int unsigned j, int unsigned i, int unsigned n);
    int unsigned pj[NBITS_MAX];
    int unsigned pi_[NBITS_MAX];
    int unsigned wj, wi;
    wj = 0;
    wi = 0;
    for (int b = int'(n) - 1; b >= 0; b--) begin
      if (j[b]) begin pj[wj] = b; wj++; end
      if (i[b]) begin pi_[wi] = b; wi++; end
    end
    if (wj < wi) return 1'b0;
    for (int unsigned k = 0; k < wi; k++)
      if (pj[k] < pi_[k]) return 1'b0;
    return 1'b1;
  endfunction

  // information set of the decreasing polar code with minimal set {imin}
  function automatic mask_t info_mask(int unsigned n, int unsigned imin);
    mask_t m;
    m = '0;
    for (int unsigned j = 0; j < (1 << n); j++)
      m[j] = dominates(j, imin, n);
    return m;
  endfunction

  function automatic int unsigned popcount_mask(mask_t m, int unsigned n);
    int unsigned c;
    c = 0;
    for (int unsigned j = 0; j < (1 << n); j++) c += m[j];
    return c;
  endfunction

  // ---- automorphisms ---------------------------------------------------------
  // sigma(i) = A z + b (over GF(2)), z = binary index of i, LSB = z0.
  function automatic int unsigned sigma(bmat_t a, bvec_t b, int unsigned i, int unsigned n);
    int unsigned r;
    logic bitv;
    r = 0;
    for (int unsigned row = 0; row < n; row++) begin
      bitv = b[row];
      for (int unsigned col = 0; col < n; col++)
        bitv ^= a[row][col] & i[col];
      if (bitv) r |= (1 << row);
    end
    return r;
  endfunction

  localparam int unsigned LMAX = 8;
  typedef bmat_t [LMAX-1:0] perm_a_t;
  typedef bvec_t [LMAX-1:0] perm_b_t;

  // BLTA automorphisms of P(128,60), block profile (3,4); entry 0 = identity.
  localparam perm_a_t DEFAULT_PERM_A = '{
    '{7'b0101001, 7'b1011111, 7'b0111101, 7'b1000111, 7'b0000011, 7'b0000010, 7'b0000110},
    '{7'b0011000, 7'b0100101, 7'b0101011, 7'b1001010, 7'b0000101, 7'b0000010, 7'b0000100},
    '{7'b0110011, 7'b1001101, 7'b1101100, 7'b0011011, 7'b0000100, 7'b0000010, 7'b0000011},
    '{7'b0100101, 7'b1000011, 7'b0001000, 7'b1010101, 7'b0000001, 7'b0000110, 7'b0000011},
    '{7'b0100100, 7'b0010011, 7'b1010010, 7'b1101110, 7'b0000101, 7'b0000001, 7'b0000111},
    '{7'b0110000, 7'b1100110, 7'b0011100, 7'b0100100, 7'b0000110, 7'b0000111, 7'b0000101},
    '{7'b1010101, 7'b0010111, 7'b1011000, 7'b1111001, 7'b0000001, 7'b0000111, 7'b0000101},
    '{7'b1000000, 7'b0100000, 7'b0010000, 7'b0001000, 7'b0000100, 7'b0000010, 7'b0000001}
  };
  localparam perm_b_t DEFAULT_PERM_B = '0;

  // ---- factor-tree classification ---------------------------------------------
  // Subtree of size 2^s starting at leaf index off.
  function automatic node_kind_e node_kind(mask_t info, int unsigned off, int unsigned s);
    int unsigned cnt;
    cnt = 0;
    for (int unsigned k = 0; k < (1 << s); k++) cnt += info[off + k];
    if (cnt == 0) return NODE_RATE0;
    if (cnt == 1 && info[off + (1 << s) - 1]) return NODE_REP;
    return NODE_SPLIT;
  endfunction

  // pipeline latency (cycles) of the subtree: 2 per split node, 1 per leaf
  function automatic int unsigned node_latency(mask_t info, int unsigned off, int unsigned s);
    int unsigned lat;
    int unsigned ao;
    bit reached;
    lat = 0;
    for (int t = int'(s); t >= 0; t--) begin
      for (int unsigned o = off; o < off + (1 << s); o += (1 << t)) begin
        reached = 1'b1;
        for (int unsigned u = t + 1; u <= s; u++) begin
          ao = off + (((o - off) >> u) << u);
          if (node_kind(info, ao, u) != NODE_SPLIT) reached = 1'b0;
        end
        if (reached) lat += (node_kind(info, o, t) == NODE_SPLIT) ? 2 : 1;
      end
    end
    return lat;
  endfunction

  // number of Sort & Select steps (leaves that split paths) in a subtree
  function automatic int unsigned num_sorters(mask_t info, int unsigned off, int unsigned s);
    node_kind_e k;
    k = node_kind(info, off, s);
    if (k == NODE_REP) return 1;
    if (k == NODE_RATE0) return 0;
    // split: count leaves of kind REP reachable below (iterative)
    begin
      int unsigned c;
      int unsigned ao;
      bit reached;
      c = 0;
      for (int t = int'(s) - 1; t >= 0; t--)
        for (int unsigned o = off; o < off + (1 << s); o += (1 << t)) begin
          reached = 1'b1;
          for (int unsigned u = t + 1; u <= s; u++) begin
            ao = off + (((o - off) >> u) << u);
            if (node_kind(info, ao, u) != NODE_SPLIT) reached = 1'b0;
          end
          if (reached && node_kind(info, o, t) == NODE_REP) c++;
        end
      return c;
    end
  endfunction

endpackage
