// tb_scal_node -- checks one factor-tree subtree of 8 leaves with
// information bits at leaves 3, 5, 6 and 7 (so it contains a repetition
// node of 4, one of 2, two single information bits and three split nodes),
// L = 4.  A new random list enters every cycle.  Checks per output path k:
//  * beta[k] is a code word of the subtree (inverse polar transform is 0 on
//    the frozen leaves 0, 1, 2, 4);
//  * pm[k] = pm_in[perm[k]] + sum of |alpha_in[perm[k]][i]| over
//    beta[k][i] != hard(alpha_in[perm[k]][i])  (min-sum metric identity; the
//    inputs are kept small so nothing saturates);
//  * PMs leave in ascending order (the last leaf sorts);
//  * outputs arrive exactly 10 cycles after the input (1 per leaf, 2 per
//    split node: 3 x 2 + 4 x 1).
module tb_scal_node;
  import scal_pkg::*;
  localparam int unsigned L = 4, S = 3, NV = 8, LW = 2;
  localparam mask_t INFO = mask_t'(8'b1110_1000);
  localparam int LAT = 10;
  logic clk = 0, rst_n = 0;
  llr_t [L-1:0][NV-1:0] alpha_i;
  pm_t [L-1:0] pm_i;
  logic [L-1:0][NV-1:0] beta_o;
  pm_t [L-1:0] pm_o;
  logic [L-1:0][LW-1:0] perm_o;
  int checks = 0, failures = 0;

  scal_node #(.L(L), .S(S), .OFF(0), .INFO(INFO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    int a[L][NV];
    int p[L];
  } in_t;
  in_t hist[$];

  function automatic logic [NV-1:0] transform(logic [NV-1:0] v);
    for (int h = 1; h < NV; h *= 2)
      for (int j = 0; j < NV; j += 2 * h)
        for (int i = j; i < j + h; i++) v[i] ^= v[i + h];
    return v;
  endfunction

  initial begin
    in_t x;
    alpha_i = '0;
    pm_i = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        x.p[l] = $urandom_range(10, 0);
        pm_i[l] = pm_t'(x.p[l]);
        for (int i = 0; i < NV; i++) begin
          x.a[l][i] = $urandom_range(6, 0) - 3;
          alpha_i[l][i] = llr_t'(x.a[l][i]);
        end
      end
      hist.push_front(x);
      #1;
      if (t >= LAT) begin
        in_t r;
        r = hist[LAT];
        for (int k = 0; k < L; k++) begin
          int src, e;
          src = perm_o[k];
          e = r.p[src];
          for (int i = 0; i < NV; i++)
            if ((r.a[src][i] < 0) != beta_o[k][i]) e += (r.a[src][i] < 0) ? -r.a[src][i] : r.a[src][i];
          checks++;
          if (int'(pm_o[k]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d path %0d: pm %0d expected %0d", t, k, pm_o[k], e);
          end
          checks++;
          if ((transform(beta_o[k]) & 8'b0001_0111) != 0) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d path %0d: %b not a code word", t, k, beta_o[k]);
          end
          if (k > 0) begin
            checks++;
            if (pm_o[k] < pm_o[k-1]) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d: PMs not sorted", t);
            end
          end
        end
      end
      if (hist.size() > LAT + 2) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
