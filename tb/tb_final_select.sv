// tb_final_select -- checks the final selection at the default size
// (N = 128, L = 8): the path with the smallest PM (lowest index on ties) is
// chosen, and its partial sums are mapped back through the inverse of the
// permutation named by its origin: x[sigma_o(i)] = beta[i], with sigma
// evaluated here.  Outputs are compared one clock after the inputs.
module tb_final_select;
  import scal_pkg::*;
  localparam int unsigned L = 8, NB = 7, N = 128, LW = 3;
  logic clk = 0;
  logic [L-1:0][N-1:0] beta_i;
  pm_t [L-1:0] pm_i;
  logic [L-1:0][LW-1:0] origin_i;
  logic [N-1:0] x_o;
  pm_t pm_o;
  logic [LW-1:0] origin_o, path_o;
  int checks = 0, failures = 0;
  int sig[L][N];

  final_select dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++)
      for (int i = 0; i < N; i++) begin
        int r;
        r = 0;
        for (int row = 0; row < NB; row++) begin
          int bitv;
          bitv = DEFAULT_PERM_B[l][row];
          for (int col = 0; col < NB; col++) bitv ^= DEFAULT_PERM_A[l][row][col] & ((i >> col) & 1);
          r |= bitv << row;
        end
        sig[l][i] = r;
      end
    for (int t = 0; t < 500; t++) begin
      int best;
      logic [N-1:0] ex;
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        beta_i[l] = {$urandom, $urandom, $urandom, $urandom};
        pm_i[l] = pm_t'($urandom_range(12, 0));
        origin_i[l] = LW'($urandom);
      end
      best = 0;
      for (int l = 1; l < L; l++) if (pm_i[l] < pm_i[best]) best = l;
      for (int i = 0; i < N; i++) ex[sig[origin_i[best]][i]] = beta_i[best][i];
      @(negedge clk);
      checks++;
      if (x_o != ex || pm_o != pm_i[best] || origin_o != origin_i[best] || int'(path_o) != best) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d: best %0d got path %0d", t, best, path_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
