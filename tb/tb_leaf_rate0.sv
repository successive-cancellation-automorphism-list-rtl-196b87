// tb_leaf_rate0 -- checks the frozen node (L = 4, NV = 4): after one clock,
// partial sums are zero, path order is unchanged and each PM has grown by the
// magnitudes of the negative LLRs, saturating at 255.  Inputs change every
// cycle to check the one-cycle pipelining.
module tb_leaf_rate0;
  import scal_pkg::*;
  localparam int unsigned L = 4, NV = 4, LW = 2;
  logic clk = 0;
  llr_t [L-1:0][NV-1:0] alpha_i;
  pm_t [L-1:0] pm_i;
  logic [L-1:0][NV-1:0] beta_o;
  pm_t [L-1:0] pm_o;
  logic [L-1:0][LW-1:0] perm_o;
  int checks = 0, failures = 0;

  leaf_rate0 #(.L(L), .NV(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_pm[L];
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        pm_i[l] = (t % 3 == 0) ? pm_t'($urandom_range(255, 200)) : pm_t'($urandom_range(60, 0));
        exp_pm[l] = int'(pm_i[l]);
        for (int i = 0; i < NV; i++) begin
          alpha_i[l][i] = llr_t'($urandom_range(62, 0) - 31);
          if (alpha_i[l][i] < 0) exp_pm[l] -= int'(alpha_i[l][i]);
        end
        if (exp_pm[l] > 255) exp_pm[l] = 255;
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(pm_o[l]) != exp_pm[l] || beta_o[l] != 0 || perm_o[l] != LW'(l)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d path %0d: pm %0d exp %0d", t, l, pm_o[l], exp_pm[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
