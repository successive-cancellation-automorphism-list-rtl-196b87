// tb_g_stage -- checks the g-function for L = 2 paths, NV = 4:
// out_i = b_i + a_i if beta_i = 0, b_i - a_i if beta_i = 1, clamped to
// [-31, 31], one clock after the input.
module tb_g_stage;
  import scal_pkg::*;
  localparam int unsigned L = 2, NV = 4;
  logic clk = 0;
  llr_t [L-1:0][2*NV-1:0] alpha_i;
  logic [L-1:0][NV-1:0] beta_i;
  llr_t [L-1:0][NV-1:0] alpha_o;
  int checks = 0, failures = 0;

  g_stage #(.L(L), .NV(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[L][2*NV];
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < 2 * NV; i++) begin
          v[l][i] = $urandom_range(62, 0) - 31;
          alpha_i[l][i] = llr_t'(v[l][i]);
        end
        beta_i[l] = NV'($urandom);
      end
      @(negedge clk);
      for (int l = 0; l < L; l++)
        for (int i = 0; i < NV; i++) begin
          int e;
          e = beta_i[l][i] ? v[l][i + NV] - v[l][i] : v[l][i + NV] + v[l][i];
          if (e > 31) e = 31;
          if (e < -31) e = -31;
          checks++;
          if (int'(alpha_o[l][i]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL g: got %0d expected %0d", alpha_o[l][i], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
