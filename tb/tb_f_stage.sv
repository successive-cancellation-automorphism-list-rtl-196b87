// tb_f_stage -- checks the min-sum f-function for L = 2 paths, NV = 4:
// out_i = sign(a_i) sign(b_i) min(|a_i|, |b_i|) with a = first half and
// b = second half of each path's input, one clock after the input.
module tb_f_stage;
  import scal_pkg::*;
  localparam int unsigned L = 2, NV = 4;
  logic clk = 0;
  llr_t [L-1:0][2*NV-1:0] alpha_i;
  llr_t [L-1:0][NV-1:0] alpha_o;
  int checks = 0, failures = 0;

  f_stage #(.L(L), .NV(NV)) dut (.*);
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
      for (int l = 0; l < L; l++)
        for (int i = 0; i < 2 * NV; i++) begin
          v[l][i] = $urandom_range(62, 0) - 31;
          alpha_i[l][i] = llr_t'(v[l][i]);
        end
      @(negedge clk);
      for (int l = 0; l < L; l++)
        for (int i = 0; i < NV; i++) begin
          int a, b, m, e;
          a = v[l][i];
          b = v[l][i + NV];
          m = ((a < 0 ? -a : a) < (b < 0 ? -b : b)) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
          e = ((a < 0) ^ (b < 0)) ? -m : m;
          checks++;
          if (int'(alpha_o[l][i]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL f(%0d,%0d) = %0d, expected %0d", a, b, alpha_o[l][i], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
