// tb_perm_in -- checks the input permutation stage at its default size
// (N = 128, L = 8, the default automorphisms).  The tb evaluates each affine
// map sigma_l(i) = A_l z + b_l itself, bit by bit, and expects
// alpha[l][i] = llr[sigma_l(i)] one clock later (with -32 clamped to -31).
// It also checks that path 0 is the identity and that every map is a
// bijection of the indices.
module tb_perm_in;
  import scal_pkg::*;
  localparam int unsigned L = 8, NB = 7, N = 128;
  logic clk = 0;
  llr_t [N-1:0] llr_i;
  llr_t [L-1:0][N-1:0] alpha_o;
  int checks = 0, failures = 0;
  int sig[L][N];

  perm_in dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit[N];
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < N; i++) hit[i] = 0;
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
        hit[r] = 1;
      end
      checks++;
      for (int i = 0; i < N; i++) if (!hit[i]) begin failures++; break; end
    end
    checks++;
    for (int i = 0; i < N; i++) if (sig[0][i] != i) begin failures++; break; end
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) llr_i[i] = llr_t'($urandom);   // full range incl. -32
      @(negedge clk);
      for (int l = 0; l < L; l++)
        for (int i = 0; i < N; i++) begin
          int e;
          e = int'(llr_i[sig[l][i]]);
          if (e < -31) e = -31;
          checks++;
          if (int'(alpha_o[l][i]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL path %0d index %0d: %0d expected %0d", l, i, alpha_o[l][i], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
