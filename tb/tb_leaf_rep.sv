// tb_leaf_rep -- checks the repetition / information leaf with L = 4 and
// NV = 1 and 4 (two instances).  The reference builds the 2L candidates
// (path l with all-0 and all-1 partial sums), adds the disagreeing LLR
// magnitudes to the PM (saturating at 255), and keeps the L smallest by a
// stable selection sort.  Outputs are compared one clock after the inputs.
module tb_leaf_rep;
  import scal_pkg::*;
  localparam int unsigned L = 4, LW = 2;
  logic clk = 0;
  llr_t [L-1:0][0:0] a1;
  llr_t [L-1:0][3:0] a4;
  pm_t [L-1:0] pm_i;
  logic [L-1:0][0:0] b1;
  logic [L-1:0][3:0] b4;
  pm_t [L-1:0] pm1, pm4;
  logic [L-1:0][LW-1:0] p1, p4;
  int checks = 0, failures = 0;

  leaf_rep #(.L(L), .NV(1)) dut1 (.clk, .alpha_i(a1), .pm_i, .beta_o(b1), .pm_o(pm1), .perm_o(p1));
  leaf_rep #(.L(L), .NV(4)) dut4 (.clk, .alpha_i(a4), .pm_i, .beta_o(b4), .pm_o(pm4), .perm_o(p4));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected survivors for one instance
  task automatic reference(input int nv, input int alpha[L][4], output int e_pm[L],
                           output int e_perm[L], output int e_bit[L]);
    int cpm[2*L];
    bit used[2*L];
    for (int l = 0; l < L; l++) begin
      cpm[2*l] = pm_i[l];
      cpm[2*l+1] = pm_i[l];
      for (int i = 0; i < nv; i++) begin
        if (alpha[l][i] < 0) cpm[2*l] -= alpha[l][i];
        else                 cpm[2*l+1] += alpha[l][i];
      end
      if (cpm[2*l] > 255) cpm[2*l] = 255;
      if (cpm[2*l+1] > 255) cpm[2*l+1] = 255;
    end
    for (int c = 0; c < 2 * L; c++) used[c] = 0;
    for (int k = 0; k < L; k++) begin
      int b;
      b = -1;
      for (int c = 0; c < 2 * L; c++)
        if (!used[c] && (b < 0 || cpm[c] < cpm[b])) b = c;
      used[b] = 1;
      e_pm[k] = cpm[b];
      e_perm[k] = b / 2;
      e_bit[k] = b % 2;
    end
  endtask

  initial begin
    int al1[L][4], al4[L][4];
    int e_pm[L], e_perm[L], e_bit[L];
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        pm_i[l] = (t % 5 == 0) ? pm_t'($urandom_range(255, 230)) : pm_t'($urandom_range(20, 0));
        for (int i = 0; i < 4; i++) begin
          al1[l][i] = 0;
          al4[l][i] = $urandom_range(20, 0) - 10;
          a4[l][i] = llr_t'(al4[l][i]);
        end
        al1[l][0] = $urandom_range(62, 0) - 31;
        a1[l][0] = llr_t'(al1[l][0]);
      end
      @(negedge clk);
      reference(1, al1, e_pm, e_perm, e_bit);
      for (int k = 0; k < L; k++) begin
        checks++;
        if (int'(pm1[k]) != e_pm[k] || int'(p1[k]) != e_perm[k] || int'(b1[k][0]) != e_bit[k]) begin
          failures++;
          if (failures < 10) $display("FAIL NV=1 t=%0d slot %0d: pm %0d/%0d perm %0d/%0d bit %0d/%0d",
                                      t, k, pm1[k], e_pm[k], p1[k], e_perm[k], b1[k], e_bit[k]);
        end
      end
      reference(4, al4, e_pm, e_perm, e_bit);
      for (int k = 0; k < L; k++) begin
        checks++;
        if (int'(pm4[k]) != e_pm[k] || int'(p4[k]) != e_perm[k] || b4[k] != (e_bit[k] ? 4'hf : 4'h0)) begin
          failures++;
          if (failures < 10) $display("FAIL NV=4 t=%0d slot %0d", t, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
