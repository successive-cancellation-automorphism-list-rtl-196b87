// tb_sort_select -- checks sort_select (L = 8, 16 candidates) against a
// stable selection sort done here: slot k must hold the k-th smallest PM,
// ties resolved to the lower candidate index.  PMs are drawn from a small
// range so that ties are frequent, plus some full-range vectors.
module tb_sort_select;
  import scal_pkg::*;
  localparam int unsigned L = 8;
  localparam int unsigned C = 2 * L;
  localparam int unsigned CW = $clog2(C);

  pm_t [C-1:0] pm_i;
  logic [L-1:0][CW-1:0] sel_o;
  pm_t [L-1:0] pm_o;
  int checks = 0, failures = 0;

  sort_select #(.L(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx[C];
    bit used[C];
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < C; c++)
        pm_i[c] = (t % 2) ? pm_t'($urandom) : pm_t'($urandom_range(5, 0));
      #1;
      for (int c = 0; c < C; c++) used[c] = 0;
      for (int k = 0; k < L; k++) begin
        int b;
        b = -1;
        for (int c = 0; c < C; c++)
          if (!used[c] && (b < 0 || pm_i[c] < pm_i[b])) b = c;
        used[b] = 1;
        idx[k] = b;
        checks++;
        if (int'(sel_o[k]) != b || pm_o[k] != pm_i[b]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d slot %0d: got %0d/%0d, expected %0d/%0d",
                                      t, k, sel_o[k], pm_o[k], b, pm_i[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
