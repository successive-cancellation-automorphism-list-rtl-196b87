// tb_path_reorder -- checks the message exchange for L = 8: output slot k
// must carry the word of input path perm[k], for random words and random
// (repeating) path indices.
module tb_path_reorder;
  localparam int unsigned L = 8, W = 10, LW = 3;
  logic [L-1:0][W-1:0] d_i, d_o;
  logic [L-1:0][LW-1:0] perm_i;
  int checks = 0, failures = 0;

  path_reorder #(.L(L), .WIDTH(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int l = 0; l < L; l++) begin
        d_i[l] = W'($urandom);
        perm_i[l] = LW'($urandom);
      end
      #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (d_o[k] != d_i[perm_i[k]]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d slot %0d", t, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
