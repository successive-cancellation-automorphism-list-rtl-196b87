// tb_delay_line -- checks delay lines of depth 0, 1, 2, 5 and 7: a new
// random word enters every cycle and each output must equal the word that
// entered exactly DEPTH cycles earlier (from the moment the line is full).
module tb_delay_line;
  localparam int unsigned W = 12;
  localparam int NDEP = 5;
  localparam int DEP[NDEP] = '{0, 1, 2, 5, 7};
  logic clk = 0, rst_n = 0;
  logic [W-1:0] d;
  logic [NDEP-1:0][W-1:0] q;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NDEP; g++) begin : g_dut
    delay_line #(.WIDTH(W), .DEPTH(DEP[g])) dut (.clk, .rst_n, .d_i(d), .d_o(q[g]));
  end
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] hist[$];
    d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      d = W'($urandom);
      hist.push_front(d);      // hist[k] = word applied k cycles ago
      #1;
      for (int g = 0; g < NDEP; g++) begin
        if (t >= DEP[g]) begin
          checks++;
          if (q[g] != hist[DEP[g]]) begin
            failures++;
            if (failures < 10) $display("FAIL depth %0d t=%0d: %h vs %h", DEP[g], t, q[g], hist[DEP[g]]);
          end
        end
      end
      if (hist.size() > 10) void'(hist.pop_back());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
