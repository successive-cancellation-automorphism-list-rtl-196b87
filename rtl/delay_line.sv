// delay_line -- fixed delay for a WIDTH-bit word, DEPTH clock cycles.
//
// In the unrolled decoder every node must hold the LLRs it received (for the
// g-function) and the left child's partial sums (for the h-combination) for
// exactly as many cycles as the child subtree takes; these delay-line
// memories make up a large share of the decoder.  Here a delay line is a
// circular buffer of DEPTH words: each cycle the word at the write pointer is
// read out (it was written DEPTH cycles ago) and overwritten by the new
// input.  DEPTH = 0 is a plain wire.  Only the pointer is reset; the stored
// words are unknown until DEPTH cycles after the first write, which the
// decoder's valid pipeline accounts for.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] d_o
);

  if (DEPTH == 0) begin : g_wire
    assign d_o = d_i;
  end else if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk) d_o <= d_i;
  end else begin : g_ring
    localparam int unsigned AW = $clog2(DEPTH);
    logic [WIDTH-1:0] mem [DEPTH];
    logic [AW-1:0]    ptr;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                     ptr <= '0;
      else if (ptr == AW'(DEPTH - 1)) ptr <= '0;
      else                            ptr <= ptr + 1'b1;
    end

    always_ff @(posedge clk) mem[ptr] <= d_i;

    assign d_o = mem[ptr];
  end

endmodule
