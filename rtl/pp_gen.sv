// pp_gen: partial-product generator, an N x N array of AND gates.
//
// pp[i][j] = b[i] & a[j]: row i is the multiplicand a gated by bit i of the
// multiplier b. The rows are returned unshifted; the reduction tree places
// row i at columns i .. i+N-1 by wiring. For the default N = 8 this is the
// source design's 64-gate AND array. Operands are unsigned. Combinational,
// one gate level.
module pp_gen #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]          a,
  input  logic [N-1:0]          b,
  output logic [N-1:0][N-1:0]   pp
);
  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      assign pp[i][j] = b[i] & a[j];
    end
  end
endmodule
