// wallace_tree: the complete reduction tree of an N x N multiplier.
//
// The N x N partial products are first placed as N rows of a 2N-column
// matrix, row i shifted left by i columns (pure wiring). wallace_stage
// instances then reduce the row count stage by stage until two rows are
// left: for N = 8 four stages, 8 -> 6 -> 4 -> 3 -> 2 rows, with 38 full
// adders and 15 half adders in all. The two rows leave as reduce_out_a (the
// sum row, occupying columns 0..2N-2) and reduce_out_b (the carry row; for
// N = 8 it occupies columns 5..15). Their sum equals a * b. Combinational;
// depth num_stages(N) full adders.
module wallace_tree #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0][N-1:0] pp,
  output logic [2*N-1:0]      reduce_out_a,
  output logic [2*N-1:0]      reduce_out_b
);
  import wallace_pkg::*;

  localparam int NS = num_stages(N);

  if (N < 2) begin : g_bad_n
    $error("wallace_tree: N must be at least 2");
  end

  // Matrix entering each stage; rows beyond the stage's row count are zero.
  logic [NS:0][N-1:0][2*N-1:0] mat;

  for (genvar i = 0; i < N; i++) begin : g_align
    for (genvar c = 0; c < 2 * N; c++) begin : g_col
      if (c >= i && c < i + N) begin : g_bit
        assign mat[0][i][c] = pp[i][c-i];
      end else begin : g_zero
        assign mat[0][i][c] = 1'b0;
      end
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    localparam int RI = rows_at(N, s);
    localparam int RO = rows_at(N, s + 1);
    wallace_stage #(.N(N), .STAGE(s)) u_stage (
      .rows_in (mat[s][RI-1:0]),
      .rows_out(mat[s+1][RO-1:0])
    );
    if (RO < N) begin : g_unused_rows
      assign mat[s+1][N-1:RO] = '0;
    end
  end

  assign reduce_out_a = mat[NS][0];
  assign reduce_out_b = mat[NS][1];
endmodule
