// wallace_stage: one reduction layer of the Wallace tree (S1..S4 for N = 8).
//
// The stage receives the bit matrix as rows of 2N columns; a row is zero
// outside the column range that wallace_pkg computes for it. Rows are taken
// top-down in groups of three. In each group and column:
//   three bits -> full adder: sum to the group's sum row in this column,
//                 carry to the group's carry row one column to the left;
//   two bits   -> half adder, same placement;
//   one bit    -> copied to the sum row;
//   no bits    -> nothing.
// Group g thus yields output rows 2g (sum) and 2g+1 (carry). Rows that do not
// fill a group of three are copied, in order, after them. The column sum
// sum_r(row_r * 1) is preserved exactly. With STAGE = 0..3 and N = 8 the
// stage uses 12 FA + 4 HA, 13 FA + 3 HA, 6 FA + 4 HA and 7 FA + 4 HA. The
// grouping rule and the row counts (8 -> 6 -> 4 -> 3 -> 2) follow the source
// design; its gate table lists 8 full adders for S3 where this rule, and the
// design's own total of 38 full adders, give 6. Combinational, one full-adder
// delay per stage.
module wallace_stage #(
  parameter int unsigned N     = 8,
  parameter int unsigned STAGE = 0
) (
  input  logic [wallace_pkg::rows_at(N, STAGE)-1:0][2*N-1:0]   rows_in,
  output logic [wallace_pkg::rows_at(N, STAGE+1)-1:0][2*N-1:0] rows_out
);
  import wallace_pkg::*;

  localparam int RI = rows_at(N, STAGE);
  localparam int NG = RI / 3;        // full groups of three rows
  localparam int NP = RI - 3 * NG;   // rows passed through unchanged

  if (RI < 3) begin : g_bad_stage
    $error("wallace_stage: stage %0d has fewer than three rows", STAGE);
  end

  // Sum and carry rows of each group; one spare column for a carry that
  // would leave the 2N-bit product (checked below never to be occupied).
  logic [NG-1:0][2*N:0] sum_row;
  logic [NG-1:0][2*N:0] carry_row;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    assign carry_row[g][0] = 1'b0;
    assign sum_row[g][2*N] = 1'b0;

    for (genvar c = 0; c < 2 * N; c++) begin : g_col
      localparam int H0 = occupies(N, STAGE, 3*g,   c);
      localparam int H1 = occupies(N, STAGE, 3*g+1, c);
      localparam int H2 = occupies(N, STAGE, 3*g+2, c);
      localparam int H  = H0 + H1 + H2;

      if (H == 3) begin : g_fa
        full_adder u_fa (
          .a   (rows_in[3*g][c]),
          .b   (rows_in[3*g+1][c]),
          .c_in(rows_in[3*g+2][c]),
          .s   (sum_row[g][c]),
          .c   (carry_row[g][c+1])
        );
      end else if (H == 2) begin : g_ha
        localparam int X = (H0 == 1) ? 3*g   : 3*g+1;
        localparam int Y = (H2 == 1) ? 3*g+2 : 3*g+1;
        half_adder u_ha (
          .a(rows_in[X][c]),
          .b(rows_in[Y][c]),
          .s(sum_row[g][c]),
          .c(carry_row[g][c+1])
        );
      end else if (H == 1) begin : g_wire
        localparam int X = (H0 == 1) ? 3*g : (H1 == 1) ? 3*g+1 : 3*g+2;
        assign sum_row[g][c]     = rows_in[X][c];
        assign carry_row[g][c+1] = 1'b0;
      end else begin : g_empty
        assign sum_row[g][c]     = 1'b0;
        assign carry_row[g][c+1] = 1'b0;
      end
    end

    if (row_edge(N, STAGE + 1, 2*g + 1, 1'b1) > 2 * N - 1) begin : g_bad_carry
      $error("wallace_stage: a carry leaves the %0d-bit product", 2 * N);
    end

    assign rows_out[2*g]   = sum_row[g][2*N-1:0];
    assign rows_out[2*g+1] = carry_row[g][2*N-1:0];
  end

  for (genvar k = 0; k < NP; k++) begin : g_pass
    assign rows_out[2*NG + k] = rows_in[3*NG + k];
  end
endmodule
