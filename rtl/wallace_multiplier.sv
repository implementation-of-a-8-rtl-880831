// wallace_multiplier: unsigned N x N combinational Wallace-tree multiplier.
//
// Three parts, as in the source design's top-level diagram:
//   1. pp_gen       - N x N AND gates form the partial products;
//   2. wallace_tree - full/half-adder stages reduce them to two rows,
//                     reduce_out_a and reduce_out_b;
//   3. final adder  - a ripple-carry adder (rca) adds the two rows over the
//                     columns where reduce_out_b is occupied (columns 5..15
//                     for N = 8, i.e. 11 full adders).
// The columns below that (0..4 for N = 8) already hold a single bit after
// the tree; they are concatenated with the adder's output to form the
// product. The adder's carry out can never be 1, because the largest
// product (2^N-1)^2 fits in 2N bits; an assertion checks this. For N = 8 the
// longest path is one AND, four full adders in the tree and eleven in the
// ripple adder.
//
// Ports follow the source's timing report: a (A<7:0>), b (B<7:0>) and
// prod (prod<15:0>). No clock or reset: a new product appears one
// combinational delay after the operands change. The enable shown in the
// source's simulation plots is not part of this RTL. Lint reports bits 0..4
// of reduce_out_b as unused: the tree leaves them constant 0, so the
// concatenation takes only reduce_out_a there.
module wallace_multiplier #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] prod
);
  import wallace_pkg::*;

  localparam int NS = num_stages(N);
  // First column of the carry row: the final adder starts here.
  localparam int LO = row_edge(N, NS, 1, 1'b1) >= 0 ? row_edge(N, NS, 1, 1'b0) : 2 * N - 1;
  localparam int W  = 2 * N - LO;   // final adder width (11 for N = 8)

  if (row_edge(N, NS, 0, 1'b0) != 0 || LO < 1 || max_column(N) > 2 * N - 1) begin : g_bad_shape
    $error("wallace_multiplier: unexpected reduction shape for N = %0d", N);
  end

  logic [N-1:0][N-1:0] p_prod;
  logic [2*N-1:0]      reduce_out_a, reduce_out_b;
  logic [W-1:0]        final_add_out;
  logic                final_carry;

  pp_gen #(.N(N)) u_pp_gen (
    .a (a),
    .b (b),
    .pp(p_prod)
  );

  wallace_tree #(.N(N)) u_tree (
    .pp          (p_prod),
    .reduce_out_a(reduce_out_a),
    .reduce_out_b(reduce_out_b)
  );

  rca #(.W(W)) u_final_adder (
    .a    (reduce_out_a[2*N-1:LO]),
    .b    (reduce_out_b[2*N-1:LO]),
    .c_in (1'b0),
    .sum  (final_add_out),
    .c_out(final_carry)
  );

  // Concatenation: adder result above, single-bit columns below.
  assign prod = {final_add_out, reduce_out_a[LO-1:0]};

  always_comb begin : p_msb_no_carry
    assert (final_carry == 1'b0)
      else $error("wallace_multiplier: final adder carried out of bit %0d", 2 * N - 1);
  end
endmodule
