// wallace_mac: combinational multiply-add, s = a * b + c.
//
// The N x N Wallace multiplier forms the product; a C_W-bit ripple-carry
// adder (the accumulator adder) adds the zero-extended product to c. The
// result is one bit wider than c, so it never overflows: for the defaults
// (N = 8, C_W = 17, matching the source's c<16:0>, s<17:0> and its 17
// full-adder accumulator) the largest result is 255*255 + 131071 = 196096,
// below 2^18. The product is also brought out on prod.
//
// As in the source design there is no register: s is not fed back into c,
// so "C <- A x B + C" takes an external register. Everything is
// combinational: s settles one multiplier delay plus C_W carry stages after
// the inputs change.
module wallace_mac #(
  parameter int unsigned N   = 8,
  parameter int unsigned C_W = 17
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic [C_W-1:0] c,
  output logic [2*N-1:0] prod,
  output logic [C_W:0]   s
);
  if (C_W < 2 * N) begin : g_bad_width
    $error("wallace_mac: C_W must be at least 2*N");
  end

  logic [2*N-1:0] p_prod;
  logic [C_W-1:0] p_prod_ext;

  wallace_multiplier #(.N(N)) u_mult (
    .a   (a),
    .b   (b),
    .prod(p_prod)
  );

  assign p_prod_ext = C_W'(p_prod);

  rca #(.W(C_W)) u_accumulator (
    .a    (p_prod_ext),
    .b    (c),
    .c_in (1'b0),
    .sum  (s[C_W-1:0]),
    .c_out(s[C_W])
  );

  assign prod = p_prod;
endmodule
