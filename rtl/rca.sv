// rca: W-bit ripple-carry adder, {c_out, sum} = a + b + c_in.
//
// A chain of W full adders; bit k's carry feeds bit k+1. The source design
// uses it twice: as the multiplier's final adder, where W = 11 covers the
// product columns 5..15 that still hold two bits after the reduction tree,
// and as the 17-bit accumulator adder of the multiply-add unit. In both the
// LSB full adder receives a constant 0 carry in (the source kept a full
// adder there rather than a half adder). The worst-case path runs through
// all W carry stages. Combinational.
module rca #(
  parameter int unsigned W = 11
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         c_in,
  output logic [W-1:0] sum,
  output logic         c_out
);
  logic [W:0] carry;

  assign carry[0] = c_in;

  for (genvar k = 0; k < W; k++) begin : g_bit
    full_adder u_fa (
      .a   (a[k]),
      .b   (b[k]),
      .c_in(carry[k]),
      .s   (sum[k]),
      .c   (carry[k+1])
    );
  end

  assign c_out = carry[W];
endmodule
