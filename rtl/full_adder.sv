// full_adder: adds three bits (two operands and a carry in).
//
// Built as in the source design from two half adders and an OR gate: the
// first half adder forms a_xor_b and the carry ca of a and b; the second
// adds c_in to a_xor_b, giving the sum s and a second carry cb; c = ca | cb.
// Equivalently s = a ^ b ^ c_in and c = (a & b) | ((a ^ b) & c_in). Purely
// combinational; the carry path c_in -> c passes one AND and one OR level.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic c_in,
  output logic s,
  output logic c
);
  logic a_xor_b, ca, cb;

  half_adder u_ha_ab  (.a(a),       .b(b),    .s(a_xor_b), .c(ca));
  half_adder u_ha_cin (.a(a_xor_b), .b(c_in), .s(s),       .c(cb));

  assign c = ca | cb;
endmodule
