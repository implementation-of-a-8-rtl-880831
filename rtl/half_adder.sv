// half_adder: adds two bits.
//
// s = a xor b, c = a and b. This is the non-inverted half adder the source
// design uses in its reduction stages: one XOR gate for the sum and one AND
// gate for the carry. (The source builds the XOR from transmission gates, a
// transistor-level choice with no effect on the logic.) Purely
// combinational; no clock, no reset.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  assign s = a ^ b;
  assign c = a & b;
endmodule
