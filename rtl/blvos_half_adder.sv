// blvos_half_adder -- half adder that combines the carry outputs of the two
// n-bit adders of the multiplier. Both carries have weight 2^(n+k); their
// 2-bit sum {c, s} enters the 2(n-k)-bit adder at bit position n-k.
// Combinational: s = a xor b, c = a and b.
module blvos_half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);
  timeunit 1ps; timeprecision 1ps;

  assign s = a ^ b;
  assign c = a & b;

endmodule
