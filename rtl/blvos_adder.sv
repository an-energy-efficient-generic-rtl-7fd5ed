// blvos_adder -- unsigned W-bit two-operand adder with carry out.
//
// Used three times in the multiplier: n-bit Adder1 (AL*BH + AH*BL), n-bit
// Adder2 (Adder1 sum + upper half of AL*BL) and the 2(n-k)-bit adder that
// forms the most significant product bits. The adder type is not fixed by the
// design; a plain carry-propagate addition is used. Combinational:
// {cout, sum} = a + b.
module blvos_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] sum,
  output logic         cout
);
  timeunit 1ps; timeprecision 1ps;

  assign {cout, sum} = {1'b0, a} + {1'b0, b};

endmodule
