// blvos_submult -- unsigned WA x WB sub-block multiplier.
//
// One of the four sub-blocks (AL*BL, AH*BL, AL*BH, AH*BH) of the block-based
// multiplier. The architecture of a sub-block is left open (Dadda, Wallace or
// any other multiplier may be used); this implementation is the simplest
// choice, an array multiplier that adds the WB shifted partial-product rows
// a & {WA{b[i]}}. Purely combinational: p = a * b, WA+WB bits wide, no
// truncation.
module blvos_submult #(
  parameter int unsigned WA = 4,
  parameter int unsigned WB = 4
) (
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [WA+WB-1:0] p
);
  timeunit 1ps; timeprecision 1ps;

  always_comb begin
    logic [WA+WB-1:0] acc;
    acc = '0;
    for (int unsigned i = 0; i < WB; i++) begin
      if (b[i]) acc = acc + ((WA+WB)'(a) << i);
    end
    p = acc;
  end

endmodule
