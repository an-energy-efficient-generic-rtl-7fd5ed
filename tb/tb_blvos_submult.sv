// tb_blvos_submult -- self-checking test of the sub-block multiplier.
// Exhaustive over three shapes that occur in the multiplier (4x4, 6x2, 2x6),
// random over a 12x4 shape; the reference is the simulator's own product of
// the zero-extended operands. A time watchdog ends a hung run.
module tb_blvos_submult;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [3:0]  a44, b44;  logic [7:0]  p44;
  logic [5:0]  a62;       logic [1:0]  b62; logic [7:0] p62;
  logic [1:0]  a26;       logic [5:0]  b26; logic [7:0] p26;
  logic [11:0] a124;      logic [3:0]  b124; logic [15:0] p124;

  blvos_submult #(.WA(4),  .WB(4)) u44  (.a(a44),  .b(b44),  .p(p44));
  blvos_submult #(.WA(6),  .WB(2)) u62  (.a(a62),  .b(b62),  .p(p62));
  blvos_submult #(.WA(2),  .WB(6)) u26  (.a(a26),  .b(b26),  .p(p26));
  blvos_submult #(.WA(12), .WB(4)) u124 (.a(a124), .b(b124), .p(p124));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      {a44, b44} = 8'(i);
      a62 = 6'(i >> 2); b62 = 2'(i);
      a26 = 2'(i >> 6); b26 = 6'(i);
      #1;
      check("4x4", p44, longint'(a44) * longint'(b44));
      check("6x2", p62, longint'(a62) * longint'(b62));
      check("2x6", p26, longint'(a26) * longint'(b26));
    end
    for (int i = 0; i < 2000; i++) begin
      a124 = 12'($urandom); b124 = 4'($urandom);
      #1;
      check("12x4", p124, longint'(a124) * longint'(b124));
    end
    a124 = '1; b124 = '1; #1;
    check("12x4 max", p124, 4095 * 15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
