// tb_blvos_adder -- self-checking test of the W-bit adder with carry out.
// Exhaustive for W = 8, random plus corner cases for W = 12; the reference
// sum is computed with 64-bit integers. A time watchdog ends a hung run.
module tb_blvos_adder;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [7:0]  a8, b8, s8;    logic c8;
  logic [11:0] a12, b12, s12; logic c12;

  blvos_adder #(.W(8))  u8  (.a(a8),  .b(b8),  .sum(s8),  .cout(c8));
  blvos_adder #(.W(12)) u12 (.a(a12), .b(b12), .sum(s12), .cout(c12));

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
    for (int i = 0; i < 65536; i++) begin
      {a8, b8} = 16'(i);
      #1;
      check("w8", {c8, s8}, longint'(a8) + longint'(b8));
    end
    for (int i = 0; i < 3000; i++) begin
      a12 = 12'($urandom); b12 = 12'($urandom);
      if (i == 0) begin a12 = '1; b12 = '1; end
      if (i == 1) begin a12 = '1; b12 = 12'd1; end
      #1;
      check("w12", {c12, s12}, longint'(a12) + longint'(b12));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
