// tb_blvos_half_adder -- self-checking test of the half adder: all four
// input pairs, reference {c, s} = a + b. A time watchdog ends a hung run.
module tb_blvos_half_adder;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic a, b, s, c;

  blvos_half_adder dut (.a, .b, .s, .c);

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < 4; i++) begin
        {a, b} = 2'(i);
        #1;
        checks++;
        if ({c, s} != 2'(int'(a) + int'(b))) begin
          failures++;
          $display("FAIL a=%0d b=%0d -> c=%0d s=%0d", a, b, c, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
