// tb_blvos_level_shifter -- self-checking test of the level-shifter model.
// Drives random words and checks that the output still holds the old value
// just before DELAY_PS and holds the new value just after it, for the
// default 10 ps and for an overridden 25 ps. A time watchdog ends a hung run.
module tb_blvos_level_shifter;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [7:0] d_in, d_out, d_out25;

  blvos_level_shifter #(.WIDTH(8))                dut   (.d_in, .d_out);
  blvos_level_shifter #(.WIDTH(8), .DELAY_PS(25)) dut25 (.d_in, .d_out(d_out25));

  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] prev, nxt;
    d_in = 8'h00;
    #100;
    prev = 8'h00;
    for (int i = 0; i < 50; i++) begin
      nxt = 8'($urandom);
      if (nxt == prev) nxt = ~prev;
      d_in = nxt;
      #9;  check("before 10 ps", d_out, prev);
      #2;  check("after 10 ps",  d_out, nxt);
      #13; check("before 25 ps", d_out25, prev);
      #2;  check("after 25 ps",  d_out25, nxt);
      #50;
      prev = nxt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
