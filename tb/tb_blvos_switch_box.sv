// tb_blvos_switch_box -- self-checking test of the switch-box model.
// Applies every pattern of the six enables (accurate + five levels) and
// checks the rail voltage against the published supply list (0.8 V accurate;
// 0.75, 0.65, 0.55, 0.45, 0.40 V) and the short/floating flags against the
// number of closed switches. A time watchdog ends a hung run.
module tb_blvos_switch_box;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic       en_accurate;
  logic [4:0] en_apprx;
  logic [9:0] vdd_rail_mv;
  logic       rail_short, rail_off;

  blvos_switch_box dut (.en_accurate, .en_apprx, .vdd_rail_mv, .rail_short, .rail_off);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s (acc=%0b apprx=%b): got %0d expected %0d",
               what, en_accurate, en_apprx, got, exp);
    end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mv [6] = '{800, 750, 650, 550, 450, 400};
    for (int i = 0; i < 64; i++) begin
      int n_on, exp_mv;
      {en_apprx, en_accurate} = 6'(i);
      #1;
      n_on = $countones(6'(i));
      exp_mv = 0;
      if (n_on == 1)
        for (int j = 0; j < 6; j++) if (i == (1 << j)) exp_mv = mv[j];
      check("rail mV", int'(vdd_rail_mv), exp_mv);
      check("short", int'(rail_short), int'(n_on > 1));
      check("off", int'(rail_off), int'(n_on == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
