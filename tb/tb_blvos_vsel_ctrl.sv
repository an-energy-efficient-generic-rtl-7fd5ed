// tb_blvos_vsel_ctrl -- self-checking test of the run-time accuracy setting.
// Checks the reset value (accurate), that every level code 0..5 written with
// cfg_we gives exactly the matching one-hot enable one cycle later, that a
// level is held without cfg_we, and that codes 6 and 7 are rejected with a
// one-cycle cfg_err while the setting is kept. A cycle watchdog ends a hung
// run.
module tb_blvos_vsel_ctrl;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       cfg_we = 1'b0;
  logic [2:0] cfg_level = '0;
  logic [2:0] level;
  logic       approx_mode, en_accurate, cfg_err;
  logic [4:0] en_apprx;

  blvos_vsel_ctrl dut (.clk, .rst_n, .cfg_we, .cfg_level, .level, .approx_mode,
                       .en_accurate, .en_apprx, .cfg_err);

  always #500 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s at %0t: got %0d expected %0d", what, $time, got, exp);
    end
  endtask

  task automatic expect_level(int lv);
    check("level", int'(level), lv);
    check("en_accurate", int'(en_accurate), int'(lv == 0));
    check("en_apprx", int'(en_apprx), (lv == 0) ? 0 : (1 << (lv - 1)));
    check("approx_mode", int'(approx_mode), int'(lv != 0));
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cur;
    #1;
    expect_level(0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_level(0);
    cur = 0;
    for (int i = 0; i < 60; i++) begin
      int code;
      code = (i < 8) ? ((i * 5) % 8) : int'($urandom_range(0, 7));
      cfg_we = 1'b1;
      cfg_level = 3'(code);
      @(posedge clk); #1;
      cfg_we = 1'b0;
      if (code <= 5) cur = code;
      expect_level(cur);
      check("cfg_err", int'(cfg_err), int'(code > 5));
      cfg_level = 3'($urandom);       // ignored without cfg_we
      @(posedge clk); #1;
      expect_level(cur);
      check("cfg_err clear", int'(cfg_err), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
