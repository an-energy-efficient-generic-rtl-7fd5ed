// tb_blvos_mult -- end-to-end test of the BL-VOS multiplier top at its
// default parameters (8 x 8 bits, split k = 4, structure BL-VOS1).
//
// The clock period is 110 ps, just above the 102.35 ps published for the
// exact 8-bit, k = 4 multiplier at the nominal supply. The test streams
// operands in phases; between phases it changes the run-time accuracy
// setting, visiting the accurate level and every approximate level L1..L5,
// writes rejected codes, and mixes back-to-back operands with idle cycles.
// A scoreboard checks every product (the RTL is exact in every mode), that
// each result appears exactly two cycles after its operands, that no result
// appears without operands, and that the rail voltage of the approximate
// region matches the selected level (0.80 V accurate, 0.75/0.65/0.55/0.45/
// 0.40 V for L1..L5). It counts how often each mechanism happened (switches
// into and out of accurate mode, each level used, rejected codes, idle
// cycles, back-to-back operands, extreme operands) and counts a failure for
// any that never did. A cycle watchdog ends a hung run.
module tb_blvos_mult;
  timeunit 1ps; timeprecision 1ps;
  import blvos_pkg::*;

  localparam int N = 8;
  localparam int CLK_HALF_PS = 55;

  int checks = 0, failures = 0;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic           in_valid = 1'b0;
  logic [N-1:0]   in_a = '0, in_b = '0;
  logic           cfg_we = 1'b0;
  logic [2:0]     cfg_level = '0;
  logic           cfg_err, approx_mode, out_valid, rail_fault;
  logic [2:0]     level;
  logic [2*N-1:0] out_p;
  logic [9:0]     vdd_apprx_mv;

  blvos_mult dut (
    .clk, .rst_n, .in_valid, .in_a, .in_b, .cfg_we, .cfg_level, .cfg_err,
    .level, .approx_mode, .out_valid, .out_p, .vdd_apprx_mv, .rail_fault
  );

  always #CLK_HALF_PS clk = ~clk;

  // mechanism counters
  int n_to_approx = 0, n_to_accurate = 0, n_rejected = 0;
  int n_idle = 0, n_b2b = 0, n_extreme = 0, n_results = 0;
  int n_level_used [6] = '{default: 0};

  // scoreboard: expected product and the cycle it is due
  typedef struct { longint p; longint due; } exp_t;
  exp_t   q [$];
  longint cycle = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s at cycle %0d: got %0d expected %0d", what, cycle, got, exp);
    end
  endtask

  // a mechanism that never happened counts as a failure
  task automatic need(int count, string what);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  function automatic int level_mv(int lv);
    return (lv == 0) ? int'(VDD_ACCURATE_MV) : int'(apprx_level_mv(lv));
  endfunction

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: sample just after each rising edge
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      cycle++;
      if (out_valid) begin
        n_results++;
        if (q.size() == 0) begin
          checks++; failures++;
          $display("FAIL unexpected result at cycle %0d", cycle);
        end else begin
          exp_t e;
          e = q.pop_front();
          check("product", longint'(out_p), e.p);
          check("latency (due cycle)", cycle, e.due);
        end
      end else if (q.size() != 0 && q[0].due == cycle) begin
        checks++; failures++;
        $display("FAIL missing result at cycle %0d", cycle);
      end
      if (!rail_fault) n_level_used[level]++;
      check("rail voltage", int'(vdd_apprx_mv), level_mv(int'(level)));
      check("rail fault", int'(rail_fault), 0);
    end
  end

  // expected product of operands driven now: issued at edge cycle+1,
  // result sampled at edge cycle+2
  task automatic push_exp(logic [N-1:0] a, logic [N-1:0] b);
    exp_t e;
    e.p   = longint'(a) * longint'(b);
    e.due = cycle + 2;
    q.push_back(e);
  endtask

  // drive one operand pair (or an idle cycle) for one clock
  task automatic drive(bit valid, logic [N-1:0] a, logic [N-1:0] b);
    @(negedge clk);
    in_valid = valid;
    in_a     = a;
    in_b     = b;
    if (valid) begin
      push_exp(a, b);
    end else begin
      n_idle++;
    end
  endtask

  task automatic set_level(int lv);
    int prev_lv;
    prev_lv = int'(level);
    @(negedge clk);
    in_valid  = 1'b0;
    cfg_we    = 1'b1;
    cfg_level = 3'(lv);
    @(negedge clk);
    cfg_we = 1'b0;
    if (lv <= 5) begin
      check("level taken", int'(level), lv);
      check("approx_mode", int'(approx_mode), int'(lv != 0));
      if (prev_lv == 0 && lv != 0) n_to_approx++;
      if (prev_lv != 0 && lv == 0) n_to_accurate++;
    end else begin
      check("level kept", int'(level), prev_lv);
      check("cfg_err", int'(cfg_err), 1);
      n_rejected++;
    end
  endtask

  task automatic phase(int ops);
    bit last_valid = 0;
    for (int i = 0; i < ops; i++) begin
      bit v;
      logic [N-1:0] a, b;
      v = ($urandom_range(0, 3) != 0);
      a = N'($urandom);
      b = N'($urandom);
      case ($urandom_range(0, 15))
        0: begin a = '1; b = '1; end
        1: begin a = '0; end
        2: begin a = '1; b = N'(1); end
        default: ;
      endcase
      if (v && (a == '1 || a == '0)) n_extreme++;
      if (v && last_valid) n_b2b++;
      drive(v, a, b);
      last_valid = v;
    end
  endtask

  initial begin
    int lv_seq [] = '{0, 1, 2, 0, 3, 4, 5, 6, 0, 5, 7, 1, 0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("reset level", int'(level), 0);
    phase(300);
    foreach (lv_seq[i]) begin
      set_level(lv_seq[i]);
      phase(300);
    end
    // switch on the fly: change the level while operands stream
    for (int i = 0; i < 20; i++) begin
      int lv, prev_lv;
      lv = $urandom_range(0, 5);
      prev_lv = int'(level);
      @(negedge clk);
      in_valid = 1'b1; in_a = N'($urandom); in_b = N'($urandom);
      cfg_we = 1'b1; cfg_level = 3'(lv);
      push_exp(in_a, in_b);
      @(negedge clk);
      cfg_we = 1'b0;
      in_valid = 1'b0;
      if (prev_lv == 0 && lv != 0) n_to_approx++;
      if (prev_lv != 0 && lv == 0) n_to_accurate++;
      phase(10);
    end
    drive(1'b0, '0, '0);
    drive(1'b0, '0, '0);
    repeat (4) @(posedge clk);
    #2;
    check("scoreboard empty", q.size(), 0);

    $display("mechanisms: to_approx=%0d to_accurate=%0d rejected=%0d idle=%0d b2b=%0d extreme=%0d results=%0d",
             n_to_approx, n_to_accurate, n_rejected, n_idle, n_b2b, n_extreme, n_results);
    for (int i = 0; i < 6; i++) begin
      $display("cycles at level %0d (%0d mV): %0d", i, level_mv(i), n_level_used[i]);
      need(n_level_used[i], $sformatf("level %0d", i));
    end
    need(n_to_approx,   "switch to approximate mode");
    need(n_to_accurate, "switch to accurate mode");
    need(n_rejected,    "rejected level code");
    need(n_idle,        "idle cycle");
    need(n_b2b,         "back-to-back operands");
    need(n_extreme,     "extreme operands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
