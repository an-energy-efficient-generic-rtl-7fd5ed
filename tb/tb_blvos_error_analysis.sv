// tb_blvos_error_analysis -- error-analysis workload of the BL-VOS
// multiplier.
//
// Reproduces the shape of the published accuracy study: every structure
// BL-VOS1..4 (and the exact BL-VOS0) for the 8-bit splits k = 2, 4, 6 and
// the 16-bit splits k = 4, 8, 12, that is 30 multiplier instances, run on
// uniform random operands at the accurate level and at each approximate
// level L1..L5. 8-bit instances see 10,000 operand pairs per level, 16-bit
// instances N16_PER_LEVEL pairs per level. For every instance the testbench
// accumulates the error rate ER, mean error distance MED, mean relative error
// distance MRED (over non-zero exact products) and normalised MED (NMED, MED
// divided by the largest product (2^n - 1)^2) and prints them. In RTL
// simulation voltage overscaling causes no timing errors, so every product
// must be exact: each product is a check and every metric must be 0. Error
// figures of a real overscaled circuit need a gate-level simulation with
// delays characterised at each supply. A cycle watchdog ends a hung run.
module tb_blvos_error_analysis;
  timeunit 1ps; timeprecision 1ps;

  localparam int N16_PER_LEVEL = 1_000_000;
  localparam int N8_PER_LEVEL  = 10_000;
  localparam int K8  [3] = '{2, 4, 6};
  localparam int K16 [3] = '{4, 8, 12};

  int checks = 0, failures = 0;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        v8 = 1'b0, v16 = 1'b0;
  logic [7:0]  a8 = '0, b8 = '0;
  logic [15:0] a16 = '0, b16 = '0;
  logic        cfg_we = 1'b0;
  logic [2:0]  cfg_level = '0;

  logic [15:0] p8  [3][5];
  logic [31:0] p16 [3][5];
  logic        ov8 [3][5];
  logic        ov16[3][5];

  for (genvar g = 0; g < 3; g++) begin : g_cfg
    for (genvar s = 0; s < 5; s++) begin : g_struct
      blvos_mult #(.N(8), .K(K8[g]), .STRUCTURE(s)) u8 (
        .clk, .rst_n, .in_valid(v8), .in_a(a8), .in_b(b8), .cfg_we, .cfg_level,
        .cfg_err(), .level(), .approx_mode(), .out_valid(ov8[g][s]),
        .out_p(p8[g][s]), .vdd_apprx_mv(), .rail_fault()
      );
      blvos_mult #(.N(16), .K(K16[g]), .STRUCTURE(s)) u16 (
        .clk, .rst_n, .in_valid(v16), .in_a(a16), .in_b(b16), .cfg_we, .cfg_level,
        .cfg_err(), .level(), .approx_mode(), .out_valid(ov16[g][s]),
        .out_p(p16[g][s]), .vdd_apprx_mv(), .rail_fault()
      );
    end
  end

  always #50 clk = ~clk;

  // exact products in flight (2-cycle latency)
  longint exp8 [$], exp16 [$];

  // per-instance statistics: [width 0=8,1=16][k index][structure]
  longint n_out  [2][3][5];
  longint n_err  [2][3][5];
  real    sum_ed [2][3][5];
  real    sum_red[2][3][5];
  longint n_red  [2][3][5];

  task automatic account(int w, int g, int s, longint got, longint exact);
    longint ed;
    ed = (got > exact) ? got - exact : exact - got;
    n_out[w][g][s]++;
    checks++;
    if (ed != 0) begin
      n_err[w][g][s]++;
      failures++;
      if (failures < 20)
        $display("FAIL n=%0d k=%0d BL-VOS%0d: got %0d expected %0d",
                 (w == 0) ? 8 : 16, (w == 0) ? K8[g] : K16[g], s, got, exact);
    end
    sum_ed[w][g][s] += real'(ed);
    if (exact != 0) begin
      sum_red[w][g][s] += real'(ed) / real'(exact);
      n_red[w][g][s]++;
    end
  endtask

  always @(posedge clk) begin
    #1;
    if (ov8[0][0]) begin
      longint e;
      e = exp8.pop_front();
      for (int g = 0; g < 3; g++)
        for (int s = 0; s < 5; s++) account(0, g, s, longint'(p8[g][s]), e);
    end
    if (ov16[0][0]) begin
      longint e;
      e = exp16.pop_front();
      for (int g = 0; g < 3; g++)
        for (int s = 0; s < 5; s++) account(1, g, s, longint'(p16[g][s]), e);
    end
  end

  initial begin
    repeat (8 * N16_PER_LEVEL + 10_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int lv = 0; lv <= 5; lv++) begin
      @(negedge clk);
      v8 = 1'b0; v16 = 1'b0;
      cfg_we = 1'b1; cfg_level = 3'(lv);
      @(negedge clk);
      cfg_we = 1'b0;
      for (int i = 0; i < N16_PER_LEVEL; i++) begin
        v16 = 1'b1;
        a16 = 16'($urandom); b16 = 16'($urandom);
        exp16.push_back(longint'(a16) * longint'(b16));
        v8 = (i < N8_PER_LEVEL);
        if (v8) begin
          a8 = 8'($urandom); b8 = 8'($urandom);
          exp8.push_back(longint'(a8) * longint'(b8));
        end
        @(negedge clk);
      end
      v8 = 1'b0; v16 = 1'b0;
      repeat (4) @(negedge clk);
    end

    $display("structure   n  k  outputs      ER        MED        MRED       NMED");
    for (int w = 0; w < 2; w++)
      for (int g = 0; g < 3; g++)
        for (int s = 0; s < 5; s++) begin
          int  n;
          real d, med;
          n = (w == 0) ? 8 : 16;
          d = (2.0 ** n - 1.0) ** 2;
          med = sum_ed[w][g][s] / real'(n_out[w][g][s]);
          $display("BL-VOS%0d  %3d %2d %8d  %8.2e  %8.2e  %8.2e  %8.2e", s, n,
                   (w == 0) ? K8[g] : K16[g], n_out[w][g][s],
                   real'(n_err[w][g][s]) / real'(n_out[w][g][s]), med,
                   sum_red[w][g][s] / real'(n_red[w][g][s]), med / d);
          checks++;
          if (n_out[w][g][s] != ((w == 0) ? 6 * N8_PER_LEVEL : 6 * N16_PER_LEVEL)) begin
            failures++;
            $display("FAIL output count n=%0d BL-VOS%0d: %0d", n, s, n_out[w][g][s]);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
