// tb_blvos_ls_count -- checks where blvos_core places level shifters.
// For every structure BL-VOS0..4 and each published split (n = 8 with
// k = 2, 4, 6; n = 16 with k = 4, 8, 12) it compares the number of
// level-shifted bits of the elaborated datapath (LS_BITS) with the published
// counts 2k, 2k+n, 2k+n+1 for BL-VOS1..3 and none for BL-VOS0 and BL-VOS4,
// and, for n = 8, k = 4, with the literal values 8, 16 and 17. It then
// applies a few operands to each instance and checks the product, so that
// the instances are exercised. A time watchdog ends a hung run.
module tb_blvos_ls_count;
  timeunit 1ps; timeprecision 1ps;
  import blvos_pkg::*;

  localparam int NS [6] = '{8, 8, 8, 16, 16, 16};
  localparam int KS [6] = '{2, 4, 6, 4, 8, 12};

  int checks = 0, failures = 0;
  int ls_bits [6][5];

  logic [15:0] a, b;
  logic [31:0] p [6][5];

  for (genvar g = 0; g < 6; g++) begin : g_cfg
    for (genvar s = 0; s < 5; s++) begin : g_struct
      blvos_core #(.N(NS[g]), .K(KS[g]), .STRUCTURE(s)) u_core (
        .a(a[NS[g]-1:0]), .b(b[NS[g]-1:0]), .p(p[g][s][2*NS[g]-1:0])
      );
      if (NS[g] < 16) begin : g_pad
        assign p[g][s][31:2*NS[g]] = '0;
      end
      initial ls_bits[g][s] = u_core.LS_BITS;
    end
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
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
    #1;
    for (int g = 0; g < 6; g++)
      for (int s = 0; s < 5; s++)
        check($sformatf("level-shifted bits n=%0d k=%0d BL-VOS%0d", NS[g], KS[g], s),
              ls_bits[g][s], paper_ls_count(NS[g], KS[g], s));
    check("8/4 BL-VOS1 literal", ls_bits[1][1], 8);
    check("8/4 BL-VOS2 literal", ls_bits[1][2], 16);
    check("8/4 BL-VOS3 literal", ls_bits[1][3], 17);
    for (int i = 0; i < 200; i++) begin
      a = 16'($urandom); b = 16'($urandom);
      #100;
      for (int g = 0; g < 6; g++)
        for (int s = 0; s < 5; s++) begin
          longint am, bm;
          am = longint'(a) & ((64'd1 << NS[g]) - 1);
          bm = longint'(b) & ((64'd1 << NS[g]) - 1);
          check("product", longint'(p[g][s]), am * bm);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
