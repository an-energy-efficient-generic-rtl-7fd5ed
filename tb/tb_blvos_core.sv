// tb_blvos_core -- self-checking test of the BL-VOS datapath.
// Eleven instances cover every structure BL-VOS0..4 at n = 8, k = 4, the
// other published 8-bit splits k = 2 and k = 6, and the 16-bit splits
// k = 4, 8 and 12. 8-bit instances are checked exhaustively (all 65,536
// operand pairs), 16-bit ones on random operands plus corner values; the
// reference is a * b with 64-bit integers. Inputs are held 100 ps so that the
// 10 ps level shifters settle. The level-shifter counts are checked by
// tb_blvos_ls_count. A time watchdog ends a hung run.
module tb_blvos_core;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;

  logic [7:0]  a8, b8;
  logic [15:0] a16, b16;
  logic [15:0] p8 [7];
  logic [31:0] p16 [4];

  // 8-bit instances: structures 0..4 at k = 4, structure 3 at k = 2, 6
  blvos_core #(.N(8), .K(4), .STRUCTURE(0)) u8_k4_s0 (.a(a8), .b(b8), .p(p8[0]));
  blvos_core #(.N(8), .K(4), .STRUCTURE(1)) u8_k4_s1 (.a(a8), .b(b8), .p(p8[1]));
  blvos_core #(.N(8), .K(4), .STRUCTURE(2)) u8_k4_s2 (.a(a8), .b(b8), .p(p8[2]));
  blvos_core #(.N(8), .K(4), .STRUCTURE(3)) u8_k4_s3 (.a(a8), .b(b8), .p(p8[3]));
  blvos_core #(.N(8), .K(4), .STRUCTURE(4)) u8_k4_s4 (.a(a8), .b(b8), .p(p8[4]));
  blvos_core #(.N(8), .K(2), .STRUCTURE(3)) u8_k2_s3 (.a(a8), .b(b8), .p(p8[5]));
  blvos_core #(.N(8), .K(6), .STRUCTURE(2)) u8_k6_s2 (.a(a8), .b(b8), .p(p8[6]));
  // 16-bit instances
  blvos_core #(.N(16), .K(4),  .STRUCTURE(1)) u16_k4_s1  (.a(a16), .b(b16), .p(p16[0]));
  blvos_core #(.N(16), .K(8),  .STRUCTURE(3)) u16_k8_s3  (.a(a16), .b(b16), .p(p16[1]));
  blvos_core #(.N(16), .K(12), .STRUCTURE(2)) u16_k12_s2 (.a(a16), .b(b16), .p(p16[2]));
  blvos_core #(.N(16), .K(8),  .STRUCTURE(4)) u16_k8_s4  (.a(a16), .b(b16), .p(p16[3]));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      {a8, b8} = 16'(i);
      #100;
      for (int j = 0; j < 7; j++)
        check($sformatf("8-bit inst %0d a=%0d b=%0d", j, a8, b8), p8[j],
              longint'(a8) * longint'(b8));
    end
    for (int i = 0; i < 20000; i++) begin
      a16 = 16'($urandom); b16 = 16'($urandom);
      if (i == 0) begin a16 = '1; b16 = '1; end
      if (i == 1) begin a16 = '1; b16 = 16'd1; end
      if (i == 2) begin a16 = 16'h8000; b16 = 16'hffff; end
      #100;
      for (int j = 0; j < 4; j++)
        check($sformatf("16-bit inst %0d a=%0d b=%0d", j, a16, b16), p16[j],
              longint'(a16) * longint'(b16));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
