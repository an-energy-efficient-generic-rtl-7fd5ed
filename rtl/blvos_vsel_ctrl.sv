// blvos_vsel_ctrl -- run-time accuracy setting of the BL-VOS multiplier.
//
// Holds the supply level requested for the approximate region and turns it
// into the one-hot enables of the Voltage Selection Switch Box: en_accurate
// for the accurate mode, en_apprx[i] for approximate level L(i+1). A request
// (cfg_we with cfg_level) is taken at the next clock edge; the enables change
// on that edge, so the mode can be switched between any two operations.
// Codes above the last level are rejected: the setting is kept and cfg_err
// pulses for one cycle. Reset selects the accurate level, so the multiplier
// starts exact. The register, the binary level code, the reset value and the
// rejection of bad codes are choices of this implementation; the paper only
// states that a higher-level unit drives the switch-box enables at run time.
module blvos_vsel_ctrl
  import blvos_pkg::*;
#(
  parameter int unsigned NUM_LEVELS = NUM_APPRX_LEVELS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [2:0]            cfg_level,   // 0: accurate, i: level Li
  output logic [2:0]            level,       // setting in force
  output logic                  approx_mode, // approximate region overscaled
  output logic                  en_accurate,
  output logic [NUM_LEVELS-1:0] en_apprx,
  output logic                  cfg_err
);
  timeunit 1ps; timeprecision 1ps;

  initial begin
    if (NUM_LEVELS < 1 || NUM_LEVELS > 7)
      $error("blvos_vsel_ctrl: NUM_LEVELS must be 1..7");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level   <= 3'(LVL_ACCURATE);
      cfg_err <= 1'b0;
    end else begin
      cfg_err <= 1'b0;
      if (cfg_we) begin
        if (32'(cfg_level) <= NUM_LEVELS) level <= cfg_level;
        else                              cfg_err <= 1'b1;
      end
    end
  end

  always_comb begin
    en_accurate = (level == 3'(LVL_ACCURATE));
    approx_mode = !en_accurate;
    for (int unsigned i = 0; i < NUM_LEVELS; i++) begin
      en_apprx[i] = (32'(level) == i + 1);
    end
  end

endmodule
