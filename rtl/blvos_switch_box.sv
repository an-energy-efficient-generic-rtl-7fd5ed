// blvos_switch_box -- behavioural model of the Voltage Selection Switch Box
// (a power-switch network, not synthesizable logic).
//
// The switch box holds one power switch per supply: one for the accurate
// (nominal, 0.8 V) supply and one for each of the NUM_LEVELS approximate
// supplies. Closing exactly one switch connects the supply rail of the
// approximate region to that voltage; closing the accurate switch turns the
// whole multiplier accurate on the fly. The model reports the resulting rail
// voltage in millivolts, plus two fault flags: rail_short when more than one
// switch is closed (two supplies tied together) and rail_off when none is
// (rail floating, reported as 0 mV). en_apprx[i] closes the switch of level
// L(i+1); levels and voltages come from blvos_pkg. Enables are active high
// here; switch polarity and sizing (fin count) are below this model.
// Combinational, no timing.
module blvos_switch_box
  import blvos_pkg::*;
#(
  parameter int unsigned NUM_LEVELS = NUM_APPRX_LEVELS
) (
  input  logic                  en_accurate,
  input  logic [NUM_LEVELS-1:0] en_apprx,
  output logic [9:0]            vdd_rail_mv,
  output logic                  rail_short,
  output logic                  rail_off
);
  timeunit 1ps; timeprecision 1ps;

  always_comb begin
    int unsigned n_on;
    vdd_rail_mv = '0;
    n_on        = 0;
    if (en_accurate) begin
      vdd_rail_mv = 10'(VDD_ACCURATE_MV);
      n_on++;
    end
    for (int unsigned i = 0; i < NUM_LEVELS; i++) begin
      if (en_apprx[i]) begin
        if (n_on == 0) vdd_rail_mv = 10'(apprx_level_mv(i + 1));
        n_on++;
      end
    end
    rail_short = (n_on > 1);
    rail_off   = (n_on == 0);
    if (n_on != 1) vdd_rail_mv = '0;
  end

endmodule
