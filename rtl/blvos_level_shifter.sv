// blvos_level_shifter -- behavioural model of a bank of WIDTH level shifters
// (not synthesizable logic: the real part is a transistor-level cell).
//
// A level shifter sits on every signal that leaves the low-voltage
// (approximate) region and drives a component of the accurate region; it
// restores the full 0.8 V swing. The cell used is a near-threshold design
// whose delay is about 10 ps for approximate supplies of 0.55 V to 0.75 V; the
// model reproduces only that: d_out follows d_in after DELAY_PS picoseconds
// (transport-like continuous-assignment delay). Supply pins are not modelled;
// logic levels are the same on both sides in a two-state simulation. The
// default delay is the published ~10 ps figure; below 0.55 V the real cell is
// slower, which this model does not capture.
module blvos_level_shifter #(
  parameter int unsigned WIDTH    = 1,
  parameter int unsigned DELAY_PS = 10
) (
  input  logic [WIDTH-1:0] d_in,
  output logic [WIDTH-1:0] d_out
);
  timeunit 1ps; timeprecision 1ps;

  assign #(DELAY_PS) d_out = d_in;

endmodule
