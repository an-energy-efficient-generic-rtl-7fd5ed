// blvos_mult -- accuracy-configurable block-level voltage-overscaled (BL-VOS)
// N x N unsigned multiplier, top level.
//
// The product is computed by blvos_core, a block-based multiplier split at
// bit K whose components are grouped, by the design-time parameter STRUCTURE
// (BL-VOS0..4), into an accurate region on the nominal supply and an
// approximate region on a lowered supply. At run time the supply of the
// approximate region is chosen through cfg_we/cfg_level: level 0 is the
// accurate (nominal) supply, levels 1..NUM_LEVELS the approximate supplies
// (blvos_pkg). blvos_vsel_ctrl registers the choice and drives the enables of
// the Voltage Selection Switch Box (blvos_switch_box, a behavioural model of
// the power switches), which reports the rail voltage it applies.
//
// Timing: operands are registered on a clock edge with in_valid; the product
// is sampled by the output flip-flops on the next edge, so out_valid/out_p
// follow in_valid/in_a/in_b by exactly two cycles, one product per cycle. The
// clock period is meant to be the delay of the exact multiplier at the nominal
// supply; under a lowered supply the overscaled paths may then miss the
// output flip-flops, which is the source of approximation. The output
// flip-flops follow the paper; the operand registers, the valid signals, the
// configuration port and the asynchronous active-low reset are choices of
// this implementation. In RTL simulation the product is always exact.
module blvos_mult
  import blvos_pkg::*;
#(
  parameter int unsigned N           = 8,
  parameter int unsigned K           = 4,
  parameter int unsigned STRUCTURE   = 1,
  parameter int unsigned NUM_LEVELS  = NUM_APPRX_LEVELS,
  parameter int unsigned LS_DELAY_PS = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // operands
  input  logic                  in_valid,
  input  logic [N-1:0]          in_a,
  input  logic [N-1:0]          in_b,
  // run-time accuracy setting: 0 accurate, i approximate level Li
  input  logic                  cfg_we,
  input  logic [2:0]            cfg_level,
  output logic                  cfg_err,
  output logic [2:0]            level,
  output logic                  approx_mode,
  // product
  output logic                  out_valid,
  output logic [2*N-1:0]        out_p,
  // supply of the approximate region, from the switch-box model
  output logic [9:0]            vdd_apprx_mv,
  output logic                  rail_fault
);
  timeunit 1ps; timeprecision 1ps;

  // ---------------- accuracy setting and supply selection -----------------
  logic                  en_accurate;
  logic [NUM_LEVELS-1:0] en_apprx;
  logic                  rail_short, rail_off;

  blvos_vsel_ctrl #(.NUM_LEVELS(NUM_LEVELS)) u_vsel (
    .clk, .rst_n, .cfg_we, .cfg_level,
    .level, .approx_mode, .en_accurate, .en_apprx, .cfg_err
  );

  blvos_switch_box #(.NUM_LEVELS(NUM_LEVELS)) u_switch_box (
    .en_accurate, .en_apprx,
    .vdd_rail_mv(vdd_apprx_mv), .rail_short, .rail_off
  );

  assign rail_fault = rail_short | rail_off;

  // ------------------------------ datapath --------------------------------
  logic           a_valid;
  logic [N-1:0]   a_q, b_q;
  logic [2*N-1:0] p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_q     <= '0;
      b_q     <= '0;
    end else begin
      a_valid <= in_valid;
      if (in_valid) begin
        a_q <= in_a;
        b_q <= in_b;
      end
    end
  end

  blvos_core #(
    .N(N), .K(K), .STRUCTURE(STRUCTURE), .LS_DELAY_PS(LS_DELAY_PS)
  ) u_core (
    .a(a_q), .b(b_q), .p(p)
  );

  // Output flip-flops that sample the multiplier.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_p     <= '0;
    end else begin
      out_valid <= a_valid;
      if (a_valid) out_p <= p;
    end
  end

  // The switch box must connect exactly one supply to the approximate rail.
  a_one_supply: assert property (@(posedge clk) disable iff (!rst_n) !rail_fault)
    else $error("blvos_mult: approximate rail shorted or floating");

endmodule
