// blvos_pkg -- shared types and constants of the block-level voltage-overscaled
// (BL-VOS) multiplier.
//
// The multiplier is split into eight components: four sub-multipliers
// (AL*BL, AH*BL, AL*BH, AH*BH), two n-bit adders, one 2(n-k)-bit adder and a
// half adder. A "structure" (BL-VOS0 .. BL-VOS4) is a design-time choice of
// which components sit in the low-voltage (approximate) supply region. The
// membership table below reproduces the published structure table; BL-VOS2
// overscales AH*BL rather than AL*BH (the two have equal weight, so either is
// allowed). The supply of that region is chosen at run time from the accurate
// level or one of five approximate levels.
//
// Level numbering follows the order in which the approximate voltages are
// listed when the sensitivity of the error metrics is defined: L1 = 0.75 V,
// L2 = 0.65 V, L3 = 0.55 V, L4 = 0.45 V, L5 = 0.40 V. The accurate (nominal)
// level is 0.80 V. Both the numbering and the binary level code are choices of
// this implementation.
package blvos_pkg;
  timeunit 1ps; timeprecision 1ps;

  // Number of approximate supply levels (five discrete levels).
  localparam int unsigned NUM_APPRX_LEVELS = 5;

  // Nominal supply and the approximate supplies, in millivolts.
  localparam int unsigned VDD_ACCURATE_MV = 800;

  // Run-time supply selection of the approximate region.
  typedef enum logic [2:0] {
    LVL_ACCURATE = 3'd0,
    LVL_L1       = 3'd1,   // 0.75 V
    LVL_L2       = 3'd2,   // 0.65 V
    LVL_L3       = 3'd3,   // 0.55 V
    LVL_L4       = 3'd4,   // 0.45 V
    LVL_L5       = 3'd5    // 0.40 V
  } vdd_level_e;

  // Supply voltage (mV) of approximate level i, i = 1 .. NUM_APPRX_LEVELS.
  function automatic int unsigned apprx_level_mv(int unsigned i);
    case (i)
      1:       return 750;
      2:       return 650;
      3:       return 550;
      4:       return 450;
      5:       return 400;
      default: return 0;
    endcase
  endfunction

  // Which components are in the approximate (overscaled) region.
  typedef struct packed {
    logic ll;    // AL x BL
    logic hl;    // AH x BL
    logic lh;    // AL x BH
    logic hh;    // AH x BH
    logic add1;  // n-bit Adder1
    logic add2;  // n-bit Adder2
    logic add3;  // 2(n-k)-bit Adder
    logic ha;    // half adder
  } region_t;

  // Approximate-region membership of structure BL-VOS<s>.
  function automatic region_t apprx_region(int unsigned s);
    region_t r;
    r = '0;
    case (s)
      1: r.ll = 1'b1;
      2: begin r.ll = 1'b1; r.hl = 1'b1; end
      3: begin r.ll = 1'b1; r.hl = 1'b1; r.lh = 1'b1; r.add1 = 1'b1; end
      4: r = '1;
      default: r = '0;
    endcase
    return r;
  endfunction

  // Published level-shifter count of structure s for an n x n multiplier
  // split at k: 2k, 2k+n, 2k+n+1 for BL-VOS1..3, none for BL-VOS0 and 4.
  function automatic int unsigned paper_ls_count(int unsigned n, int unsigned k,
                                                 int unsigned s);
    case (s)
      1:       return 2 * k;
      2:       return 2 * k + n;
      3:       return 2 * k + n + 1;
      default: return 0;
    endcase
  endfunction

endpackage
