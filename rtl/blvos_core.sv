// blvos_core -- combinational datapath of the block-level voltage-overscaled
// (BL-VOS) N x N unsigned multiplier.
//
// Operands are split asymmetrically at bit K (0 < K < N):
//   AH = a[N-1:K], AL = a[K-1:0], BH = b[N-1:K], BL = b[K-1:0].
// Four sub-multipliers form AL*BL (2K bits), AH*BL and AL*BH (N bits each,
// weight 2^K) and AH*BH (2(N-K) bits, weight 2^2K). They are combined as
//   Adder1 (N bits): s1, c1 = AL*BH + AH*BL
//   Adder2 (N bits): s2, c2 = s1 + (AL*BL)[2K-1:K]
//   HA             : {hc, hs} = c1 + c2                  (weight 2^(N+K))
//   2(N-K)-bit add : s3 = AH*BH + {hc, hs, s2[N-1:K]}
//   p = {s3, s2[K-1:0], (AL*BL)[K-1:0]}.
// The HA result lands at bit N-K of the last adder, just above s2[N-1:K], so
// that adder has two operands. Its carry out is always 0 for an exact result
// (the product fits in 2N bits) and is dropped.
//
// STRUCTURE (0..4) selects which components form the approximate region, the
// part fed from the overscaled supply (blvos_pkg::apprx_region). A level
// shifter bank (blvos_level_shifter) is placed on every signal that crosses
// from that region into a component of the accurate region, or into the
// product output while any accurate region remains. This yields 2K, 2K+N and
// 2K+N+1 shifted bits for BL-VOS1..3 and none for BL-VOS0 and BL-VOS4, the
// published counts; LS_BITS gives the number. The dataflow, the split at K,
// the structure table and the level-shifter placement follow the paper; the
// operand ordering inside each adder, the sub-multiplier and adder
// architectures and the level-shifter delay model are choices of this
// implementation.
//
// Logic function: p = a * b exactly, in every structure. Timing errors caused
// by the lowered supply arise only in a characterised gate-level netlist and
// are not part of this RTL. Delay: combinational, plus DELAY_PS of each level
// shifter on a path.
module blvos_core
  import blvos_pkg::*;
#(
  parameter int unsigned N           = 8,
  parameter int unsigned K           = 4,
  parameter int unsigned STRUCTURE   = 1,
  parameter int unsigned LS_DELAY_PS = 10
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  timeunit 1ps; timeprecision 1ps;

  localparam int unsigned   NH = N - K;          // width of the high parts
  localparam int unsigned   W3 = 2 * NH;         // width of the last adder
  localparam region_t       R  = apprx_region(STRUCTURE);
  // The product output is in the low-voltage domain only when every
  // component is overscaled (BL-VOS4).
  localparam bit            OUT_APPRX = (R == '1);

  // Level shifters needed on each crossing (source approximate, sink accurate).
  localparam bit LS_LL_OUT  = R.ll   && !OUT_APPRX;
  localparam bit LS_LL_ADD2 = R.ll   && !R.add2;
  localparam bit LS_HL_ADD1 = R.hl   && !R.add1;
  localparam bit LS_LH_ADD1 = R.lh   && !R.add1;
  localparam bit LS_S1_ADD2 = R.add1 && !R.add2;
  localparam bit LS_C1_HA   = R.add1 && !R.ha;
  localparam bit LS_S2_OUT  = R.add2 && !OUT_APPRX;
  localparam bit LS_S2_ADD3 = R.add2 && !R.add3;
  localparam bit LS_C2_HA   = R.add2 && !R.ha;
  localparam bit LS_HH_ADD3 = R.hh   && !R.add3;
  localparam bit LS_HA_ADD3 = R.ha   && !R.add3;
  localparam bit LS_S3_OUT  = R.add3 && !OUT_APPRX;

  localparam int unsigned LS_BITS =
      (LS_LL_OUT  ? K  : 0) + (LS_LL_ADD2 ? K  : 0) +
      (LS_HL_ADD1 ? N  : 0) + (LS_LH_ADD1 ? N  : 0) +
      (LS_S1_ADD2 ? N  : 0) + (LS_C1_HA   ? 1  : 0) +
      (LS_S2_OUT  ? K  : 0) + (LS_S2_ADD3 ? NH : 0) +
      (LS_C2_HA   ? 1  : 0) + (LS_HH_ADD3 ? W3 : 0) +
      (LS_HA_ADD3 ? 2  : 0) + (LS_S3_OUT  ? W3 : 0);

  if (K < 1 || K >= N) begin : g_bad_k
    $error("blvos_core: K must satisfy 0 < K < N");
  end
  if (STRUCTURE > 4) begin : g_bad_structure
    $error("blvos_core: STRUCTURE must be 0..4");
  end

  // A signal crossing from one supply region to another: through a level
  // shifter bank when NEED is set, a plain wire otherwise.
`define BLVOS_XING(NAME, NEED, W, SRC, DST)                                   \
  if (NEED) begin : g_ls_``NAME                                                \
    blvos_level_shifter #(.WIDTH(W), .DELAY_PS(LS_DELAY_PS)) u_ls (            \
      .d_in(SRC), .d_out(DST));                                                \
  end else begin : g_w_``NAME                                                  \
    assign DST = SRC;                                                          \
  end

  // Operand parts.
  logic [K-1:0]  al, bl;
  logic [NH-1:0] ah, bh;
  assign al = a[K-1:0];
  assign ah = a[N-1:K];
  assign bl = b[K-1:0];
  assign bh = b[N-1:K];

  // Sub-block products, in the domain of their producer.
  logic [2*K-1:0] pll;
  logic [N-1:0]   phl, plh;
  logic [W3-1:0]  phh;

  blvos_submult #(.WA(K),  .WB(K))  u_ll (.a(al), .b(bl), .p(pll));
  blvos_submult #(.WA(NH), .WB(K))  u_hl (.a(ah), .b(bl), .p(phl));
  blvos_submult #(.WA(K),  .WB(NH)) u_lh (.a(al), .b(bh), .p(plh));
  blvos_submult #(.WA(NH), .WB(NH)) u_hh (.a(ah), .b(bh), .p(phh));

  // Values as seen at their sinks (after a level shifter where needed).
  logic [K-1:0]  pll_lo_o, pll_hi_a2;
  logic [N-1:0]  phl_a1, plh_a1;
  logic [N-1:0]  s1, s1_a2;
  logic          c1, c1_ha;
  logic [N-1:0]  s2;
  logic [K-1:0]  s2_lo_o;
  logic [NH-1:0] s2_hi_a3;
  logic          c2, c2_ha;
  logic          hs, hc;
  logic [1:0]    ha_a3;
  logic [W3-1:0] phh_a3;
  logic [W3-1:0] s3, s3_o;
  logic          c3;   // always 0 for an exact product; not used

  `BLVOS_XING(ll_out,  LS_LL_OUT,  K,  pll[K-1:0],   pll_lo_o)
  `BLVOS_XING(ll_add2, LS_LL_ADD2, K,  pll[2*K-1:K], pll_hi_a2)
  `BLVOS_XING(hl_add1, LS_HL_ADD1, N,  phl,          phl_a1)
  `BLVOS_XING(lh_add1, LS_LH_ADD1, N,  plh,          plh_a1)

  blvos_adder #(.W(N)) u_add1 (.a(plh_a1), .b(phl_a1), .sum(s1), .cout(c1));

  `BLVOS_XING(s1_add2, LS_S1_ADD2, N,  s1,           s1_a2)
  `BLVOS_XING(c1_ha,   LS_C1_HA,   1,  c1,           c1_ha)

  blvos_adder #(.W(N)) u_add2 (.a(s1_a2), .b(N'(pll_hi_a2)), .sum(s2), .cout(c2));

  `BLVOS_XING(s2_out,  LS_S2_OUT,  K,  s2[K-1:0],    s2_lo_o)
  `BLVOS_XING(s2_add3, LS_S2_ADD3, NH, s2[N-1:K],    s2_hi_a3)
  `BLVOS_XING(c2_ha,   LS_C2_HA,   1,  c2,           c2_ha)

  blvos_half_adder u_ha (.a(c1_ha), .b(c2_ha), .s(hs), .c(hc));

  `BLVOS_XING(ha_add3, LS_HA_ADD3, 2,  ({hc, hs}),   ha_a3)
  `BLVOS_XING(hh_add3, LS_HH_ADD3, W3, phh,          phh_a3)

  blvos_adder #(.W(W3)) u_add3 (
    .a   (phh_a3),
    .b   (W3'({ha_a3, s2_hi_a3})),
    .sum (s3),
    .cout(c3)
  );

  `BLVOS_XING(s3_out,  LS_S3_OUT,  W3, s3,           s3_o)

`undef BLVOS_XING

  assign p = {s3_o, s2_lo_o, pll_lo_o};

endmodule
