// fp_align: operand unpacking and mantissa alignment for FPADD/FPADDRE.
//
// This is the "mantissa alignment" step of the shared add / add-round-off
// datapath. The two operands are ordered by magnitude (big >= small, compared
// as {exponent, fraction}), the hidden bit is restored (subnormals use
// exponent 1 and no hidden bit), and the big significand is shifted LEFT by
// the exponent difference d, so that both significands sit in one exact
// fixed-point window whose unit is the LSB of the small operand. Shifting the
// big operand up instead of the small one down keeps every bit: nothing is
// folded into a sticky bit, because FPADDRE needs the exact low bits.
//
// The window is WIN = 2*(MAN_W+1)+1 bits wide, enough for d <= MAN_W+2.
// For d > MAN_W+2 (the "far" case) the small operand is below half an ulp of
// the big one, so the rounded sum is the big operand and the round-off error
// is the small operand itself; the window is then left at zero and far_o set.
//
// Special operands: NaN on either input, or infinities of opposite sign,
// raise nan_o; any other infinity raises inf_o with its sign.
//
// Purely combinational. Ordering by magnitude, the left-shift window and the
// far-case shortcut are this design's choices; the paper shows only that the
// two significands are aligned before the sum.
module fp_align #(
  parameter int unsigned EXP_W = 11,
  parameter int unsigned MAN_W = 52,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned P    = MAN_W + 1,
  localparam int unsigned WIN  = 2 * P + 1
) (
  input  logic [W-1:0]     a_i,
  input  logic [W-1:0]     b_i,
  output logic             nan_o,       // result is NaN
  output logic             inf_o,       // result is an infinity (from an infinite input)
  output logic             inf_sign_o,
  output logic             far_o,       // small operand wholly below the rounding point
  output logic             eff_sub_o,   // operand signs differ: magnitudes are subtracted
  output logic             sign_big_o,  // sign of the larger-magnitude operand
  output logic             zero_sign_o, // sign of an exactly zero sum (round to nearest)
  output logic [EXP_W-1:0] eb_o,        // effective biased exponent of the small operand (>= 1)
  output logic [W-1:0]     big_o,       // larger-magnitude operand, as given
  output logic [W-1:0]     small_o,     // smaller-magnitude operand, as given
  output logic [WIN-1:0]   big_al_o,    // big significand << d (zero when far)
  output logic [WIN-1:0]   small_al_o   // small significand (zero when far)
);

  localparam logic [EXP_W-1:0] EXP_ONES = '1;

  logic             swap;
  logic [W-1:0]     bg, sml;
  logic [EXP_W-1:0] e_big, e_small;
  logic [P-1:0]     m_big, m_small;
  logic [EXP_W-1:0] d;
  logic             a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    a_nan = (a_i[W-2 -: EXP_W] == EXP_ONES) && (a_i[MAN_W-1:0] != '0);
    b_nan = (b_i[W-2 -: EXP_W] == EXP_ONES) && (b_i[MAN_W-1:0] != '0);
    a_inf = (a_i[W-2 -: EXP_W] == EXP_ONES) && (a_i[MAN_W-1:0] == '0);
    b_inf = (b_i[W-2 -: EXP_W] == EXP_ONES) && (b_i[MAN_W-1:0] == '0);

    nan_o      = a_nan || b_nan || (a_inf && b_inf && (a_i[W-1] != b_i[W-1]));
    inf_o      = !nan_o && (a_inf || b_inf);
    inf_sign_o = a_inf ? a_i[W-1] : b_i[W-1];

    // Order by magnitude: the exponent/fraction field compares as an integer.
    swap    = b_i[W-2:0] > a_i[W-2:0];
    bg     = swap ? b_i : a_i;
    sml   = swap ? a_i : b_i;

    // Effective exponents (subnormals and zero count as exponent 1) and
    // significands with the hidden bit restored.
    e_big   = (bg[W-2 -: EXP_W]   == '0) ? EXP_W'(1) : bg[W-2 -: EXP_W];
    e_small = (sml[W-2 -: EXP_W] == '0) ? EXP_W'(1) : sml[W-2 -: EXP_W];
    m_big   = {bg[W-2 -: EXP_W]   != '0, bg[MAN_W-1:0]};
    m_small = {sml[W-2 -: EXP_W] != '0, sml[MAN_W-1:0]};
    d       = e_big - e_small;

    far_o       = d > EXP_W'(MAN_W + 2);
    eff_sub_o   = a_i[W-1] != b_i[W-1];
    sign_big_o  = bg[W-1];
    zero_sign_o = a_i[W-1] & b_i[W-1];
    eb_o        = e_small;
    big_o       = bg;
    small_o     = sml;
    big_al_o    = far_o ? '0 : (WIN'(m_big) << d);
    small_al_o  = far_o ? '0 : WIN'(m_small);
  end

endmodule
