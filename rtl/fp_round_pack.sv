// fp_round_pack: round a wide exact magnitude to the floating-point format
// and report the discarded part (used by the FPMUL/FPMULRE lane).
//
// Input: a sign, an exact unsigned magnitude mag_i and the unbiased binary
// exponent lsb_exp_i of its bit 0, so the value is (-1)^s * mag * 2^lsb_exp.
// The rounding point k is the larger of (leading-one index - MAN_W), which
// keeps MAN_W+1 significant bits, and (emin - MAN_W - lsb_exp), which stops at
// the subnormal grid; it is 0 when the value is already exact, in which case
// the magnitude is normalised left instead. Rounding is to nearest even.
//
// Outputs: res_o, the packed rounded value (infinity on overflow, signed zero
// for a zero magnitude), and the signed remainder value - res_o as err_sign_o
// and err_mag_o, in the same units as mag_i: the low k bits, minus 2^k when
// the value was rounded up. A second instance fed with err_mag_o therefore
// packs the round-off error, itself rounded only if it falls below the
// subnormal grid.
//
// Purely combinational. This circuit is this design's own generalisation of
// the adder's rounding stage; the paper only states that a multiply round-off
// instruction could share the multiplier's circuits.
module fp_round_pack #(
  parameter int unsigned EXP_W = 11,
  parameter int unsigned MAN_W = 52,
  parameter int unsigned MW    = 2 * (MAN_W + 1),
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned XW   = EXP_W + 3
) (
  input  logic                 sign_i,
  input  logic [MW-1:0]        mag_i,
  input  logic signed [XW-1:0] lsb_exp_i,
  output logic [W-1:0]         res_o,
  output logic                 inexact_o,
  output logic                 round_up_o,
  output logic                 overflow_o,
  output logic                 err_sign_o,
  output logic [MW-1:0]        err_mag_o
);

  localparam int unsigned P        = MAN_W + 1;
  localparam int          BIAS     = (1 << (EXP_W - 1)) - 1;
  localparam int          EMIN_LSB = 1 - BIAS - int'(MAN_W);
  localparam int          EFIELD_MAX = (1 << EXP_W) - 2;

  int          lead, k, u, shift, ef;
  logic [MW:0]   kept, rem, half;
  logic [MW-1:0] norm;
  logic [P:0]    rnd;
  logic [MAN_W:0] man;
  logic          up;

  always_comb begin
    u    = int'(lsb_exp_i);
    lead = 0;
    for (int i = 0; i < MW; i++) begin
      if (mag_i[i]) lead = i;
    end
    k = lead - int'(MAN_W);
    if (EMIN_LSB - u > k) k = EMIN_LSB - u;
    if (k < 0)            k = 0;
    // A value below half the grid step rounds to zero: any k past lead + 1
    // behaves the same, so stop there (the window is one bit wider for it).
    if (k > lead + 1)     k = lead + 2;

    kept = (MW+1)'(mag_i) >> k;
    rem  = (MW+1)'(mag_i) & (((MW+1)'(1) << k) - (MW+1)'(1));
    half = (k > 0) ? ((MW+1)'(1) << (k - 1)) : '0;
    up   = (k > 0) && ((rem > half) || ((rem == half) && kept[0]));
    rnd  = kept[P:0] + (P+1)'(up);

    shift = 0;
    norm  = '0;
    if (k > 0) begin
      if (rnd[P]) begin
        man = rnd[P:1];
        ef  = u + k + int'(MAN_W) + BIAS + 1;
      end else begin
        man = rnd[MAN_W:0];
        ef  = man[MAN_W] ? u + k + int'(MAN_W) + BIAS : 0;
      end
    end else begin
      shift = int'(MAN_W) - lead;
      if (shift > u - EMIN_LSB) shift = u - EMIN_LSB;
      norm = mag_i << shift;
      man  = norm[MAN_W:0];
      ef   = man[MAN_W] ? u - shift + int'(MAN_W) + BIAS : 0;
    end

    overflow_o = (mag_i != '0) && (ef > EFIELD_MAX);
    inexact_o  = (rem != '0);
    round_up_o = up;
    if (mag_i == '0)     res_o = {sign_i, {(W-1){1'b0}}};
    else if (overflow_o) res_o = {sign_i, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else                 res_o = {sign_i, ef[EXP_W-1:0], man[MAN_W-1:0]};

    err_sign_o = sign_i ^ up;
    err_mag_o  = MW'(up ? (((MW+1)'(1) << k) - rem) : rem);
  end

endmodule
