// fp_round_split: rounding, and the split into the FPADD and FPADDRE results.
//
// Input is the exact magnitude S of a + b (from fp_sum) in units of the small
// operand's LSB, 2^(eb - bias - MAN_W). The rounding point is k bits above
// the LSB, where k = lead - MAN_W when S has more than MAN_W+1 significant
// bits and 0 otherwise (then the sum is exact, possibly subnormal).
//
//   kept = S >> k                  the bits that reach the FPADD fraction
//   rem  = S mod 2^k               the bits FPADD throws away
//   up   = round-to-nearest-even increment (rem > half, or rem == half and
//          kept is odd)
//   FPADD   = (kept + up) * 2^k    renormalised if the increment carries out
//   FPADDRE = rem - up * 2^k       the discarded bits, minus the rounding
//                                  increment when FPADD rounded up; its sign
//                                  is then the opposite of the sum's
//
// So both results come from the same bits: FPADD copies the high bits and adds
// the rounding bit, FPADDRE copies the low bits and subtracts it. The error is
// always exactly representable (round-to-nearest addition), so it is packed by
// normalising its magnitude with one more leading-one search; it may come out
// subnormal. A zero error is +0.
//
// Far case (small operand below half an ulp): FPADD = big operand, FPADDRE =
// small operand. NaN inputs give the canonical quiet NaN for both results; an
// infinite or overflowing sum gives the infinity for FPADD and a quiet NaN for
// FPADDRE, as the software error-free transformation would.
//
// Purely combinational. Besides both results it reports inexact_o (the error
// is nonzero), round_up_o (FPADD rounded away from the exact sum), carry_o
// (that increment renormalised the sum) and overflow_o.
// The split itself follows the paper's schema of the two operations; the
// special-value conventions, the +0 error and the far-case shortcut are this
// design's choices.
module fp_round_split #(
  parameter int unsigned EXP_W = 11,
  parameter int unsigned MAN_W = 52,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned P    = MAN_W + 1,
  localparam int unsigned WIN  = 2 * P + 1,
  localparam int unsigned LW   = $clog2(WIN)
) (
  input  logic [WIN-1:0]   sum_i,
  input  logic [LW-1:0]    lead_i,
  input  logic             zero_i,
  input  logic [EXP_W-1:0] eb_i,
  input  logic             sign_big_i,
  input  logic             zero_sign_i,
  input  logic             far_i,
  input  logic [W-1:0]     big_i,
  input  logic [W-1:0]     small_i,
  input  logic             nan_i,
  input  logic             inf_i,
  input  logic             inf_sign_i,
  output logic [W-1:0]     fpadd_o,
  output logic [W-1:0]     fpaddre_o,
  output logic             inexact_o,
  output logic             round_up_o,
  output logic             carry_o,
  output logic             overflow_o
);

  localparam int          EMAX_BIASED = (1 << EXP_W) - 2;
  localparam logic [W-1:0] QNAN = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};

  int unsigned    k, shift, q, eb;
  int             rexp, eexp;
  logic [WIN-1:0] kept, rem, half, emag, norm, enorm;
  logic [P:0]     rnd;
  logic [MAN_W:0] rman, eman;
  logic           up, ovf;
  logic [W-1:0]   near_sum, near_err;

  always_comb begin
    eb = int'(eb_i);

    // ---- rounding point and the two halves of the exact sum -------------
    k    = (int'(lead_i) > int'(MAN_W)) ? int'(lead_i) - MAN_W : 0;
    kept = sum_i >> k;
    rem  = sum_i & ((WIN'(1) << k) - WIN'(1));
    half = (k > 0) ? (WIN'(1) << (k - 1)) : '0;
    up   = (k > 0) && ((rem > half) || ((rem == half) && kept[0]));

    // ---- FPADD: rounded sum ---------------------------------------------
    rnd   = kept[P:0] + (P+1)'(up);
    shift = 0;
    norm  = '0;
    if (k > 0) begin
      if (rnd[P]) begin
        rman = rnd[P:1];
        rexp = eb + int'(k) + 1;
      end else begin
        rman = rnd[MAN_W:0];
        rexp = eb + int'(k);
      end
    end else begin
      // Exact sum of at most MAN_W+1 bits: normalise left, stopping at the
      // subnormal boundary (exponent field 1 with no hidden bit -> field 0).
      shift = MAN_W - int'(lead_i);
      if (shift > eb - 1) shift = eb - 1;
      norm = sum_i << shift;
      rman = norm[MAN_W:0];
      rexp = rman[MAN_W] ? eb - int'(shift) : 0;
    end
    ovf = rexp > EMAX_BIASED;
    if (zero_i) near_sum = {zero_sign_i, {(W-1){1'b0}}};
    else        near_sum = {sign_big_i, rexp[EXP_W-1:0], rman[MAN_W-1:0]};

    // ---- FPADDRE: round-off error ---------------------------------------
    emag = up ? ((WIN'(1) << k) - rem) : rem;
    q    = 0;
    for (int i = 0; i < WIN; i++) begin
      if (emag[i]) q = i;
    end
    enorm = '0;
    if (q <= MAN_W) begin
      shift = MAN_W - q;
      if (shift > eb - 1) shift = eb - 1;
      enorm = emag << shift;
      eman  = enorm[MAN_W:0];
      eexp  = eman[MAN_W] ? eb - int'(shift) : 0;
    end else begin
      // Only reachable with trailing zeros: the error is representable.
      enorm = emag >> (q - MAN_W);
      eman  = enorm[MAN_W:0];
      eexp  = eb + int'(q - MAN_W);
    end
    if (emag == '0) near_err = '0;
    else            near_err = {sign_big_i ^ up, eexp[EXP_W-1:0], eman[MAN_W-1:0]};

    // ---- result selection -----------------------------------------------
    inexact_o  = 1'b0;
    round_up_o = 1'b0;
    carry_o    = 1'b0;
    overflow_o = 1'b0;
    if (nan_i) begin
      fpadd_o   = QNAN;
      fpaddre_o = QNAN;
    end else if (inf_i) begin
      fpadd_o   = {inf_sign_i, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
      fpaddre_o = QNAN;
    end else if (far_i) begin
      fpadd_o   = big_i;
      fpaddre_o = (small_i[W-2:0] == '0) ? '0 : small_i;
      inexact_o = (small_i[W-2:0] != '0);
    end else if (ovf) begin
      fpadd_o    = {sign_big_i, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
      fpaddre_o  = QNAN;
      overflow_o = 1'b1;
    end else begin
      fpadd_o    = near_sum;
      fpaddre_o  = near_err;
      inexact_o  = (rem != '0);
      round_up_o = up;
      carry_o    = up && rnd[P];
    end
  end

endmodule
