// fpmulre_lane: one pipelined floating-point multiplier lane executing FPMUL
// or FPMULRE.
//
// FPMUL returns a * b rounded to nearest even. FPMULRE returns the round-off
// error of that product, a * b - FPMUL(a, b). The error is exact whenever it
// lies on or above the subnormal grid (always, unless the product is tiny);
// below it, it is itself rounded to nearest, which is what the usual
// two-instruction sequence FMA(a, b, -FPMUL(a, b)) returns. With this lane the
// two halves of an error-free multiplication are independent operations.
//
//   stage 0  input register (op, a, b)
//   stage 1  unpack, special-value detection, exact MAN_W+1 x MAN_W+1
//            significand product and the exponent of its LSB
//   stage 2  fp_round_pack on the product: rounded product and the
//            discarded remainder (minus the increment if rounded up)
//   stage 3  fp_round_pack on the remainder: packed error; opcode selects
// Result on res_o with valid_o LATENCY = 4 cycles after valid_i, one
// operation per cycle, no stall.
//
// Special values: a NaN operand or 0 * inf gives the quiet NaN for both
// operations; an infinite operand or an overflowing product gives the
// infinity for FPMUL and the quiet NaN for FPMULRE; a zero product has a
// +0 error. The instruction and its meaning follow the paper's proposal; the
// paper gives no circuit, so the datapath, latency (the FP multiply latency of
// two of the four processors it lists) and special-value rules are this
// design's choices.
module fpmulre_lane
  import fp_pkg::*;
#(
  parameter int unsigned EXP_W = DP_EXP_W,
  parameter int unsigned MAN_W = DP_MAN_W,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         valid_i,
  input  mul_op_e      op_i,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic         valid_o,
  output mul_op_e      op_o,
  output logic [W-1:0] res_o,
  output logic         inexact_o,
  output logic         round_up_o,
  output logic         overflow_o
);

  localparam int unsigned P    = MAN_W + 1;
  localparam int unsigned MW   = 2 * P;
  localparam int unsigned XW   = EXP_W + 3;
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;
  localparam logic [EXP_W-1:0] EXP_ONES = '1;
  localparam logic [W-1:0] QNAN = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};

  // ---------------- stage 0: input register -------------------------------
  logic         v0;
  mul_op_e      op0;
  logic [W-1:0] a0, b0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v0 <= 1'b0;
    else         v0 <= valid_i;
  end
  always_ff @(posedge clk_i) begin
    op0 <= op_i;
    a0  <= a_i;
    b0  <= b_i;
  end

  // ---------------- stage 1: significand product --------------------------
  logic             a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic             m_nan, m_inf, m_sign;
  logic [P-1:0]     ma, mb;
  logic signed [XW-1:0] m_lsb;

  always_comb begin
    a_nan  = (a0[W-2 -: EXP_W] == EXP_ONES) && (a0[MAN_W-1:0] != '0);
    b_nan  = (b0[W-2 -: EXP_W] == EXP_ONES) && (b0[MAN_W-1:0] != '0);
    a_inf  = (a0[W-2 -: EXP_W] == EXP_ONES) && (a0[MAN_W-1:0] == '0);
    b_inf  = (b0[W-2 -: EXP_W] == EXP_ONES) && (b0[MAN_W-1:0] == '0);
    a_zero = (a0[W-2:0] == '0);
    b_zero = (b0[W-2:0] == '0);
    m_nan  = a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero);
    m_inf  = !m_nan && (a_inf || b_inf);
    m_sign = a0[W-1] ^ b0[W-1];
    ma     = {a0[W-2 -: EXP_W] != '0, a0[MAN_W-1:0]};
    mb     = {b0[W-2 -: EXP_W] != '0, b0[MAN_W-1:0]};
    // Exponent of the product's LSB: (ea - BIAS - MAN_W) + (eb - BIAS - MAN_W),
    // with subnormals at exponent field 1.
    m_lsb  = XW'(signed'({1'b0, (a0[W-2 -: EXP_W] == '0) ? EXP_W'(1) : a0[W-2 -: EXP_W]}))
           + XW'(signed'({1'b0, (b0[W-2 -: EXP_W] == '0) ? EXP_W'(1) : b0[W-2 -: EXP_W]}))
           - XW'(2 * (BIAS + int'(MAN_W)));
  end

  logic                 v1, nan1, inf1, sign1;
  mul_op_e              op1;
  logic [MW-1:0]        prod1;
  logic signed [XW-1:0] lsb1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v1 <= 1'b0;
    else         v1 <= v0;
  end
  always_ff @(posedge clk_i) begin
    op1   <= op0;
    nan1  <= m_nan;
    inf1  <= m_inf;
    sign1 <= m_sign;
    prod1 <= MW'(ma) * MW'(mb);
    lsb1  <= m_lsb;
  end

  // ---------------- stage 2: round the product ----------------------------
  logic [W-1:0]  p_res;
  logic          p_inexact, p_up, p_ovf, p_esign;
  logic [MW-1:0] p_emag;

  fp_round_pack #(.EXP_W(EXP_W), .MAN_W(MAN_W), .MW(MW)) u_round_prod (
    .sign_i(sign1), .mag_i(prod1), .lsb_exp_i(lsb1),
    .res_o(p_res), .inexact_o(p_inexact), .round_up_o(p_up), .overflow_o(p_ovf),
    .err_sign_o(p_esign), .err_mag_o(p_emag)
  );

  logic                 v2, nan2, inf2, sign2, inexact2, up2, ovf2, esign2;
  mul_op_e              op2;
  logic [W-1:0]         prod_res2;
  logic [MW-1:0]        emag2;
  logic signed [XW-1:0] lsb2;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v2 <= 1'b0;
    else         v2 <= v1;
  end
  always_ff @(posedge clk_i) begin
    op2 <= op1;  nan2 <= nan1;  inf2 <= inf1;  sign2 <= sign1;
    prod_res2 <= p_res;  inexact2 <= p_inexact;  up2 <= p_up;  ovf2 <= p_ovf;
    esign2 <= p_esign;  emag2 <= p_emag;  lsb2 <= lsb1;
  end

  // ---------------- stage 3: pack the error, select -----------------------
  logic [W-1:0]  e_res;
  logic          e_inexact, e_up, e_ovf, e_esign;
  logic [MW-1:0] e_emag;
  logic [W-1:0]  prod_final, err_final;

  fp_round_pack #(.EXP_W(EXP_W), .MAN_W(MAN_W), .MW(MW)) u_round_err (
    .sign_i(esign2), .mag_i(emag2), .lsb_exp_i(lsb2),
    .res_o(e_res), .inexact_o(e_inexact), .round_up_o(e_up), .overflow_o(e_ovf),
    .err_sign_o(e_esign), .err_mag_o(e_emag)
  );

  always_comb begin
    if (nan2) begin
      prod_final = QNAN;
      err_final  = QNAN;
    end else if (inf2) begin
      prod_final = {sign2, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
      err_final  = QNAN;
    end else if (ovf2) begin
      prod_final = prod_res2;
      err_final  = QNAN;
    end else begin
      prod_final = prod_res2;
      err_final  = (e_res[W-2:0] == '0) ? '0 : e_res;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) valid_o <= 1'b0;
    else         valid_o <= v2;
  end
  always_ff @(posedge clk_i) begin
    op_o       <= op2;
    res_o      <= (op2 == OP_FPMULRE) ? err_final : prod_final;
    inexact_o  <= inexact2 && !nan2 && !inf2;
    round_up_o <= up2 && !nan2 && !inf2;
    overflow_o <= ovf2 && !nan2 && !inf2;
  end

endmodule
