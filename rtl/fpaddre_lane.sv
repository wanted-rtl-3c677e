// fpaddre_lane: one pipelined floating-point adder lane executing FPADD or
// FPADDRE.
//
// FPADD returns the sum of a and b rounded to nearest even. FPADDRE returns
// the round-off error of that same sum, (a + b) - FPADD(a, b), which is exact
// and representable. With both, an error-free addition (sum, error) takes two
// independent instructions instead of the six dependent ones of Knuth's
// TwoSum.
//
// The two operations share one datapath; only the last step differs:
//   stage 0  input register (op, a, b)
//   stage 1  fp_align        unpack, order by magnitude, align significands
//   stage 2  fp_sum          exact sum and leading-one position
//   stage 3  fp_round_split  round; FPADD takes the rounded high bits,
//                            FPADDRE the low bits minus the rounding increment
// An operation presented with valid_i in cycle t has its result on res_o with
// valid_o in cycle t + LATENCY (LATENCY = 4, one register per stage). A new
// operation may start every cycle; there is no stall. The status flags of
// fp_round_split come out alongside the result.
//
// The paper asks only that FPADDRE have the latency and throughput of the
// floating-point add; 4 cycles is the FP add latency it lists for two of the
// four evaluated processors (3 and 5 for the others). The stage split, the
// valid signal and the reset (valid bits only) are this design's choices.
module fpaddre_lane
  import fp_pkg::*;
#(
  parameter int unsigned EXP_W = DP_EXP_W,
  parameter int unsigned MAN_W = DP_MAN_W,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned P    = MAN_W + 1,
  localparam int unsigned WIN  = 2 * P + 1,
  localparam int unsigned LW   = $clog2(WIN)
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         valid_i,
  input  add_op_e      op_i,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic         valid_o,
  output add_op_e      op_o,
  output logic [W-1:0] res_o,
  output logic         inexact_o,
  output logic         round_up_o,
  output logic         carry_o,
  output logic         overflow_o
);

  // ---------------- stage 0: input register -------------------------------
  logic         v0;
  add_op_e      op0;
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

  // ---------------- stage 1: alignment ------------------------------------
  logic             al_nan, al_inf, al_inf_sign, al_far, al_sub, al_sign, al_zsign;
  logic [EXP_W-1:0] al_eb;
  logic [W-1:0]     al_big, al_small;
  logic [WIN-1:0]   al_bigal, al_smallal;

  fp_align #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_align (
    .a_i(a0), .b_i(b0),
    .nan_o(al_nan), .inf_o(al_inf), .inf_sign_o(al_inf_sign), .far_o(al_far),
    .eff_sub_o(al_sub), .sign_big_o(al_sign), .zero_sign_o(al_zsign),
    .eb_o(al_eb), .big_o(al_big), .small_o(al_small),
    .big_al_o(al_bigal), .small_al_o(al_smallal)
  );

  logic             v1, nan1, inf1, inf_sign1, far1, sub1, sign1, zsign1;
  add_op_e          op1;
  logic [EXP_W-1:0] eb1;
  logic [W-1:0]     big1, small1;
  logic [WIN-1:0]   bigal1, smallal1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v1 <= 1'b0;
    else         v1 <= v0;
  end
  always_ff @(posedge clk_i) begin
    op1 <= op0;  nan1 <= al_nan;  inf1 <= al_inf;  inf_sign1 <= al_inf_sign;
    far1 <= al_far;  sub1 <= al_sub;  sign1 <= al_sign;  zsign1 <= al_zsign;
    eb1 <= al_eb;  big1 <= al_big;  small1 <= al_small;
    bigal1 <= al_bigal;  smallal1 <= al_smallal;
  end

  // ---------------- stage 2: summation ------------------------------------
  logic [WIN-1:0] s_sum;
  logic [LW-1:0]  s_lead;
  logic           s_zero;

  fp_sum #(.MAN_W(MAN_W)) u_sum (
    .big_al_i(bigal1), .small_al_i(smallal1), .eff_sub_i(sub1),
    .sum_o(s_sum), .lead_o(s_lead), .zero_o(s_zero)
  );

  logic             v2, nan2, inf2, inf_sign2, far2, sign2, zsign2, zero2;
  add_op_e          op2;
  logic [EXP_W-1:0] eb2;
  logic [W-1:0]     big2, small2;
  logic [WIN-1:0]   sum2;
  logic [LW-1:0]    lead2;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v2 <= 1'b0;
    else         v2 <= v1;
  end
  always_ff @(posedge clk_i) begin
    op2 <= op1;  nan2 <= nan1;  inf2 <= inf1;  inf_sign2 <= inf_sign1;
    far2 <= far1;  sign2 <= sign1;  zsign2 <= zsign1;  zero2 <= s_zero;
    eb2 <= eb1;  big2 <= big1;  small2 <= small1;
    sum2 <= s_sum;  lead2 <= s_lead;
  end

  // ---------------- stage 3: rounding and result selection ----------------
  logic [W-1:0] r_add, r_addre;
  logic         r_inexact, r_up, r_carry, r_ovf;

  fp_round_split #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_round (
    .sum_i(sum2), .lead_i(lead2), .zero_i(zero2), .eb_i(eb2),
    .sign_big_i(sign2), .zero_sign_i(zsign2), .far_i(far2),
    .big_i(big2), .small_i(small2),
    .nan_i(nan2), .inf_i(inf2), .inf_sign_i(inf_sign2),
    .fpadd_o(r_add), .fpaddre_o(r_addre),
    .inexact_o(r_inexact), .round_up_o(r_up), .carry_o(r_carry), .overflow_o(r_ovf)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) valid_o <= 1'b0;
    else         valid_o <= v2;
  end
  always_ff @(posedge clk_i) begin
    op_o       <= op2;
    res_o      <= (op2 == OP_FPADDRE) ? r_addre : r_add;
    inexact_o  <= r_inexact;
    round_up_o <= r_up;
    carry_o    <= r_carry;
    overflow_o <= r_ovf;
  end

endmodule
