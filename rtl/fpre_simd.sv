// fpre_simd: SIMD floating-point execution unit with round-off-error
// instructions: FPADD/FPADDRE on an add port, FPMUL/FPMULRE on a multiply
// port.
//
// Each port is LANES identical lanes working on packed vectors of binary64
// values, as a processor's vector ADD and MUL ports would: one opcode per
// instruction, applied to every lane; one instruction per port per cycle;
// results LATENCY = 4 cycles later; no stalls. An error-free addition of two
// vectors is FPADD(a, b) and FPADDRE(a, b), two independent instructions that
// can issue back to back; likewise FPMUL/FPMULRE for an error-free product.
//
// Add port:  add_valid_i / add_op_i / add_a_i / add_b_i  ->
//            add_valid_o / add_op_o / add_res_o, per-lane flags add_inexact_o
//            (the round-off error is nonzero), add_round_up_o (the sum was
//            rounded away from the exact value), add_carry_o (that rounding
//            renormalised the sum) and add_overflow_o.
// Mul port:  the same with mul_ names (no carry flag).
//
// The add lanes (fpaddre_lane) carry the paper's proposed FPADDRE
// instruction; the multiply lanes (fpmulre_lane) carry the FPMULRE
// instruction it suggests as a follow-on. The default of four lanes is the
// double-precision SIMD width of three of the four processors the paper
// evaluates (the fourth has eight). Vector packaging, a shared opcode per
// instruction and separate add and multiply ports are this design's choices.
module fpre_simd
  import fp_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned EXP_W = DP_EXP_W,
  parameter int unsigned MAN_W = DP_MAN_W,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // add port
  input  logic                    add_valid_i,
  input  add_op_e                 add_op_i,
  input  logic [LANES-1:0][W-1:0] add_a_i,
  input  logic [LANES-1:0][W-1:0] add_b_i,
  output logic                    add_valid_o,
  output add_op_e                 add_op_o,
  output logic [LANES-1:0][W-1:0] add_res_o,
  output logic [LANES-1:0]        add_inexact_o,
  output logic [LANES-1:0]        add_round_up_o,
  output logic [LANES-1:0]        add_carry_o,
  output logic [LANES-1:0]        add_overflow_o,
  // multiply port
  input  logic                    mul_valid_i,
  input  mul_op_e                 mul_op_i,
  input  logic [LANES-1:0][W-1:0] mul_a_i,
  input  logic [LANES-1:0][W-1:0] mul_b_i,
  output logic                    mul_valid_o,
  output mul_op_e                 mul_op_o,
  output logic [LANES-1:0][W-1:0] mul_res_o,
  output logic [LANES-1:0]        mul_inexact_o,
  output logic [LANES-1:0]        mul_round_up_o,
  output logic [LANES-1:0]        mul_overflow_o
);

  logic    [LANES-1:0] add_lane_valid, mul_lane_valid;
  add_op_e [LANES-1:0] add_lane_op;
  mul_op_e [LANES-1:0] mul_lane_op;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fpaddre_lane #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_add (
      .clk_i, .rst_ni, .valid_i(add_valid_i), .op_i(add_op_i),
      .a_i(add_a_i[l]), .b_i(add_b_i[l]),
      .valid_o(add_lane_valid[l]), .op_o(add_lane_op[l]), .res_o(add_res_o[l]),
      .inexact_o(add_inexact_o[l]), .round_up_o(add_round_up_o[l]),
      .carry_o(add_carry_o[l]), .overflow_o(add_overflow_o[l])
    );
    fpmulre_lane #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_mul (
      .clk_i, .rst_ni, .valid_i(mul_valid_i), .op_i(mul_op_i),
      .a_i(mul_a_i[l]), .b_i(mul_b_i[l]),
      .valid_o(mul_lane_valid[l]), .op_o(mul_lane_op[l]), .res_o(mul_res_o[l]),
      .inexact_o(mul_inexact_o[l]), .round_up_o(mul_round_up_o[l]),
      .overflow_o(mul_overflow_o[l])
    );
  end

  // All lanes of a port run in lock step; lane 0 speaks for the vector.
  assign add_valid_o = add_lane_valid[0];
  assign add_op_o    = add_lane_op[0];
  assign mul_valid_o = mul_lane_valid[0];
  assign mul_op_o    = mul_lane_op[0];

  // The lanes of a port share their control and must never disagree.
  lanes_in_step_a: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (add_lane_valid == {LANES{add_lane_valid[0]}}) &&
    (mul_lane_valid == {LANES{mul_lane_valid[0]}}));

endmodule
