// fp_sum: exact significand summation for FPADD/FPADDRE.
//
// This is the "summation" step of the shared datapath. It adds the two
// aligned significands (same signs) or subtracts the small one from the big
// one (different signs). Because fp_align orders the operands by magnitude and
// keeps every bit, the result is the exact, non-negative magnitude of a + b in
// units of the small operand's LSB; it always fits the WIN-bit window.
// A priority encoder then gives the position of the leading one, which the
// rounding stage uses to find the rounding point.
//
// Purely combinational. Interface: big_al_i/small_al_i/eff_sub_i in,
// sum_o (exact magnitude), lead_o (index of its most significant one, 0 when
// the sum is zero) and zero_o (exact cancellation) out.
module fp_sum #(
  parameter int unsigned MAN_W = 52,
  localparam int unsigned P    = MAN_W + 1,
  localparam int unsigned WIN  = 2 * P + 1,
  localparam int unsigned LW   = $clog2(WIN)
) (
  input  logic [WIN-1:0] big_al_i,
  input  logic [WIN-1:0] small_al_i,
  input  logic           eff_sub_i,
  output logic [WIN-1:0] sum_o,
  output logic [LW-1:0]  lead_o,
  output logic           zero_o
);

  always_comb begin
    sum_o  = eff_sub_i ? (big_al_i - small_al_i) : (big_al_i + small_al_i);
    zero_o = (sum_o == '0);
    lead_o = '0;
    for (int i = 0; i < WIN; i++) begin
      if (sum_o[i]) lead_o = LW'(i);
    end
  end

endmodule
